// tb_result_reporting_module -- self-checking test of the result reporting
// module: single basis states (with small rounding remnants elsewhere) give
// their index; superpositions, the zero vector and a single component of the
// wrong magnitude are flagged as having no single result.
module tb_result_reporting_module;
  import qsu_pkg::*;
  localparam int NQ = 7;
  localparam int NA = 1 << NQ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, eval, valid, single, ent;
  logic [NQ-1:0] index;
  cplx_t [NA-1:0] amp;

  result_reporting_module #(.NQ(NQ)) dut (.clk(clk), .rst_n(rst_n), .clear_i(clear),
    .eval_i(eval), .amp_i(amp), .valid_o(valid), .single_o(single),
    .entangled_o(ent), .index_o(index));

  task automatic run(bit exp_single, int exp_idx, string what);
    @(negedge clk); eval = 1;
    @(negedge clk); eval = 0;
    checks++;
    if (!valid || single != exp_single || ent == exp_single ||
        (exp_single && int'(index) != exp_idx)) begin
      failures++;
      $display("FAIL: %s (single %0d index %0d)", what, single, index);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; eval = 0; amp = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (valid) begin failures++; $display("FAIL: valid after reset"); end
    for (int t = 0; t < 40; t++) begin
      automatic int k = $urandom_range(0, NA - 1);
      for (int i = 0; i < NA; i++) amp[i] = cx($urandom_range(0, 20) - 10, $urandom_range(0, 20) - 10);
      case (t % 4)
        0: amp[k] = cx(65536, 0);
        1: amp[k] = cx(0, -65530);
        2: amp[k] = cx(-46341, 46341);
        default: amp[k] = cx(65500, 0);
      endcase
      run(1, k, $sformatf("basis state %0d", k));
    end
    for (int t = 0; t < 20; t++) begin
      automatic int k = $urandom_range(0, NA - 1);
      automatic int j = (k + $urandom_range(1, NA - 1)) % NA;
      amp = '0;
      amp[k] = cx(46341, 0);
      amp[j] = cx(0, 46341);
      run(0, 0, "two components");
    end
    amp = '0;
    run(0, 0, "zero vector");
    amp[5] = cx(32768, 0);
    run(0, 0, "single component of magnitude 0.5");
    amp[5] = cx(-66328, -6);        // |a|^2 = 1.024, inside the 1/16 window
    run(1, 5, "single component of magnitude 1.012");
    amp[5] = cx(0, 58982);          // |a|^2 = 0.81, outside it
    run(0, 0, "single component of magnitude 0.9");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (valid) begin failures++; $display("FAIL: valid after clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
