// tb_qsr -- self-checking test of the quantum state register: reset and
// clear to |0..0>, single-amplitude writes, whole-vector writes, priority
// of the whole-vector write, and the read port.
module tb_qsr;
  import qsu_pkg::*;
  localparam int NQ = 7;
  localparam int NA = 1 << NQ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, we_all, we_one;
  cplx_t [NA-1:0] din, amp;
  logic [NQ-1:0] idx, rd_idx;
  cplx_t d1, rd;

  qsr #(.NQ(NQ)) dut (.clk(clk), .rst_n(rst_n), .clear_i(clear), .we_all_i(we_all),
    .data_all_i(din), .we_one_i(we_one), .idx_i(idx), .data_one_i(d1),
    .rd_idx_i(rd_idx), .rd_data_o(rd), .amp_o(amp));

  cplx_t model [NA];

  task automatic compare(string what);
    automatic bit ok = 1;
    for (int i = 0; i < NA; i++) if (amp[i] !== model[i]) ok = 0;
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic set_zero_state();
    for (int i = 0; i < NA; i++) model[i] = '0;
    model[0] = cx(65536, 0);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; we_all = 0; we_one = 0; din = '0; idx = 0; d1 = '0; rd_idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    set_zero_state();
    @(negedge clk); compare("reset state is |0>");
    for (int t = 0; t < 200; t++) begin
      automatic int r = $urandom_range(0, 9);
      @(negedge clk);
      clear = (r == 0); we_all = (r == 1 || r == 2); we_one = (r >= 2);
      for (int i = 0; i < NA; i++) din[i] = cx($urandom_range(0, 70000), -i);
      idx = NQ'($urandom); d1 = cx($urandom_range(0, 5000), 7);
      if (clear) set_zero_state();
      else if (we_all) for (int i = 0; i < NA; i++) model[i] = din[i];
      else if (we_one) model[idx] = d1;
      @(negedge clk);
      clear = 0; we_all = 0; we_one = 0;
      compare($sformatf("state after step %0d", t));
      rd_idx = NQ'($urandom); #1;
      checks++;
      if (rd !== model[rd_idx]) begin failures++; $display("FAIL: read port"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
