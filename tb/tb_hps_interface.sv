// tb_hps_interface -- self-checking test of the processor register block:
// control bits (run level, clear/load/rewind pulses, readback select), data
// register strobes, status and result reads, write-only registers reading
// as zero, the auto-incrementing state readback (real, imaginary, next
// amplitude), and the two debug words, which must not advance the readback.
module tb_hps_interface;
  import qsu_pkg::*;
  localparam int NQ = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr, rd, run, clear, load, dwr;
  logic [1:0] addr;
  logic [31:0] wdata, rdata, dout, status, result, dbg_meas, dbg_order;
  logic [NQ-1:0] rb_idx;
  cplx_t rb_data;

  hps_interface #(.NQ(NQ)) dut (.clk(clk), .rst_n(rst_n), .wr_i(wr), .rd_i(rd),
    .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata), .run_o(run), .clear_o(clear),
    .load_o(load), .data_wr_o(dwr), .data_o(dout), .rb_idx_o(rb_idx),
    .status_i(status), .result_i(result), .rb_data_i(rb_data),
    .dbg_meas_i(dbg_meas), .dbg_order_i(dbg_order));

  // readback source: amplitude i = (i*100 - 5000, -i)
  always_comb rb_data = cx(int'(rb_idx) * 100 - 5000, -int'(rb_idx));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(logic [1:0] a, logic [31:0] d);
    @(negedge clk); wr = 1; addr = a; wdata = d;
    @(negedge clk); wr = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr = 0; rd = 0; addr = 0; wdata = 0; status = 32'hCAFE0001; result = 32'h8000_0055;
    dbg_meas = 32'h8000_C000; dbg_order = 32'h0654_3210;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(!run && !clear && !load && !dwr, "idle after reset");
    // pulses last one clock; run is a level
    @(negedge clk); wr = 1; addr = 2'd0; wdata = 32'h7;
    @(negedge clk); wr = 0;
    check(run && clear && load, "control bits set");
    @(negedge clk);
    check(run && !clear && !load, "clear and load are pulses, run is a level");
    // data register
    @(negedge clk); wr = 1; addr = 2'd2; wdata = 32'h0001_2304;
    @(negedge clk); wr = 0;
    check(dwr && dout == 32'h0001_2304, "HPS_data strobe and value");
    @(negedge clk);
    check(!dwr, "HPS_data strobe is one clock");
    // reads
    addr = 2'd1; #1; check(rdata == 32'hCAFE0001, "Fabric_status read");
    addr = 2'd3; #1; check(rdata == 32'h8000_0055, "Fabric_data result read");
    addr = 2'd0; #1; check(rdata == 0, "HPS_control reads as 0");
    addr = 2'd2; #1; check(rdata == 0, "HPS_data reads as 0");
    // readback stream
    write(2'd0, 32'h19);   // run, rewind, readback select
    for (int i = 0; i < 6; i++) begin
      for (int h = 0; h < 2; h++) begin
        @(negedge clk); addr = 2'd3; #1;
        check(rdata == ((h == 0) ? 32'(i * 100 - 5000) : 32'(-i)),
              $sformatf("readback amplitude %0d part %0d", i, h));
        rd = 1;
        @(negedge clk); rd = 0;
      end
    end
    write(2'd0, 32'h19);   // rewind
    @(negedge clk); addr = 2'd3; #1;
    check(rdata == 32'(-5000), "rewind returns to amplitude 0");
    // debug words; reading them leaves the readback position alone
    @(negedge clk); rd = 1; @(negedge clk); rd = 0;   // now at amplitude 0, imaginary
    write(2'd0, 32'h21);
    @(negedge clk); addr = 2'd3; #1;
    check(rdata == 32'h8000_C000, "Fabric_data measurement record");
    rd = 1; @(negedge clk); rd = 0;
    write(2'd0, 32'h31);
    @(negedge clk); addr = 2'd3; #1;
    check(rdata == 32'h0654_3210, "Fabric_data qubit order");
    rd = 1; @(negedge clk); rd = 0;
    write(2'd0, 32'h11);
    @(negedge clk); addr = 2'd3; #1;
    check(rdata == 32'(0), "debug reads did not advance the readback");
    write(2'd0, 32'h01);
    @(negedge clk); addr = 2'd3; #1;
    check(rdata == 32'h8000_0055, "source 0 returns the result again");
    write(2'd0, 32'h0);
    check(!run, "run cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
