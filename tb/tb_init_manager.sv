// tb_init_manager -- self-checking test of the initialization manager:
// after a start, 2*2^NQ data words are written one amplitude (real, then
// imaginary) per QSR write, in index order; then a normalization request is
// raised and held until acknowledged. Writes before start are ignored.
module tb_init_manager;
  import qsu_pkg::*;
  localparam int NQ = 4;
  localparam int NA = 1 << NQ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, wr, we, norm_req, norm_ack, busy;
  logic [31:0] wdata;
  logic [NQ-1:0] idx;
  cplx_t data;

  init_manager #(.NQ(NQ)) dut (.clk(clk), .rst_n(rst_n), .start_i(start), .wr_i(wr),
    .wdata_i(wdata), .qsr_we_o(we), .qsr_idx_o(idx), .qsr_data_o(data),
    .norm_req_o(norm_req), .norm_ack_i(norm_ack), .busy_o(busy));

  int nwrites = 0;
  cplx_t got [NA];
  always @(posedge clk) if (rst_n && we) begin
    got[idx] = data;
    nwrites++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cplx_t want [NA];
    start = 0; wr = 0; wdata = 0; norm_ack = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); wr = 1; wdata = 32'h1234;
    @(negedge clk); wr = 0;
    @(negedge clk);
    check(nwrites == 0 && !busy, $sformatf("writes ignored before start (%0d writes, busy %0d)", nwrites, busy));
    for (int round = 0; round < 2; round++) begin
      nwrites = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      check(busy, "busy after start");
      for (int i = 0; i < NA; i++) begin
        want[i] = cx($urandom_range(0, 131071) - 65536, $urandom_range(0, 131071) - 65536);
        @(negedge clk); wr = 1; wdata = 32'($signed(want[i].re));
        @(negedge clk); wr = 1; wdata = 32'($signed(want[i].im));
        @(negedge clk); wr = 0;
        if (i < NA - 1) check(!norm_req, "no request before the last amplitude");
      end
      @(negedge clk);
      check(nwrites == NA, $sformatf("%0d QSR writes", nwrites));
      begin
        automatic bit ok = 1;
        for (int i = 0; i < NA; i++) if (got[i] !== want[i]) ok = 0;
        check(ok, "amplitudes written in order");
      end
      check(norm_req, "normalization requested");
      repeat (3) @(negedge clk);
      check(norm_req && busy, "request held until acknowledged");
      norm_ack = 1; @(negedge clk); norm_ack = 0;
      @(negedge clk);
      check(!norm_req && !busy, "request dropped after acknowledge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
