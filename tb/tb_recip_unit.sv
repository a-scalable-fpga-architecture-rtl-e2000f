// tb_recip_unit -- self-checking test of the sequential reciprocal.
//
// At the default widths (22-bit operand, 27-bit result, 16 fraction bits)
// it checks q = floor(2^32 / d) for corner operands (1.0, 1/sqrt(2),
// small values whose reciprocal saturates, d = 0, the largest operand) and
// random operands, the 33-clock latency, and that q holds after done.
module tb_recip_unit;
  localparam int D_W = 22, Q_W = 27;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start;
  logic [D_W-1:0] d;
  logic busy, done;
  logic [Q_W-1:0] q;

  recip_unit dut (.clk(clk), .rst_n(rst_n), .start_i(start), .d_i(d),
                  .busy_o(busy), .done_o(done), .q_o(q));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(logic [D_W-1:0] x);
    int lat = 0;
    logic [63:0] want;
    want = (x == 0) ? 64'((1 << Q_W) - 1) : (64'h1_0000_0000 / 64'(x));
    if (want > 64'((1 << Q_W) - 1)) want = 64'((1 << Q_W) - 1);
    @(negedge clk); start = 1; d = x;
    @(negedge clk); start = 0; d = D_W'($urandom);
    while (!done) begin @(negedge clk); lat++; end
    check(64'(q) == want, $sformatf("1/%0d gave %0d, expected %0d", x, q, want));
    check(lat == 33, $sformatf("latency %0d", lat));
    @(negedge clk);
    check(64'(q) == want && !busy, "quotient holds after done");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; d = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    one(65536); one(46341); one(32768); one(1); one(31); one(32); one(33);
    one(0); one('1); one(65535);
    for (int i = 0; i < 150; i++) one(D_W'($urandom) >> ($urandom % 22));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
