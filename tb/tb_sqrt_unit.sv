// tb_sqrt_unit -- self-checking test of the sequential square root.
//
// Drives start/radicand handshakes at the default 44-bit width: corner
// values (0, 1, perfect squares, 2^44-1, exact probability values 1, 1/2,
// 1/4 in the 32-fraction-bit format) and random radicands. Each result is
// compared with floor(sqrt(x)) checked exactly by r^2 <= x < (r+1)^2, the
// latency is checked to be 22 clocks, and the root must hold after done.
module tb_sqrt_unit;
  localparam int IN_W = 44;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start;
  logic [IN_W-1:0] rad;
  logic busy, done;
  logic [IN_W/2-1:0] root;

  sqrt_unit dut (.clk(clk), .rst_n(rst_n), .start_i(start), .rad_i(rad),
                 .busy_o(busy), .done_o(done), .root_o(root));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(logic [IN_W-1:0] x);
    int lat = 0;
    logic [63:0] r, r1;
    @(negedge clk); start = 1; rad = x;
    @(negedge clk); start = 0; rad = $urandom;   // operand only sampled on start
    while (!done) begin @(negedge clk); lat++; end
    r = 64'(root); r1 = r + 1;
    check(r * r <= 64'(x) && r1 * r1 > 64'(x), $sformatf("sqrt(%0d) gave %0d", x, root));
    check(lat == IN_W / 2, $sformatf("latency %0d", lat));
    @(negedge clk);
    check(64'(root) == r && !busy, "root holds after done");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; rad = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    one(0); one(1); one(2); one(3); one(4); one(144); one('1);
    one(44'h1_0000_0000); one(44'h0_8000_0000); one(44'h0_4000_0000);
    for (int i = 0; i < 200; i++) one({$urandom, $urandom} >> ($urandom % 44));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
