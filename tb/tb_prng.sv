// tb_prng -- self-checking test of the pseudorandom number generator.
//
// Checks the value after reset is the seed, every step against an
// independent xorshift model, that the value is never zero, that the
// sequence does not repeat within the run, and that each of the top four
// bits is set on roughly half the clocks (the comparisons use the top bits).
module tb_prng;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] rnd;

  prng dut (.clk(clk), .rst_n(rst_n), .rnd_o(rnd));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, first;
    int ones[4];
    bit repeated = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    check(rnd == 32'h2545_F491, "seed after reset");
    rst_n = 1;
    x = rnd; first = rnd;
    ones = '{0, 0, 0, 0};
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
      check(rnd == x, $sformatf("step %0d: %h expected %h", i, rnd, x));
      check(rnd != 0, "never zero");
      if (rnd == first) repeated = 1;
      for (int b = 0; b < 4; b++) if (rnd[31-b]) ones[b]++;
    end
    check(!repeated, "no repeat within the run");
    for (int b = 0; b < 4; b++)
      check(ones[b] > 1800 && ones[b] < 2200, $sformatf("bit %0d set %0d of 4000 clocks", 31 - b, ones[b]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
