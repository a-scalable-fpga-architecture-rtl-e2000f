// tb_adder_network -- self-checking test of the summing network.
//
// At the default 64 inputs: random magnitudes (small enough that the
// 44-bit sum cannot wrap), all-zero, one-hot and all-maximal-probability
// inputs. The sum appears one clock after capture and holds while capture
// is low, even when the inputs change.
module tb_adder_network;
  import qsu_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cap;
  prob_t [N-1:0] mag;
  prob_t sum;

  adder_network dut (.clk(clk), .rst_n(rst_n), .capture_i(cap), .mag_i(mag), .sum_o(sum));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one();
    logic [63:0] want = 0;
    for (int i = 0; i < N; i++) want += 64'(mag[i]);
    @(negedge clk); cap = 1;
    @(negedge clk); cap = 0;
    check(64'(sum) == want, $sformatf("sum %0d expected %0d", sum, want));
    for (int i = 0; i < N; i++) mag[i] = '1;
    @(negedge clk);
    check(64'(sum) == want, "sum holds without capture");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cap = 0; mag = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    one();
    for (int k = 0; k < N; k += 9) begin
      mag = '0; mag[k] = prob_t'(64'h1_0000_0000); one();
    end
    for (int i = 0; i < N; i++) mag[i] = prob_t'(64'h1_0000_0000); one();
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < N; i++) mag[i] = prob_t'({$urandom % 32'h10, $urandom});
      one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
