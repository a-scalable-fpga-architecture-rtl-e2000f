// tb_gate_fifo -- self-checking test of the circuit buffer.
//
// A queue model follows random push/pop traffic at the default depth of 64,
// including pushes while full, pops while empty (not issued: the buffer
// requires pop only when not empty), simultaneous push and pop, and clear.
// Head, empty, full and count are compared every clock.
module tb_gate_fifo;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, push, pop;
  logic [31:0] din, head;
  logic empty, full;
  logic [$clog2(DEPTH):0] count;
  logic [31:0] model[$];

  gate_fifo dut (.clk(clk), .rst_n(rst_n), .clear_i(clear), .push_i(push), .data_i(din),
                 .pop_i(pop), .head_o(head), .empty_o(empty), .full_o(full), .count_o(count));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare();
    check(empty == (model.size() == 0), "empty");
    check(full == (model.size() == DEPTH), "full");
    check(int'(count) == model.size(), $sformatf("count %0d expected %0d", count, model.size()));
    if (model.size() > 0) check(head == model[0], $sformatf("head %h expected %h", head, model[0]));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_full = 0, n_both = 0;
    bit was_full;
    clear = 0; push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int bias;
      bias = ((i / 300) % 2 == 0) ? 75 : 25;   // alternate filling and draining
      @(negedge clk);
      compare();
      clear = ($urandom % 400 == 0);
      push = ($urandom % 100 < bias);
      pop = !empty && ($urandom % 100 >= bias - 10);
      din = $urandom;
      was_full = full;
      if (full && push) n_full++;
      if (push && pop) n_both++;
      @(posedge clk); #1;
      if (clear) model.delete();
      else begin
        if (pop) void'(model.pop_front());
        if (push && !was_full) model.push_back(din);
      end
    end
    check(n_full > 0, "push while full exercised");
    check(n_both > 0, "push and pop together exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
