// tb_pi_state_manager -- self-checking test of the permutation state
// manager. Runs random one- and two-input gate requests, holds and
// restores against an independent model of the qubit order (a list of
// which qubit sits at each index bit) and checks, after each commit, that
// the gate qubits sit at bits 0 and 1, that the order is a permutation,
// and that src_bit maps every logical qubit from its old to its new bit.
module tb_pi_state_manager;
  import qsu_pkg::*;
  localparam int NQ = 7;
  localparam int PB = $clog2(NQ);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, two, commit;
  pi_mode_e mode;
  logic [3:0] qa, qb;
  logic [NQ-1:0][PB-1:0] src_bit, lay;

  pi_state_manager #(.NQ(NQ)) dut (.clk(clk), .rst_n(rst_n), .clear_i(clear),
    .mode_i(mode), .qa_i(qa), .qb_i(qb), .two_i(two), .commit_i(commit),
    .src_bit_o(src_bit), .lay_o(lay));

  int at_bit[NQ];   // model: logical qubit at each index bit

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
    clear = 0; two = 0; commit = 0; mode = PI_HOLD; qa = 0; qb = 0;
    for (int k = 0; k < NQ; k++) at_bit[k] = k;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int r = $urandom_range(0, 9);
      int old_at[NQ];
      old_at = at_bit;
      @(negedge clk);
      qa = 4'($urandom_range(0, NQ-1));
      do qb = 4'($urandom_range(0, NQ-1)); while (qb == qa);
      two = (r >= 5);
      mode = (r == 0) ? PI_RESTORE : (r == 1) ? PI_HOLD : PI_GATE;
      // model: swap the wanted qubit into place by position
      if (mode == PI_RESTORE) for (int k = 0; k < NQ; k++) at_bit[k] = k;
      else if (mode == PI_GATE) begin
        int pa, pb, tmp;
        for (int k = 0; k < NQ; k++) if (at_bit[k] == qa) pa = k;
        tmp = at_bit[0]; at_bit[0] = at_bit[pa]; at_bit[pa] = tmp;
        if (two) begin
          for (int k = 0; k < NQ; k++) if (at_bit[k] == qb) pb = k;
          tmp = at_bit[1]; at_bit[1] = at_bit[pb]; at_bit[pb] = tmp;
        end
      end
      #1;
      // src_bit: bit k of the new index comes from where at_bit[k] was
      begin
        automatic bit ok = 1;
        for (int k = 0; k < NQ; k++) begin
          automatic int oldpos = -1;
          for (int j = 0; j < NQ; j++) if (old_at[j] == at_bit[k]) oldpos = j;
          if (int'(src_bit[k]) != oldpos) ok = 0;
        end
        check(ok, $sformatf("src_bit, step %0d", t));
      end
      commit = 1;
      @(negedge clk);
      commit = 0;
      begin
        automatic bit ok = 1;
        for (int k = 0; k < NQ; k++) if (int'(lay[at_bit[k]]) != k) ok = 0;
        check(ok, $sformatf("committed order, step %0d", t));
      end
      if (mode == PI_GATE) begin
        check(lay[qa] == 0, "gate qubit at bit 0");
        if (two) check(lay[qb] == 1, "second gate qubit at bit 1");
      end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    begin
      automatic bit ok = 1;
      for (int q = 0; q < NQ; q++) if (lay[q] != PB'(q)) ok = 0;
      check(ok, "clear restores the original order");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
