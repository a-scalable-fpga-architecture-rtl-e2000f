// tb_gate_issue_module -- self-checking test of the gate issue module.
// A model of the rest of the datapath answers measurement requests. The
// test checks, pass by pass, the control the module gives for one-input,
// two-input, measurement (collapsing and sharp), normalization and END
// gates; that nothing issues while run is low; that gates can be added
// while the circuit runs; and that a unitary gate takes 4 clocks.
module tb_gate_issue_module;
  import qsu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, run, push, full, empty, norm_req, norm_ack, two, commit, pass, we;
  logic sel_one, issue, capture, sum_all, mstart, mnorm, mdone, mapply, rrm_eval, busy;
  logic [31:0] pdata, gates_done;
  logic [6:0] count;
  pi_mode_e pi_mode;
  logic [3:0] qa, qb;
  gate_op_e op;
  unit_mode_e umode;
  logic [7:0] perr;

  gate_issue_module #(.FIFO_DEPTH(64)) dut (.clk(clk), .rst_n(rst_n), .clear_i(clear),
    .run_i(run), .push_i(push), .push_data_i(pdata), .fifo_full_o(full),
    .fifo_empty_o(empty), .fifo_count_o(count), .norm_req_i(norm_req),
    .norm_ack_o(norm_ack), .pi_mode_o(pi_mode), .qa_o(qa), .qb_o(qb), .two_o(two),
    .pi_commit_o(commit), .pass_o(pass), .qsr_we_o(we), .sel_one_o(sel_one),
    .op_o(op), .unit_mode_o(umode), .issue_o(issue), .perr_o(perr),
    .capture_o(capture), .sum_all_o(sum_all), .meas_start_o(mstart),
    .meas_norm_o(mnorm), .meas_done_i(mdone), .meas_apply_i(mapply),
    .rrm_eval_o(rrm_eval), .busy_o(busy), .gates_done_o(gates_done));

  // measurement responder: done 5 clocks after start, apply as told
  bit next_apply = 1;
  initial begin
    mdone = 0; mapply = 0;
    forever begin
      @(posedge clk);
      if (mstart) begin
        repeat (5) @(posedge clk);
        #1 mdone = 1; mapply = next_apply;
        @(posedge clk);
        #1 mdone = 0;
      end
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic push_gate(gate_op_e o, int a, int b, int pe);
    gate_word_t w;
    w = '0; w.op = o; w.qa = 4'(a); w.qb = 4'(b); w.perr = 8'(pe);
    @(negedge clk); push = 1; pdata = 32'(w);
    @(negedge clk); push = 0;
  endtask

  // wait for the next write-back and check it
  task automatic expect_write(pi_mode_e pm, bit one, gate_op_e o, unit_mode_e um,
                              bit cap, string what);
    int n = 0;
    while (!we) begin @(negedge clk); n++; if (n > 100) break; end
    check(we && pi_mode == pm && sel_one == one && op == o && umode == um &&
          capture == cap, $sformatf("%s: pi %0d one %0d op %0d mode %0d cap %0d", what,
          pi_mode, sel_one, op, umode, capture));
    @(negedge clk);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0;
  initial begin
    clear = 0; run = 0; push = 0; pdata = 0; norm_req = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    push_gate(OP_H, 3, 0, 0);
    push_gate(OP_CNOT, 1, 2, 0);
    repeat (5) @(negedge clk);
    check(!busy && count == 2, "nothing issues while run is low");
    run = 1;
    // one-input gate: issue strobe, then pass, then write
    while (!issue) @(negedge clk);
    t0 = $time;
    check(qa == 3, "qubit of the one-input gate");
    @(negedge clk);
    check(pass && pi_mode == PI_GATE && !two, "pass with gate permutation");
    @(negedge clk);
    check(we && commit && sel_one && op == OP_H && umode == U_APPLY, "one-input write-back");
    // two-input gate follows: 4 clocks per gate
    while (!issue) @(negedge clk);
    check(($time - t0) == 40, $sformatf("unitary gate takes 4 clocks (%0t)", $time - t0));
    check(two && qa == 1 && qb == 2, "two-input gate operands");
    expect_write(PI_GATE, 0, OP_CNOT, U_APPLY, 0, "two-input write-back");
    // measurement that collapses; a gate is added while it runs
    next_apply = 1;
    push_gate(OP_M, 5, 0, 0);
    expect_write(PI_GATE, 1, OP_NOP, U_APPLY, 1, "measurement first pass");
    push_gate(OP_X, 2, 0, 0);
    while (!pass) @(negedge clk);
    check(pi_mode == PI_HOLD, "second pass keeps the order");
    expect_write(PI_HOLD, 1, OP_NOP, U_COLLAPSE, 0, "collapse write-back");
    expect_write(PI_GATE, 1, OP_X, U_APPLY, 0, "gate added while running");
    // sharp measurement: no second pass
    next_apply = 0;
    push_gate(OP_M, 1, 0, 0);
    expect_write(PI_GATE, 1, OP_NOP, U_APPLY, 1, "sharp measurement pass");
    repeat (12) @(negedge clk);
    check(!busy && !we, "no second pass for a sharp value");
    // normalization request
    next_apply = 1;
    @(negedge clk); norm_req = 1;
    while (!norm_ack) @(negedge clk);
    @(negedge clk); norm_req = 0;
    check(sum_all && mnorm, "normalization sums all components");
    expect_write(PI_HOLD, 1, OP_NOP, U_APPLY, 1, "normalization first pass");
    expect_write(PI_HOLD, 1, OP_NOP, U_SCALE, 0, "normalization scale pass");
    // END: restore order and report
    push_gate(OP_END, 0, 0, 0);
    expect_write(PI_RESTORE, 1, OP_NOP, U_APPLY, 0, "END restores the order");
    check(rrm_eval, "result evaluated after END");
    @(negedge clk);
    check(gates_done == 6, $sformatf("gates completed %0d", gates_done));
    // error-gate probability travels with the gate
    push_gate(OP_EX, 0, 0, 77);
    while (!issue) @(negedge clk);
    check(perr == 8'd77, "error probability issued");
    @(negedge clk); @(negedge clk); @(negedge clk);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    check(gates_done == 0 && empty, "clear empties buffer and counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
