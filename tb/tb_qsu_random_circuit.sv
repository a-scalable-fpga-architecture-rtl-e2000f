// tb_qsu_random_circuit -- the 7-qubit random circuit, run on the unit at its
// default size (qsu_top with no parameter override: 7 qubits, 128 amplitudes).
//
// Circuit: a Hadamard on every qubit, then three layers of six CNOTs on
// neighbouring qubits followed by one single-qubit gate per qubit, then a
// measurement of each qubit (53 gates). Gate choice follows the published
// random-circuit figure. The CNOT direction used here is control on the
// higher-numbered qubit of each neighbouring pair, target on the lower one:
// with this direction, qubit 0 taken as the least significant bit of the
// state index, the final distribution is exactly the published
// 10,000-trial table (64 outcomes whose upper three bits are 1, 3, 4 or 6,
// 32 of them at 3/128 and 32 at 1/128; the table's counts are about 300
// and 100 per state). The drawn orientation (control on the lower qubit)
// gives a different support of 16 states. sqrt(Z) is taken as S.
//
// Checks:
//   1. the circuit without measurements: the whole 128-amplitude state read
//      back after END against the floating-point reference model, and
//      every outcome probability against the published table (which
//      states occur, which are the 3/128 ones, which never occur);
//   2. TRIALS complete runs with measurements, loaded in one burst and
//      started together: each run must report a single basis state, the
//      state must be one the table lists, the state read back must be
//      exactly that basis state, and the run must finish in no more clocks
//      than the published 1,430 per simulation;
//   3. the histogram over all trials: every one of the 64 listed outcomes
//      occurs, the 3/128 class takes 72-78 % of the runs (its share is
//      3/4), and Pearson's chi-square of the counts against the
//      3/128 and 1/128 probabilities is below 100 (63 degrees of freedom;
//      the 0.1 % point is about 103). The paper ran 10,000 and 1,000,000
//      trials; 2,000 are simulated here.
module tb_qsu_random_circuit;
  import qsu_pkg::*;
  import qsu_ref_pkg::*;
  localparam int NQ = 7;
  localparam int NA = 1 << NQ;
  localparam int TRIALS = 2000;
  localparam int PAPER_CLOCKS = 1430;
  localparam real TOL = 48.0 / 65536.0;
  // Published outcome table: bit i set when basis state i occurs, and when
  // it occurs with probability 3/128
  localparam logic [127:0] SUPPORT = 128'h0000ffff0000ffffffff0000ffff0000;
  localparam logic [127:0] HIGH    = 128'h00006969000069696969000069690000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic wr, rd;
  logic [1:0] addr;
  logic [31:0] wdata, rdata;

  qsu_top dut (.clk(clk), .rst_n(rst_n), .hps_wr_i(wr), .hps_rd_i(rd),
               .hps_addr_i(addr), .hps_wdata_i(wdata), .hps_rdata_o(rdata));

  rc_t s[];

  task automatic bus_write(logic [1:0] a, logic [31:0] d);
    @(negedge clk); wr = 1; addr = a; wdata = d;
    @(negedge clk); wr = 0;
  endtask

  task automatic bus_read(logic [1:0] a, output logic [31:0] d);
    @(negedge clk); addr = a; #1; d = rdata; rd = 1;
    @(negedge clk); rd = 0;
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_idle();
    logic [31:0] st;
    do bus_read(2'd1, st); while (st[0] || !st[2] || st[3]);
  endtask

  function automatic logic [31:0] gword(gate_op_e o, int a, int b);
    gate_word_t w;
    w = '0; w.op = o; w.qa = 4'(a); w.qb = 4'(b);
    return 32'(w);
  endfunction

  // the circuit as a list of gate words
  logic [31:0] circ[$];
  task automatic add(gate_op_e o, int a, int b = 0);
    circ.push_back(gword(o, a, b));
  endtask

  task automatic build(bit with_meas);
    gate_op_e single[3][7];
    single[0] = '{OP_SDG, OP_T,     OP_X,   OP_X, OP_SQRTY, OP_Y,   OP_Y};
    single[1] = '{OP_TDG, OP_SQRTY, OP_TDG, OP_Y, OP_S,     OP_T,   OP_X};
    single[2] = '{OP_SQRTY, OP_TDG, OP_Z,   OP_Z, OP_Y,     OP_TDG, OP_Z};
    circ.delete();
    for (int q = 0; q < NQ; q++) add(OP_H, q);
    for (int l = 0; l < 3; l++) begin
      // target qa, control qb
      add(OP_CNOT, 0, 1); add(OP_CNOT, 2, 3); add(OP_CNOT, 4, 5);
      add(OP_CNOT, 1, 2); add(OP_CNOT, 3, 4); add(OP_CNOT, 5, 6);
      for (int q = 0; q < NQ; q++) add(single[l][q], q);
    end
    if (with_meas) for (int q = 0; q < NQ; q++) add(OP_M, q);
    add(OP_END, 0);
  endtask

  task automatic ref_run();
    s = new[NA];
    for (int i = 0; i < NA; i++) s[i] = c(0, 0);
    s[0] = c(1, 0);
    foreach (circ[k]) begin
      gate_word_t w;
      w = gate_word_t'(circ[k]);
      if (is_two_input(w.op)) apply2(s, NQ, int'(w.op), int'(w.qa), int'(w.qb));
      else if (w.op != OP_END && w.op != OP_M) apply1(s, NQ, int'(w.op), int'(w.qa));
    end
  endtask

  // clear with the unit stopped, load the whole circuit, then start it and
  // count clocks until it is idle again
  task automatic run_circuit(output int unsigned clocks);
    int unsigned t0;
    bus_write(2'd0, 32'h2);
    foreach (circ[k]) bus_write(2'd2, circ[k]);
    @(negedge clk); wr = 1; addr = 2'd0; wdata = 32'h1; t0 = cycle;
    @(negedge clk); wr = 0;
    wait_idle();
    clocks = cycle - t0;
  endtask

  task automatic read_state(output real re[], output real im[]);
    logic [31:0] v;
    re = new[NA]; im = new[NA];
    bus_write(2'd0, 32'h19);
    for (int i = 0; i < NA; i++) begin
      bus_read(2'd3, v); re[i] = fx(v[17:0]);
      bus_read(2'd3, v); im[i] = fx(v[17:0]);
    end
    bus_write(2'd0, 32'h1);
  endtask

  initial begin
    repeat (4000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    real re[], im[];
    int unsigned clocks, worst;
    int n_high, n_low;
    int hist[NA];
    wr = 0; rd = 0; addr = 0; wdata = 0;
    worst = 0; n_high = 0; n_low = 0;
    foreach (hist[i]) hist[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. unitary part only: state and distribution
    build(1'b0);
    ref_run();
    run_circuit(clocks);
    $display("INFO unitary part: %0d gates in %0d clocks", circ.size(), clocks);
    read_state(re, im);
    begin
      real err = 0.0;
      int bad_support = 0, bad_prob = 0;
      for (int i = 0; i < NA; i++) begin
        real p;
        if (absr(re[i] - s[i].re) > err) err = absr(re[i] - s[i].re);
        if (absr(im[i] - s[i].im) > err) err = absr(im[i] - s[i].im);
        p = re[i] * re[i] + im[i] * im[i];
        if ((p > 0.001) != SUPPORT[i]) bad_support++;
        if (SUPPORT[i] && absr(p * 128.0 - (HIGH[i] ? 3.0 : 1.0)) > 0.02) bad_prob++;
      end
      check(err < TOL, $sformatf("state against reference: largest error %f", err));
      check(bad_support == 0, $sformatf("%0d outcomes differ from the published support", bad_support));
      check(bad_prob == 0, $sformatf("%0d outcome probabilities differ from 3/128 or 1/128", bad_prob));
    end
    bus_read(2'd3, v);
    check(v[31] && v[29], "unmeasured circuit reported as entangled");

    // 2. full runs with measurement
    build(1'b1);
    for (int t = 0; t < TRIALS; t++) begin
      int r;
      run_circuit(clocks);
      if (clocks > worst) worst = clocks;
      check(clocks <= PAPER_CLOCKS, $sformatf("trial %0d took %0d clocks", t, clocks));
      bus_read(2'd3, v);
      r = int'(v[NQ-1:0]);
      check(v[31] && v[30] && !v[29], $sformatf("trial %0d: single result", t));
      check(SUPPORT[r], $sformatf("trial %0d: outcome 0x%02h is in the published table", t, r));
      if (HIGH[r]) n_high++; else n_low++;
      hist[r]++;
      if (t < 4) begin
        bit exact = 1;
        read_state(re, im);
        for (int i = 0; i < NA; i++)
          if (i != r && (re[i] != 0.0 || im[i] != 0.0)) exact = 0;
        if (re[r] * re[r] + im[r] * im[r] < 0.999) exact = 0;
        check(exact, $sformatf("trial %0d: state is basis state 0x%02h", t, r));
      end
    end
    $display("INFO %0d trials: %0d outcomes of the 3/128 class, %0d of the 1/128 class, worst %0d clocks (published: %0d)",
             TRIALS, n_high, n_low, worst, PAPER_CLOCKS);
    begin
      int missing = 0;
      real chi2 = 0.0, share;
      for (int i = 0; i < NA; i++) if (SUPPORT[i]) begin
        real e;
        e = TRIALS * (HIGH[i] ? 3.0 : 1.0) / 128.0;
        if (hist[i] == 0) missing++;
        chi2 += (hist[i] - e) * (hist[i] - e) / e;
      end
      share = real'(n_high) / TRIALS;
      $display("INFO histogram: %0d listed outcomes never seen, 3/128 share %f, chi-square %f", missing, share, chi2);
      check(missing == 0, $sformatf("%0d listed outcomes never occurred", missing));
      check(share > 0.72 && share < 0.78, $sformatf("3/128 class share %f, expected 0.75", share));
      check(chi2 < 100.0, $sformatf("chi-square %f against the published distribution", chi2));
    end
    bus_read(2'd1, v);
    check(!v[7], "no routing conflict");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
