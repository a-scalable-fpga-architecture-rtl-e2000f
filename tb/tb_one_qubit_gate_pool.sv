// tb_one_qubit_gate_pool -- self-checking test of the one-qubit gate pool.
//  - every one-input gate on random normalized states, against the
//    floating-point reference (within 3 LSB);
//  - error gates with error probability 0 (never applied) and 255/256;
//  - measurement: probability sum, random collapse decision, SQRT and 1/X,
//    and the collapse pass, against the reference collapse; sharp states
//    that must be left alone; the clock count of the sequencer;
//  - normalization of an unnormalized state, and no action on a normalized
//    one.
module tb_one_qubit_gate_pool;
  import qsu_pkg::*;
  import qsu_ref_pkg::*;
  localparam int NQ = 7;
  localparam int NA = 1 << NQ;
  localparam real TOL = 3.0 / 65536.0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cplx_t [NA-1:0] din, dout;
  gate_op_e op;
  unit_mode_e mode;
  logic issue, capture, sum_all, mstart, mnorm, mdone, mapply, mside, errhit;
  logic [7:0] perr;
  prob_t psum;

  one_qubit_gate_pool #(.NQ(NQ)) dut (.clk(clk), .rst_n(rst_n), .data_i(din),
    .op_i(op), .mode_i(mode), .issue_i(issue), .perr_i(perr), .capture_i(capture),
    .sum_all_i(sum_all), .meas_start_i(mstart), .meas_norm_i(mnorm),
    .meas_done_o(mdone), .meas_apply_o(mapply), .meas_side_o(mside),
    .err_hit_o(errhit), .sum_o(psum), .data_o(dout));

  rc_t s[];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // random state with norm `nrm`, loaded into din and the model
  task automatic random_state(real nrm);
    real tot = 0.0;
    rc_t v[];
    v = new[NA];
    for (int i = 0; i < NA; i++) begin
      v[i] = c(real'($urandom_range(0, 2000)) - 1000.0, real'($urandom_range(0, 2000)) - 1000.0);
      tot += v[i].re * v[i].re + v[i].im * v[i].im;
    end
    s = new[NA];
    for (int i = 0; i < NA; i++) begin
      din[i] = cx(int'(v[i].re / $sqrt(tot) * nrm * 65536.0), int'(v[i].im / $sqrt(tot) * nrm * 65536.0));
      s[i] = c(fx(din[i].re), fx(din[i].im));
    end
  endtask

  function automatic bit close(real tol);
    for (int i = 0; i < NA; i++)
      if (absr(fx(dout[i].re) - s[i].re) > tol || absr(fx(dout[i].im) - s[i].im) > tol) return 0;
    return 1;
  endfunction

  int cyc;
  task automatic run_seq(bit norm, output int cycles);
    @(negedge clk); capture = 1; sum_all = norm; mstart = 1; mnorm = norm;
    @(negedge clk); capture = 0; mstart = 0;
    cycles = 1;
    while (!mdone) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits;
    op = OP_NOP; mode = U_APPLY; issue = 0; capture = 0; sum_all = 0; mstart = 0;
    mnorm = 0; perr = 0; din = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // unitary gates
    for (int g = 0; g <= 10; g++) begin
      for (int t = 0; t < 3; t++) begin
        @(negedge clk);
        random_state(1.0);
        op = gate_op_e'(g); mode = U_APPLY;
        apply1(s, NQ, g, 0);
        #1;
        check(close(TOL), $sformatf("gate %0d", g));
      end
    end
    // error gates
    for (int g = 11; g <= 13; g++) begin
      hits = 0;
      for (int t = 0; t < 20; t++) begin
        @(negedge clk); random_state(1.0);
        op = gate_op_e'(g); perr = (t < 10) ? 8'd0 : 8'd255; issue = 1;
        @(negedge clk); issue = 0; #1;
        if (errhit) begin apply1(s, NQ, g, 0); hits++; end
        check(close(TOL), $sformatf("error gate %0d output", g));
        if (t < 10) check(!errhit, "error probability 0 never fires");
      end
      check(hits >= 8, $sformatf("error probability 255/256 fires (%0d of 10)", hits));
    end
    // measurement with collapse
    for (int t = 0; t < 20; t++) begin
      real p0;
      @(negedge clk); random_state(1.0); op = OP_NOP; mode = U_APPLY;
      p0 = prob0(s, NQ, 0);
      run_seq(0, cyc);
      check(absr(real'(psum) / 4294967296.0 - p0) < 1e-4, "P0 from the adder network");
      check(mapply, "collapse needed for 0 < P0 < 1");
      check(cyc == 61, $sformatf("measurement sequencer took %0d clocks, expected 61", cyc));
      @(negedge clk); mode = U_COLLAPSE;
      collapse(s, NQ, 0, int'(mside));
      #1;
      check(close(6.0 / 65536.0), $sformatf("collapsed state, side %0d", mside));
      mode = U_APPLY;
    end
    // sharp states: qubit already 0, then already 1
    for (int v = 0; v < 2; v++) begin
      @(negedge clk); random_state(1.0);
      begin
        automatic real tot = 0.0;
        for (int i = 0; i < NA; i++) if ((i & 1) != v) s[i] = c(0, 0);
        for (int i = 0; i < NA; i++) tot += s[i].re * s[i].re + s[i].im * s[i].im;
        for (int i = 0; i < NA; i++)
          din[i] = cx(int'(s[i].re / $sqrt(tot) * 65536.0), int'(s[i].im / $sqrt(tot) * 65536.0));
      end
      run_seq(0, cyc);
      check(!mapply && cyc <= 3, $sformatf("sharp value %0d left alone", v));
    end
    // normalization: norm 0.5 -> scaled by 2
    @(negedge clk); random_state(0.5);
    run_seq(1, cyc);
    check(mapply, "unnormalized state gets scaled");
    @(negedge clk); mode = U_SCALE; #1;
    for (int i = 0; i < NA; i++) s[i] = c(s[i].re * 2.0, s[i].im * 2.0);
    check(close(8.0 / 65536.0), "normalized state");
    mode = U_APPLY;
    @(negedge clk); random_state(1.0);
    run_seq(1, cyc);
    check(!mapply, "normalized state left alone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
