// tb_qsu_top -- end-to-end test of the quantum simulation unit, driven only
// through the processor register bus, at 4 qubits.
//
// Every gate is pushed through HPS_data; the floating-point reference model
// follows the same circuit (taking measurement outcomes and error-gate
// draws from the unit, since those are random) and after each END the
// whole state is read back through Fabric_data and compared. Covered:
// every one- and two-input gate, gates on every qubit pair in both orders,
// collapsing and sharp measurements, the paper's 4-qubit test circuit
// (Hadamard layer, three measurements, CNOT, last measurement) with its
// single result, an entangled result, loading an unnormalized and a
// normalized initial state, error gates that fire and that do not, and
// gates appended while the unit is busy. The debug words on Fabric_data are
// checked too: the measurement record against the last measured value and
// the reference P0, and the qubit order (identity after END, the gate's
// qubit at index bit 0 after a one-input gate). Each mechanism is counted
// and one that never happened is a failure.
module tb_qsu_top;
  import qsu_pkg::*;
  import qsu_ref_pkg::*;
  localparam int NQ = 4;
  localparam int NA = 1 << NQ;
  localparam real TOL = 24.0 / 65536.0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr, rd;
  logic [1:0] addr;
  logic [31:0] wdata, rdata;

  qsu_top #(.NQ(NQ), .FIFO_DEPTH(16)) dut (.clk(clk), .rst_n(rst_n), .hps_wr_i(wr),
    .hps_rd_i(rd), .hps_addr_i(addr), .hps_wdata_i(wdata), .hps_rdata_o(rdata));

  rc_t s[];

  // ---------------- mechanism counters (observed inside the unit) --------
  int n_one, n_two, n_collapse, n_sharp, n_norm_scale, n_norm_skip;
  int n_err_hit, n_err_miss, n_restore, n_single, n_entangled, n_push_busy;
  int last_side, last_err;
  always @(posedge clk) if (rst_n) begin
    if (dut.pi_commit && !dut.u_gim.is_norm) begin
      if (dut.op inside {OP_EX, OP_EY, OP_EZ}) begin
        last_err = dut.err_hit;
        if (dut.err_hit) n_err_hit++; else n_err_miss++;
      end
      if (dut.pi_mode == PI_RESTORE) n_restore++;
      else if (dut.u_gim.gw.op != OP_M) begin
        if (dut.sel_one) n_one++; else n_two++;
      end
    end
    if (dut.meas_done) begin
      if (dut.meas_norm) begin
        if (dut.meas_apply) n_norm_scale++; else n_norm_skip++;
      end else begin
        last_side = dut.meas_side;
        if (dut.meas_apply) n_collapse++; else n_sharp++;
      end
    end
    if (dut.data_wr && !dut.im_busy && dut.busy) n_push_busy++;
  end

  // ---------------- bus access ----------------
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

  function automatic logic [31:0] gword(gate_op_e o, int a, int b, int pe);
    gate_word_t w;
    w = '0; w.op = o; w.qa = 4'(a); w.qb = 4'(b); w.perr = 8'(pe);
    return 32'(w);
  endfunction

  // push one gate, wait until done, let the reference follow
  task automatic gate(gate_op_e o, int a, int b = 0, int pe = 0);
    bus_write(2'd2, gword(o, a, b, pe));
    wait_idle();
    if (o == OP_M) begin
      if (prob0(s, NQ, a) > 0.002 && prob0(s, NQ, a) < 0.998) collapse(s, NQ, a, last_side);
    end else if (o inside {OP_EX, OP_EY, OP_EZ}) begin
      if (last_err) apply1(s, NQ, int'(o), a);
    end else if (is_two_input(o)) apply2(s, NQ, int'(o), a, b);
    else if (o != OP_END) apply1(s, NQ, int'(o), a);
  endtask

  // END, then read back the whole state and compare with the reference
  task automatic compare_state(string what);
    logic [31:0] v;
    real err = 0.0;
    gate(OP_END, 0);
    bus_write(2'd0, 32'h19);
    for (int i = 0; i < NA; i++) begin
      real re, im;
      bus_read(2'd3, v); re = fx(v[17:0]);
      bus_read(2'd3, v); im = fx(v[17:0]);
      if (absr(re - s[i].re) > err) err = absr(re - s[i].re);
      if (absr(im - s[i].im) > err) err = absr(im - s[i].im);
    end
    bus_write(2'd0, 32'h1);
    check(err < TOL, $sformatf("%s: largest amplitude error %f", what, err));
  endtask

  // read one of the debug words (source 2 or 3), then select the result again
  task automatic read_dbg(int src, output logic [31:0] v);
    bus_write(2'd0, 32'h1 | 32'(src) << 4);
    bus_read(2'd3, v);
    bus_write(2'd0, 32'h1);
  endtask

  task automatic reset_state();
    bus_write(2'd0, 32'h3);
    bus_write(2'd0, 32'h1);
    s = new[NA];
    for (int i = 0; i < NA; i++) s[i] = c(0, 0);
    s[0] = c(1, 0);
  endtask

  task automatic load_state(real amp[]);
    bus_write(2'd0, 32'h5);
    for (int i = 0; i < NA; i++) begin
      bus_write(2'd2, 32'($signed(18'(int'(amp[2*i] * 65536.0)))));
      bus_write(2'd2, 32'($signed(18'(int'(amp[2*i+1] * 65536.0)))));
    end
    wait_idle();
    begin
      real tot = 0.0;
      for (int i = 0; i < NA; i++) tot += amp[2*i]*amp[2*i] + amp[2*i+1]*amp[2*i+1];
      for (int i = 0; i < NA; i++) s[i] = c(amp[2*i] / $sqrt(tot), amp[2*i+1] / $sqrt(tot));
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    real amp[];
    real p0;
    wr = 0; rd = 0; addr = 0; wdata = 0;
    n_one = 0; n_two = 0; n_collapse = 0; n_sharp = 0; n_norm_scale = 0; n_norm_skip = 0;
    n_err_hit = 0; n_err_miss = 0; n_restore = 0; n_single = 0; n_entangled = 0;
    n_push_busy = 0; last_side = 0; last_err = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. every gate, every qubit pair in both orders
    reset_state();
    for (int q = 0; q < NQ; q++) gate(OP_H, q);
    for (int g = 1; g <= 10; g++) gate(gate_op_e'(g), g % NQ);
    compare_state("one-input gates");
    for (int a = 0; a < NQ; a++) for (int b = 0; b < NQ; b++) if (a != b) begin
      gate_op_e o;
      o = gate_op_e'(16 + (a * NQ + b) % 5);
      gate(o, a, b);
      gate(OP_T, b);
      gate(OP_V, a);
    end
    compare_state("two-input gates on all pairs");
    bus_read(2'd3, v);
    bus_write(2'd0, 32'h1);
    bus_read(2'd3, v);
    check(v[31] && v[29] && !v[30], "superposition reported as entangled");
    if (v[29]) n_entangled++;

    // 2. the paper's 4-qubit test circuit, several trials
    for (int t = 0; t < 6; t++) begin
      reset_state();
      for (int q = 0; q < NQ; q++) gate(OP_H, q);
      gate(OP_M, 0); gate(OP_M, 1); gate(OP_M, 2);
      gate(OP_CNOT, 0, 3);          // control q3, target q0
      p0 = prob0(s, NQ, 3);
      gate(OP_M, 3);
      read_dbg(2, v);
      check(v[31] == 1'(last_side), "measurement record: measured value");
      check(absr(real'(v[16:0]) / 65536.0 - p0) < 0.002,
            $sformatf("measurement record: P0 %f against %f", real'(v[16:0]) / 65536.0, p0));
      compare_state($sformatf("test circuit trial %0d", t));
      read_dbg(3, v);
      check(v[15:0] == 16'h3210, $sformatf("qubit order after END: %04h", v[15:0]));
      bus_read(2'd3, v);
      check(v[31] && v[30] && !v[29], "single result after measuring every qubit");
      if (v[30]) n_single++;
      check(s[v[NQ-1:0]].re > 0.99 || s[v[NQ-1:0]].re < -0.99 ||
            s[v[NQ-1:0]].im > 0.99 || s[v[NQ-1:0]].im < -0.99,
            $sformatf("result index %0d is the collapsed state", v[NQ-1:0]));
      gate(OP_M, 2);                // already sharp
      compare_state("sharp measurement leaves the state");
    end

    // 3. initial states: unnormalized, then normalized
    amp = new[2*NA];
    for (int i = 0; i < 2*NA; i++) amp[i] = 0.25 + 0.02 * (i % 7) - ((i % 3 == 0) ? 0.4 : 0.0);
    load_state(amp);
    compare_state("unnormalized initial state after normalization");
    gate(OP_H, 2);
    read_dbg(3, v);
    check(v[11:8] == 4'd0, $sformatf("qubit 2 at index bit 0 after a gate on it: %04h", v[15:0]));
    gate(OP_SQRTZZ, 1, 3); gate(OP_SQRTY, 0);
    compare_state("gates on a loaded state");
    for (int i = 0; i < 2*NA; i++) amp[i] = (i == 6) ? 0.6 : (i == 11) ? -0.8 : 0.0;
    load_state(amp);
    compare_state("normalized initial state unchanged");

    // 4. error gates: probability 0 never fires, 255/256 nearly always
    reset_state();
    gate(OP_H, 1); gate(OP_S, 1);
    for (int t = 0; t < 4; t++) begin
      gate(OP_EX, t % NQ, 0, 0);
      gate(OP_EY, (t + 1) % NQ, 0, 255);
      gate(OP_EZ, (t + 2) % NQ, 0, 255);
    end
    compare_state("error gates");

    // 5. gates appended while the unit works
    reset_state();
    bus_write(2'd2, gword(OP_H, 0, 0, 0));
    bus_write(2'd2, gword(OP_M, 0, 0, 0));
    bus_write(2'd2, gword(OP_H, 1, 0, 0));
    bus_write(2'd2, gword(OP_CZ, 1, 0, 0));
    wait_idle();
    s[0] = c(0, 0); // recompute the reference from the measured value
    for (int i = 0; i < NA; i++) s[i] = c(0, 0);
    s[last_side] = c(1, 0);
    apply1(s, NQ, int'(OP_H), 1);
    apply2(s, NQ, int'(OP_CZ), 1, 0);
    compare_state("gates appended while busy");

    bus_read(2'd1, v);
    check(!v[7], "no routing conflict");
    $display("INFO mechanisms: one-input %0d two-input %0d collapse %0d sharp %0d norm-scale %0d norm-skip %0d err-hit %0d err-miss %0d restore %0d single %0d entangled %0d push-while-busy %0d",
             n_one, n_two, n_collapse, n_sharp, n_norm_scale, n_norm_skip, n_err_hit,
             n_err_miss, n_restore, n_single, n_entangled, n_push_busy);
    check(n_one > 0, "one-input gate happened");
    check(n_two > 0, "two-input gate happened");
    check(n_collapse > 0, "collapsing measurement happened");
    check(n_sharp > 0, "sharp measurement happened");
    check(n_norm_scale > 0, "normalization with scaling happened");
    check(n_norm_skip > 0, "normalization found nothing to do");
    check(n_err_hit > 0, "error gate fired");
    check(n_err_miss > 0, "error gate did not fire");
    check(n_restore > 0, "qubit order restored");
    check(n_single > 0, "single result reported");
    check(n_entangled > 0, "entangled result reported");
    check(n_push_busy > 0, "gate pushed while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
