// qsu_top -- quantum simulation unit (QSU): a state-vector simulator of an
// NQ-qubit quantum circuit.
//
// Datapath (one pass per clock pair, all 2^NQ amplitudes in parallel):
//
//   QSR --> gate operand selector --> self-routing permutation network
//        --> one-qubit gate pool (2^(NQ-1) units)  -- D1 --+
//        --> two-qubit gate pool (2^(NQ-2) units)  -- D0 --+-- mux --> QSR
//
// The QSR keeps the state in whatever qubit order the last gate left; the
// permutation state manager remembers that order, so every gate needs one
// permutation only, and the END gate restores the original order before the
// result reporting module reads the state. The gate issue module sequences
// everything from the circuit buffer; the initialization manager can load an
// arbitrary starting state. The embedded processor is outside: its register
// bus (four 32-bit registers, see hps_interface) is the top's only port.
//
// Fabric_status: [0] busy  [1] buffer full  [2] buffer empty  [3] IM busy
//   [4] result valid  [5] single result  [6] entangled  [7] routing conflict
//   [15:8] gates in buffer (saturated)  [31:16] gates completed (low bits)
// Fabric_data (result): [31] valid [30] single [29] entangled [NQ-1:0] index
// Fabric_data (measurement record): [31] last measured value [30] last error
//   gate applied its Pauli [16:0] last probability sum (P0 of a measurement,
//   total of a normalization) in Q1.16
// Fabric_data (qubit order): 4 bits per qubit, qubit q in [4q+3:4q], giving
//   the index bit where qubit q currently sits (first 8 qubits shown)
//
// NQ = 7 is the size of the paper's FPGA demonstration.
//
// Lint notes: the upper half of the gates-completed count and the bits of the
// probability sum outside the Q1.16 window are not shown on the bus, so they
// are reported as unused; the sum keeps its full width inside the pool. The
// reset is asynchronous for the registers and also appears in assertion
// `disable iff` clauses, which lint reports as a mixed use.
module qsu_top
  import qsu_pkg::*;
#(
  parameter int unsigned NQ         = 7,
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         hps_wr_i,
  input  logic         hps_rd_i,
  input  logic [1:0]   hps_addr_i,
  input  logic [31:0]  hps_wdata_i,
  output logic [31:0]  hps_rdata_o
);
  localparam int unsigned NA = 2 ** NQ;

  // processor interface
  logic           run, clear, load, data_wr;
  logic [31:0]    data_w, status, result, dbg_meas, dbg_order;
  logic [NQ-1:0]  rb_idx;
  cplx_t          rb_data;

  // control
  logic           norm_req, norm_ack, im_busy;
  pi_mode_e       pi_mode;
  logic [3:0]     qa, qb;
  logic           two, pi_commit, pass, qsr_we, sel_one, issue, capture;
  logic           sum_all, meas_start, meas_norm, meas_done, meas_apply;
  logic           rrm_eval, busy, fifo_full, fifo_empty;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;
  logic [31:0]    gates_done;
  gate_op_e       op;
  unit_mode_e     unit_mode;
  logic [7:0]     perr;

  // datapath
  cplx_t [NA-1:0] qsr_amp, gos_data, srpn_data, one_out, two_out, qsr_in;
  logic [NA-1:0][NQ-1:0]          tags;
  logic [NQ-1:0][$clog2(NQ)-1:0]  src_bit, lay;
  logic           srpn_valid, conflict;
  logic           im_we;
  logic [NQ-1:0]  im_idx;
  cplx_t          im_data;
  logic           meas_side, err_hit;
  prob_t          psum;
  logic           r_valid, r_single, r_ent;
  logic [NQ-1:0]  r_index;

  hps_interface #(.NQ(NQ)) u_hps (
    .clk(clk), .rst_n(rst_n), .wr_i(hps_wr_i), .rd_i(hps_rd_i),
    .addr_i(hps_addr_i), .wdata_i(hps_wdata_i), .rdata_o(hps_rdata_o),
    .run_o(run), .clear_o(clear), .load_o(load), .data_wr_o(data_wr),
    .data_o(data_w), .rb_idx_o(rb_idx), .status_i(status), .result_i(result),
    .rb_data_i(rb_data), .dbg_meas_i(dbg_meas), .dbg_order_i(dbg_order)
  );

  init_manager #(.NQ(NQ)) u_im (
    .clk(clk), .rst_n(rst_n), .start_i(load), .wr_i(data_wr && im_busy),
    .wdata_i(data_w), .qsr_we_o(im_we), .qsr_idx_o(im_idx),
    .qsr_data_o(im_data), .norm_req_o(norm_req), .norm_ack_i(norm_ack),
    .busy_o(im_busy)
  );

  gate_issue_module #(.FIFO_DEPTH(FIFO_DEPTH)) u_gim (
    .clk(clk), .rst_n(rst_n), .clear_i(clear), .run_i(run),
    .push_i(data_wr && !im_busy), .push_data_i(data_w),
    .fifo_full_o(fifo_full), .fifo_empty_o(fifo_empty), .fifo_count_o(fifo_count),
    .norm_req_i(norm_req), .norm_ack_o(norm_ack),
    .pi_mode_o(pi_mode), .qa_o(qa), .qb_o(qb), .two_o(two), .pi_commit_o(pi_commit),
    .pass_o(pass), .qsr_we_o(qsr_we), .sel_one_o(sel_one), .op_o(op),
    .unit_mode_o(unit_mode), .issue_o(issue), .perr_o(perr),
    .capture_o(capture), .sum_all_o(sum_all), .meas_start_o(meas_start),
    .meas_norm_o(meas_norm), .meas_done_i(meas_done), .meas_apply_i(meas_apply),
    .rrm_eval_o(rrm_eval), .busy_o(busy), .gates_done_o(gates_done)
  );

  pi_state_manager #(.NQ(NQ)) u_pism (
    .clk(clk), .rst_n(rst_n), .clear_i(clear), .mode_i(pi_mode),
    .qa_i(qa), .qb_i(qb), .two_i(two), .commit_i(pi_commit),
    .src_bit_o(src_bit), .lay_o(lay)
  );

  qsr #(.NQ(NQ)) u_qsr (
    .clk(clk), .rst_n(rst_n), .clear_i(clear),
    .we_all_i(qsr_we), .data_all_i(qsr_in),
    .we_one_i(im_we), .idx_i(im_idx), .data_one_i(im_data),
    .rd_idx_i(rb_idx), .rd_data_o(rb_data), .amp_o(qsr_amp)
  );

  gate_operand_selector #(.NQ(NQ)) u_gos (
    .amp_i(qsr_amp), .src_bit_i(src_bit), .data_o(gos_data), .tag_o(tags)
  );

  srpn #(.NQ(NQ)) u_srpn (
    .clk(clk), .rst_n(rst_n), .valid_i(pass), .tag_i(tags), .data_i(gos_data),
    .valid_o(srpn_valid), .data_o(srpn_data), .conflict_o(conflict)
  );

  one_qubit_gate_pool #(.NQ(NQ)) u_qgp1 (
    .clk(clk), .rst_n(rst_n), .data_i(srpn_data), .op_i(op), .mode_i(unit_mode),
    .issue_i(issue), .perr_i(perr), .capture_i(capture), .sum_all_i(sum_all),
    .meas_start_i(meas_start), .meas_norm_i(meas_norm),
    .meas_done_o(meas_done), .meas_apply_o(meas_apply), .meas_side_o(meas_side),
    .err_hit_o(err_hit), .sum_o(psum), .data_o(one_out)
  );

  two_qubit_gate_pool #(.NQ(NQ)) u_qgp2 (
    .data_i(srpn_data), .op_i(op), .data_o(two_out)
  );

  // pool output mux: S from the gate issue module, D1 one-qubit, D0 two-qubit
  assign qsr_in = sel_one ? one_out : two_out;

  result_reporting_module #(.NQ(NQ)) u_rrm (
    .clk(clk), .rst_n(rst_n), .clear_i(clear), .eval_i(rrm_eval), .amp_i(qsr_amp),
    .valid_o(r_valid), .single_o(r_single), .entangled_o(r_ent), .index_o(r_index)
  );

  always_comb begin
    status        = '0;
    status[0]     = busy || !fifo_empty && run;
    status[1]     = fifo_full;
    status[2]     = fifo_empty;
    status[3]     = im_busy;
    status[4]     = r_valid;
    status[5]     = r_single;
    status[6]     = r_ent;
    status[7]     = conflict;
    status[15:8]  = (32'(fifo_count) > 255) ? 8'hff : 8'(fifo_count);
    status[31:16] = gates_done[15:0];
    result        = '0;
    result[31]    = r_valid;
    result[30]    = r_single;
    result[29]    = r_ent;
    result[NQ-1:0] = r_index;
    dbg_meas       = '0;
    dbg_meas[31]   = meas_side;
    dbg_meas[30]   = err_hit;
    dbg_meas[16:0] = psum[PFRAC_W:PFRAC_W-FRAC_W];
    dbg_order      = '0;
    for (int q = 0; q < NQ && q < 8; q++) dbg_order[4*q +: 4] = 4'(lay[q]);
  end

  // a write-back must come from a completed pass through the network
  a_we_after_pass: assert property (@(posedge clk) disable iff (!rst_n)
    qsr_we |-> srpn_valid);
endmodule
