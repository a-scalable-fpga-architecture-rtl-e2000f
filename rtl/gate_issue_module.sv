// gate_issue_module -- gate issue module (GIM): circuit buffer plus the
// top-level state machine of the QSU.
//
// The circuit arrives as 32-bit gate words (format in qsu_pkg) pushed into a
// FIFO by the processor interface, also while a circuit runs. While `run_i`
// is high the head gate is popped, decoded and evaluated, one gate at a
// time, as in the circuit-evaluation loop of the paper. Each gate is one
// or two passes of the whole state through the datapath
//   QSR -> operand selector -> permutation network -> gate pools -> mux -> QSR
// and this FSM sequences them:
//
//   IDLE   take a normalization request of the initialization manager, or
//          pop the next gate
//   ISSUE  decode; the one-qubit pool draws the error-gate random number
//   PASS   tags computed, permutation network captures the permuted state
//   WRITE  gate pool output written back to the QSR, new qubit order
//          committed; for M and normalization the adder network captures
//          the probability sum and the pool's sequencer is started
//   MEAS   wait for the sequencer (compare, SQRT, 1/X)
//   PASS2  second pass, qubit order unchanged
//   WRITE2 collapse (M) or scale (normalization) written back
//   REPORT (END gate) the state is back in original qubit order; the result
//          reporting module evaluates it
//
// A unitary gate takes 4 clocks. The state machine structure follows the
// paper's two-level control; the states and the clock counts are this
// design's own.
//
// Lint notes: gate-word bits [7:5] and [31:24] are reserved and not decoded.
// The reset is asynchronous for the registers and also appears in the
// assertions' `disable iff` clauses, which lint reports as a mixed use.
module gate_issue_module
  import qsu_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear_i,
  input  logic         run_i,
  // circuit buffer
  input  logic         push_i,
  input  logic [31:0]  push_data_i,
  output logic         fifo_full_o,
  output logic         fifo_empty_o,
  output logic [$clog2(FIFO_DEPTH):0] fifo_count_o,
  // initialization manager
  input  logic         norm_req_i,
  output logic         norm_ack_o,
  // permutation state manager
  output pi_mode_e     pi_mode_o,
  output logic [3:0]   qa_o,
  output logic [3:0]   qb_o,
  output logic         two_o,
  output logic         pi_commit_o,
  // datapath
  output logic         pass_o,
  output logic         qsr_we_o,
  output logic         sel_one_o,
  output gate_op_e     op_o,
  output unit_mode_e   unit_mode_o,
  output logic         issue_o,
  output logic [7:0]   perr_o,
  output logic         capture_o,
  output logic         sum_all_o,
  output logic         meas_start_o,
  output logic         meas_norm_o,
  input  logic         meas_done_i,
  input  logic         meas_apply_i,
  output logic         rrm_eval_o,
  output logic         busy_o,
  output logic [31:0]  gates_done_o
);
  typedef enum logic [2:0] {
    G_IDLE, G_ISSUE, G_PASS, G_WRITE, G_MEAS, G_PASS2, G_WRITE2, G_REPORT
  } gstate_e;

  gstate_e     st;
  gate_word_t  gw;
  logic        is_norm;
  logic        pop;
  logic [31:0] head;
  logic        is_meas, is_end, two;

  gate_fifo #(.DEPTH(FIFO_DEPTH), .W(32)) u_fifo (
    .clk(clk), .rst_n(rst_n), .clear_i(clear_i),
    .push_i(push_i), .data_i(push_data_i), .pop_i(pop), .head_o(head),
    .empty_o(fifo_empty_o), .full_o(fifo_full_o), .count_o(fifo_count_o)
  );

  assign is_meas = !is_norm && (gw.op == OP_M);
  assign is_end  = !is_norm && (gw.op == OP_END);
  assign two     = !is_norm && is_two_input(gw.op);
  assign pop     = (st == G_IDLE) && !norm_req_i && run_i && !fifo_empty_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= G_IDLE;
      gw           <= '0;
      is_norm      <= 1'b0;
      gates_done_o <= '0;
    end else if (clear_i) begin
      st           <= G_IDLE;
      is_norm      <= 1'b0;
      gates_done_o <= '0;
    end else begin
      case (st)
        G_IDLE: begin
          if (norm_req_i) begin
            is_norm <= 1'b1;
            gw      <= '0;
            st      <= G_PASS;
          end else if (pop) begin
            is_norm <= 1'b0;
            gw      <= gate_word_t'(head);
            st      <= G_ISSUE;
          end
        end
        G_ISSUE: st <= G_PASS;
        G_PASS:  st <= G_WRITE;
        G_WRITE: begin
          if (is_meas || is_norm) st <= G_MEAS;
          else if (is_end)        st <= G_REPORT;
          else begin
            st           <= G_IDLE;
            gates_done_o <= gates_done_o + 1'b1;
          end
        end
        G_MEAS: if (meas_done_i) begin
          if (meas_apply_i) st <= G_PASS2;
          else begin
            st <= G_IDLE;
            if (!is_norm) gates_done_o <= gates_done_o + 1'b1;
          end
        end
        G_PASS2:  st <= G_WRITE2;
        G_WRITE2: begin
          st <= G_IDLE;
          if (!is_norm) gates_done_o <= gates_done_o + 1'b1;
        end
        G_REPORT: begin
          st           <= G_IDLE;
          gates_done_o <= gates_done_o + 1'b1;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  always_comb begin
    norm_ack_o   = (st == G_IDLE) && norm_req_i;
    qa_o         = gw.qa;
    qb_o         = gw.qb;
    two_o        = two;
    if (is_norm || st == G_PASS2 || st == G_WRITE2) pi_mode_o = PI_HOLD;
    else if (is_end)                                pi_mode_o = PI_RESTORE;
    else                                            pi_mode_o = PI_GATE;
    pass_o       = (st == G_PASS) || (st == G_PASS2);
    qsr_we_o     = (st == G_WRITE) || (st == G_WRITE2);
    pi_commit_o  = (st == G_WRITE);
    sel_one_o    = !two;
    op_o         = (is_norm || is_meas || is_end) ? OP_NOP : gw.op;
    if (st == G_WRITE2) unit_mode_o = is_norm ? U_SCALE : U_COLLAPSE;
    else                unit_mode_o = U_APPLY;
    issue_o      = (st == G_ISSUE);
    perr_o       = gw.perr;
    capture_o    = (st == G_WRITE) && (is_meas || is_norm);
    sum_all_o    = is_norm;
    meas_start_o = (st == G_WRITE) && (is_meas || is_norm);
    meas_norm_o  = is_norm;
    rrm_eval_o   = (st == G_REPORT);
    busy_o       = (st != G_IDLE);
  end
endmodule
