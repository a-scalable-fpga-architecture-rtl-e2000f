// one_qubit_gate_pool -- the one-qubit gate pool (1-QGP).
//
// 2^(NQ-1) one_qubit_unit instances work in parallel on the permuted state:
// unit c gets the pair (2c, 2c+1), which differs only in the gate's qubit
// (the permutation network has moved that qubit to index bit 0). Besides
// the unitary gates of the gate set the pool runs two global operations,
// built as drawn in the pool's block diagram:
//
//   measurement   The units return |a|^2; the adder network sums those of
//                 the even components into P0 (32 fraction bits). P0 is
//                 compared with the PRNG: if P0 < prn the qubit collapses to
//                 1, otherwise to 0. A mux then selects P0 or 1 - P0, and the
//                 SQRT and 1/X blocks give the factor 1/sqrt(P) fed back to
//                 the units, which on the second pass zero the losing half
//                 and scale the winning half. If P0 is within TOL of 0 or 1
//                 the qubit is already sharp and nothing is changed.
//   normalization The same path with the sum taken over all components and
//                 every component scaled; skipped when the sum is within
//                 TOL of 1. It is requested by the initialization manager.
//
// The error gates Ex, Ey, Ez draw a number from the PRNG when issued and
// apply the Pauli matrix only if its top byte is below the gate's error
// probability (in 1/256 units).
//
// Timing: `data_o` is combinational in `data_i` and the control inputs.
// `capture_i` latches the sum (`sum_all_i` selects all components instead of
// the even ones). `meas_start_i` (one clock, after the capture) starts the
// decision; `meas_done_o` pulses 1 clock later for a sharp state or after
// the SQRT (NQ-independent PROB_W/2 clocks) and 1/X (33 clocks) otherwise,
// with `meas_apply_o` telling whether a second, collapsing pass is needed.
// The tolerance TOL = 2^NQ * 2^-16 grows with the qubit count as the paper
// asks; its exact value is this design's choice.
//
// Lint note: the busy outputs of the square-root and reciprocal units are
// not used; the sequencer waits for their done pulses instead.
module one_qubit_gate_pool
  import qsu_pkg::*;
#(
  parameter int unsigned NQ   = 7,
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cplx_t [2**NQ-1:0]  data_i,
  input  gate_op_e           op_i,
  input  unit_mode_e         mode_i,
  input  logic               issue_i,
  input  logic [7:0]         perr_i,
  input  logic               capture_i,
  input  logic               sum_all_i,
  input  logic               meas_start_i,
  input  logic               meas_norm_i,
  output logic               meas_done_o,
  output logic               meas_apply_o,
  output logic               meas_side_o,
  output logic               err_hit_o,
  output prob_t              sum_o,
  output cplx_t [2**NQ-1:0]  data_o
);
  localparam int unsigned NU = 2 ** (NQ - 1);
  localparam prob_t ONE_P = prob_t'(1) << PFRAC_W;
  localparam prob_t TOL   = prob_t'(1) << (NQ + PFRAC_W - FRAC_W);
  localparam int unsigned ROOT_W = PROB_W / 2;

  // ---------------- gate units ----------------
  logic [31:0]     rnd;
  logic            err_hit;
  logic            side;
  scale_t          scale;
  mat2_t           m;
  prob_t [NU-1:0]  mag0, mag1, add_in;

  prng #(.SEED(SEED)) u_prng (.clk(clk), .rst_n(rst_n), .rnd_o(rnd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       err_hit <= 1'b0;
    else if (issue_i) err_hit <= (rnd[31:24] < perr_i);
  end
  assign err_hit_o = err_hit;

  always_comb begin
    if ((op_i inside {OP_EX, OP_EY, OP_EZ}) && !err_hit) m = gate_matrix(OP_NOP);
    else                                                 m = gate_matrix(op_i);
  end

  for (genvar c = 0; c < NU; c++) begin : g_unit
    one_qubit_unit u_unit (
      .a0_i(data_i[2*c]), .a1_i(data_i[2*c+1]),
      .m_i(m), .mode_i(mode_i), .side_i(side), .scale_i(scale),
      .y0_o(data_o[2*c]), .y1_o(data_o[2*c+1]),
      .mag0_o(mag0[c]), .mag1_o(mag1[c])
    );
    assign add_in[c] = sum_all_i ? (mag0[c] + mag1[c]) : mag0[c];
  end

  adder_network #(.N_IN(NU)) u_adder (
    .clk(clk), .rst_n(rst_n), .capture_i(capture_i), .mag_i(add_in), .sum_o(sum_o)
  );

  // ---------------- measurement / normalization sequencer ----------------
  typedef enum logic [2:0] {M_IDLE, M_DECIDE, M_SQRT, M_RECIP} mstate_e;
  mstate_e        st;
  logic           norm;
  prob_t          target;
  logic           sq_start, sq_busy, sq_done;
  logic [ROOT_W-1:0] root;
  logic           rc_start, rc_busy, rc_done;
  scale_t         recip;
  logic           collapse1;
  prob_t          p_target;

  // comparator: P0 < prn ("if true, collapse to 1"); mux: P0 or 1 - P0
  always_comb begin
    collapse1 = (sum_o < prob_t'(rnd));
    if (norm)           p_target = sum_o;
    else if (collapse1) p_target = ONE_P - sum_o;
    else                p_target = sum_o;
  end

  sqrt_unit #(.IN_W(PROB_W)) u_sqrt (
    .clk(clk), .rst_n(rst_n), .start_i(sq_start), .rad_i(target),
    .busy_o(sq_busy), .done_o(sq_done), .root_o(root)
  );

  recip_unit #(.D_W(ROOT_W), .Q_W(SCALE_W), .FRAC(FRAC_W)) u_recip (
    .clk(clk), .rst_n(rst_n), .start_i(rc_start), .d_i(root),
    .busy_o(rc_busy), .done_o(rc_done), .q_o(recip)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= M_IDLE;
      norm         <= 1'b0;
      side         <= 1'b0;
      scale        <= scale_t'(ONE);
      target       <= '0;
      sq_start     <= 1'b0;
      rc_start     <= 1'b0;
      meas_done_o  <= 1'b0;
      meas_apply_o <= 1'b0;
    end else begin
      sq_start    <= 1'b0;
      rc_start    <= 1'b0;
      meas_done_o <= 1'b0;
      case (st)
        M_IDLE: if (meas_start_i) begin
          norm <= meas_norm_i;
          st   <= M_DECIDE;
        end
        M_DECIDE: begin
          if (norm) begin
            if ((sum_o <= ONE_P + TOL) && (sum_o + TOL >= ONE_P)) begin
              meas_apply_o <= 1'b0;
              meas_done_o  <= 1'b1;
              st           <= M_IDLE;
            end else begin
              target   <= p_target;
              sq_start <= 1'b1;
              st       <= M_SQRT;
            end
          end else if (sum_o <= TOL) begin          // sharp: qubit is 1
            side         <= 1'b1;
            meas_apply_o <= 1'b0;
            meas_done_o  <= 1'b1;
            st           <= M_IDLE;
          end else if (sum_o + TOL >= ONE_P) begin  // sharp: qubit is 0
            side         <= 1'b0;
            meas_apply_o <= 1'b0;
            meas_done_o  <= 1'b1;
            st           <= M_IDLE;
          end else begin
            side     <= collapse1;
            target   <= p_target;
            sq_start <= 1'b1;
            st       <= M_SQRT;
          end
        end
        M_SQRT: if (sq_done) begin
          rc_start <= 1'b1;
          st       <= M_RECIP;
        end
        M_RECIP: if (rc_done) begin
          scale        <= recip;
          meas_apply_o <= 1'b1;
          meas_done_o  <= 1'b1;
          st           <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  assign meas_side_o = side;
endmodule
