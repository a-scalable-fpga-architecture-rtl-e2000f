// pi_state_manager -- remembers the current qubit permutation of the QSR.
//
// The QSR is never put back into the original qubit order between gates:
// each gate's permutation starts from the order left by the previous one,
// and only the end of the circuit restores the original order. This module
// keeps that order as `lay[q]`, the index bit at which logical qubit q
// currently sits, and for the next pass computes the new order and the
// resulting bit permutation:
//   PI_GATE    swap qa into bit 0 (and, for a two-input gate, qb into
//              bit 1), leaving every other qubit where it is;
//   PI_HOLD    no change (second pass of a measurement or normalization);
//   PI_RESTORE back to lay[q] = q.
// `src_bit_o[k]` names the current index bit that moves to bit k; the gate
// operand selector turns it into one destination tag per component. The
// new order becomes current on `commit_i`; `clear_i` resets it to the
// original order. The paper names this block and the remembered-permutation
// idea; the swap rule and the encoding are this design's choices.
//
// Lint note: the reset is asynchronous for the registers and also appears in
// the assertions' `disable iff` clauses, which lint reports as a mixed use.
module pi_state_manager
  import qsu_pkg::*;
#(
  parameter int unsigned NQ = 7
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear_i,
  input  pi_mode_e                       mode_i,
  input  logic [3:0]                     qa_i,
  input  logic [3:0]                     qb_i,
  input  logic                           two_i,
  input  logic                           commit_i,
  output logic [NQ-1:0][$clog2(NQ)-1:0]  src_bit_o,
  output logic [NQ-1:0][$clog2(NQ)-1:0]  lay_o
);
  localparam int unsigned PB = $clog2(NQ);
  typedef logic [PB-1:0] pos_t;

  pos_t [NQ-1:0] lay, lay_n;

  always_comb begin
    lay_n = lay;
    case (mode_i)
      PI_GATE: begin
        for (int q = 0; q < NQ; q++)
          if (lay[q] == pos_t'(0)) lay_n[q] = lay[qa_i];
        lay_n[qa_i] = pos_t'(0);
        if (two_i) begin
          automatic pos_t pb = lay_n[qb_i];
          for (int q = 0; q < NQ; q++)
            if (lay_n[q] == pos_t'(1)) lay_n[q] = pb;
          lay_n[qb_i] = pos_t'(1);
        end
      end
      PI_RESTORE: for (int q = 0; q < NQ; q++) lay_n[q] = pos_t'(q);
      default: ;
    endcase
    src_bit_o = '0;
    for (int k = 0; k < NQ; k++)
      for (int q = 0; q < NQ; q++)
        if (lay_n[q] == pos_t'(k)) src_bit_o[k] = lay[q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < NQ; q++) lay[q] <= pos_t'(q);
    end else if (clear_i) begin
      for (int q = 0; q < NQ; q++) lay[q] <= pos_t'(q);
    end else if (commit_i) begin
      lay <= lay_n;
    end
  end

  assign lay_o = lay;

  // a two-input gate needs two different qubits
  a_distinct: assert property (@(posedge clk) disable iff (!rst_n)
    (commit_i && mode_i == PI_GATE && two_i) |-> (qa_i != qb_i));
endmodule
