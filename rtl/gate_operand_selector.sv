// gate_operand_selector -- the gate operand selector (GOS) of the QSU.
//
// Attaches to every QSR component the position it must reach at the output
// of the permutation network. With the current qubit order in the QSR and
// the order the next gate needs (from the permutation state manager, as
// `src_bit_i[k]` = the current index bit that becomes bit k), component p
// goes to the index whose bit k is bit src_bit_i[k] of p. After the network
// the operands of one gate unit sit side by side: pairs (2c, 2c+1) for a
// one-input gate on qa, quartets (4c..4c+3) for a two-input gate. The gate
// information itself travels alongside as control from the gate issue
// module. The components themselves pass through unchanged (`data_o` is
// `amp_i`); only the tags are computed here. Purely combinational. The
// paper gives the function; the tag-per-component form is this design's.
module gate_operand_selector
  import qsu_pkg::*;
#(
  parameter int unsigned NQ = 7
) (
  input  cplx_t [2**NQ-1:0]              amp_i,
  input  logic [NQ-1:0][$clog2(NQ)-1:0]  src_bit_i,
  output cplx_t [2**NQ-1:0]              data_o,
  output logic [2**NQ-1:0][NQ-1:0]       tag_o
);
  always_comb begin
    for (int p = 0; p < 2**NQ; p++) begin
      automatic logic [NQ-1:0] idx = NQ'(p);
      data_o[p] = amp_i[p];
      for (int k = 0; k < NQ; k++) tag_o[p][k] = idx[src_bit_i[k]];
    end
  end
endmodule
