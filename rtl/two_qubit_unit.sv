// two_qubit_unit -- one functional unit of the two-qubit gate pool.
//
// Works on a quartet a[0..3] of amplitudes that differ only in the two gate
// qubits (index bit 0 = qa, bit 1 = qb). Every two-input gate of the set has
// exactly one element of {1, j, -1, -j} per matrix row, so output r is input
// src[r] turned by ph[r] quarter turns: a multiplexer and a negation, no
// multiplier, as the paper requires. Combinational.
module two_qubit_unit
  import qsu_pkg::*;
(
  input  cplx_t [3:0] a_i,
  input  perm4_t      code_i,
  output cplx_t [3:0] y_o
);
  always_comb begin
    for (int r = 0; r < 4; r++)
      y_o[r] = rot_quarter(a_i[code_i.src[r]], code_i.ph[r]);
  end
endmodule
