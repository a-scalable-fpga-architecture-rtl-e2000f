// two_qubit_gate_pool -- the two-qubit gate pool (2-QGP).
//
// 2^(NQ-2) two_qubit_unit instances in parallel; unit c takes the quartet
// (4c .. 4c+3) of the permuted state, in which the permutation network has
// placed qubit qa at index bit 0 and qb at index bit 1. The gate (CNOT, CY,
// CZ, sqrt(ZZ), SWAP, as in the paper's two-input gate table) is decoded
// once into a row-source/phase code shared by all units. With qb as the
// more significant bit, qb is the control and qa the target of CNOT, CY and
// CZ. Any other opcode passes the state through unchanged. Combinational.
// Element 0 of every quartet leaves unchanged whatever the gate, since the
// first row of every two-input gate matrix is [1 0 0 0].
module two_qubit_gate_pool
  import qsu_pkg::*;
#(
  parameter int unsigned NQ = 7
) (
  input  cplx_t [2**NQ-1:0]  data_i,
  input  gate_op_e           op_i,
  output cplx_t [2**NQ-1:0]  data_o
);
  perm4_t code;
  assign code = two_gate_code(op_i);

  for (genvar c = 0; c < 2 ** (NQ - 2); c++) begin : g_unit
    two_qubit_unit u_unit (
      .a_i(data_i[4*c +: 4]), .code_i(code), .y_o(data_o[4*c +: 4])
    );
  end
endmodule
