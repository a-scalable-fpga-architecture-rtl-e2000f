// tb_two_qubit_gate_pool -- self-checking test of the two-qubit gate pool.
// For every two-input gate and random states, compares each quartet of the
// output with the 4x4 matrix of the gate (qa = bit 0, qb = bit 1) applied
// by the floating-point reference model to the same quartet. Exact match is
// required: the pool only moves and negates values.
module tb_two_qubit_gate_pool;
  import qsu_pkg::*;
  import qsu_ref_pkg::*;
  localparam int NQ = 7;
  localparam int NA = 1 << NQ;
  int checks = 0, failures = 0;

  cplx_t [NA-1:0] din, dout;
  gate_op_e op;

  two_qubit_gate_pool #(.NQ(NQ)) dut (.data_i(din), .op_i(op), .data_o(dout));

  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gate_op_e ops[6] = '{OP_CNOT, OP_CY, OP_CZ, OP_SQRTZZ, OP_SWAP, OP_NOP};
    rc_t s[];
    for (int g = 0; g < 6; g++) begin
      for (int t = 0; t < 5; t++) begin
        s = new[NA];
        for (int i = 0; i < NA; i++) begin
          din[i] = cx($urandom_range(0, 60000) - 30000, $urandom_range(0, 60000) - 30000);
          s[i] = c(fx(din[i].re), fx(din[i].im));
        end
        op = ops[g];
        // qubits 0 and 1 of the reference are the pool's index bits 0 and 1
        apply2(s, NQ, int'(op), 0, 1);
        #1;
        for (int i = 0; i < NA; i++) begin
          checks++;
          if (absr(fx(dout[i].re) - s[i].re) > 1e-9 || absr(fx(dout[i].im) - s[i].im) > 1e-9) begin
            failures++;
            $display("FAIL: op %0d component %0d", op, i);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
