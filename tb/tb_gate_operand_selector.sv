// tb_gate_operand_selector -- self-checking test of the gate operand
// selector: for random bit maps, every component keeps its value and gets
// the tag whose bit k is bit src_bit[k] of its own index.
module tb_gate_operand_selector;
  import qsu_pkg::*;
  localparam int NQ = 7;
  localparam int NA = 1 << NQ;
  localparam int PB = $clog2(NQ);
  int checks = 0, failures = 0;

  cplx_t [NA-1:0] amp, data;
  logic [NQ-1:0][PB-1:0] src_bit;
  logic [NA-1:0][NQ-1:0] tag;

  gate_operand_selector #(.NQ(NQ)) dut (.amp_i(amp), .src_bit_i(src_bit),
    .data_o(data), .tag_o(tag));

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm[];
    for (int t = 0; t < 50; t++) begin
      perm = new[NQ];
      for (int k = 0; k < NQ; k++) perm[k] = k;
      perm.shuffle();
      for (int k = 0; k < NQ; k++) src_bit[k] = PB'(perm[k]);
      for (int p = 0; p < NA; p++) amp[p] = cx($urandom_range(0, 1000), -p);
      #1;
      for (int p = 0; p < NA; p++) begin
        automatic int d = 0;
        for (int k = 0; k < NQ; k++) d |= ((p >> perm[k]) & 1) << k;
        checks++;
        if (int'(tag[p]) != d || data[p] !== amp[p]) begin
          failures++;
          $display("FAIL: component %0d tag %0d expected %0d", p, tag[p], d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
