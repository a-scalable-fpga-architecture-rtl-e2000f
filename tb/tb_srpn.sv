// tb_srpn -- self-checking test of the self-routing permutation network.
// Drives the full-size network (2^7 elements) with random index-bit
// permutations, and a 16-element network with all 24 bit permutations of
// 4 bits, and checks that element p arrives at position dest(p), that no
// routing conflict is reported, and that the output appears one clock after
// the input.
module tb_srpn;
  import qsu_pkg::*;
  localparam int NQ = 7;
  localparam int NA = 1 << NQ;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                   valid_i, valid_o, conf;
  logic [NA-1:0][NQ-1:0]  tag;
  cplx_t [NA-1:0]         din, dout;

  srpn #(.NQ(NQ)) dut (.clk(clk), .rst_n(rst_n), .valid_i(valid_i), .tag_i(tag),
    .data_i(din), .valid_o(valid_o), .data_o(dout), .conflict_o(conf));

  logic                   v4_i, v4_o, conf4;
  logic [15:0][3:0]       tag4;
  cplx_t [15:0]           din4, dout4;
  srpn #(.NQ(4)) dut4 (.clk(clk), .rst_n(rst_n), .valid_i(v4_i), .tag_i(tag4),
    .data_i(din4), .valid_o(v4_o), .data_o(dout4), .conflict_o(conf4));

  function automatic int permute_bits(int p, int perm[], int n);
    automatic int d = 0;
    for (int k = 0; k < n; k++) d |= ((p >> perm[k]) & 1) << k;
    return d;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm[];
    valid_i = 0; v4_i = 0; tag = '0; din = '0; tag4 = '0; din4 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // full size: random bit permutations
    for (int t = 0; t < 40; t++) begin
      perm = new[NQ];
      for (int k = 0; k < NQ; k++) perm[k] = k;
      perm.shuffle();
      for (int p = 0; p < NA; p++) begin
        tag[p] = NQ'(permute_bits(p, perm, NQ));
        din[p].re = amp_t'($urandom);
        din[p].im = amp_t'(p);
      end
      @(negedge clk); valid_i = 1;
      @(negedge clk); valid_i = 0;
      check(valid_o == 1, "valid one clock after input");
      check(conf == 0, "no conflict for a bit permutation");
      begin
        automatic bit ok = 1;
        for (int p = 0; p < NA; p++)
          if (dout[tag[p]] !== din[p]) ok = 0;
        check(ok, $sformatf("routing of permutation %0d", t));
      end
      @(negedge clk);
      check(valid_o == 0, "valid drops");
    end
    // 16 elements: every permutation of the 4 index bits
    for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++)
    for (int cc = 0; cc < 4; cc++) for (int d = 0; d < 4; d++) begin
      if (a != b && a != cc && a != d && b != cc && b != d && cc != d) begin
        perm = new[4];
        perm[0] = a; perm[1] = b; perm[2] = cc; perm[3] = d;
        for (int p = 0; p < 16; p++) begin
          tag4[p] = 4'(permute_bits(p, perm, 4));
          din4[p] = cx(p * 3 + 1, -p);
        end
        @(negedge clk); v4_i = 1;
        @(negedge clk); v4_i = 0;
        check(conf4 == 0, "no conflict (n=4)");
        begin
          automatic bit ok = 1;
          for (int p = 0; p < 16; p++) if (dout4[tag4[p]] !== din4[p]) ok = 0;
          check(ok, $sformatf("n=4 permutation %0d%0d%0d%0d", a, b, cc, d));
        end
      end
    end
    // a non-bit permutation that collides: two elements to the same output
    for (int p = 0; p < 16; p++) tag4[p] = 4'(p);
    tag4[1] = 4'd0;
    @(negedge clk); v4_i = 1;
    @(negedge clk); v4_i = 0;
    check(conf4 == 1, "conflict reported for two elements to one output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
