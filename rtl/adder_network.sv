// adder_network -- summing network of the one-qubit gate pool.
//
// Adds N_IN squared magnitudes (extended format, 32 fraction bits) in a
// balanced binary tree of N_IN-1 adders; N_IN must be a power of two. The
// tree is combinational and its result is captured in `sum_o` on
// `capture_i`, one clock after the operands are presented. The paper gives
// the function (a summing network in extended precision); the tree shape and
// the single register are this design's choices.
module adder_network
  import qsu_pkg::*;
#(
  parameter int unsigned N_IN = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              capture_i,
  input  prob_t [N_IN-1:0]  mag_i,
  output prob_t             sum_o
);
  // heap-ordered tree: node i has children 2i and 2i+1; leaves N_IN..2N_IN-1
  prob_t [2*N_IN-1:1] node;

  always_comb begin
    for (int i = 0; i < N_IN; i++) node[N_IN + i] = mag_i[i];
    for (int i = N_IN - 1; i >= 1; i--) node[i] = node[2*i] + node[2*i+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         sum_o <= '0;
    else if (capture_i) sum_o <= node[1];
  end
endmodule
