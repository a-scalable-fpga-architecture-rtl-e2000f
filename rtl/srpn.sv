// srpn -- self-routing permutation network (SRPN) of the QSU, 2^NQ to 2^NQ.
//
// Moves every amplitude of the state vector to the position given by its
// destination tag, in one pass through a self-routing Benes network
// (srpn_benes: 2*NQ-1 columns of 2^(NQ-1) 2x2 switches). The Benes topology
// and the self-routing switches follow the paper; the single output register
// stage is this design's choice (the paper gives no pipelining).
//
// Interface: when `valid_i` is high the tagged elements on `data_i`/`tag_i`
// are routed and captured; one clock later `valid_o` is high and `data_o`
// holds the permuted vector, element d being the one whose tag was d.
// `conflict_o` (registered with the data) reports a routing collision, which
// never happens for the index-bit permutations the simulator issues.
module srpn
  import qsu_pkg::*;
#(
  parameter int unsigned NQ = 7
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        valid_i,
  input  logic [2**NQ-1:0][NQ-1:0]    tag_i,
  input  cplx_t [2**NQ-1:0]           data_i,
  output logic                        valid_o,
  output cplx_t [2**NQ-1:0]           data_o,
  output logic                        conflict_o
);
  logic [2**NQ-1:0][CPLX_W-1:0] net_in, net_out;
  logic                         net_conf;

  always_comb begin
    for (int i = 0; i < 2**NQ; i++) net_in[i] = data_i[i];
  end

  srpn_benes #(.N(NQ), .W(CPLX_W)) u_net (
    .tag_i(tag_i), .data_i(net_in), .data_o(net_out), .conflict_o(net_conf)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o    <= 1'b0;
      conflict_o <= 1'b0;
    end else begin
      valid_o    <= valid_i;
      if (valid_i) conflict_o <= net_conf;
    end
  end

  always_ff @(posedge clk) begin
    if (valid_i)
      for (int i = 0; i < 2**NQ; i++) data_o[i] <= net_out[i];
  end
endmodule
