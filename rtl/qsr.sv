// qsr -- quantum state register (QSR): the 2^NQ complex amplitudes.
//
// One register per amplitude so that all of them can enter the permutation
// network in the same clock (the paper's datapath reads the whole QSR at
// once). Three write paths, in priority order:
//   clear_i   : state |0...0> (amplitude 0 = 1.0, all others 0);
//   we_all_i  : every amplitude from `data_all_i` (the gate pool mux);
//   we_one_i  : amplitude `idx_i` from `data_one_i` (initialization).
// `rd_idx_i`/`rd_data_o` is a combinational read port for readback. The
// register resets to |0...0>. Writes take effect at the clock edge.
module qsr
  import qsu_pkg::*;
#(
  parameter int unsigned NQ = 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear_i,
  input  logic               we_all_i,
  input  cplx_t [2**NQ-1:0]  data_all_i,
  input  logic               we_one_i,
  input  logic [NQ-1:0]      idx_i,
  input  cplx_t              data_one_i,
  input  logic [NQ-1:0]      rd_idx_i,
  output cplx_t              rd_data_o,
  output cplx_t [2**NQ-1:0]  amp_o
);
  cplx_t [2**NQ-1:0] amp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      amp    <= '0;
      amp[0] <= cx(ONE, 0);
    end else if (clear_i) begin
      amp    <= '0;
      amp[0] <= cx(ONE, 0);
    end else if (we_all_i) begin
      amp <= data_all_i;
    end else if (we_one_i) begin
      amp[idx_i] <= data_one_i;
    end
  end

  assign amp_o     = amp;
  assign rd_data_o = amp[rd_idx_i];
endmodule
