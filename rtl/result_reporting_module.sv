// result_reporting_module -- result reporting module (RRM).
//
// After every qubit has been measured the state vector has a single
// non-zero component of magnitude one; this block finds its index. On
// `eval_i` it looks at all 2^NQ amplitudes at once: a component counts as
// non-zero when |re| or |im| exceeds EPS (remnants of rounding stay below
// it). If exactly one component is non-zero and its |a|^2 is within MAG_TOL
// of 1, `single_o` is set and `index_o` gives its index; otherwise
// `entangled_o` says no single result exists. Results are registered and
// `valid_o` rises one clock after `eval_i` and stays until `clear_i`.
// The paper gives the function; EPS and MAG_TOL are this design's choices.
// MAG_TOL is wide (|a|^2 within 1/16 of 1) because each collapse rescales by
// 1/sqrt(1 - P0) as the paper's measurement path does, so the rounding drift
// of the total probability carries into the last amplitude: after the seven
// measurements of the 7-qubit random circuit, |a|^2 was seen as far as 1.024
// from 1.
module result_reporting_module
  import qsu_pkg::*;
#(
  parameter int unsigned NQ      = 7,
  parameter int unsigned EPS     = 256,        // 2^-8 in Q1.16
  parameter int unsigned MAG_TOL = 1 << 28     // 2^-4 in 32-fraction format
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear_i,
  input  logic               eval_i,
  input  cplx_t [2**NQ-1:0]  amp_i,
  output logic               valid_o,
  output logic               single_o,
  output logic               entangled_o,
  output logic [NQ-1:0]      index_o
);
  localparam prob_t ONE_P = prob_t'(1) << PFRAC_W;
  localparam int unsigned SQ_W = 2 * AMP_W;
  typedef logic signed [SQ_W-1:0] sq_t;

  function automatic logic big(amp_t a);
    return (a > amp_t'(EPS)) || (a < -amp_t'(EPS));
  endfunction

  logic [2**NQ-1:0] nz;
  logic [NQ:0]      count;
  logic [NQ-1:0]    first;
  prob_t            mag;
  logic             unit_mag;

  always_comb begin
    count = '0;
    first = '0;
    for (int i = 2**NQ - 1; i >= 0; i--) begin
      nz[i] = big(amp_i[i].re) || big(amp_i[i].im);
      if (nz[i]) begin
        count = count + 1'b1;
        first = NQ'(i);
      end
    end
    mag = prob_t'($unsigned(sq_t'(amp_i[first].re) * sq_t'(amp_i[first].re)))
        + prob_t'($unsigned(sq_t'(amp_i[first].im) * sq_t'(amp_i[first].im)));
    unit_mag = (mag + prob_t'(MAG_TOL) >= ONE_P) && (mag <= ONE_P + prob_t'(MAG_TOL));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o     <= 1'b0;
      single_o    <= 1'b0;
      entangled_o <= 1'b0;
      index_o     <= '0;
    end else if (clear_i) begin
      valid_o     <= 1'b0;
      single_o    <= 1'b0;
      entangled_o <= 1'b0;
      index_o     <= '0;
    end else if (eval_i) begin
      valid_o     <= 1'b1;
      single_o    <= (count == 1) && unit_mag;
      entangled_o <= !((count == 1) && unit_mag);
      index_o     <= first;
    end
  end
endmodule
