// one_qubit_unit -- one functional unit of the one-qubit gate pool.
//
// Works on one amplitude pair (a0, a1) that differs only in the qubit the
// gate acts on (a0 has that qubit 0, a1 has it 1). Combinational:
//   U_APPLY    (y0, y1) = G (a0, a1) with the 2x2 complex matrix G;
//   U_COLLAPSE side 0: y0 = a0*scale, y1 = 0; side 1: y0 = 0, y1 = a1*scale;
//   U_SCALE    y0 = a0*scale, y1 = a1*scale.
// It also returns |a0|^2 and |a1|^2 in the extended format (32 fraction
// bits) for the adder network. Products are Q1.16 x Q1.16, summed at full
// width, rounded to nearest and saturated to 18 bits. The operations follow
// the paper's measurement and gate algorithms; rounding and saturation are
// this design's choice.
module one_qubit_unit
  import qsu_pkg::*;
(
  input  cplx_t      a0_i,
  input  cplx_t      a1_i,
  input  mat2_t      m_i,
  input  unit_mode_e mode_i,
  input  logic       side_i,
  input  scale_t     scale_i,
  output cplx_t      y0_o,
  output cplx_t      y1_o,
  output prob_t      mag0_o,
  output prob_t      mag1_o
);
  localparam int unsigned ACC_W = 2 * AMP_W + 2;
  localparam int unsigned SACC_W = AMP_W + SCALE_W + 1;

  function automatic amp_t round_sat(logic signed [ACC_W-1:0] acc);
    logic signed [ACC_W-1:0] r;
    r = (acc + ACC_W'(1 << (FRAC_W - 1))) >>> FRAC_W;
    if (r > ACC_W'(2**(AMP_W-1) - 1))        return amp_t'(2**(AMP_W-1) - 1);
    else if (r < -ACC_W'(2**(AMP_W-1)))      return amp_t'(-(2**(AMP_W-1)));
    else                                     return amp_t'(r);
  endfunction

  function automatic amp_t scale_sat(amp_t a, scale_t s);
    logic signed [SACC_W-1:0] p, r;
    p = SACC_W'(a) * $signed({1'b0, s});
    r = (p + SACC_W'(1 << (FRAC_W - 1))) >>> FRAC_W;
    if (r > SACC_W'(2**(AMP_W-1) - 1))       return amp_t'(2**(AMP_W-1) - 1);
    else if (r < -SACC_W'(2**(AMP_W-1)))     return amp_t'(-(2**(AMP_W-1)));
    else                                     return amp_t'(r);
  endfunction

  // (m0 * a0 + m1 * a1), complex
  function automatic cplx_t dot2(cplx_t m0, cplx_t a0, cplx_t m1, cplx_t a1);
    logic signed [ACC_W-1:0] re, im;
    cplx_t y;
    re = ACC_W'(m0.re * a0.re) - ACC_W'(m0.im * a0.im)
       + ACC_W'(m1.re * a1.re) - ACC_W'(m1.im * a1.im);
    im = ACC_W'(m0.re * a0.im) + ACC_W'(m0.im * a0.re)
       + ACC_W'(m1.re * a1.im) + ACC_W'(m1.im * a1.re);
    y.re = round_sat(re);
    y.im = round_sat(im);
    return y;
  endfunction

  function automatic prob_t mag2(cplx_t a);
    logic signed [2*AMP_W-1:0] rr, ii;
    rr = a.re * a.re;
    ii = a.im * a.im;
    return prob_t'($unsigned(rr)) + prob_t'($unsigned(ii));
  endfunction

  always_comb begin
    y0_o = '0;
    y1_o = '0;
    case (mode_i)
      U_APPLY: begin
        y0_o = dot2(m_i.m00, a0_i, m_i.m01, a1_i);
        y1_o = dot2(m_i.m10, a0_i, m_i.m11, a1_i);
      end
      U_COLLAPSE: begin
        if (side_i) begin
          y1_o.re = scale_sat(a1_i.re, scale_i);
          y1_o.im = scale_sat(a1_i.im, scale_i);
        end else begin
          y0_o.re = scale_sat(a0_i.re, scale_i);
          y0_o.im = scale_sat(a0_i.im, scale_i);
        end
      end
      default: begin
        y0_o.re = scale_sat(a0_i.re, scale_i);
        y0_o.im = scale_sat(a0_i.im, scale_i);
        y1_o.re = scale_sat(a1_i.re, scale_i);
        y1_o.im = scale_sat(a1_i.im, scale_i);
      end
    endcase
    mag0_o = mag2(a0_i);
    mag1_o = mag2(a1_i);
  end
endmodule
