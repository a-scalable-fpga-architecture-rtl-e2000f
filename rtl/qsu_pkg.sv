// qsu_pkg -- shared types and constants of the quantum simulation unit (QSU).
//
// Number format. Every probability amplitude is a complex number whose real
// and imaginary parts are two's-complement fixed-point values with one integer
// bit and 16 fraction bits (18 bits with the sign), so 1.0 = 65536. That
// follows the stated 1 integer + 16 fraction bit precision; the separate sign
// bit is this design's choice so the 18x18 multiplier mode of a DSP fits.
// Squared magnitudes and probability sums use an extended format with 32
// fraction bits (the doubled precision the adder network needs).
//
// Gate words. The circuit is a list of 32-bit words:
//   [4:0]   opcode (gate_op_e)
//   [11:8]  qa : qubit of a one-input gate, or the qubit that becomes the
//                least significant index bit of a two-input gate (the target
//                of CNOT/CY/CZ)
//   [15:12] qb : second qubit of a two-input gate (next index bit, the
//                control of CNOT/CY/CZ)
//   [23:16] error probability of Ex/Ey/Ez, in units of 1/256
// The field layout and opcode values are this design's own; the gate set is
// the paper's (one-input gates of its Table 2, two-input gates of Table 3).
//
// Lint notes: when this package is checked on its own, PFRAC_W and CPLX_W are
// reported unused because only the modules use them. The helper `cx` takes
// int arguments and keeps only their low AMP_W bits.
package qsu_pkg;

  // Amplitude format
  localparam int unsigned AMP_W   = 18;
  localparam int unsigned FRAC_W  = 16;
  localparam int signed   ONE     = 1 << FRAC_W;         // 1.0
  localparam int signed   INV_RT2 = 46341;               // 1/sqrt(2)
  localparam int signed   HALF    = 1 << (FRAC_W - 1);   // 0.5

  // Extended precision for |a|^2 and probability sums: 32 fraction bits
  localparam int unsigned PFRAC_W = 2 * FRAC_W;
  localparam int unsigned PROB_W  = 44;
  // Normalization factor 1/sqrt(P): unsigned, 16 fraction bits, up to 2^10
  localparam int unsigned SCALE_W = 27;

  typedef logic signed [AMP_W-1:0] amp_t;

  typedef struct packed {
    amp_t re;
    amp_t im;
  } cplx_t;

  localparam int unsigned CPLX_W = 2 * AMP_W;

  typedef logic [PROB_W-1:0]  prob_t;
  typedef logic [SCALE_W-1:0] scale_t;

  // 2x2 complex gate matrix, row-major
  typedef struct packed {
    cplx_t m00;
    cplx_t m01;
    cplx_t m10;
    cplx_t m11;
  } mat2_t;

  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    OP_X      = 5'd1,
    OP_Y      = 5'd2,
    OP_Z      = 5'd3,
    OP_H      = 5'd4,
    OP_V      = 5'd5,   // sqrt(X)
    OP_SQRTY  = 5'd6,
    OP_S      = 5'd7,   // sqrt(Z)
    OP_SDG    = 5'd8,   // S^-1
    OP_T      = 5'd9,
    OP_TDG    = 5'd10,  // T^-1
    OP_EX     = 5'd11,
    OP_EY     = 5'd12,
    OP_EZ     = 5'd13,
    OP_M      = 5'd14,
    OP_CNOT   = 5'd16,
    OP_CY     = 5'd17,
    OP_CZ     = 5'd18,
    OP_SQRTZZ = 5'd19,
    OP_SWAP   = 5'd20,
    OP_END    = 5'd31   // restore qubit order and report the result
  } gate_op_e;

  typedef struct packed {
    logic [7:0] reserved;
    logic [7:0] perr;
    logic [3:0] qb;
    logic [3:0] qa;
    logic [2:0] reserved2;
    gate_op_e   op;
  } gate_word_t;

  // What the one-qubit units do on a pass
  typedef enum logic [1:0] {
    U_APPLY    = 2'd0,  // y = G a
    U_COLLAPSE = 2'd1,  // keep one half, scaled; zero the other
    U_SCALE    = 2'd2   // y = a * scale (normalization)
  } unit_mode_e;

  // What the permutation state manager does for a pass
  typedef enum logic [1:0] {
    PI_HOLD    = 2'd0,  // keep the current qubit order
    PI_GATE    = 2'd1,  // bring qa to index bit 0 (and qb to bit 1)
    PI_RESTORE = 2'd2   // return to the original qubit order
  } pi_mode_e;

  function automatic logic is_two_input(gate_op_e op);
    return op inside {OP_CNOT, OP_CY, OP_CZ, OP_SQRTZZ, OP_SWAP};
  endfunction

  function automatic cplx_t cx(int signed re, int signed im);
    cplx_t c;
    c.re = amp_t'(re);
    c.im = amp_t'(im);
    return c;
  endfunction

  function automatic mat2_t mat(cplx_t a, cplx_t b, cplx_t c, cplx_t d);
    mat2_t m;
    m.m00 = a; m.m01 = b; m.m10 = c; m.m11 = d;
    return m;
  endfunction

  // Unitary matrices of the one-input gates (paper Table 2), in Q1.16.
  // Ex/Ey/Ez return the Pauli matrix; whether it is applied is decided by the
  // gate pool from the error probability.
  function automatic mat2_t gate_matrix(gate_op_e op);
    case (op)
      OP_X, OP_EX: return mat(cx(0, 0), cx(ONE, 0), cx(ONE, 0), cx(0, 0));
      OP_Y, OP_EY: return mat(cx(0, 0), cx(0, ONE), cx(0, -ONE), cx(0, 0));
      OP_Z, OP_EZ: return mat(cx(ONE, 0), cx(0, 0), cx(0, 0), cx(-ONE, 0));
      OP_H:        return mat(cx(INV_RT2, 0), cx(INV_RT2, 0),
                              cx(INV_RT2, 0), cx(-INV_RT2, 0));
      OP_V:        return mat(cx(HALF, HALF), cx(HALF, -HALF),
                              cx(HALF, -HALF), cx(HALF, HALF));
      OP_SQRTY:    return mat(cx(HALF, HALF), cx(-HALF, -HALF),
                              cx(HALF, HALF), cx(HALF, HALF));
      OP_S:        return mat(cx(ONE, 0), cx(0, 0), cx(0, 0), cx(0, ONE));
      OP_SDG:      return mat(cx(ONE, 0), cx(0, 0), cx(0, 0), cx(0, -ONE));
      OP_T:        return mat(cx(ONE, 0), cx(0, 0), cx(0, 0), cx(INV_RT2, INV_RT2));
      OP_TDG:      return mat(cx(ONE, 0), cx(0, 0), cx(0, 0), cx(INV_RT2, -INV_RT2));
      default:     return mat(cx(ONE, 0), cx(0, 0), cx(0, 0), cx(ONE, 0));
    endcase
  endfunction

  // Two-input gates (paper Table 3): every row of the 4x4 matrix has exactly
  // one non-zero element in {1, j, -1, -j}. Row r of the output takes input
  // element src[r] rotated by ph[r] quarter turns (0:1, 1:j, 2:-1, 3:-j).
  typedef struct packed {
    logic [3:0][1:0] src;
    logic [3:0][1:0] ph;
  } perm4_t;

  function automatic perm4_t two_gate_code(gate_op_e op);
    perm4_t p;
    p.src = {2'd3, 2'd2, 2'd1, 2'd0};    // src[r] = r (identity)
    p.ph  = '0;
    case (op)
      OP_CNOT:   begin p.src[2] = 2'd3; p.src[3] = 2'd2; end
      OP_CY:     begin p.src[2] = 2'd3; p.ph[2] = 2'd1;
                       p.src[3] = 2'd2; p.ph[3] = 2'd3; end
      OP_CZ:     begin p.ph[3] = 2'd2; end
      OP_SQRTZZ: begin p.ph[1] = 2'd1; p.ph[2] = 2'd1; p.ph[3] = 2'd2; end
      OP_SWAP:   begin p.src[1] = 2'd2; p.src[2] = 2'd1; end
      default:   ;
    endcase
    return p;
  endfunction

  // Multiply by j^q
  function automatic cplx_t rot_quarter(cplx_t a, logic [1:0] q);
    case (q)
      2'd1:    return cx(-int'(a.im), int'(a.re));
      2'd2:    return cx(-int'(a.re), -int'(a.im));
      2'd3:    return cx(int'(a.im), -int'(a.re));
      default: return a;
    endcase
  endfunction

endpackage
