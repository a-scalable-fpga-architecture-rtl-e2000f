// qsu_ref_pkg -- floating-point reference model of a state-vector quantum
// simulator, used by the testbenches to compute expected results
// independently of the fixed-point RTL. Qubit q is bit q of the state
// index (qubit 0 least significant). Gate matrices are written out here
// again from the gate tables, not taken from the RTL package.
package qsu_ref_pkg;

  typedef struct {
    real re;
    real im;
  } rc_t;

  localparam real R2 = 0.70710678118654752;

  function automatic rc_t c(real re, real im);
    rc_t r;
    r.re = re; r.im = im;
    return r;
  endfunction

  function automatic rc_t cmul(rc_t a, rc_t b);
    return c(a.re*b.re - a.im*b.im, a.re*b.im + a.im*b.re);
  endfunction

  function automatic rc_t cadd(rc_t a, rc_t b);
    return c(a.re + b.re, a.im + b.im);
  endfunction

  // 2x2 matrix of a one-input gate by opcode number (see the gate table)
  function automatic void mat1(int op, output rc_t m[4]);
    m[0] = c(1,0); m[1] = c(0,0); m[2] = c(0,0); m[3] = c(1,0);
    case (op)
      1, 11: begin m[0] = c(0,0); m[1] = c(1,0); m[2] = c(1,0); m[3] = c(0,0); end
      2, 12: begin m[0] = c(0,0); m[1] = c(0,1); m[2] = c(0,-1); m[3] = c(0,0); end
      3, 13: begin m[3] = c(-1,0); end
      4:  begin m[0] = c(R2,0); m[1] = c(R2,0); m[2] = c(R2,0); m[3] = c(-R2,0); end
      5:  begin m[0] = c(0.5,0.5); m[1] = c(0.5,-0.5); m[2] = c(0.5,-0.5); m[3] = c(0.5,0.5); end
      6:  begin m[0] = c(0.5,0.5); m[1] = c(-0.5,-0.5); m[2] = c(0.5,0.5); m[3] = c(0.5,0.5); end
      7:  begin m[3] = c(0,1); end
      8:  begin m[3] = c(0,-1); end
      9:  begin m[3] = c(R2,R2); end
      10: begin m[3] = c(R2,-R2); end
      default: ;
    endcase
  endfunction

  function automatic void apply1(ref rc_t s[], input int nq, input int op, input int q);
    rc_t m[4];
    mat1(op, m);
    for (int i = 0; i < (1 << nq); i++) begin
      if (((i >> q) & 1) == 0) begin
        automatic int j = i | (1 << q);
        automatic rc_t a0 = s[i], a1 = s[j];
        s[i] = cadd(cmul(m[0], a0), cmul(m[1], a1));
        s[j] = cadd(cmul(m[2], a0), cmul(m[3], a1));
      end
    end
  endfunction

  // two-input gate; qa = index bit 0 of the 4x4 matrix (target), qb = bit 1
  function automatic void apply2(ref rc_t s[], input int nq, input int op,
                                 input int qa, input int qb);
    for (int i = 0; i < (1 << nq); i++) begin
      if (((i >> qa) & 1) == 0 && ((i >> qb) & 1) == 0) begin
        automatic int k[4];
        automatic rc_t a[4], y[4];
        k[0] = i; k[1] = i | (1 << qa); k[2] = i | (1 << qb); k[3] = k[1] | (1 << qb);
        for (int r = 0; r < 4; r++) a[r] = s[k[r]];
        y = a;
        case (op)
          16: begin y[2] = a[3]; y[3] = a[2]; end                            // CNOT
          17: begin y[2] = cmul(c(0,1), a[3]); y[3] = cmul(c(0,-1), a[2]); end // CY
          18: begin y[3] = c(-a[3].re, -a[3].im); end                        // CZ
          19: begin y[1] = cmul(c(0,1), a[1]); y[2] = cmul(c(0,1), a[2]);
                    y[3] = c(-a[3].re, -a[3].im); end                        // sqrt(ZZ)
          20: begin y[1] = a[2]; y[2] = a[1]; end                            // SWAP
          default: ;
        endcase
        for (int r = 0; r < 4; r++) s[k[r]] = y[r];
      end
    end
  endfunction

  function automatic real prob0(rc_t s[], int nq, int q);
    real p = 0.0;
    for (int i = 0; i < (1 << nq); i++)
      if (((i >> q) & 1) == 0) p += s[i].re*s[i].re + s[i].im*s[i].im;
    return p;
  endfunction

  // collapse qubit q to value v and renormalize
  function automatic void collapse(ref rc_t s[], input int nq, input int q, input int v);
    real p = 0.0;
    for (int i = 0; i < (1 << nq); i++)
      if (((i >> q) & 1) == v) p += s[i].re*s[i].re + s[i].im*s[i].im;
      else s[i] = c(0, 0);
    for (int i = 0; i < (1 << nq); i++)
      if (((i >> q) & 1) == v) s[i] = c(s[i].re / $sqrt(p), s[i].im / $sqrt(p));
  endfunction

  function automatic real fx(logic signed [17:0] v);
    return real'(v) / 65536.0;
  endfunction

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction
endpackage
