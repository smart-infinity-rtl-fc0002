// fp_ref_pkg -- reference FP32 arithmetic for the testbenches, built on `real`.
//
// The simulator has no single-precision type, so values are widened to double, the
// operation is done in double, and the result is rounded back to FP32 by r2f (round
// to nearest-even, subnormals flushed to zero like the design). For +, -, *, / and
// square root of FP32 operands, rounding the double result once more to FP32 gives the
// correctly rounded FP32 result, so these references are exact and independent of the
// bit-level algorithms in the design.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return 0.0;
    if (f[30:23] == 8'hff) begin
      d = {f[31], 11'h7ff, f[22:0] != '0, 51'd0};
      return $bitstoreal(d);
    end
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real x);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] t;
    logic        up;
    int          e;
    d = $realtobits(x);
    if (d[62:52] == 11'h7ff) return (d[51:0] != '0) ? 32'h7fc0_0000 : {d[63], 8'hff, 23'd0};
    if (d[62:52] == 11'h000) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    up = m[28] & ((m[27:0] != '0) | m[29]);
    t  = {1'b0, m[52:29]} + 25'(up);
    if (t[24]) begin t = t >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], e[7:0], t[22:0]};
  endfunction

  function automatic logic [31:0] rmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction
  function automatic logic [31:0] radd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction
  function automatic logic [31:0] rdiv(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) / f2r(b));
  endfunction
  function automatic logic [31:0] rsqrt(logic [31:0] a);
    return r2f($sqrt(f2r(a)));
  endfunction
  function automatic logic [31:0] raxpby(logic [31:0] al, logic [31:0] a,
                                         logic [31:0] be, logic [31:0] b);
    return radd(rmul(al, a), rmul(be, b));
  endfunction
  function automatic logic [31:0] rneg(logic [31:0] a);
    return {~a[31], a[30:0]};
  endfunction

  // random normal FP32 with exponent field in [elo, ehi]; sign random if sgn
  function automatic logic [31:0] rand_fp(int elo, int ehi, bit sgn);
    logic [31:0] r;
    int          e;
    r = $urandom;
    e = elo + int'($urandom % (ehi - elo + 1));
    return {sgn ? r[31] : 1'b0, e[7:0], r[22:0]};
  endfunction

  // optimizer reference, same operation order as the design
  // opt: 0 Adam, 1 SGD with momentum, 2 AdaGrad
  typedef struct {
    logic [31:0] m, v, p;
  } state_t;

  function automatic state_t ref_step(int opt, logic [31:0] am, logic [31:0] bm,
                                      logic [31:0] av, logic [31:0] bv,
                                      logic [31:0] step, logic [31:0] ds,
                                      logic [31:0] eps, logic [31:0] m,
                                      logic [31:0] g, logic [31:0] v,
                                      logic [31:0] p);
    state_t      s;
    logic [31:0] den;
    s.m = (opt == 2) ? m : raxpby(am, m, bm, g);
    s.v = (opt == 1) ? v : raxpby(av, v, bv, rmul(g, g));
    den = radd(rmul(rsqrt(s.v), ds), eps);
    if (opt == 1)      s.p = raxpby(32'h3f80_0000, p, rneg(step), s.m);
    else if (opt == 0) s.p = raxpby(32'h3f80_0000, p, rneg(step), rdiv(s.m, den));
    else               s.p = raxpby(32'h3f80_0000, p, rneg(step), rdiv(g, den));
    return s;
  endfunction

endpackage
