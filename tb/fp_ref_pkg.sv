// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// Computes in double precision (SystemVerilog real) and rounds the result
// to single precision, to nearest with ties to even, flushing subnormals to
// zero. A product of two singles is exact in double, and double rounding
// of a sum of two singles is known to give the correctly rounded single
// result, so fmul and fadd agree bit for bit with a correct single-precision
// unit on normal numbers. cmul and mv2 follow the operation order of the
// matrix-vector unit, which is part of its definition.
package fp_ref_pkg;
  import q2l_pkg::*;

  function automatic real f2r(fp32_t f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return 0.0 * (f[31] ? -1.0 : 1.0);
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'h0};
    return $bitstoreal(d);
  endfunction

  function automatic fp32_t r2f(real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] mr;
    logic        g, st;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'h000) return {d[63], 31'h0};
    if (d[62:52] == 11'h7FF) return {d[63], 8'hFF, 23'h0};
    m  = {1'b1, d[51:0]};
    e  = int'(d[62:52]) - 1023 + 127;
    g  = m[28];
    st = |m[27:0];
    mr = {1'b0, m[52:29]} + {24'h0, g & (st | m[29])};
    if (mr[24]) begin mr = mr >> 1; e++; end
    if (e <= 0)   return {d[63], 31'h0};
    if (e >= 255) return {d[63], 8'hFF, 23'h0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  function automatic fp32_t fmul(fp32_t a, fp32_t b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic fp32_t fadd(fp32_t a, fp32_t b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic fp32_t fneg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic cplx_t cmul(cplx_t p, cplx_t x);
    cplx_t r;
    r.re = fadd(fmul(p.re, x.re), fneg(fmul(p.im, x.im)));
    r.im = fadd(fmul(p.re, x.im), fmul(p.im, x.re));
    return r;
  endfunction

  function automatic cplx_t cadd(cplx_t p, cplx_t q);
    cplx_t r;
    r.re = fadd(p.re, q.re);
    r.im = fadd(p.im, q.im);
    return r;
  endfunction

  // y0 = a*x0 + b*x1, y1 = c*x0 + d*x1, in the unit's operation order
  function automatic cpair_t mv2(cplx_t a, cplx_t b, cplx_t c, cplx_t d, cpair_t x);
    cpair_t y;
    y[0] = cadd(cmul(a, x[0]), cmul(b, x[1]));
    y[1] = cadd(cmul(c, x[0]), cmul(d, x[1]));
    return y;
  endfunction

  // A random normal single with magnitude in [2^-8, 2^8), sometimes zero.
  function automatic fp32_t rnd_fp();
    logic [31:0] r;
    r = $urandom;
    if (r[7:0] == 8'h00) return {r[31], 31'h0};
    return {r[31], 8'(127 - 8 + (r[30:23] % 16)), r[22:0]};
  endfunction

  function automatic cplx_t rnd_c();
    cplx_t c;
    c.re = rnd_fp();
    c.im = rnd_fp();
    return c;
  endfunction

  function automatic cplx_t mk_c(real re, real im);
    cplx_t c;
    c.re = r2f(re);
    c.im = r2f(im);
    return c;
  endfunction
endpackage
