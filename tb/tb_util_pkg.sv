// tb_util_pkg: helpers for the testbenches: conversion between binary32
// words and real numbers, a double-precision complex type for reference
// models, random test values and tolerance checks.
package tb_util_pkg;
  import hqr_pkg::*;

  typedef struct {
    real re;
    real im;
  } rc_t;

  // binary32 <-> real through the binary64 bit pattern (subnormals as zero)
  function automatic real f2r(fp32_t x);
    logic [63:0] d;
    if (x[30:23] == 8'd0) return 0.0;
    if (x[30:23] == 8'hFF) return x[31] ? -1.0e300 : 1.0e300;
    d = {x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic fp32_t r2f(real r);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    if (d[62:52] == 11'd0 || e <= 0) return {d[63], 31'd0};
    m = {2'b01, d[51:29]};
    if (d[28] && (d[27:0] != 0 || d[29])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e++; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic rc_t c2r(cplx_t c);
    rc_t r;
    r.re = f2r(c.re);
    r.im = f2r(c.im);
    return r;
  endfunction

  function automatic cplx_t r2c(rc_t r);
    cplx_t c;
    c.re = r2f(r.re);
    c.im = r2f(r.im);
    return c;
  endfunction

  function automatic rc_t rc(real re, real im);
    rc_t r;
    r.re = re;
    r.im = im;
    return r;
  endfunction

  function automatic rc_t radd(rc_t a, rc_t b);
    return rc(a.re + b.re, a.im + b.im);
  endfunction

  function automatic rc_t rsub(rc_t a, rc_t b);
    return rc(a.re - b.re, a.im - b.im);
  endfunction

  function automatic rc_t rmul(rc_t a, rc_t b);
    return rc(a.re * b.re - a.im * b.im, a.re * b.im + a.im * b.re);
  endfunction

  function automatic rc_t rconj(rc_t a);
    return rc(a.re, -a.im);
  endfunction

  function automatic rc_t rneg(rc_t a);
    return rc(-a.re, -a.im);
  endfunction

  function automatic real rabs(rc_t a);
    return $sqrt(a.re * a.re + a.im * a.im);
  endfunction

  // uniform real in [-1, 1)
  function automatic real urand();
    return (real'($urandom % 2000001) - 1000000.0) / 1000000.0;
  endfunction

  function automatic rc_t crand(real mag);
    return rc(mag * urand(), mag * urand());
  endfunction

  // |got - want| <= tol * max(1, |want|)
  function automatic bit close(rc_t got, rc_t want, real tol);
    real m;
    m = rabs(want);
    if (m < 1.0) m = 1.0;
    return rabs(rsub(got, want)) <= tol * m;
  endfunction

endpackage
