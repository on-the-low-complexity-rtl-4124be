// tb_util_pkg -- testbench helpers: conversion between the detector's
// fixed-point words and real numbers, a small complex-real type, and
// Gaussian random numbers (Box-Muller over $urandom).
package tb_util_pkg;
  import tma_pkg::*;

  typedef struct {
    real re;
    real im;
  } cr_t;

  localparam real SCALE = real'(1 << FRAC);

  function automatic real fx2r(input fx_t v);
    return real'(v) / SCALE;
  endfunction

  function automatic fx_t r2fx(input real r);
    real s;
    s = r * SCALE;
    s = (s >= 0.0) ? s + 0.5 : s - 0.5;
    if (s > real'(FX_MAX)) return FX_MAX;
    if (s < real'(FX_MIN)) return FX_MIN;
    return fx_t'($rtoi(s));
  endfunction

  function automatic cr_t c2r(input cplx_t c);
    cr_t r;
    r.re = fx2r(c.re);
    r.im = fx2r(c.im);
    return r;
  endfunction

  function automatic cplx_t r2c(input cr_t r);
    cplx_t c;
    c.re = r2fx(r.re);
    c.im = r2fx(r.im);
    return c;
  endfunction

  function automatic cr_t cr(input real re, input real im);
    cr_t r;
    r.re = re;
    r.im = im;
    return r;
  endfunction

  function automatic cr_t crmul(input cr_t a, input cr_t b);
    return cr(a.re * b.re - a.im * b.im, a.re * b.im + a.im * b.re);
  endfunction

  function automatic cr_t cradd(input cr_t a, input cr_t b);
    return cr(a.re + b.re, a.im + b.im);
  endfunction

  function automatic cr_t crsub(input cr_t a, input cr_t b);
    return cr(a.re - b.re, a.im - b.im);
  endfunction

  function automatic cr_t crconj(input cr_t a);
    return cr(a.re, -a.im);
  endfunction

  function automatic cr_t crscale(input cr_t a, input real s);
    return cr(a.re * s, a.im * s);
  endfunction

  function automatic cr_t crdiv(input cr_t a, input cr_t b);
    real d;
    d = b.re * b.re + b.im * b.im;
    return cr((a.re * b.re + a.im * b.im) / d, (a.im * b.re - a.re * b.im) / d);
  endfunction

  function automatic real crabs(input cr_t a);
    return $sqrt(a.re * a.re + a.im * a.im);
  endfunction

  function automatic real rabs(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // uniform in (0,1)
  function automatic real urand();
    return (real'($urandom % 32'd1000000) + 0.5) / 1000000.0;
  endfunction

  // uniform in [lo,hi)
  function automatic real urange(input real lo, input real hi);
    return lo + (hi - lo) * urand();
  endfunction

  // standard normal
  function automatic real gauss();
    real u1, u2;
    u1 = urand();
    u2 = urand();
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction
endpackage
