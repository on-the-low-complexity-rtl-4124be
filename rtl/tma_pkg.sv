// tma_pkg -- number format and complex arithmetic shared by the detector.
//
// Every real quantity (and each half of a complex one) is a WL = 15 bit
// two's-complement fixed-point word with FRAC = 11 fraction bits, so the
// representable range is [-8, 8) with a step of 2^-11.  The 15-bit word
// length is the quantization length used for the FPGA implementation; the
// split into 3 integer and 11 fraction bits is this design's choice and
// assumes the channel matrix is scaled so that the Gram matrix W has a
// diagonal of order one (Gamma entries of order 1/sqrt(N)).
//
// Products are formed at full precision, rounded half-up back to FRAC
// fraction bits and saturated to the word range.  Accumulators keep the
// full-precision products and round only once at the end.
package tma_pkg;

  localparam int WL   = 15;
  localparam int FRAC = 11;
  // wide signed value used for full-precision products and sums
  localparam int XW   = 64;

  typedef logic signed [WL-1:0] fx_t;
  typedef logic signed [XW-1:0] wide_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  // full-precision complex value (2*FRAC fraction bits)
  typedef struct packed {
    wide_t re;
    wide_t im;
  } cwide_t;

  // which band of W seeds the Neumann series
  typedef enum logic {
    MODE_TMA = 1'b0,   // tridiagonal X (the proposed scheme)
    MODE_DNS = 1'b1    // diagonal X (diagonal Neumann series)
  } tma_mode_e;

  // token that travels with the operands through the systolic array
  typedef struct packed {
    logic valid;
    logic first;
    logic last;
  } sa_ctl_t;

  localparam fx_t   FX_MAX  = fx_t'((1 << (WL - 1)) - 1);
  localparam fx_t   FX_MIN  = fx_t'(-(1 << (WL - 1)));
  localparam fx_t   FX_ONE  = fx_t'(1 << FRAC);
  localparam cplx_t C_ZERO  = '{re: '0, im: '0};

  // saturate a value that already has FRAC fraction bits
  function automatic fx_t sat(input wide_t v);
    if (v > wide_t'(FX_MAX)) return FX_MAX;
    if (v < wide_t'(FX_MIN)) return FX_MIN;
    return fx_t'(v);
  endfunction

  // round a value with 2*FRAC fraction bits to FRAC fraction bits and saturate
  function automatic fx_t rnd(input wide_t v);
    wide_t r;
    r = (v + (wide_t'(1) <<< (FRAC - 1))) >>> FRAC;
    return sat(r);
  endfunction

  function automatic fx_t fadd(input fx_t a, input fx_t b);
    return sat(wide_t'(a) + wide_t'(b));
  endfunction

  function automatic fx_t fsub(input fx_t a, input fx_t b);
    return sat(wide_t'(a) - wide_t'(b));
  endfunction

  function automatic fx_t fmul(input fx_t a, input fx_t b);
    return rnd(wide_t'(a) * wide_t'(b));
  endfunction

  function automatic cplx_t cadd(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = fadd(a.re, b.re);
    r.im = fadd(a.im, b.im);
    return r;
  endfunction

  function automatic cplx_t cneg(input cplx_t a);
    cplx_t r;
    r.re = sat(-wide_t'(a.re));
    r.im = sat(-wide_t'(a.im));
    return r;
  endfunction

  function automatic cplx_t cconj(input cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = sat(-wide_t'(a.im));
    return r;
  endfunction

  // full-precision a*b
  function automatic cwide_t cmul_w(input cplx_t a, input cplx_t b);
    cwide_t r;
    r.re = wide_t'(a.re) * wide_t'(b.re) - wide_t'(a.im) * wide_t'(b.im);
    r.im = wide_t'(a.re) * wide_t'(b.im) + wide_t'(a.im) * wide_t'(b.re);
    return r;
  endfunction

  // full-precision conj(a)*b
  function automatic cwide_t cmulc_w(input cplx_t a, input cplx_t b);
    cwide_t r;
    r.re = wide_t'(a.re) * wide_t'(b.re) + wide_t'(a.im) * wide_t'(b.im);
    r.im = wide_t'(a.re) * wide_t'(b.im) - wide_t'(a.im) * wide_t'(b.re);
    return r;
  endfunction

  function automatic cplx_t crnd(input cwide_t v);
    cplx_t r;
    r.re = rnd(v.re);
    r.im = rnd(v.im);
    return r;
  endfunction

  function automatic cplx_t cmul(input cplx_t a, input cplx_t b);
    return crnd(cmul_w(a, b));
  endfunction

  // real times complex
  function automatic cplx_t rmul(input fx_t r, input cplx_t b);
    cplx_t o;
    o.re = fmul(r, b.re);
    o.im = fmul(r, b.im);
    return o;
  endfunction

  function automatic cplx_t to_cplx(input fx_t r);
    cplx_t o;
    o.re = r;
    o.im = '0;
    return o;
  endfunction

endpackage
