// adma_pkg: number formats and arithmetic shared by the ADMA channel estimator.
//
// Every data variable (received samples, channel estimates, FFT values) is a
// complex number whose parts are fixed [1,8,6]: one sign bit, eight integer
// bits and six fractional bits, 15 bits in all, as the paper's quantisation
// study selects. Rotation, twiddle and DFT-matrix coefficients are not covered
// by that study; this design gives them 16 bits with 14 fractional bits
// (Q1.14, so +1.0 = 16384). Products are rounded to nearest and saturated
// back to [1,8,6].
//
// The rotation angle phi_k is one of the three points {-pi/M, 0, +pi/M}; it is
// carried as a 2-bit code (see phi_t).
package adma_pkg;

  localparam int unsigned DW   = 15;  // fixed [1,8,6]
  localparam int unsigned FRAC = 6;
  localparam int unsigned CW   = 16;  // coefficient width, Q1.14
  localparam int unsigned CFRAC = 14;

  typedef logic signed [DW-1:0] dat_t;
  typedef logic signed [CW-1:0] coef_t;

  typedef struct packed {
    dat_t re;
    dat_t im;
  } cplx_t;

  typedef struct packed {
    coef_t re;
    coef_t im;
  } ccoef_t;

  // rotation candidate: phi = s * pi / M with s = -1, 0, +1
  typedef enum logic [1:0] {
    PHI_NEG  = 2'd0,
    PHI_ZERO = 2'd1,
    PHI_POS  = 2'd2
  } phi_t;

  // position of the 1-to-2 switch: preamble (stage 1), UL training
  // (stage 2), or neither (while the UL grouping runs)
  typedef enum logic [1:0] {
    SW_OFF = 2'd0,
    SW_PRE = 2'd1,
    SW_UL  = 2'd2
  } sw_mode_t;

  // saturate a wide signed value to [1,8,6]
  function automatic dat_t sat(input logic signed [47:0] v);
    if (v > 48'sd16383)       return dat_t'(16383);
    else if (v < -48'sd16384) return dat_t'(-16384);
    else                      return dat_t'(v);
  endfunction

  // arithmetic shift right by sh with round-half-up
  function automatic logic signed [47:0] rshr(input logic signed [47:0] v, input int unsigned sh);
    logic signed [47:0] r;
    if (sh == 0) return v;
    r = v + (48'sd1 <<< (sh - 1));
    return r >>> sh;
  endfunction

  // data x coefficient (Q1.14): result in [1,8,6]
  function automatic cplx_t cmul_coef(input cplx_t a, input ccoef_t w);
    logic signed [47:0] pr, pi;
    cplx_t r;
    pr = 48'(a.re) * 48'(w.re) - 48'(a.im) * 48'(w.im);
    pi = 48'(a.re) * 48'(w.im) + 48'(a.im) * 48'(w.re);
    r.re = sat(rshr(pr, CFRAC));
    r.im = sat(rshr(pi, CFRAC));
    return r;
  endfunction

  // data x data, both [1,8,6]: full-precision product with 2*FRAC fractional
  // bits, returned wide so that the caller may accumulate before rounding
  typedef struct packed {
    logic signed [47:0] re;
    logic signed [47:0] im;
  } wide_t;

  function automatic wide_t cmul_wide(input cplx_t a, input cplx_t b);
    wide_t r;
    r.re = 48'(a.re) * 48'(b.re) - 48'(a.im) * 48'(b.im);
    r.im = 48'(a.re) * 48'(b.im) + 48'(a.im) * 48'(b.re);
    return r;
  endfunction

  function automatic cplx_t cadd_sat(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = sat(48'(a.re) + 48'(b.re));
    r.im = sat(48'(a.im) + 48'(b.im));
    return r;
  endfunction


endpackage
