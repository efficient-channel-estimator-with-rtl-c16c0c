// tb_pkg: helpers shared by the testbenches: conversion between real numbers
// and the fixed [1,8,6] complex format, and a tolerance compare.
package tb_pkg;
  import adma_pkg::*;

  function automatic dat_t qr(real v);
    real s;
    s = v * 64.0;
    if (s > 16383.0)  s = 16383.0;
    if (s < -16384.0) s = -16384.0;
    return dat_t'($rtoi(s >= 0.0 ? s + 0.5 : s - 0.5));
  endfunction

  function automatic cplx_t q(real re, real im);
    cplx_t c;
    c.re = qr(re);
    c.im = qr(im);
    return c;
  endfunction

  function automatic real rv(dat_t v);
    return $itor(v) / 64.0;
  endfunction

  function automatic bit close(cplx_t a, real re, real im, real tol);
    real dr, di;
    dr = rv(a.re) - re;
    di = rv(a.im) - im;
    return (dr < tol) && (dr > -tol) && (di < tol) && (di > -tol);
  endfunction

  function automatic int unsigned bitrev(int unsigned v, int unsigned nb);
    int unsigned r;
    r = 0;
    for (int i = 0; i < nb; i++) if (v[i]) r |= (1 << (nb - 1 - i));
    return r;
  endfunction

  localparam real PI = 3.14159265358979323846;

  // steering vector of a half-wavelength ULA: [h]_m = amp e^{j (pi m sin(theta) + p0)}
  function automatic void steer(ref cplx_t h [], input int M, input real amp, input real theta_deg, input real p0);
    h = new[M];
    for (int m = 0; m < M; m++) begin
      real a;
      a = PI * m * $sin(theta_deg * PI / 180.0) + p0;
      h[m] = q(amp * $cos(a), amp * $sin(a));
    end
  endfunction

  // |DFT of the rotated vector|^2 at bin k, rotation phi = s pi / M
  function automatic real rot_dft_mag2(const ref cplx_t h [], input int M, input int s, input int k);
    real re, im;
    re = 0.0; im = 0.0;
    for (int m = 0; m < M; m++) begin
      real a;
      a = PI * s * m / M - 2.0 * PI * m * k / M;
      re += rv(h[m].re) * $cos(a) - rv(h[m].im) * $sin(a);
      im += rv(h[m].re) * $sin(a) + rv(h[m].im) * $cos(a);
    end
    return re * re + im * im;
  endfunction

  // reference preamble: best (bin, rotation) by the largest-element rule;
  // also returns the runner-up magnitude among other candidates
  function automatic void ref_preamble(const ref cplx_t h [], input int M,
                                       output int b, output int s, output real best, output real second);
    best = -1.0; second = -1.0; b = 0; s = 0;
    for (int ss = -1; ss <= 1; ss++)
      for (int k = 0; k < M; k++) begin
        real v;
        v = rot_dft_mag2(h, M, ss, k);
        if (v > best) begin second = best; best = v; b = k; s = ss; end
        else if (v > second) second = v;
      end
  endfunction

  // reference UL estimate: Phi^H F^H_B [F Phi y]_B with B = b-TAU/2 .. b+TAU/2-1,
  // unnormalised DFT pair divided by M (the hardware's overall gain)
  function automatic void ref_ul(const ref cplx_t y [], input int M, input int TAU,
                                 input int b, input int s, ref real hr [], ref real hi []);
    real xr [], xi [];
    xr = new[TAU]; xi = new[TAU]; hr = new[M]; hi = new[M];
    for (int i = 0; i < TAU; i++) begin
      int k;
      k = (b - TAU / 2 + i + M) % M;
      xr[i] = 0.0; xi[i] = 0.0;
      for (int m = 0; m < M; m++) begin
        real a;
        a = PI * s * m / M - 2.0 * PI * m * k / M;
        xr[i] += rv(y[m].re) * $cos(a) - rv(y[m].im) * $sin(a);
        xi[i] += rv(y[m].re) * $sin(a) + rv(y[m].im) * $cos(a);
      end
    end
    for (int m = 0; m < M; m++) begin
      hr[m] = 0.0; hi[m] = 0.0;
      for (int i = 0; i < TAU; i++) begin
        int k; real a;
        k = (b - TAU / 2 + i + M) % M;
        a = 2.0 * PI * m * k / M - PI * s * m / M;
        hr[m] += (xr[i] * $cos(a) - xi[i] * $sin(a)) / M;
        hi[m] += (xr[i] * $sin(a) + xi[i] * $cos(a)) / M;
      end
    end
  endfunction
endpackage
