// ul_estimator: Up-Link Estimation of one user (Fig. 7, Eqs. (15)-(16)).
//
// In stage 2 the LS output y_g of the user's group streams in, one antenna per
// clock. The module rotates it by Phi(phi_k) (Phi-generator and complex
// multiplier), transforms it with a pipelined FFT, keeps the TAU bins of the
// spatial signature centred on b_k (Extraction), returns to the antenna
// domain with the sparse systolic IFFT fed by the F-generator, and undoes the
// rotation with the conjugate generator e^{-j n phi_k}. The result is the
// channel estimate h_k, one antenna per clock. The 1/sqrt(d_k) of Eq. (15) is
// left to the LS coefficients (see ls_estimator).
// Timing: with y_0 on cycle t, the FFT bins leave from t+M-1, the extraction
// completes at t+M+P (P = output position of the last signature bin, 0..M-1)
// and h_0 appears TAU+1 cycles later; h_m follows on consecutive cycles.
// b and phi must stay constant while a frame is in flight.
module ul_estimator
  import adma_pkg::*;
#(
  parameter int unsigned M   = 128,
  parameter int unsigned TAU = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(M)-1:0] b,
  input  phi_t                 phi,
  input  cplx_t                y,
  input  logic                 y_valid,
  output cplx_t                h,
  output logic                 h_valid
);
  ccoef_t               w_rot, w_der;
  cplx_t                yr, f, hi;
  logic                 f_valid, x_ready, hi_valid;
  logic [$clog2(M)-1:0] f_idx;
  cplx_t                x       [TAU];
  logic [$clog2(M)-1:0] bin_idx [TAU];

  rot_gen #(.M(M)) u_rot (
    .clk, .rst_n, .phi(phi), .conj_en(1'b0), .adv(y_valid), .w(w_rot)
  );
  assign yr = cmul_coef(y, w_rot);

  fft_sdf #(.M(M)) u_fft (
    .clk, .rst_n, .x(yr), .x_valid(y_valid), .y(f), .y_valid(f_valid), .y_idx(f_idx)
  );

  extraction #(.M(M), .TAU(TAU)) u_ext (
    .clk, .rst_n, .b(b), .f(f), .f_idx(f_idx), .f_valid(f_valid),
    .x(x), .bin_idx(bin_idx), .ready(x_ready)
  );

  ifft_systolic #(.M(M), .TAU(TAU)) u_ifft (
    .clk, .rst_n, .x(x), .bin_idx(bin_idx), .start(x_ready), .h(hi), .h_valid(hi_valid)
  );

  rot_gen #(.M(M)) u_derot (
    .clk, .rst_n, .phi(phi), .conj_en(1'b1), .adv(hi_valid), .w(w_der)
  );
  assign h       = cmul_coef(hi, w_der);
  assign h_valid = hi_valid;
endmodule
