// ls_estimator: systolic LS-based estimation, h_k = Y s_k (Eq. (11), Fig. 9).
//
// L processing elements in a chain; PE j holds the j-th training symbol s_j
// and receives column j of Y from the data buffer one antenna per clock, one
// clock after PE j-1. The partial sum enters PE 0 as zero and leaves PE L-1 as
// [h_k]_m, one antenna per clock, in antenna order. The scale factor
// 1/(sqrt(d_k) L sigma_p^2) of Eq. (11) is not a separate multiplier here: the
// coefficients s_j given to the module are expected to carry it (this design's
// choice; the paper's PE computes only h + y s).
// Timing: with the data_buffer skew, [h]_m is valid on cycle c0 + 1 + L + m,
// i.e. L-1 cycles after PE 0 first sees [Y]_{m,0} plus the PE 0 register and
// the output register, matching the paper's latency of L-1 across the chain.
// Output is rounded to nearest and saturated to fixed [1,8,6].
module ls_estimator
  import adma_pkg::*;
#(
  parameter int unsigned L = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t y [L],
  input  logic  y_valid [L],
  input  cplx_t s [L],
  output cplx_t h,
  output logic  h_valid
);
  wide_t chain   [L+1];
  logic  chain_v [L+1];

  assign chain[0]   = '0;
  assign chain_v[0] = y_valid[0];

  for (genvar j = 0; j < L; j++) begin : g_pe
    wide_t hin;
    logic  hin_v;
    // PE 0 starts from zero; later PEs take the registered sum of the PE above
    assign hin   = chain[j];
    assign hin_v = (j == 0) ? y_valid[0] : chain_v[j];
    ls_pe u_pe (
      .clk, .rst_n,
      .h_in(hin), .h_in_valid(hin_v),
      .y(y[j]), .s(s[j]),
      .h_out(chain[j+1]), .h_out_valid(chain_v[j+1])
    );
  end

  always_comb begin
    h.re    = sat(rshr(chain[L].re, FRAC));
    h.im    = sat(rshr(chain[L].im, FRAC));
    h_valid = chain_v[L];
  end
endmodule
