// preamble_proc: preamble processing of one user (Fig. 7 of the paper).
//
// The LS estimate h_k of the user streams in, one antenna per clock. Three
// lanes process it in parallel, one per rotation candidate phi = -pi/M, 0,
// +pi/M (the paper's N = 3 points): each lane multiplies h_k by the diagonal of
// Phi(phi) from its Phi-generator, transforms it with a pipelined FFT, takes
// |.|^2 (ABS) and keeps the largest bin (Max-Selection). Max-3 then picks the
// lane with the largest peak, which gives the spatial signature centre b_k and
// the angle phi_k (Eq. (9) under the paper's first approximation).
// Timing: with the first sample of h_k on cycle t, the FFT bins leave from
// t+M-1 to t+2M-2, Max-Selection reports at t+2M-1 and b/phi/done are valid
// on cycle t+2M (done pulses once per frame).
module preamble_proc
  import adma_pkg::*;
#(
  parameter int unsigned M = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cplx_t                h,
  input  logic                 h_valid,
  output logic [$clog2(M)-1:0] b,
  output phi_t                 phi,
  output logic                 done
);
  logic [2*DW-1:0]      lane_max [3];
  logic [$clog2(M)-1:0] lane_idx [3];
  logic                 lane_done [3];
  logic [2*DW-1:0]      peak;

  for (genvar p = 0; p < 3; p++) begin : g_lane
    ccoef_t               w;
    cplx_t                hr, f;
    logic                 f_valid;
    logic [$clog2(M)-1:0] f_idx;
    logic [2*DW-1:0]      mag2;

    rot_gen #(.M(M)) u_gen (
      .clk, .rst_n, .phi(phi_t'(p)), .conj_en(1'b0), .adv(h_valid), .w(w)
    );
    assign hr = cmul_coef(h, w);
    fft_sdf #(.M(M)) u_fft (
      .clk, .rst_n, .x(hr), .x_valid(h_valid), .y(f), .y_valid(f_valid), .y_idx(f_idx)
    );
    abs_sq u_abs (.x(f), .mag2(mag2));
    max_select #(.M(M)) u_max (
      .clk, .rst_n, .mag2(mag2), .idx(f_idx), .valid(f_valid),
      .max_val(lane_max[p]), .max_idx(lane_idx[p]), .done(lane_done[p])
    );
  end

  max3 #(.M(M)) u_max3 (
    .clk, .rst_n, .val(lane_max), .idx(lane_idx), .done_in(lane_done[0]),
    .b(b), .phi(phi), .peak(peak), .done(done)
  );
endmodule
