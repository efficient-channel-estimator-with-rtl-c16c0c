// fft_sdf: M-point radix-2 single-path delay-feedback (SDF) pipelined FFT,
// the FFT module of Fig. 11 of the paper.
//
// log2(M) stages with delay lines of M/2, M/4, ..., 1 samples (M-1 registers
// in all, as the paper's resource table counts) and a twiddle multiplier
// between consecutive stages (log2(M)-1 multipliers). It is a decimation-in-
// frequency transform: samples enter in natural order, one per clock, and the
// bins leave in bit-reversed order; y_idx gives the natural bin number k of
// each output sample.
// Scaling (this design's choice; the paper only fixes the data format
// [1,8,6]): the butterflies of stages 0, 2, 4, ... divide by two, so the
// module computes X_k = 2^-S * sum_n x_n e^{-j 2 pi n k / M} with
// S = ceil(log2(M)/2) (S = 4 for M = 128, close to the unitary 1/sqrt(M)).
// The sparse IFFT applies the remaining 2^-(log2(M)-S).
// Timing: the first bin leaves M-1 cycles after the first sample enters and
// the last one 2M-2 cycles after it (processing time 2M-1 cycles), as in the
// paper's latency table. There is no register between stages, so the
// butterflies and multipliers of all stages form one combinational path; a
// faster implementation would add a register per stage (log2(M) more cycles).
// Frames are M samples on consecutive cycles and must follow each other back
// to back or after at least M/2 idle cycles.
module fft_sdf
  import adma_pkg::*;
#(
  parameter int unsigned M = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cplx_t                x,
  input  logic                 x_valid,
  output cplx_t                y,
  output logic                 y_valid,
  output logic [$clog2(M)-1:0] y_idx
);
  localparam int unsigned NS = $clog2(M);

  cplx_t s_d [NS+1];
  logic  s_v [NS+1];
  assign s_d[0] = x;
  assign s_v[0] = x_valid;

  for (genvar s = 0; s < NS; s++) begin : g_st
    fft_sdf_stage #(
      .M(M), .D(M >> (s + 1)),
      .SHIFT((s % 2) == 0), .TWIDDLE(s != NS - 1)
    ) u_stage (
      .clk, .rst_n,
      .x(s_d[s]), .x_valid(s_v[s]),
      .y(s_d[s+1]), .y_valid(s_v[s+1])
    );
  end

  logic [NS-1:0] ocnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       ocnt <= '0;
    else if (s_v[NS]) ocnt <= ocnt + 1'b1;
  end

  always_comb begin
    for (int b = 0; b < NS; b++) y_idx[b] = ocnt[NS-1-b];
  end
  assign y       = s_d[NS];
  assign y_valid = s_v[NS];
endmodule
