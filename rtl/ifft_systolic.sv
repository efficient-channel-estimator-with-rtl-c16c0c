// ifft_systolic: sparse IFFT of UL estimation (Eq. (16), Sec. IV-A-4).
//
// Only the TAU bins of the spatial signature are non-zero, so the IFFT is the
// product of the M x TAU matrix [F^H]_{:,B} with the TAU-vector of extracted
// bins, done by TAU processing elements in a systolic chain. PE i holds bin
// value x_i (stationary), multiplies it by the F-generator coefficient for row
// m and adds the partial sum from PE i-1; the sum for row m leaves PE TAU-1,
// one antenna per clock in antenna order.
// Scaling: the sum is divided by 2^(log2(M) - S), where 2^-S is the FFT's
// scaling, so FFT followed by a full IFFT returns the input (this design's
// choice, equivalent to the paper's unitary F and F^H).
// Timing: start pulses with x / bin_idx valid (they must hold for TAU cycles).
// PE i loads on cycle t0+i; row m leaves on cycle t0 + TAU + 1 + m, so the
// first row appears TAU+1 cycles after start and the frame takes M + TAU
// cycles (the paper gives latency TAU and processing time M + TAU).
module ifft_systolic
  import adma_pkg::*;
#(
  parameter int unsigned M   = 128,
  parameter int unsigned TAU = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cplx_t                x    [TAU],
  input  logic [$clog2(M)-1:0] bin_idx [TAU],
  input  logic                 start,
  output cplx_t                h,
  output logic                 h_valid
);
  localparam int unsigned NS  = $clog2(M);
  localparam int unsigned OSH = NS - (NS + 1) / 2;  // remaining IFFT scaling

  logic   ld  [TAU];
  logic   act [TAU];
  ccoef_t w   [TAU];
  wide_t  ps  [TAU+1];
  logic   psv [TAU+1];

  assign ps[0]  = '0;
  assign psv[0] = 1'b0;

  f_generator #(.M(M), .TAU(TAU)) u_fgen (
    .clk, .rst_n, .bin_idx(bin_idx), .ld(ld), .act(act), .w(w)
  );

  for (genvar i = 0; i < TAU; i++) begin : g_pe
    cplx_t                xi;
    logic [$clog2(M)-1:0] row;
    wide_t                p;

    // load pulse skewed by one cycle per PE
    if (i == 0) begin : g_ld0
      assign ld[0] = start;
    end else begin : g_ldn
      logic ldq;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) ldq <= 1'b0;
        else        ldq <= ld[i-1];
      end
      assign ld[i] = ldq;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        act[i] <= 1'b0;
        row    <= '0;
        xi     <= '0;
        ps[i+1]  <= '0;
        psv[i+1] <= 1'b0;
      end else begin
        if (ld[i]) begin
          xi     <= x[i];
          act[i] <= 1'b1;
          row    <= '0;
        end else if (act[i]) begin
          row <= row + 1'b1;
          if (row == ($clog2(M))'(M - 1)) act[i] <= 1'b0;
        end
        ps[i+1].re <= ps[i].re + p.re;
        ps[i+1].im <= ps[i].im + p.im;
        psv[i+1]   <= act[i];
      end
    end

    always_comb begin
      p.re = act[i] ? rshr(48'(xi.re) * 48'(w[i].re) - 48'(xi.im) * 48'(w[i].im), CFRAC) : '0;
      p.im = act[i] ? rshr(48'(xi.re) * 48'(w[i].im) + 48'(xi.im) * 48'(w[i].re), CFRAC) : '0;
    end
  end

  always_comb begin
    h.re    = sat(rshr(ps[TAU].re, OSH));
    h.im    = sat(rshr(ps[TAU].im, OSH));
    h_valid = psv[TAU];
  end
endmodule
