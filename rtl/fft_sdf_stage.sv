// fft_sdf_stage: one stage of the radix-2 single-path delay-feedback FFT
// (one "MUX - D - BF - multiplier" section of Fig. 11 of the paper).
//
// The stage owns a feedback delay line of D entries. During the first half of
// each 2D-sample group (phase 0) the input is written into the delay line and
// the line's old contents, the differences of the previous group, leave the
// stage after the twiddle multiplication. During the second half (phase 1) the
// butterfly adds the delayed sample a and the new sample b: a+b leaves the
// stage at once and a-b is fed back into the delay line. The multiplexer of
// Fig. 11 is the choice between x and a-b as the delay-line input.
// The differences of group n are multiplied by W_{2D}^n = e^{-j pi n / D}.
// When no input follows a frame the stage still empties its delay line
// (phase 0 is run without input), so a single frame is flushed completely.
// With SHIFT set, the butterfly results are divided by 2 (rounded), which is
// this design's scaling choice (see fft_sdf).
// Timing: combinational from input to output; the only storage is the delay
// line, so the stage delays data by exactly D cycles.
// Rule: frames must arrive either immediately after the previous frame or
// after the delay line has been emptied (checked by an assertion).
module fft_sdf_stage
  import adma_pkg::*;
#(
  parameter int unsigned M       = 128, // FFT size (for the twiddle table)
  parameter int unsigned D       = 64,  // delay-line length of this stage
  parameter bit          SHIFT   = 1'b1,
  parameter bit          TWIDDLE = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t x,
  input  logic  x_valid,
  output cplx_t y,
  output logic  y_valid
);
  localparam int unsigned CW2 = $clog2(2*D);
  localparam int unsigned PW  = (D > 1) ? $clog2(D) : 1;

  cplx_t          dl [D];
  logic [CW2-1:0] cnt;
  logic           full;
  logic           phase0;
  logic           step;
  logic [PW-1:0]  ptr;
  cplx_t          a, push_v, out_raw;
  ccoef_t         w;
  logic [$clog2(2*M)-1:0] widx;

  assign phase0 = cnt < CW2'(D);
  assign step   = x_valid || (full && phase0);
  assign ptr    = (D > 1) ? PW'(cnt % CW2'(D)) : '0;
  assign a      = dl[ptr];

  function automatic dat_t bf(input logic signed [47:0] v);
    return SHIFT ? sat(rshr(v, 1)) : sat(v);
  endfunction

  always_comb begin
    if (phase0) begin
      push_v  = x;
      out_raw = a;
      y_valid = full && step;
      // difference n of the previous group gets W_{2D}^n
      widx    = ($clog2(2*M))'((2*M - (32'(cnt) * (M / D))) % (2*M));
    end else begin
      push_v.re  = bf(48'(a.re) - 48'(x.re));
      push_v.im  = bf(48'(a.im) - 48'(x.im));
      out_raw.re = bf(48'(a.re) + 48'(x.re));
      out_raw.im = bf(48'(a.im) + 48'(x.im));
      y_valid    = x_valid;
      widx       = '0;
    end
  end

  unit_circle_rom #(.M(M)) u_rom (.idx(widx), .w(w));

  assign y = (TWIDDLE && phase0) ? cmul_coef(out_raw, w) : out_raw;

  always_ff @(posedge clk) begin
    if (step) dl[ptr] <= push_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      full <= 1'b0;
    end else if (step) begin
      if (cnt == CW2'(D - 1)) begin
        full <= 1'b0;
        cnt  <= x_valid ? CW2'(D) : '0;
      end else if (cnt == CW2'(2*D - 1)) begin
        full <= 1'b1;
        cnt  <= '0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  // phase 1 needs input on every cycle; a frame may not start mid-flush
  assert property (@(posedge clk) disable iff (!rst_n) !phase0 |-> x_valid)
    else $error("fft_sdf_stage: input gap inside a frame");
  assert property (@(posedge clk) disable iff (!rst_n)
                   x_valid && phase0 && cnt != '0 |-> $past(x_valid))
    else $error("fft_sdf_stage: frame started while flushing");
endmodule
