// ls_pe: processing element of the systolic LS estimator (Fig. 9 of the paper).
//
// It performs one complex multiplication and one complex addition,
// h' = h + y * s, and registers the result for the next PE (the "D" between
// PEs). s is held by the PE (one element of the training sequence), y is the
// sample of Y streamed to this PE, h the partial sum from the PE above.
// The partial sum is kept at full precision (12 fractional bits) along the
// chain and rounded once at the end, which is this design's choice.
module ls_pe
  import adma_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  wide_t h_in,
  input  logic  h_in_valid,
  input  cplx_t y,
  input  cplx_t s,
  output wide_t h_out,
  output logic  h_out_valid
);
  wide_t p;
  always_comb p = cmul_wide(y, s);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_out       <= '0;
      h_out_valid <= 1'b0;
    end else begin
      h_out.re    <= h_in.re + p.re;
      h_out.im    <= h_in.im + p.im;
      h_out_valid <= h_in_valid;
    end
  end
endmodule
