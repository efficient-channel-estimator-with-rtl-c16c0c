// abs_sq: the ABS block of the preamble processing (Fig. 7 of the paper).
//
// The paper gives it one complex multiplier; it is used here as x * conj(x),
// giving the squared magnitude re^2 + im^2. Only the order of magnitudes
// matters to the max-selection that follows, so the square root is never taken
// (this design's choice). Full precision, 12 fractional bits, unsigned.
// Combinational.
module abs_sq
  import adma_pkg::*;
(
  input  cplx_t             x,
  output logic [2*DW-1:0]   mag2
);
  logic signed [2*DW:0] s;
  always_comb begin
    s    = (2*DW+1)'(x.re) * (2*DW+1)'(x.re) + (2*DW+1)'(x.im) * (2*DW+1)'(x.im);
    mag2 = s[2*DW-1:0];
  end
endmodule
