// rot_gen: the Phi-generator ("e^{j phi}-Gen" of Fig. 7 of the paper).
//
// It produces, one per clock and in step with a stream of M samples, the
// diagonal of the rotation matrix Phi(phi) = diag{1, e^{j phi}, ...,
// e^{j (M-1) phi}} with phi one of {-pi/M, 0, +pi/M}. With conj_en set it gives
// the conjugate e^{-j n phi} used to undo the rotation after the IFFT.
// It keeps a sample counter n that advances on every `adv` cycle and wraps
// after M samples; the output for the current n is combinational, so the
// coefficient of sample n is present on the cycle sample n is. The value is
// read from the unit-circle table at index s*n mod 2M (s = -1, 0, +1).
module rot_gen
  import adma_pkg::*;
#(
  parameter int unsigned M = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  phi_t   phi,
  input  logic   conj_en,
  input  logic   adv,
  output ccoef_t w
);
  localparam int unsigned IW = $clog2(2*M);

  logic [$clog2(M)-1:0] n;
  logic [IW-1:0]        idx;
  logic                 neg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   n <= '0;
    else if (adv) n <= n + 1'b1;
  end

  always_comb begin
    neg = (phi == PHI_NEG) ^ conj_en;
    if (phi == PHI_ZERO) idx = '0;
    else if (neg)        idx = IW'(2*M) - IW'(n);   // wraps modulo 2M
    else                 idx = IW'(n);
  end

  unit_circle_rom #(.M(M)) u_rom (.idx(idx), .w(w));
endmodule
