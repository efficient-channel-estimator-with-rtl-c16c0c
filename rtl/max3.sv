// max3: the Max-3 block of the preamble processing (Fig. 7 of the paper).
//
// The three rotation candidates phi = -pi/M, 0, +pi/M each deliver the largest
// |h~ro| of their FFT frame and its bin. Max-3 keeps the candidate with the
// largest value: its bin is the user's spatial signature centre b_k and its
// angle is phi_k (approximation 1 of Sec. III-A). Ties go to the lower lane,
// i.e. -pi/M before 0 before +pi/M (this design's choice).
// Timing: one register; when all three lanes' done are high together,
// b/phi/done are valid on the next cycle.
module max3
  import adma_pkg::*;
#(
  parameter int unsigned M = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2*DW-1:0]      val  [3],
  input  logic [$clog2(M)-1:0] idx  [3],
  input  logic                 done_in,
  output logic [$clog2(M)-1:0] b,
  output phi_t                 phi,
  output logic [2*DW-1:0]      peak,
  output logic                 done
);
  logic [1:0] best;
  always_comb begin
    best = 2'd0;
    if (val[1] > val[best]) best = 2'd1;
    if (val[2] > val[best]) best = 2'd2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b    <= '0;
      phi  <= PHI_ZERO;
      peak <= '0;
      done <= 1'b0;
    end else begin
      done <= done_in;
      if (done_in) begin
        b    <= idx[best];
        phi  <= phi_t'(best);
        peak <= val[best];
      end
    end
  end
endmodule
