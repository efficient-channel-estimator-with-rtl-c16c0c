// extraction: the Extraction module of UL estimation (Fig. 7, Eq. (15)).
//
// From one FFT frame of M bins (any order, each with its natural index) it
// keeps the TAU bins of the user's spatial signature B_k, taken as the TAU
// consecutive bins centred on b_k: b_k - TAU/2, ..., b_k + TAU/2 - 1, modulo
// M (the centring rule and the wrap-around are this design's choices; the
// paper's third approximation centres the window on the maximum). One
// comparator decides membership: position = (idx - first) mod M < TAU.
// When the TAU-th member of a frame arrives, the set is copied into the
// output registers x / bin_idx and `ready` pulses for one cycle, so the IFFT can
// start before the frame ends: the latency is the output position P of the
// last member, as in the paper's latency table. x / bin_idx then hold until the
// next frame's set is complete.
module extraction
  import adma_pkg::*;
#(
  parameter int unsigned M   = 128,
  parameter int unsigned TAU = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(M)-1:0] b,
  input  cplx_t                f,
  input  logic [$clog2(M)-1:0] f_idx,
  input  logic                 f_valid,
  output cplx_t                x    [TAU],
  output logic [$clog2(M)-1:0] bin_idx [TAU],
  output logic                 ready
);
  localparam int unsigned BW = $clog2(M);

  logic [BW-1:0]            first, pos;
  logic [$clog2(TAU+1)-1:0] got;
  logic [BW-1:0]            fcnt;
  cplx_t                    cap [TAU];
  logic                     member;

  assign first  = b - BW'(TAU / 2);
  assign pos    = f_idx - first;
  assign member = f_valid && (pos < BW'(TAU));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got   <= '0;
      fcnt  <= '0;
      ready <= 1'b0;
      for (int i = 0; i < TAU; i++) begin
        cap[i]  <= '0;
        x[i]    <= '0;
        bin_idx[i] <= '0;
      end
    end else begin
      ready <= 1'b0;
      if (f_valid) begin
        fcnt <= fcnt + 1'b1;
        if (member) begin
          cap[pos[$clog2(TAU)-1:0]] <= f;
          if (got == ($clog2(TAU+1))'(TAU - 1)) begin
            for (int i = 0; i < TAU; i++) begin
              x[i]    <= (i == int'(pos)) ? f : cap[i];
              bin_idx[i] <= first + BW'(i);
            end
            ready <= 1'b1;
          end
          got <= got + 1'b1;
        end
        if (fcnt == BW'(M - 1)) got <= '0;
      end
    end
  end
endmodule
