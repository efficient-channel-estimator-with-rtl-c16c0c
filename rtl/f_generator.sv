// f_generator: the F-Generator of UL estimation (Fig. 7 of the paper).
//
// Supplies, for each of the TAU IFFT processing elements, the element of the
// DFT-matrix column it needs on each cycle: PE i, working on antenna row m,
// needs [F^H]_{m, b_i} = e^{+j 2 pi m b_i / M} (the 1/sqrt(M) is applied as a
// shift after the sum, see ifft_systolic). Each PE has a phase accumulator
// that is cleared when the PE is loaded (ld[i]) and advances by 2 b_i in the
// 2M-point unit-circle table on every active cycle (act[i]), so no multiplier
// is needed. Coefficients are combinational from the accumulators.
module f_generator
  import adma_pkg::*;
#(
  parameter int unsigned M   = 128,
  parameter int unsigned TAU = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(M)-1:0] bin_idx [TAU],
  input  logic                 ld   [TAU],
  input  logic                 act  [TAU],
  output ccoef_t               w    [TAU]
);
  localparam int unsigned IW = $clog2(2*M);

  for (genvar i = 0; i < TAU; i++) begin : g_acc
    logic [IW-1:0] ph;
    logic [IW-1:0] step;
    logic [$clog2(M)-1:0] bq;
    // the bin is captured with the load so that later changes do not matter
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ph <= '0;
        bq <= '0;
      end else if (ld[i]) begin
        ph <= '0;
        bq <= bin_idx[i];
      end else if (act[i]) begin
        ph <= ph + step;
      end
    end
    assign step = {bq, 1'b0};
    unit_circle_rom #(.M(M)) u_rom (.idx(ph), .w(w[i]));
  end
endmodule
