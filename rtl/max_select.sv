// max_select: Max-Selection of the preamble processing (Fig. 7, Sec. III-A).
//
// Implements the first of the paper's three approximations to the sliding-
// window search: over one FFT frame of M bins it keeps the largest |h~| and
// its bin index (one comparator and one register, as the paper's resource
// table lists). Bins arrive in any order, each with its natural index.
// At the M-th bin of a frame, done pulses for one cycle with max_val/max_idx
// valid; they hold until the next frame ends. Ties keep the earlier bin
// (this design's choice).
// Timing: done is registered, one cycle after the last bin (M cycles after the
// first, the paper's latency M).
module max_select
  import adma_pkg::*;
#(
  parameter int unsigned M = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2*DW-1:0]      mag2,
  input  logic [$clog2(M)-1:0] idx,
  input  logic                 valid,
  output logic [2*DW-1:0]      max_val,
  output logic [$clog2(M)-1:0] max_idx,
  output logic                 done
);
  logic [$clog2(M)-1:0] cnt;
  logic [2*DW-1:0]      cur_val;
  logic [$clog2(M)-1:0] cur_idx;
  logic                 take;

  assign take = (cnt == '0) || (mag2 > cur_val);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      cur_val <= '0;
      cur_idx <= '0;
      max_val <= '0;
      max_idx <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (valid) begin
        cnt <= cnt + 1'b1;
        if (take) begin
          cur_val <= mag2;
          cur_idx <= idx;
        end
        if (cnt == ($clog2(M))'(M - 1)) begin
          max_val <= take ? mag2 : cur_val;
          max_idx <= take ? idx  : cur_idx;
          done    <= 1'b1;
        end
      end
    end
  end
endmodule
