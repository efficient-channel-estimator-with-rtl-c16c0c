// data_buffer: input buffer of the pre-treatment module.
//
// The base station receives Y (M antennas x L training symbols) one column per
// clock: all M antenna samples of one training symbol arrive together. The
// systolic LS array instead needs PE j to see column j one antenna per clock,
// and one clock later than PE j-1 (Fig. 9 of the paper: at clock c, PE j works
// on [Y]_{c-j+1, j}). The buffer therefore holds one M-entry register file per
// column; file j is written when column j arrives and is then read out one
// entry per clock for M clocks. Because the columns of a block arrive on
// consecutive clocks, the one-clock skew between PEs falls out by itself.
//
// Interface: a block is L columns on L consecutive cycles with col_valid high
// (col_first marks column 0). `ready` says a new block may start: the previous
// block's column 0 has been read out (M cycles since its start) and, so that the
// downstream pipelined FFTs see frames either back to back or separated by at
// least M/2 idle cycles, the start is exactly M cycles or at least 3M/2 cycles
// after the previous one. These two rules are this design's choice; the paper
// says only that the buffer "is needed to get the data transmission proper".
// Timing: y[j] / y_valid[j] carry [Y]_{m,j} on cycle c0 + 1 + j + m, where c0
// is the cycle column 0 is presented.
module data_buffer
  import adma_pkg::*;
#(
  parameter int unsigned M = 128,  // antennas
  parameter int unsigned L = 4     // training-sequence length
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  col_valid,
  input  logic  col_first,
  input  cplx_t col [M],
  output logic  ready,
  output cplx_t y [L],
  output logic  y_valid [L]
);
  localparam int unsigned CNTW = $clog2(2*M + 1);

  cplx_t                  mem   [L][M];
  logic [$clog2(M)-1:0]   rd    [L];
  logic                   busy  [L];
  logic [$clog2(L+1)-1:0] col_idx;
  logic [CNTW-1:0]        since_start;
  logic                   started;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_idx     <= '0;
      since_start <= '0;
      started     <= 1'b0;
    end else begin
      if (col_valid) begin
        col_idx <= (col_idx == ($clog2(L+1))'(L - 1)) ? '0 : col_idx + 1'b1;
        if (col_first) col_idx <= (L == 1) ? '0 : ($clog2(L+1))'(1);
      end
      if (col_valid && col_first) begin
        since_start <= ($bits(since_start))'(1);
        started     <= 1'b1;
      end else if (started && since_start != CNTW'(2*M)) begin
        since_start <= since_start + 1'b1;
      end
    end
  end

  assign ready = !started || since_start == CNTW'(M) || since_start >= CNTW'(M + M/2);

  for (genvar j = 0; j < L; j++) begin : g_col
    logic load;
    assign load = col_valid && (col_first ? (j == 0) : (col_idx == ($clog2(L+1))'(j)));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy[j] <= 1'b0;
        rd[j]   <= '0;
      end else if (load) begin
        busy[j] <= 1'b1;
        rd[j]   <= '0;
      end else if (busy[j]) begin
        rd[j] <= rd[j] + 1'b1;
        if (rd[j] == ($clog2(M))'(M - 1)) busy[j] <= 1'b0;
      end
    end
    always_ff @(posedge clk) begin
      if (load) mem[j] <= col;
    end
    assign y[j]       = mem[j][rd[j]];
    assign y_valid[j] = busy[j];
  end

  // a block must start only when ready and its columns must be consecutive
  assert property (@(posedge clk) disable iff (!rst_n)
                   col_valid && col_first |-> ready)
    else $error("data_buffer: block started while not ready");
  assert property (@(posedge clk) disable iff (!rst_n)
                   col_valid && !col_first |-> col_idx != '0)
    else $error("data_buffer: column without a block start");
endmodule
