// p2s: parallel-to-serial converter between the sorting network and the
// grouping chain (Fig. 7, "P2S"; Sec. IV-A-3 of the paper).
//
// On in_valid the N words are captured; they then leave one per cycle, word 0
// first, on the N following cycles (out_valid high, out_last on the last one).
// A new load is accepted only when idle (busy low); this handshake is this
// design's choice.
module p2s #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 15
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din [N],
  input  logic         in_valid,
  output logic         busy,
  output logic [W-1:0] dout,
  output logic         out_valid,
  output logic         out_last
);
  logic [W-1:0]           sh [N];
  logic [$clog2(N+1)-1:0] left;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left <= '0;
      for (int i = 0; i < N; i++) sh[i] <= '0;
    end else if (in_valid && left == '0) begin
      sh   <= din;
      left <= ($clog2(N+1))'(N);
    end else if (left != '0) begin
      for (int i = 0; i < N - 1; i++) sh[i] <= sh[i+1];
      sh[N-1] <= '0;
      left    <= left - 1'b1;
    end
  end

  assign busy      = left != '0;
  assign out_valid = left != '0;
  assign out_last  = left == ($clog2(N+1))'(1);
  assign dout      = sh[0];

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !busy)
    else $error("p2s: load while busy");
endmodule
