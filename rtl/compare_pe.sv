// compare_pe: one compare PE of the grouping chain (Fig. 12 and Fig. 13 of
// the paper); each PE stands for one UL group.
//
// The PE keeps the signature centre b of the latest user it accepted (the
// feedback register of Fig. 13). Users arrive sorted by decreasing b. The
// comparator tests the new b plus (tau + Omega) against the stored value, the
// adder and the comparator of Fig. 13: if b + tau + Omega <= last, the
// signature windows of the two users are at least Omega apart (Eq. (13)) and
// the multiplexer takes the new b into the register. An empty group accepts
// any user. The user is passed on to the next PE one cycle later (the lower
// "D" of Fig. 12), marked as taken if this PE accepted it, so that each user
// joins only the first group that fits; that mark, the empty flag and the
// direction of the test are this design's choices. Accepting raises acc for
// one cycle with the user's number.
module compare_pe #(
  parameter int unsigned BW  = 7,   // width of b
  parameter int unsigned UW  = 4,   // width of the user number
  parameter int unsigned GAP = 5    // tau + Omega
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,   // an untaken user is present
  input  logic [BW-1:0] in_b,
  input  logic [UW-1:0] in_user,
  output logic          out_valid,  // registered, to the next PE
  output logic [BW-1:0] out_b,
  output logic [UW-1:0] out_user,
  output logic          acc,
  output logic [UW-1:0] acc_user
);
  logic [BW-1:0] last;
  logic          used;
  logic          fits;

  assign fits = !used || ((BW+8)'(in_b) + (BW+8)'(GAP) <= (BW+8)'(last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last      <= '0;
      used      <= 1'b0;
      out_valid <= 1'b0;
      out_b     <= '0;
      out_user  <= '0;
      acc       <= 1'b0;
      acc_user  <= '0;
    end else if (clear) begin
      used      <= 1'b0;
      out_valid <= 1'b0;
      acc       <= 1'b0;
    end else begin
      out_b     <= in_b;
      out_user  <= in_user;
      out_valid <= in_valid && !fits;
      acc       <= in_valid && fits;
      acc_user  <= in_user;
      if (in_valid && fits) begin
        last <= in_b;
        used <= 1'b1;
      end
    end
  end
endmodule
