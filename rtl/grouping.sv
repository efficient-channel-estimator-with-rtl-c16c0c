// grouping: systolic grouping module (Fig. 12 of the paper).
//
// A chain of G compare PEs, one per UL group (G = tau, the number of
// orthogonal training sequences). Users enter one per cycle in decreasing
// order of their signature centre b. A user travels down the chain until a PE
// whose latest member is at least tau + Omega above it accepts it; a user no
// PE accepts leaves the end of the chain unassigned (reported on drop).
// Timing: the user entering on cycle t is decided by PE g on cycle t+g and
// reported on asg_valid[g] / asg_user[g] on cycle t+g+1; K users are all
// decided K + G cycles after the first enters, the processing time in the
// paper's latency table. clear empties all groups.
module grouping #(
  parameter int unsigned G   = 4,
  parameter int unsigned BW  = 7,
  parameter int unsigned UW  = 4,
  parameter int unsigned GAP = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic [BW-1:0]        in_b,
  input  logic [UW-1:0]        in_user,
  output logic                 asg_valid [G],  // PE g accepted asg_user[g]
  output logic [UW-1:0]        asg_user  [G],
  output logic                 drop,
  output logic [UW-1:0]        drop_user
);
  logic          cv [G+1];
  logic [BW-1:0] cb [G+1];
  logic [UW-1:0] cu [G+1];
  logic          acc [G];
  logic [UW-1:0] acc_user [G];

  assign cv[0] = in_valid;
  assign cb[0] = in_b;
  assign cu[0] = in_user;

  for (genvar g = 0; g < G; g++) begin : g_pe
    compare_pe #(.BW(BW), .UW(UW), .GAP(GAP)) u_pe (
      .clk, .rst_n, .clear,
      .in_valid(cv[g]), .in_b(cb[g]), .in_user(cu[g]),
      .out_valid(cv[g+1]), .out_b(cb[g+1]), .out_user(cu[g+1]),
      .acc(acc[g]), .acc_user(acc_user[g])
    );
  end

  // several PEs may accept (different) users on the same cycle, so every
  // PE reports on its own port; the group number is the port index
  assign asg_valid = acc;
  assign asg_user  = acc_user;

  assign drop      = cv[G];
  assign drop_user = cu[G];
endmodule
