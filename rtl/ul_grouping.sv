// ul_grouping: the Up-Link Grouping module of Fig. 7 of the paper.
//
// Reg -> Sorting -> P2S -> Grouping -> Group Message Regs.
// During the preamble the TAU preamble processors deliver (b_k, phi_k) for
// TAU users per training round; Reg stores user round*TAU + i from processor
// i. On start, the K stored signature centres are sorted in decreasing order
// by the pipelined merging network (payload: user number), serialised by P2S
// and passed through the systolic grouping chain of TAU compare PEs. Each
// user's group message register then holds whether it was assigned, its group
// (the training sequence it will use in the UL training) and its b_k, phi_k,
// which the user's UL estimation module reads in stage 2.
// Timing: start on cycle t; the sorter delivers at t+1+S with
// S = log2(K)(log2(K)+1)/2; P2S emits K users over the next K cycles and the
// chain needs TAU more; done pulses when the last decision is written, after
// S + K + TAU + 3 cycles in all (the paper counts S + K + TAU). Signature
// windows are not treated as wrapping around the DFT index range.
module ul_grouping
  import adma_pkg::*;
#(
  parameter int unsigned M     = 128,
  parameter int unsigned K     = 16,
  parameter int unsigned TAU   = 4,
  parameter int unsigned OMEGA = 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      res_valid [TAU],
  input  logic [$clog2(M)-1:0]      res_b     [TAU],
  input  phi_t                      res_phi   [TAU],
  input  logic [$clog2(K/TAU+1)-1:0] round,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  output logic                      gm_assigned [K],
  output logic [$clog2(TAU)-1:0]    gm_group    [K],
  output logic [$clog2(M)-1:0]      gm_b        [K],
  output phi_t                      gm_phi      [K],
  output logic                      dropped     // a user fitted no group
);
  localparam int unsigned BW = $clog2(M);
  localparam int unsigned UW = $clog2(K);
  localparam int unsigned GW = (TAU > 1) ? $clog2(TAU) : 1;

  // ---- Reg: signatures collected during the preamble
  logic [BW-1:0] reg_b   [K];
  phi_t          reg_phi [K];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < K; u++) begin
        reg_b[u]   <= '0;
        reg_phi[u] <= PHI_ZERO;
      end
    end else begin
      for (int i = 0; i < TAU; i++) begin
        if (res_valid[i]) begin
          reg_b[int'(round) * TAU + i]   <= res_b[i];
          reg_phi[int'(round) * TAU + i] <= res_phi[i];
        end
      end
    end
  end

  // ---- Sorting
  logic [UW-1:0] uid     [K];
  logic [BW-1:0] srt_key [K];
  logic [UW-1:0] srt_pay [K];
  logic          srt_valid;
  always_comb for (int u = 0; u < K; u++) uid[u] = UW'(u);

  bitonic_sorter #(.N(K), .KW(BW), .PW(UW)) u_sort (
    .clk, .rst_n, .key_in(reg_b), .pay_in(uid), .in_valid(start),
    .key_out(srt_key), .pay_out(srt_pay), .out_valid(srt_valid)
  );

  // ---- P2S
  logic [BW+UW-1:0] par [K];
  logic [BW+UW-1:0] ser;
  logic             ser_valid, ser_last, p2s_busy;
  always_comb for (int u = 0; u < K; u++) par[u] = {srt_key[u], srt_pay[u]};

  p2s #(.N(K), .W(BW+UW)) u_p2s (
    .clk, .rst_n, .din(par), .in_valid(srt_valid), .busy(p2s_busy),
    .dout(ser), .out_valid(ser_valid), .out_last(ser_last)
  );

  // ---- Grouping
  logic          asg_valid [TAU];
  logic [UW-1:0] asg_user  [TAU];
  logic          drop;
  logic [UW-1:0] drop_user;

  grouping #(.G(TAU), .BW(BW), .UW(UW), .GAP(TAU + OMEGA)) u_grp (
    .clk, .rst_n, .clear(start),
    .in_valid(ser_valid), .in_b(ser[BW+UW-1:UW]), .in_user(ser[UW-1:0]),
    .asg_valid(asg_valid), .asg_user(asg_user), .drop(drop), .drop_user(drop_user)
  );

  // ---- Group message registers
  logic [$clog2(TAU+2)-1:0] tail;
  logic                     draining;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < K; u++) begin
        gm_assigned[u] <= 1'b0;
        gm_group[u]    <= '0;
      end
      busy     <= 1'b0;
      done     <= 1'b0;
      draining <= 1'b0;
      tail     <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        for (int u = 0; u < K; u++) gm_assigned[u] <= 1'b0;
      end
      for (int g = 0; g < TAU; g++) begin
        if (asg_valid[g]) begin
          gm_assigned[asg_user[g]] <= 1'b1;
          gm_group[asg_user[g]]    <= GW'(g);
        end
      end
      if (ser_valid && ser_last) begin
        draining <= 1'b1;
        tail     <= ($clog2(TAU+2))'(TAU);
      end else if (draining) begin
        if (tail == '0) begin
          draining <= 1'b0;
          busy     <= 1'b0;
          done     <= 1'b1;
        end else begin
          tail <= tail - 1'b1;
        end
      end
    end
  end

  assign gm_b   = reg_b;
  assign gm_phi  = reg_phi;
  assign dropped = drop;

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("ul_grouping: start while busy");
endmodule
