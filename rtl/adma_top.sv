// adma_top: ADMA channel estimator with rotation (Fig. 7 of the paper).
//
// Stage 1, preamble: the K users are trained in G = K/TAU rounds of TAU users,
// each round with the TAU orthogonal training sequences. For every round the
// host presents the L received columns of Y; the data buffer and TAU systolic
// LS estimators produce h_k for the TAU users of the round, and TAU preamble
// processors find each user's rotation phi_k and signature centre b_k.
// After the last round the Up-Link Grouping module sorts the K signatures and
// assigns users with well-separated signatures to the same UL group, one of
// TAU. Stage 2, UL training: all users send at once, user k with the training
// sequence of its group; for every block of Y, LS estimator g yields y_g and
// each assigned user's UL estimation module recovers h_k from y_g.
//
// Control (this design's choice; the paper gives the schedule of Fig. 14 but
// no controller): start_preamble (accepted in IDLE or UL) opens stage 1; the
// controller counts the preamble rounds by the results of preamble processor
// 0, starts the grouping after round G, and enters stage 2 when the group
// messages are written. Blocks of Y may be presented whenever y_ready is high
// (see data_buffer); in stage 1 exactly G blocks are expected.
// Interface: Y columns (M complex samples per clock), the TAU x L LS
// coefficients (training symbols already scaled by 1/(sqrt(d) L sigma_p^2)),
// the per-user estimates h_est[k] (one antenna per clock), and the group
// messages (assigned, group, b, phi per user) that the paper sends to the
// users over a feedback channel outside this design.
// Timing: a preamble round's signatures are ready 2M + L + 1 cycles after its
// column 0; groups_ready follows log2K(log2K+1)/2 + K + TAU + 2 cycles after
// the last round's signatures; in stage 2, h_k[0] leaves L + M + P + TAU + 2
// cycles after column 0 (P: output position of the user's last signature bin
// in the FFT's bit-reversed order, see extraction) and h_k[m] follows on
// consecutive cycles.
module adma_top
  import adma_pkg::*;
#(
  parameter int unsigned M     = 128,
  parameter int unsigned K     = 16,
  parameter int unsigned L     = 4,
  parameter int unsigned TAU   = 4,
  parameter int unsigned OMEGA = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // received signal Y, one column per clock
  input  logic                   col_valid,
  input  logic                   col_first,
  input  cplx_t                  col      [M],
  output logic                   y_ready,
  // LS coefficients: training sequence i, symbol j
  input  cplx_t                  pilot    [TAU][L],
  // control and status
  input  logic                   start_preamble,
  output sw_mode_t               stage,
  output logic                   sig_valid,    // a preamble round finished
  output logic                   groups_ready, // pulse: group messages written
  output logic                   dropped,      // pulse: a user fitted no group
  // group messages (to the feedback channel)
  output logic                   gm_assigned [K],
  output logic [$clog2(TAU)-1:0] gm_group    [K],
  output logic [$clog2(M)-1:0]   gm_b        [K],
  output phi_t                   gm_phi      [K],
  // UL channel estimates, one antenna per clock
  output cplx_t                  h_est       [K],
  output logic                   h_valid     [K]
);
  localparam int unsigned G  = K / TAU;
  localparam int unsigned RW = $clog2(G + 1);

  typedef enum logic [1:0] {
    ST_IDLE, ST_PRE, ST_GRP, ST_UL
  } state_t;

  state_t          state;
  logic [RW-1:0]   round;
  logic            grp_start, grp_done, grp_busy;

  // ---------------- pre-treatment: data buffer + TAU LS estimators
  cplx_t y_col   [L];
  logic  y_col_v [L];
  cplx_t ls_h    [TAU];
  logic  ls_v    [TAU];

  data_buffer #(.M(M), .L(L)) u_buf (
    .clk, .rst_n, .col_valid, .col_first, .col, .ready(y_ready),
    .y(y_col), .y_valid(y_col_v)
  );

  for (genvar i = 0; i < TAU; i++) begin : g_ls
    ls_estimator #(.L(L)) u_ls (
      .clk, .rst_n, .y(y_col), .y_valid(y_col_v), .s(pilot[i]),
      .h(ls_h[i]), .h_valid(ls_v[i])
    );
  end

  // ---------------- 1-to-2 switch
  cplx_t pre_h [TAU];
  logic  pre_v [TAU];
  cplx_t ul_y  [K];
  logic  ul_v  [K];

  stage_switch #(.K(K), .TAU(TAU)) u_sw (
    .mode(stage), .ls_h(ls_h), .ls_valid(ls_v),
    .gm_assigned(gm_assigned), .gm_group(gm_group),
    .pre_h(pre_h), .pre_valid(pre_v), .ul_y(ul_y), .ul_valid(ul_v)
  );

  // ---------------- stage 1: TAU preamble processors
  logic                 res_valid [TAU];
  logic [$clog2(M)-1:0] res_b     [TAU];
  phi_t                 res_phi   [TAU];

  for (genvar i = 0; i < TAU; i++) begin : g_pre
    preamble_proc #(.M(M)) u_pre (
      .clk, .rst_n, .h(pre_h[i]), .h_valid(pre_v[i]),
      .b(res_b[i]), .phi(res_phi[i]), .done(res_valid[i])
    );
  end

  ul_grouping #(.M(M), .K(K), .TAU(TAU), .OMEGA(OMEGA)) u_grp (
    .clk, .rst_n, .res_valid(res_valid), .res_b(res_b), .res_phi(res_phi),
    .round(round), .start(grp_start), .busy(grp_busy), .done(grp_done),
    .gm_assigned(gm_assigned), .gm_group(gm_group), .gm_b(gm_b), .gm_phi(gm_phi),
    .dropped(dropped)
  );

  // ---------------- stage 2: K UL estimation modules
  for (genvar k = 0; k < K; k++) begin : g_ul
    ul_estimator #(.M(M), .TAU(TAU)) u_ul (
      .clk, .rst_n, .b(gm_b[k]), .phi(gm_phi[k]), .y(ul_y[k]), .y_valid(ul_v[k]),
      .h(h_est[k]), .h_valid(h_valid[k])
    );
  end

  // ---------------- schedule control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      round     <= '0;
      grp_start <= 1'b0;
    end else begin
      grp_start <= 1'b0;
      unique case (state)
        ST_IDLE, ST_UL: if (start_preamble) begin
          state <= ST_PRE;
          round <= '0;
        end
        ST_PRE: if (res_valid[0]) begin
          if (round == RW'(G - 1)) begin
            state     <= ST_GRP;
            grp_start <= 1'b1;
          end
          round <= round + 1'b1;
        end
        ST_GRP: if (grp_done) state <= ST_UL;
        default: state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (state)
      ST_PRE:  stage = SW_PRE;
      ST_UL:   stage = SW_UL;
      default: stage = SW_OFF;
    endcase
  end

  assign sig_valid    = res_valid[0];
  assign groups_ready = grp_done;

  assert property (@(posedge clk) disable iff (!rst_n) grp_start |-> !grp_busy)
    else $error("adma_top: grouping restarted while busy");
endmodule
