// tb_adma_top: end-to-end run of the whole estimator at its default size
// (M = 128 antennas, K = 16 users, L = 4, TAU = 4), one complete operation:
// a preamble of K/TAU rounds, the UL grouping, and two UL training blocks.
//
// Scene: single-path users around the four directions -48.59, -14.48,
// +14.48, +48.59 degrees, within +-2 degrees (the paper's simulation angles);
// one direction holds five users so that one of them cannot be grouped.
// Training sequences are the rows of a 4 x 4 Hadamard matrix; the LS
// coefficients are those rows divided by L, so LS returns the channel exactly.
// Checks: every user's (b_k, phi_k) against a double-precision search; the
// group messages against a first-fit reference; every UL estimate sample
// against a double-precision model of the same algorithm; the cycle of each
// user's first estimate; the grouping time; the switch position in each
// phase. Mechanisms that must occur at least once: preamble rounds, a block
// right after another and one after a gap, each of the three rotations being
// chosen, a dropped user, and stage-2 estimates.
module tb_adma_top;
  import adma_pkg::*;
  import tb_pkg::*;
  localparam int M = 128, K = 16, L = 4, TAU = 4, OMEGA = 1, G = K / TAU, NB = $clog2(M);
  localparam int S = $clog2(K) * ($clog2(K) + 1) / 2;

  logic clk = 0, rst_n = 0;
  logic col_valid, col_first; cplx_t col [M]; logic y_ready;
  cplx_t pilot [TAU][L];
  logic start_preamble; sw_mode_t stage; logic sig_valid, groups_ready, dropped;
  logic gm_assigned [K]; logic [$clog2(TAU)-1:0] gm_group [K];
  logic [NB-1:0] gm_b [K]; phi_t gm_phi [K];
  cplx_t h_est [K]; logic h_valid [K];

  adma_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_rounds = 0, n_b2b = 0, n_gap = 0, n_drop = 0, n_lane [3], n_est = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #3000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int W [4][4] = '{'{1, 1, 1, 1}, '{1, -1, 1, -1}, '{1, 1, -1, -1}, '{1, -1, -1, 1}};
  real dirs [4] = '{-48.59, -14.48, 14.48, 48.59};
  cplx_t hk [K][];
  int last_start = -1000000;

  always @(negedge clk) if (rst_n) begin
    if (sig_valid) n_rounds++;
    if (dropped) n_drop++;
  end

  // present one block of Y = sum_i h_src[i] W_i^T (called at a negedge)
  task automatic send_block(input cplx_t ys [L][M]);
    while (!y_ready) @(negedge clk);
    if (cyc - last_start == M) n_b2b++; else if (last_start > 0) n_gap++;
    last_start = cyc;
    for (int j = 0; j < L; j++) begin
      col_valid = 1; col_first = (j == 0);
      for (int m = 0; m < M; m++) col[m] = ys[j][m];
      @(negedge clk);
    end
    col_valid = 0; col_first = 0;
  endtask

  // Y columns for TAU signals x_i sent with sequence i
  task automatic build(input cplx_t xs [TAU][M], output cplx_t ys [L][M]);
    for (int j = 0; j < L; j++)
      for (int m = 0; m < M; m++) begin
        int re, im;
        re = 0; im = 0;
        for (int i = 0; i < TAU; i++) begin re += W[i][j] * xs[i][m].re; im += W[i][j] * xs[i][m].im; end
        ys[j][m].re = dat_t'(re); ys[j][m].im = dat_t'(im);
      end
  endtask

  initial begin
    int eb [K], es [K]; real ebest [K], esec [K];
    int expg [K]; int blk_start [2];
    cplx_t xs [TAU][M]; cplx_t ys [L][M];
    cplx_t yg [TAU][];
    col_valid = 0; col_first = 0; start_preamble = 0;
    for (int m = 0; m < M; m++) col[m] = '0;
    for (int i = 0; i < TAU; i++) for (int j = 0; j < L; j++) pilot[i][j] = q(W[i][j] / real'(L), 0.0);
    for (int i = 0; i < 3; i++) n_lane[i] = 0;
    // users: direction d = u % 4, offset within +-2 degrees; user 15 joins
    // direction 3 instead of 2 (five users there)
    for (int u = 0; u < K; u++) begin
      int d; real off;
      d = (u == 14) ? 3 : u % 4;
      off = -1.8 + 1.2 * (u / 4) + 0.13 * d;
      steer(hk[u], M, 1.0 + 0.1 * (u % 3), dirs[d] + off, 0.7 * u);
      ref_preamble(hk[u], M, eb[u], es[u], ebest[u], esec[u]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (stage != SW_OFF) begin failures++; $display("stage after reset %0d", stage); end
    start_preamble = 1; @(negedge clk); start_preamble = 0;
    // ---- stage 1: G rounds; rounds 0,1 back to back, then gaps
    for (int r = 0; r < G; r++) begin
      for (int i = 0; i < TAU; i++) for (int m = 0; m < M; m++) xs[i][m] = hk[r * TAU + i][m];
      build(xs, ys);
      if (r >= 2) repeat (M) @(negedge clk);
      checks++; if (stage != SW_PRE) begin failures++; $display("stage in preamble %0d", stage); end
      send_block(ys);
    end
    // ---- grouping
    begin
      int t_last;
      while (n_rounds < G) @(negedge clk);
      t_last = cyc;
      @(negedge clk);
      checks++; if (stage != SW_OFF) begin failures++; $display("stage while grouping %0d", stage); end
      while (!groups_ready) @(negedge clk);
      checks++;
      if (cyc - t_last != S + K + TAU + 2) begin failures++; $display("grouping took %0d", cyc - t_last); end
    end
    @(negedge clk);
    checks++; if (stage != SW_UL) begin failures++; $display("stage after grouping %0d", stage); end
    // signatures
    for (int u = 0; u < K; u++) begin
      real got;
      got = rot_dft_mag2(hk[u], M, int'(gm_phi[u]) - 1, int'(gm_b[u]));
      checks++;
      if (ebest[u] > 1.03 * esec[u]) begin
        if (gm_b[u] != eb[u] || int'(gm_phi[u]) - 1 != es[u]) begin
          failures++; $display("user %0d: b=%0d s=%0d exp b=%0d s=%0d", u, gm_b[u], int'(gm_phi[u]) - 1, eb[u], es[u]);
        end
      end else if (got < ebest[u] / 1.03) begin
        failures++; $display("user %0d: weak signature", u);
      end
      n_lane[gm_phi[u]]++;
    end
    // groups: first fit in decreasing b on the hardware's own b values
    begin
      int order [K]; int last [TAU]; bit used [TAU];
      for (int u = 0; u < K; u++) order[u] = u;
      for (int a = 0; a < K; a++)
        for (int c = a + 1; c < K; c++)
          if (gm_b[order[c]] > gm_b[order[a]] || (gm_b[order[c]] == gm_b[order[a]] && order[c] < order[a])) begin
            int tmp; tmp = order[a]; order[a] = order[c]; order[c] = tmp;
          end
      for (int g = 0; g < TAU; g++) used[g] = 0;
      for (int n = 0; n < K; n++) begin
        int u; u = order[n]; expg[u] = -1;
        for (int g = 0; g < TAU; g++)
          if (expg[u] < 0 && (!used[g] || int'(gm_b[u]) + TAU + OMEGA <= last[g])) begin
            expg[u] = g; used[g] = 1; last[g] = gm_b[u];
          end
      end
      for (int u = 0; u < K; u++) begin
        checks++;
        // users with equal b may be ordered either way by the network; only
        // check the assigned/unassigned count for those
        if (gm_assigned[u] != (expg[u] >= 0) || (expg[u] >= 0 && gm_group[u] != expg[u])) begin
          bit tie; tie = 0;
          for (int v = 0; v < K; v++) if (v != u && gm_b[v] == gm_b[u]) tie = 1;
          if (!tie) begin failures++; $display("user %0d group %0d/%0d exp %0d", u, gm_assigned[u], gm_group[u], expg[u]); end
        end
      end
    end
    // ---- stage 2: each group g sends sequence g; y_g = sum of its users
    for (int g = 0; g < TAU; g++) begin
      for (int m = 0; m < M; m++) begin
        int re, im; re = 0; im = 0;
        for (int u = 0; u < K; u++) if (gm_assigned[u] && gm_group[u] == g) begin re += hk[u][m].re; im += hk[u][m].im; end
        xs[g][m].re = dat_t'(re); xs[g][m].im = dat_t'(im);
      end
      yg[g] = new[M];
      for (int m = 0; m < M; m++) yg[g][m] = xs[g][m];
    end
    build(xs, ys);
    fork
      begin
        send_block(ys);
        blk_start[0] = last_start;
        send_block(ys);
        blk_start[1] = last_start;
      end
      begin
        // per-user output checkers
        int cnt [K];
        real er [K][], ei [K][];
        int P [K];
        real nmse_num, nmse_den;
        nmse_num = 0.0; nmse_den = 0.0;
        for (int u = 0; u < K; u++) begin
          int seen;
          cnt[u] = 0;
          if (gm_assigned[u]) ref_ul(yg[gm_group[u]], M, TAU, gm_b[u], int'(gm_phi[u]) - 1, er[u], ei[u]);
          seen = 0; P[u] = 0;
          for (int j = 0; j < M; j++) begin
            int k; k = bitrev(j, NB);
            if (((k - (int'(gm_b[u]) - TAU / 2)) % M + M) % M < TAU) begin seen++; if (seen == TAU) P[u] = j; end
          end
        end
        repeat (2 * M + 4 * M) begin
          @(negedge clk);
          for (int u = 0; u < K; u++) if (h_valid[u]) begin
            int m; m = cnt[u] % M;
            checks++;
            if (!gm_assigned[u]) begin failures++; $display("unassigned user %0d produced output", u); end
            else begin
              if (cnt[u] == 0) begin
                checks++;
                if (cyc - blk_start[0] != L + M + P[u] + TAU + 2) begin
                  failures++; $display("user %0d first estimate after %0d exp %0d", u, cyc - blk_start[0], L + M + P[u] + TAU + 2);
                end
              end
              if (!close(h_est[u], er[u][m], ei[u][m], 0.2)) begin
                failures++; $display("user %0d m=%0d got %f %f exp %f %f", u, m, rv(h_est[u].re), rv(h_est[u].im), er[u][m], ei[u][m]);
              end
              if (cnt[u] < M) begin
                real dr, di;
                dr = rv(h_est[u].re) - rv(hk[u][m].re); di = rv(h_est[u].im) - rv(hk[u][m].im);
                nmse_num += dr * dr + di * di;
                nmse_den += rv(hk[u][m].re) ** 2 + rv(hk[u][m].im) ** 2;
              end
            end
            cnt[u]++; n_est++;
          end
        end
        for (int u = 0; u < K; u++) begin
          checks++;
          if (gm_assigned[u] && cnt[u] != 2 * M) begin failures++; $display("user %0d gave %0d samples", u, cnt[u]); end
        end
        $display("UL estimate NMSE against the true channels: %f", nmse_num / nmse_den);
      end
    join
    $display("mechanisms: rounds=%0d back_to_back=%0d after_gap=%0d lanes=%0d/%0d/%0d dropped=%0d estimates=%0d",
             n_rounds, n_b2b, n_gap, n_lane[0], n_lane[1], n_lane[2], n_drop, n_est);
    checks++; if (n_rounds != G) failures++;
    checks++; if (n_b2b == 0) failures++;
    checks++; if (n_gap == 0) failures++;
    for (int i = 0; i < 3; i++) begin checks++; if (n_lane[i] == 0) begin failures++; $display("rotation %0d never chosen", i); end end
    checks++; if (n_drop == 0) failures++;
    checks++; if (n_est == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
