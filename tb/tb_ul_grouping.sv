// tb_ul_grouping: writes K signatures through the TAU result ports over K/TAU
// rounds, starts the grouping and checks every group message against a
// reference (sort by decreasing b, first-fit with gap TAU + OMEGA), the
// dropped users, that b/phi are passed on, and the cycle count from start to
// done (S + K + TAU + 2 with S = log2K(log2K+1)/2 sorting columns).
module tb_ul_grouping;
  import adma_pkg::*;
  localparam int M = 128, K = 16, TAU = 4, OMEGA = 1, G = K / TAU;
  localparam int S = $clog2(K) * ($clog2(K) + 1) / 2;
  logic clk = 0, rst_n = 0;
  logic res_valid [TAU]; logic [$clog2(M)-1:0] res_b [TAU]; phi_t res_phi [TAU];
  logic [$clog2(G+1)-1:0] round; logic start, busy, done, dropped;
  logic gm_assigned [K]; logic [$clog2(TAU)-1:0] gm_group [K];
  logic [$clog2(M)-1:0] gm_b [K]; phi_t gm_phi [K];
  int checks = 0, failures = 0, cyc = 0, ndrop = 0;
  ul_grouping #(.M(M), .K(K), .TAU(TAU), .OMEGA(OMEGA)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && dropped) ndrop++;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; round = '0;
    for (int i = 0; i < TAU; i++) begin res_valid[i] = 0; res_b[i] = '0; res_phi[i] = PHI_ZERO; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      int bs [K]; int ph [K]; int order [K]; int expg [K]; int last [TAU]; bit used [TAU]; bit taken [M];
      int t0, exp_drop;
      for (int v = 0; v < M; v++) taken[v] = 0;
      for (int u = 0; u < K; u++) begin
        do bs[u] = $urandom_range(0, (trial < 5) ? 40 : M - 1); while (taken[bs[u]]);
        taken[bs[u]] = 1;
        ph[u] = $urandom_range(0, 2);
      end
      for (int r = 0; r < G; r++) begin
        round = ($clog2(G+1))'(r);
        for (int i = 0; i < TAU; i++) begin
          res_valid[i] = 1; res_b[i] = 7'(bs[r*TAU+i]); res_phi[i] = phi_t'(ph[r*TAU+i]);
        end
        @(negedge clk);
        for (int i = 0; i < TAU; i++) res_valid[i] = 0;
        @(negedge clk);
      end
      // reference: order by decreasing b, then first fit
      for (int u = 0; u < K; u++) order[u] = u;
      for (int a = 0; a < K; a++)
        for (int c = a + 1; c < K; c++)
          if (bs[order[c]] > bs[order[a]]) begin int tmp; tmp = order[a]; order[a] = order[c]; order[c] = tmp; end
      for (int g = 0; g < TAU; g++) used[g] = 0;
      exp_drop = 0;
      for (int n = 0; n < K; n++) begin
        int u; u = order[n]; expg[u] = -1;
        for (int g = 0; g < TAU; g++)
          if (expg[u] < 0 && (!used[g] || bs[u] + TAU + OMEGA <= last[g])) begin
            expg[u] = g; used[g] = 1; last[g] = bs[u];
          end
        if (expg[u] < 0) exp_drop++;
      end
      ndrop = 0;
      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t0 != S + K + TAU + 2) begin failures++; $display("grouping took %0d", cyc - t0); end
      for (int u = 0; u < K; u++) begin
        checks++;
        if (gm_assigned[u] != (expg[u] >= 0) || (expg[u] >= 0 && gm_group[u] != expg[u]) ||
            gm_b[u] != bs[u] || int'(gm_phi[u]) != ph[u]) begin
          failures++; $display("trial %0d user %0d: asg %0d grp %0d exp %0d", trial, u, gm_assigned[u], gm_group[u], expg[u]);
        end
      end
      checks++; if (ndrop != exp_drop) begin failures++; $display("drops %0d exp %0d", ndrop, exp_drop); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
