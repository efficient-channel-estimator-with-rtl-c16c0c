// tb_grouping: streams sorted (descending) signature centres through the chain
// of compare PEs and checks each user's group against a first-fit reference
// (a user joins the first group whose latest b is at least GAP above it), that
// users fitting nowhere are dropped, the report cycle (entry + g + 1) and that
// the whole list is decided K + G cycles after it starts.
module tb_grouping;
  localparam int G = 4, BW = 7, UW = 4, GAP = 5, K = 16;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid; logic [BW-1:0] in_b; logic [UW-1:0] in_user;
  logic asg_valid [G]; logic [UW-1:0] asg_user [G];
  logic drop; logic [UW-1:0] drop_user;
  int checks = 0, failures = 0, cyc = 0;
  int exp_g [K];
  int got_g [K];
  int ent_cyc [K];
  int last_cyc;
  grouping #(.G(G), .BW(BW), .UW(UW), .GAP(GAP)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (rst_n) begin
    for (int g = 0; g < G; g++) if (asg_valid[g]) begin
      got_g[asg_user[g]] = g; last_cyc = cyc;
      checks++;
      if (cyc != ent_cyc[asg_user[g]] + g + 1) begin failures++; $display("user %0d reported late", asg_user[g]); end
    end
    if (drop) begin got_g[drop_user] = -2; last_cyc = cyc; end
  end
  initial begin
    in_valid = 0; in_b = '0; in_user = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      int bs [K]; int last [G]; bit used [G]; int t0;
      // random descending list
      bs[0] = $urandom_range(100, 127);
      for (int u = 1; u < K; u++) begin
        int d; d = $urandom_range(0, (trial % 3 == 0) ? 2 : 9);
        bs[u] = (bs[u-1] - d < 0) ? 0 : bs[u-1] - d;
      end
      for (int g = 0; g < G; g++) used[g] = 0;
      for (int u = 0; u < K; u++) begin
        exp_g[u] = -2; got_g[u] = -1;
        for (int g = 0; g < G; g++)
          if (exp_g[u] == -2 && (!used[g] || bs[u] + GAP <= last[g])) begin
            exp_g[u] = g; used[g] = 1; last[g] = bs[u];
          end
      end
      clear = 1; @(negedge clk); clear = 0;
      t0 = cyc;
      for (int u = 0; u < K; u++) begin
        in_valid = 1; in_b = BW'(bs[u]); in_user = UW'((u * 7) % K); ent_cyc[(u * 7) % K] = cyc;
        @(negedge clk);
      end
      in_valid = 0;
      repeat (G + 2) @(negedge clk);
      for (int u = 0; u < K; u++) begin
        checks++;
        if (got_g[(u * 7) % K] != exp_g[u]) begin failures++; $display("trial %0d user pos %0d: got %0d exp %0d", trial, u, got_g[(u*7)%K], exp_g[u]); end
      end
      checks++;
      if (last_cyc - t0 > K + G) begin failures++; $display("took %0d cycles", last_cyc - t0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
