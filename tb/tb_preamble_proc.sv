// tb_preamble_proc: single-path users at random angles; the LS estimate h_k is
// a steering vector. Checks b_k and phi_k against a double-precision search
// over the three rotations and all bins (where the best candidate is more
// than 3 % above the next, otherwise that the chosen candidate is within 3 %
// of the best), and that done comes 2M cycles after the first sample.
// Frames are sent back to back and with gaps.
module tb_preamble_proc;
  import adma_pkg::*;
  import tb_pkg::*;
  localparam int M = 128;
  logic clk = 0, rst_n = 0;
  cplx_t h; logic h_valid;
  logic [$clog2(M)-1:0] b; phi_t phi; logic done;
  int checks = 0, failures = 0, cyc = 0;
  int lane_seen [3];
  preamble_proc #(.M(M)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NF = 12;
  cplx_t hs [NF][];
  int eb [NF], es [NF], st [NF];
  real ebest [NF], esec [NF];
  int nres = 0;

  always @(negedge clk) if (rst_n && done) begin
    real got;
    got = rot_dft_mag2(hs[nres], M, int'(phi) - 1, int'(b));
    checks++;
    if (cyc - st[nres] != 2 * M) begin failures++; $display("frame %0d: done after %0d", nres, cyc - st[nres]); end
    checks++;
    if (ebest[nres] > 1.03 * esec[nres]) begin
      if (b != eb[nres] || int'(phi) - 1 != es[nres]) begin
        failures++; $display("frame %0d: b=%0d s=%0d exp b=%0d s=%0d", nres, b, int'(phi) - 1, eb[nres], es[nres]);
      end
    end else if (got < ebest[nres] / 1.03) begin
      failures++; $display("frame %0d: weak choice", nres);
    end
    lane_seen[phi]++;
    nres++;
  end

  initial begin
    h = '0; h_valid = 0;
    for (int f = 0; f < NF; f++) begin
      int a, c;
      a = $urandom_range(0, 9000); c = $urandom_range(0, 628);
      steer(hs[f], M, 1.5, (a - 4500) / 100.0, c / 100.0);
      ref_preamble(hs[f], M, eb[f], es[f], ebest[f], esec[f]);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      st[f] = cyc;
      for (int m = 0; m < M; m++) begin
        h = hs[f][m]; h_valid = 1;
        @(negedge clk);
      end
      h_valid = 0;
      if (f % 3 == 2) repeat (M) @(negedge clk);
    end
    repeat (3 * M) @(negedge clk);
    checks++; if (nres != NF) begin failures++; $display("results %0d", nres); end
    $display("lanes chosen: %0d %0d %0d", lane_seen[0], lane_seen[1], lane_seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
