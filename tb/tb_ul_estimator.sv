// tb_ul_estimator: a user with a steering-vector channel; the TB finds its
// (b, phi) by the reference search, streams y = h through the UL estimator
// and compares every antenna of the output with the double-precision
// Phi^H F^H_B [F Phi y]_B. Checks the cycle of the first output
// (M + P + TAU + 1 after the first input) and back-to-back frames.
module tb_ul_estimator;
  import adma_pkg::*;
  import tb_pkg::*;
  localparam int M = 128, TAU = 4, NB = $clog2(M);
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] b; phi_t phi; cplx_t y; logic y_valid; cplx_t h; logic h_valid;
  int checks = 0, failures = 0, cyc = 0;
  real maxerr = 0.0;
  ul_estimator #(.M(M), .TAU(TAU)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    h = '0; y = '0; y_valid = 0; b = '0; phi = PHI_ZERO;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int user = 0; user < 4; user++) begin
      cplx_t hs []; real er [], ei []; int eb, es, P, seen, t0, nout;
      real bst, sec;
      int a, c;
      a = $urandom_range(0, 9000); c = $urandom_range(0, 628);
      steer(hs, M, 2.0, (a - 4500) / 100.0, c / 100.0);
      ref_preamble(hs, M, eb, es, bst, sec);
      ref_ul(hs, M, TAU, eb, es, er, ei);
      b = NB'(eb); phi = phi_t'(es + 1);
      seen = 0; P = 0;
      for (int j = 0; j < M; j++) begin
        int k; k = bitrev(j, NB);
        if (((k - (eb - TAU / 2)) % M + M) % M < TAU) begin seen++; if (seen == TAU) P = j; end
      end
      @(negedge clk);
      t0 = cyc; nout = 0;
      // two frames back to back, same channel
      fork
        begin
          for (int m = 0; m < 2 * M; m++) begin y = hs[m % M]; y_valid = 1; @(negedge clk); end
          y_valid = 0;
        end
        begin
          while (nout < 2 * M) begin
            if (h_valid) begin
              real e;
              if (nout == 0) begin
                checks++;
                if (cyc - t0 != M + P + TAU + 1) begin failures++; $display("first output after %0d, exp %0d", cyc - t0, M + P + TAU + 1); end
              end
              checks++;
              if (!close(h, er[nout % M], ei[nout % M], 0.15)) begin
                failures++; $display("user %0d m=%0d got %f %f exp %f %f", user, nout % M, rv(h.re), rv(h.im), er[nout % M], ei[nout % M]);
              end
              e = rv(h.re) - er[nout % M]; if (e < 0) e = -e; if (e > maxerr) maxerr = e;
              nout++;
            end
            @(negedge clk);
          end
        end
      join
      repeat (M) @(negedge clk);
    end
    $display("max error %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
