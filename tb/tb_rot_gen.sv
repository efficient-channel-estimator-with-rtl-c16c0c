// tb_rot_gen: for each rotation code and both conjugation settings, steps the
// Phi-generator through M samples and checks e^{+-j n phi} against $cos/$sin
// (within 1.5 LSB of Q1.14), and that the counter wraps after M samples.
module tb_rot_gen;
  import adma_pkg::*;
  localparam int M = 128;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  phi_t phi; logic conj_en, adv; ccoef_t w;
  int checks = 0, failures = 0;

  rot_gen #(.M(M)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phi = PHI_ZERO; conj_en = 0; adv = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 3; p++)
      for (int c = 0; c < 2; c++)
        for (int n = 0; n < M + 2; n++) begin
          real ang, er, ei;
          phi = phi_t'(p); conj_en = c[0]; adv = 1;
          #1;
          ang = (p - 1) * PI * (n % M) / M * (c ? -1.0 : 1.0);
          er = $itor(w.re) - 16384.0 * $cos(ang);
          ei = $itor(w.im) - 16384.0 * $sin(ang);
          checks++;
          if (er > 1.5 || er < -1.5 || ei > 1.5 || ei < -1.5) begin
            failures++; $display("p=%0d c=%0d n=%0d: %0d %0d", p, c, n, w.re, w.im);
          end
          @(negedge clk);
          if (n == M + 1) begin
            // re-align the counter for the next case
            adv = 1; repeat (M - 2) @(negedge clk);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
