// tb_ls_estimator: drives the systolic LS array with skewed columns of a
// random Y (as the data buffer would) and checks [h]_m = sum_j [Y]_{m,j} s_j,
// rounded to [1,8,6], on cycle c0 + 1 + L + m, for two back-to-back blocks.
module tb_ls_estimator;
  import adma_pkg::*;
  localparam int M = 8, L = 4;
  logic clk = 0, rst_n = 0;
  cplx_t y [L]; logic y_valid [L]; cplx_t s [L];
  cplx_t h; logic h_valid;
  int checks = 0, failures = 0, cyc = 0;
  cplx_t Y [2][L][M];
  int c0;

  ls_estimator #(.L(L)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cplx_t ref_h(int n, int m);
    longint re, im;
    cplx_t r;
    re = 0; im = 0;
    for (int j = 0; j < L; j++) begin
      re += longint'(Y[n][j][m].re) * s[j].re - longint'(Y[n][j][m].im) * s[j].im;
      im += longint'(Y[n][j][m].re) * s[j].im + longint'(Y[n][j][m].im) * s[j].re;
    end
    re = (re + 32) >>> 6; im = (im + 32) >>> 6;
    r.re = (re > 16383) ? 15'sd16383 : (re < -16384) ? -15'sd16384 : dat_t'(re);
    r.im = (im > 16383) ? 15'sd16383 : (im < -16384) ? -15'sd16384 : dat_t'(im);
    return r;
  endfunction

  // stimulus at negedge: PE j gets [Y]_{m,j} on cycle c0+1+j+m
  always @(negedge clk) if (rst_n) begin
    for (int j = 0; j < L; j++) begin
      int t;
      t = cyc - c0 - 1 - j;
      y_valid[j] = (t >= 0 && t < 2 * M);
      y[j] = y_valid[j] ? Y[t / M][j][t % M] : '0;
    end
    begin
      int t;
      t = cyc - c0 - 1 - L;
      checks++;
      if (h_valid !== (t >= 0 && t < 2 * M)) begin
        failures++; $display("valid wrong at %0d", t);
      end else if (h_valid && h !== ref_h(t / M, t % M)) begin
        failures++; $display("h wrong at %0d", t);
      end
    end
  end

  initial begin
    for (int n = 0; n < 2; n++)
      for (int j = 0; j < L; j++)
        for (int m = 0; m < M; m++) begin
          Y[n][j][m].re = dat_t'($urandom_range(0, 4000)) - 15'sd2000;
          Y[n][j][m].im = dat_t'($urandom_range(0, 4000)) - 15'sd2000;
        end
    for (int j = 0; j < L; j++) begin
      s[j].re = dat_t'($urandom_range(0, 128)) - 15'sd64;
      s[j].im = dat_t'($urandom_range(0, 128)) - 15'sd64;
      y[j] = '0; y_valid[j] = 0;
    end
    c0 = 1000000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c0 = cyc + 2;
    repeat (3 * M + L + 5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
