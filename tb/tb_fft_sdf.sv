// tb_fft_sdf: sends three M-point frames (two back to back, one after a gap of
// M/2) of random data through the SDF FFT and compares every bin with a
// double-precision DFT scaled by 2^-ceil(log2(M)/2). Checks the output order
// (bit-reversed, reported on y_idx) and the latency: first bin M-1 cycles and
// last bin 2M-2 cycles after the first input sample.
module tb_fft_sdf;
  import adma_pkg::*;
  import tb_pkg::*;
  localparam int M = 128;
  localparam int NS = $clog2(M);
  localparam real SC = 1.0 / (2.0 ** ((NS + 1) / 2));
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  cplx_t x; logic x_valid; cplx_t y; logic y_valid; logic [NS-1:0] y_idx;
  int checks = 0, failures = 0, cyc = 0;
  cplx_t X [3][M];
  int in_start [3];
  int nout = 0;
  real maxerr = 0.0;

  fft_sdf #(.M(M)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && y_valid) begin
    int f, j, k;
    real re, im, e;
    f = nout / M; j = nout % M; k = bitrev(j, NS);
    re = 0.0; im = 0.0;
    for (int n = 0; n < M; n++) begin
      real a;
      a = -2.0 * PI * n * k / M;
      re += rv(X[f][n].re) * $cos(a) - rv(X[f][n].im) * $sin(a);
      im += rv(X[f][n].re) * $sin(a) + rv(X[f][n].im) * $cos(a);
    end
    re *= SC; im *= SC;
    checks++;
    if (y_idx != k) begin failures++; $display("idx %0d != %0d", y_idx, k); end
    checks++;
    if (!close(y, re, im, 0.25)) begin
      failures++; $display("frame %0d bin %0d: got %f %f exp %f %f", f, k, rv(y.re), rv(y.im), re, im);
    end
    e = rv(y.re) - re; if (e < 0) e = -e; if (e > maxerr) maxerr = e;
    if (j == 0) begin
      checks++; if (cyc - in_start[f] != M - 1) begin failures++; $display("latency %0d", cyc - in_start[f]); end
    end
    if (j == M - 1) begin
      checks++; if (cyc - in_start[f] != 2 * M - 2) begin failures++; $display("last at %0d", cyc - in_start[f]); end
    end
    nout++;
  end

  task automatic send(int f);
    for (int n = 0; n < M; n++) begin
      if (n == 0) in_start[f] = cyc;
      x = X[f][n]; x_valid = 1;
      @(negedge clk);
    end
    x_valid = 0;
  endtask

  initial begin
    for (int f = 0; f < 3; f++)
      for (int n = 0; n < M; n++) begin
        int a, b;
        a = $urandom_range(0, 2000); b = $urandom_range(0, 2000);
        X[f][n] = q((a - 1000) / 250.0, (b - 1000) / 250.0);
      end
    X[2][5] = q(100.0, -80.0);
    x = '0; x_valid = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    send(0); send(1);
    repeat (M / 2) @(negedge clk);
    send(2);
    repeat (3 * M) @(negedge clk);
    checks++; if (nout != 3 * M) begin failures++; $display("outputs %0d", nout); end
    $display("max error %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
