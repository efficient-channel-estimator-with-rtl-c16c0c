// tb_ifft_systolic: random TAU-bin spectra; checks every output row against
// sum_i x_i e^{j 2 pi m b_i / M} / 2^(log2M - ceil(log2M/2)) computed in double
// precision, row 0 on cycle start + TAU + 1 and M rows on consecutive cycles.
module tb_ifft_systolic;
  import adma_pkg::*;
  import tb_pkg::*;
  localparam int M = 128, TAU = 4, NS = $clog2(M);
  localparam real PI = 3.14159265358979323846;
  localparam real SC = 1.0 / (2.0 ** (NS - (NS + 1) / 2));
  logic clk = 0, rst_n = 0;
  cplx_t x [TAU]; logic [NS-1:0] bin_idx [TAU]; logic start;
  cplx_t h; logic h_valid;
  int checks = 0, failures = 0, cyc = 0;
  ifft_systolic #(.M(M), .TAU(TAU)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0;
    for (int i = 0; i < TAU; i++) begin x[i] = '0; bin_idx[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int fr = 0; fr < 4; fr++) begin
      cplx_t xs [TAU]; int bs [TAU]; int t0;
      for (int i = 0; i < TAU; i++) begin
        int a, c;
        a = $urandom_range(0, 4000); c = $urandom_range(0, 4000);
        xs[i] = q((a - 2000) / 100.0, (c - 2000) / 100.0);
        bs[i] = $urandom_range(0, M - 1);
        x[i] = xs[i]; bin_idx[i] = NS'(bs[i]);
      end
      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      for (int m = 0; m < M + TAU + 1; m++) begin
        real re, im;
        int r;
        r = cyc - t0 - TAU - 1;
        checks++;
        if (h_valid !== (r >= 0 && r < M)) begin failures++; $display("valid wrong at %0d", r); end
        else if (h_valid) begin
          re = 0.0; im = 0.0;
          for (int i = 0; i < TAU; i++) begin
            real a;
            a = 2.0 * PI * r * bs[i] / M;
            re += rv(xs[i].re) * $cos(a) - rv(xs[i].im) * $sin(a);
            im += rv(xs[i].re) * $sin(a) + rv(xs[i].im) * $cos(a);
          end
          checks++;
          if (!close(h, re * SC, im * SC, 0.1)) begin failures++; $display("row %0d: %f %f exp %f %f", r, rv(h.re), rv(h.im), re*SC, im*SC); end
        end
        if (m == TAU) for (int i = 0; i < TAU; i++) x[i] = '0;  // held long enough
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
