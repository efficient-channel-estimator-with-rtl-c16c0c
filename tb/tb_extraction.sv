// tb_extraction: sends FFT frames with bins in bit-reversed order and checks
// that the TAU bins b-TAU/2 .. b+TAU/2-1 (mod M) are kept in window order,
// that ready pulses on the cycle after the last member arrives (latency P),
// for centres near both ends of the index range.
module tb_extraction;
  import adma_pkg::*;
  import tb_pkg::*;
  localparam int M = 32, TAU = 4, NB = $clog2(M);
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] b; cplx_t f; logic [NB-1:0] f_idx; logic f_valid;
  cplx_t x [TAU]; logic [NB-1:0] bin_idx [TAU]; logic ready;
  int checks = 0, failures = 0;
  extraction #(.M(M), .TAU(TAU)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    f_valid = 0; f = '0; f_idx = '0; b = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int fr = 0; fr < 12; fr++) begin
      cplx_t vals [M]; int lastpos, seen;
      b = NB'((fr == 0) ? 0 : (fr == 1) ? M - 1 : (fr == 2) ? 1 : $urandom_range(0, M - 1));
      for (int k = 0; k < M; k++) vals[k] = cplx_t'($urandom);
      lastpos = -1; seen = 0;
      for (int j = 0; j < M; j++) begin
        int k, pos;
        k = bitrev(j, NB);
        pos = (k - (int'(b) - TAU / 2) + 2 * M) % M;
        if (pos < TAU) begin seen++; if (seen == TAU) lastpos = j; end
      end
      for (int j = 0; j < M; j++) begin
        f_valid = 1; f_idx = NB'(bitrev(j, NB)); f = vals[f_idx];
        @(negedge clk);
        checks++;
        if (ready !== (j == lastpos)) begin failures++; $display("fr %0d ready wrong at %0d (exp %0d)", fr, j, lastpos); end
        if (ready) begin
          for (int i = 0; i < TAU; i++) begin
            int k;
            k = (int'(b) - TAU / 2 + i + M) % M;
            checks++;
            if (bin_idx[i] != k || x[i] !== vals[k]) begin failures++; $display("fr %0d slot %0d wrong", fr, i); end
          end
        end
      end
      f_valid = 0;
      repeat (fr % 3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
