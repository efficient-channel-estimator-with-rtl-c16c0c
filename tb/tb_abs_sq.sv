// tb_abs_sq: random and extreme samples; checks re^2 + im^2 exactly.
module tb_abs_sq;
  import adma_pkg::*;
  cplx_t x; logic [2*DW-1:0] mag2;
  int checks = 0, failures = 0;
  abs_sq dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 1000; i++) begin
      longint e;
      x.re = dat_t'($urandom); x.im = dat_t'($urandom);
      if (i == 0) begin x.re = -15'sd16384; x.im = -15'sd16384; end
      #1;
      e = longint'(x.re) * x.re + longint'(x.im) * x.im;
      checks++;
      if (longint'(mag2) != e) begin failures++; $display("%0d %0d -> %0d", x.re, x.im, mag2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
