// tb_max3: random candidate triples; checks that the bin and rotation code of
// the largest candidate (lowest lane on ties) appear one cycle after done_in.
module tb_max3;
  import adma_pkg::*;
  localparam int M = 128;
  logic clk = 0, rst_n = 0;
  logic [2*DW-1:0] val [3]; logic [$clog2(M)-1:0] idx [3]; logic done_in;
  logic [$clog2(M)-1:0] b; phi_t phi; logic [2*DW-1:0] peak; logic done;
  int checks = 0, failures = 0;
  max3 #(.M(M)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    done_in = 0;
    for (int i = 0; i < 3; i++) begin val[i] = '0; idx[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int best;
      for (int i = 0; i < 3; i++) begin
        val[i] = 30'($urandom_range(0, (t < 100) ? 3 : 100000));
        idx[i] = ($clog2(M))'($urandom);
      end
      best = 0;
      for (int i = 1; i < 3; i++) if (val[i] > val[best]) best = i;
      done_in = 1;
      @(negedge clk);
      done_in = 0;
      checks++;
      if (!done || b != idx[best] || int'(phi) != best || peak != val[best]) begin
        failures++; $display("t=%0d got b=%0d phi=%0d exp b=%0d lane %0d", t, b, phi, idx[best], best);
      end
      @(negedge clk);
      checks++; if (done) begin failures++; $display("done stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
