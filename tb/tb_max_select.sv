// tb_max_select: random frames of M magnitudes with shuffled bin indices;
// checks the largest value, its bin (earliest on ties) and that done pulses
// one cycle after the last bin of each frame.
module tb_max_select;
  import adma_pkg::*;
  localparam int M = 32;
  logic clk = 0, rst_n = 0;
  logic [2*DW-1:0] mag2; logic [$clog2(M)-1:0] idx; logic valid;
  logic [2*DW-1:0] max_val; logic [$clog2(M)-1:0] max_idx; logic done;
  int checks = 0, failures = 0;
  max_select #(.M(M)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    valid = 0; mag2 = '0; idx = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 6; f++) begin
      logic [2*DW-1:0] bv; int bi;
      bv = '0; bi = -1;
      for (int n = 0; n < M; n++) begin
        valid = 1; idx = ($clog2(M))'(n ^ 5);
        mag2 = (f == 5) ? 30'd7 : 30'($urandom_range(0, 1000));
        if (bi < 0 || mag2 > bv) begin bv = mag2; bi = idx; end
        @(negedge clk);
        checks++;
        if (done !== (n == M - 1)) begin failures++; $display("done wrong f=%0d n=%0d", f, n); end
      end
      valid = 0;
      checks++;
      if (max_val != bv || max_idx != bi) begin failures++; $display("frame %0d: %0d@%0d exp %0d@%0d", f, max_val, max_idx, bv, bi); end
      if (f % 2) repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
