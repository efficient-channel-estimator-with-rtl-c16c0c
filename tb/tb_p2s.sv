// tb_p2s: loads random words and checks they leave one per cycle, word 0
// first, on the N cycles after the load, with out_last on the last.
module tb_p2s;
  localparam int N = 16, W = 11;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] din [N]; logic in_valid; logic busy;
  logic [W-1:0] dout; logic out_valid, out_last;
  int checks = 0, failures = 0;
  p2s #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [W-1:0] ref_w [N];
    in_valid = 0;
    for (int i = 0; i < N; i++) din[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      for (int i = 0; i < N; i++) begin din[i] = W'($urandom); ref_w[i] = din[i]; end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (!out_valid || dout != ref_w[i] || out_last != (i == N - 1)) begin
          failures++; $display("r=%0d i=%0d got %0h exp %0h", r, i, dout, ref_w[i]);
        end
        din[i] = '1;  // changing the inputs must not matter
        @(negedge clk);
      end
      checks++; if (out_valid || busy) begin failures++; $display("still busy"); end
      repeat (r) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
