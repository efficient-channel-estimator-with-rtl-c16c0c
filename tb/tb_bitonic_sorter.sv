// tb_bitonic_sorter: feeds a new random set of N keys (with their positions as
// payload) on consecutive cycles; checks each output set is in descending key
// order, is a permutation of its input (payloads point at equal keys), and
// leaves log2(N)(log2(N)+1)/2 cycles after it entered.
module tb_bitonic_sorter;
  localparam int N = 16, KW = 7, PW = 4;
  localparam int LAT = $clog2(N) * ($clog2(N) + 1) / 2;
  logic clk = 0, rst_n = 0;
  logic [KW-1:0] key_in [N]; logic [PW-1:0] pay_in [N]; logic in_valid;
  logic [KW-1:0] key_out [N]; logic [PW-1:0] pay_out [N]; logic out_valid;
  int checks = 0, failures = 0, cyc = 0;
  logic [KW-1:0] hist [64][N];
  int in_cyc [64];
  int nin = 0, nout = 0;
  bitonic_sorter #(.N(N), .KW(KW), .PW(PW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (rst_n && out_valid) begin
    bit ok, used [N];
    ok = 1;
    for (int i = 0; i < N; i++) used[i] = 0;
    for (int i = 0; i < N; i++) begin
      if (i > 0 && key_out[i] > key_out[i-1]) ok = 0;
      if (hist[nout][pay_out[i]] != key_out[i] || used[pay_out[i]]) ok = 0;
      used[pay_out[i]] = 1;
    end
    checks++; if (!ok) begin failures++; $display("set %0d not sorted", nout); end
    checks++; if (cyc - in_cyc[nout] != LAT) begin failures++; $display("latency %0d", cyc - in_cyc[nout]); end
    nout++;
  end
  initial begin
    in_valid = 0;
    for (int i = 0; i < N; i++) begin key_in[i] = '0; pay_in[i] = PW'(i); end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      for (int i = 0; i < N; i++) begin
        key_in[i] = KW'($urandom_range(0, (s < 10) ? 3 : 127));
        hist[s][i] = key_in[i];
      end
      in_valid = 1; in_cyc[s] = cyc;
      @(negedge clk);
      if (s % 7 == 3) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++; if (nout != 40) begin failures++; $display("sets out %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
