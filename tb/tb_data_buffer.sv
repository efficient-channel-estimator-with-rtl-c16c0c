// tb_data_buffer: checks that data_buffer hands PE j the entries of column j
// one antenna per clock, starting one cycle later per column
// ([Y]_{m,j} on cycle c0+1+j+m), and that `ready` allows a new block exactly
// M cycles or at least 3M/2 cycles after the previous one.
module tb_data_buffer;
  import adma_pkg::*;
  localparam int M = 8, L = 3;
  logic clk = 0, rst_n = 0;
  logic col_valid = 0, col_first = 0;
  cplx_t col [M];
  logic ready;
  cplx_t y [L];
  logic y_valid [L];
  int checks = 0, failures = 0, cyc = 0;
  cplx_t Y [3][L][M];

  data_buffer #(.M(M), .L(L)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected-stream checker: block n started at cycle start[n]
  int start_c [3];
  int nblk = 0;
  always @(negedge clk) if (rst_n) begin
    for (int j = 0; j < L; j++) begin
      bit exp_v; int m; int bb;
      exp_v = 0; bb = -1; m = 0;
      for (int n = 0; n < nblk; n++) begin
        int mm;
        mm = cyc - start_c[n] - 1 - j;
        if (mm >= 0 && mm < M) begin exp_v = 1; bb = n; m = mm; end
      end
      checks++;
      if (y_valid[j] !== exp_v) begin
        failures++; $display("valid mismatch j=%0d cyc=%0d got %0d exp %0d start %0d", j, cyc, y_valid[j], exp_v, start_c[0]);
      end else if (exp_v && y[j] !== Y[bb][j][m]) begin
        failures++; $display("data mismatch j=%0d m=%0d", j, m);
      end
    end
  end

  // present block n from the current cycle on (called at a negedge)
  task automatic send_block(int n);
    for (int j = 0; j < L; j++) begin
      if (j == 0) begin start_c[n] = cyc; nblk = n + 1; end
      col_valid = 1; col_first = (j == 0);
      for (int m = 0; m < M; m++) col[m] = Y[n][j][m];
      @(negedge clk);
    end
    col_valid = 0; col_first = 0;
  endtask

  initial begin
    for (int n = 0; n < 3; n++)
      for (int j = 0; j < L; j++)
        for (int m = 0; m < M; m++) begin
          Y[n][j][m].re = dat_t'($urandom);
          Y[n][j][m].im = dat_t'($urandom);
        end
    for (int m = 0; m < M; m++) col[m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (!ready) failures++;
    send_block(0);
    // back to back: not ready before M cycles, ready at exactly M
    while (cyc < start_c[0] + M) begin
      checks++; if (ready) begin failures++; $display("early ready at %0d", cyc - start_c[0]); end
      @(negedge clk);
    end
    checks++; if (!ready) begin failures++; $display("not ready at M"); end
    send_block(1);
    // let the M slot pass: then not ready until 3M/2
    while (cyc < start_c[1] + M + 1) @(negedge clk);
    while (cyc < start_c[1] + M + M / 2) begin
      checks++; if (ready) begin failures++; $display("ready inside the gap at %0d", cyc - start_c[1]); end
      @(negedge clk);
    end
    checks++; if (!ready) begin failures++; $display("not ready at 3M/2"); end
    send_block(2);
    repeat (2 * M) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
