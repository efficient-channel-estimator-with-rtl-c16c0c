// tb_stage_switch: checks the routing of the 1-to-2 switch in its three
// positions: LS output i to preamble processor i (stage 1), the y_g of each
// assigned user's group to its UL estimator (stage 2), and nothing when off.
module tb_stage_switch;
  import adma_pkg::*;
  localparam int K = 16, TAU = 4;
  sw_mode_t mode;
  cplx_t ls_h [TAU]; logic ls_valid [TAU];
  logic gm_assigned [K]; logic [$clog2(TAU)-1:0] gm_group [K];
  cplx_t pre_h [TAU]; logic pre_valid [TAU];
  cplx_t ul_y [K]; logic ul_valid [K];
  int checks = 0, failures = 0;
  stage_switch #(.K(K), .TAU(TAU)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      mode = sw_mode_t'(t % 3);
      for (int i = 0; i < TAU; i++) begin ls_h[i] = cplx_t'($urandom); ls_valid[i] = $urandom_range(0, 3) != 0; end
      for (int k = 0; k < K; k++) begin gm_assigned[k] = $urandom_range(0, 3) != 0; gm_group[k] = 2'($urandom); end
      #1;
      for (int i = 0; i < TAU; i++) begin
        checks++;
        if (pre_valid[i] !== (mode == SW_PRE && ls_valid[i]) || (pre_valid[i] && pre_h[i] !== ls_h[i])) begin
          failures++; $display("pre %0d wrong", i);
        end
      end
      for (int k = 0; k < K; k++) begin
        checks++;
        if (ul_valid[k] !== (mode == SW_UL && gm_assigned[k] && ls_valid[gm_group[k]]) ||
            (ul_valid[k] && ul_y[k] !== ls_h[gm_group[k]])) begin
          failures++; $display("ul %0d wrong", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
