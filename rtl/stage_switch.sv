// stage_switch: the "1 to 2 Switch" of Fig. 7 of the paper.
//
// The pre-treatment module (data buffer and TAU LS estimators) is shared by
// the two stages, which use it in different time slots. In stage 1
// (preamble) LS estimator i feeds preamble processor i. In stage 2 (UL
// training) LS estimator g produces y_g, the signal of UL group g, and every
// user's UL estimation module takes the y_g of the group in its group message
// register; users without a group receive nothing. In SW_OFF nothing is
// passed (used while grouping). Combinational.
module stage_switch
  import adma_pkg::*;
#(
  parameter int unsigned K   = 16,
  parameter int unsigned TAU = 4
) (
  input  sw_mode_t                 mode,
  input  cplx_t                    ls_h       [TAU],
  input  logic                     ls_valid   [TAU],
  input  logic                     gm_assigned [K],
  input  logic [$clog2(TAU)-1:0]   gm_group    [K],
  output cplx_t                    pre_h      [TAU],
  output logic                     pre_valid  [TAU],
  output cplx_t                    ul_y       [K],
  output logic                     ul_valid   [K]
);
  always_comb begin
    for (int i = 0; i < TAU; i++) begin
      pre_h[i]     = ls_h[i];
      pre_valid[i] = (mode == SW_PRE) && ls_valid[i];
    end
    for (int k = 0; k < K; k++) begin
      ul_y[k]     = ls_h[gm_group[k]];
      ul_valid[k] = (mode == SW_UL) && gm_assigned[k] && ls_valid[gm_group[k]];
    end
  end
endmodule
