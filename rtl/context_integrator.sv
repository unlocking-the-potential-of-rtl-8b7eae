// context_integrator: integrated context of a two-point unit.
//
// The apical side of the unit gathers three contexts: Cp, the local
// proximal context (here the unit's own previous output), Cd, the local
// distal context (the receptive field of the partner unit in the other
// sensory stream) and Cu, the universal context broadcast by the
// cross-modal working memory. They are summed with a saturating adder and
// passed through an activation:
//     C = ReLU6( sat( sat(Cp + Cd) + Cu ) )
// An adder plus a non-linearity follows the original design; choosing the
// design's own ReLU6 as that non-linearity is this implementation's choice.
//
// Purely combinational.
module context_integrator
  import mcc_pkg::*;
#(
  parameter int W = DATA_W,
  parameter int F = FRAC_W,
  localparam type q_t = logic signed [W-1:0]
) (
  input  q_t cp,
  input  q_t cd,
  input  q_t cu,
  output q_t c
);
  q_t s1, s2;
  logic ovf1, ovf2;

  fxp_add #(.W(W)) u_a1 (.a(cp), .b(cd), .sub(1'b0), .y(s1), .ovf(ovf1));
  fxp_add #(.W(W)) u_a2 (.a(s1), .b(cu), .sub(1'b0), .y(s2), .ovf(ovf2));
  activation_block #(.W(W), .F(F), .ACT(ACT_RELU6)) u_act (.x(s2), .y(c));
endmodule
