// modulatory_block: transfer function of the two-point cell.
//
// The output of a context-sensitive unit depends on its receptive field R
// (the weighted sum of its feed-forward inputs) and its integrated context C:
//     Y = ReLU6( 2R^2 + R + R + 2C(1+|R|) )
// A zero output means the unit does not fire. Every step saturates in
// the W-bit format (Q3.12 by default) and is evaluated in this order:
//     rr   = R*R              (multiplier 1)
//     t1   = rr + rr          2R^2
//     t2   = R + R
//     absr = 0 - R            (only when R < 0, else R)
//     t3   = 1.0 + |R|
//     cm   = C * t3           (multiplier 2)
//     t4   = cm + cm          2C(1+|R|)
//     t5   = t1 + t2
//     s    = t5 + t4
//     Y    = ReLU6(s)
// The formula and the ReLU6 follow the original hardware; the order of the
// saturating steps is this implementation's choice.
//
// Purely combinational; the enclosing unit registers Y.
module modulatory_block
  import mcc_pkg::*;
#(
  parameter int W = DATA_W,
  parameter int F = FRAC_W,
  localparam type q_t = logic signed [W-1:0]
) (
  input  q_t r,
  input  q_t c,
  output q_t y
);
  localparam q_t ZERO = '0;
  localparam q_t ONE  = q_t'(1) <<< F;
  q_t rr, t1, t2, negr, absr, t3, cm, t4, t5, s;
  logic [8:0] ovf;   // overflow flags of the arithmetic steps (not used)

  fxp_mul #(.W(W), .F(F)) u_rr (.a(r),  .b(r),  .y(rr), .ovf(ovf[0]));
  fxp_add #(.W(W)) u_t1 (.a(rr), .b(rr), .sub(1'b0), .y(t1), .ovf(ovf[1]));
  fxp_add #(.W(W)) u_t2 (.a(r),  .b(r),  .sub(1'b0), .y(t2), .ovf(ovf[2]));
  fxp_add #(.W(W)) u_ng (.a(ZERO), .b(r), .sub(1'b1), .y(negr), .ovf(ovf[3]));
  assign absr = r[W-1] ? negr : r;
  fxp_add #(.W(W)) u_t3 (.a(ONE), .b(absr), .sub(1'b0), .y(t3), .ovf(ovf[4]));
  fxp_mul #(.W(W), .F(F)) u_cm (.a(c),  .b(t3), .y(cm), .ovf(ovf[5]));
  fxp_add #(.W(W)) u_t4 (.a(cm), .b(cm), .sub(1'b0), .y(t4), .ovf(ovf[6]));
  fxp_add #(.W(W)) u_t5 (.a(t1), .b(t2), .sub(1'b0), .y(t5), .ovf(ovf[7]));
  fxp_add #(.W(W)) u_s  (.a(t5), .b(t4), .sub(1'b0), .y(s),  .ovf(ovf[8]));

  activation_block #(.W(W), .F(F), .ACT(ACT_RELU6)) u_act (.x(s), .y(y));
endmodule
