// activation_block: activation function chosen at compile time.
//
// ACT_RELU6 (default): y = 0 for x < 0, y = 6.0 for x > 6.0, else y = x.
// ACT_NONE: y = x. Only the selected function is built. ReLU with the
// clip at 6 is the function of the original design; the identity option
// is this implementation's.
//
// Purely combinational.
module activation_block
  import mcc_pkg::*;
#(
  parameter int W = DATA_W,
  parameter int F = FRAC_W,
  localparam type q_t = logic signed [W-1:0],
  parameter act_e ACT = ACT_RELU6
) (
  input  q_t x,
  output q_t y
);
  localparam q_t ZERO = '0;
  localparam q_t SIX  = q_t'(6) <<< F;
  if (ACT == ACT_RELU6) begin : g_relu6
    always_comb begin
      if (x < ZERO)     y = ZERO;
      else if (x > SIX) y = SIX;
      else                y = x;
    end
  end else begin : g_none
    assign y = x;
  end
endmodule
