// fxp_add: saturating fixed-point adder/subtractor (Q3.12 by default).
//
// y = a + b, or a - b when sub is set. Subtraction adds the two's complement
// of b. The exact sum is formed on W+1 bits; if it lies above the largest
// representable value (a positive overflow: two positives giving a negative
// wrapped result) y is 0x7FFF, if below the smallest (two negatives giving a
// positive) y is 0x8000, and ovf is raised. Saturation follows the original
// design; the ovf output is an addition of this implementation.
//
// Purely combinational, no clock.
module fxp_add #(
  parameter int W = mcc_pkg::DATA_W
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  input  logic                sub,
  output logic signed [W-1:0] y,
  output logic                ovf
);
  logic signed [W:0] sum;

  always_comb begin
    sum = sub ? ({a[W-1], a} - {b[W-1], b}) : ({a[W-1], a} + {b[W-1], b});
    // The W+1-bit sum overflows W bits when its two top bits differ.
    ovf = sum[W] ^ sum[W-1];
    if (!ovf)        y = sum[W-1:0];
    else if (sum[W]) y = {1'b1, {(W-1){1'b0}}};   // most negative
    else             y = {1'b0, {(W-1){1'b1}}};   // most positive
  end
endmodule
