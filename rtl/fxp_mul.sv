// fxp_mul: fixed-point multiplier, two W-bit Q(W-1-F).F operands to one
// W-bit result of the same format plus an overflow flag.
//
// The full 2W-bit product has 2F fraction bits; the W bits kept are
// product[F+W-1:F], i.e. the upper part once the extra F fraction bits are
// dropped (truncation toward minus infinity). If the discarded high bits are
// not all copies of the kept sign bit the product is out of range: ovf is
// set and y saturates to the largest or smallest value. Keeping a 16-bit data
// path follows the original design; the choice of bits, the truncation and
// the saturation are this implementation's.
//
// Purely combinational; the MAC pipeline registers its operands and result.
module fxp_mul #(
  parameter int W = mcc_pkg::DATA_W,
  parameter int F = mcc_pkg::FRAC_W
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] y,
  output logic                ovf
);
  logic signed [2*W-1:0] prod;
  logic        [W-F:0]   top;   // product[2W-1 : F+W-1], must be all equal

  always_comb begin
    prod = a * b;
    top  = prod[2*W-1:F+W-1];
    ovf  = !((&top) || !(|top));
    if (!ovf)             y = prod[F+W-1:F];
    else if (prod[2*W-1]) y = {1'b1, {(W-1){1'b0}}};
    else                  y = {1'b0, {(W-1){1'b1}}};
  end
endmodule
