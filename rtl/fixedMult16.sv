// fixedMult16: 16-bit signed fixed-point multiplier of the MAC unit.
//
// Both operands and the result carry FRAC fraction bits. The full 32-bit
// product (for the convolution, format (1,5,26)) is formed, shifted right
// by FRAC (floor) and its low 16 bits kept, giving the (1,2,13) or (1,7,8)
// result format of the layer. Bits above the result range are dropped
// (wrap-around); the published design does not say whether it rounds or
// saturates, so this is the plain truncating choice. Purely combinational.
module fixedMult16 #(
  parameter int FRAC = 13
) (
  input  logic signed [15:0] a,
  input  logic signed [15:0] b,
  output logic signed [15:0] result
);
  logic signed [31:0] prod;
  logic signed [31:0] prod_shifted;

  always_comb begin
    prod         = a * b;
    prod_shifted = prod >>> FRAC;
    result       = prod_shifted[15:0];
  end
endmodule
