// fixedAdd16: 16-bit signed fixed-point adder of the MAC unit.
//
// Both operands share one format, so the sum is a plain two's-complement
// add kept to 16 bits (wrap-around on overflow; the published design does
// not mention saturation). Purely combinational.
module fixedAdd16 (
  input  logic signed [15:0] a,
  input  logic signed [15:0] b,
  output logic signed [15:0] result
);
  always_comb result = a + b;
endmodule
