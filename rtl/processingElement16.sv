// processingElement16: the multiplication-accumulation (MAC) unit.
//
// One fixed-point multiplier (fixedMult16) feeds one fixed-point adder
// (fixedAdd16) whose other input is the result register; the register
// takes the sum every clock, so after N cycles it holds sum(p_i * q_i).
// A synchronous reset clears the register, which starts a new sum. The
// block structure, port names and 16-bit widths are those of the published
// schematic; the unit has no enable, so it holds its value while either
// operand is zero, which is how the layers park it.
//
// Interface: floatA, floatB are the operands, result the running sum, all
// 16-bit signed with FRAC fraction bits (13 for the convolution, 8 for the
// fully-connected layer). Timing: result is registered; the product of
// the operands present in cycle t is included in result from cycle t+1.
// A reset in cycle t makes result zero in cycle t+1 (operands ignored).
module processingElement16 #(
  parameter int FRAC = 13
) (
  input  logic               clk,
  input  logic               reset,
  input  logic signed [15:0] floatA,
  input  logic signed [15:0] floatB,
  output logic signed [15:0] result
);
  logic signed [15:0] prod;
  logic signed [15:0] sum;
  logic signed [15:0] result_reg;

  fixedMult16 #(.FRAC(FRAC)) FM   (.a(floatA), .b(floatB), .result(prod));
  fixedAdd16                 FADD (.a(prod),   .b(result_reg), .result(sum));

  always_ff @(posedge clk) begin
    if (reset) result_reg <= '0;
    else       result_reg <= sum;
  end

  assign result = result_reg;
endmodule
