// relu_maxpool: fused ReLU and 2:1 max-pooling of two 16-bit numbers.
//
// max(0, x1, x2) is found from the sign bits first, as in the published
// algorithm: with both numbers negative the result is 0 (ReLU), with
// opposite signs the non-negative one wins, and only when both are
// non-negative are the 15 magnitude bits compared (x1 wins ties). This saves
// the comparator in three of the four cases. Two's-complement inputs;
// "positive" means sign bit clear, so zero counts as positive.
// Purely combinational.
module relu_maxpool
  import bpn_pkg::fx16_t;
(
  input  fx16_t x1,
  input  fx16_t x2,
  output fx16_t y
);
  always_comb begin
    unique case ({x1[15], x2[15]})
      2'b01:   y = x1;
      2'b10:   y = x2;
      2'b11:   y = '0;
      default: y = (x1[14:0] >= x2[14:0]) ? x1 : x2;
    endcase
  end
endmodule
