// shift_module: moves the binary point between the pooling and FC formats.
//
// A pooled feature in (1,2,13) becomes (1,7,8) for the fully-connected
// layer by an arithmetic right shift of IN_FRAC - OUT_FRAC = 5 bits, the
// sign bit filling the five new integer bits. The five lowest fraction
// bits are dropped (floor). Purely combinational; after synthesis it is
// wiring with sign extension, kept as the named stage between the layers.
module shift_module
  import bpn_pkg::fx16_t;
#(
  parameter int IN_FRAC  = 13,
  parameter int OUT_FRAC = 8
) (
  input  fx16_t x_i,
  output fx16_t y_o
);
  assign y_o = x_i >>> (IN_FRAC - OUT_FRAC);
endmodule
