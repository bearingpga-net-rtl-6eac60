// fc_layer: the fully-connected layer, 10 MAC units reused over 256 cycles.
//
// The 256 x 10 weight matrix is taken one row at a time: in each cycle one
// feature x_r is broadcast to the ten MAC units and unit c multiplies it
// with W[r][c], so after 256 cycles unit c holds sum_r x_r * W[r][c]. The
// ten biases (registers, reset to bpn_pkg::fc_b_default) are then added
// combinationally to give the logits.
//
// Interface: clear (one cycle) resets the units; each cycle with mac_en
// high accumulates x_i * w_i[c]; with mac_en low the feature is forced to
// zero and the sums hold. y_o is valid from the cycle after the last MAC
// cycle until the next clear. Format (1,7,8), 16-bit wrap-around.
module fc_layer
  import bpn_pkg::fx16_t;
#(
  parameter int N_CLS = 10,
  parameter int FRAC  = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   mac_en,
  input  fx16_t  x_i,
  input  fx16_t  w_i [N_CLS],
  output fx16_t  y_o [N_CLS]
);
  fx16_t bias [N_CLS];
  fx16_t x_gated;
  fx16_t acc  [N_CLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int c = 0; c < N_CLS; c++) bias[c] <= bpn_pkg::fc_b_default(c);
    else        bias <= bias;
  end

  assign x_gated = mac_en ? x_i : '0;

  for (genvar c = 0; c < N_CLS; c++) begin : g_pe
    processingElement16 #(.FRAC(FRAC)) u_pe (
      .clk    (clk),
      .reset  (clear),
      .floatA (x_gated),
      .floatB (w_i[c]),
      .result (acc[c])
    );
    fixedAdd16 u_bias (.a(acc[c]), .b(bias[c]), .result(y_o[c]));
  end
endmodule
