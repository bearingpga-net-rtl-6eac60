// conv_layer: the convolutional layer, 128 MAC units in parallel.
//
// Unit i computes z_i = sum_{j=0..63} s_{i,j} * w_{k,j} + b_k for window i
// of the receptive-field selector and kernel k. All 128 units get the same
// weight w_{k,j} in a cycle and their own point s_{i,j}, so one kernel
// takes 64 MAC cycles and the four kernels 256, as published. The kernel
// biases live in registers (reset to bpn_pkg::conv_b_default) and are added
// to the accumulated sums combinationally.
//
// Interface: clear (one cycle) resets all units; in each cycle with mac_en
// high the products of seg_i and weight_i are accumulated; with mac_en low
// the weight is forced to zero so the units hold their sums. z_o is valid
// the cycle after the 64th MAC cycle and holds until the next clear.
// Formats: (1,2,13) throughout, 16-bit wrap-around arithmetic.
module conv_layer
  import bpn_pkg::fx16_t;
#(
  parameter int N_SEG = 128,
  parameter int N_KER = 4,
  parameter int FRAC  = 13
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      mac_en,
  input  logic [$clog2(N_KER)-1:0]  kernel,
  input  fx16_t                     seg_i [N_SEG],
  input  fx16_t                     weight_i,
  output fx16_t                     z_o [N_SEG]
);
  fx16_t bias [N_KER];
  fx16_t w_gated;
  fx16_t acc  [N_SEG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int k = 0; k < N_KER; k++) bias[k] <= bpn_pkg::conv_b_default(k);
    else        bias <= bias;
  end

  assign w_gated = mac_en ? weight_i : '0;

  for (genvar i = 0; i < N_SEG; i++) begin : g_pe
    processingElement16 #(.FRAC(FRAC)) u_pe (
      .clk    (clk),
      .reset  (clear),
      .floatA (seg_i[i]),
      .floatB (w_gated),
      .result (acc[i])
    );
    fixedAdd16 u_bias (.a(acc[i]), .b(bias[kernel]), .result(z_o[i]));
  end
endmodule
