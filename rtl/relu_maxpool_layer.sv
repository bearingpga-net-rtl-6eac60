// relu_maxpool_layer: ReLU + max-pooling layer and the feature register file.
//
// When the convolution has finished kernel k, its 128 outputs are presented
// on z_i with in_valid high for one cycle. 64 relu_maxpool units reduce the
// pairs (z[2t], z[2t+1]) and the 64 results are written to feat[k*64 + t],
// so after the four kernels feat_o holds the whole 4 x 64 map in the
// channel-major order in which the fully-connected layer reads it. Window
// 2, stride 2, no padding, as published; the number of units and the
// register file are this implementation's choices.
// Timing: feat_o updates at the clock edge that ends the in_valid cycle.
module relu_maxpool_layer
  import bpn_pkg::fx16_t;
#(
  parameter int N_SEG = 128,
  parameter int N_KER = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [$clog2(N_KER)-1:0]  kernel,
  input  fx16_t                     z_i    [N_SEG],
  output fx16_t                     feat_o [N_KER*N_SEG/2]
);
  localparam int NP = N_SEG / 2;

  fx16_t pooled [NP];

  for (genvar t = 0; t < NP; t++) begin : g_pool
    relu_maxpool u_rm (.x1(z_i[2*t]), .x2(z_i[2*t+1]), .y(pooled[t]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_KER*NP; i++) feat_o[i] <= '0;
    end else if (in_valid) begin
      for (int t = 0; t < NP; t++) feat_o[int'(kernel)*NP + t] <= pooled[t];
    end
  end
endmodule
