// conv_rom_ctrl: convolution weight ROM and its read control.
//
// The 4 kernels x 64 taps of 16-bit (1,2,13) weights sit in a ROM. As the
// published design describes, the controller reads all 256 words at once:
// a load pulse copies the whole ROM into a register bank in one clock, and
// from then on weight_o shows w[kernel][tap] combinationally, the one
// weight that is broadcast to the 128 MAC units in that cycle.
//
// The ROM holds bpn_pkg::conv_w_default(k, j) unless INIT_FILE names a
// $readmemh file of 256 words (index k*64 + j), which is how trained
// weights are loaded. Timing: load in cycle t, valid weights from t+1.
module conv_rom_ctrl
  import bpn_pkg::fx16_t;
#(
  parameter int    N_KER     = 4,
  parameter int    K_LEN     = 64,
  parameter string INIT_FILE = ""
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load,
  input  logic [$clog2(N_KER)-1:0]  kernel,
  input  logic [$clog2(K_LEN)-1:0]  tap,
  output fx16_t                     weight_o
);
  localparam int N_W = N_KER * K_LEN;

  fx16_t rom  [N_W];
  fx16_t bank [N_W];

  initial begin
    if (INIT_FILE != "") $readmemh(INIT_FILE, rom);
    else for (int i = 0; i < N_W; i++) rom[i] = bpn_pkg::conv_w_default(i / K_LEN, i % K_LEN);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_W; i++) bank[i] <= '0;
    end else if (load) begin
      for (int i = 0; i < N_W; i++) bank[i] <= rom[i];
    end
  end

  assign weight_o = bank[{kernel, tap}];
endmodule
