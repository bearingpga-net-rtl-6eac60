// fc_rom_ctrl: fully-connected weight ROM and its read control.
//
// The 256 x 10 weight matrix of the fully-connected layer is stored as 256
// rows of ten 16-bit (1,7,8) weights. Each clock with rd_en high the
// controller reads row `row` and presents its ten weights together, one to
// each of the ten MAC units, as the published design does ("10 weight
// parameters per cycle").
//
// The ROM holds bpn_pkg::fc_w_default(r, c) unless INIT_FILE names a
// $readmemh file of 2560 words (index r*10 + c). Timing: a registered,
// block-RAM style read: row r requested in cycle t appears on weights_o in
// cycle t+1 and stays until the next read.
module fc_rom_ctrl
  import bpn_pkg::fx16_t;
#(
  parameter int    N_FEAT    = 256,
  parameter int    N_CLS     = 10,
  parameter string INIT_FILE = ""
) (
  input  logic                       clk,
  input  logic                       rd_en,
  input  logic [$clog2(N_FEAT)-1:0]  row,
  output fx16_t                      weights_o [N_CLS]
);
  fx16_t flat [N_FEAT*N_CLS];
  logic [N_CLS*16-1:0] rom [N_FEAT];

  initial begin
    if (INIT_FILE != "") $readmemh(INIT_FILE, flat);
    else for (int i = 0; i < N_FEAT*N_CLS; i++) flat[i] = bpn_pkg::fc_w_default(i / N_CLS, i % N_CLS);
    for (int r = 0; r < N_FEAT; r++)
      for (int c = 0; c < N_CLS; c++)
        rom[r][c*16 +: 16] = flat[r*N_CLS + c];
  end

  logic [N_CLS*16-1:0] row_q;

  always_ff @(posedge clk) begin
    if (rd_en) row_q <= rom[row];
  end

  always_comb begin
    for (int c = 0; c < N_CLS; c++) weights_o[c] = fx16_t'(row_q[c*16 +: 16]);
  end
endmodule
