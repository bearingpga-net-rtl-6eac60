// rf_selector: receptive-field selector in front of the convolution.
//
// The 1024-point spectrum is cut into 128 overlapping windows of 64 points
// with a stride of 8 and 28 zeros of padding on each side, which is what
// sliding a 1x64 kernel with stride 8 over the padded signal sees. Segment
// i, tap j is spectrum point 8*i + j - 28, or zero where that index falls
// outside 0..1023.
//
// How the windows are held is not published. Here the spectrum is written
// point by point into a register file (wr_en/wr_addr/wr_data, one point per
// clock), and during the convolution the module presents, for the tap j on
// its tap input, that point of all 128 windows at once (seg_o), feeding the
// 128 parallel MAC units. The read is combinational: seg_o follows tap in
// the same cycle.
module rf_selector
  import bpn_pkg::fx16_t;
#(
  parameter int N_IN   = 1024,
  parameter int N_SEG  = 128,
  parameter int K_LEN  = 64,
  parameter int STRIDE = 8,
  parameter int PAD    = 28
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(N_IN)-1:0]    wr_addr,
  input  fx16_t                      wr_data,
  input  logic [$clog2(K_LEN)-1:0]   tap,
  output fx16_t                      seg_o [N_SEG]
);
  fx16_t spec [N_IN];

  always_ff @(posedge clk) begin
    if (wr_en) spec[wr_addr] <= wr_data;
  end

  always_comb begin
    for (int i = 0; i < N_SEG; i++) begin
      int idx;
      idx = STRIDE * i + int'(tap) - PAD;
      if (idx >= 0 && idx < N_IN) seg_o[i] = spec[idx];
      else                        seg_o[i] = '0;
    end
  end
endmodule
