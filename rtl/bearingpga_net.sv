// bearingpga_net: top level of the BearingPGA-Net fault-diagnosis accelerator.
//
// A vibration frame of 2048 samples is turned into a spectrum by an FFT,
// and a one-layer CNN classifies the spectrum into one of ten bearing
// states. The chain, in order:
//   AD samples -> async_fifo (converter clock -> core clock, buffering)
//   -> external FFT core (ports fft_in_* / fft_out_*)
//   -> fft_quant (x 1/2048, (1,15,12) -> (1,2,13))
//   -> rf_selector (128 windows of 64 points, stride 8, padding 28)
//   -> conv_layer (128 parallel MAC units, 4 kernels x 64 cycles,
//                  weights from conv_rom_ctrl, biases in registers)
//   -> relu_maxpool_layer (sign-bit ReLU + 2:1 max-pool, 4 x 64 features)
//   -> shift_module ((1,2,13) -> (1,7,8))
//   -> fc_layer (10 MAC units x 256 cycles, rows from fc_rom_ctrl)
//   -> classifier (argmax -> 4-bit class on the LEDs).
// The FFT is a vendor core in the published design and is not part of this
// RTL; its streams are ports. The sequencer below is this implementation's
// own: the published design gives the layer order and the cycle counts of
// the layers, not a controller.
//
// Sequencer (core clock):
//   S_LOAD : accept 1024 spectrum points (fft_out_valid && fft_out_ready),
//            in bin order 0..1023, into the RF selector.
//   S_CSTART: one cycle; clears the conv MAC units, copies the conv ROM.
//   S_CMAC : 64 MAC cycles for kernel k (tap 0..63).
//   S_CWB  : one cycle; pooled results of kernel k are stored, MAC units
//            cleared; next kernel or, after kernel 3, the FC layer.
//   S_FMAC : 256 cycles issuing FC rows 0..255 (row data and feature are
//            registered, so the MACs run one cycle behind).
//   S_FLAST: the final MAC cycle.
//   S_CLS  : the logits are valid; the classifier registers the class.
// From the last spectrum point to class_valid takes 1 + 4*65 + 256 + 2 + 1
// = 520 cycles (5.2 us at 100 MHz). fft_out_ready is high only in S_LOAD,
// so the FFT core (and behind it the FIFO) waits while a frame is in work.
//
// The FFT input side streams the FIFO out: fft_in_valid = FIFO not empty,
// a sample leaves on fft_in_valid && fft_in_ready, and fft_in_last marks
// every 2048th sample.
module bearingpga_net
  import bpn_pkg::*;
#(
  // $readmemh files with trained weights; empty selects the default tables
  parameter string CONV_W_FILE = "",   // 256 words, index k*64 + j, (1,2,13)
  parameter string FC_W_FILE   = ""    // 2560 words, index r*10 + c, (1,7,8)
) (
  input  logic         clk,
  input  logic         rst_n,
  // AD converter side
  input  logic         adc_clk,
  input  logic         adc_rst_n,
  input  logic         adc_valid,
  input  logic [15:0]  adc_data,
  output logic         fifo_full,
  // to the FFT core
  output logic         fft_in_valid,
  output logic [15:0]  fft_in_data,
  output logic         fft_in_last,
  input  logic         fft_in_ready,
  // from the FFT core: bin magnitudes 0..1023, (1,15,12)
  input  logic         fft_out_valid,
  input  logic [FFT_W-1:0] fft_out_data,
  output logic         fft_out_ready,
  // result
  output logic [3:0]   led,
  output logic         class_valid,
  output fx16_t        logits [N_CLS]
);
  typedef enum logic [2:0] {
    S_LOAD, S_CSTART, S_CMAC, S_CWB, S_FMAC, S_FLAST, S_CLS
  } state_t;

  state_t state;
  logic [$clog2(N_SPEC)-1:0]  bin_cnt;
  logic [$clog2(N_KER)-1:0]   kernel;
  logic [$clog2(K_LEN)-1:0]   tap;
  logic [$clog2(N_FEAT)-1:0]  row;
  logic [$clog2(N_FFT)-1:0]   smp_cnt;

  // ---------------- FIFO and FFT input stream ----------------
  logic fifo_empty;
  logic fifo_pop;

  async_fifo #(.DW(16), .DEPTH(N_FFT)) u_fifo (
    .wr_clk   (adc_clk),
    .wr_rst_n (adc_rst_n),
    .wr_en    (adc_valid),
    .wr_data  (adc_data),
    .wr_full  (fifo_full),
    .rd_clk   (clk),
    .rd_rst_n (rst_n),
    .rd_en    (fifo_pop),
    .rd_data  (fft_in_data),
    .rd_empty (fifo_empty)
  );

  assign fft_in_valid = !fifo_empty;
  assign fifo_pop     = fft_in_valid && fft_in_ready;
  assign fft_in_last  = (smp_cnt == 11'(N_FFT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        smp_cnt <= '0;
    else if (fifo_pop) smp_cnt <= smp_cnt + 1'b1;
  end

  // ---------------- FFT output -> RF selector ----------------
  fx16_t spec_q;
  logic  spec_wr;
  fx16_t seg [N_SEG];

  fft_quant #(.N_FFT(N_FFT)) u_fq (.fft_i(fft_out_data), .x_o(spec_q));

  assign fft_out_ready = (state == S_LOAD);
  assign spec_wr       = fft_out_valid && fft_out_ready;

  rf_selector #(
    .N_IN(N_SPEC), .N_SEG(N_SEG), .K_LEN(K_LEN), .STRIDE(STRIDE), .PAD(PAD)
  ) u_rf (
    .clk     (clk),
    .wr_en   (spec_wr),
    .wr_addr (bin_cnt),
    .wr_data (spec_q),
    .tap     (tap),
    .seg_o   (seg)
  );

  // ---------------- convolution ----------------
  fx16_t conv_w;
  fx16_t z [N_SEG];
  logic  conv_clear, conv_mac, pool_wr;

  assign conv_clear = (state == S_CSTART) || (state == S_CWB);
  assign conv_mac   = (state == S_CMAC);
  assign pool_wr    = (state == S_CWB);

  conv_rom_ctrl #(.N_KER(N_KER), .K_LEN(K_LEN), .INIT_FILE(CONV_W_FILE)) u_crom (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (state == S_CSTART),
    .kernel   (kernel),
    .tap      (tap),
    .weight_o (conv_w)
  );

  conv_layer #(.N_SEG(N_SEG), .N_KER(N_KER), .FRAC(CONV_FRAC)) u_conv (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (conv_clear),
    .mac_en   (conv_mac),
    .kernel   (kernel),
    .seg_i    (seg),
    .weight_i (conv_w),
    .z_o      (z)
  );

  // ---------------- ReLU + max-pooling, shift ----------------
  fx16_t feat [N_FEAT];
  fx16_t feat_sh;
  fx16_t fc_x_q;

  relu_maxpool_layer #(.N_SEG(N_SEG), .N_KER(N_KER)) u_pool (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (pool_wr),
    .kernel   (kernel),
    .z_i      (z),
    .feat_o   (feat)
  );

  shift_module #(.IN_FRAC(CONV_FRAC), .OUT_FRAC(FC_FRAC)) u_shift (
    .x_i (feat[row]),
    .y_o (feat_sh)
  );

  // ---------------- fully-connected layer ----------------
  fx16_t fc_w [N_CLS];
  logic  fc_rd, fc_mac, fc_clear;

  assign fc_rd    = (state == S_FMAC);
  assign fc_clear = (state == S_CWB) && (kernel == 2'(N_KER - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fc_x_q <= '0;
      fc_mac <= 1'b0;
    end else begin
      fc_x_q <= feat_sh;
      fc_mac <= fc_rd;
    end
  end

  fc_rom_ctrl #(.N_FEAT(N_FEAT), .N_CLS(N_CLS), .INIT_FILE(FC_W_FILE)) u_from (
    .clk       (clk),
    .rd_en     (fc_rd),
    .row       (row),
    .weights_o (fc_w)
  );

  fc_layer #(.N_CLS(N_CLS), .FRAC(FC_FRAC)) u_fc (
    .clk    (clk),
    .rst_n  (rst_n),
    .clear  (fc_clear),
    .mac_en (fc_mac),
    .x_i    (fc_x_q),
    .w_i    (fc_w),
    .y_o    (logits)
  );

  // ---------------- classification ----------------
  classifier #(.N_CLS(N_CLS)) u_cls (
    .clk      (clk),
    .rst_n    (rst_n),
    .valid_i  (state == S_CLS),
    .logits_i (logits),
    .class_o  (led),
    .valid_o  (class_valid)
  );

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_LOAD;
      bin_cnt <= '0;
      kernel  <= '0;
      tap     <= '0;
      row     <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (spec_wr) begin
          bin_cnt <= bin_cnt + 1'b1;
          if (bin_cnt == 10'(N_SPEC - 1)) state <= S_CSTART;
        end
        S_CSTART: begin
          kernel <= '0;
          tap    <= '0;
          state  <= S_CMAC;
        end
        S_CMAC: begin
          tap <= tap + 1'b1;
          if (tap == 6'(K_LEN - 1)) state <= S_CWB;
        end
        S_CWB: begin
          if (kernel == 2'(N_KER - 1)) begin
            row   <= '0;
            state <= S_FMAC;
          end else begin
            kernel <= kernel + 1'b1;
            state  <= S_CMAC;
          end
        end
        S_FMAC: begin
          row <= row + 1'b1;
          if (row == 8'(N_FEAT - 1)) state <= S_FLAST;
        end
        S_FLAST: state <= S_CLS;
        S_CLS: begin
          bin_cnt <= '0;
          state   <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // A spectrum point is only taken while the core is loading.
  a_no_spec_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (state != S_LOAD) |-> !spec_wr);
endmodule
