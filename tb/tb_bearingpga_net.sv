// tb_bearingpga_net: end-to-end test of the accelerator at full size.
//
// The top is instantiated with its default sizes. Three frames of a
// synthetic vibration signal (two tones plus noise for the first two, with
// different tones, and a silent third frame;
// 16-bit with 12 fraction bits) are sent through the converter-side port
// on their own 13 ns clock; the core runs at 10 ns (100 MHz). An
// fft_model stands in for the FFT core. For every diagnosis the testbench
// recomputes the network from the spectrum the core actually accepted,
// using plain integer arithmetic written independently of the RTL (x/2048
// rescaling, padded stride-8 convolution, ReLU, 2:1 max-pool, shift, FC,
// arg-max), and compares all ten logits and the class on the LEDs.
//
// It also checks the timing: 256 convolution MAC cycles and 256 FC MAC
// cycles per frame, and 520 cycles from the last spectrum point to the
// class (the published figure for one inference is 5.77 us = 577 cycles at
// 100 MHz, which this must not exceed). Mechanisms that must each happen
// at least once: clock crossing through the FIFO, the FIFO holding samples
// while the FFT side is full, the core refusing a spectrum while busy
// (back-pressure stall), every sign case of the fused ReLU/max-pool, and
// logits that change with the input from frame to frame.
module tb_bearingpga_net;
  import bpn_pkg::*;

  localparam int NFRAMES = 3;

  logic clk = 0, adc_clk = 0;
  always #5 clk = ~clk;
  always #6.5 adc_clk = ~adc_clk;

  int checks = 0, failures = 0;

  logic rst_n, adc_rst_n, adc_valid, fifo_full;
  logic [15:0] adc_data;
  logic fft_in_valid, fft_in_last, fft_in_ready;
  logic [15:0] fft_in_data;
  logic fft_out_valid, fft_out_ready;
  logic [27:0] fft_out_data;
  logic [3:0] led;
  logic class_valid;
  fx16_t logits [N_CLS];
  logic hold;
  int frames_done, framing_errors;

  bearingpga_net dut (
    .clk(clk), .rst_n(rst_n),
    .adc_clk(adc_clk), .adc_rst_n(adc_rst_n), .adc_valid(adc_valid), .adc_data(adc_data), .fifo_full(fifo_full),
    .fft_in_valid(fft_in_valid), .fft_in_data(fft_in_data), .fft_in_last(fft_in_last), .fft_in_ready(fft_in_ready),
    .fft_out_valid(fft_out_valid), .fft_out_data(fft_out_data), .fft_out_ready(fft_out_ready),
    .led(led), .class_valid(class_valid), .logits(logits));

  fft_model #(.N(N_FFT)) u_fft (
    .clk(clk), .rst_n(rst_n), .hold(hold),
    .in_valid(fft_in_valid), .in_data(fft_in_data), .in_last(fft_in_last), .in_ready(fft_in_ready),
    .out_valid(fft_out_valid), .out_data(fft_out_data), .out_ready(fft_out_ready),
    .frames_done(frames_done), .framing_errors(framing_errors));

  // ---------------- reference model ----------------
  function automatic longint floordiv(longint n, longint d);
    longint q;
    q = n / d;
    if ((n % d != 0) && ((n < 0) != (d < 0))) q = q - 1;
    return q;
  endfunction
  function automatic longint wrapn(longint v, int bits);
    longint m, half;
    half = longint'(1) << (bits - 1);
    m = v & ((longint'(1) << bits) - 1);
    return (m >= half) ? m - 2 * half : m;
  endfunction

  longint spec_raw [N_SPEC];
  longint ref_logit [N_CLS];
  int     ref_class;
  int     n_negneg = 0, n_mixed = 0, n_pospos = 0;

  task automatic reference();
    longint q [N_SPEC];
    longint z [N_KER][N_SEG];
    longint f [N_FEAT];
    for (int b = 0; b < N_SPEC; b++) begin
      longint t, q14;
      t   = wrapn(2 * spec_raw[b], 28);          // x * 2^13 / 2^12 in (1,3,24)
      q14 = wrapn(floordiv(t, 1024), 16);        // (1,1,14)
      q[b] = floordiv(q14, 2);                   // (1,2,13)
    end
    for (int k = 0; k < N_KER; k++)
      for (int i = 0; i < N_SEG; i++) begin
        longint acc = 0;
        for (int j = 0; j < K_LEN; j++) begin
          int idx = STRIDE * i + j - PAD;
          longint s = (idx >= 0 && idx < N_SPEC) ? q[idx] : 0;
          acc = wrapn(acc + wrapn(floordiv(s * longint'(conv_w_default(k, j)), 8192), 16), 16);
        end
        z[k][i] = wrapn(acc + longint'(conv_b_default(k)), 16);
      end
    for (int k = 0; k < N_KER; k++)
      for (int t = 0; t < N_POOL; t++) begin
        longint a = z[k][2*t], b = z[k][2*t+1], m;
        if (a < 0 && b < 0) n_negneg++;
        else if (a >= 0 && b >= 0) n_pospos++;
        else n_mixed++;
        m = (a > b) ? a : b;
        if (m < 0) m = 0;
        f[k*N_POOL + t] = floordiv(m, 32);
      end
    for (int c = 0; c < N_CLS; c++) begin
      longint acc = 0;
      for (int r = 0; r < N_FEAT; r++)
        acc = wrapn(acc + wrapn(floordiv(f[r] * longint'(fc_w_default(r, c)), 256), 16), 16);
      ref_logit[c] = wrapn(acc + longint'(fc_b_default(c)), 16);
    end
    ref_class = 0;
    for (int c = 1; c < N_CLS; c++) if (ref_logit[c] > ref_logit[ref_class]) ref_class = c;
  endtask

  // ---------------- stimulus: converter side ----------------
  int samples_sent = 0;
  bit started = 0;
  initial begin
    adc_valid = 0; adc_data = 0;
    wait (started);
    for (int fr = 0; fr < NFRAMES; fr++) begin
      real f1, f2, amp;
      amp = (fr == 2) ? 0.0 : 1.0;   // the last frame is a silent input
      f1 = (fr == 1) ? 700.0 : 37.0 + 113.0 * fr;
      f2 = (fr == 1) ? 811.0 : 301.0 + 57.0 * fr;
      for (int n = 0; n < N_FFT; n++) begin
        real v;
        @(negedge adc_clk);
        adc_valid = 0;
        @(negedge adc_clk);
        v = amp * 1.2 * $sin(2.0 * 3.14159265 * f1 * n / N_FFT)
          + 0.6 * $sin(2.0 * 3.14159265 * f2 * n / N_FFT + fr)
          + amp * 0.3 * ($urandom_range(0, 2000) - 1000) / 1000.0;
        adc_data = 16'(int'(v * 4096.0));
        adc_valid = 1;
        samples_sent++;
      end
    end
    @(negedge adc_clk);
    adc_valid = 0;
  end

  // ---------------- monitors ----------------
  int bin_idx = 0;
  int cyc = 0, last_bin_cyc = 0;
  int conv_macs = 0, fc_macs = 0;
  int n_stall = 0, n_fifo_hold = 0, n_class = 0, n_logit_change = 0;
  longint prev_logit [N_CLS];
  int n_full = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.conv_mac) conv_macs++;
    if (dut.fc_mac)   fc_macs++;
    if (fft_out_valid && !fft_out_ready) n_stall++;
    if (fft_in_valid && !fft_in_ready)   n_fifo_hold++;
    if (fifo_full) n_full++;
    if (class_valid) begin
      int lat;
      lat = cyc - last_bin_cyc;
      reference();
      n_class++;
      for (int c = 0; c < N_CLS; c++) begin
        checks++;
        if (logits[c] !== 16'(ref_logit[c])) begin
          failures++;
          $display("frame %0d logit %0d: got %0d exp %0d", n_class, c, logits[c], ref_logit[c]);
        end
      end
      checks++;
      if (led !== 4'(ref_class)) begin failures++; $display("frame %0d class %0d exp %0d", n_class, led, ref_class); end
      checks++;
      if (conv_macs != 256 || fc_macs != 256) begin
        failures++; $display("MAC cycles conv %0d fc %0d, expected 256/256", conv_macs, fc_macs);
      end
      checks++;
      if (lat != 520 || lat > 577) begin failures++; $display("latency %0d cycles", lat); end
      if (n_class > 1) begin
        automatic bit changed = 0;
        for (int c = 0; c < N_CLS; c++) if (prev_logit[c] != ref_logit[c]) changed = 1;
        if (changed) n_logit_change++;
      end
      prev_logit = ref_logit;
      $display("frame %0d: class %0d, logits %0d %0d %0d %0d %0d %0d %0d %0d %0d %0d, latency %0d cycles",
               n_class, led, logits[0], logits[1], logits[2], logits[3], logits[4],
               logits[5], logits[6], logits[7], logits[8], logits[9], lat);
      conv_macs = 0; fc_macs = 0;
    end
    // captured after the check above: the next spectrum may start in the
    // very cycle the class appears
    if (fft_out_valid && fft_out_ready) begin
      spec_raw[bin_idx] = longint'($signed(fft_out_data));
      if (bin_idx == N_SPEC - 1) last_bin_cyc = cyc;
      bin_idx = (bin_idx + 1) % N_SPEC;
    end
  end

  // ---------------- sequence ----------------
  initial begin
    rst_n = 0; adc_rst_n = 0; hold = 1;
    #40;
    rst_n = 1; adc_rst_n = 1;
    started = 1;
    // keep the first spectrum back until the second is ready, so that the
    // second arrives while the core is busy with the first
    wait (frames_done >= 2);
    @(negedge clk);
    hold = 0;
    wait (n_class == NFRAMES);
    repeat (20) @(posedge clk);
    checks++;
    if (framing_errors != 0) begin failures++; $display("FFT framing errors %0d", framing_errors); end
    checks++;
    if (n_stall == 0) begin failures++; $display("back-pressure stall never happened"); end
    checks++;
    if (n_fifo_hold == 0) begin failures++; $display("FIFO never held samples for the FFT"); end
    checks++;
    if (n_negneg == 0 || n_mixed == 0 || n_pospos == 0) begin failures++; $display("ReLU/max-pool case missing"); end
    checks++;
    if (n_logit_change != NFRAMES - 1) begin failures++; $display("logits did not follow the input"); end
    checks++;
    if (n_full != 0) begin failures++; $display("FIFO overflowed"); end
    $display("mechanisms: spectrum stalls %0d cycles, FIFO holding %0d cycles, pool cases %0d/%0d/%0d, logit changes %0d, diagnoses %0d",
             n_stall, n_fifo_hold, n_negneg, n_mixed, n_pospos, n_logit_change, n_class);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired: %0d diagnoses, %0d frames through the FFT", n_class, frames_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
