// fft_model: behavioural model of the FFT core that feeds the accelerator.
//
// Not synthesizable; it stands in for the vendor FFT core (followed by a
// bin-magnitude stage) so that the accelerator can be simulated end to
// end. It collects N input samples (16-bit, 12 fraction bits) over an
// in_valid/in_ready stream, computes the discrete Fourier transform of the
// frame in zero simulated time, and streams out the magnitudes of bins
// 0..N/2-1 as 28-bit numbers with 12 fraction bits, rounded and clipped,
// over an out_valid/out_ready stream. Up to two finished spectra are
// queued; in_ready drops while the queue is full. While `hold` is high no
// spectrum is sent, which lets a testbench line up two spectra back to
// back and so exercise the accelerator's back-pressure. framing_errors
// counts samples whose in_last flag disagrees with the model's own count.
module fft_model #(
  parameter int N = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hold,
  input  logic        in_valid,
  input  logic [15:0] in_data,
  input  logic        in_last,
  output logic        in_ready,
  output logic        out_valid,
  output logic [27:0] out_data,
  input  logic        out_ready,
  output int          frames_done,
  output int          framing_errors
);
  real cos_t [N];
  real sin_t [N];
  real frame [N];
  int  n_in;
  int  q_count;
  logic [27:0] spec_q [2][N/2];
  int  wr_slot, rd_slot, bin;

  initial begin
    for (int i = 0; i < N; i++) begin
      cos_t[i] = $cos(2.0 * 3.14159265358979 * i / N);
      sin_t[i] = $sin(2.0 * 3.14159265358979 * i / N);
    end
  end

  assign in_ready  = rst_n && (q_count < 2);
  assign out_valid = rst_n && (q_count > 0) && !hold;
  assign out_data  = spec_q[rd_slot][bin];

  task automatic compute(int slot);
    for (int k = 0; k < N/2; k++) begin
      real re, im, mag;
      longint m;
      re = 0.0; im = 0.0;
      for (int n = 0; n < N; n++) begin
        int ph;
        ph = (k * n) % N;
        re += frame[n] * cos_t[ph];
        im -= frame[n] * sin_t[ph];
      end
      mag = $sqrt(re * re + im * im);          // in units of 2^-12
      m = longint'(mag);
      if (m > 64'd134217727) m = 134217727;
      spec_q[slot][k] = 28'(m);
    end
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_in = 0; q_count = 0; wr_slot = 0; rd_slot = 0; bin = 0; frames_done = 0; framing_errors = 0;
    end else begin
      // output side
      if (out_valid && out_ready) begin
        if (bin == N/2 - 1) begin
          bin = 0;
          rd_slot = 1 - rd_slot;
          q_count = q_count - 1;
        end else bin = bin + 1;
      end
      // input side
      if (in_valid && in_ready) begin
        if (in_last != (n_in == N - 1)) framing_errors = framing_errors + 1;
        frame[n_in] = real'($signed(in_data));
        n_in = n_in + 1;
        if (n_in == N) begin
          compute(wr_slot);
          wr_slot = 1 - wr_slot;
          q_count = q_count + 1;
          n_in = 0;
          frames_done = frames_done + 1;
        end
      end
    end
  end
endmodule
