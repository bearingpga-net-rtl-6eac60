// fft_quant: fixed-point rescaling of the FFT result for the convolution.
//
// The FFT core delivers each spectrum point as a 28-bit number with 15
// integer and 12 fraction bits, (1,15,12). The published quantization then
// multiplies it by the constant 1/2048 held in 28 bits, keeps the product
// as (1,3,24), truncates that to 16 bits (1,1,14), and finally widens the
// integer part to the convolution format (1,2,13). This module does exactly
// that chain:
//   scaled = (fft_i * ONE_OVER_N) >> 12      -> 28-bit (1,3,24)
//   q14    = scaled[25:10]                   -> 16-bit (1,1,14)
//   x_o    = q14 >>> 1                       -> 16-bit (1,2,13)
// with ONE_OVER_N = 2^24 / N_FFT. All truncations drop low bits (floor) and
// wrap high bits, as nothing about rounding or saturation is published.
// Purely combinational. With the default power-of-two N_FFT the constant
// multiply is a shift, so synthesis reduces the module to wiring; it is kept
// as a stage because it fixes the format contract between FFT and network.
module fft_quant #(
  parameter int N_FFT = 2048
) (
  input  logic signed [27:0] fft_i,
  output logic signed [15:0] x_o
);
  localparam logic signed [27:0] ONE_OVER_N = 28'(2 ** 24 / N_FFT);

  logic signed [55:0] prod;     // (1,15,12) x (1,3,24) -> 36 fraction bits
  logic signed [27:0] scaled;   // (1,3,24)
  logic signed [15:0] q14;      // (1,1,14)

  always_comb begin
    prod   = fft_i * ONE_OVER_N;
    scaled = prod[39:12];
    q14    = scaled[25:10];
    x_o    = q14 >>> 1;
  end
endmodule
