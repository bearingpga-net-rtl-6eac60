// bpn_pkg: sizes, fixed-point types and default parameter tables shared by
// the BearingPGA-Net accelerator.
//
// The network is one 1-D convolution (4 kernels of 64 taps, stride 8,
// padding 28, giving 128 outputs per kernel), a fused ReLU / 2:1 max-pool
// (128 -> 64 per kernel), and a 256 -> 10 fully-connected layer whose
// largest output names the bearing fault. All numbers are 16-bit signed
// two's-complement fixed point; the layer formats (sign, integer bits,
// fraction bits) follow the published quantization:
//   convolution / pooling  (1,2,13)   -> 13 fraction bits
//   fully-connected        (1,7,8)    ->  8 fraction bits
//   FFT output             (1,15,12) in 28 bits
//
// The trained weights are not published. The *_default functions below
// fill the ROMs and bias registers with a fixed pseudo-random pattern (a
// 32-bit integer hash of the parameter index) so that the datapath can be
// simulated and checked bit-exactly; trained values are loaded through the
// ROMs' INIT_FILE parameter instead.
package bpn_pkg;

  localparam int DW        = 16;    // data width of every layer
  localparam int FFT_W     = 28;    // FFT result width, (1,15,12)
  localparam int N_FFT     = 2048;  // samples per diagnosis frame
  localparam int N_SPEC    = 1024;  // spectrum points kept after the FFT
  localparam int N_SEG     = 128;   // receptive fields (conv outputs per kernel)
  localparam int K_LEN     = 64;    // kernel length
  localparam int STRIDE    = 8;     // convolution stride
  localparam int PAD       = 28;    // zero padding on each side
  localparam int N_KER     = 4;     // convolution kernels (channels)
  localparam int N_POOL    = 64;    // pooled outputs per kernel
  localparam int N_FEAT    = 256;   // features into the FC layer (4 x 64)
  localparam int N_CLS     = 10;    // fault classes
  localparam int CONV_FRAC = 13;    // (1,2,13)
  localparam int FC_FRAC   = 8;     // (1,7,8)

  typedef logic signed [DW-1:0] fx16_t;

  // Integer hash (xorshift-multiply) used to fill the default tables.
  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] h;
    h = v * 32'h9E37_79B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    return h;
  endfunction

  // Default table value: a signed number in [-2^(bits-1), 2^(bits-1)).
  function automatic fx16_t hash_value(input int unsigned salt, input int unsigned idx,
                                       input int unsigned bits);
    logic [31:0] h;
    logic signed [31:0] s;
    h = mix32(idx ^ (salt << 20));
    s = signed'(h);
    return fx16_t'(s >>> (32 - bits));
  endfunction

  // Convolution weight w[k][j], (1,2,13): |w| < 2^10 LSB = 0.125.
  function automatic fx16_t conv_w_default(input int unsigned k, input int unsigned j);
    return hash_value(1, k * K_LEN + j, 11);
  endfunction

  // Convolution bias b[k], (1,2,13): |b| < 0.0625.
  function automatic fx16_t conv_b_default(input int unsigned k);
    return hash_value(2, k, 10);
  endfunction

  // FC weight W[r][c], (1,7,8): |W| < 2^7 LSB = 0.5.
  function automatic fx16_t fc_w_default(input int unsigned r, input int unsigned c);
    return hash_value(3, r * N_CLS + c, 8);
  endfunction

  // FC bias b[c], (1,7,8): |b| < 0.25.
  function automatic fx16_t fc_b_default(input int unsigned c);
    return hash_value(4, c, 7);
  endfunction

endpackage
