# BearingPGA-Net accelerator in SystemVerilog

A rolling bearing that is about to fail vibrates in a way that is easy to
see in the spectrum of an accelerometer signal. BearingPGA-Net classifies
a 2048-sample vibration frame into one of ten bearing states (healthy, or
one of three fault locations at three severities). The network is kept
very small on purpose, so that it fits a mid-range FPGA without external
memory. It was trained by knowledge distillation from a larger CNN. Its
hardware form is:

* the magnitude spectrum of the frame (1024 points, from a 2048-point FFT);
* one 1-D convolution: 4 kernels of 64 taps, stride 8, 28 zeros of padding
  on each side, so 128 outputs per kernel;
* ReLU, then 2:1 max-pooling, giving 4 x 64 = 256 features;
* a 256 -> 10 fully-connected layer, whose largest output is the class.

The whole model has 2,830 parameters. Every number in the datapath is
16-bit signed fixed point. The position of the binary point changes from
layer to layer.

This repository holds synthesizable RTL for everything from the
converter-side FIFO to the LED output. It also holds a self-checking
testbench for each block and one end-to-end testbench. The FFT itself is a
vendor core in the original design. Here it is outside the RTL and is
reached through two stream ports. The testbenches use a behavioural model
of it.

## Data path and number formats

```
 adc_* (own clock) ─► async_fifo ─► fft_in_*  ══ FFT core (external) ══  fft_out_*
                                                                           │ 28-bit (1,15,12)
                                                                           ▼
                                                                       fft_quant
                                                                           │ 16-bit (1,2,13)
                                                                           ▼
 conv_rom_ctrl ─ w[k][j] ──────────► conv_layer ◄─ seg[0..127] ── rf_selector
                                  (128 MAC units)
                                          │ z[0..127] of kernel k
                                          ▼
                                  relu_maxpool_layer  (256 features, (1,2,13))
                                          │ feature r
                                          ▼
                                    shift_module      ((1,7,8))
                                          │
 fc_rom_ctrl ── row r (10 weights) ─► fc_layer (10 MAC units)
                                          │ 10 logits (1,7,8)
                                          ▼
                                      classifier ─► led[3:0]
```

The notation (S,X,Y) means a sign bit, X integer bits and Y fraction bits.
The formats come from the published quantization. Every conversion between
them truncates: low bits are dropped, which rounds toward minus infinity,
and high bits wrap. Nothing is rounded or saturated, because the source
describes neither.

| stage | format | how it gets there |
|---|---|---|
| ADC sample into the FFT | 16-bit (1,3,12) | already scaled by the source |
| FFT bin magnitude | 28-bit (1,15,12) | external core |
| times 1/2048 | 28-bit (1,3,24) | `fft_quant`: multiply by 2^24/2048, keep bits [39:12] of the product |
| truncated | 16-bit (1,1,14) | `fft_quant`: bits [25:10] |
| widened for the convolution | 16-bit (1,2,13) | `fft_quant`: arithmetic shift right by 1 |
| conv product | 32-bit (1,5,26) | `fixedMult16`, then truncated to (1,2,13) |
| conv sum, bias, ReLU, pooling | 16-bit (1,2,13) | `fixedAdd16` wraps on overflow |
| into the FC layer | 16-bit (1,7,8) | `shift_module`: arithmetic shift right by 5 |
| FC product, sum, logits | 16-bit (1,7,8) | `fixedMult16` with FRAC = 8 |

The net effect of `fft_quant` is `x_o = floor(fft_i / 1024)` as long as
nothing wraps. Because the scale is a power of two, both `fft_quant` and
`shift_module` reduce to wiring after synthesis. They are kept as modules
because they fix the format contract between the stages. With an FFT
length that is not a power of two, `fft_quant` becomes a real multiplier.

## The multiply-accumulate unit

`processingElement16` is the one arithmetic building block. Both layers
reuse it. It contains a 16x16 fixed-point multiplier (`fixedMult16`) and a
16-bit adder (`fixedAdd16`). The adder's second input is the result
register, so the unit adds one product per clock. A synchronous `reset`
clears the register to start a new sum. The unit has no enable. The
layers stop accumulation by forcing one operand to zero. The block
structure, the port names (`floatA`, `floatB`, `result`, `reset`) and the
16-bit widths follow the published schematic. The multiplier keeps the
full 32-bit product before truncating it. Its `FRAC` parameter selects the
layer format: 13 for the convolution, 8 for the FC layer.

## Convolution: 128 windows in parallel

`rf_selector` holds the 1024-point spectrum in a register file. Window `i`
(0..127), tap `j` (0..63) is spectrum point `8*i + j - 28`, or zero where
that index falls outside 0..1023. This is the zero padding of 28. In each
cycle the selector presents tap `j` of all 128 windows at once.

`conv_layer` has 128 MAC units. In MAC cycle `j` every unit gets its own
window point and the same weight `w[k][j]`. After 64 cycles unit `i`
holds `sum_j s[i][j]*w[k][j]`. The kernel bias, taken from a register, is
added combinationally. The four kernels run one after the other on the
same units, so the layer takes 4 x 64 = 256 MAC cycles.
`conv_rom_ctrl` copies all 256 convolution weights from ROM into a
register bank in a single clock at the start of the layer. After that,
the weight for the current (kernel, tap) is selected combinationally.

## Fused ReLU and max-pooling

ReLU followed by a 2:1 max-pool equals `max(0, x1, x2)`. `relu_maxpool`
works it out from the sign bits first:

| x1 | x2 | result |
|---|---|---|
| >= 0 | < 0 | x1 |
| < 0 | >= 0 | x2 |
| < 0 | < 0 | 0 |
| >= 0 | >= 0 | the larger of the two, by comparing bits [14:0]; ties give x1 |

Only the last case needs a comparator. The source reports that this saves
about two thirds of the LUTs of a plain ReLU followed by a max-pool.
`relu_maxpool_layer` has 64 such units. When kernel `k` finishes, the
layer stores its 64 pooled values at `feat[k*64 + t]`. This is
channel-major order, the order in which the FC weight rows are indexed.

## Fully-connected layer: 10 units, 256 cycles

The 256 x 10 weight matrix is read one row per cycle. `fc_rom_ctrl` keeps
each row of ten weights in one 160-bit ROM word, with a one-cycle read.
In each cycle, one feature (after `shift_module`) is broadcast to ten MAC
units, and unit `c` multiplies it by `W[r][c]`. After 256 cycles, the ten
bias registers are added and the ten logits are ready. `classifier` takes
the arg-max. It skips softmax, which does not change the winner. Equal
logits give the lower index. The result is registered as a 4-bit class
0..9, and that register drives the four LEDs.

## Sequencing and timing

The published design gives the order of the layers and their cycle counts
but no controller. The sequencer in `bearingpga_net` is therefore this
implementation's own. All counts below are in core clock cycles:

| state | cycles | what happens |
|---|---|---|
| `S_LOAD` | 1024 handshakes | spectrum points 0..1023 go into the RF selector; `fft_out_ready` is high only here |
| `S_CSTART` | 1 | conv MAC units cleared, conv ROM copied into the weight bank |
| `S_CMAC` | 64 per kernel | taps 0..63 of kernel k |
| `S_CWB` | 1 per kernel | pooled results of kernel k stored, MAC units cleared |
| `S_FMAC` | 256 | FC rows 0..255 requested; the MACs run one cycle behind the ROM read |
| `S_FLAST` | 1 | last FC MAC |
| `S_CLS` | 1 | logits valid; the class is registered, `class_valid` follows |

From the last spectrum point to `class_valid` takes 520 cycles, or 5.2 us
at 100 MHz. The source reports 5.77 us per inference on the FPGA at
100 MHz. The conv layer takes 261 cycles here against the source's 256,
because of the five clear/store cycles.

While the core is working on a frame it refuses the next spectrum
(`fft_out_ready` low). The FFT core then waits. The FIFO keeps taking
converter samples in the meantime, which is the buffering role the source
gives it.

## Interfaces of the top, `bearingpga_net`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | core clock (100 MHz in the source), asynchronous active-low reset |
| `adc_clk`, `adc_rst_n`, `adc_valid`, `adc_data[15:0]` | in | converter-side sample stream, (1,3,12) |
| `fifo_full` | out | FIFO full; a sample offered while it is high is lost |
| `fft_in_valid/_data/_last`, `fft_in_ready` | out/in | sample stream to the FFT core; `last` marks every 2048th sample |
| `fft_out_valid`, `fft_out_data[27:0]`, `fft_out_ready` | in/out | bin magnitudes 0..1023 in order, (1,15,12) |
| `led[3:0]` | out | diagnosed class, 0..9 |
| `class_valid` | out | one-cycle pulse per diagnosis |
| `logits[10]` | out | the ten FC outputs, (1,7,8) |

Parameters `CONV_W_FILE` and `FC_W_FILE` name `$readmemh` files with
trained weights, one 16-bit hex word per line. The convolution file holds
256 words at index `k*64 + j`. The FC file holds 2560 words at index
`r*10 + c`. With the parameters left empty, the ROMs hold a fixed
pseudo-random table (`bpn_pkg::conv_w_default`, `fc_w_default`). The
biases always come from `bpn_pkg::conv_b_default` and `fc_b_default`. These
defaults are a 32-bit integer hash of the parameter index, scaled to a
plausible range. They exist so the datapath can be simulated and checked.
They carry no diagnostic meaning. The trained parameters are not part of
this release, so until trained values are loaded the class on the LEDs is
arbitrary.

`async_fifo` uses Gray-coded pointers with two-flop synchronisers. It has
first-word fall-through reads. Its default depth is 2048 words, one frame.

## How far this follows the published design

Taken from the source:

* the network shape;
* the fixed-point formats of every layer;
* the RF selector geometry;
* 128 parallel MAC units reused over 4 kernels in the convolution;
* 10 MAC units reused over 256 cycles in the FC layer;
* the MAC unit's structure and port names;
* the sign-bit ReLU/max-pool algorithm;
* the 5-bit shift between the pooling and FC formats;
* reading all 256 convolution weights at once;
* reading 10 FC weights per cycle;
* biases held in registers;
* arg-max without softmax;
* four LEDs with a binary class code.

Choices made here:

* truncation, with no rounding or saturation;
* the sequencer and its clear/store cycles;
* the ready/valid handshakes;
* first-word fall-through reads and the 2048-word depth of the FIFO;
* storing the spectrum and the features in registers;
* the channel-major feature order;
* arg-max ties going to the lower index;
* class code 0..9 for the source's labels 1..10.

Not included:

* the FFT core, and the step that turns its complex output into the
  1024 real points. The source does not describe that step. The model
  here uses the bin magnitude.
* the z-score standardisation that the source applies to each frame before
  the FFT in software. The RTL expects samples already in (1,3,12).
* the analog front end, the AD converter and the clock PLL.

The source says that quantization roughly halves the "parameters"
(2.83K -> 1.42K). In this RTL the parameter count stays 2,830. Only the
storage per parameter halves, from 32 to 16 bits.

## Verification

Each block has a self-checking testbench in `tb/`. It compares the block's
outputs with values computed inside the testbench by plain integer
arithmetic (floor division and 16-bit wrap), not by reusing the RTL.

`tb_bearingpga_net` runs the top at its default sizes. It sends three
frames through the converter port, on a 13 ns clock against the 10 ns
core clock. `fft_model` computes a real DFT for each frame. The first
spectrum is held back until the second is ready, so the second arrives
while the core is busy. For each diagnosis the testbench recomputes the
whole network from the spectrum the core accepted. It then checks:

* all ten logits and the class, bit for bit;
* 256 conv and 256 FC MAC cycles per frame;
* the 520-cycle latency, within the 577 cycles of the source's 5.77 us.

It also counts the back-pressure stalls, the cycles in which the FIFO
holds samples for a full FFT input, and all three sign cases of the
pooling. It fails if any of these never happen.

These tests show that the RTL computes the quantized network exactly. They
say nothing about diagnosis accuracy, which depends on trained weights.

Simulate with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl rtl/bpn_pkg.sv rtl/*.sv \
          tb/fft_model.sv tb/tb_bearingpga_net.sv --top-module tb_bearingpga_net
./obj_dir/Vtb_bearingpga_net
```

For a block testbench, replace the last two files with `tb/tb_<module>.sv`
and the top module with `tb_<module>`. Each testbench ends with a line
`TB_RESULT checks=N failures=M`.

## Files

* `rtl/bpn_pkg.sv`: sizes, formats and default parameter tables.
* `rtl/fixedMult16.sv`, `rtl/fixedAdd16.sv`, `rtl/processingElement16.sv`: the MAC unit.
* `rtl/async_fifo.sv`, `rtl/fft_quant.sv`, `rtl/rf_selector.sv`: input side.
* `rtl/conv_rom_ctrl.sv`, `rtl/conv_layer.sv`: convolution.
* `rtl/relu_maxpool.sv`, `rtl/relu_maxpool_layer.sv`, `rtl/shift_module.sv`: pooling and format change.
* `rtl/fc_rom_ctrl.sv`, `rtl/fc_layer.sv`, `rtl/classifier.sv`: FC layer and decision.
* `rtl/bearingpga_net.sv`: top level and sequencer.
* `tb/fft_model.sv`: behavioural FFT model (not synthesizable).
* `tb/tb_*.sv`: testbenches.
