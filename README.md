# A streaming binarized image encoder for robot visuomotor control

A robot that folds a towel can be driven end to end by two networks. A
convolutional auto-encoder compresses each camera frame into a short feature
vector. A recurrent network (an LSTM) takes that vector and the current joint
angles and predicts the joint angles for the next step. The auto-encoder holds
almost all of the weights and does almost all of the multiplications, so it
decides whether the system fits on a small FPGA. The idea here is *partial
binarization*. During training only the encoder half uses ±1 weights and ±1
activations. The decoder keeps full precision so gradients can still flow
through it. At run time the decoder is discarded. What is left is a fully
binarized encoder whose 1.6 MB of weights fit in on-chip block RAM. The
LSTM is small and stays in floating point on the SoC's ARM cores.

This repository holds SystemVerilog for that binarized encoder. It is the part
that runs in programmable logic. A 142×142 RGB frame goes in as a pixel
stream, and 64 signed image features come out.

## Network

| stage | input map | output map | parameters (bits) |
|-------|-----------|------------|-------------------|
| Conv1 3×3 | 142×142×3 (8-bit pixels) | 140×140×32 | 3·3·3·32 weights + 32 thresholds |
| MaxPool 2×2/2 | 140×140×32 | 70×70×32 | – |
| Conv2 3×3 | 70×70×32 | 68×68×64 | 3·3·32·64 + 64 |
| MaxPool | 68×68×64 | 34×34×64 | – |
| Conv3 3×3 | 34×34×64 | 32×32×128 | 3·3·64·128 + 128 |
| MaxPool | 32×32×128 | 16×16×128 | – |
| Conv4 3×3 | 16×16×128 | 14×14×256 | 3·3·128·256 + 256 |
| MaxPool | 14×14×256 | 7×7×256 | – |
| FC1 | 12544 | 1024 (binary) | 12544·1024 + 1024 |
| FC2 | 1024 | 64 (signed integers) | 1024·64 + 64 |

The channel counts, the 142×142 input, the 7×7×256 = 12544 input of FC1, and
the layer widths come from the published network table. That table lists
"142×142" for Conv1 and "70×70" for the pooling after it. A 2×2 pool cannot
turn 142 into 70. The reading used here is that the table gives each
convolution's *input* size. On that reading, a 3×3 convolution without padding
(142→140) followed by 2×2, stride-2 pooling (→70) reproduces every size in the
table down to 7×7. It also matches the unpadded window drawn for the
convolution circuit. If your trained model used padded convolutions, this
layer geometry must change.

## Arithmetic

Binary values are stored as one bit, with 1 meaning +1 and 0 meaning −1.

* **Dot product.** For N binary pairs the sum of products is
  `2·popcount(XNOR(a, w)) − N` (`xnor_popcount`). The first layer's input is
  the camera image. Its pixels are 8-bit unsigned numbers, not signs, so for
  Conv1 a weight bit selects `+pixel` or `−pixel` and the unit adds those. This
  treatment of the first layer is a choice of this implementation.
* **Batch normalisation and sign.** At inference, `Sign(BN(x))` is +1 exactly
  when `x ≥ ⌊μ − σβ/γ⌋`. Each neuron therefore keeps one signed 16-bit integer
  threshold, and the unit does a single comparison (`threshold_unit`). This
  folding assumes γ > 0. For a neuron with γ < 0, negate its weights offline
  before loading them.
* **Max pooling** of ±1 values is a bitwise OR (`bin_maxpool`).
* **Features.** FC2 does not binarize. Each of its 64 outputs leaves as
  `sum − threshold`, saturated to 16 bits. The downstream LSTM receives
  integers, not signs. That output format is this design's own choice.

## Dataflow: one unit per layer, streams in between

Each layer has its own unit. The units are chained by valid/ready handshakes:
the `tvalid/tready/tdata` subset of AXI-Stream. Feature maps are never stored
whole. They flow through the chain one pixel per beat, and each beat carries
all channels of that pixel.

**Convolution window (`window_shift_reg`).** A 3×3 window over a W-wide map
in raster order needs only the last `2W+3` pixels. For W = 5 these are
x00…x04, x10…x14 and x20…x22. The newest pixel sits at position 0. Window
element (r, c) is tap `(2−r)·W + (2−c)`. A row/column counter marks the window
as valid once the newest pixel has row ≥ 2 and column ≥ 2. Pixels on the top
two rows and left two columns only fill the register.

**Convolution unit (`bin_conv`).** When an accepted pixel completes a window,
the unit walks over the output channels, one per clock:

1. read that channel's 9·CIN weight bits and its threshold from the layer's
   RAMs (one clock of read latency);
2. XNOR/popcount against the window;
3. compare with the threshold and store the result bit.

After COUT+2 clocks the COUT-bit output pixel is offered downstream. While the
unit computes, `in_ready` is low, so the previous layer stalls. A pixel that
completes no window is accepted in one clock.

**Pooling unit (`bin_maxpool`).** On even rows it ORs horizontal pairs into a
buffer of W/2 entries. On odd rows it ORs the next pair with the buffered
entry and emits the result one clock later. If the map has an odd trailing
row or column, the unit drops it.

**Fully connected unit (`bin_fc`).** The input vector arrives in chunks: for
FC1, the 49 pooled pixels of 256 bits each. For every chunk the unit walks
over all neurons, one per clock. It adds each neuron's partial XNOR/popcount
to that neuron's entry in an accumulator RAM. The first chunk starts the sum
from zero, so consecutive frames need no clearing. After the last chunk the
neurons are emitted in order, one beat each, with the threshold bit and the
margin. `bit_packer` gathers FC1's 1024 single-bit beats into four 256-bit
chunks for FC2.

**Throughput.** Conv1 dominates: 140·140 windows × (32+3) clocks. All later
layers run concurrently with it, and their total work is smaller. At full size
one frame takes **700,946 clocks**, measured from the first pixel to the last
feature. No target clock frequency is given in the source. At 100 MHz this is
7.0 ms per frame. A 30 frame/s camera needs at least 21 MHz.

## Parameter memories and loading

Each layer has two `param_ram`s with a one-clock synchronous read: binarized
weights and integer thresholds. The intended deployment builds the trained
values into the FPGA image. This RTL instead has a write port, so that any
parameter set can be loaded at run time:

* `prm_sel` picks the memory (`pbdcae_pkg::prm_sel_e`):
  * 0–5 are the weight RAMs of Conv1–Conv4, FC1 and FC2;
  * 8–13 are their threshold RAMs.
* Every memory word is written in 32-bit slices: `prm_addr = (word << SB) | slice`.
  * SB = ⌈log2(number of slices)⌉.
  * Slice 0 holds bits 31:0.
  * For thresholds the low 16 bits are used.
* Convolution weights: word `co`, bit `(r·3 + c)·CIN + ci`. This is the weight
  of window row r, column c, input channel ci for output channel co.
* FC weights: word `p·N_OUT + o`, bit `i`. This is the weight from input
  element `p·IN_W + i` to neuron o. For FC1, input element
  `(y·7 + x)·256 + channel` is pixel (y, x) of the last pooled map. For FC2,
  element `o` is FC1 neuron o.

Load everything before the first frame. Writes during a frame are not
supported.

## Top-level interface (`pbdcae_encoder`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset (state machines only; RAM contents are not reset) |
| `s_axis_tvalid/tready/tdata[23:0]` | in | pixels in raster order, colour ci in bits `ci·8+7 : ci·8` |
| `m_axis_tvalid/tready/tdata[15:0]/tlast` | out | 64 signed features per frame, `tlast` on the 64th |
| `prm_we, prm_sel[3:0], prm_addr[23:0], prm_data[31:0]` | in | parameter write |

Frames may follow back to back. Every unit restarts its counters at the end of
a frame. The parameters `IMG, C1..C4, F1, F2, PACK` default to the sizes
above. Smaller values give a reduced network that behaves the same way; the
reduced end-to-end test uses them.

Outside this RTL sit:

* the ARM processor running the LSTM (two 100-unit layers and an output
  layer);
* the DMA that moves frames and features;
* the bus interconnect and DDR memory;
* the image preprocessing;
* the start/stop control register of the original accelerator. It is not
  modelled: the units run whenever data arrive.

## Departures and open points

* Valid (unpadded) convolutions and 2×2/2 pooling, inferred from the sizes
  (see *Network*).
* The first layer takes 8-bit pixels rather than binary inputs.
* The features are integers (`sum − threshold`), not signs.
* Each convolution computes one output channel per clock, and each FC layer
  one neuron per clock. The source gives no degree of parallelism. Widening
  either is the obvious way to raise the frame rate.
* The parameter write port replaces the built-in parameters.
* The stream handshake uses only `tvalid/tready/tdata` (+`tlast` on the
  output).

## Verification

Each unit has a self-checking testbench in `tb/`. The testbenches compare
against a behavioural model in `tb/pbdcae_ref_pkg.sv`.

* The testbenches use pseudo-random parameters rather than trained values.
  Bit b of weight word w of layer L is bit b mod 32 of `hash32(L, w, b/32)`.
  Thresholds are drawn uniformly from a range around zero, so both signs
  occur.
* `tb_bin_conv` runs a binary-input layer and an 8-bit-pixel layer over two
  frames each, with random gaps and back-pressure. It also checks the
  COUT+2-clock latency of every window.
* `tb_pbdcae_encoder` runs the whole chain at reduced size (64×64 input, 4/8/8/16
  channels) for two frames. It checks that every mechanism actually occurred:
  * input stalls;
  * window-border pixels;
  * pooling of an odd-sized map;
  * FC1 accumulation over several chunks;
  * both threshold outcomes;
  * output back-pressure.
* `tb_pbdcae_full` runs one frame through the encoder at its default size and
  compares all 64 features. It takes a few seconds of simulation after about
  ten seconds of building.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/pbdcae_pkg.sv tb/pbdcae_ref_pkg.sv rtl/*.sv tb/encoder_harness.sv \
  tb/tb_pbdcae_full.sv --top-module tb_pbdcae_full -Mdir obj
./obj/Vtb_pbdcae_full
```

The same command runs a unit test if you swap in its testbench file (and
`tb/conv_check.sv` for `tb_bin_conv`). Each testbench ends by printing
`TB_RESULT checks=N failures=M`.
