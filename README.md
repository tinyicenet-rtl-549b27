# TinyIceNet streaming accelerator in SystemVerilog

TinyIceNet is a small convolutional network that turns a Sentinel-1 SAR
scene into a map of sea-ice *stage of development* (SOD): open water, new
ice, young ice, thin and thick first-year ice, old ice. The network is
built to run on board a satellite. It needs about 146 k parameters and
about 3 GMAC per 512 × 512 scene, and it runs with 8-bit weights.

This RTL is a fully streaming hardware implementation of that network. A
scene enters as one stream of pixels. Every layer is its own hardware
stage, and all stages work at the same time. Each stage holds only the few
image rows it needs, so no feature map ever goes to external memory. The
result leaves as one stream of class indices.

```
 HH,HV int8 ──► DConv-3 ─► pool ─► DConv-3 ─► pool ─► DConv-3 ─► pool ─► DConv-3 ─► x8 up ─► 1x1 conv ─► argmax ──► class
  2 x H x W    2→16 ch           16→32 ch          32→64 ch          64→64 ch            64→7 logits          1 x H x W
               H x W             H/2 x W/2         H/4 x W/4         H/8 x W/8   H x W
```

The decoder is one ×8 upsampling followed by a 1×1 classifier. There are
no skip connections, so nothing from the encoder is kept for the decoder.
That keeps on-chip buffering small. The design has nine convolution layers:
eight 3×3 layers (two per DConv-3 block) and one pointwise layer.

## 1. Streams

Every connection between layers uses the same kind of stream: a
`valid`/`ready` handshake carrying one signed 8-bit word per beat. Pixels
come in raster order. The channels of one pixel come on consecutive beats
(HWC order). For example, the input scene is `HH(0,0) HV(0,0) HH(0,1)
HV(0,1) …`. Frames follow each other with no marker; each stage counts
words to find its position in the frame. Every stream output asserts the
handshake rule: a word on offer stays unchanged until it is taken.

Each stage may stall the stage before it. Inside the top, any layer can
hold off its upstream neighbour.

## 2. The streaming 3×3 convolution (`conv3x3`)

All eight 3×3 layers are instances of one module. It works in three stages.

**Read and buffer.** Each incoming word is written into a `line_buffer`.
The line buffer holds three complete rows of all input channels
(3 × W × CIN words). Rows are stored round-robin in three banks, so image
row *y* is in bank *y* mod 3. A `window_buffer` holds the 3 × 3 × CIN
neighbourhood of the output pixel being computed. To move one pixel to the
right, the window shifts one column to the left. Then its new right column
is filled, one channel per cycle, reading three words per cycle (one from
each bank). Zero padding of one pixel keeps the output at H × W:

- the window is cleared at the start of each row (left border);
- the column after the last one is loaded as zeros (right border);
- a missing row above or below the image is replaced by zeros.

**Compute.** A grid of UF_OUT × UF_IN `mult_array`s does the arithmetic.
Each `mult_array` has nine 8 × 8-bit multipliers, one for each tap of one
input channel. The grid feeds UF_OUT `adder_tree`s. In each cycle the grid
takes UF_IN input channels of the window, for UF_OUT output channels. After
CIN/UF_IN cycles, UF_OUT accumulators are complete. They then pass through
`bn_relu_quant` (see §4).

- **Standard form:** UF_OUT = 1. With UF_IN = CIN, the layer produces one
  output channel per cycle.
- **SIPO (serial-in, parallel-out) form:** UF_OUT > 1. The same window
  serves several output channels at once. This is for layers that would
  otherwise be the bottleneck.

**Write.** The UF_OUT results of a group go into a small output buffer.
They leave one word per beat while the next group is computed. The compute
grid waits only if the buffer would not be empty in time.

**Schedule.** The 3-row buffer has no spare row. Output row *r* therefore
starts once input row *r*+1 is fully buffered. While row *r* is computed,
`in_ready` stays low. With input always valid and output always ready, a
frame takes exactly

    H·W·CIN  +  H·(1 + CIN + W·(CIN + (COUT/UF_OUT)·max(CIN/UF_IN, UF_OUT)))  +  UF_OUT

cycles. The testbench checks this to the cycle. Within one row, each output
pixel costs CIN cycles to refill the window plus the MAC cycles.

Requirements: CIN must be a multiple of UF_IN, and COUT a multiple of
UF_OUT.

### Unroll factors used in the top

The chosen factors are below. They are this design's choice; the source
names UF_IN and UF_OUT but gives no values.

| layer | block            | CIN→COUT | size      | UF_IN | UF_OUT | multipliers |
|-------|------------------|----------|-----------|-------|--------|-------------|
| 1     | input_block      | 2→16     | H × W     | 2     | 1      | 18          |
| 2     | input_block      | 16→16    | H × W     | 8     | 2 (SIPO) | 144       |
| 3, 4  | contract_block0  | 16→32, 32→32 | H/2 × W/2 | 16 | 1     | 144 each    |
| 5, 6  | contract_block1  | 32→64, 64→64 | H/4 × W/4 | 16 | 1     | 144 each    |
| 7, 8  | contract_block2  | 64→64    | H/8 × W/8 | 16    | 1      | 144 each    |
| 9     | head (1×1)       | 64→7     | H × W     | 64    | —      | 64          |

That makes 1,090 multipliers in total. To change the factors, edit the
`dconv3` parameter lists in `tinyicenet_top.sv`.

## 3. The other stages

- **`maxpool2`** does 2 × 2 pooling with stride 2. On even rows it stores
  the running maximum of each block in a (W/2) × C buffer. On odd rows it
  completes the block and emits the block's maximum when the last word of
  the block arrives. It accepts one word per cycle.
- **`upsample8`** does ×8 nearest-neighbour upsampling. It buffers one
  bottleneck row (W/8 × 64 words), then replays it eight times, repeating
  each pixel eight times. Input is held off during the replay.
- **`conv1x1`** is the pointwise classifier. It has no line or window
  buffer: a 64-word input buffer collects one pixel, then 64 multipliers
  and an adder tree produce one class logit per cycle (7 per pixel, with a
  per-class bias). A pixel costs 64 + 7 cycles. At full resolution this is
  the slowest stage.
- **`argmax`** tracks a running maximum over the 7 logits of a pixel and
  outputs the index of the first maximum.
- **`dconv3`** is two `conv3x3` instances in series (Conv-BN-ReLU twice).

## 4. Numbers and weights

- Activations and weights are signed 8-bit. The input SAR channels are
  normalised to [-1, 1] and are expected scaled to [-127, 127].
- Products are 16-bit. Accumulators are 32-bit. Logits are 24-bit.
- Batch normalisation and ReLU are folded into one integer step per output
  channel:
  `y = clamp((acc·scale + bias) >>> shift, 0, 127)`.
  `scale` is an 8-bit integer, `bias` is 24-bit, and `shift` depends on the
  layer's fan-in. The lower clamp is the ReLU; the upper clamp saturates to
  int8.
- **The weights are placeholders.** The trained coefficients are not
  available. Every ROM is therefore filled at elaboration time from a fixed
  integer hash of (layer, output channel, input channel, tap), defined in
  `tinyicenet_pkg`:
  - weights lie in [-7, 7];
  - BN scales lie in [16, 31];
  - biases are sized so that activations keep a useful spread through all
    eight layers.

  With these values the output maps are not sea-ice classifications. They
  do exercise every path of the datapath and produce all seven classes.
  To use a trained model, replace the functions `conv_weight`, `bn_scale`,
  `bn_bias`, `bn_shift` and `pw_bias`, or load the ROM arrays in `conv3x3`
  and `conv1x1` from files.
- On-chip storage at 512 × 512:
  - line buffers: about 123 KiB;
  - windows: 2.6 KiB;
  - pooling buffers: 12 KiB;
  - upsample row: 4 KiB;
  - weight ROMs: about 143 KiB (145,888 weights plus 352 BN pairs and 7
    biases).

## 5. Throughput

A full 2 × 512 × 512 scene takes **20,971,604 cycles** from the first input
word to the last class. This was measured in simulation with input always
valid and output always ready. The slowest stage is the pointwise head: its
64-word input buffer fills one word per cycle, at 71 cycles per pixel.
Layer 2, the SIPO layer, sits just below that. Reaching 7 scenes per second
would need a clock of about 147 MHz. No clock frequency is specified for
this design, and timing closure has not been studied. The adder trees are
purely combinational; at high clock rates they would need pipeline
registers.

The network needs 2.91 GMAC per scene, counting the eight 3×3 layers and
the classifier. Elsewhere, 2.97 GMAC is quoted for the same network. The
difference is presumably BN, upsampling or bias operations counted as
MACs.

## 6. What is this design's own choice

The sources give these parts only in outline; everything below was chosen
for this RTL:

- the stream format and handshake;
- the line-buffer banking and the row-at-a-time schedule that holds input
  off while a row is computed;
- combinational line-buffer reads;
- max pooling, where only "pooling" is specified;
- nearest-neighbour ×8 upsampling;
- the fixed-point form of BN;
- int8 activations (only 8-bit weights are specified);
- the unroll factors, and which layer is SIPO;
- the classifier bias;
- the argmax tie rule;
- synchronous active-low reset of the control state (data memories are not
  reset);
- no handling of masked pixels in hardware. In the training data, missing
  SAR samples become 0 and out-of-scope pixels are marked with a special
  code. Producing a clean int8 scene is left to the host, and pixels
  outside the analysis area are simply classified like any other.

The SIPO form in the source drives several parallel output streams. Here
those streams are merged into the single channel-serial stream the next
layer reads.

There is one inconsistency in the network definition itself. One list of
SOD categories has six entries (0–5). The network architecture, however,
ends in seven classes. This RTL follows the architecture: 7 classes.

The host side is not part of this RTL. On the target FPGA SoC, an ARM
processor and framework-generated data movers feed scenes from DDR memory
and collect the maps. Here the top exposes plain streams in their place.

## 7. Files

`rtl/`:

| file | content |
|------|---------|
| `tinyicenet_pkg.sv` | types, widths, weight/BN formulas |
| `tinyicenet_top.sv` | the whole accelerator (parameters `H`, `W`, default 512) |
| `dconv3.sv` | two 3×3 conv + BN + ReLU layers |
| `conv3x3.sv` | streaming 3×3 convolution, standard or SIPO |
| `line_buffer.sv`, `window_buffer.sv` | read-and-buffer stage |
| `mult_array.sv`, `adder_tree.sv`, `bn_relu_quant.sv` | compute stage |
| `maxpool2.sv`, `upsample8.sv`, `conv1x1.sv`, `argmax.sv` | other layers |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`).

- `tb_ref_pkg.sv` holds plain loop-nest reference models of every layer
  and of the whole network.
- `conv3x3_harness.sv` is used by `tb_conv3x3`.
- `tb_tinyicenet_top` runs two 16 × 16 scenes end to end:
  - it compares every class with the reference;
  - it counts input stalls, back-pressure between layers, SIPO and
    standard groups, pooling, upsample replays, logits and output
    back-pressure;
  - it fails if any of these never happens.
- `tb_tinyicenet_full` runs one full 512 × 512 scene at the default
  parameters. It checks all 262,144 classes and takes about 5 minutes.

Each testbench prints `TB_RESULT checks=N failures=M`.

## 8. Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```sh
verilator --binary --timing --assert -Irtl -Itb --top-module tb_conv3x3 \
    rtl/tinyicenet_pkg.sv tb/tb_ref_pkg.sv tb/tb_conv3x3.sv
./obj_dir/Vtb_conv3x3
```

Replace `tb_conv3x3` with any other testbench name. Verilator finds the
remaining modules through `-Irtl -Itb`. The simulator has two states, so
every testbench resets or initialises what it reads.
