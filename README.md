# Railway track fault classifier — a CNN inference accelerator in SystemVerilog

This is a small convolutional neural network in hardware. It looks at one
128x128 colour camera image of rail track or fasteners and decides whether
the track is normal or faulty. It returns the class and the probability of
each class. The network and its overall setting follow the edge-AI
inspection system described in *"An Edge AI System Based on FPGA Platform
for Railway Fault Detection"* (Li, Fu, Yan, Ma, Sham). In that system:

- a camera captures the images;
- the processing system of a Zynq UltraScale+ MPSoC (ZCU104) loads them;
- the programmable logic runs the network;
- an ESP8266 Wi-Fi module reports faults to a desktop GUI.

This RTL is the programmable-logic part only, meaning the box that turns an
image into a result. The camera, the ARM processor, the Wi-Fi module and the
GUI are outside it. The host side reaches the accelerator through a simple
write port and a start/done handshake.

The published work built its accelerator with high-level synthesis. It
names three techniques but gives no microarchitecture:

- loop tiling;
- layered quantization;
- operator fusion.

Everything below the level of "which layers, which sizes, which number
widths" is therefore this design's own. The section *Departures and open
points* lists these choices.

## The network

| # | layer | kernel | in -> out map | channels | after it |
|---|-------|--------|---------------|----------|----------|
| 1 | conv (stem) | 5x5 | 128x128 -> 128x128 | 3 -> 8 | bias, ReLU |
| 2 | pool | 2x2 max, stride 2 | 128x128 -> 64x64 | 8 | |
| 3 | conv (main branch, 1st) | 3x3 | 64x64 | 8 -> 8 | bias, ReLU |
| 4 | conv (main branch, 2nd) | 3x3 | 64x64 | 8 -> 64 | batch norm |
| 5 | conv (shortcut branch) | 1x1 | 64x64 (input: layer 2) | 8 -> 64 | batch norm, **+ layer 4**, ReLU |
| 6 | global average pool | | 64x64 -> 1 | 64 | |
| 7 | fully connected | | | 64 -> 48 | ReLU |
| 8 | fully connected | | | 48 -> 24 | ReLU |
| 9 | fully connected | | | 24 -> 2 | |
| 10 | softmax | | | 2 | |

These parts come from the source network:

- the layer sequence and the kernel sizes;
- the two-branch residual block with one BN layer on each branch;
- the 64 -> 48 -> 24 -> 2 classifier;
- the 128x128 RGB input with pixels normalised to [0,1].

These parts are this design's choices:

- the 8 channels of layers 1 and 3;
- stride 1 with "same" zero padding. The shortcut add needs both branches to
  have the same size, so at least the residual block must keep its size.
- max pooling;
- where ReLU is placed.

With these choices one image costs 33.2 M multiply-accumulates, or about
66 M operations. The published throughput and efficiency figures imply
about 49 M operations per image (3.41 GOPS/W x 6.9 W x 2.1 ms), so the
choices are at least of the right size.

## Number formats and layered quantization

Every stored value is a signed fixed-point integer of one of two widths:

- **12 bits:** camera pixels after normalisation, every convolution weight,
  the BN scale, and every stored feature map;
- **22 bits:** per-channel and FC biases, the residual sum, the
  global-average result, the fully connected activations and the logits.
  FC weights are 12 bits.

The hardware never fixes a binary point. Each layer ends in the same
post-operation (`post_op`):

```
y = ((acc * scale) >>> rshift) + bias (+ shortcut)     then ReLU if enabled
    saturated to 22 bits (and, for storing, to 12 bits)
```

- `acc` is the full-precision MAC sum, at most 48 bits wide.
- `scale` and `bias` are per output channel. They are a batch-norm layer
  folded into its convolution: `scale = gamma/sqrt(var+eps)`, and `bias` is
  the folded shift plus the conv bias. A layer without BN uses
  `scale = 1.0` and its own bias.
- `rshift` is one number per layer, loaded by the host.

Choosing `rshift` per layer is the "layered quantization". It places the
output of each layer at its own binary point. The host's quantizer must
express every scale and bias in the matching units:

- the scale is in units of `2^-s`;
- the bias is in output units.

For example, with 8 input fraction bits and 8-fraction-bit weights, the stem
accumulates at 16 fraction bits. Let the scale be 1.0 = 256 and
`rshift = 16`. The stem output then also has 8 fraction bits.

Shifts are arithmetic (floor), and every result saturates. The softmax unit
assumes that the logits have 8 fraction bits (`IN_FRAC`).

## How a convolution pass runs

All four convolutions run on one engine, `conv_engine`.

**Memory layout.** A feature map is stored one pixel per RAM word, with all
its channels side by side in 12-bit lanes (`lane_ram`). A word is 3 lanes
for the image, 8 for the stem and pooled maps, and 64 for the main-branch
map. One read gives every input channel of one pixel.

**Tiling.** Output channels are processed in groups of `P_OC = 16`. A weight
word holds the weights of one kernel tap for one group: 16 output channels
x `CI_MAX = 8` input channels. The engine works through the loops in this
order:

```
for group, for row y, for column x, for tap (ky,kx):
    read pixel (y+ky-K/2, x+kx-K/2)      -> 8 input channels (0 if outside the map)
    read weight word (group, tap)        -> 16x8 weights
    acc[0..15] += sum over input channels of weight * pixel   (128 MACs in one clock)
after the last tap: post-op on the 16 sums, write 16 output channels
```

**Pipeline.** The pipeline has three stages:

1. Stage 0 issues the read addresses for the input pixel, the weight word,
   the group's scale and bias, and the shortcut operand.
2. Stage 1 (one clock later) multiplies and accumulates.
3. Stage 2 applies the post-op and writes the result.

There are no stalls. A pass raises `done` `groups*h*w*K*K + 2` clocks after
it starts. Weights for taps that do not exist are never read. Input lanes
above the layer's channel count are masked off.

**Output routing.** The top connects the engine to different buffers in each
phase:

| phase | reads | writes |
|-------|-------|--------|
| stem | IMG | X (all 8 lanes) |
| first 3x3 | P | X again. The stem map is dead after pooling, so this reuse saves a 64x64x8 buffer. |
| second 3x3 | X | B, one 16-lane group at a time through the RAM's lane mask |
| 1x1 | P; also B's lanes of the current group, as the shortcut operand | nothing. The results stream into `gap_unit`. |

## The residual block and fused pooling

The two branches meet inside the 1x1 pass, not in a separate layer:

1. The main branch (3x3, 3x3, BN) is computed first and stored in B as
   64 channels of 12 bits.
2. The shortcut 1x1 pass then runs.
3. For each output pixel and group, the engine reads the matching 16 lanes
   of B in the same clock as the last kernel tap.
4. The post-op adds them after the BN scaling and then applies ReLU.
5. The 22-bit sums go straight into `gap_unit`. It keeps one 40-bit sum per
   channel and divides by 4096 with a shift.

So the block's output map is never stored. This is the "operator fusion"
that saves most here: BN, the add, ReLU and global pooling cost no extra
passes and no buffer.

## Classifier head and softmax

`fc_engine` runs each fully connected layer at one MAC per clock:

- weights come from a 12-bit RAM, with `w[j][i]` at `base + j*n_in + i`;
- the activation vector is held in registers.

Two register banks alternate, so each layer reads the vector the previous
one wrote. The first layer reads the GAP output directly. The three layers
take 4,272 clocks, under 1% of an image.

With two classes, softmax reduces to `p_fault = sigmoid(z1 - z0)` and
`p_normal = 1 - p_fault`. `softmax_unit` evaluates the sigmoid with the
piecewise-linear PLAN approximation, which uses shifts and adds only:

- slope 1/4 below |d| = 1;
- slope 1/8 up to 2.375;
- slope 1/32 up to 5;
- 1 beyond 5.

The error is below 0.025. The probabilities have 11 fraction bits
(1.0 = 2048). `cls = 1` (fault) when z1 > z0.

## Using the accelerator

Top module: `rfd_accel_top`. Ports:

- `clk`, `rst_n`: clock and asynchronous active-low reset;
- `ld_we`, `ld_sel`, `ld_addr`, `ld_data`: one element per write;
- `start` and `busy`;
- `done`: a one-clock pulse;
- `cls`, `prob_normal`, `prob_fault`, `logit0`, `logit1`;
- `cycles`: the clock count of the last run.

Writes are ignored while `busy` is high.

| `ld_sel` | address | data |
|----------|---------|------|
| `LD_SHIFT` | layer 0..6 (stem, 3x3, 3x3, 1x1, FC1, FC2, FC3) | `rshift` |
| `LD_CONV_W` | `word*128 + oc_in_group*8 + ci` | 12-bit weight |
| `LD_SCALE` / `LD_BIAS` | `pword*16 + oc_in_group` | 12-bit scale / 22-bit bias |
| `LD_FC_W` | `j*n_in + i`, layers one after another (offsets 0, 3072, 4224) | 12-bit weight |
| `LD_FC_B` | `j`, layers one after another (offsets 0, 48, 72) | 22-bit bias |
| `LD_IMG` | `(y*128 + x)*4 + colour` | 8-bit pixel 0..255, normalised on the way in |

Conv weight words are numbered as `tap = ky*K + kx`:

- stem: words 0..24;
- first 3x3: words 25..33;
- second 3x3: 34 + group*9 + tap;
- 1x1: 70 + group.

Parameter words:

- stem: 0;
- first 3x3: 1;
- second 3x3: 2 + group;
- 1x1: 6 + group.

Load the shifts, weights and parameters once. Then for each frame, load the
image, pulse `start` and wait for `done`.

## Timing

| pass | clocks |
|------|--------|
| 5x5 stem (1 group) | 128*128*25 = 409,600 |
| 2x2 pool | 64*64*4 = 16,384 |
| first 3x3 (1 group) | 64*64*9 = 36,864 |
| second 3x3 (4 groups) | 147,456 |
| 1x1 + add + GAP (4 groups) | 16,384 |
| FC 64-48-24-2 | 4,272 |
| **total (measured, including handshakes)** | **631,003** |

At the 110 MHz of the published implementation, one image takes 5.74 ms.
That is well inside the 16.7 ms that a 60 fps camera allows. It is 2.7x
slower than the 2.1 ms reported for the original, which used about 538 DSP
slices.

The stem dominates, and it uses only 3 of 8 input lanes and 8 of 16 output
lanes. Packing two pixels into one pass, or widening `P_OC`, is the obvious
next step if the published latency is needed.

## Departures and open points

These parts of the design are its own; the source gives only names or
function for them:

- the C1 and CMID channel counts, padding and stride;
- max pooling and the ReLU positions;
- the assignment of the 12- and 22-bit formats;
- the memory layout and the engine's tiling;
- the two-class sigmoid form of softmax;
- the host port. An AXI-Lite/AXI wrapper for the processing system is not
  included.

Other open points:

- **Latency.** The source reports 2.1 ms; this design takes 5.74 ms (see
  *Timing*).
- **Accuracy.** The 88.9% figure belongs to the trained network. The
  trained weights and the dataset are not available, so it is not
  reproduced here. The testbenches use random weights.
- **Limits.** C2 must be a multiple of P_OC. C1 and CMID must each be at
  most P_OC and at most CI_MAX. The pooled map must have a power-of-two
  pixel count. Elaboration-time assertions in the top check these.

## Files

- `rtl/rfd_pkg.sv`: widths, configuration structs, load-port and phase enums.
- `rtl/rfd_accel_top.sv`: top. Buffers, routing and the load port.
- `rtl/layer_ctrl.sv`: layer sequencer.
- `rtl/conv_engine.sv`, `rtl/post_op.sv`: convolution engine and fused post-op.
- `rtl/maxpool_unit.sv`, `rtl/gap_unit.sv`, `rtl/fc_engine.sv`, `rtl/softmax_unit.sv`.
- `rtl/pixel_normalizer.sv`, `rtl/lane_ram.sv`.
- `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.

## Simulation

The package must come first on the command line:

```
verilator --binary --timing --assert rtl/rfd_pkg.sv $(ls rtl/*.sv | grep -v rfd_pkg) \
          tb/tb_rfd_accel_top.sv --top-module tb_rfd_accel_top
./obj_dir/Vtb_rfd_accel_top
```

For one block, list only the files it uses, for example
`rtl/rfd_pkg.sv rtl/post_op.sv rtl/conv_engine.sv tb/tb_conv_engine.sv`.

The testbenches compare each block with a reference written independently
in the testbench: plain nested loops using the same fixed-point rules. Where
a block has a fixed schedule, they also check its clock count.

`tb_rfd_accel_top` runs the whole network at full size twice. It builds and
runs in well under a minute. It:

- draws random weights, folded-BN parameters and an image;
- checks logits, class, both probabilities and the clock count against the
  reference;
- flips the decision between runs by reloading the last biases;
- checks that a host write during a run is ignored;
- counts padding taps, ReLU clamps, saturations, shortcut adds, pooling
  windows, BN scaling and both classes, and fails if any of them never
  happened.
