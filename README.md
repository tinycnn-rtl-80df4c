# TinyCNN accelerator in SystemVerilog

TinyCNN is a small convolutional-network accelerator for low-cost FPGAs such as the
Zynq XC7Z020. Every weight of the network stays in on-chip ROM and every
intermediate feature map stays in on-chip RAM, so a frame is classified without
any external memory traffic. The accelerator is built from a handful of
parameterised units: a FeedForward unit that buffers a layer's input maps and
feeds them three lines at a time, a 3x3 convolution unit whose multiplier count
is a parameter, ReLU, max pooling, a per-layer fixed-point rescaling stage and a
dense (fully-connected) unit. Data is 16-bit fixed point throughout.

This RTL follows the architecture described in "TinyCNN: A Tiny Modular CNN
Accelerator for Embedded FPGA" (A. Jahanshahi). That description stops at the
block level, so much of the detail here (schedules, handshakes, widths, the
arbitration rule) is this implementation's own; the section *Departures and
choices* lists it.

## The network

The top level, `tinycnn_top`, is hard-wired for the network evaluated with the
original design: a 10-class classifier for 32x32 grey-scale images (CIFAR-10
converted to one channel).

| stage | output | parameters held in ROM |
|---|---|---|
| conv 3x3, ReLU, 2x2 max pool | 16x16 x 32 | 288 weights + 32 biases |
| conv 3x3, ReLU, 2x2 max pool | 8x8 x 64 | 18 432 + 64 |
| conv 3x3, ReLU, 2x2 max pool | 4x4 x 128 | 73 728 + 128 |
| conv 3x3, ReLU, 2x2 max pool | 2x2 x 128 | 147 456 + 128 |
| dense 512 -> 100, ReLU | 100 | 51 200 + 100 |
| dense 100 -> 10, ReLU | 10 | 1 000 + 10 |

292 566 parameters in all. Convolutions use "same" zero padding, so a
convolution's output map is as large as its input; the pooling halves it.

## Number format

Activations and weights are signed 16-bit numbers. Products are summed in a
48-bit accumulator, wide enough for the largest sum (128 input maps x 9 taps plus
a bias) never to overflow. Biases are stored as 32-bit words already at the
accumulator's binary point.

If activations have F_a fraction bits and weights F_w, the accumulator has
F_a + F_w. At the end of every layer `precision_adjust` brings the value back to
16 bits with F_out fraction bits: it shifts right by `F_a + F_w - F_out`, rounding
half up, and clamps to [-32768, 32767]. The split between integer and fraction
bits can differ from layer to layer. It is meant to be tuned offline by running
reference data through a simulation of the network, so here it is a parameter per
layer (`SHIFT_L1` ... `SHIFT_FC2`). The default of 12 matches weights with 12
fraction bits (Q4.12) and activations with 8 (Q8.8) in every layer.

ReLU and max pooling run on the wide accumulator values, before the rescaling.
Both are monotonic, so the order gives the same result as rescaling first, and no
precision is lost before the pooling decision.

## How a convolution layer moves data

This is the heart of the design. Each convolution layer (`conv_layer`) consists
of a FeedForward unit, a convolution unit, and a ReLU -> pool -> rescale pipeline:

```
 previous layer ──► ┌──────────── ff_unit ─────────────┐        ┌─ conv_unit ─┐
   (lines)          │ buffering SM ─► fmap_ram ─► line1 │──────► │ LANES MACs  │──► relu ─► maxpool ─► precision_adjust ─► next layer
                    │                        line1►line2│ lines, │ 48-bit accs │
                    │                        line2►line3│ taps,  └─────────────┘
                    │ feeder SM   filter ROM, bias ROM  │ bias,
                    └───────────────────────────────────┘ first/last
```

**Buffering.** A layer receives its input one feature-map line per handshake, map
by map and top row first. The buffering state machine writes line r of map c to
word `c*H + r` of `fmap_ram`, so one RAM word is one whole line. When all `C*H`
lines are in, it hands the RAM to the feeder and refuses input until the feeder has
finished. The RAM holds one image at a time.

**Feeding.** The feeder walks output map `o`, output row `r` and input map `c`, with `c`
innermost. For each step it reads rows r-1, r and r+1 of map c into the line
registers, one per cycle. Each read goes into `line1`, which shifts into `line2`,
which shifts into `line3`. Afterwards `line3` holds the upper row, `line2` the
centre row and `line1` the lower row. Rows outside the map enter as zeros (the
vertical padding). In the same cycles the feeder reads filter `(o,c)` (nine taps
in one ROM word) and bias `o`. It then offers the convolution unit the three lines,
the filter, the bias and two flags: `first` = (c == 0) and `last` = (c == C-1).
Loading takes 4 cycles and overlaps the previous computation, because the
convolution unit copies a request when it accepts it.

**Convolving.** `conv_unit` has `LANES` multiply-accumulate lanes. Each lane owns
one output pixel of the current group of `LANES` pixels. Each cycle every lane
multiplies one filter tap with the matching input pixel and adds the product to
that pixel's accumulator. Pixels left of column 0 and right of the last column
read as zero (the horizontal padding). A group takes 9 cycles, so a line of
`width` pixels takes `9*ceil(width/LANES)` cycles. A request marked `first`
starts the accumulators at the bias, and the other requests add to them. After
the request marked `last`, the finished output line `(o,r)` is the sum over all
input maps, and it is offered downstream. The unit accepts one request every
`9*ceil(width/LANES) + 1` cycles. `LANES` can be anything from 1 to the line
width, trading multipliers (DSP slices) for speed.

**Finishing the layer.** The output line passes through ReLU. `maxpool_unit`
keeps a running column maximum over M consecutive lines (M = 2 here) and then
reduces each group of M columns. `precision_adjust` rescales the line to 16
bits. The result is a stream of lines in the same order and format that the next
layer's FeedForward unit expects: map by map, row by row.

**Back-pressure.** Every link is a valid/ready handshake. A next layer that is
still feeding its previous image stalls the rescale stage, the pool, the ReLU,
the convolution unit's result register and finally the feeder. Layers therefore
work on different images at the same time (layer 1 may take image n+1 while
layer 4 still works on image n). A new image can enter as soon as layer 1 has
finished feeding the previous one.

## Exclusive and shared convolution

`SHARED` selects how convolution units are provided.

* **Exclusive (`SHARED = 0`, default).** Each of the four layers has its own
  `conv_unit`, with `Lk_LANES` lanes. The defaults give each layer as many lanes
  as its line is wide (32, 16, 8, 4), the largest useful number.
* **Shared (`SHARED = 1`).** One 32-lane `conv_unit` serves all four layers
  through `conv_arbiter`. Narrower layers' lines are padded to 32 pixels and carry
  their true width, which the unit uses for padding and for the number of lane
  groups.

The arbiter is round-robin and grants the unit for one whole output line, from
the request marked `first` to the one marked `last`, because the unit's
accumulators hold that line's partial sums. The result goes back to the layer
whose `last` request was accepted.

One rule is needed that exclusive mode never needs. A line is granted only to a
layer that can take its result at once (`rsp_room`: that layer's ReLU register is
empty). Without the rule, the shared unit could finish a line for layer k while
layer k+1 is still feeding. Layer k's output would then be blocked, so the
result would stay in the unit. Layer k+1 could then never get the unit to finish
feeding, and the pipeline would deadlock. With the rule, a result never waits
inside the shared unit.

## Dense layers

`fc_unit` first collects the whole input vector in a register buffer. For the
first dense layer this is 512 values arriving two per beat. The buffer index is
`(map*2 + row)*2 + column` of the last pooled maps. The unit then computes its
outputs in groups of `LANES` neurons. Each lane owns one neuron and one
multiplier, and each cycle all lanes take the same input value, each with its own
weight from the ROM. A group takes IN_N cycles plus 3 (bias load and pipeline).
It leaves as one beat of `LANES` sums, which goes through ReLU and
`precision_adjust`. With 10 lanes, the 100 outputs of the first dense layer
become ten 10-value beats, which are exactly the input beats of the second dense
layer. The second layer's single 10-value beat is the score vector.

## Interface and timing of `tinycnn_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous reset, active low |
| `img_valid`, `img_ready`, `img_line[32]` | in/out/in | one 32-pixel image row per handshake, rows 0..31; signed 16-bit (Q8.8 with the default shifts) |
| `res_valid`, `res_ready`, `res_scores[10]` | out/in/out | the ten class scores of one image (after the final ReLU) |
| `relu_clipped`, `saturated` | out | pulse when a ReLU zeroed a value / a rescale clamped one |
| `conv_contention` | out | shared mode: a layer is waiting for the shared unit |
| `layer_feeding[4]` | out | convolution layer k+1 holds an image and is feeding it (accepts no input) |

The image and score streams are where a host connects. On the Zynq this would be
the ARM processor through DMA or AXI-stream adapters, which this RTL does not
include.

Cycle counts at the defaults, for one image in an otherwise empty accelerator.
A convolution layer takes `O*H*C*(9*ceil(W/LANES)+1)` cycles:

| stage | cycles |
|---|---|
| conv 1 (W=32, 32 lanes) | 10 240 |
| conv 2 (W=16, 16 lanes) | 327 680 |
| conv 3 (W=8, 8 lanes) | 655 360 |
| conv 4 (W=4, 4 lanes) | 655 360 |
| dense 1 + dense 2 | about 5 300 |
| **total (simulated)** | **1 657 555** |

The remaining 3 651 cycles are line loading, pooling and rescaling. The
full-size testbench requires the measured latency to be within 1% of the sum of
the stage counts.

In shared mode one image takes 1 837 121 cycles, and two back-to-back images
take longer than in exclusive mode because the layers queue for the unit. The
multiplier counts of the original implementation are not known, so these numbers
cannot be compared directly with its published run times (2.7 ms exclusive,
8.12 ms shared). At 100 MHz this RTL needs about 16.6 ms per image. Giving the
unit more parallelism (for example all nine taps at once) is the natural next
step if more DSP slices are available.

## Weights

The ROMs (`weight_rom`) are filled when the design is elaborated, as a trained
model would be. No trained model comes with this RTL, so each ROM is filled with
a deterministic stand-in: lane `l` of word `a` is
`synth_weight(SEED, a*LANES + l, AMP)`. This is a 32-bit integer hash of the seed
and index (the murmur3 finaliser), mapped uniformly onto `[-AMP, AMP]`. Each
layer has its own seed: conv layer k uses `10k+1` (filters) and `10k+2` (biases);
the dense layers use 51/52 and 61/62. The ranges (`AMP`) are set per layer so
that activations neither vanish nor all saturate. To run a real network, replace
the initial block of `weight_rom` (for example with `$readmemh`) and lay the words
out as follows:

* filter ROM of a conv layer: word `o*C + c`, lane `t = ky*3 + kx` (ky = 0 is the
  upper row, kx = 0 the left column);
* conv bias ROM: word `o`, one 32-bit accumulator-aligned value;
* dense weight ROM: word `g*IN_N + i`, lane `l` holds the weight from input `i` to
  neuron `g*LANES + l`; dense bias ROM: word `g`, lane `l`.

Storage at the defaults: 292 104 16-bit weights (4.67 Mbit), 462 32-bit biases
(15 kbit) and four feature-map RAMs of 16 + 128 + 64 + 32 kbit. That is about
4.93 Mbit, close to the XC7Z020's 4.9 Mbit of block RAM, which matches the
original report that block RAM is the limiting resource.

## Departures and choices

Taken from the original description: the unit set and its modularity; the
convolution unit's configurable multiplier count (1 up to the line width); three
input lines and a filter in, one output line out; exclusive and shared modes with
an arbitrating wrapper; the FeedForward unit's RAM, filter ROM, three chained line
registers and two state machines; ReLU as the only activation; configurable MxM
pooling; 16-bit fixed point with per-layer rescaling; ROM-held weights; the
network's shape.

Chosen here, where the description is silent:

* valid/ready handshakes everywhere; synchronous active-low reset;
* the convolution schedule (one output pixel per lane, one tap per cycle) and
  the accumulation over input maps inside the convolution unit, controlled by
  first/last flags;
* the feeder's loop order (output map, row, input map) and single buffering of
  each layer's input;
* 48-bit accumulators, 32-bit accumulator-aligned biases and a separate bias ROM;
* round-half-up rounding and saturation in the rescale stage, with a default
  format of Q8.8 activations and Q4.12 weights;
* round-robin arbitration by output line, and the `rsp_room` rule that prevents
  deadlock in shared mode;
* the dense unit's schedule and the flatten order;
* a ReLU after the last dense layer (the network lists an activation there, and
  ReLU is the only one the design supports);
* multiplier counts per unit, and the stand-in weights.

Not included: the offline software (network design and training, the
fixed-point tuning loop) and the host processor system.

## Simulating

Every unit has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The end-to-end benches compare every score bit
for bit with a golden integer model of the network (`tb/tinycnn_checker.sv`). The
checker also requires that input stalls, overlapping images (two layers feeding
different images in the same cycle), ReLU clipping,
saturation and (in shared mode) contention all occur.

```
# one unit
verilator --binary --timing --assert -Irtl -y rtl rtl/tinycnn_pkg.sv \
          tb/conv_unit_tb.sv --top-module conv_unit_tb -o sim && obj_dir/sim

# the whole accelerator at its defaults (exclusive mode), two images, ~15 s of simulation
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/tinycnn_pkg.sv \
          tb/tinycnn_full_tb.sv --top-module tinycnn_full_tb -o sim && obj_dir/sim

# shared mode
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/tinycnn_pkg.sv \
          tb/tinycnn_top_tb.sv --top-module tinycnn_top_tb -o sim && obj_dir/sim
```

Elaboration fills about 4.7 Mbit of ROM through the hash function. This is quick
in Verilator. Synthesis tools may need their loop or constant-evaluation limits
raised, or precomputed memory files instead.

| file | contents |
|---|---|
| `rtl/tinycnn_pkg.sv` | widths, types, `synth_weight`, `requantize` |
| `rtl/tinycnn_top.sv` | the network, exclusive/shared mode |
| `rtl/conv_layer.sv` | FeedForward unit + ReLU + pool + rescale of one layer |
| `rtl/ff_unit.sv`, `rtl/fmap_ram.sv`, `rtl/weight_rom.sv` | FeedForward unit and its memories |
| `rtl/conv_unit.sv`, `rtl/conv_arbiter.sv` | convolution unit and shared-mode arbiter |
| `rtl/relu_unit.sv`, `rtl/maxpool_unit.sv`, `rtl/precision_adjust.sv` | per-layer post-processing |
| `rtl/fc_unit.sv` | dense layer |
| `tb/*_tb.sv`, `tb/tinycnn_checker.sv` | testbenches and the golden model |
