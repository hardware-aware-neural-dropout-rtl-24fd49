# Heterogeneous Monte Carlo dropout layers for an FPGA Bayesian network accelerator

A dropout-based Bayesian neural network estimates how uncertain it is by
running each input through the network several times with dropout left on.
Each run, or *Monte Carlo sample*, zeroes a different random subset of
activations. The spread of the outputs then measures the uncertainty. How
well this works depends on what kind of dropout is used and where. Different
positions in a network do best with different kinds. A design-space search
therefore picks one dropout kind per dropout position and generates an
accelerator for that choice.

This RTL provides the hardware that such a search needs:

- four dropout layer kinds with one shared stream interface, so that any
  position can hold any kind;
- a configurable top that chains the chosen dropout slots;
- a controller that runs the Monte Carlo passes of one inference.

The convolution, pooling, dense and activation layers of the network are
standard streaming layers from a high-level-synthesis library. They are not
part of this RTL. The top exposes each dropout slot's input and output
streams, and those layers connect there.

## The four dropout kinds

All four operate on a stream of activations. One beat of the stream carries
every channel of one pixel: `CH` values of 16-bit signed fixed point, with
1 sign bit, 7 integer bits and 8 fraction bits (Q7.8). A feature map of
`H x W` pixels therefore takes `H*W` beats, one forward pass. A fully
connected layer has `H = W = 1`, so its neurons are the channels of a single
beat.

| module | what is dropped | how the mask is chosen | when it changes |
|---|---|---|---|
| `random_dropout` | single elements (pixel, channel) | one random number per element, compared with a threshold | every element of every pass |
| `bernoulli_dropout` | whole channels (CONV) or neurons (FC) | one random number per channel, drawn on the first beat of a pass | every pass |
| `block_dropout` | square patches of `BLOCK x BLOCK` pixels, all channels | random seed points start patches | every pass |
| `masksembles` | channels, by a fixed mask | `NUM_MASKS` masks fixed before run time, held in a ROM | mask `s` is used for pass `s mod NUM_MASKS` |

The first three kinds draw random numbers at run time: they are *dynamic*.
Masksembles is *static*: it draws nothing, and its variety across samples
comes only from the fixed set of masks. Its ROM is why it uses memory where
the others use comparators.

**Drop decision and rescaling.** A drop probability `p` is encoded as a
16-bit threshold, `P_THRESH = round(p * 65536)`. An element is dropped when
its 16-bit uniform random number is below the threshold. The dynamic kinds
multiply each kept element by `SCALE`, an unsigned Q8.8 value, normally
`round(256 / (1 - p))`. This keeps the expected activation unchanged
("inverted dropout"). The product is rounded towards minus infinity and
saturated to the Q7.8 range. Masksembles passes kept values unchanged.
The defaults are `p = 0.25` (`P_THRESH = 16384`, `SCALE = 341`).

**Random numbers.** `rng_lanes` holds one 32-bit xorshift generator per
parallel lane (shifts 13, 17, 5). Each lane takes the upper 16 bits of its
state as its random number. Lane `l` of a generator seeded `S` starts from
`xorshift32((S ^ (0x9e3779b9 * (l + 1))) | 1)`. A generator steps only when
its layer consumes a random number. Its sequence therefore depends only on
the accepted beats, not on stalls, which lets a testbench predict every mask.

## Block dropout in a single streaming pass

DropBlock is normally defined on the whole feature map. A seed point is
sampled at each position with probability `GAMMA/65536`, and each seed at
`(r, c)` zeroes the patch `r..r+BLOCK-1, c..c+BLOCK-1`. Seeds are only
sampled where the whole patch fits inside the map. Pixel `(r, c)` is thus
dropped when some seed lies within `BLOCK-1` rows above it and `BLOCK-1`
columns to its left. That seed was sampled earlier in raster order, so the
drop decision is causal. The layer splits it in two, so the map never needs
storing:

- **Horizontal.** A shift register `hist` holds the seed bits of the last
  `BLOCK-1` pixels of the current row. `h(r,c)` is set when the current pixel
  or one of those pixels is a seed. Bits from before column 0 are ignored.
- **Vertical.** For each column, `vcnt[c]` counts how many more rows are
  covered by a patch that started above. When `h(r,c)` is set, the counter is
  loaded with `BLOCK-1`. Otherwise it counts down to zero. In row 0 the stored
  value is ignored, so nothing needs clearing between passes.

A pixel is dropped when `h(r,c)` is set or `vcnt[c]` is non-zero. The
storage is `W` counters of `clog2(BLOCK+1)` bits plus `BLOCK` flip-flops.
One random number is drawn per pixel, and the mask is shared by all channels
of that pixel. `BLOCK` must be at least 2; the default is 2.

The testbench checks this streaming scheme against the direct definition: it
keeps a 2-D seed map and searches the `BLOCK x BLOCK` window behind each
pixel.

## Monte Carlo passes and the top level

`mc_sample_ctrl` runs one inference. On `start` it issues `NUM_SAMPLES` pass
requests (default 3) on a valid/ready handshake (`feed_valid`, `feed_ready`,
`feed_sample`) to whatever streams the input image into the network. It then
counts `result_valid` pulses, one per pass that has left the network. After
the last result it pulses `done`. `cycles` then holds the latency: the
number of clock edges from the edge that took `start` to the edge that took
the last result. A new request is issued as soon as the feeder accepts the
previous one. Passes therefore overlap in the layer pipeline: the first
layer can already take pass 2 while a later layer is still on pass 1.

Because passes overlap, no global "pass number" is broadcast. Each layer
counts its own beats (`H*W` per pass), and Bernoulli and Masksembles derive
their pass boundaries and mask index from that count. A layer's pass
boundaries therefore rely on every pass delivering exactly `H*W` beats.

`bayes_dropout_accel` is the top. For each slot `i` of `NL` it instantiates
`dropout_layer`, which builds the kind `TYPES[i]` for a map of
`LH[i] x LW[i] x LCH[i]`. It also instantiates the sample controller. Per
slot, the top's stream ports are:

- `d_in_valid[i]`, `d_in_ready[i]`, `d_in_data[i]`: from the layer in front
  of the slot;
- `d_out_valid[i]`, `d_out_ready[i]`, `d_out_data[i]`, `d_out_keep[i]`: to
  the layer after the slot.

The data buses are `MAXCH` lanes wide. Slot `i` uses the low `LCH[i]` lanes,
and its unused output lanes are zero. `d_out_keep` is the mask the slot
applied to each element (1 = kept). For a block slot this is the pixel's
keep bit repeated across the channels. Slot `i` is seeded with
`SEED ^ (0x01010101 * (i+1))`, so the slots' masks are independent.

The defaults describe the LeNet/MNIST network with the configuration chosen
for lowest predictive-entropy error: Random, then Random, then Bernoulli.
Those three slots follow conv1 (24x24x6), conv2 (8x8x16) and the first dense
layer (120 neurons). Other networks are obtained by overriding `NL`, `MAXCH`,
`TYPES`, `LH`, `LW` and `LCH`. One accelerator is built per configuration:
a slot's kind is fixed at build time.

**Timing.** Every layer is a single registered stage with the usual
`in_ready = !out_valid || out_ready` rule. It accepts one pixel per cycle
and its output appears one cycle after the input is accepted. A held output
stays stable while `out_ready` is low, and each layer has an assertion that
checks this. At the defaults a pass streams 576 + 64 + 1 beats through the
three slots.

## What follows the source design and what is chosen here

These points follow the source design:

- the four dropout kinds and their granularity: point; patch; point or
  channel; static masks made offline;
- dynamic versus static sampling, and which kinds may follow CONV and FC
  layers;
- the Q7.8 number format;
- three Monte Carlo samples;
- three dropout positions in LeNet (two after convolutions, one after a
  dense layer) and four in VGG11 and ResNet18;
- the per-network configurations;
- that the dynamic layers work by comparing random numbers, and that
  Masksembles needs memory for its masks.

These points are choices made here:

- the stream format and handshake;
- asynchronous active-low reset;
- the xorshift generators and their seeding;
- the drop rate of 0.25 and the inverted-dropout scale;
- channel-wise (not point-wise) Bernoulli masks on convolutional maps;
- DropBlock details: patch size 2, seed rate, a patch shared across channels,
  and a fixed rescale instead of normalising by the number of kept units;
- how the Masksembles masks are generated: each bit is 1 when the upper half
  of `xorshift32(lane_seed(MASK_SEED, s*CH + c))` is at least `MASK_P`,
  instead of the original Masksembles procedure with controlled overlap;
- no rescaling in Masksembles;
- the LeNet, VGG11 and ResNet18 feature-map sizes and the exact dropout
  positions, taken from the usual definitions of those networks;
- the pass-request and result handshake of the controller.

Not included:

- the standard network layers;
- averaging the Monte Carlo outputs into a prediction and computing the
  uncertainty metrics, which are left to whatever consumes the network
  output;
- the design-space search itself, which is software.

## Files

- `rtl/dropout_pkg.sv`: the Q7.8 type, `drop_type_e`, default rate and scale,
  the rescale function and the xorshift helpers.
- `rtl/rng_lanes.sv`: the parallel random generators.
- `rtl/random_dropout.sv`, `rtl/bernoulli_dropout.sv`, `rtl/block_dropout.sv`,
  `rtl/masksembles.sv`: the four layer kinds.
- `rtl/dropout_layer.sv`: one slot that builds the kind chosen by `TYPE`.
- `rtl/mc_sample_ctrl.sv`: the Monte Carlo pass controller.
- `rtl/bayes_dropout_accel.sv`: the top.
- `tb/tb_ref_pkg.sv`: the testbenches' reference arithmetic, written
  separately from the RTL.
- `tb/tb_<module>.sv`: a self-checking test for each module. Each compares
  every output element with a reference model under random input gaps and
  output back-pressure. It also checks throughput (one beat per cycle) or
  latency where the module defines one.
- `tb/tb_accel_body.svh`: the end-to-end test, shared by five testbenches.
  The testbench plays the rest of the network: slot `i+1` receives a pass
  once slot `i` has delivered it. The test checks every element of every
  slot and counts drops, stalls, mask changes between passes, overlapping
  passes and completed inferences. Each of these must occur at least once.
  - `tb/tb_bayes_dropout_accel.sv`: the default LeNet configuration, four
    inferences, top parameters untouched.
  - `tb/tb_accel_lenet_acc.sv`, `tb/tb_accel_lenet_ece.sv`: the LeNet sizes
    with Bernoulli, Bernoulli, Masksembles and with Masksembles, Masksembles,
    Bernoulli.
  - `tb/tb_accel_resnet_acc.sv`: ResNet18 at full width, Block, Masksembles,
    Bernoulli, Masksembles, with slots after the four residual stages.
  - `tb/tb_accel_vgg_ece.sv`: VGG11 at full width, Random, Block, Random,
    Masksembles.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Example,
run from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bayes_dropout_accel \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/dropout_pkg.sv tb/tb_ref_pkg.sv \
  tb/tb_bayes_dropout_accel.sv -o sim && obj_dir/sim
```

Replace the top module and file for the other testbenches. Every module
resets or initialises all state that it reads, so the simulation runs
correctly with two-state random initialisation. Each testbench has a
cycle-count watchdog.

## Known limits

- Dropout rates, patch size and masks are placeholders. A real deployment
  takes them from the trained network: the threshold and scale per slot, and
  the mask set for Masksembles.
- `TYPES`, `P_THRESH` and `SCALE` apply to the whole top. Giving each slot
  its own rate means adding per-slot parameter arrays.
- A pass must deliver exactly `H*W` beats into each slot. There is no
  `last` flag to resynchronise after a malformed pass.
