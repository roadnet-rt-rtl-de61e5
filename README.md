# An INT8 layer engine for RoadNet-RT road segmentation

RoadNet-RT is a small road-segmentation CNN. It is built almost entirely from
3x3 depthwise convolutions, 1x1 pointwise convolutions, residual adds and two
kinds of attention block:

- **GAM**: global average pooling, then a 1x1 convolution, then a sigmoid, then a per-channel multiply.
- **FFM**: the same chain, with the input added back after the multiply.

This RTL is an accelerator that runs such a network one layer at a time, on
INT8 data, 32 channels in parallel. It has two separate compute engines:

- a **depthwise engine**: 32 channels × 9 multipliers behind a line buffer;
- a **pointwise engine**: a 32-input × 32-output vector-matrix multiplier.

The design keeps them separate because fusing them would force the
intermediate map to be reshaped. Around the two engines sit:

- a small attention datapath: pooling, a sigmoid look-up table and an element-wise unit;
- eight on-chip feature-map buffers of 35 × 120 pixels × 32 channels;
- an on-chip weight buffer big enough for the whole network;
- a controller that runs a layer program written by the host processor.

Every layer streams one 256-bit *pixel word* per clock: the 32 INT8 channel
values of one pixel. Whatever is read from a buffer in one cycle reaches an
engine in the next cycle. The engine's results come back in the order they were
issued, and they are written to consecutive addresses of the destination buffer.

What is not here:

- the host processor;
- DDR;
- the AXI ports;
- the image resizing that the host does before and after the network.

The host is expected to write the weights and a program, then pulse `start`.
Feature maps enter and leave through a simple request/response port, one pixel
word per request.

## Data formats

| quantity | format |
|---|---|
| activations, weights | signed INT8 (`q8_t`), 32 per word (`pix_t`, lane *i* = channel *i* of the tile) |
| accumulators | 32-bit signed; the depthwise adder tree is 20 bits wide inside, which is exact for 9 INT8 products |
| requantisation | `requant(acc, shift, relu)`: arithmetic shift right by `shift`, rounding to nearest with ties rounded up, optional ReLU, then saturation to [−128, 127] |
| post-ReLU batch norm | `y = sat8(((r * scale + 32) >>> 6) + shift)`. `scale` is INT8 in Q1.6, so 64 = 1.0; `shift` is INT8 |
| average pooling | `round(sum * recip / 2^24)`, saturated. `recip = round(2^24 / (h*w))` is supplied per layer |
| sigmoid input | INT8 read as Q3.4, range −8 … +7.94 |
| sigmoid output | unsigned 8 bits, `round(256 * sigmoid)`, clipped to 255 |
| attention multiply | `(a * s + 128) >>> 8`, with `s` the unsigned sigmoid output, then saturation |

Each layer's `shift` is the difference between the fixed-point exponents of its
input, weights and output. Choosing those exponents is the host's
quantisation job.

## Feature-map buffers and addressing

A buffer holds one 32-channel tile of a feature map, up to 35 rows × 120
columns. Pixel (r, c) of an h × w map is stored at address `r*w + c`.

- A map with more than 32 channels occupies several buffers, one per tile.
- A pointwise layer with `ntile_m1 + 1` input tiles reads them from buffers
  `src, src+1, …`.

All eight buffers share one read address and one write address. The
controller chooses:

- which buffer's output is input *a*, and which is input *b*;
- which buffer receives the write.

This means one layer can read two maps, as the residual and attention ops do,
and write a third. "Ping-pong" operation is simply the host choosing different
`src` and `dst` from one layer to the next.

Reads are synchronous, with the data arriving one cycle after the address.
Writes take effect at the clock edge. A buffer can be read and written in the
same cycle at different addresses. The controller never reads a buffer that
the same layer is writing.

## The depthwise engine: a padded grid instead of a border FSM

A 3×3 "same" convolution needs a zero border around the map. The usual way is
a border state machine, which keeps track of the image edges. This design uses
a simpler scheme built around a padded grid:

1. **The bottom and right borders come in as extra beats.** The controller
   walks an (h+1) × (w+1) grid row by row. The beats in the extra last row
   and last column are padding beats. On those beats the controller reads
   nothing from the buffer, and the top level forces the engine input to zero.

2. **The line buffer emits a window per beat.** The line buffer is two line
   memories of `MAX_W+1` pixel words plus a 3×3 window register. On each beat
   at grid position (r, c) it emits the window whose bottom-right corner is
   that beat. The window's centre is therefore the map pixel (r−1, c−1), and
   the window is valid only when r ≥ 1 and c ≥ 1.

3. **The top and left borders are masked.** When the centre row is 0, the
   top row of the window is replaced by zeros. When the centre column is 0,
   the left column is replaced by zeros.

The result is exactly one output per map pixel, in raster order.

The cost is (h+1)(w+1) cycles per layer instead of h·w. For a full 35 × 120
map that is 4356 cycles instead of 4200, 3.7 % more.

**Stride 2.** The engine computes every window, then keeps only the centres
with an even row and an even column. The output is ⌈h/2⌉ × ⌈w/2⌉. It takes as
many cycles as stride 1.

**Depthwise PE.** Each of the 32 PEs belongs to one channel:

- it multiplies the nine window values by its kernel;
- a registered product stage feeds a 9 → 5 → 3 → 2 → 1 adder tree;
- a registered sum ends the tree.

Requantisation to INT8 is done in one more register. The latency from a beat
to its output is 4 cycles, and the throughput is one window per cycle.

**Kernel loading.** The weight buffer holds a depthwise layer as nine words.
Word *k* holds tap *k* (row-major) for all 32 channels. The controller copies
the nine words into the engine's kernel registers before the layer starts,
which takes 9 cycles.

## The pointwise engine: tiles, accumulation and BN after ReLU

The pointwise engine has 32 PEs. PE *j* computes output channel *j* of the
current 32-channel output tile:

- 32 multipliers;
- a pairwise adder tree over five levels, registered at the end;
- an accumulator.

A layer with T input tiles presents T consecutive beats per pixel: tile
0 … T−1, flagged `first` and `last`. The accumulator restarts on `first`. On
`last` the sum is requantised, optionally passed through ReLU, and sent out.

- One output pixel therefore takes T cycles.
- Latency is 4 cycles from the last tile's beat.
- A layer with more than 32 output channels is run once per output tile,
  using different weights and a different `dst`.

**Weight layout.** In the weight buffer, tile *t* takes 32 words. Word
`t*32 + j` holds the 32 input-channel weights of output channel *j*. The
engine keeps up to `MAX_TILES` × 32 such rows in registers, loaded by the
controller before the layer: 32·T cycles.

**Batch norm.** When batch norm comes before the ReLU, it is folded into the
weights and the shift. When it comes after the ReLU, `bn_post` is set and two
extra words are loaded:

- one holds a per-channel Q1.6 scale;
- one holds a per-channel offset.

Each PE then applies one extra multiply and one extra add after the ReLU.
That is the one-multiplier, one-adder cost the original design budgets for
this case.

**FC layers.** The pointwise engine also runs the 1×1 convolution of the
attention blocks. Op `FC` takes its input vectors from the pooling buffer (GP
words) instead of a feature-map buffer. It writes its result back to a GP
word.

## The attention path (GAM and FFM)

The attention path is made of four parts:

| unit | what it does |
|---|---|
| `gap_unit` | 32 per-channel accumulators and one multiplier per channel. The host gives `recip = round(2^24/(h*w))`, so no divider is needed. |
| `gp_buffer` | eight 256-bit registers for pooled vectors, FC results and sigmoid outputs. It has two combinational read ports. |
| `sigmoid_lut` | a 256-entry table built at elaboration time from a four-segment piecewise-linear approximation of the sigmoid (the PLAN approximation), indexed by the raw INT8 input. |
| `att_unit` | the element-wise unit, with three modes: `MUL` gives `a·s`, `MULADD` gives `a + a·s`, `ADD` gives `a + b` (residual add). |

The PLAN table is:

| input | output |
|---|---|
| \|x\| ≥ 5 | 1 |
| 2.375 ≤ \|x\| < 5 | x/32 + 0.84375 |
| 1 ≤ \|x\| < 2.375 | x/8 + 0.625 |
| \|x\| < 1 | x/4 + 0.5 |
| x < 0 | 1 − f(−x) |

A GAM block then runs as four layers:

```
GAP   fm[x]        -> gp[0]        (pool the map)
FC    gp[0]        -> gp[1]        (1x1 conv on the vector, through the PW engine)
SIG   gp[1]        -> gp[2]        (sigmoid, one beat)
MUL   fm[x], gp[2] -> fm[y]        (scale every pixel by its channel's attention)
```

For an FFM, the last layer is `MULADD` instead of `MUL`. Each GP word holds 32
channels, so a block with more channels runs these layers once per tile.

## The controller and the layer program

The host writes a program of up to 64 descriptors (`rn_pkg::desc_t`), then
pulses `start`. The descriptor fields are:

| field | meaning |
|---|---|
| `op` | END, LOAD, STORE, DW, PW, GAP, FC, SIG, MUL, MULADD, ADD |
| `src`, `src2`, `dst` | buffer numbers (feature-map buffers, or GP words for GAP/FC/SIG) |
| `ntile_m1` | input tiles − 1 for PW/FC |
| `h`, `w` | map size (of the input for DW) |
| `stride2`, `relu`, `bn_post`, `shift` | requantisation and layer options |
| `wbase` | first weight-buffer word of the layer |
| `recip` | pooling reciprocal |
| `ddr_addr` | first DDR word for LOAD/STORE |

The controller's state machine is IDLE → FETCH → (WLOAD) → RUN → DRAIN →
FETCH … → DONE.

- **FETCH** latches the next descriptor and computes the beat count, the
  output count and the weight count.
- **WLOAD** runs only for DW, PW and FC. It reads `wbase, wbase+1, …` from
  the weight buffer and steers each word into the right engine register.
  For PW with `bn_post`, the last two words go to the BN rows.
- **RUN** issues one beat per cycle. A beat is a buffer read plus sideband
  signals (valid, pad, first, last, tile, row, column) that are delayed one
  cycle so they arrive with the read data.
- **DRAIN** waits until every result has been written. For GAP it first
  pulses `finish` to the pooling unit.

Results are counted, not timed. The controller writes whatever an engine
reports as valid to the next destination address. It moves to the next layer
once the expected number of results has been written. This makes the
controller independent of each engine's latency.

**DDR port.** The DDR port uses a valid/ready request channel: address, a
write flag and 256 bits of write data. The read responses come back in order
on `ddr_rsp_valid`/`ddr_rsp_data`.

- A request is held unchanged while `ready` is low. This is checked by an
  assertion.
- **LOAD** issues h·w reads and writes each response to the next address of
  `dst`.
- **STORE** reads `src` ahead of the handshake, so one word is accepted per
  cycle whenever `ready` is high.

**Rates:**

| layer | cycles |
|---|---|
| DW | (h+1)(w+1) |
| PW, FC | h·w·T |
| GAP, MUL, MULADD, ADD | h·w |
| SIG | 1 |
| LOAD, STORE | h·w plus DDR stalls |

Each layer also costs a few cycles of fetch and drain, and WLOAD costs 9 or
32·T (+2) cycles.

## Sizing

| parameter | value | origin |
|---|---|---|
| lanes (channels per beat) | 32 | RoadNet-RT FPGA design |
| data type | INT8 | RoadNet-RT FPGA design |
| feature-map buffer | 35 × 120 × 32, 8 buffers | RoadNet-RT FPGA design |
| weight buffer | 4200 words × 32 B = 134,400 B | sized for the network's 133,870 weights |
| pointwise input tiles per pass | 4 (128 input channels) | this design |
| program length | 64 descriptors | this design |
| GP words | 8 | this design |

A 280 × 960 KITTI input is 64 times larger than one buffer. The host must
therefore cut full-resolution layers into 35 × 120 tiles and move them
through LOAD/STORE. Tile overlap for the 3×3 halo is the host's job as well.

At 250 MHz the pointwise array peaks at 512 GOP/s and the depthwise array at
144 GOP/s. Only one engine is busy in any layer.

## Departures from the original accelerator and open points

- **Hand-written RTL.** The original was built with HLS and HDL Coder,
  and only block diagrams of it are published. The pipelines, the padded-grid
  line buffer, the descriptor format, the buffer crossbar and the DDR protocol
  here are all this design's own.
- **Writable weights.** The original hard-codes the weights into on-chip
  memory. Here the weight buffer has a write port, so one bitstream can run
  any weight set.
- **General buffers.** The original describes its buffers as ping-pong
  buffers. Here any buffer can be the source or destination of any layer.
- **Attention hardware choices.** The sigmoid approximation (PLAN), the Q3.4
  input scale and the 8-bit output scale are choices, as are the rounding
  rules and all accumulator widths.
- **BN after ReLU.** The Q1.6 format of the BN scale is a choice.
- **Not in hardware:** the original overlaps ARM pre- and post-processing with
  the FPGA. Image resizing and any upsampling or concatenation are left to the
  host. The host can do a concatenation for free by choosing which buffers
  hold which tiles.
- **No performance claim.** The measured 196.7 frames/s of the original was
  not reproduced. No full network was run; only single layers and a short
  program that uses every operation were simulated.
- **Beat count is fixed by the map.** The padded grid costs 3.7 % extra
  cycles on full-size depthwise layers. A layer whose row or column count
  exceeds the index widths (35 rows, 120 columns) is not supported.

## Files and simulation

- `rtl/rn_pkg.sv` holds the types, constants, descriptor and requantisation
  functions.
- Each other file holds one module. `rtl/roadnet_rt_top.sv` is the top level.
- `tb/` holds one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.
- `tb/ddr_model.sv` is a behavioural DDR with random back-pressure and a
  fixed read latency.

`tb_roadnet_rt_top` runs the top at its default size. Its program is:

1. two LOADs;
2. a depthwise layer;
3. a 2-tile pointwise layer;
4. a pointwise layer with BN after ReLU;
5. a stride-2 depthwise layer;
6. a full GAM/FFM sequence;
7. a residual ADD;
8. STOREs;
9. a full 35 × 120 LOAD → DW → STORE.

It compares every stored word with a reference model in the testbench. It
also counts each mechanism (padding beats, extra tiles, stride-2 outputs, BN
layers, DDR stalls and others), and fails if any of them never happened.

Run any testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/rn_pkg.sv $(ls rtl/*.sv | grep -v rn_pkg) tb/ddr_model.sv tb/tb_roadnet_rt_top.sv \
  --top-module tb_roadnet_rt_top -o sim
./obj_dir/sim
```

The full-size top-level test takes about 20 s of simulation after a few
minutes of compilation.
