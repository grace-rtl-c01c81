# An int8 layer accelerator for a generative face-video decoder

A generative face-video codec sends very little for each frame: a handful of
keypoints with their local motion. The decoder then rebuilds the picture
with a neural network. It estimates dense motion from the sparse keypoint
motion, warps the features of a reference frame, and re-synthesises the
frame with a convolutional generator. Almost all of the decoder's work is in
that network. This RTL is the programmable-logic half of such a decoder on a
Zynq-class device. It is an accelerator that runs the network one layer at a
time. The ARM host does everything else: entropy decoding, decoding the
reference frame, and sparse motion. Between layers the host only writes a
few registers.

The network is quantised to 8-bit integers. Each output channel has its own
scale, and BatchNorm is folded into the preceding convolution. So every
operator reads int8 tensors from DDR and writes int8 tensors back. The
accelerator has two engines behind one register file and one Load/Store
module:

* **Convolution engine** (`conv_sched`, `conv_pe`, `conv_engine`). It runs
  any k x k convolution with k up to 7 and stride 1 or 2, with optional
  bias and a fused ReLU or Sigmoid. Ping-pong buffers let loading,
  computing and storing overlap.
* **Plane engine** (`plane_sched` and five small PEs). It handles the
  operators that are not convolutions and are specific to this codec:
  * 2x2 average pooling
  * 2x nearest upsampling
  * Hadamard product and matrix add
  * softmax across channels
  * bilinear grid sampling (warping)

Only one engine runs at a time. Which one runs is selected by the `OP`
register.

```
            AXI4-Lite                          memory read / write ports
  host ───► axil_ctrl_regs ──cfg──┐                      ▲      │
                ▲ status          │                      │      ▼
                │          ┌──────┴──────┐       tile_storer  tile_loader
                │          │ conv_sched  │◄──────────┤          │
                └──done────│ plane_sched │◄──────────┴──────────┘
                           └─────────────┘   (shared by both engines)
```

## Running a layer

The host writes the layer description, sets `CTRL.start` and polls
`STATUS`. All registers are 32 bits wide.

| offset | name      | meaning |
|-------:|-----------|---------|
| 0x00 | CTRL      | bit 0: write 1 to start (self-clearing). CTRL reads as 0. |
| 0x04 | STATUS    | bit 0 busy, bit 1 done, bit 2 error. Done and error stay set until the next start. Read-only. |
| 0x08 | OP        | 0 conv, 1 avg-pool, 2 upsample, 3 Hadamard, 4 add, 5 softmax, 6 grid sample |
| 0x0C | IN_H      | input height |
| 0x10 | IN_W      | input width |
| 0x14 | C_IN      | input channels (for the plane operators, the channel count) |
| 0x18 | C_OUT     | output channels (convolution) |
| 0x1C | KSIZE     | kernel size 1..7 |
| 0x20 | STRIDE    | 1 or 2 |
| 0x24 | PAD       | zero-padding width, 0..15 |
| 0x28 | PAD_VALUE | int8 value used for padding (the input zero point) |
| 0x2C | ACT       | 0 none, 1 ReLU, 2 Sigmoid |
| 0x30 | BIAS_EN   | 1: initialise the accumulation with the per-channel bias |
| 0x34 | ADDR_IN   | first operand, C x H x W bytes |
| 0x38 | ADDR_IN2  | second operand (Hadamard/add), or the 2 x H x W grid map |
| 0x3C | ADDR_W    | weights, Cout x Cin x k x k bytes |
| 0x40 | ADDR_PRM  | per-output-channel words (see below) |
| 0x44 | ADDR_OUT  | result |
| 0x48 | QMULT     | requantisation multiplier for Hadamard/add (16 bits) |
| 0x4C | QSHIFT    | requantisation shift for Hadamard/add (6 bits) |
| 0x50 | QZERO     | output zero point for Hadamard/add (int8) |
| 0x54 | CYCLES    | cycles taken by the last run. Read-only. |

A start is ignored while the accelerator is busy. A plane operator that
cannot run is refused: it ends at once with `done` and `error` set. This
happens for softmax or grid sampling on a plane larger than one tile, and
for an unknown op code. Writes to unused or read-only offsets are
acknowledged and dropped.

## Number formats

| quantity | format |
|---|---|
| activations, weights | int8. An activation's zero point is what `PAD_VALUE` pads with; weights are symmetric. |
| products and sums | int32 |
| requantisation | `y = sat8(round(acc * mult / 2^shift) + zero)`. `mult` is unsigned 16-bit, `shift` 0..63, and rounding is half-up. `mult`, `shift` and `zero` are per output channel for a convolution; for Hadamard/add they come from the registers. |
| ReLU | `max(y, zero)`: clamps at the output zero point, which is real zero |
| Sigmoid input | Q3.4 (x/16) |
| Sigmoid output | Q0.7 (127 = 1.0) |
| softmax input | Q3.4 |
| softmax output | Q0.7 |
| grid map | int8 read as Q0.7 in [-1, 1) |
| sampling coordinates | 8 bits with 2 fraction bits |

Sigmoid is a four-segment piecewise-linear curve. Its slopes are 1/4, 1/8
and 1/32, and it saturates at |x| >= 5. The largest error is about 3 output
LSB.

## Convolution engine

### Tiling

The output is cut into To x To tiles (To = 16) and the channels into groups
of Tn input channels (8) and Tm output channels (16). One *job* is a triple:

* output-channel group g
* output tile (ty, tx)
* input-channel group ci

For each job the engine needs:

* an input tile of Tn x Ti x Ti bytes, with Ti = (To-1)*S + k (at most 37)
* a kernel tile of Tm x Tn x k x k bytes

It accumulates the results into a Tm x To x To int32 output tile. The loop
order is g, then ty, then tx, with ci innermost. So an output tile stays on
chip while all C_in/Tn input groups are added into it. It goes to DDR only
after the last one.

The datapath (`conv_engine`) has Tm groups of Tn multipliers. Each group
feeds a binary adder tree. The Tn input pixels are broadcast to all Tm
groups, and each group gets its own Tn weights. `conv_pe` walks the taps of
the tile. There is one tap per cycle, ordered by output row, output column,
ky, kx. Each tap gives Tm x Tn multiply-accumulates. One job therefore
takes To*To*k*k cycles (plus a few to start and drain). The bias needs no
separate pass. On the first input group the partial sum read from the
output buffer is replaced by the bias (or by 0 when `BIAS_EN` is clear).

### Ping-pong buffering

Every buffer has two banks (`pingpong_buffer`, built from `lane_ram`):

| buffer | per bank | default size |
|---|---|---|
| input | Tn lanes x Ti*Ti bytes | 8 x 1369 B |
| kernel | Tm*Tn lanes x k*k bytes | 128 x 49 B |
| output | Tm lanes x To*To int32 | 16 x 256 x 32 bit |
| per-channel words | two sets of registers | |

`conv_sched` runs three sequencers at once. Each bank has a full flag.

* **Load** fills the free input/kernel bank. On the first ci step of a job
  it also loads the per-channel words.
* **Compute** runs `conv_pe` on the full bank and accumulates into the
  current output bank. After the last ci step it hands that bank to the
  store sequencer and continues in the other bank.
* **Store** streams the finished bank through `requant_act` and
  `tile_storer`.

The next tile therefore loads while the current one computes. A finished
output tile is stored while the next one accumulates. The output buffer
has two read ports, one for compute and one for store, and they always read
different banks.

Compute takes To²k² cycles per job. The loader moves one element per cycle,
so it needs about Tn·Ti² + Tm·Tn·k² cycles. For 7x7 kernels the engine is
compute-bound. For 3x3 and 1x1 kernels it is load-bound. The layer sums under
"Sizes at the default parameters" show this. A wider memory path in the
loader is the obvious next step, if throughput matters.

### DDR layout

* Activations are C x H x W bytes, row-major.
* Weights are Cout x Cin x k x k bytes.
* Each output channel has three little-endian 32-bit words at
  `ADDR_PRM + 12*c`:
  * the bias (int32, in accumulator units)
  * the multiplier (bits 15:0)
  * `{zero point [15:8], shift [5:0]}`

The output size is `(H + 2*PAD - k)/S + 1`. The loader creates padding
itself, so padded tensors are never stored in DDR. The padding value is
`PAD_VALUE`. Channels that a partial last group does not have read as 0.

## Plane engine

The plane operators work on whole channel planes, LANES = 4 channels at a
time. A plane tile is up to PT x PT = 64 x 64 pixels. That is exactly one
channel of the codec's 64 x 64 motion resolution. For each group of four
channels and each tile, `plane_sched` does three steps in turn:

1. It loads the operands into the plane buffers A (and B, G).
2. It runs one PE, which writes buffer O.
3. It stores O.

These steps are not overlapped. Every buffer is 4 lanes x 4096 bytes, except
G, which is 2 lanes. Larger planes are tiled for pooling, upsampling and
the element-wise operators.

| PE | operation | cycles per output pixel |
|---|---|---|
| `avgpool_pe` | 2x2 mean, stride 2, rounded half up, same scale in and out | 4 |
| `upsample_pe` | 2x nearest neighbour (PT/2 tile in, PT tile out) | 1 |
| `eltwise_pe` | `requant(a*b)` or `requant(a+b)`, using QMULT/QSHIFT/QZERO | 1 |
| `softmax_pe` | softmax over all C channels of each pixel | 1 per pass |
| `grid_sample_pe` | bilinear warp of the channels by a grid | 6 |

### Softmax

The sum runs over channels, not over pixels. The engine therefore makes two
passes over all channel groups:

1. The first pass adds exp(x) of every channel into a 32-bit sum per pixel
   (4096 x 32 bits).
2. The second pass reads each group again and writes
   `round(127 * exp(x) / sum)`.

`exp` is computed as 2^(x·log2 e), with log2 e ≈ 369/256. The fractional
power is approximated by 1 + f, and the result is kept as an unsigned Q.12
number. exp(-8) is still one LSB, and 256 channels of exp(7.9) still fit in
32 bits. The maximum is not subtracted first. With Q3.4 inputs the
exponentials cannot overflow, so it is not needed. Outputs are within about
±6 LSB of exact softmax. A softmax over a plane larger than 64 x 64 is
refused.

### Grid sampling

The warp runs in two loops, and the first one runs once per layer:

1. **Map.** Each grid position holds two int8 values, gx and gy, in [-1, 1).
   They become source coordinates `u = ((gx+128)*(W-1)) >> 6`, and v the
   same way with gy and H. Each coordinate is 8 bits, with 6 integer bits
   and 2 fraction bits. The coordinates go into a buffer that all channel
   groups share.
2. **Sample.** For each destination pixel the PE takes the integer corner
   (u0, v0) and the quarter offsets du, dv. It reads the four neighbours in
   every lane at once and writes

   `round(((4-du)(4-dv)·s00 + (4-du)dv·s01 + du(4-dv)·s10 + du·dv·s11) / 16)`

Neighbours outside the source plane count as 0. With the normalisation
above, u never exceeds 4(W-1), so this case hardly occurs. The plane must
fit one 64 x 64 tile. A 256-channel warp is 64 groups of 4 channels, each
taking about 14 cycles per pixel for load, sample and store together.

## Load/Store module and memory port

**`tile_loader`.** This is a general block copier, driven by a descriptor
(`ld_desc_t` in `grace_pkg`). It copies a 4-D block of size
n_o x n_i x rows x cols:

* It has arbitrary strides, for byte or 32-bit elements.
* Each element has row and column limits. Elements outside those limits
  get the padding value, and missing channels get 0. Neither uses a memory
  read.

It keeps up to 8 reads in flight, using an in-order tag FIFO. It accepts a
read response only when the oldest pending element is a memory element. As
a result, fills and data reach the buffers in order, and the loader can
sustain one element per cycle.

**`tile_storer`.** This writes a channels x rows x cols block of bytes. It
writes one byte per cycle, with a one-hot byte strobe on the 32-bit write
port.

**The memory port.** It is not a full AXI master. It is a simpler
in-order interface:

* a read request (valid/ready, byte address)
* a read response (valid/ready, the aligned 32-bit word)
* a write channel (valid/ready, with address, data and strobes together)

An AXI HP master would need a wrapper with ID, burst and response handling.
Every handshake holds its payload stable while valid is high and ready is
low. Assertions in the testbench memory model check this.

## How far it follows the paper

**Taken from the published design:**

* the split into an ARM host and a PL accelerator
* register-driven, layer-by-layer control, with scalars over AXI4-Lite and
  data over memory-mapped masters
* the Load/Store module
* tiled convolution with Tn x Tm unrolled multipliers and adder trees
* bias initialisation of the output tile
* accumulation over the input channels before a tile is stored
* activation applied on the way out
* ping-pong buffers
* int8 static per-channel quantisation, with BatchNorm folded in
* the set of processing elements
* for grid sampling: the 8-bit coordinates with 2 fraction bits, the
  1 x 64 x 64 tile and the unrolling over channels that share one
  coordinate buffer

**This design's own choices:**

* **Tile sizes.** Tn = 8, Tm = 16 and To = 16 are not published. With 128
  multipliers they stay within the roughly 150 DSP slices the published
  convolution module uses.
* **One convolution engine.** A single engine with a run-time kernel size
  replaces the separate 3x3 and 7x7 convolution PEs.
* **Arithmetic and formats.** These are ours:
  * the requantisation formula
  * the piecewise-linear sigmoid
  * the base-2 softmax
  * the grid normalisation and zero border
* **Plane engine and memory.** These choices are ours too:
  * the plane engine's lack of double buffering
  * the memory interface
  * the register map
* **Integer arithmetic throughout.** The published figures quote mixed
  int8/float32 precision without saying which operators keep floats. Here
  every operator works on int8 with integer rescaling. Weights are assumed
  symmetric (zero point 0). The input zero point's contribution to a
  convolution is assumed to be folded into the bias; the hardware uses it
  only as the padding value.
* **Hadamard product with a one-channel map.** Multiplying by the
  one-channel occlusion map needs that map stored once per channel. The
  plane engine multiplies tensors of equal shape.

**Not built:**

* the ARM processor and its software (driver, entropy decoding, reference
  frame decoding, sparse motion estimation)
* the AXI interconnect
* the DDR controller

The accelerator's register and memory ports are its top-level ports.

## Sizes at the default parameters

Yosys maps the default top to:

* about 3,100 cells (before technology mapping)
* 8,000 flip-flops
* 1.2 Mbit of RAM in arrays

Most of the RAM is the convolution output buffer and the plane buffers.
The convolution datapath has 128 8x8 multipliers.

For the generator's 7x7 input layer (3 → 64 channels, 256 x 256), the
engine needs about:

* 12.8 M compute cycles
* 10.4 M load cycles

That is about 0.13 s at 100 MHz. The 3x3 layers are load-bound. A whole
frame would therefore take longer than the 0.42 s that 2.38 frames per
second allows. The loader's one byte per cycle is what limits it.

`tb_agc_workloads` runs the 64 x 64 part of the decoder at full size,
against a memory that stalls about one cycle in five. It reports these
cycle counts:

| layer | cycles | time at 100 MHz |
|---|---:|---:|
| mask head, 7x7 conv, 108 → 11 channels | 2,826,339 | 28 ms |
| softmax over the 11 masks | 201,771 | 2 ms |
| warp of 256 feature channels | 4,209,493 | 42 ms |
| Hadamard product, 256 channels | 4,195,815 | 42 ms |

The plane operators spend most of their time loading and storing, one
byte per cycle, with no overlap.

## Simulation

Every block has a self-checking testbench in `tb/`. Each compares the block
with a model written inside the testbench. Each ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

`tb/ddr_model.sv` is the memory used by the loader, storer, scheduler and
top-level tests. It has:

* random ready stalls
* random read latency
* byte-strobe writes
* counters that show stalls actually happened

`tb_grace_accel` runs the top at its default parameters. It programs the
registers over AXI4-Lite and runs this chain of layers:

1. 7x7 convolution with ReLU
2. pooling
3. strided 3x3 convolution
4. upsampling
5. softmax over 11 masks
6. a 4-channel warp
7. Hadamard product
8. add
9. 7x7 convolution with Sigmoid
10. a refused softmax
11. a final pooling

It checks every output byte against a reference model. It also counts:

* load/compute overlap
* store/compute overlap
* padding and zero fills
* memory stalls
* ignored starts
* engine switches
* refusals

It fails if any of those mechanisms never occurs.

`tb_agc_workloads` runs, at full size and again with every output
checked:

* the 64 x 64 mask head
* the softmax
* the 256-channel warp
* the occlusion product
* a residual-block 3x3 convolution, cut to 16 channels

It takes about half a minute.

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -j 8 \
    rtl/grace_pkg.sv $(ls rtl/*.sv | grep -v grace_pkg) \
    tb/ddr_model.sv tb/tb_grace_accel.sv --top-module tb_grace_accel
./obj_dir/Vtb_grace_accel
```

The package must come first. `-Wno-fatal` is there because Verilator
warns about width changes that are intended. Any other block works the same way: pass the package, the RTL files and
`tb/tb_<module>.sv`, with `--top-module tb_<module>`. The top-level test
takes a few seconds. Changing a parameter of the top means overriding it
with `-G`. The testbenches of the schedulers and of `conv_pe` already use
smaller tiles, to keep them quick.
