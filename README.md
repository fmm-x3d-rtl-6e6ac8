# A streaming X3D bottleneck block in SystemVerilog

X3D-M is a 3D convolutional network for human action recognition. It takes a
clip of 16 RGB frames of 256 x 256 pixels. Its body is 26 residual bottleneck
blocks. One way to run it on an FPGA is a *streaming architecture*. The network
is cut into partitions, one bottleneck block each. Every layer of a partition
gets its own hardware block, and the blocks are chained by streams. Partitions
are loaded one after another by reconfiguring the device, and each one
processes a whole batch of clips before the next is loaded, so the
reconfiguration time is spread over the batch.

This repository gives RTL for one such partition, `x3d_partition`, and for the
layer blocks it is built from. Two things make an X3D block harder to stream
than a plain chain of layers:

* **Branches.** Every block has a residual shortcut. Most blocks also have a
  squeeze-and-excitation (SE) branch. Data forks, travels two paths of very
  different delay, and merges again in an element-wise add or multiply. The
  early side of each branch needs a buffer deep enough that the merge never
  starves the late side.
* **Global average pooling (GAP).** The SE branch averages the whole feature
  map before it can scale it. Done exactly, the first scale value exists only
  after the last pixel has passed, so the main path would have to buffer a
  whole feature map. This design uses the *previous* clip's averages instead
  (next section). The SE branch then never holds up the main path.

All arithmetic is 16-bit fixed point. Feature maps are Q7.9 (9 fraction bits).
Weights are Q6.10.

## Partition shapes

Every partition starts at the ReLU that ends the previous block and ends at the
residual add:

```
Type 1 / Type 2                          Type 3

ReLU ──┬──────────────────────┐          ReLU ──┬────────────────┐
       │                      │                 │                │
   conv_a 1x1x1               │             conv_a 1x1x1         │
   ReLU                       │             ReLU                 │
   conv_b 3x3x3 depth-wise ─┐ │             conv_b 3x3x3 dw      │
       │                  GAP │             swish                │
       │             conv 1x1x1│             conv_c 1x1x1         │
       │                  ReLU │                 │                │
       │             conv 1x1x1│                 └──── Add ───────┘
       │               sigmoid │
       └──── Mul (broadcast) ──┘ │
             swish               │
             conv_c 1x1x1     shortcut conv 1x1x1
                 └────── Add ────┘
```

Blocks of Types 1 and 2 are built with `HAS_SE = 1, SC_CONV = 1`. Type 3 is
built with `HAS_SE = 0, SC_CONV = 0`, which gives an identity shortcut and
requires `C_IN == C_OUT` and `STRIDE == 1`. In X3D-M there are 4 blocks of
Type 1, 11 of Type 2 and 11 of Type 3.

The published block diagrams for Types 1 and 2 show the same graph, each with
a shortcut convolution, and the default build follows them. In X3D itself,
only the first block of a stage has a projection shortcut. A block with SE
and an identity shortcut is therefore likely what Type 2 was meant to be.
`HAS_SE` and `SC_CONV` are independent, so that block is built with
`HAS_SE = 1, SC_CONV = 0`, and the end-to-end testbench runs it too.

The kernel of each convolution (point-wise, depth-wise 3x3x3 with padding 1,
stride on conv_b and on the shortcut) is taken from the X3D architecture, not
from the diagrams.

## Previous-clip GAP statistics (`gap3d`)

`gap3d` keeps two register files of C sums each:

* `acc` collects the sums of the clip that is streaming in now.
* `prev` holds the sums of the last complete clip.

When the first word of a clip arrives, the block starts sending the C means
of `prev`, one per cycle. When the last word of the clip arrives, `acc` is
copied into `prev` and cleared. So the scale vector applied to clip *b* is
computed from clip *b-1*. The first clip after reset sees means of zero.

The mean is `sum * round(2^24 / (D*H*W)) >>> 24`, saturated to Q7.9. This
replaces a divider with a constant multiply.

The rest of the SE branch is two point-wise `conv3d` instances on a 1x1x1
volume, a ReLU and a sigmoid. Its result goes into a small FIFO.

The broadcast multiply (`eltwise3d`, broadcast mode) works per clip. It first
loads the C-entry vector. It then scales channel c of every position of the
clip by entry c, and then loads the next vector. Only the main-path FIFO
(`M_DEPTH` words) sits between conv_b and the multiply. It absorbs the few
thousand cycles the SE branch needs at the start of each clip. It is not a
whole feature map.

This trades accuracy for throughput. The accuracy effect of using the previous
clip's statistics has to be judged at network level. The RTL only reproduces
the mechanism.

## The convolution engine (`conv3d`)

`conv3d` handles every convolution in the network through build-time
parameters:

* kernel `KD x KH x KW`
* strides `SD/SH/SW`
* zero padding `PD/PH/PW`
* `GROUPS`: 1 for a full convolution, `CIN` for depth-wise

A dot product has `N = KD*KH*KW*CIN/GROUPS` terms. `P_MAC` multipliers work
in parallel, so one dot product takes `ceil(N/P_MAC)` cycles. `P_MAC = N` is
fully unrolled (one result per cycle). `P_MAC = 1` is fully folded (one
result per N cycles). `P_MAC` is the knob a design-space exploration turns to
trade DSPs for rate.

The inside of the engine is this design's own:

* **Input.** Words arrive one per cycle, position-major and channel-fastest.
* **Window buffer.** A circular buffer holds exactly the span of the stream a
  kernel window can cover, `((KD-1)*H*W + (KH-1)*W + KW) * CIN` words. That is
  `KD-1` frames plus `KH-1` rows plus `KW` pixels.
* **When an output is computed.** Output positions are produced in raster
  order. Position *o* can be computed once the far corner of its window
  (clamped to the input edge) has fully arrived. Because that corner only
  moves forward as *o* moves forward, one comparison per cycle is enough.
* **Computing.** While an output position is being computed, the input is
  held off (`in_ready = 0`). For each output channel the engine accumulates
  `P_MAC` products per cycle in 48 bits, starting from the bias. It then
  presents the result on the output: truncated by 10 bits and saturated to
  Q7.9.
* **Reading the window.** A window element is read at "last written address
  minus its distance in the stream from the last written word". This needs no
  modulo arithmetic. Elements that fall in the padding read as zero.
* **Timing.** One clip takes `D*H*W*CIN` input cycles plus
  `1 + COUT*(ceil(N/P_MAC)+1)` cycles per output position. Clips follow each
  other with no gap.
* **Weights and biases.** They live in on-chip arrays. They are written
  through `cfg_we / cfg_addr / cfg_wdata` before a run:
  * weight *n* of output channel *co* goes to address `co*N + n`, with
    `n = ((kd*KH + kh)*KW + kw)*(CIN/GROUPS) + ci_in_group`;
  * the bias of channel *co* goes to address `COUT*N + co`.

The bias is this design's addition. It is where a folded batch normalisation
goes.

## Streams, forks and branch buffers

Every arc of the graph is a 16-bit valid/ready stream. A word moves on a
rising edge when `valid` and `ready` are both high. An assertion in each
producer checks that a word that is offered stays unchanged until it is taken.

`stream_fork` copies a stream onto two arcs. It is an eager fork: each output
takes the word when it is ready, and the input advances once both have taken
it.

`stream_fifo` is the branch buffer. Its `in_ready` and `out_valid` depend only
on its state, so it also breaks combinational handshake paths.

The shortcut FIFO must hold what the shortcut produces while the main path
fills conv_b's three-frame window. It is sized as one output frame plus four
rows plus eight positions:

* `(OH*OW + 4*OW + 8) * C_OUT` words with a projection shortcut;
* `(H*W + 4*W + 8) * C_IN` words with an identity shortcut.

If this buffer is too small, the partition deadlocks: the shortcut blocks the
fork, and conv_b never receives the rows it is waiting for.

`act3d` applies ReLU, sigmoid or swish (`x * sigmoid(x)`) at one word per
cycle, with one register of latency. The sigmoid is the shift-and-add PLAN
approximation (error below 0.02):

| \|x\| range | sigmoid(\|x\|) |
|---|---|
| \|x\| >= 5 | 1 |
| 2.375 <= \|x\| < 5 | \|x\|/32 + 0.84375 |
| 1 <= \|x\| < 2.375 | \|x\|/8 + 0.625 |
| \|x\| < 1 | \|x\|/4 + 0.5 |

For negative inputs, sigmoid(x) = 1 - sigmoid(\|x\|).

`eltwise3d` adds or multiplies two streams (saturating). In normal mode it
takes one word from each input in the same cycle, so it runs at the rate of
the slower input.

## Default size and measured rate

The defaults describe the first block of the last stage (res5) of X3D-M on
256 x 256 clips:

| Parameter | Default |
|---|---|
| Input | 16 x 16 x 16 x 96 |
| Inner width | 432 |
| SE width | 32 |
| Output | 16 x 8 x 8 x 192 |
| `P_MAC`: conv_a / conv_b / conv_c / shortcut / SE | 32 / 27 / 48 / 32 / 32 |

These sizes come from the X3D architecture. The `P_MAC` values are
illustrative, not the output of a design-space exploration.

At these settings the full-size testbench measures 8.35 M cycles per clip in
steady state: 58.8 ms per clip at 142 MHz. conv_a limits the rate. Its 4096
input positions each need 432 output channels x (3 + 1) cycles.

In the usual streaming model, a batch of B clips takes
`(fill + II * (B - 1)) / f_clk`. Here `II` is the cycles per clip of the
slowest layer, and `fill` is the time for the first clip to get through.
The measured values for this partition are `fill` = 8.54 M cycles (first
output clip complete) and `II` = 8.35 M cycles. For example, 100 clips take
about 5.9 s at 142 MHz.

To run another block of X3D-M, set the channel counts, `D/H/W`, `STRIDE`,
`HAS_SE/SC_CONV` and the `P_MAC_*` values. Each partition is built
separately, just as each would be its own FPGA configuration.

## What is not here

* **Coarse parallelism.** Only the `P_MAC` dot-product folding is built. Every
  stream carries one word per cycle. The parallel input and output streams
  per layer (`s_in`, `s_out`) are not built.
* **Memory side.** Loading partitions from off-chip memory and writing their
  results back is not built, and neither is device reconfiguration. The
  partition's input and output are plain stream ports.
* **Exact GAP.** Only the previous-clip statistics variant is built, not the
  exact-GAP baseline.
* **Stem and head.** X3D's stem (conv1) and head (conv5, pooling, fully
  connected layers) are not among the three partition types and are not
  given.

## Files and simulation

`rtl/`:

| File | Contents |
|---|---|
| `x3d_pkg.sv` | Fixed-point types, activation/element-wise enums, saturating helpers, PLAN sigmoid |
| `conv3d.sv` | Convolution engine |
| `act3d.sv` | Activations |
| `eltwise3d.sv` | Element-wise add / multiply |
| `gap3d.sv` | Pooling with previous-clip statistics |
| `stream_fork.sv` | Two-way fork |
| `stream_fifo.sv` | Branch buffer |
| `x3d_partition.sv` | The partition (top) |

`tb/`:

* Each block has a self-checking testbench, `tb_<block>.sv`. `conv3d_case.sv`
  and `partition_checker.sv` are helpers. The checker holds a layer-by-layer
  model of the partition written with plain loops.
* `tb_x3d_partition` runs three small partitions under random stalls: Type 1
  (three clips), SE with an identity shortcut, and Type 3. It counts input stalls, output
  back-pressure, shortcut-buffer use, SE vector loads and GAP handovers.
* `tb_x3d_partition_full` runs the default partition over two clips and
  checks all 393,216 output words. It takes about 1.5 minutes.

Every testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/x3d_pkg.sv tb/tb_x3d_partition.sv \
          --top-module tb_x3d_partition -Wno-fatal
./obj_dir/Vtb_x3d_partition
```
