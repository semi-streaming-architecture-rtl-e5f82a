# Semi-streaming CNN engines for MobileNetV2, in SystemVerilog

A fully streaming CNN accelerator builds one hardware block per layer and lets
pixels flow through all of them at once; that runs out of FPGA resources for a
network as deep as MobileNetV2. A single-engine accelerator reuses one generic
array for every layer, but needs a processor to feed it instructions and fits
no layer type well. The *semi-streaming* architecture sits in between: it uses
one specialised engine per **layer type** and reuses the set for every layer.
MobileNetV2 needs five:

| engine | layer type | work per clock |
|---|---|---|
| C2D | the 3x3x3 -> 32 entry convolution | one 3x3 window x 32 filters (864 MACs) |
| DWC | 3x3 depthwise convolution, and average pooling | one 3x3 window x 16 channels (144 MACs) |
| PRO | pointwise projection (many channels -> few) | 16 channels x 16 filters (256 MACs) |
| ADD | residual addition with rescaling of both operands | 16 channels |
| EXP | pointwise expansion (few channels -> many) | 16 channels x 16 filters (256 MACs) |

Every MobileNetV2 bottleneck block is expansion -> depthwise -> projection ->
(optional) residual add, so the engines are wired in a ring and the
activations go round it once per block:

```
            in (224x224x3 image)
              |
             C2D --A (ch 0-15)--------------+
              |                             v
              +--B (ch 16-31)--> BUFF A --> DWC --> BUFF B
                                   ^                  |
                                   |                  v
                                  EXP <--- ADD <---- PRO
                                         (+FIFO)
                                           |
                                           +--> out (final result)
             DWC (pooling) --> out
```

PRO, ADD and EXP pass data to each other as a stream, pixel after pixel,
with all channels of one pixel together. DWC cannot join that stream: it
needs a whole frame of a channel group before it can finish any output,
while the pointwise engines need all channels of a pixel. Data entering and
leaving DWC is therefore parked and reordered in an activation buffer (BUFF
A before it, BUFF B after it), and the stream stops there. That stop is what
"semi"-streaming refers to. One pass round the ring is a **round** and has
two stages: stage 1 is DWC (BUFF A -> BUFF B), stage 2 is PRO -> ADD -> EXP
(BUFF B -> BUFF A). MobileNetV2 takes 17 rounds plus the entry layer.

The RTL here implements the five engines, the two buffers, the residual
FIFO and the ring, following the design described in *Semi-Streaming
Architecture: A New Design Paradigm for CNN Implementation on FPGAs*
(Shaydyuk and John). The original engines were written in a high-level
synthesis language; this is an independent register-transfer
implementation of what that paper describes. Where the paper is silent,
the choice made here is stated below.

## Numbers and the two stream orders

**Beats.** All inter-engine traffic is 128-bit *beats*: 16 unsigned 8-bit
activations, channel 0 in bits 7:0. Channels are handled in groups of 16
everywhere. A layer with n channels has n/16 *batches* (the paper pads
layers whose channel count is not a multiple of 16 with zero-valued
channels).

**Stream orders.** A tensor of P pixels x B batches travels either

* *pixel-major*: pixel 0 batch 0, pixel 0 batch 1, ..., pixel 1 batch 0, ...
  (what PRO, ADD and EXP produce and EXP consumes), or
* *pass-major*: batch 0 of every pixel in raster order, then batch 1 of
  every pixel, ... (what DWC consumes and produces; each batch is one
  "pass" of DWC over the frame).

PRO needs one more variation. It must see each pixel's B input beats once
for every one of its output filter batches, so BUFF B reads pixel-major with
each pixel *repeated* FPASS times.

**Quantised arithmetic.** The network is the 8-bit post-training-quantised
MobileNetV2. Every convolution computes, per output channel,

```
ACC = bias + sum_i (a_i - az) * (w_i - wz)          (az, wz: zero points)
RES = ((ACC * MULT) >>> SHIFT) + oz                 (MULT: 32-bit unsigned, SHIFT: 8-bit)
OUT = min(max(RES, act_min), act_max)
```

MULT/SHIFT are the fixed-point form of the real scale ratio. `ACC` is 32-bit
signed, the product 65 bits, and the shift is arithmetic and truncating.
One MULT/SHIFT/zero-point set is used per layer, as in the paper's
pseudo-code. Padding pixels take the value `az`, so they add nothing. The
package function `ss_pkg::requantize` and the module `requant` hold this
step.

The residual addition first brings both operands to a common scale:

```
A1  = (MULT1 * ((IN1 - a1z) << 20)) >>> SHIFT1       IN1: projection output
A2  = (MULT2 * ((IN2 - a2z) << 20)) >>> SHIFT2       IN2: saved shortcut
OUT = clamp(((A1 + A2) * MULT3) >>> SHIFT3 + oz)
```

A1 and A2 are kept as 32-bit signed values.

## The engines

### C2D: entry convolution (`c2d_engine`)

The image arrives as a raster stream of 3-byte pixels. `window3x3` keeps
the two previous image rows in two line memories, each `MAX_COLS` words of
24 bits (one memory per line, as wide as a pixel and as deep as a row). It
also keeps the previous two columns in registers, so each new pixel
completes a 3x3 window. All 32 filters are applied to the window in the
same clock. The 27 weights and the 16-bit bias of each filter are registers
(in the paper they are "completely partitioned"). The 32-channel result is
split: channels 0-15 go out on stream A, 16-31 on stream B. A result is
retired only when both streams have taken it.

Padding and stride (not given in the paper, so this design's choice): the
window generator scans (rows+1) x (cols+1) positions. Positions past the
right or bottom edge feed padding instead of consuming input, so the last
row and column of outputs are produced without extra input. Stride 1 gives
TensorFlow "SAME" output with one pad on every side. Stride 2 emits the
windows centred on odd rows and columns, which is TensorFlow's SAME for even
frame sizes: 224 -> 112 with no pad on top or left and one on the bottom and
right.

### DWC: depthwise convolution and pooling (`dwc_engine`)

DWC processes 16 channels at a time. An n-channel layer is n/16 *passes*,
and each pass is a full raster frame of 16-channel beats, handled by
`window3x3` exactly like C2D. The weights are split by kernel position:

```
memory k (k = 0..8, tap k = 3*row + col)   word p = tap k of channels 16p .. 16p+15   (128 bits)
bias memory                                 word p = 16 x 16-bit biases of pass p      (256 bits)
```

With this split all nine taps of all 16 channels can be read in the same
clock. The `pass` output tells the ring which source feeds the current pass.

In *pooling* mode the window generator is bypassed. Each pass sums
`(a - az)` over every pixel of the frame (starting from the bias) and emits
one beat, scaled by MULT/SHIFT. For MobileNetV2's 7x7 global average, MULT
and SHIFT encode 1/49.

### PRO: projection, channels -> filters -> pixels (`pro_engine`)

For each pixel and each 16-filter batch, PRO takes that pixel's APASS
channel beats, one per clock. Each beat is multiplied with the matching 16
channels of 16 filters (a 16x16 array). After the last channel batch the 16
sums are rescaled and leave as one beat. The output is therefore
pixel-major, with no extra storage. The cost is that each input pixel must
be read FPASS times (BUFF B's repeat count). Weight layout:

```
memory f (f = 0..15)   word fpass*APASS + apass = filter 16*fpass+f, channels 16*apass .. +15   (128 bits)
bias memory            word fpass = 16 x 18-bit biases                                          (288 bits)
```

### EXP: expansion, filters -> channels -> pixels (`exp_engine`)

EXP reads the ADD stream, in which every beat appears once. It must
therefore use each 16-channel beat for *all* filter batches before taking
the next one. It holds the beat for FPASS clocks, one filter batch per
clock. The partial sums of every filter batch are kept in an accumulator
memory (`ADEPTH` words of 16 x 32 bits), loaded from the bias on the first
channel batch. On the last channel batch each filter batch is rescaled and
sent out. The weights are arranged by channel rather than by filter:

```
memory l (l = 0..15)   word apass*FPASS + fpass = channel 16*apass+l of filters 16*fpass .. +15   (128 bits)
bias memory            word fpass = 16 x 16-bit biases                                            (256 bits)
```

PRO and EXP do the same arithmetic. The difference in loop order (the
paper's Fig. 3) decides the memory layout and whether a partial-sum store
is needed. EXP also runs the 1x1 convolution (320 -> 1280) that comes before
pooling.

### ADD and the residual FIFO (`add_engine`, `stream_fifo`)

ADD sits between PRO and EXP and has two switches:

* `add_en`: add the beat at the head of the FIFO (the block's shortcut,
  saved one round earlier) to the incoming beat, using the formula above.
  When it is off, the beat passes unchanged.
* `store_en`: also push ADD's output into the FIFO, so that it becomes the
  shortcut of the next block.

Both switches may be on together. This happens in chains of identical
blocks, where a block's output is both the next block's input and its
shortcut. The FIFO (`stream_fifo`, 8192 x 128 bits) pops the old shortcut
and pushes the new one in the same clock.

### Activation buffers (`act_buffer`)

The buffers are 77824 x 128-bit memories. A tensor of P pixels x B batches
is stored at address `b*P + p`. The write side accepts pixel-major or
pass-major order. The read side produces pass-major order, or pixel-major
with a repeat count. The write and read sides are separate and started
separately: reading starts after the write has finished. Reads are
registered, so the array can map to block or UltraRAM.

## The top level (`semi_streaming_top`)

The top holds no sequencer. Like the paper's system, it is driven by a
host: the paper uses the processor system of a Zynq device, and points out
that a state machine could take its place. The host:

1. loads weights through `pwr` / `pwr_eng` (table below);
2. sets the configuration records of the engines, the buffers and `route`;
3. pulses the bits of `start` for the units taking part in the stage;
4. waits until the bits of `busy` drop.

`route` fields:

| field | effect |
|---|---|
| `dwc_from_c2d` | DWC pass 0 reads C2D stream A; later passes read BUFF A (entry round) |
| `bufa_from_c2d` | BUFF A is written from C2D stream B instead of EXP (entry round) |
| `dwc_to_out` | DWC output goes to `out_*` instead of BUFF B (pooling result) |
| `add_to_out` | ADD output goes to `out_*` instead of EXP (last projection) |

Parameter write map (`pwr.mem`, `pwr.addr`, `pwr.data`):

| `pwr_eng` | `mem` | `addr` | `data` |
|---|---|---|---|
| `ENG_C2D` | filter 0..31 | - | byte k = weight of tap k = 3*(3*row+col)+channel (k < 27), bits 231:216 = bias |
| `ENG_DWC` | 0..8 | pass | 16 weights of that kernel tap |
| `ENG_DWC` | 9 | pass | 16 x 16-bit biases |
| `ENG_PRO` | 0..15 | fpass*APASS+apass | 16 channel weights of filter 16*fpass+mem |
| `ENG_PRO` | 16 | fpass | 16 x 18-bit biases |
| `ENG_EXP` | 0..15 | apass*FPASS+fpass | weights of channel 16*apass+mem for 16 filters |
| `ENG_EXP` | 16 | fpass | 16 x 16-bit biases |

**Entry round, for example** (224x224 image, first bottleneck 32 -> 16,
second block's expansion 16 -> 96):

* Stage 1. C2D is configured for 224x224 with stride 2, DWC for 112x112
  with 2 passes, and `route = {dwc_from_c2d, bufa_from_c2d}`. BUFF A is set
  to write 12544 pixels x 1 batch; BUFF B to write 12544 x 2 pass-major.
  Start C2D, DWC and both writes, then stream the image. Once C2D and the
  BUFF A write are idle, start the BUFF A read: DWC then switches to it
  for pass 1.
* Stage 2. `route = 0`. BUFF B is read pixel-major (2 batches, repeat 1).
  PRO has APASS 2 and FPASS 1; ADD passes through; EXP has APASS 1 and
  FPASS 6; BUFF A is written pixel-major with 6 batches. Start all of them.

The next round is DWC from BUFF A (pass-major) into BUFF B, then stage 2
again. The last steps use `dwc_to_out` to deliver the 1280-channel
average-pooled vector, or `add_to_out` to deliver a projection result
directly. The classifier after pooling is not part of the design.

## Timing

* C2D and DWC: one window-scan position per clock, i.e. (rows+1) x (cols+1)
  clocks per frame or pass; DWC pooling: one pixel per clock.
* PRO: one input beat per clock; P x APASS x FPASS clocks per layer.
* EXP: one filter batch per clock; also P x APASS x FPASS clocks.
* ADD, buffers, FIFO: one beat per clock.
* All outputs are registered. The weight memories are read asynchronously
  inside the engines (see limitations).

Measured on the real entry round (`tb_mnv2_round0`): stage 1 takes 63,515
clocks. That is C2D's 50,625 scan positions, DWC's second pass of 12,769,
and about 120 clocks where DWC briefly stalls C2D. Stage 2 takes 75,271
clocks, bound by EXP's 12,544 x 6 = 75,264. At 100 MHz that is 0.64 ms and
0.75 ms, the same magnitude as the round-0 bars of the paper's per-round
timeline. The weight loading that the paper also counts is not modelled.

Measured on the real last round (`tb_mnv2_tail`, 7x7 pixels): DWC over
960 channels takes 4,022 clocks. That is 60 passes of 64 scan positions
plus 3 clocks of turnaround per pass. The 960 -> 320 projection feeding the
320 -> 1280 convolution takes 78,465 clocks, against EXP's bound of
49 x 20 x 80 = 78,400. Pooling 1280 channels takes 3,924 clocks, one pixel
per clock over 80 passes.

## Sizes

Every parameter default is the paper's number where it gives one:

| block | parameter | default | origin |
|---|---|---|---|
| C2D | NF, NC, MAX_COLS | 32, 3, 224 | paper |
| DWC | WDEPTH, BDEPTH | 512, 512 | paper (memory table) |
| DWC | MAX_COLS | 112 | largest MobileNetV2 depthwise frame |
| PRO | WDEPTH, BDEPTH | 1536, 512 | paper |
| EXP | WDEPTH, BDEPTH | 2048, 1024 | paper |
| EXP | ADEPTH | 80 | 1280/16, the widest layer EXP runs |
| ADD FIFO | DEPTH x W | 8192 x 128 | paper |
| BUFF | DEPTH | 77824 (x 128 bits, two instances) | paper |

With these sizes every MobileNetV2 layer fits. The largest cases are: the
112x112x96 expansion output in a buffer (75,264 of 77,824 words); the
960 -> 320 projection (1,200 of 1,536 weight words); the 320 -> 1280 conv
(1,600 of 2,048 words, 80 accumulator words); and the 56x56x24 shortcut,
padded to 32 channels (6,272 of 8,192 FIFO words). The classifier
(1280 -> 1001) would not fit PRO's weight memories.

## Where this design departs from, or adds to, the paper

* **Handshakes.** All streams are valid/ready pairs in the AXI-Stream style
  (no `last`). The paper only says the engines are pipelined on their
  interfaces.
* **Padding, stride, scan order** of the window generator (see C2D) are
  this design's choice.
* **Rounding.** Right shifts truncate. TensorFlow Lite rounds, so results
  can differ from the reference network by one code.
* **Scale per layer.** One MULT/SHIFT per layer, as in the paper's
  pseudo-code, although its text mentions per-channel weight quantisation.
* **C2D stream B** goes straight into BUFF A; the paper sends it through the
  DMA.
* **Pooling** subtracts the zero point and starts from the bias word; the
  paper says only that the frame is summed and multiplied by 1/49.
* **EXP accumulator memory** is 80 x 512 bits. The paper reports 15 BRAM18K
  for it without giving its shape.
* **Host, DMA and external memory** are not built. Their roles are the
  top's configuration, start/busy and parameter-write ports and its two
  streams.

## Limitations

* The weight and bias memories in C2D, DWC, PRO and EXP are arrays read
  combinationally. That is fine in simulation and for LUT RAM. To map them
  onto block RAM, a read register and one more pipeline stage would be
  needed. The activation buffers already read synchronously.
* There is no overlap of weight loading with computation. The paper's
  timeline shows later rounds waiting for parameters; here the host simply
  writes them between stages.
* The engines and buffers copy their configuration when started, so the
  host may set up the next stage while one runs. ADD has no start and reads
  its configuration directly. That configuration, and `route`, must
  therefore stay unchanged until the stage is over.

## Files and simulation

`rtl/` holds one module or package per file:

| file | content |
|---|---|
| `ss_pkg.sv` | beat type, config records, routing/start/busy structs, `requantize` |
| `requant.sv` | one rescale-and-clamp lane |
| `window3x3.sv` | two-line buffer and 3x3 window generator |
| `c2d_engine.sv`, `dwc_engine.sv`, `pro_engine.sv`, `exp_engine.sv`, `add_engine.sv` | the engines |
| `stream_fifo.sv`, `act_buffer.sv` | residual FIFO and activation buffers |
| `semi_streaming_top.sv` | the ring |

`tb/` holds one self-checking testbench per module. Each compares against an
integer model written independently in `tb_ref_pkg.sv` or in the testbench,
checks rates where the design has one, and ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_semi_streaming_top`: the whole ring on an 8x8 image. Two rounds
  plus pooling and a final output. It runs every routing mode and counts
  that each mechanism occurred: split, direct C2D->DWC, reorder, stall,
  store, add, pass-through, pool, output.
* `tb_mnv2_round0`: the real-size entry round of MobileNetV2. It checks
  1.2 M values and the clock counts.
* `tb_mnv2_tail`: the real-size last round. It runs depthwise 7x7x960,
  projection 960 -> 320, the 320 -> 1280 convolution and global average
  pooling. It checks every intermediate tensor, the 1280 pooled outputs
  and the clock counts. Buffer A is preloaded through a hierarchical
  reference in place of the previous round.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/ss_pkg.sv tb/tb_ref_pkg.sv tb/tb_semi_streaming_top.sv \
    --top-module tb_semi_streaming_top
./obj_dir/Vtb_semi_streaming_top
```

The real-size tests take up to 1.5 minutes to compile and a second or two to run.
Parameters can be overridden on the engines (for example a smaller
`MAX_COLS` or `DEPTH`). The top has no parameters: it is the configuration
described above.
