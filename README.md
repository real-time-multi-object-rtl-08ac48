# A streaming YOLOv8n detector for the programmable logic of a SoC FPGA

This RTL implements the detector half of a tracking-by-detection system. A
4-bit quantised YOLOv8 nano network runs as one deep hardware pipeline in
the FPGA fabric. An ARM processing system (PS) next to it resizes camera
frames, decodes the detector outputs, runs non-maximum suppression and the
SORT tracker. The fabric part reads a 320 x 192 RGB frame from memory,
streams it through every layer of the network at once and writes the three
raw detection maps back. The published design reaches 195.3 frames/s at
300 MHz for the detector alone.

The design is FINN-style. Every convolution is its own piece of hardware
with a fixed amount of parallelism, and the layers are joined by
ready/valid streams. Data never goes back to memory between layers. The
unusual part is that **no layer stores its weights**. Each matrix unit has
a private DMA that replays the layer's whole weight matrix from external
memory once for every output pixel. The chip then needs almost no on-chip
weight memory, but it needs a great deal of memory bandwidth (see
*Throughput and bandwidth*).

Everything here is SystemVerilog-2017. It simulates with plain Verilator
5 and reads into yosys through the slang front end.

## System partition

```
   PS (ARM, DDR)                          PL (this RTL: mot_pl_top)
   -------------                          -------------------------
   resize frame  --- image buffer ---->   input DMA  (32-bit, 0x00BBGGRR)
   weights in DDR -- 48 buffers ------>   48 weights DMAs (128-bit, repeat per pixel)
                                              |            |
                                              v            v
                                          yolov8_accel: 48 conv stages + glue
                                              |
   decode boxes, <-- 3 output buffers --  3 output DMAs (128-bit)
   NMS, SORT
   threshold setup ---- cfg bus ------->  every thresholding unit
```

The AXI interconnect and the PS itself are not part of the RTL.
`mot_pl_top` brings out one AXI4 master port per DMA: one image reader,
48 weight readers and 3 output writers. It also has a small control
interface:

- `frame_start` starts every DMA for `frames` consecutive frames. The
  buffers of consecutive frames lie back to back.
- `img_base`, `wgt_base` and `out_base[3]` give the buffer addresses.
- `frame_done` pulses when all three output maps are in memory.
- `busy` and `dma_err` report status.
- `cfg` is the threshold-write bus.

## Stream conventions

Between layers, one beat is one pixel with all of its channels. Channel 0
is in the least significant bits. Activations are unsigned 4-bit codes,
except in two places:

- The input image uses 8 bits per colour.
- Inside a C2f block with residual connections, the bottleneck sums grow by
  one bit per bottleneck (4, 5, 6 bits). Concatenation zero-extends
  narrower inputs to the widest width.

Pixels arrive in raster order, and a frame is simply `H*W` beats. No
side-band start-of-frame signal exists: every stage counts pixels and
wraps at the frame size. The design therefore relies on all stages
agreeing on the frame geometry, which the parameters guarantee.

Handshake: a transfer happens on a clock edge where `tvalid && tready`.
Producers hold `tdata` steady while `tvalid` waits for `tready`. The DMAs
assert this property for their AXI channels. Reset is asynchronous and
active low.

## One convolution layer

`conv_block` is the unit everything else is built from. It has five parts:

1. **`fm_padding`** inserts the zero border ("same" padding, K/2).
2. **`conv_input_generator`** (the sliding-window generator) keeps a ring
   of K+S rows in registers. For every output position it emits the window
   as K*K*CI/SIMD beats:
   - kernel position (ky, kx) is the outer order;
   - the channels sit inside, SIMD at a time.

   This is the column order of the flattened filter matrix, so no partial
   sums ever need to be cached. A writer fills the ring while a reader
   scans windows. A row-level credit check keeps the writer from
   overwriting rows still in use.
3. **`mvau`** (the matrix-vector-activation unit) has PE rows of SIMD
   multipliers:
   - Per output pixel it takes SF = K*K*CI/SIMD input beats and NF = CO/PE
     output folds, so it needs NF*SF cycles per pixel.
   - During output fold 0 it buffers the SF input slices, and it replays
     them for the later folds.
   - Each cycle it consumes exactly one 128-bit weight beat. Weight (p, s)
     of that beat is in bits [(p*SIMD+s)*4 +: 4], as signed 4-bit.
   - Beats are ordered output fold first, input fold second.
   - Accumulators are 24-bit signed.
4. **`thresholding`** turns each accumulator into a 4-bit code. The code is
   the number of the channel's 15 ascending thresholds that the value
   reaches. Batch-norm scale, bias and the activation function are all
   folded into those thresholds offline. The thresholds are registers,
   written through `cfg` (`we`, `bcast`, `layer`, `ch`, `idx`, `data`). A
   unit accepts only writes that carry its own `LAYER_ID`.
5. **`stream_pack`** gathers the NF folds back into whole-pixel beats, and
   a 4-deep FIFO absorbs the burst that a finished pixel produces.

**Folding.** The paper leaves this as a free choice. The first layer uses
SIMD 3 and PE 8, and every other layer uses SIMD 8 and PE 4. The output
channels of each layer must divide by PE, and the input channels by SIMD.

## Network structure and why the FIFOs are where they are

`yolov8_accel` wires up YOLOv8n:

- **Backbone:** Conv s2, Conv s2, then C2f, Conv s2, C2f (P3), Conv s2,
  C2f (P4), Conv s2, C2f, SPPF (P5).
- **Neck:** a top-down path with 2x upsampling and a bottom-up path with
  stride-2 convs.
- **Heads:** three detection heads.

The widths are BW x {1, 2, 4, 8, 16} with BW = 16. The C2f depths are
1, 2, 2, 1 in the backbone and 1 in the neck.

Building blocks:

- **`c2f`** runs a 1x1 conv, then a channel split. One half waits in a
  FIFO. The other half feeds a chain of `bottleneck`s, and every
  intermediate result is forked off to a FIFO as well. The halves and all
  bottleneck outputs are then concatenated and passed through a final 1x1
  conv.
- **`bottleneck`** is two 3x3 convs with an optional residual add
  (`add_streams`). The residual input waits in a FIFO.
- **`sppf`** runs a 1x1 conv to half width, then three chained 5x5 max
  pools. It concatenates the four maps and ends with a 1x1 conv.
- **`detect_head`** is a 1x1 conv to 84 raw outputs per pixel (4 box
  values and 80 class scores). It has no thresholding. The outputs are
  sign-extended to 32-bit lanes, four lanes per 128-bit beat.

A streaming graph with branches deadlocks if one branch must run far ahead
before the join can accept anything. For example, a 3x3 conv holds back
about a row and a half before it produces its first pixel. The other
branch of the fork must be able to park that much data, or the fork stalls
both branches for good. Two rules set the FIFO depths:

- **Local branches** (inside C2f and bottleneck) use `finn_pkg::branch_depth`.
  It reserves 5*(W+2)+16 pixels per 3x3 conv on the other branch, plus
  slack, and caps the result at one whole map.
- **Long skips** (P3, P4 and P5 into the neck, and H4 into the second
  bottom-up stage) hold **two whole maps**. Their consumer needs the upsampled
  or downsampled partner, which arrives only after the deep path has
  produced nearly a whole map. The second map lets the next frame pass the fork
  meanwhile (see *Frame overlap*).

The paper found its depths by simulating with oversized FIFOs and reading
off the high-water marks. `stream_fifo` reports `count` and `max_count`
for exactly that use.

The 48 matrix units are numbered in network order, and that index is both
the weight-stream number and the threshold layer id:

| Index | Layer |
|---|---|
| 0 | conv0 |
| 1 | conv1 |
| 2-5 | C2f |
| 6 | conv3 |
| 7-12 | C2f P3 |
| 13 | conv5 |
| 14-19 | C2f P4 |
| 20 | conv7 |
| 21-24 | C2f |
| 25-26 | SPPF |
| 27-30 | C2f H4 |
| 31-34 | C2f D3 |
| 35 | conv16 |
| 36-39 | C2f D4 |
| 40 | conv19 |
| 41-44 | C2f D5 |
| 45-47 | heads |

Inside a C2f block the order is cv1, then bottleneck i's two convs, then
cv2.

## DMAs and memory layout

**`dma_mm2s`** reads `beats` words from `base_addr`, `repeats` times. It
uses AXI4 INCR bursts of up to 16 beats, never crosses a 4 KiB boundary
and keeps one burst in flight. `rready` follows the stream's `tready`,
which makes back-pressure reach the bus. A weights DMA uses:

- `beats` = NF*SF, one weight matrix;
- `repeats` = the layer's output pixel count.

**`dma_s2mm`** does the same for writes, one burst and one response at a
time.

Memory layout:

- **Image buffer:** one 32-bit word `0x00BBGGRR` per pixel, raster order.
- **Weight buffer:** the 48 matrices back to back from `wgt_base`, in
  index order, at 16 bytes per beat. The top computes each layer's offset
  from the parameters (a constant function over the layer table).
- **Output buffer j:** (H/8·2^j) x (W/8·2^j) pixels x 21 words. Each word
  holds 4 signed 32-bit values, channel 4k in the low lane.

## Throughput and bandwidth

Each stage needs NF*SF cycles per pixel, and all stages overlap, so the
slowest stage sets the frame time. At 320 x 192 with this folding, the
slowest stage is conv1 (16 -> 32 channels, 3x3, 80 x 48 outputs). It
takes 8 x 18 x 3840 = **552,960 cycles**, or 543 frames/s at 300 MHz. The
reported rate of 195.3 frames/s allows 1,536,000 cycles per frame. The sum
over all 48 stages is 12.4 M cycles: that would be the time if nothing
overlapped.

**Frame overlap.** One `frame_start` with `frames` = N streams N frames
back to back. The image, weight and output DMAs simply count N times as
many words, and every stage wraps its pixel counters at the map size. So
frame n+1 enters the first layers while frame n still drains from the deep
ones.

Two details make this work:

- **Whole-frame latency.** At the 10 x 6 and 20 x 12 scales, a 3x3 conv
  must see 1.5 rows (a quarter or more of its map) before it emits
  anything. The chain of low-resolution layers therefore behaves like a
  sequence of whole-frame stages. The first frame's latency is large,
  about 4.18 M cycles at full size.
- **Two-map skip FIFOs.** The long skip FIFOs hold two maps, not one.
  With one map, the next frame's P3/P4 pixels cannot pass the fork until
  the current frame's neck has drained the FIFO. The deep path's latency
  then returns as the frame period. In the 64 x 64 test the period is
  78,215 cycles with one map and 18,785 with two. The slowest MVAU needs
  9,216 cycles there.

**Measured result.** `tb_mot_pl_top_full` runs two full-size frames
back to back, and every output word matches the reference. Results:

- first-frame latency: 4,181,882 cycles;
- frame period: **954,809 cycles**, which is 314 frames/s at 300 MHz.

The period is inside the 1,536,000-cycle budget of 195.3 frames/s, with
the budget check passing. It is 1.7 times the 552,960-cycle MVAU bound.

The rest of the gap to the MVAU bound comes from the weight DMAs. Each
keeps only one burst in flight, and the testbench memories insert random
wait states. Together they deliver roughly 55-60 % of the demand of a busy
MVAU.

The weight traffic follows directly from "all filter parameters are sent
for every filter position". Per frame the 48 DMAs read 48 matrices x
their pixel counts, which is 198 MB. At 195.3 frames/s that is about
**38.6 GB/s**. This is more than a single PS DDR4 port delivers, so a real
system is bandwidth bound here, not compute bound. The RTL gives every
DMA its own port. The testbenches' memory models answer every port
independently, so they do not model this limit.

## Departures from the paper, and what is this design's own

- **Network sizes.** The paper names YOLOv8n, a 320 x 192 input and 4-bit
  weights and activations. It does not list layer widths. The widths used
  here are YOLOv8n's usual ones. One of the paper's graph figures shows a
  first conv with 32 channels on a 320 x 320 input. This design follows
  the text instead (16 channels, 320 x 192).
- **Detection heads.** They are reduced to one 1x1 conv per scale (84
  outputs). YOLOv8's two three-layer branches per scale and the DFL box
  decoding are not built. The parameter count is therefore 2.3 M rather
  than 3.2 M.
- **Thresholds.** They sit in register arrays loaded over a configuration
  bus. FINN would keep them in BRAM, and the paper notes they take about a
  third of its BRAM. Synthesis of the full top with yosys is slow for this
  reason; simulation is not affected.
- **Interfaces.** The DMA register files are reduced to plain ports, and
  the AXI interconnect is left out. There is one output DMA per detection
  scale.
- **Folding.** SIMD/PE per layer, the weight-beat format, all FIFO depths,
  the 24-bit accumulators and the `cfg` bus are choices of this design.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. They share
`tb_ref_pkg`, an integer model of the whole network written as plain loops
over feature maps, so it is independent of the streaming structure.
Weights, thresholds and test images come from hash functions, so no data
files are needed. Stream sources and sinks (`tb_fmap_src`, `tb_fmap_sink`,
`tb_wsrc`) insert random stalls.

Where a rate follows from the structure, the test checks the cycle count:

- MVAU, conv and head stages take NF*SF cycles per pixel.
- FIFO, upsampler, threshold unit and window generator take one beat per
  cycle.
- The max pool takes K*K cycles per pixel.

The tests:

- **`tb_yolov8_accel`** runs the whole network (64 x 64 image, BW = 8)
  against the reference. It fails if any of these never happens: input
  back-pressure, output back-pressure, each long skip FIFO holding data,
  and weight beats on every stream.
- **`tb_mot_pl_top`** does the same through the DMAs and AXI memory models
  for two back-to-back frames. The models also check the AXI burst rules
  and that every weight read lands inside its own layer's buffer. The
  frame period must stay within twice the slowest MVAU's cycle count.
- **`tb_mot_pl_top_full`** instantiates the top with no parameter
  overrides (320 x 192, BW = 16) and runs two back-to-back frames. It
  checks the frame period against the 1,536,000-cycle budget. It takes
  about 8 minutes.

To run a test with Verilator:

```
verilator --binary --timing --assert rtl/finn_pkg.sv rtl/*.sv \
  tb/tb_ref_pkg.sv tb/tb_wsrc.sv tb/tb_fmap_src.sv tb/tb_fmap_sink.sv \
  tb/tb_thr_prog.sv tb/tb_axi_rd_mem.sv tb/tb_axi_wr_mem.sv \
  tb/tb_mot_pl_top_env.sv tb/tb_mot_pl_top.sv --top-module tb_mot_pl_top
./obj_dir/Vtb_mot_pl_top
```

Substitute any `tb_<block>` for the top module. The small top-level test
takes about two minutes, and the block tests take seconds. Each block's
test was also run against a deliberately broken copy of the block, and
every one reported failures.

## File map

- `rtl/finn_pkg.sv`: shared constants (bit widths, stream width), the
  threshold-bus struct and the FIFO-depth function.
- `rtl/` layer primitives: `fm_padding`, `conv_input_generator`, `mvau`,
  `thresholding`, `stream_pack`, `conv_block`.
- `rtl/` stream glue: `stream_fifo`, `dup_streams`, `stream_split`,
  `stream_concat`, `add_streams`, `upsample`, `maxpool`.
- `rtl/` network blocks: `bottleneck`, `c2f`, `sppf`, `detect_head`,
  `yolov8_accel`.
- `rtl/` system: `dma_mm2s`, `dma_s2mm`, `mot_pl_top`.
- `tb/`: one `tb_<block>.sv` per block, plus the shared reference package,
  the stream and AXI models, and the top-level environment.
