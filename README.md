# A skip-everything convolution stage for HD multi-object tracking

Running a detector-plus-tracker (QDTrack: a ResNet-50 backbone with FPN, RPN and
a tracking head) on HD video in real time costs far more compute than an edge
device has. The work this RTL is based on, *Data-Model-Circuit Tri-Design for
Ultra-Light Video Intelligence on Edge Devices* (Zhang et al.), removes the
work at three granularities before it reaches the multipliers:

| granularity | decided by | what the hardware skips |
|---|---|---|
| whole frame | a small learned policy network (temporal frame filtering) | every load and every MAC of the frame |
| 60x60 patch = tile | a Sobel saliency score per patch (spatial saliency focusing) | loading and computing the tile |
| input channel of a filter | kernel-wise pruning (a 3x3 kernel that is all zero) | loading and computing that channel |
| single weight | pattern pruning (fixed 3x3 sparsity pattern per channel) | the product (gated) |

The key hardware idea is to make the skips cheap. The usual choice is to
parallelise over input channels. Then a pruned channel still occupies its
lane, because its neighbours run next to it. This design instead parallelises
over the rows and columns of a tile and walks the channels one after another.
A pruned channel then simply disappears from the schedule, and latency falls
linearly with the number of pruned channels.

This repository gives synthesizable SystemVerilog for one accelerator stage
built on that idea. The stage runs a 3x3 convolution layer over an HD frame
tile by tile, with all four kinds of skipping. It also has self-checking
testbenches for every module.

## Block diagram

```
 frame_start, frame_keep ──► tri_top scheduler ───────────────────────────────┐
                               │ (drop frame: done in 1 cycle)                 │
 pix_* (luma, raster) ──► sobel_saliency ──► tile_keep[264] ──► tile loop ─────┤
                                                                 (skip tile)   │
 wt_* ──► weight_buffer ──ch_pruned, kernel, pattern──► conv_tile_engine ◄─────┘
                                                       │  K x row_conv_pe
 mem_req_* ◄────────── row requests (tile, ch, row) ───┤  T_H x T_W accumulators
 mem_rsp_* ──────────► row responses ─────────────────►│
                                                       ▼
                                         link_fifo ──► out_* (to next stage)
```

| file | role |
|---|---|
| `rtl/tri_pkg.sv` | widths, types, default sizes |
| `rtl/row_conv_pe.sv` | column-parallel row convolution with K-to-1 adder trees and pattern gating |
| `rtl/conv_tile_engine.sv` | row-parallel, channel-sequential tile convolution with pruned-channel skipping |
| `rtl/weight_buffer.sv` | kernels, per-channel patterns, per-filter pruned-channel vector |
| `rtl/sobel_saliency.sv` | patch saliency scores and the keep/drop mask |
| `rtl/link_fifo.sv` | output buffer toward the next dataflow stage |
| `rtl/tri_top.sv` | frame/tile/filter scheduler tying it together |

## The convolution engine: rows in parallel, channels in sequence

This is the part that takes the most thought. Take one output channel (one
filter) of one tile of T_H x T_W outputs, with K = 3. Each output row needs
K input rows of every input channel, so the tile needs T_H+K-1 padded input
rows per channel, each T_W+K-1 samples wide (the halo comes from the
neighbouring tiles or from zero padding at the frame edge).

**Column level (`row_conv_pe`).** A kernel row of K weights is slid along an
input row. For every output column x, the K products `in[x+j]*w[j]` are formed
and reduced by a K-to-1 adder tree. All T_W columns are done in the same
cycle, so one `row_conv_pe` holds T_W*K multipliers.

**Row level (`conv_tile_engine`).** There are K `row_conv_pe`, one per kernel
row, all fed the same input row. When input row r arrives, kernel row kr
contributes to output row r-kr. All three contributions are added into the
on-chip accumulator tile in the same cycle. After T_H+K-1 input rows, every
output row has received all K of its kernel rows for this channel:

```
input row r   : 0     1     2     3     4  ...  T_H+1
kernel row 0  : o0    o1    o2    o3    o4 ...  -
kernel row 1  : -     o0    o1    o2    o3 ...  -
kernel row 2  : -     -     o0    o1    o2 ...  o(T_H-1)
```

**Channel level.** Channels are processed one after another, and the
accumulator tile keeps the partial sums between them. That is why it is a
full T_H x T_W array of 32-bit registers, not a few line buffers. For the
current filter, the weight buffer supplies a vector that marks which channels
are entirely zero (kernel-wise pruned). The request side finds the next kept
channel combinationally, so a pruned channel costs no cycle and causes no
memory read. With A kept channels and no memory stalls, a tile/filter run
takes

```
A*(T_H+K-1) request cycles  +  1 (last response)  +  T_H drain cycles  +  ~2
```

At the default 60x60 tile, that is 62 cycles per kept channel plus about 63.

**Memory protocol.** Requests carry a channel and a tile-relative row (row 0
is the halo row above the tile). Responses carry the same tags, so they may
come back in any order and after any latency, at most one per cycle. The engine
always accepts a response. It moves on to the drain once every request has
been answered. The drain presents one output row per cycle on a valid/ready
port, with `out_last` on row T_H-1.

## Pruning in storage

The weight buffer stores, for every (filter, channel) pair, the 3x3 weights
and a 9-bit pattern (1 = weight kept). Pattern-pruned weights are forced to
zero in `row_conv_pe` whatever value is stored. An all-zero pattern is a
kernel-wise pruned channel. The buffer keeps a "pruned" bit per pair,
updated on every write, so that the engine sees the whole per-filter vector
at once. After reset every pair reads as pruned, so a channel that was never
loaded is never computed. The defaults (512 filters x 512 channels, 2.36 MB)
hold the largest 3x3 layer of ResNet-50. The source work does not give this
size; it is chosen here for that reason.

## Saliency mask

`sobel_saliency` takes the frame's luma in raster order, one sample per cycle.
Two line buffers feed a 3x3 window. The Sobel magnitude |Gx|+|Gy| of the
window centre is added, one cycle later, to the score of the patch holding
that centre. Only pixels whose whole window lies inside the frame contribute.

After the last pixel, one pass smooths the scores: each patch gets the sum of
itself and its four neighbours, and a missing neighbour at the frame edge is
replaced by the patch itself. A second pass ranks each patch against all
others with N comparators in parallel, breaking ties by index. The
floor(N x 20 / 100) lowest-ranked patches are dropped. At 1280x720 with
60-pixel patches, N = 22 x 12 = 264 (the right column is 20 pixels wide) and
52 patches are dropped. A frame takes W*H + 2N + 2 cycles when pixels arrive
without gaps.

## Stage control

For each frame, `tri_top` does the following:

1. At `frame_start` it looks at `frame_keep`. If the frame is dropped, it
   counts it, pulses `frame_done` on the next cycle and loads nothing.
2. Otherwise it streams the luma through `sobel_saliency` and waits for the
   mask.
3. It walks the tile grid in raster order. A dropped tile costs two cycles and
   makes no memory request and no output. For each kept tile, it runs the
   engine once per filter (`cfg_n_filt` filters over `cfg_n_ch` channels). The
   input rows are fetched again for every filter.
4. Output rows enter `link_fifo` tagged with tile, filter and row, and leave
   on `out_*` as soon as they are ready. This lets a next stage start on the
   first tile while this one is still working, which is the multi-board
   dataflow of the source work. If the far end stops accepting, the FIFO
   fills and the engine's drain stalls.
5. `frame_done` pulses as soon as the last output row has entered the link.
   The next frame may start at once while the link still drains the previous
   one, so frames overlap across stages as in the source's dataflow.

Four 32-bit counters make the skipping observable: dropped frames, skipped
tiles, skipped (pruned) channels, and cycles the link stalled the engine.

The off-chip memory must hold the *masked* input: samples of dropped patches
and outside the frame read as zero, like the masked frame the saliency step
produces. The memory itself is outside this design.

## Parameters

| parameter | default | origin |
|---|---|---|
| K | 3 | 3x3 kernels of the pruning scheme |
| TILE / T / T_H / T_W | 60 | the 60x60 drop-patch size; tiles and patches coincide |
| FRAME_W x FRAME_H / FW x FH | 1280 x 720 | BDD100K HD frames (the source says only "HD") |
| DROP_PCT | 20 | 20 % spatial patch drop |
| C_MAX, N_FILT | 512, 512 | this design: largest ResNet-50 3x3 layer |
| DEPTH (link) | 16 | this design |
| activations / weights / accumulators | 8 / 8 / 32 bit signed | this design; no precision is given in the source |

`cfg_n_ch` and `cfg_n_filt` set the size of the layer at run time, up to
C_MAX and N_FILT.

## Where this RTL departs from, or adds to, the source

- The source describes the parallelism in prose and one figure. It says
  "T_W multiplications ... followed by a K-to-1 adder tree" for the column
  level. Read literally, T_W multiplications cannot feed a K-to-1 tree for
  every output column. The figure shows a K-wide kernel row against a window
  of the input row, so each of the T_W output columns gets its own K
  products here.
- The source states that pruned channels are skipped and that latency falls
  linearly with them. The zero-cycle look-ahead that achieves this is this
  design's own.
- How pattern pruning is applied in hardware is not described beyond "a fixed
  sparsity pattern for the entire channel". Here the pattern is stored per
  channel and gates the products. A table of pre-defined patterns with an
  index would save storage.
- The source does not say where the saliency mask is computed; its overview
  draws the step in software. It is built in hardware here so that the stage
  can produce its own mask. The smoothing weights and the rank-based drop
  rule are this design's choices.
- Feature-level patch dropping in the source interpolates the mask to each
  layer's resolution. Only a layer at frame resolution is built, so no
  interpolation is needed.
- Only 3x3, stride-1, same-padded convolution is built. Output values are raw
  accumulators: batch norm, activation and requantisation are not described.
- Not built: the policy network that makes the frame decision (its weights
  are learned and not given), the other layer types and operators of QDTrack
  (1x1 and strided convolution, pooling, NMS, ROI Align, group norm, fully
  connected layers, softmax), and the partition over three FPGA boards and
  the links between them. The stage exposes `frame_keep`, the memory ports
  and the output stream where those parts would connect.
- Reported accuracy, latency and power numbers come from the authors' HLS
  implementation. They cannot be reproduced with one stage of this RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. Every testbench
computes its expected results itself, from the same stimulus:

| testbench | what it checks |
|---|---|
| `tb_row_conv_pe` | 200 random vectors, every mask, extreme values; all T_W sums |
| `tb_conv_tile_engine` | 6x6 tiles, 8 channels, random kernels and patterns, random memory latency and output back-pressure; every output value; no request for a pruned channel; request phase exactly kept x (T_H+2) cycles and total latency bound with a one-cycle memory |
| `tb_weight_buffer` | reset state, write/read of every pair, pruned vector |
| `tb_sobel_saliency` | 22x14 frame in 5x5 patches (partial edge patches), noise/edge/flat frames, gaps in the pixel stream; mask against a reference; exact cycle count |
| `tb_link_fifo` | random push/pop with long stalls against a queue model; fills to DEPTH |
| `tb_tri_top` | 14x12 frames in 4x4 tiles, three frames (kept, dropped, kept); mask, every output row of every kept tile and filter against a direct convolution of the masked frame; no load of a dropped tile or pruned channel; each mechanism (frame drop, tile skip, channel skip, pattern gating, link stall, frame overlap) must occur |
| `tb_tri_full` | the same checks with `tri_top` at its defaults: three 1280x720 frames (kept, dropped, kept; 3 input channels, 2 filters), about 1.04 M cycles per kept frame, 212 of 264 tiles kept |

To run one testbench with Verilator (5.x), from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tri_top \
    -y rtl -y tb +libext+.sv rtl/tri_pkg.sv tb/tb_tri_top.sv
./obj_dir/Vtb_tri_top
```

Swap in another testbench name as needed. The full-size run takes about
half a minute on a current machine. Assertions in the RTL check
the engine's response/request bookkeeping, the stability of a stalled output
and FIFO overflow.

To change the design, edit the defaults in `rtl/tri_pkg.sv` or override the
parameters of `tri_top`. The tile must be at least 3 rows, and the frame
should hold at least two tiles in each direction for the saliency smoothing
to mean anything.
