# A single-engine CNN accelerator built around a circular line buffer

This is an accelerator that runs one CNN layer at a time: a convolution, a pooling layer or a
fully connected layer. A host processor streams the layer's configuration, weights and input
in, and collects the output. It then reconfigures the same hardware for the next layer.
Intermediate feature maps live in external memory. The engine therefore does not depend on
the network's size, and runs networks as large as VGG16 on a small FPGA.

The main idea is the **circular line buffer (CLB)**. The input arrives once, in plain raster
order. The CLB turns that stream into complete K x K x depth windows, several image rows wide
per word. It can re-send each window as often as needed, so every group of kernels gets its
turn. The host never has to re-arrange or re-send the input, whatever the layer's window, stride,
padding or depth. All of these are run-time settings, not build-time choices. Around the CLB sit:

- a **weight buffer** that caches the kernels once per layer;
- an array of **processing elements (PEs)**, each producing one output channel per window;
- a **pooling block** that reuses the CLB windows;
- an **output handler** that shapes the results and can stitch in the output of an earlier pass.

```
            CTRL ──► ctrl_decoder ──► layer configuration (to every block), start/busy
               W ──► weight_buffer: wb_resize ─► wb_splitter ─► PE_N × wb_stream_buffer ──┐
               X ──► data_buffer (CLB): clb_line_buffer ─► clb_shift_buffer ─► windows ──┤
                                                                                         ▼
                                      op = POOL ◄── window router ──► op = CONV/FC ── pea (PE_N × pe)
                                          │                  (db_narrow if DB_OUT_BW=1)  │
                                       pooling ──────────► output_handler ◄─────────── results
                                                                 ▲   │
                                                       XBUF ─────┘   └──► Y (TLAST on the last beat)
        AXI4-lite ◄── status_regs (read-only)
```

## Build-time sizes

The five template numbers of the engine are written as the vector
[DATA_W, PE_BW, PE_N, DB_OUT_BW, KERNELS_N]. The RTL defaults are the 16-bit configuration
[16, 128, 8, 3, 32]. All of them are parameters of `cnna_top`; the shared defaults live in
`cnna_pkg`.

| parameter | default | meaning |
|---|---|---|
| `DATA_W` | 16 | word length of the fixed-point data; Q2.14 with `FRAC_W` = 14 |
| `PE_BW` | 128 | width of every stream (X, W, XBUF, Y), i.e. ELEMS = PE_BW/DATA_W = 8 elements per beat |
| `PE_N` | 8 | number of PEs: output channels computed per window pass |
| `DB_OUT_BW` | 3 | rows of a window carried side by side in one CLB word; PE width = 3·128 bits = 24 elements |
| `KERNELS_N` | 32 | kernels of up to 3×3×`MAX_DEPTH` the weight buffer holds |
| `MAX_DEPTH` | 512 | deepest input layer (the deepest VGG16 layer) |
| `LINE_WORDS` | 2048 | words of one image line the line buffer stores (own choice; VGG16 needs ≤ 1920) |
| `ACC_W` | 48 | accumulator width (own choice) |

With these defaults the memories hold 2.97 Mbit in total:

- the weight buffer has 8 stream buffers of 768 packages of 384 bits;
- the line buffer has 2 lines of 2048 × 128 bits;
- the shift buffer and the pooling pixel RAM are small.

## Programming a layer

A layer begins when six 32-bit words have arrived on **CTRL**. `ctrl_decoder` then pulses
`start`, which clears all blocks, and raises `busy`. `busy` stays high until the layer's last Y
beat (TLAST) has been sent. No CTRL words are accepted while `busy` is high. The word layout is
this design's own choice:

| word | bits | field |
|---|---|---|
| 0 | [1:0] op (0 conv, 1 pool, 2 fc), [2] ReLU, [5:4] pooling (0 max, 1 min, 2 avg), [15:8] window K, [23:16] stride, [31:24] zero padding | |
| 1 | [15:0] row size (square image), [31:16] depth in elements (multiple of ELEMS) | |
| 2 | [15:0] replay = kernels of this pass / PE_N, [31:16] kernels of this pass | |
| 3 | [15:0] output row size, [31:16] stitch prefix depth (elements taken from XBUF per pixel) | |
| 4 | scale factor, signed, same format as the data (16384 = 1.0 in Q2.14) | |
| 5 | fully connected only: input length in X beats | |

The host works out the output size, the replay count and the scale factor. `cnna_pkg::pack_cfg`
builds the six words from a `layer_cfg_t`.

**X** carries the input in raster order, channels first: all channels of pixel (0,0), then pixel
(0,1), to the end of the row, then the next row. The depth must be a multiple of ELEMS, so the
host pads the channels of an RGB image up to 8. Padding pixels are *not* sent; the CLB makes
them itself.

**W** carries, for a convolution:

- `n_kernels` bias packages;
- then the kernels one after the other.

A package is DB_OUT_BW beats. A bias package has the bias in element 0 of its first beat. A
kernel is `K × depth/ELEMS` packages, in exactly the order the CLB sends window words: column
by column, and within a column channel group by channel group. Beat *r* of a package holds
window row *r*, with row 0 the top one. For K < 3 the top `3−K` beats are zero. For a fully
connected layer, W carries PE_N bias packages, then the PE_N neurons' weights interleaved
package by package.

**Y** carries the result in the same raster, channels-first order, with TLAST on the last beat
of the layer. **XBUF** is read only when the stitch prefix is non-zero (see *Splitting large
layers*).

**Status registers** (AXI4-lite, read-only; writes get SLVERR):

| address | content |
|---|---|
| 0x00 | {PE_N, DB_OUT_BW, DATA_W, FRAC_W} as bytes |
| 0x04 | PE_BW |
| 0x08 | KERNELS_N |
| 0x0C | {op ≠ conv, busy} |
| 0x10 | layers completed |
| 0x14 | clock cycles of the last layer |

Software reads the first three registers to size its buffers for the loaded core.

## The circular line buffer

`data_buffer` is the controller. `clb_line_buffer` and `clb_shift_buffer` are its two memories.

**Walking the padded image.** The controller steps through the
`(row_size + 2·pad)²` pixels of the *padded* image, `depth/ELEMS` words per pixel.

- Inside the image, each step takes one X beat.
- In the border, it inserts a zero word without touching X.

Padding therefore costs the host nothing.

**Line buffer: adding rows.** Every word, real or padding, goes to the line buffer. The line
buffer stores the previous `DB_OUT_BW − 1` lines and returns the word at the same position in
each of them, next to the incoming word. One 128-bit input word becomes a 384-bit *column*:
three vertically adjacent pixels' worth of the same 8 channels, oldest row first. The
incoming word then overwrites the oldest line at that position. At the end of a line, a pointer
names the next line as the oldest. This "rotation" moves no data. Each stored line is its own
single-write memory, so it maps onto block RAM.

**Shift buffer: adding columns.** Each column is written into a circular buffer of
`K · depth/ELEMS` words, which is the size of one window. The write pointer wraps at that size.
The read pointer is under the controller's command:

- `rewind` puts it back to the start of the last window;
- `rd_adv` moves it forward.

**Emitting windows.** A window is complete when a pixel finishes, if all of these hold:

- its row is ≥ K−1 and its column is ≥ K−1;
- the pixel is on the stride grid. Row and column stride counters both at zero make the grid.

The controller then stops taking X and reads the window out of the shift buffer
`replay` times. Each reading is `K · depth/ELEMS` words, flagged `first` and `last`, and serves
one group of PE_N kernels. Rows above a K < 3 window are zeroed, so one PE width serves every
window size. A window takes `replay · K · depth/ELEMS` cycles, one word per cycle. Input then
resumes.

**Fully connected layers** bypass both memories. Every three X beats become one 384-bit word,
and the last word is zero-filled. The whole vector is one "window" for the PE array.

## Weight buffer

The kernels are needed once per output pixel, so they are loaded once per layer and kept.

- `wb_resize` gathers three W beats into one 384-bit package. The bandwidth triples and the
  package rate drops to one per three cycles.
- `wb_splitter` hands the bias packages round-robin to the PE_N stream buffers. It then hands
  out the kernels, one whole kernel per buffer in turn. Kernel *k* lands in buffer *k mod PE_N*,
  slot *k / PE_N*. The packages per kernel (`chunk`) come from the configuration: `K·depth/ELEMS`
  for a convolution, 1 for a fully connected layer.
- Each `wb_stream_buffer` holds up to `KERNELS_N/PE_N` = 4 kernels of up to
  `3·3·512/24` = 192 packages, plus their biases. Once the whole layer has arrived, it sends
  slot 0, slot 1, …, slot `replay−1`, then slot 0 again, forever. Replay *r* of every window thus
  meets kernel slot *r*, with the matching bias. In fully connected mode it is simply a FIFO.

## Processing elements

`pe` computes `f(scale · (bias + Σ xᵢ·wᵢ))` over the frames of one window in 4 pipeline stages,
with an initiation interval of 1:

1. 24 parallel signed 16×16 multipliers.
2. A balanced adder tree.
3. A 48-bit accumulator. It starts from the bias, shifted to the product's binary point, on the
   `first` frame.
4. On the `last` frame: multiply by the layer's scale, round half up back to Q2.14, saturate
   to the 16-bit range, and apply ReLU if selected.

`pea` runs PE_N of them in lockstep. The same CLB word goes to all PEs, each with its own
kernel. Their PE_N results go, as one entry, into an 8-entry FIFO. The array fires only when a
data word, all weight words, and FIFO room for every result still in flight are present. When Y
is back-pressured, the array stalls before anything can be lost.

The scale factor comes from the host's fixed-point training. Each layer's weights are scaled so
that its largest weight uses the format's range. The hardware multiplies the result back.
Working out that factor is software.

## Pooling

`pooling` takes the same CLB words instead of the PE array. Each word is first reduced across
the K valid rows. The result is then combined column by column with a RAM that holds one pixel:
`depth/ELEMS` words. The first column stores; later columns keep the max, the min or the sum.
During the last column the combined value leaves directly, one word per channel group.
Average pooling divides the sum by K² and rounds toward zero.

## Output handler and splitting large layers

`output_handler` is a gearbox from PE_N-element result entries to ELEMS-element Y beats. It also
forwards pooling words, and sends a fully connected result as `ceil(PE_N/ELEMS)` beats with the
tail zero-filled. It counts the layer's beats and raises TLAST on the last one.

**Convolution splits.** A layer with more than KERNELS_N kernels is run as several passes of up
to 32 kernels, each pass reading the same X again. Each pass's channels must end up behind the
channels of the earlier passes, inside every pixel. The host keeps two output buffers and passes
the previous pass's output in on XBUF. For every output pixel, the handler first copies
`pre_depth/ELEMS` beats from XBUF, then appends this pass's `n_kernels/ELEMS` beats. After the
last pass, Y holds the whole layer in normal channels-first order.

**Fully connected splits.** A fully connected layer computes PE_N neurons per pass, and the host
places each pass's outputs one after the other. A 4096-neuron layer therefore takes 512 passes.

## What the defaults can run

The design was sized against VGG16 on 224×224 images. The layer shapes below come from VGG16
itself. 13 3×3 convolutions, 5 max-pooling layers and 3 dense layers all fit:

- The widest padded line is 30 × 64 = 1920 words (28×28×512 with padding), within 2048.
- The largest kernel is 3·64 = 192 packages.
- 64 to 512 kernels become 2 to 16 stitched passes at replay 4.
- dense_1 (25088 → 4096) and dense_2 need 512 passes each. dense_3 (5 classes) needs one.

`tb_vgg16_layers` measures this at full depth. One pass of a block-5 convolution (14×14×512,
32 kernels, stitched) takes 183 k cycles. The 16 passes of that layer therefore come to about
17 ms at 172 MHz, before any host or DMA overhead. One 8-neuron pass of dense_1 takes 25 k
cycles, limited by the W stream: 25 088 weights per neuron, 8 per beat.

The two 8-bit configurations are parameter builds rather than the defaults:

- [8,128,8,3,42] needs `P_DATA_W=8`, `P_FRAC_W=6` and `P_KERNELS_N=42`. With integer division
  that gives 5 slots per buffer, i.e. 40 kernels.
- [8,128,16,1,42] additionally uses 16 PEs and DB_OUT_BW = 1 (see below). 42 kernels give
  2 slots per buffer, i.e. 32 kernels.

## Departures from the original description and limits

- **DB_OUT_BW is 3 or 1.** The CLB always builds three-row words. With `P_DB_OUT_BW = 1`,
  `db_narrow` sits between the CLB and the PE array. It hands the PEs one row per cycle, and
  only the K valid rows of a K×K window. Kernels are then sent row by row: one beat per
  package, `K·K·depth/ELEMS` packages per kernel. Pooling always works on the full words.
  Other values are not supported.
- **The realignment of weights** is left to the host. The W stream must already be in window
  order. The hardware only resizes, splits and replays it.
- **No overlap of window output and input.** X stalls while a window is replayed. Buffering that
  would let the next pixels flow in during the replays is not built.
- **Arithmetic details are this design's own:**
  - rounding half up after scaling;
  - saturation;
  - a 48-bit accumulator;
  - average pooling rounding toward zero;
  - a 16-bit scale factor in the data format.
- **Interfaces are this design's own:**
  - the CTRL word layout;
  - the status register map;
  - TLAST placement;
  - the requirement that all weights of a convolution arrive before the first window is computed.
- The host CPU, DRAM, the five DMA engines and the Python host software are outside this RTL. The
  stream and AXI-lite ports are where they connect.
- Timing was not closed for any FPGA. All memories use combinational reads, which suits
  distributed RAM, or block RAM with a register added. The multipliers and the adder tree are
  single stages.

In a generic yosys synthesis of the default top (before technology mapping), all buffers are
inferred as memories (2.97 Mbit) with about 9.5 kbit of flip-flops. The two AXI-lite response
codes are constants by design (OKAY for reads, SLVERR for writes).

## Reset, clocking and lint notes

Everything runs in one clock domain. Control state has an asynchronous active-low reset
(`rst_n`); memory contents are never reset. The handshake assertions name `rst_n` in their
`disable iff` clause, so Verilator reports `rst_n` as used both synchronously and
asynchronously. That use is only in checkers and has no effect on the circuit. The decoded
configuration reaches every block as one struct, so each block leaves the fields it does not
need unread.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and stops itself with a watchdog. Stimulus is random; reference
values are computed in the testbench independently of the RTL. To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl \
          rtl/cnna_pkg.sv tb/tb_cnna_top.sv --top-module tb_cnna_top
./obj_dir/Vtb_cnna_top
```

The package goes first. `-y rtl` finds every module by its file name.

- **`tb_cnna_top`** runs the whole core at reduced sizes (64-bit streams, 4 PEs, 8 kernels,
  depth ≤ 32) through 11 layers. A software model in the testbench produces every Y beat. The
  layers cover:
  - 3×3, 2×2 and 1×1 convolutions;
  - padding, stride 2 and replay;
  - a stitched second pass;
  - saturating and ReLU layers;
  - max, min and average pooling;
  - fully connected layers with a partial last package.

  Every stream gets random gaps and Y random back-pressure. The testbench counts each mechanism
  and fails if one never occurred. The mechanisms are: X stall, Y back-pressure, replay, padding,
  stride, stitching, each pooling type, FC, partial FC package, ReLU and saturation. It also reads
  the status registers.
- **`tb_cnna_full`** builds the top with every parameter at its default. It runs a 6×6×16
  convolution with 16 kernels and padding, a max-pooling layer and a fully connected layer, end
  to end.
- **`tb_vgg16_layers`**, also at the defaults, runs VGG16 shapes at full depth:
  - a block-5 convolution pass (14×14×512, 32 kernels, stitched behind 32 earlier channels);
  - the block-5 max pooling;
  - one 8-neuron pass of dense_1 (25 088 inputs).

  It takes about 10 s in Verilator.
- **`tb_cnna_narrow`** builds the 8-bit, 16-PE, DB_OUT_BW = 1 configuration [8,128,16,1,42],
  with depth limited to 64. It runs 3×3 and 2×2/2 convolutions with replay, a stitched pass,
  max and average pooling, and a fully connected split.
- **`tb_cnna_q8`** runs the same layers on the 8-bit, 8-PE configuration [8,128,8,3,42].
- The unit testbenches check each block's own behaviour. Examples:
  - the PE's 4-cycle latency, rounding and saturation;
  - the line buffer's rotation;
  - the shift buffer's rewind;
  - the weight buffer's kernel-to-PE mapping;
  - the output handler's gearbox and stitching.

The shared end-to-end body is `tb/cnna_tb_body.svh`. Its `conv_layer`, `pool_layer` and
`fc_layer` tasks show how a host must lay out W, X and CTRL for each kind of layer.
