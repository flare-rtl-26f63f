# FLARE computing core: SystemVerilog RTL

Scientific simulations write volumes of floating-point fields that are too
large to store or move as they are. Error-bounded lossy compressors of the SZ
family predict every point from already-reconstructed neighbours, quantize the
prediction error against a user error bound and entropy-code the quantization
codes. Neural-hybrid compressors then run a small neural network on the
reconstructed field to learn and remove part of the remaining error. FLARE is
an accelerator for that hybrid: one chip holds the interpolation predictor, a
Huffman codec and a neural-network engine, and it keeps everything between
them on chip.

Two ideas let it do that with modest buffers:

* **Look-ahead (depth-first) interpolation order.** Multilevel interpolation
  normally finishes a level over the whole block before starting the next,
  so every level's results must be kept. Here the block is split in z-halves,
  and the lower half is taken all the way to the finest level before the upper
  half is started. Finished z-slices therefore appear early and leave at once.
* **Slice-wise normalization fused into the first convolution.** The network
  wants normalized data, but the global min and max over the whole dataset are
  not known until the end. Instead, each z-slice is normalized with its own
  min and max, which the predictor tracks while it reconstructs the slice. The
  normalization is then folded into the first layer's weights, so no
  normalized copy of the data is ever written.

This RTL builds the computing core around those two ideas at the sizes of the
evaluated configuration: 32×32×32 blocks, M = 4 prediction lanes, 32 MB of
SRAM, 8 MB and 32 MB FIFOs, a 128×128 PE array and a 24 MB global buffer.
Several cores can be instantiated side by side (N, default 1).

## Structure

```
            h_* (DRAM side)                     bs_* bitstream out / bi_* in
                 |                                        |
         +---------------+     q items    +-------+  +----------+
         |  sram_buffer  |<-->  ...  ---> | FIFO1 |<>|  codec   |
         |  M banks      |   prediction   +-------+  |  engine  |
         +---------------+    engine                 +----------+
                 ^          M x interp_lane
                 |          (systolic_1d +   slices +-------+   +---------------+
                 +--------- lookahead_sched) -----> | FIFO2 |-->| neural_engine |--> o_*
                                                    +-------+   | norm_fusion   |
                                                                | pe_array_2d   |
                                                                | global buffer |
                                                                +---------------+
```

| module | what it is |
|---|---|
| `flare_pkg` | shared types: 32-bit Q.16 data, 16-bit codes, the quant item `{code, value}`, the prediction settings struct |
| `sram_buffer` | 32 MB, one bank per lane plus a DRAM-side port into every bank |
| `systolic_1d` | three weight-stationary PEs (w1, w2, w3), a two-stage anchor delay line, error, quantizer, reconstruction |
| `lookahead_sched` | produces the depth-first task order for one block |
| `interp_lane` | one block: walks the tasks, runs the interpolation passes, reads and writes its bank, tracks slice min/max, streams slices |
| `prediction_engine` | M lanes and the round-robin merge of their outputs |
| `circ_fifo` | ring-buffer FIFO (FIFO1: quant items; FIFO2: slice words) |
| `codec_engine` | canonical-Huffman encoder and decoder, symbol histogram |
| `norm_fusion` | per-slice rescaling of the first-layer weights and biases |
| `pe_array_2d` | 128×128 output-stationary MAC array |
| `neural_engine` | slice intake, global buffer, fused 3×3 convolution on the array |
| `flare_core` | one computing core with the mode switch between compression and decompression |
| `flare_top` | N cores, every port as an array indexed by core |

## The look-ahead order

A block has edge B = 2^K (K = 5). Interpolation level l uses stride
s = 2^(l-1). The top level K only predicts the far corner planes from the
origin; level 1 fills the odd positions. A *task* is a pair (level l, z-slab
[lo, lo + 2^l)). Within a task the lane makes three passes, each predicting
the points that lie halfway between known points along one axis:

1. **z-pass:** the plane z = lo + s, at x and y multiples of 2s;
2. **y-pass:** y odd multiples of s, x multiples of 2s, every plane of the
   slab that is a multiple of s;
3. **x-pass:** x odd multiples of s, y multiples of s, the same planes.

The depth-first order recursively handles the lower half of a slab before its
upper half. For B = 8 the order is

```
L3[0,8)  L2[0,4)  L1[0,2)  L1[2,4)  L2[4,8)  L1[4,6)  L1[6,8)
```

`lookahead_sched` produces it with a counter rather than a stack. For
t = 0 … B/2−1 (lo = 2t) it issues levels top(t) down to 1, where top(0) = K
and top(t) = (number of trailing zeros of t) + 1. A level-1 task is the last
one that touches slices lo and lo+1, so those two slices are final as soon as
it ends. The lane then streams them out (min, max, then B·B values), while
the rest of the block is still being predicted.

**The one dependency the order breaks.** The z-pass of a slab [lo, lo+2s)
predicts the plane lo+s from the planes below and above it, on the grid of
x and y multiples of 2s. The plane above, lo+2s, is the bottom plane of the
next slab. Its points at that grid are filled in by the y- and x-passes of
the *next* slab's level-(l+1) task. For a lower-half slab that task has
already run. For an upper-half slab it has not, because the depth-first order
reaches it later. The z-pass of an upper-half slab therefore predicts by
copying its lower anchor. The same fallback applies to any target whose
upper neighbour t+s lies outside the block. Everywhere else the prediction
uses the 4-point formula on the anchors t−3s, t−s and t+s, or the linear
formula when t−3s is outside the block. The block origin is predicted as
zero. The predictor is therefore not bit-identical to a breadth-first SZ3
interpolation. The error bound holds everywhere; a few targets are simply
predicted less well.

## A prediction lane

Each lane owns one bank. A block lives at local address
`{slot, sel, z, y, x}`, with sel = 0 for the original data and sel = 1 for the
reconstruction. A pass runs line by line:

* the anchors t0−3s (when it exists) and t0−s are read and pushed into the
  systolic array's delay line;
* then, for each target t, the anchor t+s is read (it enters PE3 while the
  delay line holds t−s for PE2 and t−3s for PE1), the original is read, and
  the array computes

  pred = (w1·a[t−3s] + w2·a[t−s] + w3·a[t+s] + 128) >> 8 (weights Q.8;
  default (−1, 6, 3)/8)

  q = round((orig − pred) / 2eb), computed as ((orig − pred)·⌊2^32/2eb⌉ + 2^31) >> 32

  recon = pred + 2eb·q.

A point is *unpredictable* if |q| ≥ radius, if |orig − recon| > eb after
rounding, or if recon overflows 32 bits. It is then sent as code 0 with its
original value, and recon = orig. Otherwise the code is q + radius (radius
32768, so codes are 16-bit). The reconstruction is written back at sel = 1
and updates the running min/max of its z-slice. A point takes 3 to 4 cycles.

In decompression the lane makes exactly the same reads, except the original,
and takes the code, plus the value for code 0, from its input stream.

Data are 32-bit signed fixed point with 16 fraction bits. The error bound
`eb` and `inv2eb = round(2^32 / 2eb)` are given in `cfg`, so the host turns a
relative bound into an absolute one. The lanes stall on back-pressure
(valid/ready).

### Merging M lanes

All M lanes start together on M blocks and follow identical schedules. The
engine merges their outputs in strict rotation: quant items one point per lane
in turn, and slices one *whole* slice per lane in turn. Decompression hands
decoded items back to the lanes in that same rotation. The compressed stream
is therefore a fixed interleave of M blocks that decompression can replay
exactly, without block markers.

## Core, FIFOs and modes

```
compression    SRAM -> prediction -> FIFO1 -> encoder -> bs_*
                                  \-> FIFO2 -> neural engine -> o_*
decompression  bi_* -> decoder -> FIFO1 -> prediction -> SRAM
                                              \-> FIFO2 -> neural engine -> o_*
```

In compression, the encoder and the neural engine consume the same
prediction run at the same time, while later slices are still being
predicted. In decompression, the three engines form one pipeline. FIFO1
(8 MB, 1M 64-bit entries) carries quant items in both directions through a
mode multiplexer. FIFO2 (32 MB, 8M values plus a slice-end bit) carries
slices. Because the look-ahead order releases work in bursts, the FIFOs are
what lets the engines run at their own pace. When a FIFO fills, the lanes
simply stall.

`flare_core` control:

* `start` (in the idle state) begins a run in `mode` on the blocks at `slot`.
  It empties FIFO1 and clears the decoder.
* When the prediction finishes, the core drains:
  * in compression, it waits until FIFO1 is empty, has the encoder flush the
    last partial word (zero padded), and waits for FIFO2 and the neural
    engine;
  * in decompression, it discards whatever the decoder produced from the
    padding bits and waits for FIFO2 and the neural engine.
* `done` pulses at the end of the drain. `fifo1_peak` and `fifo2_peak` report
  the deepest occupancy of the run.

## Huffman codec

The codec uses a canonical Huffman code, held in tables that the host writes
through `cb_*`:

| `cb_sel` | table | entry |
|---|---|---|
| 0 | encode, per symbol | `{length[5:0], code[31:0]}`, code right-aligned |
| 1 | symbol, per canonical index | symbol |
| 2, 3, 4 | per length 1..32 | first code, first index, count |

The encoder takes one symbol per cycle. It appends the code, and for symbol 0
the 32-bit value, MSB first to a 96-bit buffer, and emits 32-bit words. The
decoder consumes one bit per cycle and tests
`code − first_code[len] < count[len]` for the growing prefix. On a hit it
looks up the symbol. While encoding, the engine counts a 65536-entry
histogram, which the host reads through `hist_addr` and `hist_data`.
`hist_clear` zeroes the histogram in a sweep of one entry per cycle.
Building the code from the histogram is left to the host: the tables would
come from a previous block or a first pass.

## Neural engine and the fused first layer

For slice i with extremes min_i and max_i, normalizing and then convolving is
the same as convolving the raw slice with rescaled weights:

```
O[x,y,o] = Σ D[x+kx, y+ky]·W'[kx,ky,o] + b'[o]
W'       = W / (max_i − min_i)
b'[o]    = b[o] − min_i · Σ W'[kx,ky,o]
```

`norm_fusion` computes r = max − min (1 for a flat slice), then
recip = ⌊2^48 / r⌋ with a restoring divider (49 cycles). It then produces one
weight per cycle:

* W' = sat32((W·recip) >> 20);
* at the last tap of each channel, b' = (b << 28) − min·ΣW'.

The formats are:

| quantity | format |
|---|---|
| W, b | Q.12 in 16 bits |
| W' | Q.24 in 32 bits |
| b' | Q.40 in 64 bits |
| the convolution sum | Q.40 |

The raw products can be huge when min is far from zero, but they cancel
against the min term of b'. Because all sums are 64-bit two's complement,
that cancellation is exact even if intermediate sums wrap. W' saturates only
for slices whose range is below |W|/128 of a unit.

`neural_engine` works on one slice at a time:

1. It takes min, max and B·B values from FIFO2. The values go to a slice
   register file and to a ring of input slices in the lower half of the 24 MB
   global buffer.
2. It runs `norm_fusion`.
3. It computes the valid 3×3 convolution, (B−2)² pixels × OC channels
   (OC = 16), as a matrix product on `pe_array_2d`, mapped in im2col style:
   * ROWS output pixels form one tile, one pixel per PE row;
   * output channels map to PE columns;
   * the 9 taps are the depth.

   For each tile the engine:
   * assigns pixel coordinates, one row per cycle;
   * clears the array;
   * feeds the 9 im2col columns together with the 9 rows of W';
   * waits ROWS+COLS+2 cycles for the skewed array to settle;
   * drains pixel by pixel and channel by channel, adding b' and shifting
     Q.40 down to Q.16.

Each result goes to the upper half of the global buffer (a ring) and out on
`o_*`, with `o_last` on a slice's final value.

`pe_array_2d` is output stationary. Row r of A and column c of B enter
skewed by r and c cycles, A moves right and B moves down, and a valid bit
travels with A. With back-to-back input, the product is complete
KD + ROWS + COLS − 2 clock edges after the edge that takes the first input.

Only this first layer is built. The rest of the network and its on-chip
training are outside this RTL.

## Using the core

1. Write each block through `h_*`. Lane b's block goes at the flat address
   `b·(SRAM words/M) + (slot·2 + 0)·B³ + (z·B + y)·B + x`.
2. Write the Huffman tables (`cb_*`), and the first-layer W (address k·OC + o,
   k = ky·3 + kx) and b.
3. Set `cfg`: w1, w2 and w3 (Q.8), eb, inv2eb and radius.
4. Pulse `start` with `mode = MODE_COMPRESS`. Collect `bs_*` and `o_*` until
   `done`. Read the reconstruction at sel = 1 if needed, and the histogram.
5. To decompress, pulse `start` with `mode = MODE_DECOMPRESS` and feed the
   words on `bi_*`. The blocks appear at sel = 1, and the same feature maps
   leave on `o_*`.

`flare_top` has the same ports, each as an unpacked array over N cores.

## Verification

Every module except the package has a self-checking testbench in `tb/`. Each
ends with a `TB_RESULT checks=… failures=…` line and has a watchdog. Build
and run any of them with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_flare_top \
    rtl/flare_pkg.sv rtl/*.sv tb/tb_flare_top.sv -o sim && obj_dir/sim
```

The reference values in every testbench are worked out independently of the
RTL:

* **systolic_1d:** longint prediction and quantizer model, error bound, and
  round trip through decompression.
* **lookahead_sched:** recursive model of the depth-first order for K = 3
  (the 7 tasks above) and K = 5 (31 tasks), under random back-pressure.
* **interp_lane** (K = 4) and **prediction_engine** (M = 3, K = 3): a full
  behavioural model of the passes, fallbacks, quantizer and slices. Each
  quant item, slice word and reconstructed point is compared, then the whole
  run is decompressed and compared again.
* **codec_engine:** a random canonical code with lengths 1–20. Words are
  compared bit-exactly with a software packer, then the histogram is checked,
  the stream decoded under back-pressure, and `dec_clear` tested.
* **norm_fusion:** bit-exact W'/b'. The fused layer on raw data must match
  the original layer on normalized data (floating point, within the W'
  rounding). The latency must be 1 + 49 + 9·OC cycles.
* **pe_array_2d** (8×6): random products with input gaps, the exact
  completion cycle, and `clear`.
* **neural_engine** (8×8 slices, 8×8 array, 4 channels): every output value,
  `o_last`, the slice counter and the global-buffer contents.
* **flare_core** and **flare_top** (two cores at once): reduced sizes (M = 2,
  8³ blocks, 512-byte FIFOs, 8×8 array, 4 channels) with the full
  65536-symbol codec. Each run compresses, checks the error bound, histogram
  and every feature value against a software convolution of the
  reconstructed slices, then wipes the SRAM, decompresses the recorded
  bitstream and requires the same blocks and feature maps. They count and
  require:
  * the prediction stalling on a full FIFO1;
  * FIFO2 full;
  * bitstream back-pressure;
  * FIFO buffering;
  * both modes;
  * unpredictable points;
  * every slice streamed;
  * one fusion per slice.

No testbench runs the top at its full default sizes. A Verilator build of
the default configuration, a 128×128 array of 64-bit MACs fully unrolled,
did not finish within ten minutes: elaboration alone took about nine. The
largest configuration simulated end to end is the reduced one above. At full
size, the block-level tests cover:

* the lookahead order at K = 5;
* the codec with its full 65536-symbol tables;
* norm_fusion at KT = 9 and OC = 16.

The array itself is checked at 8×8 and 8×6, through its parameters.

## Where this design departs from the paper, or goes beyond it

* **Number format.** Data are Q.16 fixed point. The paper does not state a
  format; its datasets are floating point, so a host would convert.
* **Interpolation details.** The coefficients, the edge fallbacks, the z-pass
  copy rule for upper-half slabs, and the pass order z, y, x are choices of
  this design.
* **Codec.** The canonical-code table format, the verbatim values in the
  stream and the host-built code are choices of this design. The paper names
  a Huffman engine built from ALUs and a control unit, without details.
* **Neural engine.** Only the first, normalization-fused convolution is
  built. Its channel count (16), kernel (3×3, valid) and array mapping are
  this design's choices. The remaining layers and training are not
  implemented.
* **SRAM use.** Each block's original and reconstruction stay in its bank for
  the whole run (256 KB per block). The design does not reproduce the paper's
  finer accounting of a 3.46× smaller SRAM peak, which would free Level-1
  results.
* **Memories.** All memories are plain synchronous arrays, not SRAM macros.
  DRAM and whatever moves data between it and the cores are outside the
  design.
* **Lint notes.** The lint tools report, by design:
  * unused upper bits of FIFO1 words;
  * a few status outputs that are not consumed inside the core;
  * `rst_n` used both as the asynchronous reset and as the enable of the
    handshake assertions.
