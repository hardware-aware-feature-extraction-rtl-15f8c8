# A 3-bit streaming SuperPoint accelerator

SuperPoint is a convolutional network that finds interest points in a
greyscale image and gives each one a descriptor. It is the front end of a
visual-odometry pipeline. This RTL computes the whole SuperPoint network with
3-bit weights and 3-bit activations. It is built as a chain of streaming
layers: every layer has its own hardware and works on a different part of
the image at the same time. Pixels go in one per clock, and two result
streams come out:

- the 65 interest-point logits of every 8×8 cell;
- the 256-value coarse descriptor of every 8×8 cell.

At the default 640×480 frame size, the slowest stage needs 5,529,600 clocks
per frame. That is 54 frames/s at a 300 MHz clock.

The dataflow follows the FINN style of quantised accelerators:

- one sliding-window unit, one matrix-vector unit (MVAU) and one threshold
  unit per convolution;
- batch-norm and ReLU folded into per-channel thresholds;
- all weights held on chip.

The SuperPoint post-processing is not part of this RTL: Softmax, dropping the
background channel, reshaping to a full-resolution heat map, non-maximum
suppression, descriptor interpolation and L2 normalisation. It runs on the
host, on the two output streams.

## The network as built

| layer  | id | kernel | in → out ch | map size | SIMD | PE | clocks per frame at 640×480 |
|--------|----|--------|-------------|----------|------|----|--------------------------|
| conv1a | 0  | 3×3    | 1 → 64      | W×H      | 1    | 32 | 5,529,600 |
| conv1b | 1  | 3×3    | 64 → 64     | W×H      | 32   | 64 | 5,529,600 |
| pool1  |    | 2×2/2  | 64          | → W/2    |      |    |           |
| conv2a | 2  | 3×3    | 64 → 64     | W/2×H/2  | 16   | 32 | 5,529,600 |
| conv2b | 3  | 3×3    | 64 → 64     | W/2×H/2  | 16   | 32 | 5,529,600 |
| pool2  |    | 2×2/2  | 64          | → W/4    |      |    |           |
| conv3a | 4  | 3×3    | 64 → 128    | W/4×H/4  | 8    | 32 | 5,529,600 |
| conv3b | 5  | 3×3    | 128 → 128   | W/4×H/4  | 16   | 32 | 5,529,600 |
| pool3  |    | 2×2/2  | 128         | → W/8    |      |    |           |
| conv4a | 6  | 3×3    | 128 → 128   | W/8×H/8  | 8    | 16 | 5,529,600 |
| conv4b | 7  | 3×3    | 128 → 128   | W/8×H/8  | 8    | 16 | 5,529,600 |
| convPa | 8  | 3×3    | 128 → 256   | W/8×H/8  | 8    | 32 | 5,529,600 |
| convPb | 9  | 1×1    | 256 → 65    | W/8×H/8  | 4    | 5  | 3,993,600 |
| convDa | 10 | 3×3    | 128 → 256   | W/8×H/8  | 8    | 32 | 5,529,600 |
| convDb | 11 | 1×1    | 256 → 256   | W/8×H/8  | 8    | 8  | 4,915,200 |

Clocks per frame for one layer are `pixels × (K·K·Cin/SIMD) × (Cout/PE)`.
The folding (SIMD input lanes and PE output channels per clock) was picked
so that all the big layers take the same time. None of them then waits for
another.

The encoder has three pools. That gives the 128 × W/8 × H/8 feature map
that both heads need. It is the shape of the original SuperPoint network.
The heads follow it after a stream duplicator:

- `convPa`→`convPb` is the interest-point head;
- `convDa`→`convDb` is the descriptor head.

Hidden activations are unsigned codes 0..7, which acts as a quantised ReLU.
The two output layers have no ReLU, so they give signed codes -4..3.

Padding is zero, with a border of one pixel for the 3×3 layers. W and H
must be multiples of 8.

## Streams

Every connection is a valid/ready stream. A word moves when both valid and
ready are high. A sender holds a word until it is taken. No valid depends on
the ready it is paired with. Assertions in the MVAU and threshold unit check
the hold rule.

A C-channel pixel goes as C/N words of N lanes, and lane `s` of word `g` is
channel `g·N+s`. Pixels go in raster order, and frames follow each other with
no gap or marker. Between layers with different lane counts, `stream_dwc`
splits a wide word into narrower ones in lane order.

The top-level ports are:

| port            | width | content |
|-----------------|-------|---------|
| `pix_*`         | 8     | one greyscale pixel per word, raster order |
| `semi_*`        | 15    | five 3-bit signed logits; 13 words per 8×8 cell (channels 0..64) |
| `desc_*`        | 24    | eight 3-bit signed values; 32 words per 8×8 cell (channels 0..255) |
| `wgt`, `thr`    | struct | host load ports, below |

## Loading weights and thresholds

Weights and thresholds are not part of the logic. All layers share two write
ports, and each layer accepts only writes that carry its own `layer` number.

`wgt` (`wgt_wr_t`) writes one row of SIMD weights into the table of one PE:

- `row = nf·SF + sf`, where SF = K·K·Cin/SIMD;
- the weight in bits `[3s+2:3s]` multiplies input lane `s` at fold step
  `(nf, sf)`;
- that PE works on output channel `nf·PE + pe`;
- the window element of input lane `s` at step `sf` is
  `(ky·K + kx)·Cin + sf·SIMD + s`, with ky the outermost index.

`thr` (`thr_wr_t`) writes threshold `idx` (0..6) of output channel `ch`. The
value is signed and saturated to the accumulator width plus one bit.

Load everything before the first pixel. The weight table holds about 1.30 M
3-bit weights.

## Threshold activation

Each accumulator `x` of output channel `c` becomes a code:

- the code is the smallest `i` with `t_c,i > x`;
- if no threshold is greater than `x`, the code is 7;
- a layer-constant bias is then added: 0 for hidden layers, -4 for the output
  layers.

For thresholds in increasing order, this is the number of thresholds that are
`≤ x`. Batch-norm scale and offset, and the dequantisation scales, are meant
to be folded into the thresholds offline. The unit does not use a single
multiplier.

## The MVAU

The MVAU handles one output pixel at a time:

- in each clock, each of its PE lanes forms SIMD products of a 3-bit signed
  weight and a 3-bit (or 8-bit for conv1a) unsigned activation;
- the products are added to an accumulator;
- after SF steps, one word of PE accumulators goes out, and the next group
  of PE channels starts;
- the window vector arrives once, during the first channel group, and is
  replayed from a small buffer for the other `NF−1` groups.

Accumulators are sized so that they cannot overflow (`acc_bits()` in
`sp_pkg`).

## The sliding window: a ring of four line buffers

This is the least obvious part. Each 3×3 layer keeps its input rows in a ring
of K+1 = 4 line buffers. Output row `oy` may start once input row
`min(oy+1, H−1)` is complete. Input row `r` may overwrite its slot once
nothing still needs the row that slot held.

Both counters run on across frames and are compared wrap-safe. As a result,
the first rows of frame n+1 enter the ring while the bottom rows of frame n
are still being read. Without this, every layer would drain at the end of
each frame, and the chain of fifteen layers would lose about a third of its
rate.

The window is read combinationally from the line buffers. Out-of-image
positions read as zero. The output order is (ky, kx, channel group).

## Pooling

`maxpool` keeps the running maximum of one half row, `W/2 × C` codes. It
emits a pooled pixel at every odd column of every odd row.

## Where this departs from, or adds to, the published design

- **Three pools, not four.** The description counts four conv blocks "each
  followed by" a 2×2 max-pool, but also gives a W/8 × H/8 encoder output.
  The output size was kept. The fourth block has no pool.
- **Head labels.** The network figure labels the interest-point tensor with
  "D" and the descriptor tensor with "65". The text says 65 for interest
  points and 256 for descriptors, and the text was followed.
- **Channel counts** of the encoder (64, 64, 64, 64, 128 …) and the 256-wide
  first head layers are those of the original SuperPoint. Only 128, 65 and
  256 are stated.
- **Signed 3-bit outputs** for convPb and convDb. The bit width of these two
  layers is not stated.
- **Folding, line-buffer ring, stream format, load ports, reset** (active-low
  asynchronous, control state only) and the **8-bit input pixel** are all
  this design's choices.
- **Post-processing is outside.** The description says all processing is in
  the programmable logic. But its system figure and its timing table place
  Softmax, normalisation and NMS after the network, on the processor. The
  RTL ends at the logits and the coarse descriptors.
- **Only the 3-bit ZCU102 build exists.** The smaller Kria folding (27
  frames/s) and the INT8, INT4 and 4-2-4 variants would need other
  SIMD/PE values or bit widths in `sp_pkg`. They have not been built or
  tested.

## Verification

The testbenches in `tb/` share `sp_ref_pkg`, a reference model written
directly from the definitions. It convolves, thresholds and pools plain
integer arrays, without the stream order or folding of the hardware. Test
weights (-3..3), thresholds and images come from an integer hash, so no data
files are needed.

Each testbench:

- compares every output word with the reference;
- inserts random stalls on inputs and outputs;
- prints `TB_RESULT checks=… failures=…`;
- has a watchdog.

| testbench | what it runs |
|-----------|--------------|
| `tb_threshold_unit` | rule at edges, signed bias, saturation of loaded values |
| `tb_sliding_window` | windows, padding, two frames back to back |
| `tb_mvau` | dot products against reference, sustained rate |
| `tb_maxpool`, `tb_stream_dup` | pooling; independent stalls of the two copies |
| `tb_conv_layer` | one layer with writes for other layers on the bus |
| `tb_sp_encoder` | 16×16 image, 2 frames, all 8 layers |
| `tb_sp_detector_head`, `tb_sp_descriptor_head` | 32×24, 2 frames |
| `tb_superpoint_accel` | the whole design at 32×24, 4 frames |

The `tb_superpoint_accel` test:

- checks all output words;
- measures the interval between frames, which must stay within 1.5× of the
  slowest layer;
- counts input stalls, back-pressure on each output, skew between the two
  heads, full line-buffer rings, full pool outputs, and frames overlapping
  inside the pipeline.

The largest simulated image is 32×24. A full 640×480 frame is about 5.5 M
clocks of a design with some 4,700 multipliers active per clock. Extrapolating from the smaller runs, Verilator would need well over ten
minutes for one full frame, so no full-size simulation is included.

To run one testbench:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/sp_pkg.sv $(ls rtl/*.sv | grep -v sp_pkg) tb/sp_ref_pkg.sv \
  tb/tb_superpoint_accel.sv \
  --top-module tb_superpoint_accel -o sim && ./obj_dir/sim
```

Packages must come before the files that import them.

To change the frame size, set `W`/`H` on `superpoint_accel`. To change the
folding, edit the SIMD/PE values in `sp_encoder`, `sp_detector_head` and
`sp_descriptor_head`, and the matching table in `sp_ref_pkg`. The
constraints are:

- SIMD divides the layer's input channel count;
- PE divides its output channel count;
- neighbouring lane counts divide each other (`stream_dwc` only splits words).
