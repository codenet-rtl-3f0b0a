# CoDeNet dataflow accelerator

Deformable convolution lets a network choose, for every output pixel, where
its 3x3 kernel samples the input. It is a strong tool for object detection,
but it is hard on hardware. The sample positions are data-dependent and
fractional, so an accelerator can neither predict which inputs it needs nor
keep them in a small on-chip buffer. It also has to interpolate every sample.

This design changes the operation until the hardware becomes simple, and then
builds that hardware. The deformable convolution it runs has four
restrictions:

* **Depthwise.** Each channel is filtered on its own (3x3 depthwise). A
  separate 1x1 convolution mixes the channels.
* **Bounded.** The learned displacement is clipped to `[0, 7]`, so a sample
  is never more than 7 rows or columns from its output pixel.
* **Square.** One number `d` per output pixel describes the whole pattern.
  The nine samples sit at `(y + i*d, x + j*d)` for `i, j` in `{-1, 0, 1}`:
  an ordinary 3x3 kernel with a per-pixel dilation. `d = 1` is the plain
  depthwise convolution.
* **Integer.** `d` is rounded, so there is no interpolation.

These restrictions turn the hard problem into a line-buffer problem. Every
sample lies within 7 rows of the output row, so 15 buffered input rows hold
everything one output row can touch. Each input word is then read from DRAM
exactly once. The three rows of a square pattern are always three different
lines, so three read ports can fetch a column of the pattern in one cycle.
Three copies of the buffer, one per kernel column, deliver all nine samples
in one cycle.

The RTL is the programmable-logic half of a CPU + FPGA detection system. The
accelerator runs the layers that dominate the work: 1x1 convolution, 3x3
depthwise (deformable) convolution, and the quantization after each. The
processor runs everything else.

## Dataflow

One *run* executes one layer pair:

```
 in_* --> [Inputs FIFO] --+--> [1x1 engine: 16x16 MAC, quant] --+--> [link FIFO] --+
                          |                                     |                 |
                          +------------- bypass_1x1 ------------+                 |
                                                                                  |
      +---------------------------------------------------------------------------+
      |
      +--> [3x3 engine: 15-line buffer x3 banks, 9x16 MAC, quant] --+--> [Outputs FIFO] --> out_*
      |                          ^                                  |
      +----------------------------------- bypass_dw ---------------+
                                 |
 off_* --> [Offsets FIFO] -------+

 prm_wr_* --> parameter buffers: 1x1 weights, 3x3 weights, 1x1 and 3x3 quant parameters
```

There is no central sequencer. Each engine starts as soon as its input FIFO
has data and stalls when its output FIFO is full (valid/ready everywhere).
The 1x1 engine and the 3x3 engine therefore work at the same time on
different pixels of the same layer.

Either engine can be bypassed. Its input stream is then steered around it,
which gives three run types:

* 1x1 then 3x3;
* 1x1 only, e.g. the pointwise convolution that ends a ShuffleNet unit;
* 3x3 only, e.g. a stride-2 depthwise convolution.

All weights and quantization parameters of a layer are loaded into on-chip
buffers before the run. They are then reused for every pixel, so the only
DRAM traffic during a run is the feature-map streams.

`codenet_accel` is the top. Its parts are:

| module | role |
|---|---|
| `codenet_pkg` | widths, word types, the parameter-buffer select enum, the layer configuration record, offset clipping |
| `stream_fifo` | first-word-fall-through FIFO with valid/ready; used for Inputs, Offsets, the link between the engines, Outputs, and inside both engines |
| `param_buffers` | four preloaded memories with registered reads |
| `conv1x1_engine` | 16x16 MAC array, output-register accumulation, quantization |
| `line_buffer` | 15 line memories, one write port, three read ports |
| `dwconv_engine` | line-buffer writer, square-pattern reader, 9x16 MAC array, quantization |
| `quant_unit` | scale, bias, ReLU, shift, keep the low 8 bits |

## The line buffer and square sampling

This is the heart of the design, and the part whose timing is easiest to get
wrong.

### What is stored where

The input of the 3x3 engine is an NHWC stream. A pixel is `cg = channels/16`
consecutive 128-bit words, and a row is `W * cg` words. Input row `r` goes into
line `r mod 15` at word address `x * cg + g` (column `x`, channel group `g`).
Each of the 15 lines is a separate memory of `ROW_WORDS` (default 1024) words
with its own read address. That is what makes parallel reads of different
rows possible.

### Which rows must be resident

Output pixel `(cy, cx)` with offset `d <= 7` reads rows `cy - d`, `cy`,
`cy + d`, all within `[cy - 7, cy + 7]`: 15 rows. The engine keeps exactly
that window:

* **Reader rule.** Output row `cy` does not start until rows up to
  `min(cy + 7, H - 1)` have been written. Rows that do not exist read as zero.
* **Writer rule.** Row `cy + 8` is not written while output row `cy` is being
  computed, because it would overwrite line `(cy - 7) mod 15`, which `cy`
  may still need.

As a result, rows `cy - 7 .. cy + 7` are always in the buffer while row `cy`
is computed. No sample ever misses and no input word is fetched twice.
`in_ready` of the 3x3 engine is simply "the writer is allowed to write the
next row". That back-pressure travels up through the link FIFO into the 1x1
engine and the Inputs FIFO.

The same rules cover stride 2. Output rows `0, 2, 4, ...` are centred on
input rows `0, 2, 4, ...`. When the reader advances by two rows, the writer
may write two more rows.

Because the writer must wait for the reader, the write of row `cy + 8` and
the computation of row `cy` do not overlap in this design. A 16th line would
allow them to overlap. That is a possible extension; it is not the 15-line
buffer described for this accelerator.

### Reading a pattern: three ports, three banks

The nine samples of a pattern lie on three rows and three columns. The
square shape guarantees that the three rows are three different lines, so a
line buffer with three read ports (one per row) fetches one column of the
pattern per cycle.

To feed the 9x16 multiplier array every cycle, the engine keeps three
identical banks of the 15-line buffer. Bank `k` serves kernel column
`k = 0, 1, 2`, and every input word is written into all three banks.

For one output pixel and one channel group `g`, all nine reads go out in the
same cycle. Port `p` (`p = 0, 1, 2`) of bank `k` reads:

* line `(cy + (p - 1) * d) mod 15`;
* word `(cx + (k - 1) * d) * cg + g`.

The three ports of a bank always name three different lines, except when
`d = 0`. Then all three name the same line at the same address, which the
line buffer allows. A sample whose row or column falls outside the image is
replaced by zero. The 16 reduction trees of 9 products then form 16 sums.

The banks cost memory, not logic. 3 banks x 15 lines x 1024 words x 128 bits
is 5.9 Mbit, most of the block RAM of a small Zynq UltraScale+ device. A
single bank would fit easily, but would take three cycles per group.

### Offsets

The offset stream carries one signed 8-bit value per output pixel. The value
is shared by all channel groups of that pixel and clipped to `[0, 7]` by the
engine. With `deform_en = 0`, no offsets are consumed and `d = 1`. Taking an
offset costs one cycle per deformable output pixel.

### Timing of one group

| cycle | action |
|---|---|
| t | nine line-buffer reads; 3x3 weights of group `g` read |
| t+1 | samples and weights registered |
| t+2 | MAC and reduction; quant parameters read |
| t+3 | quantized word written to the engine's output FIFO |

A new group can start every cycle, as long as the engine's output FIFO is not
nearly full. A stride-1 layer of `H x W` pixels with `cg` groups therefore
costs about:

* `H * W * cg` write cycles;
* `H * W * (cg + [deform])` compute cycles;
* some cycles of pipeline fill per row.

The write and compute terms add, because the writer waits for the reader (see
above). A test layer of 16 x 8 pixels with 2 groups takes 531 cycles for its
256 groups.

## 1x1 engine

The engine is a 16x16 array of 4-bit x 8-bit multipliers. Each cycle it takes
one 16-channel input word and broadcasts channel `i` to the 16 multipliers of
column `i`. Each multiplier gets its own weight from a 16x16 weight tile.
Sixteen adder trees of 16 products each give 16 partial sums, which are added
to 16 output registers.

The schedule for one pixel is:

1. Collect the pixel's `in_groups` words in one of two pixel banks (one word
   per cycle). This happens while the pixel in the other bank is computed.
2. For every output group, run `in_groups` rounds (one per cycle). The first
   round loads the output registers and later rounds add to them.
3. After the last input group, send the registers through the quantization
   unit into the engine's output FIFO.

Weight tiles are read at consecutive addresses starting from 0 for every
pixel, in the order output group outer, input group inner. Tile address
`og * in_groups + ig` holds the weights from input group `ig` to output
group `og`. A round is issued only when the output FIFO has room for
everything already in flight. Because loading overlaps computing, a pixel
costs `in_groups * out_groups` cycles, or `in_groups` if `out_groups = 1`.
In the block test, 6 pixels with 4 input and 3 output groups take 78 cycles:
72 rounds, the first pixel's load, and the pipeline.

## Quantization

Each engine ends in a `quant_unit`. Per channel `c`, it computes:

```
y = sum16[c] * scale[c] + bias[c]      33-bit signed
y = max(y, 0)                          if the layer's ReLU bit is set
q = (y >>> shift)[7:0]                 low 8 bits, no saturation
```

Batch normalization is folded into `scale` and `bias` offline, and ReLU is
merged into the same step. The shift is per layer (`shift = 0` gives the pure
multiply-add). It lets a fixed-point `scale` with fractional bits be used. The
engines add into 16-bit registers that wrap on overflow. That is the sum
width of this design, and it is the quantized model's job to stay inside it.

## Configuration and data formats

### Running a layer

1. Write the parameters through `prm_wr_en / prm_wr_sel / prm_wr_addr /
   prm_wr_data`, one word per cycle.
2. Hold `cfg` valid and pulse `start` for one cycle. The record is captured.
3. Stream the input on `in_*` and, for a deformable layer, one offset per
   output pixel on `off_*`. Collect the result on `out_*`.
4. `busy` falls and `done` pulses for one cycle when the last output word has
   been accepted.

### `layer_cfg_t` (packed, first field at the MSB)

| field | bits | meaning |
|---|---|---|
| `height`, `width` | 10, 10 | input size in pixels |
| `in_groups` | 7 | input channels / 16 (1..64) |
| `out_groups` | 7 | 1x1 output channels / 16 (1..64) |
| `stride2` | 1 | 3x3 engine stride 2; output is `ceil(H/2) x ceil(W/2)` |
| `deform_en` | 1 | take one offset per output pixel; otherwise `d = 1` |
| `bypass_1x1`, `bypass_dw` | 1, 1 | route around an engine |
| `relu_1x1`, `relu_dw` | 1, 1 | ReLU in each quant unit |
| `shift_1x1`, `shift_dw` | 5, 5 | right shift in each quant unit |

The 3x3 engine works on the 1x1 engine's output channels (`out_groups`
groups), or on `in_groups` when the 1x1 engine is bypassed.

### Word layouts

* **Stream word (128 bits):** one pixel's group of 16 channels. Channel `c`
  of the group is `data[8c +: 8]`, signed. The `cg` words of a pixel
  (channel groups 0..cg-1) are consecutive, and pixels are in row-major order.
* **`BUF_W1` (1024 bits):** weight from input lane `i` to output lane `o` is
  `[4(16o + i) +: 4]`.
* **`BUF_WDW` (576 bits, word = group):** tap `t = 3*row + col` of lane `c` is
  `[4(9c + t) +: 4]`.
* **`BUF_Q1`, `BUF_QDW` (768 bits, word = group):** lane `c` is
  `[48c +: 48]`, with `{bias[31:0], scale[15:0]}`.

## Performance at 250 MHz

The 1x1 array does 256 MACs a cycle, a peak of 128 GOP/s.

The 3x3 array has 144 multipliers and completes one 16-channel group per
cycle, a peak of 72 GOP/s. The two engines run at the same time.

The end-to-end test measures a 32 x 32 pixel, 64 -> 64 channel, 1x1 + 3x3
deformable layer pair. It takes 19 607 cycles (78 us). The bound set by the
1x1 engine is 1024 pixels x 16 rounds = 16 384 cycles.

`tb_codenet_workloads` runs three layers of realistic size, all at default
parameters:

| layer | cycles | time | rate |
|---|---|---|---|
| 64 x 64 pixels, 256 channels, square deformable depthwise only | 135 240 | 0.54 ms | 35 GOP/s |
| 64 x 64 pixels, 128 -> 128 channels, 1x1 + 3x3 (a 2x-width backbone unit) | 285 531 | 1.14 ms | 126 GOP/s |
| 8 x 8 pixels, 496 -> 496 channels 1x1 (961 weight tiles) + stride-2 3x3 | 62 046 | 0.25 ms | 127 GOP/s (1x1 part) |

The depthwise layer reaches about half the 3x3 peak. Its row writes cannot
overlap computing (see the line buffer section), and the 1x1 engine is idle
because it is bypassed. When both engines run, the 1x1 engine is the
bottleneck and runs close to its peak.

## Where this RTL departs from the published design

These points were chosen here, or differ from what the published description
implies:

* **Line-buffer banks.** The published design names three parallel ports
  and a 9x16 multiplier rate. It does not say how nine samples a cycle are
  read. The three column banks are this design's answer.
* **Line buffer.** Writing and computing are serialized per row, because 15
  lines leave no spare row. `ROW_WORDS = 1024` (16 KB per line, 240 KB per
  bank, 720 KB for the three banks) is an estimate. The widest row of the 2x-width detector at 512 x 512 input is
  512 words (64 columns x 122 channels). The 1024 words come from a
  64-column, 256-channel depthwise benchmark kernel.
* **Offsets.** There is one offset per output pixel, shared by all channels.
  It is clipped to `[0, 7]`, following the bounded-range description. A
  second place in the published text gives `[-8, 7]` for the quantized
  offset; the square pattern already mirrors `d` to both sides, so only the
  non-negative half is used. Rounding happens before the offset reaches the
  hardware.
* **1x1 schedule.** The two pixel banks, and weights indexed per layer from
  address 0, are this design's choices.
* **Quantization.** The 16-bit scale, 32-bit bias, the ReLU position and the
  per-layer shift are this design's choices. So are the wrap-around 16-bit
  accumulation and the absence of saturation.
* **Buffer sizes.** 1024 1x1 tiles (a 512 x 512 channel layer), and 64
  groups (1024 channels) of 3x3 weights and of each quant-parameter set.
* **Control.** The start/busy/done protocol, the configuration record and the
  single parameter load port are this design's. The original is built with a
  high-level-synthesis dataflow template, so its control is generated.

## Not included

The following are outside this RTL:

* The processor side: Cortex-A53 cores, last-level cache, coherency port,
  DDR controller, AXI interconnect.
* The DMA engines. Their streams are the top's `in_*`, `off_*` and `out_*`
  ports, and their parameter writes are `prm_wr_*`.
* Operations the processor runs in software: the first full 3x3 convolution,
  max-pooling, channel split / shuffle / concatenation, nearest-neighbour
  upsampling, and the detection heads' post-processing.
* The offset-generating layer. It is an ordinary convolution whose
  (quantized, rounded) output reaches the accelerator as the offset stream.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one compares the
block's outputs with the integer reference model `tb/codenet_ref_pkg.sv`,
prints `TB_RESULT checks=N failures=M`, and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert \
    rtl/codenet_pkg.sv tb/codenet_ref_pkg.sv rtl/stream_fifo.sv rtl/param_buffers.sv \
    rtl/quant_unit.sv rtl/conv1x1_engine.sv rtl/line_buffer.sv rtl/dwconv_engine.sv \
    rtl/codenet_accel.sv tb/tb_codenet_accel.sv --top-module tb_codenet_accel
./obj_dir/Vtb_codenet_accel
```

Replace the last file and top with any other `tb/tb_*.sv`. The testbenches
for the top (`tb_codenet_accel`, `tb_codenet_workloads`) need all `rtl/`
files. Each takes a few seconds.

`tb_codenet_accel` runs the top at its default parameters. It covers:

* both engines with deformable offsets;
* a bypassed 1x1 engine with stride 2;
* a bypassed 3x3 engine;
* the 32 x 32 x 64 layer at full speed.

It counts bypasses, deformable layers, stride-2 layers, offsets clipped
below 0 and above 7, input back-pressure and output stalls, and fails if any
of them never occurred. The block tests use random traffic with random
stalls on both sides. The 3x3 test draws random offsets from -3 to 10 (so both
clipping bounds are hit) and runs both strides, checked against the reference
model.

Assertions check the handshake and storage rules:

* no FIFO overflow;
* two line-buffer ports on the same line use the same address;
* no dropped 3x3 output;
* engines finish inside a run.

## Files

`rtl/` holds one module or package per file, as listed under Dataflow. `tb/`
holds one testbench per block, `tb_codenet_workloads.sv` for full-size layers,
and `codenet_ref_pkg.sv`, the reference model shared by the testbenches.
