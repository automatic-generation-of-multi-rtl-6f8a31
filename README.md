# A flattened streaming MobileNet-V1 accelerator with mixed shift and fixed-point arithmetic

This RTL builds a whole convolutional network as one pipeline, with a separate
hardware core for every layer. Pixels enter at one per clock cycle and class
scores come out at the other end. No layer is ever loaded into a shared compute
array. All weights stay on chip, which is affordable because they are quantized
hard:

- pointwise layers use 3-bit power-of-two weights, computed with barrel shifters;
- depthwise layers use 3- to 7-bit fixed-point weights, computed with small multipliers;
- the first convolution and the classifier use 8-bit fixed-point weights.

Every activation between layers is 8 bits.

Each core is sized so that it consumes its input at exactly the rate the previous
core produces it. It then emits its output at the rate the next core expects. The
sizing uses two numbers per core:

- **U**: input channels processed per cycle;
- **U'**: output channels emitted per cycle.

The default configuration is MobileNet-V1 on 224 × 224 × 3 images. It is built
from 29 cores: a 3×3 convolution, 13 depthwise/pointwise pairs, a global average
pool and a fully connected classifier. It uses 13,677 processing elements and
about 17.8 Mbit of weights.

## 1. Numbers

| quantity | format |
|---|---|
| activation (every stream between cores) | 8-bit two's complement, Q3.5 (3 integer bits including the sign, 5 fraction bits) |
| shift weight, `WB` bits | `{sign, e}` with `e` of `WB-1` bits. `e = 0` means zero, otherwise the value is ±2^(e-1) in units of the layer's weight LSB |
| fixed-point weight, `WB` bits | two's-complement integer in units of the layer's weight LSB |
| weight LSB | 2^-WFRAC, one shared exponent per layer (`wfrac` in the layer table) |
| BN scale and offset | 16-bit two's complement, Q8.8 |
| accumulator | full precision, 5 + WFRAC fraction bits; wide enough never to overflow |

Batch normalization, ReLU and rounding are fused into one step at the end of every
core. The step computes:

```
y   = acc * scale + (offset <<< (5 + WFRAC))          // fraction bits: 5 + WFRAC + 8
y   = relu ? max(y, 0) : y
out = sat8((y + 2^(SH-1)) >>> SH),   SH = WFRAC + 8    // round half up, clamp to [-128, 127]
```

The layer's weight exponent only moves the binary point, so it costs nothing: it
is folded into the final shift. The fully connected layer has no ReLU, and its
bias sits in the BN offset.

## 2. The roll-unrolled core

A convolution with C input channels, C' output channels and a K×K kernel needs
C·C'·K² multiplications per output pixel.

**Normal and pointwise convolutions** (`conv_engine`) split this work as follows:

- The input channels are *rolled*: one beat carries U of the C channels of a pixel,
  and a pixel takes C/U beats.
- The output channels are *unrolled*: every beat updates all C' output channels
  at once.
- Each output channel has U·K² processing elements, feeding a pipelined adder tree
  and an accumulator.
- The accumulator adds up the C/U partial sums of a pixel. On the last beat it
  holds all C' results.

**Depthwise convolutions** (`dw_engine`) have no cross-channel sum. Each of the U
lanes has its own K² products and adder tree, and a result leaves on every beat.

Either way, results come out *wide*: C' values at once for a normal core, U values
for a depthwise core. The next core wants only U' channels per cycle. The **channel
roller** therefore hands the wide result out U' channels at a time. Only U'
BN/ReLU/rounding units are needed per core, time-shared over the C'/U' chunks
(`bn_relu` keeps one parameter word per chunk).

The chain inside one core (`conv_layer`):

```
 in (U ch/beat) ─► slide_buffer ─► engine (conv or dw) ─► channel_roller ─► bn_relu ─► act_buffer ─► out (U' ch/beat)
                       │               ▲
                       └─► weight_buffer (one word per input-channel block, read in step with the window)
```

### Rate matching

Rate matching makes a chain of cores run without idle compute. A core's output
rate must equal the next core's input rate, which means the `uo` of one row of the
layer table equals the `u` of the next row.

For a stride-2 layer, the output has a quarter of the pixels, so U' can be four
times smaller for the same channel count. With C = C', the layer after a stride-2
depthwise core then gets U' = U/4, as the table shows (16 → 4, 8 → 2, 4 → 1).

The rate matches only on average, so stride-2 cores absorb bursts. A stride-2 core
produces results only in every other row, and within those rows only at every
other pixel. U' is sized for the average, so during an even row results arrive
twice as fast as the roller can hand them out. The roller therefore has a queue
of results in front of it: `(W_out/2 + 1)` pixels' worth for stride 2, and 2
entries otherwise. The queue fills during the even rows and drains during the odd
rows, so the input never has to wait.

### The MobileNet-V1 table (`tomato_pkg::MBN_CFG`)

| core | kind | k/s | C → C' | U → U' | weights | map in |
|---|---|---|---|---|---|---|
| 0 | conv | 3/2 | 3 → 32 | 3 → 8 | fixed 8 | 224 |
| 1, 2 | dw, pw | 3/1, 1/1 | 32 → 64 | 8 → 8 → 16 | fixed 7, shift 3 | 112 |
| 3, 4 | dw, pw | 3/2, 1/1 | 64 → 128 | 16 → 4 → 8 | fixed 7, shift 3 | 112 |
| 5, 6 | dw, pw | 3/1 | 128 → 128 | 8 → 8 → 8 | fixed 6, shift 3 | 56 |
| 7, 8 | dw, pw | 3/2 | 128 → 256 | 8 → 2 → 4 | fixed 6, shift 3 | 56 |
| 9, 10 | dw, pw | 3/1 | 256 → 256 | 4 → 4 → 4 | fixed 5, shift 3 | 28 |
| 11, 12 | dw, pw | 3/2 | 256 → 512 | 4 → 1 → 2 | fixed 5, shift 3 | 28 |
| 13–22 | 5 × (dw, pw) | 3/1 | 512 → 512 | 2 → 2 → 2 | fixed 5,5,4,4,4, shift 3 | 14 |
| 23, 24 | dw, pw | 3/2 | 512 → 1024 | 2 → 1 → 1 | fixed 4, shift 3 | 14 |
| 25, 26 | dw, pw | 3/1 | 1024 → 1024 | 1 → 1 → 1 | fixed 3, shift 3 | 7 |
| 27 | avg pool | 7×7 | 1024 | 1 → 1 | – | 7 |
| 28 | fc | 1×1 | 1024 → 1000 | 1 → 1 | fixed 8, no ReLU | 1 |

Where the table's figures come from:

- **Unroll factors, strides and channel counts**: taken from the published table
  of this accelerator.
- **Weight precisions**: "3-bit shift for pointwise, 3 to 7-bit fixed for
  depthwise" is the published result. The per-layer split of the depthwise
  precisions, and the per-layer exponents `wfrac`, are this design's own choice;
  change them in the table.
- **The five repeated 512-channel pairs**: the published table prints the pair
  once, but MobileNet-V1 has five, and the stated unit and parameter counts need
  them. So they are built five times.

## 3. Streaming and the slide buffer

Each stream is valid/ready with a bundle of U activations per beat, in this order:
pixel rows, then columns, then channel blocks.

`slide_buffer` turns the stream into K×K windows. It stores:

- K−1 lines of W·C values;
- K−1 columns of C values per block.

The window centre trails the incoming pixel by P rows and P columns, with
P = (K−1)/2. The raster runs on from one frame into the next.

- **Every beat consumes an input beat.** No beat is spent on padding.
- **Bottom and right padding of frame f** are produced while the first P·W+P
  pixels of frame f+1 (the head region) stream in.
- **All padding and stale data** are zeroed by position: a window entry whose row
  or column lies outside the centre's own frame is masked.
- **Flush.** If no next frame starts within (P·W+P)·C/U cycles of idle input, the
  buffer walks the head region without input (`in_ready` low) to emit the last
  windows, then restarts at the origin.

A frame of H·W·C/U beats therefore leaves a core in H·W·C/U beats. The price is
that a frame's last windows wait for the next frame's head region, or for the
flush.

A window is valid when its centre is a multiple of the stride. The output map is
therefore ((H−1)/S + 1) square, with zero padding P on every side.

The weight buffer is read in step with the window, using the block index the
buffer is about to emit. Window and weight word reach the engine together.

**Flow control.** The engine pipeline advances on `en`. `en` drops only when a
finished result reaches the engine's tail while the roller queue is full. The
roller starts a chunk only when the output FIFO has at least three free entries,
because the BN stage is two cycles deep and never stalls. Back-pressure from the
output therefore travels up the chain: FIFO → roller → engine → slide buffer →
`in_ready` of the core → previous core's FIFO.

**Latency of a core**, from the beat that completes a window:

- 1 cycle for the window;
- 1 cycle for the products;
- ⌈log2(U·K²)⌉ cycles for the adder tree;
- then the roller queue, 2 cycles of BN and the FIFO.

For the full network, the latency from the first pixel to the last class score is
123,176 cycles in simulation for a single image. Most of it is the line
buffering of the 3×3 layers, the C/U-beat pixels of the late layers, and, for an
isolated image, the flush wait of each 3×3 core before its last rows.

## 4. Loading weights

The weights and BN parameters sit in each core's own memories. They are written
through one shared load port on the top: `ld_valid`, `ld_layer`, `ld_target`,
`ld_addr`, `ld_chunk`, and `ld_data` (LW = 512 bits).

| target | address | word layout |
|---|---|---|
| `LD_WEIGHT`, normal conv | input-channel block b (0 … C/U−1) | weight (o, u, t) at bit ((o·U + u)·K² + t)·WB, for input channel b·U+u, t = kr·K + kc |
| `LD_WEIGHT`, depthwise | block b | weight (u, t) at bit (u·K² + t)·WB |
| `LD_BN` | chunk j (0 … C'/U'−1) | lane n = channel j·U'+n at bits n·32 … n·32+31: scale in the upper 16 bits, offset in the lower 16 |

A word wider than LW is written as several LW-bit chunks, chunk number `ld_chunk`.
Loading must finish before the first pixel is sent. The port writes memories and
does not stall the stream, but the data of a word being rewritten is
unpredictable during its use.

## 5. How far it follows the published design, and where it departs

These parts are taken from the published description:

- the flattened pipeline, one core per layer;
- roll-unrolled convolution;
- rolled output channels and time-shared BN;
- pipelined K²-input adder trees;
- shift-and-add against multiply-and-add processing elements, chosen per layer;
- 8-bit Q3.5 activations;
- the weight exponent folded into the post-BN rounding;
- MobileNet's unroll factors.

These parts are this design's own choice, where the description is silent:

- all bit encodings (shift code, BN Q8.8, word layouts);
- round-half-up with saturation;
- valid/ready handshakes;
- FIFO and queue sizes;
- the load port;
- the average pool's multiply-by-reciprocal: ⌊(2^17/HW + 1)/2⌋, round half up
  over 16 bits;
- building the classifier as a 1×1 convolution.

Known departures:

1. **Last windows of a frame wait.** Padding is merged into the next frame's
   head region, so every core needs exactly H·W·C/U beats per frame and the
   network keeps one frame per 224·224 input cycles. The cost is latency: the
   bottom rows of a single, isolated frame come out only after the flush wait of
   each 3×3 core.
2. **Compute units.** The table above gives 13,677 processing elements. The
   reported count is 13,479, and the 198-unit difference is unexplained.
3. **Input pixel rates below one** (one pixel every 32 or 288 cycles, as used for
   smaller devices) would need cores that roll kernel positions or output channels
   beyond U | C. They are not built. Neither are the other reported networks
   (CifarNet, FashionNet), whose layer tables are not published. The cores are
   generic, so a network is a new `layer_cfg_t` table whenever its unroll factors
   divide its channel counts.
4. **Out of scope.** Off-chip DRAM, the board-to-board link used to split the
   network over two devices, and the offline search that picks precisions and
   unroll factors are not part of the RTL.

## 6. Files

| file | contents |
|---|---|
| `rtl/tomato_pkg.sv` | formats, `layer_cfg_t`, beat control word, MobileNet table |
| `rtl/shift_mul.sv`, `rtl/fixed_mul.sv` | the two processing elements |
| `rtl/adder_tree.sv` | pipelined tree, one register per level, clock enable |
| `rtl/slide_buffer.sv` | window generator with padding and stride |
| `rtl/weight_buffer.sv` | per-core weight or BN memory, chunked write, registered read |
| `rtl/conv_engine.sv`, `rtl/dw_engine.sv` | roll-unrolled and depthwise engines |
| `rtl/channel_roller.sv` | result queue and U'-wide output roller |
| `rtl/bn_relu.sv` | fused BN, ReLU, rounding, saturation |
| `rtl/act_buffer.sv` | output FIFO with free count |
| `rtl/conv_layer.sv` | one streaming core |
| `rtl/avg_pool.sv` | global average pool core |
| `rtl/tomato_mobilenet.sv` | top: the chain of cores from a layer table, and the load port |

## 7. Verification

`tb/tomato_ref_pkg.sv` is a bit-exact model of every layer. It computes each layer
straight from its definition (padding, stride, products, BN and rounding), not in
streaming order. It also builds the weight and BN words in the load-port layout.

There is one testbench per module. Each drives random data and checks against the
model or a direct formula:

| testbench | what it covers |
|---|---|
| `tb_shift_mul`, `tb_fixed_mul` | exhaustive over all activations and codes |
| `tb_adder_tree` | random sums under a random clock enable |
| `tb_slide_buffer` | windows, padding merged into the next frame and flushed after a gap, stride 1 and 2, input gaps and stalls, and a full-rate frame taken without any input stall |
| `tb_weight_buffer`, `tb_act_buffer`, `tb_channel_roller`, `tb_bn_relu` | checked against small models; ReLU and both saturation ends must occur |
| `tb_conv_engine`, `tb_dw_engine` | exact sums with stalls, and the result held during a stall |
| `tb_avg_pool` | including a full FIFO blocking the input |
| `tb_conv_layer` | three complete cores (strided depthwise fixed-point, 3×3 shift, 1×1 fixed); the full-rate frame's input must be taken on exactly H²·C/U consecutive cycles |
| `tb_tomato_top` | a seven-core reduced network (see below) |
| `tb_tomato_full` | the full network (see below) |

`tb_tomato_top` runs a reduced network on 12×12 images:

- seven cores: strided conv, dw, pw, strided dw, pw, pool and fc;
- sixteen frames back to back;
- from the third frame on, a 2000-cycle output stall followed by random
  back-pressure.

It compares every core's stream and the final scores. It checks that the frame
period lies between the input beat count and the slowest core's beat count (in
practice it equals the input beat count). It
requires each of these to happen at least once:

- input stalls;
- engine stalls;
- padding windows emitted during the next frame's head region;
- flush beats;
- stride skips;
- shift beats and fixed-point beats;
- rolled chunks;
- ReLU clipping;
- saturation;
- output back-pressure.

`tb_tomato_full` runs the full default MobileNet-V1 on one 224×224 image. The top
has no parameter overrides. It checks all 29 cores' output streams and the 1000
scores, about 5 million compares. It takes about 80 s of simulation after a build
of several minutes.

Running a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/tomato_pkg.sv tb/tomato_ref_pkg.sv $(ls rtl/*.sv | grep -v pkg) \
  tb/tb_conv_layer.sv --top-module tb_conv_layer -Mdir obj_conv_layer
./obj_conv_layer/Vtb_conv_layer
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.

To build a different network, pass a new layer table to `tomato_mobilenet` through
`NL`, `CFG` and `IMG`. Follow these rules:

- `uo` of each row equals `u` of the next row;
- U divides C, and U' divides C';
- for depthwise rows, C = C' and U' divides U.
