# An unrolled, streaming ternary CNN for CIFAR10

This RTL classifies 32x32 RGB images with a VGG-7 style convolutional
network. It does not use a processor, a systolic array or any weight memory
for the convolutions. Every layer of the network is a separate block of logic
and pixels stream through all of them, one pixel per clock cycle. A new image
can start every 1024 cycles, so the design classifies one image per 1024
cycles, which is 122k images per second at 125 MHz.

Two facts make this possible:

* **Ternary weights live in the wiring.** Each convolution weight is -1, 0
  or +1 and is fixed when the circuit is built. A dot product is then a sum
  of some inputs minus a sum of others, with no multipliers. Inputs whose
  weight is zero are not connected at all. With roughly 75 % zero weights,
  most of the adder tree disappears.
* **Max pooling lowers the rate.** Each 2x2 max pool passes on a quarter of
  the pixels. Conv layers after the first pool see a pixel every 4 cycles,
  and after the second pool every 16 cycles. Those layers can therefore add
  4 bits at a time (word serial) or 1 bit at a time (bit serial). Their
  adders are 4x or 16x smaller, and they still keep up.

The two dense layers at the end are too large to unroll. They use the usual
design instead: the weights sit in an on-chip ROM, are streamed out, and are
accumulated.

## Network and dataflow

| stage | block(s) | image | channels | arithmetic | pixel rate |
|---|---|---|---|---|---|
| conv1 | `window_buffer`, `ternary_conv`, `scale_shift` | 32x32 | 3 -> 64 | 16-bit parallel, 3-input adders | 1 / cycle |
| conv2 | same | 32x32 | 64 -> 64 | 16-bit parallel, 3-input adders | 1 / cycle |
| pool1 | `maxpool`, `stream_fifo` | 32 -> 16 | 64 | compare | bursts |
| conv3 | `window_buffer`, `ternary_conv`, `scale_shift` | 16x16 | 64 -> 128 | 4-bit word serial, 2-input | 1 / 4 cycles |
| conv4 | same | 16x16 | 128 -> 128 | 4-bit word serial | 1 / 4 cycles |
| pool2 | `maxpool`, `stream_fifo` | 16 -> 8 | 128 | compare | bursts |
| conv5 | `window_buffer`, `ternary_conv`, `scale_shift` | 8x8 | 128 -> 256 | bit serial | 1 / 16 cycles |
| conv6 | same | 8x8 | 256 -> 256 | bit serial | 1 / 16 cycles |
| pool3 | `maxpool`, `stream_fifo` | 8 -> 4 | 256 | compare | bursts |
| flatten | `mux_layer` | 4x4x256 = 4096 values | | 256 values -> 4 per cycle | |
| dense1 | `dense_layer` (+`dense_weight_rom`), `scale_shift` | 4096 -> 128 | | ROM weights, 4 MACs / cycle / output | |
| dense2 | `mux_layer`, `dense_layer` | 128 -> 10 | | same | |

`tnn_top` connects these blocks. Each conv layer is followed by
`scale_shift`, which folds batch normalisation and the ternary scale factor
into y = c*x + b per channel, then applies ReLU. dense1 also has a
`scale_shift`. dense2 outputs the ten raw class scores, and the largest one is
the predicted class.

The fraction of zero weights (sparsity) is 54.7 % for conv1,
76.9 / 76.1 / 75.3 / 75.8 / 75.4 % for conv2..conv6, 76.2 % for dense1 and
58.4 % for dense2.

### Number formats

* Activations and all partial sums are 16-bit two's complement with
  4 fractional bits (Q12.4). Sums wrap around; they do not saturate.
* The per-channel scale c is 16-bit with 6 fractional bits (Q10.6). The
  offset b is in the activation format.
* `scale_shift` computes `((c * x) >>> 6) + b`: a 32-bit product is shifted
  arithmetically, which rounds towards minus infinity, and is cut to 16 bits.

All types and constants are in `rtl/tnn_pkg.sv`.

## Weights are constants of the RTL

Every weight and every scale/shift constant is a function in `tnn_pkg`,
evaluated while the design elaborates:

* `tern_weight(layer, in, out)` returns -1, 0 or +1.
* `scale_c(layer, ch)` and `shift_b(layer, ch)` return the per-channel
  constants.

Layers are numbered 1..6 for the convs, 7 for dense1 and 8 for dense2. A conv
input index is `i = w*CH_IN + c`, where w = 0..8 is the window position
a..i and c is the input channel. A dense input index is the flattened position
`(row*4 + col)*256 + channel`.

**The shipped functions are stand-ins, not a trained network.** They hash
(layer, in, out) to a deterministic pseudo-random ternary value. The zero
rate of each layer equals the sparsity listed above. Constants are small
positive scales (8..39, i.e. 0.125..0.61) and offsets in -2..+2. The
hardware's size, timing and structure are therefore representative. Its
outputs are not meaningful CIFAR10 classes. To build a trained network,
replace these three functions, for example with a case statement or a
table lookup. No other file needs to change.

## Window buffer: from a pixel stream to 3x3 windows

`window_buffer` turns the raster pixel stream into the 3x3 neighbourhood
that a convolution needs, one window per incoming pixel.

* Two row buffers each delay by one image row. Buffer A holds the previous
  row and buffer B the row before it. Both are circular memories of W entries
  addressed by the current column.
* The new pixel, buffer A's output and buffer B's output each enter a
  3-stage shift register. The nine register outputs form the window:
  * a, b, c come from the oldest row;
  * d, e, f come from the middle row;
  * g, h, i come from the newest row.
  
  Within each row, a/d/g is the newest column, i.e. the right-hand
  neighbour. The window element at position w therefore sits at row offset
  `w/3 - 1` and column offset `1 - w%3` from the centre pixel.
* The window is centred one row and one column behind the newest pixel.
  Counters track the centre position. At the image border, window elements
  outside the image are replaced by zeros (same-size output, zero padding).
* No window is produced for the first W+1 pixels after reset. For every later
  pixel, one window comes out one cycle after the pixel arrives.

The windows of an image's last row need the pixels of the next image's
first row to push them out. A stream of images back to back therefore runs
at full rate. The results of the last image only come out once further
pixels (the next image) are fed in. This is a property of a pure streaming
design, not an error.

`in_valid` may have gaps; the buffer only advances on valid pixels. This is
how the same block serves conv3..conv6, whose inputs arrive every 4 or
16 cycles.

## Pruned ternary adder trees

`ternary_conv` is the heart of the design and where almost all of the area
goes. For each output channel o it computes

    y_o = sum over the 9*CH_IN inputs i with t(i,o) = +1 of x_i
        - sum over the inputs i with t(i,o) = -1 of x_i

It does this with two adder trees, one positive and one negative, and one
subtractor. The split is this design's own choice. It keeps every node of a
tree a plain addition and needs only one subtraction per output.

While the design elaborates, the function `nz_list(o, sign)` lists which
inputs feed each tree. The tree of an output with k connected inputs has k-1
adders. No adder or register exists for a zero weight. At 76 % sparsity a
conv6 output has about 550 connected inputs out of 2304.

**Adder trees (`add_tree`).** The tree has a register after every level and
uses 2-input adders (RADIX 2) or 3-input adders (RADIX 3). A node with only
one operand becomes a register. Every tree of a layer is given the same
depth, `LEVELS = ceil(log_RADIX(9*CH_IN))`, which is enough for an output
whose weights are all non-zero. The positive and negative trees of every
output therefore finish in the same cycle.

**Three arithmetic styles.** The parameter DW selects the style:

* **DW = 16, parallel (conv1, conv2).** One 16-bit adder per node. A new
  window can enter every cycle. RADIX 3 is used here, because 3-input
  adders map well onto modern FPGA carry logic.
* **DW = 4, word serial (conv3, conv4).** Each 16-bit input is fed as four
  4-bit words, least significant first. Each node is a 4-bit adder with a
  registered carry. A window is accepted every 4 cycles, which matches the
  pixel rate after pool1.
* **DW = 1, bit serial (conv5, conv6).** The same scheme with 1-bit words
  over 16 cycles, which matches the pixel rate after pool2. Each node is a
  full adder and a carry flip-flop, about one LUT.

**Serial adder (`serial_adder`).** In serial mode each node carries from one
word to the next. A `start` flag travels with the least significant word.
When `start` is high, the carry register is reset:

* to 0 for an addition;
* to 1 for a subtraction, where b is inverted. The subtraction is a + ~b + 1.

In `add_tree`, the `start` flag passes down the tree alongside the data. Each
node clears its carry on `start`, so back-to-back operands need no gap.

**Around the trees.** `ternary_conv` includes a serialiser at its input,
which holds the window and sends one word of each input per cycle. A
deserialiser at its output collects the result words back into 16-bit sums.
In serial modes, `in_ready` is low while the held window is still needed.
The FIFO in front of the layer guarantees that windows never arrive faster.

**Latency.** Latency is `LEVELS + 16/DW + 2` cycles from a window to its
sums. For example, conv6 (2304 inputs, bit serial) takes 12 + 16 + 2 =
30 cycles.

**Not included: shared subexpressions.** The original design also shared
partial sums between the trees of different outputs (common subexpression
elimination on the trained weights), which saves area in conv1/conv2.
Sharing does not change any result, and it needs the trained weights.
Here every output has its own trees.

## Max pool, FIFOs and pacing

`maxpool` does 2x2, stride-2 pooling on the stream:

* On every even column it keeps the pixel.
* On the odd column it forms the horizontal maximum of the pair.
* On even rows, that maximum goes into a half-row line buffer.
* On odd rows, it is compared with the stored value and the result is output
  one cycle later.

All output therefore comes in bursts during odd rows: one pooled pixel every
2 cycles, and nothing during even rows.

The next conv layer is serial and accepts one window only every 4 (or 16)
cycles, so the bursts must be smoothed. A `stream_fifo` after each pool
does this. It releases a word at most every `MIN_GAP` cycles:

* MIN_GAP = 4 in front of conv3;
* MIN_GAP = 16 in front of conv5;
* MIN_GAP = 1 in front of the mux layer.

The average rate already fits, because a pool outputs W/2 pixels per two
rows. The FIFO only needs to absorb one burst; the default depth is 16.
`fifo_overflow` is a sticky error flag and stays low for any input rate up to
one pixel per cycle.

## Mux layer and dense layers

After pool3, one 4x4x256 image becomes 16 pixels of 256 values each, one
pixel every 64 cycles. `mux_layer` captures such a vector in registers.
Over the next 64 cycles it sends 4 values per cycle in index order, which
flattens the image channel-within-pixel. The dense layer then always sees a
4-wide bus at a steady rate.

`dense_layer` handles P = 4 inputs per cycle:

* It counts groups of 4 inputs to find the start and end of a vector.
* For each group, it reads one ROM row (`dense_weight_rom`) holding the
  2-bit weight codes of those 4 inputs for all 128 outputs: 1024 bits per
  row, 1024 rows, 1 Mbit in total.
* Each output turns its 4 weights into products (x, -x or 0).
* It adds the products in a small registered tree and adds the result to its
  own accumulator.

After the last group, all sums appear together with `out_valid`. This happens
3 + log2(P) cycles after the last group's input.

The ROM's contents are computed at elaboration from `tern_weight`. The
synchronous read matches block RAM behaviour: 16 block RAMs with 64-bit
ports cover the row width.

dense2 uses the same two blocks, with a second `mux_layer` (128 -> 4 values
per cycle) in front.

## Interfaces and timing of `tnn_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst` | in | clock; synchronous active-high reset |
| `in_valid`, `in_pix[3]` | in | one RGB pixel (Q12.4 per channel), raster order, images back to back |
| `out_valid`, `out_scores[10]` | out | raw class scores of one image, once per image, in order |
| `fifo_overflow[3]` | out | sticky error flags of the three pool FIFOs |

* **Throughput.** One image per W*W = 1024 cycles when pixels arrive every
  cycle. At 125 MHz this is 122k images per second.
* **Latency.** An image's scores appear about 1.7 image periods after its
  first pixel: in the 32x32 test they leave 1741 cycles after the first
  pixel, about 700 cycles after the last pixel (about 6 us at 125 MHz).
  Part of this is the wait for the next image's first rows, which push the
  last windows of each layer out.

All timing adapts to gaps in `in_valid`.

## Parameters and scaling

`tnn_top` has these parameters, with the full network as the default:

* `IMG_W` (32);
* channel counts `C0..C6` (3, 64, 64, 128, 128, 256, 256);
* `D1` (128), `NCLS` (10) and `P` (4);
* adder word widths `DW12` / `DW34` / `DW56` (16 / 4 / 1);
* `FIFO_DEPTH` (16).

Each word width must be 16 divided by the rate reduction of the pools before
that layer. With a different pixel rate or image size, change the word
widths to match.

## Verification

Every block has a self-checking testbench in `tb/` that compares against a
reference written independently in the testbench and checks cycle timing:

| block | testbench | what is checked |
|---|---|---|
| `window_buffer` | `window_buffer_tb` | every window of 3 random 6x6 images (padding, a..i order), 1-cycle latency, window count, random input gaps |
| `maxpool` | `maxpool_tb` | pooled values and that outputs only occur on odd rows |
| `stream_fifo` | `stream_fifo_tb` | order, minimum gap between reads, back-pressure, overflow flag |
| `serial_adder` | `serial_adder_tb` | 4-bit and 1-bit serial add and subtract on random operands |
| `add_tree` | `add_tree_tb` | parallel 3-input, 4-bit word and bit-serial trees, latency |
| `ternary_conv` | `ternary_conv_tb` | all sums in all three styles against a direct dot product, latency, `in_ready` |
| `scale_shift` | `scale_shift_tb` | formula with floor division, ReLU on/off |
| `mux_layer` | `mux_layer_tb` | group order, first-group flag, back-to-back vectors |
| `dense_weight_rom` | `dense_weight_rom_tb` | every code against `tern_weight`, read latency |
| `dense_layer` | `dense_layer_tb` | sums of several vectors, output latency |
| `tnn_top` | `tnn_top_tb` | whole network at 32x32 with channels 3-8-8-16-16-32-32 and dense 512->32->10 |

`tnn_top_tb` checks the following:

* It compares the class scores with a behavioural model of the network: direct
  convolution loops, pooling and dense sums, in the same 16-bit arithmetic.
* It checks that results are exactly one image period apart.
* It checks that every mechanism occurs: padding, each adder style, pool
  bursts, FIFO smoothing and pacing, mux groups, dense accumulation and ReLU
  clipping.

Running a testbench with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/tnn_pkg.sv rtl/window_buffer.sv rtl/maxpool.sv rtl/stream_fifo.sv \
        rtl/serial_adder.sv rtl/add_tree.sv rtl/ternary_conv.sv rtl/scale_shift.sv \
        rtl/mux_layer.sv rtl/dense_weight_rom.sv rtl/dense_layer.sv rtl/tnn_top.sv \
        tb/tnn_top_tb.sv --top-module tnn_top_tb -Mdir obj
    ./obj/Vtnn_top_tb

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

**Largest size simulated.** The whole network has been simulated at the
full image size (32x32, so the full 1024-cycle image period) with a quarter
to an eighth of the channels: 3-8-8-16-16-32-32, dense 512->32->10. With
all parameters at their defaults, Verilator alone needs more than ten
minutes just to elaborate the design, because conv2..conv6 unroll into
hundreds of thousands of adders. The full-size design has therefore been
compiled and linted, but not simulated. Because every block is generated
from the same parameterised code, the reduced test covers every structure
of the full one.

## Where this design departs from the original

* **Stand-in weights and constants.** See above. The trained values were
  not available.
* **No common subexpression sharing between output trees.** This costs area,
  mainly in conv1/conv2, and no accuracy.
* **Positive/negative tree split and fixed tree depth.** These are this
  design's own structure, chosen to keep all outputs of a layer aligned.
* **FIFO depth and read pacing.** The original gives no numbers for these.
  It lists a FIFO only after the last pool; here every pool has one,
  because the serial layers behind pool1 and pool2 need their bursts
  smoothed as well.
* **Pool line buffer.** The original puts a general window buffer in front
  of each max pool. Here the pool keeps its own half-row buffer, which
  gives the same result with less storage.
* **ReLU as the activation, truncating rounding, and 16-bit wrap-around.**
  These are this design's choices.
* **Pixel rate fixed at one per cycle.** The window buffer supports only
  p = 1, not several pixels per cycle.
* **No host link.** The original system fed images from a host over PCIe;
  here the input and output are plain streaming ports.
