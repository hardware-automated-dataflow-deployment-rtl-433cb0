# A directly mapped CNN: the LeNet5 convolutional layers as one pixel pipeline

Most FPGA accelerators for convolutional neural networks time-share a small
array of processing elements. They keep feature maps and weights in external
memory and schedule the network layer by layer. This design does the opposite.
Every element of the network gets its own hardware: each layer, each neuron,
each convolution and each multiplication. Pixels then stream through the whole
network as through an image-processing pipeline. No external memory is needed,
and one input pixel is consumed every clock.

The cost of this approach is area. Two ideas keep it affordable, and the RTL
follows both:

* **Factorised neighbourhood extraction.** A convolution needs the K x K
  neighbourhood of each pixel, which line buffers provide. All neurons of a
  layer read the same input maps, so one extractor per *input channel* is
  enough. It does not need one per convolution. This divides the line-buffer
  memory of a layer by its number of output maps.
* **Constant multipliers.** The weights are fixed once the network is trained,
  so each multiplier is specialised to its weight. A zero weight removes the
  multiplier, a weight of one is a wire, and a power of two is a shift. Only
  the remaining weights need a multiplier built from logic. No DSP blocks are
  used.

The default configuration is the convolutional part of LeNet5 with 5-bit
fixed-point data:

```
 28x28x1 --conv1 (20 maps, 5x5)--> 24x24x20 --maxpool 2x2--> 12x12x20
         --conv2 (50 maps, 5x5 over 20 channels)--> 8x8x50 --maxpool 2x2--> 4x4x50
```

That is 25,500 multipliers, all working on every clock. The fully connected
classifier that would follow is not part of this RTL. The 50 output streams are
the top's outputs.

## Data format and streams

Every pixel, weight and bias is a signed 5-bit two's-complement number with 4
fractional bits (Q1.4, range -1 to +0.9375). The width is set by
`cnn_pkg::BITWIDTH`. A product has 8 fractional bits. Sums keep full precision
until the activation.

Between layers, a layer with C channels passes C pixels in parallel
(`pixel_t data [C]`) together with one `valid` bit. There is no ready signal
and no backpressure: every actor fires whenever its input is valid. `valid` may
be low on any cycle, which simply pauses the pipeline. A frame is exactly
IMG_W x IMG_H valid pixels in raster order, and frames may follow each other
with no gap. Each neighbourhood extractor counts columns and rows from reset to
know where the image borders are, so a reset puts every layer at the start of a
frame.

## The blocks, bottom up

| module | role |
|---|---|
| `cnn_pkg` | pixel type, number format, weight and bias functions, multiplier kinds |
| `line_buffer` | circular memory delaying a stream by IMG_W - K pixels |
| `neighborhood_extractor` | K rows of K registers joined by K-1 line buffers; window + border logic |
| `const_mult` | multiplier specialised to one weight (removed / wire / shift / logic) |
| `adder_tree` | balanced binary adder tree with one output register |
| `conv_engine` | K*K constant multipliers + adder tree: one kernel on one window |
| `activation` | rescale, rectify, saturate back to 5 bits |
| `neuron` | C conv engines + bias + adder tree + activation: one output map |
| `conv_layer` | C shared extractors feeding N neurons |
| `maxpool_layer` | per-channel 2x2 extractor + maximum, keeping every other row and column |
| `lenet_dhm_top` | conv1 -> pool1 -> conv2 -> pool2 |

### Neighbourhood extractor

For K = 3, the extractor looks like this (newest pixel on the left, registers
named p<row><column>):

```
in -> p22 -> p21 -> p20 -> [line buffer 0] -> p12 -> p11 -> p10 -> [line buffer 1] -> p02 -> p01 -> p00
```

Each line buffer holds IMG_W - K pixels. So from one row of registers to the
next, a pixel has moved exactly one image line. When the newest pixel is at
(row r, column c), register p<i><j> holds pixel (r-K+1+i, c-K+1+j). The window
is therefore top-left anchored, with `win[0][0]` the oldest pixel. That is the
orientation of the convolution below. The window is flagged valid only when
c >= K-1 and r >= K-1. No padding is applied, so a convolution shrinks a map by
K-1 in each direction. A window comes out one clock after the pixel that
completes it.

The line buffers are small circular memories with an unclocked read (on an FPGA
they fit LUT RAM). They are not reset, because their contents are only used
once a full row has been written.

### Convolution engine, neuron and layer

Output map n of a layer is

```
f[n][i][j] = act( b[n] + sum over c, p, q of  x[c][i+p][j+q] * w[n][c][p][q] )
```

A `conv_engine` computes the inner sum over p and q for one (n, c) pair. It
holds K*K `const_mult` instances and one `adder_tree`. A `neuron` adds the C
engine results and the bias in a second adder tree. The bias is shifted left
4 bits to match the products. The neuron then applies `activation`. A
`conv_layer` has C extractors and N neurons. Every neuron receives all C
windows.

`activation` shifts the sum right by 4 bits (truncating towards minus
infinity). It then clamps negative values to 0 (a rectifier) and values above
+15 to +15. The activation function, the rounding and the saturation are choices
of this implementation. Two monitor outputs per neuron flag when a value was
clamped to zero or saturated.

### Constant multipliers

`const_mult` picks its structure at elaboration from the weight code W:

| W | hardware |
|---|---|
| 0 | constant 0 (the term vanishes in synthesis) |
| +1, -1 | wire, or negation |
| +-2^k | shift by k, negated for negative W |
| other | x * W, a constant multiplication left to the synthesis tool |

With the default weights, conv1 and conv2 together get about 6,800 removed,
1,250 wire, 4,100 shift and 13,300 logic multipliers.

### Weights

The network's trained weights would normally be written into a parameter
package by the model converter. No trained LeNet5 weights come with this RTL.
Instead, `cnn_pkg::weight(layer, n, c, p, q)` and `cnn_pkg::bias(layer, n)`
compute a fixed pseudo-random set at elaboration:

```
h      = 32-bit multiplicative hash of (layer, n, c, p, q)
weight = 0 if h mod 4 == 0, else ((h >> 8) mod 32) - 16
bias   = (hash(layer, n, 97, 0, 0) mod 16) - 8
```

To deploy a real network, replace these two functions with lookups into
constant arrays of the trained, quantised values. Nothing else changes. Each
multiplier re-specialises itself to its new weight.

### Max pooling

`maxpool_layer` reuses the neighbourhood extractor with a 2 x 2 window on each
channel. It takes the maximum and passes only the windows whose top-left corner
lies on an even row and an even column. A map of W x H becomes
((W-2)/2+1) x ((H-2)/2+1). The window size and stride are parameters
(`POOL`, `STRIDE`).

## Timing

| stage | latency (clocks) |
|---|---|
| neighbourhood extractor | 1 |
| conv engine adder tree | 1 |
| neuron adder tree | 1 |
| activation | 1 |
| **conv_layer** | **4** |
| **maxpool_layer** | **2** (extractor + maximum register) |
| **lenet_dhm_top** | **12** (4 + 2 + 4 + 2) |

Latency here means: from the clock edge that samples the pixel completing a
window to the clock edge that presents that window's result. The top takes one
pixel per clock indefinitely. With gap-free input, successive frames finish
exactly IMG_W*IMG_H clocks apart. Output pixels come in bursts, because pooled
pixels exist only on every other row and column.

Each adder tree is fully combinational up to its single output register. A
conv2 neuron sums 20 x 25 products in two such trees, so a real implementation
for high clock rates would add pipeline registers inside the trees. All valid
flags already travel alongside the data, so adding stages means delaying
`valid` to match.

## Resources

At the default size the design holds:

* 25,500 constant multipliers (conv1: 20 x 1 x 25, conv2: 50 x 20 x 25);
* 1,392 line-buffer words (6,960 bits):

| layer | line-buffer words |
|---|---|
| conv1 | 4 x 23 |
| pool1 | 20 x 22 |
| conv2 | 20 x 4 x 7 |
| pool2 | 50 x 6 |

Without the factorisation, conv2 alone would need 50 times its 560 words.

For other networks, the layer modules take any C, N, K and image size.

* A CarType-like network (96x96 RGB, two layers of 32 maps with 5x5 kernels
  and pooling) is the same top with `IMG_W=IMG_H=96, IN_C=3, C1_N=C2_N=32`.
* A three-layer network such as the 320x240 face detector (7x7, 7x7 and 3x3
  kernels) needs a third `conv_layer` instance in the top.

## Where this departs from, or goes beyond, the published description

* The published flow writes VHDL from a Caffe model. Here the layer structure
  is fixed by the top's parameters and the weights by two package functions.
* Weights and biases are synthetic (see above), not trained values.
* The activation function is not specified in the source description. A
  saturating rectifier is used.
* The position of the binary point (Q1.4), the rounding and the saturation are
  choices of this implementation. Only the 5-bit width is given.
* The pooling window and stride (2 x 2, stride 2) are assumed from the usual
  LeNet5 structure.
* The stream framing (valid only, no frame or line markers, counters from
  reset) and all register placement are choices of this implementation.
* The classifier layers are not implemented.
* In `const_mult` the special cases for 0, +-1 and +-2^k are explicit generate
  branches. The original approach leaves them to the synthesis tool's constant
  propagation. The result after synthesis should be the same.

## Simulating

The testbenches are self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops on a watchdog. They compare
against a plain software model in `tb/tb_cnn_ref_pkg.sv`, which uses nested
loops over the layer equations.

| testbench | what it covers |
|---|---|
| `tb_line_buffer` | delay length under random enable |
| `tb_neighborhood_extractor` | every window's pixels, position and 1-clock timing over 3 frames with gaps |
| `tb_const_mult` | all 5-bit inputs against 12 weights covering every multiplier kind |
| `tb_adder_tree` | sums including extreme operands, 1-clock timing |
| `tb_conv_engine` | one kernel against the direct sum of products |
| `tb_activation` | rescale, rectify, saturate, clip flags |
| `tb_neuron` | 3-channel neuron, 3-clock latency, full throughput |
| `tb_conv_layer` | C=2, N=3 layer over 3 frames, 4-clock latency |
| `tb_maxpool_layer` | 3-channel 2x2 pooling on an odd-width map |
| `tb_lenet_dhm_top` | reduced pipeline (20x20 input, 3 and 4 maps) end to end |
| `tb_cartype_top` | reduced 3-channel pipeline (24x24x3 input) |
| `tb_facedetect_chain` | three layer modules chained with 7x7, 7x7 and 3x3 kernels (34x30 input), 16-clock latency |
| `tb_lenet_full` | the full default LeNet5 configuration, 3 frames |

The end-to-end tests check three things:

* every output of every frame;
* the 12-clock latency;
* the frame-to-frame spacing that proves one pixel per clock.

They also count how often each mechanism happened, and fail if one never did:

* idle input cycles;
* back-to-back frames;
* zero clamping and saturation in each layer;
* pooling maxima away from the window corner;
* each multiplier kind.

With Verilator 5, for example:

```
verilator --binary --timing -Wno-fatal --top-module tb_lenet_dhm_top -y rtl -y tb \
    rtl/cnn_pkg.sv tb/tb_cnn_ref_pkg.sv tb/tb_lenet_dhm_top.sv
./obj_dir/Vtb_lenet_dhm_top
```

The two packages are listed first; `-y` lets Verilator find the other modules by file name. `-Wno-fatal` keeps Verilator's lint warnings (unused bits of shared valid flags, width extensions in the testbench) from stopping the build. `conv_layer` and `maxpool_layer` carry assertions that all channels' valid flags agree on every clock; add `--assert` to check them during simulation. The full-size test (`tb_lenet_full`) takes
about 5 minutes to build, because the model contains 25,500 multipliers. It
runs in seconds once built.
