# A directly mapped LeNet5 feature extractor in SystemVerilog

This design maps a CNN's convolution layers one-to-one onto hardware. It
does not keep a small array of processing elements and feed it layer by
layer from external memory. Instead, every neuron, every 2D convolution
inside a neuron and every multiplication inside a convolution gets its own
piece of logic. The layers are then chained as one pipeline that processes
a pixel stream on the fly. No intermediate result ever leaves the chip,
and the only storage is the line buffers that form the convolution
windows. A new input pixel is accepted on every clock, so throughput is
set by the clock frequency alone.

Such a design is only affordable because of two tactics, and both are
built in here:

* **Short fixed-point numbers.** Weights and activations are B-bit codes.
  For LeNet5, B = 3.
* **Multipliers specialised to their constant weight.** A trained kernel
  is fixed, so each multiplier knows its weight at elaboration time. A
  zero weight costs nothing, ±1 is a wire or a negation, and ±2^k is a
  shift. Only the remaining weights need a real multiplier, built from
  logic elements rather than DSP blocks. In a quantised LeNet5 about 95 %
  of the weights are 0 or ±1, so little real multiplication is left.

The top level, `dhm_lenet5`, is the LeNet5 feature extractor. The fully
connected classifier is not part of it.

```
 28x28x1 ──► conv1 ──► pool1 ──► conv2 ──► pool2 ──► 4x4x50
  3-bit     20 maps   2x2 max   50 maps   2x2 max
            5x5, tanh 24→12     5x5, tanh  8→4
            500 mults           25 000 mults
```

## Number format

Every pixel and every weight is a B-bit two's complement code with
F = B−1 fractional bits, so it stands for a value in [−1, 1). For B = 3
the codes are −4 … 3, that is −1.0 … 0.75 in steps of 0.25.

| quantity | width | fractional bits |
|---|---|---|
| activation, weight, bias code | B | F |
| product (`const_mult`) | 2B | 2F |
| convolution engine sum | 2B + ⌈log2 K²⌉ | 2F |
| neuron sum incl. bias | engine width + ⌈log2(C+1)⌉ + 1 | 2F |

The sums keep full precision, so no overflow is possible. The bias is a
B-bit code that is shifted left by F to the product scale. The activation
is the only place where precision is dropped.

## Multiplier specialisation (`const_mult`)

`const_mult #(B, WEIGHT)` sorts its weight into one of four kinds
(`cnn_pkg::mult_kind`) and builds a different circuit for each:

| kind | weights (B = 3) | hardware |
|---|---|---|
| `MK_ZERO` | 0 | none, the output is constant 0 |
| `MK_ONE` | ±1 | wire / negation |
| `MK_POW2` | ±2, −4 | shift by log2\|w\|, then negation if negative |
| `MK_OTHER` | ±3 | signed multiply by a constant |

The input is sign-extended to 2B bits before it is negated or shifted, so
that −(−4) cannot overflow. A synthesis tool would reach the same logic
by constant propagation. Writing it out makes the cost of each weight
visible and easy to count.

## Streams and timing

Every connection between layers is a stream of three signals:

* `data`, one B-bit pixel per feature map;
* `dv`, pixel valid;
* `fv`, frame valid.

Pixels arrive in raster order. `dv` may drop at any clock to leave a gap;
there is no back-pressure. While `fv` is low the position counters clear,
so `fv` must be low for at least one clock between frames. A frame may
start on the clock right after that.

Windows are "valid" only, with no padding, so a K×K convolution shrinks a
W×H map to (W−K+1)×(H−K+1). Pooling is 2×2 with stride 2; a row or column
that does not fill a window is dropped.

Every stage has a fixed latency, counted from the input pixel that
completes a window to the output pixel of that window:

| block | latency (clocks) | stages |
|---|---|---|
| `neigh_extractor` | 1 | window register |
| `neuron` | 3 | engine sum, neuron sum, activation |
| `conv_layer` | 4 | extractor + neuron |
| `maxpool_layer` | 2 | extractor + max register |
| `dhm_lenet5` | 12 after the last pixel of a frame | 4 + 2 + 4 + 2 |

A 28×28 image takes 784 clocks and the pipeline takes a new image right
behind it. At the 65.7 MHz reported for a Cyclone V device, that is about
83 800 images/s. At 3.8 Mop per image this gives the 318 Gop/s published
for this network.

## Window formation (`neigh_extractor`)

This block is the only one with memory, and the hardest to follow. It
holds K−1 line buffers (`lb[i]`, each W pixels). On every valid pixel at
column `col`:

1. The column vector `colv` is formed. `colv[K-1]` is the incoming pixel
   and `colv[K-1-i]` is `lb[i-1][col]`, the pixel i rows above it.
2. The K×K window register shifts one column left and takes `colv` as its
   new right-most column.
3. The line buffers shift down one row at address `col`:
   `lb[0][col] ← pixel`, `lb[i][col] ← lb[i-1][col]`.

After the pixel at (r, c), `win[ky][kx]` holds the image pixel
(r−K+1+ky, c−K+1+kx). `out_dv` rises one clock later if r ≥ K−1 and
c ≥ K−1 (and, for pooling, if the window lies on the stride grid). Each
line buffer is read and written at the same address in the same clock,
so synthesis maps it to a simple dual-port memory.

A conv layer has one extractor per input channel, and all N neurons share
it. A pooling layer has one extractor per channel with K = STRIDE = P.

## Activation (`tanh_act`)

The output is the B-bit code nearest to tanh(sum), rounded half up and
saturated. tanh rises monotonically, so this output is a staircase in the
sum. It steps from code c to c+1 where the sum reaches
⌈atanh((c+½)/2^F) · 2^(2F)⌉. The 2^B−1 thresholds are computed at
elaboration by a constant function in real arithmetic (a ln series).
The hardware is then just 2^B−1 comparators against constants, a
population count and a register: 7 comparators for B = 3, 63 for B = 6.

The activation sits inside each neuron, before pooling. Pooling after
tanh and tanh after pooling give identical results, because max commutes
with a monotonic function.

## Weights

Trained kernels are not part of this release. Three parameter paths
supply the weights, and they rank as follows:

* `conv_layer` with `WSEED = 0` takes `WEIGHTS` and `BIASES`. Entry
  `((n*C + c)*K + ky)*K + kx` sits at bit offset index×B; bias n sits at
  n×B. `neuron`/`conv_engine` accept `KERNELS`/`KERNEL` and `BIAS` the
  same way. **Use this path for a trained network.**
* With `WSEED ≠ 0` (the default), `cnn_pkg::gen_weight(seed, index, B,
  dist)` produces deterministic stand-in weights, with biases from
  `gen_bias`. Their share of zero, ±1, ±2^k and other weights follows
  `dist`. `LENET5_DIST`, `CIFAR10_DIST` and `SVHN_DIST` hold the shares
  measured on those trained, quantised networks. For LeNet5 that is 88.59,
  6.31, 0.05 and 5.05 %.

With the default seeds the top maps 22 939 zero, 1 346 one, 6 power-of-two
and 1 209 other multipliers.

## Files

| file | content |
|---|---|
| `rtl/cnn_pkg.sv` | number-format helpers, `mult_kind_e`, weight generator, distributions |
| `rtl/const_mult.sv` | specialised constant multiplier |
| `rtl/conv_engine.sv` | K×K constant multipliers + adder tree, 1 register |
| `rtl/tanh_act.sv` | threshold-based quantised tanh, 1 register |
| `rtl/neuron.sv` | C engines + bias + sum register + tanh |
| `rtl/neigh_extractor.sv` | line buffers and K×K window |
| `rtl/conv_layer.sv` | C extractors feeding N neurons; strobe pipeline |
| `rtl/maxpool_layer.sv` | per-channel 2×2/2 max pooling |
| `rtl/dhm_lenet5.sv` | top: conv1, pool1, conv2, pool2 |
| `tb/cnn_ref_pkg.sv` | reference arithmetic for the testbenches (real `$tanh`) |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_cifar_svhn_stage1.sv` | first CIFAR10/SVHN stage, 6-bit, 3 input channels |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends a hung run. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/cnn_pkg.sv tb/cnn_ref_pkg.sv tb/tb_conv_layer.sv \
    --top-module tb_conv_layer -o sim && obj_dir/sim
```

The block testbenches build in seconds. `tb_dhm_lenet5` runs the
full-size top with its default parameters. It streams three random
frames: one at full rate, one back-to-back with random gaps, and one after
a pause. It compares all 50×4×4 outputs of each frame with a behavioural
model, each at the exact clock predicted from the arrival times of the
input pixels. It also checks that each mechanism occurred: all four
multiplier kinds, positive and negative saturation, border and pooling
decimation, gaps, back-to-back frames and full rate. `tb_cifar_svhn_stage1` builds the
first stage of the CIFAR10 and SVHN extractors (32×32×3 input, 32 maps,
5×5, 6-bit, pooling) from the same layers, once with each network's
weight distribution, and checks two frames. Verilator needs
several minutes to compile the 25 500 specialised multipliers; the
simulation itself takes seconds.

## What follows the source design and what does not

Taken from the design as published:

* the three-level mapping (layer → neurons → convolution engines →
  multipliers);
* the LeNet5 layer sizes and the 3-bit width;
* constant-specialised multipliers for 0, 1 and powers of two;
* line-buffer windowing;
* tanh and max pooling;
* streaming with no external memory.

This design's own choices:

* the position of the binary point (F = B−1) and the bias format;
* the dv/fv stream protocol and the synchronous reset;
* "valid" borders and 2×2/2 pooling;
* the pipeline depths;
* one shared extractor per input channel;
* the comparator-staircase tanh;
* the stand-in weights.

Not covered:

* the fully connected classifier layers;
* the CIFAR10/SVHN networks as a top level. Their 6-bit, 3-channel,
  three-stage topology can be assembled from `conv_layer` and
  `maxpool_layer`, but needs padding and pooling geometry that is not
  given here;
* resource or timing figures for a particular FPGA.
