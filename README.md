# A streaming ResNet-18 with 1-bit weights and 2-bit activations

This RTL runs a whole quantized convolutional network as one pipeline, with no
external memory. Every layer is its own hardware kernel. A feature map moves
from kernel to kernel as a stream of pixels, one channel value per transfer.
A kernel starts work as soon as its line buffer holds one filter window, so
all layers run at once on different rows of the same image. Weights are
binary (+1/-1) and activations are 2-bit, so the parameters of a full
ResNet-18 fit in on-chip RAM: 11,506,880 weight bits plus two 32-bit
normalization words per output channel.

The top level, `resnet18_top`, builds the ImageNet ResNet-18 at 224x224x3
with 1000 classes. Its layers are also usable on their own: a network of
another shape (AlexNet, a VGG-style net) is a different chain of the same
`conv_layer` and `pool_layer` instances.

## Numbers and their encodings

| quantity | width | meaning |
|---|---|---|
| weight | 1 bit | bit 1 = +1, bit 0 = -1. The host sends 32-bit floats, and the layer keeps only the sign (`Sign(0)` = +1). |
| activation code `c` | 2 bits | value `2c - 3`, so codes 0..3 mean -3, -1, +1, +3 |
| input pixel code `c` | 8 bits | value `2c - 255` (the same rule with n = 8) |
| convolution sum | 32 bits, signed | exact dot product in value units |
| skip value | 16 bits, signed | sum carried by the skip path, saturated |
| normalization words | 2 x 32 bits, signed | `tau`, then `delta` |

The symmetric encoding is this design's choice, and it is what makes the
arithmetic cheap. Bit p of every code is itself a +1/-1 value. A code is the
sum over its bit planes of 2^p times that ±1 value. So the dot product of a
window with a binary filter is one XNOR-popcount per bit plane:
`sum = Σ_p 2^p · (2·popcount(XNOR(w, plane_p)) − N)` (`xnor_popcount`).
The same unit serves the 8-bit first layer with eight planes.

Padding inserts the value -1, because 0 has no code. That is code 1 for
2-bit maps and code 127 for the 8-bit input (`qnn_pkg::pad_code`).

## Parameter loading: one daisy chain

All layers take their parameters from a single 32-bit word stream
(`param_valid`, `param_data`), which has no back-pressure. The stream passes
through the layers in network order:

conv1 → (convA, residual) of blocks 0..7 → fc

Each layer works the same way:
1. It keeps the first `K·K·I·O` words as weights. `weight_cache` turns each
   float into its sign bit and packs the `K·K·I` bits of one filter into one
   wide word, giving `O` words in all.
2. If the layer has BatchNorm, it then keeps `2·O` words as (`tau`, `delta`)
   pairs in `bn_cache`.
3. It forwards every later word, one cycle later, to the next layer.

A residual block's convolution has no BatchNorm of its own. The block's
normalization words follow the convolution's weights.

`loaded` rises when every layer is full. Each layer accepts pixels as
soon as its own parameters are in. An image sent early therefore waits, by
back-pressure, at the first layer that is still loading. The testbenches
send images only after `loaded`. Inside each layer, weights are ordered filter by filter. Within a
filter the order is row ky, then column kx, then channel, the same
depth-first order as the pixels. The complete word order is built by the
function `make_params` in `tb/resnet_tb_body.svh`.

## The convolution kernel

`conv_layer` walks over the padded input, (H+2P) x (W+2P) positions with I
channels each, and shifts one entry per clock into `window_buffer`:

- At a padding position, the entry is the -1 code, generated inside the
  layer. `in_ready` stays low meanwhile.
- At an image position, the entry is the next input transfer.

When the last channel of a position completes a valid window, the layer
holds off its input and emits O results on consecutive cycles, one filter
per cycle (`out_ch` = 0..O-1). A window is valid when it lies inside the
padded image and on the stride grid. Each result carries two values:

- `out_sum`, the raw 32-bit sum;
- `out_act`, its 2-bit code after BatchNorm and activation (`bn_act`).

Positions off the stride grid cost only the cycles needed to shift them in.
With no back-pressure, one image takes

    (H+2P)·(W+2P)·I  +  Ho·Wo·O   cycles.

The layer's testbench checks this count. The busiest layer of ResNet-18 is
conv1: 230·230·3 + 112·112·64 = 961,516 cycles per image. That is about 109
images/s at a 105 MHz clock, if the input keeps up.

### The line buffer

The pixels arrive depth-first, so a K x K x I window is spread over the last
`I·((K−1)·WP + K)` entries of the stream, where WP is the padded row length.
`window_buffer` keeps exactly that many entries, as one shift register per
bit plane. The newest entry enters at the top. As a result, the I channels
of a window pixel are I adjacent bits of each plane, and the window is built
from K·K plain slices per plane.

The window comes out plane-major: bit p of window entry j is at
`window[p·NW + j]`, where `NW = K·K·TAP_CH` and
`j = (ky·K + kx)·TAP_CH + t`. This is the layout `xnor_popcount` reads, so
the wide bus needs no reordering. The stage-4 convolutions, for example,
have 512·(2·9+3) = 10,752 entries.

### BatchNorm and activation as two numbers

For each output channel the host folds BatchNorm into two numbers:

- `tau`, the input at which the normalized value is 0;
- `delta`, the input step that moves it by one quantization step.

The 2-bit output boundaries are then `tau − delta`, `tau` and `tau + delta`.
`bn_act` finds the code by binary search. The top bit is `a >= tau`. The low
bit compares `a` with `tau ± delta`. The general form for n output bits is
`t_j = tau + (j − 2^(n−1))·delta`.

`delta` must be positive. A negative BatchNorm scale can be folded into the
signs of the layer's weights by the host.

## Pooling without waiting

`pool_layer` handles one channel at a time, because a pooled value depends
only on its own channel. Its line buffer has a look-ahead tap (`LOOKAHEAD =
1`): the entry arriving this cycle is already part of the window. As a
result, the pooled value leaves in the same cycle as the input that completes
its window. The layer never halts its input except under back-pressure.

Two modes are provided:

- Max pooling (pool1) pads with code 0, the smallest level.
- Average pooling (pool2, over the whole final 7x7 map) rounds the mean code
  to the nearest code.

## Residual blocks and the skip stream

A residual block (`residual_block`) takes two streams:

- the 2-bit regular stream from the previous convolution;
- a 16-bit skip stream.

The steps are:

1. The regular stream goes through a convolution whose normalization is not
   applied.
2. Each raw sum is added to the oldest entry of the skip buffer (`skip_fifo`).
3. The sum is saturated to 16 bits.
4. The result forks two ways. It goes unchanged to the skip output. It also
   goes through the block's own `bn_act` to the 2-bit regular output.

A result is taken only when both consumers are ready.

The skip buffer has depth `I·(W·(K−1) + K)`. That is how much skip data
arrives while the two convolutions in between fill their windows. It only
compensates for that delay.

The first skip stream is pool1's output, turned from codes into values by
`skip_source`. In the first block of stages 2, 3 and 4 the regular path
halves the image and doubles the channels. `skip_downsample` then keeps the
even rows and even columns of the skip stream and appends zero channels
(ResNet's parameter-free "option A" shortcut).

The last block's skip output is not used.

## Module list

| module | role |
|---|---|
| `qnn_pkg` | widths, types, encoding helpers |
| `window_buffer` | depth-first line buffer, plane-major window |
| `weight_cache` | float→sign, one filter per word, O words |
| `bn_cache` | (`tau`, `delta`) per output channel |
| `xnor_popcount` | dot product by bit planes |
| `bn_act` | threshold BatchNorm + n-bit activation |
| `conv_layer` | convolution / fully connected kernel |
| `pool_layer` | max / average pooling kernel |
| `skip_fifo` | skip-path delay buffer |
| `residual_block` | convolution + skip add + fork |
| `skip_source` | 2-bit codes → 16-bit skip values |
| `skip_downsample` | stride-2 / channel-doubling shortcut |
| `resnet18_top` | the full network |

All streams are valid/ready, and a transfer happens when both are high at a
rising clock edge. Reset `rst_n` is an active-low asynchronous reset. Only
control state is reset. Buffers are not, because no
value is read before it has been written for the current image.

## Where this design chooses for itself

These points are not fixed by the published description of the
architecture. They were decided here:

- the symmetric code-to-value mapping, and the bit-plane form of the
  XNOR-popcount;
- the 32-bit accumulator;
- saturation, rather than wrap-around, of the 16-bit skip sum;
- the option-A shortcut for downsampling blocks, which the description does
  not cover;
- the rounding of average pooling, and max pooling's padding with the lowest
  code;
- the order of the parameter words, with normalization words after weights,
  `tau` before `delta`;
- the final pooling and classifier, which output raw 32-bit scores.
  Softmax is left to the host, which does not change the winning class.

Outside the RTL are:

- the host computer and its link to the accelerator;
- external memory, which this design does not need;
- the vendor's stream and manager infrastructure, replaced here by plain
  valid/ready wiring;
- splitting the network over several devices. The chain can be cut at any
  stream, and a 2-bit stream needs little bandwidth.

## Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=<n> failures=<n>` and ends with `$finish`. To build and run
one with plain Verilator (5.x), list the package first:

    verilator --binary -Irtl -Itb rtl/qnn_pkg.sv rtl/*.sv tb/tb_conv_layer.sv \
        --top-module tb_conv_layer -Wno-fatal
    ./obj_dir/Vtb_conv_layer

Verilator warns that `qnn_pkg.sv` is listed twice. The warning is harmless.

`tb_resnet18_top` runs the whole network at a reduced size: 64x64 input,
base width 2, 10 classes, two images. Its input, output and
parameter streams stall at random. `tb_resnet18_full` runs one image at the
full default size. Both share `tb/resnet_tb_body.svh`, which has three parts:

- a reference model of the network, written independently of the RTL with
  plain loops over tensors;
- random parameters and images;
- counters that fail the test if some mechanism never happened. These
  mechanisms include input halts, inserted padding, skipped stride positions,
  skip additions, skip data waiting in the skip buffer, downsampling zeros,
  both pooling modes, parameter forwarding and back-pressure.

The full-size run prints the cycles from `loaded` to the last score. That
figure is the latency of one image through the whole pipeline. At 224x224
it is 1,105,969 cycles: conv1's 961,516 plus the time to fill and drain the
later layers. The test fails if the latency is below conv1's count or more
than a quarter above it. Loading the parameters takes about 11.5 million
cycles, one per word. The whole run takes about three minutes of simulation.

To change the network size, override `IMG`, `BASE_CH` and `NUM_CLASSES` on
`resnet18_top`. `IMG` must be a multiple of 32.

`tb_vgg_cifar` shows the kernels in a network without skip connections. It
builds a VGG-style CIFAR-10 classifier directly from `conv_layer` and
`pool_layer`:

- three groups of two padded 3x3 convolutions and a 2x2 max pool;
- three fully connected layers. The first covers the whole final map as one
  convolution. The other two are 1x1.

The test runs at reduced size: a 16x16 input, 4, 8 and 8 maps, and 16, 16 and
10 neurons. It checks every class score against a loop-based model, under
random stalls.
