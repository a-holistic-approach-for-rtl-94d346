# Dreamnet: a dataflow CNN for digit recognition, in SystemVerilog

Dreamnet is a small convolutional neural network for optical character
recognition (handwritten digits), in the spirit of LeNet-5: three 3x3
convolution layers, two 2x2 max-pooling layers, a fully connected layer with
ten outputs and a final class decision. This RTL builds it the way a dataflow
compiler would: **every neuron of every layer is its own piece of hardware**,
and the layers are chained as a pipeline that consumes one pixel per clock.
Nothing is time-multiplexed and there is no external memory. A frame of
W x H pixels takes W x H clocks, and frames can follow each other with no gap.

The cost of such a design is set almost entirely by two numbers: how many
neurons each layer has (each neuron of a layer with N_IN input maps needs
9 x N_IN multipliers) and how many bits the weights have (the width of every
one of those multipliers). Shrinking either one saves multipliers, that is
FPGA DSP blocks, at some cost in accuracy. The configuration built here is
the one with the best accuracy-per-DSP trade-off found in a sweep of both:
**4, 6 and 8 neurons in the three convolution layers and 5-bit weights**
(called I1 below), on **256 x 256** frames. At one pixel per clock, a 57.93 MHz
clock gives 57.93e6 / 65,536 = 884 frames per second.

## The pipeline

```
 pixel stream (8 bit, raster order, 1 per clock)
   |
   C1  conv_layer  1 -> 4 maps   256x256 -> 254x254
   S1  pool_layer  4 maps        254x254 -> 127x127
   C2  conv_layer  4 -> 6 maps   127x127 -> 125x125
   S2  pool_layer  6 maps        125x125 ->  62x62
   C3  conv_layer  6 -> 8 maps    62x62  ->  60x60
   FC  fc_layer    8 x 60 x 60 = 28,800 inputs -> 10 scores
   argmax_classifier             10 scores -> class 0..9 + its score
   stream_fifo (4 entries)       -> host (valid/ready)
```

Every arrow is a stream: a `valid` bit plus one activation per feature map.
All maps of a layer are produced in the same clock, so one `valid` qualifies
the whole bundle. Inside the network there is no backpressure: every stage
accepts a token whenever one arrives. The stream gets thinner as it goes
deeper. C1 sees up to one token per clock; after S1 at most one in four;
after S2 at most one in sixteen. The FC layer produces one set of scores per
frame.

The only place where a consumer can stall is the host, which reads results
through `res_valid`/`res_ready`. The network cannot wait for it, so a
4-entry FIFO absorbs up to four unread results. A result that finds the FIFO
full is dropped and the sticky `res_overflow` output goes high.

### Neurons are built from actors

Each convolution neuron is a small chain of single-purpose "actors", the way
a dataflow graph of the network draws it:

```
 input map 0 --> conv3x3_actor --\
 input map 1 --> conv3x3_actor ---+--> sum_actor --> bias_actor --> relu_actor --> output map
   ...                           /
 input map N_IN-1 --> conv3x3 --/
```

* **`conv3x3_actor`**: one kernel applied to one input map. Two line buffers
  (IMG_W words each) hold the previous two rows. A 3x3 register window
  shifts one column left for every accepted pixel. Once the window lies
  wholly inside the map (row >= 2, column >= 2), the nine products are added
  and the sum is registered. There is no padding, so each convolution trims
  one pixel from every border. Every conv actor has its own line buffers,
  even where several actors read the same input map. That mirrors the
  dataflow graph, where each actor owns its state; sharing them would save
  memory.
* **`sum_actor`**: adds the N_IN conv results of one neuron. All conv actors
  of a layer see the same stream and have the same latency, so the results
  arrive in the same clock and need no buffering. An assertion checks this.
  C1 has a single input map and no sum actor.
* **`bias_actor`**: adds the neuron's bias.
* **`relu_actor`**: clamps negative values to 0 and converts the accumulator
  back to an 8-bit activation (see the number formats below).

A pooling layer is a `pool_h_actor` followed by a `pool_v_actor` per map.
Pool H keeps the even-column pixel and, when the odd-column pixel arrives,
outputs the larger of the two. Pool V writes each even row into a one-row
buffer. On the odd row below it, it outputs the larger of the buffered pixel
and the new one. Odd sizes round down: the last column or row is dropped,
which is why 125 pools to 62.

The actors count their own raster position (column, row) and wrap at the
frame size. Reset aligns them, and the input must then deliver whole frames.
A frame that is cut short will misalign every later frame until the next
reset.

### Fully connected layer and class decision

`fc_layer` computes ten dot products over everything C3 produces in a frame:
8 maps x 60 x 60 = 28,800 activations, each with its own weight per class.
The 288,000 weights sit in an on-chip RAM with one word per map position.
Each word holds the 8 x 10 weights of that position. On every C3 token the
word at the current position is read, and all ten accumulators are updated
with 8 products each (80 multipliers). After the frame's last position, the
accumulators plus biases are emitted as the scores and the accumulators
restart at zero. The RAM read is registered. The scores appear 2 clocks
after the last C3 token.

The network ends, conceptually, in a softmax. Softmax preserves order, so the
most probable class is simply the largest score. `argmax_classifier` outputs
that index (lowest index on a tie) and its score, and computes no
probabilities.

## Number formats

This is the part to read before changing anything. Only the weight width B
is a design parameter (`WGT_W`, default 5). The rest is fixed in
`dreamnet_pkg`:

| quantity | format | range |
|---|---|---|
| pixel / activation (`act_t`) | unsigned, 8 bits, all fraction | 0 ... 255/256 |
| weight, bias | signed two's complement, B bits, B-1 fraction | -1 ... 1 - 2^-(B-1) |
| conv/sum/bias accumulator (`acc_t`) | signed 24 bits, 8 + B-1 fraction | |
| FC accumulator, score (`fc_acc_t`) | signed 32 bits, 8 + B-1 fraction | |

* The product of an activation and a weight is already in accumulator format.
* A bias is in activation units. It is aligned by shifting it left 8 bits
  before it is added.
* `relu_actor` drops the B-1 weight fraction bits with an arithmetic shift, a
  floor. It then maps negatives to 0 and saturates anything above 255 to 255.
  Saturation matters: with narrow weights and no per-layer scaling, sums
  beyond the activation range are common, and wrapping around would be
  destructive.
* The FC scores keep all their bits. No overflow is possible at the default
  sizes: 28,800 x 255 x 16 < 2^27.

With B = 5, a weight code w means w/16. A C1 output is
`clamp(floor((sum of pixel*w + bias*256) / 16), 0, 255)`, with everything in
integer codes.

## Interface of `dreamnet_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `pix_valid`, `pix_data[7:0]` | in | pixel stream, raster order, whole frames; no ready |
| `c1_w[N1][1][9]`, `c1_b[N1]` | in | C1 kernels and biases (B-bit codes) |
| `c2_w[N2][N1][9]`, `c2_b[N2]` | in | C2 kernels (`[neuron][input map][tap]`) and biases |
| `c3_w[N3][N2][9]`, `c3_b[N3]` | in | C3 kernels and biases |
| `fc_wr_en`, `fc_wr_pos`, `fc_wr_map`, `fc_wr_cls`, `fc_wr_data` | in | writes one FC weight: position in the 60x60 map (raster index), C3 map, class |
| `fc_b[10]` | in | FC biases |
| `res_valid`, `res_ready` | out/in | result handshake |
| `res_class[3:0]`, `res_score[31:0]` | out | decided class and its score |
| `res_overflow` | out | sticky: a result was dropped because the FIFO was full |

Kernel tap k = 3*row + column, with row 0 the oldest (top) row and column 0
the leftmost. This is correlation order, as training frameworks store
kernels. The conv weights and biases are ports, so a new set of weights needs
no rebuild. They must be held stable while a frame is in flight. FC weights
can be written at any time, but not while the frame that uses them is
passing.

### Timing

| stage | clocks from the input token that completes its output |
|---|---|
| conv3x3_actor | 2 |
| sum, bias, relu actors | 1 each (C1 has no sum) |
| pool_h, pool_v actors | 1 each |
| fc_layer | 2 after the frame's last C3 token |
| argmax_classifier | 1 |
| stream_fifo | 0 (first word falls through) |

Throughput is one pixel per clock, sustained across frames. The end-to-end
tests check that back-to-back frames give results exactly W x H clocks apart.

## Parameters

`dreamnet_top` takes `IMG_W`, `IMG_H` (256), `N1`, `N2`, `N3` (4, 6, 8),
`WGT_W` (5) and `OUT_DEPTH` (4). All map sizes follow from these. The image
must be at least 18 x 18, so that C3 still has an output (28 x 28, the MNIST
digit size, leaves 3 x 3). Resource use at the defaults:

* multipliers: 36 (C1) + 216 (C2) + 432 (C3) + 80 (FC) = 764, each
  8-bit unsigned x B-bit signed;
* memory: about 1.44 Mbit of FC weights, plus about 120 kbit of line buffers.

The multiplier count is 9 x (N1 + N1*N2 + N2*N3) + 10 x N3, so it grows with
the neuron counts. Each multiplier's width grows with B. How many DSP blocks
these multipliers occupy depends on the FPGA tool. An 8 x 5 product is far
narrower than a DSP block, so several can share one. In a build with constant
weights, many of them also reduce to adders. The 161 DSP blocks reported for
this configuration are therefore far fewer than 764, and the two numbers
cannot be compared directly.

## How far it can be trusted, and where it departs

What follows the reference description: the layer sequence, the 3x3 kernels
and 2x2 max pooling, the neuron counts and weight width of I1, the split
into conv / sum / bias / relu / pool-H / pool-V actors, the dataflow
(streaming, fully pipelined) organisation, and the one-pixel-per-clock rate.

Choices of this design, where the description gives no detail:

* the activation, accumulator and bias formats above, truncation, and
  saturation in the relu actor;
* treating B as the width of weights and biases only. Activations stay 8
  bits wide; if B was meant to cover activations too, the multipliers would
  be narrower still;
* convolutions without padding, and pooling that rounds odd sizes down;
* bias and relu after C3, as in the other convolution layers;
* valid-only streams with no FIFOs between actors. A dataflow model connects
  actors by FIFOs, but here every actor keeps up with its input, so a FIFO
  appears only at the output;
* weights on ports and in a writable RAM, instead of constants compiled into
  the logic. With constants, synthesis would simplify the multipliers, so the
  DSP count of this RTL is not comparable to that of hard-wired weights;
* argmax instead of softmax;
* frame alignment by reset only (no start-of-frame marker).

No trained weights are included. The tests use random weights. The RTL is
therefore verified as arithmetic against a bit-exact reference model, not
for classification accuracy.

## Which networks fit

The hardware is fixed at build time, but a smaller network runs on a larger
build. Give the unused neurons zero weights and biases, and place a narrower
weight code into the 5-bit format by shifting it (a 3-bit code with 2
fraction bits, times 4). The default build can therefore run any topology
with N1 <= 4, N2 <= 6, N3 <= 8 and B <= 5, such as (3, 5, 7, B = 3). It cannot
run wider networks such as (4, 8, 12) or 6- or 7-bit weights; those need
`N2`, `N3` and `WGT_W` raised and a rebuild. Frame size is also fixed at
build time. MNIST digits (28 x 28) need `IMG_W = IMG_H = 28`. USPS digits
(16 x 16) are too small for three unpadded 3x3 convolutions and two
poolings, and would have to be padded or scaled up first.

## Files

`rtl/`

| file | contents |
|---|---|
| `dreamnet_pkg.sv` | widths, types, the multiply and requantise helpers |
| `conv3x3_actor.sv`, `sum_actor.sv`, `bias_actor.sv`, `relu_actor.sv` | convolution-neuron actors |
| `pool_h_actor.sv`, `pool_v_actor.sv` | pooling actors |
| `conv_layer.sv`, `pool_layer.sv` | layers built from the actors |
| `fc_layer.sv`, `argmax_classifier.sv` | fully connected layer and class decision |
| `stream_fifo.sv` | valid/ready result FIFO with overflow flag |
| `dreamnet_top.sv` | the whole network |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), and
`dreamnet_ref_pkg.sv`, an integer reference model of the layers.
`tb_dreamnet_top.sv` runs the whole network on 28 x 28 frames. It covers
back-to-back frames, gaps in the input, host backpressure, a full FIFO,
overflow, ReLU clipping and saturation, and counts each of them.
`tb_dreamnet_full.sv` runs two 256 x 256 frames with every parameter at its
default, including the load of all 288,000 FC weights, in about a minute of
simulation. `tb_dreamnet_i2.sv` runs the smaller (3, 5, 7, B = 3) network
on the default neuron counts and weight width by the zero-and-shift embedding
described above, and checks it against a reference model of the small network. `tb_dreamnet_i3.sv` repeats the end-to-end test on a build
of the larger (4, 8, 12) network with 7-bit weights. Each testbench prints `TB_RESULT checks=N failures=M`.

To simulate with Verilator 5, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/dreamnet_pkg.sv tb/dreamnet_ref_pkg.sv tb/tb_dreamnet_top.sv \
    --top-module tb_dreamnet_top
./obj_dir/Vtb_dreamnet_top
```

The same command works for any `tb/tb_<name>.sv`: Verilator finds the
modules it uses in `rtl/` through `-Irtl`.
