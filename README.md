# A streaming binarized-CNN accelerator (CNV network, maximum-throughput folding)

A binarized neural network (BNN) restricts weights and activations to the two
values +1 and -1. Stored as single bits (1 = +1, 0 = -1), a multiply becomes an
XNOR and a sum becomes a count of set bits, and the batch normalisation and sign
activation that follow each layer collapse into one integer comparison. The
network's parameters are then small enough to stay entirely in on-chip memory.

This RTL builds an inference accelerator for such a network as a
*heterogeneous streaming* pipeline: every layer has its own compute engine,
sized for that layer, and the engines pass activations to each other over
on-chip streams. A layer starts working as soon as its predecessor produces its
first output, and a new image may enter as soon as the first engine has finished
with the previous one. Throughput is set by the slowest engine, so each engine
is given just enough parallelism to take about the same number of cycles per
image as the others.

The network built here is "CNV", a VGG-like classifier for 32x32 colour images
(CIFAR-10 or SVHN, which differ only in their trained weights), with each
layer's parallelism chosen for maximum throughput. At the default parameters the
pipeline classifies one image every 8192 clock cycles (about 24,000 images/s at
200 MHz) with a latency of about 34,600 cycles. The same `mvtu` block also
builds the fully connected digit classifiers (SFC, LFC), which section 7
runs at their published foldings.

## 1. Arithmetic of a binarized layer

**Dot product as popcount.** For a neuron with Y inputs, let `m` be the number
of inputs whose bit equals the weight bit. The signed dot product is then
`m - (Y - m) = 2m - Y`. Computing `m` is enough: XNOR the weight and input
words and count the ones. No signed arithmetic is needed.

**Batch norm + sign as one threshold.** A trained layer computes
`sign(gamma * (a - mu) * i + B)`, with `a` the dot product. For `gamma * i > 0`
this is +1 exactly when `a >= tau = mu - B / (gamma * i)`. In terms of the
popcount, `a = 2m - Y`, so the test is `m >= (tau + Y) / 2`. That value,
rounded up, is the integer threshold stored per neuron. When `gamma * i < 0`
the comparison flips. Flip that neuron's weight bits offline and the same `>=`
test applies. All of this happens before loading: the hardware only compares.

**Max-pooling as OR.** The threshold test is monotonic, so the maximum of
several dot products clears the threshold exactly when at least one of them
does. Max-pooling can thus be applied *after* the activation, as a Boolean OR
of the activation bits.

**Non-binary ends.** The first layer of CNV sees 8-bit RGB pixels and the last
one must rank ten classes. The first layer's PEs therefore add `+x` or `-x`
(x = unsigned 8-bit input, sign from the weight bit) instead of counting XNOR
matches, and compare the signed sum with a signed threshold. The last layer
skips thresholding and outputs its raw popcounts as 16-bit numbers; the
largest one is the predicted class.

## 2. The Matrix-Vector-Threshold Unit (`mvtu`, `mvtu_pe`)

Every layer, fully connected or convolutional, reduces to multiplying an
MH x MW binary matrix (MH neurons, MW synapses each) by an input vector and
thresholding the MH results. The MVTU does this with P processing elements
(PEs, "hardware neurons"), each S SIMD lanes wide ("hardware synapses").

**Folding.** Each cycle the unit processes one P-high, S-wide tile of the
matrix. A whole matrix-vector product therefore takes

    F = Fn * Fs = (MH / P) * (MW / S)  cycles,

where Fn is the *neuron fold* and Fs the *synapse fold*. P must divide MH and
S must divide MW. The cycle loop runs synapse folds inside neuron folds:
`for nf in 0..Fn-1: for sf in 0..Fs-1`.

**Where the weights live.** Matrix row n is handled by PE `n mod P` during
neuron fold `n div P`. Its weights sit in that PE's weight memory at word
`(n div P) * Fs + sf`, bit `s` of the word being matrix column `sf*S + s`. Its
threshold sits in the PE's threshold memory at entry `n div P`. Example: a 6x4
matrix on 3 PEs of 2 lanes puts rows 0 and 3 in PE0, rows 1 and 4 in PE1,
rows 2 and 5 in PE2, and takes (6/3)*(4/2) = 4 cycles per vector.

**PE datapath.** In one cycle a PE:

1. reads weight word `nf*Fs + sf`;
2. XNORs it with the S input lanes;
3. popcounts the result and adds it to the accumulator (cleared on `sf == 0`);
4. on the last synapse fold, compares the sum with threshold `nf` using `>=`,
   giving one output bit.

The accumulator, adder and threshold are TW bits wide and signed. By default
`TW = ceil(log2(MW*(2^IBITS - 1) + 1)) + 1`, which for binary inputs is the
minimal `1 + log2(Y)`. Memory reads are asynchronous, so the whole PE is
single-cycle.

**Input and output buffers.** The S-lane input words of a vector are taken
from the input stream during neuron fold 0 and written into the input vector
buffer. Neuron folds 1 to Fn-1 replay them from the buffer, so the input
stream is only busy for Fs of the F cycles. At the end of every neuron fold
the P fresh results go into the output vector buffer. After the last fold the
whole MH-element vector moves to the output register, one stream word holding
all of it. The next vector starts accumulating while that word waits for the
consumer. The engine stalls only when:

- an input word it needs has not arrived, or
- it is about to finish a vector while the previous result is still held.

With no stalls, one vector enters every F cycles, and its result appears one
cycle after its last compute cycle.

## 3. Convolutions: lowering and the Sliding Window Unit (`swu`, `conv_layer`)

A convolution is computed as a matrix-matrix product:

- the **filter matrix** holds one row per output channel;
- the **image matrix** holds one column per output pixel, containing all the
  input values under the K x K window at that position.

The MVTU multiplies the filter matrix by one image-matrix column at a time, so
a layer with Fm output pixels takes `Fm * Fn * Fs` cycles per image.

**Interleaved channels.** Feature maps travel pixel by pixel, each stream word
holding *all* channels of one pixel. An image-matrix column is therefore
ordered by window row, then window column, then channel, with the channel
varying fastest. The filter matrix must use the same order: column
`(ky*K + kx)*CH + ich` of row `och` holds weight `w[och][ky][kx][ich]`. This
reordering is done once, offline. It has two benefits:

- the SWU needs only one wide pixel memory, not one memory per channel;
- an MVTU's output vector (one pixel with all output channels) is already in
  the input format of the next layer.

**SWU operation.** Incoming pixels are written at consecutive addresses of one
wide memory. An address generator then reads, for each output position in
row-major order, the K x K window pixels in row-major order. Each pixel is
split into `CH/S` words of S channels, so each output word is one MVTU input
word. For a 2x3 image and a 2x2 window, the read addresses are
0, 1, 3, 4, then 1, 2, 4, 5.

**Ring buffer and flow control.** The memory holds K+1 image rows, used as a
ring:

- a window is read as soon as its last pixel has been written;
- a new row may be written once the oldest row in the ring is no longer needed
  by any remaining window.

Output therefore starts after K-1 rows plus K pixels of an image. The next
image streams in while the last window rows of the current one are still being
read. Both pointers count rows globally, and a row occupies ring slot
`row mod (K+1)`. When the reader moves to a new image, its window-top row jumps
past the last K-1 rows of the old one, which are already consumed. Stride is 1.

**Padding.** With `PAD > 0` the image gets a border of PAD pixels whose every
bit is `PAD_BIT`. The bipolar encoding has no zero, so the pad must be +1 or
-1. Pad positions are produced without reading the memory, which means a
window's leading pad words can leave before the image's first pixel arrives.
CNV uses no padding (`PAD = 0`, the default).

## 4. The Pooling Unit (`pool_unit`)

The unit pools K x K blocks with stride K on a binary image of CH channels.
It keeps K line buffers of DIM pixels, which is CH*K one-bit line buffers.
Pixel `(r, c)` is written into buffer `r mod K` at column `c`. When the
bottom-right pixel of a block arrives:

1. the K neighbouring pixels of each line buffer are ORed (horizontal pooling);
2. the K results are ORed together (vertical pooling);
3. the pooled pixel is emitted.

The arriving pixel stands in for its own, not yet written, position. Rows and
columns beyond the last full block are dropped. Rows arriving later overwrite
the oldest line buffer.

## 5. The CNV pipeline (`cnv_top`)

| stage | operation                 | in -> out       | P  | S  | Fm x Fn x Fs     | cycles/image |
|-------|---------------------------|-----------------|----|----|------------------|--------------|
| L0    | conv 3x3, 8-bit input     | 32x32x3 -> 30x30x64 | 64 | 3  | 900 x 1 x 9      | 8100 |
| L1    | conv 3x3                  | 30x30x64 -> 28x28x64 | 64 | 64 | 784 x 1 x 9      | 7056 |
| pool0 | 2x2 OR                    | 28x28x64 -> 14x14x64 | | | | 784 |
| L2    | conv 3x3                  | 14x14x64 -> 12x12x128 | 32 | 64 | 144 x 4 x 9    | 5184 |
| L3    | conv 3x3                  | 12x12x128 -> 10x10x128 | 32 | 64 | 100 x 4 x 18  | 7200 |
| pool1 | 2x2 OR                    | 10x10x128 -> 5x5x128 | | | | 100 |
| L4    | conv 3x3                  | 5x5x128 -> 3x3x256 | 8  | 64 | 9 x 32 x 18      | 5184 |
| L5    | conv 3x3                  | 3x3x256 -> 1x1x256 | 4  | 32 | 1 x 64 x 72      | 4608 |
| L6    | fully connected           | 256 -> 512      | 1  | 16 | 512 x 16         | 8192 |
| L7    | fully connected           | 512 -> 512      | 1  | 32 | 512 x 16         | 8192 |
| L8    | fully connected, no threshold | 512 -> 10 x 16 bit | 1 | 4 | 10 x 128     | 1280 |

The per-layer cycle counts are those of the published CNV-max design. The
split of each count into P and S is this implementation's choice; the
parameters `P0..P8`, `S0..S8` of `cnv_top` change it. For example, halving
P0..P7 gives the slower fixed-rate variant of the same network.

Between L5 and the fully connected layers, small width converters
(`stream_dwc`) split a whole activation vector into the S-lane words the next
MVTU reads.

The largest count, 8192 cycles in L6 and L7, sets the steady-state initiation
interval. The latency is dominated by the pipeline fill:

- L0 has to see a few image rows before it can start;
- each fully connected layer has to receive its whole input vector before its
  8192 cycles begin.

The weight memories hold 1,542,848 bits in total.

## 6. Interfaces

All data streams use valid/ready: a word moves on a rising clock edge where
both are high. A block holds its output word stable while it is not accepted;
assertions check this rule. Reset `rst_n` is asynchronous and active low. It
clears counters and valid flags only, not memories.

`cnv_top` ports:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, reset |
| `in_valid/in_ready/in_data` | in/out/in | 24 | one pixel per word, row-major; R in bits 7:0, G 15:8, B 23:16, unsigned |
| `out_valid/out_ready/out_data` | out/in/out | 160 | one word per image: class k's score in bits 16k+15:16k |
| `ld` | in | `finn_pkg::ld_t` | parameter load command |

**Loading parameters.** `ld_t` has these fields:

| field | meaning |
|-------|---------|
| `en` | write enable |
| `thr` | 1 = threshold memory, 0 = weight memory |
| `layer` | MVTU index, 0..8 (L0..L8) |
| `pe` | PE index |
| `addr` | word or entry address |
| `data` | weight word, S bits, lane 0 in bit 0; or threshold, TW bits, two's complement |

One write per cycle, with the placement rule of Section 2. For a
convolutional layer the rows are the interleaved filter-matrix rows of
Section 3. Load before streaming images. Writing while images stream is not
supported. L8 has no threshold memory.

## 7. Verification

Each block has a self-checking testbench in `tb/`. Each one computes its
expected values independently, ends by printing
`TB_RESULT checks=<n> failures=<n>`, and has a cycle-count watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_mvtu_pe` | binary and 8-bit-input PEs against direct dot products and threshold decisions |
| `tb_mvtu` | the 6x4 / 3-PE / 2-lane folding example and a multi-bit, unthresholded unit; random gaps and backpressure; a vector every F = 4 cycles at full rate |
| `tb_swu` | exact image-matrix word order for three back-to-back images, with and without padding; early start; ring-full hold-off |
| `tb_pool_unit` | 2x2 and 3x3 pooling against an integer max of the +-1 values |
| `tb_conv_layer` | binary and 8-bit convolutions against a direct 4-D convolution, using filters packed in the interleaved order; image interval of Fm*Fn*Fs cycles |
| `tb_cnv_top` | the whole network at full size (below) |
| `tb_fc_mnist` | the fully connected MNIST networks built from `mvtu` blocks (below); `tb_fc_net` is its helper |

`tb_cnv_top` runs the network at full size with default parameters:

- loads random weights and thresholds for all nine layers (about 47,000 load
  cycles);
- streams three random images back to back;
- compares all 30 class scores with a reference model of the whole network
  written in the testbench.

It also checks:

- the steady-state interval, which must be 8192 cycles or slightly more;
- that the first layer held off the input;
- that the result stream was back-pressured;
- that the first pooling unit produced 14x14 pixels per image;
- that a second image entered before the first result left;
- that the first layer's thresholds produced both +1 and -1.

Measured: latency 34,630 cycles, interval 8192 cycles. The simulation takes
about a second after a verilator build of about two minutes.

`tb_fc_mnist` shows that the same MVTU blocks build the fully connected
networks for 28x28 binary digit images, which the top cannot run. It builds
each network from four `mvtu` instances with `stream_dwc` converters between
them, runs them side by side on random weights and images, and compares the
ten raw last-layer popcounts of each image with a reference. No one-hot
decision is made on those scores.

| network | layers | P x S per layer | folds | interval | latency |
|---------|--------|-----------------|-------|----------|---------|
| SFC-max | 784(832)-256-256-256-10 | 256x64, 64x64, 64x64, 10x16 | 13, 16, 16, 16 | 16 | 64 |
| SFC-fix | 784-256-256-256-10 | 1x16, 1x4, 1x4, 1x1 | 12544, 16384, 16384, 2560 | 16384 | 47,875 |
| LFC-max | 784(832)-1024-1024-1024-10 | 128x64, 128x64, 128x64, 10x8 | 104, 128, 128, 128 | 128 | 491 |
| LFC-fix | 784(832)-1024-1024-1024-10 | 1x64, 4x16, 4x16, 1x1 | 13312, 16384, 16384, 10240 | 16384 | 56,323 |
| MFC | 784-512-512-512-10 | 2x16, 2x16, 2x16, 1x1 | 12544, 8192, 8192, 5120 | 12544 | 34,051 |

Intervals and latencies are in cycles. The SFC and LFC folds are the
published ones. At 200 MHz the max latencies come to 0.32 us and 2.46 us;
the published figures are 0.31 us and 2.44 us.

The MVTU needs S to divide the matrix width. A fold of 13 words of 64 bits for
784 inputs therefore needs the first-layer matrix widened to 832 columns, the
"784(832)" above. The pad columns hold weight bit 1 and the input pads with 0,
so each pad lane gives XNOR(1,0) = 0 and the thresholds are unchanged. Only the
testbench does this padding; the hardware just sees an 832-wide layer. No
folding is published for MFC, so its P x S is chosen here.

To simulate with verilator, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/finn_pkg.sv tb/tb_cnv_top.sv --top-module tb_cnv_top -j 8
    ./obj_dir/Vtb_cnv_top

Replace `tb_cnv_top` with any other testbench name to run it. Every parameter
has a default, so each file in `rtl/` can also be linted on its own, e.g.
`verilator --lint-only -Wall -Irtl -y rtl rtl/finn_pkg.sv rtl/cnv_top.sv`.

## 8. How this relates to the published design, and what to trust

Taken from the published architecture:

- the per-layer streaming organisation;
- the MVTU structure: PE/SIMD array, input and output vector buffers,
  weight-stationary PEs with their own weight and threshold memories;
- the PE datapath: XNOR, popcount, accumulator, `>=` threshold;
- the folding rule and its cycle counts, and the row-to-PE placement;
- the interleaved lowering of convolutions and the single wide SWU memory;
- padding with +1 or -1;
- OR pooling with line buffers;
- the CNV layer sizes and per-layer cycle counts;
- the 24-bit input pixels and 16-bit outputs.

Choices made here where the published description is silent:

- the valid/ready handshake and reset behaviour;
- single-cycle PEs with asynchronous memory reads, where the original relied
  on a high-level synthesis tool's automatic pipelining;
- the input-buffer reuse scheme and the whole-vector output word;
- the K+1-row SWU ring;
- the width converters;
- the P/S split of each layer's fold;
- unsigned 8-bit input channels;
- the last layer's output being its popcount;
- a load port for parameters. The original generates the accelerator with the
  trained parameters built in.

Where the published description disagrees with itself:

- **Threshold comparison.** The text writes the test as "greater than" in
  places, while the datapath drawing uses `>=`. `>=` is used, consistent with
  sign(0) = +1.
- **Number of pooling layers.** The topology is described as three
  (conv, conv, pool) groups, but the nine published per-layer cycle counts
  imply a 1x1 map after the sixth convolution, where a third pool cannot
  exist. Two pools are built.

Not included: the off-chip parts of the original system, namely the DRAM
holding images and results, the engine moving them between DRAM and the
pipeline, and the host processor. The top exposes the image and result
streams in their place. The published design reached 21.9 k images/s and
283 us latency on an FPGA. The numbers here come from cycle-accurate
simulation of this RTL, not from hardware. No timing closure has been
attempted: the single-cycle PEs place a wide popcount and an adder in one
path, which a real implementation at 200 MHz would pipeline.
