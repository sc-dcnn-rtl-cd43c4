# SC-DCNN LeNet-5: a convolutional network in stochastic computing

This is synthesizable SystemVerilog for a LeNet-5 digit classifier in which every
number is a random bit stream rather than a binary word. In a bipolar stream of
length L, the fraction of ones p stands for the value x = 2p - 1 in [-1, 1]. With
that encoding, multiplying two independent streams takes a single XNOR gate, and
adding n streams takes one multiplexer or a small approximate counter. The
whole network is therefore cheap enough to build fully in parallel: every
neuron has its own hardware, and the network works on one bit of every stream
in each clock. One image takes L clocks (256 by default), and the next image
can start right after it.

The architecture follows the SC-DCNN paper (Ren et al., "SC-DCNN: Highly-Scalable
Deep Convolutional Neural Network using Stochastic Computing", ASPLOS 2017). The
default build is the configuration that paper selects as its most energy-efficient
average-pooling design ("No. 11"):

| layer | work | adder | pooling | activation | weight bits |
|---|---|---|---|---|---|
| Layer0 | 5x5 conv, 1 -> 20 maps, 28x28 -> 24x24, pool -> 12x12 | MUX | 2x2 average (MUX) | Stanh, K = 10 | 7 |
| Layer1 | 5x5 conv, 20 -> 50 maps, 12x12 -> 8x8, pool -> 4x4 | APC | 2x2 average (binary) | Btanh, K = 250 | 7 |
| Layer2 | fully connected 800 -> 500 | APC | none | Btanh, K = 400 | 6 |
| output | fully connected 500 -> 10 | APC | none | scores summed over the image, then argmax | 6 |

Parameters switch the top to the paper's other configurations: max pooling, APC
or MUX per layer, and the stream length.

## Arithmetic on streams

Each stream starts at a **stochastic number generator** (`sng`). The generator
compares a W-bit code c with W random bits and emits a 1 when the random number
is smaller, so P(1) = c / 2^W. Pixels are 8-bit codes. Weights are loaded as 8-bit
codes Int((x+1)/2 * 256). Each layer's weight memory keeps only the top W bits of
a code. That truncation is exactly the low-precision mapping Int((x+1)/2 * 2^W),
so the per-layer weight precision (7, 7 and 6 bits) is set by the memory width.

**Multiplication.** XNOR of two independent bipolar streams gives the product.
The two inputs must use different random sources. For that reason the pixels,
the weights of each layer, and each set of multiplexer selects each have their
own LFSR (`lfsr`, 16-bit, one seed per instance). All generators in one bank
share one random number. Their streams are then correlated with one another, but
a sum of products stays unbiased, because each product pairs an input with a
weight from a different source.

**Addition**, two kinds:

* **MUX adder** (`mux_inner_product`). Each clock, an N-to-1 multiplexer passes
  one of the N product bits, picked at random as floor(rnd * N / 2^16). The output
  stream carries (1/N) * sum(x_i w_i). This adder is the smallest, but it throws
  away N-1 of every N bits, so it needs long streams and its result is scaled
  down by N.
* **Approximate parallel counter** (`apc`, `apc_inner_product`). Each clock, the
  APC counts the ones among the N product bits and gives the count v in binary.
  The bipolar sum of that clock is then 2v - N: the result is not scaled, and
  almost nothing is lost. The approximation is in the first level. Pairs of inputs
  go through one gate each, OR on even pairs and AND on odd pairs. Because
  a + b = (a|b) + (a&b), an OR pair and an AND pair together stand in for four
  inputs on average. The N/2 gate outputs are then added exactly, and the sum is
  doubled, which is why the counter's least significant bit has weight 2. For 16
  inputs this is the counter with eight gates and four full adders (output weights
  2^3, 2^2, 2^1, 2^1). The test bench compares the two gate by gate. Summed over
  all 2^16 input patterns, the error is exactly zero.

The output of an APC-based layer is a binary word per clock, not a stream. Every
block after the APC must take binary input, until an activation turns the word
back into a stream.

## The feature extraction block

`feature_extraction_block` is the repeating unit. It computes the four
convolution outputs of one 2x2 pooling window, pools them, and applies tanh. Its
one output stream is one pixel of the next feature map. The four inner products
use the same filter, so they share one set of weight streams. There are four
variants:

| USE_APC | USE_MAX | adders | pooling | activation |
|---|---|---|---|---|
| 0 | 0 | MUX | `avg_pool_mux`: 4-to-1 MUX, random select | `stanh`, threshold K/2 |
| 0 | 1 | MUX | `max_pool` on streams | `stanh`, threshold K/5 |
| 1 | 0 | APC | `avg_pool_bin`: (a+b+c+d) >> 2 | `btanh` |
| 1 | 1 | APC | `max_pool` with accumulators | `btanh` |

**Stanh** (`stanh`) is a K-state saturating up/down counter. An input 1 moves it
up one state and a 0 moves it down. It outputs 1 while the counter is at or above
the threshold, and the output approximates tanh(K/2 * x). In a MUX layer, this
gain K/2 also undoes the 1/N and 1/4 scaling of the MUX adder and the MUX pooling.
The right K therefore depends on N and L. The RTL computes K from the paper's
empirical fits, rounded to the nearest even number (`sc_pkg`):

* after average pooling: K = 2 log2 N + (log2 L * N) / (33.27 log2 N). For N = 25 and L = 256 this gives 10.
* after max pooling: K = 2 (log2 N + log2 L) - 37 / log2 N - 16.5 / log5 L. For N = 25 and L = 256 this gives 12.
  The threshold also moves to the left fifth of the states, because max pooling
  slightly under-counts the largest value. A small positive value could otherwise
  flip sign.

**Btanh** (`btanh`) is the binary-input version of Stanh. Each clock its counter
moves by the bipolar sum 2v - N, it saturates at 0 and K-1, and it outputs 1 from
K/2 upwards. The paper gives K = N/2 for use after average pooling. This design
uses N/2 wherever Btanh appears.

**Hardware-oriented max pooling** (`max_pool`) is the least obvious block. The
exact maximum of four streams is known only after all L bits have been counted,
which would cost a full stream of latency. Instead, time is cut into segments of
16 clocks. During a segment, four counters total what each input delivers. In the
segment's last clock, a comparator picks the input with the largest total. That
input is then passed through for the whole next segment. The first segment after
an image starts uses a random input. Because ones are spread at random along a
stream, the input with the largest global value is usually also the largest in
each segment, so the output tracks the maximum without any added latency.

* In the APC variant, the inputs are binary counts, and the counters become
  accumulators of width DW + log2(17).
* A tie goes to the lowest-numbered input. This is a choice of this design.

The test bench checks the block clock by clock against a model. It also checks
that, with one input clearly the largest, that input is chosen more than 92% of
the time.

## Layers and weight memories

`conv_pool_layer` instantiates one feature extraction block per output pixel of
every map: 2880 blocks in Layer0 and 800 in Layer1.

* **Receptive fields.** An output pixel (py, px) pools the convolution outputs at
  (2py+dy, 2px+dx), with dy and dx each 0 or 1. Each of those outputs reads
  channels 0..IN_CH-1, rows oy..oy+4 and columns ox..ox+4. The field is flattened
  as `c*25 + ky*5 + kx`, the same order as the filter's weights.
* **Weight storage: filter-aware sharing.** Each feature map has one local weight
  memory (`weight_sram`) and one bank of weight generators. That bank drives the
  weight streams of every block in that map, and only that map.
* **Fully connected layers.** `fc_layer` (APC + Btanh) and `output_layer` apply the
  same scheme with one memory per neuron.

Every stream generator needs its weight in every clock. For that reason, a
"weight SRAM" here is a register array read in parallel, not an addressed SRAM
macro. Each write stores a whole filter or neuron row. The load bus
`wr_data[ROWMAX]` is as wide as the largest row (800 codes).

`output_layer` has no activation. Each class neuron adds its bipolar sum 2v - N
for every clock of the image into a signed accumulator. After the last clock, the
totals become `scores`, and their argmax becomes `class_id`. A score divided by
L*N estimates the neuron's inner product divided by N.

## Timing and interface (`sc_dcnn_lenet5`)

* An image is accepted in a clock where `start` and `ready` are both high. The
  pixels are sampled into a register then. `ready` is high when the design is
  idle, and also in the last clock of an image. Holding `start` high therefore
  streams images back to back, one per L clocks.
* Each activation output is registered, so each layer adds one clock. The
  "new image" pulse that resets the activation counters to their middle state
  (and restarts the max-pooling segments) is delayed by one clock per layer. Each
  layer thus starts fresh exactly when the first bit of the new image reaches it.
  Stream bits of two images can be in flight at once.
* `result_valid` pulses L + 4 clocks after acceptance, with `scores` and
  `class_id`.
* Weights are loaded with `wr_en`, `wr_layer` (0..3, `sc_pkg::layer_e`) and
  `wr_row`, one row per clock. Rows must not change while an image is in flight.

| parameter | default | meaning |
|---|---|---|
| IMG, KS, C0, C1, F2, NCLS | 28, 5, 20, 50, 500, 10 | network sizes |
| L | 256 | stream length (power of two) |
| W0, W1, W2 | 7, 7, 6 | stored weight bits per layer (W2 also used for the output layer) |
| L0_APC, L1_APC | 0, 1 | APC (1) or MUX (0) adders in Layer0 / Layer1 |
| POOL_MAX | 0 | hardware-oriented max pooling in both conv layers |
| SEG | 16 | max-pooling segment length |
| K0, K1, K2 | formulas above | activation state numbers |

## What is this design's own

The paper describes the arithmetic blocks and the network configuration. It does
not describe the system around them. The following are choices made here:

* The random number generators: the paper cites another design and does not give
  it. Here they are 16-bit LFSRs, and generators share random numbers as
  described above.
* The comparator form of the stream generators.
* The pixel format.
* The weight load bus, and the parallel-read register memories.
* All control: the handshake, back-to-back images, the delayed per-layer restart,
  and the initial state K/2.
* The Btanh update rule and K = N/2 outside the average-pooling case: the paper
  only cites this block.
* The output layer: the paper lists ten outputs but describes three layers.
* Tie-breaking in max pooling and argmax.
* Threshold K/5 rounded down.

Out of scope: the alternatives the paper only evaluates (OR-gate and two-line
adders), and the memory macros, which the paper sizes with a memory compiler and
does not design.

## How far it has been checked

Each module has a self-checking test bench in `tb/`:

* Cycle-exact models: LFSR, stream generators, weight memory, both adders, the
  APC against the gate-level counter, both poolings, Stanh, Btanh, the fully
  connected layer, and the output layer. The layer tests fix the weight random
  number so that the weight streams become deterministic.
* Statistical or directional checks: the feature extraction block (all four
  variants, including a window where max and average pooling must disagree) and
  the convolution layer (a quadrant pattern that fixes the receptive-field
  wiring).
* `tb_sc_dcnn_lenet5` runs the whole network end to end at reduced size (16x16
  image, 2 and 4 maps, 4 hidden and 3 output neurons, L = 64). It uses two
  builds: the default configuration, and max pooling with APC everywhere.
  Saturated weights push a white image and a black image through all layers, and
  the test checks the class, the score signs, the latency of L + 4 clocks,
  back-to-back acceptance, and that `start` is ignored while the design is busy.
* The largest size simulated is the same test with its size constants changed to
  the full 28x28 image, L = 256 and all ten classes, but 4 and 8 feature maps and
  16 hidden neurons instead of 20, 50 and 500 (set `IMG`, `C0`, `C1`, `F2`, `NCLS`,
  `L` and `ROWMAX` at the top of the test bench; `ROWMAX` is the longest weight
  row, here C1*16 = 128). It passes in both builds. The full-size network has not
  been simulated; it has only been linted and elaborated.

None of this measures classification accuracy on MNIST. That needs trained
weights, which are not part of this design. The tests show that values and signs
propagate correctly, not how close the network comes to the paper's error rates.

## Simulating

All files are plain SystemVerilog. Simulate with Verilator 5, and list the package
first:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sc_pkg.sv tb/tb_max_pool.sv --top-module tb_max_pool
./obj_dir/Vtb_max_pool
```

Each test bench prints `TB_RESULT checks=N failures=M`.

Build cost rises steeply with size. The full-size network has about 1.6 million
XNOR gates in Layer1 and 400,000 weight generators in Layer2. Linting it takes
minutes and a few GB of memory, and a full-size Verilator model is far too large
to build in practice (hundreds of generated C++ files). The largest simulated size
takes several minutes to build and under a second to run.
