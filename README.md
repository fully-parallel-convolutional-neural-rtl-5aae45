# A fully parallel stochastic-computing LeNet-5

This is synthesizable SystemVerilog for a convolutional neural network in
which every neuron of every layer is its own piece of logic, and all of them
work at the same time. It follows the architecture of the paper *Fully-parallel
Convolutional Neural Network Hardware* (Frasser, Linares-Serrano, Canals, Roca,
Serrano-Gotarredona, Rosselló). The paper ran it as LeNet-5 on MNIST
handwritten digits, on one FPGA and in a 40 nm standard-cell synthesis.

Such a layout fits on one chip because the arithmetic is stochastic. A number
is a stream of bits, and the fraction of ones in the stream encodes the
number. A multiplier is then one gate and an adder is a bit counter. The one
idea this design builds on is that **correlation between streams is chosen on
purpose, not avoided**:

* Two streams made from *different* random sources are independent. An XNOR
  gate then multiplies them.
* Two streams made from the *same* random source are fully correlated. An OR
  gate then returns their maximum, exactly and on every cycle.

With the right source for each stream, the network needs only two random
number generators in total. ReLU costs one OR gate per neuron and 2x2
max-pooling costs one OR gate per window. No memory is read or written
during an inference.

## Number format

All streams use *bipolar* coding. If a fraction `p` of a stream's bits are
ones, the stream stands for `2p-1`, a value in [-1, 1]. A binary value
becomes a stream in a *binary-to-stochastic converter* (BSC). The BSC is a
comparator, `bit(t) = X > R(t)`, where `R(t)` is a pseudo-random number.

Here `X` and `R` are both 8-bit two's complement numbers. An 8-bit LFSR
visits each of its 255 non-zero states once per period. Over one period, a
value `X` therefore gives exactly `X+128` ones if `X <= 0`, and `X+127` ones
if `X > 0`. `X = 0` gives 128 ones out of 255. This is the *bipolar zero*,
written 0*, which a BSC with its input tied to zero produces. In short, 127
stands for about +1 and -128 for -1.

## The two random sources

| Source | Module instance | Polynomial | Seed | Used for |
|---|---|---|---|---|
| R_x(t) | `u_lfsr1` | x^8+x^6+x^5+x^4+1 | 0x01 | image pixels, 0*, every neuron's output converter |
| R_w(t) | `u_lfsr2` | x^8+x^4+x^3+x^2+1 | 0x5A | all weights |

Every activation stream in the chip comes from a comparison with R_x(t). So
every activation is fully correlated with every other one and with 0*. This
makes the OR gates of ReLU and pooling compute exact maxima. Every weight
stream comes from R_w(t), so weights are independent of the activations they
multiply. The paper requires exactly two generators. The polynomials and
seeds are this design's choice; two different primitive polynomials are used
so that the two sequences are not shifted copies of each other.

## The stochastic neuron (`sc_neuron`)

```
x*[1..N] ──┐
           XNOR ×N ──► APC ──► [reg] ──► BSC(R_x) ──┐
w*[1..N] ──┘         (2·ones−N)            >         OR ──► y*
                                           0* ──────┘
```

1. **Multiply.** One XNOR gate per input gives the bipolar product of input
   and weight streams.
2. **Add.** The *accumulative parallel counter* (`apc`) counts the ones among
   the N product bits of the current cycle. It outputs `sum = 2·ones − N` as
   a two's complement number. Averaged over a stream, `sum` equals
   `Σ x_j·w_j`.
3. **Register.** `sum` is registered. This is the only state in a neuron, and
   it makes every layer one pipeline stage.
4. **Back to a stream.** A BSC compares `sum` with R_x(t).
5. **ReLU.** The result is ORed with 0*. Both were made with the same R_x(t),
   so the OR gives `max(sum, 0) > R_x(t)`. That is exactly ReLU, with no
   clipping of the positive side.

**Gain.** With a plain comparison, the output stream carries `sum/128`, and a
sum outside −128..127 saturates the stream. The paper only says that trained
weights are used "after a simple process of normalization". This design adds
a `GAIN_SHIFT` parameter per layer, which shifts `sum` left before the
comparison. It defaults to 0, which is the plain comparison the paper draws.
Together with the weight scaling, it sets how much of a layer's range is used
before saturation.

There are no bias inputs, because the paper does not mention any. A bias can
be given as an extra input whose stream is all ones, with its weight.

## Max-pooling (`sc_maxpool`)

A 2x2 window is a 4-input OR gate. Its inputs are correlated neuron outputs,
so on every cycle the OR is 1 exactly when the largest input is 1. The count
of the OR stream therefore equals the largest of the four counts.
`tb_sc_maxpool` checks this over a full reference sweep. Pooling adds no
latency and no register.

## Network structure (`sc_lenet5`)

All default parameters give the LeNet-5 the paper evaluates:

| Stage | Module | Neurons | Inputs per neuron | Weights |
|---|---|---|---|---|
| image 28x28, BSC with R_x | `bsc_bank` | – | – | – |
| conv 6 @ 5x5 + 2x2 OR pool → 12x12x6 | `sc_conv_pool_layer` | 3456 | 25 | 150 |
| conv 16 @ 5x5 + 2x2 OR pool → 4x4x16 | `sc_conv_pool_layer` | 1024 | 150 | 2,400 |
| fully connected 256 → 120 | `sc_fc_layer` | 120 | 256 | 30,720 |
| fully connected 120 → 84 | `sc_fc_layer` | 84 | 120 | 10,080 |
| fully connected 84 → 10 | `sc_fc_layer` | 10 | 84 | 840 |
| 10 ones counters | `sc_counter` | – | – | – |

Total: 4,694 neurons and 44,190 weights. The convolutions have no padding and
a stride of 1. This is the only reading under which a 28x28 input gives the
roughly 45k weights the paper reports. The layer sizes themselves are those
of LeNet-5.

The convolution weights are shared by all pixels of a channel, as in any
convolution. Apart from that, the paper states that there is no pruning,
weight sharing or clustering: each weight has its own comparator.

## One inference, cycle by cycle (`inference_ctrl`)

The network has no control of its own: every layer computes on every cycle
from whatever its inputs are. Only the read-out needs sequencing. The image
and the weights must be held constant during an inference.

| Cycle (start cycle = 0) | What happens |
|---|---|
| 0 | `start` is accepted. Both LFSRs are reloaded with their seeds and the counters are cleared. |
| 1–5 | Pipeline fill. Layer k's output is meaningful from cycle k+1 on. |
| 6–260 | `class_count[k]` counts the ones of class stream k, over 255 cycles: one full LFSR period. |
| 261 on | `done` is high and the counts are valid. `busy` is low. |

A class's bipolar score is `(2·count − 255)/255`. Picking the winning class
is left to whoever reads the counts, since the paper does not say where that
is done. A `start` while busy is ignored, and a simulation assertion warns
about it.

The paper reports 3.4 µs per inference at 150 MHz, which is 510 cycles. It
does not break that number down. This design needs 261 cycles. The paper's
figure probably includes transfers over its PCIe link, but the paper does
not say so.

## Interface of the top

| Port | Direction | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | start an inference (accepted when idle or done) |
| `image` | in | 784 × 8 | pixels, row-major, two's complement |
| `weights` | in | 44,190 × 8 | conv1, conv2, fc1, fc2, fc3, in that order |
| `busy`, `done` | out | 1 | status |
| `class_count` | out | 10 × 8 | ones counted per class |
| `class_stream` | out | 10 | the raw class streams |

The weight order within each layer is:

* **Convolution:** `((oc·IN_C + c)·K + ky)·K + kx`.
* **Fully connected:** `o·N_IN + i`, where input `i` is the previous layer's
  output number `i`.
* **Pooled map:** the pooled output of a convolution layer is numbered
  `(channel·PH + row)·PW + col`. This is also the input order of the first
  fully connected layer.

In the paper the weights are fixed inside the design. Here they are a port,
because the trained values are not published. To embed a trained set, drive
the port from constants.

## How far this follows the paper

**From the paper:**

* two LFSRs, with R_x(t) shared by the image, 0* and all neuron converters, and R_w(t) used only for the weights;
* BSC as a comparator;
* XNOR multiplication;
* an APC feeding a BSC;
* ReLU as an OR with 0*;
* max-pooling as one OR per 2x2 window;
* full parallelism with no intermediate memory;
* 8-bit resolution;
* LeNet-5 with two conv+pool layers and three fully connected layers.

**This design's choices, where the paper is silent:**

* LFSR polynomials and seeds;
* signed comparison in the BSC;
* one register after each APC;
* `GAIN_SHIFT`;
* no bias;
* valid convolution;
* the index orders;
* the sequencer and its 255-cycle counting window;
* weights as a port.

**Departures and open points:**

* The paper's block diagram labels the image bus "768 x 8". MNIST digits are
  28x28 = 784 pixels, and only 784 reproduces the 45k weights. This design
  uses 784.
* The paper describes the APC as accumulating its count "for a period of
  time", but also has every neuron feed the next layer on every cycle. Here
  the APC's output is the count of the current cycle. Accumulation over a
  period happens only in the output counters.
* Latency is 261 cycles against the paper's 510 (see above).
* The host link (PCIe on the paper's FPGA board) is not part of this RTL. The
  top exposes plain ports instead.
* The paper's 40 nm synthesis has 104,317 sequential cells. This design has
  about 32,000 flip-flops at its defaults:
  * the neuron sum registers (3456×6 + 1024×9 + 120×10 + 84×8 + 10×8 bits);
  * the counters;
  * the LFSRs.

  The paper does not say where its other registers are. Input registers for
  the image or the weights, or deeper pipelining of the APC adder trees, would
  account for them.
* Min-pooling (AND) and average pooling (multiplexer) are mentioned in the
  paper as variants. They are not built.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| Testbench | What it establishes |
|---|---|
| `tb_lfsr` | both polynomials step as written out term by term, visit 255 distinct states, and reload |
| `tb_bsc` | all 65,536 8-bit comparisons; ones per period; 0*; saturation of a wider input |
| `tb_apc` | 25- and 150-input sums against a bit count |
| `tb_sc_neuron` | cycle-exact output for random streams; ReLU at stream level for sums from −25 to +25 |
| `tb_sc_maxpool` | truth table; OR of correlated streams counts exactly the maximum |
| `tb_sc_conv_pool_layer` | cycle-exact convolution, ReLU and pooling on a 2-channel 7x6 input (incomplete pooling row included) |
| `tb_sc_fc_layer` | cycle-exact fully connected layer with a gain shift |
| `tb_sc_counter` | counting, enable and clear |
| `tb_inference_ctrl` | load pulse, 5-cycle fill, 255 counting cycles, `done` at cycle 261, restart, ignored start |
| `tb_sc_lenet5` | whole network at reduced size, 3 inferences, class counts bit-exact against a reference model |
| `tb_sc_lenet5_mnist` | whole network at LeNet-5 geometry (28x28, 5x5 kernels, 10 classes) with 2/4 kernels and 30-20 neurons |

**The reference model.** The two end-to-end benches compare the design with
`tb/sc_lenet5_ref.sv`. This is a cycle-accurate model written as loops over
flat arrays, with its own LFSRs and sequencing. The benches also require
that each mechanism occurs at least once:

* a ReLU output replaced by 0*;
* a pooling window whose inputs differ;
* a neuron sum beyond the converter's range;
* a restart from done;
* an ignored start.

**Not verified:**

* The full-size network has not been simulated. Verilator needs about 2
  minutes just to lint it at half the channel and neuron counts, and the
  time grows faster than the size. The largest network simulated is
  `tb_sc_lenet5_mnist`.
* Classification accuracy is not verified, since trained weights are not
  available. The paper reports 97.6 % on MNIST, against 98.6 % in floating
  point.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_sc_lenet5 \
  -y rtl -y tb +libext+.sv rtl/sc_pkg.sv tb/tb_sc_lenet5.sv
./obj_dir/Vtb_sc_lenet5
```

Use the same command with another testbench name to run it. The
`sc_lenet5` parameters (`C1`, `C2`, `F1`, ... and `SHIFT1`–`SHIFT5`) scale
the network. The testbenches show consistent reduced sets.

## Files

| File | Contents |
|---|---|
| `rtl/sc_pkg.sv` | resolution, LFSR polynomials and seeds, word type |
| `rtl/lfsr.sv` | random number generator |
| `rtl/bsc.sv` | one converter |
| `rtl/bsc_bank.sv` | many converters on one reference |
| `rtl/apc.sv` | parallel counter |
| `rtl/sc_neuron.sv` | neuron |
| `rtl/sc_maxpool.sv` | OR pooling |
| `rtl/sc_conv_pool_layer.sv` | convolution + pooling layer |
| `rtl/sc_fc_layer.sv` | fully connected layer |
| `rtl/sc_counter.sv` | output counter |
| `rtl/inference_ctrl.sv` | sequencer |
| `rtl/sc_lenet5.sv` | top |
| `tb/` | the testbenches above and the reference model |
