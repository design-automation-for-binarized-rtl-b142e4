# A purely combinational binarized neural network for a binary image sensor

This is RTL for a small image classifier that has no clock at all. It is
meant to sit next to an ultra-low-power vision sensor whose pixels are
already one bit each. A 32x32 binary image goes in, and a few nanoseconds
later four class outputs come out (car, pedestrian, cyclist, background in
the original use case). Every neuron of every layer is a separate piece of
logic, and all weights are wired in when the design is elaborated. There are
no memories, no registers and no control. What remains is XNOR gates,
adder trees and comparators, which a logic synthesis tool can simplify as a
whole.

The architecture follows the paper *Design Automation for Binarized Neural
Networks: A Quantum Leap Opportunity?* (Rusci, Cavigelli, Benini). That paper
synthesized it in a 22 nm process (2.61 mm² for the 32x32 network with fixed
weights). This RTL is an independent write-up of that design. Where the paper
is silent, this RTL makes its own choices, which are listed in the section
"Where this RTL departs from or adds to the paper".

## The binary neuron (`bin_conv`)

In a binarized network, weights and activations are single bits, and the
bit value 1 stands for +1 and 0 for −1. The product of two such values is
+1 exactly when the bits are equal, so a dot product reduces to counting
matching bits:

    phi = popcount( weights XNOR receptive_field )

Normally the network then applies batch normalization and a sign function.
Both fold into one integer comparison against a threshold computed offline.
The direction of the comparison depends on the sign of the batch-norm scale
γ. When γ = 0, the output is a constant given by the sign of β. A 2-bit code
per neuron picks one of the four cases:

| `sign_i` | name       | output            | batch-norm case |
|----------|------------|-------------------|-----------------|
| `2'b00`  | `SEL_GE`   | `phi >= thresh`   | γ > 0           |
| `2'b01`  | `SEL_LE`   | `phi <= thresh`   | γ < 0           |
| `2'b10`  | `SEL_ONE`  | 1                 | γ = 0, β ≥ 0    |
| `2'b11`  | `SEL_ZERO` | 0                 | γ = 0, β < 0    |

For γ > 0 the threshold is ⌊μ − b − βσ/γ⌋, and for γ < 0 it is
⌈μ − b − βσ/γ⌉ (μ, σ: batch-norm statistics; b: bias). For a receptive
field of N bits, `bin_conv` has the following parts:

* N XNOR gates;
* `popcount`, a balanced adder tree with a ⌊log2 N⌋+1-bit result;
* a `>=` comparator and a `<=` comparator against the unsigned threshold,
  which has the same width as the count;
* a 4-input selector driven by the sign code.

The neuron also brings out `phi_o`, the raw count. The last layer uses it as
the confidence score of each class.

Weights, threshold and sign code are ordinary ports of `bin_conv`. The
layers tie them to constants. Synthesis then turns every XNOR into a wire or
an inverter, and can share partial sums between the neurons that read the
same pixels. That sharing is the main source of area savings over a design
whose weights can be changed.

## Layers

**Convolution (`bin_conv_layer`)**

* Maps IF binary input maps of H×W pixels to OF output maps of the same
  size, with a 3×3 filter.
* Has one `bin_conv` for every output bit (m, y, x), so a layer is
  H·W·OF neurons side by side.
* Builds the receptive field of position (y, x) from the 3×3 window centred
  on it, taken in every input map. Bit `c*9 + ky*3 + kx` holds map c, window
  row ky and column kx.
* Reads window pixels outside the map as 0 (`bnn_pkg::PAD_VALUE`).
* Gives each output map its own filter, shared by all its H·W neurons.

**Pooling (`or_maxpool`)**

* Pooling comes after binarization. The maximum of binary values is then
  their OR, so a 2×2, stride-2 max pool is one 4-input OR per output bit.

**Fully connected (`bin_fc_layer`)**

* Each output is a `bin_conv` whose receptive field is the whole input
  vector.
* Both the binary outputs (`out_o`) and the counts (`score_o`) are
  available.

All ports carry maps as packed arrays `[channel][row][column]`. Flattened,
bit `(c*H + y)*W + x` is map c, row y, column x.

## The network (`bnn_top`)

The default configuration is the 32x32 model:

| stage | block | size | output |
|-------|-------|------|--------|
| 1 | conv 3×3 + OR pool | 1 → 16 maps, 32×32 | 16×16×16 |
| 2 | conv 3×3 + OR pool | 16 → 32 maps, 16×16 | 32×8×8 |
| 3 | conv 3×3 + OR pool | 32 → 48 maps, 8×8 | 48×4×4 |
| 4 | conv 3×3 + OR pool | 48 → 64 maps, 4×4 | 64×2×2 = 256 |
| 5 | fully connected | 256 → 64 | 64 bits |
| 6 | fully connected | 64 → 4 | 4 class bits + 4 scores (0..64) |

In total the network has 28,740 neurons and does 5.34 M binary operations
per image (an XNOR and an add count as two). It holds 62,864 weight bits
plus 2,388 threshold and sign bits.

The parameters select the network size:

* `IMG` is the image size (default 32).
* `NUM_CONV` is the number of conv+pool stages (default 4).
* `SEED` selects the generated parameters (see the next section).

`IMG = 16, NUM_CONV = 3` gives the paper's smaller 16x16 model: three
stages, then FC 192 → 64 → 4, for 1.13 M operations per image. The channel
list (1, 16, 32, 48, 64), the hidden width (64) and the class count (4) are
in `bnn_pkg`.

Interface of `bnn_top`:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `pixels_i` | in | `[IMG][IMG]` | binary image, `[row][column]` |
| `class_o` | out | 4 | binary output of each class neuron |
| `score_o` | out | 4 × 7 | match count of each class neuron (0..64) |

**Timing.** The network is one combinational path through six layers. There
is nothing to reset and nothing to clock. Apply an image and wait for the
outputs to settle. In the paper's 22 nm synthesis this took about 21 ns for
the 32x32 network. To place the network in a clocked system, add input and
output registers around `bnn_top`.

## Parameters: generated, not trained

The trained weights of the original networks are not published. `bnn_pkg`
therefore computes every filter's weights, threshold and sign code at
elaboration time, using a 32-bit integer hash of (seed, layer, filter, bit
index):

* **Weight bit** i of filter m in layer l: the XOR-reduction of
  `mix(seed, l+1, m+1, i+1)`.
* **Sign code:** filters 1, 2 and 3 of every layer with more than four
  filters are fixed to `SEL_LE`, `SEL_ONE` and `SEL_ZERO`, so that every
  mode exists in the hardware. Every other filter gets `SEL_LE` when
  `hash % 7 >= 5`, and `SEL_GE` otherwise.
* **Threshold** for a count over n bits: `n/2 + isqrt(n)/2 + (hash % 3) - 1`.
  With random inputs this sits about one standard deviation above the mean,
  so that after OR pooling the maps are neither empty nor saturated. For
  `SEL_LE` neurons the threshold is mirrored to `n - t`.

These values are constants, just as trained values would be, so the logic
has the same shape as a trained network. The classifications it gives,
however, are meaningless. To load a real model, replace `filter_weights`,
`filter_thresh` and `filter_sign` in `bnn_pkg` with functions that return
the trained values. One way is a case statement indexed by (layer, filter).

## Where this RTL departs from or adds to the paper

* **Comparators.** The paper's block diagram draws the two comparators as
  `>` and `<`. Its equation uses `>=` and `<=`, and so does its threshold
  formula, which rounds down for γ > 0. The RTL uses the inclusive
  comparisons. With strict comparators, every threshold would shift by one.
* **Sign code assignment.** The 2-bit code values are this design's choice,
  in the order the four selector inputs are drawn: `>`, `<`, 1, 0.
* **Border handling.** The paper gives layer sizes that need "same"
  convolutions (a 16×16 map stays 16×16 before pooling). It does not say what
  value pads the border. The RTL uses 0, which in ±1 terms is −1.
* **Flattening order** of the last pooled map into the first fully
  connected layer (packed `[channel][row][column]`) is this design's choice.
* **Class scores.** The paper calls the last layer's outputs both "binary
  neurons" and "a confidence score for every class". The RTL provides both.
  It does not pick a winning class, because the paper describes no such
  step.
* **Parameter values** are generated, as described above.
* **Not included:**
  * The image sensor itself, which is a mixed-signal circuit.
  * The parameter storage of the variable-weight configuration (scan-chain
    flip-flops or non-volatile cells), which the paper only uses for
    comparison. `bin_conv` already takes its parameters as ports, so that
    configuration would only need the layers to bring them out.
  * The larger 64x64 network. The paper gives its input size and depth but
    not its channel counts.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The expected values come
from `tb/bnn_ref_pkg.sv`, a loop-based model of the network. This model
recounts matches bit by bit, applies the four sign cases, pads with 0 and ORs
pooling windows. The only thing it shares with the RTL is the parameter
functions of `bnn_pkg`.

| testbench | what it covers |
|-----------|----------------|
| `tb_popcount` | N = 9 exhaustively; N = 144 and 256 with random vectors of every density |
| `tb_bin_conv` | N = 9: every input pattern for several weight vectors × every threshold × all four sign codes |
| `tb_or_maxpool` | 3 maps of 6×8, random inputs |
| `tb_bin_conv_layer` | a 2 → 6 map layer on a 7×5 map (non-square, so border and index mix-ups show) |
| `tb_bin_fc_layer` | a 64 → 6 layer, binary outputs and scores |
| `tb_bnn_top` | the whole chain at a reduced size: 8×8 image, 2 stages, FC 128 → 64 → 4; 60 images |
| `tb_bnn_model16` | the complete 16x16 model, 40 images |

The layer and network testbenches count a failure if a mechanism never
occurred during the run. The mechanisms are:

* each comparison mode both firing and quiet;
* constant-1 and constant-0 neurons;
* windows that read border padding;
* pooling windows with mixed inputs;
* counts landing exactly on the threshold, which separates `>=` from `>`.

Run one with plain Verilator, for example:

    verilator --binary --timing -Irtl -Itb -y rtl -y tb \
        rtl/bnn_pkg.sv tb/bnn_ref_pkg.sv tb/tb_bnn_top.sv --top-module tb_bnn_top
    ./obj_dir/Vtb_bnn_top

**Tool cost.** The network is large for a simulator, because every neuron is
its own instance. On a 4-core machine:

| configuration | Verilator lint | testbench build | memory |
|---------------|----------------|-----------------|--------|
| 16x16 model | about 1 minute | about 4.5 minutes | about 2 GB |
| 32x32 network | about 6 minutes | more than 20 minutes, not completed | about 9 GB in the Verilator front end alone |

Once built, each model simulates an image in well under a second.

The largest configuration simulated end to end is the complete 16x16 model.
The default 32x32 network passes lint and elaboration in Verilator and in
slang. It has not been simulated as a whole, because its simulator build
takes too long. Every block it uses has been simulated, and so has the
layer chain at the 16x16 size. The 32x32 network differs from it only in
the `IMG` and `NUM_CONV` parameters, which set the map sizes and the number
of stages.
