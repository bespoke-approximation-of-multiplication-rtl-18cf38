# Bespoke approximate MLP classifier for printed electronics

Printed circuits (here, electrolyte-gated FET logic) are extremely cheap and
flexible, but their transistors are huge and slow. A multilayer perceptron
built from ordinary multipliers and adders does not fit on a realistic printed
area or power budget. This design makes such a classifier fit by combining two
ideas:

* **Bespoke hardware.** The circuit is generated for one trained network.
  Every weight is a constant wired into the logic, and the whole network is
  one combinational cloud that classifies one input vector per clock cycle.
* **Approximation of every part of the neuron.**
  * *Multiplication*: the weights are quantised to powers of two, so every
    product is just the input wired a few columns to the left. No multiplier
    is left.
  * *Accumulation*: chosen summand bits are removed from the adder trees
    (tied to zero). The synthesis tool then deletes the adder cells those bits fed.
  * *Activation*: the hidden layer uses an 8-bit quantised ReLU, so the next
    layer's adders stay narrow. The output argmax compares only a chosen
    subset of bits in each comparator.

The SystemVerilog here implements that datapath with parameters for
everything the offline optimisation decides: the weights, the removed bits,
the QRelu step, the comparator bit subsets and the comparator pairing. Its
default size is the largest network of the original evaluation: 274 inputs,
5 hidden neurons, 16 classes (an arrhythmia data set, 1,450 weights). The
trained weights and chosen approximations of the evaluated networks are not
public. The defaults are therefore a fixed pseudo-random pattern (see
*Default constants*). The RTL is complete and tested, but with the default
constants it classifies nothing meaningful until trained values are put in.

## Structure

```
x[0..NUM_IN-1] (4 bit each)
   |
   +--> bespoke_neuron x NUM_HID --> qrelu --> hid_act (8 bit each)
                                                  |
                   bespoke_neuron x NUM_OUT <-----+
                          |
                   out_pre (signed)
                          |
                    approx_argmax --> cls --> [register] --> class_idx, out_valid
```

| file | role |
|---|---|
| `rtl/mlp_pkg.sv` | widths, weight-code helpers, argmax-tree geometry, default-constant generators |
| `rtl/po2_adder_tree.sv` | the adder tree for one sign of one neuron, with power-of-2 placement and removed bits |
| `rtl/bespoke_neuron.sv` | positive tree, negative tree, subtractor |
| `rtl/qrelu.sv` | 8-bit linear quantised ReLU (truncate, nullify, clip) |
| `rtl/approx_comparator.sv` | comparator of two signed values on a bit subset |
| `rtl/approx_argmax.sv` | comparator tree with a pairing order per stage |
| `rtl/mlp_top.sv` | the classifier |

## Number formats and the weight code

* **Inputs**: 4-bit unsigned features. Features are normalised to [0,1] and
  keep their 4 most significant bits; that truncation happens before this
  circuit.
* **Hidden activations**: 8-bit unsigned values out of the QRelu.
* **Weights and biases**: powers of two, each given as an 8-bit code
  (`mlp_pkg`). Bit 7 is the sign (1 = negative). Bits 6:0 are the exponent
  `e`, i.e. the product `a * 2^e` is `a` shifted left by `e`. The exponent
  `7'h7F` means a zero weight. Exponents 0..7 are supported by the width
  arithmetic (`MAX_SHIFT`). All values are integers in units of
  "input LSB x smallest weight". The offline flow has to scale trained
  weights into that range. A bias code is in the same units as the sum it
  joins.

## The neuron: two unsigned trees and one subtraction

Every input of a neuron is non-negative, because it is either a feature or
a ReLU output. So each neuron sorts its weights by sign. `po2_adder_tree`
with `NEG=0` adds the inputs whose weight is positive. A second instance
with `NEG=1` adds the inputs whose weight is negative, taking the absolute
value of the weight. `bespoke_neuron` then outputs

    pre = sum_pos - sum_neg

Both trees are unsigned, so they need no sign extension. The only signed
operation is the final subtractor. The bias is one more constant summand in
the tree of its sign.

Inside the tree, summand `i` is `(a[i] AND mask_i) << e_i`. The tree is
written as a plain sum of these terms. The synthesis tool sees constant
shifts and constant zero bits, so it builds a "semi-bespoke" tree: a column
gets only the bits that can be non-zero. The RTL does not fix a reduction
scheme (Wallace, Dadda, ...). The sum width
`IW + MAX_SHIFT + clog2(N+1)` cannot overflow for any set of constants.

## Accumulation approximation: removed summand bits

`MASK` holds one keep bit per summand bit. For neuron `n`, input `i` and
input bit `b`, the keep bit sits at index `(n*NUM_IN + i)*IW + b` of
`HID_MASK` (IW = 4), or of `OUT_MASK` (IW = 8). A 0 replaces that bit with
a constant zero.

This is not LSB truncation. The bits are picked one by one by a
multi-objective genetic search over accuracy and an adder-count estimate.
The search is activation-aware: the QRelu drops low bits and clips high
ones, so the middle columns of a hidden neuron's sum can matter more than
the top ones. It is also input-aware: two bits in the same column can
matter differently, because their inputs have different distributions.
Any pattern is therefore allowed, per neuron and per tree.

For reference, the search estimates area by counting the full adders of a
carry-save reduction: `FA_k = ceil((L_k + FA_{k-1} - 2) / 2)` for column
`k` with `L_k` live bits, summed over columns and trees. That estimate is
part of the offline flow and is not computed by the RTL.

## QRelu

`qrelu` drops the `SHIFT` low bits of the signed pre-activation, with no
rounding. It forces the result to 0 when the sign bit is set (AND gates),
and forces all 8 bits to 1 when any dropped high bit is set (OR gates):

    y = x < 0 ? 0 : min(x >> SHIFT, 255)

`SHIFT` is one value for the whole hidden layer, `HID_QSHIFT` in `mlp_top`.
It comes from quantisation-aware training. The default of 5 is a
placeholder.

## Approximate argmax

The output layer's pre-activations go, unquantised and signed, into a tree
of `NUM_OUT - 1` comparators. This is the least obvious part of the design.

* **Stages.** Stage `s` receives `C_s` candidates, with `C_0 = NUM_OUT` and
  `C_{s+1} = ceil(C_s / 2)`. Each candidate is a value plus its index.
* **Pairing order.** A stage first permutes its candidates into slots using
  `ORDER`: entry `(s, p)`, 8 bits at `[(s*64 + p)*8 +: 8]`, names the stage
  input that goes into slot `p`. Slots `2k` and `2k+1` meet in one
  comparator. An odd last slot moves on unopposed. The offline flow chooses
  this order because some pairs of classes can be told apart with very few
  bits. It fills a matrix of required bits per pair and solves an assignment
  problem (Hungarian algorithm), stage after stage. The RTL takes the result
  as a constant.
* **Bit subsets.** Comparator `c` is numbered stage by stage, then by slot
  pair. It compares only the bits set in its 32-bit mask `CMP_MASK[c*32 +: 32]`,
  of which the low W bits are used. To make masking meaningful on signed
  numbers, both operands are first converted to offset binary by inverting
  the sign bit. That conversion keeps the order of signed values as an
  unsigned order. Keeping only high bits gives a coarse comparison for
  classes whose scores are far apart. Keeping only low bits works for
  classes whose scores are close. Any subset is legal.
* **What moves on.** The winner's full value and index move on, so every
  later comparator can use its own subset. Ties, as seen through the mask,
  go to the even slot.

With all mask bits set and any order, the tree is an exact argmax (ties
aside).

## Timing and interface of `mlp_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock; printed designs of this kind run at a period of a few hundred ms |
| `rst_n` | in | 1 | synchronous, active low; clears `out_valid` and `class_idx` |
| `in_valid` | in | 1 | `x` holds a sample |
| `x` | in | `NUM_IN` x 4 | features |
| `out_valid` | out | 1 | `class_idx` belongs to the sample accepted at the last edge |
| `class_idx` | out | `clog2(NUM_OUT)` | predicted class, held while `in_valid` is low |

The network between `x` and the result register is purely combinational. A
sample presented with `in_valid` at one rising edge has its class in
`class_idx` right after that edge. That means one new inference per cycle
and a latency of one cycle. The whole network's delay must fit in one clock
period.

## Default constants

`mlp_top`'s constant parameters default to the `mlp_pkg` generators, which
use an integer hash `mix()` of the position:

* `gen_weights(seed, n, m)`: about 1 in 16 weights is zero. Otherwise the
  sign is a hash bit and the exponent is 3 hash bits (0..7).
* `gen_bias(seed, n, maxe)`: sign is a hash bit; exponent is hash mod (maxe+1),
  with maxe = 10 for the hidden layer and 14 for the output layer.
* `gen_mask(...)`: about 1 summand bit in 8 is removed, at random positions.
* `gen_cmp_mask(n)`: comparator `c` ignores its `1 + c mod 4` lowest bits,
  and every third comparator also ignores bit 5.
* `gen_order(n)`: stage 0 pits output `p` against output `p + ceil(n/2)`;
  later stages keep the natural order.

mlp_top uses seeds 11/12/13 for the hidden layer (weights, masks, biases)
and 21/22/23 for the output layer. To build a real classifier, override
`HID_W`, `HID_MASK`, `HID_BIAS`, `OUT_W`, `OUT_MASK`, `OUT_BIAS`,
`HID_QSHIFT`, `CMP_MASK` and `ORDER` with the values of a trained,
approximated network. The layouts are above and in the file headers. Each
evaluated network is a separate bespoke instance.

| network | (inputs, hidden, classes) | how it is simulated |
|---|---|---|
| Arrhythmia | (274, 5, 16) | default parameters, `tb_mlp_top` |
| Breast Cancer | (10, 3, 2) | `tb_mlp_workloads` |
| Cardiotocography | (21, 3, 3) | `tb_mlp_workloads` |
| Pendigits | (16, 5, 10) | `tb_mlp_workloads` |
| Red Wine | (11, 2, 6) | `tb_mlp_workloads` |
| White Wine | (11, 4, 7) | `tb_mlp_workloads` |

## Verification

Every module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=N failures=M` line.

* `tb_po2_adder_tree`, `tb_bespoke_neuron`: hand-written constants with mixed
  signs, a zero weight, exponents up to 7 and removed bits. They compare
  against integer sums.
* `tb_qrelu`: exhaustive over a 14-bit input. Nullify, pass and clip must
  all occur.
* `tb_approx_comparator`: exact and masked instances against an
  offset-binary integer model.
* `tb_approx_argmax`: seven inputs (byes in two stages). The exact instance
  is compared against a true argmax. The masked instance, with its own
  order, is compared against a stage-by-stage model.
* `tb_mlp_top`: the default (274, 5, 16) classifier. `mlp_harness` streams
  400 random vectors, one per cycle with an idle cycle every seventh, and
  checks the class and the one-cycle latency against `mlp_ref_pkg`. The test
  fails unless QRelu nullification, QRelu clipping, removed bits that were 1,
  masked comparisons that decide differently from exact ones, and idle
  cycles all occur.
* `tb_mlp_workloads`: the five smaller topologies side by side. Byes occur
  here, in the argmax of 3, 7 and 10 classes.

`mlp_ref_pkg` is an integer model of the network written independently of
the RTL structure. It builds the same default constants from the same
generators and seeds.

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mlp_pkg.sv tb/mlp_ref_pkg.sv rtl/*.sv tb/mlp_harness.sv tb/tb_mlp_top.sv \
    --top-module tb_mlp_top -Mdir obj_top && obj_top/Vtb_mlp_top
```

Unit tests need only `rtl/mlp_pkg.sv rtl/*.sv tb/tb_<module>.sv`.

## Where this RTL departs from, or adds to, the described design

* **Constants**: trained weights, removed-bit patterns, QRelu step,
  comparator subsets and pairings are placeholders (see *Default
  constants*). The default comparator masks remove only a few bits. They do
  not reproduce the roughly 4x to 11x comparator size reductions reported
  for the optimised networks.
* **Weight code layout**: sign plus 7-bit exponent, with 7'h7F for zero. This
  is this design's encoding of an 8-bit power-of-two weight. The fixed-point
  scaling is left to the flow that produces the constants.
* **Register and handshake**: the description gives only "one inference per
  cycle". The result register, `in_valid`/`out_valid`, the hold behaviour and
  the synchronous reset are additions. There is no input register.
* **Comparator details**: the offset-binary mapping of signed values, the
  tie rule and the unopposed pass of an odd candidate are choices made here.
* **Adder structure**: written as sums and left to synthesis. The carry-save
  full-adder count is only the search's area estimate.
* **Not in the RTL**: the offline flow (quantisation-aware training,
  genetic search, greedy bit selection, assignment, Pareto selection). The
  printed EGFET cell library and the supply-voltage scaling (1 V and 0.6 V)
  concern synthesis and power, not logic.
