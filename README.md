# PoET-BiN: a classifier built only from small look-up tables

PoET-BiN ("Power Efficient Tiny Binary Neurons", Chidambaram, Langlois and David)
replaces the fully connected classifier at the end of a binarised CNN with a network
of small look-up tables (LUTs). Every binary neuron of the classifier is imitated by a
few boosted decision trees. Each tree, and each boosting vote, has at most P one-bit
inputs, so each one fits in a single P-input LUT. The class scores come from an output
layer in which every neuron reads only P bits, so each score bit is one more LUT.
Nothing is multiplied or added at run time and no weights are read from memory. One
inference is one pass through four levels of LUTs, which is one clock cycle.

This repository holds synthesizable SystemVerilog for that classifier, the serial
feature input used to feed it on a small FPGA, and self-checking testbenches. The
defaults give the SVHN configuration of the architecture: 6-input LUTs, 60
intermediate neurons of 36 trees each, 512 input features, 10 classes and 8-bit scores.
The same RTL builds the MNIST and CIFAR-10 configurations (8-input LUTs) through
parameters.

**The table contents are not a trained network.** The published architecture gives
the structure, the sizes and the training algorithm, but not the trained tables. The
RTL therefore takes every table from a deterministic stand-in model. This model is a
hash of a seed and the table's position in the network. The datapath is the
architecture's. The classification accuracy is not, and cannot be until real trained
contents are loaded (see [Loading a trained network](#loading-a-trained-network)).

## The hierarchy at a glance

```
poetbin_top
├── input_shift_register      512-bit serial-in / parallel-out feature register
└── poetbin_classifier        combinational network + output register (1 cycle)
    ├── rinc_layer            NC*P = 60 intermediate binary neurons
    │   └── rinc2  x60        one per neuron: hierarchical boosting, 2 levels
    │                         (rinc_l, L levels, when LEVELS != 2)
    │       ├── rinc1  xNSUB  "subgroup": P trees + one MAT LUT
    │       │   ├── rinc0 xP  level-wise decision tree = one P-input LUT
    │       │   └── mat       weighted vote of the P trees = one P-input LUT
    │       └── mat           weighted vote of the NSUB subgroups = one LUT
    └── output_layer          NC = 10 class scores
        └── output_neuron x10 P inputs -> Q-bit score = Q LUTs
```

`poetbin_pkg` holds the shape constants, number formats and the stand-in model.
`tb/poetbin_ref_pkg` is an independent behavioural model that the testbenches compare
against.

## RINC-0: a decision tree that is exactly one LUT

An ordinary decision tree picks a feature for every node. RINC-0 trees are instead
trained level by level, and every node of level `j` tests the same feature `I_j`.
A tree of depth P therefore reads exactly P distinct features, every root-to-leaf path
exists, and the tree is the same thing as a truth table with 2^P entries. Training
picks the P features and the leaf label of each of the 2^P leaves. In hardware, the
chosen features are just wires and the labels are the LUT contents.

`rinc0` builds the table address by walking down the levels, one bit per level. A
feature value of 0 takes the left branch and 1 takes the right branch. The root
decision ends up as the **most significant** address bit. Leaf `a` (bit `a` of
`LEAVES`) is therefore the a-th leaf from the left when the tree is drawn with its
0-branches on the left. The architecture does not fix this ordering. It matters only
when trained tables are imported, and they must use the same ordering.

## MAT: boosting votes precomputed into a LUT

A single tree is a weak classifier, so trees are combined with Adaboost. Tree `i`
gets a weight `W[i]`. The weights of the trees that output 1 are summed, and the vote
is `sum >= TH`. Written out, this needs P multipliers, an adder tree and a comparator.
But the unit has only P one-bit inputs and one output bit, so `mat` evaluates that
arithmetic for all 2^P input patterns **at elaboration time**. The hardware is the
resulting table: one LUT, with no arithmetic left in the circuit.

Weights are unsigned 8-bit integers (`WW`) and sums are 13 bits wide (`TW`). The
layer sets `TH = ceil(sum(W)/2)`. With 0/1 tree outputs this is exactly the Adaboost
decision `sum(alpha_i * (2*b_i - 1)) >= 0`. The reference model checks the
implementation in that signed form.

## RINC-1 and RINC-2: boosting the boosted

One MAT LUT can combine only P trees. `rinc1` is one such group: P trees on P*P inputs
plus one MAT LUT, for P + 1 LUTs in all. Tree `i` reads `in[i*P +: P]` and drives MAT
address bit `i`.

To see more inputs, the architecture treats a whole RINC-1 as a weak classifier and
boosts again. This is *hierarchical Adaboost*. `rinc2` holds NSUB RINC-1 subgroups
(subgroup `s` reads `in[s*P*P +: P*P]`) and a second MAT LUT that weighs their
outputs. With NSUB = P the module has P^2 trees, P^3 inputs and P^2 + P + 1 LUTs:
36 trees, 216 inputs and 43 LUTs for P = 6. The 8-input configurations use fewer
subgroups. MNIST's 32 trees are read here as 4 subgroups of 8, and CIFAR-10's 40
trees as 5 subgroups of 8.

The same construction continues to any number of levels L. A RINC-L is P
RINC-(L-1) modules and one more MAT LUT: P^L trees, P^(L+1) inputs and
(P^(L+1) - 1)/(P - 1) LUTs. `rinc_l` builds it as a flat generate, level by level. The
P^L trees come first. Above them are P^(L-1) MAT units, then P^(L-2), and so on up to
the single top unit. Tree `t` reads `in[t*P +: P]`. MAT units are numbered from the
bottom level up, so the last unit is the top one. Every evaluated configuration uses
L = 2, so the layer uses `rinc2` by default. Setting `LEVELS` to another value
builds every intermediate neuron as a full `rinc_l` instead. `rinc_l` with L = 2 is
the same circuit as `rinc2` with NSUB = P, and `tb_rinc_l` checks this.

## The intermediate layer and its wiring

The classifier's hidden layers are not translated neuron by neuron. Instead, a
small *intermediate layer* of NC*P binary neurons is trained into the network after
the last hidden layer. Then one RINC-2 module per intermediate neuron is trained to
reproduce that neuron's output directly from the 512 binary features. `rinc_layer`
instantiates the NC*P modules. It routes each module's NSUB*P*P inputs from the
feature vector. In the stand-in model, input `m` of module `n` is
`features[(a_n * m + b_n) mod 512]`, where `a_n` is odd. The features of one module
are therefore all distinct. This matches the trained networks, where no two trees of
a module share an input.

## The sparse output layer and the score format

Output neuron `c` reads only its own group of P intermediate neurons,
`inter[c*P +: P]`. Its response to those P bits has 2^P possible values, which are
computed at elaboration time. `output_neuron` stores them as Q separate P-input
tables, one per score bit, for Q LUTs per class and Q*NC in all (80 at the
defaults). The score is `BIAS + sum of W[j] over the inputs that are 1`, saturated to
the signed Q-bit range. The result is a two's-complement number: the larger it is,
the more likely the class. Neither the architecture nor this RTL picks a winning
class. The consumer compares the NC scores.

The integer weight format (8-bit signed weights and bias on the score scale) and the
saturation are choices made for this RTL. The architecture states only that each
output neuron is quantized to Q bits and needs Q LUTs.

## Timing and interface

`poetbin_classifier` is purely combinational up to one output register:

| cycle | inputs                         | outputs                                 |
|-------|--------------------------------|-----------------------------------------|
| t     | `in_valid=1`, `features` valid | -                                       |
| t+1   | next vector may be presented   | `out_valid=1`, `scores` = result of t   |

The latency is one cycle and the throughput is one inference per cycle. `scores` keeps
its value until the next inference. The architecture deliberately has no pipeline
registers, because extra registers cost power. Its reported latencies are 5.85 ns for
P = 6 and about 9.5 ns for P = 8, which correspond to clocks of 100 MHz and 62.5 MHz.

`poetbin_top` adds the serial feature input. With 512 features and fewer pins than
that, the features are shifted in one bit per clock:

- While `shift_en` is 1, `ser_in` enters at the top of the register and everything
  moves one place towards bit 0. After 512 shifts, the first bit sent is feature 0.
  When `shift_en` is 0, the register holds.
- `start` (one cycle) launches an inference on the register contents of that cycle.
  `out_valid` follows one cycle later with the ten scores.
- `start` may coincide with the first shift of the next vector. The inference then
  still sees the complete old vector.
- `rst_n` is asynchronous and active low. It clears the feature register, `scores`
  and `out_valid`.

A full inference through the top therefore costs 512 load cycles plus one cycle.
Loading the next vector overlaps with nothing else except a `start`.

## Configurations

| parameter set                          | P | NSUB | trees / neuron | neurons | LUT tables (P-input)          |
|----------------------------------------|---|------|----------------|---------|-------------------------------|
| SVHN (defaults)                        | 6 | 6    | 36             | 60      | 60*43 + 80 = 2660             |
| MNIST  (`P=8, NSUB=4`)                 | 8 | 4    | 32             | 80      | 80*37 + 80 = 3040             |
| CIFAR-10 (`P=8, NSUB=5`)               | 8 | 5    | 40             | 80      | 80*46 + 80 = 3760             |

All three read 512 features and give 10 scores of 8 bits. For SVHN, the table count
equals the architecture's own count of 2660 six-input LUTs, and a coarse yosys
synthesis of `poetbin_top` at the defaults gives exactly 2660 ROM cells. An 8-input
table maps onto four 6-input FPGA LUTs, and FPGA tools prune tables that cannot affect
the result. The published LUT counts for MNIST (11899) and CIFAR-10 (9650) are
therefore below 4x the table counts above.

Parameters of `poetbin_top` / `poetbin_classifier`: `P` (LUT inputs, 3..10), `NSUB`
(subgroups per RINC-2, 1..P), `LEVELS` (boosting levels, 2 by default; other values
build full RINC-L neurons), `NC` (classes), `Q` (score bits), `NFEAT` (features; keep
it a power of two and at least as large as one neuron's input count for distinct
feature taps), `SEED` (stand-in model).

## Loading a trained network

Every trained quantity is an elaboration-time constant, as in HDL generated from a
trained model:

| quantity                               | where it enters                                   |
|----------------------------------------|---------------------------------------------------|
| feature tapped by input m of neuron n  | `model_feature()` used in `rinc_layer`            |
| leaves of tree t, subgroup s, neuron n | `model_dt_leaves()` -> `rinc2.LEAVES`             |
| first-level weights / thresholds       | `model_mat_weight(.., s, i)` -> `W1`, `TH1`       |
| second-level weights / threshold       | `model_mat_weight(.., MAT2_SUB, s)` -> `W2`, `TH2`|
| output weights / bias                  | `model_out_weight()`, `model_out_bias()`          |

To use a real network, replace these functions in `poetbin_pkg` with table look-ups
of the trained values, or generate a `rinc_layer`/`output_layer` whose instance
parameters hold them. Thresholds can be given directly instead of as ceil(sum/2).
Note the leaf ordering of `rinc0` (root = address MSB) and the MAT ordering (input i
= address bit i). The datapath modules (`rinc0`, `mat`, `rinc1`, `rinc2`,
`output_neuron`) take all contents as parameters and do not depend on the stand-in
model.

## What follows the architecture and what is this design's own

Taken from the architecture: level-wise trees as single LUTs; the MAT unit as a
weighted sum against a `>=` threshold, precomputed into a LUT; P trees per subgroup
and up to P subgroups in two boosting levels; an intermediate layer of NC*P neurons,
one RINC-2 each; an output layer in which each neuron reads P intermediate neurons and
is quantized to Q bits with Q LUTs; single-cycle unpipelined inference; a
single-input shift register for the 512 features; and all sizes of the three
configurations.

Chosen here: the LUT address orderings; the grouping of output-layer inputs
(consecutive intermediate neurons); the integer weight formats, the 13-bit MAT sums
and the saturating score; `TH = ceil(sum/2)`; the shift direction, reset and
`start`/`out_valid` handshake; the stand-in model; and reading 32 and 40 trees as 4
and 5 subgroups of 8.

Not built: the CNN feature extractor and its binary activation, which produce the 512
features outside this design; the training and code-generation flow.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench compares against
`poetbin_ref_pkg`, which walks trees node by node, takes votes in signed Adaboost
form and adds output weights with explicit clamping. It does not reuse the RTL's
tables. Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench                  | what it shows                                                                 |
|----------------------------|-------------------------------------------------------------------------------|
| `tb_rinc0`                 | all inputs of a P=6 and a P=8 tree                                            |
| `tb_mat`                   | all inputs; Adaboost rule; `>=` at equality                                   |
| `tb_rinc1`                 | 4000 random vectors, both output values                                       |
| `tb_rinc2`                 | full P=6 (6 subgroups) and P=8 with 4 subgroups, 3000 vectors each            |
| `tb_rinc_l`                | L = 1, 2, 3; equality with `rinc2`; a RINC-3 layer                            |
| `tb_rinc_layer`            | default size, 200 vectors x 60 neurons, both vote values at both levels       |
| `tb_output_neuron`         | all inputs, saturation at both ends, a second width (Q=4, P=8)                |
| `tb_output_layer`          | each class sees only its own group; 1000 random vectors                       |
| `tb_input_shift_register`  | ordering, idle cycles, hold, reset                                            |
| `tb_poetbin_classifier`    | default size, one-cycle latency, back-to-back inferences, no spurious valid   |
| `tb_poetbin_top`           | end to end at the defaults (see below)                                        |
| `tb_poetbin_workloads`     | MNIST, CIFAR-10 and SVHN configurations on the same vectors                   |

`tb_poetbin_top` runs the complete design with default parameters. It covers 24
serial loads with random idle cycles, a reset in the middle of a load, inferences
launched in the same cycle as the next load's first shift, and feature vectors biased
towards ones and towards zeros. It fails unless each of these events happened at least
once: every load and inference kind, both outcomes of first- and second-level votes,
and saturation at both ends of the score range.

To run a testbench with Verilator (from the repository root):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/poetbin_pkg.sv tb/poetbin_ref_pkg.sv -y rtl \
    tb/tb_poetbin_top.sv --top-module tb_poetbin_top
./obj_dir/Vtb_poetbin_top
```

Substitute any other `tb_*` name. The full-size designs elaborate in under two minutes
and simulate in seconds. Plain `verilator --lint-only -Wall` reports only unused
package constants and unused hash bits.

How far to trust it: the structure, sizes and timing have been checked against the
architecture's description, and every module agrees with the independent model on all
(small blocks) or thousands of random (large blocks) inputs. The table contents are
synthetic, so no statement about accuracy can be made. Power and timing figures
depend on the FPGA flow and have not been reproduced.
