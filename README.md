# Bespoke stress classifiers for flexible wearable patches

A stress-monitoring patch made in flexible electronics (indium-gallium-zinc-oxide
thin-film transistors on a plastic foil) has almost nothing to spend on logic: only
n-type transistors exist, every gate is a resistor-loaded NMOS gate that burns static
current, cells are large (a 2-input NAND is about 920 um², a flip-flop about 16 000 um²)
and a gate takes about a microsecond. Static power is nearly all of the power, so power
is proportional to area. A programmable processor or a memory holding model weights is
out of reach.

The way around it is to make the classifier *bespoke*: one trained model is turned
directly into a circuit with every coefficient hardwired. A multiplication by a known
constant is a handful of shifted additions, a weight pruned to zero costs nothing, a
comparison against a known threshold is a few gates, and the whole model is evaluated
in one combinational pass with no memory. This repository gives that circuit as
parameterized SystemVerilog for three model families — decision trees (DT), linear
support vector machines (SVM) and multilayer perceptrons (MLP) — plus a small clocked
top that connects one of them to the rest of the patch and predicts, for each feature
vector, *baseline/rest* (0) or *stress* (1).

**What you get and what you do not.** The circuit structure, the number formats, the
feature counts, precisions, pruning ratios and latencies of six reference
configurations are here. The *trained coefficients* of those configurations are not
public, so every coefficient, threshold and leaf class is a parameter whose default is
a deterministic placeholder (see [Coefficients](#coefficients)). With the defaults the
circuits are structurally representative and are checked against an independent
reference model over many thousands of random inputs, but they do not detect stress; to get a real classifier, pass a trained, quantized
model through the parameters.

## Where the classifier sits

```
 sensors --> ADCs --> feature extraction --> [ stress_classifier ] --> actuator
 (EDA, temperature, heart)  (std, min, power, HRV ...)     this RTL          (alert)
```

Sensors, converters, the feature extractor (in the reference flow the features were
computed in software; a flexible microprocessor could do it), the actuator and the
energy source are outside this RTL. The classifier receives one vector of features per
sample, each already normalised to [0,1) and quantized to `FEAT_W` bits, and returns a
one-bit prediction.

## The six reference configurations

`stress_pkg` holds, for two public stress datasets (WESAD: chest and wrist sensors, 17
subjects; AffectiveROAD: wrist sensor, real driving), the most accurate classifier of
each family:

| DATASET        | MODEL     | features | precision (bits) | pruning | latency | EVAL_CYCLES at 2 kHz |
|----------------|-----------|---------:|-----------------:|--------:|--------:|---------------------:|
| WESAD          | MODEL_DT  | 25 | 8  | –   | 0.14 ms | 1   |
| WESAD          | MODEL_SVM | 25 | 10 | –   | 0.7 ms  | 2   |
| WESAD          | MODEL_MLP | 25 | 10 | 90% | 6.3 ms  | 13  |
| AFFECTIVE_ROAD | MODEL_DT  | 15 | 10 | –   | 7.1 ms  | 15  |
| AFFECTIVE_ROAD | MODEL_SVM | 20 | 10 | –   | 15 ms   | 30  |
| AFFECTIVE_ROAD | MODEL_MLP | 30 | 8  | 50% | 97 ms   | 194 |

The reported results for these models were: WESAD DT 94% accuracy at about 9 uW and
0.2 mm²; WESAD SVM 85% at 0.12 mW; WESAD MLP 94% but at 48 mW and 8.8 cm² even after
pruning 90% of its weights; AffectiveROAD MLP 98% at 26.5 mW; AffectiveROAD SVM and DT
well below that in accuracy. The default build of the top is the **WESAD decision
tree**, the only one that is both among the most accurate and small enough for a
battery-free patch. "Precision" is the width of both the features and the
coefficients. Latency is the reported delay of each combinational classifier in a 1 V
flexible cell library with about 1 us per gate; `EVAL_CYCLES` is that latency in periods of the 2 kHz system clock,
rounded up (`stress_pkg::eval_cycles`).

## Bespoke arithmetic

### Number formats

* Features: unsigned, `FEAT_W` bits, all fraction: value = x / 2^FEAT_W, in [0,1).
* Weights: signed two's complement, `COEF_W` bits. Only the MLP needs to know where the
  binary point is (`COEF_FRAC`, default `COEF_W-2`, i.e. weights in [-2,2)); elsewhere
  the scale is irrelevant because only comparisons of sums follow.
* Biases are given directly in the scale of a product (`FEAT_W+COEF_W` bits), so they
  are added without shifting.
* Every sum is exact: widths grow by one bit per adder level, nothing is rounded or
  wraps. The only rounding in the design is the MLP's requantization between layers.

### Constant multiplier (`bespoke_mul`)

For a coefficient C, the product x·C is built as the sum of `x << b` over the set bits
b of |C|, negated if C < 0. Synthesis is free to improve on this (e.g. into a
canonical-signed-digit form), but the point stands: the cost of a multiplier depends on
the *value* of its coefficient, so two models of equal size can differ widely in area,
and fewer features do not always mean a smaller circuit. C = 0 produces no hardware.

### Weighted sum with pruning (`weighted_sum`, `adder_tree`)

`weighted_sum` computes `BIAS + Σ x[i]·W[i]`. At elaboration it counts the nonzero
weights, instantiates a `bespoke_mul` only for those, and hands exactly those products
(plus the bias, if nonzero) to a balanced `adder_tree`. Unstructured pruning therefore
removes both the multiplier and one adder-tree operand per zeroed weight. Example (the
module's default): five inputs with W[1] = W[4] = 0 become `x0·W0 + x2·W2 + x3·W3 + BIAS`,
three multipliers and a four-operand tree.

`adder_tree` adds neighbouring pairs level by level; an odd operand out is carried up
unchanged. The output is `W_IN + clog2(N)` bits wide.

## The three classifier cores

All three are purely combinational and have the features as their only input.

### Decision tree (`dt_classifier`)

This is the least obvious of the three, because a tree is normally walked node by node
and here nothing is sequential.

*Encoding.* The tree is a complete binary tree of depth `DEPTH` (default 4) in heap
order. Internal node n (0 … 2^DEPTH−2) compares feature `FEAT_IDX[n]` with
`THRESH[n]`; the left child 2n+1 is taken when `feature <= threshold`, the right child
2n+2 otherwise. The 2^DEPTH leaves carry a class each in `LEAF_CLASS`.

*Evaluation.* All 2^DEPTH−1 comparators work at once (`go_left`). Leaf l is reached when
each of the DEPTH comparators on its path points the right way: reading l's bits from
the most significant one, bit k is the turn at level k (0 = left), and the node met at
level k is `2^k − 1 + (l >> (DEPTH−k))`. Each leaf is thus an AND of DEPTH comparator
outputs (or their inverses); exactly one leaf is hit (`leaf_hit`, one-hot), and the
prediction is the OR of the class bits of the hit leaf.

*Trees that are not complete.* A trained tree is usually shallower in places. Map it by
giving every leaf below a cut-off node that node's class; comparators that can no longer
change the result are then removed by synthesis. A tree deeper than `DEPTH` needs a
larger `DEPTH`.

### Linear SVM (`svm_classifier`)

One `weighted_sum` per class (its own weights and bias, as in one-vs-rest), then
`argmax`. For the binary task this is two sums; a single decision function would do,
but the per-class form is kept so that more than two classes work unchanged. Ties go to
the lower class index (rest).

### MLP (`mlp_classifier`)

One hidden layer of `N_HIDDEN` (default 16) neurons and one output neuron per class,
each a `weighted_sum`. Between the layers, each hidden sum s is

* set to 0 if s ≤ 0 (ReLU),
* otherwise shifted right by `COEF_FRAC` bits, which brings it back to the features'
  scale, and saturated to `FEAT_W` unsigned bits, i.e. clipped to [0,1).

The output sums go to `argmax` without activation. The hidden activations are also
output (`hidden`) for inspection. Note the size of MLPs in this technology: even
pruned, they are three orders of magnitude larger than the tree.

## The top (`stress_classifier`)

Parameters `DATASET` and `MODEL` select one configuration of the table; the feature
count and width follow from them, and exactly one core is generated. `EVAL_CYCLES`
defaults to the configuration's latency in clock periods and can be overridden, e.g.
for a faster clock or a different cell library.

The core sits between two registers:

```
            in_valid & in_ready
clk edge:        |            EVAL_CYCLES edges later
                 v                    v
features ──> [feat_q] ──> core (combinational) ──> [stress_class], out_valid = 1 for one cycle
```

* A sample is taken on a rising edge with `in_valid && in_ready`. `in_ready` is high only
  when idle; while a sample is being evaluated, offered samples are refused (the
  feature register must not change while the combinational result settles).
* `out_valid` pulses for one cycle exactly `EVAL_CYCLES` edges after the accepting edge;
  `stress_class` holds the prediction until the next one. `in_ready` is high again in
  the cycle in which `out_valid` is high, so the next sample can be taken on the
  following edge.
* `rst_n` is asynchronous and active low and abandons an evaluation in progress.
* An assertion checks that `out_valid` only follows an evaluation.

With the default tree and 2 kHz, one sample is classified per two clock periods (1 ms).

## Coefficients

The defaults of every coefficient parameter come from `stress_pkg`:
`placeholder_coef(seed, layer, row, col, w, sparsity)` hashes its arguments to a 32-bit
value h (multiply/xor-shift rounds modulo 2^32); the coefficient is 0 when
`h mod 100 < sparsity`, otherwise `((h >> 8) mod 2^w) − 2^(w−1)`. Biases, thresholds,
feature indices and leaf classes are drawn the same way (`placeholder_uint`), leaf 0 of
a tree is class 0 and its last leaf class 1. `coef_vec`, `bias_vec`, `dt_*_vec` pack
them into the parameter arrays (element k at bits `[k*w +: w]`, row-major, e.g. MLP
`W1[h][i]` is row h, column i). Each configuration uses its own seed
(`model_seed`). In the placeholder MLPs, the configured sparsity is applied to the
hidden layer only (about 83% of all weights are zero in the WESAD MLP); pruned at 90%, the
2×16 output layer would be left with about three weights and predict one class only.

To build a trained model instead, override the arrays of the core:

* MLP/SVM: `W[c][i] = round(w · 2^COEF_FRAC)` in `COEF_W` bits, and
  `BIAS[c] = round(b · 2^(FEAT_W+COEF_FRAC))`; a weight that pruning set to zero stays 0.
* DT: `THRESH[n]` = the largest quantized feature value that satisfies the trained split
  `x <= t`; `FEAT_IDX[n]` the position of the feature in the input vector; leaves as
  described above.
* The feature vector order is that of the selected features.

The top passes only `SEED` to its core, so a trained model is easiest to use by
instantiating the core directly or by adding its arrays to the top's parameter list.

## What is fixed by the reference design and what is not

Taken from the reference design: bespoke, fully parallel, combinational classifiers with
hardwired coefficients; one constant multiplier per unpruned weight and an adder tree
over their products; pruned weights removing multipliers and adder operands; ReLU in the
MLP; linear kernels and a weighted sum per class in the SVM; parallel comparators
against hardwired thresholds in the tree; binary rest/stress output; the feature counts,
precisions, sparsities and latencies of the table; the 2 kHz clock.

Choices of this implementation, where the reference is silent: the internal form of the
constant multiplier and the adder tree; the number formats above; the MLP's single
hidden layer of 16 neurons and its requantization; the output layer without activation;
argmax with ties to class 0; the tree depth of 4, the heap encoding and the `<=`
direction; the feature and result registers, the valid/ready handshake, the multicycle
wait and the asynchronous reset; all coefficient values. The sensors, converters, feature
extractor, actuator and power source are not modelled, and the R-NMOS cell library the
reference maps to is a technology matter outside the RTL. Area, power and accuracy
figures quoted above belong to the trained reference models and are not reproduced by
the placeholder coefficients.

## Verification

Every module has a self-checking testbench in `tb/` that compares against values
computed independently, prints `TB_RESULT checks=<n> failures=<m>` and stops itself with
a watchdog.

| testbench | what it checks |
|---|---|
| `tb_bespoke_mul` | five coefficients (incl. 0 and −128) against all 256 inputs |
| `tb_adder_tree` | trees of 1, 2, 5, 25 operands, random and extreme operands |
| `tb_argmax` | 2 and 5 scores, frequent ties |
| `tb_weighted_sum` | the pruned 5-input example, a 25-input 60%-pruned sum, a fully pruned one |
| `tb_svm_classifier`, `tb_mlp_classifier`, `tb_dt_classifier` | default cores against the reference: scores, hidden activations, reached leaf, class; both classes, ReLU clamping and saturation must occur |
| `tb_stress_classifier` | all six configurations end to end, concurrently: prediction, latency = `EVAL_CYCLES`, refusal of samples while busy, reset during evaluation; fails if any of these mechanisms never occurs |
| `tb_stress_full` | the top with no parameter overrides (WESAD tree), 2000 samples |
| `tb_dse_sweep` | all three cores at six size points covering 5–30 features, 4/6/8/10-bit precision and 20/50/90% MLP pruning |

`tb/stress_ref_pkg.sv` is the reference: plain loops over all weights and a sequential
root-to-leaf tree walk, rebuilding the coefficients from the same placeholder generator.
`tb/stress_tb_runner.sv` drives one configuration of the top, `tb/dse_point.sv` one core
at one size point.

Run any testbench with Verilator 5 from the repository root, e.g.

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/stress_pkg.sv tb/stress_ref_pkg.sv tb/tb_stress_classifier.sv \
    --top-module tb_stress_classifier -o sim
./obj_dir/sim
```

All testbenches finish in well under a second of simulation time. The design also
elaborates in Yosys with the slang front end; no latches, loops or multiply-driven nets
are reported.

## Files

| file | content |
|---|---|
| `rtl/stress_pkg.sv` | enums, configuration table, placeholder coefficient generator |
| `rtl/bespoke_mul.sv` | constant multiplier |
| `rtl/adder_tree.sv` | balanced adder tree |
| `rtl/weighted_sum.sv` | pruned bespoke weighted sum plus bias |
| `rtl/argmax.sv` | class selection |
| `rtl/dt_classifier.sv`, `rtl/svm_classifier.sv`, `rtl/mlp_classifier.sv` | the three cores |
| `rtl/stress_classifier.sv` | top: configuration select, registers, handshake |
| `tb/*.sv` | reference package, runner and testbenches |
