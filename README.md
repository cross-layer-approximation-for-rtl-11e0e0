# Bespoke printed ML classifiers with hardware-driven coefficient approximation

Printed electronics are cheap enough to print a circuit for a single trained
model. In such a *bespoke* circuit every weight is a constant wired into the
logic, so a multiply by a weight becomes a handful of shifted additions or
none at all. Printed transistors are still huge, though, and a fully parallel
multilayer perceptron or SVM easily covers tens of square centimetres. The
design described here, after *Cross-Layer Approximation For Printed Machine
Learning Circuits* (Armeniakos et al., DATE 2022), shrinks such circuits by
moving each weight a few steps to a nearby value that is cheaper to build.
It picks the moves so that their errors cancel across each weighted sum.

This repository gives synthesizable SystemVerilog for:

* the bespoke building blocks: a constant multiplier, a weighted sum
  (neuron or pairwise classifier), argmax and 1-vs-1 voting;
* the four model types of the study: MLP classifier (MLP-C), MLP regressor
  (MLP-R), linear SVM classifier (SVM-C) and linear SVM regressor (SVM-R);
* the coefficient approximation itself, evaluated while the design is
  elaborated, so that one parameter switches between the exact and the
  approximated circuit;
* a top level, `pml_cardio_top`, that puts the four circuits of the
  Cardiotocography (fetal-heart) benchmark next to each other on one input.

The second approximation layer of the published method is gate-level pruning
of the synthesized netlist. It is not RTL and is not included (see
[What is not here](#what-is-not-here)).

## Number formats

| quantity | format | origin |
|---|---|---|
| input feature `x` | 4-bit unsigned, features normalised to [0,1) | published design |
| weight `w` | 8-bit two's complement, [-128, 127] | published design |
| product `x*w` | 12-bit signed, exact | follows |
| weighted sum | full precision, `4 + 8 + clog2(N+1) + 2` bits | own choice |
| intercept | integer in the scale of the products, not approximated | own choice |
| hidden activation | ReLU, then drop 4 fraction bits, saturate to 8-bit unsigned | own choice, see below |
| MLP output neuron | full precision, no activation | own choice |

The published design fixes only the input and weight precisions. It also
studies bespoke multipliers with 8-bit inputs, which is what the hidden layer
of an MLP feeds the output layer. This design therefore requantises each
hidden ReLU output to 8 bits (`H_W = 8`), dropping `H_SHIFT = 4` bits and
saturating at 255. Both numbers are parameters of `mlp` and `mlp_c`. A real
model needs them set to match the fixed-point scaling it was quantised with.

## Blocks

```
pml_cardio_top
 ├─ input register (21 x 4 bit)
 ├─ mlp_c  21-3-3 ── mlp ── 3 x weighted_sum (21 in) ─ ReLU/requant
 │                     └── 3 x weighted_sum (3 in, 8-bit inputs)
 │          └─ argmax
 ├─ mlp    21-3-1 ── 3 x weighted_sum (21 in) ─ ReLU/requant ─ 1 x weighted_sum
 ├─ svm_c  3 classes ── 3 x weighted_sum (21 in) ── ovo_vote ── argmax
 ├─ weighted_sum (21 in)   = SVM-R
 └─ output register + out_valid
weighted_sum = N x bespoke_mult + adder, coefficients from pml_pkg::approx_coeffs
```

* **`bespoke_mult`** computes `x * W` for a constant `W`. The RTL is a plain
  constant multiply, and synthesis reduces it to the adders that W's bit
  pattern needs. Zero and powers of two cost nothing.
* **`weighted_sum`** computes `S = b + sum_i x_i * w_i` for one neuron or one
  pairwise SVM classifier. Its parameters are the packed weights `COEF`
  (weight `i` in bits `[8i +: 8]`), the intercept `BIAS`, `APPROX` and the
  approximation window `E`.
* **`mlp`** is one hidden layer of ReLU neurons plus an output layer. With
  `N_OUT = 1` it is the MLP regressor. Hidden weight `(j, i)` sits at packed
  index `j*N_IN + i` of `COEF1`; output weight `(o, j)` at `o*N_HID + j` of
  `COEF2`.
* **`mlp_c`** is `mlp` followed by `argmax` over the output neurons.
* **`svm_c`** has `C(C-1)/2` weighted sums, one per class pair, followed by
  `ovo_vote`. A linear kernel collapses each pairwise classifier to one weight
  vector. Pairs are ordered (0,1), (0,2), ..., (C-2, C-1). A decision above
  zero votes for the first class of the pair, otherwise for the second. The
  most-voted class wins.
* **`argmax`** returns the index of the largest value. Ties go to the lowest
  index, as in numpy.
* **`pml_pkg`** holds the widths, the approximation functions and the
  placeholder-weight generator.

All blocks below the top are combinational. The published circuits were
timed at a 200 ms clock period (250 ms for the largest), so a single cycle
covers the whole datapath.

## The coefficient approximation

This is the part that makes the circuits smaller, and the part with the most
hidden choices.

For every weighted sum separately, and for every weight `w` in it:

1. Look at the windows `[w, w+E]` and `[w-E, w]`, clipped to [-128, 127].
   In each window, take the value whose bespoke multiplier is cheapest. The
   first choice `w-` over-estimates `w` (its error `w - w-` is <= 0). The
   second, `w+`, under-estimates it (error >= 0). If `w` itself is the
   cheapest, it is its own candidate.
2. Choose `w-` or `w+` for every weight so that the total error
   `|sum_i (w_i - w~_i)|` is as small as possible. Because inputs are never
   negative, errors of opposite sign cancel in the sum. Among choices with
   equal error, take the one with the smallest total cost.

The published flow does step 2 by brute force over all `2^N` choices. Here
`pml_pkg::approx_coeffs` gets the same optimum with a dynamic programme over
the running error. It tracks at most `2*N*E + 1` error states per weight,
which is small enough to run inside the compiler. `weighted_sum` calls it in
a `localparam` when `APPROX = 1`. The published setting is `E = 4`, the
default everywhere. The function handles `N <= 32` and `E <= 8`, enough for
all evaluated models (largest fan-in 21), and a weighted sum asserts that
limit at elaboration.

**Cost model.** The published flow measures the cost of every candidate by
synthesizing its multiplier with the printed standard-cell library. That data
is not available. `pml_pkg::bm_cost` instead counts the adders of a
canonical-signed-digit multiplier: the number of non-zero CSD digits of
`|w|` minus one, plus one for a negative `w`. It agrees with the published
observations that zero and powers of two are free, and that neighbouring
values can differ widely in cost. It is only a proxy, so the weights it
selects can differ from what the library-driven flow would select. Unlike
the measured areas, it does not depend on the input width: the same weight is
equally cheap in a 4-bit-input and an 8-bit-input multiplier.

Other own choices: inside a window, cost ties go to the value nearest `w`.
Remaining ties in step 2 go to the first optimum the programme finds.

Example, from the weighted-sum testbench (`E = 4`):

| w | 37 | -77 | 127 | -128 | 64 | 5 | -3 | 100 |
|---|---|---|---|---|---|---|---|---|
| built | 40 | -80 | 127 | -128 | 64 | 8 | 0 | 96 |
| cost | 2→1 | 4→2 | 1→1 | 1→1 | 0→0 | 1→0 | 2→0 | 2→1 |

The errors are -3, +3, 0, 0, 0, -3, -3 and +4, so the total error is -2. The
proxy cost drops from 13 to 6.

## The top level and its timing

`pml_cardio_top` feeds one 21-feature sample to all four Cardio circuits.
The published sizes of these four circuits:

| model | topology | weights |
|---|---|---|
| MLP-C | 21-3-3 | 72 |
| MLP-R | 21-3-1 | 66 |
| SVM-C | 3 classes, 3 pairwise classifiers | 63 |
| SVM-R | 1 weighted sum | 21 |

Putting them in one module is a packaging choice. In the published study
each is a separate printed circuit, and they share nothing but the input.

**Interface and timing.** The handshake and the registers are this design's
own choice.

* When `in_valid` is high at a rising edge of `clk`, the input register
  captures `x`.
* At the next edge the output register captures the four results, and
  `out_valid` goes high.
* The latency is two cycles, and a new sample can enter every cycle.
* The outputs hold their values while no new result arrives.
* `rst_n` is an asynchronous, active-low reset that clears both registers
  and `out_valid`.

| port | width | meaning |
|---|---|---|
| `x` | 21 x 4 | features |
| `mlpc_class`, `svmc_class` | 2 | class 0..2 |
| `mlpr_value` | 20, signed | MLP-R output neuron |
| `svmr_value` | 19, signed | SVM-R sum |

**Weights.** The trained weights of the benchmark models are not published,
so the top uses deterministic pseudo-random placeholders from
`pml_pkg::placeholder_coef(seed, index)`. Each weight set has its own seed,
and the intercepts are 16 times an 8-bit placeholder. The seeds are chosen
so that every class can be predicted. To build a real classifier, replace
the `CF_*` and `BF_*` localparams with the quantised weights and intercepts
of a trained model, in the packing given above. `APPROX = 0` builds the
exact circuit for comparison.

## Benchmarks the blocks cover

Every topology of the published evaluation builds with these blocks. The top
instantiates only the Cardio set. Each other model needs its own instance
with the parameters below:

| benchmark | MLP-C | MLP-R | SVM-C (classes / classifiers) | SVM-R |
|---|---|---|---|---|
| Cardiotocography | 21-3-3 | 21-3-1 | 3 / 3 | 21 inputs |
| Pendigits | 16-5-10 | not evaluated | 10 / 45 | not evaluated |
| RedWine | 11-2-6 | 11-2-1 | 6 / 15 | 11 inputs |
| WhiteWine | 11-4-7 | 11-4-1 | 7 / 21 | 11 inputs |

The class counts of the SVM classifiers follow from the classifier counts,
since 1-vs-1 needs C(C-1)/2 classifiers. The published weight counts for
the multi-class SVMs (160, 66 and 77) are smaller than classifiers times
inputs (720, 165 and 231). The source does not explain the difference, and
this design builds the full classifiers × inputs weights.

## Verification

Each block has a self-checking testbench in `tb/` that compares against a
reference computed in the testbench:

| testbench | what it checks |
|---|---|
| `tb_bespoke_mult` | every input value against 8 corner weights, plus one 8-bit-input multiplier |
| `tb_argmax` | directed cases and 4000 random vectors, many with ties |
| `tb_ovo_vote` | 3 and 4 classes; zero decisions and vote ties included |
| `tb_weighted_sum` | exact sums; the approximated weights (probed with one-hot inputs) are candidates within `E`; their error and cost match a brute-force optimum; the testbench computes CSD weights with its own formula |
| `tb_mlp` | MLP-R datapath, including ReLU clamping and hidden saturation |
| `tb_mlp_c` | MLP-C outputs and class; all classes occur |
| `tb_svm_c` | 4-class SVM-C decisions and class; all classes occur |
| `tb_pml_cardio_top` | the top at its defaults, end to end |
| `tb_workloads` | all 14 published topologies with approximated placeholder weights (helpers `wl_mlp_check`, `wl_svm_check`) |

`tb_pml_cardio_top` runs 4000 cycles with random gaps and a reset in
mid-stream. It checks the two-cycle latency, the output hold and all four
results. It fails unless each of these happens at least once: a weight moved
by the approximation, a ReLU clamp, a hidden saturation, every class of both
classifiers, back-to-back samples, idle cycles and the reset. Its reference
takes the approximated weights from `pml_pkg::approx_coeffs`.
`tb_weighted_sum` checks that function separately against the brute-force
search.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/pml_pkg.sv tb/tb_pml_cardio_top.sv --top-module tb_pml_cardio_top
./obj_dir/Vtb_pml_cardio_top
```

Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/pml_pkg.sv rtl/<module>.sv`.
Every test finishes in under a second of simulation. Building
`tb_workloads` takes about half a minute, because its 14 circuits are
approximated during compilation.

## What is not here

* **Netlist pruning**, the logic-level half of the cross-layer method, is
  not included. It simulates the synthesized, library-mapped netlist on the
  training data. Gates that are almost always 0 or 1 (constant for at least
  a threshold fraction τ_c of the time), and that only reach output bits
  `<= φ_c`, are then tied to that constant. This works on a gate netlist and
  needs the cell library, the trained model and its dataset. It is not a
  property of the RTL.
* **Trained weights, and with them accuracy.** Only the weight counts are
  published, so no accuracy or area figure of the study can be reproduced
  with these circuits.
* **The printed cell library** (electrolyte-gated transistors) and its area
  numbers. The approximation uses the CSD adder-count proxy instead.
