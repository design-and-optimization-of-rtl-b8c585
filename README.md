# Mixed-kernel, mixed-signal SVM classifier for flexible electronics

Flexible thin-film technologies (here n-type-only IGZO transistors) make
large, slow and power-hungry logic. A support vector machine (SVM) with an
RBF (Gaussian) kernel classifies well, but built in digital logic it costs
squared distances, exponentials and one term per support vector. A linear
SVM is cheap but less accurate.

This design uses both kernels in one multiclass classifier. A K-class
problem is split one-vs-one (OvO) into K(K-1)/2 binary classifiers, one per
pair of classes. Each pair gets one of two kernels, chosen offline:

* **linear, in digital logic**: a hardwired dot product of the 4-bit
  digitised sensor values, plus a bias, then the sign;
* **RBF, in analog circuitry**: subthreshold transistor cells compute the
  Gaussian kernel directly on the sensor voltages. A comparator ends the
  classifier, so it also delivers one bit.

Every binary classifier thus gives one bit, whatever its kernel. A small
encoder turns the bits into the class label. The analog RBF classifiers
need no ADC, at their input or at their output. Pairs that a linear
classifier already separates well stay linear. Only the hard pairs pay for
an analog RBF classifier.

There is no clock, register, memory or controller. All classifiers work in
parallel, and the label follows the inputs combinationally. The intended
rate is 2 Hz, for digital and analog parts alike.

```
 sensor voltages v_in[0..N-1]
      |                                   |
      +--> adc (x N) --> features ---+    +--> rbf_classifier (pair 0 vs 2)
      |                              |                 |
      |                  linear_svm (pair 0 vs 1)      |
      |                  linear_svm (pair 1 vs 2)      |
      |                              |                 |
      |                         pair_bits[0], [2]   pair_bits[1]
      |                              +--------+--------+
      |                                       v
      |                               ovo_encoder (3 -> 2)
      |                                       v
      |                                     label
```

The default configuration, shown above, is the three-class example of the
original design. Pairs 0 vs 1 and 1 vs 2 are linear; pair 0 vs 2 is RBF.
`KERNEL_MAP` chooses the kernel of every pair.

## Conventions that hold everywhere

* **Pair numbering.** Pairs (i, j) with i < j are numbered in enumeration
  order: for three classes, 0 = (0,1), 1 = (0,2), 2 = (1,2). Every per-pair
  bus and parameter uses this order, with pair 0 in the lowest bits.
* **Meaning of a classifier bit.** 1 means the second class j of the pair
  won; 0 means the first class i won. A linear classifier gives 1 when
  w·x + b >= 0. An RBF classifier gives 1 when the positive-rail current is
  at least the negative-rail current. Train each classifier with this
  polarity.
* **Ties.** Three classes can give a cyclic result: 0 beats 1, 1 beats 2,
  2 beats 0. The encoder then outputs the lowest-numbered tied class. The
  original design does not specify a tie rule; this one is a choice of this implementation.

## The analog RBF classifier

This is the part that is hardest to follow. Here it is modelled, not
synthesized: `rbf_kernel_cell`, `alpha_multiplier`, `rbf_sv_branch`,
`current_comparator` and `rbf_classifier` are behavioural models with
`real`-valued ports (volts and amperes). Each one reproduces the DC law of
its circuit.

**Kernel cell.** Two n-type differential pairs in subthreshold are
cascaded. One gate gets the feature voltage V1 = V_x(d); the other gets the
support-vector voltage V2 = V_s(j,d). With x = (V1 - V2)/(n·V_T), the output
current is

    I_out = I_in / ((1 + e^-x)(1 + e^x)) = I_in/4 · sech^2(x/2)

It is a bell with its peak, I_in/4, at V1 = V2. Near the peak it equals
I_in/4 · exp(-γ·ΔV²) with γ = 1/(4 n² V_T²). The model uses the exact sech²
law, so the Gaussian is only approximated, as in silicon. The slope factor
is n = 1.5; the original gives no value. V_T is kT/q at 300 K.

**Product over features.** Per support vector, D cells are chained. The
output current of cell d is the tail current of cell d+1. The currents
multiply, which gives the separable kernel

    I_K = I_TAIL / 4^D · Π_d sech²((V_x(d) - V_s(j,d)) / (2 n V_T))

The current shrinks by at least 4× per stage and cannot be mirrored
accurately with n-type devices only, so the chain is limited to five
features (`D`, `N_IN` = 5). The first cell's tail current comes from a bias
transistor. Its gate voltage V_b is set by a resistor divider: R1 = 10 MΩ
to VDD, R2 = 4.28 MΩ to VSS. At the 1 V analog supply this gives 0.2997 V,
and `rbf_sv_branch` reports it on `vb`. Device data to turn V_b into a
current are not available, so the tail current is the parameter `I_TAIL`
(10 nA). Its value does not change any decision, because the comparator
sees only ratios of currents.

**Alpha multiplier.** A subthreshold pair with diode loads passes the
fraction α = 1/(1 + exp(ΔV_α/(n V_T))) of the kernel current, with
ΔV_α = V_α+ − V_α−. To program a dual coefficient α in (0, 1), set
ΔV_α = n·V_T·ln(1/α − 1).

**Rails and comparator.** The label y_j of each support vector sets a
switch. The switch steers the branch current α_j·K_j onto the positive
rail (`y[j]` = 1) or the negative rail (`y[j]` = 0). Each rail sums its
currents passively. The comparator gives 1 when I_pos ≥ I_neg, that is,
when Σ y_j α_j K_j ≥ 0.

What the models leave out:

* settling time, mismatch and noise;
* the readout ratio of the mirror transistor;
* the SVM bias b. The analog circuit has no path for it, so an RBF
  classifier decides on the sign of Σ y_j α_j K_j alone.

The support-vector voltages V_s, the alpha control voltages and the labels
are ports of `rbf_classifier` and of the top (`rbf_vs`, `rbf_va_p`,
`rbf_va_n`, `rbf_y`). The original design does not say how these reference
voltages are produced on chip.

Kernel width: the hardware γ is fixed by n·V_T. The original design obtains
another width γ* by scaling the voltage differences by s = sqrt(γ*/γ0). No
scaling stage is built here. A user of the model applies already-scaled
voltages.

## The digital linear classifier (`linear_svm`)

The classifier is fully parallel and bespoke:

1. Each 4-bit feature code is multiplied by its own weight. The weights are
   parameters, so synthesis reduces a zero weight to nothing and a
   power-of-two weight to wiring.
2. A balanced adder tree (`adder_tree`) sums the products.
3. The bias is added.
4. The sign bit of the score is inverted to give the output.

Widths:

| Signal  | Width                                   | Source     |
|---------|-----------------------------------------|------------|
| feature | 4 bits, unsigned                        | original   |
| weight  | 8 bits, signed                          | this design|
| bias    | 16 bits, signed, in the products' scale | this design|
| product | 13 bits                                 |            |
| score   | 18 bits                                 |            |

The score cannot overflow. It is also brought out as `score`. The original
quantises weights with a method that is not reproduced here, so the 8- and
16-bit widths are assumptions. Change `W_W` and `B_W` in the instance, or
`WEIGHT_W` and `BIAS_W` in `svm_pkg`, to match a trained model.

## The decision encoder (`ovo_encoder`)

The encoder does not count votes at run time. It is a constant truth table
indexed by the classifier bits. The table is built at elaboration by
counting pairwise wins for every possible pattern. After synthesis only a
small encoder remains: for three classes, 3 bits in and 2 bits out.

| bits {1v2, 0v2, 0v1} | 000 | 001 | 010 | 011 | 100 | 101 | 110 | 111 |
|----------------------|-----|-----|-----|-----|-----|-----|-----|-----|
| label                |  0  |  1  | 0*  |  1  |  0  | 0*  |  2  |  2  |

\* cyclic tie, resolved to the lowest class.

`N_CLASSES` can be changed; the table grows as 2^(K(K−1)/2).

## The ADC (`adc`)

`adc` is a behavioural uniform 4-bit quantiser of a voltage in [0, 1] V.
It uses floor rounding and clamps to 0 and 15 outside the range. The
original gives the resolution and the normalised range but not the
converter circuit. The model converts instantly. In the real system, the
conversion time of the ADC covers the slow settling of the subthreshold
analog path. The top has one ADC per sensor input, shared by all linear
classifiers.

## Configuring the top (`mixed_svm_top`)

| Parameter     | Default                     | Meaning |
|---------------|-----------------------------|---------|
| `N_CLASSES`   | 3                           | classes; pairs = K(K−1)/2 |
| `N_IN`        | 5                           | sensor inputs (the analog chain supports at most 5) |
| `M`           | 4                           | support vectors per RBF pair (placeholder; set from training) |
| `KERNEL_MAP`  | 3'b010                      | bit p = 1: pair p is RBF (`svm_pkg::KERNEL_RBF`) |
| `LIN_WEIGHTS` | example values              | [pair][input] 8-bit signed weights; entries of RBF pairs are ignored |
| `LIN_BIAS`    | example values              | [pair] 16-bit signed biases |

Ports are sensor voltages, the analog settings of the RBF pairs, the ADC
codes, the pair bits and the label. The analog-setting ports of linear pairs
are unused. No trained model is published, so the default weights and
biases only show the format. To map a trained model onto the design:

1. For every pair, choose RBF if the RBF classifier is more accurate than
   the linear one, and linear otherwise. This sets `KERNEL_MAP`.
2. For linear pairs, quantise w and b onto the feature scale (codes
   0..15), fill `LIN_WEIGHTS` and `LIN_BIAS`, and orient them so that a
   positive margin means the pair's second class.
3. For RBF pairs, apply the support vectors as voltages. Set ΔV_α from α as
   described above. Set `y[j]` = 1 for support vectors of the second class.

## Relation to the original design

Follows it:

* OvO split into binary classifiers, with a linear/RBF choice per pair;
* digital linear classifiers behind ADCs, in the datapath described above
  (parallel products, adder tree, bias, sign) with hardwired coefficients;
* analog RBF classifiers on the raw sensor voltages, built from chained
  sech² kernel cells, a logistic alpha multiplier, label-steered rails and
  a comparator;
* the resistor values of the bias divider and the 1 V analog supply;
* a one-bit output per classifier, and an encoder from bits to label;
* 4-bit features, at most five inputs, three classes;
* no clock and no storage.

Choices made here, where the original is silent:

* the sign/bit polarity and the tie rule;
* the weight and bias widths;
* the ADC rounding and range;
* the slope factor n = 1.5 and the tail current of 10 nA;
* M = 4;
* the example coefficients;
* analog reference voltages as ports.

Not built:

* the supply regulator that derives the 1 V analog supply from the 1.5 V
  digital supply, an analog power circuit;
* the transistor-level circuits, present only as behavioural models;
* input scaling for the kernel width;
* any SVM bias in the analog classifiers.

The original text gives two formulas for γ: 1/(4n²V_T²) from matching the
quadratic terms, and "≈ 1/(8n²V_T²)" from γ = 1/(2σ²). The model needs
neither, because it uses the exact sech² law. The testbench checks the
small-signal limit against 1/(4n²V_T²), which is the value the Taylor
expansion gives.

How far to trust it:

* The digital parts (`linear_svm`, `adder_tree`, `ovo_encoder`) are
  synthesizable and checked exhaustively or on thousands of random vectors.
* The analog models match their closed-form laws to 1e-6 relative error.
  They are as good as those laws, which the original validated against
  SPICE with correlations of about 0.997 to 0.999. They are not
  transistor-level simulations.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=F` and stops. Each has a
watchdog. With Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_mixed_svm_top \
    -y rtl -y tb +libext+.sv rtl/svm_pkg.sv tb/tb_mixed_svm_top.sv
./obj_dir/Vtb_mixed_svm_top
```

Replace the module name to run another testbench. Always list
`rtl/svm_pkg.sv` first.

| Testbench | What it checks |
|-----------|----------------|
| `tb_adc` | codes against a search of the 1/16 V step boundaries, clamping |
| `tb_linear_svm` | scores and bits of 5- and 8-input classifiers (zero, power-of-two and extreme weights) against integer dot products |
| `tb_ovo_encoder` | all patterns for 2, 3 (table above) and 4 classes |
| `tb_rbf_kernel_cell` | peak, symmetry, sech² law via tanh, Gaussian limit |
| `tb_alpha_multiplier` | α = 1/2 at ΔV = 0, the limits, and α programmed by the inverse formula |
| `tb_rbf_sv_branch` | D = 3 product chain, branch current, V_b of the divider |
| `tb_current_comparator` | ideal and offset comparator |
| `tb_rbf_classifier` | both rail currents and the decision for 4 support vectors over 2 features |
| `tb_mixed_svm_top` | whole classifier at default parameters. Features, pair bits and label are checked against a reference model. It requires every class, both outcomes of every pair, cyclic ties, ADC clamping at both ends, and RBF decisions near support vectors. |
| `tb_svm_workloads` | three configurations: 4 inputs with 1 RBF pair; 5 inputs with 1 RBF pair; 5 inputs with 2 RBF pairs. Stimuli are random; no data set is included. |

`svm_workload_runner` is a helper of `tb_svm_workloads`. It drives and
checks one configuration.
