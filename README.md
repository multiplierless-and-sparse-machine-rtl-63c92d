# Margin-propagation classifiers without multipliers

A margin-propagation (MP) network computes a neuron from additions, comparisons and shifts only. It has no multiplier. Every value is held in a log-likelihood domain, so the products of an ordinary neuron become sums. The log-sum-exp that would follow is replaced by a piecewise-linear stand-in, the MP function:

    z = MP(L, gamma)   such that   sum_i max(L_i - z, 0) = gamma

Read the scores L_i as water levels. Lower a threshold z until the total "excess" above it equals the budget gamma; that z is the result. This is a reverse water-filling. Only scores above z contribute, so the gradient of z with respect to each L_i is either 0 or 1/A. Here A is the number of scores above z. This makes learning cheap: every gradient in the network is a product of Boolean indicators and reciprocals of small counts, and both become shifts.

This RTL implements three classifiers built from that one primitive:

- an MP perceptron with on-chip learning;
- a three-layer MP multilayer perceptron (MLP) with on-chip learning;
- the decision stage of an MP support-vector machine (SVM).

All three sit behind one configuration port and one operation port in `mp_top`.

## Number format

Every stored value is a signed `DW`-bit fixed-point word: `DW = 9`, with `FRAC = 4` fraction bits. 1.0 is therefore 16 LSB, and the range is −16 … +15.94. The 9-bit width is the one at which the MP MLP was reported to match a wider conventional network on XOR data. The split into integer and fraction bits is this design's choice. All constants are in `rtl/mp_pkg.sv`.

Inputs come as differential pairs (x+, x−). Weights and biases are pairs (w+, w−) and (b+, b−). The value of a signal is the difference between the two halves. Encoding raw features into such pairs happens outside the design.

## The MP solver (`mp_unit`)

`z` is found by a bit-serial binary search over the fixed-point grid of `z`. The search runs from the most significant bit down, one bit per cycle. At each bit, the tentative `z` gets that bit set. The unit then forms `sum_i max(L_i − z, 0)` with one adder tree. The bit is kept if the sum is still at least gamma. The sum never grows as z rises, so after `IW+1` cycles the register holds the largest grid value whose excess is still ≥ gamma. That value is the exact solution rounded down to one LSB.

The search runs in offset binary, so that signed `z` compares correctly. Alongside `z`, the unit reports:

- `act[i] = (L_i > z)`;
- `cnt`, the number of set `act` bits. This is the count A used by learning.

Interface: pulse `start` with the scores and gamma. `done` pulses `IW+1` cycles later with `z`, `act` and `cnt` valid. gamma must be at least 1 LSB.

Other algorithms exist. A sort followed by a linear walk is one. The bisection was chosen because it needs no sorter and no divider. Its cost is one adder tree plus `log2(range)` cycles.

## The differential neuron (`mp_neuron`)

One neuron uses three MP nodes:

    z+ = MP({w_i+ + a_i+, w_i- + a_i-, b+}, gamma)
    z- = MP({w_i+ + a_i-, w_i- + a_i+, b-}, gamma)
    z  = MP({z+, z-}, 1.0)
    p+ = max(z+ - z, 0),   p- = max(z- - z, 0)

The third node normalises the pair so that p+ + p− = 1 whenever both halves are active. The output (p+, p−) is itself a differential pair, so neurons chain directly. The class is `p+ > p−`.

The z+ and z− nodes run side by side. The z node starts on their registered `done`. `done` comes 2·DW+6 = 24 cycles after `start`. The neuron also exports what learning needs:

- the activity flags of all three nodes;
- the counts of the first two nodes;
- `act_k`, the pair of flags `{z− > z, z+ > z}`.

## Learning from indicators (`mp_perceptron`, `mp_mlp_learn`)

Training minimises the L1 cost `|p+ − y+| + |p− − y−|`. The target is (1, 0) for class + and (0, 1) for class −. Expanded with the chain rule through the three MP nodes, each parameter's gradient is a sum of terms of the form

    sign(p - y) · (1 - 1/A_k) · 1(score above z±) / A±

where A_k ∈ {1, 2} is the count in the normalising node. The hardware evaluates each term as follows:

- **(1 − 1/A_k)** is 0 when A_k = 1 and 1/2 when A_k = 2. It becomes a gate plus a one-bit shift.
- **1/A±** is approximated by a right shift of `ceil(log2(A±))`, which rounds the gain down to a power of two.
- **Learning rate** ε = 2^−eps_shift, one more shift.

The step is therefore `(1 << (FRAC+GUARD)) >> (eps_shift + 1 + ceil_log2(A))`, added to or subtracted from the parameter with saturation. Parameters carry `GUARD = 6` extra fraction bits (MLP: `MGUARD = 10`), so that small steps accumulate. The network sees the upper `DW` bits of each parameter, rounded down.

Updates are applied after every sample (online learning). The published rule sums the gradient over the training set. A batch version would need one accumulator per parameter; this design does not do that.

**The dead zone.** When p+ or p− is 0, only one of z+ and z− is above z. Then A_k = 1 and the factor (1 − 1/A_k) is zero, so a sample whose output is saturated teaches nothing. This follows directly from the equations and is kept as is. Training therefore starts from parameters that leave both outputs non-zero. The reset values (all parameters 0, gamma 1.0) give p+ = p− = 0.5.

In the MLP, the output-layer terms are as above. For the hidden layer, `mp_mlp_learn` first forms an error at each hidden output p_j± from:

- the output node's sign;
- its (1 − 1/A_k) gate;
- its activity flags.

It then spreads that error through hidden neuron j with the hidden gate and counts. A product of two 1/A gains becomes a sum of two shifts. After expansion, every hidden update is a sum of four shifted terms, exactly the terms of the published gradient.

Timing:

| Operation | Latency after `start` |
|---|---|
| Perceptron inference | 2·DW+7 = 25 cycles |
| Perceptron training | 2·DW+7 = 25 cycles; the update is applied in the same cycle as `done` |
| MLP inference | 4·DW+13 = 49 cycles in `mp_mlp`; 4·DW+14 = 50 through `mp_mlp_learn` and the top |
| MLP training | 4·DW+14 = 50 cycles |

## The MLP (`mp_mlp`)

The MLP has I inputs, J hidden neurons and one output neuron:

- I = 2 and J = 30 by default, the configuration used for XOR data.
- All J hidden neurons run in parallel.
- The output neuron takes the 2J hidden outputs as its inputs.

There is one gamma per layer (`gamma_j`, `gamma_k`).

## The SVM decision stage (`mp_svm`)

    L_f+ - L_f- = MP({w_s+ + K_s+, w_s- + K_s-}, gamma) - MP({w_s+ + K_s-, w_s- + K_s+}, gamma)

The stage covers S = 100 support vectors. The two MP nodes run in parallel, and `done` comes DW+2 cycles after `start`. The kernel values (K_s+, K_s−) are inputs to the design. The MP form of the Cauchy kernel is only sketched in the published description. SVM training is described only as "similar to the perceptron". Neither is built here.

## Top level and register map (`mp_top`)

Write a parameter by pulsing `cfg_we` with `cfg_sel`, `cfg_idx` and `cfg_data`:

| cfg_sel | Region | cfg_idx |
|---|---|---|
| 0 / 1 | MLP hidden weight w_ij+ / w_ij− | {j[7:0], i[7:0]} |
| 2 / 3 | MLP hidden bias b_j+ / b_j− | j |
| 4 / 5 | MLP output weight w_jk+ / w_jk− | j |
| 6 | MLP output bias | 0 = b_k+, 1 = b_k− |
| 7 / 8 | SVM weight w_s+ / w_s− | s |
| 9 | control | 0 gamma (perceptron), 1 gamma_j, 2 gamma_k, 3 gamma (SVM), 4 eps_shift |
| 10 / 11 | perceptron weight w_i+ / w_i− | i |
| 12 | perceptron bias | 0 = b+, 1 = b− |

Start an operation by pulsing `start` with `op` while `busy` is low. The codes are:

- 0 perceptron inference
- 1 perceptron training (`y_pos` is the label)
- 2 MLP inference
- 3 MLP training
- 4 SVM decision

`done` pulses with `cls`, with `out_p`/`out_n` (the p± of the perceptron or MLP) and with `svm_f`. `upd` marks a training step that moved a parameter. Starts and writes that arrive while `busy` is high are ignored.

Reset sets:

- every weight and bias to 0;
- every gamma to 1.0;
- `eps_shift` to 2.

## Where this departs from the published method

- **Online updates.** Parameters are updated per sample, not per batch.
- **Reciprocals of counts.** They are rounded down to powers of two. The learning rate is a power of two.
- **Gamma.** It is a loaded register. Annealing gamma during training is left to whoever drives the configuration port, because no rule for the direction of its step is given.
- **Input encoding.** The mapping from raw features to (x+, x−) is not part of the design.
- **SVM.** Kernel evaluation and SVM training are not built. `k_p`/`k_n` are ports.
- **Hidden-layer size.** J defaults to 30, the size used in the reported experiments. The block diagram draws two hidden neurons for clarity.

Larger UCI-style problems need `I` raised to the feature count, for example 13 inputs with 25 hidden neurons. That is a parameter change only.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block against independent reference models in `tb/mp_ref_pkg.sv`, checks the latency, and prints `TB_RESULT checks=… failures=…`:

- `tb_mp_unit` checks against a linear-scan solver.
- `tb_mp_neuron` checks the three-node neuron.
- `tb_mp_perceptron` and `tb_mp_mlp_learn` check every parameter update against a reference built directly from the gradient equations.
- `tb_mp_top` runs the whole design at its default sizes. It loads random parameters, runs every operation, trains the perceptron and the MLP on one sample until their errors shrink, and counts each mechanism. Those mechanisms are the five operations, parameter updates, and starts and writes blocked while busy.

`tb_mp_perc_workload` trains the perceptron from reset on 100 random points of a linearly separable 2-D problem. It uses an online learning rate of 2^-2, and test accuracy on 100 fresh points rises from about 50 % to 95 % within 10 epochs.

The same style of run was tried for the MLP on XOR data. Test accuracy stayed near 50 % for learning rates 2^-1 to 2^-4 and several random initialisations. The per-sample update of each parameter is verified exactly against the gradient equations, but convergence of the MLP rule on XOR with this fixed-point format is not demonstrated here. Possible causes are the online updates, the power-of-two rounding of the gains, and the fixed gamma.

To simulate with verilator, for example the top-level test:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/mp_pkg.sv rtl/mp_unit.sv rtl/mp_neuron.sv rtl/mp_perceptron.sv \
      rtl/mp_mlp.sv rtl/mp_mlp_learn.sv rtl/mp_svm.sv rtl/mp_top.sv \
      tb/mp_ref_pkg.sv tb/tb_mp_top.sv --top-module tb_mp_top
    ./obj_dir/Vtb_mp_top

Lint reports only style warnings: unused signals, truncated index widths, and the asynchronous reset used inside assertions.
