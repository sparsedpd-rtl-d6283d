# SparseDPD — a sparse phase-normalised time-delay neural network predistorter in SystemVerilog

A power amplifier driven close to saturation is efficient but nonlinear, and
it has memory: its output depends on the last few input samples as well as on
the current one. Digital predistortion (DPD) puts an approximate inverse of the
amplifier in front of it, so that the cascade is linear. This RTL implements a
neural-network predistorter of the *phase-normalised time-delay* kind (PNTDNN):
a small network sees the signal only after the phase of the current sample has
been removed, and the phase is put back on its output. The network is pruned
without structure, so most weights are zero and cost nothing. The datapath
processes one complex baseband sample per clock with fixed-point arithmetic,
sized for a small FPGA (the published implementation runs at 170 MHz on a
Zynq-7010 with 66 DSP slices).

The design follows the SparseDPD accelerator by Versluis, Wu and Gao
("SparseDPD: A Sparse Neural Network-based Digital Predistortion FPGA
Accelerator for RF Power Amplifier Linearization"). The dataflow, number formats,
network size and the way each arithmetic block works come from that
publication. Widths of internal words, pipelining, rounding, the table size and
the weights are this implementation's own; the sections below say which is which.

## The network

For the input sample x(t) = I + jQ (Q1.13 each):

| quantity | definition |
|---|---|
| A(t) | sqrt(I² + Q²) |
| P | (I − jQ) / A — unit phasor that removes the phase of x(t) |
| K | x(t−1), …, x(t−n) — the delayed samples (n = 2) |
| x_FC | [Re(K·P), Im(K·P), A(t..t−n), A³(t..t−n)] — 10 features |
| y_FC | W_FC · x_FC + b_FC, clamped to [−1, 1) — 12 hidden neurons |
| x_OUT | [x_FC, ReLU(y_FC)] — 22 values |
| [I_OUT, Q_OUT] | W_OUT · x_OUT + b_OUT, clamped to [−1, 1) |
| y(t) | (I_OUT + jQ_OUT) · P* — the predistorted sample, Q2.27 |

The current sample is not rotated: K·P for it would just be A + 0j, which the
amplitude features already carry. Because the network works on
phase-normalised features and the output is rotated back by P*, a rotation of
the whole input signal rotates the output by the same angle, which is the
behaviour expected of an amplifier model.

## Datapath and timing

```
 i_i,q_i ─► fex_layer ─► time_delay ─► phase_norm ─► sparse_fc (hidden) ─► relu ─┐
            (10 clk)      (taps)        (1 clk)  │     (2 clk)                    │
               │                                 └─ x_FC ─ delay 2 clk ───────────┤ concat
               │                                                                  ▼
               │                                                    sparse_fc (output, 2 clk)
               │                                                                  │
               └─ P = (I/A, Q/A) ─ delay 5 clk ─────────────────► phase_denorm (1 clk) ─► y_i, y_q
```

The top, `sparsedpd_top`, accepts a sample on every clock for which `valid_i`
is high and produces its result `DPD_LAT` = 16 clocks later with `valid_o`.
There is no back-pressure: the pipeline never stalls. Idle cycles are allowed;
they do not enter the memory taps, so "t−1" always means the previous *valid*
sample. Signals that are needed later (the phasor P, the feature vector x_FC
for the concatenation) travel in delay lines beside the arithmetic, so every
sample meets its own phasor at the output. An assertion in the top states
the stream rule (a valid sample in gives a valid sample out `DPD_LAT` clocks
later).

| stage | module | clocks |
|---|---|---|
| feature extraction | `fex_layer` (with `inv_sqrt`, `inv_sqrt_lut`) | 10 |
| memory taps | `time_delay` | 0 (taps are registers, the current tap is the input) |
| phase normalisation | `phase_norm` | 1 |
| hidden layer | `sparse_fc` (+ `csa_tree`), then `relu` | 2 |
| output layer | `sparse_fc` (+ `csa_tree`) | 2 |
| phase denormalisation | `phase_denorm` | 1 |

## Number formats

| signal | format | note |
|---|---|---|
| input I/Q, activations, weights, biases | Q1.13, 14 bit | as published |
| adder-tree words | Q2.13, 15 bit | as published; the extra integer bit shows an overflow of [−1, 1) |
| layer outputs | Q1.13, clamped to [−1, 1) | as published |
| output I/Q | Q2.27, 29 bit | as published; kept wide because rounding to 14 bits loses linearity |
| phasor I/A, Q/A | Q1.14, 15 bit | this design's choice: Q1.13 × Q1.14 products are exactly Q2.27 |
| A, A³ | Q1.13, clamped | this design's choice: A reaches √2 for a full-scale corner sample |
| z = I² + Q² | 28-bit unsigned integer | |

All narrowing of arithmetic results rounds half up, except the weight
products inside the layers, which are truncated (floor) to Q2.13.

## Feature extraction: the inverse square root

Everything in the feature layer derives from one quantity, 1/√z with
z = I² + Q². Given it, I/A and Q/A are products with I and Q, A = z·(1/√z),
and A³ = A·z. So the layer needs one inverse square root per sample, at full
rate, on a 28-bit argument. It is built in three steps.

**Window shift.** The bit length y of z is found (ceil(log2(z+1))) and z is
shifted right by 2a bits, a = max(0, ceil((y − m)/2)), so that what is left fits
an m-bit window (m = 14 here; the largest shift is a = 7). Shifting by an
even number of bits means √z scales by exactly 2^a, and the bits thrown away
can only change the root in its last place — raising 1/√z by at most 2^−13
relative. Unlike plain truncation of z, small inputs keep their full
precision, since for them a = 0.

**Table plus two Newton–Raphson steps.** On the windowed value k the
iteration x ← 0.5·x·(3 − k·x²) converges to 1/√k. The table (`inv_sqrt_lut`)
does not store the start value x0 but the two terms of the first step,
1.5·x0 and 0.5·x0³, so the first step costs a single multiplication:
x1 = 1.5·x0 − (0.5·x0³)·k. The second step is computed in full:
u = k·x1, d = 3 − u·x1, x2 = (x1·d) / 2. The result has 24 fraction bits.

**Undoing the shift.** 1/√z = (1/√k)·2^−a. In the hardware this is written
as a left shift by (7 − a) into a word with 7 more fraction bits, which
is the same number and keeps the operation a left shift.

Corner cases: z = 0 (a zero sample) makes the table return its largest value;
the phasor, A and A³ then come out as 0 because they are all products with
I, Q or z. Full-scale samples with |x| > 1 clamp A and A³ to the largest Q1.13
value.

The table is computed during elaboration from exact integer square roots
(`isqrt128` in `inv_sqrt_lut.sv`): entry k holds round(1.5·2^24/√k) and
round(0.5·2^38/k^1.5), k = 1 … 2^14−1, entry 0 holds all ones and zero.
With every one of the 2^14 window values having its own entry, the start
value is already accurate and the iterations mainly cost pipeline depth; a
smaller table (indexed by the upper bits of k) is the natural way to trade
memory for the accuracy the iterations restore. The published design uses 13
block RAMs for this table; its exact size is not published.

## Sparse layers

`sparse_fc` is one fully connected layer whose weights are build-time
parameters. A multiplier is generated only for a non-zero weight. For each
neuron the products (Q2.26) are truncated to Q2.13, and together with the bias
they enter a carry-save adder tree (`csa_tree`, 3:2 compressors level by
level), whose two output words are added once. The sum lives in Q2.13; if it
is outside [−1, 1) the neuron output is clamped and `clamp_o` raised. Sums
outside [−2, 2) cannot be represented and wrap, so a set of weights must keep
|b| + Σ|w| < 2 for every neuron (the defaults do); `sparse_fc` issues an
elaboration-time warning for a weight set that does not.

Products are registered (stage 1); tree, addition and clamp form stage 2.
Pruning changes only the hardware that is generated: a neuron with three
non-zero weights gets three multipliers and a four-input tree.

### Weights

The trained weights of the published model are not published. The package
`sparsedpd_pkg` therefore holds an **illustrative** set with the same
sparsity budget as the published model — 64 non-zero parameters: 28 of the
120 hidden weights, 22 of the 44 output weights, and all 14 biases. The values
are arbitrary; they exercise every path (ReLU cuts, clamping) and respect the
wrap-free condition above, but they do not linearise any amplifier. To use
trained weights, quantise them to Q1.13 integers (value × 8192) and pass them
as `W_FC`, `B_FC`, `W_OUT`, `B_OUT` to `sparsedpd_top`.

Index order of x_FC (n = 2): 0–1 Re(K·P) for t−1, t−2; 2–3 Im(K·P); 4–6
A(t), A(t−1), A(t−2); 7–9 A³(t), A³(t−1), A³(t−2). x_OUT adds the 12 ReLU
outputs at indices 10–21.

## Files

| file | contents |
|---|---|
| `rtl/sparsedpd_pkg.sv` | formats, sizes, latencies, default weights, `sat_act` |
| `rtl/sparsedpd_top.sv` | the complete predistorter |
| `rtl/fex_layer.sv` | feature extraction |
| `rtl/inv_sqrt.sv`, `rtl/inv_sqrt_lut.sv` | inverse square root and its start-term table |
| `rtl/time_delay.sv` | memory taps |
| `rtl/phase_norm.sv`, `rtl/phase_denorm.sv` | rotation by P and by P* |
| `rtl/sparse_fc.sv`, `rtl/csa_tree.sv`, `rtl/relu.sv` | network layers |
| `rtl/pipe_delay.sv` | register delay line for side signals |
| `tb/tb_*.sv` | one self-checking testbench per module, plus end-to-end tests |
| `tb/dpd_ref_pkg.sv` | reference model of the network used by the end-to-end tests |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself
(a watchdog ends a hung run). With Verilator 5, from the directory holding
`rtl/` and `tb/`:

```
verilator --binary --timing -y rtl -y tb +libext+.sv rtl/sparsedpd_pkg.sv \
          tb/tb_sparsedpd_top.sv --top-module tb_sparsedpd_top
./obj_dir/Vtb_sparsedpd_top
```

Replace the testbench name for the others. The package `sparsedpd_pkg` is
named first; every other module, and the testbench package `dpd_ref_pkg`, is
found by file name through `-y`. All testbenches finish in seconds; the
64-QAM run (172 035 samples) takes about five.

| testbench | what it shows |
|---|---|
| `tb_inv_sqrt_lut` | table entries against floating-point 1.5/√k and 0.5/k^1.5 (±1 LSB) |
| `tb_inv_sqrt` | streamed inverse roots against 2^24/√k (±2 LSB), 5-clock latency |
| `tb_fex_layer` | I/A, Q/A, A, A³ against floating point (±3 LSB), 10-clock latency, corner samples |
| `tb_time_delay` | tap contents with idle cycles and reset |
| `tb_phase_norm`, `tb_phase_denorm` | complex products, exact |
| `tb_csa_tree` | sum + carry equals the modular sum, tree sizes 1–23 |
| `tb_fc_layer`, `tb_output_fc_layer` | both default layers against a floating-point reference, clamps, 2-clock latency |
| `tb_relu` | ReLU |
| `tb_sparsedpd_top` | 20 000 random samples end to end, default sizes and weights, against the reference model in `tb/dpd_ref_pkg.sv`; counts zero samples, shifted and unshifted windows, idle gaps, ReLU cuts and clamps, and fails if one never occurs |
| `tb_qam64_workload` | a synthesised 64-QAM signal (random symbols, raised-cosine shaping, 8 samples per symbol) of 172 035 samples, back to back: every output checked, and the output stream must be gap-free at one sample per clock |

The end-to-end reference computes the features from a floating-point square
root, so the hardware's windowed inverse root differs from it by a few LSB;
outputs agree to within 2^−10 (the worst case seen is about 2^−11).

## Where this RTL departs from, or adds to, the publication

* **Weights.** Illustrative, not trained (see *Weights*). Results such as the
  published ACPR, EVM and NMSE depend on trained weights and an amplifier and
  cannot be reproduced with these.
* **Parameter count.** The publication quotes 64 parameters at 74 % sparsity.
  For this network (164 weights, 14 biases) those two numbers do not fit the
  same count exactly (six rounds of 20 % pruning leave 26 %, about 43
  weights). The default set keeps 64 non-zero parameters in total.
* **Inverse-square-root table.** Indexed by the full 14-bit window
  (2^14 entries of 25 + 38 bits, about 1 Mbit). The published implementation fits its table
  in 13 block RAMs, so it is smaller and less exact; how it is indexed is not
  published. The window size m = 14 is chosen because the window is described
  as halving the 28-bit argument.
* **Restoring the shift.** The description says the inverse root of the
  shifted argument is shifted left by a. For 1/√z the factor to restore is
  2^−a; the RTL does a left shift by (7 − a) into a word with 7 more fraction
  bits, which is the same value.
* **Second Newton–Raphson step.** The block diagram subtracts 3 from z·x1²;
  the iteration formula subtracts z·x1² from 3. The RTL follows the formula.
* **Phasor precision.** I/A and Q/A are Q1.14 rather than Q1.13 so that the
  Q2.27 output carries 27 real fraction bits.
* **Multiplier counts.** The feature layer uses 10 multipliers and the phase
  denormalisation 4, as in the published resource table. Phase normalisation
  uses 4 per delayed sample (8), where the published build reports 2 DSP
  slices; how it saved them is not published. The layers use one multiplier
  per non-zero weight (28 and 22 with the default weights, against 26 and 21
  DSP slices published).
* **Pipelining, latency, reset, valid handling.** Not published; chosen here
  (16 clocks in total, asynchronous reset of control bits and taps, a valid
  bit beside the data, idle cycles skipped by the memory taps).
* **Clamp flags** (`clamp_fc_o`, `clamp_out_o`) are status outputs added for
  observation.
* **Not built:** the multi-instance variant that shares one feature layer
  between several network copies, mentioned in the publication as possible
  but not implemented there either.
