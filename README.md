# ADMM-based SVM training processor — SystemVerilog model

Training a support vector machine on the device that uses it (for example, an
implanted seizure detector whose EEG patterns drift over time) is normally far
too expensive: the usual solver, sequential minimal optimisation, walks through
pairs of coefficients one at a time and has no parallelism to exploit. This
design trains the SVM with the alternating direction method of multipliers
(ADMM) instead. Every ADMM iteration is a handful of matrix–vector products over
all samples at once, which map onto a small multiplier array. Three
rearrangements make the iteration cheap enough for a few-milliwatt chip:

* **Pre-computed inverse through an EVD.** The linear system solved in every
  iteration has a fixed matrix `A`, so `A = Q D Qᵀ` is decomposed once, by the
  same Jacobi eigen-decomposition unit that the kernel (Nyström) stage also
  uses.
* **Common terms folded into one matrix.** `Z = Y X̃ Q D^-1/2` absorbs labels,
  samples and the inverse. One iteration is then just `S = Zᵀ B` followed by
  `θ = μ₁ + u − μ₁ Z S`. `Z` is written over the sample matrix `X̃` in the same
  memory words.
* **Two caches for five vectors.** The N-element vectors `B`, `θ`, `â` and `u`
  (and, in the original schedule, `S`) live only briefly, so two N-word caches
  hold all of them.

The RTL here covers the training engine, the Nyström kernel stage and the
decision stage of such a processor at the published size: 256 training vectors
of rank 16, a 4 × 8 PE array and a 17 × 17 EVD. It is a functional, cycle-accurate model in
synthesizable SystemVerilog. It is not a copy of any particular chip.

## The algorithm the hardware runs

The sample matrix `X` is N × r (rows are samples), `y ∈ {±1}` are the labels,
`Y = diag(y)`, `X̃ = [X 1]`, λ = 10, μ₁ = 1. The ADMM problem is the linear SVM
`min Σ (1 − yᵢ(xᵢᵀβ + β₀))₊ + λ/2 ‖β‖²`.

| step | operation | where |
|---|---|---|
| 1 | `A = λI' + μ₁ X̃ᵀX̃` (λ on the first r diagonal entries only; `A[r][r] = μ₁N`) | PE array as 17 MAC lanes, one sample per clock, one row of A per pass |
| 2 | `A = Q D Qᵀ` | `jacobi_evd` |
| 2b | `D^-1/2` | `inv_sqrt`, 32 clocks per eigenvalue |
| 3 | `zᵢ = yᵢ x̃ᵢᵀ Q D^-1/2`, written back to row i | MAC lanes, 17 clocks per row |
| 4 | `â = 0`, `u = 0` | both caches |
| 6 | `B = u + μ₁ − â` → cache I | element-wise |
| 7 | `S = Zᵀ B` → register bank | MAC lanes |
| 8 | `θ = μ₁ + u − μ₁ zᵢ·S` → cache II | adder-tree mode |
| 9 | `â = S₁(θ)` → cache I | `hinge_update` |
| 10 | `u = θ − â` → cache II | element-wise |
| 11 | stop if `‖u(k+1) − u(k)‖² ≤ EPS` or after `MAX_ITER` iterations | |
| 12 | `[β; β₀] = Q D^-1/2 S` | MAC lanes |

`S₁` is the shrinkage `θ − 1` for θ > 1, `0` for 0 ≤ θ ≤ 1, and `θ` for θ < 0.
It is the hinge-loss proximal step with the 1/μ₁ and μ₁ factors cancelled,
which is why the trainer keeps `â = μ₁a` rather than `a`.

Why this is the same algorithm as the textbook ADMM iteration:
`β̃ = A⁻¹ X̃ᵀ Y B` and `A⁻¹ = Q D⁻¹ Qᵀ`. Hence
`Y X̃ β̃ = Z Zᵀ B = Z S`, and `β̃ = Q D^-1/2 S`. The testbenches check the
hardware against the textbook form, which solves the system directly.

## Jacobi EVD unit (`jacobi_evd`, `index_generator`)

This is the least obvious block. It holds the 17 × 17 symmetric matrix and Q in
registers. In every clock it rotates one *round* of disjoint index pairs at
once:

* `index_generator` lists the rounds in round-robin order. For an even size M
  (17 is padded to 18), index M−1 meets r in round r, and `(r+k) mod (M−1)`
  meets `(r−k) mod (M−1)`. A sweep of M−1 = 17 rounds visits each pair once.
  Pairs that touch the padding index are marked invalid.
* Each rotation is an *approximate* Jacobi rotation: its tangent is limited to
  `t = ±2^-l`, l = 0 … 15. The rotation is then a shift-and-add plus one
  constant scaling `c_l = (1 + 4^-l)^-1/2`, which keeps it orthonormal.
* The angle is picked in the same clock. All 32 candidates are evaluated on
  the residual off-diagonal element `t(a_pp − a_qq) + a_pq(1 − t²)`. The
  smallest residual wins, but only if it is below `|a_pq|`. Each applied
  rotation therefore lowers the off-diagonal energy, and a pair with
  `|a_pq| ≤ TOL` is left alone.
* Rows, then columns of A, and the columns of Q are updated in the same clock.
  A is kept exactly symmetric by mirroring the upper triangle.
* The unit stops after a sweep without a rotation, or after `MAX_SWEEPS` (16).
  The scaling constants carry 24 fractional bits and every rotated value is
  rounded to nearest. A truncating version of this datapath drifted Q off
  orthonormality by 0.6 %. With rounding it stays within 2·10⁻⁴ after ten
  sweeps.

A smaller matrix, such as the 16 × 16 kernel block of a Nyström
approximation, is decomposed by loading it with a decoupled 17th row (zero
off-diagonal, any diagonal). Such a row is never rotated. The EVD takes 17
clocks per sweep; random test matrices need about 10 sweeps (170 clocks).

## Kernel mode: the Nyström stage

A non-linear (RBF-kernel) SVM has N dual weights and an N × N kernel matrix.
The Nyström method replaces that matrix by a rank-c product built from c
*landmark* samples, which turns the kernel problem into a linear one over
rank-c features. Here c = r = 16. When `train_kernel` is set with
`train_start`, the 16 stored features of each row are raw features, rows
0 … 15 are the landmarks, and the trainer runs the following before the linear
steps:

| step | operation | where |
|---|---|---|
| K1 | copy the landmarks and their labels into a register bank | |
| K2 | `Ψ_MM[m][m'] = y_m y_m' exp(−γ‖x_m − x_m'‖²)` | distance on the PE adder tree, exp on `cordic_exp` |
| K3 | `Ψ_MM = Q D Qᵀ`, `W = Q D^-1/2` | the same `jacobi_evd` (with a decoupled 17th row) and `inv_sqrt` |
| K4 | `ψᵢ = yᵢ y_m k(xᵢ, x_m)`, `x'ᵢ = yᵢ ψᵢ W`, written over row i | adder tree + exp, then MAC lanes |
| 1–12 | linear ADMM on X' → `[η; b]` | as above |
| end | `α = W η` | MAC lanes |

The kernel classifier is `f(x) = Σ_m α_m y_m k(x_m, x) + b` (the dual form
with the weights of all non-landmark samples equal to zero). A `kin_valid`
request evaluates it in the trainer in about 350 clocks and returns `kscore`
and `kdecision`.

Design choices in this stage:

* The landmarks are the first 16 stored rows, so the host chooses the random
  subset by the order in which it loads the samples.
* The `gamma` port is positive: `k = exp(−gamma ‖x − x'‖²)`.
* Eigenvalues below `EIG_MIN` (about 0.01) get `D^-1/2 = 0`. This is a
  pseudo-inverse, so a singular landmark matrix (for example, two identical
  landmarks) is handled.
* `W` and the landmarks sit in register banks.

`cordic_exp` computes `e^-t` as `2^-n · e^z`. It splits `t log₂e` into its
integer part n and fraction f, then evaluates `z = −f ln 2` with 18 hyperbolic
CORDIC micro-rotations (shifts 1 … 16, with 4 and 13 repeated) on 30-bit
fractions. The result is within 4 LSB of Q15.16, and each exp takes 20 clocks.
A kernel training at the default size spends about 96 000 clocks in the
Nyström steps before the linear run starts.

The reference `svm_ref_pkg::nystrom_kernel` factors `Ψ_MM` by Cholesky instead
of an EVD. Any factor with `W Wᵀ = Ψ_MM⁻¹` yields the same α, b and scores,
so the two can be compared directly.

## Number format and numerics

Every datapath word is 32-bit two's complement with 16 fractional bits
(`svm_pkg::fix_t`). Products are truncated back to that format (`fmul`). On
random, well-conditioned data (values below about 10 in magnitude), the
trained model matches a double-precision ADMM run to about 0.01 absolute. The
largest factor in the error is the EVD. Large feature values grow `A` by N ×
value², so with N = 256 the features should stay below about 10 to keep `A`
in range.

## Memories

* **Training-data memory** (`u_train_mem` in the top): N words of `17 × 32 + 1`
  bits. Element k sits in bits `[32k +: 32]` and the label in the top bit
  (1 = class +1). The host writes the r features and the label. The trainer
  supplies the ones column itself, and step 3 overwrites the row with `zᵢ`,
  keeping the label.
* **Cache I / cache II** (`u_cache1`, `u_cache2` in the trainer): N words each.
  Cache I holds `â` and `B`; cache II holds `u` and `θ`.
  * `S` (17 words) sits in a register bank. The original schedule parks `S`
    in cache I, but step 9 writes `â` over cache I while step 12 still needs
    `S`.
  * The stop test needs `u(k)`, which step 8 overwrites. The trainer
    therefore forms `u(k+1) − u(k) = θ − S₁(θ) − u(k)` during step 8.
* All three are `ram_1r1w` instances: one registered read port and one write
  port, with no reset.

## Timing

With N = 256 and r = 16:

* Step 1 takes `17 (N + 2)` clocks.
* Step 3 takes `N (17 + 2)` clocks.
* The EVD takes 17 clocks per sweep.
* D^-1/2 takes `17 × 33` clocks.
* Each ADMM iteration takes `5N + 7` = 1287 clocks.

A training run that converges in about 30 iterations takes about 50 000
clocks. The iteration time is checked in `tb_admm_trainer`.

Classification streams the r features one per clock. The decision appears one
clock after the last feature.

## Top-level interface (`svm_processor`)

| port | meaning |
|---|---|
| `ld_en, ld_addr, ld_label, ld_x[16]` | write one training vector (idle only; refused writes counted in `ld_dropped`) |
| `train_start` → `train_busy`, `train_done` | one training run |
| `beta[17]` | weights `beta[0..15]`, bias `beta[16]` |
| `iterations, converged, evd_rotations, train_cycles` | run statistics |
| `feat_valid, feat_data, feat_last` | feature stream to classify |
| `dec_valid, decision, score` | `decision = (xᵀβ + β₀ ≥ 0)` |
| `train_kernel, gamma` | with `train_start`: train an RBF-kernel model (Nyström stage) |
| `kernel_model, alpha[16]` | the stored model is a kernel model; landmark weights |
| `kin_valid, kin_x[16]` → `kdec_valid, kdecision, kscore` | classify a raw vector with the kernel model (idle only) |

Parameters: `N` (256), `R` (16), `PE_ROWS × PE_COLS` (4 × 8; lanes must be ≥ R+1),
`MAX_ITER` (64), `EPS` (66 ≈ 10⁻³ on the squared norm), `MAX_SWEEPS` (16).

## What is and is not modelled

These parts follow the published design:

* the 256-sample / rank-16 size;
* λ and μ₁;
* the 4 × 8 PE array, usable as MAC lanes or as an adder tree;
* EVD sharing through one approximate-Jacobi unit that rotates disjoint pairs
  in parallel, one cycle per angle;
* the pre-computed Z written over X̃;
* the Nyström rank approximation, with c = r and its EVD on the shared unit;
* θ reused by steps 9 and 10;
* two caches for the N-vectors.

These are this design's own choices:

* the 32-bit Q15.16 word;
* plain multipliers instead of CORDIC processing elements (CORDIC is used
  only for the exponential);
* the bit-serial inverse square root;
* the candidate-search angle rule and the stop rules;
* the single index generator (the chip shows four, G1–G4);
* the register bank for S;
* the choice of landmarks, the positive `gamma` port and the `EIG_MIN`
  pseudo-inverse;
* the host load port;
* the stream timing.

Not modelled:

* the FFT feature extractor (256-point complex FFT, complex-to-real
  conversion and spectral-energy features);
* the clock generator (130 kHz and 65 kHz);
* power management;
* the additional ADMM and inference SRAM banks with their switch fabrics.

Linear training takes rank-16 features as inputs; kernel training takes 16
raw features. Datasets with more than 16 raw features, or more than 256
samples, do not fit this instance.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/svm_pkg.sv tb/svm_ref_pkg.sv rtl/*.sv tb/tb_svm_processor.sv \
  --top-module tb_svm_processor -o sim && obj_dir/sim
```

* `tb_svm_processor` runs the whole processor at its default size, in about
  1 s. It runs three trainings (separable data, overlapping data, pure label
  noise). It compares each model with `svm_ref_pkg::admm_linear`, a
  double-precision textbook ADMM with no EVD, classifies fresh vectors and
  checks that each mechanism occurred: both stop rules, all three shrinkage
  regions, dropped loads and both classes. A fourth training runs the kernel
  mode on data with a disc-shaped class boundary. It compares α, b and the
  kernel scores of fresh vectors with `svm_ref_pkg::nystrom_kernel`.
* `tb_admm_trainer`, `tb_jacobi_evd`, `tb_index_generator`, `tb_pe_array`,
  `tb_hinge_update`, `tb_decision_block`, `tb_inv_sqrt`, `tb_cordic_exp` and
  `tb_ram_1r1w` test the blocks one by one. `tb_admm_trainer` also runs the
  kernel mode with a singular landmark matrix, where exactly one eigenvalue
  must be dropped.

`svm_ref_pkg` is the place to start when changing the arithmetic: it is the
independent reference every training check compares against.
