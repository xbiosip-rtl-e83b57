# Approximate Pan-Tompkins QRS processing unit

ECG recordings are noisy and redundant. The filters that clean them up and pick
out the heartbeats smooth away small arithmetic errors instead of amplifying
them. This unit builds on that. It is the fixed-function datapath of the
Pan-Tompkins QRS detector: low-pass filter, high-pass filter, derivative,
squarer and moving-window integrator. Every adder and multiplier in it has its
least significant bits built from deliberately wrong, but much cheaper, cells.
The number of approximated LSBs is chosen separately for each stage. Because the
signal passes through several filters and an integrator, a wrong LSB rarely
moves a QRS peak, so the unit can detect every beat of a recording while using
far less energy than an exact datapath. The design method behind this approach
reports about 19.7x less energy for the default configuration, with no beats
lost. That figure is the method's own result; nothing here measures energy.

The RTL is written in synthesizable SystemVerilog (IEEE 1800-2017). It passes
Verilator lint and simulation and the slang front end of Yosys. The default
parameters give the configuration called B9 (below).

## Signal chain

```
 16-bit ECG     +-----+    +-----+    +-----+    +-----+    +-----+
 200 samples/s  | LPF |--->| HPF |--->| DER |--->| SQR |--->| MWI |---> to peak detection
 ------------->|11tap|    |32tap|    |5 tap|    | x^2 |    |30 pt|
                +-----+    +-----+    +-----+    +-----+    +-----+
                 K=10       K=12       K=2        K=8        K=16     (approximated LSBs, B9)
```

| Stage | Module | Operation | Multipliers / adders | Scaling to 16 bits |
|---|---|---|---|---|
| Low-pass, about 12 Hz | `lpf_stage` | h = 1 2 3 4 5 6 5 4 3 2 1 | 11 / 10 | >>5, saturate |
| High-pass, about 5 Hz | `hpf_stage` | 32·x(n-16) − Σ₀³¹ x(n-k) | 32 / 31 | >>5, saturate |
| Derivative | `der_stage` | 2x(n) + x(n-1) − x(n-3) − 2x(n-4) | 5 / 4 | >>3, saturate |
| Squarer | `sqr_stage` | x(n)² | 1 (16x16) / – | 32-bit unsigned |
| Moving-window integrator | `mwi_stage` | Σ₀²⁹ (s(n-k) >> 5) | – / 29 | 32-bit unsigned |

The coefficient sets are those of the original Pan-Tompkins detector, written as
FIR filters. Written that way, the low-pass filter needs exactly 11 multipliers,
10 adders and 10 registers. The high-pass filter needs 32 multipliers and 31
adders.

`xbiosip_top` chains the five stages and brings every stage output out with its
own valid flag. `hpf_out` is the band-passed signal, the point at which signal
quality (PSNR or SSIM) is judged during design. `mwi_out` is the signal that a
peak detector with adaptive thresholds would take. That detector is not part of
the unit.

## How an approximate LSB works

Two elementary cells carry all the approximation:

* **ApproxAdd5** (`fa_cell`, `TYPE = ADD_APPROX5`) is a full adder with no
  logic at all: `sum = b`, `cout = a`. Its carry input is ignored.
* **AppMultV1** (`mult2x2_cell`, `TYPE = MULT_APPROX_V1`) is a 2x2 multiplier
  that is exact except for 3 × 3, which it returns as 7 (binary 0111) instead
  of 9. With that one exception the fourth output bit is never needed.

Both have accurate counterparts, `ADD_ACC` and `MULT_ACC`.

`approx_rca` is an N-bit ripple-carry adder. Bits 0..K-1 use the approximate
cell and bits K..N-1 use accurate full adders. With ApproxAdd5, the low K sum
bits are copied from operand `b`. The carry into the accurate part is `a[K-1]`.
The upper bits are therefore exact *given* that guessed carry. Each addition
has an error of less than 2^(K+1).

`rec_mult` builds an N x N multiplier recursively. The four half-size products
LL, HL, LH and HH are combined by three 2N-bit adders:
`s1 = (HH << N) + LL`, `s2 = (HL << N/2) + (LH << N/2)`, `p = s2 + s1`.
The recursion stops at 2x2 cells, so a 16x16 multiplier contains 64 of them.
The parameter `OFFSET` carries the weight of each sub-block's bit 0 down the
recursion. That is how "K approximated LSBs" is applied consistently across the
tree:

* a 2x2 cell is approximate if its lowest product bit has weight below K;
* an adder bit is approximate if its weight in the final product is below K.

In each adder the higher-weight term is operand `a`. Because ApproxAdd5 copies
`b`, that choice keeps the low half of LL in the result rather than zeros.
`signed_mult` multiplies two's-complement numbers. It takes their magnitudes,
multiplies those in `rec_mult`, and negates the product exactly when the signs
differ.

In the filters (`approx_fir`) the running sum is operand `a` and the new
product is operand `b`. With ApproxAdd5 the low K bits of a stage's sum
therefore come from the last product in the chain. This is why a large K
changes the output so much. In the derivative, for instance, more than a few
approximated bits leave almost nothing of the lower bits.

Setting K = 0 in every stage gives the exact reference datapath (configuration
A2). The testbenches check that this exact datapath matches plain integer
arithmetic.

## Configurations

The per-stage K values of the evaluated configurations:

| | LPF | HPF | DER | SQR | MWI | reported result |
|---|---|---|---|---|---|---|
| A2 | 0 | 0 | 0 | 0 | 0 | exact reference |
| **B9 (default)** | 10 | 12 | 2 | 8 | 16 | all beats detected, ~19.7x less energy |
| B10 | 10 | 12 | 4 | 8 | 16 | <1 % beats missed, ~22x less energy |
| B1–B14 | 0–12 | 0–12 | 0–4 | 0–8 | 0–16 | set through the `K_*` parameters |

Any configuration with 0..16 LSBs per stage is a parameter setting of
`xbiosip_top` (`K_LPF`, `K_HPF`, `K_DER`, `K_SQR`, `K_MWI`), for example:

```systemverilog
xbiosip_top #(.K_LPF(10), .K_HPF(12), .K_DER(4), .K_SQR(8), .K_MWI(16)) u_b10 (...);
```

The library these cells come from has four more approximate adders (ApproxAdd1
to ApproxAdd4) and a second 2x2 multiplier (AppMultV2). They are not provided,
because only their gate drawings exist and no truth table was available. The
evaluated configurations above use only ApproxAdd5 and AppMultV1.

## Interface and timing

All stages share one handshake. When `in_valid` is high for a clock, the stage
takes `in_sample`, registers its result on that edge, and raises `out_valid` for
the next cycle. Each stage therefore has a latency of one clock, and
`xbiosip_top` has a latency of five clocks from `in_valid` to `mwi_valid`. A new
sample may arrive every clock. The application rate of 200 samples/s leaves the
unit idle almost all of the time. There is no back-pressure. `rst_n` is an
asynchronous, active-low reset that clears every delay line and output
register.

Top-level ports: `clk`, `rst_n`, `in_valid`, `in_sample[15:0]` (signed), then
per stage `*_valid` and `*_out`. `lpf_out`, `hpf_out` and `der_out` are 16-bit
signed. `sqr_out` and `mwi_out` are 32-bit unsigned. `lpf_sat`, `hpf_sat` and
`der_sat` flag outputs that were clamped to 16 bits.

## Where this RTL departs from, or adds to, the published method

* **Coefficients and window.** The published method gives the stages' cut-off
  frequencies, tap counts, adder and multiplier counts, and the derivative's
  coefficient magnitudes (2 and 1). The exact coefficient sets, the 30-sample
  window and the stage gains come from the original Pan-Tompkins detector.
* **Inter-stage scaling.** A stage computes in 32 bits, but the next stage's
  16x16 multipliers take 16 bits. Each filter output is therefore shifted and
  saturated (see the stage table above). The squares are divided by 32 before
  integration, so that 30 of them fit in 32 bits. These shifts are choices made
  here.
* **Operand order** in every adder, and the rule for which cells count as "the
  K LSBs" inside the recursive multiplier, are choices made here. With
  ApproxAdd5 they change the numbers. They do not change the structure.
* **Sign handling** (sign-magnitude around an unsigned recursive multiplier) is
  a choice made here and is exact.
* **Zero taps get a multiplier.** The zero tap of the derivative has a
  multiplier like any other tap. A synthesis tool removes it.
* **No energy, area or quality numbers are reproduced.** The synthesis results
  of the method come from a 65 nm library. The peak-detection accuracy comes
  from a software detector run on the MIT-BIH Normal Sinus Rhythm database.
  Neither is available here.
* **Constant outputs.** `der_sat` can never be set: the derivative's gain is
  6/8, so its output always fits. Because AppMultV1 drops the fourth product
  bit, some low product bits are constant for some values of K. Synthesis
  reports these bits as constant outputs.

## Verifying and changing it

Each module has a self-checking testbench in `tb/`, `tb_<module>.sv`. All of
them use `tb/xbiosip_ref_pkg.sv`, a reference model written as functions:
bit-by-bit addition, 2x2 products from `a*b` with the 3 × 3 exception, and the
same recursion and filter equations. It does not reuse any RTL cell. Each
testbench checks its approximate instance against this model. It checks an
exact instance (K = 0) against ordinary integer arithmetic, and it checks
valid timing and latency. It prints
`TB_RESULT checks=<n> failures=<m>`.

`tb_xbiosip_top` runs 20,000 samples of a synthetic ECG: about 125 beats with P,
QRS and T waves, baseline wander and noise, plus one full-scale artefact. The
samples go through the unit at its default parameters (B9), with random gaps in
`in_valid`. Every output of every stage is checked against the reference model.
Each sample is also run through exact integer arithmetic (the A2 datapath), to
count how often approximation changed each stage. The test fails if any of these
never happens: a gap in the input, a saturated stage output, or a stage output
changed by approximation. A simple threshold counter also counts the QRS peaks
in `mwi_out`. It finds 124 of the 125 generated beats. The missing one is the
last beat, which the run ends before it can be integrated.

To simulate with Verilator (the packages must come first):

```sh
verilator --binary --timing --assert -Wno-fatal --top-module tb_xbiosip_top \
  -y rtl -y tb +libext+.sv rtl/xbiosip_pkg.sv tb/xbiosip_ref_pkg.sv tb/tb_xbiosip_top.sv
./obj_dir/Vtb_xbiosip_top
```

Replace the top-module name to run any other testbench. The top testbench
compiles in about two minutes and runs in a few seconds. The block testbenches
take seconds.

To add another approximate cell, extend `add_type_e` or `mult_type_e` in
`rtl/xbiosip_pkg.sv` and give `fa_cell` or `mult2x2_cell` a branch for it. The
adders, multipliers and filters pick it up through their `ADD_TYPE` and
`MULT_TYPE` parameters. Mirror the cell in `ref_add` or `ref_m2` of the
reference package.

## Files

| File | Contents |
|---|---|
| `rtl/xbiosip_pkg.sv` | widths, sample types, cell-type enums, saturating rescale |
| `rtl/fa_cell.sv`, `rtl/mult2x2_cell.sv` | elementary cells (accurate, ApproxAdd5, AppMultV1) |
| `rtl/approx_rca.sv` | ripple-carry adder with K approximate LSBs |
| `rtl/rec_mult.sv`, `rtl/signed_mult.sv` | recursive unsigned multiplier, signed wrapper |
| `rtl/approx_fir.sv` | generic approximate FIR stage |
| `rtl/lpf_stage.sv`, `rtl/hpf_stage.sv`, `rtl/der_stage.sv` | the three filter stages |
| `rtl/sqr_stage.sv`, `rtl/mwi_stage.sv` | squarer and moving-window integrator |
| `rtl/xbiosip_top.sv` | the five-stage unit |
| `tb/xbiosip_ref_pkg.sv` | reference model for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |
