# HALOC-AxA: a half-adder / lower-part-OR / constant approximate adder

HALOC-AxA is a static approximate adder for error-tolerant workloads such as
image processing. It does exact addition on the upper bits of the operands
only. The lower bits get a few gates with no carry chain, and this cheap part
also predicts the one carry that the upper part needs. For 32-bit operands
with a 10-bit approximate part, the mean absolute error is about 124, which is
around 3 parts in 10^8 of a typical sum. In return the low bits need no carry
logic.

This RTL gives the adder as a parameterised, purely combinational
SystemVerilog module. It also includes self-checking testbenches, one of which
reproduces the published accuracy figures.

## Structure

An N-bit addition `S = A + B` is split at bit M:

```
 bit:   N      N-1 ........ M   M-1   M-2   M-3 ....... K   K-1 ..... 0
       +----------------------+ +-----------+ +------------+ +-----------+
       | exact (N-M)-bit adder| | 2 half    | | bitwise OR | | constant 1|
       |  (MSM)               | | adders    | |            | |           |
       +----------------------+ +-----------+ +------------+ +-----------+
 S_N = carry out       ^  cin = A[M-1] & B[M-1]
                       +---------'
        <------ haloc_msm -----> <----------- haloc_lsm (approximate) ---->
```

* **Constant section, bits K-1..0.** Every sum bit is tied to 1. This costs
  no logic.
* **OR section, bits M-3..K.** `S[i] = A[i] | B[i]`. This is exact unless both
  bits are 1, and it never produces a carry.
* **Half-adder section, bits M-1 and M-2.** There is one half adder per bit
  pair:
  * `S[M-2]` is the half-adder sum `A[M-2] ^ B[M-2]`.
  * `S[M-1]` is the half-adder sum `A[M-1] ^ B[M-1]`, ORed with the carry of
    pair M-2 (`A[M-2] & B[M-2]`).
  * The carry of pair M-1, `A[M-1] & B[M-1]`, is the carry-in of the exact
    upper part.
* **Exact upper part (MSM, "most significant module").** It computes
  `A[N-1:M] + B[N-1:M] + cin` exactly, with the carry out as `S[N]`.

The lower part is often called the LSM, "least significant module".

The design's point is its top two approximate bits. Without the half adders
(plain lower-part-OR), the top two bit pairs add incorrectly in half of their
distinct cases. With them, only one distinct case is wrong.

## The top two bits in detail

Take the ten distinct combinations of `A[M-1:M-2]` and `B[M-1:M-2]` (order does
not matter). The exact sum of the pairs and what the half-adder section gives,
written as {cin, S[M-1], S[M-2]}, are:

| A  | B  | exact | HALOC-AxA |
|----|----|-------|-----------|
| 00 | 00 | 000   | 000 |
| 01 | 00 | 001   | 001 |
| 01 | 01 | 010   | 010 |
| 10 | 00 | 010   | 010 |
| 10 | 01 | 011   | 011 |
| 10 | 10 | 100   | 100 |
| 11 | 00 | 011   | 011 |
| 11 | 01 | 100   | **010** |
| 11 | 10 | 101   | 101 |
| 11 | 11 | 110   | 110 |

The only wrong case has both bits M-2 set and bits M-1 different. The carry
of pair M-2 should then ripple through bit M-1 into the upper part. Here it
only sets `S[M-1]`, because `S[M-1]` is an OR, not an XOR, and `cin` comes
from pair M-1 alone. The result is `2^(M-1)` too small. In all other cases the
two bits and the carry are exact, apart from the carries that the OR section
never produces.

Two cells need comment:

* **The `11 + 01 -> 010` row is why `S[M-1]` uses an OR.** An XOR would give
  `000` there. The published truth table prints `010`.
* **The `11 + 10` row departs from the published table.** That table prints
  `010` for HALOC-AxA, but the published text says the design is wrong in
  exactly one of the ten cases, the `11 + 01` one. The half-adder structure it
  describes gives `101`. This RTL follows the text and the structure.

## Accuracy

Because of the constant bits, the OR bits and the one wrong case, the error
`|S_approx - S_exact|` stays below `2^(M-1) + 2^(M-2)`. For M = 10 that is
768; the largest error seen in 10^7 random trials is 767. Over uniform random
32-bit operands with N = 32, M = 10, K = 5, `tb_haloc_error_stats` measures:

| metric | this RTL (10^7 samples) | published |
|---|---|---|
| MED, mean error distance | 123.86 | 123.9 |
| MRED, mean relative error distance | 4.0e-8 | 3.77e-8 |

The MED agrees. For uniform operands the MRED should be close to
`MED * 2 ln 2 / 2^32 ≈ 4.0e-8`. The published 3.77e-8 is about 6% lower,
which probably comes from a different operand distribution in the original
evaluation. The testbench accepts MRED between 3.5e-8 and 4.3e-8.

Worked example (N = 16, M = 8, K = 4): 38098 + 15064 gives 53151, where the
exact sum is 53162, so the error is 11. The top pairs are `11 + 11`. They give
`S[7:6] = 10` and a carry into the upper byte. Bits 5:4 are the ORs `01`, and
bits 3:0 are `1111`. `tb_haloc_axa` checks this example.

## Modules

| file | module | role |
|---|---|---|
| `rtl/haloc_pkg.sv` | `haloc_pkg` | default sizes `HALOC_N = 32`, `HALOC_M = 10`, `HALOC_K = 5` |
| `rtl/half_adder.sv` | `half_adder` | one-bit half adder |
| `rtl/haloc_lsm.sv` | `haloc_lsm #(M, K)` | approximate lower part: `a, b[M-1:0] -> s[M-1:0], cout` |
| `rtl/haloc_msm.sv` | `haloc_msm #(W)` | exact upper part: `a, b[W-1:0], cin -> s[W:0]` |
| `rtl/haloc_axa.sv` | `haloc_axa #(N, M, K)` | the adder: `a, b[N-1:0] -> s[N:0]` |

Everything is combinational: there is no clock, no reset and no register. Put
registers around `haloc_axa` if a pipelined datapath needs them. Legal sizes
are `N > M >= K + 2`; other sizes stop elaboration with an `$error`. With
`K = M - 2` the OR section is empty.

`haloc_msm` writes the exact sum as `a + b + cin` and leaves the adder
structure to synthesis. The design allows any exact adder here, ripple-carry
or carry-lookahead. Only the lower part is specified gate by gate.

In synthesis the K constant sum bits show up as constant outputs. That is
intended: they are the constant section.

## Choices this RTL makes

These points are not fixed by the original description:

* Operands are unsigned. The carry out is returned as sum bit N.
* N means the total operand width, so the evaluated configuration is
  N = 32, M = 10, K = 5. The published worked example uses "N = m = 8" for a
  16-bit adder, with N there meaning the width of the exact part.
* The half adders are the textbook XOR/AND pair. The exact MSM is a
  behavioural `+`.
* The original results come from a transistor-level implementation in a
  32 nm predictive technology. Transistor count, switching delay and energy
  have no counterpart here.

## Not included

The original work shows the adder inside an image-reconstruction flow: a
512x512 8-bit grayscale image goes through an FFT and an inverse FFT, with
exact multipliers and the approximate adder, and is scored by PSNR and SSIM.
That flow was a software study, and no FFT hardware is described. It is
therefore not part of this RTL. `haloc_axa` is the adder such a datapath
would use.

## Testbenches and simulation

Each testbench checks against a reference written from the behaviour above,
not from the gates. Each prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog.

| testbench | what it checks |
|---|---|
| `tb/tb_haloc_msm.sv` | 22-bit exact adder: corners plus 5000 random vectors; 3-bit exhaustive |
| `tb/tb_haloc_lsm.sv` | the ten truth-table rows above; exhaustive over all operand pairs for M=10/K=5 and M=8/K=4 |
| `tb/tb_haloc_axa.sv` | 32-bit adder end to end: directed and 20000 random vectors, the error bound, the worked example. Counts each mechanism (carry into the MSM, carry folded into `S[M-1]`, the wrong case, carry out, exact result) and fails if one never occurs |
| `tb/tb_haloc_error_stats.sv` | 10^7 random 32-bit pairs at default sizes; MED, MRED and the error bound against the published figures (about 2 s) |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl --top-module tb_haloc_axa \
    rtl/haloc_pkg.sv rtl/half_adder.sv rtl/haloc_lsm.sv rtl/haloc_msm.sv \
    rtl/haloc_axa.sv tb/tb_haloc_axa.sv
./obj_dir/Vtb_haloc_axa
```

To use another split, override `M` and `K` on `haloc_axa`. The testbenches
are written for the sizes listed above. The directed vectors in
`tb_haloc_lsm` and `tb_haloc_axa` assume those sizes, so change them
together with the local parameters.
