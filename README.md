# Hybrid Karatsuba / schoolbook modular multiplier over GF(2^m)

Elliptic-curve cryptography over the NIST binary fields spends most of its
time multiplying field elements. An element of GF(2^m) is a polynomial of
degree below m with coefficients in {0,1}, stored as an m-bit vector. The
product of two elements is formed in two steps. First comes a carry-less
polynomial product of 2m-1 bits, in which partial products are added with
XOR. That product is then reduced modulo the field polynomial
P(x) = x^m + r(x).

This RTL implements a fully combinational multiplier for this job, for
B-163 (m = 163, P(x) = x^163 + x^7 + x^6 + x^3 + 1). It is a *hybrid* of
two multiplication methods:

* **Karatsuba** (KM) is used on the wide operands. Each level replaces one
  n-bit product with three products of about n/2 bits, plus some XORs.
  This saves area when n is large.
* **Conventional schoolbook multiplication** (CM) is used once the
  pieces are small. For small sizes its n² AND gates and shallow XOR
  trees beat the extra adders and overlap logic of Karatsuba.

The crossover was found by synthesising both methods at many widths. For
B-163 it is 41 bits. Two Karatsuba levels, 163 → 82 → 41, therefore feed
nine 41-bit schoolbook multipliers. A two-step reduction follows them.

```
  A[162:0], B[162:0]
        │
   ┌────┴──────────── Stage II: Karatsuba, level 1 (163 = 82 + 81) ───────────┐
   │  A_L·B_L        A_H·B_H        (A_L+A_H)·(B_L+B_H)       (82-bit products)│
   │     │              │                  │                                   │
   │  Karatsuba, level 2 (82 = 41 + 41), inside each of the three              │
   │     └── 3 × Stage I: 41-bit schoolbook (21×21 tiles of the 2-bit cell)    │
   │  overlap circuit: C = M1·x^164 + (Mm+M0+M1)·x^82 + M0                     │
   └─────────────────────────────────┬─────────────────────────────────────────┘
                                     │ C[324:0]
                Final stage: fold C[324:163] by r(x), then fold again
                                     │
                                 Y[162:0]
```

## Files

| file | module | role |
|---|---|---|
| `rtl/gf2_pkg.sv` | package | m, r(x) and crossover size for B-163, B-233, B-283, B-571 |
| `rtl/gf2_cm2.sv` | `gf2_cm2` | 2-bit schoolbook cell: 4 AND, 1 XOR |
| `rtl/gf2_cm_mul.sv` | `gf2_cm_mul` | Stage I: N-bit schoolbook multiplier tiled from `gf2_cm2` |
| `rtl/gf2_km_overlap.sv` | `gf2_km_overlap` | merges the three Karatsuba sub-products |
| `rtl/gf2_km_mul.sv` | `gf2_km_mul` | Stage II: recursive Karatsuba, drops to `gf2_cm_mul` at `CM_MAX` |
| `rtl/gf2m_reduce.sv` | `gf2m_reduce` | two-step reduction modulo x^m + r(x) |
| `rtl/hybrid_modmul.sv` | `hybrid_modmul` | top: operand and result registers, en/ready |
| `tb/gf2_ref_pkg.sv` | package | bit-serial reference arithmetic for the testbenches |
| `tb/tb_*.sv` | | one self-checking testbench per module, plus `tb_hybrid_curves` |

## Stage I: the schoolbook multiplier

`gf2_cm_mul #(N)` computes the unreduced 2N-1-bit product. Both operands
are zero-padded to an even width and cut into 2-bit digits. Each pair of
digits (i, j) goes through a `gf2_cm2` cell, which computes c0 = a0b0,
c1 = a0b1 ⊕ a1b0 and c2 = a1b1. The cell's 3-bit result is XORed into the
product at bit 2(i+j). For N = 41 that is 21 × 21 cells. Logically this is
the plain schoolbook array: N² ANDs and one XOR tree per output column.
Building it from 2-bit cells follows the description of the conventional
stage as "built from 2-bit blocks upwards". How the 2-, 4- and 8-bit
groupings combine into a 41-bit block is not specified, so the flat tiling
is this design's choice.

## Stage II: Karatsuba with uneven halves

`gf2_km_mul #(N, CM_MAX)` instantiates itself. If N ≤ CM_MAX it is just a
`gf2_cm_mul`. Otherwise it splits each operand into a low half of
L = ⌈N/2⌉ bits and a high half of N − L bits:

    A = x^L·A_H + A_L,   B = x^L·B_H + B_L
    M0 = A_L·B_L,  M1 = A_H·B_H,  Mm = (A_L+A_H)·(B_L+B_H)
    A·B = M1·x^(2L) + (Mm + M0 + M1)·x^L + M0

This step is the hardest part to get right, for two reasons.

* **Odd widths.** 163 splits into 82 + 81, not two equal halves. The high
  half is zero-extended to L bits, so all three sub-multipliers have the
  same width (82) and the same structure. The middle operand A_L + A_H is
  also L bits wide. The products are 2L−1 = 163 bits. M1 really has only
  2(N−L)−1 = 161 significant bits, so the top of the result never exceeds
  bit 2N−2 = 324.
* **The overlap.** The three terms are 2L−1 bits wide but are shifted by
  only L. M0 and the middle term therefore overlap in L−1 columns, and so
  do the middle term and M1. `gf2_km_overlap` forms Mm ⊕ M0 ⊕ M1 first,
  which is one XOR level. It then XORs the three shifted vectors into the
  2N−1-bit result, which is one more level in the overlapping columns.

With the defaults this gives 163 → 82 → 41. The result is 9 schoolbook
blocks of 41 bits. One of them, the high half of the high half, has only
40 significant bits, and synthesis trims its top row. After synthesis
there are 15,048 two-input ANDs = 8 × 41² + 40². That is close to the
estimate 3^k·(m/2^k)² ≈ 14,950 for k = 2 Karatsuba levels. A single
163-bit schoolbook array would need 163² = 26,569.

Other fields use the same module with different parameters. The same
⌈N/2⌉ rule reproduces the published split sequences:

| field | P(x) | split | `CM_MAX` | schoolbook blocks |
|---|---|---|---|---|
| B-163 (default) | x^163+x^7+x^6+x^3+1 | 163 → 82 → 41 | 41 | 9 × 41 |
| B-233 | x^233+x^70+1 | 233 → 117 → 59 | 59 | 9 × 59 |
| B-283 | x^283+x^12+x^7+x^5+1 | 283 → 142 → 71 | 71 | 9 × 71 |
| B-571 | x^571+x^10+x^5+x^2+1 | 571 → 286 → 143 → 72 | 72 | 27 × 72 |

For B-571 the published crossover is 71. Its split lists disagree with each
other, though: one says 286 → 142, another 286 → 143 and 143 → 72. Halving
by ⌈N/2⌉ reaches 72-bit pieces. `CM_MAX_B571` is therefore 72; with 71
there would be one more Karatsuba level, down to 36 bits.

## Final stage: reduction

Since x^m ≡ r(x) mod P(x), the high part of the product can be folded onto
the low part:

    step 1:  t  = C[m-1:0] ⊕ C[2m-2:m]·r(x)
    step 2:  Y  = t[m-1:0] ⊕ t[high:m]·r(x)

r(x) is sparse, with 2 or 4 terms, so each step is just a few shifted copies
XORed together. For B-163, step 1 spreads C[324:163] to offsets 0, 3, 6 and
7. This leaves coefficients up to x^168. Step 2 folds those six bits back
once more. Two steps suffice whenever 2·deg r(x) ≤ m + 1. That holds for
every NIST polynomial; `gf2m_reduce` stops elaboration with an error for a
polynomial that violates it. For a trinomial x^m + x^n + 1 the two steps
are the familiar "W ⊕ X ⊕ Y ⊕ Z" scheme: W is the low half, X the high
half, Y the high half shifted by n, and Z the bits that Y pushes past
x^(m−1), folded back. `RPOLY` is a parameter (bit i = coefficient of x^i,
without the x^m term), so the same module serves any of the fields.

## Interface and timing of `hybrid_modmul`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst` | in | 1 | synchronous, active high; clears all registers and drops work in flight |
| `en` | in | 1 | A and B are accepted on a rising edge where `en` = 1 |
| `A`, `B` | in | M | operands, bit i = coefficient of x^i |
| `ready` | out | 1 | high for one cycle per accepted pair |
| `Y` | out | M | A·B mod P(x); holds its value while `ready` = 0 |

The arithmetic is one combinational path from the operand registers to the
result register. A pair accepted on edge k appears on `Y`, with `ready` = 1,
after edge k+1. A new pair may be accepted on every cycle, so throughput is
one product per clock. The achievable clock is set by the depth of that
path. The published Virtex-7 figure for B-163 is 13.3 ns.

The port names are those of the multiplier core in the FPGA test set-up.
That set-up also has a clocking wizard, a virtual-I/O core that drives
`rst`, `en`, `A` and `B`, and a logic analyser that captures `ready` and
`Y`. These are vendor debug IP and are not part of this RTL; the
testbenches stand in for them. The register placement, the reset style and
`ready` as a one-cycle pulse are this design's choices. The source gives
only the port list and the phrase "reduced intermediate registers".

## Verification

Each testbench compares against reference arithmetic in `tb/gf2_ref_pkg.sv`.
That code is written independently of the RTL structure. It has a
shift-and-XOR product, long division by P(x) one coefficient at a time, and
an MSB-first interleaved multiply-and-reduce.

| testbench | what it checks |
|---|---|
| `tb_gf2_cm2` | all 16 input pairs |
| `tb_gf2_cm_mul` | 41-bit: corner cases and 300 random pairs; 5-bit: exhaustive |
| `tb_gf2_km_overlap` | N=163, L=82: reference sub-products in, A·B out |
| `tb_gf2_km_mul` | 163/41 default; also 23-bit with `CM_MAX`=3 (four uneven levels) |
| `tb_gf2m_reduce` | B-163 and B-233; known answers x^163 → 0xC9, x^170 → 0x6480; random |
| `tb_hybrid_modmul` | top at its defaults, end to end: see below |
| `tb_hybrid_curves` | top re-parameterised for B-233 and B-283, back-to-back random pairs |

`tb_hybrid_modmul` uses a scoreboard that checks every result and checks
that it arrives exactly one clock after acceptance. While `ready` is low it
checks that `Y` holds. It also checks that a reset drops results in
flight. It counts back-to-back issues, hold cycles and reset flushes, and
fails if any of them never happened. It also checks known answers:
x^162·x = x^7+x^6+x^3+1, 1·A = A and 0·A = 0.

To run one testbench with Verilator 5, from the project root:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/gf2_pkg.sv tb/gf2_ref_pkg.sv tb/tb_hybrid_modmul.sv \
        --top-module tb_hybrid_modmul -j 8
    ./obj_dir/Vtb_hybrid_modmul

Each testbench prints `TB_RESULT checks=N failures=F`. The B-163 top builds
in about 20 s. The B-233 + B-283 test takes a few minutes. Verilator
flattens every 2-bit cell, so build time grows with the number of cells.
B-571 has 35,000 cells and takes more than five minutes to build. It is
not in the testbench set; a single-vector build of the 571-bit
multiplier produced the correct square of the all-ones polynomial.

## Where this RTL departs from, or goes beyond, the published design

* **Clocking.** The published design is described as combinational logic
  with few registers. The exact register boundary and the handshake are
  this design's (see the interface section).
* **Width of the FPGA debug ports.** The drawing of the test set-up labels
  A, B and Y as [163:0]. That is 164 bits, while the field and the reduced
  result C′[162:0] have 163. The RTL uses 163.
* **Reduction.** The published equations for the four-term reduction are
  typographically garbled. The RTL implements the two-step fold that the
  architecture drawing shows, generalised to any sparse r(x).
* **Karatsuba combination formula.** The published algorithm listing
  shifts by x^m and x^2m where the half size is meant, and gives a
  "step 4" expression that does not match the Karatsuba identity. The RTL
  follows the identity above.
* **Schoolbook stage internals.** Tiling 2-bit cells is an interpretation;
  the function, N² ANDs and an XOR tree per column, is standard.
* **B-571 crossover**: 72 rather than 71 (see Stage II).
* **Not included**: the stand-alone modular schoolbook and modular
  Karatsuba multipliers used as baselines, and the 2- and 4-bit Karatsuba
  and overlap-free Karatsuba circuits shown as background. None of them
  is part of the proposed multiplier.
* **Not checked**: timing, area and power on an FPGA. The published numbers
  are 6,812 LUTs and 13.3 ns for B-163, and 10,787 LUTs and 13.4 ns for
  B-233, on Virtex-7.

## Changing it

* **Another field**: override `M`, `CM_MAX` and `RPOLY` on `hybrid_modmul`;
  the package holds the NIST values.
  Example: `hybrid_modmul #(.M(gf2_pkg::M_B233), .CM_MAX(gf2_pkg::CM_MAX_B233), .RPOLY(233'(gf2_pkg::R_B233[232:0])))`.
* **Another crossover**: change `CM_MAX`. A smaller value adds Karatsuba
  levels, and `CM_MAX` ≥ M gives a pure schoolbook multiplier.
* **Pipelining**: the three stages are separate modules with plain vector
  ports. Registers can be placed between `gf2_km_mul` and `gf2m_reduce`,
  or between Karatsuba levels, without touching the arithmetic. The
  testbench's `LATENCY` constant must then follow.
