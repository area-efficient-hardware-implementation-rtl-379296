# Iterative Karatsuba multiplier for GF(2^233)

Elliptic-curve cryptography over the NIST binary curve B-233 spends most of
its time multiplying 233-bit polynomials over GF(2). Here addition is XOR and
the product of two 233-bit polynomials has 465 bits. A fully parallel
multiplier computes that product in one clock, but it is large. Applying
Karatsuba's formula recursively all the way down to single bits still needs
about 256^1.58 one-bit products.

This design trades clocks for area. Karatsuba's formula is still used to
break the product into partial products. They are not computed side by side,
though: one smaller multiplier, the *partial multiplier*, computes one of
them per clock, and an *accumulation* register file XORs each result into
the right places of the final product. In the default configuration the
operands are cut in two halves. One 128 x 128 bit partial multiplier then
runs three times, and a 233 x 233 bit product is ready after **3 clocks**.

The design follows the iterative Karatsuba multiplier proposed by Z. Dyka
and P. Langendoerfer ("Area Efficient Hardware Implementation of Elliptic
Curve Cryptography by Iteratively Applying Karatsuba's Method"). They report
2.18 mm^2 for this configuration in a 0.25 um CMOS process, against 6.28 mm^2
for a one-clock recursive Karatsuba multiplier. This RTL is an independent
rendering of that description, not the authors' code. The section
"What comes from the paper and what does not" lists where it had to fill gaps.

The multiplier returns the unreduced product. Reduction modulo the B-233
field polynomial x^233 + x^74 + 1 is left to the surrounding datapath.

## The arithmetic

Polynomials are bit vectors: bit i is the coefficient of x^i, and `+` below
means XOR.

**One split.** Cut each operand into two n-bit segments, A = a1·x^n + a0 and
B = b1·x^n + b0. Then

    A·B = L + (L + H + M)·x^n + H·x^2n
    L = a0·b0,   H = a1·b1,   M = (a0 + a1)·(b0 + b1)

That is three n x n products instead of four.

**Segments of the result.** A partial product of two n-bit values has 2n-1
bits. Call its low n bits `pr[0]` and its upper n-1 bits `pr[1]`. The
2·SEGMENTS result segments c^0, c^1, ... are n bits each. Placing a partial
product "at offset k" means XORing pr[0] into c^k and pr[1] into c^(k+1).

**Two segments (default).** From the formula, the offsets are:

| clock | partial product      | offsets | effect                          |
|-------|----------------------|---------|---------------------------------|
| 1     | a0·b0                | 0, 1    | c0 = pr[0]; c1 = pr[0]^pr[1]; c2 = pr[1] |
| 2     | a1·b1                | 1, 2    | c1 ^= pr[0]; c2 ^= pr[0]^pr[1]; c3 = pr[1] |
| 3     | (a0^a1)·(b0^b1)      | 1       | c1 ^= pr[0]; c2 ^= pr[1]        |

**More segments.** With SEGMENTS = 2^L the split is applied L times. This
gives 3^L partial products. Each one multiplies the XOR of a subset of A's
segments by the XOR of the same subset of B's segments.

A partial product can be named by L choices, one per split level, each being
low half, high half or sum of halves. At a split where the current piece has
2h segments, these choices place the product as follows:

- low half: offsets {0, h}
- high half: offsets {h, 2h}
- sum of halves: offset {h}

Across levels the offsets add up. An offset that is reached an even number of
times cancels, because additions are XORs. `ik_pkg` computes both tables,
subsets and offsets, at elaboration from exactly this rule.

## The four-segment schedule

With four segments (64-bit partial multiplier, 9 clocks), the partial
products come in this order:

    a0b0, a1b1, a2b2, a3b3,
    (a0^a1)(b0^b1), (a0^a2)(b0^b2), (a1^a3)(b1^b3), (a2^a3)(b2^b3),
    (a0^a1^a2^a3)(b0^b1^b2^b3)

The paper gives a hand-optimised update sequence for this case. It reuses
segments already formed instead of XORing every partial product into every
place it belongs. This brings the number of n-bit XORs per product down from
42 to 29. `prod_accum` implements that sequence literally (`g_table2`). All
updates in one clock read the segment values from before that clock:

| clock | pr                      | updates |
|-------|-------------------------|---------|
| 1 | a0·b0   | c0 = pr0; c1 = pr1 |
| 2 | a1·b1   | c1 = c1^c0^pr0; c2 = pr1 |
| 3 | a2·b2   | c2 = c2^c1^pr0; c3 = pr1 |
| 4 | a3·b3   | c3 = c3^c2^pr0^pr1; c7 = pr1 |
| 5 | (a0^a1)(b0^b1) | c6 = c3^c2; c5 = c3^c1; c4 = c3^c0^pr1; c3 = c3^c7^pr0; c2 = c2^pr1; c1 = c1^pr0 |
| 6 | (a0^a2)(b0^b2) | c3 ^= pr0^pr1; c2 ^= pr0; c4 ^= pr1 |
| 7 | (a1^a3)(b1^b3) | c4 ^= pr0^pr1; c3 ^= pr0; c5 ^= pr1 |
| 8 | (a2^a3)(b2^b3) | c3 ^= pr0; c5 ^= pr0; c4 ^= pr1; c6 ^= pr1 |
| 9 | (a0^..^a3)(b0^..^b3) | c3 ^= pr0; c4 ^= pr1 |

(pr0 = pr[0], pr1 = pr[1].) Why clock 5 works: after clock 4, c3 holds a
running sum from which c4, c5 and c6 can be derived by one XOR each. The
sequence only works in this product order, so `op_select` uses exactly this
order for four segments.

The paper gives no chained sequence for two or eight segments. For those,
`prod_accum` uses the plain form instead: every partial product is XORed in
at all its offsets (`g_expanded`). The result is the same; it just uses more
XORs.

## Block structure

    a[232:0] ─┐   ┌───────────┐ in1 ┌──────────────┐ product   ┌────────────┐
              ├──►│ op_select ├────►│ karatsuba_pm ├──────────►│ prod_accum ├──► c[464:0]
    b[232:0] ─┘   │           ├────►│  n x n bit   │ pr[0],    │            │
                  └─────▲─────┘ in2 └──────────────┘ pr[1]     └─────▲──────┘
                        │ clk_cntr                                   │ clk_cntr, en
    start ──────► step_counter ──────────────────────────────────────┘──► busy, done

| module | role |
|---|---|
| `ik_multiplier` | top: pads the 233-bit operands with zeros to SEGMENTS·SEG_BITS bits and wires the blocks |
| `step_counter` | produces `clk_cntr` = 0 .. 3^L−1 and the start/busy/done handshake |
| `op_select` | combinational: XOR of the segment subset for `clk_cntr`, for A and for B |
| `karatsuba_pm` | combinational n x n multiplier: Karatsuba applied recursively down to `LEAF` bits |
| `school_mul` | classical LEAF x LEAF multiplier at the bottom of `karatsuba_pm` |
| `prod_accum` | 2·SEGMENTS segment registers, updated each clock from `pr[0]`/`pr[1]` |
| `ik_pkg` | elaboration-time functions: number of clocks, subset and offset tables |

The partial multiplier of the default configuration splits 128 → 64 → 32 → 16
→ 8 bits and uses 81 classical 8 x 8 multipliers at the bottom. This reading
comes from the paper's name for it, `k128_k64_k32_k16_sh8`. After generic
synthesis the whole multiplier has about 5,200 AND gates, 9,400 word-level
cells and 516 flip-flops (512 result-segment bits plus the counter).

## Interface and timing

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | starts a product with the current `a`, `b`; ignored while `busy` |
| `a`, `b` | in | 233 | operands; **must stay stable until `done`** (they are not registered) |
| `busy` | out | 1 | a product is in progress |
| `done` | out | 1 | one-cycle pulse: `c` is valid |
| `c` | out | 465 | product A·B; holds until the next `start` |

The cycle in which `start` is high is already clock 1 of the schedule. The
first partial product is computed combinationally and captured at the end of
that cycle, so no cycles are lost to setup. `done` is high in the cycle after
the clock edge that captured the last partial product. That is 3 edges after
the start edge by default (9 for SEGMENTS = 4, 27 for SEGMENTS = 8). A new
`start` may be given in the `done` cycle, which makes back-to-back products
3 cycles apart. Assertions check that `clk_cntr` stays in range and that
`a`/`b` do not change while `busy`.

## Parameters

| parameter (`ik_multiplier`) | default | meaning |
|---|---|---|
| `OP_BITS` | 233 | operand width (B-233) |
| `SEGMENTS` | 2 | segments per operand: 2, 4 or 8; clocks per product = 3^log2(SEGMENTS) |
| `SEG_BITS` | 128 | segment / partial-multiplier width; defaults to the next power of two ≥ OP_BITS/SEGMENTS |
| `LEAF_BITS` | 8 | size at which `karatsuba_pm` switches to the classical multiplier |

The paper measures three Karatsuba configurations for B-233, and all three
are supported:

| configuration | SEGMENTS | SEG_BITS | clocks |
|---|---|---|---|
| 2 segments (default) | 2 | 128 | 3 |
| 4 segments | 4 | 64 | 9 |
| 8 segments | 8 | 32 | 27 |

More segments are not supported: the product-order table is computed at
elaboration by a search whose cost grows with the cube of the number of
partial products, which is impractical at 81 products.

## What comes from the paper and what does not

From the paper:
- the three-block structure: selection, one partial multiplier, product
  accumulation, all driven by a clock counter
- the (2n−1)-bit partial product split into pr[0] and pr[1]
- zero padding of the 233-bit operands and the 465-bit result
- the 2/4/8-segment configurations and their clock counts
- the product order and the exact accumulation sequence for four segments

This design's own choices:
- the start/busy/done handshake, the reset, and the rule that operands are
  held rather than registered
- the inside of the partial multiplier, inferred from its name as explained
  above
- the product order for two and for eight segments
- the plain (unchained) accumulation for two and eight segments
- the constant-table form of the selection logic

Not included:
- the Bailey-style three-way-split variants and the one-clock recursive
  multipliers, which the paper uses only as comparisons
- modular reduction
- the elliptic-curve point multiplication that would use this multiplier

Area, clock period and energy figures from the paper are not reproduced by
this RTL.

## Verification

Each testbench checks its block against a shift-and-XOR reference written
independently of the RTL (`tb/tb_ref_pkg.sv`). Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it covers |
|---|---|
| `tb_school_mul` | all 65,536 operand pairs of the 8 x 8 classical multiplier |
| `tb_karatsuba_pm` | 128, 64, 32 and 13 bits (odd size, padded half); random and corner operands |
| `tb_op_select` | the exact subset order for 2 and 4 segments; for 8 segments, 27 distinct valid Karatsuba subsets |
| `tb_prod_accum` | full products collected from reference partial products for 2, 4 and 8 segments; hold when idle |
| `tb_step_counter` | counter sequence, 3- and 9-clock latency, ignored start while busy, restart in the done cycle |
| `tb_ik_multiplier` | default configuration end to end: 305 products, latency of exactly 3 clocks, result hold, restart in the done cycle, start while busy, operands of full degree |
| `tb_ik_configs` | 4- and 8-segment configurations: 102 products each, latency 9 and 27 clocks |

To run one with Verilator (5.x), from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/ik_pkg.sv tb/tb_ref_pkg.sv tb/tb_ik_multiplier.sv \
        --top-module tb_ik_multiplier -Wno-fatal
    ./obj_dir/Vtb_ik_multiplier

Modules are found by file name through `-Irtl -Itb`. Each testbench finishes
in under a minute, including compilation.

When linted on its own, `karatsuba_pm` draws "undriven" warnings from
Verilator. This is a limitation of its lint pass on self-instantiating
modules, not a real undriven net (see the header of `rtl/karatsuba_pm.sv`).
