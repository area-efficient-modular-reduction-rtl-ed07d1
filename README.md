# LUT-based modular reduction for a fixed modulus

The reducer computes `c mod q` for a 2n-bit number `c` (typically the product of two
elements of Z_q) when the modulus `q` is fixed at design time. It uses no multipliers. It
only needs small look-up tables, one multi-operand adder and a subtraction that chooses
between a few multiples of `q`. Every adder and comparator is about n bits wide, however
wide the input. The same structure serves any modulus: only the constants in the tables
change. Cost does not depend on `q` having a sparse binary form, as the shift-and-add
versions of Barrett reduction require. The default configuration is the Kyber modulus
`q = 3329` (n = 12, 24-bit input). A Dilithium configuration (`q = 8380417`, n = 23,
46-bit input) is given as a parameter set.

This RTL implements the scheme described by Müller, Meier and Wildfeuer in "Area Efficient
Modular Reduction in Hardware for Arbitrary Static Moduli" (FHNW). It was written from that
description and is not the authors' code.

## The idea: give each bit a weight that is already reduced

Write `c = Σ c_i·2^i`. Reducing each term first does not change the result mod q, and for a
fixed bit position `2^i mod q` is a constant. So

    c ≡ Σ_{i<n-1} c_i·2^i  +  Σ_{i≥n-1} c_i·(2^i mod q)   (mod q)

The low bits are already below `q`, so they stay a plain binary number, the *bypass term*.
Every high bit contributes a constant below `q` or nothing. The right-hand side is
therefore a short sum of numbers below `q`. That sum is only a small multiple of `q`, and
one final subtraction of the correct multiple `i·q` finishes the job.

A sum with one term per high bit would still be long (n terms). So the high bits are
**grouped into tables of k inputs**. For each of its 2^k input patterns, a table stores the
sum of its bits' weights, *reduced mod q again*. Each table output is then one element of
Z_q. This cuts both the number of adder operands and the number of final cases by about
a factor of k. The reduction inside a table costs nothing in hardware, because it is done
when the contents are computed.

### Worked example (q = 13, n = 4, 8-bit input)

The bit weights `2^i mod 13` for i = 4..7 are 3, 6, 12, 11. Grouping bits {4,5} and
{6,7} into two 2-input tables gives:

| address (low bit first) | f1 (bits 4,5) | f2 (bits 6,7) |
|---|---|---|
| 00 | 0 | 0 |
| 10 | 3 | 12 |
| 01 | 6 | 11 |
| 11 | 9 | (12+11) mod 13 = 10 |

Take `c = 210 = 1101_0010b`. The bypass term is `0010b = 2`, table f1 sees `(1,0)` and gives
3, and table f2 sees `(1,1)` and gives 10. So `ĉ = 15`, which lies in `[q, 2q)`, and
`15 − 13 = 2 = 210 mod 13`. The largest possible sum is `15 + 9 + 12 = 36 < 3q`, so only the
multiples 0, q and 2q can occur. Without grouping (four 1-input tables) the same input
gives `ĉ = 2 + 3 + 12 + 11 = 28`, and the largest sum is 47, which needs four cases
(0..3q). Both versions are instances in `tb/tb_lut_mod_reduce.sv`.

## Hardware structure

```
c_in[W_IN-1:0] ──┬─ bypass bits (in no mask) ───────────────┐
                 ├─ bits of TABLE_MASK[0] → mod_lut ─ f0 ───┤
                 ├─ ...                                     ├→ lut_sum → ĉ → final_sub → c_out
                 └─ bits of TABLE_MASK[NT-1] → mod_lut ─ f ─┘       (ĉ − i·q, i = 0..IMAX)
```

| module | role |
|---|---|
| `modred_pkg` | elaboration-time functions: `2^i mod q`, table entries, largest table entry, bit widths |
| `mod_lut` | one k-input table. Its 2^k entries are constants computed at elaboration; the hardware is a read-only array indexed by the gathered bits |
| `lut_sum` | adds the bypass term and the NT table outputs into ĉ |
| `final_sub` | compares ĉ in parallel against `i·q` for i = 1..IMAX. The number of true comparisons is i, and the block outputs `ĉ − i·q`. The delay is the same for every input (constant time) |
| `lut_mod_reduce` | top: gathers each table's bits, sizes everything, and adds optional pipeline registers |

### How the sizes follow from q and the grouping

Everything that depends on the modulus is computed when the design is elaborated:

* `CHAT_MAX` = (value of all bypass bits set) + Σ over the tables of the table's largest entry.
* `SW` = bits needed for `CHAT_MAX`: the width of the adder and of the comparators.
* `IMAX` = ⌊CHAT_MAX / q⌋: the number of multiples of `q` the final stage must consider.
  The final stage has `IMAX + 1` cases.

No table entry exceeds `q − 1`, so `CHAT_MAX` is roughly `(bypass) + NT·q`. The real
maxima are usually a little below `q`, and that margin decides whether a case can be
saved.

### Choosing the grouping: `TABLE_MASK`

Each table is described by a bit mask over the input. Address bit j of a table is the j-th
set bit of its mask, counted from the LSB. Bits that are in no mask form the bypass term.
They must lie below bit n so that the bypass term fits in n bits, and elaboration stops
with an error otherwise. The masks express two ways to lower `CHAT_MAX`:

1. **Moving bit n−1 into a table.** If bit n−1 bypasses, the bypass term can reach
   `2^n − 1`, which is above `q`. In a table it contributes at most `q − 1`, reduced. Both
   configurations below send the top n+1 bits through tables and bypass only bits
   0..n−2.
2. **Regrouping bits across tables.** Which bits share a table changes each table's largest
   entry. When `CHAT_MAX / q` lies just above an integer, another grouping can bring it
   below and remove a case from the final stage.

| configuration | tables | CHAT_MAX | /q | cases |
|---|---|---|---|---|
| Kyber, q = 3329 (default) | bits 11..17 (7 inputs), 18..23 (6 inputs) | 2047 + 3321 + 3291 = 8659 | 2.60 | 3 |
| Kyber, 6-input table below the 7-input one | bits 11..16, 17..23 | 8678 | 2.61 | 3 |
| Dilithium, natural order | bits 22..27, 28..33, 34..39, 40..45 | 25 934 593 | 3.09 | 4 |
| Dilithium, regrouped | {22,33,35,36,39,41} {23,25,31,34,38,40} {29,32,42,43,44,45} {24,26,27,28,30,37} | 23 603 709 | 2.82 | 3 |

The Dilithium natural grouping is exactly the case where regrouping pays off. The
regrouped masks above came from a random search over partitions of the 24 high bits into
four sets of six, stopping at the first whose maximum falls below 3q. Masks for both are
in `tb/tb_workload_dilithium.sv`:

```systemverilog
lut_mod_reduce #(.Q(64'd8380417), .NT(4),
  .TABLE_MASK({64'h205d000000, 64'h3c0120000000, 64'h14482800000, 64'h29a00400000}))
  u_dilithium (...);
```

`N` (= ⌈log2 q⌉) and `W_IN` (= 2N) follow from `Q` unless overridden. The input may be
up to 64 bits wide (`modred_pkg::MAX_W`). A table's area grows as 2^k words of n bits, so k
trades table storage against adder operands and final cases. With k = 1 for every table
you get the ungrouped basic form.

## Interface and timing

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock; unused when `PIPE = 0` |
| `rst_n` | in | 1 | synchronous, active-low; clears only the valid bits |
| `in_valid` | in | 1 | `c_in` carries a word |
| `c_in` | in | `W_IN` | number to reduce; any value below 2^W_IN |
| `out_valid` | out | 1 | `c_out` carries a result |
| `c_out` | out | `N` | `c_in mod Q` |

`PIPE` sets the number of register stages:

* `0` (default): fully combinational, and `out_valid = in_valid`.
* `1`: a register on ĉ, between the adder and the final subtraction.
* `2`: additionally, registers on the table outputs and the bypass term.

Every setting accepts a new word each cycle and has a latency of exactly `PIPE` cycles.
There is no back-pressure. Data registers are not reset. Neither the register placement
nor the valid/reset convention comes from the source description, which says only that the
tables and the summation lend themselves to pipelining.

## Verification

Each testbench checks against values it computes independently with 64-bit integer `%`,
and ends with a `TB_RESULT checks=… failures=…` line.

| testbench | what it covers |
|---|---|
| `tb_mod_lut` | the q = 13 tables against the hand-typed values above; every entry of both Kyber tables and of a Dilithium table with non-adjacent bits |
| `tb_lut_sum` | random and all-ones operands, Kyber and Dilithium shapes |
| `tb_final_sub` | every sum that can occur for Kyber (0..8659), and 0..38 for q = 13; the chosen multiple is checked too |
| `tb_lut_mod_reduce` | both q = 13 versions (grouped and ungrouped), exhaustively, including the intermediate sums 15 and 28 for 210. Kyber with `PIPE` = 0, 1 and 2 on one random stream with bubbles and a reset; latency and `out_valid` are checked per cycle. Every subtraction case of every instance must occur |
| `tb_full_kyber` | default parameters: all 2^24 inputs; the largest sum must be exactly 8659 |
| `tb_workload_dilithium` | both Dilithium groupings. It builds the input that reaches each `CHAT_MAX`, checks the sum and the case chosen, then reduces 300 000 random products and words |

To run one with Verilator:

```sh
verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_full_kyber \
  rtl/modred_pkg.sv rtl/mod_lut.sv rtl/lut_sum.sv rtl/final_sub.sv rtl/lut_mod_reduce.sv \
  tb/tb_full_kyber.sv
./obj_dir/Vtb_full_kyber
```

The exhaustive Kyber run takes a few seconds.

## Where this RTL departs from, or adds to, the published description

* **Bypass width.** The block diagram draws bits `[0:n-1]` bypassing. The Kyber and
  Dilithium configurations route the n+1 top bits through tables, which leaves
  `[0:n-2]` to bypass, and that is what the defaults do. The diagram's form is still
  available through the masks: the q = 13 example uses it.
* **Number of final cases.** The diagram labels the final stage with `i ∈ {0..N/k}`. Here
  the range is computed from the actual largest sum, which can be smaller (Dilithium
  regrouped: 0..2 instead of 0..4).
* **Adder and sum width.** The operands are n bits, but the sum needs `SW` bits: 14 for
  Kyber, 26 for Dilithium. The adder is a plain chained sum, and its structure is left to
  synthesis.
* **Case selection.** The final stage is a thermometer of parallel comparators. Only the
  existence of "compare logic" choosing the multiple is given.
* **Grouping.** Which Kyber table gets 7 inputs, and the Dilithium grouping, are not
  published. The choices here, and the search behind the regrouped masks, are this
  design's own.
* **Pipelining, valid and reset** are additions, as described above.
* **Not included:** the Barrett reducers that the published work compares against, and
  any FPGA-specific mapping of tables onto 6-input LUTs. The tables here are
  technology-neutral constant arrays.
