# Heterogeneous Block-based Approximate Adder (HBAA) in SystemVerilog

An approximate adder gives up exactness in its low-order bits to get a
shorter carry chain and fewer gates. The HBAA splits an N-bit addition into
k = N/H disjoint H-bit sub-adders. The low sub-adders are approximate and
the high ones are exact ripple-carry adders (RCAs). The name comes from
letting each approximate sub-adder have its own configuration, which no
uniform block-based adder allows. Each approximate sub-adder is set by two
numbers:

* **L**, the number of its lowest bits whose sum is just `a | b` (one OR
  gate per bit, no carry);
* **S**, the length of the carry chain at the top of the block. The chain
  starts from a constant 0 at bit position `T = H - S`. Whatever carry
  would have crossed that point is lost.

A whole adder is written `HBAA{[L1,L2,...],[S1,S2,...]}`, least significant
sub-adder first. Sub-adders beyond the listed ones are exact. Across all
(L,S) pairs, an H-bit block has (H+1)^2 - 1 useful configurations, so the
configuration space is large. For an 8-bit adder it holds some points that
trade error for area, delay and power better than fixed-structure designs
such as GeAr, SARA, BCSA, QuAd or the lower-part-OR adders. This RTL builds
that adder for any legal configuration. The configuration-search tooling
that goes with it is not included.

The default configuration is the drawn 16-bit example with 4-bit
sub-adders, `HBAA{[3,2],[1,2]}`:

```
 bit   15..12        11..8         7..6  5..4        3       2..0
      [4-bit RCA]<-[4-bit RCA]<-[2-bit RCA][OR OR]  [HA*]   [OR OR OR]
      sum[16] = carry out          ^ cin 0           ^ carry dropped
```

## Inside one approximate sub-adder

The OR region `[0,L)` and the carry-chain region `[T,H)` may overlap, leave
a gap between them, or meet exactly. Each of the three cases has its own
structure (`hbaa_approx_block`).

**Gap: H-S > L.**
* Bits `[0,L)` are OR gates.
* Bits `[L,T)` are an exact adder that starts with a half adder: its
  carry-in is 0. The carry out of bit T-1 is thrown away. This is the
  truncation.
* Bits `[T,H)` are an S-bit RCA, also with carry-in 0.

The error of the block is the OR error in `[0,L)` plus `2^T` whenever the
middle part overflowed.

**Meet: H-S = L.** Bits `[0,L)` are OR gates and bits `[L,H)` are an S-bit
RCA with carry-in 0. Every error comes from the OR bits.

**Overlap: H-S < L.** This is the least obvious case. The block has three
segments:
1. Bits `[0,T)` are OR gates outside the chain; they pass no carry.
2. Bits `[T,L)` are also summed by OR gates, but they lie inside the carry
   chain. A carry-calculation chain (`hbaa_carry_calc`, `c' = g | p&c`
   starting from 0 at bit T) works out the carry these bits would produce.
   That carry goes into the next segment even though their own sum bits
   are approximate.
3. Bits `[L,H)` are an exact RCA whose carry-in is that computed carry.
   With L = H this segment is empty, and the carry-calculation gates only
   drive the block's carry-out.

So a block with `L=2, S=3, H=4` has:
* bit 0: OR;
* bit 1: OR, plus a 1-bit carry calculation;
* bits 2..3: an RCA fed by that carry.

For inputs `a=b=0011` it gives `0111` with carry-out 0. The exact sum is
`0110`.

**Carry-out of a block.** The carry-out is the carry of its S-bit chain.
With S = 0 there is no chain and the carry-out is 0.

## How the sub-adders are connected

* Approximate sub-adders take no carry-in.
* Only the **most significant approximate sub-adder** passes its carry-out
  on. It feeds the chain of exact H-bit RCAs above it, and the last of
  those produces `sum[N]`.
* In every lower approximate sub-adder the carry-out would be unused. Its
  top bit is therefore built as a carry-less cell (`hbaa_fa_approx`), with
  `sum = a ^ b ^ cin` and no carry logic. This is the "approximate FA"
  when the chain is longer than one bit, and the "approximate HA" (cin = 0)
  when S = 1. Each dropped carry costs `2^H` at that block's position,
  which is why the choice of which block hands on its carry matters for
  accuracy.

The result is purely combinational, with no clock and no registers. The
critical path is the longest carry path. It is the exact part's `H·(k -
NUM_APPROX)` bits plus the S-bit chain of the top approximate block.

## Module map

| file | what it is |
|---|---|
| `rtl/hbaa_pkg.sv` | configuration vector type (`cfg_vec_t`, up to `MAX_BLOCKS`=16 sub-adders), the case classifier, legality checks |
| `rtl/hbaa_full_adder.sv` | 1-bit full adder from g/p |
| `rtl/hbaa_fa_approx.sv` | carry-less MSB cell (approximate FA/HA) |
| `rtl/hbaa_rca.sv` | W-bit RCA; `DROP_COUT=1` puts the carry-less cell on top |
| `rtl/hbaa_carry_calc.sv` | carry-only chain for segment 2 of the overlap case |
| `rtl/hbaa_approx_block.sv` | one approximate sub-adder, parameters `H, L, S, COUT_USED` |
| `rtl/hbaa_adder.sv` | top: `N, H, NUM_APPROX, L_VEC, S_VEC`; ports `a[N-1:0]`, `b[N-1:0]`, `sum[N:0]` |

## Configuring it

```systemverilog
hbaa_adder #(
  .N(32), .H(4), .NUM_APPROX(4),
  .L_VEC('{0: 4, 1: 4, 2: 4, 3: 2, default: 0}),
  .S_VEC('{0: 0, 1: 0, 2: 0, 3: 3, default: 0})
) u_add (.a(a), .b(b), .sum(sum));
```

* Index 0 of the vectors is the least significant sub-adder.
* N must be a multiple of H.
* `NUM_APPROX` may be anything from 0 (an exact RCA) to N/H. With N/H, the
  top approximate block's carry-out becomes `sum[N]`.
* Each L and S must lie in 0..H.
* Illegal settings stop elaboration with `$fatal`.

## Simulating

The testbenches need only plain Verilator 5. Each one prints
`TB_RESULT checks=<n> failures=<m>`.

```
verilator --binary --timing --timescale 1ns/1ps -y rtl -y tb \
  rtl/hbaa_pkg.sv tb/hbaa_ref_pkg.sv tb/tb_hbaa_adder.sv --top-module tb_hbaa_adder
./obj_dir/Vtb_hbaa_adder
```

`tb/hbaa_ref_pkg.sv` is the reference model, and every testbench checks the
RTL bit for bit against it. The model computes each block from integer
arithmetic on bit fields and does not copy the gate structure:

* the OR part is `a|b`;
* the truncated middle part is `(a+b) mod 2^(T-L)`;
* the chain part is `a+b+carry`, with that carry computed from the
  operand fields between T and L.

| testbench | what it covers |
|---|---|
| `tb_hbaa_full_adder`, `tb_hbaa_fa_approx` | full truth tables. Checks that the carry-less cell is wrong exactly in the rows where a carry was lost: 4 of 8 (FA) and 1 of 4 (HA). |
| `tb_hbaa_rca`, `tb_hbaa_carry_calc` | exhaustive at several widths, with and without a dropped carry |
| `tb_hbaa_approx_block` | 14 configurations covering all three cases and H = 4 and 8, all inputs of each. Checks: each error lies in its case's range; the 2-bit OR error distribution is 9:3:3:1 out of 16; the worked `a=b=0011` example. |
| `tb_hbaa_adder` | the default adder. 1M random pairs plus corner cases. MED must be within 1% of the exact 17.75 and the error rate near `1-0.75^6`. Counts how often each mechanism fired: OR-bit errors, dropped carries in the low block, carry handed to the exact part, ripple through the exact part, carry-out. |
| `tb_hbaa_block_pmf` | every overlap-case block (H-S < L) for H = 4 and 8, 46 in all, over all inputs. The full error histogram must equal, count for count, the closed-form segment probabilities. |
| `tb_hbaa_design_space_8bit` | all 600 8-bit adders with 4-bit sub-adders (24 block configurations, one or two approximate sub-adders), every one of the 65536 input pairs. Checks: bit-exact results; no member is exact; for single-block adders without overlap, the exact summed error and error-free count match closed forms. The OR bits cost `2^14·(2^L-1)`, and the truncated middle part adds `2^T·2^(15-w)·(2^w-1)`, where `w = T-L`. |
| `tb_hbaa_med_tables` | 21 published configurations (16- and 32-bit), 400k random pairs each; see below |

## Accuracy against published numbers

With uniformly random inputs, the simulated mean error distance (MED, mean
of |exact - approximate|) matches the published Monte-Carlo values within
0.4% for all six 32-bit configurations with H = 4. Examples:

| configuration (32-bit, H=4) | published MED | simulated MED |
|---|---|---|
| `{[4,4,4,2],[0,0,0,2]}` | 4095.59 | 4093.87 |
| `{[4,2],[0,2]}` | 15.75 | 15.72 |
| `{[4,4,4,4,1],[0,0,0,0,3]}` | 32766.54 | 32754.93 |

At the level of a single sub-adder, the agreement is exact. In the overlap case, the error distribution of every block with H = 4 or 8 equals the closed-form prediction:
* segment-1 OR errors;
* segment-2 errors, split on whether the computed carry leaves the segment;
* no error from the exact segment.

The published table of 16-bit configurations does not state H. Three of
its rows match within 2% under a natural choice of H:
* `{[5,2],[4,4]}` with H = 8;
* `{[2,3],[0,4]}` with H = 4;
* `{[4,4],[2,3]}` with H = 4.

**The other twelve do not match** under any H or vector order tried:
* The rows read with H = 2 simulate 15-20% lower than published, for
  example 887 against 1038.74.
* `{[6],[3]}` with H = 8 gives 11.8 against a published 0.25.
* The 16-bit row `{[4,2],[0,2]}` is published as 19.26. The same two low
  blocks in a 32-bit adder are published as 15.75. Blocks above the
  approximate part are exact, so the two values should agree. The
  simulation gives 15.72 for both.

In this structure, a block whose carry-out is not used cannot affect
anything through its S. So `{[2,1,2,1,0,2],[0,0,0,1,2,1]}` and
`{[2,1,2,1,0,2],[1,1,0,1,2,1]}` are identical adders, yet they are listed
with different MEDs. These rows are reported by `tb_hbaa_med_tables` and
not checked. Either those rows were produced with a different connection
rule, or with another H, or the table has errors. Nothing in the
description settles which.

The plotted error distributions (PMFs) of four 16-bit configurations could
not be matched either. For `{[2,2],[0,0]}`, the plot as drawn puts no probability on
errors 1-3, which OR bits in positions 0-1 must produce. Those plots were
therefore not used as a check.

## What is and is not here

The adder itself is complete: all three block cases, the carry-less MSB
cells, the carry handoff and arbitrary heterogeneous configurations.

The following belong with it but are software, not hardware, so none of
them is RTL:
* the analytical model that computes the error PMF/MED of a configuration;
* the area, delay and power estimation formulas;
* the search for Pareto-optimal configurations.

Area, delay and power of the RTL depend on the synthesis library. They are
not reproduced here. The baseline adders used for comparison are not
included.

Departures and choices not fixed by the description:
* N must be a multiple of H;
* there is no adder carry-in;
* at most 16 sub-adders;
* the approximate block's own default is `L=2, S=2`;
* the example block drawn with S = 3 is simulated, not the default.

In the drawn example, two slice labels are off by one; the RTL uses the
4-bit slices `[11:8]` and `[15:12]`.
