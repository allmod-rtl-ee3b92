# ALLMod: a hybrid lookup-table / iterative modular reducer

This design computes `R = A mod M`. `A` is a 2n-bit operand and `M` is a fixed
n-bit modulus. The default size is n = 128: 256-bit operands are reduced to
128-bit residues. Reductions like this one sit at the core of RSA, ECC,
homomorphic encryption and zero-knowledge-proof hardware.

Two textbook approaches sit at the extremes:

* **Lookup-table reduction.** The high half of `A` is cut into k-bit segments.
  For each segment, a table gives its contribution `a * 2^pos mod M`, and an
  adder sums the results. Latency is low, but the design needs many large
  tables (block RAMs) and wide adders.
* **Iterative reduction.** Shifted copies of `M` are conditionally subtracted,
  one per cycle. The hardware is tiny, but there is one cycle per bit.

ALLMod splits `A` at bit `n+m` and gives each part to one of the two methods:

```
 A = [ high n-m bits | low n+m bits ]
         |                  |
   lookup workload    iterative workload
   (d = ceil((n-m)/k) tables, then serial sum)   (m shift/subtract steps)
```

`m` is chosen so that both workloads take about the same number of cycles:
`(n-m)/k + 1 = m`, so `m = (n+k)/(k+1)`. For n = 128 and k = 8 this gives
m = 15. The split is then 113:143 bits, and d = ceil(113/8) = 15 tables are
needed instead of 16. The partial results are added and brought below `M` by
subtract-and-select. Each lookup sum uses one serial adder instead of an adder
tree. A few copies of that adder, and of the iterative subtractor, run side by
side as **lanes**, which sustains one result every two cycles.

## Block structure

| module | part | what it does |
|---|---|---|
| `allmod_lut_bank` | 1, parallel lookup | d tables, each 2^k x n bits, read in parallel in one cycle. The last table has 2^log2(d) extra rows for the second-round lookup, and a second read port for it. |
| `allmod_acc_lane` | 2, serial accumulation | Holds the d lookup results. Adds one per cycle into an (n+log2 d)-bit register. |
| `allmod_iter_sub` | 3, serial subtraction | Reduces the low n+m bits with m conditional subtractions of `M<<m ... M<<1`. |
| `allmod_fuse` | 4, result fusion | Adds the low n bits of the sum, the second-round lookup and the iterative remainder. |
| `allmod_adjust` | 5, adjustment | Forms `x-M` and `x-2M` and picks one by their signs. There are two instances in a row. |
| `allmod_sched` | lane control | Hands operands to lanes round-robin, stalls input, and times each lane's load and read. |
| `allmod_top` | top | Wires the above: one table bank, `LANES` accumulator/subtractor pairs, fusion, two adjustment passes. |
| `allmod_pkg` | constants | Default sizes and the formulas for d, log2 d, the table address width and the latency. |

## Why the result is exactly A mod M (the range argument)

This is the least obvious part of the design. Each stage relies on a bound
from the stage before it, and all of them rely on one rule: **the modulus must
have its top bit set** (`2^(n-1) <= M < 2^n`). An assertion in `allmod_top`
checks this rule.

Write `A = H * 2^(n+m) + L`, with H of n-m bits and L of n+m bits.

1. **Lookup workload.** Segment i of H is `h_i`, the k bits starting at bit
   k*i of H. Table i holds `T_i[a] = (a * 2^(n+m+k*i)) mod M`. Each entry is
   below M, so the sum `S` of the d looked-up entries is below `d * 2^n` and
   fits in n + log2 d bits. Also, `S ≡ H * 2^(n+m)` (mod M).
2. **Second round.** Split `S = s_hi * 2^n + s_lo`. Then `s_hi < d` fits the
   log2 d bits. The extra rows of the last table hold
   `T2[h] = (h * 2^n) mod M`. So `s_lo + T2[s_hi] ≡ S` (mod M), with
   `s_lo < 2^n <= 2M` and `T2 < M`.
3. **Iterative workload.** `L < 2^(n+m) <= 2^(m+1) * M`. Take the step with
   `M<<j` for j = m, m-1, ..., 1: if the remainder is not smaller than the
   shifted modulus, subtract it. Each step halves the bound, so after m
   steps the remainder `I` is below `2M` and is n+1 bits wide.
4. **Fusion.** `F = s_lo + T2 + I` is below 5M. It is also at most
   `2^(n+2) - 3`, so it fits in n+2 bits.
5. **Adjustment.** One pass outputs `x-2M` if that is non-negative, else
   `x-M` if that is non-negative, else `x`. This maps [0, 5M) into [0, 3M).
   A second pass maps [0, 3M) into [0, M). The result is `A mod M`.

A single adjustment pass, as in the classic lookup method, is not enough here.
The iterative remainder adds up to 2M on top of the lookup path's bound of
about 3M.

## Pipeline timing

For one operand accepted in cycle 0 (d = 15 by default):

| cycle | hardware | action |
|---|---|---|
| 0 | table bank, subtractor lane | First-round read of all d tables. The lane's subtractor takes the low n+m bits and does its first step. |
| 1 | accumulator lane | Captures the d results. The accumulator is loaded with the first one. |
| 2 .. d | accumulator lane | Adds one result per cycle. The subtractor finishes its m-th step in cycle m-1. |
| d+1 | lane read | The sum's top log2 d bits address the second-round rows. The low n bits of the sum and the remainder are registered. |
| d+2 | `allmod_fuse` | Three-input add. |
| d+3, d+4 | `allmod_adjust` x2 | The two adjustment passes. |
| d+5 | output | `out_valid`, `out_r`. |

The latency is **d + 5 cycles**: 20 at n = 128, 37 at n = 256 and 78 at n = 512.
These are the latencies the template is reported to have at those sizes. The
iterative work fits before the lane is read as long as `m <= d+1`. The
balanced split meets this by construction. At n = 512 (k = 6, m = 74,
d = 73) it is met with no slack. To make that case fit, the subtractor takes
its first step in the acceptance cycle itself. A larger m is allowed too, but
it lengthens the lane (see the design-space section below).

## Lanes and throughput

An accumulator and a subtractor are each tied to one operand for about d
cycles. `LANES` copies of each are therefore provided. Lane l pairs
accumulator l with subtractor l.

* A lane is busy from acceptance until it is read in cycle d+1. A new operand
  may be accepted into it in that same cycle.
* `allmod_sched` gives operands to lanes strictly round-robin. `in_ready`
  drops while the next lane is still busy, which stalls the source.
* Throughput is `LANES / (d+1)` per cycle, at most one per cycle. The default
  is 8 lanes for d = 15, which gives 8 per 16 cycles = 0.5 per cycle.
  Under continuous input the pattern is 8 back-to-back acceptances followed
  by 8 stalled cycles.
* For a lower target rate TP, use `LANES = ceil((d+1) * TP)`.
* All operations take the same time, so results leave in acceptance order at
  a fixed latency. There is no output back-pressure.

The second-round lookup has its own read port on the last table, so it never
competes with first-round lookups. The table bank can start one operand per
cycle. The rate limit is the lane count.

## Tables

The contents depend only on `M`. They are computed off chip and written
through the `tbl_*` port before use. `in_ready` stays low while `tbl_we` is
high.

* Table `i` (0 <= i < d), row `a` (0 <= a < 2^k):
  `(a * 2^(n+m+k*i)) mod M`. The top segment may be narrower than k bits. It
  is zero-extended, so only its low rows are ever read.
* Table `d-1`, row `2^k + h` (0 <= h < 2^log2 d): `(h * 2^n) mod M`.

The table address port is `tbl_aw(k, log2 d) = clog2(2^k + 2^log2 d)` bits wide.
At n = 128 each table is 256 x 128 bits, and the last one is 272 x 128 bits.
Both fit a 36 Kb block RAM. Reads are synchronous, with one cycle of latency.

## Interface of `allmod_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | Clock and synchronous active-low reset. Reset clears the control state only. |
| `modulus` | in | N | `M`. Its top bit must be set. Hold it constant while operands are in flight. |
| `tbl_we`, `tbl_sel`, `tbl_addr`, `tbl_data` | in | 1, clog2 D, TAW, N | Table write: table number, row, value. |
| `in_valid`, `in_ready`, `in_a` | in, out, in | 1, 1, 2N | Operand handshake. The operand is accepted when both valid and ready are high. |
| `out_valid`, `out_r` | out | 1, N | Result, valid for one cycle, D+5 cycles after acceptance. |

Parameters: `N` = 128, `K` = 8, `MS` = 15 (the split m), `LANES` = 8,
`TREE_W` = 0 (no adder tree). `D`, `LOG2D`, `SELW` and `TAW` are derived from
these. Do not override them.

## Leaving the balanced point: adder tree and longer iteration

The balanced split is one point in a larger design space. Two parameters
leave that point:

* **Latency-driven: `TREE_W` = x > 1.** Each accumulator lane gets an x-input
  adder tree. The tree sums the first x lookup results in the load cycle, and
  the serial adder handles only the remaining d-x. The lookup side then takes
  `acc_cycles = d-x+1` cycles. The tree is combinational within one cycle,
  which costs clock period, not cycles. Shifting work to the lookup side (a
  smaller m) and adding a tree shortens the whole operation.
* **Area-driven: `MS` > d+1.** More of `A` goes to the iterative side. This
  means fewer tables, but each lane is held for m cycles.

In both cases a lane is read in cycle `RD = max(acc_cycles + 1, m)`. The
latency is `RD + 4`. `LANES` operands are accepted per `RD` cycles, so use
`LANES = ceil(RD * TP)` for a target rate TP. The package functions
`acc_cycles`, `read_cycle` and `latency` hold these formulas.

Two examples, both simulated:

| point | m | x | d | RD | latency | lanes |
|---|---|---|---|---|---|---|
| template | 15 | 0 | 15 | 16 | 20 | 8 |
| faster | 12 | 4 | 15 | 13 | 17 | 7 |
| smaller | 24 | 0 | 13 | 24 | 28 | 12 |

The search that picks such points from latency and area limits is a software
step. It is not part of the RTL.

## Sizes beyond the default

The RTL is parameterized. These split-table rows are the balanced template at
larger n:

| n | k | m | d | lanes for 0.5/cycle | latency |
|---|---|---|---|---|---|
| 128 | 8 | 15 | 15 | 8 | 20 |
| 256 | 7 | 32 | 32 | 17 (16 give 16/33) | 37 |
| 512 | 6 | 74 | 73 | 37 | 78 |
| 1024 | 5 | 171 | 171 | 86 | 176 |
| 2048 | 4 | 410 | 410 | 206 | 415 |
| 4096 | 3 | 1024 | 1024 | 513 | 1029 |
| 8192 | 2 | 2731 | 2731 | 1366 | 2736 |

The rows for n = 128 to 1024 are simulated at the sizes shown. The n = 2048
row is simulated with 8 lanes instead of 206: every result and latency is
checked, but the rate is 8 operations per 411 cycles. The lanes are identical
copies that only set the rate, and 206 of them, each buffering 410 x 2048
bits, would make the run very slow. The n = 4096 and 8192 rows, with 1024 and
2731 tables, are not simulated.

Cost caveat: each accumulator lane keeps all d lookup results of its operand,
d x n bits. The default build has 8 x 15 x 128 bits. This buffer grows as
d x n x lanes, and at the largest sizes it would dwarf the tables. Reading the
tables in a skewed order (segment i in cycle i) would remove it. That change
is not made here.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

* `tb_allmod_top`: the full default configuration, end to end.
  * For four moduli (2^127+1, 2^128-1 and two random ones), it computes every
    table row with wide-integer `%` and writes it through the table port.
  * It sends edge operands (0, all ones, M, M-1, 7M, only-high, only-low) and
    random operands, both continuously and with random gaps.
  * Every result is compared with `A % M`.
  * It checks that every latency is exactly 20 cycles, and that 64
    operations are accepted in any 128-cycle window of continuous input.
  * It counts input stalls, issue blocked by a table write, non-zero
    second-round addresses, and each adjustment choice of both passes. It
    fails if any of them never occurs.
* `tb_allmod_top_sizes`: the same procedure through `allmod_top_e2e`, for
  eight configurations side by side:
  * n = 256 (16 lanes);
  * n = 512 (37 lanes, the m = d+1 case);
  * n = 1024 (86 lanes);
  * n = 2048 (8 lanes, see above);
  * the two 128-bit design-space points above;
  * the default 128-bit design with 1 and 4 lanes (1/16 and 1/4 per cycle).
  Here the reference reduces 32 bits at a time (Horner's rule in base 2^32),
  so no reference operation is wider than n+32 bits.
* Unit tests:
  * table bank: hashed contents, both ports in the same cycle, output hold;
  * accumulator: sum and exact latency, with and without a 4-input tree;
  * subtractor: congruence, the below-2M bound and an exact m-cycle latency,
    including `M = 2^127` and all-ones inputs;
  * fusion;
  * adjustment: every selection, and the [0,5M) to [0,3M) and [0,3M) to
    [0,M) contracts;
  * scheduler: checked against a cycle-level reference model.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/allmod_pkg.sv \
    tb/tb_allmod_top.sv --top-module tb_allmod_top -o sim && ./obj_dir/sim
```

Verilator is a two-state simulator. The testbenches initialise everything they
read, and the datapath registers are written before they are read.

## Where this RTL departs from, or adds to, the published description

* **Adjustment.** The description gives two subtractors (M and 2M) and a
  multiplexer. Here that circuit is used twice in a row. One pass cannot
  cover the fused sum's range (see above). The reported latency of d+5
  leaves room for both passes.
* **Iterative remainder.** The subtractor stops at `M<<1`, so its remainder
  is n+1 bits wide. The published figure labels it n bits. The extra factor
  of two is absorbed by the adjustment. The published text gives the number
  of steps once as m-1 and elsewhere as m. The design takes m steps.
  With m-1 steps the remainder could reach 4M, more than two adjustment
  passes can remove.
* **Second-round table.** It is stored in spare rows of the last table and
  read through a second port. The description only says that the high sum
  bits go back to the tables. Because of the second port, the table reads do
  not limit the rate to 0.5 per cycle. The lanes set the rate.
* **No resource sharing between stages.** Fusion and adjustment have their
  own adder and subtractors. The accumulator and iterative subtractors are
  not reused for them, although the description notes that they could be.
  Reuse would lengthen each lane's busy time beyond what the given lane
  counts allow.
* **Lane buffer and busy time.** A lane holds the d results it sums and is
  busy for d+1 cycles. At n = 256, the 16 lanes (d x TP) therefore give
  16/33 per cycle instead of 0.5. A 17th lane restores the full rate.
* **Handshake, reset, table port and scheduler.** These are this design's
  own. The published description gives none of them.
* **Modulus range.** The top bit of `M` must be set. The classic final step
  "R1, R1-M or R1-2M" already assumes this.
* **Adder-tree timing.** The published model counts d-x cycles for the
  serial part with an x-input tree working alongside, plus log2 x for the
  tree. Here the tree adds in the load cycle, so the lane takes d-x+1
  cycles. This is the same counting as the template's d cycles for d
  results.
* **Paired lanes.** Each lane holds one accumulator and one subtractor. The
  published sizing counts d x TP adders and m x TP subtractors separately.
  Here both counts are `LANES`.
* **Not built.** The design-space search and the table precomputation are
  software steps and are left out.
