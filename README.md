# Pruned metric sorters for successive cancellation list decoding

A successive cancellation list (SCL) decoder for polar codes follows L
candidate decoding paths at once. At every information bit each path forks
into two, and the decoder must keep the L best of the resulting 2L paths. The
unit that picks them, the *metric sorter*, sits on the critical path of most
SCL decoder chips, so its delay sets the clock rate.

This RTL implements the two sorting networks proposed in *On Metric Sorting
for Successive Cancellation List Decoding of Polar Codes*
(Balatsoukas-Stimming, Bastani Parizi and Burg): a **pruned bitonic sorter** and a
**simplified bubble sorter**. Both exploit one fact. When path metrics are
kept in the LLR-based form, the 2L candidates are already half ordered. Half
of the comparisons a general sorter would make therefore have known outcomes
and can be removed. Around the networks sits a small metric-sorter unit with
registers, a valid/ready input and a second mode. That mode sorts an
arbitrary list by reusing the same network several times.

## The candidate list

Let the surviving metrics from the previous bit be sorted,
`mu_0 <= mu_1 <= ... <= mu_{L-1}` (smaller is better). Path `l` forks into two
candidates. One takes the more likely bit and keeps its metric. The other
takes the less likely bit and pays a penalty `a_l >= 0`:

    m[2l]   = mu_l
    m[2l+1] = mu_l + a_l

So the list `m[0..2L-1]` always satisfies two rules:

* **R1** `m[2l] <= m[2l+2]`: the even entries are the old sorted list.
* **R2** `m[2l] <= m[2l+1]`: a penalty never lowers a metric.

Together they mean that every even entry is known to be no larger than
every entry after it. Two consequences are used again and again:

* `m[0]` is the global minimum.
* `m[2L-1]` is never needed. At least L entries (all the even ones) are no
  larger than it.

`pm_expand` builds this list. In hardware the sum `mu_l + a_l` can overflow
Q bits. Here it saturates at `2^Q - 1`, which keeps R2 true. Each candidate
carries a tag, its index `2l + b`. From a survivor's tag the decoder reads the
parent path (`tag >> 1`) and the bit (`tag & 1`).

Metrics are unsigned and Q = 8 bits wide. The reference list size is L = 32.

## Compare-and-select unit

Both networks are made only of `cas_unit`s. A `cas_unit` is one comparator
and a 2-to-2 multiplexer. It puts the smaller metric on the lower-numbered
wire. The swap happens only when the upper wire's metric is strictly smaller,
so equal metrics keep their order. Tags ride along and are never compared.

## Pruned bitonic network (`pruned_bitonic_sorter`)

The starting point is a 2L-input bitonic sorter in its "mirrored" form, in
which every CAS sends the smaller value to the lower wire. It has
`log L + 1` super-stages. Super-stage `s` works on blocks of `2^s` wires and has
`s` stages:

1. A mirror stage: wire `i` of a block is compared with wire
   `blocksize - 1 - i` of the same block.
2. Then half-cleaner stages of distance `2^(s-2), ..., 2, 1`: wire `i` is
   compared with wire `i XOR d`.

Four pruning rules follow from R1/R2 and from needing only the first L
outputs:

| removed | why |
|---|---|
| all of super-stage 1 | it compares `(2l, 2l+1)`, which R2 already orders |
| every CAS touching wire 0 | `m[0]` is the global minimum and never moves |
| every CAS touching wire 2L-1 | `m[2L-1]` is never among the L smallest. Treating it as +inf turns each of these CAS into a no-op. |
| the upper-half CAS of the last `log L` stages | after the last mirror stage, wires `0..L-1` hold the L smallest values, so the upper half only orders values that are thrown away |

The result has `(log L + 1)(log L + 2)/2 - 1` stages and
`(L/2 - 1) log L (log L + 2) + 1` CAS units. For L = 4 the kept CAS units,
stage by stage, are:

    stage 1 (super-stage 2, mirror):     1-2  5-6
    stage 2 (super-stage 2, distance 1): 2-3  4-5
    stage 3 (super-stage 3, mirror):     1-6  2-5  3-4
    stage 4 (super-stage 3, distance 2): 1-3
    stage 5 (super-stage 3, distance 1): 2-3

The functions `pbt_partner` and `pbt_kept` in `sorter_pkg` state these rules.
The module turns them into hardware with `generate` loops. A wire with no
kept CAS in a stage passes straight through. The stage and CAS counts are
checked against the formulas above for every L from 2 to 32. The L = 4
network is checked against the table above.

## Simplified bubble network (`simplified_bubble_sorter`)

Bubble sort is usually a poor choice, but on a list that obeys R1/R2 it has
three useful properties. They can be proved by induction over the rounds:

* In one round, no two neighbouring positions both need a swap.
* Whether a position swaps can be decided from the values at the *start* of
  the round.
* The positions that swap move up by exactly one from round to round.

So one round becomes a single stage of parallel CAS units that do not
overlap. In the first useful round the CAS units sit on wire pairs
`(1,2), (3,4), ...`. In the next round they sit on `(2,3), (4,5), ...`, and
the two patterns keep alternating.

The first round of bubble sort is not needed, because `m[0]` is already the
minimum. Stage `t` never touches wires below `t`. After stage `L-1` the first
L wires are final. Also, a value at wire `2L-t` or higher in stage `t` cannot
reach the first half in the stages that remain, so those CAS units are
dropped. Stage `t` therefore keeps CAS `(i, i+1)` when all of these hold:

* `i >= t`
* `i` has the same parity as `t`
* `i + 1 <= 2L-1-t`

That gives a triangle of `L-1` stages and `L(L-1)/2` CAS units. For 2L = 8 the
network is `{1-2, 3-4, 5-6}`, `{2-3, 4-5}`, `{3-4}`. `sorter_pkg::bub_lower`
holds the rule.

## Which network to use

| L | pruned bitonic: CAS / stages | simplified bubble: CAS / stages |
|---|---|---|
| 2 | 1 / 2 | 1 / 1 |
| 4 | 9 / 5 | 6 / 3 |
| 8 | 46 / 9 | 28 / 7 |
| 16 | 169 / 14 | 120 / 15 |
| 32 | 526 / 20 | 496 / 31 |

At L = 2 both networks reduce to one CAS. The bubble network is shallower up
to L = 8. From L = 16 on, the bitonic network is shallower, and its depth
grows only as `log^2 L`. In the published 90 nm synthesis results, the pruned
bitonic network was both the fastest and the smallest sorter at L = 32. At
smaller L the bubble network was the smallest.

`metric_sorter` picks its network with the parameter `ARCH`. The default,
`sorter_pkg::default_arch(L)`, is `PRUNED_BITONIC` for L >= 32 and
`SIMPLIFIED_BUBBLE` below that.

Every stage of either network is one CAS deep, so pipeline registers could
go between any two stages. The networks here are purely combinational.

## Sorting an arbitrary list with the same network (general mode)

Now and then the decoder needs to sort L metrics that carry no known order.
The pruned networks cannot do that directly, but they can find a minimum. The
list

    (-inf, a_0, -inf, a_1, ..., -inf, a_{L-2}, a_{L-1}, +inf)

obeys R1 and R2 for any values `a`. Its L smallest entries are L-1 copies of
-inf followed by `min(a)`, so output `L-1` of the sorter is the minimum.
`general_sort_ctrl` runs one such pass per clock cycle:

1. It takes sorter output `L-1` as the next value of the result.
2. It finds the slot that held that value and *retires* it by setting the
   slot to +inf. The list still obeys both rules.
3. After `L-1` passes one live slot remains. It holds the largest value.

So L values are sorted in L-1 cycles on the hardware that is already there.

The codes -inf = 0 and +inf = `2^Q - 1` are this design's choice. Real values
may equal them, which needs some care:

* The sorter's tags are the list positions. The slot to retire is the first
  sorter output whose tag is a live `a` slot. If some `a = 0`, several
  entries tie with -inf, but every `a` slot among the L outputs then carries
  the minimum, so any of them is correct.
* If no live slot reaches the outputs, every remaining value equals +inf.
  The controller then retires the lowest-numbered live slot.

The result tags are the input indices `0..L-1` of the sorted values.

## The `metric_sorter` unit

    clk, rst_n                       clock, asynchronous active-low reset
    in_valid / in_ready              request handshake (taken when both are high at a rising edge)
    in_general                       0: list update, 1: general sort
    in_mu[L], in_a[L]                list update: sorted metrics and penalties;
                                     general sort: values in in_a, in_mu ignored
    out_valid, out_general           one-cycle result strobe and its mode
    out_m[L], out_t[L]               sorted metrics; candidate index (list) or input index (general)
    out_sat                          a list-update candidate saturated at 2^Q-1

Datapath: input registers, `pm_expand`, the sorter and the list-result
register. In general mode `general_sort_ctrl` drives the sorter input instead
of `pm_expand`.

Timing, counting from the rising edge that takes a request:

* **List update:** the result is valid in the cycle after the next edge. A
  new request can be taken at every edge, so the rate is one list update per
  cycle, with the sorter as the only logic between the two register ranks.
* **General sort:** `in_ready` is low for L-1 cycles, one per pass. The
  result appears for one cycle starting L-1 edges after the request was
  taken.
* There is no output back-pressure.

Three assertions check the rules of use:

* A list update must bring a sorted `in_mu` (rule R1); this is checked when
  the request is taken.
* A list update never meets a running general sort at the sorter.
* Only one result is presented at a time.

## Where this RTL departs from or adds to the published design

* **Taken from the published description:** the candidate list and its two
  ordering rules; the compare-and-select unit; both pruned networks, their
  stage structure and pruning rules; Q = 8; list sizes 2 to 32; the use of
  the sorter L-1 times to sort an arbitrary list.
* **The drawings:** they show the networks for L = 4 only. The general
  wiring (mirror stage, then half-cleaners; alternating odd/even pairs) is
  read from them and generalised. The CAS counts agree with the published
  closed forms at every size.
* **Added in this design:** tags on every metric; saturation of
  `mu + a`; unsigned metrics with 0 and `2^Q-1` used as the infinities; the
  rule for retiring a found minimum and its tie handling; the registers,
  handshake, reset, output format and the `ARCH` default rule of
  `metric_sorter`.
* **Not built:**
  * pipeline registers inside the networks;
  * the rest of the list decoder;
  * the sorters used only for comparison: full and pruned radix-2L, full
    bitonic, and full bubble.
* Area and clock rate depend on the cell library and are not reproduced.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.

| testbench | what it runs |
|---|---|
| `tb_cas_unit` | all equal and adjacent 8-bit pairs plus 4000 random pairs. Checks values, tags and no swap on ties. |
| `tb_pm_expand` | L = 32. Checks sums, saturation and its flag, tags, and that R1/R2 hold on the output. |
| `tb_pruned_bitonic_sorter` | closed-form counts for L = 2..32; the L = 4 network CAS by CAS; random lists at L = 32, 16, 4, 2 |
| `tb_simplified_bubble_sorter` | closed-form counts; the 2L = 8 network CAS by CAS; random lists at L = 32, 8, 4, 2 |
| `tb_general_sort_ctrl` | controller closed around a real sorter (L = 8 bubble, L = 4 bitonic). Checks results, tags, busy length and done latency. |
| `tb_metric_sorter` | the whole unit at L = 8 (both networks), L = 4 and L = 2, driven by `ms_agent` |
| `tb_metric_sorter_full` | the whole unit at its defaults (L = 32, pruned bitonic) through 400 mixed requests |
| `tb_metric_sorter_padded` | list sizes 2..16 run on the default 32-path unit, with unused paths padded by metric `2^Q-1` |
| `tb_sorter_sizes` | both networks at L = 2, 4, 8, 16, 32 with random lists and counts |

The random lists are checked against a full reference sort. Their ranges are
chosen to force ties, saturated sums and values equal to the two infinity
codes. `ms_agent` checks every result, including latency, and counts each
mechanism. A mechanism that never occurred counts as a failure. The
mechanisms are:

* list updates;
* general sorts;
* back-to-back list updates;
* stalls on `in_ready`;
* saturation;
* general sorts with values equal to -inf;
* general sorts with several values equal to +inf.

To run a testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/sorter_pkg.sv tb/tb_metric_sorter_full.sv --top-module tb_metric_sorter_full
    ./obj_dir/Vtb_metric_sorter_full

To change the list size or network, set `L` (a power of two, at least 2),
`Q` or `ARCH` on `metric_sorter`. The sorters can also be used on their own.
They accept any list that obeys R1 and R2. On other inputs their output is
undefined.

## Files

    rtl/sorter_pkg.sv                 constants, ARCH enum, network-description functions
    rtl/cas_unit.sv                   compare-and-select unit
    rtl/pruned_bitonic_sorter.sv      pruned bitonic network
    rtl/simplified_bubble_sorter.sv   simplified bubble network
    rtl/pm_expand.sv                  candidate generation with saturation
    rtl/general_sort_ctrl.sv          arbitrary-list sorting by repeated passes
    rtl/metric_sorter.sv              top: registers, modes, shared sorter
    tb/sorter_harness.sv, tb/gsc_harness.sv, tb/ms_agent.sv   reusable drivers/checkers
    tb/tb_*.sv                        testbenches listed above
