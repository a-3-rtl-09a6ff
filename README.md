# A3 attention accelerator in SystemVerilog

An attention layer compares a query vector `q` (d elements) with every row of a key matrix `K`
(n x d). It turns the n similarity scores into weights with a softmax, and returns the
weighted sum of the rows of a value matrix `V` (n x d):

    out = sum_r  softmax(K q)[r] * V[r]

Most of the n weights are close to zero. This design computes the exact result in a pipelined
datapath. It can also run in an approximate mode, which skips most of the rows before any dot
product is taken:

* **Greedy candidate selection** walks the columns of a pre-sorted copy of the key matrix from
  their largest element-wise products down, and from their smallest up. It keeps a running
  "greedy score" per row for M iterations, and passes on only the rows whose greedy score ends
  positive.
* **Post-scoring selection** computes exact dot products for those candidates. It then drops every
  row whose dot product is more than `t` below the maximum, because such a row's softmax weight
  is below `e^-t` times the largest one.

The RTL is parameterised by `N` (rows) and `D` (dimensions). The defaults are n = 320 and d = 64,
which is enough for a BERT-base SQuAD attention head or a memory-network knowledge base. Inputs
are fixed point: a sign bit, 4 integer bits and 4 fraction bits.

## The pipeline

Four stages each hold a different query. All of them advance together:

| stage | module | work per query | cycles |
|---|---|---|---|
| CS | `candidate_selection` | greedy search, writes the candidate list (approximate mode only) | M + 8 + scan |
| DP | `dot_product` | one key row . q per cycle (d multipliers, adder tree), records the maximum | C + 5 |
| EX | `exponent_unit` + `post_scoring_select` | keeps the rows within `t` of the maximum; score = exp(dp - max); running sum | K + 3 (base mode) |
| OC | `output_computation` + `softmax_divider` | weight = score / sum; out += weight * V[r] | K + 9 |

C is the number of candidates (C = n in base mode). K is the number of rows kept by
post-scoring selection (K = C in base mode).

Between stages sit two-bank register files (`pingpong_regfile`): the candidate list, the dot
products and the scores. A stage writes the bank of the query it holds, while the next stage reads
the other bank, which holds the previous query. A single `phase` bit flips on every advance and
selects the banks.

**Advance rule** (`a3_top`): the stages advance on the cycle where both of these hold:

* every occupied stage has finished, or is pulsing `done` in that cycle;
* the output queue has room, if OC holds a query. Otherwise the advance waits; this is a stall,
  reported on `ev_stall`.

On an advance:

* every query moves one stage on;
* the head of the query queue enters the first stage;
* the finished output vector goes into the output queue.

The start pulses of the stages are combinational with the advance, so no cycle is lost between
queries.

In base mode (`cfg_approx = 0`) CS is bypassed and the pipeline has three stages. OC is then the
slowest stage. With a steady stream of queries and an output port that keeps up, one query leaves
every n + 9 cycles, and each query spends about 3(n + 9) cycles inside. In approximate mode the
period is set by the slowest of the four stages for the current M, C and K.

**Mode switches.** A change of `cfg_approx` is applied only once the pipeline is empty. No query is
admitted in the meantime, so every query runs wholly in one mode. `cfg_n`, `cfg_m` and `cfg_t` are
sampled as queries enter, and must not change while queries are in flight.

## Number formats

| quantity | bits | fraction bits | notes |
|---|---|---|---|
| key, value, query element | 9 | 4 | sign + 4 integer + 4 fraction (`elem_t`) |
| product | 18 | 8 | |
| dot product | 18 + log2 d = 24 | 8 | one more bit once the maximum is subtracted |
| score = exp(dp - max) | 9 | 8 | 256 means 1.0 |
| expsum | 9 + log2 n = 18 | 8 | |
| weight | 9 | 8 | floor(score * 256 / expsum) |
| output element | 1 + 4 + log2 n + 12 = 26 | 12 | |

`t` is given in dot-product units, with 8 fraction bits. A threshold T written as a percentage of
the largest weight gives `t = ln(100 / T)`. For example:

* T = 5% gives t = 3.0, so `cfg_t = 767`;
* T = 10% gives t = 2.3, so `cfg_t = 589`.

## Exponent without a large table

Because the maximum is subtracted first, the exponent argument is never positive, so the score is
at most 1. The argument `x = max - dp` has 16 useful bits (8 integer and 8 fraction bits). Rather
than use a 65,536-entry table, `exp_lut` splits x into its upper byte u and its lower byte l. It
uses two 256-entry tables:

    hi[u] = round(256 * e^-u)         lo[l] = round(256 * e^(-l/256))
    score = (hi[u] * lo[l] + 128) >> 8

Both tables are computed at elaboration time with `$exp`. An argument of 256 or more gives 0. The
tables are registered, so a score appears one cycle after its argument.

## Division

`softmax_divider` is a restoring divider. It produces 2 quotient bits per stage over 7 stages, so a
division takes 7 cycles and one can start every cycle. Together with one cycle each for the
multiply and the accumulate, this gives OC its K + 9 cycles per query.

## Candidate selection in detail

This is the hardest part of the design.

**Reference algorithm.** For each column j, the sorted key matrix holds the column's values in
ascending order, each with its original row ID. For a query, the max side of a column starts at the
end of the column that gives the largest product `key * q[j]`: the top if `q[j] > 0`, otherwise
the bottom. The min side starts at the opposite end. Each iteration then does the following:

1. **Pick.** Take the column whose current max-side product is largest over all d columns.
2. **Add.** If that product is positive, add it to `greedy_score[row]`.
3. **Move.** Advance that column's pointer to its next entry.
4. **Repeat for the min side.** Do the same with the smallest product, adding it if it is negative.

After M iterations, the rows with a positive greedy score are the candidates.

**Skip rule.** When the running sum of everything added so far is negative, the min side skips
its iteration. This keeps a low-similarity query from ending with too few candidates.

**One iteration per cycle.** Each side (`cs_side`) keeps a 4-deep circular queue of precomputed
products for every column. It picks the best column with a single-cycle d-way comparator tree
(`cmp_tree`; ties go to the lower column index) and pops that column's head. The column's next
SRAM entry is then read and multiplied, and pushed back two cycles later. Because the queue holds
four entries, a column can win several times in a row without running dry. This removes the
loop-carried dependency and keeps the rate at one iteration per cycle.

Each side has one SRAM read port and one multiplier per column for the initial fill (4 entries per
column), and a single multiplier in steady state.

**Timing of the greedy scores.** A score is updated one cycle after its pop. The skip decision for
iteration k therefore sees the sum of the additions from iterations up to k-2. The reference model
in `tb/a3_ref_pkg.sv` uses the same lag, so it matches the hardware exactly.

**Scan.** After the last iteration, a scan looks at 16 greedy scores per cycle. It writes one
positive row ID per cycle into the candidate list, in ascending row order.

The whole stage takes M + 8 cycles plus the scan: about C + (n - C)/16 cycles.

## Interface of the top (`a3_top`)

* `key_wr_*`, `val_wr_*`: write one row of K or V.
* `skey_wr_*`: write one rank of the sorted key matrix: the d column values at that rank, and
  their original row IDs. Sorting the columns is left to the host; it depends only on K and can be
  done once, when K is loaded.
* `q_valid / q_ready / q_data`: queries enter a 4-deep query queue.
* `o_valid / o_ready / o_data`: results leave through a 4-deep output queue, one d-element vector
  at a time.
* `cfg_approx`, `cfg_n`, `cfg_m`, `cfg_t`: mode, number of rows in use (at most N), greedy
  iterations M and threshold t.
* `ev_advance`, `ev_stall`, `ev_mode_switch`, `ev_min_skip`: one-cycle event pulses, for
  performance counters.

Reset is asynchronous and active low. The SRAMs and register files are not reset. They are always
written before they are read.

## Departures and choices

These points are where this RTL departs from the published design, or fills in something the
published description does not give.

* **Element width.** Elements are 9 bits: a sign plus 4 integer and 4 fraction bits, as the number
  format calls for. The published memory sizes (20 KB per 320 x 64 matrix, 40 KB for the sorted
  copy) imply 8-bit elements and 16-bit sorted words. Here a sorted word is 18 bits: a 9-bit value
  and a 9-bit row ID.
* **Post-scoring direction.** The selector keeps rows with `max - dp <= t`. One description of
  this unit reads as the opposite, passing the rows whose difference exceeds t. That contradicts
  the stated purpose of dropping low-weight rows, so it was not followed.
* **Order of kept rows.** The exponent stage takes the kept rows in row order, one per cycle,
  skipping 16 rejected entries per cycle. It does not take them in order of decreasing score. The
  softmax result does not depend on the order.
* **Multipliers for the initial fill.** The published design borrows the multipliers of the
  dot-product and output stages to fill the candidate-selection queues. Here candidate selection
  has its own per-column multipliers, so the stages stay independent while they work on other
  queries.
* **Refill path.** The published refill path takes c = 4 cycles. This one takes 2 cycles, with
  4-deep queues.
* **Bank switching.** The two-bank register files, the lockstep advance rule, the queue depths
  (4), the valid/ready host ports and the drain-before-mode-switch rule are this design's own
  choices.
* **Not built:**
  * the serial host interface and the pads of the test chip;
  * the column sorting of K, which is a host task;
  * the DRAM streaming for n beyond N.
* **Multiple units.** Several independent attention computations can run in parallel on several
  copies of `a3_top`. No wrapper for that is provided.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block's outputs with
values computed independently in the testbench, and checks the latencies:

* divider: 7 cycles;
* output stage: K + 9 cycles;
* dot product: C + 5 cycles;
* candidate selection: its exact cycle count.

`tb/a3_ref_pkg.sv` is a bit-exact software model of the whole algorithm. It covers the
fixed-point exp, the division, the column sort, the greedy search with its skip rule, and
post-scoring selection.

The end-to-end tests drive random matrices and queries through the whole accelerator:

* `tb_a3_top` at n = 24, d = 8;
* `tb_a3_full` at the default n = 320, d = 64 (the size of a BERT-base attention head on
  SQuAD);
* `tb_a3_workloads` on the default-size design with smaller matrices selected through `cfg_n`.
  It uses n = 20 and n = 50 (memory-network question answering) and n = 186 (a key-value memory
  network). For each size it runs base, conservative and aggressive queries, and checks that
  base-mode results leave exactly n + 9 cycles apart.

Each test compares every output vector exactly with the model. The test sequence includes:

* a stream of base-mode queries;
* a blocked output port, which fills the output queue and stalls the pipeline;
* a switch to approximate mode while base-mode queries are still in flight;
* approximate queries with M = n/2, t = 767 (T = 5%) and M = n/8, t = 589 (T = 10%);
* a switch back to base mode.

Each test counts advances, stalls, mode switches, min-side skips, pruned candidates and
post-scoring drops. It fails if any of these never happens. It also checks that the base-mode
advance period is n + 9 cycles.

To run a testbench with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_a3_full \
        rtl/a3_pkg.sv tb/a3_ref_pkg.sv tb/tb_a3_full.sv -Mdir obj_full -o sim
    ./obj_full/sim

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. The full-size run takes a few
seconds.

**Limits of the verification.** The tests use random data. Accuracy against trained networks has
not been measured. The approximate results are checked against the model of the same approximate
algorithm, not against exact attention.
