# DSAC — an in-DRAM RowHammer tracker built on stochastic, approximate counting

A DRAM row that is activated many thousands of times inside one refresh window
disturbs the cells of its physical neighbours (RowHammer); a row that is held
open for a long time leaks into them as well (RowBleed). A mitigation inside
the DRAM has to find the rows being hammered and refresh their neighbours
(Target Row Refresh, TRR) during ordinary refresh commands. It also has to do
this with a handful of counters per bank, because a counter per row is far too
large.

DSAC keeps a small table of (row, count) pairs per bank. The table follows the
Space-Saving family of streaming algorithms, with one twist. A row that is
already in the table has its count increased. A row that misses the table may
take over the entry with the smallest count, *y*. It then inherits that count
plus one, so `count(x) = count(y) + 1`. But it is only allowed in with
probability

    P(replace) = 1 / (min_count + 1)

The random draw is what defeats **decoy rows**. An attacker who knows a
deterministic tracker can stream many rows activated once each. Those rows
keep evicting the real aggressor before it is ever refreshed. Under DSAC, a
decoy that shows up once has almost no chance to enter a table whose smallest
count has grown. The true aggressor, in contrast, keeps coming back until it
wins an entry. Once in, it keeps its count. On refresh commands, the row with
the largest count is taken as the aggressor. Its neighbours RH±1 and RH±2 are
refreshed.

The RTL here implements one such tracker per bank for eight banks. Each bank
has 4 table entries by default (the silicon configuration). Table sizes such as
the 20 counters used to study attacks are reached through a parameter.

## The count table and the single-elimination tournament

Each entry (`dsac_count_entry`) has three parts:
- a 16-bit Row Register, for 64K rows per bank;
- a 14-bit saturating Row Counter, enough to count 16K, which is RH_TH = 20K shared over a double-sided attack;
- a valid bit.

An empty entry reads as count 0. That makes the first fills of the table
ordinary replacements with probability 1/(0+1) = 1. No separate insertion path
is needed.

The minimum and the maximum are found by one tree of comparators and count
multiplexers (`dsac_tournament`, built from `dsac_match_node`):
- Every match-up compares two counts.
- In **minimum mode** (`MAX_OR_MIN` low), the smaller count goes on. On a tie, the low-index side wins.
- In **maximum mode**, the larger count goes on. On a tie, the high-index side wins.

The two tie rules come from the design. On a tie, the oldest-placed entry is
replaced, and the most recently placed row is treated as the aggressor
(temporal locality).

The comparator outputs of all match-ups go to `dsac_pointer_decoder`. It walks
from the root of the tree down the winners' path and produces a one-hot pointer
to the winning entry (`PNT_REG#i`). The same tree and the same pointer serve
both searches. Only the mode bit changes.

For N = 4 the tree is two levels deep: two first-round comparators and a final.
Any N ≥ 2 is accepted. The leaves are padded to the next power of two with
"dead" inputs, which never win. This is what lets N = 20 be built (32 leaves,
5 levels).

The hit check is a separate equality compare of the incoming row against every
valid Row Register. On a hit, only the counter of the matching entry changes.

## Command timing in one bank

The controller (`dsac_trr_controller`) splits every DRAM command into a few
clock cycles. These are the splits:

| command | cycles | what happens |
|---|---|---|
| ACTIVE | 3 | **cap** (minimum mode): latch the row, the hit vector and the minimum pointer; the Min. Count Register captures the minimum; the LFSR steps. **upd**: on a hit, add 1 to that entry; on a miss, and if the random draw allows it, write the row into the pointed entry and add 1 to the inherited count. **maxs** (maximum mode): load the RowHammer Register with the largest-count entry. |
| PRECHARGE | 3 | The Time-Weighted Counter closes its tRAS measurement. **wadd**: add the weight to the entry holding the last activated row, if it is still there. **maxs**: as above. |
| REFRESH, with TRR | 2·R + 2 | Put out RH−1, RH+1, …, RH−R, RH+R, one per cycle, with `victim_valid`. Then clear the aggressor's counter, then run a new maximum search. R = `BLAST_RADIUS` = 2. |

A REFRESH without TRR takes no cycles; the DRAM refreshes as usual.

A DRAM keeps commands to one bank tens of nanoseconds apart. These few cycles
are therefore hidden behind tRAS, tRP and tRFC. A command arriving while the
bank's tracker is `busy` is a protocol violation. It is caught by an assertion
in the controller.

The outputs `hit`, `replaced` and `filtered` say what the last ACTIVE did.
They are valid from the cycle after **upd** onward.

## Time-Weighted Counting (RowBleed)

A long row-open time counts as extra activations. `dsac_time_weighted_counter`
counts ticks of an on-die oscillator from ACTIVE to PRECHARGE. The oscillator
itself is outside the digital logic and arrives on `osc_tick`; one tick per ns
is assumed. The count gives tRAS. At the precharge, the block returns

    COUNTER_WEIGHT = ALPHA * ceil(log2(tRAS / tRASmin)),   tRASmin = 42 ns

The logarithm is rounded up, so no fractional counter is needed. It is computed
as the smallest w with `tRAS <= tRASmin * 2^w`, through a row of compares
against shifted copies of tRASmin.

Some reference values, with ALPHA = 1:

| tRAS | weight |
|---|---|
| ≤ 42 ns | 0 |
| 84 ns | 1 |
| 85 ns | 2 |
| 70.2 µs (the JEDEC maximum) | 11 |

The tick counter is 17 bits wide and saturates.

The weight is added on top of the 1 that the ACTIVE already counted. A row held
open for twice tRASmin therefore counts 2.

## Adaptive TRR threshold and the victim rows

A TRR is spent only when the table has seen enough. `TRR_FLAG` is high while

    sum of all counts >= RH_TH/2 - MAC_tREFI = 10,000 - 255 = 9,745

Here MAC_tREFI is the most ACTIVEs a bank can receive between two refresh
commands. The rule guarantees that no row reaches RH_TH/2 = 10K before a
refresh command arrives at which TRR is allowed. It also bounds the table's
minimum count at about 9,745 / N. That bound is what keeps the replacement
probability from collapsing under a long attack.

A refresh command that finds `TRR_FLAG` high and a non-zero aggressor starts
the TRR. The aggressor must be non-zero: when every count is 0, no TRR is done.

Victims come from `dsac_victim_row_calc`, which is one adder:
- RH + x in plus mode;
- RH + ~x + 1 in minus mode.

Its carry tells whether the victim falls off either end of the bank. In that
case `victim_in_range` is low and the DRAM should skip the row.

After the TRR, only the aggressor's counter is reset. The other entries keep
their counts.

## The random source: PUF, Seed Mixer, LFSR, Probability LUT

- **LFSR** (`dsac_lfsr`): 20 bits, enough to cover the 2.09M ACTIVEs of one refresh window.
  - Taps at bits 20 and 17: x^20 + x^17 + 1. That is a maximal-length polynomial, and the test steps through the full 2^20 − 1 period.
  - It steps once per ACTIVE.
  - A seed load has priority over a step. An all-zero seed is turned into 1.
- **Seed Mixer** (`dsac_seed_mixer`): makes the sequence unique per chip and per refresh window.
  - At reset the seed is the PUF value.
  - Each `all_cell_ref_done` pulse forms `seed' = rotl(seed, 7) ^ PUF ^ PRBS`. The LFSR reloads from it one cycle later.
  - In `dsac_top`, each bank's PUF input is the chip PUF XOR the bank number, so the banks' sequences differ.
- **Probability LUT** (`dsac_prob_lut`): a 2^14 × 20-bit ROM. Entry m is `floor(2^20 / (m+1)) − 1`.
  - `STOCHASTIC_REPLACEMENT = PRBS > LUT[min_cnt]`.
  - A high value blocks the replacement: the row is filtered. Replacement therefore happens when PRBS ≤ 2^20/(m+1) − 1, that is, with probability 1/(m+1) to within one part in 2^20.
  - The ROM is filled by an initial loop at start-up and synthesizes as a memory.
- **Min. Count Register** (`dsac_min_count_reg`): holds the tournament's result of the minimum search. It feeds the LUT.

## Eight banks: `dsac_top`

`dsac_top` has `NUM_BANKS` = 8 copies of `dsac_trr_module`. Every bank port is
a packed array indexed by bank.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `act`, `pre`, `ref_cmd` | in | [8] | one-cycle ACTIVE / PRECHARGE / REFRESH pulses per bank |
| `active_row` | in | [8][16] | row address with ACTIVE |
| `all_cell_ref_done` | in | 1 | end of a refresh window (reseed) |
| `puf` | in | 20 | chip-unique value from the PUF |
| `osc_tick` | in | 1 | tRAS oscillator tick, synchronous to clk |
| `victim`, `victim_valid`, `victim_in_range` | out | [8][16], [8], [8] | victim rows of a TRR, one per cycle |
| `rh`, `rh_valid` | out | [8][16], [8] | current aggressor and whether its count is non-zero |
| `trr_flag`, `trr_start` | out | [8] | threshold reached; a TRR begins this cycle |
| `hit`, `replaced`, `filtered` | out | [8] | outcome of the last ACTIVE |
| `min_cnt` | out | [8][14] | smallest count in the table |
| `busy` | out | [8] | the bank's tracker is sequencing a command |

Not part of the RTL:
- the PUF;
- the oscillator;
- the DRAM array, with its refresh of the victim rows.

Their signals are ports.

## Parameters

All defaults live in `dsac_pkg` and are the published numbers unless marked.

| name | default | meaning |
|---|---|---|
| `ROW_W` | 16 | row address bits (64K rows per bank) |
| `CNT_W` | 14 | Row Counter bits |
| `PRBS_W` | 20 | LFSR / LUT width |
| `RH_TH`, `MAC_TREFI`, `TRR_TH` | 20000, 255, 9745 | RowHammer threshold, ACTIVEs per tREFI, TRR threshold |
| `NUM_BANKS` | 8 | banks |
| `N` (`NUM_ENTRIES`) | 4 | count-table entries per bank (the silicon's; attack studies use 20) |
| `BLAST_RADIUS` | 2 | victims on each side (design choice, for double-sided and ±2 coupling) |
| `TRAS_MIN_TICKS`, `ALPHA` | 42, 1 | tRASmin in oscillator ticks (1 ns assumed), weight factor |

## Simulating

Every testbench checks itself. It prints `TB_RESULT checks=… failures=…`
and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/dsac_pkg.sv \
        tb/tb_dsac_top.sv --top-module tb_dsac_top -o sim
    ./obj_dir/sim                      # full 8192-interval window
    ./obj_dir/sim +intervals=200       # shorter run

The other testbenches build the same way; `tb/tb_<module>.sv` tests
`rtl/<module>.sv`. `tb_dsac_workloads` runs the attack patterns on one bank
with 20 entries. It takes about two minutes.

## What the tests show

Unit benches check each block against a model written independently in the
bench. Examples:
- the LFSR period;
- the LUT's replacement rate for every m, measured against 1/(m+1);
- victim rows and edge carries;
- the tie rules of the tournament.

`tb_dsac_trr_module` runs one bank against a reference model of the whole
algorithm, with a small threshold. The model includes the inherited counts, the
threshold, victims and weights. The bench also checks that the number of
replacements matches the expected probability.

`tb_dsac_top` runs all eight banks at default parameters through one full
refresh window: 8192 intervals of 255 ACTIVE/PRECHARGE pairs each. Every bank
runs a different attack:

| bank | pattern | Maximum Disturbance |
|---|---|---|
| 0 | 1 aggressor | 9,690 |
| 1 | 2 aggressors | 7,395 |
| 2 | 4 aggressors | 4,782 |
| 3 | 20 aggressors (round-robin) | 68,391 |
| 4 | 4 aggressors, random order | 4,735 |
| 5 | 100 aggressors, random | 21,327 |
| 6 | 255 aggressors, random | 8,427 |
| 7 | 8 aggressors at the bank edge | 23,269 |

Maximum Disturbance is the most ACTIVEs a row collects between two of its own
TRRs. The bench requires it to stay below 10K for banks with no more
aggressors than entries. It also counts each mechanism and fails if one never
occurs:
- hits;
- replacements, first fills of empty entries included;
- filtered rows;
- TRRs;
- refreshes without TRR;
- long-tRAS weights;
- out-of-range victims;
- reseeds.

With 20 entries (`tb_dsac_workloads`, one window):

| aggressors | TRRespass (round-robin) | Random |
|---|---|---|
| 1 | 9,945 | 9,945 |
| 10 | 2,346 | 2,292 |
| 20 | 1,249 | 1,198 |
| 21 | 1,445 | 1,396 |
| 100 | 16,402 | 21,224 |
| 255 | 8,192 | 8,350 |

Up to the table size, every aggressor is refreshed well before 10K. A single
aggressor is the worst case: it collects the whole threshold of 9,745 plus the
ACTIVEs of the last interval, and still stays under 10K. Once the attackers
outnumber the entries, rows get filtered, and for around 100 rows the tracker
is overwhelmed. Each of the 100 rows then gets about 2.5 ACTIVEs per interval;
most of them are filtered, and the table's sum grows slowly.

## Departures from the published design, and choices made here

- **Wiring of the TRR module.** The architecture was rebuilt from its written description: signal names, widths and the order of the minimum search, maximum search and victim calculation. The cycle-level split of each command and the handshakes are this design's own.
- **Time-weighted counting happens at PRECHARGE.** The description attaches the weight to the ACTIVE. But tRAS is known only when the row closes, so here the weight is added to the row's entry at precharge. It is added only if that row is still in the table.
- **After a TRR, only the aggressor's counter is cleared.** The description says the Row Counter is reset once TRR is performed. It does not say whether it means all counters.
- **Seed Mixer function.** It is not specified in the source. The rotate-XOR here is a stand-in. So is the LFSR polynomial, which only needs to be maximal-length.
- **Empty entries.** The published pseudocode fills an empty entry before it considers replacement. Here an empty entry simply has count 0 and wins the minimum search. If a valid entry has been cleared to 0 by a TRR and has a lower index, the miss replaces that cleared row instead of filling the empty slot. Both cases happen with probability 1 and give the new row count 1.
- **Victims past the bank edge.** They are flagged rather than wrapped.
- **Reported Maximum Disturbance.** The published attack study reports a DSAC Maximum Disturbance of about 3K with 20 counters for TRRespass and random patterns. It also reports that saturation at 10K sets in only near 200 aggressor rows. This RTL follows the stated threshold rule (sum of counts ≥ 9,745). With that rule, a single aggressor reaches about 9,945 before its TRR, and 100 random aggressors reach about 21K. The published numbers cannot follow from that rule alone. The study's simulator probably differed, for example by refreshing the aggressor more often; its table notes that in one experiment "any row … on every second refresh command is TRRed". `TRR_TH` is a parameter, for anyone who wants to trade TRRs for a lower bound.
- **Table size.** The default is 4 entries per bank, the configuration whose area was reported. The attack evaluations used 20 entries; set `N = 20`.
