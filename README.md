# Garibaldi: pairwise instruction–data management for a shared last-level cache

Server workloads fetch code from a very large instruction footprint. Many of
their instruction fetches miss in the private caches and reach the shared
last-level cache (LLC). Modern LLC replacement policies (DRRIP, Hawkeye,
Mockingjay) are good at keeping *hot data*: lines that are reused soon. But
the instruction lines that *lead to* those hot data accesses are often reused
only rarely, so the policy evicts them. When such an instruction line is
fetched again, the core's front end stalls. The hot data it is about to touch
is still in the cache, but the core cannot use it until the instruction
arrives. Garibaldi (Kwon et al., "Garibaldi: A Pairwise Instruction-Data
Management for Enhancing Shared Last-Level Cache Performance in Server
Workloads") calls these lines *instruction victims*.

The fix is to pass the hotness of data back to the instruction that caused
it. Next to the LLC controller sits a *pair table* with one entry per
instruction line. Each data access adds one to the miss cost of the
instruction line that triggered it if the data hit in the LLC, and subtracts
one if it missed. When the replacement policy picks an instruction line as the
victim, the pair table is asked whether the line's cost is above a
threshold. If it is, the line is kept and the next candidate is evicted. If an
instruction line that was not protected misses later, its data was cold, so
the pair table prefetches the data lines it recorded for that instruction
while the instruction miss is being served.

This directory contains synthesizable SystemVerilog for that module: the
per-core helper tables, the pair table with its page-number table, the colour
timer with cost aging, the performance counters and threshold adjustment, and
the query-based victim selection added to the replacement unit. The LLC
arrays, the base replacement policy, the cores and memory are not part of it.
They connect through the ports of `garibaldi_top`.

## Block structure

```
           LLC tag/metadata probe: (core, is_inst, is_prefetch, is_hit, PC, PA)
                                      |
             +------------------------+-------------------------+
             |                        |                         |
   instruction access            data access                 every access
             |                        |                         |
   helper_table[core]  <-- PC page -- +                    perf_counter
   (PC page -> I_PPN)  -- I_PPN ----> IL_PA = {I_PPN, PC[11:6]}  |  stats
             |                        |                         v
   instruction miss                   |                   threshold_unit
             |                        v                  (colour, threshold)
             +----------------> pair_table <---------------------+
                                |    |    \
                     dppn_table-+    |     +--> pf_* : data lines to prefetch
                                     | query (1 cycle)
                              qbs_repl_unit <-- vr_* : per-way priorities,
                                     |          instruction bits, line addresses
                                     +--------> victim way, ways to demote
```

| Module | Role |
|---|---|
| `garibaldi_pkg` | address widths, `llc_access_t`, `gar_events_t` |
| `helper_table` | per core: PC page → instruction page, 128 entries, 4-way |
| `pair_table` | main table, 16384 direct-mapped entries, k = 1 data field; holds the D_PPN table and two aging units |
| `dppn_table` | 8192 shared data page numbers, tagless |
| `miss_cost_aging` | aged cost and protection test (combinational) |
| `perf_counter` | P(D_miss \| I_miss) and LLC miss rate per period |
| `threshold_unit` | colour timer and dynamic threshold |
| `qbs_repl_unit` | query-based victim selection, at most 2 queries |
| `garibaldi_top` | wiring; 40 helper tables |

## Finding the instruction behind a data access

The LLC sees physical addresses, but a data access carries only its own
physical address and the PC (a *virtual* address) of the instruction that
issued it. To pair the two, the LLC needs the instruction's physical line
address, IL_PA. The helper tables provide it.

* When a core's instruction fetch reaches the LLC, the request carries both
  the PC and the physical line address. The helper table of that core records
  the page mapping `PC[47:12] → PA[43:12]`. It works like an ITLB, but it is
  separate from the core's own ITLB.
* When a data access from the same core arrives, its PC page is looked up.
  The frame found there, joined with the PC's line offset inside the page,
  `PC[11:6]`, gives IL_PA. It does not matter whether the instruction line is
  still cached anywhere.

Example (used as a test vector): the instruction page `0xffff3cd19` maps to
frame `0x0d1ab916`. A data access to `0xdeedbeef000` with PC
`0xffff3cd19c04` then pairs with instruction line `0x0d1ab916c00`.

A data access whose PC page is not in its core's helper table is not paired.
It only counts in the statistics (event `ht_miss`).

## The pair-table entry

With a 44-bit physical address and 64 B lines, a line address has 38 bits.
The table has 16384 entries and is direct mapped on the low 14 bits, so the
tag has 24 bits.

| Field | Bits | Use |
|---|---|---|
| valid | 1 | |
| IL_PA tag | 24 | instruction line above the index |
| miss cost | 6 | saturating, 0..63 |
| colour | 3 | colour period of the last write |
| per DL_PA field (k = 1): D_PFO | 6 | data line offset within its 4 KB page |
| D_PPN index | 13 | entry of the D_PPN table holding the page |
| old bit | 1 | "this field may take the next data line" |
| sctr | 3 | field strength |

Data page numbers take most of the bits of a data address. They are kept
once each in the separate `dppn_table`, which has 8192 entries and no tags. The
entry index is the low 13 bits of the page number, and the entry stores the
other 19 bits. Several fields that point into the same page share one entry.
Because the table has no tags, a D_PPN entry that is replaced silently
redirects the fields that point to it. A prefetch can then go to the wrong
page. This is the price of the size saving.

## Miss cost, colours and aging

This is the subtle part of the design. Costs must fade when the data they
were earned from are no longer accessed. Walking the table to decrement every
entry would be too expensive. Instead, time is kept in a 3-bit *colour* that
advances once every 100,000 LLC accesses (one *period*). Each entry remembers
the colour at which it was last written. When an entry is read, its cost is
aged by the number of colour steps since then, counted modulo 8 and never
below zero:

```
aged = max(cost - ((current_colour - entry_colour) mod 8), 0)
protected  <=>  aged > threshold
```

For example, an entry written at colour 5 with cost 25 and read at colour 0
has aged by 3 steps (5→6→7→0), to 22. With a threshold of 23 it is no longer
protected, although the stored cost is still 25. An entry not touched for 8 or
more periods looks younger than it is, because the colour has wrapped. This
limit comes from the 3-bit colour.

Where aging is used:

* **Query** (eviction time): the aged cost is compared, and nothing is written.
* **Update** (a paired data access hits the entry): the cost becomes the aged
  cost ±1 and the colour becomes current.
* **Collision** (the indexed entry belongs to another instruction line): if the
  resident entry's aged cost is still above the threshold, it stays. Its cost
  is written back aged and its colour made current. Otherwise the new line
  takes the entry with cost 0 ±1. So hot pairs survive collisions in the
  direct-mapped table and cold ones give way.

## Recording data lines: old bits and counters

One data line per instruction line is kept (k = 1). It should be the *first*
data line touched after the instruction is fetched again. The old bit does
this:

* An instruction miss on a tracked line, or the colour of the entry changing
  on an update, sets the old bit of every field.
* A paired data access manages the fields only while some old bit is still
  set. If a field already names the line (same offset, same D_PPN index, and
  that D_PPN entry holds the page), its sctr goes up and its old bit is
  cleared. Otherwise the first field with its old bit set has the bit cleared
  and its sctr lowered. If the sctr would drop below 4, the field is
  overwritten with the new line and sctr 4.
* Every later data access leaves the fields alone until the next instruction
  miss, because the old bits are clear.

A live field therefore always has sctr ≥ 4, so sctr = 0 marks an empty field.
The D_PPN entry follows the same counter rule, without an old bit. A field is
overwritten only when the D_PPN entry for the new page will hold that page
after the same update. Otherwise the field would point at a page that was
never stored.

## Protection at eviction time

The base policy ranks the ways of the set (5-bit ETR/RRPV priority, larger
means evict sooner). `qbs_repl_unit` takes the highest-ranked way. If that way
holds an instruction line (per the per-block instruction bit the L2 passes
down), or a prefetched line, the unit queries the pair table. The answer comes
one cycle later. If the line is protected, it is reported in `vr_demote`, and
the LLC resets its priority to the lowest level. The unit then moves to the
next way. After two queries the next candidate is evicted without asking, so
selection takes 1, 2 or 3 cycles. Protection never partitions the set: any
way can hold an instruction or a data line.

## Pair-wise prefetch

An instruction miss on a line that has a pair-table entry, and whose aged
cost is not above the threshold, was evicted for being cold. Its recorded data
lines are then sent out on `pf_valid / pf_mask / pf_line` for the LLC's
prefetch path. They arrive while the instruction miss is being served.
The group is held until `pf_ready`. Meanwhile `acc_ready` is low and new
accesses wait. Prefetched data lines do not update the pair table when they
are filled.

## Setting the threshold

The threshold starts at 32. `perf_counter` keeps, for each core, the 64 B
aligned PCs of its 10 most recent instruction misses. A data access whose PC
is in its core's list was issued right after an instruction miss. These
accesses are counted (`cond_total`), and so are those of them that missed
(`cond_miss`). All demand accesses and misses are counted as well. At the end
of each period, `threshold_unit` compares the two miss rates by cross
multiplication:

* P(D_miss | I_miss) below 7/8 of the LLC miss rate: data behind instruction
  misses was mostly cached, so instruction lines are worth keeping. The
  threshold goes down by 1.
* P(D_miss | I_miss) above the LLC miss rate: protection is too generous. The
  threshold goes up by 1.

Then the colour advances and the counters restart.

## Interface and timing of `garibaldi_top`

| Port | Dir | Meaning |
|---|---|---|
| `acc_valid`, `acc_ready`, `acc` (`llc_access_t`) | in/out/in | one probed LLC access per cycle: core, is_inst, is_prefetch, is_hit, PC (48 b), PA (44 b) |
| `vr_valid`, `vr_ready` | in/out | victim request for one set |
| `vr_prio[WAYS]`, `vr_is_inst`, `vr_is_pf`, `vr_line[WAYS]` | in | base-policy priority, instruction bit, prefetched bit, line address per way |
| `vr_done`, `vr_victim`, `vr_demote` | out | result 1–3 cycles after the request; ways in `vr_demote` get lowest priority |
| `pf_valid`, `pf_ready`, `pf_mask[K]`, `pf_line[K]` | out/in/out/out | pair-wise prefetch group |
| `threshold`, `color` | out | current threshold and colour |
| `events` (`gar_events_t`) | out | one-cycle pulses, one per mechanism (for counters) |

Each access is handled in the cycle it is accepted. The tables are read
asynchronously and written at the clock edge, so accesses to the same entry
back to back see each other's updates. The query port is a second read port
and never blocks accesses. The reset is asynchronous and active low. It clears
the valid bits, the threshold (to 32), the colour and the counters. Table
contents are not reset.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `NUM_CORES` | 40 | evaluated system |
| `HT_ENTRIES`, `HT_WAYS` | 128, 4 | paper |
| `PT_ENTRIES`, `K` | 16384, 1 | paper |
| `DPPN_ENTRIES` | 8192 | paper |
| `COST_W`, `COLOR_BITS` | 6, 3 | paper |
| `PERIOD` | 100000 | paper ("e.g. 100K") |
| `THR_INIT` | 32 | paper |
| `PMU_PCS` | 10 | paper |
| `WAYS`, `PRIO_W`, `MAX_ATTEMPTS` | 12, 5, 2 | paper |
| threshold step / margin | 1 / 7/8 | this design |
| initial cost, new-field sctr | 0 / 4 | this design |

Physical 44 b, virtual 48 b, line 64 B and page 4 KB are fixed in
`garibaldi_pkg`. The 48-bit virtual width is this design's assumption.

## Where this RTL fills in or departs from the paper

* **Cost update rule.** One passage moves the cost on every paired data
  access, by the access's hit or miss. Another says it moves only when an
  instruction *miss* leads to the data access. The entry has no record of
  whether the fetch missed, so every paired data access moves the cost here.
* **Threshold dynamics.** The paper gives the direction of each change. The
  step of 1, the 7/8 margin for "significantly lower", holding the threshold
  when a period has no samples, and clamping to 0..63 are choices of this
  design.
* **Helper-table tag.** The tag is 31 bits (48-bit PC, 32 sets). The paper's
  table lists 29 bits for an unstated virtual address width. Its replacement
  rule is this design's own: a hit increments the counter, and a miss
  decrements the set and fills an invalid way, else the weakest way.
* **D_PPN hash** = low 13 bits of the page number.
* **Prefetch condition.** Prefetch happens only when the missing line's aged
  cost is not above the threshold, following "unprotected instruction miss".
* **After two queries** the next candidate is evicted unqueried. Ties in
  priority go to the lowest way.
* **One figure of the paper** labels the protection decision the other way
  round (cost above threshold → "evict it"). The text's rule, protect when
  above, is implemented.
* **Not built:** the LLC arrays and the per-block instruction bit storage, the
  base replacement policy (Mockingjay in the main configuration), MSHRs and
  prefetch issue, cores and caches, DRAM. k = 0 is not supported (`K` ≥ 1),
  and neither are the fixed-threshold variants.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_miss_cost_aging` | all cost × colour pairs for several thresholds; the 25 → 22 example |
| `tb_dppn_table` | random record/read traffic against a model (16 entries) |
| `tb_helper_table` | random updates/lookups against a model (8 entries, 2-way); the worked example at full size |
| `tb_pair_table` | directed protection, aging, collision, prefetch and recording at k = 1; 20,000 random operations against a model at k = 2 |
| `tb_perf_counter` | figure example (total 2, miss 1); random traffic against a model |
| `tb_threshold_unit` | decrease, increase, hold, saturation, colour advance every PERIOD accesses |
| `tb_qbs_repl_unit` | victim, demote mask, query count and latency 1 + queries against a reference walk |
| `tb_garibaldi_top` | end to end at the default size: pairing, protection (2-cycle selection), per-core helper tables, prefetch and stall, then 400,000 random accesses over four periods. Every mechanism must occur at least once, and the threshold must fall in a hot phase and rise in a cold one |

`tb_workload_pairs` runs the module inside a behavioural 16-set, 12-way LRU
LLC on two synthetic server-style patterns. It runs a second copy of the
cache with plain LRU on the same stream for comparison.

* **Hot pairs (many to few).** 64 instruction lines share 16 hot data lines,
  and streaming data flushes each set once per round. Under LRU, 75% of the
  instruction fetches miss. With the module, 2% miss, and the hot data keeps
  hitting 94% of the time. Total LLC misses rise by about 1%, because the
  kept instruction lines take room from the stream.
* **Cold pairs.** Each instruction touches fresh data. The module protects
  nothing and prefetches on almost every instruction miss. Instruction misses
  stay within 5% of LRU.

The colour period is shortened to 8192 accesses there; all other parameters
are at their defaults.

The random part of `tb_garibaldi_top` reports how often each mechanism fired.
The report reads `ht_alloc`, `pt_replace`, `pt_preserve`, `pt_field_hit`,
`prefetch`, `query`, `protect`, `thr_inc`, `thr_dec` and more. The run takes
about 25 s to build and 6 s to simulate.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/garibaldi_pkg.sv \
          tb/tb_garibaldi_top.sv --top-module tb_garibaldi_top -Mdir obj
./obj/Vtb_garibaldi_top
```

Replace the testbench name to run another one. Testbenches of single modules
need only that module's file and the files it instantiates. Lint with
`verilator --lint-only -Wall -Irtl -y rtl rtl/garibaldi_pkg.sv rtl/garibaldi_top.sv`.

Remaining lint warnings are harmless. The helper-table index and tag helpers
read only part of their argument. The prefetch and query assertions use the
reset synchronously. The valid-bit vector of the pair table is cleared with
one 16384-bit constant.

At the default size, the pair table holds about 16384 × 57 bits (~114 KB) and
the D_PPN table 8192 × 23 bits. The 40 helper tables hold about 40 × 128 × 67
bits, kept in flip-flops, and the PMU PC lists 40 × 10 × 42 bits.
