# L2 Harvester: lending idle cores' L2 caches to the rest of the chip

In a server processor every core has a private L2 cache of a megabyte or more,
but many cores sit idle much of the time. Their L2s then hold nothing useful,
while the busy cores keep evicting blocks from the shared last-level cache
(LLC) and fetching them again from DRAM. The L2 Harvester (L2H) turns the idle
L2s into extra on-chip capacity without software changes. It sits on the path
from the LLC to the memory controller. When the LLC evicts a block that is
likely to be used again, and some core is idle, the harvester writes the block
*up* into that idle core's L2 (the *lender*) instead of writing it to DRAM. The
next miss to that block finds it through the normal coherence machinery: the
snoop filter knows the lender holds it, and the lender answers the request as
it would any cache-to-cache transfer.

This repository gives synthesizable SystemVerilog for the harvester itself,
for a 4-core system (1.25 MB L2 per core, 16 GB of memory, 64-byte lines). The
caches, the bus, the snoop filter, the LLC's own dead-block predictor and the
memory controller are existing parts of the processor. They are not included;
their signals are ports of the top module `l2_harvester`.

## What happens to one LLC eviction

`harvest_ctrl` takes each eviction through four steps, one eviction at a time:

1. **Predict.** Is the block still alive, that is, will it be referenced again
   soon? The predictor (`l2h_predictor`) answers from two sources, described
   below.
2. **Balance.** If the block is alive, the load balancer (`load_balancer`)
   decides whether it goes up to an idle L2 or down to DRAM, and to which lender.
3. **Snoop check.** Before a write-up the snoop filter is asked whether a
   private cache already holds the block. If one does, the write-up is
   cancelled so the block is never held twice. The check goes out as a
   CleanEvict for a clean block and as a WritebackClean for a dirty one (the
   mapping from block state to request type is this design's reading).
4. **Send.** The block goes out as a WriteUp to the lender (`wu_*`) or as a
   write-back to memory (`wb_*`). A clean block that is not written up is
   simply dropped, since memory already has the same data.

With ready receivers, one eviction takes about ten cycles from acceptance to
the WriteUp or write-back. That is far below the rate at which an LLC evicts,
and this path is not timing-critical in any case.

## The predictor: a bloom filter and a perceptron that cover for each other

Two dead-block predictors are combined:

* **MPPP**, a perceptron-based dead-block predictor that already lives in the
  LLC. It delivers one bit with every eviction (`evict_mppp_dead`). It is not
  part of this RTL.
* **A bloom filter of recent LLC misses** (`bloom_filter`). Every address that
  misses in the LLC is inserted. An evicted block whose address is found in the
  filter ("seen") was missed recently, so a larger cache would have kept it: it
  is worth keeping on chip. A block that was not seen is predicted dead.

A bloom filter fills up and its false-positive rate rises, so it has to be
emptied from time to time. Just after a clear it knows nothing and would call
every block dead. The Reset Counter (RC) handles this. It counts insertions
since the last clear, and the filter is only trusted once RC has reached a
warm-up threshold. MPPP, on the other hand, becomes unreliable when misses are
frequent: its weights are then updated so often that live and dead blocks
look alike. The filter warms up quickly in exactly that situation. So the rule
depends on both RC and the average L2 MPKI (misses per thousand instructions)
of the busy cores:

| condition                          | block is alive when      | rule |
|------------------------------------|--------------------------|------|
| RC < WARMUP_TH (filter still cold) | `!mppp_dead`             | 1    |
| otherwise, avg MPKI > MPKI_TH      | `seen && !mppp_dead`     | 2    |
| otherwise                          | `seen \|\| !mppp_dead`   | 3    |

Under high load both predictors must agree before a block is kept. Under low
load, one vote for "alive" is enough.

**Filter organisation.** There are four tables of 4096 one-bit entries. Each
table has its own H3 hash (`h3_hash`): the index is the XOR of those rows of a
fixed random 28x12 bit matrix whose key bit is set. Prediction is off the
critical path, so the four tables share one single-port RAM of 256 words of
64 bits. A lookup reads one word per table in consecutive cycles; its answer
comes NUM_HASH + 1 = 5 cycles after acceptance. An insertion is a
read-modify-write per table, 8 cycles in all. A clear writes zeros over the 256
words, one per cycle. The filter also clears itself after reset. Lookups have
priority over insertions, and both wait while a clear runs.

**When the filter is cleared.** The clear comes when RC reaches
RESET_INTERVAL = 4096 insertions, about one insertion per table entry. RC
then restarts at zero, so rule 1 applies again for the next WARMUP_TH = 1024
insertions. Both numbers, and MPKI_TH = 20, are this design's choices. They are
parameters of the top.

## The load balancer

Its inputs are the verdict, whether the block's owner runs a *critical*
(latency-sensitive, user-facing) task, how many cores are idle, which idle core
is next in round-robin order, and the average L2 MPKI of the critical cores.
The decision:

1. If no core is idle, or the block is dead, it goes to DRAM.
2. Otherwise, a block of a critical task always goes up, to the next idle core.
3. Otherwise (a background task's block), it goes up with probability
   0.95^MPKI, where MPKI is the critical tasks' average. While the critical
   tasks miss rarely, background tasks may use the spare L2 space. As the
   critical tasks' miss rate rises, the background share fades away: about
   36 % at MPKI 20, and almost nothing above 40.

`sendup_lut` holds 0.95^m for m = 0..99 as 16-bit fractions (65535 = 1.0):
entry m = round(65535 * 0.95^m). The table is computed at elaboration, and an
MPKI of 100 or more uses entry 99. `lfsr_rand` is a 16-bit Galois LFSR (taps
0xB400, never zero) standing in for a uniform random number. It steps only when
a draw is used, and the block goes up when `rnd <= chance`. The round-robin
pointer of `idle_core_map` advances each time the load balancer picks a lender
(also when the snoop check then cancels the write-up), so successive write-ups
spread over the lenders.

**A point to be aware of.** The published flow chart writes the test of step 3
as "Chance < Rand", which would send blocks up with probability 1 - Chance. The
prose says the probability is Chance. This RTL follows the prose. Inverting
the comparison in `load_balancer.sv` gives the other reading.

## The maps and the MPKI monitor

* `critical_task_map` (CTM): one bit per core, set by system software when it
  places a latency-critical task on that core (`ctm_we`, `ctm_wdata`). It
  supplies the "critical" bit for the block's owner, and the number of critical
  tasks (an observation output only: no rule uses it).
* `idle_core_map` (ICM): one bit per core, set and cleared by the cores
  themselves (`idle_set`, `idle_clr`) when they run out of work or get some
  back. It gives the number of idle cores and the next lender.
* `mpki_monitor` registers each core's reported L2 MPKI (8 bits) and forms
  two averages. The predictor uses the average over the non-idle cores, and the
  load balancer the average over the critical cores. How a core measures its
  MPKI is outside this design.

## Stopping blocks from circulating forever

A block written up to a lender is eventually evicted from that L2 as well. The
normal path would take it back to the LLC, whose next eviction could write it
up again, and so on: the block would never leave the chip even if nobody used
it. Each L2 line therefore gets one extra tag bit, `harvest_bit_store` (one
instance per core, 20480 bits = 1.25 MB / 64 B). A WriteUp fill sets the bit,
a normal fill clears it. When a line with the bit set is evicted, it bypasses
the LLC and goes straight to memory: it has had its second chance. The module
answers each L2 eviction one cycle later on `l2_route_valid` /
`l2_route_bypass_llc`. The L2 itself, which acts on that answer, is outside.

## Top-level interface

All transfers are valid/ready pairs, except the snoop response, which is a
one-cycle `sf_rsp_valid` pulse. A transfer takes place on a rising edge where
both are high, and a raised valid holds its payload until then (the controller
checks this with assertions). `miss_ready` is low while the bloom filter is
busy with a lookup, an insertion or a clear. A source that cannot wait may drop
the miss: the filter then simply learns one address fewer. Reset `rst_n` is asynchronous and
active low.

| group | direction | contents |
|-------|-----------|----------|
| `evict_*` | in | LLC eviction: 28-bit block address, 512-bit line, dirty, owner core, MPPP dead bit |
| `miss_*` | in | LLC miss addresses to be learnt by the bloom filter |
| `core_mpki` | in | 4 x 8-bit L2 MPKI per core |
| `idle_set`, `idle_clr` | in | ICM updates by the cores |
| `ctm_we`, `ctm_wdata` | in | CTM write by system software |
| `sf_req_*`, `sf_rsp_*` | out/in | snoop filter check; `sf_req_wb_clean` = request type (1 WritebackClean, 0 CleanEvict); `sf_rsp_present` = already cached |
| `wu_*` | out | WriteUp: lender, address, data, dirty |
| `wb_*` | out | write-back to the memory controller |
| `l2_fill_*`, `l2_evict_*`, `l2_route_*` | in/out | per-L2 harvest bit and LLC bypass |
| `stats`, `pred_case1..3`, `pred_resets`, `pred_clearing`, `icm`, `ctm`, `num_critical`, `crit_avg_mpki`, `busy_avg_mpki`, `lb_chance` | out | observation counters and state |

The counters in `stats` (package type `hv_stats_t`) count evictions, dead
predictions, evictions with no idle core, critical and chance write-ups, chance
losses, snoop hits, WriteUps, write-backs and clean drops.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `NCORES` (package) | 4 | the evaluated system |
| bloom filter | 4 hashes x 4096 entries | the evaluated system |
| send-up table | 100 entries x 16 bits | the evaluated system |
| L2 lines per core (`L2_LINES_P`) | 20480 | 1.25 MB per core with 64 B lines |
| block address | 28 bits | 16 GB memory, 64 B lines |
| `WARMUP_TH_P` | 1024 insertions | own choice |
| `RESET_INTERVAL_P` | 4096 insertions | own choice |
| `MPKI_TH_P` | 20 | own choice |
| MPKI width | 8 bits | own choice |
| random source | 16-bit LFSR, seed 0xACE1 | own choice |

## Where this RTL departs from, or goes beyond, the published description

* The bloom filter uses one bit per entry (2 KB in all). The published storage
  estimate (16 KB for the four 4K tables) suggests 8-bit entries, unless
  16 Kbit was meant; the rest of the description reads as a plain bloom filter.
* The filter learns LLC miss addresses. One passage of the description speaks
  of tracking recently *evicted* addresses, but the detailed description
  inserts *missed* addresses, and the "unseen means dead" rule only makes sense
  for those.
* The send-up test follows the prose (probability = 0.95^MPKI), not the flow
  chart (see above).
* The meaning of RC (insertions since the last clear), its thresholds, the
  clear mechanism and the MPKI threshold are not given and were chosen here.
  Reaching the threshold (RC = WARMUP_TH) counts as warmed up.
* Cancelling a WriteUp on a snoop hit, and dropping clean blocks instead of
  writing them back, are choices here. The description only says the snoop
  filter is checked so that data is not needlessly replicated.
* The "average L2 MPKI" used by the predictor is taken over the busy cores. The
  description does not say over which cores.
* One eviction is handled at a time, with back-pressure on `evict_ready`.
* The H3 matrices are fixed pseudo-random constants generated at elaboration.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
one compares the module against an independent model written in the testbench,
checks latencies where the design defines them, and ends by printing
`TB_RESULT checks=<n> failures=<m>`. A watchdog stops a testbench that hangs.
`tb_l2_harvester` runs the whole harvester at its default size against a
behavioural environment: LLC evictions and misses, a snoop filter that
sometimes holds the block, lenders that stall, cores that go idle and busy,
and changing MPKIs. It predicts the outcomes with its own model and counts each
mechanism: the three predictor rules, the periodic clear, dead blocks, the
no-idle case, critical and chance write-ups, chance losses, snoop cancels,
write-backs and clean drops, the LLC bypass of harvested lines, back-pressure
stalls, and round-robin over the lenders only. It fails if any of them never
happened. It runs in a few seconds.

`tb_l2h_workloads` runs the sharing situations the design is meant for, also
at the default size. In the first, one critical task runs and three idle cores
lend: every live block goes up, the lenders take strict turns, and every lent
line later bypasses the LLC. In the second, a critical and a background task
share the chip with two lenders. At a critical MPKI of 5, 15 and 41 it measures
the share of background blocks sent up (0.773, 0.447 and 0.119 over 2000
blocks each, against 0.95^MPKI = 0.774, 0.463 and 0.122) and checks that every
critical block goes up.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert rtl/l2h_pkg.sv -Irtl -y rtl -y tb \
    tb/tb_l2_harvester.sv --top-module tb_l2_harvester -Mdir obj -o sim
./obj/sim
```

Replace `tb_l2_harvester` with any other testbench name. The RTL is written for
synthesis (RAM arrays for the bloom filter and the harvest bits, no
initialisation of RAM contents). It has been linted with Verilator and
elaborated with the slang front end of Yosys.

## Not included

The MPPP dead-block predictor (its feature tables and training rules are
outside this design), the snoop filter, the shared bus, the cores with their L1
and L2 caches, the LLC banks, the memory controller and DRAM, and the
prefetchers. The harvester connects to each of them through ports.
