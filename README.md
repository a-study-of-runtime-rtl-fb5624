# Prefetch-aware retention tuning for an STTRAM L1 data cache

STTRAM (spin-transfer torque RAM) can replace SRAM in an L1 cache, with far lower
leakage. Its weak point is writes: they cost time and energy, and the cost grows with
the cell's *retention time*, meaning how long it keeps its data unpowered. A cache only
has to keep a block for about as long as the program uses it. So retention can be cut
from years to microseconds, which makes writes cheap. The price is that blocks now
*expire*. A block left unwritten for longer than the retention time is lost, and a later
access to it misses (an *expiration miss*).

This RTL implements the PART and RPC schemes from Kuan and Adegbija, "A Study of
Runtime Adaptive Prefetching for STTRAM L1 Caches". The design makes two points:

1. **A prefetcher should also fetch expired blocks.** After an expiration miss, a stride
   prefetcher brings back the blocks that follow it in the same stream. Those blocks then
   hit instead of missing one after another.
2. **Expired, never-used prefetches measure both retention time and prefetch
   aggressiveness.** Each block carries a *prefetch bit*. A prefetch fill sets it and
   the first demand access clears it. When a block expires with the bit still set, it
   counts as an *expired unused prefetch*. Two ratios drive all decisions:
   * `allPF = prefetches / MSHR requests`, meaning all line reads sent to memory.
   * `expiredPF = expired unused prefetches / prefetches`.

   **PART** (prefetch-aware retention time tuning) picks the shortest retention time
   that does not make `expiredPF` grow too much. **RPC** (retention-time-based prefetch
   control) then maps `expiredPF` to a prefetch distance.

Only a few counters, a divider and one extra register are added to a cache that can
already switch retention time.

## Block structure

```
                 core (loads/stores, PC, instructions retired)
                               |
            +------------------v-------------------+      +------------------+
            |            sttram_l1_cache           |----->| stride_prefetcher|
            | 32 KB, 4-way, 64 B lines             | train|  RPT + address   |
            | tag/data, valid, expired, pf bit,    |<-----|  generator +     |
            | age counter per block; MSHRs         |  pop |  8-entry queue   |
            +--^---------------+------------+------+      +--------^---------+
          tick |        events |            | rt_active            | distance
   +-----------+-----+   +-----v------------+----+                 |
   | retention_timer |   |      part_tuner       |-----------------+
   +-----------------+   | counters, FSM of      |  rt_sel -> cache
                         | Algorithm 1,          |
                         | ratio_divider,        |<--> miss-based tuning
                         | rpc_mapper            |     (external, mt_* ports)
                         +-----------------------+
                               |
                        memory: line reads (demand / prefetch),
                        line responses, write-through stores
```

`part_rpc_l1d` is the top and wires these together. `part_pkg` holds the shared types:
the retention unit enum `rt_e`, the request structs, the per-unit write latency and the
thresholds.

## How blocks expire

A real reduced-retention array loses data gradually. This design times expiry with one
coarse shared clock, as follows:

* `retention_timer` emits one `tick` every `retention / 2**CNT_BITS` cycles for the
  active unit. With the defaults (2 GHz, `CNT_BITS = 2`) that is 12,500 cycles for
  25 us and 500,000 cycles for 1 ms.
* Each block has a `CNT_BITS`-wide age counter. Writing the block clears it: a fill or a
  store hit clears it, and a read does not.
* Each tick advances the age of every valid block. A block whose age is already at its
  maximum expires instead. Its valid bit clears and its tag is kept, marked "expired".
  A later miss to that tag is flagged as an expiration miss.
* So a block lives between 3/4 of the retention time and the full retention time after
  its last write.

If an expiring block still has its prefetch bit set, it adds to `ev_exp_unused`. This
output counts how many such blocks expire in the cycle, since one tick can expire many
blocks at once.

Switching retention unit models the base architecture's migration between physical
STTRAM units. The cache stops accepting requests for `MIGRATE_CYCLES` = 2560 cycles,
which is the source's worst case. It then runs with the new unit's retention and write
latency. Contents are kept, and every block's age restarts, as if it had just been
written into the new unit.

## Cache timing and protocol

| operation | cycles (accept to response) |
|---|---|
| load hit | 1 |
| store hit | 1 + write latency of the unit |
| load miss | memory latency + write latency (the fill) + 1 |
| retention switch | 2560 stall cycles |

Write latency per unit is 2, 3, 3, 3 and 4 cycles for 25 us, 50 us, 75 us, 100 us and
1 ms.

* **Write policy:** write-through with no write-allocate. An expiring block therefore
  never holds the only copy of modified data. A store to a line still in flight waits
  until that line has arrived.
* **Misses:** one demand miss is handled at a time. Up to `MSHRS` (8) line reads,
  demand or prefetch, can be outstanding.
* **Prefetch issue:** queued prefetches are sent when the cache is idle and no core
  request is waiting, or while it waits for a demand miss. This overlap is what lets
  prefetches arrive in time.
* **Prefetch filter:** a prefetch is dropped if its line is present and valid, already
  in flight, or no MSHR is free. An *expired* line is fetched again, which is the first
  idea of the design.
* **Late prefetch:** a demand miss to a line whose prefetch is in flight waits for that
  prefetch.
* **MSHRs full of prefetches:** a demand miss that finds every MSHR taken keeps
  accepting prefetch responses until one is free.
* **Replacement:** first invalid way, otherwise a per-set round-robin way.

All channels use valid/ready handshakes. Memory responses carry their line address, so
they may return in any order.

## Stride prefetcher

`stride_prefetcher` is a reference prediction table. It has 16 entries, direct mapped
by PC, and each entry holds the last address, the stride and a 2-bit confidence.

* **Training:** every demand access trains the entry of its PC.
* **Trigger:** a demand miss (expiration misses included), or the first demand hit on a
  prefetched block, triggers prefetching once the confidence reaches 2.
* **Addresses:** it queues `DEGREE` = 4 line addresses,

      line(addr + (distance + d) * step),  d = 0..3

  where `step` is the stride, but at least one line in the stride's direction. With
  distance 1 and a one-line stride, a miss on A prefetches A+1 .. A+4.

The distance comes from PART/RPC. It is 1 while PART samples, then 1, 4, 8, 16 or 32.

## PART: choosing the retention time

`part_tuner` runs when `tune_start` is pulsed at the start of an application's profiling
phase. It tries the five units from longest to shortest: 1 ms, 100, 75, 50, 25 us. On
each unit it runs one interval of `INTERVAL_INSTR` = 10 million retired instructions at
prefetch distance 1, counting the events in 32-bit counters. Then the shared
`ratio_divider` computes `allPF` and `expiredPF` in parts per million. This is a
restoring divider that takes 65 cycles per ratio.

The decision, per interval, with `out` starting at 1 ms:

* If `allPF` <= 0.1 %, prefetches barely matter. `out` becomes the current unit, and the
  choice is handed to the base architecture's miss-rate tuning through `mt_start` and
  `mt_rt`. Its answer, `mt_result` with `mt_done`, is final. That tuning is not part of
  this design. It receives the interval's access and miss counts.
* Otherwise, if no baseline exists yet, `out` becomes the current unit. If `expiredPF` >
  0.02 %, `expiredPF` is also stored as `baseExpiredPF`.
* Otherwise, if `expiredPF` < 2 x `baseExpiredPF`, `out` becomes the current unit and
  the next shorter unit is tried. If not, `out` is final.

After 25 us, `out` is final. The tuner then drives `rt_sel = out`, which triggers a
migration if needed, and sets the distance by RPC. It pulses `tune_done`. It keeps the
`expiredPF` measured on the unit that became `out`, and this is RPC's input.

## RPC: choosing the prefetch distance

`rpc_mapper` is the source's table. Its printed ranges leave small gaps, such as 1.00 to
1.01 %, and this design closes them at the bounds shown here:

| expiredPF (at distance 1) | distance |
|---|---|
| > 5 % | 1 |
| > 1 % .. 5 % | 4 |
| > 0.5 % .. 1 % | 8 |
| 0.05 % .. 0.5 % | 16 |
| < 0.05 % | 32 |

A high `expiredPF` means the stride pattern does not match the program, so prefetching is
kept conservative. A very low value means the streams are predictable, so the prefetcher
can run far ahead.

## Parameters of the top (`part_rpc_l1d`)

| parameter | default | origin |
|---|---|---|
| `SIZE_BYTES`, `LINE_BYTES`, `WAYS` | 32768, 64, 4 | source configuration |
| `CYCLES_PER_US` | 2000 (2 GHz) | source configuration |
| `INTERVAL_INSTR` | 10,000,000 | source |
| `MIGRATE_CYCLES` | 2560 | source (worst-case migration) |
| `PF_DEGREE` | 4 | source |
| `CNT_BITS` | 2 | own choice |
| `MSHRS` | 8 | own choice |
| `PF_ENTRIES` | 16 | own choice |
| `PFQ_DEPTH` | 8 | own choice |

The retention set, the write latencies, the thresholds (0.1 %, 0.02 %, 2x) and the RPC
table are constants in `part_pkg`, `part_tuner` and `rpc_mapper`.

To shorten simulation, lower `CYCLES_PER_US` (retention times shrink in cycles) and
`INTERVAL_INSTR`.

## Where this RTL departs from, or fills in, the source

* **Retention units.** The source assumes the multi-unit organisation of earlier work
  and does not describe it. Here there is a single array whose retention and write
  latency follow the selected unit. The migration is a fixed stall, not a real copy
  between arrays. The MTJ arrays themselves, their energy figures and the 22 nm process
  are outside digital RTL.
* **Degree and distance.** The source says PART measures "at prefetch degree 1" but
  also configures the prefetcher with degree 4. Here the degree stays 4 and the
  *distance* is 1 while sampling.
* **Miss-based tuning.** This fallback belongs to the base architecture and is only
  named in the source, so it is reached through ports.
* **The low-allPF hand-off.** The source's own evaluation bypassed this hand-off and
  always tuned on `expiredPF`. This RTL follows the algorithm as stated. If `mt_done`
  is tied high and `mt_rt` is fed back as `mt_result`, tuning stops at the current
  unit. That is not the same as continuing to tune on `expiredPF`.
* **RPC's comparator.** The source budgets one 32-bit comparator for RPC. The table
  here is evaluated with four comparators in parallel.
* **Fixed-point ratios.** Ratios are fixed-point ppm, rounded down.
* **Filled-in details.** These are all this design's own choices: the expiry timing
  scheme, the write policy, replacement, MSHR count, the prefetcher's table and
  confidence rule, the trigger condition and the queue.
* **Static distances.** The top has no input to force a static prefetch distance, so
  the fixed-distance configurations the source compares against (PFD_1 .. PFD_32)
  are not selectable.
* **Energy and latency results.** The source's results come from a cycle-level
  simulator. Nothing here reproduces them.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_rpc_mapper` | every table boundary and random ratios |
| `tb_ratio_divider` | corner and random operands; zero denominator; saturation; 65-cycle latency |
| `tb_retention_timer` | tick period of each unit; restart |
| `tb_stride_prefetcher` | hand-computed addresses at distances 1, 16 and 4; sub-line and negative strides; no trigger; irregular strides; full queue |
| `tb_part_tuner` | a reference model of the algorithm and table, over directed and 25 random profiling phases, including the miss-based hand-off; sampling distance 1; interval length |
| `tb_sttram_l1_cache` | hit and miss data and latencies; write-through; expiry after exactly 4 ticks; retention restart on a store; expired-unused counting; the prefetch filter; late prefetches; the 2560-cycle migration; replacement; MSHRs full of prefetches; 3000 random accesses |
| `tb_part_rpc_l1d` | end to end, with `CYCLES_PER_US = 20` and 3000-instruction intervals, over three profiling phases (strided, random, strided) |
| `tb_part_rpc_l1d_full` | one complete profiling phase with every parameter at its default: up to five 10 M-instruction intervals, several minutes of simulation |

`tb_part_rpc_l1d` replays the tuning algorithm on event counts taken at the top's ports
and checks the chosen unit and distance. It checks every load's data. It also requires
each mechanism to occur at least once: expiration miss, prefetch, used prefetch, expired
unused prefetch, late prefetch, migration, write-through and hand-off. `tb_part_rpc_l1d_full`
makes the same replay and data checks.

`tb/mem_model.sv` (main memory) and `tb/core_model.sv` (a traffic source with strided
or random streams) are behavioural helpers for the testbenches.

To simulate a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/part_pkg.sv tb/tb_part_rpc_l1d.sv \
          --top-module tb_part_rpc_l1d -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

Replace the testbench name to run another one. For a lint run:
`verilator --lint-only -Wall -Irtl rtl/part_pkg.sv rtl/part_rpc_l1d.sv`.

**How far to trust it:** the decision logic (Algorithm 1, the RPC table) and the
expiry and prefetch-bit accounting are checked against independent reference models.
The cache is checked for data correctness under random traffic. The surrounding
microarchitecture is plausible, but it is not the source's: cache pipeline,
replacement, prefetcher table and write policy were all chosen here. The RTL has only
been simulated and linted, not synthesised to a library or timed.
