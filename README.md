# Row buffer locality-aware hybrid DRAM–PCM memory controller (RBLA-Dyn)

A hybrid main memory pairs a large, slow, dense non-volatile memory (here
phase-change memory, PCM) with a small DRAM that acts as a cache in front of
it. The question such a system has to answer is *which rows deserve a place in
DRAM*. This controller answers it with one observation: both DRAM and PCM banks
keep the last opened row in a row buffer, and an access that hits in the row
buffer costs about the same in either technology. Only a row buffer *miss*,
which has to reach the cell array, is much more expensive in PCM. A row that is
accessed in bursts (high row buffer locality) gains nothing from being moved to
DRAM. A row that is reused but keeps missing in the row buffer (low row buffer
locality) gains a lot.

So the controller counts row buffer misses per recently used PCM row and copies
a row into DRAM once its miss count exceeds a threshold, `MissThresh`. Every 10
million cycles it clears the counts and re-tunes the threshold by weighing the
cycles spent migrating rows against the cycles saved by serving requests from
DRAM. This variant, with the self-tuning threshold, is called RBLA-Dyn.

The RBLA policy, the stats store geometry, the reset interval and the
cost/benefit model follow the published design (Yoon, Meza, Ausavarungnirun,
Harding, Mutlu, "Row Buffer Locality Aware Caching Policies for Hybrid
Memories", ICCD 2012, and its later summary). Everything around the policy is
this implementation's own choice, because the description leaves it open: the
channel controllers, the DRAM cache organisation, the migration datapath, the
exact hill-climbing rule, widths and handshakes. These choices are marked
below and in the head comment of each file.

## A worked example

The example below shows why row buffer locality matters. Rows A and B sit in
the same PCM bank and are accessed alternately, so each access evicts the other
row from the row buffer. Rows C and D each have a bank to themselves and are
accessed in bursts. The pattern is `A B C C C A B D D D A B`. With the
simplified latencies used throughout this design (row hit 200 cycles in both
memories, row miss 400 cycles in DRAM and 700 in PCM):

* Caching C and D in DRAM (what a frequency-based policy might do, since they
  are accessed most often) leaves A and B in PCM. There they miss on every
  access, at 700 cycles each.
* Caching A and B instead moves the misses to DRAM (400 cycles). C and D stay
  in PCM, where their bursts mostly hit at 200 cycles, just as in DRAM.

`tb/tb_rbla_hmc_top.sv` and `tb/tb_rbla_hmc_full.sv` replay this pattern. They
check that A and B end up in DRAM and that C and D never leave PCM.

## Organisation

```
                 processor requests (word address = {row, column})
                                   |
                          +--------v---------+        interval_timer (10 M cycles)
                          |  rbla_hmc_top    |<------------+--------------+
                          |  request / mig.  |             |              |
                          |  state machine   |        clear|              |tick
                          +--+-----+------+--+             v              v
          directory lookup   |     |      |   PCM access  stats_store ---> rbla_dyn
        +--------------------+     |      +-------------> (miss counts,   (MissThresh)
        v                          |                       trigger)   <------+
  dram_cache_tags            +-----+------+
  (which rows are in DRAM)   v            v
                       chan_ctrl       chan_ctrl
                       (DRAM)          (PCM)
                          |               |
                     DRAM device      PCM device      (outside this design: ports)
```

| Module | File | Role |
|---|---|---|
| `rbla_pkg` | `rtl/rbla_pkg.sv` | shared constants: geometry, latencies, interval length |
| `stats_store` | `rtl/stats_store.sv` | 16-way, 128-set table of per-row miss counters; raises the caching trigger |
| `rbla_dyn` | `rtl/rbla_dyn.sv` | cost/benefit bookkeeping and hill climbing of `MissThresh` |
| `interval_timer` | `rtl/interval_timer.sv` | one-cycle tick every 10 million cycles |
| `dram_cache_tags` | `rtl/dram_cache_tags.sv` | directory of the DRAM cache: resident row, dirty bit per frame |
| `chan_ctrl` | `rtl/chan_ctrl.sv` | one memory channel: open-row tracking, hit/miss latency, device commands |
| `rbla_hmc_top` | `rtl/rbla_hmc_top.sv` | the controller: steers requests, feeds the stats store, migrates rows |

The processor and the DRAM and PCM chips are not part of the RTL. The top level
brings out a processor request port and one device command port per channel.
The testbenches drive the request port and attach a behavioural memory model
(`tb/mem_dev_model.sv`) to each device port.

## The stats store

This is the one structure the policy adds to a conventional hybrid memory
controller, and the part with the most detail.

**Geometry.** The store has 128 sets of 16 ways, 2048 entries in all. Each
entry is `{valid, tag[26:0], age[3:0], count[4:0]}`, 37 bits. 2048 × 37 bits is
9.25 KB, the published size of the structure. The published figures give the
set count, the associativity, LRU replacement, the 5-bit counter and the
9.25 KB total. The 27-bit tag and 4-bit age are what make the sum come out at
9.25 KB, so the design uses a 34-bit PCM row address (7 index bits + 27 tag
bits).

**Storage.** The store is one RAM of 128 words. A word holds a whole set
(16 × 37 = 592 bits), so a lookup reads one word. The RAM has a synchronous
read and one write per cycle, a shape that maps onto a RAM macro.

**An access** (one per PCM demand access) takes two cycles:

1. The request is accepted (`req_valid && req_ready`) and the set is read.
2. The tag is compared against all 16 ways and the entry is updated:
   * **Hit, row buffer miss:** the count increments, saturating at 31.
   * **Hit, row buffer hit:** the count stays.
   * **Miss:** an entry is allocated in the first invalid way, or else in the
     least recently used way. Its count starts at 1 after a row buffer miss and
     at 0 after a hit.

   The set is written back, and `resp_valid` is high in this cycle with the
   updated count. `resp_trigger` is set when that count is greater than
   `MissThresh`.

A triggering row's entry is invalidated in the same write, because the row
moves to DRAM and stops generating PCM accesses. The published description
does not say what happens to the entry; invalidating it is this design's
choice.

**LRU** is exact. The ages of the valid ways in a set are always a permutation
of 0..k−1, where 0 is the most recent. On a hit, the ways younger than the
accessed one age by one. A fill into a free way ages every valid way. A fill
that evicts replaces the way of age 15. When an entry is invalidated by a
trigger, every other valid way steps back by one, so the ages stay a
permutation.

**Periodic clear.** The `clear` pulse comes from the interval timer. It waits
for any access in flight, then sweeps the RAM with one read and one write per
set, 256 cycles in all. The sweep zeroes every count and keeps tags, valid bits
and ages. Requests wait while the sweep runs. After reset the same sweep runs
once and also clears the valid bits, so the RAM needs no reset of its own.
Clearing the counts stops rows with little reuse from slowly drifting over the
threshold.

## Choosing MissThresh: RBLA-Dyn

`rbla_dyn` counts three kinds of events during each interval: rows migrated,
demand reads served by DRAM, and demand writes served by DRAM. When the
interval ends it computes:

```
Cost    = NumMigrations  * t_migration
Benefit = NumReads_dram  * (t_read,pcm  - t_read,dram)
        + NumWrites_dram * (t_write,pcm - t_write,dram)
Net     = Benefit - Cost            (48-bit signed)
```

The latencies in `Benefit` are row buffer miss latencies. `t_migration` is the
time to move one row, derived from this design's row size and latencies as
PCM miss + 31 PCM hits + DRAM miss + 31 DRAM hits = 13 500 cycles.

The threshold then moves one step. The published design calls this step "a
simple hill-climbing algorithm" and leaves the rule to an earlier paper, so the
rule here is this design's own:

* If `Net < 0`, migrations are not paying for themselves: raise `MissThresh`.
* Otherwise, if `Net` is larger than in the previous interval, step again in
  the same direction as the last step.
* Otherwise, reverse direction.

`MissThresh` is kept in 0..30, so a saturated counter (31) can still exceed
it. It starts at 2, which is also this design's own choice. The new value takes
effect in the cycle after the tick. Events that arrive on the tick cycle count
towards the next interval.

The top's `dyn_en` input selects the policy. With `dyn_en = 1` (the main
configuration) the threshold adapts as above. With `dyn_en = 0` it stays where
it is (2 after reset), which gives plain RBLA with a fixed `MissThresh`. The
net benefit is still computed and reported on `last_net_benefit`, so software
can compare the two modes.

With the default latencies, DRAM and PCM writes cost the same as reads, so
the write term weighs exactly like the read term. Only read latencies are
published. Set `DRAM_T_WR_MISS` and `PCM_T_WR_MISS` in `rbla_pkg` if your
devices write more slowly; the migration cost estimate in the top then
follows them.

## Request flow and migration

`rbla_hmc_top` handles one demand request at a time:

1. **Dispatch.** The DRAM cache directory is looked up with the row address.
   A resident row is sent to the DRAM controller with its frame number as the
   DRAM row. Any other row goes to the PCM controller.
2. **Answer.** The channel's answer is registered and returned to the
   processor, with `resp_src` (DRAM or PCM) and the row buffer hit flag. A DRAM
   write marks the frame dirty. DRAM reads and writes are reported to
   `rbla_dyn`.
3. **Stats update (PCM only).** The row and its row buffer outcome go to the
   stats store. If the response triggers, a migration starts. The processor
   has already been answered.
4. **Migration.** If the frame the row maps to holds a dirty row, that row is
   first written back to PCM, word by word (DRAM read, then PCM write). Then
   the new row is copied word by word (PCM read, then DRAM write). Finally the
   directory is updated and `rbla_dyn` counts one migration. No request is
   accepted until the migration ends (`migrating` is high).

Serial handling, answering before migrating, write-back of dirty victims and
word-by-word copying are all this design's choices. The published design
specifies the caching decision, not the datapath that carries it out.

**Latency seen by the processor:** a request accepted on edge *E* is answered
on edge *E + T + 1*. *T* is the device latency of the access (200 cycles for a
row hit in either memory, 400 for a DRAM miss, 700 for a PCM miss), and the one
extra cycle is the directory lookup. A stats store update adds 3 cycles before
the next request is accepted. A migration of a clean frame adds about 13 600
cycles at the default sizes.

**DRAM cache directory.** `dram_cache_tags` is a direct-mapped table of
1024 frames at row granularity, with a valid bit and a dirty bit per frame. The
frame index is `row[9:0] XOR row[19:10]`, and the tag is `row[33:10]`. The XOR
matters. The channel controllers pick the bank from the low row bits, so
without it the rows that conflict in a PCM bank (the very rows RBLA migrates)
would also compete for one DRAM frame. The occupant's full row address is
recovered from the frame index and the tag, for write-back.

## Channel controllers

`chan_ctrl` is instantiated twice. The DRAM instance has 8 banks and a 400-cycle
miss. The PCM instance has 16 banks (two ranks of 8) and a 700-cycle miss. Both
have a 200-cycle row hit. Each controller keeps the open row of every bank
(open-page policy, bank = low row bits) and serves one request at a time:

* On a row buffer miss, the first busy cycle carries `dev_act` for the new row.
* The cycle before the answer carries `dev_rd` or `dev_wr`. Read data is
  sampled from `dev_rdata` in that cycle.
* `resp_valid` follows exactly `T_HIT`, `T_MISS` or `T_WR_MISS` cycles after
  acceptance, together with `resp_rb_hit`.

The latencies are the simplified figures of the worked example above; write
latencies default to the read latencies. These controllers stand in for real
DRAM and PCM controllers. They have no request queue, no FR-FCFS scheduling and
no real DDR or PCM timing parameters. What they do provide, exactly, is the row
buffer hit and miss classification and its latency, which is what the policy
depends on.

## Parameters

Defaults are in `rbla_pkg` and on the modules. "Published" means taken from the
description of the design; everything else is this implementation's choice.

| Parameter | Default | Origin |
|---|---|---|
| stats store ways × sets | 16 × 128 | published |
| miss counter width | 5 bits | published |
| stats store size | 2048 × 37 bits = 9.25 KB | published total; entry split chosen to match it |
| clear / adaptation interval | 10 000 000 cycles | published |
| row hit latency (DRAM, PCM) | 200 cycles | published (simplified example) |
| row miss latency DRAM / PCM | 400 / 700 cycles | published (simplified example) |
| write miss latency DRAM / PCM | 400 / 700 cycles | chosen (no figure given) |
| `t_migration` | 13 500 cycles | derived from row size and latencies |
| initial `MissThresh` | 2 | chosen |
| PCM row address | 34 bits | chosen (makes the 9.25 KB come out) |
| words per row × word | 32 × 64 bits | chosen |
| DRAM cache frames | 1024, direct-mapped | chosen |
| banks DRAM / PCM | 8 / 16 | chosen |

## Verification

Each testbench checks itself and ends with a line `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_stats_store` | Full size. A reference model with one recency-ordered list per set predicts hit, count and trigger for 3000 accesses concentrated on 3 sets (many LRU evictions), with the threshold changing during the run. Also checks that each periodic clear zeroes every count, that the sweep lasts 256 cycles, and that each answer comes one cycle after acceptance. |
| `tb_rbla_dyn` | Default latencies. For 300 intervals of random and steered event streams, recomputes Cost, Benefit, net benefit and the hill-climbing step. Covers the negative, improved and not-improved branches and both threshold bounds. Every seventh interval runs with adaptation off; the threshold must then hold. |
| `tb_interval_timer` | Full 10-million-cycle period: exact tick spacing, one-cycle ticks, epoch count; also a short-period instance. |
| `tb_dram_cache_tags` | Full size. A reference table checks every lookup (hit, frame, occupant, dirty) under random fills and dirty marks. |
| `tb_chan_ctrl` | PCM latencies. For random reads and writes, checks the hit flag, the exact latency and the read data. The memory model counts protocol errors and activations. |
| `tb_rbla_hmc_top` | End to end at reduced size (12-bit rows, 8 words per row, 16 frames, 4 × 8 stats store, 3000-cycle intervals, short latencies). Replays the worked example, then runs 6000 random reads and writes. Every read must return the last value written, wherever the row lives. Each mechanism must occur: DRAM hit, PCM row hit and miss, stats store allocation and eviction, migration, dirty write-back, periodic clear, a stats update stalled by a clear sweep, threshold raised and lowered, and intervals ending with `dyn_en = 0` (threshold must not move). |
| `tb_rbla_hmc_full` | End to end with every default. Replays the worked example (two 32-word migrations), checks every latency, then runs to the end of the first 10-million-cycle interval. There it checks that the net benefit is negative and that `MissThresh` rose from 2 to 3. |

Simulating with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rbla_pkg.sv tb/tb_rbla_hmc_top.sv --top-module tb_rbla_hmc_top
./obj_dir/Vtb_rbla_hmc_top
```

Replace the testbench name to run any of the others. Each finishes in seconds.
The full-size one simulates about 10 million cycles in under 10 seconds.
Compiling `rtl/` alone with `verilator --lint-only -Wall` reports only unused
signals and parameters. Those are status outputs of sub-blocks that the top
does not consume.

## Limits and departures

* **Not built:** the processor, the DRAM and PCM devices, the physical memory
  channels, request queues and FR-FCFS scheduling. The frequency-based caching
  policies that the published design is compared against are not built
  either.
* **Serial:** one request at a time. Throughput figures from this RTL say
  nothing about a pipelined controller with many outstanding requests.
* **Hill-climbing rule:** as stated above, the rule is a plausible reading of
  "simple hill climbing" with a unit step, not a copy of the original
  algorithm.
* **Event counters** in `rbla_dyn` are 24 bits and saturate. That is enough for
  10-million-cycle intervals at the latencies here.
