# Reuse- and sharing-aware replacement for a way-partitioned shared LLC

Way partitioning gives each core of a multicore its own slice of a shared
last-level cache (LLC), so that one core's misses cannot evict another core's
lines. That makes cache behaviour, and with it the worst-case execution time
(WCET), easier to bound. It works badly for multithreaded programs, though:
when threads share data, a strictly partitioned cache loads a separate copy of
each shared line into every partition that touches it, wasting space and
creating copies that must be kept coherent.

The design here keeps the partitions for *eviction* but not for *lookup*. Every
core can hit on any line of the set, whichever partition it sits in, but a
miss can only replace a line of the requesting core's own partition. A shared
line therefore exists once, in the partition of the core that first loaded it,
and is read and written there by the others. Three small counters per line
record how often its owner reuses it and how widely it is shared; they drive
the replacement choice and the decision whether the line may be copied into
the requesting core's private L1 cache.

The RTL follows the replacement scheme published as SRCP (Ghosh, Sahula and
Bhargava, "Reuse-Aware Cache Partitioning Framework for Data-Sharing Multicore
Systems"), which was evaluated there as a simulator model. The published
description fixes the partitioning, the counters and their rules, but not the
microarchitecture; the pipeline, the interface and several details below are
this implementation's own and are marked as such.

## Partitions, local and global cores

With `NUM_CORES` cores and an `ASSOC`-way cache, each core owns
`ASSOC / NUM_CORES` ways of every set (4 of 16 by default). Here core *c* owns
the contiguous ways `4c .. 4c+3`; the scheme only needs the count, the
assignment of particular ways is a choice of this design
(`srcp_way_partition`).

For a given line, the core that owns the partition holding it is its **local
core**; every other core is a **global core** for that line. Since misses fill
only the requester's own partition, the local core of a line is always the core
that brought it in.

## Per-line state

Each line carries, besides valid, dirty and tag (`srcp_tag_array`), three
counters kept in the access count table, `srcp_act`:

| field | width (default) | meaning |
|---|---|---|
| LC, local count | 1 | the local core touched the line recently |
| AFC, access frequency count | 8 bits | reuse of the line by its local core |
| GCount, global count | log2(cores) = 2 bits | accesses by global cores |

A newly loaded line starts with GCount = 0 and AFC at the middle value
I = ceil((255 + 0) / 2) = 128. A line is **frequently used** while AFC >= I and
**shared** while GCount >= 1.

## What an access does

Every access reads a whole set, compares all `ASSOC` tags, and writes the
updated set back (`srcp_counter_update`):

* **Hit by the local core:** AFC + 1, LC set.
* **Hit by a global core:** GCount + 1. AFC and LC are untouched, because they
  describe the owner's reuse only. No copy is made in the requester's
  partition.
* **Miss:** in the requester's partition of this set, every line's AFC and
  GCount drop by one. Lines that are not reused therefore age out of the
  frequently-used class, and lines no longer shared drift back to private. A
  victim is then chosen from the requester's partition (below), replaced by
  the new line, and its counters set to AFC = 128, GCount = 0, LC = 1.

All counters saturate, at all-ones going up and at zero going down.

**LC as a recency bit.** The scheme asks for ties to go to "the line least used
recently by the local core" but gives LC only as a one-bit "accessed by the
local core" flag. Here LC behaves as a not-recently-used bit within a
partition: every local access sets it. When setting it would leave every valid
line of the partition marked, the other LC bits of the partition are cleared.
This is this design's reading.

**Scope of the decrement.** The decrement applies to the requester's ways *in
the accessed set*. The published text says "all the cache blocks in the
partition". Taken across every set, that would mean touching the whole
partition on every miss, which is not a sensible hardware operation.

## Choosing the victim

`srcp_victim_select` looks only at the requester's ways. The counters it sees
are the values after the miss decrement. It ranks the ways by
`{valid, AFC, GCount, LC}` and takes the smallest, as follows:

1. An empty way is used first.
2. Otherwise it takes the line with the lowest AFC, that is, the least reused
   by its owner.
3. Among those, it takes the lowest GCount, that is, the least shared.
4. Among those, it takes a line with LC = 0, one the owner has not touched
   recently.
5. Any remaining tie goes to the lowest way number.

Ranking AFC ahead of GCount is a choice of this design: the scheme asks for
"lowest AFC and lowest GCount" without saying which comes first. The empty-way
rule and the way-number rule are also this design's own.

## Private-cache fill or bypass

`srcp_access_classifier` looks at the line's counters after the access. It then
tells the requester whether the line may go into its L1 (`resp_l1_fill = 1`) or
whether the access must be served from the LLC only:

| line | read | write |
|---|---|---|
| private, frequently used | fill L1 | fill L1 |
| private, less frequently used | bypass | bypass |
| shared, frequently used | fill L1 | bypass |
| shared, less frequently used | bypass | bypass |

Writes to shared data are done in the LLC, never in a private cache. The only
copy is then the LLC line, which is how the scheme avoids most coherence
traffic for shared data. Loading only frequently used lines keeps streaming
data out of the L1s.

## Controller, interface and timing (`srcp_llc`)

```
 req ─► IDLE ──(read set: tags + ACT)──► LOOKUP ──► resp (registered)
         ▲                                 │ compare 16 tags, own_mask
         └──────── write set back ◄────────┘ counter update, victim, class
```

The controller has two states:

* **IDLE.** It takes a request when `req_valid && req_ready` and starts the
  synchronous read of the set from the tag store and the ACT.
* **LOOKUP.** It does all of the decision work in one cycle. It writes the set
  back at the end of the cycle and registers the answer.

After reset, `req_ready` stays low for `NUM_SETS` clocks. During that time
the tag store sweeps its memory and clears every valid bit, one set per
clock. The valid bits sit in the same RAM row as the tags, so nothing else
clears them.

`req_ready` is also low during LOOKUP. The controller therefore accepts at most one
request every two cycles. Each answer appears on `resp_*` with `resp_valid`
exactly two clocks after its request was taken, and the answer has no
back-pressure. Because the next read can start only after the write-back,
there is no read-after-write hazard on a set.

| port | meaning |
|---|---|
| `req_core`, `req_addr`, `req_write` | requesting core, byte address, write flag |
| `resp_hit`, `resp_way` | line was present; way that holds it now |
| `resp_local` | the line is in the requester's own partition (always 1 after a miss) |
| `resp_freq_used`, `resp_shared` | AFC >= I, GCount >= 1 |
| `resp_l1_fill` | line may be loaded into the requester's L1; 0 means bypass |
| `resp_evict`, `resp_evict_dirty`, `resp_evict_addr` | a valid line was replaced, it was written, its address |

The address splits as tag | set index | line offset. With the defaults (32-bit
addresses, 2048 sets of 64-byte lines) that is 15 | 11 | 6 bits.

On a miss the tag is allocated immediately. Fetching the line's data from
memory, and writing back a dirty victim, are left to the surrounding system.
This block keeps the tags and the replacement state, not the data array. The
dirty bit and the eviction outputs exist so that a system can do the
write-back.

A concurrent assertion in `srcp_llc` checks that no tag is ever present in two
ways of a set. That is the "no replicated shared data" property. A second
assertion checks that a miss never picks a victim outside the requester's
partition, which is the isolation the partitioning exists for.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_CORES` | 4 | published evaluation (4 cores, one thread each) |
| `ASSOC` | 16 | published evaluation (16-way LLC) |
| `AFC_W` | 8 | published (k = 8) |
| GCount width | log2(`NUM_CORES`) | published |
| `NUM_SETS` | 2048 | own choice (the size is not published) |
| `LINE_BYTES` | 64 | own choice |
| `ADDR_W` | 32 | own choice |

`ASSOC` must be a multiple of `NUM_CORES`. The shared defaults live in
`srcp_pkg`, together with `afc_init()` for I and the `line_class_e` enum.

## Files

| file | contents |
|---|---|
| `rtl/srcp_pkg.sv` | defaults, I, line class enum |
| `rtl/srcp_way_partition.sv` | core → mask of owned ways |
| `rtl/srcp_tag_array.sv` | valid/dirty/tag store, whole-set read and write, clearing sweep after reset |
| `rtl/srcp_act.sv` | LC/AFC/GCount store |
| `rtl/srcp_counter_update.sv` | hit/miss counter rules, LC recency |
| `rtl/srcp_victim_select.sv` | victim choice within the own partition |
| `rtl/srcp_access_classifier.sv` | reuse/sharing class, L1 fill or bypass |
| `rtl/srcp_llc.sv` | top: controller tying the above together |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Each testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops, and a watchdog ends a run that
hangs. For example:

```
verilator --binary --timing -Irtl -Itb rtl/srcp_pkg.sv tb/tb_srcp_llc.sv \
          --top-module tb_srcp_llc -Mdir obj -o sim && ./obj/sim
```

The same command works for the others if you substitute the testbench name.
Verilator finds the modules through `-Irtl`. The package must be named first.

`tb_srcp_llc` runs the top at its default size. Its reference model keeps its
own copy of every line's tag and counters and applies the rules above step by
step. The testbench compares every answer field with that model, together
with the two-cycle latency and the one-request-per-two-cycles rate.

The test starts with a directed phase. One line is reused by its owner until
its AFC saturates. Then the other cores read and write that same line, and
they must hit in the owner's partition.

About 30,000 random requests follow. They come from all cores, go to four
sets, and mix per-core private lines with a pool of shared lines. The test
counts how often each mechanism occurs and fails if any of them never does:

* local and global hits;
* fills of empty ways, evictions and dirty evictions;
* hits on lines that have decayed to less frequently used;
* AFC and GCount saturation;
* the three L1 outcomes;
* victim ties broken by LC and by way number;
* LC clears;
* request stalls.

The unit testbenches cover these modules:

* `tb_srcp_victim_select` and `tb_srcp_counter_update` check the rules with
  random inputs against step-by-step reference code.
* `tb_srcp_access_classifier` is exhaustive.
* `tb_srcp_tag_array` and `tb_srcp_act` compare random reads and writes with a
  reference copy. The tag-store test also times the clearing sweep.

## How far it matches the published scheme

The following follow the published description:

* static way partitioning with `ASSOC / NUM_CORES` ways per core;
* lookups across partitions, with eviction only from the requester's own
  partition;
* the three counters, their widths and the initial AFC value I;
* +1 on local and global hits, and −1 for the requester's partition on a miss;
* a victim with the lowest AFC and GCount, with ties broken by local-core
  recency;
* the frequent and shared thresholds;
* bypassing less frequently used data, and writing shared data in the LLC only.

The following are this design's own:

* the cache geometry (sets, line size, address width);
* which ways a core owns;
* saturating counters;
* the decrement limited to the accessed set;
* LC as a not-recently-used bit;
* AFC ranked before GCount, empty ways first, and the lowest-way final tie;
* classification on the post-update counters;
* the dirty bit and the valid-clearing sweep after reset;
* the two-state controller, the request/answer interface and its timing.

The published evaluation simulates PARSEC (blackscholes, dedup, ferret,
fluidanimate, swaptions) and SPLASH-2 (barnes, fft, radix, fmm, radiosity) on
four cores with a 16-way LLC. The default configuration has the same core count
and associativity. The cache size used there is not published, so the
2048-set default is an assumption. These benchmarks are full programs and
cannot be run on this block alone. The testbenches use synthetic access
streams instead.

Not included are the cores, the private L1 caches, the LLC data array and main
memory. The block provides the signals those parts would use: the fill/bypass
decision, the way and the eviction information. The WCET formulas of the
scheme are an analysis method, not hardware, and have no RTL counterpart.
