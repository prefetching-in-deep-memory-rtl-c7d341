# Two-level prefetching for a memory hierarchy with NVRAM as main memory

NVRAM gives main memory far more capacity than DRAM. The cost is latency:
an NVRAM read here takes 353 processor cycles, against 33 for DRAM. To hide
it, the memory behind the processor is built as three levels, all run by an
off-chip **hybrid memory controller (HMC)**:

1. a fast SRAM **sector cache** inside the controller;
2. DRAM DIMMs used as a large **DRAM cache** of NVRAM; the controller holds
   its tags in an SRAM **tag cache**;
3. **NVRAM**, which is main memory.

This organisation (NVRAM main memory with an SRAM cache and a DRAM cache)
is called NV-S-D below.

This RTL adds prefetching at two places in that hierarchy:

* **In the HMC.** A next-line prefetcher works on whole 256 B sectors. It
  brings the following sectors into the sector cache before they are asked
  for. Prefetched sectors are stored only in the sector cache, never in the
  DRAM cache.
* **At the L1 data cache, on the processor.** An engine combines a
  next-line prefetcher and an instruction-pointer (IP) based stride
  prefetcher.

The off-chip prefetcher alone already cuts the controller's own miss rate.
But a sector-cache hit still costs dozens of cycles, and an out-of-order
core cannot hide that. The on-chip engine brings lines closer to the core.
It also sends the HMC a denser, more regular stream of requests, which the
HMC's next-line prefetcher can then follow. The top module (`nvsd_top`) is
this two-level system. Either level can be switched off at run time, which
gives the HMC-only system and the no-prefetch baseline from the same
hardware.

```
            processor chip                         |            off chip (HMC)
  L1 data accesses --> l1_prefetch_engine           |
                        |- next_line_prefetcher     |   mem_req --> hmc ----------------------+
                        |    '- stream_buffers (8x32)   (block)      |- hmc_sector_cache 8 MB |
                        '- stride_prefetcher        |               |- tag_cache (64 MB DRAM)|
                             '- stream_buffers (8x32)               '- next_line_prefetcher  |
                        --> l1pf_* (lines to fetch) |                    '- stream_buffers    |
                                                    |     dram_* (sectors) <------------------+
                                                    |     nvm_*  (sectors) <------------------+
```

The core, the L1 and L2 caches, and the DRAM and NVRAM devices are not in
the RTL. Their connections are ports of `nvsd_top`.

## Addresses, blocks and sectors

* Physical addresses are 40 bits wide.
* The processor side works in **64 B blocks**. A block address is
  `addr[39:6]`, 34 bits.
* The HMC stores and moves **256 B sectors** of four blocks. A sector
  address is `addr[39:8]`, 32 bits. The two bits below it select the block
  within the sector.

All shared types are in `rtl/nvsd_pkg.sv`:

* `hmc_req_t` is a block request: write flag, block address and 512-bit data.
* `media_req_t` is a sector request to DRAM or NVRAM: write flag, sector
  address, a four-bit block mask and 2048-bit data.
* `hmc_stats_t` holds the controller's event counters.

## The hybrid memory controller (`hmc`)

The controller is blocking: it serves one request, demand or prefetch, from
start to end. Demand requests always win. A queued prefetch is served only
when no demand request is waiting.

### Path of a demand request

| Step | State | What happens |
|---|---|---|
| 1 | `S_TAG` | The sector cache is looked up. The tag array has a latency of `TAG_LAT` = 17 cycles. The lookup result includes the victim way, chosen now in case of a miss. |
| 2a | `S_DATA`, `S_RESP` | **On a hit**, the block is read or written in the data array (`DATA_LAT` = 17). If the hit sector was brought by a prefetch, its mark is cleared, the hit is counted as a useful prefetch, and the prefetcher is triggered again. |
| 2b | `S_WB_*` | **On a miss**, the prefetcher is triggered. If the victim sector is dirty, only its dirty blocks are written to NVRAM, using the block mask. Its DRAM copy is now stale, so it is dropped from the tag cache. |
| 3 | `S_TC`, `S_TC_RES` | The tag cache is looked up. A hit means the sector is in the DRAM cache. |
| 4 | `S_MREQ`, `S_MWAIT` | The sector is read from DRAM on a tag hit, or from NVRAM otherwise. It is filled into the victim way, and the request is answered from it: a write is merged into the sector, a read returns its block. |
| 5 | `S_DFILL_*` | A sector that came from NVRAM is also written into the DRAM cache and recorded in the tag cache. This happens after the response, so it does not add to the request's latency. |

### Path of a prefetch

A prefetch follows the same path with four differences:

* If its sector is already in the sector cache, it is dropped and counted as
  dropped.
* It does not train the prefetcher.
* The filled sector is marked as prefetched.
* Step 5 is skipped, so a prefetch never places data in the DRAM cache.

The tag cache check in step 3 is what lets a prefetch be served from DRAM
when the sector is there, and from NVRAM only when it is not.

### Write policy and consistency

Copies in the DRAM cache are always clean. Writes go to the sector cache,
which is write-back and allocates on a write. A dirty sector that leaves
the sector cache is written to NVRAM, and its DRAM copy is dropped. As a
result, NVRAM plus the sector cache always hold the current data. A
DRAM-cache frame can be overwritten, by a later fill that maps to it,
without writing anything back.

### Latency

Cycles from the request being taken to `resp_valid`, with the default media:

| Case | Cycles |
|---|---|
| Sector-cache hit | `TAG_LAT + DATA_LAT + 2` = 36 |
| Miss, DRAM-cache hit (clean victim) | `1 + TAG_LAT + 2 + 1 + 33 + 2` = 56 |
| Miss, NVRAM read (clean victim) | `1 + TAG_LAT + 2 + 1 + 353 + 2` = 376 |

A dirty victim adds its data-array read and the NVRAM write (86 cycles)
before the tag-cache lookup. The media models answer each request a fixed
time after they accept it:

* DRAM: 33 cycles for a read, 11 for a write;
* NVRAM: 353 cycles for a read, 86 for a write.

`tb_hmc` checks the three latencies in the table cycle for cycle.

### Sector cache (`hmc_sector_cache`)

The sector cache has these features:

* 8 MB, 16 ways and 256 B lines, which gives 2048 sets.
* Each way holds a valid bit, a prefetched bit, a dirty bit per block and a
  tag.
* Replacement uses a round-robin pointer per set, and an invalid way is
  always taken first.
* Lookups are registered. The surrounding FSM models the 17-cycle latency.
* After reset, a sweep clears one set per cycle. `init_done` then rises and
  the controller raises `ready`.

### Tag cache (`tag_cache`)

The tag cache is a direct-mapped table with one `{valid, tag}` entry per
256 B frame of the 64 MB DRAM cache, which makes 262 144 entries. A fill
writes the entry. An invalidate clears the entry only if it still holds the
given sector, so a frame that has since been refilled by another sector is
not disturbed. Like the sector cache, it is cleared by a sweep after reset.

## Stream buffers (`stream_buffers`)

Every prefetcher here queues its candidates in a set of stream buffers: 8
buffers of 32 line addresses each. A prefetcher pushes one **stream step**
`(base, stride, count, owner)`:

* The candidates are `base + j*stride` for `j = 1..count`.
* `owner` names the stream. For the stride prefetcher this is the index of
  its table entry; for next-line prefetchers it is 0.

What makes the buffers work is **continuation**. Suppose a buffer already
follows the stream: it has the same owner and stride, and the last line it
queued is `base + k*stride` with `0 <= k <= count`. Then the push extends
that buffer with only the candidates beyond `k`.

For example, a next-line prefetcher of depth 2 sees misses on lines 100, 101
and 102:

* The push for 100 queues 101 and 102.
* The push for 101 finds 102 already last, so it adds only 103.
* The push for 102 adds only 104.

So each line is queued once, and the stream runs `count` lines ahead of the
accesses.

If no buffer matches, a buffer is taken round-robin, flushed, and given the
new stream. Candidates that do not fit in a full buffer are dropped, and the
drop is reported (`ev_drop`). Pushes are never refused.

One issue port drains the buffers, one line per cycle, round-robin over the
buffers that are not empty.

## L1 prefetching engine

### Next-line prefetcher (`next_line_prefetcher`)

* It is triggered by an L1 miss or by a hit on a line that was prefetched.
  The same module, working on sector addresses, is the HMC's prefetcher.
* It pushes `(line, +1, DEPTH, 0)` into its own stream buffers. `DEPTH` is
  2 at L1 and 2 in the HMC.
* Because of continuation, a sequential stream keeps a window of `DEPTH`
  lines in flight ahead of the demand stream.

### Stride prefetcher (`stride_prefetcher`)

The stride prefetcher keeps a reference table of 64 entries, direct-mapped
on the low bits of the load's IP. Each entry holds:

* the rest of the IP, as a tag;
* the last line address;
* the last stride, in lines.

On every load, the difference from the stored last address is compared with
the stored stride. The entry is then updated with the new address and
difference. A **stride hit** needs all of these:

* the tag matches;
* the difference fits in 16 bits;
* the difference equals the stored stride;
* the stride is not zero.

A hit pushes `(line, stride, DEPTH=4, entry)`. Each load instruction
therefore gets its own stream buffer, which runs four strides ahead, in
either direction.

### Merging (`l1_prefetch_engine`)

Only loads train the stride table. Misses and prefetched-line hits from
both loads and stores trigger the next-line prefetcher. The two request
streams share one valid/ready port towards the L2:

* The stride prefetcher goes first.
* A line equal to the one just issued is not sent again. This happens when
  a unit-stride load feeds both prefetchers.

An assertion checks that rule.

## Counters and the prefetching metrics

`hmc_stats_t` counts:

* demand requests and demand misses;
* issued, dropped and useful prefetches;
* DRAM and NVRAM reads;
* DRAM-cache fills;
* write-backs.

The L1 engine and the HMC also pulse event outputs:

* next-line triggers and stride hits;
* stream-buffer drops;
* duplicates filtered.

The two metrics used to judge the prefetchers compare a run with
prefetching against the same run without it (`*_pf_enable` low):

```
coverage = 1 - misses_with / misses_without
accuracy = (misses_without - misses_with) / prefetches_issued
```

Here `misses` is `demand_misses` and `prefetches_issued` is `pf_issued`.
`pf_useful`, the prefetched sectors that a demand later hit, is a direct
lower bound for the numerator of the accuracy.

## Parameters

Defaults come from the published configuration unless marked as assumed.

| Module | Parameter | Default | Source |
|---|---|---|---|
| hmc, top | `SC_BYTES`, `SC_WAYS` | 8 MB, 16 | published |
| hmc, top | `TAG_LAT`, `DATA_LAT` | 17, 17 | published |
| hmc, top | `DRAM_BYTES` | 64 MB | published |
| hmc | `PF_DEPTH`, `PF_BUFS`, `PF_ENTRIES` | 2, 8, 32 | assumed equal to the L1 next-line prefetcher |
| top, engine | `NL_DEPTH`, `STRIDE_DEPTH` | 2, 4 | published |
| top, engine | `NUM_BUF`, `SB_ENTRIES` | 8, 32 | published |
| top, engine | `RPT_ENTRIES` | 64 | assumed |
| package | address width | 40 bits | assumed |
| media models | DRAM read/write, NVRAM read/write | 33/11, 353/86 cycles | published |

## Where this design departs from, or goes beyond, the published description

* **Size of the controller cache.** The text gives 64 MB as an example of
  the HMC cache size, while the configuration table lists 8 MB. 8 MB is used.
* **L3.** The block diagram draws an L3. The text and the configuration
  list only L1 and L2, which is followed here. None of the processor caches
  are in the RTL anyway.
* **DRAM channels.** The DRAM cache has two channels. Here it is a single
  sector port, and the controller, being blocking, never has two DRAM
  accesses in flight. Channel parallelism is not modelled.
* **Blocking controller.** A real controller would overlap misses. This one
  serves one request at a time, so absolute performance figures from it
  would be pessimistic. Hit and miss *counts*, and therefore coverage and
  accuracy, do not depend on this.
* **Choices where the description is silent:**
  * the DRAM-cache fill policy (demand NVRAM fills only);
  * the write-back path (dirty victims go to NVRAM and stale DRAM copies
    are invalidated);
  * write-allocate;
  * round-robin replacement;
  * direct mapping of the DRAM cache;
  * the stream-buffer continuation, allocation and overflow rules;
  * the stride table size and indexing;
  * arbitration and duplicate filtering in the L1 engine;
  * the address width.
* **What the L1 engine sees.** The engine observes accesses and emits line
  addresses; the L1 cache that would hold the lines is outside the design.
  Whether a prefetched line goes to L1 or stays in a buffer is therefore a
  matter for that cache.

## Verification

Each block has a self-checking testbench in `tb/` that compares against
values worked out independently. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_stream_buffers` | allocation, continuation without duplicates, negative strides, overflow drops, round-robin issue |
| `tb_next_line_prefetcher` | triggering on misses and prefetch hits only, the depth-2 window |
| `tb_stride_prefetcher` | training, stride hits, zero and changed strides, backward strides, replacement of an entry |
| `tb_l1_prefetch_engine` | stride priority, duplicate filtering, stores not training the table |
| `tb_hmc_sector_cache` | lookup, victim choice, dirty masks, prefetched marks, reset sweep (at 4 sets × 4 ways) |
| `tb_tag_cache` | fill, guarded invalidate, aliasing (at 16 frames) |
| `tb_hmc` | every controller path against a reference memory, the exact latencies above, then a random phase (small caches) |
| `tb_nvsd_top` | the whole system at its **default sizes** |

`tb_nvsd_top` stands in for the core, L1 and L2 and checks every returned
block against a reference memory. It counts every mechanism and fails if
one never happened:

* L1 stride and next-line prefetches;
* stream-buffer overflow at both levels;
* the duplicate filter;
* sector hits and misses;
* DRAM-cache hits through the tag cache;
* dirty write-backs;
* useful and dropped HMC prefetches;
* switching both levels off.

The full-size run takes well under a minute.

`tb_nvsd_metrics` measures coverage and accuracy, also at the default
sizes. It uses a synthetic load stream that mixes three patterns:

* a sequential stream;
* a stream with a stride of two sectors;
* random lines in a 1 MB region.

The stream runs four times: with no prefetching, HMC only, L1 only, and
both. The testbench acts as an in-order core with an unbounded L1. It
waits for each miss, then computes for 800 cycles. Without prefetching,
misses must equal the distinct lines and sectors touched, exactly. The
runs then give:

| Configuration | Measured at | Coverage | Accuracy |
|---|---|---|---|
| HMC only | HMC | 0.60 | 0.33 |
| L1 only | L1 | 0.34 | 0.20 |
| HMC and L1 | HMC (baseline: L1 only) | 0.51 | 0.34 |

These numbers describe this stream only, not server workloads. The
controller is blocking, so a prefetch in progress holds up demand
requests. With short compute gaps, queued prefetches wait behind demand
traffic and coverage falls: with 150-cycle gaps it drops to about 0.2.

`tb/media_model.sv` is a behavioural DRAM/NVRAM model with fixed read and
write latencies and sparse storage. `tb/nvsd_tb_pkg.sv` generates the
initial memory contents: word `i` of block `a` is
`(a*0x9E3779B1 + i*0x01000193) ^ seed`.

To run a testbench with verilator, for example the end-to-end one:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/nvsd_pkg.sv tb/nvsd_tb_pkg.sv tb/tb_nvsd_top.sv --top-module tb_nvsd_top
./obj_dir/Vtb_nvsd_top
```

Block testbenches are built the same way, with their own file and top
module name. Testbenches that do not use memory contents need only
`rtl/nvsd_pkg.sv`. The simulator has two states, so every state a testbench
reads is reset or initialised. The large data arrays are not reset: they
are written before they are read.

## Files

* `rtl/nvsd_pkg.sv`: widths, address types, request and statistics structs.
* `rtl/stream_buffers.sv`, `rtl/next_line_prefetcher.sv`,
  `rtl/stride_prefetcher.sv`, `rtl/l1_prefetch_engine.sv`: the prefetchers.
* `rtl/hmc_sector_cache.sv`, `rtl/tag_cache.sv`, `rtl/hmc.sv`: the hybrid
  memory controller.
* `rtl/nvsd_top.sv`: the two-level system.
* `tb/`: the testbenches, the media model and the testbench package.
