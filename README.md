# SkyByte CXL-SSD: register-transfer model of the controller and its host hooks

A CXL-attached SSD lets the CPU issue ordinary loads and stores to flash, but
three things make it a poor memory. A load that misses the SSD's internal DRAM
waits microseconds for flash, and milliseconds if garbage collection holds the
channel. The core can do nothing useful meanwhile. CXL moves 64-byte lines
while flash moves 4 KB pages, so a page-managed DRAM cache wastes most of its
capacity and write bandwidth on lines nobody touched. And hot data stays in
the slow device.

The SkyByte design answers each problem with one mechanism:

* **Long-delay hint.** When the controller predicts that a read will wait
  longer than a context switch costs, it does not keep the core waiting. It
  answers at once with a new CXL.mem No-Data-Response opcode, *SkyByte-Delay*
  (111b). The host turns that response into a *Long Delay Exception* on the
  issuing core. The OS switches to another thread, and the load is replayed
  later. Meanwhile the SSD fetches the page, so the replay hits.
* **Cacheline write log.** Writes are appended, one 64-byte line at a time,
  to a log in SSD DRAM, indexed by a two-level hash. The rest of the DRAM is
  a page-granular read-write data cache. Full log buffers are compacted in
  the background, so that each flash page is written once per compaction,
  however many of its lines changed.
* **Adaptive page promotion.** Pages that the data cache sees often are
  offered to the host with an interrupt, and the OS copies them into host
  DRAM. A small table in the host root complex, the Promotion Look-aside
  Buffer (PLB), keeps the copy coherent while it is in flight.

This RTL covers:

* the SSD controller's data path and control: log, index, cache tags,
  channel queues, trigger policy, compaction and promotion clean-up;
* the host-side logic that the scheme needs: the NDR decoder, exception
  generation and the two PLBs.

These parts stay outside and appear as ports:

* the DRAM and flash parts;
* the FTL firmware with its garbage collector;
* the CPU pipeline and the OS.

## Block map

```
 CPU cores ──req/tag/core──► skybyte_top
                             ├─ plb ───────────── writes to copied lines ──► host_fwd_* (host DRAM)
                             ├─ plb_huge ──────── the same for 2 MB huge pages (two-level bitmap)
                             ├─ host_cxl_tracker ─ tags, cores; Delay NDR ─► exc_* (Long Delay Exception)
                             │    └─ cxl_ndr_codec
                             └─ ssd_controller ── CXL.mem MemRd/MemWr in, MemData / Cmp / SkyByte-Delay out
                                  ├─ write_log            two log buffers: pointers, switch, release
                                  ├─ log_index ×2         one two-level hash index per buffer
                                  ├─ data_cache           tags, LRU, access counters (hot pages)
                                  ├─ flash_channel_queue ×CHANNELS   FIFO + op counters + timer
                                  ├─ ctx_switch_trigger   latency estimate vs threshold
                                  ├─ coalescing_buffer    page merge buffer for compaction
                                  └─ migration_ctrl       MSI-X offer, wait for ack, drop page
                                  ports: dram_* (line-wide SSD DRAM), fl_* (flash page buffer),
                                         gc_block / gc_erase_push (FTL), msix_* / host_ack (OS)
```

All modules share `skybyte_pkg`, which holds:

* the address split: 52-bit logical page address (LPA), 6-bit line offset,
  64-byte lines;
* the NDR message layout and opcodes;
* the CXL.mem request and response structs;
* the event counters.

## The long-delay hint, end to end

1. A MemRd reaches the controller. The controller looks up the data cache and
   the indexes of both log buffers in the same cycle.
2. On a double miss, the page's flash channel is found. It is the physical
   page number modulo the channel count. The physical page is the low 25 bits
   of the LPA, which stands in for the FTL mapping.
3. `ctx_switch_trigger` reads that channel's queue counters and computes

       est = read_lat*(num_read + 1) + write_lat*num_write + erase_lat*num_erase

   A hint is raised if `est > threshold`, or at once if the channel is held
   by garbage collection (`gc_block`). The counters include the operation
   currently in service. The decision is registered one cycle after the
   request is evaluated.
4. The hint leaves as an NDR with opcode 111b and the request's tag.
   `cxl_ndr_codec` packs the 40-bit message, MSB first: valid, opcode[2:0],
   4 reserved bits, tag[15:0], 16 reserved bits. The controller carries on
   and fetches the page into the cache.
5. In the host, `host_cxl_tracker` matches the tag against its outstanding
   requests. It pulses `exc_valid` with the core and tag of the delayed load.
   MemData and Cmp responses instead pulse `cpu_rsp_valid` for the right core.
6. The OS's part (scheduling, and replaying the load) is outside the RTL. The
   testbenches replay the load after a fixed wait.

With the evaluated numbers (3 µs flash read, 2 µs threshold), every flash miss
triggers the hint, even on an idle channel. This happens because the request
counts itself (`num_read + 1`). Without the hint, the read waits for its turn
in the queue and returns MemData. `cs_enable` switches the mechanism off. The
latencies and the threshold are run-time inputs in clock cycles, because the
host OS is meant to tune the threshold.

## Write log and its index

**Buffers.** The log holds two circular buffers of `LOG_ENTRIES` line slots
each: 2 × 512 Ki × 64 B = 64 MB by default. `write_log` keeps a tail pointer
and a fill count per buffer.

* A write is appended at the tail of the active buffer. The DRAM line address
  is `{buffer, slot}`.
* The cycle after the active buffer becomes full, the log switches to the
  other buffer, if that buffer has been released. It then pulses
  `compact_start` for the full buffer.
* If the other buffer is still being compacted, writes stall at the
  controller's input until it is released.

**Index.** Each buffer has its own `log_index`, so a read can search the old
and the new buffer in parallel. The newest buffer wins. The index has two
levels:

* **Level 1** is an open-addressed table of `L1_ENTRIES` slots. Each slot
  holds {valid, dead, LPA, pointer to the page's first chunk}. The slot is
  `hash(LPA) = (a ^ a>>17 ^ a>>34)` mod size, with linear probing.
* **Level 2** holds, per page, the logged lines of that page. It is made of
  16-byte *chunks*, each with four {line offset (6 bits), log offset
  (26 bits)} entries plus a link. Chunks come from a bump-allocated pool of
  `CHUNKS` entries that is emptied when the buffer is released.

A page starts with one chunk, and the chunk chain grows by one chunk when it
is full. A rewritten line updates its entry in place, so the index always
points at the newest copy and compaction ignores older ones.

**Commands.** The index takes one command at a time. Each probe or chain step
takes one cycle.

| op | use | result |
|----|-----|--------|
| LOOKUP | read path | `hit`, `logoff` |
| INSERT | write path (W3) | new page, new line or updated line |
| WALK | fetch merge, compaction L4 | streams every (offset, log offset) of a page, one per cycle |
| SCAN | compaction L1 | next live level-1 slot from `cmd_start` |
| INVAL | after promotion | marks the page dead (its entry becomes NULL) |
| CLEAR | buffer release | sweeps all level-1 slots invalid |

After reset the level-1 valid bits are swept clear, one slot per cycle. At the
default size this takes 512 Ki cycles before the controller accepts its first
request.

**Departure from the paper.** The original grows a page's second-level table
by doubling and rehashing it once its load factor passes 0.75. Chaining
fixed-size chunks has the same worst-case memory bound (one chunk per logged
line) and needs no rehash engine. The cost is a chain walk of up to 16 steps
for a page whose 64 lines are all logged.

## Data cache

`data_cache` is the tag store. The page data lives in SSD DRAM after the log
buffers: frame `f`, line `l` is at DRAM line `2*LOG_ENTRIES + f*64 + l`.

* **Size.** 114688 frames of 4 KB = 448 MB: the 512 MB of SSD DRAM minus the
  64 MB log.
* **Organisation.** `WAYS` = 16 ways per set; set = LPA mod (FRAMES/WAYS).
* **Replacement.** Exact LRU, with a per-way age (a permutation of 0..15)
  updated on every hit and allocation.
* **Operations.** LOOKUP, ALLOC and REMOVE each answer one cycle after the
  request. ALLOC takes an invalid way if there is one, otherwise the way of
  age 15, and reports the evicted LPA.
* **No write-back.** Every write goes to the log as well as to the cached
  page (W1 and W2), so an evicted page never holds data that exists nowhere
  else.
* **Hot pages.** Each frame has an 8-bit access counter. The lookup that
  takes it past `HOT_THRESH` pulses `hot` with the page's LPA.

## Controller sequencing (`ssd_controller`)

One state machine serves requests one at a time.

* **Read.**
  * R1: a cache hit is answered from the frame.
  * R2: a log hit is answered from the log slot.
  * R3: a double miss consults the trigger, then fetches the page. The fetch:
    1. allocates a frame;
    2. queues a flash read on the channel and waits for it to complete;
    3. copies 64 lines into the frame;
    4. walks the older, then the newer, log index and overwrites the lines
       that are in the log;
    5. answers, unless a hint already went out.

    After a hint, the fetch is *parked* once its flash read is queued, and
    the controller goes back to serving requests. The whole point of the hint
    is that other threads keep working, and their hits and writes need not
    wait behind the flash read. Three kinds of request wait instead:
    * requests to the parked page, held at `req_ready`;
    * a second miss, which finishes the parked fetch first and then looks
      itself up again;
    * compaction and page drops, which would otherwise see the allocated
      but still empty frame.

    When the flash read completes, the copy and merge run before anything
    else.
* **Write.** The write appends to the log (W1), updates the frame if the page
  is cached (W2), inserts into the active index (W3) and answers with Cmp.
* **Compaction.** Compaction runs whenever no request is waiting, one page
  per step:
  * L1: SCAN finds the next page in the full buffer's index.
  * L2: if the page is cached, its frame is programmed to flash.
  * L3: otherwise the page is read from flash into `coalescing_buffer`.
  * L4: the page's lines are merged in from the log.
  * L5: the merged page is programmed back.

  When the scan ends, the index is cleared and the buffer released. A
  program is queued on its channel, and the controller moves on without
  waiting for it.
* **Promotion clean-up.** After the host acknowledges a promotion, the page
  is removed from the cache and marked dead in both indexes. A page still in
  the full log is skipped by compaction: its data now lives in host DRAM.

**Timing model.**

* Data crosses the DRAM and flash ports one 64-byte line per cycle. Both
  ports return read data one cycle after the strobe.
* The flash channel queue accounts for the operation time: `read_lat`,
  `write_lat`, `erase_lat` cycles. A flash read waits for its queue entry to
  finish before the data is used.
* The FTL's garbage collector is represented by two inputs.
  `gc_erase_push[ch]` queues an erase with priority. `gc_block[ch]` stops
  the channel from starting new operations.

## Promotion and the PLB

* **Offer.** `migration_ctrl` takes the data cache's hot pulses while
  `mig_enable` is set, unless the page is pinned (`pin_*`). It raises
  `msix_valid` with the page's LPA until the host takes it, then waits for
  `host_ack` with the same LPA. It then has the controller drop the page. One
  promotion is in flight at a time.
* **Copy.** In the host, the copy engine allocates a PLB entry {source page,
  host destination page, 64-bit copied-line bitmap}. It sets a bitmap bit for
  each line it has copied, and frees the entry when the page table has been
  switched.
* **Routing.** While the entry is live:
  * a write to a line that is already copied goes to the host DRAM copy
    (`host_fwd_*`, address `{dst page, line}`);
  * reads go to the SSD, and so do writes to lines not copied yet.

  The original copy is still valid for those, and the copy engine picks up
  the new data when it reaches the line. The PLB has 64 entries by default
  and is fully associative, with a combinational lookup.

**Huge pages.** If the promoted 4 KB page lies inside a 2 MB huge page on the
host, the OS copies the whole huge page. A per-line bitmap would then need
32768 bits per entry. `plb_huge` uses two levels instead:

* 512 bits record which 4 KB chunks are completely copied;
* 64 bits record the lines copied so far in the one chunk being copied now.

The copy engine marks lines with `hplb_mark`. It closes a chunk with
`hplb_chunk_done`, which sets the chunk's bit, clears the line bitmap and
moves on to the next chunk. A line counts as copied if its chunk's bit is set,
or if it is in the current chunk and its line bit is set. Routing is the same
as for 4 KB pages. The host address keeps the low 21 address bits under the
destination huge page. `HPLB_ENTRIES` (8) huge pages can be in flight. On the
SSD side, the huge page's 4 KB pieces are dropped one by one through the
normal acknowledgement path.

## Departures and limits

* **One request at a time.** The controller serves one request at a time,
  with compaction in the gaps. The original serves requests concurrently over
  lock-free structures. Only a fetch after a delay hint runs in the
  background, and only one such fetch at a time. A fetch for a waiting host,
  or one compaction step, blocks other requests.
* **FTL.** The FTL is not designed. Physical page = LPA mod 2^25 (128 GB of
  4 KB pages), and channel = page mod `CHANNELS`.
* **Flash parallelism.** Flash timing is per channel, one operation at a
  time. Dies and planes are not modelled.
* **NUMA and huge-page drop.** The same threshold serves every NUMA node,
  as in the original. There is no bulk command to drop all 512 pieces of a
  promoted huge page.
* **Write batching.** Write batching across channels is simply the
  per-channel queues. There is no separate write buffer.
* **Sizes.** 64 MB of log is taken as the total of both buffers.
  Associativity (16), channel queue depth (64), hot threshold (8), tag width
  (16) and host tracker depth (64) are this design's numbers.

## Files, parameters and simulation

`rtl/` has one module per file; `skybyte_top` is the top. The defaults are
the full configuration:

| parameter | default | meaning |
|-----------|---------|---------|
| `LOG_ENTRIES` | 524288 | line slots per log buffer (two buffers, 64 MB) |
| `FRAMES` | 114688 | 4 KB cache frames (448 MB) |
| `WAYS` | 16 | cache associativity |
| `CHANNELS` | 16 | flash channels |
| `QDEPTH` | 64 | operations per channel queue |
| `HOT_THRESH` | 8 | accesses that make a page a promotion candidate |
| `PLB_ENTRIES` | 64 | concurrent promotions tracked |
| `HPLB_ENTRIES` | 8 | concurrent huge-page promotions tracked |

`tb/` has one self-checking bench per block (`tb_<module>.sv`). Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The behavioural
`ssd_dram_model` and `flash_model` are sparse line stores. Unwritten flash
lines read as a fixed function of their address, so a bench can predict the
data without storing it.

* **`tb_skybyte_top`** runs the whole design at a small size: 16-slot log
  buffers, 8 frames, 4 channels, 50/200/500-cycle flash timing, 60-cycle
  threshold. It plays cores, OS, copy engine and GC. It counts every
  mechanism above (R1, R2, R3, threshold and GC hints, exceptions, W1, W2,
  buffer switch, L2 and L3–L5 compaction, write stall, promotion interrupt,
  PLB forwarding and pass-through, page drop, huge-page forwarding) and
  fails if any did not happen. It checks every read against a reference memory.
* **`tb_skybyte_full`** instantiates the top with no parameter overrides. It
  drives the evaluated timing at an assumed 1 GHz clock: read 3000, program
  100000, erase 1000000, threshold 2000 cycles. It runs one write, a log hit,
  a flash miss that raises the exception, the replayed cache hit and a cache
  update. It finishes in seconds once the 512 Ki-cycle index sweep is done.
* **`tb_skybyte_workloads`** reduces each evaluated program to its share of
  writes: bfs-dense 25 %, bc 11 %, radix 29 %, srad 24 %, ycsb 5 %, tpcc
  36 %, dlrm 32 %. It runs each share as 400 skewed random requests over
  three times the cache's capacity, at the same small size. It checks every
  load, and that compaction programmed fewer pages than lines were written.
  It prints the per-mix counts of cache hits, log hits, misses, hints and
  programs.

To run a bench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/*.sv tb/ssd_dram_model.sv \
  tb/flash_model.sv tb/tb_skybyte_top.sv --top-module tb_skybyte_top -o sim
obj_dir/sim
```

For a single block, list `rtl/skybyte_pkg.sv` and that block's files. The
benches use only `$urandom`. Everything the simulation reads is reset or
initialised, so a two-state simulator with random initial values gives the
same result.
