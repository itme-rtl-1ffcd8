# A hardware-managed DRAM cache for a CXL hybrid memory

This RTL implements the cache controller of a *CXL-hybrid memory*. The device
puts terabytes of NAND flash (two NVMe SSDs) behind a DRAM cache. A host sees
it over CXL as ordinary byte-addressable memory. The device is meant to be the
backing store for large, predictable LLM data: model weights, read layer by
layer, and long-context KV-cache chunks, written once and read back in order.
For that use the controller does two things:

* **Demand caching.** Every 64 B host access is looked up in a 16-way
  set-associative DRAM cache of 4 KB lines. A miss brings the 4 KB page in from
  the SSD, after writing back a dirty victim first. Software never sees this.
* **User-directed prefetch.** Software writes a physical address and a page
  count into memory-mapped registers. The controller then stages those pages
  from the SSD into DRAM ahead of use, with several SSD reads in flight. By the
  time the host reads the data it hits in DRAM.

The CXL controller IP, the DDR4 memory controllers, the NVMe host controllers
and the flash and DRAM chips are not part of this RTL. The top level,
`chm_top`, exposes their signals as ports.

## Sizes and the address map

The default configuration has four DDR4 channels of 8 GB (a 32 GB cache) and
two 1 TB Gen5 x4 SSDs (2 TB of capacity):

| quantity | value | where it comes from |
|---|---|---|
| cache line (= SSD page) | 4 KB | fixed |
| associativity | 16 ways | fixed |
| sets | 2^19 = 512 K | 32 GB / 4 KB / 16 |
| tag | 10 bits | 2 TB / 32 GB × 16 ways, i.e. 41 − 19 − 12 |
| metadata entry | 16 bits | valid 1, tag 10, dirty 1, age 4 |
| metadata SRAM | 512 K × 256 bits = 16 MB | one 256-bit row per set |

A host byte address is 41 bits wide:

```
 40        31 30           12 11      6 5     0
+------------+---------------+---------+-------+
|  tag (10)  |   set (19)    | line(6) | byte  |
+------------+---------------+---------+-------+
```

The DRAM line address of a cached 64 B line is `{set, way, line}` (29 bits,
32 GB). A page's SSD is chosen by the lowest bit of its page number
`{tag, set}`, so consecutive pages alternate between the two drives. The
logical block address (LBA) on that drive is the page number shifted right by
one. Across the four memory channels, the lowest two bits of the DRAM line
address pick the channel, so one 4 KB page is spread over all four.

`itme_pkg` holds these constants and the entry type. The set count is the
parameter `SET_BITS` of every module. Testbenches shrink it to 4; the tag width
and the way count stay fixed.

## The metadata pipeline and per-set locks

This part needs the most care. Three units read and modify the metadata: the
two hit/miss checkers (one per CXL slice) and the miss line handler. A
checker's age update must not interleave with the handler's invalidation of
the same set. `meta_ctrl` therefore runs every metadata access as an atomic
three-step operation, one step per clock:

```
cycle   t            t+1                    t+2
        READ + LOCK  WRITE                  UNLOCK
        cli_gnt[i]   cli_s2[i], rd_row      (set still locked)
                     client drives
                     cli_wr_en / cli_wr_row
```

A client holds `cli_req` with its set index until it sees `cli_gnt`. In the
next cycle the row is on `rd_row`. The client computes the new row
combinationally and drives it with `cli_wr_en`; with `cli_wr_en` low the row is
left unchanged. The set stays locked through cycle t+2. A request for a set in
stage 2 or 3 is not eligible, so two updates of the same set are always
exactly three cycles apart.

Requests for other sets are granted on the next cycle, one grant per cycle,
round-robin. This works because the SRAM (`meta_sram`) has one read port and
one write port: stage 1 of one operation reads while stage 2 of another
writes. Peak metadata throughput is one update per cycle across sets and one
per three cycles within a set.

After reset the controller writes zero to every row, one row per cycle
(512 K cycles at full size), then raises `init_done`. No host request is
accepted before that.

## Hit path: `hm_checker`

Each slice has its own checker, and each checker handles one request at a
time:

1. Accept the request (`req_valid`/`req_ready`) and latch it.
2. Request the set; on grant, wait one cycle for the row.
3. Compare the tag with the 16 ways (`row_hit`).
   * **Hit:** write the row back with the way made most recently used. For a
     write, also set its dirty bit. Then offer `{set, way, line}` to DRAM. The
     read data or write acknowledge returns straight to the host through the
     DRAM interconnect, tagged with the host's tag. The checker does not wait
     for it.
   * **Miss:** leave the row alone and hand `{set, tag}` to the miss line
     handler. Wait until the handler broadcasts a fill of exactly that line,
     then look it up again.

An uncontended hit reaches the DRAM port three cycles after the request is
accepted. The next request is accepted in the same cycle the DRAM request is
taken. One slice therefore peaks at one 64 B access every three cycles, and the
two slices together at about 43 B per cycle.

**Ages** form true LRU over the 16 ways. The accessed way gets age 0, and every
valid way that was younger than it ages by one. An invalid way counts as age
15, so filling it ages all valid ways. Starting from an empty set, the ages of
a full set are always a permutation of 0..15.

## Miss path: `miss_handler`

The handler takes demand misses from both checkers and pages from the
prefetch engine. Demand misses have priority. It keeps `N_MSHR` (8) miss
status holding registers (MSHRs). Each MSHR records `{set, new tag, old tag,
way}` and walks through these states:

```
FREE -> [WB_ISSUE -> WB_WAIT] -> RD_ISSUE -> RD_WAIT -> FILL -> FREE
        (only for a dirty victim)
```

When a request arrives, one of three things happens:

* **Merge.** An MSHR already holds the same line. The request is dropped;
  the checker that sent it is released by that MSHR's fill broadcast.
* **Wait.** An MSHR is still writing this page back to the SSD. The request
  is held until the write-back completes, so the page is never re-read stale.
* **Lookup.** Otherwise, once an MSHR is free, the handler runs one metadata
  update on the set:
  * If the line is present by now, nothing is written, and the line is
    broadcast so a waiting checker replays. A prefetch of a cached page
    therefore costs one metadata access and leaves the ages untouched.
  * If not, a victim is picked: the first invalid way, else the valid way
    with the largest age. Ways owned by open MSHRs are excluded. The victim's
    valid bit is cleared in the same update, and an MSHR is opened.

Each MSHR competes for the command port of its SSD channel. A dirty victim is
written back first (NVMe write of the old page). The write-back waits while a
checker still holds a write hit to that page that DRAM has not taken (see
below). Then the new page is read
into the same DRAM page. When the read completes, a second metadata update
marks the entry valid, clean and most recently used, and broadcasts
`{set, tag}`. Fills take priority over new lookups. MSHRs advance
independently, so up to eight SSD transfers overlap.

If every way of a set were owned by an MSHR, the lookup would wait for a fill
and retry. With 8 MSHRs and 16 ways this cannot happen; the logic is there for
larger `N_MSHR`.

## User-directed prefetch: `pf_regs` and `pf_engine`

Software on the memory server translates a virtual address to a physical one
and writes it to the register set, which is mapped into user space over
CXL.io:

| index | name | access | meaning |
|---|---|---|---|
| 0 | PF_ADDR | R/W | physical byte address of the first page |
| 1 | PF_COUNT | R/W | number of 4 KB pages; **writing it posts the command** |
| 2 | STATUS | R, W clears | bit 0 overflow (sticky), bit 1 engine busy, bits 15:8 queue level |
| 3 | PF_PAGES | R | pages handed to the miss handler since reset |

Commands go into a 16-entry FIFO. A command posted while the FIFO is full is
dropped and sets the overflow bit, so software should poll STATUS when it
posts in bursts. The walker pops one command at a time. It aligns the address
down to 4 KB and hands the handler one page per accepted handshake. One
command can cover a whole 512 MB KV chunk (131072 pages) or one layer's weights.

## DRAM and NVMe sides

* `dram_xbar` joins the two slices' DRAM streams to the four memory
  controllers. Requests carry `{source slice, host tag}`; each controller
  must return them with every response (read data, or a write acknowledge).
  Responses to a slice may therefore come back out of order.
* NVMe port, one per SSD: `{id, op (read/write), lba, dpage}` with
  valid/ready. The NVMe controller must move the 4 KB page between the SSD and
  DRAM byte address `dpage × 4096` itself, then return `id` on `nv_cpl_*`.
  The cache controller never touches page data.

## How far to trust it, and where it departs from the source design

The block structure follows the published description. The same holds for the
metadata format, the 16-way 4 KB organisation and its sizes, the three-step
locked metadata update, the two checkers, the handler's invalidate-then-fill
sequence, the MSHRs and the prefetch FIFO fed from registers. The following are
this design's own choices:

* **Tag width.** The source describes a 9-bit tag field, which matches a
  single 1 TB SSD. Its chosen configuration has two SSDs (2 TB), which needs
  10 bits. This RTL uses 10 bits, giving the 16-bit entry and the 16 MB of
  metadata the source lists for that configuration.
* **Policies not described in the source.** These are write-back of dirty
  victims, merging and write-back hazards, the victim rule, request
  priorities, the register map and overflow behaviour, the queue depth, the
  MSHR count, and SSD striping and channel interleaving.
* **Pipelining.** Operations on different sets are overlapped. The source
  says only that an update takes three cycles.
* **Throughput.** No clock frequency is given. At one 64 B access per three
  cycles per slice, two slices reach the roughly 18 GB/s the FPGA prototype
  measured at about 420 MHz. A slower clock would need a checker that keeps
  several lookups in flight.
* **Write hit against eviction.** A write hit commits the dirty bit before
  its data reaches DRAM. If the page were evicted in between, the write-back
  could copy the page without that write. Each checker therefore shows the
  page of a write that DRAM has not yet taken. The handler holds a write-back
  of that page until the write is taken. From then on the design relies on
  the memory controller: it must complete an accepted write before it serves
  the NVMe controller's later read of the same address, as DDR controllers
  normally do.
* **Left out.** Error handling, power management and the CXL.cache side are
  not modelled. The source's read-only SSD region for weights and
  append-only KV writes are software policies and are not modelled either.

## Files

| file | contents |
|---|---|
| `rtl/itme_pkg.sv` | constants, metadata entry type, LRU and victim functions |
| `rtl/meta_sram.sv` | metadata SRAM, one row per set, 1R1W |
| `rtl/meta_ctrl.sv` | metadata interface controller: clearing sweep, 3-stage locked updates |
| `rtl/hm_checker.sv` | hit/miss checker, one per slice |
| `rtl/miss_handler.sv` | miss line handler with MSHRs and NVMe command issue |
| `rtl/pf_regs.sv` | prefetch register set (CXL.io) |
| `rtl/pf_engine.sv` | prefetch command FIFO and page walker |
| `rtl/sync_fifo.sv` | generic FIFO |
| `rtl/dram_xbar.sv` | slices to memory-controller channels |
| `rtl/cache_ctrl.sv` | the cache controller: all of the above wired together |
| `rtl/chm_top.sv` | top: cache controller + DRAM interconnect |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_chm_top` (16 sets) and `tb_chm_full` (default size) run the whole controller against DRAM, NVMe, SSD and host models; `tb_llm_stream` runs the two LLM workloads |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/itme_pkg.sv tb/tb_chm_top.sv --top-module tb_chm_top -Mdir obj -o sim
./obj/sim
```

Swap in another `tb_<name>` to run another testbench. The end-to-end tests
also print how often each mechanism occurred (`MECH` lines): hits, misses,
fills, merges, prefetches of present lines, clean and dirty evictions, lock
stalls, prefetched pages and queue overflow. Each run compares more than
1,000 read results with a reference memory.

* `tb_chm_top` runs 3,000 random accesses on 16 sets in about 10 s.
* `tb_chm_full` runs at the default size. It spends 512 K cycles clearing the
  metadata, then runs the same kind of traffic on 8 of the 512 K sets. It
  takes about the same time.

* `tb_llm_stream` runs the two traffic patterns the device exists for, on
  a 256-page cache. The first streams 10 layers of weights, 2.5 times the
  cache, with one prefetch command per layer posted a layer ahead. Every read
  must hit and every page must be read from the SSD exactly once. The host
  sees about 34 B per cycle. The second writes 5 KV chunks, 1.25 times the
  cache, so that dirty pages reach the SSDs. It then restores the chunks, each
  with one prefetch command followed by a read-back that must not miss. It
  runs in about 10 s.

`SET_BITS` can be changed on `chm_top` (and on every block) to build a smaller
cache. The memory models in the testbenches are associative arrays, so they
work at any size.
