# IBEX-style compression controller for a CXL memory expander

A CXL type-3 memory expander can hold more data than it has DRAM if it keeps
cold data compressed. The cost is internal bandwidth. Every metadata lookup,
compressed fetch, promotion and demotion is extra DRAM traffic behind the
narrow CXL link. This controller keeps that traffic low in four ways:

* **Co-location.** One 32-byte metadata entry describes a whole 4KB page, but
  each of its four 1KB blocks is compressed on its own.
* **Shadowed promotion.** A promoted block keeps its compressed copy.
  Demoting a page that was only read costs a metadata update and nothing else.
* **Second-chance victim search.** Cold pages are found with a scan over a
  small activity table in device memory. Its reference bits are updated
  lazily, only when a page's metadata leaves the on-chip metadata cache.
* **Compacted metadata.** A 32-byte entry lets one 64-byte DRAM read fetch
  the translation of two pages.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable. The DRAM, the
CXL link controller and the compression algorithm are outside the design. They
appear as ports, and the testbenches supply behavioural models for them.

## 1. Device memory layout

The controller sees device memory as a 41-bit byte space (2TB) accessed in
64-byte lines. At the default parameters (a 128GB device) the map is:

| region | default location | unit | contents |
|---|---|---|---|
| metadata | 0 .. 2GB | 32B per OS page | one entry per 4KB OS page, two entries per 64B line |
| page activity | 2GB .. | 4B per P-chunk | `{allocated, OSPN[29:0], referenced}`, 16 per line |
| promoted | 3GB .. 3.5GB | 4KB **P-chunk** | uncompressed pages (131072 P-chunks) |
| compressed | 4GB .. 128GB | 512B **C-chunk** | compressed, incompressible and shadow data |

The compressed space is split into sub-regions of 128GB. All C-chunks of a
page come from one sub-region, so their addresses share the top 4 bits. This
is what lets a chunk pointer fit in 28 bits. The default build has one
sub-region.

With a 2GB metadata region the controller translates 2^26 pages (256GB of
host address space). An assertion in `ibex_top` flags page numbers beyond
that. All the base addresses are parameters.

### Free chunks

Free chunks form linked lists inside the free chunks themselves. The first 8
bytes of a free chunk hold the pointer to the next one. Only the list heads
live in registers: one head for P-chunks, and one for the C-chunks of each
sub-region.

* A pop reads the head chunk's next pointer.
* A push writes the old head into the freed chunk.

Chunks that have never been used are not chained at reset. Each list also
keeps a frontier counter, and a pop from an empty chain takes the next chunk
that has never been used. This spares a boot-time sweep of 120GB.

`p_low` is raised while fewer than 256 P-chunks are free. It starts
background demotion.

## 2. The metadata entry

Fields from the most significant bit (bit 255) down:

| bits | field | meaning |
|---|---|---|
| 255:236 | `blk[3..0]` | per 1KB block: 2-bit type, 3-bit size code *s* |
| 235:233 | `num_chunks` | C-chunks held by the page (8 is stored as 0) |
| 232:229 | `wr_cntr` | write counter, or promotion state (below) |
| 228:225 | `sub_region` | upper 4 address bits of every C-chunk of the page |
| 224:196 | `ptr7` | 29 bits: the eighth C-chunk, or the page's P-chunk |
| 195:0 | `ptr[6..0]` | 28-bit C-chunk pointers |

Block types are encoded as ZERO = 0, COMP = 1, PROM = 2 and INCOMP = 3.

* **ZERO.** The block is all zeros and has no storage.
* **COMP.** The block is compressed into a slot of (s+1)×128B.
* **PROM.** The block is uncompressed, in the page's P-chunk at offset
  block×1KB.
* **INCOMP.** The block did not compress. It is stored raw in a 1KB slot
  (size code 7).

**Slot packing.** The slots of the page's blocks sit one after another, in
block order and at 128B granularity, across the chunks
`ptr[0], ptr[1], …, ptr7`. Four 128B blocks share one C-chunk. The line
address of 128B unit *u*, half *h*, is
`{sub_region, ptr[u/4], u%4, h, 6'b0}`.

**`wr_cntr` when the page owns a P-chunk.** While any block is PROM, the
counter has no use. The field is reused for promotion state:

* Bit 3 marks the page dirty: some promoted block was written since
  promotion, so the shadow copies are stale.
* Bit *i* (for *i* < 3) marks block *i* as promoted from ZERO. Such a block
  has no shadow slot.

While a page owns a P-chunk, its C layout uses at most seven chunks. The
eighth pointer is taken by the P-chunk, and `num_chunks` then gives the exact
count.

## 3. Serving a host request

A request is a single 64B line, identified by page number (OSPN) and line
index (0–63). Bits [5:4] of the line index select the block.

1. **Translation.** The metadata cache is looked up. On a miss, the engine
   reads the 64B metadata line and fills the cache. If the fill evicts a
   dirty entry, that entry is written back. If the evicted page owns a
   P-chunk, its activity entry gets `referenced = 1`. This eviction is the
   only moment reference bits are set.
2. **Dispatch** on the block type:

| type | read | write |
|---|---|---|
| ZERO | zeros, no data access | promote: take a P-chunk if the page has none, write 16 lines (the new line and zeros) |
| PROM | one line from the P-chunk | one line to the P-chunk; mark the page dirty |
| INCOMP | one line from the raw slot | one line to the raw slot; count the write (below) |
| COMP | promote: read the 2(s+1) slot lines, decompress, write 16 lines to the P-chunk, answer from the stream | same, with the host line replaced in the stream; page marked dirty (an eight-chunk page is repacked instead, §5) |

A page that owns no P-chunk pops one from the free list. An activity entry
`{1, OSPN, 1}` is then written for it. The compressed slot is left where it
is, as the shadow copy.

**Write counter.** On a page without a P-chunk, each write to an INCOMP
block increments `wr_cntr`. The 16th write recompresses the whole page (a
repack, §5). Blocks that have become compressible then leave the raw format.

## 4. Finding a victim

While `p_low` is set, the engine alternates between host requests and
demotion steps. The demotion engine keeps a cursor, which is an activity-entry
index, and scans from it one 64B line (16 entries) at a time:

* **Allocated and referenced.** The referenced bit is cleared. This is the
  page's second chance.
* **Allocated and not referenced.** The metadata cache is probed. The probe
  does not change LRU order.
  * If the page's entry is cached, the page is hot even though its bit is
    stale, and the scan moves on.
  * Otherwise the page is the candidate.
* **Whole line gives no candidate but holds allocated entries.** One of them
  is taken at random. This bounds the traffic per demotion to one line read
  and one line write-back.
* **Empty line.** The scan moves to the next line, wrapping around. It covers
  the region at most once.

The engine then reads the candidate's metadata, from the cache (by probe) or
from memory without filling the cache. It checks that the page still owns
that P-chunk. A stale activity entry is just cleared.

## 5. Demotion and repacking

**Clean page.** The page has not been written since promotion. Every PROM
block becomes COMP again, pointing at its untouched shadow slot. The P-chunk
is pushed back and the activity entry cleared. No data moves.

**Dirty page.** The page is rebuilt block by block into a fresh layout:

1. A PROM block is read from the P-chunk and compressed.
2. A COMP block is copied from its slot.
3. An INCOMP block is copied, or compressed again when the repack was
   started by the write counter.

The codec answers in one of three ways:

* **zero.** The block becomes ZERO.
* **compressed, size code *s*.** The block gets a slot of 2(s+1) lines.
* **raw.** The block gets a 1KB INCOMP slot.

New C-chunks are popped from the page's sub-region as the layout grows. A
page that had no chunks takes the next sub-region in round-robin order. The
page's old chunks are then pushed back. Finally, the P-chunk is freed, the
activity entry cleared and the new entry written.

The same repack runs in two other cases, without a P-chunk to free:

* **Write-counter overflow.** INCOMP blocks are compressed again.
* **Write to a COMP block of an eight-chunk page.** That block is
  decompressed, the host line merged in, and the result stored raw.

## 6. Modules

| file | role |
|---|---|
| `ibex_pkg.sv` | constants, metadata/activity/request types, layout functions |
| `ibex_top.sv` | top: wires the blocks, muxes the cache port, exposes host / memory / codec ports |
| `ibex_engine.sv` | sequencer of all flows of §3–§5 (one flow at a time) |
| `request_converter.sv` | metadata + block + line → P-chunk / slot line addresses, slot length, promotability |
| `md_cache.sv` | 96KB, 16-way, true-LRU, write-back cache of 32B entries, 4-cycle access; LOOKUP, PROBE, FILL, WRITE |
| `chunk_allocator.sv` | P and per-sub-region C free lists, `p_free`, `p_low` |
| `demotion_engine.sv` | activity-region scan, lazy TOUCH, ALLOC/FREE of entries |
| `mem_arbiter.sv` | fixed-priority sharing of the single memory port (allocator, demotion engine, sequencer) |

### Top-level interfaces

* **Host.** `host_req_{valid,ready,we,ospn,line,wdata}` carries the request.
  `host_resp_{valid,rdata}` pulses once per request, in order. A write is
  answered with zero data.
* **Device memory.** `mem_req_valid/ready` and a `mem_req_t` struct
  `{we, addr, wdata, wstrb}` carry one 64B line. Each request, read or write,
  gets exactly one `mem_resp_valid` pulse. Only one request is outstanding at
  a time.
* **Codec.**
  * `cx_cmd_*` carries the command: compress (16 lines in) or decompress
    (the 2(s+1) slot lines in).
  * `cx_in_*` streams 64B lines, with `last`.
  * `cx_out_*` streams lines back, with `status` (zero / compressed / raw)
    and `size` valid on every beat.
  * A decompression returns 16 lines. A compression returns one beat for
    zero, 2(s+1) lines for compressed, or 16 lines for raw.
* **Status.**
  * `p_free` and `dem_cursor`.
  * `err_unsupported`, a sticky flag for an exhausted free list.
  * `ev_*` pulses, one per event: metadata miss, zero read, promotion, read
    without promotion, clean and dirty demotion, write-count recompression,
    lazy reference update, random victim and probe skip.

### Timing

| operation | cycles |
|---|---|
| metadata-cache access | 4, from acceptance to answer (`HIT_LATENCY`) |
| compress (codec model) | 256 (set by the external codec) |
| decompress (codec model) | 64 (set by the external codec) |

Every other step costs one memory round trip per 64B line plus a few cycles
of control. The sequencer is not pipelined.

## 7. Where this design departs from the original description

The published IBEX architecture specifies the structures above, the 256-chunk low-water mark, the
second-chance rules, lazy update, probing, random fallback, shadowing, 128B
slot granularity and the field widths. The following are this design's own
choices:

* The bit order inside the 32B entry, the type encoding, and the reuse of
  `wr_cntr` and `num_chunks` in promoted pages.
* Packing slots in block order, and storing an incompressible block raw per
  block rather than per page.
* How a written page is told apart from a clean one. In the published
  scheme, a promoted page frees its compressed copy on the first write, so a
  still-valid chunk pointer means the page is clean. Here a page can have
  promoted and compressed blocks side by side, so the chunks cannot be freed
  on a write. Instead, the page keeps them and sets the dirty bit in
  `wr_cntr`. The chunks are released when the page is repacked at demotion.
* The repack procedure for dirty demotion. The published description does not say how a
  written promoted page goes back to the compressed region.
* Frontier counters in the free lists, and LIFO reuse.
* The activity entry bit order, `referenced = 1` on allocation, and the LFSR
  used for the random pick.
* The address map and all handshakes.
* The set index of the metadata cache (page number mod 192) and its
  one-operation-at-a-time organisation.

Known limitations:

* **Eight-chunk pages.** A page whose blocks need all eight C-chunks cannot
  take a P-chunk, because the P-chunk pointer lives in the eighth pointer
  field. This follows the published rule that an incompressible page takes
  all eight C-chunks and never enters the promoted region. Reads of its
  compressed blocks are served by decompression without promotion. A write
  to one of its compressed blocks repacks the page. The written block is
  decompressed, the new line merged in, and the block stored raw. Every
  block needs at most eight 128B units, so the page still fits in eight
  chunks. Later writes count toward recompression as usual.
* **Exhausted free lists.** An empty P-chunk or C-chunk free list sets the
  sticky `err_unsupported` flag. A promotion that finds no P-chunk is
  skipped: a read is served by decompression, a write is dropped. A repack
  that finds no C-chunk cannot finish correctly, so the stored data is not
  to be trusted once the flag is set.
* **Uncounted writes.** While a page owns a P-chunk, writes to its INCOMP
  blocks go to the raw slot and are not counted.
* **No concurrency.** There is one outstanding memory request and one flow
  at a time, so no overlap between host requests and demotion. The
  controller is functionally complete but not tuned for throughput.
* **Cache as flip-flops.** The metadata cache arrays are written as plain
  arrays. An implementation would map them to SRAM.

## 8. Simulation

The testbenches in `tb/` are self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_md_cache` | random ops against an LRU reference model; 4-cycle latency; probe leaves LRU alone; dirty victims |
| `tb_request_converter` | all blocks and lines of random entries against longhand address arithmetic |
| `tb_chunk_allocator` | pops and pushes against a LIFO+frontier model; exhaustion; `p_free`/`p_low` |
| `tb_demotion_engine` | scans against a reference second-chance model, with probe answers and activity-region contents |
| `tb_ibex_engine` | sequencer flows: a promotion fetches exactly the slot; a clean demotion compresses nothing; a metadata miss happens only on first touch |
| `tb_ibex_top` | end to end with a small promoted region and cache; every read checked against a reference copy; every mechanism counted |
| `tb_ibex_workloads` | ten evaluated workloads as synthetic streams, one controller each: published read/write mix, working set inside or beyond the promoted region; no demotion when it fits, demotion when it spills, read-only stream recompresses each page at most once; prints lines moved per request |
| `tb_ibex_top_full` | the top at its default size: zero read, promoting write, read-back |

Two behavioural models support them:

* `tb_mem_model` is a sparse DRAM model.
* `tb_codec_model` is a stand-in codec. It keeps the real latencies and uses
  a toy algorithm: it drops trailing zero lines, so data round-trips exactly
  and compressibility is easy to control.

Example, end to end:

```
verilator --binary --timing -Irtl -Itb rtl/ibex_pkg.sv rtl/*.sv \
  tb/tb_mem_model.sv tb/tb_codec_model.sv tb/tb_ibex_top.sv --top-module tb_ibex_top
./obj_dir/Vtb_ibex_top
```

The end-to-end test runs with 262 P-chunks (low-water mark 256) and a 16-entry
metadata cache. At that size demotion, eviction, lazy updates, random picks
and probe skips all happen within a few thousand requests. The full-size test
uses every default: 131072 P-chunks and the 96KB cache.

## 9. Capacity

At the defaults the controller addresses 256GB of host pages, 120GB of
C-chunks and a 512MB promoted region. The workloads this design was sized
for are SPEC CPU2017 (bwaves, mcf, parest, lbm, omnetpp), GAPBS kernels on the
Twitter graph (bfs, pr, cc, tc) and XSBench. Four copies of each fit, even
uncompressed: the largest, a graph kernel, is about 50GB. The promoted region
is a performance knob, not a capacity limit. Pages whose working set exceeds
it are demoted and promoted more often.
