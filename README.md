# Reuse Detector for an STT-RAM shared last-level cache — RTL

STT-RAM is attractive for a large shared last-level cache (SLLC): it is dense and
leaks almost nothing, but a write takes about three times as long as a read and
costs four times the energy (16.5 ns / 1.31 nJ against 5.61 ns / 0.32 nJ for a 1 MB,
22 nm bank). Most
blocks that a conventional hierarchy writes into its SLLC are never touched there
again: the private caches have already absorbed their temporal locality. What the
SLLC reference stream does show is *reuse locality*: a block that has been asked
for a second time is likely to be asked for again.

The **Reuse Detector** (RD) exploits this. It sits between each core's last private
cache (L2) and the SLLC, on the eviction path only. When the L2 evicts a block, the
RD lets it into the SLLC only if the block has shown reuse; otherwise the block
bypasses the SLLC (a dirty block goes straight to main memory, a clean one is
dropped). The SLLC is therefore filled exclusively from L2 evictions that passed the
RD, never from memory, and far fewer STT-RAM writes happen.

This repository gives synthesizable SystemVerilog for that hierarchy: the RD with its
compressed, sectored tag buffer, the inclusive L1/L2 private caches with the reuse bit,
the request flow, the SLLC controller and the crossbar port, wired together for a
4-core chip. It follows the scheme of Rodríguez-Rodríguez et al., "Reuse Detector: Improving
the Management of STT-RAM SLLCs"; where that description stops, the choices made
here are listed in the last sections.

## 1. What counts as reuse

Every line in the private caches carries one extra bit, the **reuse bit**. It records
where the block came from when it entered the private levels:

| block supplied by | reuse bit |
|---|---|
| the SLLC (hit) | 1 |
| another core's private cache (coherence) | 1, and the supplier's copy gets 1 too |
| main memory | 0 |
| own private cache (hit) | unchanged |

A block with reuse bit 1 has, by construction, been requested from the shared level
at least twice since it entered the chip. A block with reuse bit 0 has not — unless it
left the private levels earlier, was dropped or written back to memory, and has now
come back from memory. Catching that second case is the job of the RD buffer: it
remembers the blocks it has recently turned away.

## 2. The eviction decision (`reuse_detector`)

```
evicted block (addr, dirty, reuse)
  reuse = 1 ------------------------------------------> SLLC   (dec = REUSED_BIT)
  reuse = 0 -> buffer: "found? else record"
                 found ---------------------------------> SLLC   (dec = REUSED_BUF)
                 not found, dirty ----------------------> memory (dec = TO_MM)
                 not found, clean ----------------------> drop   (dec = DISCARD)
```

A block with the reuse bit set does not touch the buffer. A block that is found keeps
its buffer entry. A block that goes to the SLLC is inserted there if absent, updated if
present and dirty, and dropped if present and clean (that last check needs the SLLC
tags, so the SLLC controller does it).

One block is in flight per RD. A block with the reuse bit set is offered to the SLLC
one cycle after it is accepted. A block that needs the buffer is offered, or dropped,
two cycles after acceptance. `dec_valid`/`dec` report each decision for statistics.

## 3. The RD buffer (`rd_buffer`, `rd_tag_compress`)

This is the only new storage the scheme adds. It has to remember about 8K
recently evicted blocks per core in 14 KB, which is 1.37 % of a 1 MB SLLC. Two tricks
make it that small:

* **Sectoring.** An entry describes a *sector* of 2 consecutive aligned blocks: one
  tag, plus a presence bit per block.
* **Tag compression.** The full sector tag is cut into 10-bit pieces, starting at
  bit 0, with the top piece zero-padded. The pieces are XORed into a 10-bit compressed
  tag. Different sectors may share a compressed tag, so a lookup can report a block
  as seen when it was not. That false positive only costs an unnecessary SLLC write,
  never wrong data.

Organisation at the defaults: 1024 sets × 16 ways, 14-bit entries.

```
 13            4    3    2    1    0
+---------------+----+----+-----+---+
| compressed tag| S1 | S0 | RPL | V |
+---------------+----+----+-----+---+
```

Block address (42 bits for 48-bit physical addresses and 64-byte blocks), from low to
high: 1 sector-offset bit (selects S0/S1), 10 set-index bits, 31 tag bits. The tag bits
fold to 10 bits.

**Check and store** is the buffer's only operation, and it takes one cycle:

1. Compare the compressed tag with all 16 valid entries of the set.
2. If an entry matches and the block's presence bit is set, the block is *found*.
   Nothing changes.
3. If an entry matches but the presence bit is clear, set that bit. The sector's
   other block was recorded earlier.
4. If no entry matches, write a new entry (tag, V = 1, only this block's presence bit)
   into the FIFO victim way.

**1-bit FIFO replacement.** Each entry has a single replacement bit. In every set,
exactly one entry has RPL = 1: the oldest one, which is the next victim. An insertion
overwrites that entry, clears its RPL and sets RPL on the next way (wrapping from 15
to 0). So the RPL bits are a one-hot pointer that moves forward only on insertion.
Hits and presence-bit updates leave it alone, which is what you want when the goal is
to catch the *first* reuse. After reset a set has no RPL bit at all, and the victim is
then way 0. The published description says only "1-bit FIFO, age updated only on
insertion". The one-hot pointer is this design's reading of it.

Timing: the array is read combinationally and written at the clock edge. `rsp_valid`
and `rsp_hit` arrive one cycle after `req_valid`, and back-to-back requests to the
same set see each other's updates. After reset, the array is cleared one set per
cycle: `ready` rises after 1024 cycles.

## 4. Request flow (`hier_ctrl`) and the private caches (`private_cache`)

Each core has an L1 (32 KB, 8 ways) and an L2 (256 KB, 16 ways). Both are write-back
and LRU, and the L1 is inclusive in the L2: every L1 line also has an L2 line.
`hier_ctrl` serves one core request at a time:

1. Look the block up in the core's L1. On a hit the request is done 2 cycles after
   acceptance (the L1 access latency). A write marks the L1 line dirty.
2. Otherwise look it up in the L2. On a hit the reuse bit is untouched and the block
   is copied into the L1.
3. On an L2 miss, send a demand lookup to the SLLC through the crossbar. On a hit,
   fill L2 and L1 with reuse = 1. The block stays in the SLLC.
4. On an SLLC miss, probe the other cores' L2s in one cycle. A holder sets its own
   reuse bit, and the requester fills with reuse = 1.
5. Otherwise fetch the block from memory and fill with reuse = 0.

What the fills displace is where inclusion matters:

* **L2 replacement.** The L2 victim is first invalidated in the L1. If the L1 held a
  dirty copy, the victim leaves as dirty. Then the victim (address, dirty, reuse)
  goes to the core's RD.
* **L1 replacement.** The L1 victim is always still in the L2. A dirty L1 victim is
  written back into the L2 line. That marks the line dirty but does not make it
  more recent, so L2 replacement keeps following L1 misses.

A core's write therefore dirties only its L1 line. The L2 line, and with it the
evicted block the RD sees, becomes dirty through one of those two paths. Only the
L2's reuse bit is ever read, so L1 lines are filled with reuse = 0.

The access latencies of the evaluated system, 2 cycles for the L1 and 5 for the L2,
are modelled by `hier_ctrl`: it waits that long before it queries each tag store. An
L2 hit therefore completes 7 cycles after acceptance, or 8 when the L1 must write a
dirty line back. A miss in both levels
issues its SLLC lookup 6 cycles after acceptance.

`private_cache` is the tag store used for both levels. It keeps tag, valid, dirty and
reuse bits and a true-LRU age per line. Five operations are answered combinationally
in the same cycle:

* `PC_LOOKUP`: a demand access. A write marks the line dirty.
* `PC_PROBE`: a query for another core. It sets the reuse bit and leaves LRU alone.
* `PC_FILL`: allocates a line (first invalid way, else LRU) and returns the replaced
  line.
* `PC_INVAL`: back-invalidation. It drops the line and returns its dirty bit.
* `PC_WBACK`: write-back from the level above. It marks the line dirty and leaves
  LRU alone.

## 5. The SLLC controller (`sllc`)

The `sllc` block holds the tags of the shared cache: 1 MB per core, 16 ways, 64-byte
blocks, so 4096 sets for 4 cores. It uses true LRU and is write-back. It is
non-inclusive: it is filled only by RD-approved L2 evictions.

| request | case | STT-RAM access | busy for |
|---|---|---|---|
| `SLLC_READ` | hit (block stays) / miss | read / none | 6 cycles |
| `SLLC_WBACK` | absent → insert; a dirty victim is written back to memory | write | 17 cycles |
| `SLLC_WBACK` | present, dirty → update | write | 17 cycles |
| `SLLC_WBACK` | present, clean → drop | none | 6 cycles |

The tags update in the cycle the request is accepted. `rsp_valid` comes exactly 6 or
17 cycles later. A dirty victim is then offered on `mm_*`, and only after that is the
next request accepted. `stt_write` and `stt_read` pulse once per data-array access;
count them to estimate energy with the per-access figures above. The STT-RAM data
array itself is not modelled, only its occupancy.

## 6. Top level (`rd_cmp_top`)

```
core_req_* --rr--> hier_ctrl <--> private_cache x4 (L1) + private_cache x4 (L2, reuse bits)
                      |  \--evictions--> reuse_detector x4 --+--> xbar_arb (3 cycles) --> sllc
                      \--demand lookups----------------------/                              |
                      \--fetches--> mm_rd_*        RD bypasses + SLLC dirty victims --rr--> mm_wr_*
```

Cores and main memory are outside. The cores present block addresses (address >> 6) on
`core_req_*` and receive `core_done` with `core_done_src` (0 private, 1 SLLC, 2 other
core, 3 memory). Memory gets fetches on `mm_rd_*` and signals their arrival on
`mm_rd_done`, and takes write-backs on `mm_wr_*`. `ready` rises once every tag array
is cleared, which takes 4096 cycles at the defaults. All resets are synchronous and
active low. All handshakes are valid/ready: a source holds its request until ready.

| parameter | default | meaning |
|---|---|---|
| `NCORES` | 4 | cores, RDs and L2s |
| `PRIV_LEVELS` | 2 | private levels in front of the RD (1: no L1) |
| `L1_SETS`, `L1_WAYS` | 64, 8 | 32 KB L1 per core |
| `L1_LAT`, `L2_LAT` | 2, 5 | private access latencies (cycles, at least 2) |
| `L2_SETS`, `L2_WAYS` | 256, 16 | 256 KB L2 per core |
| `RD_SETS`, `RD_WAYS` | 1024, 16 | 8K-entry RD per core |
| `SECTOR_BLKS`, `CTAG_W` | 2, 10 | sector size, compressed tag width |
| `SLLC_SETS`, `SLLC_WAYS` | `NCORES*1024`, 16 | 1 MB per core |
| `SLLC_RD_LAT`, `SLLC_WR_LAT` | 6, 17 | STT-RAM read/write cycles at 2 GHz |
| `XBAR_LAT` | 3 | crossbar latency to the SLLC |

The 8- and 16-core systems are obtained with `NCORES = 8` or `16`. Larger RDs (16K to
64K entries) use `RD_SETS = 2048…8192`, and the single-core system `NCORES = 1`.

The scheme was also tried on a hierarchy with only two levels: a 32 KB private cache
per core and the shared STT-RAM cache behind it. `PRIV_LEVELS = 1` builds that. The L1s
disappear, and the `L2_*` parameters then describe the only private level
(`L2_SETS = 64`, `L2_WAYS = 8`, `L2_LAT = 2` for 32 KB, 8 ways, 2 cycles). Core writes
dirty that level directly, and its evictions go straight to the Reuse Detector. With
less locality filtered out before the RD, fewer blocks show reuse, so expect fewer
bypassed writes than with three levels.

## 7. How far to trust it, and where it departs

Taken from the published scheme: the reuse-bit rules, the eviction decision, the RD
entry format and sizes, sectoring, XOR tag compression, FIFO replacement without
update on hits, the SLLC's insert/update/drop policy and non-inclusion, and the cache
sizes and latencies of the evaluated 4-core system.

Choices and simplifications of this design:

* **Tags only.** No data arrays are modelled, because the scheme decides only on
  addresses and state bits. The STT-RAM array is represented by its access times.
* **One L1 per core, no coherence states.** The L1 instruction and data caches are
  represented by one L1. They reach the L2 the same way, and the core ports carry no
  instruction/data distinction. The directory (MOESI in the evaluation) is replaced by
  a broadcast probe of the other L2s. Writes to shared blocks do not invalidate other
  copies, and directory updates on eviction are not performed.
* **L1 ordering.** The published flow says the L1 is filled and, when needed,
  invalidated. The order of those steps, the write-back of dirty L1 victims without
  an LRU update in the L2, and the reuse bit of L1 lines are this design's choices.
* **Serial request handling.** One core request is in flight at a time, and one block
  per RD. A block on its way from the RD to the SLLC can be re-requested and fetched
  from memory meanwhile; without data this matters only for statistics.
* The meaning of the single RPL bit, the address split, the 48-bit physical address,
  LRU ages, same-cycle tag access, round-robin arbitration and all handshakes are
  this design's own.
* DRAM timing is not modelled; memory is outside, behind a valid/ready port.
* The RDs sit off the request path, as in the published scheme. But their SLLC writes
  and the demand lookups share one crossbar port, arbitrated round-robin, and the
  single SLLC bank serves them one at a time. So a demand lookup can wait behind a
  17-cycle write. Fewer writes therefore also mean shorter waits; a read-first
  arbiter would be a small change in `rd_cmp_top`.

Verification: each module has a self-checking testbench that compares it against an
independent reference model, or against hand-worked cases, including all latencies
stated above. The top-level testbench runs the whole 4-core hierarchy at full size.
It replays the reuse walk-through: a shared block is inserted by its reuse bit; a
clean block is dropped on its first eviction and inserted on its second; a dirty
never-reused block is written to memory; two aliasing tags produce a false hit. It
then runs 6000 random requests from four cores at once on two hot sets and checks
conservation of blocks and write-backs. Every mechanism must occur at least once:
four request sources, L1 and L2 hits, L1 write-backs, invalidation of a dirty L1 copy
on an L2 eviction, four RD outcomes, SLLC insert, update, drop and dirty victim,
RD FIFO replacement, and a sector presence-bit merge.

A second system test, `tb_rd_cmp_scaled`, builds three other evaluated configurations
side by side: 8 cores with an 8 MB SLLC and a 16K-entry RD per core, a single core
with a 1 MB SLLC, and the two-level hierarchy (`PRIV_LEVELS = 1`) with four cores.
All three run in the same test environment (`rd_cmp_env`). Every core mixes three
kinds of traffic: a looping working set larger than its L2 set, blocks streamed
once, and a pool shared by all cores. The test checks that a streamed block always
leaves the L2 with reuse = 0, that a block a core wrote leaves its private levels
dirty, and that fewer blocks are written into the STT-RAM than leave the L2s.
The SPEC CPU2006 programs of the evaluation cannot be run, because the cores are not
part of this RTL.

## 8. Simulating

Files: `rtl/rd_pkg.sv` (types, shared by all), one module per file in `rtl/`, one
testbench per module in `tb/` (`tb_<module>.sv`). With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
          rtl/rd_pkg.sv tb/tb_rd_cmp_top.sv --top-module tb_rd_cmp_top
./obj_dir/Vtb_rd_cmp_top
```

Replace `tb_rd_cmp_top` with any other testbench name. Each testbench prints
`TB_RESULT checks=N failures=M` and stops. The full-size top-level run takes about 10
seconds. The testbenches do not depend on initial values: every array is cleared after
reset.
