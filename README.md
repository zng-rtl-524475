# ZnG: a GPU memory system built on Z-NAND flash instead of DRAM

A GPU that analyses very large data sets spends most of its time moving data between an SSD,
the host and its own small DRAM. ZnG removes the GPU DRAM and puts low-latency Z-NAND flash
on the GPU board, directly behind the GPU's shared L2 cache. Three problems follow, and each
part of the design addresses one of them:

* **Address translation without an SSD controller.** The page-mapping FTL of an SSD does not
  fit on a GPU. ZnG maps whole flash *blocks* in the GPU's MMU and TLBs. The per-page
  remapping that out-of-place writes need is pushed into the flash itself, into programmable
  row decoders.
* **Flash reads are slow (3 µs).** The L2 is built from STT-MRAM, which is 4× denser than
  SRAM, so it can be 24 MB. It is read-only, and it prefetches the rest of a flash page when
  a PC has shown page locality. The prefetch size adapts to how many prefetched lines are
  actually used.
* **Flash writes are slower still (100 µs) and come in 128 B pieces.** The page registers of
  all planes in a package form one fully associative write cache. A write lands in any free
  register and later writes to the same page merge into it. A page is programmed only when
  its register is evicted. When the registers thrash, writes are held in a pinned part of
  the L2 instead.

The flash channels are replaced by a mesh network, so that the bandwidth of 16 packages
reaches 8 flash controllers that sit on the GPU's own interconnect.

This repository holds synthesizable SystemVerilog for the whole memory side. The path starts
at the SMs' load/store ports and ends at the Z-NAND packages. It also holds a behavioural
model of the flash cell array and self-checking testbenches for every block.

## Data path at a glance

```
 SM s ──► zng_tlb ──(miss)──► zng_mmu (DBMT)
            │ {PDBN, page, line, PLBN}
            ▼
      zng_xbar (SM → L2 bank, bank = line address mod 6)
            ▼
      l2_bank ×6  ── l2_predictor, l2_access_monitor
            │ read miss (1..32 lines) / write / write-back
            ▼
      zng_xbar (bank or GC port → flash controller, by {block, page} mod 8)
            ▼
      flash_ctrl ×8  ── thrash_checker ──► redirect (to all L2 banks)
            │ packets of 8 B flits
            ▼
      flash_mesh 8 × 3 (mesh_router per node; row 0 = controllers, rows 1-2 = packages)
            ▼
      znand_package ×16 ── 64 planes: prog_row_decoder + znand_plane_array each
```

Answers return the same way: read data is sent line by line, and writes are acknowledged.
`zng_top` instantiates everything. Its ports are the SM request and response ports, the DBMT
update port, and a flash command port for the garbage-collection (GC) helper thread. They
also carry the packages' GC alerts and activity counters.

## Addresses

Every structure in the design uses these address fields (`zng_pkg`):

| field | bits | meaning |
|---|---|---|
| VBN | 14 | virtual block number (the SM's view) |
| PDBN = {ch, die, plane, blk} | 4+3+3+10 | physical data block: package (channel), die, plane, block |
| page | 9 | page in the block (384 pages of 4 KB) |
| line | 5 | 128 B line in the page (32 lines) |
| PLBN | 10 | physical log block used for rewritten pages of this data block |

A flash line address is `{PDBN, page, line}`, 34 bits. Only the block part is translated;
page and line pass through.

## Translation: DBMT, MMU and TLBs

`zng_mmu` holds the data block mapping table (DBMT). It has 10240 entries of
`{valid, LBN, PDBN, PLBN}` (80 KB at 8 B per entry). It serves the 16 TLBs round robin, and
one walk takes 3 cycles. An invalid entry returns a fault. The GC helper thread rewrites
entries through the update port. Every update sends a shootdown to all TLBs one cycle later.

`zng_tlb` is a 32-entry, fully associative TLB per SM with round-robin replacement. A hit
forwards the translated request 2 cycles after the SM handed it over. A miss waits for the
walk. A fault drops the request and pulses `sm_fault`. The PLBN travels with the request
down to the flash, because the row decoder needs it to look in the right log block.

## L2: a read-only STT-MRAM cache with adaptive prefetch

Each `l2_bank` has 4096 sets × 8 ways of 128 B lines, and there are 6 banks (24 MB). It uses
true LRU replacement and a full line-address tag. Line address L goes to bank `L mod 6` and
to set `(L / 6) mod 4096`. The bank handles one request at a time. A read hit answers after
the 1-cycle array read. Every line written into the array (fill or pinned write) holds the
bank for the 5-cycle STT-MRAM write.

**Reads.** On a miss the bank asks the flash controller for *n* lines, starting at the
missing line:

* *n* = 1 unless the predictor approves a prefetch.
* If it does, *n* is the access monitor's prefetch size in lines, cut at the end of the
  flash page.
* Lines arrive one per response. Each is filled with its *prefetch* bit set (if it is not
  the requested line) and its *used* bit clear. A later hit sets *used*.

**Predictor (`l2_predictor`).** 512 entries indexed by PC bits [11:3]. Each entry holds a
4-bit saturating counter and, for five sampled warps (0, 16, 32, 48, 64), the last page that
warp touched with this PC.

* A sampled read to the same page as last time increments the counter.
* A read to a different page decrements it and records the new page.
* A miss prefetches when the counter of its PC is above 12.

**Access monitor (`l2_access_monitor`).** Every eviction reports its prefetch and used
bits. After 64 evictions the monitor computes the waste ratio: evicted lines that were
prefetched but never used, divided by all evicted lines.

* Above 0.3, the prefetch size halves (minimum 128 B).
* Below 0.05, it grows by 1 KB (maximum 4 KB, one page).
* The comparisons are done without division: `unused·100 > 30·evicted`.

**Writes.** Normally a write goes straight to flash, and any clean copy in the L2 is
invalidated. This keeps the slow STT-MRAM out of the write path, and the L2 never holds data
that differs from flash. While `redirect` is high, a write is instead kept in the bank as a
dirty line:

* At most one way per set (`PINNED_WAYS`) may be dirty.
* A further write to that set first writes the oldest dirty line back to flash, with the log
  block number it arrived with.
* A dirty line that is hit is updated in place, even after `redirect` drops, so the newest
  data is never split between L2 and flash.

## Flash controllers and the thrashing checker

A `flash_ctrl` takes one request at a time from the L2 banks or from the GC port. It turns
the request into a packet:

* A 64-bit header flit gives destination node, source node, command, PLBN, PDBN, page, line
  and line count (or, on acknowledgements, the error and "register evicted" bits).
* A write is followed by 16 data flits.
* The package for channel *c* is node 8 + *c*.
* A read comes back as one packet of *n* × 16 flits, which the controller cuts into one
  response per line (the last one marked).
* Writes and erases come back as a one-flit acknowledgement.

`thrash_checker` watches the write acknowledgements. A window is 32 writes. If more than
half of them had to evict a flash register, the registers are thrashing, and `thrash` stays
high for the next window. The top ORs the controllers' verdicts into `redirect`, which every
L2 bank sees.

## Flash network

`flash_mesh` is a mesh of `mesh_router`s with 8 B links, one router per node, node =
`y · 8 + x`. Row 0 holds the 8 controllers, and rows 1-2 hold the 16 packages.

Each router has five ports (local, N, E, S, W), each with a 4-flit input FIFO:

* Routing is X first, then Y.
* Switching is wormhole: a head flit locks its output until the tail has passed.
* Each output arbitrates round robin.
* A flit that wins moves into the next router's FIFO in one cycle.

Requests use the row-0 horizontal links and southbound links. Answers use the package rows'
horizontal links and northbound links. The two never wait on each other, so the
request/answer protocol cannot deadlock the mesh.

## Z-NAND package: the register write cache

This is the most involved block. `znand_package` has 64 planes (8 dies × 8 planes) with
8 registers each. One register per plane is the plane's *data register*: it receives page
reads and is the only one that moves pages between planes. The other 7 × 64 = 448 registers
form one fully associative write cache for the package. Each register holds:

* the home plane, block, page and PLBN of its page;
* a 32-bit mask of the lines it holds;
* an LRU stamp;
* 4 KB of data.

Commands are handled one at a time.

**Write (128 B).**

* If a register holds the page, the line merges into it (*write merge*).
* Otherwise a free register takes it. Free registers in the home plane's group are
  preferred.
* Otherwise the LRU register is evicted:
  1. If it holds only some lines, the rest of its page is read from flash and filled in
     (read–modify–write through the row decoder, so the newest copy is used).
  2. If the register is not in its page's home plane, the page migrates to that plane's data
     register over the package's internal network. This takes 4 KB / 8 B = 512 cycles.
  3. The home plane's row decoder allocates the next free page of the PLBN log block, and
     the page is programmed there.
  4. The acknowledgement reports "register evicted", which feeds the thrashing checker.

  Programs run in the background, and only a command that needs the same plane waits. A log
  block with no free page refuses the program; the write is then acknowledged with the error
  bit.

**Read (*n* lines).**

* If a register holds all the requested lines, they are returned at once (*register read
  hit*).
* Otherwise the row decoder of the home plane looks up `{data block, page}` in the log block:
  * on a hit (*log hit*) the newest log copy is read;
  * on a miss the page in the data block is read.
* After tR, any lines a register holds are laid over the page read from flash. Newer data
  always wins.

**Erase.** It erases the block in its plane and drops any register holding a page of that
block.

**Programmable row decoder (`prog_row_decoder`).** This is where the page-level mapping
lives. Every log block (the top 8 blocks of each plane) has one decoder row per wordline.
Programming page *k* of the log block stores the key `{data block, page}` in row *k*.

* A lookup compares the key with every written row of the log block and selects the highest
  matching row. Pages are written in order, so that is the newest copy.
* Erasing the log block clears its free-page counter.
* `gc_alert` rises when any log block has 8 or fewer free pages. This is the cue for the GC
  helper thread: it merges pages, rewrites the DBMT through the update port, and erases
  blocks through the GC port.

The decoder is a CAM made of flash cells in silicon. Here it is the equivalent digital table.

**Cell array (`znand_plane_array`).** This is a behavioural model of the analog part. An
erased page reads as all ones, and a page can be programmed only once per erase (checked by
an assertion). Read takes 3600 cycles, program 120000 and erase 1200000 at 1.2 GHz (3 µs,
100 µs, 1 ms). Pages are stored sparsely, so a full-size package costs memory only for the
pages written.

## Sizes and where they come from

| parameter | value | source |
|---|---|---|
| SMs, clock | 16, 1.2 GHz | paper |
| L2 | 6 banks, 24 MB STT-MRAM, 1-cycle read, 5-cycle write | paper; 4096 sets × 8 ways derived |
| prediction table | 512 entries, 5 sampled warps, 4-bit counter, threshold 12 | paper |
| sampled warp stride | 16 | own choice |
| waste thresholds | 0.3 / 0.05, halve / +1 KB | paper |
| monitor window, size bounds | 64 evictions, 128 B – 4 KB | own choice |
| DBMT | 10240 entries (80 KB) | paper |
| TLB | 32 entries, round robin | own choice |
| flash controllers | 8 | own choice |
| packages, planes, registers | 16, 64, 8 per plane | paper |
| blocks × pages × page | 1024 × 384 × 4 KB | paper |
| tR, tPROG | 3 µs, 100 µs | paper |
| tBERS | 1 ms | own choice |
| mesh | 8 × 3, 8 B flits | paper gives mesh and width; XY, wormhole, 4-flit FIFOs are own choices |
| log blocks per plane, GC alert margin | 8, 8 pages | own choice |
| thrashing rule | > 50 % evicting writes in 32 | own choice |

## Where this design departs from the paper

* The SMs, the GC helper thread and the host-side log block mapping table are software or
  unchanged GPU parts. They appear only as ports of `zng_top`.
* Each L2 bank, flash controller and package handles one command at a time. The paper's
  timing results assume more overlap than this.
* A package has one network port; the paper's two I/O ports are not modelled separately.
* Page migration between planes is a counted delay (512 cycles at 8 B/cycle). It does not go
  through a modelled package-internal network.
* A write refused by a full log block is acknowledged with an error to the flash controller.
  The L2 bank does not pass the error on, because the GC thread is expected to act on
  `gc_alert` before that happens.
* The paper does not say how the thrashing checker decides, how big the TLB is, or how many
  log blocks there are. The values above are choices.

## Verification

Each block has a self-checking testbench in `tb/` with a reference model. Each prints
`TB_RESULT checks=N failures=M`. Their scope:

* `tb_l2_bank`: hit/miss latencies, prefetch after training, invalidation on write, pinned
  writes and write-back.
* `tb_znand_package`: a reduced package against a line-exact model, covering merges,
  evictions, migrations, log hits, refusals and erase.
* `tb_flash_mesh` and `tb_mesh_router`: random traffic, with in-order, intact,
  non-interleaved delivery.
* `tb_zng_top`: the whole system at reduced size. Four SMs and the GC port load, store,
  remap and erase, and every load is checked against a model of the newest data. It then
  requires each mechanism to have occurred: page fault, TLB miss and shootdown, L2
  hit/miss/prefetch, prefetch-size shrink and grow, eviction, thrashing, redirected write,
  write-back, register read hit, merge, eviction, migration, program, log hit, GC alert and
  GC erase.
* `tb_zng_top_full`: the top with no parameter overrides. One load takes the full 3600-cycle
  flash read, hits in L2 the second time, and a store is then served back from a flash
  register.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_zng_top \
    -Irtl rtl/zng_pkg.sv tb/tb_zng_top.sv -y rtl -y tb
./obj_dir/Vtb_zng_top
```

Remaining lint notes:

* `znand_plane_array` uses a blocking write into its sparse page store. This is a
  behavioural model, and dynamic arrays cannot take non-blocking writes.
* 4 KB page constants exceed Verilator's replication warning limit.
* Some status and address bits are intentionally unused.
