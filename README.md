# C-lash: a two-level cache in place of flash wear leveling

NAND flash can only be programmed once between erases, and a block survives a
limited number of erases. A flash translation layer (FTL) usually hides this
behind a logical-to-physical mapping, wear leveling and garbage collection,
which need sizeable mapping tables and cost write performance. C-lash ("Cache
for fLASH") drops all of that for embedded storage. It puts a small cache,
512 KB in the reference configuration, between the host and the flash, and
it maps logical blocks one to one onto physical blocks. The cache absorbs
repeated writes to the same data. It only ever writes a *whole block* to the
flash: one erase, then every page of the block in order. Fewer erases reach
the flash, and they are spread by the workload's own locality rather than by
a wear leveler.

This repository holds synthesizable SystemVerilog for the C-lash cache
controller and its data store, at the reference size. It also holds
self-checking testbenches and a behavioural flash model. The policy follows a
published description of C-lash, which was evaluated only in a storage
simulator. The hardware organisation (interfaces, sequencing, how directories
are searched and how data moves) is this design's own. The section "Choices
made here" lists every point where the description was silent.

## Page space and block space

The cache is split in two:

* **p-space**: 128 page frames (2 KB each). Any frame can hold any logical
  page of any block. It receives every write that misses the cache.
* **b-space**: 2 block slots of 64 pages (128 KB each). A slot caches one
  flash block, directly mapped: page *o* of the block sits in page *o* of the
  slot. A slot may be partly filled. A per-page valid bitmap records which
  pages it holds.

Data only moves "downwards". Pages go from the p-space to the b-space, and
whole blocks go from the b-space to the flash. A write hit updates the page
in place. A read miss is served straight from the flash and is **not** copied
into the cache.

All 256 frames live in one SRAM (`cache_sram`, 131072 x 32 bits = 512 KB):

| frames        | contents                               |
|---------------|----------------------------------------|
| 0 .. 127      | p-space frames                         |
| 128 + 64*s + o| b-space slot *s*, page *o*             |

The SRAM word address is `{frame, word}`, with 512 words of 32 bits per page.

The mapping state is tiny. `pspace_dir` keeps {valid, 19-bit logical page} for
each p-space frame. `bspace_dir` keeps {valid, 13-bit block, 64-bit page
bitmap} for each slot. That comes to 2716 bits (340 bytes). A logical page
number is `{block[12:0], page[5:0]}` over a 1 GB flash (8192 blocks of 64
pages).

## Serving a request

Every host request is one page (`clash_ctrl`):

| request | where the page is                  | action                                             |
|---------|------------------------------------|----------------------------------------------------|
| read    | p-space                            | stream the frame to the host                       |
| read    | b-space slot, bit set              | stream the slot page; slot becomes most recent     |
| read    | nowhere                            | flash page read, passed through to the host        |
| write   | p-space                            | overwrite the frame                                |
| write   | b-space slot, bit set              | overwrite in the slot; slot becomes most recent    |
| write   | nowhere                            | take the lowest free p-space frame                 |
| write   | nowhere, p-space full              | **p-space eviction**, then take the freed frame    |

A write miss always goes to the p-space. This holds even when the page's block
already has a b-space slot.

## Making room: the p-space eviction

This is the heart of C-lash, and the part that takes most of the logic.

**1. Choose the victims.** `victim_sel` finds the flash block with the most
pages in the p-space. Those pages are the victim set, of size *k*. It checks
one candidate frame per cycle against all 128 entries in parallel and counts
the matches, so a scan takes 129 cycles. On a tie, the set that contains the
lowest-numbered frame wins.

**2. Find them a slot.** The controller tries these in order:

1. *The victims' block already owns a slot.* The victims join that slot.
   This keeps a block from ever having two slots. Otherwise two images of
   one block could be flushed.
2. *A slot is free.* The victims move into it.
3. *Switch.* Some slot holds fewer valid pages than *k*. If several do, the
   one with the fewest is taken. The slot's pages go to the p-space and the
   victims take the slot. The flash is not touched, and the p-space gains
   *k - v* free frames.
4. *Flush.* Every slot holds *k* pages or more. The least recently used slot
   is written to the flash, and the victims move into the freed slot.

**Switch, in detail.** Consider victim block X (*k* pages) and a slot holding
block Y with valid pages M (*v < k* of them). Each victim frame *f* with
offset *o* is exchanged with slot page *o*. If Y had page *o*, frame *f* now
holds it. Otherwise *f* becomes free. The pages of Y at offsets that no
victim uses are then exchanged into free p-space frames. Because *v < k*, at
least one frame is left free for the waiting write. Finally the slot becomes
block X, with exactly the victims' offsets valid. For example, three pages of
block 21 at offsets 1, 2 and 3 switch with a slot that holds pages 1 and 3
of block 4. Two of the victim frames receive block 4's pages and one frame
is freed.

**Flush with late merge.** The slot to flush holds block Y. Before Y's flash
block can be erased, its pages that are still valid in the flash must be
saved. A flash page is valid exactly when the cache does not hold that page,
so no flash-side validity table is needed. For each offset *o*:

* the slot holds *o*: nothing to read;
* the p-space holds (Y, *o*): nothing to read, since the flash copy is stale;
* otherwise: read flash page (Y, *o*) into slot page *o*. This is a *merge
  read*.

Then block Y is erased and its 64 pages are programmed in order. Each page
comes from the slot, or from its p-space frame if the p-space holds the
newest copy. That copy stays cached. The slot is then free. Merging only at
flush time ("late merge") reads as few pages as possible. Pages written in
the meantime need no read, and a block that leaves the b-space by a switch
never needs one at all.

**LRU.** `bspace_lru` keeps an age per slot. A slot is "used" on a b-space
hit and when it receives p-space pages by a move, join or switch. The oldest
slot is flushed.

**Invariants**, which the controller relies on and the testbenches check:

* a logical page is in at most one place in the cache;
* whatever the cache holds is newer than the flash;
* the flash only ever receives: erase block, then program pages 0..63 of it
  in order.

## Moving pages

`page_mover` exchanges two frames word by word through the single SRAM port.
For each word it reads A, reads B, writes A and writes B, which takes
4 cycles per word and 2049 cycles per page. Every movement between the two
spaces is an exchange, so a switch needs no page buffer: a victim's frame
takes the slot page it displaces. A plain move into a free slot uses the same
exchange and leaves don't-care data behind in the freed frame.

## Interfaces and timing

All channels are valid/ready. A transfer happens on a rising edge where both
are high.

Host side (`clash_top` ports):

* `host_req_*`: `op` (`HOST_READ`/`HOST_WRITE`) and `lpn` (19 bits).
  `host_req_ready` is high only when the controller is idle, so one request
  is served at a time.
* `host_w*`: the 512 words of a write, after the request is taken. The
  controller may hold `host_wready` low for a long time when a write needs an
  eviction or a flush first.
* `host_r*`: the 512 words of a read, with `host_rlast` on the last one.
* `host_done` pulses once per request. `host_served` says where it was
  served: `SRV_FLASH`, `SRV_PSPACE` or `SRV_BSPACE`.

Flash side:

* `fl_cmd_*`: `op` (`FL_READ`, `FL_PROG`, `FL_ERASE`), `blk` (13 bits) and
  `page` (6 bits). The flash holds `fl_cmd_ready` low while it is busy.
* `fl_w*`: the 512 words after an accepted `FL_PROG`.
* `fl_r*`: the 512 words the flash returns after an accepted `FL_READ`.

`events` carries one-cycle strobes for statistics: `evict`, `to_free_slot`,
`to_own_slot`, `switch_op`, `flush`, `merge_read`, `erase` and `prog`.

Cycle costs (controller clock):

| operation                       | cycles                                   |
|---------------------------------|------------------------------------------|
| read or write hit               | 2 (accept, lookup) + 512 + 1             |
| read miss                       | 2 + flash read + 512                     |
| victim selection                | 129 + 2                                  |
| page moved or switched          | 2049                                     |
| flush                           | merges x (flash read + 512) + erase + 64 x (512 + program) |

The evaluated flash takes 130.9 us per page read, 405.9 us per page program
and 2 ms per block erase. At 50 MHz a flush costs at least 100000 + 64 x 20807
cycles, about 28.6 ms, which is far more than anything inside the cache.

## Modules

| file                 | role                                                     |
|----------------------|----------------------------------------------------------|
| `rtl/clash_pkg.sv`   | geometry constants, opcodes, `served_e`, event struct     |
| `rtl/clash_top.sv`   | top: `clash_ctrl` + `cache_sram`                          |
| `rtl/clash_ctrl.sv`  | policy FSM; instantiates the four blocks below            |
| `rtl/pspace_dir.sv`  | p-space directory, CAM lookup, lowest free frame          |
| `rtl/bspace_dir.sv`  | b-space directory, block lookup, free slot, fewest pages  |
| `rtl/victim_sel.sv`  | largest same-block set in the p-space                     |
| `rtl/bspace_lru.sv`  | LRU order of the slots                                    |
| `rtl/page_mover.sv`  | frame exchange through the SRAM port                      |
| `rtl/cache_sram.sv`  | 512 KB single-port SRAM, written as an array              |

Every module takes its size from parameters whose defaults are the reference
configuration: `PAGE_WORDS=512`, `PPB=64`, `P_FRAMES=128`, `B_SLOTS=2`,
`FLASH_BLOCKS=8192` and `WORD_W=32`. `PAGE_WORDS`, `PPB` and `FLASH_BLOCKS`
must be powers of two, because addresses are built by concatenation. The
p-space must hold at least two frames. After synthesis at full size, the
design is about 3200 flip-flops (mostly the two directories) and 4 Mbit of
memory.

## Choices made here

These points are not fixed by the C-lash description:

* Word width (32 bits), the host and flash interfaces, one page per host
  request, and one request at a time. A multi-page host request is issued as
  consecutive page requests.
* Ties: the lowest frame wins in victim selection, and the lowest slot wins
  for the free slot and the switch.
* Case 1 above, victims joining their own block's slot, is not covered by
  the description. It was added so that a block never has two slots.
* When several slots qualify for a switch, the one with the fewest valid
  pages is taken. "Fewer pages than the victims" is strict: at equality the
  flush runs.
* The LRU counts b-space hits and slots receiving pages as uses.
* During a flush, a page of the flushed block that sits in the p-space is
  programmed from there rather than left stale, and stays cached.
* Only the late merge is built. The description also mentions an "early
  merge" (reading the flash pages when the victims enter the b-space) but
  evaluates only the late one.
* No flash-side validity table: "invalidating" a flash page on a write miss
  is implicit, since the cache holding the page is what makes it stale.
* The power-failure issue (cached data lost) is out of scope, as it is in
  the description.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* `cache_sram_tb`, `pspace_dir_tb`, `bspace_dir_tb`, `bspace_lru_tb`,
  `victim_sel_tb` and `page_mover_tb` run random operations against shadow
  models. They also check `victim_sel`'s 129-cycle scan (N+1 in general) and
  `page_mover`'s 4*PAGE_WORDS+1 cycles.
* `clash_ctrl_tb` runs the controller at a tiny size: 4 frames, 2 slots of 4
  pages, 4-word pages. It compares it against a transaction-level reference
  model of the policy written inside the testbench. For each of 3000 random
  requests the model predicts where the request is served, the eviction
  case, the number of merge reads, and the erases and programs. The
  controller's `host_served` and `events` must match, and every read is
  checked against a reference store. A read hit must also stream one word
  per cycle.
* `clash_top_tb` runs the top at reduced size (16 frames, 8-page blocks) with
  4000 random requests, 80% writes, strong block locality and random read
  back-pressure. Each mechanism must occur at least once: read miss, p-space
  and b-space hits, eviction to a free slot, join, switch, flush, merge read
  and erase.
* `clash_top_full_tb` runs the top at full size with the reference flash
  latencies at 50 MHz, for 1200 requests over six hot blocks plus random
  ones. A directed prologue first forces a move into a free slot and then a
  join of the same block's slot. In one run it saw 54 evictions, 23
  switches, 27 flushes with 963 merge reads, and 1887 passing checks. It
  takes about 5 minutes.
* `clash_workload_tb` runs the full-size cache on two synthetic workloads of
  the evaluated kind: 4-page requests, 80% writes, over the 1 GB space, one
  100% sequential and one 0% sequential, each of 250 requests. Flash
  latencies are shortened, which changes no cache decision. In one run the
  sequential workload wrote 784 pages for 11 erases (about one per 64 pages)
  and the random one wrote 824 pages for 178 erases. The test requires that
  trend: sequential under a quarter of the random erases, and at most one
  erase more than one per 64 pages written.

`tb/flash_model.sv` is a behavioural NAND model. It stores pages sparsely,
returns a fixed pattern for pages never written, and counts any program to a
page that is not erased or out of order. It samples its inputs 2 ns after the
falling edge, so it assumes a clock period well above 4 ns (the testbenches
use 10 ns, and 20 ns at full size).

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/clash_pkg.sv tb/clash_tb_pkg.sv tb/clash_top_tb.sv --top-module clash_top_tb
obj_dir/Vclash_top_tb
```

Replace `clash_top_tb` with any other testbench name. The package files must
come first.

## Limits

* Only the cache is built. The NAND flash and the host are outside,
  reached through the ports above.
* The evaluation workloads (60000 to 100000 requests over 1 GB) fit the
  design's address space, but they are far too long to simulate at RTL. The
  testbenches use shorter random workloads of the same kind: 80% writes,
  block-local addresses.
* Data movement is single-ported and word-serial. This is simple, not fast,
  but it is small next to flash latencies.
