# Rainbow: superpages with 4 KB page migration in a hybrid DRAM/NVM memory

In a machine whose main memory is mostly non-volatile memory (NVM, here
phase-change memory) with a smaller DRAM, two wishes collide. Large 2 MB
superpages keep the TLB reach high, but the usual way to make such a system
fast, moving the hot data into DRAM, wants to move 4 KB pages, and moving
one 4 KB page out of a superpage normally forces the OS to break the
superpage up into 512 small mappings.

Rainbow keeps both. NVM is mapped only with 2 MB superpages; DRAM acts as a
cache of hot 4 KB pieces of those superpages. A migrated piece is never
unmapped from its superpage. Instead:

* a **migration bitmap** (one bit per 4 KB page of NVM) records which pieces
  currently live in DRAM;
* the first 8 bytes of the piece's old home in NVM are overwritten with the
  **DRAM page number** of its copy;
* each core has **split TLBs**, one for 2 MB superpages and one for 4 KB
  pages. The 4 KB TLB holds direct translations for pieces in DRAM, and a
  4 KB TLB miss falls back to the superpage translation, the bitmap and, if
  needed, one read of the 8-byte forwarding word.

Which pieces deserve migration is found by **two-stage access counting** in
the memory controller: first one counter per superpage, then, for only the
N hottest superpages, one counter per 4 KB page.

This repository is synthesizable SystemVerilog for the hardware part of that
scheme: the per-core translation path with its TLBs and walker, the
migration bitmap cache, the two counting stages and the memory-controller
front end that ties them together. The policy parts (sorting superpages,
choosing and copying pages, DRAM allocation) are software and are played by
the end-to-end testbench.

## Address fields

All addresses are 48 bits.

| bits   | name            | used for                                    |
|--------|-----------------|---------------------------------------------|
| 47..21 | PSN / VSN       | superpage number (27 bits)                  |
| 20..12 | small-page index| which 4 KB page of the superpage (9 bits); index into the 512-bit bitmap |
| 11..0  | page offset     |                                             |
| 47..12 | PPN / VPN       | 4 KB page number (36 bits)                  |

Physical map (a choice of this implementation, in `rainbow_pkg`): DRAM
4 GB at address 0, NVM 32 GB from `0x1_0000_0000`. NVM superpage *k* of the
counter array is PSN `0x800 + k`.

## Translating an address (`xlate`)

Each core owns one `xlate`. A virtual address is looked up in both TLBs at
once (`tlb_hier` instances `u_sp_tlb` and `u_sm_tlb`), and then:

1. **4 KB TLB hit** (whatever the superpage TLB says): the page is in DRAM;
   the 4 KB translation is the answer (`XC_SMALL_HIT`). The answer is given
   as soon as the 4 KB TLB hits, 1 cycle after the request on an L1 hit,
   without waiting for the superpage TLB.
2. **4 KB miss, superpage hit**: the PSN from the superpage TLB and
   VA[20:12] are sent to the bitmap cache.
   * flag clear: the page is still in NVM; PA = {PSN, VA[20:0]}
     (`XC_SUPERPAGE`);
   * flag set: the 64-byte line at {PSN, VA[20:12], 0} is read from NVM;
     its first 64-bit word holds the DRAM page number (bits 35..0). The
     4 KB TLB is filled with it and PA = {DRAM PPN, VA[11:0]} (`XC_REMAP`).
3. **both miss**: `sp_walker` walks the superpage page table (three reads,
   x86-64 entry format, level-2 entry with the page-size bit), the superpage
   TLB is filled, and step 2 follows. A missing mapping ends with
   `XC_FAULT`.

So a migrated page costs one extra NVM read the first time it is touched
after its 4 KB TLB entry is gone, instead of a four-level 4 KB page walk;
the superpage TLB acts as a large second-level TLB for the DRAM pages. A
migration never changes a superpage mapping, so it needs no TLB
shootdown; only writing a page back from DRAM to NVM does (`inv_*`, driven
by `os_shootdown_*` at the top, broadcast to all cores' 4 KB TLBs).

`resp_walked`, `resp_sp_hit` and `resp_small_hit` report which case
occurred, for statistics.

### TLBs (`tlb`, `tlb_hier`)

`tlb` is one set-associative level: the set is the page number modulo the
number of sets, all ways compare in parallel, the answer is registered
(1 cycle). Fills reuse a way holding the same tag, else an invalid way,
else the set's round-robin victim. `tlb_hier` stacks an L1 (32 entries,
4-way, 1 cycle) on an L2 (512 entries, 8-way, 8 more cycles), refills L1
on an L2 hit, writes fills into both levels and invalidates both.
Per core there are two `tlb_hier`: 2 MB pages (27-bit tags) and 4 KB pages
(36-bit tags).

## The migration bitmap cache (`bitmap_cache`)

The full bitmap, 64 bytes per 2 MB superpage, lives in memory at
`BITMAP_BASE + PSN*64` (the `bmm_*` port of the top). The controller caches
4000 of them, 8-way set-associative (500 sets, set = PSN mod 500), each
entry a 27-bit PSN tag and the 512-bit bitmap; 4000 entries cover about
8 GB of NVM. Operations:

* `BM_LOOKUP` from a core: returns the flag. A hit answers exactly
  `HIT_LATENCY` = 9 cycles after acceptance.
* `BM_SET` / `BM_CLEAR` from the OS after a migration or a writeback: change
  the flag and mark the line dirty.

A miss picks a victim (invalid way, else round robin), writes it back if
dirty, reads the new bitmap line and then completes the operation; the
response carries `r_hit = 0`. The cache serves one operation at a time.
In `hybrid_mc` OS updates have priority over core lookups, and responses are
steered back by id.

## Two-stage access counting (`sp_counter`, `small_counter`)

Every request `hybrid_mc` sends to NVM is counted; DRAM requests are not.
A write adds 8 and a read adds 1, because PCM writes are far slower than
reads (the source only says writes weigh more; 8 is this design's value).

*Stage 1*, `sp_counter`: 16384 counters of 16 bits, one per 2 MB of the
32 GB NVM, saturating. *Stage 2*, `small_counter`: 100 slots, each with
the PSN of a hot superpage and 512 counters of 15 bits plus an overflow
flag (bit 15). An NVM reference whose PSN matches a slot (all slots
compared in parallel) updates the counter of its 4 KB page. When a value
would pass 32767 the flag is set and the value stays at 32767: the page is
certainly hot.

Both tables are read by the OS one counter per cycle (`os_sp_rd_*`,
`os_sc_rd_*`, result in the next cycle) and a read clears the counter, so
reading everything at the end of an interval also starts the next one.
An access and a read of the same counter in the same cycle lose nothing
(the read gets the old value, the counter restarts with the access). After
reset both tables clear themselves (16384 and 51200 cycles);
`init_done` is low and the controller accepts no requests until then.

The intended software loop, per monitoring interval of 10^8 cycles
(`interval_tick`):

1. read all stage-1 counters, sort, and load the top N (100) PSNs into the
   stage-2 slots (`os_ld_*`);
2. at the next interval read the stage-2 counters of those slots and
   classify pages as hot by threshold or by their expected benefit,
   `(t_nr - t_dr)·C_r + (t_nw - t_dw)·C_w - T_mig > 0`, reduced by the
   cost of writing back a dirty victim when DRAM is full;
3. for each page to migrate: copy it to a free DRAM page, write the DRAM
   page number into its first 8 bytes in NVM, set its flag (`os_bm_*`);
4. to evict a DRAM page: copy it back (only the first 8 bytes if it is
   clean), clear its flag, shoot down its 4 KB TLB entries.

Steps 1 to 4 are not hardware here; the testbench models them.

## Memory controller front end (`hybrid_mc`) and top (`rainbow_top`)

`hybrid_mc` takes line requests (`mem_req_t`: address, write flag, 512-bit
data, 4-bit id), sends them to the DRAM or the NVM controller port by
address, and merges the read responses (DRAM first) with their ids. Writes
get no response. It contains the two counter tables, the bitmap cache and
the interval timer.

`rainbow_top` has `NCORES` = 8 `xlate` units. Their memory reads (walks
and forwarding words) and the LLC miss port share the controller through a
round-robin arbiter (`rr_arb`; core *i* uses id *i*, the LLC id 8); their
bitmap lookups share the bitmap cache through a second one. The DRAM and
PCM controllers, the bitmap backing store, the caches and the cores are
outside and appear as ports. LLC responses return in completion order.

## Parameters

| parameter (module)              | default | origin |
|---------------------------------|---------|--------|
| `NCORES` (top)                  | 8       | evaluated system |
| `L1_ENTRIES`/`L1_WAYS`          | 32 / 4  | evaluated L1 data TLB, per page size |
| `L2_ENTRIES`/`L2_WAYS`/`L2_LATENCY` | 512 / 8 / 8 | evaluated L2 TLB, per page size |
| `BM_ENTRIES`/`BM_WAYS`/`BM_LATENCY` | 4000 / 8 / 9 | bitmap cache |
| `NUM_SP` (`sp_counter`)         | 16384   | 32 GB PCM / 2 MB |
| `N_SLOTS` (`small_counter`)     | 100     | top-N superpages |
| `INTERVAL`                      | 10^8    | monitoring interval (cycles) |
| `RD_WEIGHT`/`WR_WEIGHT`         | 1 / 8   | own choice |
| `BITMAP_BASE`                   | `0xF000_0000` | own choice |

All defaults are the full sizes; nothing was scaled down. At these sizes
the design holds about 3.8 Mbit of memory arrays (bitmap cache 2.2 Mbit,
stage-2 counters 0.8 Mbit, stage-1 counters 0.26 Mbit) and 26 k flip-flops,
mostly the 8 × 2 TLB hierarchies.

For the 1 TB-NVM configuration of the storage analysis, the stage-1 table
would need 524288 counters (1 MB), the NVM address range in `rainbow_pkg`
would have to grow to 1 TB, and the counter index in `hybrid_mc` with it.
The footprints of all the evaluated applications and their mixes (largest:
27.4 GB) fit the 32 GB NVM range built here.

## Where this design departs from, or adds to, the description

* The DRAM and PCM controllers, the caches (including `clflush`), the cores
  and the whole OS side are not implemented; they are ports.
* The superpage walk cache in front of the walker is only named in the
  source; it is not built, so every walk makes three reads.
* The L2 TLB of the evaluated system is unified (instructions and data);
  here only the data side exists, one L2 per page size per core.
* The bitmap check is made on the translation path (as in the four-case
  description). Plain data requests from the LLC to NVM are not checked
  again in the controller; software must keep the LLC consistent
  (`clflush` on migration), as the source prescribes.
* The write weight, the stage-2 overflow behaviour (saturate and flag), the
  clear-on-read counters, the bitmap-cache set index and replacement, the
  write-back of dirty bitmap lines, the address map, the encoding of the
  forwarding word (DRAM PPN in bits 35..0) and all handshakes are choices
  of this design.
* The 9-cycle bitmap-cache latency and the TLB latencies are modelled as
  fixed wait states, not as real array timing.
* One translation per core at a time; one bitmap operation at a time.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench            | what it checks |
|----------------------|----------------|
| `tlb_tb`             | hits, data, misses, shootdown, in-place update, round-robin eviction, 1-cycle answer |
| `tlb_hier_tb`        | L1 hit in 1 cycle, L2 hit in 9, L1 refill, invalidate of both levels |
| `sp_walker_tb`       | PSN from random 3-level tables, faults, exactly 3 reads per walk |
| `bitmap_cache_tb`    | 1500 random lookups/sets/clears against a model, 9-cycle hits, dirty eviction and refetch |
| `sp_counter_tb`      | weighted counts, read-and-clear (also same-cycle), saturation |
| `small_counter_tb`   | slot match, weighted counts, overflow flag, slot disable |
| `xlate_tb`           | all four cases, remap and 4 KB refill, shootdown, faults, 600 random translations |
| `hybrid_mc_tb`       | routing, response ids/data, both counting stages, OS flag updates, interval tick |
| `rainbow_top_tb`     | end to end, interval shortened to 20000 cycles |
| `rainbow_top_full_tb`| the same run with every top parameter at its default |

The end-to-end run maps 16 superpages (ten of them in one bitmap-cache set
so that dirty bitmap lines are evicted), lets 8 cores issue skewed traffic,
reads the stage-1 counters and checks that the four hot superpages rank
first, loads them into stage 2, migrates every page whose weighted count
reaches 24, checks remapped and 4 KB-TLB-hit translations and the data read
through the LLC port (the DRAM copy must equal the NVM original), forces a
stage-2 overflow, writes three pages back with shootdown, and checks that
every mechanism above occurred at least once. The applications of the
evaluation themselves cannot be run; the design has no processor.

To simulate one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl rtl/rainbow_pkg.sv \
    tb/rainbow_top_tb.sv --top-module rainbow_top_tb -Mdir obj && obj/Vrainbow_top_tb
```

Replace the testbench file and top module name for the others (for example
`tb/xlate_tb.sv --top-module xlate_tb`). The full-size end-to-end run takes
under a minute including compilation.
