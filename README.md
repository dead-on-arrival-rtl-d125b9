# DEPOT: protecting re-walked entries in a GPU L2 TLB

GPU programs with large data sets overflow the shared L2 TLB. Each time the
TLB installs a translation it must evict an older one. Very often the evicted
page is needed again soon afterwards, so a page-table walk rebuilds the same
translation that was just thrown away. Such a miss is a *dead-entry* miss: it
re-creates an entry that was alive when LRU replacement discarded it. In a
translation-bound workload almost every L2 miss is of this kind. Once such an
entry is back, plain LRU is quite likely to evict it again before its users
have finished with it.

DEPOT (dead-entry protection) adds a small amount of state to the L2 TLB so it
can recognise these misses and make the rebuilt entry survive for a while:

1. **Remember evictions.** Every VPN evicted from the L2 TLB goes into a
   Bloom filter, which is a compact and lossy set.
2. **Recognise a re-walk.** When an L2 miss starts a page walk, its VPN is
   looked up in the filter. A hit means the page was probably evicted
   recently. The VPN is then parked in a 16-slot *pending dead-entry set*
   (PDS) until its walk finishes.
3. **Protect the refill.** When the walk fills the TLB and its VPN is in the
   PDS, the new entry gets an expiry time: `protect_until = now + W`, with
   W = 500,000 cycles by default.
4. **Steer replacement.** The victim is chosen by a three-step cascade:
   - first, an invalid way;
   - else, the least recently used way among the *unprotected* ways;
   - else, if every way is protected, the plain LRU way.

   Protection only changes the choice of victim. It never blocks a fill.

Protection is cleared at every kernel boundary. The filter is emptied after
every 1024 insertions, so stale evictions never protect anything. The added
storage is the 8192-bit filter plus one 20-bit timestamp per TLB entry, about
3.5 KB in total.

This repository holds synthesizable SystemVerilog for the whole translation
path of a 46-SM GPU. Each SM has a private L1 TLB and L1 MSHR. They share the
DEPOT-equipped L2 TLB, the L2 MSHR, the page walk queue, 16 page-table walkers
and a page-walk cache. Each block has a self-checking testbench.

## The translation path

```
 warp requests (coalesced VPNs), one port per SM
      |                                   x46
 +----v-----------------------------------------+
 | sm_translation_unit                          |
 |  l1_tlb (32 entries, fully assoc., 20 cyc)   |
 |    hit --> answer to warp                    |
 |    miss -> l1_tlb_mshr (16 x 4-way merge)    |
 |              new VPN -> out FIFO ---------+  |
 |  in FIFO -> L1 fill + release warps <--+  |  |
 +----------------------------------------|--|--+
                                          |  |  round-robin, 1 request/cycle
 +----------------------------------------|--v--------------------------+
 | depot_l2_subsystem                     |                             |
 |  l2_tlb (1024 entries, 16-way, 80 cyc) --hit--> answer (tag = SM)    |
 |    | miss                                                           |
 |    v                                                                |
 |  l2_tlb_mshr (128 x 8-way merge) --new VPN--> page_walk_queue       |
 |    ^ fill, release merged requesters              |                 |
 |    |                                              v                 |
 |  gmmu_ptw_pool: 16 x page_table_walker + page_walk_cache (32, 20cyc)|
 |                                   | page-table reads (byte address)  |
 |  DEPOT: bloom_filter, pending_dead_entry_set, dead_entry_detect,    |
 |         protection_timestamp_writer, replacement_logic_cascade,     |
 |         stat_counter_block, depot_config_reg                        |
 +-----------------------------------|---------------------------------+
                                     v
                       memory holding the page tables
```

| Part | Size | Latency |
|---|---|---|
| SMs | 46 | — |
| L1 TLB, per SM | 32 entries, fully associative, LRU | 20 cycles |
| L1 MSHR, per SM | 16 entries, up to 4 warps merged per entry | — |
| L2 TLB, shared | 1024 entries, 16-way, LRU (64 sets) | 80 cycles |
| L2 MSHR | 128 entries, up to 8 requesters merged per entry | — |
| Page-table walkers | 16, x86-64 4-level walk | one memory read per level |
| Page-walk cache | 32 entries | 20 cycles |
| Bloom filter | 8192 bits, 3 hashes, cleared every 1024 insertions | same cycle |
| PDS | 16 VPN slots | same cycle |
| Protection window W | 500,000 cycles by default, 20-bit timestamps | — |

Addresses are 48-bit virtual addresses with 4 KB pages. The VPN and PPN are
each 36 bits. Widths and shared types are in `depot_pkg`.

## DEPOT in the L2 level, cycle by cycle

The DEPOT blocks sit around the L2 TLB in `depot_l2_subsystem`. They touch
the datapath at three points.

**Miss (detection).** A lookup that misses at the end of the 80-cycle
pipeline is handed to the L2 MSHR. In the same cycle `dead_entry_detect`
queries the Bloom filter with the missed VPN.
- A filter hit makes the miss a *dead-entry miss*, and the dead-entry
  counter increments.
- If the miss also starts a new walk, meaning it is not merged into a walk
  already in flight, its VPN is written into the PDS.
- Merged misses are not registered again: their walk is already pending.

The MSHR entry also records the dead flag. `mshr_dead_slots` therefore shows
how many in-flight walks are re-walks of evicted pages.

**Fill (protection).** When a walker finishes, the PDS is searched with the
filling VPN.
- On a hit, `protection_timestamp_writer` asserts `fill_protect` with
  `protect_until = cycle_now + W`, and the PDS slot is released.
- Otherwise the entry is installed unprotected.

A walk that found no mapping (a non-present page-table entry) installs
nothing. It still releases its requesters, each with PPN 0.

**Eviction (replacement).** `replacement_logic_cascade` sees the set's valid
bits, LRU ranks and protection state, and picks the victim in three steps:
- **P1:** the lowest-numbered invalid way.
- **P2:** otherwise, the LRU way among unprotected ways. A *protection skip*
  is counted when this way is not the plain-LRU way.
- **P3:** otherwise, when all ways are protected, the plain LRU way. An *LRU
  fallback* is counted.

The evicted VPN is inserted into the filter. Every 1024 insertions the
filter clears itself and pulses `bloom_cleared`.

If the same VPN is filled twice (two walks of one page overlapped), the
second fill rewrites the existing way instead of evicting another.

## Protection timers on a 20-bit clock

This is the least obvious part of the design.

Each tag entry stores `protect_until` in 20 bits. `cycle_now` is the low 20
bits of a free-running cycle counter, so the comparison must be modular. An
entry is treated as protected when its `prot_active` flag is set and

    0 < (protect_until - now) mod 2^20 <= 2^19

That is, the expiry lies at most half the counter's period in the future.

Two details keep this exact:

* **W is limited to 2^19 - 1 = 524,287 cycles.** The configuration register
  clips any larger write. The default W of 500,000 fits.
* **Expired timers are scrubbed.** Once an entry expires, the difference
  keeps falling. After about 2^19 more cycles it would wrap into the
  "future" half and the entry would look protected again. A scrubber
  prevents this:
  - It walks the sets, one set per cycle (64 cycles for the whole TLB).
  - In each set it clears `prot_active` for every expired way.
  - So no entry can stay expired-but-active for anywhere near 2^19 cycles.

A kernel boundary (`kernel_boundary`) clears every `prot_active` flag and
every PDS slot at once. The same pulse invalidates all L1 TLBs.

The `last_access_time` field of the tag entry (8 bits) holds an LRU rank:
0 is the most recently used way and WAYS-1 the least. At reset way i holds
rank i. Touching a way moves it to rank 0 and ages the ways that were more
recent.

## The L2 TLB pipeline

`l2_tlb` accepts one request per cycle into an 80-stage pipeline. The tag
compare happens at the last stage, against the tag array as it is in that
cycle. A request therefore sees every fill that completed while it was in
flight. The set index is the low 6 VPN bits.

The pipeline rules:
- When the last stage holds a result that the consumer has not taken, the
  whole pipeline stalls (`req_ready` falls).
- A fill and a result both update LRU state. In a cycle with a fill, the
  result is held back one cycle.
- An unstalled hit answers exactly 80 cycles after the request was accepted.

In `depot_l2_subsystem`:
- A hit may leave only when the MSHR is not releasing a requester in that
  cycle. Releases have priority on the single response port.
- A miss may leave only when the MSHR can take it.

## MSHRs: merging and releasing

`l2_tlb_mshr` is used at both levels. The L1 uses it as `l1_tlb_mshr`, with
16 × 4 entries and the dead flag tied off. Each entry holds one VPN that is
waiting for a translation, plus the list of requesters waiting for it.

Miss handling:
- A miss whose VPN is already in flight joins that entry (a *merge*), as long
  as the entry has fewer than MERGE requesters.
- A miss on a new VPN takes a free entry and launches one request downstream.
  At L2 this goes to the page walk queue; at L1, to the L2 level.
- The miss is refused (back-pressure) when:
  - its entry is full of requesters;
  - no entry is free; or
  - the downstream queue cannot take the request.

When the translation arrives, the entry answers its requesters one per
cycle, in arrival order, all with the same PPN. While one entry is still
draining, a second fill is refused. Merging into the draining entry is not
allowed, so each VPN is answered once per walk.

## Page walks

`page_walk_queue` is a 128-deep FIFO of VPNs waiting for a walker.

`gmmu_ptw_pool` hands each queued VPN to the lowest-numbered idle walker. Its
16 walkers share one page-walk-cache lookup port and one memory port through
fixed-priority arbiters. The memory tag is the walker number, so reads may
return in any order.

`page_table_walker` performs an x86-64 four-level walk:

1. It looks the VPN up in `page_walk_cache`. This is 32 fully associative
   entries with a 20-cycle lookup. Each entry maps the top 9, 18 or 27 VPN
   bits to the table that the next level must read.
2. The deepest match lets the walker skip that many memory reads.
3. At each remaining level it reads the 8-byte entry at
   `{table_frame, 12'b0} + index * 8`, where the index is the level's 9 VPN
   bits.
4. Bit 0 of the entry is *present*. Bits 47:12 give the next table's frame,
   or at the last level the PPN.
5. After each upper-level read, the walker offers the result to the
   page-walk cache. The cache uses round-robin replacement and ignores
   duplicates.
6. A non-present entry ends the walk with a fault. The result is PPN 0 and
   nothing is installed.

The memory interface is a request (valid/ready, 48-bit byte address, walker
tag) and a response (valid, tag, 64-bit entry). With a 254-cycle memory and
no cached level, a walk takes about 4 × 254 cycles plus the 20-cycle cache
lookup and hand-offs: 1038 cycles in simulation. Each cached level saves one
memory read.

## The SM side and the arbiter

`sm_translation_unit` is one SM's slice. `gpu_translation_top` instantiates
46 of them.

- A coalesced request (VPN plus warp tag) looks up the L1 TLB.
- A hit is answered after 20 cycles.
- A miss goes to the L1 MSHR. New VPNs go through a 16-deep outgoing FIFO.
- A round-robin arbiter in the top grants one SM per cycle onto the L2
  request port. The L2 tag is the SM index.
- L2 answers are steered back by that tag into the SM's 16-deep incoming
  FIFO. Each outstanding L1 MSHR entry owns at most one slot there, so the
  FIFO cannot overflow. An assertion checks this.
- From the incoming FIFO, each translation is installed in the L1 TLB
  (unless it is PPN 0) and releases the waiting warps.

## Control and statistics

The configuration register (`csr_we`, `csr_addr`, `csr_wdata`):

| Address | Field | Reset value |
|---|---|---|
| 0 | W, clipped to 2^19 - 1 | 500000 |
| 1 | bit 0: DEPOT enable | 1 |

With DEPOT disabled:
- nothing enters the filter or the PDS;
- no fill is protected;
- the L2 behaves as plain LRU.

Other inputs:
- `bloom_saturate` forces every filter query positive, which is the
  worst-case stress setting.
- `cycle_now` is fed from outside, so a system can share one cycle counter.

Outputs:
- 32-bit saturating counters for dead-entry misses, protection skips, LRU
  fallbacks and filter insertions.
- L1 hits, L1 misses and L2 requests.
- L2 MSHR occupancy and dead-slot occupancy.
- The number of currently protected L2 entries.
- The number of busy walkers.
- The filter-clear pulse.

`stats_clear` zeroes the counters.

## Files

| File | Contents |
|---|---|
| `rtl/depot_pkg.sv` | widths, types, hash constants, `bloom_mix`, `timer_pending` |
| `rtl/gpu_translation_top.sv` | top: 46 SM slices, round-robin arbiter, L2 level |
| `rtl/sm_translation_unit.sv` | one SM: L1 TLB, L1 MSHR, two FIFOs |
| `rtl/l1_tlb.sv`, `rtl/l1_tlb_mshr.sv`, `rtl/sync_fifo.sv` | per-SM parts |
| `rtl/depot_l2_subsystem.sv` | L2 level: L2 TLB, DEPOT, MSHR, queue, GMMU |
| `rtl/l2_tlb.sv` | tag array, pipeline, LRU, timers, scrubber |
| `rtl/replacement_logic_cascade.sv` | P1/P2/P3 victim selection |
| `rtl/bloom_filter.sv`, `rtl/pending_dead_entry_set.sv`, `rtl/dead_entry_detect.sv`, `rtl/protection_timestamp_writer.sv`, `rtl/stat_counter_block.sv`, `rtl/depot_config_reg.sv` | DEPOT blocks |
| `rtl/l2_tlb_mshr.sv`, `rtl/page_walk_queue.sv`, `rtl/gmmu_ptw_pool.sv`, `rtl/page_table_walker.sv`, `rtl/page_walk_cache.sv` | miss and walk path |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_gpu_translation_top_full.sv`, `tb/tb_depot_l2_subsystem_full.sv` | full-size runs, no parameter overrides |
| `tb/pt_model_pkg.sv` | reference page table, a pure function of the address |
| `tb/dram_pt_model.sv` | page-table memory model with a fixed 254-cycle latency |

The testbench page table is computed, not stored. The entry at byte address
`a` is present unless `a[11:3] == 511`. Its frame is
`((a * 0x9E3779B1) >> 16)[35:0] ^ a[47:12]`. `pt_model_pkg::walk` computes
the expected result of a full walk independently of the RTL.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. A
watchdog counts a failure if the run hangs. To build and run one with
Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -Itb \
    rtl/depot_pkg.sv tb/pt_model_pkg.sv \
    --top-module tb_gpu_translation_top tb/tb_gpu_translation_top.sv \
    -y rtl -y tb -o sim
./obj_dir/sim
```

Replace the top-module name and file to run another testbench. Lint warnings
about unused bits can be turned off with `-Wno-lint -Wno-style`. The
simulator is two-state. Every register that is read is reset.

| Testbench | Size | What it shows |
|---|---|---|
| `tb_gpu_translation_top` | reduced: 4 SMs, 8-entry L1, 64-entry L2, filter cleared every 64 insertions, W = 4000 | All 18 mechanisms occur at least once: L1 hit/miss/merge, L2 hit/miss/merge, page-walk-cache hit, dead-entry miss, PDS registration, protected fill, protection skip, LRU fallback, filter clear, kernel flush, back-pressure, SM contention. Checks include the 20-cycle L1 hit. |
| `tb_gpu_translation_top_full` | defaults, 46 SMs | Two sweeps over 1472 shared pages, with a kernel boundary between them. Re-walks are detected and protected. Under 2 s. |
| `tb_depot_l2_subsystem` / `_full` | L2 level alone, reduced and default | Cycle-level checks of the L2 level, including the 80-cycle hit. |
| other `tb_*` | one per module | Each is checked against an independent reference model. |

## How far it can be trusted

Every module has a testbench that compares it with a separately written
reference model:
- an LRU list for the TLBs;
- a set model for the filter;
- queue models for the FIFOs and MSHRs;
- the computed page table for walks.

In total they make about 300,000 checks. For each module, a version with one
deliberate bug was run against its testbench, and every one of them was
caught. All files pass Verilator lint and the slang front end of Yosys.

What has not been shown:
- timing closure;
- the area of the 1024 × 16 tag array built from flip-flops;
- behaviour with a real memory system;
- anything about the performance gains of protection.

The testbenches check correctness of function and latency, not speed-ups.

## Where this design departs from the description it follows

- **Ports.** The source describes a 16-port L2 TLB and 4-port L1 TLBs. Here
  each accepts one lookup per cycle. The 46 SMs share the L2 port through
  one round-robin arbiter.
- **Hash functions.** The filter's three hashes are this design's own. Each
  is a multiplicative hash: the top 13 bits of the low 48 bits of
  `vpn × K_i`.
- **Timer compare.** The `prot_active` flag, the scrubber and the 2^19 limit
  on W are additions. They are needed to make a 20-bit timestamp safe across
  counter wrap. As a result, protection windows of 1 M and 2 M cycles cannot
  be configured. Those would need a different compare, or a wider field than
  the 20 bits described.
- **Page-walk cache.** Its contents are not specified in the source. This
  design caches the three upper levels, as described in the page-walk
  section.
- **Handshakes.** MSHR back-pressure rules, release one requester per cycle,
  and the priority of releases over hits are this design's own choices.
  So are the FIFO depths and the 128-deep walk queue.
- **Unflagged fills.** A fill that is not protected clears the protection of
  the way it lands in. The source says such a fill leaves the protection
  field untouched. Taken literally, that would let a new entry inherit the
  live timer of a protected way evicted by the LRU fallback.
- **Page faults.** PPN 0 marks an unmapped page. Such a result is not
  installed in either TLB level.
- **Not built:**
  - 2 MB huge-page translation (a 128-entry L2 for 2 MB pages);
  - the LatPC prefetcher (a comparison point only);
  - the coalescer and the SM cores (requests enter as coalesced VPNs);
  - the DRAM (modelled in the testbenches only).

## What the design can run

Translation state does not limit the size of a program:
- The 36-bit VPN covers the whole 48-bit address space.
- The page tables live in memory outside the design.

The reference workloads range from 0.5 MB to 226 MB of data. That is 128 to
58,000 pages of 4 KB, so all of them run. The L2 reach is 1024 × 4 KB = 4 MB.
Workloads larger than that take capacity misses, and those are the misses
DEPOT acts on.

Supported settings:
- The baseline (DEPOT disabled by the CSR bit).
- DEPOT at its defaults.
- Protection windows up to 524,287 cycles.
- Filter sizes from 2048 to 16384 bits (by parameter).
- A saturated filter.

Not supported: huge pages, and windows of 1 M cycles or more.
