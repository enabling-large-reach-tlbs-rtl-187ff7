# MESC: a GPU address-translation unit that coalesces contiguous memory subregions

GPU kernels touch memory over wide, scattered footprints, so the per-CU TLBs and the shared IOMMU TLB
miss often and the page-table walkers become a bottleneck. Large (2 MB) pages would widen TLB reach,
but the operating system often cannot back a whole 2 MB frame with one physically contiguous block.
It frequently can, however, back large *pieces* of one. This design exploits that partial contiguity.

Each 2 MB virtual frame is cut into eight **subregions** of 64 base pages (256 KB). The OS marks in
the frame's L2 page-table entry which subregions are internally contiguous (bits C0..C7). It also
marks whether the whole frame is contiguous (bit AC). The hardware then does three things:

* caches one TLB entry that covers a whole run of adjacent, mutually contiguous subregions;
* learns which neighbouring subregions join into such runs, and remembers that per frame in a small
  side cache, the **memory subregion cache (MSC)**;
* answers the requester before it finishes that extra work, so the contiguity check stays off the
  latency-critical path.

The RTL here is the translation path of a 16-CU integrated GPU: the per-CU TLBs, the IOMMU with its
unified TLB, page-walk buffer, 16 walker threads, page-walk cache and MSC. Compute units, caches,
DRAM and the OS are outside it.

## Addresses and page-table entries

Virtual and physical addresses are 48 bits with 4 KB pages, so VFNs and PFNs are 36 bits.

| field | bits | meaning |
|---|---|---|
| page offset | VA[11:0] | |
| page in subregion | VA[17:12] | 64 pages |
| subregion index | VA[20:18] | S0..S7 |
| VSN (virtual subregion number) | VA[47:18] | 30 bits |
| virtual large page frame (LPN) | VA[47:21] | 27 bits |

The walk is the ordinary x86-64 four-level walk (L4, L3, L2, L1).

**L2 entry.** It carries two kinds of extra state in bits that are otherwise ignored:

| bit(s) | name | meaning |
|---|---|---|
| 63 | NX | |
| 62 | AC | the whole 2 MB frame maps to contiguous physical pages |
| 61..54 | C7..C0 | C*i* set: the 64 pages of subregion S*i* map to contiguous physical pages |
| 47..12 | PFN | the L1 table |
| 8..0 | flags | present = bit 0, writable = bit 1, user = bit 2 |

**L1 entry.** It is unchanged x86-64.

The software that sets C and AC (a scan of each L1 table, comparing each PFN with the previous one)
is not hardware. The testbench page-table model (`tb/pt_mem_model.sv`, function `scan`) implements
it so that tests can build realistic tables.

The **head** of a subregion is its first page. When C*i* is set, the whole subregion's translation
follows from the head's PFN: pfn(page) = head_pfn + (VA[17:12]).

## Translation path

```
CU0..CU15 --> percu_tlb (32 entries, fully assoc.) --miss--> rr_arbiter --> iommu
iommu:  unified_tlb (512 entries, 16-way) --hit--> reply
                        |
                       miss
                        v
                PWB (sync_fifo, 16) --> 16 x ptw_thread <--> pwc (1024 entries)
                                              |        <--> msc (512 bitmaps)
                                              |        --> fill into unified_tlb
                                              v
                                 page-table memory port (id-tagged)
```

* **Per-CU TLB.** It holds only ordinary 4 KB translations. It has one outstanding miss at a time.
* **IOMMU request port.** The IOMMU takes one request per cycle, with a round-robin choice among
  the CUs. The reply carries the CU id.
* **Unified TLB miss.** The miss goes into the page-walk buffer (PWB). The PWB dispatches it to
  the lowest-numbered idle walker thread.
* **Shared resources.** The 16 walker threads share the PWC, the MSC, the TLB fill port, the reply
  port and the memory port through round-robin arbiters.
* **Memory port.** Each request carries the walker's id. Responses may return in any order.

## The unified TLB (`unified_tlb`)

One set-associative array (32 sets, 16 ways) holds two kinds of entry. A type bit T tells them apart.

| entry | T | tag | set index | payload |
|---|---|---|---|---|
| regular | 0 | VA[47:17] | VA[16:12] | PFN |
| subregion | 1 | VSN of the first subregion in the run | VA[25:21] | 3-bit length L, base PFN of the run |

* **Where entries live.** Regular entries may sit in any of the 16 ways. Subregion entries live
  only in partition 1 (ways 8..15).
* **Subregion indexing.** Subregion entries are indexed with LPN bits, so all runs of one 2 MB
  frame meet in the same set.
* **Coverage of a subregion entry.** It covers VFNs from `tag<<6` to `((tag+L)<<6)|0x3F`, that is
  L+1 subregions. A hit translates as `pfn = base + (vfn - (tag<<6))`.

**Lookup takes two steps.**

* The cycle after the request is accepted, partition 1 of the subregion set is compared. A hit
  answers at once.
* Otherwise the regular set is compared in the next cycle.

So a subregion hit has 1 cycle of lookup latency, and a regular hit or a miss has 2.

**Fills.** The same-tag way is overwritten if there is one, else an empty way is used. Otherwise
the victim comes from a per-set round-robin pointer: one pointer for regular fills over all 16
ways, and one for subregion fills over ways 8..15.

## The walker thread (`ptw_thread`)

A walk first uses the PWC (`pwc`). The PWC caches L4, L3 and L2 entries keyed by level and VA prefix.
The walker starts from the deepest level that hits, so a fully cached walk needs one memory read.
The L2 entry then selects the mode:

* **(a) AC set.** Read the first L1 entry of the frame. The PFN is `start + VA[20:12]`. Reply, then
  fill one subregion entry covering all eight subregions (tag = first VSN, L = 7).
* **(b) C*i* clear.** Read the requested L1 entry. Reply and fill a regular entry.
* **(c) C*i* set.** Read the **head** L1 entry of subregion *i*. Reply at once with
  `head + VA[17:12]`. Then build the largest run of contiguous subregions around *i*:
  1. Look the LPN up in the MSC.
     * On a hit, the stored 7-bit bitmap is used.
     * On a miss, the walker reads the head L1 entry of every other subregion whose C bit is set.
       `contiguity_bitmap_gen` forms the bitmap: bit *j* is set when C*j*, C*j+1* and
       head(S*j+1*) = head(S*j*) + 64 all hold. The bitmap is inserted into the MSC.
  2. `subregion_coalescer` walks outward from *i* through the set bitmap bits. It gives the run
     S*lo*..S*hi*: tag = VSN of S*lo*, L = *hi* − *lo*, base = head(S*i*) − 64·(*i* − *lo*).
  3. The subregion entry is filled.

A not-present entry at any level ends the walk with a fault reply and no fill.

**Worked example** (frame 1, VFN 0x200..0x3FF). It is one of the frames built by the tests.

* C = 1001 1111 (S7 and S4..S0 set).
* Heads: S0 0xF87, S1 0xFC7, S2 0x1007, S3 0x1047, S4 0x201D, S7 0x205D. S5 and S6 are scattered.
* The bitmap is 0000111.
* A request in S2 gives the entry {tag 0x8, L 3, base 0xF87}, covering S0..S3. Its reply arrives
  after four memory reads, before the five neighbour heads are read.
* A later request in S7 hits the MSC and fills {0xF, 0, 0x205D} with a single memory read.

The MSC (`msc`) has 512 entries and 4 ways, with true LRU. Each entry is a 7-bit bitmap tagged by
LPN.

## Shootdown

`inv_valid`/`inv_vfn` models the OS invalidation after a page is remapped. It affects:

* every per-CU TLB: the entry for the page;
* the unified TLB: the regular entry for the page and every subregion entry whose range covers it;
* the MSC: the entry of the page's 2 MB frame;
* the PWC: the whole cache.

The PWC flush is this design's own addition. A cached L2 entry holds C and AC bits that the remap
may have changed. With a stale C bit, mode (c) would read the head of a subregion that is no longer
contiguous and return a wrong PFN. The IOMMU testbench shows this happens if the PWC is left alone.

`inv_all` clears everything.

## Files

All files are in `rtl/`.

| file | contents |
|---|---|
| `mesc_pkg.sv` | widths, PTE bit positions, entry and response structs, walk-mode enum, statistics struct |
| `mesc_gpu_mmu.sv` | top: 16 per-CU TLBs, request arbiter, IOMMU, statistics |
| `percu_tlb.sv` | per-CU TLB |
| `iommu.sv` | IOMMU: TLB, PWB, walker pool, PWC, MSC, arbiters, counters |
| `unified_tlb.sv` | two-type partitioned TLB |
| `ptw_thread.sv` | one walker thread with the three modes and the contiguity check |
| `pwc.sv` | page-walk cache |
| `msc.sv` | memory subregion cache |
| `contiguity_bitmap_gen.sv` | heads and C bits to bitmap |
| `subregion_coalescer.sv` | bitmap to subregion entry |
| `rr_arbiter.sv` | round-robin arbiter (helper) |
| `sync_fifo.sv` | FIFO (helper) |

**Top-level ports** of `mesc_gpu_mmu`:

* `cr3_pfn`;
* per CU: `cu_req_valid/ready/vfn` and `cu_rsp_valid/cu_rsp`;
* the memory read port: `mem_req_valid/ready/addr/id` and `mem_rsp_valid/id/data`;
* shootdown inputs;
* counters: `l1_hits`, `l1_misses`, and `stats`. `stats` holds subregion and regular hits, misses,
  walks per mode, faults, MSC hits and misses, neighbour head reads, and cycles a PWB entry waited
  for a free walker.

## Parameters

All defaults are the evaluated configuration.

| parameter | default | source |
|---|---|---|
| `NUM_CU` | 16 | evaluated configuration |
| `L1_ENTRIES` | 32, fully associative | evaluated configuration |
| `TLB_SETS` × `TLB_WAYS` | 32 × 16 | evaluated configuration |
| `TLB_SUBWAYS` | 8 | evaluated configuration |
| `PTW_THREADS` | 16 | evaluated configuration |
| `PWC_ENTRIES` | 1024, i.e. 8 KB of 8-byte entries | evaluated configuration |
| `MSC_ENTRIES` | 512 | evaluated configuration |
| `PWB_DEPTH` | 16 | own choice |
| MSC and PWC associativity | 4 | own choice |

## Simulating

Each testbench in `tb/` is self-checking. It prints `TB_RESULT checks=N failures=M` and has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/mesc_pkg.sv \
          tb/tb_mesc_gpu_mmu.sv --top-module tb_mesc_gpu_mmu -Mdir obj -o sim && obj/sim
```

Replace the testbench name to run another.

| testbench | what it checks |
|---|---|
| `tb_contiguity_bitmap_gen`, `tb_subregion_coalescer` | the worked example, plus 2000 random cases against a reference model |
| `tb_unified_tlb` | both entry types, lookup latencies, partition rule, replacement, shootdown |
| `tb_msc`, `tb_pwc` | hit, miss, LRU eviction and invalidation |
| `tb_percu_tlb` | hits, misses and fills, against a stand-in IOMMU |
| `tb_ptw_thread` | all three modes on the example frame and on a fully contiguous frame: exact fills, MSC miss with five head reads, MSC hit with one memory read, fault, a frame of two contiguous halves |
| `tb_iommu` | 3000 random requests with up to 48 in flight and reply back-pressure, a mid-run remap plus shootdown, and every counter non-zero |
| `tb_mesc_gpu_mmu` | the whole unit at the default size: 10000 requests from 16 CUs, a remap plus shootdown, a closing burst over 64 frames of isolated contiguous subregions that fills every walker, and a failure for any mechanism that never occurred (listed below) |
| `tb_rr_arbiter`, `tb_sync_fifo` | the helpers |

The mechanisms `tb_mesc_gpu_mmu` requires are: L1 hit and miss, subregion and regular hit, IOMMU
miss, the three walk modes, fault, MSC hit and miss, head reads, PWB wait, and the shootdown.

## Where this RTL goes beyond, or differs from, the description it follows

* **Which head entries to read on an MSC miss.** The description says both "the head entries of
  all contiguous subregions around" the requested one and "up to 6 other" subregions. This RTL
  reads the head of *every* other subregion whose C bit is set (at most 7). The bitmap it stores is
  then complete for the frame; only the run around the requested subregion goes into the TLB.
* **Own choices.** The description does not fix these:
  * replacement policies (round-robin in the TLBs, LRU in the MSC and PWC);
  * MSC and PWC associativity and PWB depth;
  * the one- and two-cycle lookup timing;
  * one outstanding miss per CU;
  * arbitration;
  * fault handling (fault replies are not cached);
  * the PWC flush on shootdown.
* **Permissions.** The three permission bits of a subregion entry are taken from the head entry of
  the requested subregion. Runs whose pages differ in permissions are not detected.
* **Counters.** The statistics counters exist for evaluation. They play no part in translation.
* **Not included.**
  * The combination with other coalescing schemes (CoLT-style) that the evaluation also reports.
  * Any DRAM timing: the page-table memory in the testbenches answers after a fixed 6 cycles.
* **Benchmarks.** The benchmark suites the scheme was evaluated on (graph, linear-algebra and
  stencil kernels) are not run here. Their footprints are not known. This unit caches translations
  rather than holding data, so any footprint runs on it.
