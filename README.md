# Utopia MMU: hybrid restrictive / flexible address translation in SystemVerilog

Conventional virtual memory lets any virtual page map to any physical page.
That freedom has a cost. A TLB miss needs a four-level radix page-table
walk: four dependent memory reads, which often miss the caches for programs
with large, irregular footprints.

Utopia splits physical memory into two kinds of segments:

* **RestSegs** (restrictive segments). A RestSeg is a contiguous physical
  region organised like a set-associative cache. A virtual page may live
  only in the ways of the one set chosen by a hash of its virtual page
  number (VPN). Its physical address is computed from the set index and the
  way number, so no pointer chasing is needed. A small per-process tag
  array says which way holds which page.
* **The FlexSeg**: all remaining memory, mapped by the ordinary x86-64
  page table, so any page can still go anywhere.

Pages go into a RestSeg when they are first touched. A page that had to go
to the FlexSeg, and then proves expensive to translate, is moved into a
RestSeg later. This repository holds synthesizable RTL for the memory
management unit (MMU) of such a system, testbenches for every block, and a
full-size end-to-end test.

## Main configuration

| Item | Value |
|---|---|
| Virtual address | 48 bits (x86-64) |
| Physical address | 52 bits |
| Page sizes | 4KB and 2MB |
| RestSegs | two of 512MB, 16-way, modulo hash |
| 4KB RestSeg | 8192 sets |
| 2MB RestSeg | 16 sets |
| L1 I-TLB | 128 entries, 8-way, 1 cycle |
| L1 D-TLB, 4KB pages | 64 entries, 4-way, 1 cycle |
| L1 D-TLB, 2MB pages | 32 entries, 4-way, 1 cycle |
| L2 TLB | 1536 entries, 12-way, 12 cycles, unified 4KB/2MB |
| Page walk caches | 3 (PML4, PDP, PD), 32 entries, 4-way, 2 cycles |
| TAR cache | about 2KB, 2 cycles |
| SF cache | 2KB, 2 cycles |

These are the defaults of the RTL parameters. The full-size test uses them
unchanged.

## How a RestSeg is organised

A RestSeg of `N` pages with associativity `M` has `N/M` sets. Entry
`set*M + way` occupies the page-sized slot at that index from the segment's
base. For a virtual page number `vpn`, counted in the segment's page size:

```
set  = vpn mod (#sets)            (low bits of the VPN, since #sets is a power of two)
tag  = vpn / (#sets)              (the remaining VPN bits)
PA   = RestSegBase + (set * 16 + way) * pagesize + page offset
```

For the 4KB segment the VPN is VA[47:12]: the set is VA[24:12] and the tag
is VA[47:25], 23 bits. For the 2MB segment the VPN is VA[47:21]: the set is
VA[24:21] and the tag is VA[47:25], also 23 bits. The two segments happen to
have the same tag width, so one TAR entry format serves both.

Each RestSeg has two translation structures in ordinary memory. The OS owns
them, one copy per process.

**Tag Array (TAR).** For every way of every set it holds the virtual tag of
the page stored there, plus 10 metadata bits. Each entry is 33 bits wide:

```
bit 32 ........ 10 | 9 ...... 4 | 3  | 2    | 1        | 0
      tag (23)     |  reserved  | nx | user | writable | valid
```

The 16 entries of a set are packed least-significant way first into
16 × 33 = 528 bits, which is 66 bytes. TAR set `s` of a segment starts at
byte `tar_base + 66*s`. The whole TAR of the 4KB segment is 8192 × 66 B =
528KB. Because a set is a single 66-byte read, one memory transfer brings
every tag the walker has to compare.

**Set Filter (SF).** One counter per set gives the number of occupied ways.
A zero means the page cannot be in this segment, so the walker skips tag
matching and the TAR fetch altogether. The counter needs log2(16)+1 = 5
bits. In memory each counter takes one byte: set `s` is at `sf_base + s`,
with the value in the low five bits. The 4KB segment's SF is therefore 8KB.

## Translation flow

```
           request
              |
        L1 TLBs (I, or D-4KB + D-2MB)  --hit-->  response (2 cycles)
              | miss
     +--------+---------+
     |                  |
 RestSeg walks      L2 TLB (12 cycles)
 (4KB and 2MB,          |
  in parallel)          |
     | found --> response, abort the L2 lookup, fill L1
     |                  | hit --> response, fill L1
     | not found        | miss
     +--------+---------+
              | both "no"
        FlexSeg walk (radix + page walk caches)
              |
        response or page fault; fill L2 and L1;
        PTW-tracking update, maybe migration interrupt
```

The FlexSeg walk waits for two answers. The RestSeg walks must report "not
found" and the L2 TLB must report a miss. Starting it earlier would waste
memory bandwidth on pages that a RestSeg holds.

An L2 TLB hit can arrive while the RestSeg walk is still fetching. The MMU
answers at once, and accepts the next request only after the walk has
finished. That walk will report "not found", because a page lives in
exactly one place. Only one translation is in flight at a time.

Latency, counted from the cycle `req_valid && req_ready`:

| Resolved by | Cycles until `rsp_valid` |
|---|---|
| L1 TLB | 2 (1-cycle TLB + output register) |
| RestSeg walk, SF and TAR cached | 5 (1 + 2-cycle caches + 1 tag match + output) |
| L2 TLB | 14 (1 + 12 + output) |
| RestSeg walk with fetches, FlexSeg walk | depends on memory |

`rsp_src` reports where each translation came from: `SRC_L1TLB`,
`SRC_L2TLB`, `SRC_RSW`, `SRC_FSW` or `SRC_FAULT`.

## The RestSeg walker (`restseg_walker`)

This is the most involved block. It serves both segments in parallel, and
most of its logic deals with its two small caches.

1. **Look up.** The walker hashes the VPN for both segments. It sends the
   byte address of each segment's SF counter to the SF cache, and the
   address of each segment's TAR set to the TAR cache. Each cache has two
   read ports and a 2-cycle latency.
2. **Evaluate**, one cycle, for each segment:
   * An SF hit with count 0 means the segment is *filtered*. The page is
     not there, and no TAR access is needed.
   * An SF hit with a non-zero count plus a TAR hit lets the walker compare
     all 16 tags against the virtual tag. Only entries with the valid bit
     set can match. A match in way `w` gives the physical address above.
3. **Decide.** If any segment matched, the walk ends with `found`. If every
   segment is resolved (filtered, or compared without a match), it ends
   with "not found". Otherwise the walker fetches what is missing.
4. **Fetch.** Requests for the missing SF lines (64-byte aligned) and TAR
   sets go out back to back on the memory port, so their latencies overlap.
   In-order responses fill the caches. The walker then returns to step 1,
   where both caches now hit.

A filtered segment never needs its TAR, so a page in the FlexSeg usually
costs only SF traffic. That traffic is small and caches well.

**INVLPG.** When `inv_valid` is set, the walker hashes the given VPN and
invalidates, for each segment, the SF line and the TAR set that the hash
selects. Segment 0 is done in one cycle and segment 1 in the next.

Both caches are physically addressed. They are therefore not flushed on a
context switch: the OS just reloads the base registers.

## The FlexSeg walker and PTW tracking

`flexseg_walker` is a plain x86-64 walker.

* It starts from CR3. The entries are PML4 (VA[47:39]), PDP (VA[38:30]),
  PD (VA[29:21]) and PT (VA[20:12]).
* A PD entry with PS set is a 2MB leaf. A non-present entry ends the walk
  with a page fault. 1GB pages are treated as faults.
* At the start, three split page walk caches are probed in parallel, keyed
  by VA[47:39], VA[47:30] and VA[47:21]. The deepest hit decides which
  level the walk starts at.
* A cold walk reads 4 entries. A PD-cache hit cuts it to 1 read, a PDP-cache
  hit to 2, and a PML4-cache hit to 3.

Every completed walk updates two counters in the leaf PTE, in bits the
hardware otherwise ignores:

| Counter | PTE bits | Update |
|---|---|---|
| PTW frequency, 4 bits | [55:52] | +1 per walk |
| PTW cost, 5 bits | {[58:56], [10:9]} | + number of this walk's reads served by DRAM |

Both counters saturate. The updated PTE is written back. When both counters
exceed the programmable thresholds `thr_freq` and `thr_cost`, the MMU raises
`mig_irq` with `mig_vpn` and `mig_is2m` and holds it until `mig_ack`. The OS
then moves the page into a RestSeg. While an interrupt is pending, further
migration requests are dropped.

Each memory response carries a `dram` flag, and that flag is how the walker
counts DRAM reads. A memory system that cannot tell may drive it high for
every read.

## What the OS must do

The hardware reads state that only software writes. The design relies on
the OS for the following:

* Create the RestSegs at boot.
* Program per process: `cr3`, plus `restseg_base`, `tar_base` and `sf_base`
  for each segment. Index 0 is the 4KB segment and index 1 the 2MB segment.
* On a page fault, place the page in a RestSeg:
  1. Hash it to its set and pick a free way (or evict one).
  2. Write the TAR entry and the SF count.
  3. Copy the data.
  4. **Issue INVLPG for the page**, so that a TAR set or SF line cached
     earlier is dropped.
* Use the same INVLPG rule after evictions and migrations. Forgetting it
  leaves a stale copy in the SF or TAR cache. The end-to-end test checks
  this case.
* Pulse `flush` on a context switch. It empties the TLBs and the page walk
  caches.
* Answer `mig_irq`: acknowledge it, move the page, rewrite the page table,
  TAR and SF, and issue INVLPG.

## Module hierarchy

```
utopia_mmu                     top: control FSM of the translation flow
 |- set_assoc_tlb  x3          L1 I-TLB, L1 D-TLB 4KB, L1 D-TLB 2MB
 |- l2_tlb                     unified L2 TLB, fixed latency, abortable
 |- restseg_walker             RestSeg walks for both segments, INVLPG probe
 |   |- sf_cache               Set Filter cache, 2 read ports
 |   '- tar_cache              Tag Array cache, whole 66-byte sets, 2 read ports
 '- flexseg_walker             4-level radix walker
     |- page_walk_cache x3     PML4 / PDP / PD caches
     '- ptw_tracker            PTW frequency / cost counters
utopia_pkg                     widths, PTE and TAR bit positions, port structs
```

### Memory ports

The MMU has two memory ports, and both use valid/ready requests with
responses returned in request order.

* **Page-table port** (`pt_*`). The request is `{write, addr, wdata[63:0]}`.
  A read returns `{rdata[63:0], dram}`. A write, used for the PTE
  write-back, gets no response.
* **RestSeg port** (`rs_*`). A 528-bit read starting at any byte address.
  It carries SF lines (the low 512 bits are used) and TAR sets.

In a real system both ports would go to the L2 cache.

## Parameters

`utopia_mmu` has the following parameters, with defaults as in the table
above:

* L1 TLBs: `L1D4K_ENTRIES/WAYS`, `L1D2M_ENTRIES/WAYS`, `L1I_ENTRIES/WAYS`
* L2 TLB: `L2_ENTRIES`, `L2_WAYS`, `L2_LATENCY` (≥ 2)
* Page walk caches: `PWC_ENTRIES`, `PWC_WAYS`
* RestSegs: `SEG_BYTES` (512MB) and `SEG_WAYS` (16)

`SEG_BYTES` can be raised to 2GB. A segment much smaller than 512MB has
wider tags, and its TAR set then outgrows the 528-bit transfer. An
elaboration-time assertion catches that case.

## Verification

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_set_assoc_tlb` | fill every set, 1-cycle hits, single eviction per full set, invalidate, flush |
| `tb_l2_tlb` | exactly 12-cycle responses, 4KB and 2MB hits (offset inside the 2MB page), abort, invalidate, 600 random pages, flush |
| `tb_page_walk_cache` | exactly 2-cycle responses, capacity, flush |
| `tb_ptw_tracker` | 2000 random PTEs against bit-level expected values, saturation, migrate condition |
| `tb_sf_cache` / `tb_tar_cache` | both ports in the same cycle, 2-cycle latency, exact data, one eviction per overfull set, invalidate |
| `tb_restseg_walker` | OS-built TAR/SF at full size, 4KB and 2MB hits with exact PA and permissions, 3-cycle cached walks, tag mismatch, set filtering, fetch, INVLPG removing a stale cached set |
| `tb_flexseg_walker` | real 4-level tables, 4KB/2MB/faulting walks, read counts per PWC hit level, counter write-back, migrate |
| `tb_utopia_mmu` | full size, default parameters; see below |
| `tb_utopia_workloads` | the evaluation's eleven workloads, scaled down, on the full-size MMU; see below |

`tb_utopia_mmu` builds page tables and both RestSegs in a behavioural
memory (`utopia_mem_model`) and plays the OS. It first runs directed
sequences for each path, then 3000 random accesses. Every response is
checked against a reference map for address, permissions, fault and source,
and against the latency table above. The test fails if any of these never
occurred:

* I-TLB hit and D-TLB hit
* L2 TLB hit
* RestSeg hit in the 4KB segment and in the 2MB segment
* SF filtering
* TAR/SF fetch
* FlexSeg walk of a 4KB page and of a 2MB page
* page-walk-cache hit
* page fault
* L2 lookup aborted by a RestSeg hit
* migration interrupt served end to end: the page is then found in a RestSeg
* INVLPG
* flush

It runs in well under a minute.

`tb_utopia_workloads` runs the eleven workloads of the evaluation one after
another, each as a new process with its own page tables, TAR and SF:
BC, BFS, CC, GC, PR, TC, SP, XS, RND, DLRM and GEN. Each uses its input size
(48 regions per GB, about 1/20000 scale) and its share of 2MB pages from the
paper's workload table. Two access patterns stand for the workload kinds:

* skewed, for the graph kernels and XS: 80% of the accesses go to 10% of the pages;
* uniform random, for RND, DLRM and GEN.

The OS model places faulting pages in RestSegs first and in the FlexSeg
when a set is full. Pages are crowded into a few sets so the FlexSeg is
used. The OS serves migration interrupts, evicting a random way of a full
set. Every response is checked for address and latency, as in
`tb_utopia_mmu`. The testbench prints, per workload, how translations were
resolved. The counts show a pattern: skewed workloads are mostly L1 hits,
while random workloads are mostly resolved by RestSeg and FlexSeg walks.
These counts come from a scaled-down model and are not the paper's
performance figures.

To simulate with Verilator, for example the top:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/utopia_pkg.sv rtl/set_assoc_tlb.sv rtl/l2_tlb.sv rtl/page_walk_cache.sv \
  rtl/ptw_tracker.sv rtl/flexseg_walker.sv rtl/sf_cache.sv rtl/tar_cache.sv \
  rtl/restseg_walker.sv rtl/utopia_mmu.sv tb/utopia_mem_model.sv tb/tb_utopia_mmu.sv \
  --top-module tb_utopia_mmu
./obj_dir/Vtb_utopia_mmu
```

For a single block, list the package, that block and the modules it
instantiates, plus `tb/utopia_mem_model.sv` for the two walkers.

## Where this design departs from, or goes beyond, the source description

* **One translation at a time, one walk at a time.** Real walkers overlap
  several misses. This is the largest simplification.
* **Blocking on an L2 hit.** After an L2 TLB hit the next request waits for
  the running RestSeg walk to finish.
* **Own choices where the description is silent:**
  * TLB, page-walk-cache, SF-cache and TAR-cache replacement (first invalid
    way, else round robin)
  * the TAR entry bit order and the meaning of the metadata bits
  * one byte per SF counter
  * the PTE bits used for the counters and the 4/5 split of the 9 bits
  * saturating counters
  * the output register and the tag-match cycle in the latencies
  * the memory-port formats
  * a RestSeg hit fills only the L1 TLB; FlexSeg walks fill L1 and L2
* **SF size.** The set-filter size formula (#sets × 5 bits = 5KB for the 4KB
  segment) and a quoted ratio (about 17KB against a 528KB TAR) disagree. The
  layout here uses neither: one byte per counter, 8KB.
* **SF count semantics.** The example figure of the set filter prints a
  2-bit counter `11` next to "2 pages". This design stores the plain count
  of occupied ways, as the prose describes.
* **INVLPG after allocation.** The description asks for INVLPG after
  migrations. This design requires it after every TAR/SF change, allocation
  included, because the SF and TAR caches are not kept coherent otherwise.
* **Not built:**
  * the caches and DRAM holding all these structures (a behavioural model
    stands in for them)
  * the OS, including RestSeg creation, SRRIP victim choice and the
    system-wide TAR
  * the DMA engine that copies pages
  * the core
  * 1GB pages and the alternative hash functions studied as sensitivity
    options
