# Flat and hot page tables: an MMU with flattened page tables and page-table-aware caches

A TLB miss on a 64-bit x86 or Arm machine costs a walk down a four-level radix tree of
4KB table nodes. That is four dependent memory reads, and 24 under virtualization, where
every guest table address must itself be translated. This RTL shortens those walks in two
ways, as proposed in *Page Tables: Keeping them Flat and Hot (Cached)*:

* **Flattening.** Two adjacent 512-ary levels are merged into one 2MB table node with
  512 x 512 entries, indexed by 18 virtual-address bits instead of 9. The usual
  configuration merges L4+L3 and L2+L1. A walk then reads at most two entries, and one
  when the page walker cache already holds the pointer to the leaf node. Flattening is
  decided per node: every pointer carries the size of the node it points to, so a table
  can mix flattened and ordinary nodes freely. It still allows large data pages,
  recursive (self-mapping) tables and virtualization.
* **Keeping page table lines hot.** The L2 and L3 caches tag every line that a page walk
  brought in. While TLB misses are frequent, they evict data lines in preference to
  page-table lines, 99 evictions in 100. In such phases the data mostly misses anyway.
  The page table is about 1/512 of the data footprint, so most of it can stay cached.
  For example, 8GB of data needs 16MB of leaf entries.

The design is a memory-management front end: two TLB levels, a flattening-aware page walker with
three page walker caches (PWCs), a two-dimensional walker for guests, and an L1D/L2/L3
hierarchy with page-table priority in L2 and L3. A simple blocking load port stands in for
the core, and a line-wide read port goes to main memory.

## 1. Addresses, node sizes and the entry format

A virtual address has 48 bits. The physical address has 52 bits; pages are 4KB and entries
are 8 bytes. A table node has one of three sizes, and its size fixes how many VA bits index
it:

| node size | entries   | index bits | what it replaces               |
|-----------|-----------|------------|--------------------------------|
| 4KB       | 512       | 9          | one ordinary level             |
| 2MB       | 262,144   | 18         | two merged levels (e.g. L2+L1) |
| 1GB       | 2^27      | 27         | three merged levels            |

The root's size code sits next to the root pointer (`cr3`, a `node_ptr_t` = 40-bit frame +
size). Every lower node's size code sits in the entry that points to it. Entry layout
(`fpt_pkg`):

| bits  | meaning |
|-------|---------|
| 0     | present |
| 7     | page size: this entry maps a large page (leaf) |
| 10:9  | size of the node this entry points to: 0 = 4KB, 1 = 2MB, 2 = 1GB, 3 faults |
| 51:12 | frame of the page or node |

Two bits per entry are enough for 4KB/2MB/1GB nodes; with only 2MB flattening, one would
do. Bits 10:9 are this design's pick among the entry's unused bits.

## 2. Walking by position (`walk_step`, `page_walker`)

The walker does not count levels. It keeps a **position** `pos`, the number of VA bits
not yet consumed, starting at 48. A node of width w (9, 18 or 27) is indexed by
`VA[pos-1 -: w]`, and the entry address is `node + 8*index`. So one rule covers every table
shape:

```
conventional      48 -9-> 39 -9-> 30 -9-> 21 -9-> 12     4 reads
L4+L3 / L2+L1     48 -18-> 30 -18-> 12                    2 reads
L4 / L3+L2 / L1   48 -9-> 39 -18-> 21 -9-> 12             3 reads
```

For each entry read, `walk_step` (combinational) decides:

1. **Not present**, a reserved size code, or a node needing more index bits than `pos`
   allows: **fault**.
2. **Page-size bit set**: a large page whose offset is the `pos` bits left. Only 12, 21
   and 30 are legal (4KB, 2MB, 1GB).
3. **Pointer**: the position drops by the node width, and then:
   * if it reaches 12, the pointer itself is the 4KB translation;
   * if the next node needs more bits than remain, the next node is returned as a page of
     `pos` offset bits (see recursion below);
   * otherwise the walk continues at the next node.

The walker (`page_walker`) is a small FSM: IDLE, LOOKUP, REQ, WAIT, DONE. It reads one
64-byte line per step through the L1D and picks the entry by address bits 5:3.

### Page walker caches

There are three fully associative PWCs. Each maps a VA prefix to the node the walk reaches
after consuming exactly that prefix:

| PWC | tag         | entries | conventional table         | flattened L4+L3/L2+L1            |
|-----|-------------|---------|----------------------------|----------------------------------|
| L4  | VA[47:39]   | 4       | skips L4                   | not used (no node starts at 39)  |
| L3  | VA[47:30]   | 4       | skips L4, L3               | skips the root: 1 read per walk  |
| L2  | VA[47:21]   | 24      | skips L4, L3, L2: 1 read   | not used                         |

All three are looked up in parallel in one cycle, and the deepest hit wins. A pointer is
inserted into the PWC whose tag length equals the bits consumed when it was read. In a
flattened table, the pointer to an L2+L1 node lands in the 18-bit L3 PWC. Replacement is
true LRU. `flush` clears all three and is pulsed with every root-pointer write.

**Walk timing.** Accepting a request plus the PWC lookup takes 2 cycles. Each read adds
1 request cycle plus the memory latency seen by the walker (L1D hit: 4 cycles). A
flattened walk that hits the L3 PWC and the L1D finishes in 2 + 1 x 5 = 7 cycles.

## 3. Large pages next to flattened nodes

A flattened L2+L1 node has no L2 entries, so it cannot map a 2MB page directly. It would
need 512 identical 4KB entries. The intended use therefore leaves whole 1GB regions that
hold 2MB pages unflattened. Their L4+L3 root entry points to an ordinary 4KB L2 node whose
entries have the page-size bit set. In that region a 2MB page takes two reads, and a 4KB
page takes three. Nothing in the hardware is specific to this. Choosing which regions to
leave unflattened is the OS's job; the testbenches build one such region.

## 4. Recursive (self-referencing) tables with 2MB nodes

An OS that maps its page table into its own address space points one root entry back at
the root. Each pass through that entry removes one level, so the walk ends on a table node
instead of a data page. With 18-bit nodes, a full 18-bit advance would leave too few VA
bits. A self-reference instead moves the position down by only **9 bits**. The next step
indexes the same node again with 18 bits, the upper 9 of which were already used: an
overlapped index. For the 9-bit slot chosen (say L4 index 500) to always hit the
self-reference, the OS replicates the self-reference over all 512 entries (500, 0..511).
This uses the same VA space as one recursive entry in a 4KB L4 node.

A self-reference is recognised as a pointer whose frame equals the current node's. It is
never inserted into a PWC, because its tag would not cover the index bits it used. With a
flattened L4+L3 / L2+L1 table:

* **one recursion**, `(500, a, b, 21-bit offset)`: the root entry (a, b) is read at
  position 39 and the walk drops to 21. If it points to a flattened L2+L1 node, that node
  cannot be indexed with 18 bits at position 21. It is returned as a 2MB page, so every
  leaf entry of that 1GB region becomes readable. In an unflattened region, the 4KB L2
  node is indexed by the next 9 bits, and the L1 node comes back as a 4KB page.
* **two recursions**, `(500, 500, a, b, off)`: at position 30 the root is indexed by
  (a, b), and that pointer reaches position 12, so it becomes the translation. This gives
  the 4KB L2 node of an unflattened region, or the first 4KB of a flattened leaf node.
* **three recursions**, `(500, 500, 500, 21-bit offset)`: the third self-reference is
  read at position 30. The root cannot be indexed again at 21, so it is returned as a
  2MB page (rule 3), and the entire flattened root becomes readable.

The same rule returns a flattened L3+L2 node as a 2MB page in the L4 / L3+L2 / L1
organisation.

## 5. Two-dimensional walks for guests (`nested_walker`)

Under virtualization, the guest table maps guest-virtual to guest-physical addresses
(gPA), and the host table maps gPA to host-physical addresses. Every guest table node
sits at a gPA and needs a host walk before it can be read, and so does the final data gPA.
Without any caching, a walk therefore costs G x (H + 1) + H reads, where G and H are the
guest and host depths:

| guest table | host table | reads |
|-------------|------------|-------|
| 4-level     | 4-level    | 24    |
| flattened   | 4-level    | 14    |
| 4-level     | flattened  | 14    |
| flattened   | flattened  | 8     |

`nested_walker` contains two `page_walker` instances. The guest walker's PWCs skip guest
levels. The host walker's PWCs act as the **vPWC** and skip host levels. A 16-entry fully
associative **nested TLB** (a `pwc` instance with a 36-bit tag, gPA[47:12]) caches
gPA-to-hPA translations for both the guest table pages and the data. For every gPA the
sequence is:

1. One cycle for the nested TLB lookup.
2. On a miss, a host walk, which then fills the nested TLB.
3. The guest walker's read is then issued at the host address.

The result's page size is the smaller of the guest and host page sizes. With both tables
flattened and warm caches, a walk reads one guest leaf entry (guest PWC hit, its page found
in the nested TLB) and one host leaf entry for the data (vPWC hit): 2 reads. Whether the
table is flattened is again per node, from the size codes in the guest and host roots.

## 6. Page-table priority in L2 and L3 (`prio_cache`, `miss_phase_detector`)

Each cache line has a **PT bit**, set when a page-walk read fills the line or hits it.
Guest and host table reads count as walk reads. On a miss in L2 or L3:

* `prio_en` low: the victim is the LRU line (invalid ways first).
* `prio_en` high: the victim is the **LRU data line**. On every 100th eviction, or when the
  set holds only page-table lines, it is the plain LRU line. This is a deterministic 1-in-100
  counter, so 99% of evictions prefer data.

The L1D uses the same module with `PRIO = 0`, as a plain LRU cache.

Shared caches also need to keep co-running processes apart. Each line therefore records the
context identifier (`CTX_W` bits, default 4) of the request that filled it. While
prioritizing, a miss never takes another context's page-table line if it has an
alternative:

* The LRU data line is the victim, as above. Data lines of any context count.
* On the 1-in-100 slot, or when the set has no data line, the victim is the LRU line
  among the data lines and the requester's own page-table lines.
* Only a set holding nothing but other contexts' page-table lines falls back to plain LRU.

With a single context this is the same policy as above. The top has one core and ties the
identifier to 0. The width and the exact rule are this design's choices.

`miss_phase_detector` plays the role of the performance counters that flag a phase. Over
each epoch of `EPOCH` translations (first-level TLB lookups, default 1024) it counts
second-level TLB misses (walks) and L2 data misses.
For the next epoch, `prio_en` is set if both reach their thresholds (32 and 16 by default).
The original proposal gives no thresholds or window. These defaults are this design's and
are meant to be tuned.

Cache timing: a hit answers `HIT_LAT` cycles after acceptance (L1D 4, L2 12, L3 42). A miss
forwards its request after `HIT_LAT - 1` cycles of lookup and answers the cycle after the
line returns, so latencies add up along the miss path. After reset each cache clears one
set per cycle. The L3, with 32768 sets, is ready after 32768 cycles.

## 7. The top level (`fpt_mmu_top`)

```
 ld_* --> L1 TLB (4KB: 64-entry 4-way | 2MB: 32-entry 4-way, 1 cyc)
            --miss--> L2 TLB (1536-entry 12-way, 9 cyc) --miss--> page_walker (PWC 4/4/24)
                 ^          fill both TLBs               nested_walker (virt) --+
                 +--------------------------------------------------------------+
                                                                           v
        load data access ---------------------------------------------> L1D (32KB, 4 cyc)
                                                                           v
                 miss_phase_detector --prio_en--> L2 (256KB, 12 cyc, PT priority)
                                                                           v
                                                  L3 (16MB, 42 cyc, PT priority) --> mem_*
```

One load is in flight at a time. The first-level TLB is probed in the cycle the load is
accepted. On a miss the load FSM goes to the second-level TLB, then to a walk if that misses
too, then fills the TLBs, reads its data through the L1D and responds. The walkers and the data access share the L1D port in turn.

| port | meaning |
|------|---------|
| `ready` | the TLB and caches have cleared their arrays after reset |
| `cr3`, `cr3_write` | root pointer (the guest root when `virt`) and its write strobe; the strobe flushes the TLB, PWCs and nested TLB |
| `virt`, `h_cr3` | virtualized mode and host root; change them only together with `cr3_write` |
| `ld_valid/ld_ready/ld_va` | load request |
| `ld_resp_valid/fault/pa/data` | one-cycle response: the physical address and the 64-bit word, or a fault |
| `mem_req_valid/ready/addr/is_pt` | line read to main memory (`is_pt` marks page-table lines) |
| `mem_resp_valid/line` | the 512-bit line back, any number of cycles later |
| `prio_en` | prioritization phase active |
| `stats` | `mmu_stats_t`, seventeen 32-bit counters (see below) |

The first-level TLB has a 4KB bank and a 2MB bank, looked up in parallel. It answers one
cycle after the lookup and is filled after every walk or second-level hit. 1GB
translations stay in the second level only. The second-level TLB is one array for 4KB,
2MB and 1GB entries. It probes the 4KB, 2MB and 1GB set
indices one after another within its 9-cycle latency, so hits and misses both answer after
exactly 9 cycles. In virtualized mode both levels hold guest-virtual to host-physical
translations.

The `stats` counters are: loads, TLB misses, walks, walk reads, walk cycles, walks that
started from a PWC hit, L2 page-table accesses and hits, L2 and L3 evictions of
page-table and of data lines, cycles with prioritization on, memory reads, 2D walks, and
the host reads of those 2D walks, and first-level TLB misses.

All sizes are parameters of `fpt_mmu_top`; the defaults are the server configuration
above. The defaults synthesize to about 146 Mbit of array storage, almost all of it the
16MB L3 (tags and metadata included).

## 8. Where this departs from the original proposal

* **TLB details.** The second-level TLB also holds 1GB pages, which the first level does
  not. It probes the three page sizes one after another within its fixed 9 cycles.
* **The core is a blocking load port.** There are no stores, no write-back, and one miss
  outstanding per cache. The hardware for flattening and prioritization does not depend on
  this, but the timing is not that of an out-of-order core.
* **PWC placement for flattened tables.** The pointer to a flattened L2+L1 node is cached
  by its 18-bit prefix, in the L3 PWC. The source describes this cache both as the L3 PWC
  (by the 18-bit match) and as the "L2 PSC"; the prefix length decides here.
* **Phase-detection parameters** (epoch, thresholds), the deterministic 1-in-100 eviction
  slot, the entry bits for the size code, LRU replacement everywhere, the nested TLB's
  organisation, and the use of separate native and nested walker instances are this
  design's choices.
* **Multiple contexts.** `prio_cache` keeps a context identifier per line, but the top
  models one core and one context. Way-partitioning, the other option for reserving cache
  room for page tables, is not built.
* **Outside the RTL.** The OS side is not hardware and is not here: allocating 2MB table
  nodes, falling back to 4KB nodes when allocation fails, and picking which 1GB regions
  stay unflattened. Nor is DRAM: testbenches use a behavioural memory with a fixed
  latency.

## 9. Files

| file | content |
|------|---------|
| `rtl/fpt_pkg.sv` | widths, node sizes, entry format helpers, `xlat_t`, `mmu_stats_t` |
| `rtl/walk_step.sv` | one combinational walk step (position rules, recursion, faults) |
| `rtl/pwc.sv` | fully associative LRU prefix cache (PWCs and the nested TLB) |
| `rtl/page_walker.sv` | walker FSM with L4/L3/L2 PWCs |
| `rtl/nested_walker.sv` | 2D walker: guest walker, host walker (vPWC), nested TLB |
| `rtl/tlb_bank.sv` | one single-page-size TLB bank, combinational lookup |
| `rtl/l1_tlb.sv` | first-level TLB: 4KB and 2MB banks, parallel 1-cycle lookup |
| `rtl/tlb.sv` | second-level set-associative multi-page-size TLB |
| `rtl/prio_cache.sv` | cache level with PT bit and page-table priority |
| `rtl/miss_phase_detector.sv` | epoch counters that raise `prio_en` |
| `rtl/fpt_mmu_top.sv` | top level |
| `tb/mem_model.sv` | behavioural main memory (sparse 64-bit words, fixed latency) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_fpt_mmu_full` and `tb_workload_random` |
| `tb/mmu_stim.svh` | end-to-end stimulus shared by the two top-level testbenches |

## 10. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. Each has a
watchdog. With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
RTL="rtl/fpt_pkg.sv rtl/walk_step.sv rtl/pwc.sv rtl/page_walker.sv rtl/nested_walker.sv \
     rtl/prio_cache.sv rtl/miss_phase_detector.sv rtl/tlb.sv rtl/tlb_bank.sv rtl/l1_tlb.sv \
     rtl/fpt_mmu_top.sv"
verilator --binary --timing --assert -Irtl -Itb $RTL tb/mem_model.sv \
          tb/tb_fpt_mmu_full.sv --top tb_fpt_mmu_full -o sim && ./obj_dir/sim
```

Replace the testbench and `--top` to run another one.

* `tb_walk_step`: directed step cases. It covers every rule, recursion with 1, 2 and 3
  passes, and the faults.
* `tb_pwc`, `tb_l1_tlb`, `tb_tlb`, `tb_prio_cache`: random traffic against a reference model written
  in the testbench. The checks cover hits, victims, the 99/100 rule, the per-context rule
  (one context's page-table lines survive another's misses), and the exact
  hit/miss latencies (1 and 9 cycles for the two TLBs; HIT_LAT, or HIT_LAT + memory latency + 1, for
  a cache).
* `tb_miss_phase_detector`: epochs at, just below and above both thresholds.
* `tb_page_walker`: tables built in memory the way an OS would build them. These include
  a conventional table, a flattened table, a 1GB region of 2MB pages, an L4 / L3+L2 / L1
  table, recursion and faults. Each walk's translation, read count, starting PWC and
  exact cycle count (2 + reads x (latency + 1)) are checked.
* `tb_nested_walker`: the 24/14/14/8 cold read counts for the four combinations of guest
  and host flattening, then 2-read warm walks and a host fault.
* `tb_fpt_mmu_top`: reduced sizes (small TLB and caches, 64-lookup epochs) so that
  evictions and prioritization phases occur often. `tb_fpt_mmu_full` runs every default
  size: 7,865 loads in about 3 seconds of simulation time on a workstation.

  Both run sequential and random loads over 4K–8K flattened pages, 2MB pages, a fault, a
  recursive load of the root, a root-pointer flush, and a virtualized phase (both tables
  flattened, host mapping offset so that a missed host translation shows). Every address
  and data word is checked. Each mechanism must occur at least once: TLB hit and miss,
  1- and 2-read walks, prioritization phase, data evicted while prioritizing, page-table
  line evicted, cold and warm 2D walks, host fault, first-level TLB hit, and a
  first-level miss that hits in the second level. At default sizes the native walks
  average 1.0 reads.
* `tb_workload_random`: a GUPS-like random-access workload at default sizes. It touches
  16,384 pages scattered over an 8GB virtual range and runs 5,000 random loads four times
  over the same mapping:
  * natively on a flattened table;
  * natively on a 4-level table;
  * virtualized with the guest and host tables both flattened;
  * virtualized with both tables 4-level (the 2D baseline).

  The host maps guest frame f to host frame f + 0x1000000.

  | tables                    | reads per walk | cycles per load |
  |---------------------------|----------------|-----------------|
  | native, flattened         | 1.51           | 321             |
  | native, 4-level           | 2.49           | 350             |
  | virtualized, both flat    | 4.11           | 511             |
  | virtualized, both 4-level | 6.76           | 586             |

  Memory latency is 100 cycles. The flattened table needs 1.5 rather than 1 read because
  the eight 1GB regions compete for the 4-entry L3 PWC. Virtualized reads include the
  host-table reads. The testbench checks that flattening lowers both reads and cycles,
  natively and virtualized. It takes about 15 s under Verilator.
