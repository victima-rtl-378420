# Victima: TLB blocks in the L2 cache

Programs with large, irregular data sets miss in the TLBs all the time. Each
miss costs a page table walk of up to four dependent memory accesses. A bigger
L2 TLB would help, but a TLB is expensive per entry. Meanwhile the L2 cache is
large, and for these programs many of its blocks hold data that is never
reused.

Victima uses those blocks for translations. One 64-byte cache line of the
last page-table level holds eight 8-byte PTEs, which map eight consecutive
virtual pages. Victima re-tags such a line with the *virtual* page number and
the address-space identifier (ASID), and marks it with a TLB bit. The result
is a **TLB block**: eight translations in one ordinary cache block. After an
L2 TLB miss, the MMU probes the L2 cache for the TLB block and starts the page
walk at the same time. A probe hit ends the walk early. A 2 MB L2 cache filled
with TLB blocks maps 32,768 × 8 × 4 KB = 1 GB, against 6 MB for the 1536-entry
L2 TLB.

Three things keep this from hurting ordinary data:

- **Selective insertion.** A small predictor inserts only pages whose walks are
  frequent and slow.
- **Replacement that knows about TLB blocks.** TLB blocks are favoured only
  while the program misses a lot in the L2 TLB.
- **Invalidation.** TLB maintenance commands also reach the cached TLB blocks.

This repository holds synthesizable SystemVerilog for the MMU and the L2 cache
of one core, plus self-checking testbenches.

## Block map

```
            translation requests (VA, ASID)            TLB maintenance
                        |                                     |
   +--------------------v-------------------------------------v------+
   | victima_mmu                                                      |
   |  L1 I-TLB 128/8   L1 D-TLB 4K 64/4   L1 D-TLB 2M 32/4   (1 cyc)   |
   |  L2 TLB 1536/12 (12 cyc, keeps PTW counters, reports evictions)  |
   |  page_table_walker + 3 PWCs (32/4, 2 cyc)     ptw_cp predictor   |
   |  controller FSM: miss flow, insertion jobs, invalidation         |
   +-----------------------------+------------------------------------+
                                 | l2_req_t (priority)
            L1 caches' port ---> l2_port_arbiter
                                 |
   +-----------------------------v------------------------------------+
   | victima_l2_cache  2 MB, 16-way, 64 B lines, 16-cycle hit         |
   |   data blocks (PA tag) and TLB blocks (VA+ASID tag, TLB bit,     |
   |   nested bit); tlb_aware_srrip per set                           |
   +-----------------------------+------------------------------------+
                                 | 64-byte lines
                           L3 / main memory

   mpki_monitor: L2 TLB misses per 1000 instr > 5   -> tlb_pressure
   mpki_monitor: L2 cache misses per 1000 instr >= 5 -> l2c_high_mpki
```

| File | Contents |
|---|---|
| `rtl/victima_pkg.sv` | widths, PTE bit positions, request/response structs, event vector |
| `rtl/victima_top.sv` | top level: MMU, L2 cache, arbiter, two MPKI monitors |
| `rtl/victima_mmu.sv` | TLB hierarchy, walker, predictor, controller |
| `rtl/victima_l2_cache.sv` | the L2 cache with TLB blocks |
| `rtl/tlb_aware_srrip.sv` | replacement decision of one set |
| `rtl/ptw_cp.sv` | page-walk cost predictor |
| `rtl/mpki_monitor.sv` | misses-per-kilo-instruction flag |
| `rtl/set_assoc_tlb.sv` | generic TLB (used for the L1 TLBs and the L2 TLB) |
| `rtl/page_table_walker.sv` | four-level x86-64 walker |
| `rtl/pwc.sv` | page walk cache for one level |
| `rtl/l2_port_arbiter.sv` | fixed-priority sharing of the L2 port |

## TLB blocks and how the L2 cache finds them

Addresses are 48-bit virtual and 52-bit physical, with 64-byte lines. The
cache has 2048 sets of 16 ways.

A **data block** uses PA bits 16:6 as the set index and PA bits 51:17 (35
bits) as the tag.

A **TLB block** for 4 KB pages is addressed by the virtual page number (VPN =
VA bits 47:12):

| VA bits | use |
|---|---|
| 14:12 (VPN 2:0) | which of the 8 PTEs in the block |
| 25:15 (VPN 13:3) | set index |
| 47:26 (VPN 35:14) | 22-bit virtual tag |

The stored tag of a TLB block is {page size, ASID[10:0], virtual tag}. The
way's metadata also holds the TLB bit and the nested-TLB bit. Matching needs
the TLB bit set, the nested bit equal to the request's, and the whole tag
equal. A data request only matches blocks whose TLB bit is clear. So the same
tag bits can never confuse a data block with a TLB block.

A **2 MB-page TLB block** holds eight PD-level entries, which map eight
consecutive 2 MB pages. Here the PTE select is VPN bits 11:9 and the set index
is VPN bits 22:12. The page-size bit in the tag keeps the two kinds apart.

The MMU does not know a page's size before it has translated it. A probe
therefore checks both candidate blocks, the 4 KB one and the 2 MB one, in the
same lookup cycle, and reports the size of whichever hit. A probe response
carries the chosen 64-bit PTE.

### Request types and timing

Requests use valid/ready, and each one gets exactly one `resp_valid` pulse.
The cache serves one request at a time.

| `op` | what happens | response |
|---|---|---|
| `L2_READ` / `L2_WRITE` | data access. A miss fetches the line from memory, and a dirty victim is written back first (write-back, write-allocate). | hit: 16 cycles after acceptance. Miss: later, by the memory time. `dram` is set when memory was used. |
| `L2_TLB_PROBE` | dual 4 KB/2 MB lookup of a VPN and ASID | 16 cycles. `hit`, `ps`, PTE in `rdata`. |
| `L2_TLB_INSERT` | turns the PTE line at `pa` into a TLB block for `vpn`/`asid`/`ps` | `hit` = the block was already present (nothing done). Otherwise `dram` says whether the line came from memory or from this cache. |
| `L2_INV_VA` | drops the TLB block covering VPN+ASID (both sizes) | 16 cycles |
| `L2_INV_ASID` | drops every TLB block of the ASID. An ASID that does not fit in 11 bits drops every TLB block. | after a sweep of all 2048 sets |
| `L2_INV_ALL` | drops every TLB block; data blocks stay | after the sweep |

Insertion copies the PTE line into a way of the set chosen by the *virtual*
index. The PA-indexed data copy of the line stays where it is. TLB blocks are
never dirty, so evicting one writes nothing back. After reset the cache
clears its tags one set per cycle (2048 cycles) and then raises `init_done`.

## Replacement under translation pressure

Each set keeps a 2-bit re-reference prediction value (RRPV) per way, as in
SRRIP. `tlb_aware_srrip` is purely combinational and gives the cache three
things:

- **Victim choice.** An invalid way is taken first. Otherwise all RRPVs are
  aged by the amount that brings the largest one to 3, and the lowest-numbered
  way at 3 is the candidate. While `tlb_pressure` is set, a candidate that is
  a TLB block is passed over for a data way at 3, when one exists.
- **Insertion.** A new block starts at RRPV 3. A TLB block inserted under
  pressure starts at 0.
- **Hit.** The way's RRPV drops by 1. A TLB block under pressure drops by 3.
  Both saturate at 0.

`tlb_pressure` comes from an `mpki_monitor` that counts L2 TLB misses. It is
set after an epoch of 1000 retired instructions with more than 5 misses, and
it holds until the next epoch ends.

One consequence of inserting at 3 is worth knowing. A block that has been hit
sits below 3, and fresh blocks keep arriving at 3. The reused block therefore
survives as long as the set keeps turning over. The L2 cache testbench checks
this, along with a TLB block that survives 20 data fills under pressure and is
evicted without pressure.

## The translation flow

`victima_mmu` serves one translation at a time (`tr_va`, `tr_is_instr`, with
ASID `cur_asid` and page-table root `cr3_ppn`). The response carries the PA,
a fault flag, and where the translation came from (`tr_resp_src`).

1. **L1 TLBs** (1 cycle). An instruction fetch looks in the I-TLB. A data
   access looks in both D-TLBs, one per page size. A hit answers 2 cycles
   after acceptance.
2. **L2 TLB** (12-stage pipeline). A hit fills the L1 TLB and answers 15
   cycles after acceptance.
3. **L2 TLB miss.** In the same cycle the walker starts and the controller
   sends `L2_TLB_PROBE`. Whichever finishes first decides:
   - *Probe hit:* the walk is aborted. The walker drains any memory request
     already in flight and reports nothing. The PTE from the block is used.
   - *Probe miss:* the walk goes on. A non-present entry gives
     `tr_resp_fault` and fills nothing.
4. **Fill and answer.** The translation is written into the L2 TLB and the
   proper L1 TLB, then answered.
5. **Insertion on a miss.** For a page that came from a walk, the predictor
   decides. On "insert", a job is queued that sends `L2_TLB_INSERT` with the
   physical address of the PTE line that the walk just read. That line is
   normally still in the L2 cache.
6. **Insertion on an eviction.** If the L2 TLB fill evicted a valid entry,
   the predictor judges that entry's counters, which the L2 TLB keeps with
   every entry. On "insert", a job is queued. It probes the L2 cache for the
   evicted page's block. If the block is absent, it runs a **background walk**
   for the page and inserts the block that the walk leaves behind.

Jobs wait in a one-entry queue per kind. Between two translations, a queued
job runs before the next translation request is accepted. A steady stream of
requests therefore cannot starve insertion, but a request may wait for a
background walk. A job that arrives while its queue is full is dropped, and
`ev.job_dropped` pulses. The `ev` output pulses one bit per event: L1 hit, L2
TLB hit/miss, TLB-block hit in L2, walk done, fault, costly prediction,
bypass, L2 TLB eviction, costly eviction, block already present, background
walk, insertion, invalidation.

## Deciding which pages are worth a TLB block

Each leaf PTE carries two saturating counters in bits the architecture leaves
free. This design places them as follows:

- a 3-bit **walk frequency** in bits 54:52, incremented by every walk that
  reaches this PTE;
- a 4-bit **walk cost** in bits 58:55, incremented when that walk needed main
  memory for at least one of its accesses.

The walker updates the counters at the leaf and writes the PTE back through
the L2 cache. The L2 TLB keeps both counters with the entry, so an evicted
entry can still be judged.

`ptw_cp` tests the pair against a box held in four registers: frequency 1..7
and cost 1..12, inclusive, by default. Inside the box means "costly". The
registers can be rewritten through `cp_cfg_*` (select 0 = frequency min,
1 = frequency max, 2 = cost min, 3 = cost max). The answer is combinational.

The predictor is skipped when caching data does not pay anyway. A second
`mpki_monitor` counts L2 cache misses, and while the last epoch had 5 or more
misses per 1000 instructions (`l2c_high_mpki`), every candidate is inserted.

A consequence to keep in mind: a walk whose accesses all hit in the caches
leaves the cost counter at 0. Such a page is not inserted until one of its
walks goes to memory.

## Page table walker and page walk caches

`page_table_walker` implements the x86-64 four-level table. The entry format
is: present = bit 0, page size = bit 7, frame = bits 51:12.

Three PWCs (`pwc`, 32 entries, 4-way, 2 cycles, round-robin) hold the frames
of the next-level tables:

| PWC | keyed by | returns |
|---|---|---|
| PML4 | VA 47:39 | PDP table frame |
| PDP | VA 47:30 | PD table frame |
| PD | VA 47:21 | PT frame |

All three are looked up together. The deepest hit decides where the walk
starts. Every table read is an `L2_READ` through the L2 cache, and the `dram`
bit of the responses feeds the cost counter. A PD entry with the page-size
bit set ends the walk as a 2 MB page.

The walker's outputs describe the leaf:

- the updated PTE;
- its physical address, which the MMU uses for insertion;
- the page size;
- whether DRAM was touched.

## Invalidation

`inv_kind` selects ALL, ASID or VA (`inv_va` with `inv_asid`). The MMU
handles a command as follows:

1. It clears the matching entries in all TLBs. ALL and ASID also flush the
   PWCs.
2. It drops any queued insertion jobs.
3. It sends the matching command to the L2 cache.
4. It pulses `inv_done` when the cache has finished.

An ASID wider than the 11 bits kept in the cache flushes every TLB block.

## Top level

`victima_top` wires the MMU and the L2 cache together. The MMU and the L1
caches' port (`dreq_*`, read/write, with a `dresp_*` response) share the
cache through `l2_port_arbiter`, and the MMU has priority. The two MPKI
monitors count retired instructions from `instr_inc` (0..7 per cycle).

Behind the cache, `mem_*` is a line interface:

- a read request is answered by one `mem_resp_valid` pulse with the 512-bit
  line;
- a write needs no answer.

Translation and maintenance requests are held off until `l2c_init_done`.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| L2 cache size / ways / hit latency | 2 MB / 16 / 16 cycles | `victima_top`, `victima_l2_cache` |
| L2 TLB entries / ways / latency | 1536 / 12 / 12 | `victima_top`, `victima_mmu` |
| L1 I-TLB | 128 entries, 8-way | `victima_mmu` |
| L1 D-TLB 4 KB / 2 MB | 64/4, 32/4 | `victima_mmu` |
| L1 TLB latency | 1 cycle | `victima_mmu` |
| PWC entries / ways / latency | 32 / 4 / 2 | `victima_mmu`, `page_table_walker` |
| pressure / bypass threshold | 5 misses per kilo-instruction | `victima_top` |
| epoch | 1000 instructions | `victima_top` (`EPOCH_KI`) |
| predictor box | frequency 1..7, cost 1..12 | `ptw_cp` |
| RRPV width | 2 bits | `victima_l2_cache` |

The L2 cache derives its widths from its size. Any power-of-two set count
works. The 4 KB virtual tag is 36 − 3 − log2(sets) bits.

The data array is a plain register array of 2048 × 16 lines of 512 bits,
that is 16 Mbit. A real chip would use SRAM macros.

## Where this design departs from the paper or fills gaps

- **Invalidation sweep.** ASID-wide and full invalidation sweep the sets one
  per cycle (about 2048 cycles). The paper probes all cache banks in parallel
  and gives a total on the order of 100 ns.
- **Serialisation.** The MMU serves one translation and one walk at a time,
  with a one-entry job queue per kind.
- **Page-size field.** The page-size field of a TLB block's tag is one bit,
  since only 4 KB and 2 MB pages exist here. The paper's figure shows a
  2-bit field.
- **2 MB block indexing.** The set index and PTE select of 2 MB TLB blocks
  (VPN 22:12 and 11:9) are this design's extension of the 4 KB scheme.
- **Counter bits.** The bit positions of the PTW counters in the PTE are a
  choice.
- **Epochs.** MPKI is measured over fixed epochs of 1000 instructions.
- **Replacement.** The L1 TLBs, the L2 TLB and the PWCs all use round-robin
  replacement.
- **Keeping the data copy.** On insertion the PTE line is copied, and its
  data copy remains cached.
- **Not built: virtualized execution.** This means the 2D nested walk, the
  64-entry nested TLB and the nested-TLB-block flows. The L2 cache stores and
  matches the nested bit, but nothing in the MMU issues nested requests.
- **Outside the design.** The core, the L1 caches, the L3, the L2 prefetcher
  and DRAM are outside. They appear as ports.

## Testbenches

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. Each one has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_ptw_cp` | every frequency × cost pair, reprogrammed boxes, bypass |
| `tb_mpki_monitor` | epochs with known miss counts around the threshold, the `>` and `>=` flags |
| `tb_tlb_aware_srrip` | random sets against a step-by-step model of the policy, with and without pressure |
| `tb_l1_tlb`, `tb_l2_tlb` | hits and misses at the 1- and 12-cycle latencies, 2 MB entries, ASIDs, overflow and eviction reports, all three invalidations (shared body in `tb_tlb_common.svh`) |
| `tb_pwc` | 2-cycle hits, replacement, flush |
| `tb_page_table_walker` | walks of real page tables through a 16-cycle L2 model, PWC level skipping, 2 MB leaves, faults, counter updates and write-back, abort |
| `tb_victima_l2_cache` | full-size cache: the 16-cycle hit, miss and write-back, 4 KB and 2 MB TLB blocks (all 8 PTEs), ASID and nested separation, all invalidations and their sweep time, pressure-dependent replacement |
| `tb_victima_mmu` | the MMU in front of the real L2 cache, with the MPKI flags driven directly |
| `tb_victima_top` | the whole design at default parameters |
| `tb_victima_workload` | the whole design at default parameters under two synthetic streams over 4096 pages (16 MB): one GUPS-like uniformly random, one graph-like with runs of neighbouring pages; every address checked |

`tb_victima_top` and `tb_victima_mmu` compare every translated address with
the mapping the testbench built. They follow the four phases described in
their opening comments, and they count each mechanism:

- L1 and L2 TLB hits;
- TLB-block hits with the walk aborted;
- walks and faults;
- costly predictions and bypasses;
- evictions and background walks;
- insertions and invalidations;
- the pressure and high-MPKI modes.

A mechanism that never occurred counts as a failure.

`tb_victima_workload` shows the effect of the mechanism. Its random stream
touches 16 MB, well beyond the L2 TLB's 6 MB reach. With the core retiring
21 instructions per access, translation pressure comes on by itself. In a
typical run, about half of the 1500 random translations and about 60% of the
graph-like ones are served by TLB blocks in the L2 cache. Only the rest need a
page walk. The exact numbers depend on the random seed.

`tb_mem_model` is the
behavioural memory they use. It builds four-level page tables with
`map_page`.

Run a testbench with Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb --top-module tb_victima_top \
    rtl/victima_pkg.sv tb/tb_victima_top.sv
./obj_dir/Vtb_victima_top +verilator+rand+reset+2
```

The simulator has only two states, and `+verilator+rand+reset+2` starts
unreset state at random values. All state that gets read is reset or
initialised.
