# VESPA: a banked VIPT L1 data cache that searches fewer ways for superpages

## The idea

A virtually-indexed, physically-tagged (VIPT) L1 cache reads its set while
the TLB translates the address. The set index must therefore come from
page-offset bits, which are the same in the virtual and the physical address.
With 4 kB pages and 64-byte lines only 6 index bits are left (VA[11:6]), so an
x86 L1 has at most 64 sets. A 32 kB cache must then be 8-way, a 64 kB cache
16-way, and so on. The extra ways make each lookup slower and cost more
energy, while adding little to the hit rate.

Superpages (2 MB and 1 GB on x86) have longer page offsets. For an address in
a superpage, VA[12] (and VA[13], ...) is already a physical address bit. VESPA
uses this. Each 8-way set of a 32 kB cache is split into **two banks of 4
ways**, and VA[12] is the **bank index**:

* An access to a superpage searches only the bank that VA[12] selects:
  4 ways, one cycle at 1.33 GHz.
* An access to a base (4 kB) page searches both banks, 8 ways in two cycles,
  exactly like a conventional VIPT cache.

The cache does not know the page size when the access starts. It finds out
from the **split L1 TLBs** that x86 cores already have: one TLB each for
4 kB, 2 MB and 1 GB pages. The superpage TLBs are small and answer in one
cycle; the 4 kB TLB needs two. So every lookup first *guesses superpage* and
reads one bank. If the 2 MB or the 1 GB TLB hits, the guess was right and the
lookup is done. If both miss, the "2MB/1GB TLB miss" signal opens the other
bank through the bank decoder, and the 4 kB TLB result decides in the second
cycle. A superpage access never takes longer than in a plain VIPT cache, and
neither does a base-page access.

## Lookup timeline (32 kB, 1.33 GHz)

| Page | TLB | L1 | Cycle 1 | Cycle 2 |
|---|---|---|---|---|
| 2M/1G | hit | hit | bank VA[12] read, tag matches, data returned | not needed |
| 2M/1G | hit | miss | bank VA[12] read, no match: refill starts | not needed |
| any | superpage TLBs miss | * | bank VA[12] read; the miss opens the other bank | other bank read; 4 kB TLB result compared with all 8 ways |
| any | all TLBs miss | * | as above | page walk requested; access replayed after the walk |

In the RTL, `SP_LAT` is the cycle in which the superpage TLBs answer and
`BASE_LAT` the cycle in which the 4 kB TLB answers. A superpage hit is
returned `SP_LAT` cycles after the request is accepted, a base-page hit
`BASE_LAT` cycles after. Larger caches and faster clocks take other values:

| Cache | Banks (`NUM_BANKS`) | Clock | `SP_LAT` | `BASE_LAT` |
|---|---|---|---|---|
| 32 kB | 2 | 1.33 / 2.80 / 4.00 GHz | 1 / 2 / 3 | 2 / 4 / 5 |
| 64 kB | 4 | 1.33 / 2.80 / 4.00 GHz | 1 / 2 / 3 | 5 / 9 / 13 |
| 128 kB | 8 | 1.33 / 2.80 / 4.00 GHz | 2 / 3 / 4 | 14 / 30 / 42 |

The defaults are the first row at 1.33 GHz. Each bank always stays 16 kB
(64 sets x 4 ways), so a larger cache simply has more banks. The bank index
then widens to VA[13:12] or VA[14:12].

## Where lines are put: the insertion policy

A missing line is always installed in the bank named by the **physical**
bank-index bits. The victim is the LRU way among that bank's 4 ways, or an
invalid way if there is one. This holds for base pages too, whose VA[12] may
differ from PA[12]. The policy has three consequences that the rest of the
design relies on:

* A line can only be in one place, even if its page is mapped both as a base
  page and as a superpage.
* A superpage lookup always finds its line, because for a superpage
  VA[12] = PA[12].
* A **coherence lookup** carries a physical address, so it reads only one
  bank (4 ways), whatever the page size.

The stored tag is the whole 4 kB physical frame number, PA[39:12]. Its bank
bits are redundant inside a bank. They let the base-page compare run across
all 8 ways without a match in the wrong bank.

## Page-size changes, bypass accesses

* **Superpage split into base pages:** nothing is needed. Base-page lookups
  search every bank.
* **Base pages promoted to a superpage:** a line of a former base page might
  sit in a bank that superpage lookups no longer search. The OS's `invlpg`
  is extended to sweep the L1 (`inv_req` with `sweep` set). All three TLBs
  drop the translation of `inv_req.va`. Then every set of the bank that holds
  the frame `inv_req.ppn` is checked, one set per cycle. Matching lines are
  invalidated, and dirty ones are written back first. A sweep takes 64 cycles,
  one per set, plus any writeback stalls, well inside the 150-200 cycles that an `invlpg`
  takes anyway.
* **TLB-bypassing accesses** (`core_req.phys`, e.g. page-table-walker loads)
  already carry a physical address. They are looked up like a superpage
  access: one bank, `SP_LAT` cycles.

## Block diagram and files

```
            core_req ──► vespa_l1_top (controller FSM)
                 │             │
   ┌─────────────┼─────────────┼────────────┐
 split_tlb    split_tlb    split_tlb        │ VA[11:6] set, VA[12] bank index
 4 kB, 64e    2 MB, 32e    1 GB, 8e         ▼
 2 cycles     1 cycle      1 cycle      bank_decoder ◄── 2MB/1GB TLB miss
   └──────► tlb_resolve ◄──┘                │ EN
            (miss ANDs, page walk,      l1_bank 0     l1_bank 1     (16 kB each)
             Addr-Tag)  ─── Addr-Tag ──► tag_match    tag_match     (4 x "=?")
                                          └──► hit_mux ◄──┘         (4:1 per bank, then 2:1)
                                                  ▼
                                           data to core        bank_lru per bank
```

| File | Contents |
|---|---|
| `rtl/vespa_pkg.sv` | widths, geometry, request/response structs |
| `rtl/split_tlb.sv` | one fully associative L1 TLB with `LAT`-cycle result, fill, invalidate |
| `rtl/tlb_resolve.sv` | `sp_miss = miss2M & miss1G`, `page_walk = miss4K & sp_miss`, tag formation |
| `rtl/bank_decoder.sv` | `en[b] = (bank_index == b) \| sp_miss` |
| `rtl/l1_bank.sv` | 64 sets x 4 ways of tag/valid/dirty/64-byte line, one-cycle read |
| `rtl/bank_lru.sv` | per-set true LRU over one bank's ways |
| `rtl/tag_match.sv` | the per-way comparators |
| `rtl/hit_mux.sv` | two-level output multiplexer |
| `rtl/vespa_l1_top.sv` | the cache: controller, miss handling, coherence, sweep, assertions |

## Interfaces of `vespa_l1_top`

Every request channel is a valid/ready handshake. Every response is a
one-cycle pulse.

* `core_req` (`op`, `phys`, `va`, `wdata`, `be`) / `core_resp` (`rdata`,
  `l1_hit`, `superpage`, `banks_read`). The cache is blocking, with one
  access in flight. `core_req_ready` is high only while the controller is
  idle and no coherence or `invlpg` request is waiting.
* `mem_req_addr` / `mem_resp_line`: line refill from the L2.
  `mem_wb_addr` / `mem_wb_line`: dirty-line writeback. The writeback of a
  victim comes before its refill request.
* `ptw_req_va` / `ptw_resp` (`size`, `ppn`): page walk. The answer is
  installed in the TLB of that page size, and the access is replayed.
* `coh_req` (`op` = `COH_READ`, `COH_INV`, `COH_WB`; `pa`) / `coh_resp`
  (`hit`, `dirty`, `line`), answered one cycle after acceptance. `COH_INV`
  drops the line and `COH_WB` marks it clean.
* `inv_req` (`va`, `sweep`, `ppn`) / `inv_done`.
* `bank_rd`: which banks are read in each cycle. This is the activity that
  the energy saving comes from: 1 bank per superpage or coherence lookup, 2
  per base-page lookup.

Priority when idle: coherence, then `invlpg`, then the core.

## How far this follows the published design

Taken from the description: the bank split and the bank index; the bank
decoder (OR of the decoded bank index with the superpage-TLB miss, and the
AND/OR form for four banks); the two AND gates that produce the superpage
miss and the page walk; the split TLBs and their latencies; per-bank 4:1 way
multiplexers followed by a bank multiplexer; the cycle-by-cycle lookup
timeline; the physical-bank insertion policy with per-bank LRU; single-bank
coherence lookups; bypass lookups treated as superpages; the `invlpg` sweep.
The 64/32/8 TLB entry counts are the Sandybridge values the description
builds on.

Choices of this implementation (the description does not specify them):

* 48-bit virtual and 40-bit physical addresses.
* Fully associative TLBs with round-robin fill.
* A blocking, write-back, write-allocate cache with a 64-bit core data word.
* The handshakes and the coherence operation set. No coherence protocol
  states are kept beyond valid and dirty.
* Page walks that never fault.
* The sweep request carries the physical frame number.
* In the second lookup cycle only the bank not yet read is read. The two
  OR gates drawn in the description would enable both banks; their outputs
  are masked with the banks already read.

Not included:

* The page-table walker and L2 TLB, the L2 cache and directory, and the core.
  These are ports.
* The MRU way predictor, which is evaluated only as a comparison or add-on.
* Instruction caches.
* Any timing or energy model. The latencies above are cycle counts that the
  RTL reproduces, not derived from the logic.

## Simulating

Every testbench is self-checking and ends with
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/vespa_pkg.sv tb/tb_vespa_l1_top.sv --top-module tb_vespa_l1_top
./obj_dir/Vtb_vespa_l1_top
```

* `tb_vespa_l1_top` runs the default 32 kB cache end to end. Around it are
  models of a page table (2 MB, 1 GB and 4 kB pages; the 4 kB frames are
  chosen so that VA[12] and PA[12] often differ), a page walker, an L2 that
  stalls writebacks at random, and a directory.
  * A golden memory indexed by physical address checks every load, every
    coherence reply, every writeback and the L2 contents after a sweep.
  * It checks the hit latencies and the banks read per lookup.
  * It counts each mechanism: superpage and base-page hits and misses,
    cross-bank base pages, store hits, refills, writebacks, page walks,
    bypasses, the three coherence kinds, sweeps with writebacks, and TLB
    invalidation. It fails if any of them never happened.
* `tb_vespa_l1_64k` and `tb_vespa_l1_128k` run the same test with 4 banks at
  1/5 cycles and with 8 banks at 4/42 cycles.
* `tb_vespa_l1_spmix` varies the share of accesses that go to superpages
  (0, 25, 50, 75 and 100 %) on a working set that fits the default cache.
  It checks that every superpage hit reads one bank and every base-page hit
  reads both, and prints the ways searched per hit lookup. This falls from
  8 to about 7.6, 6.1, 5.1 and 4. This per-lookup activity is where the
  cache saves energy.
* `tb_<block>` tests each leaf block on its own against an independent model.

To change the configuration, override `NUM_BANKS`, `SP_LAT`, `BASE_LAT` and
the TLB entry counts on `vespa_l1_top`. `BASE_LAT` must exceed `SP_LAT` (an
assertion checks this).
