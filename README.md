# A configurable set-associative TLB hierarchy for an RV64 Sv39 core

A processor with paged virtual memory translates every fetch and every load
or store address. Translation lookaside buffers (TLBs) cache recent
translations so that most accesses skip the page-table walk. The usual
in-order RISC-V design has small fully-associative L1 TLBs and a
direct-mapped L2 TLB. Neither scales well. Enlarging a fully-associative TLB
lengthens its compare-all lookup, which is on the processor's critical path.
A direct-mapped L2 TLB loses translations to conflict misses even when it
has room for them.

This RTL provides both TLB levels as **set-associative templates**. Two
parameters, the number of sets and the number of ways, give any
organisation from direct-mapped (`WAYS=1`) to fully associative (`SETS=1`),
and the same code covers every case. The L1 TLBs keep their entries in
flip-flops for a one-cycle lookup. The L2 TLB keeps its entries in a
synchronous RAM (block RAM on an FPGA, an SRAM macro on an ASIC), which is
cheap for large sizes but adds read latency.

The hierarchy of one core is:

```
   fetch VPN ──► ITLB (l1_tlb, IS_ITLB=1) ──miss──┐
                                                   ├─► rr_arbiter ─► ptw ─┬─► L2 TLB (l2_tlb + tlb_sram)
   load/store VPN ─► DTLB (l1_tlb, IS_ITLB=0) ─miss┘                      └─► PTE reads (memory port)
          ▲                    ▲                                     │
          └────── walk result, to the TLB that asked ◄───────────────┘
```

`tlb_hierarchy` is the top level. Its default parameters are the largest
configuration evaluated for this kind of hierarchy:

| structure | organisation | sets × ways | reach (4 KB pages) |
|-----------|--------------|-------------|--------------------|
| ITLB      | 8-way, 64 entries   | 8 × 8    | 256 KB |
| DTLB      | 8-way, 128 entries  | 16 × 8   | 512 KB |
| L2 TLB    | 8-way, 1024 entries, random replacement | 128 × 8 | 4 MB |

Both L1 TLBs use pseudo-LRU replacement.

## Sets, tags and the 4 KB restriction

A virtual page number (VPN, 27 bits in Sv39) is split into an **index**, its
low `log2(SETS)` bits, and a **tag**, the remaining bits. The index selects
one set. Only the ways of that set are compared with the tag, so a lookup
costs `WAYS` comparators whatever the total size. Each set has its own
vector of valid bits, held in registers in both TLB levels.

A set-associative TLB must know the page size before it can pick a set,
because the index bits of a 2 MB page are offset bits of a 4 KB page. Both
TLB levels here therefore hold **4 KB translations only**. When the walker
finds a 2 MB or 1 GB leaf, it returns the 4 KB translation of the page that
was asked for: the PPN's low 9 or 18 bits come from the VPN. A processor
that wants superpages in its L1 keeps a separate small fully-associative
superpage TLB beside this one. That TLB is not part of this RTL.

`WAYS` and `SETS` must be powers of two. With `WAYS=1` no replacement state
is built. With `SETS=1` the index is empty and the tag is the whole VPN.

## L1 TLB (`l1_tlb`)

One template serves both sides. `IS_ITLB` selects the permission check:

* ITLB: a fetch from a page without X faults.
* DTLB: a load from a page without R faults, and so does a store to a page
  without W.
* Either side: a user-mode access (`req_user`) to a page without U faults.

A/D bits, MXR and SUM are not modelled.

**Lookup timing.** A request is accepted at a clock edge where
`req_valid && req_ready`. The tag compare happens in the request cycle and
its result is registered, so `resp_valid` comes one cycle later together
with either `resp_hit` (plus `resp_ppn` and `resp_fault`) or `resp_miss`.
Back-to-back hits run at one per cycle.

```
clk        _/‾\_/‾\_/‾\_/‾\_/‾\_
req_valid  ‾‾‾‾‾‾‾\___________      VPN A (hit), VPN B (miss)
req_vpn    < A >< B >
resp_valid ____/‾‾‾‾‾‾‾\______
resp_hit   ____/‾‾‾\__________
resp_miss  ________/‾‾‾\______
req_ready  ‾‾‾‾‾‾‾‾‾\_________ ... high again after the refill
```

**Misses block.** After a miss the TLB lowers `req_ready` and raises
`ptw_req_valid` with the missing VPN. The VPN is held until the arbiter
accepts it. The TLB then waits for `ptw_resp_valid`, writes the result and
raises `req_ready` again. The requester must repeat its request, which now
hits. This is the replay scheme an in-order pipeline uses.

A walk that ended in a page fault is also stored, with its `pf` bit set.
The repeated request then hits and reports `resp_fault`.

**Refill and replacement.** The result goes into the first way of the set
whose valid bit is clear. If the set is full, it goes into the way that a
tree pseudo-LRU (`plru_tree`, `WAYS-1` bits per set) names. Hits and
refills both update the pseudo-LRU state. With `REPL=REPL_RANDOM` the
victim comes instead from the same 16-bit LFSR the L2 TLB uses, stepped on
every refill into a full set. Pseudo-LRU is the default (`L1_REPL` at the
top level).

**Flush.** `sfence_valid` with `sfence_rs1` set flushes one page. The
TLB searches the indexed set for the tag and clears that entry's valid bit.
Without `sfence_rs1`, every valid bit is cleared. If a flush arrives while
a walk is outstanding, that walk's refill is dropped. The walk may have read
a PTE that the flush was meant to retire.

## L2 TLB (`l2_tlb`, `tlb_sram`)

This is the least obvious part of the design.

The entries (tag and leaf data for every way of a set) are one row of
`tlb_sram`. That is a RAM with one read port and one write port and a
per-way write mask, and its read data are registered. The valid bits are
**not** in the RAM. They are a register vector per set, so they can be read,
set and cleared in the same cycle without a RAM access. Keeping them outside
the RAM is what makes refill, flush and replacement cheap.

**Lookup pipeline.** The RAM's registered read adds one cycle, and the
result is registered once more:

| cycle | what happens |
|-------|--------------|
| 0 | `lookup_valid`: the RAM row of the set is read. The set's valid bits and the VPN are captured in registers. |
| 1 | The row arrives. Each valid way's tag is compared with the VPN's tag. On a hit the pseudo-LRU state is touched (PLRU variant). |
| 2 | `resp_valid`, `resp_hit` and `resp_data` come from registers. |

A new lookup may start every cycle.

**Refill.** `refill_valid` writes one way through the write mask, with no
read-modify-write. It uses the first invalid way of the set, or else the
replacement victim. `REPL` selects the replacement policy:

* `REPL_RANDOM` (the default): a 16-bit LFSR (`lfsr_random`). It is a
  handful of flip-flops whatever the size, and it steps once per eviction.
* `REPL_PLRU`: tree pseudo-LRU, which costs `SETS × (WAYS-1)` flip-flops.
  The flip-flop count is why random replacement is the default for a large
  L2.

**Whole-set flush.** Flushing one entry would need its tag, and the tag is
in the RAM, a cycle away. So `sfence.vma` with an address clears all the
valid bits of the indexed set. That may drop a few innocent translations,
but it costs no extra cycle. `sfence.vma` without an address clears
everything.

**Hazards.** The valid bits are sampled together with the RAM read, so the
tag compare always sees bits and tags of the same moment. Two rules follow:

* A flush that touches a set whose lookup is in flight (cycles 0 or 1)
  cancels that lookup's hit.
* A refill must not write the set that is being read in the same cycle.
  An assertion checks this. The walker never does it, because it does only
  one thing at a time.

## Page table walker (`ptw`)

The walker owns the L2 TLB. It accepts one request at a time from the
arbiter, with the VPN and the requester's id.

1. It looks the VPN up in the L2 TLB. On a hit the answer is ready three
   cycles after the request was accepted.
2. On an L2 miss it walks the Sv39 radix tree, starting from the root PPN in
   `satp_ppn`. It reads the 8-byte PTE at `{table PPN, 9-bit VPN slice, 000}`
   through `mem_req_*` and `mem_resp_*`. The memory accepts the request with
   a valid/ready handshake and returns one `mem_resp_valid` pulse, in order.
3. A PTE with R or X set is a leaf. A PTE with V set and neither R nor X is a
   pointer to the next level.
4. These end the walk with a page fault (`pf`): V clear; W set without R; a
   pointer at the last level; a 2 MB or 1 GB leaf whose PPN is not aligned.
5. The result goes out on `resp_valid`/`resp_id`/`resp` for one cycle. In the
   same cycle the result of a successful walk is written into the L2 TLB. No
   write happens if the walk faulted or an `sfence.vma` arrived during it.
   An answer that came from an L2 hit is not written again: a second write
   would place the same VPN in another way and evict a live entry.

The three low bits of `mem_req_addr` are always zero. `L2_EN=0` builds the
walker without an L2 TLB.

The walker has no page-walk cache: every L2 miss reads one PTE per level.

## Arbiter and counters

`rr_arbiter` passes one waiting L1 miss at a time to the walker. It is
round-robin: after a grant, the pointer moves to the requester after the
winner. A TLB that keeps missing therefore waits at most one walk for the
other side. The ITLB is input 0 and the DTLB is input 1. The walker sends
the result back with the winner's id, and only that TLB refills.

`tlb_event_counters` holds four 64-bit counters: ITLB misses, DTLB misses,
L2 TLB misses and page walks. Divided by an instruction count, they give
misses per kilo-instruction (MPKI). They are plain counters with a
`cnt_clear` input, not CSRs.

## Configurations

All sizes are parameters of `tlb_hierarchy`. These parameter sets give the
five hierarchies of the published evaluation (its Table 1 lists the DTLB
before the ITLB):

| conf. | ITLB `SETS×WAYS` | DTLB `SETS×WAYS` | L2 TLB | note |
|-------|------------------|------------------|--------|------|
| I   | 1×32 | 1×32 | `L2_EN=0` | fully-associative L1s, no L2 |
| II  | 1×32 | 1×32 | 32×4 | small 4-way L2 (128 entries) |
| III | 1×32 | 1×32 | 128×4 | 4-way, 512 entries |
| IV  | 16×8 | 8×8  | 128×8 | 8-way everywhere, ITLB 128 / DTLB 64 |
| V (default) | 8×8 | 16×8 | 128×8 | ITLB 64 / DTLB 128 |

The associativity study of the L2 TLB keeps 1024 entries and varies the
ways: 1024×1 (direct-mapped), 256×4 and 128×8.

## What comes from the published design and what was chosen here

These points follow the published design:

* set-associative L1 and L2 templates, from direct-mapped to fully
  associative
* L1 entries in registers, with hit/miss on the next cycle
* tag/index split, and a valid-bit vector per set in registers in both levels
* refill into the first free way, else the replacement victim
* a set-associative pseudo-LRU in registers for the L1, with random
  replacement as an option
* random and pseudo-LRU replacement for the L2, with random as the default
* L2 entries in a synchronous RAM with masked way writes and extra pipeline
  registers for its latency
* L1 flush by index and tag, L2 flush of the whole set
* the L2 TLB inside the walker, reached through a round-robin arbiter
* 4 KB pages only in the set-associative L1
* no page-walk cache
* the default sizes

These points were chosen for this RTL, where the published design is silent
or relies on surrounding processor code:

* The exact L2 pipeline: result two clock edges after the lookup.
* The blocking miss handshake with replay.
* The walker, which was not designed as part of this hierarchy. It is a
  simple one-walk-at-a-time Sv39 walker.
* Splitting superpages into 4 KB entries.
* Flush-all for `sfence.vma` without an address.
* Dropping refills that overlap a flush.
* Storing faulting walks in the L1 but not in the L2.
* Writing the L2 TLB only after a walk, never after an L2 hit.
* The permission rules beyond "the two L1s differ only in access
  privileges", with A/D, MXR and SUM ignored.
* The LFSR polynomial and seed, and stepping it only on refills into a
  full set.
* Synchronous active-low reset of all state except the RAM contents.

## Files

| file | contents |
|------|----------|
| `rtl/tlb_pkg.sv` | Sv39 constants, PTE and TLB-entry structs, access and replacement enums |
| `rtl/tlb_hierarchy.sv` | top level |
| `rtl/l1_tlb.sv` | L1 TLB template |
| `rtl/l2_tlb.sv`, `rtl/tlb_sram.sv` | L2 TLB and its entry RAM |
| `rtl/ptw.sv` | page table walker containing the L2 TLB |
| `rtl/plru_tree.sv`, `rtl/lfsr_random.sv` | replacement policies |
| `rtl/rr_arbiter.sv` | round-robin arbiter |
| `rtl/tlb_event_counters.sv` | miss counters |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the system tests below |
| `tb/pt_memory.sv` | behavioural page-table memory with a page-table builder (testbench only) |
| `tb/config_runner.sv` | one hierarchy, its memory and a fixed access stream, used by `tb_configurations` |

## Verification

Every testbench compares the design against a reference model written
independently in the testbench, and counts its checks. Each ends by
printing `TB_RESULT checks=N failures=M`, and each has a watchdog.

* The unit testbenches use reduced sizes (for example a 4×4 L1 and 8×4 L2
  TLBs) so that sets overflow quickly.
* The L1 and L2 testbenches carry a full model of sets, valid bits and
  replacement state. They predict every hit, miss and victim, and check the
  cycle of every response. Each runs both replacement policies.
* `tb_ptw` builds real Sv39 page tables with 4 KB, 2 MB and 1 GB leaves and
  faulting PTEs. It checks every result and the number of PTE reads per walk.
* `tb_tlb_hierarchy` runs the top level at its **default** sizes.
  Instruction and data requesters run concurrently over a few hundred
  pages, with random flushes. It checks every translation and the miss
  counters. It also requires these events to happen at least once: L1
  evictions, L2 hits, L2 misses, L2 evictions, walks of all three page
  sizes, faults, both L1 TLBs waiting at the arbiter together, both kinds
  of flush, and a dropped refill.
* `tb_configurations` builds the hierarchy in each configuration of the
  table above, plus a direct-mapped (1024×1) and a 4-way (256×4) L2 of
  1024 entries. Two more cover the corners: direct-mapped L1 TLBs (64×1,
  128×1) with a fully associative 16-entry L2 (1×16), and configuration V
  with random L1 replacement and a pseudo-LRU L2. It runs one synthetic stream through all of them: 201 data
  pages and 16 code pages, four rounds. It checks every translation. In the
  data pages, three pages share each index of the direct-mapped L2. So the
  direct-mapped L2 must miss on every lookup, while III, IV, V and the 4-way
  L2 must take only the 217 compulsory misses.

The SPEC CPU2006 results that motivated these sizes come from full-system
runs on an FPGA. They cannot be reproduced in RTL simulation, and these
testbenches do not try to.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/tlb_pkg.sv tb/tb_tlb_hierarchy.sv --top-module tb_tlb_hierarchy -o sim
./obj_dir/sim
```

Replace the testbench name to run any other. Lint a module with
`verilator --lint-only -Wall -y rtl rtl/tlb_pkg.sv rtl/<module>.sv`.

## Limits

* Translation is always on (Sv39). There is no bare mode and no ASID.
  `sfence.vma` takes an optional VPN only.
* The walker handles one walk at a time. An L1 miss on one side waits
  behind a walk for the other side.
* The L1 TLBs block on a miss (no hit-under-miss).
* A/D bits are not checked or updated.
