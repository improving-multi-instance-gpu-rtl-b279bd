# STAR: a last-level GPU TLB whose entries can be shared by two address ranges

When a GPU is split into isolated instances (NVIDIA's Multi-Instance GPU),
each instance keeps its own L1 and L2 TLBs, but they all share one last-level
(L3) TLB. In that TLB, one entry holds the translations of a whole 1 MB aligned
virtual range of 64 KB pages: one tag, the *virtual page base* (VPB), and 16
*sub-entries*, one per page. When several applications compete for the 1024
entries, many entries are evicted while fewer than half of their 16
sub-entries have ever been filled. So the capacity the set lost to eviction
was mostly empty space.

This design lets a second base address move into an under-used entry instead
of evicting it. The 16 sub-entries are split into two groups of eight, one
per base. A page's 4-bit sub-entry index becomes a 3-bit position within its
base's group and a 1-bit *address identify bit* (AIB). The AIB is stored with
the sub-entry, because two pages of the same base now compete for one slot. A
2-bit layout field says how the split is made. It is chosen from how the
entry's sub-entries were occupied when sharing began:

* stream-like use (one contiguous run) gives the *sequential* layout;
* scattered use gives the *stride* layout.

An entry goes back to single-base use when its remaining base needs more than
its eight slots.

The RTL here implements this L3 TLB at its evaluated size:

* 1024 entries, organised as 128 sets × 8 ways;
* 16 sub-entries per entry;
* true LRU replacement;
* a 40-cycle lookup.

It also implements the shared front end that connects the L2 TLBs of the
GPU's processing clusters (GPCs) to it and sends misses to the page walker.

## Address and entry format

The virtual address is 57 bits:

| bits    | field            | use |
|---------|------------------|-----|
| [56:27] | VPB (30 bits)    | tag of an entry's base |
| [26:20] | set index (7)    | selects one of 128 sets |
| [19:16] | sub-entry index (4) | page within the 1 MB range |
| [15:0]  | page offset (16) | 64 KB pages |

Each entry (`entry_t` in `star_pkg`) holds the following fields.

* **Two bases.** Each base has:
  * valid and dirty bits;
  * a 3-bit process identifier;
  * the 30-bit VPB.

  Base 2 is meaningful only when the entry is shared.
* **A 2-bit layout field.**
  * `00`: not shared.
  * `01`: sequential.
  * `10`: stride.
* **16 sub-entries.** Each one has:
  * a valid bit;
  * the AIB;
  * a 52-bit frame number. The physical address is this frame followed by
    the page offset, so it is 68 bits.

One set (`set_t`) is the eight entries plus eight 3-bit LRU ages, 7512 bits in
all. The whole TLB is a single array of 128 such sets (961,536 bits).

## Layouts: where a page lives in a shared entry

Let the page's sub-entry index be `i[3:0]`. Let the base it belongs to be `b`:
0 for Base 1, 1 for Base 2.

| layout | slot used       | AIB stored | Base 1 owns | Base 2 owns |
|--------|-----------------|------------|-------------|-------------|
| `00`   | `i`             | –          | all 16      | –           |
| `01`   | `{b, i[2:0]}`   | `i[3]`     | slots 0–7   | slots 8–15  |
| `10`   | `{i[3:1], b}`   | `i[0]`     | even slots  | odd slots   |

In the sequential layout the low three index bits pick the slot. Pages `i`
and `i+8` of the same base then collide and are told apart by the AIB.
In the stride layout the high three bits pick the slot, and neighbouring
pages `2k` and `2k+1` collide.

These mappings are the functions `slot_of`, `aib_of`, `owner_of` and
`orig_idx` in `star_pkg`. `orig_idx` rebuilds the 4-bit index of the page
held in a slot, which the insertion logic needs when it moves sub-entries
around.

## Lookup (`star_lookup`)

The set is read. Each way has a single VPB comparator, which it uses for
one base at a time.

1. **Base 1.** In the first cycle every way compares its Base 1 (valid,
   process, VPB) with the request, all in parallel.
2. **Base 2.** Only if nothing hit and some entry of the set is shared does
   a second cycle follow. In it, every shared way (layout ≠ `00`) compares
   its Base 2 on the same comparator.
3. **Slot.** On a base match, the layout and the base number give the slot.
4. **Hit.** The slot hits if it is valid and, in a shared entry, its stored
   AIB equals the request's AIB.

The frame of the hit, joined to the page offset, is the physical address.

**Latency.** Checking the two bases in turn costs a second comparison step.
The lookup takes `LOOKUP_LAT` (40) cycles when:

* a Base 1 comparison already hit, or
* no entry of the set is shared.

Otherwise it takes `2*LOOKUP_LAT` (80). This covers a Base 2 hit and every
miss in a set that holds a shared entry. These are exactly the lookups that
need the second comparison cycle. `star_lookup` reports whether the set holds
a shared entry on `shared_o`, and the TLB sequences the two steps.

## Insertion (`star_insert`)

A page-walk result is inserted by rewriting the whole set in one step. The
cases, in priority order, are listed below. Each one raises one event bit.

**1. Base hit, entry not shared** (`base_hit`). The translation goes to slot
`i`.

**2. Base hit, entry shared.** The layout gives the slot.

* If the slot already holds this page, its frame is refreshed (`base_hit`).
* Otherwise, if all eight slots of this base are occupied, the entry
  **reverts to non-shared** (`unshare`). The demand of this base has
  outgrown half an entry, so:
  1. The other base and all its translations are dropped.
  2. The remaining base becomes Base 1 and the layout returns to `00`.
  3. Each of its translations moves back to slot `orig_idx(...)`, its full
     4-bit index.
  4. The new translation is written at slot `i`.
* Otherwise the translation is written into the slot (`conflict` if it
  displaced the other page with the same position bits).

**3. Base miss, a way has no valid base** (`vacant`). The first such way
takes the new base.

**4. Base miss, set full, some entry can be shared.**

*Which entry.* The choice is made by `star_share_select`. A way is eligible
when:

* it holds a single base, and
* fewer than 8 of its sub-entries are valid.

Eligible ways whose base belongs to the requesting process are preferred,
since one program's pages tend to be used alike. Within that group, or
within all eligible ways if none is from the same process, the way with the
fewest valid sub-entries wins.

*Which layout.* `star_pattern_detect` looks at that way's valid sub-entries:

* one gap-free run selects sequential (`share_seq`);
* anything else selects stride (`share_str`).

*Conversion.* The old base stays Base 1 and the new one becomes Base 2.

* Old translations that already sit in a Base 1 slot stay where they are.
* An old translation in a slot that now belongs to Base 2 moves to the
  Base 1 slot with the same position bits, if that slot is free.
* If that slot is taken, the translation is evicted (`reloc_evict`).

Finally the new translation is written in its Base 2 slot.

**5. Otherwise the LRU way is replaced** (`lru_evict`). `evict_count`
reports how many sub-entries it had in use.

The written way becomes most recently used. A lookup hit also makes its way
most recently used (`star_lru`).

## The TLB and its sequencing (`star_l3_tlb`)

The TLB serves one request at a time. The set array is single-ported and is
read and written a whole set at a time, so it maps onto one SRAM.

* **Reset.** After reset the array is cleared, one set per clock (128
  cycles). `lk_ready_o` and `fill_ready_o` stay low until this is done.
* **Lookup.** The TLB reads the set and evaluates it. On a hit it writes the
  set back with the new LRU ages. It then waits until the 40 or 80 cycles
  have passed and presents the response.
* **Response.** The response (`rsp_*`) returns the hit flag and the physical
  address. It also echoes the request's address, process and tag, so that a
  miss can be forwarded. It is held until `rsp_ready_i`.
* **Fill.** A fill reads the set, writes the insertion result and pulses
  `fill_done_o` three cycles after it is accepted.
* **Priority.** A fill is accepted before a lookup when both are waiting.
* **Events.** `ev_o` pulses one bit per event, for performance counters.

## Top level (`star_top`)

`star_top` joins `NUM_PORTS` (7) request ports to the TLB, one per GPC L2
TLB. A GPU split 3g+2g+2g, or any other MIG split, has seven GPCs.

* **Arbitration.** A round-robin arbiter (`star_rr_arb`) picks the next port
  whenever the TLB can take a lookup.
* **Hit.** The hit is answered on that port (`rsp_valid_o`, `rsp_pa_o`,
  `rsp_l3_hit_o`) one cycle after the TLB response. That is `LOOKUP_LAT+1`
  or `2*LOOKUP_LAT+1` cycles after the request was accepted.
* **Miss.** The miss leaves on `walk_*` to the GPU memory management unit,
  tagged with the port number. The TLB response is held until the walker
  accepts it.
* **Walk result.** The result returns on `walk_rsp_*`. If it is good, it is
  inserted into the TLB and answered on its port with `rsp_l3_hit_o = 0`.
* **Page fault.** If the walk reports a page fault, the page is not inserted
  and the port gets `rsp_fault_o`. Handling the fault on the host is outside
  this design.
* **Timing rule.** Walk results are accepted only while the TLB is idle, so
  they never coincide with a lookup answer. An assertion checks this.

All port responses are one-cycle pulses. The L2 TLBs are assumed to always
accept them.

## Where this RTL departs from, or adds to, the paper's description

* **Process identifier per base.** The sharing policy prefers an entry of
  the same process, but the published entry format has no field that names
  the process. A 3-bit identifier is therefore stored with each base and
  compared with the VPB, which also keeps processes apart.
* **Sub-entry valid bit.** Each sub-entry has an explicit valid bit, so frame
  0 can be mapped. The published format treats an all-zero sub-entry as
  empty.
* **Entry size.** With these two additions an entry is 936 bits, not the
  914 bits of the published format.
* **Order of the index fields.** The text places the 4-bit sub-entry index
  directly above the page offset, so that one entry covers a 1 MB aligned
  range; that order is used here. The published address figures draw the
  sub-entry index above the set index instead.
* **Layout codes.** `01` is sequential and `10` is stride, as the format
  figures show. One sentence of the description calls the sequential code
  `10`.
* **Relocation at share time.** When an entry becomes shared, all of the
  original base's translations that lie in Base 2 slots are relocated (or
  evicted) at once. The description speaks only of the slot the new
  translation lands in. Relocating everything keeps every stored
  translation reachable by the lookup rule above.
* **Comparators of the insertion logic.** Lookup reuses one VPB comparator
  per way for both bases. Insertion instead compares both bases of every way
  at once, with comparators of its own, and rewrites the set in one cycle.
  The paper places insertion off the critical path and does not describe its
  hardware.
* **When the latency doubles.** The cost of the second comparison step is
  charged as described in the Lookup section. The paper only says that a
  sequential check doubles the latency.
* **Other details are this design's own choices**, because the paper gives
  none of them:
  * tie-breaking by lowest way number;
  * the LRU age encoding;
  * one request in flight, with fills first;
  * the three-cycle fill;
  * the dirty bit as the OR of the fills of that base;
  * the round-robin arbiter and port count;
  * the reset clear.
* **Not included.** These are outside this RTL:
  * the per-GPC L1 and L2 TLBs;
  * the page walkers, walk cache and page tables;
  * host-side fault handling;
  * the 4-base sharing variant, which the paper studies only as a
    sensitivity point.

## Files

| file | content |
|------|---------|
| `rtl/star_pkg.sv` | sizes, entry and set types, layout index functions, event struct |
| `rtl/star_lookup.sv` | hit logic of one set |
| `rtl/star_pattern_detect.sv` | consecutive/stride classification and utilisation count of an entry |
| `rtl/star_share_select.sv` | choice of the entry to share |
| `rtl/star_lru.sv` | LRU ages and victim of a set |
| `rtl/star_insert.sv` | new set contents for a fill |
| `rtl/star_l3_tlb.sv` | set array and lookup/fill sequencing |
| `rtl/star_rr_arb.sv` | round-robin port arbiter |
| `rtl/star_top.sv` | top level: ports, arbiter, TLB, walk path |
| `tb/star_ref_pkg.sv` | reference model used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

The reference model in `tb/star_ref_pkg.sv` is written differently from the
RTL. Each slot remembers the full index of the page it holds, and a lookup
searches the base's slots for that index instead of computing a slot
address. So the slot arithmetic of the RTL is checked against an independent
formulation.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. For example:

```
verilator --binary --timing --assert -y rtl \
  rtl/star_pkg.sv tb/star_ref_pkg.sv tb/tb_star_top.sv \
  --top-module tb_star_top -o sim
./obj_dir/sim
```

Replace `tb_star_top` with any other `tb_*` module. The testbenches are:

* **`tb_star_pattern_detect`** tries all 65,536 occupancy patterns.
* **`tb_star_share_select`** runs directed and random candidate sets.
* **`tb_star_lru`** makes random touches against an ordered list.
* **`tb_star_lookup`** looks up model-built sets, with directed AIB cases.
* **`tb_star_insert`** chains 12,000 fills, comparing the whole set with the
  model after each one. It covers all five cases and the revert.
* **`tb_star_l3_tlb`** runs 1500 lookups and fills at full size. It checks
  hit, address, the exact 40/80-cycle latency and the insertion case.
* **`tb_star_top`** runs the whole design at its default parameters: 7
  ports, 1024 entries, a 40-cycle lookup. A behavioural page walker has a
  400-cycle walk, back-pressure and page faults. The test counts each
  mechanism and fails if one never occurred:
  * hits, misses and second-step lookups;
  * faults;
  * every insertion case;
  * arbitration conflicts;
  * walker stalls.

  It runs in under a second.

All testbenches pass. Each one was also run against a copy of its module
with one deliberate bug, and reported failures:

* the AIB check skipped in the Base 2 step;
* the gap test weakened;
* the same-process preference removed;
* the wrong LRU victim;
* the revert without reorganising;
* the latency not doubled;
* the fault flag dropped.

## Changing the design

* **Sizes.** Set count, ways, field widths and the process identifier width
  are localparams in `star_pkg`. Changing the set count requires the VPB and
  set-index widths to be changed together, so that the address stays 57
  bits.
* **Latency and ports.** The lookup latency and port count are parameters of
  `star_top` and `star_l3_tlb`.
* **Sharing policy.** The policy sits entirely in `star_insert` and
  `star_share_select`. The slot mapping sits in the four `star_pkg`
  functions. Lookup and insertion share those functions, so they stay
  consistent.
