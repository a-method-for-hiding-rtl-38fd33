# Cloak: page buffers that hide the read latency of a non-volatile last-level cache

An STT-RAM last-level cache (LLC) holds about four times as much data as an
SRAM cache of the same area and leaks far less power, but every read of its
data array is slow: in the configuration modelled here a data access takes 22
cycles, 10 of which block the array for any other access. Cloak hides much
of that latency with a small amount of SRAM. It notices, at the L1 TLB, that
a page which was used before is about to be used again, copies the lines of
that page that are already in the LLC into a small SRAM *page buffer* (PB)
with a single array read, and then serves later L2 misses to those lines from
the PB at SRAM speed. The NVM array stays inclusive of the PBs and every
write updates both, so a PB never needs writing back.

Two things make the copy cheap:

* **Page-per-row layout.** The LLC index is changed so that all 64 lines of a
  4KB page fall into one 4KB physical row of the NVM array (four sets of 16
  ways). Finding the page's lines takes one 64-entry tag search, and moving
  them takes one row read.
* **Half-page buffers.** Few pages have many lines in the LLC, so a PB is only
  2KB (32 line slots). A row is seen as two 2KB regions, and a line goes to
  the PB slot with its position inside its region. One *Region bit* per slot
  says which region the slot's line came from; no address tags are kept.

This repository is the RTL of the Cloak additions of a four-core chip: the
LLC slices with their controllers, tags, data arrays and page buffers, the
TLB-side hint logic, and the network between L2s and slices. Cores, L1/L2
caches, TLBs and main memory are not part of it; their signals are ports of
the top module.

## Address layout

The 48-bit physical address of a 64B line is split as follows (`cloak_addr_decode`):

| bits | field | use |
|---|---|---|
| 47 : 12+R | Tag-High | page-number bits not used as index; compared by PTRs and CLRs |
| 11+R : 12 | Row Index | selects the physical row (R = `ROW_BITS`) |
| 11 : 8 | Tag-Low | page-offset bits stored in the tag; compared by CLRs only |
| 7 : 6 | Set Index | one of the four 16-way sets in the row |
| 5 : 0 | offset | byte in the line |

With 16MB slices a slice has 4096 rows, so R = 12 and Tag-High is 47:24.
(For a 32MB slice R = 13, giving Row Index 24:12 and Tag-High 47:25.) Because
the Row Index comes only from page-number bits, every line of a page lands in
the same row. Bit 11 tells which half of the page a line belongs to.

Inside a row a line occupies slot `{set, way}` (0..63). The upper set-index
bit chooses the region (slots 0-31 are region 0, slots 32-63 region 1) and
the low five slot bits the PB slot. This ordering is this design's choice.

A whole page belongs to one slice. The top module uses the two address bits
just above the Row Index (25:24) as the slice number; they stay in Tag-High.

## Two kinds of request

* **CLR (cache line request)** from an L2: a *read* (L2 miss), a *write* (an
  L2 victim being installed; the LLC is a victim cache of the L2s) or an
  *invalidate*.
* **PTR (page transfer request)** from a core's TLB hint logic: "this page is
  about to be used; copy it into a PB if that is worthwhile".

### When a PTR is sent (`tlb_ptr_hint`)

On every L1 TLB fill the hint logic asks whether the page was used before:
the translation hit in the L2 TLB, or the PTE has its Accessed or Dirty bit
set. Only then does it send a PTR carrying the physical address of the
access that missed. The PTR reaches the LLC 6 cycles later.

For 2MB and 1GB pages, a PTR asks for the single 4KB chunk that holds the
address. Each L1 TLB entry records which chunk it last asked for (9 address
bits for 2MB pages, 18 for 1GB; the RTL keeps 18 bits for every entry). A
later L1 TLB *hit* to the same huge page but a different chunk sends a PTR for
the new chunk and records it.

PTRs are hints. A PTR that its slice cannot take yet (the slice is busy with
another request or promoting another page) waits at the hint logic's output;
if a newer PTR from the same core arrives meanwhile, the older one is dropped
and `ptr_dropped` pulses.

### What a slice does with a PTR

1. The PPN is looked up in the PB Tags. If a PB already holds the page,
   nothing happens.
2. Otherwise the tags of the page's row are searched on Tag-High: the result
   is one bit per slot (the page's *population* in the LLC).
3. If fewer than `cfg_threshold` lines (6) are resident, nothing happens.
4. A PB is chosen: an empty one, or one whose Replacement counter has run out.
   If there is none, nothing happens.
5. The row is read from the NVM array once (22 cycles), and the two regions
   are written into the PB in two consecutive cycles, region 0 first.

### Contested PB slots

Slot *s* of region 0 and slot *s* of region 1 both map to PB slot *s*. When
both hold a line of the page, one must win (`pb_promote`). The rule guesses
by spatial locality: the line from the same half of the page as the address
that triggered the TLB fill wins over a line from the other half. When both
or neither are in that half, the region-1 line, written second, wins. Every
winner's Region bit is recorded; the loser stays reachable in the NVM array.

Example: a row holds lines of the page in region-0 slots 0 and 30 and in
region-1 slots 0, 1 and 31, all from the first half of the page, and the
trigger was in the first half. The PB ends up with region-1 lines in slots
0, 1, 31 and the region-0 line in slot 30; the region-0 line of slot 0 lost.

### What a slice does with a CLR

The PPN lookup in the PB Tags runs in parallel with the two-cycle LLC tag
read. Then:

* **read, tag miss:** forwarded to main memory on `mem_*` (memory answers
  the L2 directly; nothing is allocated).
* **read, tag hit:** one more cycle reads the Region bit of the line's PB
  slot. If a PB holds the page and the Region bit names the line's region it
  is a **PB hit**: the line is read from the PB. Otherwise the line is read
  from the NVM array.
* **write:** the tag is updated (a way is allocated on a miss, evicting the
  set's victim), the line is written to the NVM array and, if a PB holds the
  page and the slot's Region bit names the line's region, to the PB as well.
  The write is acknowledged when the slice accepts it.
* **invalidate:** the tag's valid bit is cleared.

A PB slot can hold stale data: the LLC tags decide. A PB line is used only
after the tag search confirmed that the line is valid and in that slot.

## PB Tags and PB replacement (`pb_tags`)

Per PB: a valid bit, the page's 36-bit PPN, 32 Region bits, a *Residency*
counter (lines of the page currently in the PB) and a 10-bit *Replacement*
counter.

* Loading a PB sets Residency to the number of lines copied and Replacement
  to Residency x Activation Period (`cfg_activation_period`, 20 cycles per
  line).
* Replacement counts down every cycle. At zero the PB may be replaced.
* A PB read (the line moves to an L2) decrements Residency; a PB write (an L2
  victim comes back) increments it. Each access also reloads Replacement
  with Residency x Activation Period, using the Residency before the access.
* An LLC invalidation or eviction of a line that the PB holds decrements
  Residency.

So a PB stays as long as it keeps being used, and a PB with many lines gets
more time before it must prove itself. Among several free PBs the one with
the lowest index is used.

## Slice timing

`cloak_slice` takes one request at a time through the tag lookup; CLRs and
PTRs take turns when both wait. Times below are from the cycle the slice
accepts a read to the cycle the response is taken (all at default
parameters; the full-size testbench checks them):

| event | cycles |
|---|---|
| LLC tag read | 2 |
| Region-bit check | 1 |
| PB hit, acceptance to response | 5 |
| NVM hit, acceptance to response | 27 (the difference is the 22-cycle NVM read) |
| NVM array blocked after a read / a write | 10 / 25 |
| PTR, TLB event to slice | 6 |
| promotion, tag search to PB loaded | about 27 |

The NVM model (`nvm_data_array`) blocks the array for 10 cycles after a read
but delivers the data after 22, so reads overlap; a PB hit is answered while
an older NVM read is still in flight (the responses share one FIFO).
A promotion uses the array once and runs in the background. While it runs,
new PTRs are not accepted, and CLR writes and invalidates to the row being
copied wait so that the copy stays coherent. A CLR write also waits while a
promotion writes the PB data array, which has a single write port.

## Chip top (`cloak_top`)

Four cores, four slices (one per core). Three crossbars (`l2l3_xbar`) carry
CLRs from the L2s to the slices, PTRs from the hint logic to the slices, and
read responses back to the cores, each with a round-robin arbiter per
receiver and no added latency. The core number of each CLR is filled in from
the port it arrived on, and responses are routed by it. `ready` goes high
when all tag arrays are cleared, 2^ROW_BITS cycles after reset.

Each slice reports one-cycle event flags (`slice_events_t`): miss, NVM hit,
PB hit, PB hit during an NVM read, NVM stall, PB write, Residency decrement,
LLC eviction, PTR accepted, PTR for a page already in a PB, PTR below
threshold, no PB available, promotion, contested slot, PB replaced.

## Files

| file | contents |
|---|---|
| `rtl/cloak_pkg.sv` | sizes, request/response structs, event flags |
| `rtl/cloak_addr_decode.sv` | address fields |
| `rtl/llc_tag_array.sv` | SRAM tags of a slice: CLR lookup, 64-slot PTR search, victim choice |
| `rtl/nvm_data_array.sv` | behavioural model of the STT-RAM data array (line read, row read, write, occupancy) |
| `rtl/page_buffer_data.sv` | PB data storage |
| `rtl/pb_tags.sv` | PB Tags, Residency and Replacement counters |
| `rtl/pb_promote.sv` | population, threshold and contested-slot decision |
| `rtl/cloak_slice.sv` | slice controller tying the above together |
| `rtl/tlb_ptr_hint.sv` | PTR generation next to an L1 TLB, huge-page chunks |
| `rtl/l2l3_xbar.sv` | valid/ready crossbar |
| `rtl/sync_fifo.sv` | response FIFO |
| `rtl/cloak_top.sv` | four cores' hint logic, three crossbars, four slices |

Every block has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=<n> failures=<n>`. `tb/tb_cloak_top.sv` runs the whole chip
at small sizes (16 rows and 4 PBs per slice) and makes every mechanism above
happen at least once, failing if one never does; it also checks that every
read is answered once, to the core that issued it, with the right data.
`tb/tb_cloak_workload.sv` drives random traffic with page locality from the
four cores (reads, victim writes, invalidations, TLB fills of 4KB and 2MB
pages) against a reference copy and reports which share of LLC read hits the
PBs served; it stands in for the benchmark programs, which cannot be run on
RTL of the LLC alone.
`tb/tb_cloak_top_full.sv` runs the top at its default size (four 16MB slices,
20 PBs each) through writes, PTRs, PB and NVM hits and a miss.

To simulate, for example:

```
verilator --binary --timing --assert -Irtl rtl/cloak_pkg.sv rtl/*.sv \
    tb/tb_cloak_top.sv --top-module tb_cloak_top
./obj_dir/Vtb_cloak_top
```

## Parameters

| parameter | default | meaning |
|---|---|---|
| `ROW_BITS` | 12 | rows per slice = 2^ROW_BITS; 12 gives 16MB |
| `NUM_PB` | 20 | page buffers per slice |
| `NVM_RD_LAT`, `NVM_RD_BUSY`, `NVM_WR_BUSY` | 22, 10, 25 | NVM read latency, read and write occupancy |
| `RESP_DEPTH` | 8 | slice response FIFO |
| `NUM_CORES`, `SLICE_BITS` | 4, 2 | cores, log2 of slices |
| `L1_ENTRIES`, `PTR_LAT` | 64, 6 | L1 TLB entries, PTR latency |
| `cfg_threshold` (input) | 6 in the tests | promotion threshold |
| `cfg_activation_period` (input) | 20 in the tests | cycles per resident line |

LLC sizes of 4, 8 and 32MB per core are `ROW_BITS` 10, 11 and 13. Slower NVM
is a larger `NVM_RD_LAT`.

## How far this follows the published design

Taken from the published description: the address layout, page-per-row
placement, 2KB PBs with Region bits and slot-preserving placement, two-step
promotion with the page-half rule for contested slots, PB Tag fields and the
Residency/Replacement policy, the PTR trigger condition and its 6-cycle
latency, huge-page chunk PTRs, and the sizes and latencies (16MB 16-way
slices, 20 PBs, threshold 6, Activation Period 20, 2-cycle tags, 22-cycle NVM
data access of which 10 are not pipelined).

Choices of this design, or departures:

* **Threshold comparison.** The text says a promotion needs a population that
  *exceeds* the threshold; the flow chart and the evaluation say *at least*
  6 lines. The RTL promotes at population >= threshold.
* **Residency width.** A 5-bit counter is quoted, but a full PB has 32 lines;
  the counter is 6 bits.
* **Residency on invalidation.** One passage says an LLC invalidation needs no
  other action than clearing the tag; another says the Residency is
  decremented. The RTL decrements it.
* **PB valid bit.** Added, so that an unused PB can be told apart.
* **Contested slot with no half preference.** When both or neither line is in
  the trigger's half, the region-1 line wins (as in the published example).
* **Slot order and region.** Slot = {set, way}, region = upper set bit: not
  specified in the source.
* **NVM write occupancy** of 25 cycles is derived from the quoted round trips
  (78 for a write, 63 for a read) and is an estimate.
* **Latencies at the slice interface** (5 / 27 cycles) do not include the
  network, L2 and core that the published round trips (43 / 63 cycles)
  include. The network here has no latency.
* **Serial controller.** One tag lookup at a time; PTRs and CLRs alternate;
  PTRs are not accepted during a promotion and wait (one per core; an older
  waiting PTR is dropped when a newer one arrives); CLR writes to the row
  being promoted wait. Only the NVM reads overlap.
* **NVM reads waiting for the array.** A read that finds the NVM array still
  blocked by an earlier access waits in the controller, and younger PB hits
  wait behind it. Once issued, an NVM read no longer blocks anything: younger
  PB hits are served while it is in flight, and both share one response
  path, as published.
* **Write acknowledgement** is the acceptance handshake, not a separate
  message.
* **LLC replacement** is first invalid way, else a per-slice round-robin way
  counter; it is not specified in the source.
* **Slice selection** by address bits 25:24 is this design's choice.
* **Not modelled:** STT-RAM cells, sense amplifiers, ECC, energy, area, and
  everything outside the LLC side (cores, L1/L2, TLBs, page walker, DRAM).

## Limits

* The NVM array is a behavioural model. At its default size it is a 64MB
  array of registers in simulation; a real design uses an STT-RAM macro.
* The response FIFO reserves room for every NVM read in flight, so a core
  that does not take its responses eventually stalls its slice.
* The testbenches run two-state; memories are not reset except for the tag
  valid bits (cleared by the reset sweep) and the PB Tags.
