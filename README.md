# An L2 TLB that holds 4KB and 64KB SVNAPOT pages in the same entries

RISC-V's SVNAPOT extension lets the operating system map a naturally aligned
64KB region with 16 identical 4KB leaf PTEs. Each of those PTEs has its N bit
(bit 63) set, and the low 4 bits of its PPN hold the pattern `1000`. A TLB
that understands this can cache the whole region in one entry instead of 16.
That gives the TLB 16 times the reach for memory mapped this way, and one
page walk now serves 16 pages.

This RTL is such a TLB. It is the second-level TLB of an sv39 core, between
the first-level data TLB and the page-table walker. It has 1024 entries,
16-way set-associative by default. **Both page sizes share the same entries**,
so no entry is set aside for one size. The only per-entry cost is one N bit.
The hard part is choosing the set: a lookup does not know the page size of
the VPN it translates, yet both sizes must be found in one set with one
lookup. The next section explains how.

## Choosing the set when the page size is unknown

An sv39 VPN has 27 bits. A conventional set-associative TLB uses the lowest
VPN bits as the set index, and the rest as the tag:

```
conventional:  | TAG  (27 - log2 SETS)     | INDEX |
this design:   | TAG  (27 - 4 - log2 SETS) | INDEX | NAPOT (4) |
                                            VPN[4 +: log2 SETS]  VPN[3:0]
```

With the conventional split, the 16 pages of one 64KB region fall into 16
different sets. An entry for the whole region then has no single home.
Here the index skips the 4 NAPOT bits, so every page of a region, and the
region's 64KB entry, use the same set. A lookup reads that one set, and the
entry's N bit decides how the tag is compared:

* **N = 0 (4KB entry).** The whole VPN must match. So the stored tag keeps the
  NAPOT bits too, at its bottom (`{VPN[26:4+IDX], VPN[3:0]}`). Up to 16
  different 4KB pages of one region can then sit in one set.
* **N = 1 (64KB entry).** The tag is compared only above the NAPOT bits.
  Every page of the region hits.

The other designs this avoids are a lookup per page size, which costs
cycles, and a separate TLB per size.

**The price is in the 4KB case.** Sixteen consecutive 4KB pages now share a
set instead of spreading over 16 sets. With 16 ways a linear sweep still
fills the TLB exactly: 1024 pages, 4MB. With 4 ways (256 sets) only 4 of
every 16 consecutive pages fit. A linear sweep over just 64KB then thrashes
one set while the other sets stay empty. `tb_tlb_stress` shows this: 16
pages give 15 misses out of 16 accesses once warm. This is why 16 ways is
the default organisation.

## What a hit returns

The stored PPN is the PTE's PPN. For a 64KB entry, the low 4 bits of that PPN
are the NAPOT encoding `1000`, not an address. On a hit to a 64KB entry they
are replaced by the low 4 VPN bits of the lookup:

```
N = 0:  PPN_out = PPN
N = 1:  PPN_out = { PPN[43:4], VPN[3:0] }      // ((PPN >> 4) << 4) + VPN[3:0]
```

Example: a 64KB entry stored with PPN `0x0000ABCD008` translates VPN
`...7` to PPN `0x0000ABCD007`.

## Operations and timing

All three operations use the same set index (`l2tlb_vpn_split`).

**Lookup.** A lookup is accepted every cycle, and lookups are pipelined. The
answer comes exactly 3 cycles later, hit or miss, for either page size:

| cycle | stage | work |
|---|---|---|
| t   | read    | the set `VPN[4 +: log2 SETS]` is read from the entry array |
| t+1 | compare | all ways are compared with the tag, N-aware (`l2tlb_way_match`) |
| t+2 | PPN     | the NAPOT offset is inserted if N = 1 (`l2tlb_napot_ppn`) |
| t+3 | answer  | `resp_valid`, `resp_hit`, `resp_ppn`, `resp_flags`, `resp_n` |

**Insert (refill).** The page-table walker hands over the walked VPN and the
leaf PTE. In one cycle the entry is written with:

* the tag of the VPN;
* N = PTE bit 63;
* PPN = PTE bits 53:10;
* the flags D A G U X W R V = PTE bits 7:0.

The victim is the first invalid way of the set. If the set is full, the
victim comes from a 16-bit LFSR (`l2tlb_replace`).

**Flush.** `flush_valid` with `flush_vpn` invalidates the whole set that the
VPN indexes. This is what page-size-blind indexing forces: when you flush a
4KB page, you cannot tell which entries might cover it, so the whole set
goes. `flush_all` invalidates everything. Valid bits are kept in flip-flops,
so both flushes take one cycle.

**Cycle-level rules** (choices of this design):

* A lookup issued in the cycle of an insert does not see that insert. The
  array reads before it writes.
* A lookup still in its 3 cycles when a flush happens answers miss. This
  includes a lookup issued in the same cycle as the flush.
* The caller should insert a translation only after a miss. If the same
  translation ends up in two ways anyway, the lower way answers, and a
  simulation warning is printed.
* A 64KB PTE whose PPN does not end in `1000` triggers an assertion.

## Interface of `svnapot_l2tlb`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears all valid bits and the pipeline) |
| `req_valid`, `req_vpn` | in | 1, 27 | lookup request from the L1 TLB side |
| `resp_valid`, `resp_hit` | out | 1, 1 | answer, 3 cycles after the request |
| `resp_vpn`, `resp_ppn` | out | 27, 44 | VPN of the answered lookup, translated PPN |
| `resp_flags`, `resp_n` | out | 8, 1 | PTE flags; hit was on a 64KB page |
| `ins_valid`, `ins_vpn`, `ins_pte` | in | 1, 27, 64 | refill from the page-table walker |
| `flush_valid`, `flush_vpn` | in | 1, 27 | invalidate the set of `flush_vpn` |
| `flush_all` | in | 1 | invalidate every entry |

Parameters: `ENTRIES` (default 1024) and `WAYS` (default 16, and 4 is the
other organisation studied). `ENTRIES/WAYS` must be a power of two, and at
least 2. The widths and the PTE field positions are in `svnapot_pkg`.

## Reach

The reach of the default organisation is simple arithmetic:

| pages | reach | a chunk of memory … |
|---|---|---|
| 4KB  | 1024 × 4KB = 4MB   | up to 4MB runs without L2 TLB misses once warm; 8MB to 256MB (2048 to 65536 pages) misses |
| 64KB | 1024 × 64KB = 64MB | up to 64MB runs without L2 TLB misses once warm; 128MB and 256MB miss |

`tb_tlb_stress` runs these sweeps, linear and random, with the
page-table walker modelled and no L1 TLB in front. It confirms the table for
both organisations. A 64KB warm-up pays one walk per region, not one per
page.

## Storage cost

Each entry holds:

| field | bits |
|---|---|
| valid | 1 |
| tag | 21, at 64 sets |
| PPN | 44 |
| flags | 8 |
| N | 1 |

That makes 75 bits per entry, about 77k bits for 1024 entries. SVNAPOT adds
1024 of them, the N bits, which is 1.3% of this array. The original study
puts the overhead at 1.1% of its L2 TLB, so its entries are slightly wider.
Besides the N bits, SVNAPOT adds only the N-aware compare and the PPN
multiplexer. The replacement LFSR and the flush logic belong to any L2 TLB
of this kind.

## Sources, and where this RTL departs from them

These follow the published design:

* the collocation of both page sizes in one array;
* the N bit per entry, set from the PTE on insert;
* the index that skips 4 VPN bits;
* the PPN rule;
* whole-set flush;
* the 3-cycle lookup for both page sizes;
* 1024 entries, 4-way and 16-way organisations.

The published rule for the PPN reads "(PPN >> 4) + NAPOT offset". This RTL
puts the shifted PPN back in place, as `{PPN[43:4], VPN[3:0]}`. This is what
SVNAPOT defines, and the only reading that yields a page inside the region.

These are this design's own choices:

* the port list and its handshake (there is no back-pressure);
* the division of the 3 cycles into stages;
* the NAPOT bits kept in the tag;
* the content of an entry beyond the N bit (flags, no address-space ID);
* the replacement policy;
* `flush_all`;
* the squashing of in-flight lookups on a flush;
* the read-before-write rule.

The original TLB was a modification of an existing core's L2 TLB, whose
internals are not reproduced here. Its replacement policy and exact entry
format may therefore differ.

What is not here:

* the core;
* the 32-entry L1 data TLB;
* the page-table walker with its 8-entry walk cache.

The TLB's ports are where they connect. The testbenches stand in for the L1
TLB and the walker.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` at the end.

| testbench | what it checks |
|---|---|
| `tb_l2tlb_vpn_split` | index and tag against integer arithmetic for 64 and 256 sets; the pages of a region share a set |
| `tb_l2tlb_napot_ppn` | PPN for both page sizes, random and all 16 offsets of a region |
| `tb_l2tlb_entry_array` | 5000 cycles of random reads, writes, set and full flushes against a reference model (8 sets × 4 ways) |
| `tb_l2tlb_way_match` | N-aware compare, hit way and data selection, on random sets built around the lookup tag |
| `tb_svnapot_l2tlb` | the whole TLB at its default size (see below) |
| `tb_tlb_stress` | the TLB-stress sweeps of the reach table, 4-way and 16-way |

`tb_svnapot_l2tlb` models the walker's page table and tracks what each set
holds. It then:

1. fills the TLB with a 4MB sweep, and streams 1024 back-to-back lookups that
   must all hit;
2. overflows a set;
3. flushes a set, then everything;
4. fills 1024 64KB regions, and hits on all 16 pages of them;
5. mixes both sizes in one set;
6. flushes under in-flight lookups;
7. inserts and looks up in the same cycle.

It checks that every answer arrives exactly 3 cycles after its request, with
the page table's PPN, flags and N bit. It also counts each of these
mechanisms and fails if one never happened.

To run a testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/svnapot_pkg.sv tb/tb_svnapot_l2tlb.sv --top-module tb_svnapot_l2tlb
./obj_dir/Vtb_svnapot_l2tlb
```

For another testbench, replace its name in both places. Each testbench runs in
about a second.

The design has been linted and simulated, and it synthesises to generic
cells. It has not been placed in a core or run under an operating system, so
its behaviour next to a real L1 TLB and walker is untested.

## Files

Under `rtl/`:

* `svnapot_pkg.sv`: widths, PTE fields, the entry data type and the PTE-to-entry function.
* `l2tlb_vpn_split.sv`: the TAG | INDEX | NAPOT split.
* `l2tlb_entry_array.sv`: tags and data in a memory array, valid bits in flip-flops, set and full flush.
* `l2tlb_way_match.sv`: the N-aware compare of one set.
* `l2tlb_napot_ppn.sv`: the PPN of a hit.
* `l2tlb_replace.sv`: the victim choice.
* `svnapot_l2tlb.sv`: the top, with insert, the 3-stage lookup and flush.

Under `tb/`:

* a testbench per module, listed above;
* `tlb_stress_run.sv`: a TLB plus a walker model, used by `tb_tlb_stress`.
