// l2tlb_vpn_split: VPN partitioning of the SVNAPOT L2 TLB.
//
// A TLB that holds 4KB and 64KB pages in one set-associative array cannot
// know a page's size before the lookup, so both sizes must index the same
// set. The VPN is therefore split as TAG | INDEX | NAPOT: the low 4 bits
// (the 4KB page inside a 64KB region) are skipped and the next
// log2(SETS) bits select the set. The conventional split (TAG | INDEX,
// index taken from the lowest VPN bits) is what the paper replaces.
//
// The tag this module returns keeps the NAPOT bits at its bottom, as
// {VPN[26:4+IDX_BITS], VPN[3:0]}: a 4KB entry needs them to tell apart the
// 16 pages of one region, which all share a set; a 64KB entry ignores
// them when it is compared (see l2tlb_way_match). Storing the NAPOT bits
// in the tag is this design's choice; the paper shows only the three
// fields.
//
// Purely combinational.
module l2tlb_vpn_split
  import svnapot_pkg::*;
#(
  parameter int unsigned SETS     = 64,
  localparam int unsigned IDX_BITS = $clog2(SETS),
  localparam int unsigned TAG_BITS = VPN_BITS - IDX_BITS
) (
  input  vpn_t                vpn,
  output logic [IDX_BITS-1:0] idx,
  output logic [TAG_BITS-1:0] tag
);

  initial assert (SETS >= 2 && (1 << IDX_BITS) == SETS)
    else $error("SETS must be a power of two, at least 2");

  always_comb begin
    idx = vpn[NAPOT_BITS +: IDX_BITS];
    tag = {vpn[VPN_BITS-1 : NAPOT_BITS+IDX_BITS], vpn[NAPOT_BITS-1:0]};
  end

endmodule
