// l2tlb_napot_ppn: physical page number returned by an L2 TLB hit.
//
// For a 4KB entry (N = 0) the stored PPN is the answer. For a 64KB SVNAPOT
// entry (N = 1) the stored PPN names the whole naturally aligned 64KB
// region (its low 4 bits hold the NAPOT encoding 4'b1000, not an address),
// so they are replaced by the 4KB page's offset inside the region, the low
// 4 bits of the looked-up VPN: PPN = ((PPN >> 4) << 4) + VPN[3:0]. This is
// the paper's "(PPN >> 4) + NAPOT_OFFSET", read with the shifted PPN put
// back in place above the offset, as the RISC-V SVNAPOT rule requires.
//
// Purely combinational.
module l2tlb_napot_ppn
  import svnapot_pkg::*;
(
  input  logic   n,           // entry is a 64KB page
  input  ppn_t   ppn_stored,  // PPN as stored from the PTE
  input  napot_t vpn_napot,   // VPN[3:0] of the lookup
  output ppn_t   ppn_out
);

  always_comb begin
    if (n) ppn_out = {ppn_stored[PPN_BITS-1:NAPOT_BITS], vpn_napot};
    else   ppn_out = ppn_stored;
  end

endmodule
