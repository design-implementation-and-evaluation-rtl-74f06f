// svnapot_pkg: widths and field positions shared by the SVNAPOT L2 TLB.
//
// The TLB translates sv39 virtual page numbers (27 bits: three 9-bit
// levels) into 44-bit physical page numbers. A 64KB SVNAPOT page covers 16
// naturally aligned 4KB pages, so the low NAPOT_BITS = 4 bits of the VPN
// select the 4KB page inside it. The PTE layout (N in bit 63, PPN in bits
// 53:10, flags D A G U X W R V in bits 7:0) is the RISC-V privileged
// architecture's sv39 leaf PTE; the TLB takes the N bit from it on insert.
package svnapot_pkg;

  localparam int unsigned VPN_BITS   = 27;  // sv39 virtual page number
  localparam int unsigned PPN_BITS   = 44;  // sv39 physical page number
  localparam int unsigned NAPOT_BITS = 4;   // 64KB / 4KB = 16 pages
  localparam int unsigned PTE_BITS   = 64;
  localparam int unsigned FLAG_BITS  = 8;

  // sv39 PTE field positions
  localparam int unsigned PTE_N_BIT   = 63;
  localparam int unsigned PTE_PPN_LSB = 10;

  typedef logic [VPN_BITS-1:0]   vpn_t;
  typedef logic [PPN_BITS-1:0]   ppn_t;
  typedef logic [PTE_BITS-1:0]   pte_t;
  typedef logic [NAPOT_BITS-1:0] napot_t;

  // PTE flag bits, in PTE order (bit 7 down to bit 0)
  typedef struct packed {
    logic d;
    logic a;
    logic g;
    logic u;
    logic x;
    logic w;
    logic r;
    logic v;
  } flags_t;

  // What the TLB keeps of a leaf PTE besides its tag.
  typedef struct packed {
    logic   n;      // 1: entry maps a 64KB NAPOT page
    ppn_t   ppn;    // PPN as found in the PTE
    flags_t flags;
  } tlb_data_t;

  localparam int unsigned DATA_BITS = $bits(tlb_data_t);

  // Split a leaf PTE into the fields the TLB stores.
  function automatic tlb_data_t pte_to_data(pte_t pte);
    tlb_data_t d;
    d.n     = pte[PTE_N_BIT];
    d.ppn   = pte[PTE_PPN_LSB +: PPN_BITS];
    d.flags = flags_t'(pte[FLAG_BITS-1:0]);
    return d;
  endfunction

endpackage
