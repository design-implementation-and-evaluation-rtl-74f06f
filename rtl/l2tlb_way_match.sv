// l2tlb_way_match: lookup compare of one L2 TLB set.
//
// Every way of the set read from the entry array is compared with the tag
// of the looked-up VPN. The tag holds the VPN's NAPOT bits (VPN[3:0]) at
// its bottom. A 4KB entry (N = 0) must match the whole tag. A 64KB entry
// (N = 1) covers all 16 pages of its region, so its NAPOT bits are left
// out of the compare; this is the "simple logic to distinguish between 4KB
// and 64KB pages" that SVNAPOT adds. The hitting entry's data is selected;
// should several ways hit (the design never inserts a translation it
// already holds, but software may map a region both ways), the lowest
// numbered way wins, a choice of this design.
//
// Purely combinational.
module l2tlb_way_match
  import svnapot_pkg::*;
#(
  parameter int unsigned WAYS     = 16,
  parameter int unsigned TAG_BITS = 21,
  localparam int unsigned WAY_BITS = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [WAYS-1:0]     valid,
  input  logic [TAG_BITS-1:0] tag  [WAYS],
  input  tlb_data_t           data [WAYS],
  input  logic [TAG_BITS-1:0] lookup_tag,
  output logic [WAYS-1:0]     way_hit,
  output logic                hit,
  output logic [WAY_BITS-1:0] hit_way,
  output tlb_data_t           hit_data
);

  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      if (data[w].n)
        way_hit[w] = valid[w] &&
          (tag[w][TAG_BITS-1:NAPOT_BITS] == lookup_tag[TAG_BITS-1:NAPOT_BITS]);
      else
        way_hit[w] = valid[w] && (tag[w] == lookup_tag);
    end
  end

  always_comb begin
    hit      = 1'b0;
    hit_way  = '0;
    hit_data = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (way_hit[w]) begin
        hit      = 1'b1;
        hit_way  = WAY_BITS'(w);
        hit_data = data[w];
      end
    end
  end

endmodule
