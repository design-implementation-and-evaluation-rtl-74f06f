// l2tlb_entry_array: storage of the SVNAPOT L2 TLB.
//
// SETS x WAYS entries. Each entry is a tag, the data kept from the PTE
// (PPN, flags) and the N bit that SVNAPOT adds: 1024 entries thus add 1024
// bits to the structure and nothing else. Tags and data live in a memory
// array read one set at a time; the valid bits are kept in flip-flops so
// that a whole set, or the whole TLB, can be invalidated in one cycle.
//
// Ports and timing:
//   * Read: rd_en/rd_idx in cycle t; the set's valid bits, tags and data
//     appear on rd_* in cycle t+1 (a synchronous, SRAM-like read). A write
//     or flush in cycle t is not seen by the read of cycle t (read-first).
//   * Write: wr_en writes entry (wr_idx, wr_way) and sets its valid bit at
//     the end of the cycle.
//   * Flush: flush_set clears the valid bits of set flush_idx, flush_all
//     clears every valid bit. A flush wins over a write in the same cycle.
//   * set_valid: the valid bits of set wr_idx, combinationally, for the
//     victim choice of an insert.
//   * Reset clears all valid bits; tags and data are not reset.
// The split into a memory array plus valid flip-flops is this design's
// choice; the paper says only that each entry gains an N bit and that a
// flush invalidates the set.
module l2tlb_entry_array
  import svnapot_pkg::*;
#(
  parameter int unsigned SETS     = 64,
  parameter int unsigned WAYS     = 16,
  parameter int unsigned TAG_BITS = VPN_BITS - $clog2(SETS),
  localparam int unsigned IDX_BITS = $clog2(SETS),
  localparam int unsigned WAY_BITS = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // read port
  input  logic                rd_en,
  input  logic [IDX_BITS-1:0] rd_idx,
  output logic [WAYS-1:0]     rd_valid,
  output logic [TAG_BITS-1:0] rd_tag  [WAYS],
  output tlb_data_t           rd_data [WAYS],
  // write port
  input  logic                wr_en,
  input  logic [IDX_BITS-1:0] wr_idx,
  input  logic [WAY_BITS-1:0] wr_way,
  input  logic [TAG_BITS-1:0] wr_tag,
  input  tlb_data_t           wr_data,
  output logic [WAYS-1:0]     set_valid,
  // invalidation
  input  logic                flush_set,
  input  logic [IDX_BITS-1:0] flush_idx,
  input  logic                flush_all
);

  localparam int unsigned ENTRY_BITS = TAG_BITS + DATA_BITS;

  logic [ENTRY_BITS-1:0] mem [SETS][WAYS];
  logic [WAYS-1:0]       valid_q [SETS];

  // tag and data memory: one set read per cycle, one entry written
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx][wr_way] <= {wr_tag, wr_data};
    if (rd_en) begin
      for (int w = 0; w < WAYS; w++) begin
        rd_tag[w]  <= mem[rd_idx][w][ENTRY_BITS-1 -: TAG_BITS];
        rd_data[w] <= tlb_data_t'(mem[rd_idx][w][DATA_BITS-1:0]);
      end
    end
  end

  // valid bits
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
      rd_valid <= '0;
    end else begin
      if (rd_en) rd_valid <= valid_q[rd_idx];
      if (flush_all) begin
        for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
      end else begin
        if (wr_en) valid_q[wr_idx][wr_way] <= 1'b1;
        if (flush_set) valid_q[flush_idx] <= '0;
      end
    end
  end

  assign set_valid = valid_q[wr_idx];

endmodule
