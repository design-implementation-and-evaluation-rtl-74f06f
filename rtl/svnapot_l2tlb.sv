// svnapot_l2tlb: set-associative L2 TLB holding 4KB pages and 64KB SVNAPOT
// pages in the same entries.
//
// The TLB sits between the first-level data TLB and the page-table walker
// (PTW) of an sv39 core. Both page sizes share ENTRIES entries organised as
// SETS = ENTRIES/WAYS sets. To find the set before the page size is known,
// the VPN's low 4 bits are skipped and the next log2(SETS) bits index the
// set (l2tlb_vpn_split), so the 16 pages of a 64KB region always fall in
// the same set. Each entry carries an N bit.
//
//   Insert  (ins_valid, ins_vpn, ins_pte): the leaf PTE returned by the PTW
//           is written into the set of ins_vpn, N taken from PTE bit 63.
//           Single cycle; victim = first invalid way, else pseudo-random.
//   Lookup  (req_valid, req_vpn): pipelined, one per cycle, answer on
//           resp_* exactly 3 cycles later, whether hit or
//           miss and whatever the page size:
//             cycle t   read the set from the entry array
//             cycle t+1 compare all ways (N=1 ignores the NAPOT bits)
//             cycle t+2 form the PPN: N=1 -> {PPN[43:4], VPN[3:0]}
//             cycle t+3 resp_valid, resp_hit, resp_ppn, resp_flags, resp_n
//   Flush   (flush_valid, flush_vpn, flush_all): flush_valid invalidates
//           the whole set that flush_vpn indexes, flush_all every entry.
//           A lookup still in flight when a flush happens answers miss.
//
// From the paper: 1024 entries, 16-way main configuration (4-way also
// evaluated), the VPN partitioning, the N bit set from the PTE, the lookup
// PPN rule, set flush, 3 cycles to report hit or miss. This design's own
// choices: the ports and their handshake (lookups are always accepted),
// the pipeline stages above, the NAPOT bits kept in the tag, replacement,
// flush-all, the squash of in-flight lookups on a flush, and that a write
// in the cycle of a read is not seen by that read. The caller should not
// insert a translation the TLB already holds; if it does, the lowest way
// that hits answers.
//
// rst_n is an asynchronous, active-low reset of the control and valid
// flip-flops; the assertions below also use it to disable themselves,
// which is why a lint tool may see it used both ways.
module svnapot_l2tlb
  import svnapot_pkg::*;
#(
  parameter int unsigned ENTRIES = 1024,
  parameter int unsigned WAYS    = 16,
  localparam int unsigned SETS     = ENTRIES / WAYS,
  localparam int unsigned IDX_BITS = $clog2(SETS),
  localparam int unsigned TAG_BITS = VPN_BITS - IDX_BITS,
  localparam int unsigned WAY_BITS = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic   clk,
  input  logic   rst_n,
  // lookup request from the L1 TLB side
  input  logic   req_valid,
  input  vpn_t   req_vpn,
  // lookup response, LOOKUP_LATENCY cycles after the request
  output logic   resp_valid,
  output logic   resp_hit,
  output vpn_t   resp_vpn,
  output ppn_t   resp_ppn,
  output flags_t resp_flags,
  output logic   resp_n,
  // refill from the page-table walker
  input  logic   ins_valid,
  input  vpn_t   ins_vpn,
  input  pte_t   ins_pte,
  // invalidation (sfence.vma)
  input  logic   flush_valid,
  input  vpn_t   flush_vpn,
  input  logic   flush_all
);

  initial assert (ENTRIES % WAYS == 0 && SETS >= 2 && (1 << IDX_BITS) == SETS)
    else $error("ENTRIES/WAYS must be a power of two, at least 2");

  // ---------------------------------------------------------------- split
  logic [IDX_BITS-1:0] req_idx, ins_idx, flush_idx;
  logic [TAG_BITS-1:0] req_tag, ins_tag;

  l2tlb_vpn_split #(.SETS(SETS)) u_split_req (
    .vpn(req_vpn), .idx(req_idx), .tag(req_tag));
  l2tlb_vpn_split #(.SETS(SETS)) u_split_ins (
    .vpn(ins_vpn), .idx(ins_idx), .tag(ins_tag));
  l2tlb_vpn_split #(.SETS(SETS)) u_split_flush (
    .vpn(flush_vpn), .idx(flush_idx), .tag());

  // ---------------------------------------------------------------- array
  logic [WAYS-1:0]     rd_valid, set_valid;
  logic [TAG_BITS-1:0] rd_tag  [WAYS];
  tlb_data_t           rd_data [WAYS];
  logic [WAY_BITS-1:0] victim;
  logic                any_flush;

  assign any_flush = flush_valid || flush_all;

  l2tlb_entry_array #(.SETS(SETS), .WAYS(WAYS), .TAG_BITS(TAG_BITS)) u_array (
    .clk, .rst_n,
    .rd_en    (req_valid),
    .rd_idx   (req_idx),
    .rd_valid (rd_valid),
    .rd_tag   (rd_tag),
    .rd_data  (rd_data),
    .wr_en    (ins_valid),
    .wr_idx   (ins_idx),
    .wr_way   (victim),
    .wr_tag   (ins_tag),
    .wr_data  (pte_to_data(ins_pte)),
    .set_valid(set_valid),
    .flush_set(flush_valid),
    .flush_idx(flush_idx),
    .flush_all(flush_all)
  );

  l2tlb_replace #(.WAYS(WAYS)) u_replace (
    .clk, .rst_n,
    .set_valid(set_valid),
    .advance  (ins_valid),
    .victim   (victim)
  );

  // ------------------------------------------------- stage 1: tag compare
  logic                s1_valid, s1_kill;
  vpn_t                s1_vpn;
  logic [TAG_BITS-1:0] s1_tag;
  logic [WAYS-1:0]     s1_way_hit;
  logic                s1_hit;
  tlb_data_t           s1_hit_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_kill  <= 1'b0;
      s1_vpn   <= '0;
      s1_tag   <= '0;
    end else begin
      s1_valid <= req_valid;
      s1_kill  <= any_flush;
      s1_vpn   <= req_vpn;
      s1_tag   <= req_tag;
    end
  end

  l2tlb_way_match #(.WAYS(WAYS), .TAG_BITS(TAG_BITS)) u_match (
    .valid     (rd_valid),
    .tag       (rd_tag),
    .data      (rd_data),
    .lookup_tag(s1_tag),
    .way_hit   (s1_way_hit),
    .hit       (s1_hit),
    .hit_way   (),
    .hit_data  (s1_hit_data)
  );

  // --------------------------------------------------- stage 2: PPN form
  logic      s2_valid, s2_hit;
  vpn_t      s2_vpn;
  tlb_data_t s2_data;
  ppn_t      s2_ppn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_hit   <= 1'b0;
      s2_vpn   <= '0;
      s2_data  <= '0;
    end else begin
      s2_valid <= s1_valid;
      s2_hit   <= s1_valid && s1_hit && !s1_kill && !any_flush;
      s2_vpn   <= s1_vpn;
      s2_data  <= s1_hit_data;
    end
  end

  l2tlb_napot_ppn u_ppn (
    .n         (s2_data.n),
    .ppn_stored(s2_data.ppn),
    .vpn_napot (s2_vpn[NAPOT_BITS-1:0]),
    .ppn_out   (s2_ppn)
  );

  // ---------------------------------------------------- stage 3: response
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
      resp_vpn   <= '0;
      resp_ppn   <= '0;
      resp_flags <= '0;
      resp_n     <= 1'b0;
    end else begin
      resp_valid <= s2_valid;
      resp_hit   <= s2_valid && s2_hit && !any_flush;
      resp_vpn   <= s2_vpn;
      resp_ppn   <= s2_ppn;
      resp_flags <= s2_data.flags;
      resp_n     <= s2_data.n;
    end
  end

  // ------------------------------------------------------------ checks
  // A 64KB PTE must carry the NAPOT encoding 4'b1000 in its PPN's low bits.
  assert property (@(posedge clk) disable iff (!rst_n)
    ins_valid && ins_pte[PTE_N_BIT] |-> ins_pte[PTE_PPN_LSB +: NAPOT_BITS] == 4'b1000)
    else $error("64KB PTE inserted without the NAPOT PPN encoding");
  // At most one way hits a set for any lookup of the design's own inserts.
  assert property (@(posedge clk) disable iff (!rst_n)
    s1_valid |-> $onehot0(s1_way_hit))
    else $warning("several ways of a set hit one lookup");

endmodule
