// tlb_stress_run: one L2 TLB of 1024 entries and WAYS ways, driven by a
// TLB-stress style access stream, with the page-table walker modelled.
//
// On start, the TLB is flushed, then the chunk of `pages` 4KB pages is
// swept once linearly (warm-up) and then accessed again `pages` times,
// linearly or at random pages of the chunk (measured pass). Every access
// is a lookup; a miss is answered by inserting the page table's PTE, as
// the walker would. The pages are backed by 4KB pages, or by 64KB SVNAPOT
// pages when use_64k is set. Misses of both passes are counted; hits must
// return the page table's PPN (errors counts those that do not), and each
// response must come 3 cycles after its lookup.
module tlb_stress_run
  import svnapot_pkg::*;
#(
  parameter int unsigned WAYS = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic use_64k,
  input  logic random_order,
  input  int   pages,
  output logic done,
  output int   warm_misses,
  output int   meas_misses,
  output int   errors
);

  localparam vpn_t BASE = 27'h0100000;   // chunk base, aligned to 64KB and to set 0

  logic   req_valid, resp_valid, resp_hit, resp_n;
  vpn_t   req_vpn, resp_vpn;
  ppn_t   resp_ppn;
  flags_t resp_flags;
  logic   ins_valid, flush_valid, flush_all;
  vpn_t   ins_vpn, flush_vpn;
  pte_t   ins_pte;

  svnapot_l2tlb #(.ENTRIES(1024), .WAYS(WAYS)) dut (.*);

  function automatic ppn_t translate(vpn_t v, bit big);
    return big ? {17'h0F0F0, v[26:4], v[3:0]} : {17'h1ABCD, v};
  endfunction

  function automatic pte_t pte_of(vpn_t v, bit big);
    ppn_t p;
    p = big ? {17'h0F0F0, v[26:4], 4'b1000} : translate(v, 1'b0);
    return {big, 9'b0, p, 2'b00, 8'hC7};
  endfunction

  task automatic access(vpn_t v, bit big, output bit hit);
    @(negedge clk);
    req_valid = 1; req_vpn = v;
    @(negedge clk);
    req_valid = 0;
    @(posedge clk);
    if (resp_valid) errors++;         // one cycle too early
    @(posedge clk);
    #1;
    if (!resp_valid) errors++;
    hit = resp_hit;
    if (hit && resp_ppn != translate(v, big)) errors++;
    if (!hit) begin
      @(negedge clk);
      ins_valid = 1; ins_vpn = v; ins_pte = pte_of(v, big);
      @(negedge clk);
      ins_valid = 0;
    end
  endtask

  initial begin
    bit h;
    req_valid = 0; req_vpn = '0; ins_valid = 0; ins_vpn = '0; ins_pte = '0;
    flush_valid = 0; flush_vpn = '0; flush_all = 0;
    done = 0; warm_misses = 0; meas_misses = 0; errors = 0;
    forever begin
      @(posedge clk iff start);
      done = 0; warm_misses = 0; meas_misses = 0; errors = 0;
      @(negedge clk);
      flush_all = 1;
      @(negedge clk);
      flush_all = 0;
      for (int p = 0; p < pages; p++) begin
        access(BASE + vpn_t'(p), use_64k, h);
        if (!h) warm_misses++;
      end
      for (int i = 0; i < pages; i++) begin
        int p;
        p = random_order ? int'($urandom % pages) : i;
        access(BASE + vpn_t'(p), use_64k, h);
        if (!h) meas_misses++;
      end
      done = 1;
    end
  end

endmodule
