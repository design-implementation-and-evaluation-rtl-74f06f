// tb_svnapot_l2tlb: end-to-end test of the SVNAPOT L2 TLB at its default
// size (1024 entries, 16 ways, 64 sets).
//
// The testbench plays both neighbours of the TLB: the L1 TLB side that
// issues lookups, and the page-table walker that answers misses with leaf
// PTEs. Its page table is a fixed function of the VPN: VPNs with bit 26
// clear are mapped by 4KB pages (PPN = {17'h1ABCD, VPN}), VPNs with bit 26
// set by 64KB pages (PTE PPN = {17'h0F0F0, VPN[26:4], 4'b1000}, so the
// translation is {17'h0F0F0, VPN[26:4], VPN[3:0]}).
//
// A reference model tracks what each set holds since its last flush: as
// long as no more than WAYS translations went into a set, a lookup must hit
// exactly when the model holds its 4KB page or its 64KB region; after
// that, replacement makes the set's contents unknown and only the data of
// hits is checked. Every response must arrive exactly 3 cycles after its
// request, and every hit must return the page table's PPN, flags and N.
//
// Phases: fill all 1024 entries with 4KB pages (a 4MB linear sweep) and
// sweep again back-to-back, all hits; overflow a set; flush a set; flush
// all; fill 1024 64KB regions (64MB) and hit on every page of them; mix
// both sizes in one set; flush while lookups are in flight; insert and
// look up in the same cycle. Each mechanism is counted and must occur.
module tb_svnapot_l2tlb;
  import svnapot_pkg::*;

  localparam int ENTRIES = 1024, WAYS = 16, SETS = ENTRIES / WAYS;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   req_valid, resp_valid, resp_hit, resp_n;
  vpn_t   req_vpn, resp_vpn;
  ppn_t   resp_ppn;
  flags_t resp_flags;
  logic   ins_valid, flush_valid, flush_all;
  vpn_t   ins_vpn, flush_vpn;
  pte_t   ins_pte;

  svnapot_l2tlb dut (.*);

  // ------------------------------------------------------------ page table
  function automatic bit is_napot(vpn_t v);
    return v[26];
  endfunction

  function automatic ppn_t translate(vpn_t v);
    return is_napot(v) ? {17'h0F0F0, v[26:4], v[3:0]} : {17'h1ABCD, v};
  endfunction

  function automatic flags_t flags_of(vpn_t v);
    logic [7:0] h;
    h = is_napot(v) ? v[11:4] ^ v[19:12] : v[7:0] ^ v[15:8];
    return flags_t'(8'hC3 | (h & 8'h3C));
  endfunction

  function automatic pte_t pte_of(vpn_t v);
    ppn_t p;
    p = is_napot(v) ? {17'h0F0F0, v[26:4], 4'b1000} : translate(v);
    return {is_napot(v), 9'b0, p, 2'b00, 8'(flags_of(v))};
  endfunction

  // -------------------------------------------------------- set model
  typedef enum logic [1:0] {EXP_MISS, EXP_HIT, EXP_ANY} exp_t;

  vpn_t keys     [SETS][$];   // 4KB VPNs, or 64KB region base VPNs (low bits 0)
  bit   overflow [SETS];

  function automatic int set_of(vpn_t v);
    return int'((v >> 4) % SETS);
  endfunction

  function automatic vpn_t key_of(vpn_t v);
    return is_napot(v) ? {v[26:4], 4'b0} : v;
  endfunction

  function automatic exp_t expect_of(vpn_t v);
    int s;
    s = set_of(v);
    if (overflow[s]) return EXP_ANY;
    foreach (keys[s][i]) if (keys[s][i] == key_of(v)) return EXP_HIT;
    return EXP_MISS;
  endfunction

  // ------------------------------------------------- mechanism counters
  int n_miss = 0, n_hit_4k = 0, n_hit_64k = 0, n_hit_64k_other_page = 0;
  int n_evict = 0, n_flush_set = 0, n_flush_all = 0, n_squash = 0;
  int n_back_to_back = 0, n_ins_and_lookup = 0;

  // ------------------------------------------------------- monitor
  typedef struct {
    vpn_t vpn;
    exp_t exp;
    bit   killed_hit;
    int   issued;
  } pend_t;

  pend_t pending[$];
  int    cycle = 0;
  int    last_resp_cycle = -10;
  bit    last_hit;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h at cycle %0d", what, got, exp, cycle);
    end
  endtask

  always @(posedge clk) begin
    cycle++;
    #1;
    if (pending.size() > 0 && pending[0].issued + 3 < cycle) begin
      failures++;
      $display("FAIL no response for vpn %h", pending[0].vpn);
      void'(pending.pop_front());
    end
    if (resp_valid) begin
      if (pending.size() == 0) begin
        failures++;
        $display("FAIL response without request at cycle %0d", cycle);
      end else begin
        pend_t p;
        p = pending.pop_front();
        check("latency", cycle - p.issued, 3);
        check("resp_vpn", resp_vpn, p.vpn);
        if (p.exp != EXP_ANY) check("hit/miss", resp_hit, p.exp == EXP_HIT);
        if (p.killed_hit) begin
          check("squashed by flush", resp_hit, 0);
          n_squash++;
        end
        if (resp_hit) begin
          check("ppn", resp_ppn, translate(p.vpn));
          check("flags", resp_flags, flags_of(p.vpn));
          check("n", resp_n, is_napot(p.vpn));
          if (is_napot(p.vpn)) n_hit_64k++; else n_hit_4k++;
        end else n_miss++;
        if (last_resp_cycle == cycle - 1) n_back_to_back++;
        last_resp_cycle = cycle;
        last_hit = resp_hit;
      end
    end
  end

  // ------------------------------------------------------------- driver
  // One cycle of stimulus: lookup, insert and flush may all happen. The
  // lookup's expectation is taken before this cycle's insert and flush.
  task automatic drive(bit lk, vpn_t lk_vpn, bit ins, vpn_t i_vpn,
                       bit fl, vpn_t f_vpn, bit fa);
    @(negedge clk);
    req_valid = lk;  req_vpn = lk_vpn;
    ins_valid = ins; ins_vpn = i_vpn; ins_pte = pte_of(i_vpn);
    flush_valid = fl; flush_vpn = f_vpn; flush_all = fa;
    if (lk) pending.push_back('{lk_vpn, expect_of(lk_vpn), 1'b0, cycle});
    if (lk && ins) n_ins_and_lookup++;
    if (ins) begin
      int s;
      s = set_of(i_vpn);
      if (!overflow[s]) begin
        if (keys[s].size() == WAYS) begin
          overflow[s] = 1;
          n_evict++;
        end else keys[s].push_back(key_of(i_vpn));
      end
    end
    if (fl || fa) begin
      foreach (pending[i]) begin
        if (pending[i].exp == EXP_HIT) pending[i].killed_hit = 1;
        pending[i].exp = EXP_MISS;
      end
      for (int s = 0; s < SETS; s++) begin
        if (fa || s == set_of(f_vpn)) begin
          keys[s].delete();
          overflow[s] = 0;
        end
      end
      if (fa) n_flush_all++; else n_flush_set++;
    end
    @(posedge clk);
    @(negedge clk);
    req_valid = 0; ins_valid = 0; flush_valid = 0; flush_all = 0;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic wait_drained();
    while (pending.size() > 0) @(posedge clk);
    #2;
  endtask

  // Look up; on a miss, insert the walker's PTE and look up again.
  task automatic access(vpn_t v, output bit was_hit);
    drive(1, v, 0, '0, 0, '0, 0);
    wait_drained();
    was_hit = last_hit;
    if (!was_hit) begin
      drive(0, '0, 1, v, 0, '0, 0);
      drive(1, v, 0, '0, 0, '0, 0);
      wait_drained();
      check("hit after refill", last_hit, 1);
    end
  endtask

  // Back-to-back lookups, one per cycle.
  task automatic stream(vpn_t vs[$]);
    foreach (vs[i]) begin
      @(negedge clk);
      req_valid = 1; req_vpn = vs[i];
      pending.push_back('{vs[i], expect_of(vs[i]), 1'b0, cycle});
    end
    @(negedge clk);
    req_valid = 0;
    wait_drained();
  endtask

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- test
  initial begin
    bit   h;
    vpn_t base4k, base64k, v;
    vpn_t vs[$];
    int   hits;

    req_valid = 0; req_vpn = '0; ins_valid = 0; ins_vpn = '0; ins_pte = '0;
    flush_valid = 0; flush_vpn = '0; flush_all = 0;
    for (int s = 0; s < SETS; s++) overflow[s] = 0;
    idle(3);
    rst_n = 1;
    idle(2);

    // 1. 4MB linear sweep of 4KB pages: fills all 1024 entries exactly
    base4k = 27'h0123400;
    for (int p = 0; p < ENTRIES; p++) access(base4k + vpn_t'(p), h);
    vs.delete();
    for (int p = 0; p < ENTRIES; p++) vs.push_back(base4k + vpn_t'(p));
    stream(vs);   // second sweep: all must hit, one per cycle

    // 2. one page more: evicts an entry of set 0 of the sweep
    access(base4k + vpn_t'(ENTRIES), h);
    check("17th page of a set misses", h, 0);

    // 3. flush the set of one page: its set misses, the others still hit
    drive(0, '0, 0, '0, 1, base4k + 5, 0);
    vs.delete();
    for (int p = 0; p < 64; p++) vs.push_back(base4k + vpn_t'(p));
    stream(vs);

    // 4. flush all: nothing hits
    drive(0, '0, 0, '0, 0, '0, 1);
    vs.delete();
    for (int p = 0; p < 64; p++) vs.push_back(base4k + vpn_t'(p * 37));
    stream(vs);

    // 5. 64MB of 64KB pages: one refill per region, then every page hits
    base64k = 27'h4560000;
    for (int r = 0; r < ENTRIES; r++) access(base64k + vpn_t'(r * 16), h);
    vs.delete();
    for (int r = 0; r < ENTRIES; r++) vs.push_back(base64k + vpn_t'(r * 16 + int'($urandom % 16)));
    stream(vs);
    vs.delete();
    for (int p = 0; p < 16 * 64; p++) vs.push_back(base64k + vpn_t'(p));
    stream(vs);
    hits = n_hit_64k;
    n_hit_64k_other_page = hits - ENTRIES;

    // 6. both sizes in one set
    drive(0, '0, 0, '0, 0, '0, 1);
    for (int i = 0; i < 8; i++) begin
      access(27'h0200000 + vpn_t'(i * SETS * 16) + vpn_t'(i), h);     // 4KB, set 0
      access(27'h4200000 + vpn_t'(i * SETS * 16), h);                 // 64KB, set 0
    end
    vs.delete();
    for (int i = 0; i < 8; i++) begin
      vs.push_back(27'h0200000 + vpn_t'(i * SETS * 16) + vpn_t'(i));
      vs.push_back(27'h0200000 + vpn_t'(i * SETS * 16) + vpn_t'(i + 1));  // not mapped in TLB
      vs.push_back(27'h4200000 + vpn_t'(i * SETS * 16) + vpn_t'(15 - i));
    end
    stream(vs);

    // 7. flush while hits are in flight: they must answer miss
    v = 27'h4200000 + 3;
    access(v, h);
    @(negedge clk);
    req_valid = 1; req_vpn = v;
    pending.push_back('{v, expect_of(v), 1'b0, cycle});
    @(negedge clk);
    pending.push_back('{v, expect_of(v), 1'b0, cycle});
    drive(0, '0, 0, '0, 1, v, 0);      // two lookups in flight
    wait_drained();
    access(v, h);
    @(negedge clk);
    req_valid = 1; req_vpn = v;
    pending.push_back('{v, expect_of(v), 1'b0, cycle});
    drive(0, '0, 0, '0, 0, '0, 1);     // one lookup in flight
    wait_drained();
    access(v, h);
    drive(1, v, 0, '0, 0, '0, 1);      // lookup in the cycle of the flush
    wait_drained();
    check("lookup with flush misses", last_hit, 0);

    // 8. insert and lookup in the same cycle: the lookup sees the old set
    v = 27'h0333330;
    drive(1, v, 1, v, 0, '0, 0);
    wait_drained();
    check("same-cycle insert not seen", last_hit, 0);
    access(v, h);
    check("seen one cycle later", h, 1);

    idle(5);
    $display("misses=%0d 4KB hits=%0d 64KB hits=%0d (other pages %0d)",
             n_miss, n_hit_4k, n_hit_64k, n_hit_64k_other_page);
    $display("evictions=%0d set flushes=%0d full flushes=%0d squashed=%0d back-to-back=%0d same-cycle=%0d",
             n_evict, n_flush_set, n_flush_all, n_squash, n_back_to_back, n_ins_and_lookup);
    check("miss happened",           n_miss > 0, 1);
    check("4KB hit happened",        n_hit_4k > 0, 1);
    check("64KB hit happened",       n_hit_64k > 0, 1);
    check("64KB hit on another page", n_hit_64k_other_page > 0, 1);
    check("eviction happened",       n_evict > 0, 1);
    check("set flush happened",      n_flush_set > 0, 1);
    check("full flush happened",     n_flush_all > 0, 1);
    check("squash happened",         n_squash > 0, 1);
    check("back-to-back happened",   n_back_to_back > 0, 1);
    check("same-cycle happened",     n_ins_and_lookup > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
