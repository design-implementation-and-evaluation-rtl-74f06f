// tb_l2tlb_way_match: checks the N-aware tag compare of one set (4 ways).
//
// Random sets are built around the lookup tag: each way gets the same tag,
// the same region with another 4KB page (tag differs only in its low 4
// bits), or an unrelated tag, with random valid and N bits. The expected
// hits follow the rule: a 4KB entry matches the whole tag, a 64KB entry
// matches when the tags agree above the low 4 bits. The lowest hitting way
// and its data must be selected.
module tb_l2tlb_way_match;
  import svnapot_pkg::*;

  localparam int WAYS = 4, TAG_BITS = 21;

  int checks = 0, failures = 0;

  logic [WAYS-1:0]     valid, way_hit;
  logic [TAG_BITS-1:0] tag [WAYS];
  tlb_data_t           data [WAYS];
  logic [TAG_BITS-1:0] lookup_tag;
  logic                hit;
  logic [1:0]          hit_way;
  tlb_data_t           hit_data;

  l2tlb_way_match #(.WAYS(WAYS), .TAG_BITS(TAG_BITS)) dut (.*);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_hit [WAYS];
    int first;
    int n_napot_hits = 0, n_4k_hits = 0, n_napot_other_page = 0;
    for (int i = 0; i < 3000; i++) begin
      lookup_tag = TAG_BITS'($urandom);
      for (int w = 0; w < WAYS; w++) begin
        int kind;
        kind     = $urandom % 3;
        valid[w] = ($urandom % 4) != 0;
        data[w]  = tlb_data_t'({$urandom, $urandom, $urandom});
        data[w].n = 1'($urandom);
        case (kind)
          0: tag[w] = lookup_tag;
          1: tag[w] = {lookup_tag[TAG_BITS-1:4], lookup_tag[3:0] ^ 4'(1 + $urandom % 15)};
          default: tag[w] = lookup_tag ^ (TAG_BITS'(1) << (4 + $urandom % (TAG_BITS - 4)));
        endcase
      end
      #1;
      first = -1;
      for (int w = WAYS - 1; w >= 0; w--) begin
        longint unsigned t, l;
        t = longint'(tag[w]);
        l = longint'(lookup_tag);
        exp_hit[w] = valid[w] && (data[w].n ? (t / 16 == l / 16) : (t == l));
        if (exp_hit[w]) first = w;
        check("way_hit", way_hit[w], exp_hit[w]);
        if (exp_hit[w] && data[w].n) n_napot_hits++;
        if (exp_hit[w] && !data[w].n) n_4k_hits++;
        if (exp_hit[w] && data[w].n && t != l) n_napot_other_page++;
      end
      check("hit", hit, first >= 0);
      if (first >= 0) begin
        check("hit_way", hit_way, first);
        check("hit_data", hit_data, data[first]);
      end
    end
    check("64KB hits on another page of the region seen", n_napot_other_page > 0, 1);
    $display("4KB hits=%0d 64KB hits=%0d (other page of region: %0d)",
             n_4k_hits, n_napot_hits, n_napot_other_page);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
