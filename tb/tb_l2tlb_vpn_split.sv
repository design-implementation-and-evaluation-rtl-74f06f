// tb_l2tlb_vpn_split: checks the TAG | INDEX | NAPOT split of a VPN.
//
// Two instances (64 sets, the 16-way default, and 256 sets, the 4-way
// organisation of the same 1024 entries) are driven with random and corner
// VPNs. The expected index is (VPN >> 4) mod SETS and the expected tag is
// ((VPN >> (4 + log2 SETS)) << 4) | (VPN mod 16), computed with integer
// arithmetic. Also checked: the 16 pages of one 64KB region share a set,
// and consecutive 64KB regions go to consecutive sets.
module tb_l2tlb_vpn_split;
  import svnapot_pkg::*;

  int checks = 0, failures = 0;

  vpn_t        vpn;
  logic [5:0]  idx64;
  logic [20:0] tag64;
  logic [7:0]  idx256;
  logic [18:0] tag256;

  l2tlb_vpn_split #(.SETS(64))  dut64  (.vpn(vpn), .idx(idx64),  .tag(tag64));
  l2tlb_vpn_split #(.SETS(256)) dut256 (.vpn(vpn), .idx(idx256), .tag(tag256));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s vpn=%h got=%h exp=%h", what, vpn, got, exp);
    end
  endtask

  task automatic try_vpn(vpn_t v);
    longint unsigned x;
    vpn = v;
    #1;
    x = longint'(v);
    check("idx64",  idx64,  (x >> 4) % 64);
    check("tag64",  tag64,  ((x >> 10) << 4) | (x % 16));
    check("idx256", idx256, (x >> 4) % 256);
    check("tag256", tag256, ((x >> 12) << 4) | (x % 16));
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [5:0] first_idx;
    try_vpn('0);
    try_vpn('1);
    try_vpn(27'h0000010);
    try_vpn(27'h4000000);
    for (int i = 0; i < 2000; i++) try_vpn(vpn_t'($urandom));
    // the pages of a 64KB region share a set; the next region is the next set
    vpn = 27'h1234560; #1; first_idx = idx64;
    for (int p = 0; p < 16; p++) begin
      vpn = 27'h1234560 + vpn_t'(p); #1;
      check("region set", idx64, first_idx);
    end
    vpn = 27'h1234570; #1;
    check("next region", idx64, 6'(first_idx + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
