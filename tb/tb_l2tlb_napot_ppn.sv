// tb_l2tlb_napot_ppn: checks the PPN a hit returns for both page sizes.
//
// For N = 0 the stored PPN must come out unchanged. For N = 1 the result
// must be (stored PPN >> 4) * 16 + VPN[3:0], computed here with integer
// arithmetic; a 64KB page at region base B maps its 16 pages to B .. B+15.
module tb_l2tlb_napot_ppn;
  import svnapot_pkg::*;

  int checks = 0, failures = 0;

  logic   n;
  ppn_t   ppn_stored, ppn_out;
  napot_t off;

  l2tlb_napot_ppn dut (.n(n), .ppn_stored(ppn_stored), .vpn_napot(off), .ppn_out(ppn_out));

  task automatic check(longint unsigned exp);
    checks++;
    if (longint'(ppn_out) != exp) begin
      failures++;
      $display("FAIL n=%0d ppn=%h off=%h got=%h exp=%h", n, ppn_stored, off, ppn_out, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned p;
    for (int i = 0; i < 2000; i++) begin
      p = {$urandom, $urandom} & ((64'd1 << PPN_BITS) - 1);
      n = 1'($urandom);
      off = napot_t'($urandom);
      if (n) p = (p & ~64'hF) | 64'h8;  // NAPOT encoding in the PTE
      ppn_stored = ppn_t'(p);
      #1;
      check(n ? ((p >> 4) * 16 + longint'(off)) : p);
    end
    // every page of one region
    n = 1'b1;
    ppn_stored = 44'h0000ABCD008;
    for (int o = 0; o < 16; o++) begin
      off = napot_t'(o);
      #1;
      check(64'h0000ABCD000 + o);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
