// tb_tlb_stress: the TLB-stress microbenchmark on the L2 TLB alone.
//
// Evaluated organisations: 1024 entries, 4-way (256 sets) and 16-way (64
// sets), each with 4KB or 64KB pages, chunks swept linearly (pattern A)
// or at random (pattern B). There is no L1 TLB in front, so every access
// reaches the L2 TLB. Expected results come from reach arithmetic:
//   * 16-way, 4KB: 1024 pages = 4MB fit, all hit after warm-up; 8MB do not.
//   * 16-way, 64KB: 1024 regions = 64MB fit; the warm-up misses once per
//     64KB region, not once per page (one walk serves 16 pages); 128MB do
//     not fit.
//   * 4-way, 4KB: the index skips the low 4 VPN bits, so 16 consecutive
//     pages share one 4-way set: 4 pages (16KB) fit, 16 pages (64KB)
//     already thrash, and so does 4MB.
//   * 4-way, 64KB: consecutive regions go to consecutive sets; 64MB fit.
module tb_tlb_stress;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start4 = 0, start16 = 0, big = 0, rnd = 0;
  int   pages = 0;
  logic done4, done16;
  int   warm4, meas4, err4, warm16, meas16, err16;

  tlb_stress_run #(.WAYS(4)) u4 (
    .clk, .rst_n, .start(start4), .use_64k(big), .random_order(rnd), .pages,
    .done(done4), .warm_misses(warm4), .meas_misses(meas4), .errors(err4));
  tlb_stress_run #(.WAYS(16)) u16 (
    .clk, .rst_n, .start(start16), .use_64k(big), .random_order(rnd), .pages,
    .done(done16), .warm_misses(warm16), .meas_misses(meas16), .errors(err16));

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ways, 64KB pages, random order, chunk in 4KB pages, measured pass must be miss-free
  task automatic run_case(int ways, bit b, bit r, int n, bit fits);
    int warm, meas, err;
    @(negedge clk);
    big = b; rnd = r; pages = n;
    if (ways == 4) start4 = 1; else start16 = 1;
    @(negedge clk);
    start4 = 0; start16 = 0;
    @(negedge clk);
    if (ways == 4) begin
      wait (done4);
      warm = warm4; meas = meas4; err = err4;
    end else begin
      wait (done16);
      warm = warm16; meas = meas16; err = err16;
    end
    $display("%2d-way %s %s chunk=%0dKB: warm-up misses=%0d measured misses=%0d",
             ways, b ? "64KB" : " 4KB", r ? "random" : "linear", n * 4, warm, meas);
    check("translations correct", err == 0);
    check("warm-up walks", warm == (b ? (n + 15) / 16 : n));
    if (fits) check("fits in reach: no misses", meas == 0);
    else      check("beyond reach: misses", meas > 0);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // pattern A, linear
    run_case(4,  0, 0, 4,     1);
    run_case(4,  0, 0, 16,    0);
    run_case(4,  0, 0, 1024,  0);
    run_case(16, 0, 0, 16,    1);
    run_case(16, 0, 0, 1024,  1);
    run_case(16, 0, 0, 2048,  0);
    run_case(4,  1, 0, 16384, 1);
    run_case(16, 1, 0, 16384, 1);
    run_case(16, 1, 0, 32768, 0);
    // pattern B, random
    run_case(16, 0, 1, 1024,  1);
    run_case(16, 0, 1, 4096,  0);
    run_case(16, 1, 1, 16384, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
