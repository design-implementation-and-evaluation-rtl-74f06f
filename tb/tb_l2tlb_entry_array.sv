// tb_l2tlb_entry_array: random reads, writes and flushes of a small array
// (8 sets x 4 ways) against a reference model kept in the testbench.
//
// Inputs change on the falling edge. A read issued in cycle t must return,
// in cycle t+1, the set as it was before the writes and flushes of cycle t
// (read-first). set_valid must always show the valid bits of set wr_idx.
// The model applies a write before a flush of the same cycle, so a flush
// wins.
module tb_l2tlb_entry_array;
  import svnapot_pkg::*;

  localparam int SETS = 8, WAYS = 4, TAG_BITS = VPN_BITS - 3;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                rd_en, wr_en, flush_set, flush_all;
  logic [2:0]          rd_idx, wr_idx, flush_idx;
  logic [1:0]          wr_way;
  logic [TAG_BITS-1:0] wr_tag;
  tlb_data_t           wr_data;
  logic [WAYS-1:0]     rd_valid, set_valid;
  logic [TAG_BITS-1:0] rd_tag  [WAYS];
  tlb_data_t           rd_data [WAYS];

  l2tlb_entry_array #(.SETS(SETS), .WAYS(WAYS), .TAG_BITS(TAG_BITS)) dut (.*);

  // reference model
  bit                  m_valid [SETS][WAYS];
  logic [TAG_BITS-1:0] m_tag   [SETS][WAYS];
  tlb_data_t           m_data  [SETS][WAYS];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit                  e_valid [WAYS];
    logic [TAG_BITS-1:0] e_tag   [WAYS];
    tlb_data_t           e_data  [WAYS];
    bit                  did_read;
    int                  n_flush_set = 0, n_flush_all = 0, n_write = 0;

    rd_en = 0; wr_en = 0; flush_set = 0; flush_all = 0;
    rd_idx = 0; wr_idx = 0; flush_idx = 0; wr_way = 0; wr_tag = 0; wr_data = '0;
    foreach (m_valid[s, w]) m_valid[s][w] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      rd_en     = ($urandom % 4) != 0;
      rd_idx    = 3'($urandom);
      wr_en     = ($urandom % 2) != 0;
      wr_idx    = 3'($urandom);
      wr_way    = 2'($urandom);
      wr_tag    = TAG_BITS'($urandom);
      wr_data   = tlb_data_t'({$urandom, $urandom, $urandom});
      flush_set = ($urandom % 16) == 0;
      flush_idx = 3'($urandom);
      flush_all = ($urandom % 200) == 0;
      #1;
      for (int w = 0; w < WAYS; w++)
        check("set_valid", set_valid[w], m_valid[wr_idx][w]);
      did_read = rd_en;
      for (int w = 0; w < WAYS; w++) begin
        e_valid[w] = m_valid[rd_idx][w];
        e_tag[w]   = m_tag[rd_idx][w];
        e_data[w]  = m_data[rd_idx][w];
      end
      @(posedge clk);
      // model update: write, then flush
      if (wr_en) begin
        m_valid[wr_idx][wr_way] = 1;
        m_tag[wr_idx][wr_way]   = wr_tag;
        m_data[wr_idx][wr_way]  = wr_data;
        n_write++;
      end
      if (flush_set) begin
        for (int w = 0; w < WAYS; w++) m_valid[flush_idx][w] = 0;
        n_flush_set++;
      end
      if (flush_all) begin
        foreach (m_valid[s, w]) m_valid[s][w] = 0;
        n_flush_all++;
      end
      #1;
      if (did_read) begin
        for (int w = 0; w < WAYS; w++) begin
          check("rd_valid", rd_valid[w], e_valid[w]);
          if (e_valid[w]) begin
            check("rd_tag", rd_tag[w], e_tag[w]);
            check("rd_data", rd_data[w], e_data[w]);
          end
        end
      end
    end
    check("flush_set happened", n_flush_set > 0, 1);
    check("flush_all happened", n_flush_all > 0, 1);
    $display("writes=%0d set flushes=%0d full flushes=%0d", n_write, n_flush_set, n_flush_all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
