// tb_recent_aggressor_table: an 8-entry table driven with lookups of rows from
// a pool of 20, each followed by increment/clear (on a hit) or allocation (on
// a miss). A model here tracks tags and counters; free entries must be filled
// lowest first, and when the table is full the entry the table reports
// replacing is read from its allocation register and must hold a valid entry.
// Checks hit, RAT_Ctr, evicted, clr_all, and that evictions spread over
// several entries (random choice). The default 128-entry table is filled and
// searched once as well.
module tb_recent_aggressor_table;
  import comet_pkg::*;
  logic clk = 0, rst_n = 0, lookup = 0, clr_all = 0;
  logic [16:0] row = 0;
  logic hit, evicted;
  logic [4:0] ctr;
  rat_op_e op = RAT_NOP;
  int checks = 0, failures = 0;

  bit   mv [8];
  logic [16:0] mt [8];
  int   mc [8];
  int   evict_hist [8];
  logic [16:0] pool [20];

  recent_aggressor_table #(.N_ENTRIES(8)) dut (.*);

  // default size instance
  logic lookup_d = 0, hit_d, ev_d;
  logic [16:0] row_d = 0;
  logic [4:0] ctr_d;
  rat_op_e op_d = RAT_NOP;
  recent_aggressor_table dut_d (.clk(clk), .rst_n(rst_n), .lookup(lookup_d), .row(row_d),
    .hit(hit_d), .ctr(ctr_d), .op(op_d), .evicted(ev_d), .clr_all(1'b0));

  always #5 clk = ~clk;

  initial begin
    foreach (pool[i]) pool[i] = 17'($urandom) ^ 17'(i);
    foreach (mv[i]) mv[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int e, free_e;
      bit full;
      logic [16:0] r;
      if (n == 2500) begin
        @(negedge clk); clr_all = 1; @(negedge clk); clr_all = 0;
        foreach (mv[i]) mv[i] = 0;
      end
      r = pool[$urandom_range(0, 19)];
      e = -1; free_e = -1;
      for (int i = 0; i < 8; i++) begin
        if (mv[i] && mt[i] == r) e = i;
        if (!mv[i] && free_e < 0) free_e = i;
      end
      full = (free_e < 0);
      @(negedge clk); lookup = 1; row = r;
      @(negedge clk); lookup = 0; row = 17'($urandom);
      checks++;
      if (hit != (e >= 0) || (e >= 0 && ctr != 5'(mc[e]))) begin
        failures++; $display("FAIL n=%0d hit %b exp %b ctr %0d", n, hit, e >= 0, ctr);
      end
      if (e >= 0) begin
        if ($urandom_range(0, 4) == 0) begin op = RAT_CLEAR; mc[e] = 0; end
        else if (mc[e] < 30) begin op = RAT_INC; mc[e]++; end
      end else begin
        int a;
        op = RAT_ALLOC;
        a = full ? int'(dut.alloc_idx_q) : free_e;
        checks++;
        if (int'(dut.alloc_idx_q) != a) begin failures++; $display("FAIL free entry %0d exp %0d", dut.alloc_idx_q, a); end
        #1;
        checks++;
        if (evicted != full) begin failures++; $display("FAIL evicted %b exp %b", evicted, full); end
        if (full) evict_hist[a]++;
        mv[a] = 1; mt[a] = r; mc[a] = 0;
      end
      @(negedge clk); op = RAT_NOP;
    end
    begin
      int used = 0;
      foreach (evict_hist[i]) if (evict_hist[i] > 0) used++;
      checks++;
      if (used < 6) begin failures++; $display("FAIL evictions not spread: %p", evict_hist); end
    end
    // default table: fill 128 entries, then every one must hit, and one more evicts
    for (int i = 0; i < 129; i++) begin
      @(negedge clk); lookup_d = 1; row_d = 17'(i * 7 + 3);
      @(negedge clk); lookup_d = 0; op_d = RAT_ALLOC;
      #1;
      checks++;
      if (ev_d != (i == 128)) begin failures++; $display("FAIL default evict at %0d", i); end
      @(negedge clk); op_d = RAT_NOP;
    end
    for (int i = 1; i < 128; i += 9) begin
      @(negedge clk); lookup_d = 1; row_d = 17'(i * 7 + 3);
      @(negedge clk); lookup_d = 0;
      checks++;
      if (!hit_d && row_d != 17'(3)) begin failures++; $display("FAIL default hit %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
