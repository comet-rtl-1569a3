// tb_counter_table: drives the default counter table (4 x 512 counters of 5
// bits) with reads of rows drawn from a small pool, so counter groups collide,
// followed by a conservative update, a set to N_PR = 31, or nothing. Checks
// the group values, Min_Ctr and the minimum mask against a sketch model kept
// here, and checks that a clear keeps clr_busy high for 512 cycles and zeroes
// every counter.
module tb_counter_table;
  localparam int NPR = 31;
  logic clk = 0, rst_n = 0;
  logic rd_en = 0, upd_inc = 0, upd_set = 0, clr_start = 0, clr_busy;
  logic [16:0] rd_row = 0;
  logic [4:0]  min_ctr;
  logic [3:0]  is_min;
  logic [3:0][4:0] vals;
  int checks = 0, failures = 0;
  int ct [4][512];
  logic [16:0] pool [24];

  counter_table dut (.clk(clk), .rst_n(rst_n), .rd_en(rd_en), .rd_row(rd_row),
    .min_ctr(min_ctr), .is_min(is_min), .vals(vals), .upd_inc(upd_inc), .upd_set(upd_set),
    .set_val(5'(NPR)), .clr_start(clr_start), .clr_busy(clr_busy));
  always #5 clk = ~clk;

  function automatic int h(int i, logic [16:0] r);
    int sh [4] = '{0, 2, 5, 8};
    return int'((r >> sh[i]) & 17'h1FF);
  endfunction

  task automatic do_clear();
    int busy_cycles = 0;
    @(negedge clk); clr_start = 1;
    @(negedge clk); clr_start = 0;
    while (clr_busy) begin busy_cycles++; @(negedge clk); end
    checks++;
    if (busy_cycles != 512) begin failures++; $display("FAIL clear took %0d cycles", busy_cycles); end
    foreach (ct[i, j]) ct[i][j] = 0;
  endtask

  initial begin
    foreach (pool[i]) pool[i] = 17'($urandom);
    // rows that share windows with pool[0]: same low bits / same high bits
    pool[1] = {pool[0][16:9], ~pool[0][8:0]} ^ 17'h00100; // shares the top window
    pool[2] = {~pool[0][16:9], pool[0][8:0]};             // shares the bottom window
    repeat (2) @(negedge clk);
    rst_n = 1;
    do_clear();
    for (int n = 0; n < 6000; n++) begin
      int m, act;
      logic [3:0] mask;
      logic [16:0] r;
      if (n == 3000) do_clear();
      r = pool[$urandom_range(0, 23)];
      @(negedge clk); rd_en = 1; rd_row = r;
      @(negedge clk); rd_en = 0; rd_row = 17'($urandom);
      m = 99;
      for (int i = 0; i < 4; i++) if (ct[i][h(i, r)] < m) m = ct[i][h(i, r)];
      for (int i = 0; i < 4; i++) mask[i] = (ct[i][h(i, r)] == m);
      checks++;
      if (min_ctr != 5'(m) || is_min != mask) begin
        failures++; $display("FAIL n=%0d row=%h min %0d exp %0d mask %b exp %b", n, r, min_ctr, m, is_min, mask);
      end
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (vals[i] != 5'(ct[i][h(i, r)])) begin failures++; $display("FAIL val %0d", i); end
      end
      act = $urandom_range(0, 9);
      if (act < 7 && m + 1 < NPR) begin
        upd_inc = 1;
        for (int i = 0; i < 4; i++) if (mask[i]) ct[i][h(i, r)] = m + 1;
      end else if (act < 8) begin
        upd_set = 1;
        for (int i = 0; i < 4; i++) ct[i][h(i, r)] = NPR;
      end
      @(negedge clk); upd_inc = 0; upd_set = 0;
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
