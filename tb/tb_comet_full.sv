// tb_comet_full: the CoMeT channel at its full default size (2 ranks x 16
// banks, 128K rows per bank, N_RH = 125 so N_PR = 31, 4 x 512 counters, 128-entry
// RAT, 256-miss history, EPRT 25 %, 8192 REFs per early refresh).
//
// 1. One row of rank 1, bank 5 is activated: the 31st ACT, and no earlier one,
//    must request refreshes of its two neighbours; the next ACT starts again.
// 2. In rank 0, bank 3, 200 rows (more than the 128 RAT entries) are each
//    hammered to N_PR, then activated again round-robin: rows evicted from the
//    RAT come back as capacity misses, and once more than 64 of the last 256
//    RAT misses are capacity misses the rank gets an early preventive refresh
//    of exactly 8192 REF commands, while rank 1 stays available. Afterwards a
//    hammered row again needs 31 fresh ACTs before it is refreshed.
module tb_comet_full;
  import comet_pkg::*;
  localparam int NB = 32;
  logic clk = 0, rst_n = 0;
  logic act_valid = 0, act_ready;
  logic [0:0] act_rank = 0;
  logic [3:0] act_bank = 0;
  logic [16:0] act_row = 0;
  logic [NB-1:0] pr_valid, pr_ready;
  logic [NB-1:0][16:0] pr_row;
  logic [1:0] ref_valid, ref_ready, early_refresh_active;
  logic periodic_reset;
  tracker_events_t events [NB];
  int checks = 0, failures = 0;
  int refs [2] = '{0, 0};
  int prs [NB];

  comet_top dut (.*);
  always #5 clk = ~clk;

  assign pr_ready  = '1;
  assign ref_ready = 2'b11;

  logic [16:0] last_pr [NB][$];
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < 2; r++) if (ref_valid[r]) refs[r]++;
    for (int b = 0; b < NB; b++) if (pr_valid[b]) begin prs[b]++; last_pr[b].push_back(pr_row[b]); end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // issue one ACT and wait until the bank is ready again; returns the number
  // of victim refreshes the ACT caused
  task automatic act(int rank, int bank, logic [16:0] row, output int nvict);
    int i, prs0, guard;
    i = rank * 16 + bank;
    @(negedge clk);
    guard = 0;
    act_rank = 1'(rank); act_bank = 4'(bank); act_row = row;
    #1;
    while (!act_ready && guard < 20000) begin
      @(negedge clk); guard++;
    end
    prs0 = prs[i];
    act_valid = 1; act_rank = 1'(rank); act_bank = 4'(bank); act_row = row;
    @(negedge clk);
    act_valid = 0;
    guard = 0;
    while (!dut.bank_ready[i] && guard < 20) begin @(negedge clk); guard++; end
    nvict = prs[i] - prs0;
  endtask

  initial begin
    int nv, refresh_at;
    int epr_before;
    foreach (prs[b]) prs[b] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. single aggressor
    refresh_at = -1;
    for (int n = 1; n <= 31; n++) begin
      act(1, 5, 17'd70000, nv);
      if (nv != 0 && refresh_at < 0) refresh_at = n;
    end
    check(refresh_at == 31, $sformatf("first refresh at ACT %0d, expected 31", refresh_at));
    check(last_pr[21].size() == 2 && last_pr[21][0] == 17'd69999 && last_pr[21][1] == 17'd70001,
          "victims 69999 and 70001");
    act(1, 5, 17'd70000, nv);
    check(nv == 0, "counter restarts after refresh (RAT entry)");
    // 2. overflow the RAT of rank 0, bank 3
    for (int a = 0; a < 200; a++)
      for (int n = 0; n < 31; n++) act(0, 3, 17'(a * 613 + 11), nv);
    check(prs[3] >= 400, $sformatf("each of 200 aggressors refreshed (%0d victims)", prs[3]));
    check(refs[0] == 0, "no early refresh yet");
    for (int rep = 0; rep < 3 && refs[0] == 0; rep++)
      for (int a = 0; a < 200 && refs[0] == 0; a++) act(0, 3, 17'(a * 613 + 11), nv);
    check(early_refresh_active[0] || refs[0] > 0, "early refresh started in rank 0");
    // rank 1 remains usable while rank 0 refreshes
    act(1, 7, 17'd5, nv);
    check(early_refresh_active[0], "rank 1 served during rank 0 early refresh");
    while (early_refresh_active[0]) @(negedge clk);
    @(negedge clk);
    check(refs[0] == 8192, $sformatf("rank 0 got %0d REFs", refs[0]));
    check(refs[1] == 0, "rank 1 got no REF");
    // counters were reset: a hammered row needs 31 ACTs again
    refresh_at = -1;
    for (int n = 1; n <= 31; n++) begin
      act(0, 3, 17'(11), nv);
      if (nv != 0 && refresh_at < 0) refresh_at = n;
    end
    check(refresh_at == 31, $sformatf("after early refresh, refresh at ACT %0d", refresh_at));
    $display("full: victims bank3=%0d REFs rank0=%0d", prs[3], refs[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
