// tb_comet_attacks: the two attack workloads of the evaluation, run on the
// CoMeT channel at its full default size (2 ranks x 16 banks, N_PR = 31).
// The channel issues one ACT every 24 cycles (20 ns at the 833 ps clock).
//
// A security monitor watches every accepted ACT and every preventive refresh.
// Per (bank, row) it counts ACTs since the row's neighbours were last
// refreshed. A refresh request whose victim is next to the bank's last
// activated row resets that row's count. The end of an early preventive
// refresh resets every row of the rank. The count must never exceed N_PR.
//
// Phase A, the traditional double-sided attack: every one of the 32 banks
// alternately hammers the two neighbours of one victim row, 100 ACTs per
// aggressor. Each aggressor must get at least floor(100 / 31) refreshes of
// both its victims, and no early refresh may happen.
//
// Phase B, the targeted attack on the RAT: in rank 1, banks 0..3 each hammer
// 160 rows (more than the 128 RAT entries) round-robin. Rows evicted from the
// RAT come back as capacity misses until the rank needs an early preventive
// refresh. Meanwhile benign random ACTs to rank 0 keep flowing: rank 0 must be
// served during rank 1's early refresh and must get no early refresh of its
// own. The test counts early refreshes and checks that each one issues
// exactly 8192 REF commands.
module tb_comet_attacks;
  import comet_pkg::*;
  localparam int NB = 32;
  localparam int SLOT = 24;
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

  comet_top dut (.*);
  always #5 clk = ~clk;

  assign pr_ready  = '1;
  assign ref_ready = 2'b11;

  // security monitor
  int cnt [int];
  int maxcnt = 0, bad_victim = 0;
  int prs [NB], nacts [NB];
  int refs [2] = '{0, 0};
  int n_epr [2] = '{0, 0};
  int refs_at_start [2];
  int bad_ref_total = 0;
  int r0_during_r1_epr = 0;
  logic [16:0] last_row [NB];
  logic [1:0] epr_q = '0;

  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < 2; r++) begin
      if (early_refresh_active[r] && !epr_q[r]) begin
        n_epr[r]++;
        refs_at_start[r] = refs[r];
      end
      if (ref_valid[r] && ref_ready[r]) refs[r]++;
      if (!early_refresh_active[r] && epr_q[r]) begin
        if (refs[r] - refs_at_start[r] != N_REF) bad_ref_total++;
        foreach (cnt[k]) if ((k >> 17) / 16 == r) cnt[k] = 0;
      end
    end
    epr_q <= early_refresh_active;
    for (int b = 0; b < NB; b++) if (pr_valid[b] && pr_ready[b]) begin
      prs[b]++;
      if (pr_row[b] != last_row[b] - 17'd1 && pr_row[b] != last_row[b] + 17'd1) bad_victim++;
      cnt[(b << 17) + int'(last_row[b])] = 0;
    end
    if (act_valid && act_ready) begin
      int k, s;
      s = int'(act_rank) * 16 + int'(act_bank);
      k = (s << 17) + int'(act_row);
      if (!cnt.exists(k)) cnt[k] = 0;
      cnt[k]++;
      if (cnt[k] > maxcnt) maxcnt = cnt[k];
      nacts[s]++;
      last_row[s] <= act_row;
      if (act_rank == 1'b0 && early_refresh_active[1]) r0_during_r1_epr++;
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // offer one ACT for a single cycle; returns 1 if it was accepted, then lets
  // the rest of the 24-cycle slot pass
  task automatic try_act(int rank, int bank, logic [16:0] row, output bit ok);
    @(negedge clk);
    act_valid = 1; act_rank = 1'(rank); act_bank = 4'(bank); act_row = row;
    #1;
    ok = act_ready;
    @(negedge clk);
    act_valid = 0;
    if (ok) repeat (SLOT - 2) @(negedge clk);
  endtask

  // issue one ACT, waiting for the bank if needed
  task automatic act(int rank, int bank, logic [16:0] row);
    bit ok;
    int guard;
    guard = 0;
    do begin
      try_act(rank, bank, row, ok);
      guard++;
    end while (!ok && guard < 20000);
    if (!ok) begin failures++; $display("FAIL ACT to rank %0d bank %0d never accepted", rank, bank); end
  endtask

  // an ACT to rank 1 in phase B: while rank 1 is busy, benign rank-0 ACTs
  // use the channel instead
  task automatic act_r1(int bank, logic [16:0] row);
    bit ok;
    int guard;
    guard = 0;
    do begin
      try_act(1, bank, row, ok);
      if (!ok) act(0, $urandom_range(15), 17'($urandom));
      guard++;
    end while (!ok && guard < 20000);
    if (!ok) begin failures++; $display("FAIL rank 1 bank %0d never accepted", bank); end
  endtask

  initial begin
    int victim [NB];
    int min_prs, rounds;
    foreach (prs[b]) begin prs[b] = 0; nacts[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Phase A: double-sided attack on every bank
    foreach (victim[b]) victim[b] = 1000 + b * 3989;
    for (int n = 0; n < 100; n++)
      for (int side = 0; side < 2; side++)
        for (int b = 0; b < NB; b++)
          act(b / 16, b % 16, 17'(victim[b] + (side != 0 ? 1 : -1)));
    repeat (10) @(negedge clk);
    min_prs = prs[0];
    foreach (prs[b]) if (prs[b] < min_prs) min_prs = prs[b];
    check(min_prs >= 2 * 2 * (100 / 31), $sformatf("every bank refreshed >= 12 victims (min %0d)", min_prs));
    check(maxcnt <= N_PR, $sformatf("phase A: max ACTs without refresh %0d <= %0d", maxcnt, N_PR));
    check(n_epr[0] == 0 && n_epr[1] == 0, "phase A: no early refresh");
    $display("phase A: %0d ACTs per bank, min victims per bank %0d, max unrefreshed ACTs %0d",
             nacts[0], min_prs, maxcnt);
    // Phase B: targeted attack on the RAT of rank 1
    rounds = 0;
    while (n_epr[1] == 0 && rounds < 60) begin
      for (int a = 0; a < 160; a++)
        for (int b = 0; b < 4; b++) begin
          act_r1(b, 17'(a * 701 + b * 13 + 50));
          if (a % 4 == 3 && b == 3) act(0, $urandom_range(15), 17'($urandom));
        end
      rounds++;
    end
    check(n_epr[1] >= 1, $sformatf("targeted attack caused an early refresh after %0d rounds", rounds));
    // a few more rank-1 ACTs: they wait until the early refresh is over, while
    // rank 0 keeps being served
    for (int a = 0; a < 8; a++) act_r1(a % 4, 17'(a * 701 + 50));
    while (early_refresh_active != 0) @(negedge clk);
    repeat (4) @(negedge clk);
    check(r0_during_r1_epr > 0, $sformatf("rank 0 served during rank 1 early refresh (%0d ACTs)", r0_during_r1_epr));
    check(n_epr[0] == 0, "benign rank 0 got no early refresh");
    check(refs[0] == 0, "rank 0 got no REF");
    check(refs[1] == n_epr[1] * N_REF, $sformatf("rank 1: %0d REFs for %0d early refreshes", refs[1], n_epr[1]));
    check(bad_ref_total == 0, "each early refresh had exactly 8192 REFs");
    check(bad_victim == 0, $sformatf("%0d refreshes of a row not adjacent to the aggressor", bad_victim));
    check(maxcnt <= N_PR, $sformatf("max ACTs to a row without refresh %0d <= %0d", maxcnt, N_PR));
    $display("phase B: %0d rounds, early refreshes rank0=%0d rank1=%0d, REFs rank1=%0d, rank-0 ACTs during it %0d",
             rounds, n_epr[0], n_epr[1], refs[1], r0_during_r1_epr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
