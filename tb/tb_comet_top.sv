// tb_comet_top: end-to-end test of a reduced CoMeT channel: 2 ranks x 2 banks,
// 1024 rows per bank, N_RH = 20 (N_PR = 5), 4 hashes x 16 counters, a 4-entry
// RAT, an 8-miss history with EPRT 25 % (2), 16 REFs per early refresh and a
// periodic reset every 3000 cycles.
//
// A behavioural scheduler issues ACTs (hammering a set of aggressor rows per
// bank, edge rows included, mixed with random rows), accepts preventive
// refreshes and REFs with random back-pressure. Independently of the design it
// checks CoMeT's guarantee: no row receives more than N_PR ACTs since its
// neighbours were last refreshed, its rank was early-refreshed or the counters
// were periodically reset. Each refresh must target the two neighbours of the
// bank's last ACT, and every early refresh must send exactly N_REF REFs. It
// counts how often each mechanism happened and fails on one that never did.
module tb_comet_top;
  import comet_pkg::*;
  localparam int NR = 2, NBK = 2, NB = NR * NBK, RW = 10, NRH = 20, NPR = NRH / 4, NREF = 16;
  localparam int MAXROW = (1 << RW) - 1;

  logic clk = 0, rst_n = 0;
  logic act_valid = 0, act_ready;
  logic [0:0] act_rank = 0, act_bank = 0;
  logic [RW-1:0] act_row = 0;
  logic [NB-1:0] pr_valid, pr_ready = 0;
  logic [NB-1:0][RW-1:0] pr_row;
  logic [NR-1:0] ref_valid, ref_ready = 0, early_refresh_active;
  logic periodic_reset;
  tracker_events_t events [NB];
  int checks = 0, failures = 0;

  comet_top #(.N_RANKS(NR), .N_BANKS(NBK), .ROW_W(RW), .N_RH(NRH), .K_RESET(3), .N_HASH(4),
              .N_COUNTERS(16), .N_RAT(4), .HIST_LEN(8), .EPRT_PCT(25), .N_REF(NREF),
              .RESET_PERIOD(3000)) dut (.*);
  always #5 clk = ~clk;

  // ACTs per row since its neighbours were last refreshed
  int cnt [NB][1 << RW];
  int last_row [NB];
  int vict_seen [NB];
  int refs_in_op [NR];
  int max_cnt = 0;
  // mechanism counters
  int m_act = 0, m_ctinc = 0, m_rathit = 0, m_ratinc = 0, m_pr = 0, m_alloc = 0, m_evict = 0,
      m_cap = 0, m_epr = 0, m_periodic = 0, m_stall = 0, m_edge = 0, m_hold = 0;
  logic [RW-1:0] aggr [NB][6];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic clear_rank(int r);
    for (int b = 0; b < NBK; b++) foreach (cnt[r*NBK+b][j]) cnt[r*NBK+b][j] = 0;
  endtask

  // Scheduler side: observe everything at the clock edge.
  logic [NR-1:0] epr_active_q = 0;
  always @(posedge clk) if (rst_n) begin
    int i;
    i = int'(act_rank) * NBK + int'(act_bank);
    if (act_valid && !act_ready) m_stall++;
    if (act_valid && act_ready) begin
      cnt[i][act_row]++;
      if (cnt[i][act_row] > max_cnt) max_cnt = cnt[i][act_row];
      checks++;
      if (cnt[i][act_row] > NPR) begin
        failures++; $display("FAIL bank %0d row %0d activated %0d times unrefreshed", i, act_row, cnt[i][act_row]);
      end
      last_row[i] = act_row;
      vict_seen[i] = 0;
    end
    for (int b = 0; b < NB; b++) begin
      if (events[b].act)       m_act++;
      if (events[b].ct_update) m_ctinc++;
      if (events[b].rat_hit)   m_rathit++;
      if (events[b].rat_inc)   m_ratinc++;
      if (events[b].prev_refresh) m_pr++;
      if (events[b].rat_alloc) m_alloc++;
      if (events[b].rat_evict) m_evict++;
      if (events[b].cap_miss)  m_cap++;
      if (pr_valid[b] && pr_ready[b]) begin
        int x;
        x = last_row[b];
        checks++;
        if (!((int'(pr_row[b]) == x - 1) || (int'(pr_row[b]) == x + 1))) begin
          failures++; $display("FAIL bank %0d victim %0d of last ACT %0d", b, pr_row[b], x);
        end
        vict_seen[b]++;
        if (x == 0 || x == MAXROW) m_edge++;
        // refresh complete once both (or the one existing) neighbour is sent
        if (vict_seen[b] == ((x == 0 || x == MAXROW) ? 1 : 2)) cnt[b][x] = 0;
      end
    end
    for (int r = 0; r < NR; r++) begin
      if (early_refresh_active[r] && !epr_active_q[r]) begin
        m_epr++;
        refs_in_op[r] = 0;
        clear_rank(r);
      end
      if (ref_valid[r] && ref_ready[r]) refs_in_op[r]++;
      if (!early_refresh_active[r] && epr_active_q[r]) begin
        checks++;
        if (refs_in_op[r] != NREF) begin failures++; $display("FAIL rank %0d sent %0d REFs", r, refs_in_op[r]); end
      end
      if (dut.rank_hold[r]) m_hold++;
    end
    epr_active_q <= early_refresh_active;
    if (periodic_reset) begin
      m_periodic++;
      for (int r = 0; r < NR; r++) clear_rank(r);
    end
  end

  // drive ACT requests and handshakes at the falling edge
  always @(negedge clk) if (rst_n) begin
    pr_ready <= NB'($urandom);
    ref_ready <= NR'($urandom);
  end

  initial begin
    foreach (aggr[b, k]) aggr[b][k] = RW'($urandom);
    aggr[0][0] = 0; aggr[1][1] = RW'(MAXROW); aggr[2][0] = 0; aggr[3][2] = RW'(MAXROW);
    foreach (cnt[b, j]) cnt[b][j] = 0;
    foreach (last_row[b]) begin last_row[b] = -5; vict_seen[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40000; n++) begin
      @(negedge clk);
      if (!act_valid || act_ready_q) begin
        act_valid = ($urandom_range(0, 3) != 0);
        {act_rank, act_bank} = 2'($urandom);
        act_row = ($urandom_range(0, 9) < 7) ? aggr[{act_rank, act_bank}][$urandom_range(0, 5)] : RW'($urandom);
      end
    end
    act_valid = 0;
    repeat (200) @(negedge clk);
    $display("mechanisms: acts=%0d ct_updates=%0d rat_hits=%0d rat_incs=%0d prev_refreshes=%0d rat_allocs=%0d",
             m_act, m_ctinc, m_rathit, m_ratinc, m_pr, m_alloc);
    $display("            rat_evictions=%0d capacity_misses=%0d early_refreshes=%0d periodic_resets=%0d act_stalls=%0d edge_victims=%0d max_unrefreshed=%0d",
             m_evict, m_cap, m_epr, m_periodic, m_stall, m_edge, max_cnt);
    check(m_act > 0, "ACTs processed");
    check(m_ctinc > 0, "conservative CT update happened");
    check(m_rathit > 0, "RAT hit happened");
    check(m_ratinc > 0, "RAT counter increment happened");
    check(m_pr > 0, "preventive refresh happened");
    check(m_alloc > 0, "RAT allocation happened");
    check(m_evict > 0, "RAT eviction happened");
    check(m_cap > 0, "capacity miss happened");
    check(m_epr > 0, "early preventive refresh happened");
    check(m_periodic > 0, "periodic reset happened");
    check(m_stall > 0, "ACT stall happened");
    check(m_edge > 0, "edge-row refresh happened");
    check(m_hold > 0, "rank hold happened");
    check(max_cnt == NPR, $sformatf("some row reached exactly N_PR ACTs (max %0d)", max_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the ACT presented in the last cycle was accepted
  logic act_ready_q = 0;
  always @(posedge clk) act_ready_q <= act_valid && act_ready;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
