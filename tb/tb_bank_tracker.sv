// tb_bank_tracker: one bank's CoMeT tracker (4 x 512 counter table, N_PR = 31)
// with a small 8-entry RAT and a 16-miss history (EPRT = 4) so that RAT
// evictions, capacity misses and early-refresh requests happen quickly.
//
// Traffic mixes round-robin hammering of 12 aggressor rows (more than the RAT
// holds, including the edge rows 0 and 2^17-1) with random background rows.
// A reference model kept here (count-min sketch with conservative update,
// tagged RAT, miss history) predicts for every ACT whether a preventive
// refresh happens and which victims are requested, plus the RAT eviction
// and the early-refresh request; only the random RAT victim index is read from
// the table. Also checked: 2-cycle ACT turnaround, hold, the 514-cycle clear,
// and that each mechanism occurred.
module tb_bank_tracker;
  import comet_pkg::*;
  localparam int NPR = 31, NRAT = 8, HL = 16, EP = 4, MAXROW = (1 << 17) - 1;

  logic clk = 0, rst_n = 0;
  logic act_valid = 0, act_ready, pr_valid, pr_ready = 0, clear_req = 0, hold = 0, epr_req;
  logic [16:0] act_row = 0, pr_row;
  tracker_events_t events;
  int checks = 0, failures = 0;

  bank_tracker #(.N_RAT(NRAT), .HIST_LEN(HL), .EPRT(EP)) dut (.*);
  always #5 clk = ~clk;

  // reference model
  int ct [4][512];
  bit rv [NRAT];
  logic [16:0] rt [NRAT];
  int rc [NRAT];
  bit hist [$];
  int n_pr = 0, n_alloc = 0, n_evict = 0, n_cap = 0, n_hit = 0, n_epr = 0, n_ctinc = 0, n_edge = 0;

  function automatic int h(int i, logic [16:0] r);
    int sh [4] = '{0, 2, 5, 8};
    return int'((r >> sh[i]) & 17'h1FF);
  endfunction

  function automatic int hist_caps();
    int c = 0;
    foreach (hist[i]) c += hist[i];
    return c;
  endfunction

  task automatic model_clear();
    foreach (ct[i, j]) ct[i][j] = 0;
    foreach (rv[i]) rv[i] = 0;
    hist.delete();
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic do_act(logic [16:0] r);
    int m, e, free_e, num, guard;
    bit reach, cap;
    logic [16:0] vict [$];
    guard = 0;
    @(negedge clk);
    while (!act_ready) begin @(negedge clk); if (++guard > 2000) break; end
    m = 99; e = -1; free_e = -1;
    for (int i = 0; i < 4; i++) if (ct[i][h(i, r)] < m) m = ct[i][h(i, r)];
    for (int i = 0; i < NRAT; i++) begin
      if (rv[i] && rt[i] == r) e = i;
      if (!rv[i] && free_e < 0) free_e = i;
    end
    num = (e >= 0) ? rc[e] : m;
    reach = (num + 1 >= NPR);
    cap = (e < 0) && (m >= NPR);
    act_valid = 1; act_row = r;
    @(negedge clk);                       // EVAL cycle
    act_valid = 0; act_row = 17'($urandom);
    check(!act_ready, "act_ready low while evaluating");
    check(events.act && events.prev_refresh == reach && events.rat_hit == (e >= 0), "evaluation events");
    if (e >= 0) n_hit++;
    if (reach) begin
      n_pr++;
      for (int i = 0; i < 4; i++) ct[i][h(i, r)] = NPR;
      if (e >= 0) rc[e] = 0;
      else begin
        int a;
        a = (free_e >= 0) ? free_e : int'(dut.u_rat.alloc_idx_q);
        check(int'(dut.u_rat.alloc_idx_q) == a, "RAT allocation entry");
        check(events.rat_evict == (free_e < 0), "RAT eviction");
        check(events.cap_miss == cap, "capacity-miss classification");
        n_alloc++;
        if (free_e < 0) n_evict++;
        if (cap) n_cap++;
        rv[a] = 1; rt[a] = r; rc[a] = 0;
        hist.push_back(cap);
        if (hist.size() > HL) void'(hist.pop_front());
      end
      if (r != 0) vict.push_back(r - 1'b1);
      if (r != 17'(MAXROW)) vict.push_back(r + 1'b1);
      if (r == 0 || r == 17'(MAXROW)) n_edge++;
    end else begin
      check(events.ct_update == (e < 0) && events.rat_inc == (e >= 0), "update kind");
      if (e >= 0) rc[e]++;
      else begin
        n_ctinc++;
        for (int i = 0; i < 4; i++) if (ct[i][h(i, r)] == m) ct[i][h(i, r)] = m + 1;
      end
    end
    @(negedge clk);
    if (!reach) begin
      check(act_ready && !pr_valid, "2-cycle turnaround without refresh");
    end else begin
      foreach (vict[k]) begin
        guard = 0;
        while (!pr_valid && guard < 5) begin @(negedge clk); guard++; end
        check(pr_valid && pr_row == vict[k], $sformatf("victim row %h exp %h", pr_row, vict[k]));
        repeat ($urandom_range(0, 2)) begin
          @(negedge clk);
          check(pr_valid && pr_row == vict[k], "victim held until accepted");
        end
        pr_ready = 1;
        @(negedge clk);
        pr_ready = 0;
      end
      guard = 0;
      while (!act_ready && guard < 5) begin
        check(!pr_valid, "no extra victim");
        @(negedge clk); guard++;
      end
      check(act_ready, "ready after refresh");
    end
    check(epr_req == (hist_caps() > EP), $sformatf("early refresh request %b caps %0d", epr_req, hist_caps()));
  endtask

  task automatic do_clear();
    int cyc = 0;
    @(negedge clk);
    clear_req = 1;
    @(negedge clk);
    clear_req = 0;
    cyc = 1;
    while (!act_ready && cyc < 2000) begin @(negedge clk); cyc++; end
    check(cyc == 514, $sformatf("clear takes 514 cycles (got %0d)", cyc));
    check(!epr_req, "history cleared");
    model_clear();
  endtask

  logic [16:0] aggr [12];

  initial begin
    model_clear();
    foreach (aggr[i]) aggr[i] = 17'($urandom);
    aggr[0] = 17'd0;
    aggr[1] = 17'(MAXROW);
    repeat (3) @(negedge clk);
    rst_n = 1;
    begin
      int cyc = 0;
      while (!act_ready && cyc < 2000) begin @(negedge clk); cyc++; end
      check(cyc == 514, $sformatf("initial clear takes 514 cycles (got %0d)", cyc));
    end
    do_clear();
    // hold blocks ACTs
    @(negedge clk); hold = 1;
    repeat (5) begin @(negedge clk); check(!act_ready, "hold"); end
    hold = 0;
    for (int round = 0; round < 240; round++) begin
      for (int a = 0; a < 12; a++) begin
        do_act(aggr[a]);
        if ($urandom_range(0, 2) == 0) do_act(17'($urandom));
        if (epr_req) begin n_epr++; do_clear(); end
      end
    end
    // a few single rows hammered alone: RAT hit path through several refreshes
    for (int n = 0; n < 100; n++) do_act(aggr[5]);
    check(n_pr > 0 && n_alloc > 0 && n_evict > 0 && n_cap > 0 && n_hit > 0 && n_epr > 0 && n_ctinc > 0 && n_edge > 0,
          $sformatf("mechanisms pr=%0d alloc=%0d evict=%0d cap=%0d hit=%0d epr=%0d ctinc=%0d edge=%0d",
                    n_pr, n_alloc, n_evict, n_cap, n_hit, n_epr, n_ctinc, n_edge));
    $display("tracker: refreshes=%0d allocs=%0d evictions=%0d capacity_misses=%0d rat_hits=%0d early=%0d",
             n_pr, n_alloc, n_evict, n_cap, n_hit, n_epr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
