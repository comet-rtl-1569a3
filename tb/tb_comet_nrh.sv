// tb_comet_nrh: the other RowHammer thresholds of the evaluation. Five CoMeT
// channels run side by side, built with N_RH = 250, 500, 1000, 2000 and 4000.
// With k = 3 that gives N_PR = 62, 125, 250, 500 and 1000, and counters of
// 6, 7, 8, 9 and 10 bits, all derived from N_RH alone. Each channel is cut to
// one rank of two banks so that the run stays short. The counter table, RAT
// and history keep their default sizes.
//
// In every channel:
//   1. A single row of bank 0 is hammered. Its neighbours must be refreshed
//      on exactly ACT N_PR (counted in the counter table), and again on
//      exactly ACT 2 * N_PR (counted in the RAT entry that the first refresh
//      allocated). No other ACT may cause a refresh.
//   2. A row of bank 1 gets N_PR - 1 ACTs and must not be refreshed: the
//      counters of bank 0 are not shared with bank 1.
//   3. The traditional double-sided attack, evaluated at N_RH = 500: bank 1
//      alternately hammers rows 1999 and 2001, one ACT every 24 cycles (20 ns
//      at the assumed clock), 3 * N_PR ACTs each. Each aggressor must be
//      caught exactly three times, so exactly 12 victim refreshes are expected.
module tb_comet_nrh;
  import comet_pkg::*;
  localparam int NCFG = 5;
  localparam int NRH_LIST [NCFG] = '{250, 500, 1000, 2000, 4000};
  logic clk = 0, rst_n = 0;
  int checks [NCFG], failures [NCFG];
  bit done [NCFG];

  always #5 clk = ~clk;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int NPR = NRH_LIST[c] / 4;
    logic act_valid = 0, act_ready;
    logic [0:0] act_rank = 0;
    logic [0:0] act_bank = 0;
    logic [16:0] act_row = 0;
    logic [1:0] pr_valid, pr_ready;
    logic [1:0][16:0] pr_row;
    logic [0:0] ref_valid, ref_ready, early_refresh_active;
    logic periodic_reset;
    tracker_events_t events [2];
    int prs [2] = '{0, 0};

    comet_top #(.N_RANKS(1), .N_BANKS(2), .N_RH(NRH_LIST[c])) dut (.*);

    assign pr_ready  = '1;
    assign ref_ready = '1;

    always @(posedge clk) if (rst_n)
      for (int b = 0; b < 2; b++) if (pr_valid[b]) prs[b]++;

    task automatic check(bit cond, string what);
      checks[c]++;
      if (!cond) begin failures[c]++; $display("FAIL N_RH=%0d: %s", NRH_LIST[c], what); end
    endtask

    // one ACT; returns the number of victims it caused
    task automatic act(int bank, logic [16:0] row, output int nvict);
      int prs0, guard;
      @(negedge clk);
      act_bank = 1'(bank); act_row = row;
      #1;
      guard = 0;
      while (!act_ready && guard < 2000) begin @(negedge clk); guard++; end
      prs0 = prs[bank];
      act_valid = 1;
      @(negedge clk);
      act_valid = 0;
      guard = 0;
      #1;
      while (!act_ready && guard < 20) begin @(negedge clk); #1; guard++; end
      nvict = prs[bank] - prs0;
    endtask

    initial begin
      int nv, first_at, second_at, other;
      checks[c] = 0; failures[c] = 0; done[c] = 0;
      first_at = -1; second_at = -1; other = 0;
      wait (rst_n);
      for (int n = 1; n <= 2 * NPR; n++) begin
        act(0, 17'd4242, nv);
        if (nv != 0) begin
          if (first_at < 0) first_at = n;
          else if (second_at < 0) second_at = n;
          else other++;
          check(nv == 2, $sformatf("ACT %0d refreshed %0d victims", n, nv));
        end
      end
      check(first_at == NPR, $sformatf("first refresh at ACT %0d, expected %0d", first_at, NPR));
      check(second_at == 2 * NPR, $sformatf("second refresh at ACT %0d, expected %0d", second_at, 2 * NPR));
      check(other == 0, "no other refresh");
      for (int n = 1; n < NPR; n++) act(1, 17'd4242, nv);
      check(prs[1] == 0, "bank 1 not refreshed below its own N_PR");
      for (int n = 0; n < 3 * NPR; n++)
        for (int side = 0; side < 2; side++) begin
          act(1, side != 0 ? 17'd2001 : 17'd1999, nv);
          repeat (20) @(negedge clk);
        end
      check(prs[1] == 12, $sformatf("double-sided attack: %0d victim refreshes, expected 12", prs[1]));
      $display("N_RH=%0d: N_PR=%0d, refreshes at ACT %0d and %0d, attack victims %0d",
               NRH_LIST[c], NPR, first_at, second_at, prs[1]);
      done[c] = 1;
    end
  end

  initial begin
    int tc, tf;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCFG; c++) wait (done[c]);
    tc = 0; tf = 0;
    for (int c = 0; c < NCFG; c++) begin tc += checks[c]; tf += failures[c]; end
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", 1, 1);
    $finish;
  end
endmodule
