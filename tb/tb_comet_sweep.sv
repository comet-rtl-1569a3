// tb_comet_sweep: the design-space corners of the sensitivity study, each
// built as its own CoMeT channel (one rank of two banks, N_RH = 125):
//   c0  N_HASH = 1,  N_COUNTERS = 128     smallest counter table
//   c1  N_HASH = 16, N_COUNTERS = 2048    largest counter table
//   c2  N_RAT = 32                        smallest RAT
//   c3  N_RAT = 512                       largest RAT
//   c4  HIST_LEN = 64,  EPRT = 0 %        early refresh on any capacity miss
//   c5  HIST_LEN = 512, EPRT = 100 %      early refresh can never trigger
//   c6  K_RESET = 1  (N_PR = 62)          longest reset period
//   c7  K_RESET = 5  (N_PR = 20)          shortest reset period
// Every channel runs two experiments at once:
//   * bank 1: one row is hammered; its neighbours must be refreshed on exactly
//     ACT N_PR and again on exactly ACT 2 * N_PR;
//   * bank 0: N_RAT + N_RAT/4 + 8 rows are each hammered N_PR times, then
//     visited round-robin, so rows evicted from the RAT return as capacity
//     misses. An early refresh is expected in every channel except c5, and in
//     c4 it must follow the very first capacity miss.
// The reset period of c6 and c7 must follow K_RESET: it is checked against
// tREFW / k in cycles.
module tb_comet_sweep;
  import comet_pkg::*;
  localparam int NCFG = 8;
  localparam int NH   [NCFG] = '{1, 16, 4, 4, 4, 4, 4, 4};
  localparam int NC   [NCFG] = '{128, 2048, 512, 512, 512, 512, 512, 512};
  localparam int NRAT [NCFG] = '{128, 128, 32, 512, 128, 128, 128, 128};
  localparam int HL   [NCFG] = '{256, 256, 256, 256, 64, 512, 256, 256};
  localparam int EP   [NCFG] = '{25, 25, 25, 25, 0, 100, 25, 25};
  localparam int KR   [NCFG] = '{3, 3, 3, 3, 3, 3, 1, 5};
  logic clk = 0, rst_n = 0;
  int checks [NCFG], failures [NCFG];
  bit done [NCFG][2];

  always #5 clk = ~clk;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int NPR  = 125 / (KR[c] + 1);
    localparam int NAGG = NRAT[c] + NRAT[c] / 4 + 8;
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
    int n_epr = 0, n_cap = 0, cap_at_first_epr = -1;
    logic epr_q = 0;
    semaphore port = new(1);

    comet_top #(.N_RANKS(1), .N_BANKS(2), .N_RH(125), .K_RESET(KR[c]),
                .N_HASH(NH[c]), .N_COUNTERS(NC[c]), .N_RAT(NRAT[c]),
                .HIST_LEN(HL[c]), .EPRT_PCT(EP[c])) dut (.*);

    assign pr_ready  = '1;
    assign ref_ready = '1;

    always @(posedge clk) if (rst_n) begin
      for (int b = 0; b < 2; b++) if (pr_valid[b]) prs[b]++;
      if (events[0].cap_miss) n_cap++;
      epr_q <= early_refresh_active[0];
      if (early_refresh_active[0] && !epr_q) begin
        n_epr++;
        if (cap_at_first_epr < 0) cap_at_first_epr = n_cap;
      end
    end

    task automatic check(bit cond, string what);
      checks[c]++;
      if (!cond) begin failures[c]++; $display("FAIL c%0d: %s", c, what); end
    endtask

    // one ACT through the shared port; returns the victims it caused
    task automatic act(int bank, logic [16:0] row, output int nvict);
      int prs0, guard;
      port.get(1);
      @(negedge clk);
      act_bank = 1'(bank); act_row = row;
      #1;
      guard = 0;
      while (!act_ready && guard < 20000) begin @(negedge clk); #1; guard++; end
      prs0 = prs[bank];
      act_valid = 1;
      @(negedge clk);
      act_valid = 0;
      #1;
      guard = 0;
      while (!act_ready && guard < 20) begin @(negedge clk); #1; guard++; end
      nvict = prs[bank] - prs0;
      port.put(1);
    endtask

    // bank 1: refresh points of a single row
    initial begin
      int nv, first_at, second_at;
      checks[c] = 0; failures[c] = 0;
      first_at = -1; second_at = -1;
      wait (rst_n);
      for (int n = 1; n <= 2 * NPR; n++) begin
        act(1, 17'd777, nv);
        if (nv != 0) begin
          if (first_at < 0) first_at = n;
          else if (second_at < 0) second_at = n;
        end
      end
      check(first_at == NPR && second_at == 2 * NPR,
            $sformatf("refreshes at ACT %0d and %0d, expected %0d and %0d", first_at, second_at, NPR, 2 * NPR));
      done[c][1] = 1;
    end

    // bank 0: RAT overflow
    initial begin
      int nv, rounds;
      wait (rst_n);
      for (int a = 0; a < NAGG && !(EP[c] == 0 && n_epr > 0); a++)
        for (int n = 0; n < NPR; n++) act(0, 17'(a * 613 + 11), nv);
      rounds = 0;
      while (n_epr == 0 && rounds < 3) begin
        for (int a = 0; a < NAGG && n_epr == 0; a++) act(0, 17'(a * 613 + 11), nv);
        rounds++;
      end
      while (early_refresh_active[0]) @(negedge clk);
      if (EP[c] == 100) begin
        check(n_epr == 0 && n_cap > 0,
              $sformatf("EPRT 100 %%: %0d capacity misses and %0d early refreshes (expected none)", n_cap, n_epr));
      end else begin
        check(n_epr > 0, $sformatf("RAT overflow led to an early refresh (%0d capacity misses)", n_cap));
        if (EP[c] == 0)
          check(cap_at_first_epr == 1,
                $sformatf("EPRT 0 %%: early refresh after %0d capacity misses, expected 1", cap_at_first_epr));
      end
      check(dut.RESET_PERIOD == int'(TREFW_PS / (64'(CLK_PS) * 64'(KR[c]))), "reset period follows K_RESET");
      $display("c%0d: N_PR=%0d, %0d aggressors, %0d capacity misses, %0d early refreshes",
               c, NPR, NAGG, n_cap, n_epr);
      done[c][0] = 1;
    end
  end

  initial begin
    int tc, tf;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCFG; c++) wait (done[c][0] && done[c][1]);
    tc = 0; tf = 0;
    for (int c = 0; c < NCFG; c++) begin tc += checks[c]; tf += failures[c]; end
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", 1, 1);
    $finish;
  end
endmodule
