// tb_comet_fp: false-positive study of the default CoMeT channel, after the
// experiment in which 10,000 activations are spread over a growing number of
// unique rows. For U = 10, 100, 250, 1000 and 10000 unique (random) rows, one
// bank per U receives 10,000 ACTs in random order.
//
// The testbench keeps the true activation count of every row since its last
// refresh. A refresh of a row whose true count is below N_PR = 31 is a false
// positive. It comes either from counter sharing in the sketch or from a row
// that was evicted from the RAT: such a row is refreshed again on its next ACT
// because its CT counters are saturated. Checked:
//   * no false negative: an ACT that brings a row's true count to N_PR always
//     triggers the refresh of its neighbours;
//   * no false positive with 10 unique rows (their counters do not collide);
//   * the 250-row case, in which more rows reach N_PR than the 128-entry RAT
//     holds, leads to an early preventive refresh.
// An early preventive refresh (which happens once more rows reach N_PR than
// the RAT holds) refreshes every row, so all true counts restart from zero.
// The false-positive rate and the number of early refreshes per U are printed.
module tb_comet_fp;
  import comet_pkg::*;
  localparam int NB = 32, NPR = 31, NACT = 10000;
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

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  int uniq [5] = '{10, 100, 250, 1000, 10000};
  int fp [5];
  int n_early = 0;
  logic epr_q = 0;
  always @(posedge clk) begin
    epr_q <= early_refresh_active[0];
    if (early_refresh_active[0] && !epr_q) n_early++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int u = 0; u < 5; u++) begin
      logic [16:0] rows [$];
      int truecnt [logic [16:0]];
      int nfp, nref, nfn, bank, early0;
      nfp = 0; nref = 0; nfn = 0; bank = u + 2; early0 = n_early;
      rows.delete();
      truecnt.delete();
      // distinct random rows
      while (rows.size() < uniq[u]) begin
        logic [16:0] r;
        r = 17'($urandom);
        if (!truecnt.exists(r)) begin truecnt[r] = 0; rows.push_back(r); end
      end
      for (int n = 0; n < NACT; n++) begin
        logic [16:0] r;
        int guard;
        bit refreshed;
        guard = 0; refreshed = 0;
        r = (n < uniq[u]) ? rows[n] : rows[$urandom_range(0, uniq[u] - 1)];
        @(negedge clk);
        act_rank = 0; act_bank = 4'(bank); act_row = r;
        #1;
        while (!act_ready && guard < 20000) begin @(negedge clk); guard++; end
        act_valid = 1;
        @(negedge clk);
        act_valid = 0;
        truecnt[r]++;
        @(negedge clk);                     // victims, if any, are offered now
        guard = 0;
        while (!dut.bank_ready[bank] && guard < 10) begin
          if (pr_valid[bank]) refreshed = 1;
          @(negedge clk); guard++;
        end
        if (refreshed) begin
          nref++;
          if (truecnt[r] < NPR) nfp++;
          truecnt[r] = 0;
        end else if (truecnt[r] >= NPR) begin
          nfn++;
        end
        if (early_refresh_active[0] || n_early != early0 + 0) begin
          // the whole rank is being refreshed: every row starts again
          foreach (truecnt[k]) truecnt[k] = 0;
          early0 = n_early;
        end
      end
      fp[u] = nfp;
      check(nfn == 0, $sformatf("U=%0d: %0d rows reached N_PR without refresh", uniq[u], nfn));
      $display("U=%0d unique rows: %0d refreshes, %0d false positives (%0.2f %% of refreshes), early refreshes so far %0d",
               uniq[u], nref, nfp, nref ? 100.0 * nfp / nref : 0.0, n_early);
    end
    check(fp[0] == 0, "no false positive with 10 rows");
    check(n_early > 0, "early refresh reached by the 250-row case");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
