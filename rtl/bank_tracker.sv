// bank_tracker: CoMeT for one DRAM bank.
//
// Owns the bank's counter table (CT), recent aggressor table (RAT) and RAT miss
// history, and runs CoMeT's per-activation algorithm:
//   1. An ACT to row X is accepted (act_valid && act_ready). The CT group of X
//      and the RAT tags are looked up at the same time.
//   2. Next cycle (EVAL): Num_ACT is RAT_Ctr on a RAT hit, else Min_Ctr.
//      If Num_ACT + 1 >= N_PR the row has reached the preventive refresh
//      threshold: the CT group is set to N_PR (it stays saturated), the RAT
//      counter is zeroed on a hit or a RAT entry is allocated on a miss, and
//      the miss is pushed into the history as a capacity miss when Min_Ctr was
//      already N_PR before this ACT, else as a compulsory miss. The two
//      neighbours X-1 and X+1 are then handed to the scheduler, one per
//      pr_valid/pr_ready handshake, before another ACT is accepted.
//      Otherwise only the counters advance: the RAT counter on a hit, else the
//      minimum-valued CT counters (conservative update).
//   3. epr_req is high while the history holds more than EPRT capacity misses.
//   4. clear_req (periodic reset or early refresh) clears CT, RAT and history
//      once the tracker is idle; CT clearing takes N_COUNTERS cycles. The same
//      clear runs after reset, so no ACT is accepted in the first
//      N_COUNTERS + 2 cycles.
// act_ready is low while hold (rank under early refresh) is high, while a
// clear is pending or running, and outside the idle state: an ACT without a
// preventive refresh takes two cycles, one with it 2 cycles plus the two
// handshakes. Victims outside 0..N_ROWS-1 are skipped.
//
// The algorithm follows the paper. Counting the N_PR-th activation itself
// (Num_ACT + 1 >= N_PR), the two-cycle timing, skipping edge victims and
// recording in the history only misses that allocate are this design's
// reading of the text.
module bank_tracker #(
  parameter int unsigned ROW_W      = 17,
  parameter int unsigned N_ROWS     = 131072,
  parameter int unsigned N_PR       = 31,
  parameter int unsigned N_HASH     = 4,
  parameter int unsigned N_COUNTERS = 512,
  parameter int unsigned N_RAT      = 128,
  parameter int unsigned HIST_LEN   = 256,
  parameter int unsigned EPRT       = 64,
  localparam int unsigned CTR_W     = $clog2(N_PR + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // ACT commands to this bank
  input  logic                        act_valid,
  output logic                        act_ready,
  input  logic [ROW_W-1:0]            act_row,
  // preventive refresh requests (victim rows) to the scheduler
  output logic                        pr_valid,
  input  logic                        pr_ready,
  output logic [ROW_W-1:0]            pr_row,
  // resets
  input  logic                        clear_req,
  input  logic                        hold,
  output logic                        epr_req,
  output comet_pkg::tracker_events_t  events
);
  import comet_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_EVAL, S_PR_LO, S_PR_HI, S_CLEAR} state_e;
  state_e state;

  logic [ROW_W-1:0] row_q;
  logic             clear_pend;

  // CT
  logic                         ct_rd, ct_inc, ct_set, ct_clr, ct_busy;
  logic [CTR_W-1:0]             min_ctr;
  logic [N_HASH-1:0]            is_min;
  logic [N_HASH-1:0][CTR_W-1:0] ct_vals;
  // RAT
  logic                         rat_hit, rat_evicted;
  logic [CTR_W-1:0]             rat_ctr;
  rat_op_e                      rat_op;
  // history
  logic                         h_push, h_cap;

  logic             accept, clear_now;
  logic [CTR_W:0]   num_act_p1;
  logic             reach, cap_miss;

  assign clear_now = clear_pend || clear_req;
  assign act_ready = (state == S_IDLE) && !clear_now && !hold;
  assign accept    = act_valid && act_ready;

  counter_table #(.ROW_W(ROW_W), .N_HASH(N_HASH), .N_COUNTERS(N_COUNTERS), .CTR_W(CTR_W)) u_ct (
    .clk(clk), .rst_n(rst_n),
    .rd_en(ct_rd), .rd_row(act_row),
    .min_ctr(min_ctr), .is_min(is_min), .vals(ct_vals),
    .upd_inc(ct_inc), .upd_set(ct_set), .set_val(CTR_W'(N_PR)),
    .clr_start(ct_clr), .clr_busy(ct_busy)
  );

  recent_aggressor_table #(.ROW_W(ROW_W), .N_ENTRIES(N_RAT), .CTR_W(CTR_W)) u_rat (
    .clk(clk), .rst_n(rst_n),
    .lookup(accept), .row(act_row),
    .hit(rat_hit), .ctr(rat_ctr), .op(rat_op), .evicted(rat_evicted),
    .clr_all(ct_clr)
  );

  miss_history #(.HIST_LEN(HIST_LEN), .EPRT(EPRT)) u_hist (
    .clk(clk), .rst_n(rst_n),
    .push(h_push), .capacity(h_cap), .clear(ct_clr),
    .cap_count(), .trigger(epr_req)
  );

  // SELECT and the comparison with N_PR (EVAL cycle).
  always_comb begin
    num_act_p1 = (rat_hit ? {1'b0, rat_ctr} : {1'b0, min_ctr}) + 1'b1;
    reach      = num_act_p1 >= (CTR_W + 1)'(N_PR);
    cap_miss   = !rat_hit && (min_ctr >= CTR_W'(N_PR));
  end

  always_comb begin
    ct_rd  = accept;
    ct_inc = 1'b0;
    ct_set = 1'b0;
    ct_clr = (state == S_IDLE) && clear_now;
    rat_op = RAT_NOP;
    h_push = 1'b0;
    h_cap  = cap_miss;
    if (state == S_EVAL) begin
      if (reach) begin
        ct_set = 1'b1;
        rat_op = rat_hit ? RAT_CLEAR : RAT_ALLOC;
        h_push = !rat_hit;
      end else if (rat_hit) begin
        rat_op = RAT_INC;
      end else begin
        ct_inc = 1'b1;
      end
    end
  end

  always_comb begin
    pr_valid = 1'b0;
    pr_row   = row_q;
    if (state == S_PR_LO) begin
      pr_valid = (row_q != '0);
      pr_row   = row_q - 1'b1;
    end else if (state == S_PR_HI) begin
      pr_valid = (32'(row_q) < N_ROWS - 1);
      pr_row   = row_q + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      row_q      <= '0;
      clear_pend <= 1'b1;   // counters start at zero: clear after reset
    end else begin
      if (clear_req) clear_pend <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (clear_now) begin
            clear_pend <= 1'b0;
            state      <= S_CLEAR;
          end else if (accept) begin
            row_q <= act_row;
            state <= S_EVAL;
          end
        end
        S_EVAL:  state <= reach ? S_PR_LO : S_IDLE;
        S_PR_LO: if (!pr_valid || pr_ready) state <= S_PR_HI;
        S_PR_HI: if (!pr_valid || pr_ready) state <= S_IDLE;
        S_CLEAR: if (!ct_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    events              = '0;
    events.act          = (state == S_EVAL);
    events.ct_update    = ct_inc;
    events.rat_hit      = (state == S_EVAL) && rat_hit;
    events.rat_inc      = (rat_op == RAT_INC);
    events.prev_refresh = (state == S_EVAL) && reach;
    events.rat_alloc    = (rat_op == RAT_ALLOC);
    events.rat_evict    = rat_evicted;
    events.cap_miss     = h_push && cap_miss;
    events.epr_req      = epr_req;
    events.clear        = ct_clr;
  end

`ifndef SYNTHESIS
  a_pr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (pr_valid && !pr_ready) |=> (pr_valid && $stable(pr_row)));
`endif
endmodule
