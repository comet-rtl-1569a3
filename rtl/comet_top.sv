// comet_top: CoMeT RowHammer mitigation for one DDR4 memory channel.
//
// Sits beside the memory request scheduler of a memory controller. Every ACT
// the scheduler issues is shown on the act_* port; CoMeT counts it in the
// tracker of the addressed bank (one bank_tracker per bank: counter table,
// recent aggressor table, RAT miss history) and answers with
//   * preventive refreshes: the two neighbour rows of a row that reached the
//     preventive refresh threshold N_PR = N_RH/(K_RESET+1), one pr_* handshake
//     per victim on the bank's own port; the scheduler refreshes each by an
//     ACT and PRE and must serve them before other requests to that bank;
//   * early preventive refreshes: one early_refresh_ctrl per rank issues N_REF
//     REF commands on that rank's ref_* port and clears all the rank's
//     counters when a bank's RAT overflows too often;
//   * a periodic reset of all counters every RESET_PERIOD cycles (tREFW/k).
// act_ready tells the scheduler whether the addressed bank can take an ACT now:
// it is low while the bank evaluates the previous ACT (2 cycles), hands out
// victims, clears its counters or while its rank is under early refresh.
// Bank b of rank r uses index r*N_BANKS+b of the per-bank arrays.
//
// Structure (per-bank CT and RAT, per-rank early refresh, periodic reset)
// follows the paper; the port handshakes are this design's.
module comet_top #(
  parameter int unsigned N_RANKS      = comet_pkg::N_RANKS,
  parameter int unsigned N_BANKS      = comet_pkg::N_BANKS,
  parameter int unsigned ROW_W        = comet_pkg::ROW_W,
  parameter int unsigned N_RH         = comet_pkg::N_RH,
  parameter int unsigned K_RESET      = comet_pkg::K_RESET,
  parameter int unsigned N_HASH       = comet_pkg::N_HASH,
  parameter int unsigned N_COUNTERS   = comet_pkg::N_COUNTERS,
  parameter int unsigned N_RAT        = comet_pkg::N_RAT,
  parameter int unsigned HIST_LEN     = comet_pkg::HIST_LEN,
  parameter int unsigned EPRT_PCT     = comet_pkg::EPRT_PCT,
  parameter int unsigned N_REF        = comet_pkg::N_REF,
  // tREFW / K_RESET in clock cycles; follows K_RESET unless set explicitly
  parameter int unsigned RESET_PERIOD =
    int'(comet_pkg::TREFW_PS / (64'(comet_pkg::CLK_PS) * 64'(K_RESET))),
  localparam int unsigned N_PR        = N_RH / (K_RESET + 1),
  localparam int unsigned EPRT        = HIST_LEN * EPRT_PCT / 100,
  localparam int unsigned NB          = N_RANKS * N_BANKS,
  localparam int unsigned RK_W        = (N_RANKS > 1) ? $clog2(N_RANKS) : 1,
  localparam int unsigned BK_W        = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  localparam int unsigned SW          = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // ACT issued by the scheduler
  input  logic                       act_valid,
  input  logic [RK_W-1:0]            act_rank,
  input  logic [BK_W-1:0]            act_bank,
  input  logic [ROW_W-1:0]           act_row,
  output logic                       act_ready,
  // preventive refresh requests, one port per bank
  output logic [NB-1:0]              pr_valid,
  output logic [NB-1:0][ROW_W-1:0]   pr_row,
  input  logic [NB-1:0]              pr_ready,
  // early preventive refresh REF commands, one port per rank
  output logic [N_RANKS-1:0]         ref_valid,
  input  logic [N_RANKS-1:0]         ref_ready,
  // status
  output logic [N_RANKS-1:0]         early_refresh_active,
  output logic                       periodic_reset,
  output comet_pkg::tracker_events_t events [NB]
);
  import comet_pkg::*;

  logic [NB-1:0]      bank_ready, bank_epr;
  logic [N_RANKS-1:0] rank_clear, rank_hold;
  int unsigned        sel;

  assign sel       = int'(act_rank) * N_BANKS + int'(act_bank);
  assign act_ready = (sel < NB) && bank_ready[sel[SW-1:0]];

  reset_timer #(.PERIOD(RESET_PERIOD)) u_timer (
    .clk(clk), .rst_n(rst_n), .tick(periodic_reset)
  );

  for (genvar r = 0; r < N_RANKS; r++) begin : g_rank
    early_refresh_ctrl #(.N_BANKS(N_BANKS), .N_REF(N_REF)) u_epr (
      .clk(clk), .rst_n(rst_n),
      .epr_req(bank_epr[r*N_BANKS +: N_BANKS]),
      .ref_valid(ref_valid[r]), .ref_ready(ref_ready[r]),
      .clear(rank_clear[r]), .hold(rank_hold[r]), .active(early_refresh_active[r])
    );

    for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
      localparam int unsigned I = r * N_BANKS + b;
      bank_tracker #(
        .ROW_W(ROW_W), .N_ROWS(1 << ROW_W), .N_PR(N_PR), .N_HASH(N_HASH),
        .N_COUNTERS(N_COUNTERS), .N_RAT(N_RAT), .HIST_LEN(HIST_LEN), .EPRT(EPRT)
      ) u_trk (
        .clk(clk), .rst_n(rst_n),
        .act_valid(act_valid && sel == I), .act_ready(bank_ready[I]), .act_row(act_row),
        .pr_valid(pr_valid[I]), .pr_ready(pr_ready[I]), .pr_row(pr_row[I]),
        .clear_req(periodic_reset || rank_clear[r]), .hold(rank_hold[r]),
        .epr_req(bank_epr[I]), .events(events[I])
      );
    end
  end
endmodule
