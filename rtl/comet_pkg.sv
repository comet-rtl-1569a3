// comet_pkg: constants and types shared by the CoMeT RowHammer tracker.
//
// The defaults describe the main configuration: a DDR4 channel with 2 ranks of
// 16 banks and 128K rows per bank, a RowHammer threshold N_RH = 125, and a
// counter reset period of tREFW/k with k = 3, which gives a preventive refresh
// threshold N_PR = N_RH/(k+1) = 31. Each bank has a Count-Min-Sketch counter
// table of 4 hash functions x 512 counters, a 128-entry recent aggressor table
// and a 256-bit RAT miss history; an early preventive refresh fires when more
// than 25% of the recorded RAT misses are capacity misses. Counter width is the
// smallest that holds N_PR. The 1.2 GHz controller clock (833 ps) used to turn
// tREFW into cycles is this design's own choice.
package comet_pkg;

  localparam int unsigned ROW_W      = 17;       // row ID bits (128K rows/bank)
  localparam int unsigned N_ROWS     = 1 << ROW_W;
  localparam int unsigned N_RH       = 125;      // RowHammer threshold
  localparam int unsigned K_RESET    = 3;        // reset period = tREFW / K_RESET
  localparam int unsigned N_PR       = N_RH / (K_RESET + 1);
  localparam int unsigned CTR_W      = $clog2(N_PR + 1);
  localparam int unsigned N_HASH     = 4;
  localparam int unsigned N_COUNTERS = 512;
  localparam int unsigned N_RAT      = 128;
  localparam int unsigned HIST_LEN   = 256;
  localparam int unsigned EPRT_PCT   = 25;       // early refresh threshold, %
  localparam int unsigned EPRT       = HIST_LEN * EPRT_PCT / 100;
  localparam int unsigned N_RANKS    = 2;
  localparam int unsigned N_BANKS    = 16;       // per rank
  localparam int unsigned N_REF      = 8192;     // REF commands per tREFW
  localparam longint unsigned TREFW_PS = 64'd64_000_000_000; // 64 ms
  localparam int unsigned CLK_PS     = 833;      // controller clock period
  localparam int unsigned RESET_PERIOD = int'(TREFW_PS / (64'(CLK_PS) * 64'(K_RESET)));

  // Counter update requested from the recent aggressor table after a lookup.
  typedef enum logic [1:0] {
    RAT_NOP   = 2'd0,
    RAT_INC   = 2'd1,   // increment the hit entry's counter
    RAT_CLEAR = 2'd2,   // zero the hit entry's counter (victims refreshed)
    RAT_ALLOC = 2'd3    // allocate an entry for the looked-up row
  } rat_op_e;

  // One-cycle event pulses from a bank tracker, for statistics and testing.
  typedef struct packed {
    logic act;          // an ACT was processed
    logic ct_update;    // conservative update of the counter table
    logic rat_hit;      // RAT tag match
    logic rat_inc;      // RAT counter incremented
    logic prev_refresh; // preventive refresh of the neighbours started
    logic rat_alloc;    // new RAT entry allocated
    logic rat_evict;    // allocation evicted a valid RAT entry
    logic cap_miss;     // RAT miss by a row whose CT counters were already N_PR
    logic epr_req;      // early preventive refresh requested
    logic clear;        // all counters cleared
  } tracker_events_t;

endpackage
