// counter_table: the Count-Min-Sketch counter table (CT) of one DRAM bank.
//
// N_HASH rows of N_COUNTERS saturating counters, each row in its own
// single-port scratchpad SRAM so all rows are read in parallel. Row i is
// indexed by hash H_i of the DRAM row ID; the N_HASH counters so selected form
// the row's counter group and their minimum (Min_Ctr) is the row's estimated
// activation count.
//
// Hashes: H_i(X) = (X >> S_i) mod N_COUNTERS, a shift and a bit mask
// (N_COUNTERS is a power of two). The shifts S_i are spread evenly from 0 to
// ROW_W - log2(N_COUNTERS): with 17-bit rows and 512 counters they are 0, 2, 5
// and 8, so the first hash takes the low bits and the last the high bits of
// the row ID. Shift-and-mask hashing follows the paper; the shifts are this
// design's choice.
//
// Timing: rd_en with rd_row in cycle t reads the group; min_ctr, is_min and
// vals are valid in cycle t+1, when the caller may ask for one update of that
// same group:
//   upd_inc  conservative update: only the counters equal to Min_Ctr are
//            incremented (the caller guarantees Min_Ctr + 1 <= N_PR);
//   upd_set  every counter of the group is set to set_val (N_PR), i.e. the
//            group saturates after a preventive refresh.
// The update is written at the end of cycle t+1. clr_start begins clearing all
// counters, one column per cycle in every row at once; clr_busy is high for the
// N_COUNTERS cycles that takes and no access is accepted meanwhile.
//
// Count-Min Sketch with conservative update, saturation at N_PR and the
// parallel per-hash SRAM rows follow the paper; the two-cycle read-modify-write
// and the clearing sweep are this design's choices.
module counter_table #(
  parameter int unsigned ROW_W      = 17,
  parameter int unsigned N_HASH     = 4,
  parameter int unsigned N_COUNTERS = 512,
  parameter int unsigned CTR_W      = 5,
  localparam int unsigned IDX_W     = $clog2(N_COUNTERS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        rd_en,
  input  logic [ROW_W-1:0]            rd_row,
  output logic [CTR_W-1:0]            min_ctr,
  output logic [N_HASH-1:0]           is_min,
  output logic [N_HASH-1:0][CTR_W-1:0] vals,
  input  logic                        upd_inc,
  input  logic                        upd_set,
  input  logic [CTR_W-1:0]            set_val,
  input  logic                        clr_start,
  output logic                        clr_busy
);
  logic [N_HASH-1:0][IDX_W-1:0] idx, idx_q;
  logic [IDX_W-1:0]             clr_addr;

  localparam int unsigned SPAN = (ROW_W > IDX_W) ? ROW_W - IDX_W : 0;

  // Counter-group indices of the row being read.
  always_comb begin
    for (int unsigned i = 0; i < N_HASH; i++)
      idx[i] = IDX_W'(rd_row >> ((N_HASH > 1) ? (i * SPAN) / (N_HASH - 1) : 0));
  end

  min_comparator #(.N(N_HASH), .W(CTR_W)) u_min (
    .vals(vals), .min_val(min_ctr), .is_min(is_min)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_busy <= 1'b0;
      clr_addr <= '0;
      idx_q    <= '0;
    end else begin
      if (rd_en && !clr_busy) idx_q <= idx;
      if (clr_start && !clr_busy) begin
        clr_busy <= 1'b1;
        clr_addr <= '0;
      end else if (clr_busy) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == IDX_W'(N_COUNTERS - 1)) clr_busy <= 1'b0;
      end
    end
  end

  for (genvar i = 0; i < N_HASH; i++) begin : g_row
    logic             en, we;
    logic [IDX_W-1:0] addr;
    logic [CTR_W-1:0] wdata;

    always_comb begin
      en    = 1'b0;
      we    = 1'b0;
      addr  = idx[i];
      wdata = '0;
      if (clr_busy) begin
        en = 1'b1; we = 1'b1; addr = clr_addr;
      end else if (upd_set || (upd_inc && is_min[i])) begin
        en = 1'b1; we = 1'b1; addr = idx_q[i];
        wdata = upd_set ? set_val : vals[i] + 1'b1;
      end else if (rd_en) begin
        en = 1'b1;
      end
    end

    scratchpad_sram #(.DEPTH(N_COUNTERS), .WIDTH(CTR_W)) u_sram (
      .clk(clk), .en(en), .we(we), .addr(addr), .wdata(wdata), .rdata(vals[i])
    );
  end

`ifndef SYNTHESIS
  // A row may not be read in the same cycle its previous group is updated.
  a_no_rd_on_upd: assert property (@(posedge clk) disable iff (!rst_n)
    (upd_inc || upd_set) |-> !rd_en);
  a_no_access_while_clearing: assert property (@(posedge clk) disable iff (!rst_n)
    clr_busy |-> !(rd_en || upd_inc || upd_set));
`endif
endmodule
