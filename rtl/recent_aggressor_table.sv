// recent_aggressor_table: the recent aggressor table (RAT) of one DRAM bank.
//
// N_ENTRIES per-row activation counters, each tagged with a full DRAM row ID.
// The tags with their valid bits form a CAM searched in parallel; the counters
// are an array addressed by the matching entry.
//
// Timing: lookup with row in cycle t searches the tags; hit and ctr (RAT_Ctr)
// are valid in cycle t+1, when the caller gives one operation, applied at the
// end of that cycle:
//   RAT_INC    increment the hit entry's counter;
//   RAT_CLEAR  zero the hit entry's counter (its victims were refreshed);
//   RAT_ALLOC  write the looked-up row into a new entry with counter 0. A free
//              entry is used if there is one, else an entry picked by an LFSR is
//              evicted (evicted pulses with the allocation).
// clr_all invalidates every entry in one cycle.
//
// The table's role, size, tag and the random eviction when full follow the
// paper; filling free entries first and the LFSR are this design's choices.
module recent_aggressor_table #(
  parameter int unsigned ROW_W     = 17,
  parameter int unsigned N_ENTRIES = 128,
  parameter int unsigned CTR_W     = 5,
  localparam int unsigned EW       = $clog2(N_ENTRIES)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                lookup,
  input  logic [ROW_W-1:0]    row,
  output logic                hit,
  output logic [CTR_W-1:0]    ctr,
  input  comet_pkg::rat_op_e  op,
  output logic                evicted,
  input  logic                clr_all
);
  import comet_pkg::*;

  logic [N_ENTRIES-1:0]            valid;
  logic [ROW_W-1:0]                tags [N_ENTRIES];
  logic [CTR_W-1:0]                ctrs [N_ENTRIES];

  logic [ROW_W-1:0] row_q;
  logic [EW-1:0]    hit_idx_q, alloc_idx_q;
  logic             full_q;

  // CAM search and allocation choice on the incoming row.
  logic          match_any, free_any;
  logic [EW-1:0] match_idx, free_idx;
  logic [15:0]   rnd;

  lfsr #(.W(16)) u_lfsr (.clk(clk), .rst_n(rst_n), .step(1'b1), .value(rnd));

  always_comb begin
    match_any = 1'b0;
    match_idx = '0;
    free_any  = 1'b0;
    free_idx  = '0;
    for (int unsigned e = 0; e < N_ENTRIES; e++) begin
      if (valid[e] && tags[e] == row && !match_any) begin
        match_any = 1'b1;
        match_idx = EW'(e);
      end
      if (!valid[e] && !free_any) begin
        free_any = 1'b1;
        free_idx = EW'(e);
      end
    end
  end

  assign ctr     = ctrs[hit_idx_q];
  assign evicted = (op == RAT_ALLOC) && full_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid       <= '0;
      hit         <= 1'b0;
      row_q       <= '0;
      hit_idx_q   <= '0;
      alloc_idx_q <= '0;
      full_q      <= 1'b0;
    end else if (clr_all) begin
      valid <= '0;
      hit   <= 1'b0;
    end else begin
      if (lookup) begin
        hit         <= match_any;
        hit_idx_q   <= match_idx;
        row_q       <= row;
        full_q      <= !free_any;
        alloc_idx_q <= free_any ? free_idx : EW'(rnd % N_ENTRIES);
      end
      if (op == RAT_ALLOC) begin
        valid[alloc_idx_q] <= 1'b1;
        hit                <= 1'b0;
      end
    end
  end

  // Tag and counter arrays: written, never reset (valid bits guard them).
  always_ff @(posedge clk) begin
    unique case (op)
      RAT_INC:   ctrs[hit_idx_q] <= ctrs[hit_idx_q] + 1'b1;
      RAT_CLEAR: ctrs[hit_idx_q] <= '0;
      RAT_ALLOC: begin
        tags[alloc_idx_q] <= row_q;
        ctrs[alloc_idx_q] <= '0;
      end
      default: ;
    endcase
  end

`ifndef SYNTHESIS
  a_inc_needs_hit: assert property (@(posedge clk) disable iff (!rst_n)
    (op == RAT_INC || op == RAT_CLEAR) |-> hit);
  a_alloc_needs_miss: assert property (@(posedge clk) disable iff (!rst_n)
    (op == RAT_ALLOC) |-> !hit);
`endif
endmodule
