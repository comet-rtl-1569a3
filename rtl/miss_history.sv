// miss_history: RAT miss history vector and early-refresh trigger of one bank.
//
// Records the last HIST_LEN RAT misses, one bit each: 1 for a capacity miss (a
// row whose counter-table group was already saturated at N_PR, so it had been
// evicted from the RAT) and 0 for a compulsory miss (a row reaching N_PR for
// the first time). The vector is a circular buffer; a running count of its ones
// is kept by adding the new bit and subtracting the bit it overwrites.
// trigger is high while that count exceeds EPRT, asking for an early
// preventive refresh. push is applied at the clock edge and cap_count/trigger
// reflect it in the next cycle. clear empties the history (all compulsory).
//
// The vector, its length, the bit meaning and the comparison with EPRT follow
// the paper; the circular buffer and running count are this design's choices.
module miss_history #(
  parameter int unsigned HIST_LEN = 256,
  parameter int unsigned EPRT     = 64,
  localparam int unsigned PW      = (HIST_LEN > 1) ? $clog2(HIST_LEN) : 1,
  localparam int unsigned CW      = $clog2(HIST_LEN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic          capacity,
  input  logic          clear,
  output logic [CW-1:0] cap_count,
  output logic          trigger
);
  logic [HIST_LEN-1:0] hist;
  logic [PW-1:0]       ptr;

  assign trigger = cap_count > CW'(EPRT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist      <= '0;
      ptr       <= '0;
      cap_count <= '0;
    end else if (clear) begin
      hist      <= '0;
      ptr       <= '0;
      cap_count <= '0;
    end else if (push) begin
      hist[ptr] <= capacity;
      cap_count <= cap_count + CW'(capacity) - CW'(hist[ptr]);
      ptr       <= (ptr == PW'(HIST_LEN - 1)) ? '0 : ptr + 1'b1;
    end
  end
endmodule
