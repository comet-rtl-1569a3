// lfsr: 16-bit maximal-length Galois LFSR (x^16 + x^14 + x^13 + x^11 + 1).
//
// Supplies the random choice of which recent-aggressor-table entry to evict.
// Advances one step in each cycle that step is high; resets to a non-zero seed.
module lfsr #(
  parameter int unsigned W        = 16,
  parameter logic [W-1:0] SEED    = 16'hACE1,
  parameter logic [W-1:0] TAPS    = 16'hB400
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  output logic [W-1:0] value
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    value <= SEED;
    else if (step) value <= (value >> 1) ^ (value[0] ? TAPS : '0);
  end
endmodule
