// min_comparator: the comparator that turns a counter group into Min_Ctr.
//
// Returns the smallest of N counter values and a mask of the counters equal to
// it, which the counter table's conservative update increments. Combinational;
// a linear comparison chain that synthesis may rebalance into a tree.
module min_comparator #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 5
) (
  input  logic [N-1:0][W-1:0] vals,
  output logic [W-1:0]        min_val,
  output logic [N-1:0]        is_min
);
  always_comb begin
    min_val = vals[0];
    for (int unsigned i = 1; i < N; i++)
      if (vals[i] < min_val) min_val = vals[i];
    for (int unsigned i = 0; i < N; i++)
      is_min[i] = (vals[i] == min_val);
  end
endmodule
