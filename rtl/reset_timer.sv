// reset_timer: periodic counter reset of CoMeT.
//
// Emits a one-cycle tick every PERIOD cycles. The counters of every bank are
// cleared on a tick, so PERIOD is the reset period tREFW/k: with tREFW = 64 ms,
// k = 3 and the assumed 833 ps controller clock, 25,610,244 cycles. The reset
// period and the choice of k follow the paper; the clock is this design's.
module reset_timer #(
  parameter int unsigned PERIOD = 25_610_244,
  localparam int unsigned W     = $clog2(PERIOD + 1)
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);
  logic [W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else begin
      tick <= (cnt == W'(PERIOD - 1));
      cnt  <= (cnt == W'(PERIOD - 1)) ? '0 : cnt + 1'b1;
    end
  end
endmodule
