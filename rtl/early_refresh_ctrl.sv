// early_refresh_ctrl: early preventive refresh of one DRAM rank.
//
// When any bank of the rank raises epr_req (its RAT miss history holds more
// than EPRT capacity misses), this block pulses clear to reset the CT, RAT and
// history of every bank in the rank, holds the rank (no ACT accepted) and
// issues N_REF rank-level REF commands to the scheduler through the
// ref_valid/ref_ready handshake, refreshing every row of the rank. It then
// waits until no bank requests an early refresh any more before rearming.
// Refreshing the whole rank with tREFW/tREFI REF commands and resetting all
// counters follow the paper; N_REF = 8192 and clearing at the start of the
// refresh are this design's choices.
module early_refresh_ctrl #(
  parameter int unsigned N_BANKS = 16,
  parameter int unsigned N_REF   = 8192,
  localparam int unsigned CW     = $clog2(N_REF + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_BANKS-1:0] epr_req,
  output logic               ref_valid,
  input  logic               ref_ready,
  output logic               clear,
  output logic               hold,
  output logic               active
);
  typedef enum logic [1:0] {E_IDLE, E_REF, E_WAIT} estate_e;
  estate_e       state;
  logic [CW-1:0] sent;

  assign ref_valid = (state == E_REF);
  assign hold      = (state != E_IDLE);
  assign active    = (state == E_REF);
  assign clear     = (state == E_IDLE) && (|epr_req);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE;
      sent  <= '0;
    end else begin
      unique case (state)
        E_IDLE: if (|epr_req) begin
          state <= E_REF;
          sent  <= '0;
        end
        E_REF: if (ref_ready) begin
          sent <= sent + 1'b1;
          if (sent == CW'(N_REF - 1)) state <= E_WAIT;
        end
        E_WAIT: if (!(|epr_req)) state <= E_IDLE;
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
