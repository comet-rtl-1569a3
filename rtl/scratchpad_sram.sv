// scratchpad_sram: single-port synchronous scratchpad memory.
//
// One read or one write per cycle. A read presents the word on rdata in the
// next cycle and rdata holds until the next read; a write updates the array at
// the clock edge. This stands for the SRAM arrays that hold each counter-table
// row. The contents are not reset: users clear it by writing every address.
module scratchpad_sram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 5,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
