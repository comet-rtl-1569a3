// tb_scratchpad_sram: random reads and writes against an array model; checks
// the one-cycle read latency and that rdata holds between reads.
module tb_scratchpad_sram;
  logic clk = 0, en, we;
  logic [8:0] addr;
  logic [4:0] wdata, rdata;
  logic [4:0] model [512];
  int checks = 0, failures = 0;

  scratchpad_sram #(.DEPTH(512), .WIDTH(5)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 9'(a); wdata = 5'($urandom); model[a] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0); we = $urandom_range(0, 1); addr = 9'($urandom); wdata = 5'($urandom);
      if (en && !we) begin
        logic [4:0] exp;
        exp = model[addr];
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata != exp) begin failures++; $display("FAIL read %0d got %0d exp %0d", addr, rdata, exp); end
        // write elsewhere; rdata must hold
        en = 1; we = 1; addr = addr + 1'b1; wdata = 5'($urandom); model[addr] = wdata;
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata != exp) begin failures++; $display("FAIL rdata not held"); end
      end else if (en && we) begin
        model[addr] = wdata;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
