// tb_lfsr: checks the reset seed, that the state holds without step, the
// Galois step against a reference, and the full 65535-state period.
module tb_lfsr;
  logic clk = 0, rst_n = 0, step = 0;
  logic [15:0] value, ref_v;
  int checks = 0, failures = 0;

  lfsr dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (value != 16'hACE1) begin failures++; $display("FAIL seed %h", value); end
    @(negedge clk);
    checks++; if (value != 16'hACE1) begin failures++; $display("FAIL moved without step"); end
    ref_v = value;
    step = 1;
    for (int n = 1; n <= 65535; n++) begin
      @(negedge clk);
      ref_v = (ref_v >> 1) ^ (ref_v[0] ? 16'hB400 : 16'h0);
      checks++;
      if (value != ref_v) begin failures++; $display("FAIL step %0d", n); end
      if (n < 65535 && value == 16'hACE1) begin checks++; failures++; $display("FAIL short period %0d", n); end
    end
    checks++; if (value != 16'hACE1) begin failures++; $display("FAIL period not 65535"); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (70000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
