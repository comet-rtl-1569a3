// tb_reset_timer: checks that ticks are one cycle wide and exactly PERIOD
// cycles apart (PERIOD = 1000 here), and that the default PERIOD is tREFW/3
// at an 833 ps clock.
module tb_reset_timer;
  logic clk = 0, rst_n = 0, tick;
  int checks = 0, failures = 0;
  int last = -1, cyc = 0, nticks = 0;

  reset_timer #(.PERIOD(1000)) dut (.*);
  logic tick_d;
  reset_timer dut_d (.clk(clk), .rst_n(rst_n), .tick(tick_d));
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (tick) begin
      nticks++;
      if (last >= 0) begin
        checks++;
        if (cyc - last != 1000) begin failures++; $display("FAIL period %0d", cyc - last); end
      end
      last = cyc;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (10500) @(posedge clk);
    checks++;
    if (nticks != 10) begin failures++; $display("FAIL %0d ticks", nticks); end
    checks++;
    if (dut_d.PERIOD != 64_000_000_000 / (833 * 3)) begin failures++; $display("FAIL default period"); end
    checks++;
    if (tick_d) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
