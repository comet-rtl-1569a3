// tb_miss_history: pushes random capacity/compulsory misses into a 16-entry
// history with EPRT = 4 and checks the capacity-miss count over the last 16
// misses and the trigger (count > EPRT) against a queue model; checks clear.
// A second instance uses the default 256-entry, 25 % (EPRT = 64) setting.
module tb_miss_history;
  logic clk = 0, rst_n = 0, push = 0, capacity = 0, clear = 0;
  logic [4:0] cap_count;
  logic       trigger;
  logic [8:0] cap_count_d;
  logic       trigger_d;
  int checks = 0, failures = 0;
  bit q [$];
  bit qd [$];

  miss_history #(.HIST_LEN(16), .EPRT(4)) dut (.*);
  miss_history dut_d (.clk(clk), .rst_n(rst_n), .push(push), .capacity(capacity), .clear(clear),
                      .cap_count(cap_count_d), .trigger(trigger_d));
  always #5 clk = ~clk;

  function automatic int count1(bit b [$]);
    int c = 0;
    foreach (b[i]) c += b[i];
    return c;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      clear = (n == 1500);
      push = !clear && ($urandom_range(0, 2) != 0);
      // phases with different capacity-miss densities
      capacity = ($urandom_range(0, 99) < ((n / 300) % 2 ? 60 : 15));
      if (clear) begin q.delete(); qd.delete(); end
      if (push) begin
        q.push_back(capacity); if (q.size() > 16) void'(q.pop_front());
        qd.push_back(capacity); if (qd.size() > 256) void'(qd.pop_front());
      end
      @(posedge clk); #1;
      checks++;
      if (cap_count != 5'(count1(q)) || trigger != (count1(q) > 4)) begin
        failures++; $display("FAIL n=%0d count %0d exp %0d trig %b", n, cap_count, count1(q), trigger);
      end
      checks++;
      if (cap_count_d != 9'(count1(qd)) || trigger_d != (count1(qd) > 64)) begin
        failures++; $display("FAIL default n=%0d count %0d exp %0d", n, cap_count_d, count1(qd));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
