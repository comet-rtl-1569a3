// tb_early_refresh_ctrl: a 4-bank rank with N_REF = 20. Checks that a bank's
// request produces one clear pulse, hold for the whole operation, exactly
// N_REF REF handshakes under random back-pressure, and no rearm while a
// request is still high; then a request from another bank repeats it. A
// default instance (8192 REFs) is run through one complete early refresh.
module tb_early_refresh_ctrl;
  logic clk = 0, rst_n = 0;
  logic [3:0] epr_req = 0;
  logic ref_valid, ref_ready = 0, clear, hold, active;
  int checks = 0, failures = 0;

  early_refresh_ctrl #(.N_BANKS(4), .N_REF(20)) dut (.*);

  logic [15:0] epr_d = 0;
  logic rv_d, clr_d, hold_d, act_d;
  early_refresh_ctrl dut_d (.clk(clk), .rst_n(rst_n), .epr_req(epr_d), .ref_valid(rv_d), .ref_ready(1'b1),
                            .clear(clr_d), .hold(hold_d), .active(act_d));
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic one_round(int bank);
    int refs = 0, clears = 0, cyc = 0;
    @(negedge clk);
    check(!hold && !ref_valid, "idle before request");
    epr_req[bank] = 1;
    #1; check(clear, "clear with request");
    while (refs < 20 && cyc < 1000) begin
      @(negedge clk); cyc++;
      if (cyc == 2) epr_req[bank] = 0;    // bank cleared its history
      if (clear) clears++;
      check(hold, "hold during early refresh");
      ref_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (ref_valid && ref_ready) refs++;
    end
    @(negedge clk); ref_ready = 0;
    check(refs == 20, $sformatf("REF count %0d", refs));
    check(clears == 0, "single clear pulse");
    repeat (3) begin @(negedge clk); check(!ref_valid, "no extra REF"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    one_round(2);
    @(negedge clk);
    check(!hold, "hold released");
    // request still high at the end: must wait in E_WAIT
    epr_req[1] = 1;
    repeat (30) @(negedge clk);
    ref_ready = 1;
    repeat (40) @(negedge clk);
    ref_ready = 0;
    check(hold && !ref_valid, "waits while a request stays high");
    epr_req[1] = 0;
    @(negedge clk); @(negedge clk);
    check(!hold, "rearms after request drops");
    one_round(3);
    // default size
    begin
      int n = 0;
      @(negedge clk); epr_d[7] = 1; @(negedge clk); epr_d[7] = 0;
      while (hold_d && n < 10000) begin
        if (rv_d) n++;
        @(negedge clk);
      end
      check(n == 8192, $sformatf("default REF count %0d", n));
    end
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
