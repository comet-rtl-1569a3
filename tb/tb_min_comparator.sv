// tb_min_comparator: random counter groups; checks the minimum and the mask of
// minimum-valued counters against a reference computed in the testbench.
module tb_min_comparator;
  logic [3:0][4:0] vals;
  logic [4:0]      min_val;
  logic [3:0]      is_min;
  int checks = 0, failures = 0;

  min_comparator #(.N(4), .W(5)) dut (.vals(vals), .min_val(min_val), .is_min(is_min));

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int unsigned m;
      logic [3:0] mask;
      // small value range so ties are frequent
      for (int i = 0; i < 4; i++) vals[i] = (n % 2) ? 5'($urandom_range(0, 3)) : 5'($urandom);
      #1;
      m = 99;
      for (int i = 0; i < 4; i++) if (vals[i] < m) m = vals[i];
      for (int i = 0; i < 4; i++) mask[i] = (vals[i] == m);
      checks++;
      if (min_val != 5'(m) || is_min != mask) begin
        failures++;
        $display("FAIL vals=%p min=%0d/%0d mask=%b/%b", vals, min_val, m, is_min, mask);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
