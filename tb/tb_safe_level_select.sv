// tb_safe_level_select: exhaustive test of safe-level and a-level0 selection.
// Sweeps HR_G over 0..1000 per mille with and without the input-determined
// flag and compares with the rule "next 5% step at or above HR_G, at least
// 20%, 100% above 60% or for input-determined operators" and with Table 1
// of the a-level0 values, written here as a separate lookup.
module tb_safe_level_select;
  import aim_pkg::*;

  logic [9:0] hr_pm;
  logic       dyn_op;
  level_t     safe_level, a_level0;
  int checks = 0, failures = 0;

  safe_level_select dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Table 1, indexed by safe level.
  function automatic int table1(int s);
    int safe_col[10] = '{100, 60, 55, 50, 45, 40, 35, 30, 25, 20};
    int a0_col[10]   = '{ 60, 40, 35, 35, 35, 30, 30, 25, 20, 20};
    for (int i = 0; i < 10; i++) if (safe_col[i] == s) return a0_col[i];
    return -1;
  endfunction

  initial begin
    int exp_s;
    for (int d = 0; d < 2; d++) begin
      for (int h = 0; h <= 1000; h++) begin
        hr_pm = 10'(h); dyn_op = d[0];
        #1;
        if (d == 1 || h > 600) exp_s = 100;
        else begin
          exp_s = 20;
          while (exp_s * 10 < h) exp_s += 5;   // smallest 5% level >= HR
        end
        checks++;
        if (int'(safe_level) != exp_s || int'(a_level0) != table1(exp_s)) begin
          failures++;
          $display("FAIL hr=%0d dyn=%0d safe=%0d exp=%0d a0=%0d exp=%0d", h, d,
                   safe_level, exp_s, a_level0, table1(exp_s));
        end
      end
    end
    // the paper's example: HR_G = 47.5% -> 50%
    hr_pm = 10'd475; dyn_op = 0; #1;
    checks++;
    if (safe_level != 7'd50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
