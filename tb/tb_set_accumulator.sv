// tb_set_accumulator: self-checking test of Set partial-sum accumulation.
// Random macro results and a random mapping of macros to Sets (with some
// empty macros); for several Sets the sums must equal the totals computed
// here, done must rise exactly NMACRO cycles after start.
module tb_set_accumulator;
  import aim_pkg::*;
  localparam int NMACRO = 16;
  localparam int NBANK  = 4;
  localparam int ACC_W  = 24;
  localparam int SUM_W  = ACC_W + $clog2(NMACRO);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start;
  logic [5:0] set_id;
  macro_cfg_t macro_cfg [NMACRO];
  logic signed [ACC_W-1:0] mac [NMACRO*NBANK];
  logic signed [SUM_W-1:0] sum [NBANK];
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  set_accumulator #(.NMACRO(NMACRO), .NBANK(NBANK), .ACC_W(ACC_W)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v [NBANK];
    int cyc;
    start = 0; set_id = '0;
    for (int m = 0; m < NMACRO; m++) macro_cfg[m] = '0;
    for (int i = 0; i < NMACRO*NBANK; i++) mac[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      for (int m = 0; m < NMACRO; m++) begin
        macro_cfg[m] = '0;
        macro_cfg[m].valid  = ($urandom % 8) != 0;
        macro_cfg[m].set_id = 6'($urandom % 4);
        for (int b = 0; b < NBANK; b++)
          mac[m*NBANK+b] = (r == 0) ? -(1 <<< (ACC_W-1)) : ACC_W'($urandom);
      end
      set_id = 6'(r % 4);
      for (int b = 0; b < NBANK; b++) begin
        exp_v[b] = 0;
        for (int m = 0; m < NMACRO; m++)
          if (macro_cfg[m].valid && macro_cfg[m].set_id == set_id) exp_v[b] += longint'(mac[m*NBANK+b]);
      end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != NMACRO) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int b = 0; b < NBANK; b++) begin
        checks++;
        if (longint'(sum[b]) != exp_v[b]) begin
          failures++;
          $display("FAIL set %0d bank %0d sum=%0d exp=%0d", set_id, b, sum[b], exp_v[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
