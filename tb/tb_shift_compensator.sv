// tb_shift_compensator: self-checking test of the WDS correction unit.
// For random input-bit vectors and shifts k, checks that one cycle later the
// register holds -(popcount << k) (zero when wds_en is low), that en=0 holds
// the value, and that clr zeroes it.
module tb_shift_compensator;
  localparam int N_ROWS = 64;
  localparam int K_W    = 3;
  localparam int CORR_W = $clog2(N_ROWS + 1) + (1 << K_W);

  logic clk = 1'b0, rst_n = 1'b0;
  logic en, clr, wds_en;
  logic [K_W-1:0] k;
  logic [N_ROWS-1:0] in_bits;
  logic signed [CORR_W-1:0] corr;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  shift_compensator #(.N_ROWS(N_ROWS), .K_W(K_W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int popcnt(logic [N_ROWS-1:0] v);
    int c = 0;
    for (int i = 0; i < N_ROWS; i++) c += int'(v[i]);
    return c;
  endfunction

  task automatic expect_corr(int exp_v, string what);
    checks++;
    if (int'(corr) !== exp_v) begin
      failures++;
      $display("FAIL %s corr=%0d exp=%0d", what, corr, exp_v);
    end
  endtask

  initial begin
    int exp_v, hold_v;
    en = 0; clr = 0; wds_en = 0; k = '0; in_bits = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      en = 1; clr = 0;
      wds_en = (t % 7) != 3;
      k = K_W'($urandom);
      case (t % 10)
        0:       in_bits = '1;
        1:       in_bits = '0;
        default: in_bits = {$urandom, $urandom};
      endcase
      exp_v = wds_en ? -(popcnt(in_bits) << k) : 0;
      @(negedge clk);
      expect_corr(exp_v, "calc");
      // hold with en low
      hold_v = exp_v;
      en = 0; in_bits = {$urandom, $urandom};
      @(negedge clk);
      expect_corr(hold_v, "hold");
      if (t % 50 == 0) begin
        clr = 1;
        @(negedge clk);
        clr = 0;
        expect_corr(0, "clr");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
