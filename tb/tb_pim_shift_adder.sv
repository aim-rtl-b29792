// tb_pim_shift_adder: self-checking test of the bit-serial accumulator.
// For a random signed input x and random per-bit partial sums p_t it feeds
// the sequence LSB first and checks acc = sum_{t<7} p_t*2^t - p_7*2^7 (the
// sign-bit term is subtracted), that en=0 holds acc and that clr clears it.
module tb_pim_shift_adder;
  localparam int PSUM_W  = 16;
  localparam int IN_BITS = 8;
  localparam int ACC_W   = PSUM_W + IN_BITS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clr, en, is_msb;
  logic [2:0] bit_idx;
  logic signed [PSUM_W-1:0] psum;
  logic signed [ACC_W-1:0] acc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pim_shift_adder #(.PSUM_W(PSUM_W), .IN_BITS(IN_BITS)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v;
    int p;
    clr = 0; en = 0; is_msb = 0; bit_idx = '0; psum = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 300; r++) begin
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      checks++;
      if (acc !== '0) begin failures++; $display("FAIL clr"); end
      exp_v = 0;
      for (int t = 0; t < IN_BITS; t++) begin
        p = (r == 0) ? -32768 : int'($signed(PSUM_W'($urandom)));
        psum = PSUM_W'(p);
        bit_idx = 3'(t);
        is_msb = (t == IN_BITS - 1);
        en = 1;
        exp_v += (t == IN_BITS - 1) ? -(longint'(p) <<< t) : (longint'(p) <<< t);
        @(negedge clk);
        if ((t % 3) == 1) begin   // a bubble cycle must not change acc
          en = 0;
          @(negedge clk);
        end
      end
      en = 0;
      checks++;
      if (longint'(acc) !== exp_v) begin
        failures++;
        $display("FAIL acc=%0d exp=%0d", acc, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
