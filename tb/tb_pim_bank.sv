// tb_pim_bank: self-checking test of one PIM bank.
// Writes random signed weight columns and compares the adder-tree output for
// random word-line bit patterns (plus all-zero and all-one patterns) with a
// sum computed here.
module tb_pim_bank;
  localparam int N_ROWS = 16;
  localparam int W_BITS = 8;
  localparam int PSUM_W = W_BITS + $clog2(N_ROWS);

  logic clk = 1'b0;
  logic w_we;
  logic signed [W_BITS-1:0] w_data [N_ROWS];
  logic signed [W_BITS-1:0] ref_w  [N_ROWS];
  logic [N_ROWS-1:0] in_bits;
  logic signed [PSUM_W-1:0] psum;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pim_bank #(.N_ROWS(N_ROWS), .W_BITS(W_BITS)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_bits(input logic [N_ROWS-1:0] bits);
    int exp_sum;
    in_bits = bits;
    #1;
    exp_sum = 0;
    for (int k = 0; k < N_ROWS; k++) if (bits[k]) exp_sum += int'(ref_w[k]);
    checks++;
    if (int'(psum) !== exp_sum) begin
      failures++;
      $display("FAIL bits=%h psum=%0d exp=%0d", bits, psum, exp_sum);
    end
  endtask

  initial begin
    w_we = 0; in_bits = '0;
    for (int k = 0; k < N_ROWS; k++) w_data[k] = '0;
    for (int round = 0; round < 20; round++) begin
      @(negedge clk);
      for (int k = 0; k < N_ROWS; k++) begin
        w_data[k] = (round == 0) ? -8'sd128 : W_BITS'($urandom);
        ref_w[k]  = w_data[k];
      end
      w_we = 1;
      @(negedge clk);
      w_we = 0;
      for (int k = 0; k < N_ROWS; k++) w_data[k] = W_BITS'($urandom); // must not be written
      check_bits('0);
      check_bits('1);
      for (int t = 0; t < 30; t++) check_bits(N_ROWS'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
