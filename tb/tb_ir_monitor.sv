// tb_ir_monitor: self-checking test of the IR monitor's digital back end.
// A ring-oscillator model runs from a supply that the test sets: nominal
// 750 mV, then a droop, then nominal again. The test computes the ring edges
// expected per window from the model's period and checks the reported
// count (within +-2 edges for synchroniser and phase uncertainty), that
// IRFailure pulses in windows whose count is below threshold, and that it
// stays low for nominal supply.
module tb_ir_monitor;
  localparam int CNT_W = 8;
  localparam int WIN   = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ro_clk;
  logic [CNT_W-1:0] threshold;
  logic [CNT_W-1:0] count;
  logic ir_fail;
  int vdd_mv = 750;
  int checks = 0, failures = 0;
  int n_fail = 0;

  always #500 clk = ~clk;

  ring_osc_model u_ro (.vdd_mv(vdd_mv), .enable(1'b1), .ro_clk(ro_clk));

  ir_monitor #(.CNT_W(CNT_W), .WIN(WIN)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (ir_fail) n_fail++;

  function automatic int expected_edges(int mv);
    int half = 45000 / (mv - 300);
    return (WIN * 1000) / (2 * half);
  endfunction

  // Run some windows at a given supply and check each window's result.
  task automatic run_at(int mv, int windows);
    int e, fails_before, got;
    vdd_mv = mv;
    e = expected_edges(mv);
    // let one full window pass so the new supply fills a whole window
    repeat (2 * WIN + 4) @(negedge clk);
    for (int w = 0; w < windows; w++) begin
      fails_before = n_fail;
      repeat (WIN) @(negedge clk);
      got = int'(count);
      checks++;
      if (got < e - 2 || got > e + 2) begin
        failures++;
        $display("FAIL vdd=%0d count=%0d expected~%0d", mv, got, e);
      end
      checks++;
      if ((n_fail - fails_before == 1) != (got < int'(threshold))) begin
        failures++;
        $display("FAIL vdd=%0d count=%0d thr=%0d fails=%0d", mv, got, threshold, n_fail - fails_before);
      end
    end
  endtask

  initial begin
    threshold = 8'd70;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // align to the monitor's window boundary
    while (dut.win_cnt != '0) @(negedge clk);
    run_at(750, 6);
    run_at(620, 6);
    run_at(700, 4);
    run_at(780, 4);
    threshold = 8'd90;
    run_at(750, 4);
    checks++;
    if (n_fail == 0) begin failures++; $display("FAIL no IRFailure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
