// tb_level_adjuster: self-checking test of the per-group level algorithm.
// A transcription of the algorithm (SafeCounter, level, a-level) runs here
// next to the block under random IRFailure and Set-sync stimulus with
// several safe levels and betas; level and a-level must match every cycle.
// Directed phases make sure every step happens: back to a-level after beta
// quiet cycles, a-level up after 2*beta, a-level down when failures come
// within 0.2*beta, and synchronisation.
module tb_level_adjuster;
  import aim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic init, ir_fail, sync;
  level_t safe_level, a_level0, sync_level, level, a_level;
  logic [15:0] beta;
  logic ev_down, ev_up, ev_back;
  int checks = 0, failures = 0;
  int n_down = 0, n_up = 0, n_back = 0, n_sync = 0;

  // reference state
  int r_cnt = 0, r_level = 100, r_alevel = 100;   // reset state

  always #5 clk = ~clk;

  level_adjuster #(.BETA_W(16)) dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int cap(int s);
    return (s > 60) ? 60 : s;
  endfunction

  // one reference step, same edge as the DUT
  always @(posedge clk) if (rst_n) begin
    if (init) begin
      r_cnt = 0; r_alevel = a_level0; r_level = a_level0;
    end else if (ir_fail) begin
      r_level = safe_level;
      if (r_cnt < 0.2 * beta) begin
        r_alevel = (r_alevel + 5 > cap(safe_level)) ? cap(safe_level) : r_alevel + 5;
        n_down++;
      end
      r_cnt = 0;
    end else if (sync) begin
      r_level = sync_level; r_cnt = 0; n_sync++;
    end else begin
      r_cnt++;
      if (r_cnt == beta) begin r_level = r_alevel; n_back++; end
      if (r_cnt > 2 * beta) begin
        r_alevel = (r_alevel - 5 < 20) ? 20 : r_alevel - 5;
        r_level = r_alevel; r_cnt = beta; n_up++;
      end
    end
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (int'(level) != r_level || int'(a_level) != r_alevel) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t level=%0d/%0d a=%0d/%0d", $time, level, r_level, a_level, r_alevel);
    end
  end

  task automatic start_op(int safe, int b);
    @(negedge clk);
    safe_level = 7'(safe); a_level0 = a_level0_of(7'(safe)); beta = 16'(b);
    init = 1;
    @(negedge clk);
    init = 0;
  endtask

  initial begin
    int safes[5] = '{100, 60, 50, 35, 20};
    init = 0; ir_fail = 0; sync = 0; sync_level = 7'd50;
    safe_level = 7'd50; a_level0 = 7'd35; beta = 16'd10;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // directed: quiet run -> a-level up several times
    start_op(50, 10);
    repeat (60) @(negedge clk);
    // fast failures -> a-level down
    for (int i = 0; i < 4; i++) begin
      ir_fail = 1; @(negedge clk); ir_fail = 0;
      @(negedge clk);
    end
    // sync
    sync = 1; sync_level = 7'd55; @(negedge clk); sync = 0;
    repeat (30) @(negedge clk);
    // random phases
    for (int ph = 0; ph < 40; ph++) begin
      start_op(safes[ph % 5], 5 + ($urandom % 60));
      for (int c = 0; c < 400; c++) begin
        ir_fail = ($urandom % 100) < 3;
        sync = ($urandom % 100) < 2;
        sync_level = 7'(20 + 5 * ($urandom % 9));
        @(negedge clk);
      end
      ir_fail = 0; sync = 0;
    end
    checks++;
    if (n_down == 0 || n_up == 0 || n_back == 0 || n_sync == 0) begin
      failures++;
      $display("FAIL coverage down=%0d up=%0d back=%0d sync=%0d", n_down, n_up, n_back, n_sync);
    end
    $display("coverage: down=%0d up=%0d back=%0d sync=%0d", n_down, n_up, n_back, n_sync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
