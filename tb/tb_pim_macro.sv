// tb_pim_macro: self-checking test of a PIM macro with shift compensation.
// Each round writes random weight columns, optionally shifted by delta with
// clamping to +127 (the offline WDS step, modelled here), loads a random
// signed input vector and runs a pass. The results are compared with dot
// products computed here: with the original weights when WDS is used and no
// weight was clamped, otherwise with (stored weight - delta). done must rise
// at the (IN_BITS+1)-th clock edge after the edge that samples start.
// Rounds also insert stall cycles (the pass must take that much longer and
// give the same result) and a recompute in the middle of a pass.
module tb_pim_macro;
  localparam int N_ROWS  = 16;
  localparam int NBANK   = 4;
  localparam int W_BITS  = 8;
  localparam int IN_BITS = 8;
  localparam int PSUM_W  = W_BITS + $clog2(N_ROWS);
  localparam int CORR_W  = $clog2(N_ROWS + 1) + 8;
  localparam int CPS_W   = ((PSUM_W > CORR_W) ? PSUM_W : CORR_W) + 1;
  localparam int ACC_W   = CPS_W + IN_BITS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we;
  logic [$clog2(NBANK)-1:0] w_bank;
  logic signed [W_BITS-1:0] w_data [N_ROWS];
  logic in_we;
  logic signed [IN_BITS-1:0] in_data [N_ROWS];
  logic start, stall, recompute, wds_en;
  logic [2:0] wds_shift;
  logic busy, done;
  logic signed [ACC_W-1:0] mac [NBANK];

  int orig_w   [NBANK][N_ROWS];
  int stored_w [NBANK][N_ROWS];
  int x        [N_ROWS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pim_macro #(.N_ROWS(N_ROWS), .NBANK(NBANK), .W_BITS(W_BITS), .IN_BITS(IN_BITS)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int delta, cycles, n_stall, exp_v, exp_orig;
    bit clamped, do_recomp;
    w_we = 0; w_bank = '0; in_we = 0; start = 0; stall = 0; recompute = 0;
    wds_en = 0; wds_shift = '0;
    for (int k = 0; k < N_ROWS; k++) begin w_data[k] = '0; in_data[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      wds_en    = (r % 3) != 0;
      wds_shift = (r % 2) ? 3'd3 : 3'd4;        // delta 8 or 16
      delta     = wds_en ? (1 << wds_shift) : 0;
      clamped   = 0;
      for (int b = 0; b < NBANK; b++) begin
        @(negedge clk);
        for (int k = 0; k < N_ROWS; k++) begin
          orig_w[b][k] = (r == 1) ? 127 : int'($signed(W_BITS'($urandom))) / ((r % 4 == 0) ? 1 : 8);
          stored_w[b][k] = orig_w[b][k] + delta;
          if (stored_w[b][k] > 127) begin stored_w[b][k] = 127; clamped = 1; end
          w_data[k] = W_BITS'(stored_w[b][k]);
        end
        w_bank = $clog2(NBANK)'(b);
        w_we = 1;
        @(negedge clk);
        w_we = 0;
      end
      for (int k = 0; k < N_ROWS; k++) begin
        x[k] = (r == 2) ? -128 : int'($signed(IN_BITS'($urandom)));
        in_data[k] = IN_BITS'(x[k]);
      end
      in_we = 1;
      @(negedge clk);
      in_we = 0;
      n_stall   = (r % 4 == 1) ? 3 : 0;
      do_recomp = (r % 5 == 2);
      start = 1;
      @(negedge clk);
      start = 0;
      cycles = 1;
      if (do_recomp) begin
        repeat (4) @(negedge clk);
        recompute = 1;
        @(negedge clk);
        recompute = 0;
        cycles = 1;
      end
      while (!done) begin
        if (cycles == 3 && n_stall > 0) begin
          stall = 1;
          repeat (n_stall) @(negedge clk);
          stall = 0;
          cycles += n_stall;
        end
        @(negedge clk);
        cycles++;
        if (cycles > 100) break;
      end
      check(cycles == IN_BITS + 2 + n_stall, $sformatf("latency %0d", cycles));
      check(!busy, "busy after done");
      for (int b = 0; b < NBANK; b++) begin
        exp_v = 0; exp_orig = 0;
        for (int k = 0; k < N_ROWS; k++) begin
          exp_v    += x[k] * (stored_w[b][k] - delta);
          exp_orig += x[k] * orig_w[b][k];
        end
        check(int'(mac[b]) == exp_v, $sformatf("r%0d bank%0d mac=%0d exp=%0d", r, b, mac[b], exp_v));
        if (!clamped) check(int'(mac[b]) == exp_orig, "WDS exactness");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
