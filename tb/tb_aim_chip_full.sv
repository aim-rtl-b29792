// tb_aim_chip_full: end-to-end test of the core at its default size.
// Same stimulus, reference model and checks as tb_aim_chip, but the core is
// instantiated without parameter overrides: 16 Macro Groups of 4 macros (the
// paper's chip), 32 banks per macro (the smallest bank count the paper
// names) and 64 rows per bank (this design's choice). Set 0 spans groups 0-9 and uses weight distribution shift; Set 1
// takes groups 10-15, with one input-determined operator and one empty
// macro. Fewer passes are run than in the reduced test because every pass
// checks 63 x 32 dot products of length 64.
module tb_aim_chip_full;
  import aim_pkg::*;
  localparam int NGROUP  = 16;
  localparam int MPG     = 4;
  localparam int NMACRO  = NGROUP * MPG;
  localparam int N_ROWS  = 64;
  localparam int NBANK   = 32;
  localparam int W_BITS  = 8;
  localparam int IN_BITS = 8;
  localparam int PASSES  = 16;
  localparam int REPS    = 4;
  localparam int PSUM_W  = W_BITS + $clog2(N_ROWS);
  localparam int CORR_W  = $clog2(N_ROWS + 1) + 8;
  localparam int CPS_W   = ((PSUM_W > CORR_W) ? PSUM_W : CORR_W) + 1;
  localparam int ACC_W   = CPS_W + IN_BITS;
  localparam int SUM_W   = ACC_W + $clog2(NMACRO);
  localparam int MW      = $clog2(NMACRO);

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we;
  logic [MW-1:0] w_macro;
  logic [$clog2(NBANK)-1:0] w_bank;
  logic signed [W_BITS-1:0] w_data [N_ROWS];
  logic in_we;
  logic [MW-1:0] in_macro;
  logic signed [IN_BITS-1:0] in_data [N_ROWS];
  logic [NMACRO-1:0] start;
  macro_cfg_t macro_cfg [NMACRO];
  logic booster_init;
  boost_mode_e boost_mode;
  logic [15:0] beta;
  logic [7:0] ir_threshold;
  logic [NGROUP-1:0] ro_clk;
  logic [NMACRO-1:0] macro_busy, macro_done, macro_stall, macro_recompute;
  logic [MW-1:0] rd_macro;
  logic signed [ACC_W-1:0] rd_mac [NBANK];
  logic acc_start;
  logic [5:0] acc_set;
  logic signed [SUM_W-1:0] acc_sum [NBANK];
  logic acc_done;
  logic [NGROUP-1:0] group_ir_fail;
  logic [7:0] group_ro_count [NGROUP];
  level_t group_level [NGROUP], group_a_level [NGROUP], group_safe [NGROUP];
  vf_pair_t group_vf [NGROUP];
  logic [NGROUP-1:0] group_ev_down, group_ev_up, group_ev_back, group_ev_sync;

  int checks = 0, failures = 0;
  int vdd_mv [NGROUP];
  int stall_seen = 0;
  int droop_left [NGROUP];

  // mechanism counters
  int n_fail = 0, n_recomp = 0, n_stall = 0, n_sync = 0, n_down = 0, n_up = 0,
      n_back = 0, n_dvfs = 0, n_wds = 0, n_acc = 0, n_sprint = 0, n_lowpow = 0;

  always #500 clk = ~clk;

  for (genvar g = 0; g < NGROUP; g++) begin : g_ro
    ring_osc_model u_ro (.vdd_mv(vdd_mv[g]), .enable(1'b1), .ro_clk(ro_clk[g]));
  end

  aim_chip dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  // ---------------------------------------------------------------- model
  int wq [NMACRO][NBANK][N_ROWS];     // weights as stored in the macro
  int x  [NMACRO][N_ROWS];            // input vectors of the current pass

  function automatic int delta_of(int m);
    return macro_cfg[m].wds_en ? (1 << macro_cfg[m].wds_shift) : 0;
  endfunction

  function automatic longint expect_mac(int m, int b);
    longint s = 0;
    for (int k = 0; k < N_ROWS; k++) s += longint'(x[m][k]) * longint'(wq[m][b][k] - delta_of(m));
    return s;
  endfunction

  // -------------------------------------------------- supply / droop model
  // A group that runs more aggressively than its safe level sometimes sees
  // a droop: its supply falls to 620 mV for 40 cycles (several monitor
  // windows), long enough for back-to-back IRFailures.
  always @(posedge clk) begin
    for (int g = 0; g < NGROUP; g++) begin
      if (droop_left[g] > 0) begin
        droop_left[g]--;
        if (droop_left[g] == 0) vdd_mv[g] = 750;
      end else if (rst_n && group_level[g] < group_safe[g] &&
                   (macro_busy[g*MPG +: MPG] != '0) && ($urandom % 1000) < 4) begin
        droop_left[g] = 40;
        vdd_mv[g] = 620;
      end
    end
  end

  // ------------------------------------------------------ event counting
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < NGROUP; g++) begin
      if (group_ir_fail[g]) n_fail++;
      if (group_ev_sync[g]) n_sync++;
      if (group_ev_down[g]) n_down++;
      if (group_ev_up[g])   n_up++;
      if (group_ev_back[g]) n_back++;
      if (group_vf[g].dvfs && group_level[g] == LVL_DVFS && booster_ran) n_dvfs++;
      if (!group_vf[g].dvfs && booster_ran) begin
        if (boost_mode == MODE_SPRINT) n_sprint++; else n_lowpow++;
      end
    end
    for (int m = 0; m < NMACRO; m++) begin
      if (macro_recompute[m]) n_recomp++;
      if (macro_stall[m] && macro_busy[m]) n_stall++;
    end
  end

  bit booster_ran = 0;

  // The pair in use must carry the group's level once the level has been
  // stable for one edge (the pair register follows the level one cycle later).
  level_t lvl_prev [NGROUP];
  always @(posedge clk) for (int g = 0; g < NGROUP; g++) lvl_prev[g] <= group_level[g];
  always @(negedge clk) if (booster_ran) begin
    for (int g = 0; g < NGROUP; g++) begin
      if (group_level[g] == lvl_prev[g]) begin
        checks++;
        if (group_level[g] == LVL_DVFS) begin
          if (!group_vf[g].dvfs) begin failures++; $display("FAIL DVFS pair expected g%0d", g); end
        end else if (group_vf[g].dvfs ||
                     int'(group_vf[g].v_idx) + int'(group_vf[g].f_idx) != 2 + (60 - int'(group_level[g])) / 5) begin
          failures++;
          if (failures < 20)
            $display("FAIL g%0d pair V%0d f%0d does not match level %0d", g, group_vf[g].v_idx, group_vf[g].f_idx, group_level[g]);
        end
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  task automatic configure();
    for (int m = 0; m < NMACRO; m++) begin
      macro_cfg[m] = '0;
      macro_cfg[m].valid     = (m != NMACRO - 1);                 // last macro empty
      macro_cfg[m].set_id    = (m < (NMACRO * 5) / 8) ? 6'd0 : 6'd1;
      macro_cfg[m].dyn_op    = (m == NMACRO - 4);                 // input-determined operator
      macro_cfg[m].wds_en    = (macro_cfg[m].set_id == 6'd0);
      macro_cfg[m].wds_shift = 3'd3;                               // delta = 8
      macro_cfg[m].hr_pm     = 10'(250 + 40 * ((m / MPG) % 4));
    end
  endtask

  task automatic load_weights();
    int v;
    for (int m = 0; m < NMACRO; m++) begin
      for (int b = 0; b < NBANK; b++) begin
        for (int k = 0; k < N_ROWS; k++) begin
          v = int'($signed(W_BITS'($urandom))) / 4;     // small weights, as after quantization
          if (macro_cfg[m].wds_en) begin
            v = v + delta_of(m);
            if (v > 127) v = 127;                        // clamp to INTMAX
          end
          wq[m][b][k] = v;
          w_data[k] = W_BITS'(v);
        end
        w_macro = MW'(m); w_bank = $clog2(NBANK)'(b); w_we = 1;
        @(negedge clk);
      end
    end
    w_we = 0;
  endtask

  task automatic run_pass(int p);
    int cyc;
    for (int m = 0; m < NMACRO; m++) begin
      for (int k = 0; k < N_ROWS; k++) begin
        x[m][k] = int'($signed(IN_BITS'($urandom)));
        in_data[k] = IN_BITS'(x[m][k]);
      end
      in_macro = MW'(m); in_we = 1;
      @(negedge clk);
    end
    in_we = 0;
    // the same inputs are run REPS times back to back, so the macros are busy
    // most of the time and droops hit running passes
    for (int r = 0; r < REPS; r++) begin
      for (int m = 0; m < NMACRO; m++) start[m] = macro_cfg[m].valid;
      @(negedge clk);
      start = '0;
      cyc = 0;
      while (((macro_done | ~valid_mask()) != '1) && cyc < 5000) begin
        @(negedge clk); cyc++;
      end
      chk(cyc < 5000, "pass finished");
      // without a stall, done is seen IN_BITS+1 edges after the start edge
      if (n_stall == stall_seen) chk(cyc == IN_BITS + 1, $sformatf("pass latency %0d", cyc));
      stall_seen = n_stall;
      for (int m = 0; m < NMACRO; m++) begin
        if (!macro_cfg[m].valid) continue;
        rd_macro = MW'(m);
        #1;
        for (int b = 0; b < NBANK; b++) begin
          chk(longint'(rd_mac[b]) == expect_mac(m, b),
              $sformatf("pass %0d.%0d macro %0d bank %0d got %0d exp %0d", p, r, m, b, rd_mac[b], expect_mac(m, b)));
          if (macro_cfg[m].wds_en) n_wds++;
        end
      end
    end
    // Set totals
    for (int s = 0; s < 2; s++) begin
      longint tot;
      acc_set = 6'(s); acc_start = 1;
      @(negedge clk);
      acc_start = 0;
      while (!acc_done) @(negedge clk);
      for (int b = 0; b < NBANK; b++) begin
        tot = 0;
        for (int m = 0; m < NMACRO; m++)
          if (macro_cfg[m].valid && macro_cfg[m].set_id == 6'(s)) tot += expect_mac(m, b);
        chk(longint'(acc_sum[b]) == tot, $sformatf("Set %0d bank %0d total", s, b));
      end
      n_acc++;
    end
  endtask

  function automatic logic [NMACRO-1:0] valid_mask();
    logic [NMACRO-1:0] v;
    for (int m = 0; m < NMACRO; m++) v[m] = macro_cfg[m].valid;
    return v;
  endfunction

  initial begin
    for (int g = 0; g < NGROUP; g++) begin vdd_mv[g] = 750; droop_left[g] = 0; end
    w_we = 0; w_macro = '0; w_bank = '0; in_we = 0; in_macro = '0; start = '0;
    booster_init = 0; boost_mode = MODE_SPRINT; beta = 16'd100; ir_threshold = 8'd70;
    rd_macro = '0; acc_start = 0; acc_set = '0;
    for (int k = 0; k < N_ROWS; k++) begin w_data[k] = '0; in_data[k] = '0; end
    configure();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights();
    booster_init = 1; @(negedge clk); booster_init = 0;
    booster_ran = 1;
    @(negedge clk);
    // safe levels: HR 25/29/33/37% -> 25/30/35/40%, group 3 has an input-determined operator
    chk(group_safe[0] == 7'd25 && group_safe[1] == 7'd30 && group_safe[2] == 7'd35, "safe levels");
    chk(group_safe[NGROUP-1] == LVL_DVFS, "input-determined operator falls back to DVFS level");
    for (int p = 0; p < PASSES; p++) begin
      if (p == PASSES / 2) begin
        boost_mode = MODE_LOW_POWER;
        booster_init = 1; @(negedge clk); booster_init = 0;
      end
      run_pass(p);
    end
    $display("mechanisms: ir_fail=%0d recompute=%0d stall=%0d sync=%0d down=%0d up=%0d back=%0d dvfs=%0d wds=%0d acc=%0d sprint=%0d lowpower=%0d",
             n_fail, n_recomp, n_stall, n_sync, n_down, n_up, n_back, n_dvfs, n_wds, n_acc, n_sprint, n_lowpow);
    chk(n_fail > 0,   "IRFailure happened");
    chk(n_recomp > 0, "recompute happened");
    chk(n_stall > 0,  "stall happened");
    chk(n_sync > 0,   "Set synchronisation happened");
    chk(n_down > 0,   "a-level down happened");
    chk(n_up > 0,     "a-level up happened");
    chk(n_back > 0,   "return to a-level happened");
    chk(n_dvfs > 0,   "DVFS fallback happened");
    chk(n_wds > 0,    "WDS-corrected results checked");
    chk(n_acc > 0,    "Set accumulation happened");
    chk(n_sprint > 0 && n_lowpow > 0, "both modes used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
