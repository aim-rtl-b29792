// tb_booster_controller: self-checking test of the IR-Booster controller.
// Four groups of four macros. Set 0 spans groups 0, 1 and half of group 2;
// Set 1 the other half of group 2 and group 3 (a split Set as in the
// paper's Set example). Each group gets a different HR. Checks:
//  * safe level and starting level of every group after init;
//  * the V-f pair registered for the level (sprint / low-power choice);
//  * IRFailure in group 0: group 0 falls to its safe level keeping its
//    frequency where possible, its busy macros are held ADJ_CYCLES cycles
//    and then get exactly one recompute pulse; the other busy macros of
//    Set 0 are stalled as long and never recomputed; Set 1 runs on; groups
//    1 and 2 synchronise to the Set level;
//  * IRFailure in group 2 stalls macros of both Sets;
//  * idle macros are never stalled.
module tb_booster_controller;
  import aim_pkg::*;
  localparam int NGROUP = 4, MPG = 4, NMACRO = 16, ADJ = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic init;
  macro_cfg_t macro_cfg [NMACRO];
  boost_mode_e mode;
  logic [15:0] beta;
  logic [NGROUP-1:0] ir_fail;
  logic [NMACRO-1:0] macro_busy, macro_stall, macro_recompute;
  level_t group_level [NGROUP], group_a_level [NGROUP], group_safe [NGROUP];
  vf_pair_t group_vf [NGROUP];
  logic [NGROUP-1:0] group_ev_down, group_ev_up, group_ev_back, group_ev_sync;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  booster_controller #(.NGROUP(NGROUP), .MPG(MPG), .ADJ_CYCLES(ADJ)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // HR per group (per mille) and the safe level expected for it
  int hr_of  [NGROUP] = '{475, 300, 580, 200};
  int safe_e [NGROUP] = '{ 50,  30,  60,  20};
  int a0_e   [NGROUP] = '{ 35,  25,  40,  20};

  // level of pair (V,f) as printed in the V-f table
  function automatic int lvl_of(int v, int f);
    return 60 - 5 * ((v - 1) + (f - 1));
  endfunction

  int stall_cnt [NMACRO];
  int recomp_cnt [NMACRO];
  always @(posedge clk) for (int m = 0; m < NMACRO; m++) begin
    if (macro_stall[m]) stall_cnt[m]++;
    if (macro_recompute[m]) recomp_cnt[m]++;
  end

  task automatic clear_counts();
    for (int m = 0; m < NMACRO; m++) begin stall_cnt[m] = 0; recomp_cnt[m] = 0; end
  endtask

  function automatic int set_of(int m);
    return (m < 10) ? 0 : 1;
  endfunction

  initial begin
    int f_before, sync_seen;
    init = 0; ir_fail = '0; mode = MODE_SPRINT; beta = 16'd1000; macro_busy = '1;
    for (int m = 0; m < NMACRO; m++) begin
      macro_cfg[m] = '0;
      macro_cfg[m].valid  = 1'b1;
      macro_cfg[m].set_id = 6'(set_of(m));
      macro_cfg[m].hr_pm  = 10'(hr_of[m / MPG] - 10 * (m % MPG)); // first macro is the group's worst
    end
    clear_counts();
    repeat (2) @(negedge clk);
    rst_n = 1;
    init = 1; @(negedge clk); init = 0;
    @(negedge clk); @(negedge clk);
    for (int g = 0; g < NGROUP; g++) begin
      chk(int'(group_safe[g]) == safe_e[g], $sformatf("safe g%0d=%0d", g, group_safe[g]));
      chk(int'(group_level[g]) == a0_e[g], $sformatf("a-level0 g%0d=%0d", g, group_level[g]));
      chk(!group_vf[g].dvfs && lvl_of(group_vf[g].v_idx, group_vf[g].f_idx) == a0_e[g], $sformatf("vf level g%0d", g));
      // sprint: highest frequency available at that level
      chk(int'(group_vf[g].f_idx) == ((60 - a0_e[g]) / 5 > 4 ? 5 : (60 - a0_e[g]) / 5 + 1), $sformatf("sprint f g%0d", g));
    end

    // ---- IRFailure in group 0
    clear_counts();
    f_before = group_vf[0].f_idx;
    ir_fail = 4'b0001;
    @(negedge clk);
    ir_fail = '0;
    chk(int'(group_level[0]) == safe_e[0], "g0 to safe level");
    chk(int'(group_level[1]) == safe_e[0] && int'(group_level[2]) == safe_e[2], "g1/g2 synchronised to Set level");
    chk(int'(group_level[3]) == a0_e[3], "g3 untouched");
    chk(group_ev_sync == 4'b0110, $sformatf("sync events %b", group_ev_sync));
    repeat (ADJ + 4) @(negedge clk);
    for (int m = 0; m < NMACRO; m++) begin
      if (m < 4) begin
        chk(stall_cnt[m] == ADJ && recomp_cnt[m] == 1, $sformatf("failing macro %0d stall=%0d rec=%0d", m, stall_cnt[m], recomp_cnt[m]));
      end else if (m < 10) begin
        chk(stall_cnt[m] == ADJ && recomp_cnt[m] == 0, $sformatf("Set0 macro %0d stall=%0d rec=%0d", m, stall_cnt[m], recomp_cnt[m]));
      end else begin
        chk(stall_cnt[m] == 0 && recomp_cnt[m] == 0, $sformatf("Set1 macro %0d disturbed", m));
      end
    end
    // frequency kept: the safe level 50% has a pair at f_before (f1..f3)
    if (f_before <= 3) chk(int'(group_vf[0].f_idx) == f_before, $sformatf("g0 kept f%0d got f%0d", f_before, group_vf[0].f_idx));
    chk(lvl_of(group_vf[0].v_idx, group_vf[0].f_idx) == safe_e[0], "g0 pair at safe level");

    // ---- IRFailure in group 2 (holds macros of both Sets)
    clear_counts();
    ir_fail = 4'b0100;
    @(negedge clk);
    ir_fail = '0;
    repeat (ADJ + 4) @(negedge clk);
    for (int m = 0; m < NMACRO; m++) begin
      chk(stall_cnt[m] == ADJ, $sformatf("g2 failure: macro %0d stall=%0d", m, stall_cnt[m]));
      chk(recomp_cnt[m] == ((m / MPG == 2) ? 1 : 0), $sformatf("g2 failure: macro %0d rec=%0d", m, recomp_cnt[m]));
    end

    // ---- idle macros are not held
    clear_counts();
    macro_busy = 16'h00FF;   // groups 2,3 idle
    ir_fail = 4'b0001;
    @(negedge clk);
    ir_fail = '0;
    repeat (ADJ + 4) @(negedge clk);
    for (int m = 8; m < NMACRO; m++) chk(stall_cnt[m] == 0, $sformatf("idle macro %0d stalled", m));
    chk(stall_cnt[4] == ADJ, "busy Set0 macro in group 1 stalled");

    // ---- low-power mode picks the lowest voltage
    mode = MODE_LOW_POWER;
    init = 1; @(negedge clk); init = 0;
    @(negedge clk); @(negedge clk);
    for (int g = 0; g < NGROUP; g++)
      chk(int'(group_vf[g].v_idx) == ((60 - a0_e[g]) / 5 > 4 ? 5 : (60 - a0_e[g]) / 5 + 1), $sformatf("low-power V g%0d", g));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
