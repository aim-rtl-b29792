// booster_controller: IR-Booster controller for all Macro Groups.
//
// The chip's macros are organised in NGROUP physical Macro Groups of MPG
// macros; a group shares one supply and one clock, so it has one V-f pair.
// Tasks are mapped per macro; macros working on the same operator form a
// logical Set (set_id in macro_cfg), which may span several groups.
//
// Per group the controller
//   * takes the worst hamming rate of its valid macros (HR_G) and derives the
//     safe level and the initial aggressive level (safe_level_select);
//   * runs the level algorithm (level_adjuster);
//   * picks the V-f pair for the current level (vf_pair_select) and registers
//     it; when the level changed because of an IRFailure, the pair that keeps
//     the current frequency is preferred (voltage is raised instead).
// On an IRFailure of group g:
//   * every busy macro of g is held for ADJ_CYCLES cycles while the V-f pair
//     changes ("Re"), then gets a one-cycle recompute pulse;
//   * every other busy macro that belongs to a Set containing one of those
//     macros is stalled for the same time ("bubble"), keeping its partial
//     sums, and its group synchronises its level to the Set level;
//   * macros of other Sets carry on undisturbed.
// The Set level given to a synchronising group is the highest safe level of
// the failing groups in the shared Sets, never below the group's own safe
// level.
//
// Interface: init (one cycle, after macro_cfg is written) starts every group
// at its a-level0. ir_fail are single-cycle pulses from the IR monitors.
// All outputs are registered. group_ev_* pulse once per event and exist so
// that the behaviour can be observed.
//
// Follows the paper: group-level V-f control, safe level from HR_G, the
// level algorithm, stall of the rest of the Set while the failing macros
// adjust and recompute, frequency synchronisation inside a Set. This
// design's own choices: ADJ_CYCLES, the Set-level rule above, and that only
// busy macros are held.
module booster_controller
  import aim_pkg::*;
#(
  parameter int NGROUP     = 16,
  parameter int MPG        = 4,
  parameter int NMACRO     = NGROUP * MPG,
  parameter int BETA_W     = 16,
  parameter int ADJ_CYCLES = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init,
  input  macro_cfg_t        macro_cfg   [NMACRO],
  input  boost_mode_e       mode,
  input  logic [BETA_W-1:0] beta,
  input  logic [NGROUP-1:0] ir_fail,
  input  logic [NMACRO-1:0] macro_busy,
  output logic [NMACRO-1:0] macro_stall,
  output logic [NMACRO-1:0] macro_recompute,
  output level_t            group_level   [NGROUP],
  output level_t            group_a_level [NGROUP],
  output level_t            group_safe    [NGROUP],
  output vf_pair_t          group_vf      [NGROUP],
  output logic [NGROUP-1:0] group_ev_down,
  output logic [NGROUP-1:0] group_ev_up,
  output logic [NGROUP-1:0] group_ev_back,
  output logic [NGROUP-1:0] group_ev_sync
);

  localparam int NSET  = 64;
  localparam int HOLDW = $clog2(ADJ_CYCLES + 1);

  // ---------------------------------------------------------------- HR_G
  logic [9:0]   hr_g   [NGROUP];
  logic         dyn_g  [NGROUP];
  level_t       safe_g [NGROUP];
  level_t       a0_g   [NGROUP];

  always_comb begin
    for (int g = 0; g < NGROUP; g++) begin
      hr_g[g]  = '0;
      dyn_g[g] = 1'b0;
      for (int j = 0; j < MPG; j++) begin
        if (macro_cfg[g*MPG+j].valid) begin
          if (macro_cfg[g*MPG+j].hr_pm > hr_g[g]) hr_g[g] = macro_cfg[g*MPG+j].hr_pm;
          dyn_g[g] = dyn_g[g] | macro_cfg[g*MPG+j].dyn_op;
        end
      end
    end
  end

  for (genvar g = 0; g < NGROUP; g++) begin : g_safe
    safe_level_select u_sls (
      .hr_pm      (hr_g[g]),
      .dyn_op     (dyn_g[g]),
      .safe_level (safe_g[g]),
      .a_level0   (a0_g[g])
    );
  end

  // ------------------------------------------- failures, Sets, sync levels
  logic [NMACRO-1:0] fail_m;
  logic [NSET-1:0]   fail_set;
  level_t            set_lvl   [NSET];
  logic [NGROUP-1:0] sync_g;
  level_t            sync_lvl_g [NGROUP];

  always_comb begin
    for (int m = 0; m < NMACRO; m++)
      fail_m[m] = ir_fail[m / MPG] & macro_cfg[m].valid & macro_busy[m];

    fail_set = '0;
    for (int s = 0; s < NSET; s++) set_lvl[s] = LVL_MIN;
    for (int m = 0; m < NMACRO; m++) begin
      if (fail_m[m]) begin
        fail_set[macro_cfg[m].set_id] = 1'b1;
        if (safe_g[m / MPG] > set_lvl[macro_cfg[m].set_id])
          set_lvl[macro_cfg[m].set_id] = safe_g[m / MPG];
      end
    end

    for (int g = 0; g < NGROUP; g++) begin
      sync_g[g]     = 1'b0;
      sync_lvl_g[g] = safe_g[g];
      for (int j = 0; j < MPG; j++) begin
        if (macro_cfg[g*MPG+j].valid && macro_busy[g*MPG+j] &&
            fail_set[macro_cfg[g*MPG+j].set_id]) begin
          sync_g[g] = ~ir_fail[g];
          if (set_lvl[macro_cfg[g*MPG+j].set_id] > sync_lvl_g[g])
            sync_lvl_g[g] = set_lvl[macro_cfg[g*MPG+j].set_id];
        end
      end
    end
  end

  // ------------------------------------------------ per-group level control
  level_t  vf_level_q [NGROUP];
  logic    fail_d     [NGROUP];
  vf_pair_t vf_next   [NGROUP];

  for (genvar g = 0; g < NGROUP; g++) begin : g_grp
    level_adjuster #(.BETA_W(BETA_W)) u_adj (
      .clk        (clk),
      .rst_n      (rst_n),
      .init       (init),
      .safe_level (safe_g[g]),
      .a_level0   (a0_g[g]),
      .beta       (beta),
      .ir_fail    (ir_fail[g]),
      .sync       (sync_g[g]),
      .sync_level (sync_lvl_g[g]),
      .level      (group_level[g]),
      .a_level    (group_a_level[g]),
      .ev_down    (group_ev_down[g]),
      .ev_up      (group_ev_up[g]),
      .ev_back    (group_ev_back[g])
    );

    vf_pair_select u_vfs (
      .level  (group_level[g]),
      .mode   (mode),
      .keep_f (fail_d[g]),
      .cur_f  (group_vf[g].f_idx),
      .vf     (vf_next[g])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vf_level_q[g]    <= LVL_DVFS;
        group_vf[g]      <= '{dvfs: 1'b1, v_idx: 3'd0, f_idx: 3'd0};
        fail_d[g]        <= 1'b0;
        group_ev_sync[g] <= 1'b0;
        group_safe[g]    <= LVL_DVFS;
      end else begin
        fail_d[g]        <= ir_fail[g];
        group_ev_sync[g] <= sync_g[g] & ~init;
        group_safe[g]    <= safe_g[g];
        if (group_level[g] != vf_level_q[g]) begin
          vf_level_q[g] <= group_level[g];
          group_vf[g]   <= vf_next[g];
        end
      end
    end
  end

  // ------------------------------------------ stall / recompute per macro
  logic [HOLDW-1:0] hold_cnt [NMACRO];
  logic [NMACRO-1:0] recomp_pend;

  for (genvar m = 0; m < NMACRO; m++) begin : g_mac
    logic bubble;
    assign bubble = macro_cfg[m].valid & macro_busy[m] & fail_set[macro_cfg[m].set_id];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        hold_cnt[m]        <= '0;
        recomp_pend[m]     <= 1'b0;
        macro_recompute[m] <= 1'b0;
      end else begin
        macro_recompute[m] <= 1'b0;
        if (fail_m[m]) begin
          hold_cnt[m]    <= HOLDW'(ADJ_CYCLES);
          recomp_pend[m] <= 1'b1;
        end else if (bubble) begin
          hold_cnt[m]    <= HOLDW'(ADJ_CYCLES);
        end else if (hold_cnt[m] != '0) begin
          hold_cnt[m] <= hold_cnt[m] - 1'b1;
          if (hold_cnt[m] == HOLDW'(1) && recomp_pend[m]) begin
            macro_recompute[m] <= 1'b1;
            recomp_pend[m]     <= 1'b0;
          end
        end
      end
    end

    assign macro_stall[m] = (hold_cnt[m] != '0);
  end

endmodule
