// level_adjuster: IRFailure-aware level control of one Macro Group.
//
// Implements the IR-Booster's per-group level algorithm. The group runs at
// its aggressive level (a-level, a lower percentage than the safe level:
// lower voltage or higher frequency). Every cycle:
//   IRFailure     -> level = safe level; if fewer than 0.2*beta cycles
//                    passed since the last reset of SafeCounter, the a-level
//                    is too aggressive and steps down (+5%); SafeCounter = 0.
//   Set sync      -> level = sync_level (another group of a shared Set
//                    changed frequency); SafeCounter = 0.
//   otherwise     -> SafeCounter++; when it reaches beta the level returns to
//                    the a-level; beyond 2*beta the a-level steps up (-5%),
//                    the level follows it and SafeCounter is set back to beta.
// init loads a-level0, starts at the a-level and clears SafeCounter.
//
// Interface: all outputs are registered; ir_fail and sync are sampled at the
// rising edge and take effect on level in the same edge. ev_* pulse for one
// cycle when the corresponding step happens (for monitoring).
//
// The algorithm is the paper's. The paper's text calls raising the a-level
// "increased by 5% (level up)" while its V-f figure shows "level up" towards
// lower percentages and its Table 1 puts a-levels below safe levels; this
// design follows the figure and table (up = -5%). The bounds 20% (up) and
// min(safe level, 60%) (down) are this design's choice.
module level_adjuster
  import aim_pkg::*;
#(
  parameter int BETA_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init,
  input  level_t            safe_level,
  input  level_t            a_level0,
  input  logic [BETA_W-1:0] beta,
  input  logic              ir_fail,
  input  logic              sync,
  input  level_t            sync_level,
  output level_t            level,
  output level_t            a_level,
  output logic              ev_down,
  output logic              ev_up,
  output logic              ev_back
);

  localparam int CW = BETA_W + 2;

  logic [CW-1:0] safe_cnt;
  logic [CW-1:0] cnt_inc;
  logic [CW+2:0] cnt_x5;
  level_t        down_cap;
  level_t        a_down, a_up;

  always_comb begin
    cnt_inc  = safe_cnt + 1'b1;
    cnt_x5   = (CW + 3)'(safe_cnt) * (CW + 3)'(5);
    down_cap = (safe_level > LVL_MAX) ? LVL_MAX : safe_level;
    a_down   = (a_level + LVL_STEP > down_cap) ? down_cap : a_level + LVL_STEP;
    a_up     = (a_level < LVL_MIN + LVL_STEP) ? LVL_MIN : a_level - LVL_STEP;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      safe_cnt <= '0;
      a_level  <= LVL_DVFS;
      level    <= LVL_DVFS;
      ev_down  <= 1'b0;
      ev_up    <= 1'b0;
      ev_back  <= 1'b0;
    end else begin
      ev_down <= 1'b0;
      ev_up   <= 1'b0;
      ev_back <= 1'b0;
      if (init) begin
        safe_cnt <= '0;
        a_level  <= a_level0;
        level    <= a_level0;
      end else if (ir_fail) begin
        level    <= safe_level;
        safe_cnt <= '0;
        if (cnt_x5 < (CW + 3)'(beta)) begin
          a_level <= a_down;
          ev_down <= 1'b1;
        end
      end else if (sync) begin
        level    <= sync_level;
        safe_cnt <= '0;
      end else begin
        safe_cnt <= cnt_inc;
        if (cnt_inc == CW'(beta)) begin
          level   <= a_level;
          ev_back <= 1'b1;
        end
        if (cnt_inc > (CW'(beta) << 1)) begin
          a_level  <= a_up;
          level    <= a_up;
          safe_cnt <= CW'(beta);
          ev_up    <= 1'b1;
        end
      end
    end
  end

endmodule
