// vf_pair_select: choose a voltage-frequency pair inside one level.
//
// The IR-Booster table has five voltages V1 (highest) .. V5 and five
// frequencies f1 (lowest) .. f5. The pair (Vi, fj) is signed off for the
// level 60% - 5% * ((i-1) + (j-1)), so a level of 60 - 5d percent has
// min(d,8-d)+1 pairs on one anti-diagonal of the table. Within the level:
//   sprint mode     takes the highest frequency (and so the highest voltage);
//   low-power mode  takes the lowest voltage (and so the lowest frequency);
//   keep_f          (used after an IRFailure) keeps frequency cur_f and
//                   raises the voltage instead, if the level has a pair at
//                   cur_f; otherwise the mode's choice applies.
// Level 100% selects the conventional DVFS pair: dvfs = 1, indices 0.
//
// Interface: combinational; level must be a multiple of 5 in 20..60, or 100.
//
// The table, the two modes and the preference for keeping the frequency
// follow the paper; the index encoding is this design's. The paper's text
// lists {V3-f1, V4-f2, V5-f3} for 50% while its table figure prints 50% at
// V3-f1, V2-f2 and V1-f3; the table is followed here.
module vf_pair_select
  import aim_pkg::*;
(
  input  level_t      level,
  input  boost_mode_e mode,
  input  logic        keep_f,
  input  logic [2:0]  cur_f,
  output vf_pair_t    vf
);

  logic [3:0] d;       // anti-diagonal index 0 (60%) .. 8 (20%)
  logic [3:0] fi, vi;  // zero-based indices

  always_comb begin
    d  = 4'((LVL_MAX - level) / LVL_STEP);
    fi = '0;
    vi = '0;
    vf = '{dvfs: 1'b1, v_idx: 3'd0, f_idx: 3'd0};
    if (level <= LVL_MAX) begin
      if (keep_f && cur_f != 3'd0 && d >= 4'(cur_f - 3'd1) && (d - 4'(cur_f - 3'd1)) <= 4'd4) begin
        fi = 4'(cur_f - 3'd1);
      end else if (mode == MODE_SPRINT) begin
        fi = (d > 4'd4) ? 4'd4 : d;
      end else begin
        fi = (d > 4'd4) ? d - 4'd4 : 4'd0;
      end
      vi = d - fi;
      vf = '{dvfs: 1'b0, v_idx: 3'(vi + 4'd1), f_idx: 3'(fi + 4'd1)};
    end
  end

endmodule
