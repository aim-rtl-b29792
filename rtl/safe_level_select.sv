// safe_level_select: safe level and initial aggressive level of a Macro Group.
//
// The hamming rate HR of a macro's weights bounds the toggle rate R_tog its
// banks can reach, so a V-f pair signed off for R_tog = L% is safe whenever
// HR <= L%. Given the worst HR in the group, HR_G, the safe level is the
// next 5% level at or above HR_G (47.5% -> 50%). Groups with HR_G above 60%,
// and groups running an input-determined operator (whose HR is unknown
// before run time), fall back to the DVFS level, 100%. The initial
// aggressive level a-level0 is read from the paper's Table 1.
//
// Interface: purely combinational. hr_pm is HR_G in per mille (0..1000);
// dyn_op marks an input-determined operator.
//
// The rounding rule, the 60% limit, the fallback and Table 1 follow the
// paper; the per-mille encoding and the 20% floor for very low HR are this
// design's choices. a_level0 never exceeds 60, so its top bit is always 0;
// it keeps the shared 7-bit level type.
module safe_level_select
  import aim_pkg::*;
(
  input  logic [9:0] hr_pm,
  input  logic       dyn_op,
  output level_t     safe_level,
  output level_t     a_level0
);

  logic [9:0] steps;   // ceil(hr_pm / 50): number of 5% steps

  always_comb begin
    steps = (hr_pm + 10'd49) / 10'd50;
    if (dyn_op || hr_pm > 10'd600)  safe_level = LVL_DVFS;
    else if (steps < 10'd4)         safe_level = LVL_MIN;
    else                            safe_level = level_t'(steps * 10'd5);
    a_level0 = a_level0_of(safe_level);
  end

endmodule
