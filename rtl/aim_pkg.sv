// aim_pkg: types and constants shared by the IR-Booster and the PIM macros.
//
// Levels are kept as plain percentages (7 bits). A level is the toggle rate
// R_tog for which a voltage-frequency (V-f) pair has been signed off: a pair
// of level L is safe as long as the instantaneous toggle rate stays <= L%.
// The IR-Booster table spans 20%..60% in 5% steps (5 voltages x 5
// frequencies); 100% stands for the conventional DVFS pair signed off at
// the worst case. Lower percentages mean lower voltage and/or higher
// frequency, i.e. a more aggressive operating point.
//
// The level grid, the 5% step, the 20..60% range and Table-1 initial
// aggressive levels follow the paper. Encodings (per-mille HR, 3-bit V and
// f indices with 0 for DVFS, the per-macro configuration struct) are this
// design's own.
package aim_pkg;

  typedef logic [6:0] level_t;          // percent: 20,25,...,60 or 100

  localparam level_t LVL_MIN  = 7'd20;
  localparam level_t LVL_MAX  = 7'd60;
  localparam level_t LVL_STEP = 7'd5;
  localparam level_t LVL_DVFS = 7'd100;

  // Operating modes for choosing a pair inside one level.
  typedef enum logic {
    MODE_LOW_POWER = 1'b0,              // lowest voltage first
    MODE_SPRINT    = 1'b1               // highest frequency first
  } boost_mode_e;

  // A V-f pair. v_idx 1 is the highest voltage V1, f_idx 5 the highest
  // frequency f5. v_idx = f_idx = 0 with dvfs = 1 selects the DVFS pair.
  typedef struct packed {
    logic       dvfs;
    logic [2:0] v_idx;
    logic [2:0] f_idx;
  } vf_pair_t;

  // Per-macro configuration written by the host after task mapping.
  typedef struct packed {
    logic       valid;                  // macro holds a task (else "empty macro")
    logic       dyn_op;                 // input-determined operator (QK^T, SV)
    logic [5:0] set_id;                 // logical Set the macro's task belongs to
    logic [9:0] hr_pm;                  // hamming rate of the macro's weights, per mille
    logic       wds_en;                 // weights are shifted by delta = 2^wds_shift
    logic [2:0] wds_shift;              // log2(delta)
  } macro_cfg_t;

  // Initial aggressive level for a safe level (Table 1 of the paper).
  function automatic level_t a_level0_of(level_t safe);
    case (safe)
      7'd100:  return 7'd60;
      7'd60:   return 7'd40;
      7'd55:   return 7'd35;
      7'd50:   return 7'd35;
      7'd45:   return 7'd35;
      7'd40:   return 7'd30;
      7'd35:   return 7'd30;
      7'd30:   return 7'd25;
      7'd25:   return 7'd20;
      default: return 7'd20;
    endcase
  endfunction

endpackage
