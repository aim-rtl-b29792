// aim_chip: PIM accelerator core with architecture-level IR-drop mitigation.
//
// NGROUP Macro Groups of MPG digital PIM macros each (16 x 4 = 64 by
// default). Every group has its own supply (an LDO outside this RTL) and
// clock, watched by one IR monitor. The IR-Booster controller chooses each
// group's V-f pair from the hamming rate of the weights mapped onto it and
// from the monitors' IRFailure flags; on a failure it makes the group's
// running macros recompute and stalls the other macros of the same Sets.
// Macros may hold weights shifted by delta (weight distribution shift);
// their shift compensators correct the results on the fly. A Set
// accumulator adds the partial sums of the macros of one Set.
//
// Interface (host side, all synchronous to clk):
//   w_*         write one bank column of one macro's weights per cycle;
//   in_*        load one macro's input vector;
//   start       start a pass per macro; macro_done/macro_busy report back;
//   macro_cfg   per-macro mapping result: valid, Set id, HR, WDS delta,
//               input-determined flag; booster_init starts the IR-Booster
//               after macro_cfg is written; boost_mode, beta, ir_threshold;
//   rd_macro    selects the macro whose bank results appear on rd_mac;
//   acc_*       accumulate one Set's results (acc_sum valid with acc_done).
// Analog side: ro_clk are the groups' ring-oscillator outputs (sensor
// inputs of the IR monitors); group_vf carries each group's selected V-f
// pair to its regulator and clock generator.
//
// The whole core runs on one clock here; the per-group frequency is an
// output code, not a generated clock. Group organisation, the IR monitors
// and the controller's role follow the paper; the host interface and the
// single clock are this design's choices.
module aim_chip
  import aim_pkg::*;
#(
  parameter int NGROUP     = 16,
  parameter int MPG        = 4,
  parameter int NMACRO     = NGROUP * MPG,
  parameter int N_ROWS     = 64,
  parameter int NBANK      = 32,
  parameter int W_BITS     = 8,
  parameter int IN_BITS    = 8,
  parameter int BETA_W     = 16,
  parameter int ADJ_CYCLES = 4,
  parameter int MON_CNT_W  = 8,
  parameter int MON_WIN    = 16,
  parameter int PSUM_W     = W_BITS + $clog2(N_ROWS),
  parameter int CORR_W     = $clog2(N_ROWS + 1) + 8,
  parameter int CPS_W      = ((PSUM_W > CORR_W) ? PSUM_W : CORR_W) + 1,
  parameter int ACC_W      = CPS_W + IN_BITS,
  parameter int SUM_W      = ACC_W + $clog2(NMACRO)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weights
  input  logic                        w_we,
  input  logic [$clog2(NMACRO)-1:0]   w_macro,
  input  logic [$clog2(NBANK)-1:0]    w_bank,
  input  logic signed [W_BITS-1:0]    w_data [N_ROWS],
  // inputs
  input  logic                        in_we,
  input  logic [$clog2(NMACRO)-1:0]   in_macro,
  input  logic signed [IN_BITS-1:0]   in_data [N_ROWS],
  input  logic [NMACRO-1:0]           start,
  // configuration
  input  macro_cfg_t                  macro_cfg [NMACRO],
  input  logic                        booster_init,
  input  boost_mode_e                 boost_mode,
  input  logic [BETA_W-1:0]           beta,
  input  logic [MON_CNT_W-1:0]        ir_threshold,
  // ring oscillators of the IR monitors
  input  logic [NGROUP-1:0]           ro_clk,
  // status
  output logic [NMACRO-1:0]           macro_busy,
  output logic [NMACRO-1:0]           macro_done,
  output logic [NMACRO-1:0]           macro_stall,
  output logic [NMACRO-1:0]           macro_recompute,
  // results
  input  logic [$clog2(NMACRO)-1:0]   rd_macro,
  output logic signed [ACC_W-1:0]     rd_mac [NBANK],
  input  logic                        acc_start,
  input  logic [5:0]                  acc_set,
  output logic signed [SUM_W-1:0]     acc_sum [NBANK],
  output logic                        acc_done,
  // IR-Booster state, V-f pairs to the regulators / clock generators
  output logic [NGROUP-1:0]           group_ir_fail,
  output logic [MON_CNT_W-1:0]        group_ro_count [NGROUP],
  output level_t                      group_level   [NGROUP],
  output level_t                      group_a_level [NGROUP],
  output level_t                      group_safe    [NGROUP],
  output vf_pair_t                    group_vf      [NGROUP],
  output logic [NGROUP-1:0]           group_ev_down,
  output logic [NGROUP-1:0]           group_ev_up,
  output logic [NGROUP-1:0]           group_ev_back,
  output logic [NGROUP-1:0]           group_ev_sync
);

  logic signed [ACC_W-1:0] mac_all [NMACRO*NBANK];

  // ------------------------------------------------------------ macros
  for (genvar m = 0; m < NMACRO; m++) begin : g_macro
    logic signed [ACC_W-1:0] mac_m [NBANK];

    pim_macro #(
      .N_ROWS (N_ROWS), .NBANK (NBANK), .W_BITS (W_BITS), .IN_BITS (IN_BITS),
      .PSUM_W (PSUM_W), .CORR_W (CORR_W), .CPS_W (CPS_W), .ACC_W (ACC_W)
    ) u_macro (
      .clk       (clk),
      .rst_n     (rst_n),
      .w_we      (w_we && (w_macro == $clog2(NMACRO)'(m))),
      .w_bank    (w_bank),
      .w_data    (w_data),
      .in_we     (in_we && (in_macro == $clog2(NMACRO)'(m))),
      .in_data   (in_data),
      .start     (start[m]),
      .stall     (macro_stall[m]),
      .recompute (macro_recompute[m]),
      .wds_en    (macro_cfg[m].wds_en),
      .wds_shift (macro_cfg[m].wds_shift),
      .busy      (macro_busy[m]),
      .done      (macro_done[m]),
      .mac       (mac_m)
    );

    for (genvar b = 0; b < NBANK; b++) begin : g_out
      assign mac_all[m*NBANK + b] = mac_m[b];
    end
  end

  always_comb begin
    for (int b = 0; b < NBANK; b++) rd_mac[b] = mac_all[int'(rd_macro)*NBANK + b];
  end

  // ------------------------------------------------------- IR monitors
  for (genvar g = 0; g < NGROUP; g++) begin : g_mon
    ir_monitor #(.CNT_W(MON_CNT_W), .WIN(MON_WIN)) u_mon (
      .clk       (clk),
      .rst_n     (rst_n),
      .ro_clk    (ro_clk[g]),
      .threshold (ir_threshold),
      .count     (group_ro_count[g]),
      .ir_fail   (group_ir_fail[g])
    );
  end

  // ------------------------------------------------- IR-Booster controller
  booster_controller #(
    .NGROUP (NGROUP), .MPG (MPG), .NMACRO (NMACRO), .BETA_W (BETA_W), .ADJ_CYCLES (ADJ_CYCLES)
  ) u_booster (
    .clk             (clk),
    .rst_n           (rst_n),
    .init            (booster_init),
    .macro_cfg       (macro_cfg),
    .mode            (boost_mode),
    .beta            (beta),
    .ir_fail         (group_ir_fail),
    .macro_busy      (macro_busy),
    .macro_stall     (macro_stall),
    .macro_recompute (macro_recompute),
    .group_level     (group_level),
    .group_a_level   (group_a_level),
    .group_safe      (group_safe),
    .group_vf        (group_vf),
    .group_ev_down   (group_ev_down),
    .group_ev_up     (group_ev_up),
    .group_ev_back   (group_ev_back),
    .group_ev_sync   (group_ev_sync)
  );

  // --------------------------------------------------- Set accumulation
  set_accumulator #(.NMACRO(NMACRO), .NBANK(NBANK), .ACC_W(ACC_W), .SUM_W(SUM_W)) u_acc (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (acc_start),
    .set_id    (acc_set),
    .macro_cfg (macro_cfg),
    .mac       (mac_all),
    .sum       (acc_sum),
    .done      (acc_done)
  );

endmodule
