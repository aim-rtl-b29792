// pim_macro: digital SRAM PIM macro with shift compensator.
//
// NBANK banks share one input vector of N_ROWS signed IN_BITS-bit values,
// each bank holding one output column of N_ROWS weights. A pass computes,
// for every bank b, mac[b] = sum_k in_data[k] * W[b][k] with the input fed
// bit-serially, LSB first, one bit per cycle.
//
// Pipeline (two stages per input bit):
//   stage 0: the current input bit of every row goes to all banks' adder
//            trees and to the shift compensator; bank partial sums and the
//            correction term are registered;
//   stage 1: the correction is added to each registered partial sum and the
//            result is shift-accumulated.
// When weights were stored shifted by delta = 2^wds_shift (weight
// distribution shift) the correction -delta * sum(input bits) restores the
// exact product; with wds_en low the macro computes with the stored weights.
//
// Interface and timing:
//   w_we/w_bank/w_data    write one bank's weight column;
//   in_we/in_data         load the input-vector buffer;
//   start                 begin a pass; done rises IN_BITS+1 cycles after
//                         the cycle start was high, mac is valid while done;
//   stall                 freezes every register, the partial sums are kept;
//   recompute             abandons the pass and restarts it from bit 0 with
//                         the buffered input (used after a V-f change);
//   busy                  a pass is running (including while stalled).
//
// Follows the paper: shared input streams, one compensator per macro whose
// registered correction is broadcast and added in the next cycle, stall with
// partial sums kept, recomputing. This design's own choices: the input
// buffer, LSB-first signed inputs, the two-stage timing and sizes not given
// by the paper (rows per bank).
module pim_macro #(
  parameter int N_ROWS  = 64,
  parameter int NBANK   = 32,
  parameter int W_BITS  = 8,
  parameter int IN_BITS = 8,
  parameter int PSUM_W  = W_BITS + $clog2(N_ROWS),
  parameter int CORR_W  = $clog2(N_ROWS + 1) + 8,
  parameter int CPS_W   = ((PSUM_W > CORR_W) ? PSUM_W : CORR_W) + 1,
  parameter int ACC_W   = CPS_W + IN_BITS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight write
  input  logic                        w_we,
  input  logic [$clog2(NBANK)-1:0]    w_bank,
  input  logic signed [W_BITS-1:0]    w_data [N_ROWS],
  // input-vector load
  input  logic                        in_we,
  input  logic signed [IN_BITS-1:0]   in_data [N_ROWS],
  // control
  input  logic                        start,
  input  logic                        stall,
  input  logic                        recompute,
  input  logic                        wds_en,
  input  logic [2:0]                  wds_shift,
  // status and results
  output logic                        busy,
  output logic                        done,
  output logic signed [ACC_W-1:0]     mac [NBANK]
);

  localparam int IDX_W = (IN_BITS > 1) ? $clog2(IN_BITS) : 1;

  logic signed [IN_BITS-1:0] in_buf [N_ROWS];
  logic [N_ROWS-1:0]         in_bits;
  logic [IDX_W-1:0]          s0_idx, s1_idx;
  logic                      s0_v, s1_v;
  logic                      adv;
  logic                      clr;

  logic signed [PSUM_W-1:0]  bank_psum   [NBANK];
  logic signed [PSUM_W-1:0]  bank_psum_q [NBANK];
  logic signed [CORR_W-1:0]  corr_q;

  assign adv = !stall;
  assign clr = start || recompute;

  // Input buffer and the bit-slice driven on the word lines.
  always_ff @(posedge clk) begin
    if (in_we) begin
      for (int k = 0; k < N_ROWS; k++) in_buf[k] <= in_data[k];
    end
  end

  always_comb begin
    for (int k = 0; k < N_ROWS; k++) in_bits[k] = s0_v & in_buf[k][s0_idx];
  end

  // Stage-0 sequencer: one input bit per cycle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0_v   <= 1'b0;
      s0_idx <= '0;
      s1_v   <= 1'b0;
      s1_idx <= '0;
      done   <= 1'b0;
    end else if (clr) begin
      s0_v   <= 1'b1;
      s0_idx <= '0;
      s1_v   <= 1'b0;
      done   <= 1'b0;
    end else if (adv) begin
      s1_v   <= s0_v;
      s1_idx <= s0_idx;
      if (s0_v) begin
        if (s0_idx == IDX_W'(IN_BITS - 1)) s0_v <= 1'b0;
        else                               s0_idx <= s0_idx + 1'b1;
      end
      if (s1_v && s1_idx == IDX_W'(IN_BITS - 1)) done <= 1'b1;
    end
  end

  assign busy = s0_v || s1_v;

  shift_compensator #(.N_ROWS(N_ROWS), .K_W(3), .CORR_W(CORR_W)) u_sc (
    .clk     (clk),
    .rst_n   (rst_n),
    .en      (adv),
    .clr     (clr),
    .wds_en  (wds_en),
    .k       (wds_shift),
    .in_bits (in_bits),
    .corr    (corr_q)
  );

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic signed [CPS_W-1:0] corrected;

    pim_bank #(.N_ROWS(N_ROWS), .W_BITS(W_BITS), .PSUM_W(PSUM_W)) u_bank (
      .clk     (clk),
      .w_we    (w_we && (w_bank == $clog2(NBANK)'(b))),
      .w_data  (w_data),
      .in_bits (in_bits),
      .psum    (bank_psum[b])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)   bank_psum_q[b] <= '0;
      else if (clr) bank_psum_q[b] <= '0;
      else if (adv) bank_psum_q[b] <= bank_psum[b];
    end

    // Correcting: broadcast correction added to the registered partial sum.
    assign corrected = CPS_W'(bank_psum_q[b]) + CPS_W'(corr_q);

    pim_shift_adder #(.PSUM_W(CPS_W), .IN_BITS(IN_BITS), .ACC_W(ACC_W), .IDX_W(IDX_W)) u_sa (
      .clk     (clk),
      .rst_n   (rst_n),
      .clr     (clr),
      .en      (adv && s1_v),
      .bit_idx (s1_idx),
      .is_msb  (s1_idx == IDX_W'(IN_BITS - 1)),
      .psum    (corrected),
      .acc     (mac[b])
    );
  end

endmodule
