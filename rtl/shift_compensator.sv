// shift_compensator: correction term for weight distribution shift (WDS).
//
// With WDS every weight of a macro is stored as W + delta, delta = 2^k, which
// lowers the weights' hamming rate. The product error for one bit-serial
// cycle is delta * sum_k I_k,t, the same for every bank because all banks
// share the input streams. This unit computes it once per macro:
//   1. PSUM  = sum of the current input bits (its own adder),
//      PSUM' = PSUM << k, Correction = ~PSUM' + 1 (two's complement negation);
//   2. the registered correction is broadcast to all banks;
//   3. the macro adds it to each bank's registered partial sum one cycle
//      later (pipelined correcting), so it never sits on the MAC path.
//
// Interface: in_bits are the input bits of the current cycle; corr is the
// registered correction, valid one cycle after in_bits, updated only when en
// is high (the macro holds it during a stall). clr zeroes the register. With
// wds_en low the correction is zero.
//
// The three steps and the register follow the paper's shift-compensator
// figure; the 3-bit k range is this design's choice.
module shift_compensator #(
  parameter int N_ROWS = 64,
  parameter int K_W    = 3,
  parameter int CORR_W = $clog2(N_ROWS + 1) + (1 << K_W)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     clr,
  input  logic                     wds_en,
  input  logic [K_W-1:0]           k,
  input  logic [N_ROWS-1:0]        in_bits,
  output logic signed [CORR_W-1:0] corr
);

  localparam int CNT_W = $clog2(N_ROWS + 1);

  logic [CNT_W-1:0]  psum_in;
  logic [CORR_W-1:0] psum_sh;
  logic [CORR_W-1:0] corr_d;

  always_comb begin
    psum_in = '0;
    for (int i = 0; i < N_ROWS; i++) psum_in = psum_in + CNT_W'(in_bits[i]);
    psum_sh = CORR_W'(psum_in) << k;
    corr_d  = wds_en ? (~psum_sh + CORR_W'(1)) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   corr <= '0;
    else if (clr) corr <= '0;
    else if (en)  corr <= corr_d;
  end

endmodule
