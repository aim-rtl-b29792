// pim_shift_adder: bit-serial accumulator behind one PIM bank.
//
// Input values enter the macro one bit per cycle, least significant bit
// first. For bit position t the bank's (corrected) partial sum is worth
// psum * 2^t; for the sign bit of a two's complement input it is worth
// -psum * 2^t. The accumulator adds these terms; after the sign bit it holds
// the signed dot product of the input vector with the bank's weights.
//
// Interface: clr zeroes acc; en adds the shifted psum for bit_idx at the
// rising edge; is_msb marks the sign bit. acc is registered.
//
// The paper names this "shift adder"; the LSB-first order and the signed
// input encoding are this design's choices.
module pim_shift_adder #(
  parameter int PSUM_W  = 16,
  parameter int IN_BITS = 8,
  parameter int ACC_W   = PSUM_W + IN_BITS,
  parameter int IDX_W   = $clog2(IN_BITS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     en,
  input  logic [IDX_W-1:0]         bit_idx,
  input  logic                     is_msb,
  input  logic signed [PSUM_W-1:0] psum,
  output logic signed [ACC_W-1:0]  acc
);

  logic signed [ACC_W-1:0] term;

  always_comb begin
    term = ACC_W'(psum) <<< bit_idx;
    if (is_msb) term = -term;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else if (en)  acc <= acc + term;
  end

endmodule
