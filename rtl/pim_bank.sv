// pim_bank: one bank of the digital SRAM PIM macro.
//
// The bank stores N_ROWS signed W_BITS-bit weights, all belonging to the same
// output column. Each cycle the macro drives one bit of every input value on
// the rows' word lines (bit-serial input); every cell ANDs its weight with
// that bit and an adder tree sums the products into the partial sum psum.
// The shift adder that follows weights psum by the bit position.
//
// Interface: w_we writes the whole column (w_data, one weight per row) at the
// rising clock edge. psum is combinational from in_bits and the stored
// weights; the macro registers it.
//
// Following the paper: weights stay in place (in-situ), inputs arrive
// bit-serially, products are summed digitally by an adder tree. This
// design's own choices: one column written per cycle, the row count, and an
// unpipelined adder tree.
module pim_bank #(
  parameter int N_ROWS = 64,
  parameter int W_BITS = 8,
  parameter int PSUM_W = W_BITS + $clog2(N_ROWS)
) (
  input  logic                            clk,
  input  logic                            w_we,
  input  logic signed [W_BITS-1:0]        w_data [N_ROWS],
  input  logic        [N_ROWS-1:0]        in_bits,
  output logic signed [PSUM_W-1:0]        psum
);

  logic signed [W_BITS-1:0] w_mem [N_ROWS];

  always_ff @(posedge clk) begin
    if (w_we) begin
      for (int k = 0; k < N_ROWS; k++) w_mem[k] <= w_data[k];
    end
  end

  // AND with the word-line bit, then the adder tree.
  always_comb begin
    psum = '0;
    for (int k = 0; k < N_ROWS; k++) begin
      if (in_bits[k]) psum = psum + PSUM_W'(w_mem[k]);
    end
  end

endmodule
