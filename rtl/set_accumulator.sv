// set_accumulator: partial-sum accumulation across the macros of one Set.
//
// An operator too large for one macro is split over several macros (a
// logical Set); each produces partial sums for the same output columns,
// which must be added. After start, the unit visits macros 0..NMACRO-1, one
// per cycle, and adds the bank results of every valid macro whose set_id
// equals the requested Set. done rises NMACRO cycles after start and sum
// stays valid until the next start.
//
// Interface: mac is the flat array of all macros' bank results
// (mac[m*NBANK+b]); sum[b] is the Set total for bank column b.
//
// The accumulation step itself is named by the paper (partial-sum
// accumulation for all macros of a Set); the sequential one-macro-per-cycle
// structure is this design's choice.
module set_accumulator
  import aim_pkg::*;
#(
  parameter int NMACRO = 64,
  parameter int NBANK  = 32,
  parameter int ACC_W  = 24,
  parameter int SUM_W  = ACC_W + $clog2(NMACRO)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [5:0]              set_id,
  input  macro_cfg_t              macro_cfg [NMACRO],
  input  logic signed [ACC_W-1:0] mac [NMACRO*NBANK],
  output logic signed [SUM_W-1:0] sum [NBANK],
  output logic                    done
);

  localparam int MW = (NMACRO > 1) ? $clog2(NMACRO) : 1;

  logic [MW-1:0] idx;
  logic          run;
  logic [5:0]    set_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx   <= '0;
      run   <= 1'b0;
      done  <= 1'b0;
      set_q <= '0;
      for (int b = 0; b < NBANK; b++) sum[b] <= '0;
    end else if (start) begin
      idx   <= '0;
      run   <= 1'b1;
      done  <= 1'b0;
      set_q <= set_id;
      for (int b = 0; b < NBANK; b++) sum[b] <= '0;
    end else if (run) begin
      if (macro_cfg[idx].valid && macro_cfg[idx].set_id == set_q) begin
        for (int b = 0; b < NBANK; b++)
          sum[b] <= sum[b] + SUM_W'(mac[int'(idx)*NBANK + b]);
      end
      if (idx == MW'(NMACRO - 1)) begin
        run  <= 1'b0;
        done <= 1'b1;
      end
      idx <= idx + 1'b1;
    end
  end

endmodule
