// ring_osc_model: timing model of the IR monitor's inverter ring oscillator.
//
// Simulation only. The ring's frequency rises with its supply above a
// threshold voltage; here f is proportional to (vdd_mv - 300 mV), giving a
// half period of 100 time units at the nominal 750 mV (the testbenches
// clock the core with a period of 1000 units, so five ring periods per
// core cycle). vdd_mv is the supply seen by the group after IR-drop.
// enable low stops the ring.
module ring_osc_model (
  input  int   vdd_mv,
  input  logic enable,
  output logic ro_clk
);
  int half;

  initial ro_clk = 1'b0;

  always begin
    half = (vdd_mv > 350) ? 45000 / (vdd_mv - 300) : 900;
    #(half);
    ro_clk = enable ? ~ro_clk : 1'b0;
  end
endmodule
