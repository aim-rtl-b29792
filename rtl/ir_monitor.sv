// ir_monitor: digital back end of the ring-oscillator IR-drop monitor.
//
// The monitor's sensor is a free-running inverter ring supplied from the
// Macro Group's rail: when IR-drop lowers that supply, the ring slows down.
// This module turns the ring's output into an IRFailure flag. A Gray-coded
// counter in the ring's own clock domain records its phase; the count is
// brought into the reference clock domain through two flip-flops (safe
// because only one bit of a Gray code changes per edge) and converted back
// to binary. Every WIN reference cycles the number of ring edges seen in the
// window is compared with threshold: fewer edges means the supply fell
// below the level the threshold stands for, and ir_fail pulses for one
// cycle. The first window after reset only primes the comparison.
//
// Interface: ro_clk is the ring output (asynchronous to clk); threshold is
// the minimum count per window; count holds the last window's edge count;
// ir_fail is a single-cycle pulse in the clk domain, at most one per window.
//
// The inverter ring followed by phase-sampling flip-flops and a threshold
// follows the paper; the Gray counter, window length and counter width are
// this design's choices. The window count is taken modulo 2^CNT_W, so the
// ring must make fewer than 2^CNT_W rising edges per window.
module ir_monitor #(
  parameter int CNT_W = 8,
  parameter int WIN   = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ro_clk,
  input  logic [CNT_W-1:0] threshold,
  output logic [CNT_W-1:0] count,
  output logic             ir_fail
);

  localparam int WIN_W = $clog2(WIN + 1);

  // Ring-oscillator domain: binary counter with a Gray-coded register.
  logic [CNT_W-1:0] ro_bin, ro_gray;

  always_ff @(posedge ro_clk or negedge rst_n) begin
    if (!rst_n) begin
      ro_bin  <= '0;
      ro_gray <= '0;
    end else begin
      ro_bin  <= ro_bin + 1'b1;
      ro_gray <= (ro_bin + 1'b1) ^ ((ro_bin + 1'b1) >> 1);
    end
  end

  // Reference domain: synchroniser, Gray to binary, windowed difference.
  logic [CNT_W-1:0] sync1, sync2;
  logic [CNT_W-1:0] phase_bin;
  logic [CNT_W-1:0] phase_prev;
  logic [WIN_W-1:0] win_cnt;
  logic             primed;
  logic [CNT_W-1:0] delta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync1 <= '0;
      sync2 <= '0;
    end else begin
      sync1 <= ro_gray;
      sync2 <= sync1;
    end
  end

  always_comb begin
    phase_bin[CNT_W-1] = sync2[CNT_W-1];
    for (int i = CNT_W - 2; i >= 0; i--) phase_bin[i] = phase_bin[i+1] ^ sync2[i];
    delta = phase_bin - phase_prev;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_cnt    <= '0;
      phase_prev <= '0;
      primed     <= 1'b0;
      count      <= '0;
      ir_fail    <= 1'b0;
    end else begin
      ir_fail <= 1'b0;
      if (win_cnt == WIN_W'(WIN - 1)) begin
        win_cnt    <= '0;
        phase_prev <= phase_bin;
        primed     <= 1'b1;
        count      <= delta;
        ir_fail    <= primed && (delta < threshold);
      end else begin
        win_cnt <= win_cnt + 1'b1;
      end
    end
  end

endmodule
