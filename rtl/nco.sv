// nco: numerically controlled oscillator, the discrete-time VCO of the loop.
//
// A PHASE_W-bit phase accumulator advances by the tuning word ftw on every
// clock while enable is high, so the output frequency is
//     f = ftw * CLK_HZ / 2**PHASE_W
// (1 Hz is about 7.04e6 LSB at 40 MHz, resolution 1.4e-7 Hz). The top ten
// phase bits address a sine table; sine is the Q1.15 reference waveform for
// the SPWM modulator. The paper replaces the analog VCO of a PLL by an NCO;
// the accumulator width and table size are this design's choices.
// Timing: phase is registered; sine lags phase by one clock.
module nco
  import grid_tie_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               enable,
  input  ftw_t               ftw,
  output phase_t             phase,
  output logic signed [15:0] sine
);

  always_ff @(posedge clk) begin
    if (!rst_n)      phase <= '0;
    else if (enable) phase <= phase + PHASE_W'(ftw);
  end

  sine_lut u_lut (
    .clk  (clk),
    .addr (phase[PHASE_W-1 -: 10]),
    .value(sine)
  );

endmodule
