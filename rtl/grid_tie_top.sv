// grid_tie_top: frequency- and phase-matching controller of a grid-tied
// single-phase inverter.
//
// Two loops share one numerically controlled oscillator (NCO) that sets the
// sine reference of the SPWM modulator driving the H-bridge:
//   * frequency matching: the hysteresis zero-crossing detector finds rising
//     zero crossings of the grid voltage and freq_meter turns the time
//     between two of them into the NCO tuning word (feed-forward);
//   * phase matching: the grid sample times the inverter output sample is
//     low-pass filtered to its DC part (the error signal, 0.5 when the two
//     normalised waves are in phase) and a PID controller adds a frequency
//     correction to the zero-crossing word until that DC part reaches 0.5.
// The structure (ZCD, product, digital filter, PID, adder, NCO, SPWM)
// follows the paper; word widths, clock and sample rate, filter and PID
// constants are this design's choices.
//
// Interface: both voltages arrive as signed Q2.14 samples (normalised
// amplitude 1.0 = 16384, half of full scale) with one common
// sample_valid strobe from the external converters (the constants assume
// 100 kS/s at a 40 MHz clock). mod_index (Q1.15, at most 1.0) sets the SPWM
// depth and so the inverter amplitude. gates drives the four bridge switches.
// The remaining outputs expose the internal loop signals for monitoring.
//
// Because the detector output is A_ref*A_out*cos(theta)/2, the loop only
// reaches the 0.5 set point when the product of the two normalised
// amplitudes is at least 1.0; if it is slightly larger the loop settles with the inverter
// lagging by acos(1/(A_ref*A_out)). Keep the inverter output slightly above
// the grid voltage, as the paper does.
module grid_tie_top
  import grid_tie_pkg::*;
#(
  parameter int          HYST         = 3277,          // 0.1 of full scale
  parameter int unsigned LPF_SHIFT    = 11,
  parameter int unsigned LPF_STAGES   = 2,
  parameter longint      KP           = 440_000,       // about 4 Hz per unit error
  parameter longint      KI           = 0,
  parameter longint      KD           = 0,
  parameter int unsigned CARRIER_HALF = CLK_HZ / (2 * 10_000)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sample_valid,
  input  sample_t            ref_sample,
  input  sample_t            out_sample,
  input  logic [15:0]        mod_index,
  output hbridge_gates_t     gates,
  output logic               zc_pulse,
  output logic               freq_measured,
  output ftw_t               ftw_zcd,
  output ftw_t               ftw_nco,
  output logic signed [17:0] error_signal,
  output logic signed [31:0] pid_out,
  output phase_t             nco_phase
);

  zcd_state_t          zcd_state;
  logic                ftw_valid;
  logic [PERIOD_W-1:0] period;
  logic                prod_valid, lpf_valid, pid_valid;
  logic signed [17:0]  product;
  logic signed [18:0]  pid_err;
  logic signed [15:0]  sine;
  logic [$clog2(CARRIER_HALF+1)-1:0] carrier;

  zcd_hysteresis #(.W(SAMPLE_W), .HYST(HYST)) u_zcd (
    .clk, .rst_n, .sample_valid,
    .sample  (ref_sample),
    .zc_pulse(zc_pulse),
    .state   (zcd_state)
  );

  freq_meter u_freq (
    .clk, .rst_n,
    .zc_pulse (zc_pulse),
    .ftw      (ftw_zcd),
    .ftw_valid(ftw_valid),
    .period   (period),
    .measured (freq_measured)
  );

  phase_product #(.W(SAMPLE_W)) u_prod (
    .clk, .rst_n,
    .in_valid (sample_valid),
    .ref_v    (ref_sample),
    .out_v    (out_sample),
    .out_valid(prod_valid),
    .product  (product)
  );

  lowpass_filter #(.W(18), .SHIFT(LPF_SHIFT), .STAGES(LPF_STAGES)) u_lpf (
    .clk, .rst_n,
    .in_valid (prod_valid),
    .x        (product),
    .out_valid(lpf_valid),
    .y        (error_signal)
  );

  pid_controller #(
    .IN_W(18), .OUT_W(32), .SETPOINT(SETPOINT_HALF),
    .KP(KP), .KI(KI), .KD(KD)
  ) u_pid (
    .clk, .rst_n,
    .in_valid (lpf_valid),
    .pv       (error_signal),
    .out_valid(pid_valid),
    .u        (pid_out),
    .err      (pid_err)
  );

  freq_adder #(.FW(FTW_W)) u_add (
    .clk, .rst_n,
    .ftw_zcd (ftw_zcd),
    .ftw_corr(pid_out),
    .ftw_out (ftw_nco)
  );

  nco u_nco (
    .clk, .rst_n,
    .enable(1'b1),
    .ftw   (ftw_nco),
    .phase (nco_phase),
    .sine  (sine)
  );

  spwm_gen #(.HALF(CARRIER_HALF)) u_spwm (
    .clk, .rst_n,
    .sine     (sine),
    .mod_index(mod_index),
    .gates    (gates),
    .carrier  (carrier)
  );

endmodule
