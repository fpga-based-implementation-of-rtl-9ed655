// grid_tie_pkg: constants and types shared by the grid-tie synchronisation
// controller (zero-crossing frequency matching plus a product/low-pass/PID
// phase-matching loop around a numerically controlled oscillator).
//
// Number formats used throughout:
//   * voltage samples  : signed SAMPLE_W-bit Q2.14: the normalised
//                        amplitude 1.0 is 16384, half of the converter's
//                        full scale, which leaves headroom for an inverter
//                        output slightly above the grid voltage
//   * product / error  : signed Q2.14 as well, so two in-phase sines of
//                        normalised amplitude 1.0 give a DC product of
//                        0.5 = 8192
//   * frequency words  : unsigned FTW_W-bit tuning word; the NCO advances its
//                        PHASE_W-bit accumulator by the word on every clock,
//                        so f = FTW * CLK_HZ / 2**PHASE_W
// The 0.5 set point and the 50 Hz nominal frequency follow the paper; the
// clock, sample rate and all widths are this design's own choices.
package grid_tie_pkg;

  parameter int unsigned CLK_HZ    = 40_000_000; // system clock
  parameter int unsigned SAMPLE_HZ = 100_000;    // ADC sample rate the filter constants assume
  parameter int unsigned F_NOM_HZ  = 50;         // nominal grid frequency
  parameter int unsigned SAMPLE_W  = 16;         // ADC sample width
  parameter int unsigned PHASE_W   = 48;         // NCO phase accumulator width
  parameter int unsigned FTW_W     = 32;         // frequency tuning word width
  parameter int unsigned PERIOD_W  = 24;         // period counter width (clock cycles)

  // Normalised 1.0 and the PID set point 0.5, both in Q2.14
  parameter int NORM_ONE      = 16384;
  parameter int SETPOINT_HALF = NORM_ONE / 2;

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic        [FTW_W-1:0]    ftw_t;
  typedef logic        [PHASE_W-1:0]  phase_t;

  // Gate drives of the full H-bridge: leg A and leg B, high and low switch.
  typedef struct packed {
    logic a_hi;
    logic a_lo;
    logic b_hi;
    logic b_lo;
  } hbridge_gates_t;

  // Hysteresis zero-crossing detector states (see zcd_hysteresis).
  typedef enum logic [1:0] {
    ZCD_WAIT_NEG = 2'd0,  // must fall below the negative hysteresis level
    ZCD_ARMED    = 2'd1,  // next non-negative sample is a rising zero crossing
    ZCD_WAIT_POS = 2'd2   // must rise above the positive hysteresis level
  } zcd_state_t;

  // Tuning word for a frequency given in hertz at this clock.
  function automatic ftw_t hz_to_ftw(input longint unsigned hz);
    return ftw_t'((hz << PHASE_W) / 64'(CLK_HZ));
  endfunction

endpackage
