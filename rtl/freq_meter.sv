// freq_meter: reference frequency measurement from validated zero crossings.
//
// A free-running counter measures the number of clock cycles between two
// successive validated rising zero crossings (one reference period P). Each
// new period is divided into 2**PHASE_W by a serial divider, which gives the
// tuning word that makes the NCO run at exactly CLK_HZ / P:
//     ftw = floor(2**PHASE_W / P)
// The paper measures frequency from two zero crossings and feeds the result
// to the oscillator; the period-count/division scheme, the widths and the
// plausibility limits are this design's own.
//
// Until the first period has been measured, and after the counter saturates
// (no crossing for 2**PERIOD_W - 1 cycles), ftw holds its previous value,
// starting from the nominal 50 Hz word after reset. Periods outside
// [MIN_PERIOD, MAX_PERIOD] are discarded.
// Timing: ftw and the ftw_valid pulse appear PHASE_W + 3 clocks after the
// second zero-crossing pulse.
module freq_meter
  import grid_tie_pkg::*;
#(
  parameter int unsigned MIN_PERIOD = CLK_HZ / 100,  // 100 Hz upper limit
  parameter int unsigned MAX_PERIOD = CLK_HZ / 20    // 20 Hz lower limit
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                zc_pulse,
  output ftw_t                ftw,
  output logic                ftw_valid,
  output logic [PERIOD_W-1:0] period,
  output logic                measured
);

  localparam int unsigned NUM_W = PHASE_W + 1;
  localparam logic [PERIOD_W-1:0] CNT_MAX = '1;

  logic [PERIOD_W-1:0] cnt;
  logic                have_prev;
  logic                div_start;
  logic [NUM_W-1:0]    quo;
  logic [PERIOD_W-1:0] rem_unused;
  logic                div_busy;
  logic                div_done;
  logic                period_ok;

  assign period_ok = (cnt >= PERIOD_W'(MIN_PERIOD)) && (cnt <= PERIOD_W'(MAX_PERIOD));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      have_prev <= 1'b0;
      div_start <= 1'b0;
      period    <= '0;
    end else begin
      div_start <= 1'b0;
      if (zc_pulse) begin
        if (have_prev && period_ok && !div_busy) begin
          period    <= cnt;
          div_start <= 1'b1;
        end
        have_prev <= 1'b1;
        cnt       <= PERIOD_W'(1);
      end else if (cnt != CNT_MAX) begin
        cnt <= cnt + 1'b1;
      end else begin
        have_prev <= 1'b0;   // lost the reference: next crossing starts afresh
      end
    end
  end

  serial_divider #(.NUM_W(NUM_W), .DEN_W(PERIOD_W)) u_div (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (div_start),
    .num      (NUM_W'(1) << PHASE_W),
    .den      (period),
    .busy     (div_busy),
    .done     (div_done),
    .quotient (quo),
    .remainder(rem_unused)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ftw       <= hz_to_ftw(64'(F_NOM_HZ));
      ftw_valid <= 1'b0;
      measured  <= 1'b0;
    end else begin
      ftw_valid <= div_done;
      if (div_done) begin
        ftw      <= (quo > NUM_W'({FTW_W{1'b1}})) ? '1 : FTW_W'(quo);
        measured <= 1'b1;
      end
    end
  end

endmodule
