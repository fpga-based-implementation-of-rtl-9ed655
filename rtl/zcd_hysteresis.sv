// zcd_hysteresis: improved zero-crossing detector with hysteresis.
//
// Only crossings on the rising side (negative to positive) are detected.
// After a crossing has been reported the detector is blind until the
// signal has first risen above +HYST and then fallen below -HYST; only then
// is the next non-negative sample accepted as a crossing. Noise around zero
// therefore cannot produce a second crossing in the same cycle. This
// sequence is the one the paper describes; the reset state (waiting for the
// negative level, so that the first crossing seen is a genuine rising one)
// and the hysteresis value are this design's choices.
//
// Because the detector arms on the first sample below -HYST and then accepts
// the first non-negative one, noise with a peak above HYST/2 can still fake
// a crossing on the falling side; choose HYST above twice the noise peak.
//
// Interface: samples arrive with sample_valid. zc_pulse is a one-clock pulse
// registered on the clock after the crossing sample (one cycle latency).
module zcd_hysteresis
  import grid_tie_pkg::*;
#(
  parameter int unsigned W    = SAMPLE_W,
  parameter int          HYST = 3277        // 0.1 of full scale
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                sample_valid,
  input  logic signed [W-1:0] sample,
  output logic                zc_pulse,
  output zcd_state_t          state
);

  localparam logic signed [W-1:0] HYST_P = W'(HYST);
  localparam logic signed [W-1:0] HYST_N = W'(-HYST);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= ZCD_WAIT_NEG;
      zc_pulse <= 1'b0;
    end else begin
      zc_pulse <= 1'b0;
      if (sample_valid) begin
        unique case (state)
          ZCD_WAIT_NEG: if (sample < HYST_N) state <= ZCD_ARMED;
          ZCD_ARMED: if (sample >= 0) begin
            state    <= ZCD_WAIT_POS;
            zc_pulse <= 1'b1;
          end
          ZCD_WAIT_POS: if (sample > HYST_P) state <= ZCD_WAIT_NEG;
          default: state <= ZCD_WAIT_NEG;
        endcase
      end
    end
  end

endmodule
