// spwm_gen: sinusoidal PWM for a full H-bridge inverter.
//
// A symmetric triangular carrier counts 0 .. HALF .. 0 (carrier frequency
// CLK_HZ / (2*HALF)). The modulating sine is scaled by mod_index (Q1.15,
// 32768 = 1.0) and mapped onto the carrier range, once with its own sign
// for leg A and once negated for leg B (unipolar, three-level SPWM):
//     ta = (m + 1) * HALF / 2,   tb = (1 - m) * HALF / 2,   m = sine*mod_index
// A leg's high-side switch is on while its threshold exceeds the carrier and
// its low-side switch is on otherwise, so the bridge voltage is
// +Vdc, 0 or -Vdc and its fundamental is mod_index * sine * Vdc.
// The paper drives its H-bridge with SPWM; the unipolar scheme, the 10 kHz
// carrier and the absence of dead time (left to the gate driver) are this
// design's choices. Timing: gates are registered, one clock after the
// compare.
module spwm_gen
  import grid_tie_pkg::*;
#(
  parameter int unsigned HALF = CLK_HZ / (2 * 10_000)   // 10 kHz carrier
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic signed [15:0] sine,
  input  logic        [15:0] mod_index,
  output hbridge_gates_t     gates,
  output logic [$clog2(HALF+1)-1:0] carrier
);

  localparam int unsigned CW = $clog2(HALF + 1);

  logic                dir_up;
  logic signed [32:0]  m_full;
  logic signed [16:0]  m;          // modulating value, Q1.15 plus sign room
  logic        [17:0]  off_a, off_b;
  logic        [CW-1:0] ta, tb;

  always_comb begin
    m_full = sine * $signed({1'b0, mod_index});
    m      = 17'(m_full >>> 15);
    off_a  = 18'($signed({m[16], m}) + 18'sd32768);   // 0 .. 65536
    off_b  = 18'(18'sd32768 - $signed({m[16], m}));
    ta     = CW'((36'(off_a) * 36'(HALF)) >> 16);
    tb     = CW'((36'(off_b) * 36'(HALF)) >> 16);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      carrier <= '0;
      dir_up  <= 1'b1;
      gates   <= '0;
    end else begin
      if (dir_up) begin
        carrier <= carrier + 1'b1;
        if (carrier == CW'(HALF - 1)) dir_up <= 1'b0;
      end else begin
        carrier <= carrier - 1'b1;
        if (carrier == CW'(1)) dir_up <= 1'b1;
      end
      gates.a_hi <= ta > carrier;
      gates.a_lo <= !(ta > carrier);
      gates.b_hi <= tb > carrier;
      gates.b_lo <= !(tb > carrier);
    end
  end

endmodule
