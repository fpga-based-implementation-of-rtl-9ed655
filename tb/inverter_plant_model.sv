// inverter_plant_model: behavioural model (not synthesizable) of the power
// stage that the controller drives: full H-bridge, output filter and the
// voltage sensing path back to the converter.
//  * bridge: the voltage is (a_hi - b_hi) * VDC, i.e. +VDC, 0 or -VDC;
//    shoot-through (both switches of a leg on) is counted as an error;
//  * filter: two cascaded first-order low-pass sections with corner FC_HZ,
//    integrated once per clock (a simple stand-in for the LC filter, which
//    also gives the loop a small phase shift);
//  * sensing: v_out scaled by SENSE_GAIN and quantised to a signed 16-bit
//    Q2.14 sample (1.0 = 16384), clipped to full scale.
// v_out is also exported as a real for phase measurements in a testbench.
module inverter_plant_model
  import grid_tie_pkg::*;
#(
  parameter real VDC        = 1.0,
  parameter real FC_HZ      = 1500.0,
  parameter real SENSE_GAIN = 1.0
) (
  input  logic           clk,
  input  hbridge_gates_t gates,
  output real            v_out,
  output sample_t        sensed,
  output int             shoot_through
);

  localparam real K = 2.0 * 3.14159265358979 * FC_HZ / real'(CLK_HZ);

  real v_bridge, y1 = 0.0, y2 = 0.0, s;

  initial shoot_through = 0;

  always @(posedge clk) begin
    if ((gates.a_hi && gates.a_lo) || (gates.b_hi && gates.b_lo)) shoot_through++;
    v_bridge = VDC * (real'(int'(gates.a_hi)) - real'(int'(gates.b_hi)));
    y1 = y1 + K * (v_bridge - y1);
    y2 = y2 + K * (y1 - y2);
    v_out = y2;
    s = SENSE_GAIN * y2 * real'(NORM_ONE);
    if (s > 32767.0) s = 32767.0;
    if (s < -32768.0) s = -32768.0;
    sensed = sample_t'($rtoi(s));
  end

endmodule
