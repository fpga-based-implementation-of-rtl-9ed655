// sine_lut: 1024-point sine look-up built from a 256-entry quarter wave.
//
// Address a (10 bits) stands for the angle 2*pi*(a + 0.5)/1024. The two top
// bits select the quadrant; the quarter table holds
//     Q[i] = round(32767 * sin(2*pi*(i + 0.5)/1024)),  i = 0..255
// (file rtl/sine_quarter.hex, one 16-bit hex word per line). The half-step
// offset makes the quadrants exact mirror images, so the second and fourth
// quadrants read the table backwards and the lower half negates it.
// Timing: one register stage from addr to value.
module sine_lut (
  input  logic               clk,
  input  logic [9:0]         addr,
  output logic signed [15:0] value
);

  logic [15:0] quarter [256];

  initial $readmemh("rtl/sine_quarter.hex", quarter);

  logic [7:0]  idx;
  logic [15:0] mag;

  assign idx = addr[8] ? ~addr[7:0] : addr[7:0];
  assign mag = quarter[idx];

  always_ff @(posedge clk)
    value <= addr[9] ? -$signed(mag) : $signed(mag);

endmodule
