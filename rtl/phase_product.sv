// phase_product: the multiplying phase detector of the phase-matching loop.
//
// Multiplies the reference (grid) voltage sample by the inverter output
// voltage sample. For v1 = A1 sin(wt) and v0 = A0 sin(wt + theta) the
// product is A1 A0 [cos(theta) - cos(2wt + theta)] / 2: a DC term that
// carries the phase difference plus a ripple at twice the line frequency,
// which the following low-pass filter removes. The multiplication follows
// the paper; the fixed-point scaling is this design's: both inputs are
// Q2.14 (normalised 1.0 = 2**(W-2)) and the product is shifted back to
// Q2.14 in W+2 bits (two extra bits hold the largest product, +4.0), so
// two in-phase sines of normalised amplitude 1.0 average to 0.5.
// Timing: one register stage; out_valid follows in_valid by one clock.
module phase_product
  import grid_tie_pkg::*;
#(
  parameter int unsigned W = SAMPLE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] ref_v,
  input  logic signed [W-1:0] out_v,
  output logic                out_valid,
  output logic signed [W+1:0] product
);

  logic signed [2*W-1:0] full;

  assign full = ref_v * out_v;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      product   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) product <= (W+2)'(full >>> (W - 2));
    end
  end

endmodule
