// freq_adder: sums the zero-crossing frequency word and the PID correction.
//
// The paper adds the PID output to the frequency signal of the zero-crossing
// detector and feeds the sum to the oscillator. Here the zero-crossing word
// is unsigned and the correction signed; the sum is saturated to the
// unsigned tuning-word range so that a large negative correction cannot wrap
// the oscillator to a very high frequency (this saturation is this design's
// choice). Timing: one register stage, updated every clock.
module freq_adder
  import grid_tie_pkg::*;
#(
  parameter int unsigned FW = FTW_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic        [FW-1:0] ftw_zcd,
  input  logic signed [FW-1:0] ftw_corr,
  output logic        [FW-1:0] ftw_out
);

  logic signed [FW+1:0] sum;

  assign sum = $signed({2'b00, ftw_zcd}) + (FW+2)'(ftw_corr);

  always_ff @(posedge clk) begin
    if (!rst_n)                                   ftw_out <= '0;
    else if (sum < 0)                             ftw_out <= '0;
    else if (sum > $signed({2'b00, {FW{1'b1}}}))  ftw_out <= '1;
    else                                          ftw_out <= FW'(sum);
  end

endmodule
