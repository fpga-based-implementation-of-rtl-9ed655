// lowpass_filter: digital low-pass filter that extracts the DC part of the
// phase-detector product, the error signal (process variable) of the PID.
//
// The paper only says that a digital low-pass filter (designed with a
// filter design tool) removes the high-frequency part; its order and
// coefficients are not given. This design uses STAGES cascaded first-order
// IIR sections, each computing
//     y[n] = y[n-1] + (x[n] - y[n-1]) / 2**SHIFT
// which needs no multiplier. Each stage keeps SHIFT extra fraction bits so
// that small inputs are not lost. With SHIFT = 11 at 100 kS/s each section
// has a cut-off of about 7.8 Hz, so two sections attenuate the 100 Hz
// ripple of a 50 Hz grid about 165 times while passing the DC error.
// Timing: every section updates on in_valid; y shows the new value one
// clock later, marked by out_valid. The DC gain is one, to within one LSB
// of truncation per section.
module lowpass_filter #(
  parameter int unsigned W      = 17,
  parameter int unsigned SHIFT  = 11,
  parameter int unsigned STAGES = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x,
  output logic                out_valid,
  output logic signed [W-1:0] y
);

  localparam int unsigned SW = W + SHIFT + 1;   // state width with guard bit

  logic signed [SW-1:0] st [STAGES];
  logic signed [SW-1:0] stage_in [STAGES];

  always_comb begin
    stage_in[0] = SW'(x) <<< SHIFT;
    for (int s = 1; s < STAGES; s++) stage_in[s] = st[s-1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++) st[s] <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int s = 0; s < STAGES; s++)
          st[s] <= st[s] + ((stage_in[s] - st[s]) >>> SHIFT);
      end
    end
  end

  assign y = W'(st[STAGES-1] >>> SHIFT);

endmodule
