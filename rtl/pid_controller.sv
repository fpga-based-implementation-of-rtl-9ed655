// pid_controller: discrete PID controller of the phase-matching loop.
//
// The process variable is the filtered phase-detector product, which for
// in-phase normalised signals settles at 0.5; the paper tunes its PID to
// that set point. On each in_valid this block computes
//     e[n] = SETPOINT - pv[n]
//     I[n] = clamp(I[n-1] + e[n], +/-INT_LIMIT)
//     u[n] = clamp((KP*e[n] + KI*I[n] + KD*(e[n]-e[n-1])) >>> GAIN_SHIFT)
// and u is a frequency correction in tuning-word units that is added to the
// zero-crossing frequency. The PID structure and the 0.5 set point follow
// the paper; the gains, the sign convention (a positive error raises the
// frequency), the integrator clamp and the output limit are this design's.
// Timing: one register stage; out_valid follows in_valid by one clock.
module pid_controller #(
  parameter int unsigned IN_W       = 18,
  parameter int unsigned OUT_W      = 32,
  parameter int          SETPOINT   = 8192,         // 0.5 in Q2.14
  parameter longint      KP         = 440_000,
  parameter longint      KI         = 0,
  parameter longint      KD         = 0,
  parameter int unsigned GAIN_SHIFT = 8,
  parameter longint      INT_LIMIT  = 64'd1 << 36,
  parameter longint      OUT_LIMIT  = 64'd1 << 28
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  pv,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] u,
  output logic signed [IN_W:0]    err
);

  logic signed [IN_W:0] e_now, e_prev;
  logic signed [63:0]   integ, integ_next, sum, acc;

  always_comb begin
    e_now      = (IN_W+1)'(SETPOINT) - (IN_W+1)'(pv);
    integ_next = integ + 64'(e_now);
    if (integ_next >  INT_LIMIT) integ_next =  INT_LIMIT;
    if (integ_next < -INT_LIMIT) integ_next = -INT_LIMIT;
    sum = KP * 64'(e_now) + KI * integ_next + KD * 64'(e_now - e_prev);
    acc = sum >>> GAIN_SHIFT;
    if (acc >  OUT_LIMIT) acc =  OUT_LIMIT;
    if (acc < -OUT_LIMIT) acc = -OUT_LIMIT;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      integ     <= '0;
      e_prev    <= '0;
      u         <= '0;
      err       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        integ  <= integ_next;
        e_prev <= e_now;
        err    <= e_now;
        u      <= OUT_W'(acc);
      end
    end
  end

endmodule
