// serial_divider: unsigned restoring divider, one quotient bit per clock.
//
// A start pulse loads the dividend and divisor; NUM_W clocks later done
// pulses for one cycle with quotient = num / den and remainder = num % den.
// Division by zero returns an all-ones quotient. busy is high while a
// division is running; a start during busy is ignored. Used by freq_meter
// to turn a measured period into an oscillator tuning word.
module serial_divider #(
  parameter int unsigned NUM_W = 49,
  parameter int unsigned DEN_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quotient,
  output logic [DEN_W-1:0] remainder
);

  localparam int unsigned CNT_W = $clog2(NUM_W + 1);

  logic [NUM_W-1:0] num_sh;
  logic [DEN_W-1:0] den_q;
  logic [DEN_W-1:0] rem_q;
  logic [CNT_W-1:0] left;
  logic [DEN_W:0]   rem_sh;
  logic             fits;

  // Next partial remainder: shift in the next dividend bit, subtract if it fits.
  always_comb begin
    rem_sh = {rem_q, num_sh[NUM_W-1]};
    fits   = rem_sh >= {1'b0, den_q};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      num_sh    <= '0;
      den_q     <= '0;
      rem_q     <= '0;
      left      <= '0;
      quotient  <= '0;
      remainder <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          num_sh   <= num;
          den_q    <= den;
          rem_q    <= '0;
          left     <= CNT_W'(NUM_W);
          quotient <= '0;
        end
      end else begin
        rem_q    <= fits ? DEN_W'(rem_sh - {1'b0, den_q}) : DEN_W'(rem_sh);
        quotient <= {quotient[NUM_W-2:0], fits};
        num_sh   <= num_sh << 1;
        left     <= left - 1'b1;
        if (left == CNT_W'(1)) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          remainder <= fits ? DEN_W'(rem_sh - {1'b0, den_q}) : DEN_W'(rem_sh);
        end
      end
    end
  end

endmodule
