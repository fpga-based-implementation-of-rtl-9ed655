// tb_lowpass_filter: checks the cascaded first-order low-pass filter against
// a bit-exact integer model written here, and its filtering behaviour:
//  * step response follows the model sample for sample and settles to the
//    input (unity DC gain, within one LSB per section);
//  * a 0.25 + 0.5*cos(2wt) input (the detector output for theta = 60 deg
//    at 50 Hz, sampled at 100 kHz) leaves a DC of 0.25 with a residual
//    ripple of less than 0.01 after settling.
module tb_lowpass_filter;
  localparam int SHIFT = 11, STAGES = 2, W = 17, SW = W + SHIFT + 1;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [W-1:0] x = '0, y;
  logic out_valid;
  int checks = 0, failures = 0;

  lowpass_filter #(.W(W), .SHIFT(SHIFT), .STAGES(STAGES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint s0 = 0, s1 = 0;       // model state
  int mismatches = 0;

  task automatic apply(input int v);
    longint in0, n0, n1;
    @(negedge clk);
    x = W'(v); in_valid = 1;
    in0 = longint'(v) <<< SHIFT;
    n0 = s0 + ((in0 - s0) >>> SHIFT);
    n1 = s1 + ((s0 - s1) >>> SHIFT);
    s0 = n0; s1 = n1;
    @(negedge clk);
    in_valid = 0;
    if (!(out_valid && y == W'(s1 >>> SHIFT))) mismatches++;
  endtask

  real mn, mx, ph;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(y == 0, "zero after reset");
    for (int n = 0; n < 40000; n++) apply(16384);
    check(mismatches == 0, $sformatf("step: %0d samples differ from model", mismatches));
    check(y >= 16382 && y <= 16384, $sformatf("step settles to input, y=%0d", y));
    for (int n = 0; n < 40000; n++) apply(-20000);
    check(y >= -20002 && y <= -20000, $sformatf("negative step settles, y=%0d", y));
    mismatches = 0; mn = 1e9; mx = -1e9;
    for (int n = 0; n < 60000; n++) begin
      ph = 2.0 * 3.14159265358979 * 100.0 * n / 100000.0;
      apply($rtoi(8192.0 + 16384.0 * $cos(ph)));
      if (n >= 40000) begin
        if (y < mn) mn = y;
        if (y > mx) mx = y;
      end
    end
    check(mismatches == 0, $sformatf("ripple input: %0d samples differ from model", mismatches));
    check(mn > 8192 - 328 && mx < 8192 + 328, $sformatf("ripple: y in [%0f, %0f]", mn, mx));
    check((mn + mx) / 2.0 > 8192 - 100 && (mn + mx) / 2.0 < 8192 + 100, "DC preserved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
