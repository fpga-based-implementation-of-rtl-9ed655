// tb_zcd_hysteresis: self-checking test of the hysteresis zero-crossing
// detector.
//  1. A clean sine: every rising crossing is reported exactly once, on the
//     clock after the first non-negative sample (positions computed here
//     from the sine itself).
//  2. The same sine with noise smaller than the hysteresis level: the raw
//     sign of the samples flips many more times, but the detector still
//     reports one crossing per cycle.
//  3. A signal that crosses zero, stays below +HYST, dips below zero and
//     rises again: the second rise must not count; only after +HYST then
//     -HYST is the next crossing accepted.
module tb_zcd_hysteresis;
  import grid_tie_pkg::*;

  localparam int HYST = 3277;
  logic clk = 0, rst_n = 0, sample_valid = 0;
  sample_t sample = '0;
  logic zc_pulse;
  zcd_state_t state;
  int checks = 0, failures = 0;

  zcd_hysteresis #(.W(16), .HYST(HYST)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Drive one sample and report whether a crossing pulse followed it.
  task automatic drive(input int v, output bit pulsed);
    @(negedge clk);
    sample = sample_t'(v);
    sample_valid = 1;
    @(negedge clk);
    sample_valid = 0;
    pulsed = zc_pulse;
  endtask

  int seen, expected, raw_flips, noise, prev_v, v;
  bit p, expect_zc, armed;
  real ph;

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;

    // 1. clean sine, 10 cycles of 200 samples, starting at phase 0.3 rad
    seen = 0; expected = 0; armed = 0;
    for (int n = 0; n < 2000; n++) begin
      ph = 2.0 * 3.14159265358979 * n / 200.0 + 0.3;
      v = $rtoi(30000.0 * $sin(ph));
      // independent expectation: first non-negative sample after the wave
      // has been below -HYST (and, before that, above +HYST once it crossed)
      expect_zc = armed && v >= 0;
      if (v < -HYST) armed = 1;
      if (expect_zc) armed = 0;
      drive(v, p);
      if (expect_zc) expected++;
      if (p) seen++;
      if (p != expect_zc) begin
        checks++; failures++;
        $display("FAIL: clean sine sample %0d pulse=%0b expected=%0b", n, p, expect_zc);
      end
    end
    check(expected == 10, "clean sine: ten rising crossings expected");
    check(seen == expected, "clean sine crossing count");

    // 2. noisy sine: noise up to +/-0.08 full scale, below HYST = 0.1
    seen = 0; raw_flips = 0; prev_v = 0;
    for (int n = 0; n < 2000; n++) begin
      ph = 2.0 * 3.14159265358979 * n / 200.0 + 0.3;
      noise = int'($urandom_range(5200)) - 2600;
      v = $rtoi(30000.0 * $sin(ph)) + noise;
      if ((prev_v < 0) && (v >= 0)) raw_flips++;
      prev_v = v;
      drive(v, p);
      if (p) seen++;
    end
    check(seen == 10, $sformatf("noisy sine: %0d crossings, expected 10", seen));
    check(raw_flips > 10, $sformatf("noise produced %0d raw rising sign changes", raw_flips));

    // 3. hand-made sequence; detector is in WAIT_POS/WAIT_NEG after part 2
    drive(-20000, p);                       // below -HYST: armed
    check(!p && state == ZCD_ARMED, "armed after negative level");
    drive(100, p);   check(p,  "crossing reported");
    drive(2000, p);  check(!p, "below +HYST: no pulse");
    drive(-100, p);  check(!p, "dip below zero ignored");
    drive(200, p);   check(!p, "second rise without hysteresis ignored");
    drive(-5000, p); check(!p && state == ZCD_WAIT_POS, "negative level before positive level does not re-arm");
    drive(5000, p);  check(!p && state == ZCD_WAIT_NEG, "positive level reached");
    drive(0, p);     check(!p, "zero before negative level ignored");
    drive(-4000, p); check(!p && state == ZCD_ARMED, "negative level re-arms");
    drive(0, p);     check(p,  "zero counts as non-negative crossing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
