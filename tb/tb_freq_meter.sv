// tb_freq_meter: self-checking test of the period-to-tuning-word converter.
// Zero-crossing pulses are applied at known spacings (the periods of 50 Hz,
// 42.88 Hz, 35 Hz and 65 Hz at 40 MHz, plus an odd count). For each, the
// expected word floor(2**48 / P) is computed here with 64-bit arithmetic and
// compared with ftw; the latency from the second pulse to ftw_valid is
// checked against PHASE_W + 3 clocks. Also checked: the nominal 50 Hz word
// after reset, that a single pulse does not update the word, and that a
// period outside the plausible range is discarded.
module tb_freq_meter;
  import grid_tie_pkg::*;

  logic clk = 0, rst_n = 0, zc_pulse = 0;
  ftw_t ftw;
  logic ftw_valid, measured;
  logic [PERIOD_W-1:0] period;
  int checks = 0, failures = 0;

  freq_meter dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse();
    @(negedge clk); zc_pulse = 1;
    @(negedge clk); zc_pulse = 0;
  endtask

  // Pulse, wait P-1 more clocks, pulse again: pulses are P clocks apart.
  task automatic measure(input int unsigned p);
    longint unsigned want;
    int lat;
    want = (64'd1 << 48) / 64'(p);
    @(negedge clk); zc_pulse = 1;
    @(negedge clk); zc_pulse = 0;
    repeat (p - 1) @(negedge clk);
    zc_pulse = 1;
    @(negedge clk); zc_pulse = 0;
    lat = 0;
    while (!ftw_valid && lat < 200) begin @(negedge clk); lat++; end
    check(ftw_valid, $sformatf("P=%0d: ftw_valid seen", p));
    check(period == PERIOD_W'(p), $sformatf("P=%0d: period %0d", p, period));
    check(64'(ftw) == want, $sformatf("P=%0d: ftw %0d expected %0d", p, ftw, want));
    check(lat == PHASE_W + 3, $sformatf("P=%0d: latency %0d expected %0d", p, lat, PHASE_W + 3));
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(ftw == 32'((64'd50 << 48) / 64'd40_000_000), "nominal 50 Hz word after reset");
    check(!measured, "not measured after reset");
    pulse();
    repeat (100) @(negedge clk);
    check(!measured && !ftw_valid, "one crossing alone gives no measurement");
    measure(800_000);                 // 50 Hz
    check(measured, "measured flag set");
    measure(932_836);                 // 42.88 Hz
    measure(1_142_857);               // 35 Hz
    measure(615_385);                 // 65 Hz
    measure(777_777);                 // arbitrary
    // a period of 1000 clocks (40 kHz) is implausible and must be ignored
    begin
      ftw_t ftw_before;
      ftw_before = ftw;
      pulse(); repeat (999) @(negedge clk); pulse();
      repeat (100) @(negedge clk);
      check(ftw == ftw_before, "implausibly short period discarded");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
