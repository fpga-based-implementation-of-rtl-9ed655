// tb_grid_tie_top: end-to-end test of the grid-tie controller at its default
// parameters, closed around a behavioural model of the H-bridge, output
// filter and voltage sensing.
//
// A reference ("grid") sine with a little noise is sampled at 100 kS/s
// together with the sensed inverter output. The reference starts at 50 Hz,
// 115 degrees ahead of the inverter, then steps to 42.88 Hz, 65 Hz and
// 35 Hz. For every segment the test checks:
//  * frequency matching: the zero-crossing frequency word settles to the new
//    reference frequency within two reference periods of the step (one
//    extra half period at power-up, when the detector must first see the
//    negative hysteresis level), to within the sampling resolution;
//  * phase matching: within one second the inverter output's zero crossings
//    stay within 15 degrees of the reference's, the filtered error signal
//    sits at the 0.5 set point (8192 in Q2.14) to within 0.02, and the
//    inverter settles lagging (the stable side for a 1 % amplitude excess).
// Mechanisms counted (each must occur): validated zero crossings, noise
// sign flips rejected by the hysteresis, frequency re-measurements, PID
// corrections of both signs, phase locks and frequency steps tracked.
module tb_grid_tie_top;
  import grid_tie_pkg::*;

  localparam real   PI     = 3.14159265358979;
  localparam int    DECIM  = CLK_HZ / SAMPLE_HZ;      // clocks per sample
  localparam real   A_REF  = 1.0;
  localparam real   NOISE  = 0.004;                    // +/- peak, normalised
  localparam int    MOD_IX = 29491;                    // 0.9 in Q1.15
  localparam real   GAIN   = 1.01 / 0.9;               // inverter output 1.01 x grid

  logic clk = 0, rst_n = 0, sample_valid = 0;
  sample_t ref_sample = '0, out_sample;
  hbridge_gates_t gates;
  logic zc_pulse, freq_measured;
  ftw_t ftw_zcd, ftw_nco;
  logic signed [17:0] error_signal;
  logic signed [31:0] pid_out;
  phase_t nco_phase;
  real v_out;
  int shoot_through;
  int checks = 0, failures = 0;

  grid_tie_top dut (
    .clk, .rst_n, .sample_valid, .ref_sample, .out_sample,
    .mod_index(16'(MOD_IX)), .gates, .zc_pulse, .freq_measured,
    .ftw_zcd, .ftw_nco, .error_signal, .pid_out, .nco_phase);

  inverter_plant_model #(.SENSE_GAIN(GAIN)) plant (
    .clk, .gates, .v_out, .sensed(out_sample), .shoot_through);

  initial forever #12.5 clk = ~clk;                    // 40 MHz

  initial begin
    #6_000_000_000;                                    // 6 s simulated
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
    else $display("ok: %s", what);
  endtask

  // ---- reference generator and converter strobe ----
  real f_ref = 50.0, ref_ph = 2.0;   // reference phase, radians
  real ref_v;
  int  div_cnt = 0;
  longint clk_n = 0;
  always @(posedge clk) begin
    clk_n++;
    ref_ph += 2.0 * PI * f_ref / real'(CLK_HZ);
    if (ref_ph >= 2.0 * PI) ref_ph -= 2.0 * PI;
  end
  always @(negedge clk) begin
    sample_valid <= 0;
    if (++div_cnt == DECIM) begin
      div_cnt = 0;
      ref_v = A_REF * $sin(ref_ph) + NOISE * (2.0 * real'($urandom_range(10000)) / 10000.0 - 1.0);
      ref_sample   <= sample_t'($rtoi(ref_v * real'(NORM_ONE)));
      sample_valid <= 1;
    end
  end

  // ---- mechanism counters ----
  int n_zc = 0, n_raw = 0, n_ftw = 0, n_pid_pos = 0, n_pid_neg = 0, n_locks = 0, n_steps = 0;
  sample_t prev_ref = '0;
  ftw_t prev_ftw = '0;
  always @(posedge clk) if (rst_n) begin
    if (zc_pulse) n_zc++;
    if (sample_valid) begin
      if (prev_ref < 0 && ref_sample >= 0) n_raw++;
      prev_ref = ref_sample;
    end
    if (ftw_zcd != prev_ftw) n_ftw++;
    prev_ftw = ftw_zcd;
    if (pid_out > 0) n_pid_pos++;
    if (pid_out < 0) n_pid_neg++;
  end

  // ---- phase of the inverter output relative to the reference ----
  // At each rising zero crossing of the filtered output the reference phase
  // is read: theta = -(reference phase), wrapped to +/-180 degrees
  // (negative: inverter lags).
  real theta_deg = 180.0, last_bad_t = 0.0;
  bit  out_armed = 0;
  real v_prev = 0.0, t_now;
  always @(posedge clk) if (rst_n) begin
    t_now = real'(clk_n) / real'(CLK_HZ);
    if (v_out < -0.3) out_armed = 1;
    if (out_armed && v_prev < 0.0 && v_out >= 0.0) begin
      out_armed = 0;
      theta_deg = -ref_ph * 180.0 / PI;
      if (theta_deg < -180.0) theta_deg += 360.0;
      if (abs_r(theta_deg) >= 15.0) last_bad_t = t_now;
    end
    v_prev = v_out;
  end

  function automatic real abs_r(input real x);
    return x < 0.0 ? -x : x;
  endfunction

  function automatic real ftw_hz(input ftw_t w);
    return real'(w) * real'(CLK_HZ) / (2.0 ** PHASE_W);
  endfunction

  // Wait until a measured frequency word is within tol of f; return the time
  // taken.
  task automatic wait_freq(input real f, input real tol, input real limit, output real took);
    real t0;
    t0 = real'(clk_n) / real'(CLK_HZ);
    took = 0.0;
    while ((!freq_measured || abs_r(ftw_hz(ftw_zcd) - f) > tol) && took < limit) begin
      @(posedge clk);
      took = real'(clk_n) / real'(CLK_HZ) - t0;
    end
  endtask

  task automatic segment(input real f, input real dur, input bit first);
    real t_start, took, tol, pv_min, pv_max, lock_t, limit;
    int ftw_stable;
    t_start = real'(clk_n) / real'(CLK_HZ);
    if (!first) begin f_ref = f; n_steps++; end
    // one sample period of quantisation on each crossing, plus noise
    tol = f * f * (2.0 / real'(SAMPLE_HZ)) + 0.01;
    limit = (first ? 2.5 : 2.0) / f + real'(PHASE_W + 5) / real'(CLK_HZ);
    wait_freq(f, tol, 0.5, took);
    check(took <= limit, $sformatf("%0.2f Hz: frequency word settled in %0.1f ms (limit %0.1f ms)",
                                   f, took * 1e3, limit * 1e3));
    // run the rest of the segment, recording the error signal at the end
    last_bad_t = real'(clk_n) / real'(CLK_HZ);
    pv_min = 1e9; pv_max = -1e9; ftw_stable = 1;
    while (real'(clk_n) / real'(CLK_HZ) - t_start < dur) begin
      @(posedge clk);
      if (real'(clk_n) / real'(CLK_HZ) - t_start > dur - 0.2) begin
        if (real'(error_signal) < pv_min) pv_min = real'(error_signal);
        if (real'(error_signal) > pv_max) pv_max = real'(error_signal);
        if (abs_r(ftw_hz(ftw_zcd) - f) > tol) ftw_stable = 0;
      end
    end
    lock_t = last_bad_t - t_start;
    check(ftw_stable == 1, $sformatf("%0.2f Hz: measured %0.4f Hz, within %0.3f Hz", f, ftw_hz(ftw_zcd), tol));
    check(lock_t < 1.0 && lock_t < dur - 0.2,
          $sformatf("%0.2f Hz: phase within 15 deg after %0.0f ms (last theta %0.1f deg)",
                    f, lock_t * 1e3, theta_deg));
    if (lock_t < 1.0 && lock_t < dur - 0.2) n_locks++;
    // with the inverter amplitude above the grid's the loop settles with the
    // inverter lagging by about acos(1/1.01) = 8 degrees
    check(theta_deg < -2.0 && theta_deg > -15.0,
          $sformatf("%0.2f Hz: inverter settles lagging, theta %0.1f deg", f, theta_deg));
    check(pv_min > 8192.0 - 328.0 && pv_max < 8192.0 + 328.0,
          $sformatf("%0.2f Hz: error signal %0.4f..%0.4f, set point 0.5", f,
                    pv_min / 16384.0, pv_max / 16384.0));
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    segment(50.0,  1.3, 1);
    segment(42.88, 1.2, 0);
    segment(65.0,  1.2, 0);
    segment(35.0,  1.2, 0);
    check(shoot_through == 0, "no shoot-through in either bridge leg");
    $display("mechanisms: zero crossings %0d, raw rising sign flips %0d, frequency words %0d,",
             n_zc, n_raw, n_ftw);
    $display("            PID +/- %0d/%0d clocks, locks %0d, frequency steps %0d",
             n_pid_pos, n_pid_neg, n_locks, n_steps);
    check(n_zc > 0, "validated zero crossings occurred");
    check(n_raw > n_zc, "hysteresis rejected noisy sign flips");
    check(n_ftw > 3, "frequency word re-measured");
    check(n_pid_pos > 0 && n_pid_neg > 0, "PID corrected in both directions");
    check(n_locks == 4, "phase lock achieved in every segment");
    check(n_steps == 3, "frequency steps tracked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
