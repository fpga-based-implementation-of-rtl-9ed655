// tb_noise_levels: frequency matching of the complete controller under
// increasing levels of noise on the grid voltage.
//
// The grid is a 50 Hz sine of normalised amplitude 1.0 with uniform noise of
// peak 0, 0.02, 0.05 and 0.08. The detector arms at -HYST and accepts the
// next non-negative sample, so the noise peak must stay below HYST/2 (0.1
// here): larger noise can lift a sample just after the arming point back
// above zero on the falling side and create a false crossing.
// For each level the run lasts 0.4 s after the first measurement and checks:
//  * exactly one validated zero crossing per grid period (no false
//    crossings from noise near zero, none missed);
//  * the mean of the measured frequencies is within 0.1 Hz of 50 Hz (single
//    measurements jitter with the noise, by about noise/(2*pi*f) in time);
//  * noise does produce extra raw sign changes at the higher levels, so the
//    hysteresis is what keeps the count right.
module tb_noise_levels;
  import grid_tie_pkg::*;

  localparam real PI    = 3.14159265358979;
  localparam int  DECIM = CLK_HZ / SAMPLE_HZ;

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
    .mod_index(16'd29491), .gates, .zc_pulse, .freq_measured,
    .ftw_zcd, .ftw_nco, .error_signal, .pid_out, .nco_phase);

  inverter_plant_model #(.SENSE_GAIN(1.01 / 0.9)) plant (
    .clk, .gates, .v_out, .sensed(out_sample), .shoot_through);

  initial forever #12.5 clk = ~clk;

  initial begin
    #3_000_000_000;
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

  real noise = 0.0, ref_ph = 1.0, ref_v;
  int  div_cnt = 0, n_ref_periods = 0, n_zc = 0, n_raw = 0;
  sample_t prev_s = '0;
  always @(posedge clk) begin
    ref_ph += 2.0 * PI * 50.0 / real'(CLK_HZ);
    if (ref_ph >= 2.0 * PI) begin ref_ph -= 2.0 * PI; n_ref_periods++; end
    if (zc_pulse) n_zc++;
  end
  always @(negedge clk) begin
    sample_valid <= 0;
    if (++div_cnt == DECIM) begin
      div_cnt = 0;
      ref_v = $sin(ref_ph) + noise * (2.0 * real'($urandom_range(10000)) / 10000.0 - 1.0);
      ref_sample   <= sample_t'($rtoi(ref_v * real'(NORM_ONE)));
      sample_valid <= 1;
      if (prev_s < 0 && sample_t'($rtoi(ref_v * real'(NORM_ONE))) >= 0) n_raw++;
      prev_s = sample_t'($rtoi(ref_v * real'(NORM_ONE)));
    end
  end

  task automatic run_level(input real lvl);
    int p0, z0, r0, nupd;
    real fsum;
    noise = lvl;
    // let the detector pass one full cycle at this level
    repeat (2 * CLK_HZ / 50) @(posedge clk);
    p0 = n_ref_periods; z0 = n_zc; r0 = n_raw; nupd = 0; fsum = 0.0;
    repeat (CLK_HZ / 50 * 20) begin          // 20 periods = 0.4 s
      @(posedge clk);
      if (dut.u_freq.ftw_valid) begin
        nupd++;
        fsum += real'(ftw_zcd) * real'(CLK_HZ) / (2.0 ** PHASE_W);
      end
    end
    check(n_zc - z0 >= n_ref_periods - p0 - 1 && n_zc - z0 <= n_ref_periods - p0 + 1,
          $sformatf("noise %0.2f: %0d crossings in %0d periods", lvl, n_zc - z0, n_ref_periods - p0));
    check(nupd > 15 && fsum / nupd > 49.9 && fsum / nupd < 50.1,
          $sformatf("noise %0.2f: mean of %0d measurements %0.4f Hz", lvl, nupd, fsum / nupd));
    if (lvl >= 0.05)
      check(n_raw - r0 > n_zc - z0,
            $sformatf("noise %0.2f: %0d raw rising sign changes rejected to %0d", lvl, n_raw - r0, n_zc - z0));
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (freq_measured);
    run_level(0.0);
    run_level(0.02);
    run_level(0.05);
    run_level(0.08);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
