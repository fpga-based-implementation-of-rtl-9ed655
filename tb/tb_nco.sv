// tb_nco: checks the numerically controlled oscillator.
//  * the phase accumulator advances by exactly ftw per enabled clock and
//    holds while enable is low (compared with a 48-bit model);
//  * the sine output matches round(32767*sin(2*pi*(a+0.5)/1024)) for the
//    ten top phase bits a of the previous clock, over a full turn;
//  * the output frequency: with a word for 500 Hz at 40 MHz the sine must
//    show the number of rising zero crossings that the word predicts.
module tb_nco;
  import grid_tie_pkg::*;
  logic clk = 0, rst_n = 0, enable = 0;
  ftw_t ftw = '0;
  phase_t phase;
  logic signed [15:0] sine;
  int checks = 0, failures = 0;

  nco dut (.*);

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

  longint unsigned model;
  logic [9:0] a_prev;
  int bad_sine, bad_phase, want, zc;
  logic signed [15:0] s_prev;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(phase == 0, "phase zero after reset");
    // largest word, 2**31: a full turn takes 2**17 clocks
    ftw = 32'(64'd1 << 31);
    enable = 1;
    model = 0; bad_sine = 0; bad_phase = 0;
    a_prev = phase[47 -: 10];
    for (int n = 0; n < 262_144; n++) begin
      @(negedge clk);
      model = (model + (64'd1 << 31)) & ((64'd1 << 48) - 1);
      if (64'(phase) != model) bad_phase++;
      want = $rtoi($floor(32767.0 * $sin(2.0 * 3.14159265358979 * (real'(a_prev) + 0.5) / 1024.0) + 0.5));
      if (int'(sine) != want) bad_sine++;
      a_prev = phase[47 -: 10];
    end
    check(bad_phase == 0, $sformatf("%0d phase mismatches", bad_phase));
    check(bad_sine == 0, $sformatf("%0d sine mismatches", bad_sine));
    enable = 0;
    model = 64'(phase);
    repeat (10) @(negedge clk);
    check(64'(phase) == model, "phase holds while disabled");
    ftw = 32'((64'd500 << 48) / 64'd40_000_000);    // 500 Hz at 40 MHz
    enable = 1;
    zc = 0; s_prev = sine;
    for (int n = 0; n < 400_000; n++) begin
      @(negedge clk);
      if (s_prev < 0 && sine >= 0) zc++;
      s_prev = sine;
    end
    // 400000 clocks at 40 MHz = 10 ms -> 5 periods of 500 Hz
    check(zc >= 4 && zc <= 6, $sformatf("%0d rising crossings in 10 ms, expected 5", zc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
