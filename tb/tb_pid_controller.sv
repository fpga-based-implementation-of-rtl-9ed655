// tb_pid_controller: checks the PID controller against a model written here.
// Two instances run side by side on the same random process-variable
// stream: one with proportional, integral and derivative gains and tight
// integrator / output limits so that both clamps are exercised, and one with
// the default gains (proportional only). Every output is compared with the
// model; it is also checked that the error is zero at the 0.5 set point and
// that a process variable below the set point raises the frequency.
module tb_pid_controller;
  localparam longint KP = 300, KI = 7, KD = 900;
  localparam int unsigned SH = 8;
  localparam longint ILIM = 200_000, OLIM = 100_000;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [17:0] pv = '0;
  logic out_valid, out_valid_d;
  logic signed [31:0] u, u_d;
  logic signed [18:0] err, err_d;
  int checks = 0, failures = 0;

  pid_controller #(.IN_W(18), .OUT_W(32), .SETPOINT(8192), .KP(KP), .KI(KI), .KD(KD),
                   .GAIN_SHIFT(SH), .INT_LIMIT(ILIM), .OUT_LIMIT(OLIM)) dut (
    .clk, .rst_n, .in_valid, .pv, .out_valid, .u, .err);

  pid_controller dut_default (
    .clk, .rst_n, .in_valid, .pv, .out_valid(out_valid_d), .u(u_d), .err(err_d));

  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint integ = 0, eprev = 0;
  int sat_i = 0, sat_o = 0;

  task automatic step(input int v);
    longint e, s, o, od;
    @(negedge clk);
    pv = 18'(v); in_valid = 1;
    e = 8192 - v;
    integ += e;
    if (integ > ILIM) begin integ = ILIM; sat_i++; end
    if (integ < -ILIM) begin integ = -ILIM; sat_i++; end
    s = KP * e + KI * integ + KD * (e - eprev);
    o = s >>> SH;
    if (o > OLIM) begin o = OLIM; sat_o++; end
    if (o < -OLIM) begin o = -OLIM; sat_o++; end
    od = (440_000 * e) >>> 8;
    eprev = e;
    @(negedge clk);
    in_valid = 0;
    check(out_valid && 64'(u) == o && 64'(err) == e, $sformatf("pv=%0d u=%0d expected %0d", v, u, o));
    check(out_valid_d && 64'(u_d) == od, $sformatf("default gains pv=%0d u=%0d expected %0d", v, u_d, od));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    step(8192);
    check(err == 0 && u_d == 0, "zero error at the set point");
    step(0);
    check(u_d > 0, "process variable below set point raises frequency");
    for (int n = 0; n < 3000; n++) step(int'($urandom_range(131071)) - 65536);
    for (int n = 0; n < 100; n++) step(-60000);    // drives the integrator into its clamp
    for (int n = 0; n < 100; n++) step(60000);
    check(sat_i > 0, "integrator clamp exercised");
    check(sat_o > 0, "output clamp exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
