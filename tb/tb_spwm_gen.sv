// tb_spwm_gen: checks the SPWM modulator at its default 10 kHz carrier.
//  * the carrier is a triangle of period 2*HALF clocks between 0 and HALF;
//  * the two switches of each leg are always complementary;
//  * for constant modulating values the on-time of leg A over one carrier
//    period is (1 + m)/2 and of leg B (1 - m)/2, m = sine*mod_index, to
//    within four clocks, so the mean bridge voltage is m (three-level);
//  * with the modulating value held at +/-0.8 the bridge only switches
//    between +Vdc and 0 (resp. -Vdc and 0), the unipolar property.
module tb_spwm_gen;
  import grid_tie_pkg::*;
  localparam int HALF = 2000;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] sine = '0;
  logic [15:0] mod_index = 16'd32768;
  hbridge_gates_t gates;
  logic [$clog2(HALF+1)-1:0] carrier;
  int checks = 0, failures = 0;

  spwm_gen #(.HALF(HALF)) dut (.*);

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

  // Measure leg on-times over one carrier period (2*HALF clocks).
  task automatic measure(input int s, input int mi, output int on_a, output int on_b,
                         output int bad_comp, output int vmin, output int vmax);
    int v;
    @(negedge clk);
    sine = 16'(s); mod_index = 16'(mi);
    repeat (2 * HALF) @(negedge clk);      // settle
    on_a = 0; on_b = 0; bad_comp = 0; vmin = 2; vmax = -2;
    for (int n = 0; n < 2 * HALF; n++) begin
      @(negedge clk);
      if (gates.a_hi == gates.a_lo || gates.b_hi == gates.b_lo) bad_comp++;
      on_a += int'(gates.a_hi);
      on_b += int'(gates.b_hi);
      v = int'(gates.a_hi) - int'(gates.b_hi);
      if (v < vmin) vmin = v;
      if (v > vmax) vmax = v;
    end
  endtask

  int oa, ob, bc, vmin, vmax, cmax, cmin, last_zero, per;
  real m, da, db;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // carrier shape
    cmax = 0; cmin = 1 << 20; last_zero = -1; per = 0;
    for (int n = 0; n < 8 * HALF; n++) begin
      @(negedge clk);
      if (int'(carrier) > cmax) cmax = int'(carrier);
      if (int'(carrier) < cmin) cmin = int'(carrier);
      if (carrier == 0) begin
        if (last_zero >= 0) per = n - last_zero;
        last_zero = n;
      end
    end
    check(cmax == HALF && cmin == 0, $sformatf("carrier range %0d..%0d", cmin, cmax));
    check(per == 2 * HALF, $sformatf("carrier period %0d clocks", per));
    foreach (cases[k]) begin
      measure(cases[k][0], cases[k][1], oa, ob, bc, vmin, vmax);
      m  = real'(cases[k][0]) * real'(cases[k][1]) / 32768.0 / 32768.0;
      da = real'(oa) / (2.0 * HALF);
      db = real'(ob) / (2.0 * HALF);
      check(bc == 0, "legs complementary");
      check(da > (1.0 + m) / 2.0 - 4.0 / (2.0 * HALF) && da < (1.0 + m) / 2.0 + 4.0 / (2.0 * HALF),
            $sformatf("m=%f: leg A duty %f", m, da));
      check(db > (1.0 - m) / 2.0 - 4.0 / (2.0 * HALF) && db < (1.0 - m) / 2.0 + 4.0 / (2.0 * HALF),
            $sformatf("m=%f: leg B duty %f", m, db));
      if (m > 0.5) check(vmin == 0 && vmax == 1, "positive half: bridge at 0 or +Vdc");
      if (m < -0.5) check(vmin == -1 && vmax == 0, "negative half: bridge at 0 or -Vdc");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int cases[6][2] = '{'{0, 32768}, '{26214, 32768}, '{-26214, 32768},
                      '{32767, 16384}, '{-20000, 29000}, '{12345, 30000}};
endmodule
