// tb_phase_product: checks the multiplying phase detector against products
// computed here (Q2.14, 1.0 = 16384): corner cases (full scale, -2 * -2,
// zero) and 2000 random
// sample pairs, plus the one-clock valid latency. Finally the product of two
// sines with a known phase difference is averaged over whole periods and
// compared with cos(theta)/2 (the relation the phase loop relies on).
module tb_phase_product;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [15:0] ref_v = '0, out_v = '0;
  logic out_valid;
  logic signed [17:0] product;
  int checks = 0, failures = 0;

  phase_product #(.W(16)) dut (.*);

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

  function automatic int model(input int a, input int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 14);      // Q2.14: floor division by 2**14
  endfunction

  task automatic apply(input int a, input int b);
    @(negedge clk);
    ref_v = 16'(a); out_v = 16'(b); in_valid = 1;
    @(negedge clk);
    in_valid = 0;
  endtask

  int a, b;
  real acc, th, want;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    apply(-32768, -32768); check(out_valid && product == 18'sd65536, "-2 * -2 = +4");
    apply(16384, 16384);   check(product == 18'sd16384, "1 * 1 = 1");
    apply(32767, -32768);  check(product == -18'sd65534, "full scale * negative full scale");
    apply(0, 12345);       check(product == 0, "zero");
    @(negedge clk);        check(!out_valid, "valid only follows in_valid");
    for (int i = 0; i < 2000; i++) begin
      a = int'($urandom_range(65535)) - 32768;
      b = int'($urandom_range(65535)) - 32768;
      apply(a, b);
      check(product == 18'(model(a, b)), $sformatf("%0d * %0d", a, b));
    end
    // average of sin(wt) * sin(wt + theta) over 5 periods
    foreach (th_list[k]) begin
      th = th_list[k];
      acc = 0;
      for (int n = 0; n < 1000; n++) begin
        apply($rtoi(16384.0 * $sin(2.0 * 3.14159265358979 * n / 200.0)),
              $rtoi(16384.0 * $sin(2.0 * 3.14159265358979 * n / 200.0 + th)));
        acc += product;
      end
      acc = acc / 1000.0 / 16384.0;
      want = $cos(th) / 2.0;
      check(acc > want - 0.002 && acc < want + 0.002,
            $sformatf("mean product %f for theta %f, expected %f", acc, th, want));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  real th_list[4] = '{0.0, 0.5, 1.5707963, 3.14159265};
endmodule
