// tb_freq_adder: checks the frequency-word adder against sums computed here:
// random words and corrections, plus the saturation at zero (large negative
// correction) and at the top of the unsigned range.
module tb_freq_adder;
  logic clk = 0, rst_n = 0;
  logic [31:0] ftw_zcd = '0;
  logic signed [31:0] ftw_corr = '0;
  logic [31:0] ftw_out;
  int checks = 0, failures = 0;
  int lo = 0, hi = 0;

  freq_adder #(.FW(32)) dut (.*);

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

  task automatic apply(input longint unsigned z, input longint c);
    longint want;
    @(negedge clk);
    ftw_zcd = 32'(z); ftw_corr = 32'(c);
    want = longint'(z) + c;
    if (want < 0) begin want = 0; lo++; end
    if (want > 64'hFFFF_FFFF) begin want = 64'hFFFF_FFFF; hi++; end
    @(negedge clk);
    check(64'(ftw_out) == want, $sformatf("%0d + %0d = %0d, got %0d", z, c, want, ftw_out));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    apply(351_843_720, 0);
    apply(351_843_720, 7_036_874);
    apply(351_843_720, -7_036_874);
    apply(100, -1000);
    apply(64'hFFFF_FF00, 1000);
    apply(64'hFFFF_FFFF, -64'sd2147483648);
    for (int n = 0; n < 3000; n++)
      apply({$urandom}, longint'($signed($urandom)));
    check(lo > 0 && hi > 0, "both saturation limits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
