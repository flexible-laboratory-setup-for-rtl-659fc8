// tb_sine_resonator: checks the resonator's sine against closed-form values.
//
// With eps = coef / 2^16 the coupled loop must oscillate with period
// 2*pi / acos(1 - eps^2/2) samples; the test measures the period between
// rising zero crossings over several cycles, the peak values (close to the
// loaded amplitude, within 2 %), that the output starts at zero and rises,
// and that the state holds while en is low. Two frequencies are tried.
module tb_sine_resonator;
  logic clk = 0, rst = 1, en = 0;
  logic [15:0] coef;
  logic signed [15:0] amplitude, x;
  int checks = 0, failures = 0;

  sine_resonator #(.W(16)) dut (.clk, .rst, .en, .coef, .amplitude, .x);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run(input int c, input int a);
    real eps, period, meas;
    int n, first_zc, last_zc, nzc, maxv, minv;
    logic signed [15:0] prev, held;
    eps = real'(c) / 65536.0;
    period = 2.0 * 3.14159265358979 / $acos(1.0 - eps * eps / 2.0);
    coef = 16'(c); amplitude = 16'(a);
    rst = 1; en = 0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    @(negedge clk);
    check(x == 0, "output starts at zero");
    en = 1;
    @(negedge clk);
    check(x > 0, "output rises first");
    // hold test
    en = 0; held = x;
    repeat (5) @(negedge clk);
    check(x == held, "state holds without en");
    en = 1;
    prev = x; first_zc = -1; last_zc = -1; nzc = 0; maxv = -100000; minv = 100000;
    for (n = 0; n < int'(period * 8.0); n++) begin
      @(negedge clk);
      if (prev < 0 && x >= 0) begin
        if (first_zc < 0) first_zc = n; else nzc++;
        last_zc = n;
      end
      if (int'(x) > maxv) maxv = int'(x);
      if (int'(x) < minv) minv = int'(x);
      prev = x;
    end
    en = 0;
    meas = real'(last_zc - first_zc) / real'(nzc);
    $display("coef=%0d period expected %f measured %f, peaks %0d %0d", c, period, meas, maxv, minv);
    check(nzc >= 6, "enough cycles");
    check(meas > period - 0.5 && meas < period + 0.5, "period matches acos formula");
    check(real'(maxv) > 0.98 * a && real'(maxv) < 1.02 * a, "positive peak near amplitude");
    check(real'(-minv) > 0.98 * a && real'(-minv) < 1.02 * a, "negative peak near amplitude");
  endtask

  initial begin
    run(2048, 16384);   // eps = 1/32, period about 201 samples
    run(6000, 24000);   // about 68.6 samples
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
