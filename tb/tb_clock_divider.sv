// tb_clock_divider: checks the sample and frame enables.
//
// For several dividers N (including 0, which acts as 1) it measures the
// number of clocks between tick_h pulses, checks that phase counts 0..M-1 in
// order on tick_h, and that tick_l comes on exactly every M-th tick_h, the
// one with phase M-1. A second divider with M = 3 checks a path count that is
// not a power of two.
module tb_clock_divider;
  localparam int unsigned M = 4;
  logic clk = 0, rst = 1;
  logic [7:0] div_n;
  logic tick_h, tick_l, tick_h3, tick_l3;
  logic [1:0] phase, phase3;
  int checks = 0, failures = 0;

  clock_divider #(.DIV_W(8), .M(M)) dut  (.clk, .rst, .div_n, .tick_h, .tick_l, .phase);
  clock_divider #(.DIV_W(8), .M(3)) dut3 (.clk, .rst, .div_n, .tick_h(tick_h3), .tick_l(tick_l3), .phase(phase3));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run_div(input int n);
    int last_t, t, nticks, exp_phase, exp_phase3, nl;
    int n_eff;
    n_eff = (n == 0) ? 1 : n;
    rst = 1; div_n = 8'(n);
    @(negedge clk); @(negedge clk);
    rst = 0;
    // t counts clock cycles after the release of reset, from 0; the
    // first tick_h is expected in cycle N-1, that is N clocks after release.
    t = -1; last_t = -1; nticks = 0; exp_phase = 0; exp_phase3 = 0; nl = 0;
    while (nticks < 4 * M + 3) begin
      if (t >= 0) @(negedge clk);
      t++;
      if (tick_h) begin
        if (last_t < 0) check(t == n_eff - 1, $sformatf("N=%0d first tick at %0d", n, t));
        else            check(t - last_t == n_eff, $sformatf("N=%0d tick spacing %0d", n, t - last_t));
        last_t = t;
        check(phase == 2'(exp_phase), $sformatf("N=%0d phase %0d exp %0d", n, phase, exp_phase));
        check(tick_l == (exp_phase == M - 1), "tick_l on last phase only");
        if (tick_l) nl++;
        exp_phase = (exp_phase + 1) % M;
        nticks++;
      end else begin
        check(!tick_l, "tick_l without tick_h");
      end
      if (tick_h3) begin
        check(phase3 == 2'(exp_phase3), "M=3 phase");
        check(tick_l3 == (exp_phase3 == 2), "M=3 tick_l");
        exp_phase3 = (exp_phase3 + 1) % 3;
      end
    end
    check(nl == (4 * M + 3) / M, $sformatf("N=%0d frame count %0d", n, nl));
  endtask

  initial begin
    div_n = 1;
    run_div(1);
    run_div(0);
    run_div(2);
    run_div(5);
    run_div(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
