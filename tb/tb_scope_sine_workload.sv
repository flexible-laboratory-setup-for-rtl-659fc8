// tb_scope_sine_workload: the bench measurement of the prototype, in simulation.
//
// The prototype is shown reconstructing a sine of roughly 14 kHz (about 14
// periods in 1 ms on the oscilloscope). Here the top, at its default
// parameters, runs with N = 10 (f_H = 10 MHz, f_L = 2.5 MHz with M = 4) and
// a resonator coefficient of 577 (eps = 577/65536), which by
// f = f_H * acos(1 - eps^2/2) / (2*pi) gives 14.01 kHz. The DAC pins feed a
// behavioural summing low-pass filter (time constant 100 clocks = 1 us)
// whose elements have 1 % steps of gain mismatch. For each of the three
// schemes (interleaved paths, high-speed stream, DWA) the test measures, on
// the filter output, the period between rising mid-level crossings and the
// peak-to-peak swing, and compares them with the values above.
module tb_scope_sine_workload;
  import dac_pkg::*;
  localparam int M = 4;
  localparam real F_EXP = 14.0e3;

  logic clk = 0, rst = 1;
  logic [15:0] cfg_div_n = 10;
  logic [15:0] cfg_coef = 577;
  logic signed [15:0] cfg_amplitude = 16384;
  dac_src_e cfg_src = SRC_TI_PATHS;
  logic [M-1:0] dac_out, y_frame;
  logic y_n, tick_h, tick_l;
  logic signed [15:0] x_n;
  logic [1:0] phase, dwa_ptr;
  logic signed [17:0] integrator;
  real v_lpf;
  int checks = 0, failures = 0;

  ti_sdm_dac_top dut (
    .clk, .rst, .cfg_div_n, .cfg_coef, .cfg_amplitude, .cfg_src,
    .dac_out, .y_n, .y_frame, .x_n, .tick_h, .tick_l, .phase, .dwa_ptr, .integrator
  );

  summing_lpf_model #(.M(M), .ALPHA(0.01), .GAIN_STEP(0.01)) u_lpf (.clk, .dac(dac_out), .v_out(v_lpf));

  always #5 clk = ~clk;   // 100 MHz

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

  // Measure over `cycles` clocks: mid-level crossings and swing.
  task automatic measure(input string name);
    real vmax, vmin, mid, eps, f_exp, f_meas, pp_exp;
    int first_x, last_x, nx, t;
    bit above;
    eps = real'(cfg_coef) / 65536.0;
    f_exp = 100.0e6 / real'(cfg_div_n) * $acos(1.0 - eps * eps / 2.0) / (2.0 * 3.14159265358979);
    // settle, and find the swing over one period
    repeat (8000) @(negedge clk);
    vmax = -1.0; vmin = 100.0;
    repeat (7200) begin
      @(negedge clk);
      if (v_lpf > vmax) vmax = v_lpf;
      if (v_lpf < vmin) vmin = v_lpf;
    end
    mid = (vmax + vmin) / 2.0;
    above = (v_lpf > mid);
    first_x = -1; last_x = -1; nx = 0;
    for (t = 0; t < 3 * 7200; t++) begin
      @(negedge clk);
      // hysteresis of 10 % of the swing
      if (!above && v_lpf > mid + 0.1 * (vmax - mid)) begin
        above = 1;
        if (first_x < 0) first_x = t; else nx++;
        last_x = t;
      end else if (above && v_lpf < mid - 0.1 * (vmax - mid)) begin
        above = 0;
      end
    end
    f_meas = (nx > 0) ? 100.0e6 * real'(nx) / real'(last_x - first_x) : 0.0;
    pp_exp = real'(M) * 3.3 * 1.015 * real'(cfg_amplitude) / 32768.0;
    $display("%s: f = %.1f Hz (resonator %.1f Hz), swing %.3f V (about %.3f V)",
             name, f_meas, f_exp, vmax - vmin, pp_exp);
    check(f_exp > 0.98 * F_EXP && f_exp < 1.02 * F_EXP, "setting gives about 14 kHz");
    check(nx >= 2, {name, ": full periods seen"});
    check(f_meas > 0.98 * f_exp && f_meas < 1.02 * f_exp, {name, ": frequency"});
    check((vmax - vmin) > 0.85 * pp_exp && (vmax - vmin) < 1.2 * pp_exp, {name, ": swing"});
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    measure("paths");
    cfg_src = SRC_HIGH_SPEED;
    measure("high-speed");
    cfg_src = SRC_DWA;
    measure("DWA");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
