// tb_noise_shaping_workload: in-band noise of the modulator and of pin mismatch.
//
// Runs the top at its default parameters with N = 1 (one sample per clock)
// and a sine of half full scale near bin 13 of an 8192-point record. From
// the recorded samples it computes, with a Hann-windowed DFT over the low
// bins only, the in-band power of:
//   1. the quantization noise of y(n) (taken as +/-1), for oversampling
//      ratios 32 and 64. The first-order loop should follow
//          sigma_ey^2 = sigma_e^2 * pi^2/3 * (2 f_b / f_s)^3,
//      with sigma_e^2 = 1/3 for a two-level quantizer of step 2; the test
//      accepts a factor of 3 either way and requires the noise to fall by a
//      factor between 4 and 16 (ideally 8) from OSR 32 to OSR 64;
//   2. the error that static gain mismatch of the four pins adds to the pin
//      sum, sum_i delta_i * pin_i(n), once with the pins fed by the paths and
//      once with DWA. DWA must give the smaller in-band error.
// Signal bins (the sine +/- 4 bins) and the three lowest bins are left out;
// the noise density of the remaining bins is scaled to the whole band.
module tb_noise_shaping_workload;
  import dac_pkg::*;
  localparam int M = 4;
  localparam int L = 8192;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst = 1;
  logic [15:0] cfg_div_n = 1;
  logic [15:0] cfg_coef = 654;          // eps = 2*pi*13/8192
  logic signed [15:0] cfg_amplitude = 16384;
  dac_src_e cfg_src = SRC_HIGH_SPEED;
  logic [M-1:0] dac_out, y_frame;
  logic y_n, tick_h, tick_l;
  logic signed [15:0] x_n;
  logic [1:0] phase, dwa_ptr;
  logic signed [17:0] integrator;
  int checks = 0, failures = 0;

  ti_sdm_dac_top dut (
    .clk, .rst, .cfg_div_n, .cfg_coef, .cfg_amplitude, .cfg_src,
    .dac_out, .y_n, .y_frame, .x_n, .tick_h, .tick_l, .phase, .dwa_ptr, .integrator
  );

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

  real rec [L];
  real win [L];
  real wsum2;
  real delta [M] = '{0.010, -0.005, 0.007, -0.012};

  // In-band power of rec[] for the band of K bins, excluding the lowest
  // three bins and the bins within 4 of ksig.
  function automatic real band_power(int K, int ksig);
    real re, im, acc, p;
    int used;
    acc = 0.0; used = 0;
    for (int k = 3; k <= K; k++) begin
      if (k >= ksig - 4 && k <= ksig + 4) continue;
      re = 0.0; im = 0.0;
      for (int n = 0; n < L; n++) begin
        re += rec[n] * win[n] * $cos(2.0 * PI * k * n / L);
        im -= rec[n] * win[n] * $sin(2.0 * PI * k * n / L);
      end
      acc += re * re + im * im;
      used++;
    end
    // mean density per bin, times the 2K+1 bins of the two-sided band
    p = acc / real'(used) * real'(2 * K + 1) / (real'(L) * wsum2);
    return p;
  endfunction

  // Record L samples, one per tick_h: kind 0 = y(n) as +/-1,
  // kind 1 = mismatch error of the pins.
  task automatic record(input int kind);
    int n;
    n = 0;
    while (n < L) begin
      @(negedge clk);
      if (kind == 0) begin
        rec[n] = y_n ? 1.0 : -1.0;
      end else begin
        rec[n] = 0.0;
        for (int i = 0; i < M; i++) if (dac_out[i]) rec[n] += delta[i];
      end
      n++;
    end
  endtask

  initial begin
    real p32, p64, f32, f64, e_paths, e_dwa;
    int ksig;
    wsum2 = 0.0;
    for (int n = 0; n < L; n++) begin
      win[n] = 0.5 - 0.5 * $cos(2.0 * PI * n / L);
      wsum2 += win[n] * win[n];
    end
    ksig = 13;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (2000) @(negedge clk);

    // 1. quantization noise of y(n)
    record(0);
    p32 = band_power(L / (2 * 32), ksig);
    p64 = band_power(L / (2 * 64), ksig);
    f32 = (1.0 / 3.0) * PI * PI / 3.0 * (1.0 / 32.0) ** 3;
    f64 = (1.0 / 3.0) * PI * PI / 3.0 * (1.0 / 64.0) ** 3;
    $display("in-band noise OSR 32: %0.3e (formula %0.3e, %0.1f dB)", p32, f32, 10.0 * $log10(p32 / f32));
    $display("in-band noise OSR 64: %0.3e (formula %0.3e, %0.1f dB)", p64, f64, 10.0 * $log10(p64 / f64));
    $display("noise reduction for twice the OSR: %0.2f (first-order shaping: 8)", p32 / p64);
    check(p32 > f32 / 3.0 && p32 < f32 * 3.0, "OSR 32 noise follows the formula");
    check(p64 > f64 / 3.0 && p64 < f64 * 3.0, "OSR 64 noise follows the formula");
    check(p32 / p64 > 4.0 && p32 / p64 < 16.0, "noise falls about 9 dB per octave of OSR");

    // 2. pin mismatch error, paths against DWA
    cfg_src = SRC_TI_PATHS;
    repeat (100) @(negedge clk);
    record(1);
    e_paths = band_power(L / (2 * 32), ksig);
    cfg_src = SRC_DWA;
    repeat (100) @(negedge clk);
    record(1);
    e_dwa = band_power(L / (2 * 32), ksig);
    $display("in-band mismatch error at OSR 32: paths %0.3e, DWA %0.3e (%0.1f dB lower)",
             e_paths, e_dwa, 10.0 * $log10(e_paths / e_dwa));
    check(e_dwa < e_paths, "DWA lowers the in-band mismatch error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
