// tb_ti_sdm_dac_top: end-to-end test of the interleaved sigma-delta DAC.
//
// The top runs with its default parameters (M = 4 paths, 16-bit samples).
// A reference model in the testbench recomputes, sample by sample, the
// resonator sine and a single-rate first-order modulator, and checks:
//   - tick_h every N clocks and tick_l every M tick_h (the rates f_H, f_L);
//   - x(n) from the resonator, and y(n) on the multiplexer output exactly
//     one frame (M samples) after x(n);
//   - the pins in each scheme: in path mode the pin of phase k gets
//     y(n - M); in high-speed mode all pins follow y(n); in DWA mode the
//     number of pins on equals the frame's level and the pointer moves on by
//     it;
//   - the low-pass filtered pin sum swings as the sine amplitude predicts.
// It then counts how often each mechanism occurred (each scheme, mode
// switches, DWA pointer wrap-round, a change of N, full sine periods,
// modulator overload-free operation with both output values) and counts a
// failure for any that never occurred.
module tb_ti_sdm_dac_top;
  import dac_pkg::*;
  localparam int M  = 4;
  localparam int W  = 16;
  localparam longint FS = longint'(1) << (W - 1);

  logic clk = 0, rst = 1;
  logic [15:0] cfg_div_n = 3;
  logic [15:0] cfg_coef = 2048;
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

  summing_lpf_model #(.M(M), .ALPHA(0.05)) u_lpf (.clk, .dac(dac_out), .v_out(v_lpf));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // reference state
  longint rc, rs, ru;
  bit     yref [$];
  int     n;            // index of the next high-rate sample
  int     rptr;
  int     last_tick, clk_count, nticks, nframes;
  // mechanism counters
  int cnt_ti = 0, cnt_hs = 0, cnt_dwa = 0, cnt_switch = 0, cnt_wrap = 0;
  int cnt_div_change = 0, cnt_sine_periods = 0, cnt_y1 = 0, cnt_y0 = 0;

  function automatic longint res_x(longint s);
    if (s > FS - 1) return FS - 1;
    if (s < -FS)    return -FS;
    return s;
  endfunction

  // state of the check of a tick's registered results, made one clock later
  bit       pend = 0;
  int       pn;
  dac_src_e pend_src;
  longint   rs_prev;

  // Process one clock: called once at every negedge, after any change of
  // configuration for the coming clock edge (and a short delay so that the
  // decoded enables reflect the change).
  task automatic do_cycle();
    int lvl, k;
    clk_count++;
    if (pend) begin
      pend = 0;
      if (pn >= M) begin
        bit ye;
        ye = yref[pn - M];
        check(y_n == ye, $sformatf("y(%0d) %0d exp %0d", pn - M, y_n, ye));
        k = pn % M;
        case (pend_src)
          SRC_TI_PATHS: begin
            check(dac_out[k] == ye, "path pin gets y_k(m)");
            cnt_ti++;
          end
          SRC_HIGH_SPEED: begin
            check(dac_out == {M{ye}}, "all pins follow y(n)");
            cnt_hs++;
          end
          SRC_DWA: if (k == 0) begin
            lvl = 0;
            for (int j = 0; j < M; j++) lvl += int'(yref[pn - M + j]);
            check($countones(dac_out) == lvl, $sformatf("DWA level %0d pins %b", lvl, dac_out));
            for (int j = 0; j < M; j++)
              check(dac_out[(rptr + j) % M] == (j < lvl), "DWA pins follow the pointer");
            if (rptr + lvl >= M && lvl > 0) cnt_wrap++;
            rptr = (rptr + lvl) % M;
            check(int'(dwa_ptr) == rptr, "DWA pointer");
            cnt_dwa++;
          end
          default: ;
        endcase
      end
    end
    if (tick_h) begin
      bit y;
      // rates
      if (last_tick >= 0)
        check(clk_count - last_tick == ((cfg_div_n == 0) ? 1 : int'(cfg_div_n)),
              $sformatf("tick spacing %0d", clk_count - last_tick));
      last_tick = clk_count;
      check(int'(phase) == n % M, "phase is n mod M");
      check(tick_l == (n % M == M - 1), "tick_l on last sample of frame");
      if (tick_l) nframes++;
      nticks++;
      // source sample
      check(longint'(x_n) == res_x(rs), $sformatf("x(%0d) %0d exp %0d", n, x_n, res_x(rs)));
      if (n > 0 && rs >= 0 && rs_prev < 0) cnt_sine_periods++;
      rs_prev = rs;
      // reference modulator
      y = (ru >= 0);
      ru = ru + res_x(rs) - (y ? FS : -FS);
      yref.push_back(y);
      if (y) cnt_y1++; else cnt_y0++;
      // reference resonator (floor of the products)
      rc = rc - ((longint'(cfg_coef) * rs) >>> 16);
      rs = rs + ((longint'(cfg_coef) * rc) >>> 16);
      pn = n;
      pend = 1;
      pend_src = cfg_src;
      n++;
    end
  endtask

  task automatic run_ticks(input int count);
    int start;
    start = nticks;
    while (nticks - start < count) begin
      @(negedge clk);
      do_cycle();
    end
  endtask

  // Advance to the negedge before the tick of phase 0 (a frame start),
  // leaving that clock unprocessed so the caller can change the
  // configuration for it and then call do_cycle.
  task automatic to_frame_start();
    forever begin
      @(negedge clk);
      if (tick_h && phase == 0) break;
      do_cycle();
    end
  endtask

  initial begin
    real vmax, vmin, pp, pp_exp;
    rst = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    rc = longint'(cfg_amplitude); rs = 0; ru = 0; rs_prev = 0;
    n = 0; rptr = 0; last_tick = -1; clk_count = 0; nticks = 0; nframes = 0;

    // 1. path mode, N = 3: several sine periods (about 201 samples each)
    run_ticks(1200);
    // LPF swing over two sine periods
    vmax = -1.0; vmin = 100.0;
    for (int i = 0; i < 402 * 3; i++) begin
      @(negedge clk);
      do_cycle();
      if (v_lpf > vmax) vmax = v_lpf;
      if (v_lpf < vmin) vmin = v_lpf;
    end
    pp = vmax - vmin;
    pp_exp = real'(M) * 3.3 * real'(cfg_amplitude) / real'(FS);
    $display("LPF swing %f V, expected about %f V", pp, pp_exp);
    check(pp > 0.85 * pp_exp && pp < 1.15 * pp_exp, "reconstructed sine amplitude");
    check((vmax + vmin) / 2.0 > 0.45 * M * 3.3 && (vmax + vmin) / 2.0 < 0.55 * M * 3.3,
          "reconstructed sine centred at mid-scale");

    // 2. switch to the high-speed stream
    to_frame_start();
    cfg_src = SRC_HIGH_SPEED; cnt_switch++;
    #1 do_cycle();
    run_ticks(800);

    // 3. switch to DWA, change N to 5 right after a tick
    to_frame_start();
    cfg_src = SRC_DWA; cnt_switch++;
    #1 do_cycle();
    @(negedge clk);
    cfg_div_n = 5; cnt_div_change++;
    #1 do_cycle();
    run_ticks(1200);

    // 4. back to the paths with N = 1 (every clock is a sample)
    to_frame_start();
    cfg_src = SRC_TI_PATHS; cnt_switch++;
    #1 do_cycle();
    @(negedge clk);
    cfg_div_n = 1; cnt_div_change++;
    #1 do_cycle();
    run_ticks(1200);

    check(nframes == nticks / M || nframes == nticks / M - 1 || nframes == nticks / M + 1,
          "one frame per M samples");
    check(longint'(integrator) <= 2 * FS && longint'(integrator) >= -2 * FS, "integrator bounded");

    $display("mechanisms: path-mode ticks %0d, high-speed ticks %0d, DWA frames %0d, mode switches %0d,",
             cnt_ti, cnt_hs, cnt_dwa, cnt_switch);
    $display("            DWA pointer wraps %0d, divider changes %0d, sine periods %0d, y ones %0d zeros %0d",
             cnt_wrap, cnt_div_change, cnt_sine_periods, cnt_y1, cnt_y0);
    check(cnt_ti > 0, "path mode used");
    check(cnt_hs > 0, "high-speed mode used");
    check(cnt_dwa > 0, "DWA mode used");
    check(cnt_switch >= 3, "mode switches");
    check(cnt_wrap > 0, "DWA pointer wrapped");
    check(cnt_div_change >= 2, "divider changed");
    check(cnt_sine_periods >= 10, "full sine periods generated");
    check(cnt_y1 > 0 && cnt_y0 > 0, "modulator produced both values");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
