# Time-interleaved sigma-delta DAC on an FPGA

This is the FPGA logic of a low-cost bench for comparing ways of building a
digital-to-analog converter. A one-bit first-order sigma-delta modulator turns
a digital sine into a bit stream. The modulator is split into M interleaved
paths, each running at 1/M of the output sample rate. Each path drives an
ordinary FPGA output pin, used as a one-bit DAC. Outside the FPGA, a resistor
network adds the M pin voltages and low-pass filters the sum, and an
oscilloscope records the result.

The point of the bench is that the same pins can be fed in different ways,
selected at run time:

- **Interleaved paths.** Each pin carries the output of one path, at the low rate.
- **High-speed stream.** Every pin carries the full-rate stream, recombined from the paths.
- **Data weighted averaging (DWA).** The frame's level is played on the pins, and the pins chosen rotate, so that mismatch between the pins averages out.

The design follows the prototype described in the paper "Flexible laboratory
setup for DAC experimentation" (Pérez Vega-Leal and Satué). That paper gives
the signal chain and the equations but few implementation details. Every
number below that is not marked as coming from the paper is a choice made for
this RTL; the section *Where this RTL departs from or goes beyond the paper*
collects them.

## Rates and clocking

Everything runs on the board's 100 MHz clock, `f_ck` (from the paper). No
derived clocks are created. Instead, `clock_divider` produces one-cycle enables:

| signal   | rate                 | meaning |
|----------|----------------------|---------|
| `tick_h` | `f_H = f_ck / N`     | one high-rate sample `n` (N is a run-time input, 1..65535) |
| `tick_l` | `f_L = f_H / M`      | the last sample of a frame of M samples |
| `phase`  | counts on `tick_h`   | the polyphase index `k` of the current sample, `n = mM + k` |

With the default M = 4 and, for example, N = 10, the rates are f_H = 10 MHz
and f_L = 2.5 MHz. N = 1 makes every clock a sample.

## The interleaved modulator

The modulator is the part that takes most explaining.

The single-rate first-order loop subtracts the fed-back output from the input
and integrates the difference through `z^-1/(1 - z^-1)`:

    y(n)   = 1 if u(n) >= 0, else 0          (1 means +FS, 0 means -FS)
    u(n+1) = u(n) + x(n) - (y(n) ? +FS : -FS)

This gives `Y(z) = z^-1 X(z) + (1 - z^-1) E(z)`: the input delayed by one
sample, plus quantization error pushed towards high frequencies. Here
FS = 2^15, and samples are 16-bit two's complement.

Run directly, this loop needs its integrator updated at `f_H`.
`ti_sdm` instead unrolls it over a frame of M samples:

- M copies of the loop step (`sdm_step`) are chained combinationally.
- Step `k` takes the integrator value that step `k-1` leaves, together with input `x(mM+k)`.
- Once per frame, on `tick_l`, the M output bits and the final integrator value are registered.

Because the chain does exactly what the single-rate loop would do over those
M samples, the path outputs are the polyphase components of the single-rate
bit stream:

    y_k(m) = y(mM + k),   k = 0 .. M-1

The testbench checks this bit for bit against a sample-by-sample reference
loop. Only one integrator register exists, at the frame boundary. Every path
step runs at `f_L`, with `f_H` appearing only in how many steps are chained.

Numeric ranges: the integrator is 18 bits. For any input within full scale
it stays within ±2·FS, and an assertion in `ti_sdm` watches this bound.

Feeding the modulator needs a whole frame at once. `input_framer` stores
samples `k = 0..M-2` as they arrive and passes sample `M-1` straight through,
so the frame is complete on the same clock edge as `tick_l`.

## Recombining and driving the pins

`output_mux` sends the bits of frame `m` during frame `m+1`, one per
`tick_h`, in path order. The result is the high-rate stream `y(n)`. It lags
the input `x(n)` by exactly one frame (M high-rate periods).

`dac_source_select` registers the M pins, `dac_out`, on `tick_h`. Its
`src` input (`dac_pkg::dac_src_e`) chooses one of three schemes:

| `cfg_src`        | what the pins carry | pin sum (the analog output before filtering) |
|------------------|---------------------|-----------------------------------------------|
| `SRC_TI_PATHS`   | pin k is loaded with `y_k(m)` at the tick of phase k and holds it for M ticks. Each path DAC runs at `f_L`, and the paths are staggered by one high-rate period. | sum of the last M bits of `y(n)`, an M-tap moving sum at `f_H` |
| `SRC_HIGH_SPEED` | every pin follows `y(n)` at `f_H` | `M · y(n)` |
| `SRC_DWA`        | at the start of each frame the pins are set to the DWA selection for the frame's level, `L = Σ_k y_k(m)`, and held for the frame | `L` per frame, an (M+1)-level signal at `f_L` |

In all three schemes the low-frequency content of the pin sum is the same
scaled sine. What differs is:

- **Pin mismatch.** With mismatched pins, how each scheme turns the mismatch into error.
- **Pin rate.** How fast each pin has to switch.

Comparing these differences is what the bench is for.

A change of `cfg_src` takes effect at the next `tick_h`. In DWA mode it takes
effect at the next frame start.

## Data weighted averaging

`dwa_encoder` treats the M pins as equal unit elements. A level `L` is
realised by the `L` elements that follow the last element used, wrapping
modulo M. The pointer then moves on by `L`:

    sel[i] = 1  when (i - ptr) mod M < L
    ptr   <= (ptr + L) mod M

Every element is therefore used equally often: the use counts of any two
elements never differ by more than one, and the testbench checks exactly
that. The effect is that the static error of each element is shaped by a
first-order high-pass, away from the signal band. The pointer only moves while
DWA mode is selected.

## The test signal

The sine comes from a digital resonator inside the FPGA, `sine_resonator`.
It is a coupled two-integrator loop, advanced once per `tick_h`:

    c <- c - eps·s
    s <- s + eps·c        (new c)
    x(n) = s

Here `eps = cfg_coef / 2^16`. The loop has no growth or decay, so it
oscillates indefinitely with a peak close to the value loaded into `c` at
reset (`cfg_amplitude`). Its frequency is

    f = f_H · acos(1 - eps²/2) / (2π)  ≈  eps · f_H / (2π)

The oscilloscope trace shown for the prototype has a sine of about 14 kHz. It
is reproduced with N = 10 (f_H = 10 MHz) and `cfg_coef` = 577, which gives
14.01 kHz. For a given frequency, `cfg_coef ≈ 2^16 · 2π · f / f_H`.

## Top-level interface

`ti_sdm_dac_top` has these parameters, all with the defaults given:

| parameter | default | meaning |
|-----------|---------|---------|
| `W`       | 16      | sample width |
| `M`       | 4       | number of interleaved paths and DAC pins |
| `DIV_W`   | 16      | width of N |
| `CW`      | 16      | width of the resonator coefficient |

Inputs:

- `clk`: the 100 MHz board clock.
- `rst`: synchronous, active high.
- `cfg_div_n`: N.
- `cfg_coef`: the resonator coefficient.
- `cfg_amplitude`: the sine peak, loaded at reset.
- `cfg_src`: the DAC scheme.

Outputs:

- `dac_out[M-1:0]`: the pins that go to the output buffers.
- For observation: `y_n`, `y_frame`, `x_n`, `tick_h`, `tick_l`, `phase`, `dwa_ptr`, and the modulator's `integrator`.

Latency: `x(n)` is taken at its `tick_h`. `y(n)` appears on `y_n` and on
the pins one clock after the `tick_h` that comes M samples later.

Size after generic synthesis, at the defaults: about 115 word-level cells
and 83 flip-flops, plus the 4×16-bit frame store.

## Outside the FPGA

These parts are not logic and are not in `rtl/`:

- **Output buffers.** The FPGA output buffers act as the one-bit DACs.
- **Summing low-pass filter.** A passive network on a breadboard adds the pin voltages and filters the sum.
- **Oscilloscope.** The paper reports 16 bits, 10 Msps and 5 MHz bandwidth.

For simulation, `tb/summing_lpf_model.sv` stands in for the buffers and the
filter:

- Each pin gives 0 V or 3.3 V.
- Element `i` has an optional gain error of `i · GAIN_STEP`.
- The sum goes through a first-order low-pass with time constant `1/ALPHA` clocks.

These values are illustrative, because the real network's component values
are not known.

## Files

| file | contents |
|------|----------|
| `rtl/dac_pkg.sv` | shared constants and the `dac_src_e` enum |
| `rtl/clock_divider.sv` | `tick_h`, `tick_l`, `phase` |
| `rtl/sine_resonator.sv` | test sine generator |
| `rtl/input_framer.sv` | serial-to-parallel framing of `x(n)` |
| `rtl/sdm_step.sv` | one combinational step of the first-order loop |
| `rtl/ti_sdm.sv` | interleaved modulator (M chained steps) |
| `rtl/output_mux.sv` | recombination into `y(n)` |
| `rtl/dwa_encoder.sv` | DWA element selection |
| `rtl/dac_source_select.sv` | the three pin schemes |
| `rtl/ti_sdm_dac_top.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench for each module |
| `tb/tb_ti_sdm_dac_top.sv` | end-to-end test at default parameters |
| `tb/tb_scope_sine_workload.sv` | the 14 kHz bench measurement, in all three schemes |
| `tb/tb_noise_shaping_workload.sv` | in-band noise and mismatch error, from a windowed DFT |
| `tb/summing_lpf_model.sv` | behavioural pin-sum and low-pass filter |

## Simulating

From the top of the tree, with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb rtl/dac_pkg.sv \
        tb/tb_ti_sdm_dac_top.sv --top-module tb_ti_sdm_dac_top
    ./obj_dir/Vtb_ti_sdm_dac_top

Replace the testbench name to run another one. Each testbench prints a final
`TB_RESULT checks=<n> failures=<n>` line, and has a watchdog that ends the
run with a failure if it hangs. All of them finish in well under a second.

What the testbenches establish:

- **`tb_ti_sdm`.** The interleaved modulator equals a sample-by-sample single-rate loop, bit for bit and in the integrator value, for M = 4 and M = 3. Inputs are random, constant and ramp. For a constant input of FS/4, the mean of the output is correct.
- **`tb_sine_resonator`.** The measured period matches the acos formula within half a sample, and the peaks are within 2 % of the loaded amplitude.
- **`tb_clock_divider`.** The tick spacing is exactly N clocks for several N, and frames are exactly M ticks (M = 4 and 3).
- **`tb_dwa_encoder`.** The selection matches the rotating-pointer rule, and element use stays balanced within one (M = 4 and 5).
- **`tb_output_mux`, `tb_dac_source_select`.** Bit order, holding between ticks, and the pin rules of each scheme.
- **`tb_ti_sdm_dac_top`.** The whole design at its defaults is checked against a reference model, across switches between all three schemes and changes of N (3, 5, 1). The checks cover:
  - the rates;
  - `x(n)`, and `y(n)` one frame later;
  - the pins in each scheme, and the DWA pointer;
  - the filtered sine's swing and centre.
  
  The test counts each mechanism (each scheme, mode switches, DWA pointer wrap-round, divider changes, sine periods) and fails if any did not occur.
- **`tb_scope_sine_workload`.** A 14 kHz sine at f_H = 10 MHz, recovered from the filtered pin sum in each scheme at 13.9–14.1 kHz and with the expected swing. The filter model includes 1 % element mismatch steps.
- **`tb_noise_shaping_workload`.** Spectral checks at f_H = f_ck (N = 1) over an 8192-sample record. They use a Hann-windowed DFT of the low bins and leave out the sine's bins.
  - The in-band quantization noise of `y(n)` against the first-order formula `σ_e² · π²/3 · (2 f_b / f_s)³`, with `σ_e² = 1/3` for ±1 outputs:

    | OSR | measured | formula |
    |-----|----------|---------|
    | 32  | 1.8e-5   | 3.3e-5  |
    | 64  | 3.0e-6   | 4.2e-6  |

    Doubling the OSR lowers the noise by a factor of 5.9, where ideal first-order shaping gives 8.
  - The in-band power of the error that pin gain mismatch adds to the pin sum. The test uses gain errors of +1.0, −0.5, +0.7 and −1.2 %. With per-path pins the error is 2.7e-5; with DWA it is 8.2e-8, 25 dB lower.

  The per-path figure is the known weakness of interleaved DACs. Each fixed path's bit stream carries folded high-frequency noise, and mismatch between the paths lets that noise into the signal band. DWA instead shapes the mismatch error out of the band.

## Where this RTL departs from or goes beyond the paper

Taken from the paper:

- the 100 MHz master clock and `f_H = f_ck/N`;
- a resonator-generated sine;
- the first-order loop and its transfer function;
- interleaving into M paths with `y_k(m) = y(mM+k)`, at `f_L` for the paths and `f_H` for `y(n)`;
- a multiplexer producing `y(n)`;
- M DACs fed either from the paths or from `y(n)`;
- one FPGA output buffer per DAC, summed by a low-pass filter;
- DWA as the matching method of interest.

Choices made here, where the paper gives nothing:

- **Numbers:** M = 4, the 16-bit sample width, and the ±FS quantizer levels.
- **Resonator structure:** the coupled two-integrator loop and its coefficient format.
- **Clocking:** enable-based clocking in one clock domain, and the synchronous reset.
- **Interleaving:** unrolling the loop into chained steps, and the input framing.
- **Pin timing:** the one-frame latency, and the staggered loading of the path pins.
- **High-speed mode:** all M pins carry `y(n)`, rather than only one of them.
- **DWA:** how it is applied. The frame's level is played on the M path pins.
- **Configuration:** through plain input ports; the paper does not say how the prototype is configured.

Not built:

- **Analog multiplexing.** The paper names it among the techniques the bench is meant to compare, but does not say how the prototype realises it. It would be analog switching outside the FPGA.
- **Other DEM methods.** The paper mentions them in general but describes only DWA.
- **Decimator.** The paper's description of the first-order loop opens by calling it "an analog SDM followed by a digital decimator", which describes the converter in the other direction. The loop equations were followed, and no decimator is built.
