// summing_lpf_model: behavioural model of the off-chip summing low-pass filter.
//
// Not synthesizable; used by testbenches only. Each of the M DAC pins is an
// output buffer that swings between 0 V and VDD. Element i has the static
// gain error i * GAIN_STEP, so the elements mismatch as real ones do. The
// filter adds the M pin voltages and smooths the sum with a first-order
// low-pass, evaluated once per clock:
//     v_out += ALPHA * (sum_i dac[i] * VDD * (1 + i*GAIN_STEP) - v_out)
// The time constant is 1/ALPHA clocks. Component values of the real network
// are not known; these are illustrative.
module summing_lpf_model #(
  parameter int  M         = 4,
  parameter real VDD       = 3.3,
  parameter real GAIN_STEP = 0.0,
  parameter real ALPHA     = 0.05
) (
  input  logic         clk,
  input  logic [M-1:0] dac,
  output real          v_out
);

  real v_sum;

  initial v_out = 0.0;

  always_comb begin
    v_sum = 0.0;
    for (int i = 0; i < M; i++)
      if (dac[i]) v_sum = v_sum + VDD * (1.0 + real'(i) * GAIN_STEP);
  end

  always @(posedge clk)
    v_out <= v_out + ALPHA * (v_sum - v_out);

endmodule
