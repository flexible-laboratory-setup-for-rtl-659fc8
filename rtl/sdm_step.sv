// sdm_step: one sample of a first-order, single-bit sigma-delta loop.
//
// Purely combinational. The loop subtracts the fed-back quantizer value
// y_a from the input and accumulates the difference in a delaying integrator
// z^-1 / (1 - z^-1):
//     y(n)   = 1 if u(n) >= 0 else 0      (y_a = +FS or -FS, FS = 2^(W-1))
//     u(n+1) = u(n) + x(n) - y_a(n)
// which gives Y(z) = X(z) z^-1 + E(z) (1 - z^-1): the input delayed by one
// sample plus first-order high-pass shaped quantization error. The loop
// equation is the one the text gives; the sign-of-integrator quantizer and
// the numeric formats are this design's choices.
//
// The integrator is W+2 bits wide: for |x| <= FS it stays within
// [-2FS, 2FS), well inside that range.
module sdm_step #(
  parameter int unsigned W = dac_pkg::SAMPLE_W
) (
  input  logic signed [W+1:0] u,       // integrator state u(n)
  input  logic signed [W-1:0] x,       // input sample x(n)
  output logic                y,       // quantizer output y(n)
  output logic signed [W+1:0] u_next   // u(n+1)
);

  localparam logic signed [W+1:0] FS = (W + 2)'(1) <<< (W - 1);

  always_comb begin
    y      = ~u[W+1];
    u_next = u + (W + 2)'(x) - (y ? FS : -FS);
  end

endmodule
