// sine_resonator: digital resonator that generates the sinusoidal test signal.
//
// The test signal is made inside the FPGA by a resonator rather than read
// from a table. This one is the coupled two-integrator loop
//     c <- c - eps * s
//     s <- s + eps * c      (using the new c)
// whose state turns on a closed curve, so it neither grows nor decays. Its
// frequency is f = f_H * acos(1 - eps^2/2) / (2*pi), about eps * f_H / (2*pi)
// for small eps. eps = coef / 2^COEF_FRAC. Reset loads c = amplitude and
// s = 0, so the output x = s starts at zero and rises. The products are
// truncated towards minus infinity by an arithmetic shift.
//
// That the signal comes from a resonator follows the text; the loop
// structure, the coefficient format and the state width (two guard bits
// above the sample width) are this design's choices.
//
// Timing: the state advances on each en pulse (tick_h). x is the current
// state s, so x is the sample of the high-rate index n until the next en.
// x saturates to the W-bit range; with amplitude below 2^(W-1) it never needs to.
module sine_resonator #(
  parameter int unsigned W    = dac_pkg::SAMPLE_W,
  parameter int unsigned CW   = 16,
  parameter int unsigned FRAC = dac_pkg::COEF_FRAC
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                en,         // advance one sample (tick_h)
  input  logic [CW-1:0]       coef,       // eps * 2^FRAC, unsigned
  input  logic signed [W-1:0] amplitude,  // peak value, loaded at reset
  output logic signed [W-1:0] x           // sample x(n)
);

  localparam int unsigned SW = W + 2;           // state width
  localparam int unsigned PW = SW + CW + 1;     // product width

  logic signed [SW-1:0] c_q, s_q, c_d, s_d;
  logic signed [PW-1:0] prod_c, prod_s;
  logic signed [CW:0]   coef_s;

  localparam logic signed [SW-1:0] XMAX = SW'((1 << (W - 1)) - 1);
  localparam logic signed [SW-1:0] XMIN = -SW'(1 << (W - 1));

  always_comb begin
    coef_s = signed'({1'b0, coef});
    prod_c = PW'(coef_s) * PW'(s_q);
    c_d    = c_q - SW'(prod_c >>> FRAC);
    prod_s = PW'(coef_s) * PW'(c_d);
    s_d    = s_q + SW'(prod_s >>> FRAC);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      c_q <= SW'(amplitude);
      s_q <= '0;
    end else if (en) begin
      c_q <= c_d;
      s_q <= s_d;
    end
  end

  always_comb begin
    if (s_q > XMAX)      x = XMAX[W-1:0];
    else if (s_q < XMIN) x = XMIN[W-1:0];
    else                 x = s_q[W-1:0];
  end

endmodule
