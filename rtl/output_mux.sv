// output_mux: multiplexes the M path outputs back into the high-rate stream.
//
// The inverse of the polyphase split: during frame m+1 the bits of frame m,
// y_k(m), are sent out one per tick_h in path order, so that
//     y(mM + k) = y_k(m).
// y_sel is the combinational multiplexer output y_frame[phase]; y_n is that
// bit registered on tick_h and held for one high-rate period.
//
// Timing: y_frame of frame m is registered by the modulator at the tick_l
// of frame m, so the tick_h of phase k in frame m+1 sends y(mM + k). The
// stream therefore lags the input by exactly one frame (M high-rate
// periods). That the multiplexed stream exists follows the text; the
// registered output and this timing are this design's choices.
module output_mux #(
  parameter int unsigned M  = dac_pkg::NUM_PATHS,
  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,        // tick_h
  input  logic [PW-1:0] phase,     // k of the sample to send
  input  logic [M-1:0]  y_frame,   // y_k(m) of the previous frame
  output logic          y_sel,     // y_frame[phase], combinational
  output logic          y_n        // y(n), registered
);

  assign y_sel = y_frame[phase];

  always_ff @(posedge clk) begin
    if (rst)     y_n <= 1'b0;
    else if (en) y_n <= y_sel;
  end

endmodule
