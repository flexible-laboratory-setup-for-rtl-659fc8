// input_framer: gathers M consecutive high-rate samples into one frame.
//
// Serial-to-parallel conversion in front of the interleaved modulator. On
// each en (tick_h) the sample x(mM + k) is stored in slot k = phase. The
// frame output gives slots 0..M-2 from storage and slot M-1 straight from
// the input, so the complete frame x(mM .. mM+M-1) is present during the
// tick_h of the last sample (tick_l) and the modulator can take it on that
// same clock edge. This splitter is this design's own; the text only says
// the paths work on the polyphase components.
module input_framer #(
  parameter int unsigned W  = dac_pkg::SAMPLE_W,
  parameter int unsigned M  = dac_pkg::NUM_PATHS,
  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                en,             // tick_h
  input  logic [PW-1:0]       phase,          // k of the sample on x
  input  logic signed [W-1:0] x,              // x(mM + k)
  output logic signed [W-1:0] x_frame [M]     // whole frame, valid at tick_l
);

  logic signed [W-1:0] slot [M];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < M; k++) slot[k] <= '0;
    end else if (en) begin
      slot[phase] <= x;
    end
  end

  always_comb begin
    for (int k = 0; k < M - 1; k++) x_frame[k] = slot[k];
    x_frame[M-1] = x;
  end

endmodule
