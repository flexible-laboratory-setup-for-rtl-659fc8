// dac_source_select: chooses and registers what the M DAC pins carry.
//
// Each pin drives one output buffer used as a one-bit DAC; the analog sum of
// the pins is low-pass filtered off chip. src picks the scheme under test:
//
//   dac_pkg::SRC_TI_PATHS    interleaved paths. Pin k is loaded with y_k(m) at the
//                   tick_h of phase k and holds it for M high-rate periods,
//                   so each path DAC runs at f_L and the paths are staggered
//                   by one high-rate period. The pin sum at any time is the
//                   sum of the last M bits of y(n).
//   dac_pkg::SRC_HIGH_SPEED  every pin is loaded with the multiplexer output y(n) at
//                   every tick_h: the DACs all run at f_H.
//   dac_pkg::SRC_DWA         at the first tick_h of a frame (phase 0) the pins are
//                   loaded with the data weighted averaging selection for
//                   the frame's level (number of ones among y_k(m)) and
//                   hold it for the frame.
//
// That the DACs are fed either from the paths or from the multiplexer output
// follows the text, as does the use of data weighted averaging. The staggered
// loading of the paths and the way the DWA mode takes its level from the
// frame are this design's choices.
//
// Timing: the pins are registers, updated only on tick_h, so a change of
// src takes effect at the next tick_h. Reset sets all pins low.
module dac_source_select #(
  parameter int unsigned M  = dac_pkg::NUM_PATHS,
  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              en,        // tick_h
  input  logic [PW-1:0]     phase,     // k of the high-rate sample now sent
  input  dac_pkg::dac_src_e src,       // scheme selection
  input  logic [M-1:0]      y_frame,   // y_k(m) of the frame being sent
  input  logic              y_sel,     // multiplexer output for this tick
  input  logic [M-1:0]      dwa_sel,   // DWA element selection for the frame
  output logic [M-1:0]      dac        // pin values
);

  logic [M-1:0] dac_d;

  always_comb begin
    dac_d = dac;
    unique case (src)
      dac_pkg::SRC_TI_PATHS:   dac_d[phase] = y_frame[phase];
      dac_pkg::SRC_HIGH_SPEED: dac_d = {M{y_sel}};
      dac_pkg::SRC_DWA:        if (phase == '0) dac_d = dwa_sel;
      default:        dac_d = dac;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst)     dac <= '0;
    else if (en) dac <= dac_d;
  end

endmodule
