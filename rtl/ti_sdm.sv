// ti_sdm: time-interleaved first-order sigma-delta modulator.
//
// A single-rate first-order modulator would have to run its integrator at
// f_H. Here the loop is unrolled over one frame of M samples: M copies of
// the loop step (sdm_step) are chained, path k taking the integrator value
// left by path k-1, and all M run once per frame at the low rate f_L. The
// frame's M outputs are then the polyphase components
//     y_k(m) = y(mM + k),   k = 0 .. M-1
// of exactly the bit stream y(n) a single-rate modulator would produce from
// x(n). Only the integrator value at the frame boundary is stored.
//
// The loop equation and the polyphase relation follow the text; unrolling the
// loop into chained low-rate step units is this design's way of realising
// the parallel low-rate integrators it mentions.
//
// Interface: x_frame[k] = x(mM + k). On en (one pulse per frame), y_frame and
// the integrator state are registered; y_frame[k] = y_k(m) is valid from the
// clock after en until the next en. Reset clears the integrator and y_frame.
module ti_sdm #(
  parameter int unsigned W = dac_pkg::SAMPLE_W,
  parameter int unsigned M = dac_pkg::NUM_PATHS
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                en,              // one pulse per frame (f_L)
  input  logic signed [W-1:0] x_frame [M],     // x(mM+k), k = 0..M-1
  output logic [M-1:0]        y_frame,         // y_k(m), bit k = path k
  output logic signed [W+1:0] integrator       // u at the frame boundary
);

  logic signed [W+1:0] u_chain [M+1];
  logic [M-1:0]        y_d;

  assign u_chain[0] = integrator;

  for (genvar k = 0; k < M; k++) begin : g_path
    sdm_step #(.W(W)) u_step (
      .u      (u_chain[k]),
      .x      (x_frame[k]),
      .y      (y_d[k]),
      .u_next (u_chain[k+1])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      integrator <= '0;
      y_frame    <= '0;
    end else if (en) begin
      integrator <= u_chain[M];
      y_frame    <= y_d;
    end
  end

  // With inputs inside full scale the integrator stays within +/- 2 FS.
  a_integrator_bounded: assert property (@(posedge clk) disable iff (rst)
      (integrator <= ((W + 2)'(2) <<< (W - 1))) && (integrator >= -((W + 2)'(2) <<< (W - 1))))
    else $error("sigma-delta integrator out of range");

endmodule
