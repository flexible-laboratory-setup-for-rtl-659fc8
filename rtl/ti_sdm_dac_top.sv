// ti_sdm_dac_top: FPGA logic of a time-interleaved sigma-delta DAC test bench.
//
// Signal chain, all on the 100 MHz board clock with enables:
//   clock_divider      tick_h at f_H = f_ck / N, tick_l at f_L = f_H / M,
//                      and the polyphase index k
//   sine_resonator     test sine x(n), one sample per tick_h
//   input_framer       collects x(mM .. mM+M-1) into one frame
//   ti_sdm             M chained first-order loop steps run once per frame,
//                      giving y_k(m) = y(mM + k)
//   output_mux         re-serialises y_k(m) into the high-rate stream y(n)
//   dwa_encoder        data weighted averaging selection of the M pins for
//                      the level sum_k y_k(m)
//   dac_source_select  feeds the M pins from the paths, from y(n) or from
//                      the DWA selection
// The M pins, dac_out, drive FPGA output buffers that act as one-bit DACs;
// their outputs are added and low-pass filtered outside the FPGA.
//
// The chain (divider, resonator, interleaved modulator, multiplexer, DACs
// fed from paths or from the multiplexer, DWA) follows the text. The number
// of paths M = 4, the 16-bit samples, the enable-based clocking, the run-time
// configuration inputs and the synchronous reset are this design's choices.
//
// Timing: y(n) comes out one frame (M high-rate periods) after x(n) is
// taken. The configuration inputs are sampled continuously; cfg_amplitude
// is loaded into the resonator at reset only.
module ti_sdm_dac_top #(
  parameter int unsigned W     = dac_pkg::SAMPLE_W,
  parameter int unsigned M     = dac_pkg::NUM_PATHS,
  parameter int unsigned DIV_W = dac_pkg::DIV_W,
  parameter int unsigned CW    = 16,
  localparam int unsigned PW   = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned LW   = $clog2(M + 1)
) (
  input  logic                clk,            // 100 MHz board clock
  input  logic                rst,            // synchronous, active high
  input  logic [DIV_W-1:0]    cfg_div_n,      // N, f_H = f_ck / N
  input  logic [CW-1:0]       cfg_coef,       // resonator eps * 2^16
  input  logic signed [W-1:0] cfg_amplitude,  // sine peak, loaded at reset
  input  dac_pkg::dac_src_e   cfg_src,        // what drives the DAC pins
  output logic [M-1:0]        dac_out,        // to the output-buffer DACs
  output logic                y_n,            // high-rate stream y(n)
  output logic [M-1:0]        y_frame,        // y_k(m) of the last frame
  output logic signed [W-1:0] x_n,            // resonator sample x(n)
  output logic                tick_h,         // high-rate sample enable
  output logic                tick_l,         // frame enable
  output logic [PW-1:0]       phase,          // polyphase index k
  output logic [PW-1:0]       dwa_ptr,        // DWA pointer
  output logic signed [W+1:0] integrator      // modulator state at frame edge
);

  logic signed [W-1:0] x_frame [M];
  logic                y_sel;
  logic [LW-1:0]       level;
  logic [M-1:0]        dwa_sel;
  logic                dwa_en;

  clock_divider #(.DIV_W(DIV_W), .M(M)) u_div (
    .clk, .rst, .div_n(cfg_div_n), .tick_h, .tick_l, .phase
  );

  sine_resonator #(.W(W), .CW(CW)) u_res (
    .clk, .rst, .en(tick_h), .coef(cfg_coef), .amplitude(cfg_amplitude), .x(x_n)
  );

  input_framer #(.W(W), .M(M)) u_framer (
    .clk, .rst, .en(tick_h), .phase, .x(x_n), .x_frame
  );

  ti_sdm #(.W(W), .M(M)) u_sdm (
    .clk, .rst, .en(tick_l), .x_frame, .y_frame, .integrator
  );

  output_mux #(.M(M)) u_mux (
    .clk, .rst, .en(tick_h), .phase, .y_frame, .y_sel, .y_n
  );

  // Level of the frame now being sent: the number of ones among its paths.
  always_comb level = LW'($countones(y_frame));

  assign dwa_en = tick_h && (phase == '0) && (cfg_src == dac_pkg::SRC_DWA);

  dwa_encoder #(.M(M)) u_dwa (
    .clk, .rst, .en(dwa_en), .count(level), .sel(dwa_sel), .ptr(dwa_ptr)
  );

  dac_source_select #(.M(M)) u_sel (
    .clk, .rst, .en(tick_h), .phase, .src(cfg_src), .y_frame, .y_sel,
    .dwa_sel, .dac(dac_out)
  );

endmodule
