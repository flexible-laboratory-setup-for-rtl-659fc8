// dac_pkg: constants and types shared by the time-interleaved sigma-delta DAC.
//
// The design runs on the 100 MHz board clock f_ck. The high sample rate is
// f_H = f_ck / N, with N set at run time, and the frame rate of the
// interleaved paths is f_L = f_H / M. The numeric formats below are this design's own choice:
// samples are W-bit two's complement fractions of the full scale 2^(W-1),
// and a one-bit modulator output of 1 stands for +full scale, 0 for -full scale.
//
// dac_src_e chooses what drives the M DAC pins:
//   SRC_TI_PATHS   pin k carries path k's output y_k(m), held for one frame
//   SRC_HIGH_SPEED every pin carries the multiplexed stream y(n)
//   SRC_DWA        the number of ones in a frame is played on the M pins as
//                  a level, with the pins chosen by data weighted averaging
package dac_pkg;

  // Default sample width and number of interleaved paths.
  localparam int unsigned SAMPLE_W    = 16;
  localparam int unsigned NUM_PATHS   = 4;
  // Width of the run-time clock divider N.
  localparam int unsigned DIV_W       = 16;
  // Fractional bits of the resonator coefficient.
  localparam int unsigned COEF_FRAC   = 16;

  typedef enum logic [1:0] {
    SRC_TI_PATHS   = 2'd0,
    SRC_HIGH_SPEED = 2'd1,
    SRC_DWA        = 2'd2
  } dac_src_e;

endpackage
