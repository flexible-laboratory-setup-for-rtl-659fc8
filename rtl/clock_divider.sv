// clock_divider: sample and frame enables for the interleaved DAC.
//
// The whole design runs on the 100 MHz board clock; rates are made with
// one-cycle enables. A counter counts board clocks and raises tick_h every
// div_n clocks, giving the high sample rate f_H = f_ck / N. A second counter,
// phase, counts tick_h pulses modulo M: it is the polyphase index k of the
// high-rate sample n = mM + k that belongs to the current tick_h. tick_l is
// the tick_h of the last sample of a frame (phase = M-1); it occurs at
// f_L = f_H / M.
//
// Dividing the master clock by N follows the text; that the divider is a
// run-time input, that N = 0 acts as N = 1, and the synchronous active-high
// reset are this design's choices.
//
// Timing: tick_h and tick_l are decoded from the counter registers, so they
// are high for exactly one clock (for N = 1, tick_h is always high). The
// first tick_h after reset is in the N-th clock cycle after its release,
// with phase 0. A new div_n takes effect at the next wrap (or
// at once, if the count is already past it).
module clock_divider #(
  parameter int unsigned DIV_W = dac_pkg::DIV_W,
  parameter int unsigned M     = dac_pkg::NUM_PATHS,
  localparam int unsigned PW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [DIV_W-1:0] div_n,   // N: board clocks per high-rate sample
  output logic             tick_h,  // one pulse per high-rate sample
  output logic             tick_l,  // one pulse per frame of M samples
  output logic [PW-1:0]    phase    // polyphase index k of this sample
);

  logic [DIV_W-1:0] cnt;
  logic [DIV_W-1:0] last;

  assign last   = (div_n == '0) ? '0 : div_n - 1'b1;
  assign tick_h = (cnt >= last);
  assign tick_l = tick_h && (phase == PW'(M - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt   <= '0;
      phase <= '0;
    end else begin
      cnt <= tick_h ? '0 : cnt + 1'b1;
      if (tick_h)
        phase <= (phase == PW'(M - 1)) ? '0 : phase + 1'b1;
    end
  end

  // The polyphase index never leaves 0..M-1.
  a_phase_range: assert property (@(posedge clk) disable iff (rst) int'(phase) < int'(M))
    else $error("phase out of range");

endmodule
