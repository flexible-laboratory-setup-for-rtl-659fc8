// dwa_encoder: data weighted averaging selection of unit DAC elements.
//
// A level of `count` (0..M) is played on M equal unit elements. Data
// weighted averaging uses the elements in turn: the level is realised by the
// `count` elements that follow the last one used, wrapping round modulo M,
// and the pointer then moves past them:
//     sel[i] = 1  when (i - ptr) mod M < count
//     ptr   <= (ptr + count) mod M            on en
// Over time every element is used as often as every other (their use
// counts never differ by more than one), which shapes the mismatch error of
// the elements with a first-order high-pass response. This is the method
// the text names; the pointer register and reset to element 0 are this
// design's choices.
//
// Timing: sel is combinational from ptr and count; ptr moves on en.
module dwa_encoder #(
  parameter int unsigned M  = dac_pkg::NUM_PATHS,
  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned CW = $clog2(M + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,      // advance the pointer by count
  input  logic [CW-1:0] count,   // level, 0..M
  output logic [M-1:0]  sel,     // elements to switch on
  output logic [PW-1:0] ptr      // first element of this selection
);

  logic [PW:0] ptr_sum;

  always_comb begin
    for (int i = 0; i < M; i++) begin
      // offset of element i from the pointer, modulo M
      int unsigned off;
      off    = (i >= int'(ptr)) ? (i - int'(ptr)) : (i + M - int'(ptr));
      sel[i] = (off < count);
    end
    ptr_sum = (PW + 1)'(ptr) + (PW + 1)'(count);
  end

  always_ff @(posedge clk) begin
    if (rst)
      ptr <= '0;
    else if (en)
      ptr <= (ptr_sum >= (PW + 1)'(M)) ? PW'(ptr_sum - (PW + 1)'(M)) : PW'(ptr_sum);
  end

  a_count_range: assert property (@(posedge clk) disable iff (rst) count <= CW'(M))
    else $error("DWA level above the number of elements");
  a_level_kept: assert property (@(posedge clk) disable iff (rst) $countones(sel) == int'(count))
    else $error("DWA selection does not realise the level");

endmodule
