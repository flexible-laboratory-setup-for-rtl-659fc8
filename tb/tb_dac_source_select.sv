// tb_dac_source_select: checks the three ways of driving the DAC pins.
//
// A model of the pin registers in the testbench follows the rules:
// path mode loads pin k with path k's bit at the tick of phase k only;
// high-speed mode loads every pin with the multiplexer bit on every tick;
// DWA mode loads the DWA selection at the tick of phase 0 only. Random
// inputs, phases and ticks; the mode changes every few frames.
module tb_dac_source_select;
  import dac_pkg::*;
  localparam int M = 4;
  logic clk = 0, rst = 1, en = 0;
  logic [1:0] phase = 0;
  dac_src_e src = SRC_TI_PATHS;
  logic [M-1:0] y_frame = 0, dwa_sel = 0, dac;
  logic y_sel = 0;
  int checks = 0, failures = 0;

  dac_source_select #(.M(M)) dut (.clk, .rst, .en, .phase, .src, .y_frame, .y_sel, .dwa_sel, .dac);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    logic [M-1:0] model;
    int seen [3];
    seen = '{0, 0, 0};
    model = '0;
    @(negedge clk); @(negedge clk); rst = 0;
    check(dac == '0, "reset value");
    for (int t = 0; t < 3000; t++) begin
      if (t % 40 == 0) src = dac_src_e'(2'((t / 40) % 3));
      phase   = 2'($urandom);
      y_frame = M'($urandom);
      dwa_sel = M'($urandom);
      y_sel   = 1'($urandom);
      en      = ($urandom_range(0, 3) != 0);
      if (en) begin
        case (src)
          SRC_TI_PATHS:   model[phase] = y_frame[phase];
          SRC_HIGH_SPEED: model = {M{y_sel}};
          SRC_DWA:        if (phase == 0) model = dwa_sel;
          default: ;
        endcase
        seen[int'(src)]++;
      end
      @(negedge clk);
      check(dac == model, $sformatf("t=%0d src=%s dac %b exp %b", t, src.name(), dac, model));
    end
    check(seen[0] > 0 && seen[1] > 0 && seen[2] > 0, "all modes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
