// tb_ti_sdm: checks the interleaved modulator against a single-rate loop.
//
// A reference first-order modulator in the testbench runs one sample at a
// time: y = (u >= 0), u += x - (y ? FS : -FS). The device receives the same
// samples M at a time and must give y_k(m) = y(mM + k) and the same
// integrator value at every frame boundary. Inputs are random, a constant
// and a slow ramp; the mean output is checked against a constant input, and
// the outputs must not change without en. M = 4 and M = 3 are both tested.
module tb_ti_sdm;
  localparam int W  = 16;
  localparam longint FS = longint'(1) << (W - 1);
  logic clk = 0, rst = 1, en = 0;
  logic signed [W-1:0] xf4 [4];
  logic signed [W-1:0] xf3 [3];
  logic [3:0] y4;
  logic [2:0] y3;
  logic signed [W+1:0] u4, u3;
  int checks = 0, failures = 0;

  ti_sdm #(.W(W), .M(4)) dut4 (.clk, .rst, .en, .x_frame(xf4), .y_frame(y4), .integrator(u4));
  ti_sdm #(.W(W), .M(3)) dut3 (.clk, .rst, .en, .x_frame(xf3), .y_frame(y3), .integrator(u3));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint ref_u4, ref_u3;
  bit     ref_y;

  function automatic bit ref_step(ref longint u, input int x);
    bit y;
    y = (u >= 0);
    u = u + longint'(x) - (y ? FS : -FS);
    return y;
  endfunction

  // mode 0 random, 1 constant, 2 ramp
  function automatic int gen(input int mode, input int n);
    case (mode)
      0: return int'($urandom_range(0, 2 * 29000)) - 29000;
      1: return int'(FS / 4);
      default: return ((n * 37) % (2 * 30000)) - 30000;
    endcase
  endfunction

  initial begin
    int ones, total, n4, n3;
    logic [3:0] e4;
    logic [2:0] e3;
    for (int k = 0; k < 4; k++) xf4[k] = '0;
    for (int k = 0; k < 3; k++) xf3[k] = '0;
    @(posedge clk); @(posedge clk);
    for (int mode = 0; mode < 3; mode++) begin
      rst = 1; @(negedge clk); rst = 0;
      ref_u4 = 0; ref_u3 = 0; ones = 0; total = 0; n4 = 0; n3 = 0;
      for (int f = 0; f < 600; f++) begin
        for (int k = 0; k < 4; k++) begin
          xf4[k] = 16'(gen(mode, n4)); n4++;
          e4[k] = ref_step(ref_u4, int'(xf4[k]));
          ones += int'(e4[k]); total++;
        end
        for (int k = 0; k < 3; k++) begin
          xf3[k] = 16'(gen(mode, n3)); n3++;
          e3[k] = ref_step(ref_u3, int'(xf3[k]));
        end
        en = 1; @(negedge clk); en = 0;
        check(y4 == e4, $sformatf("M=4 mode %0d frame %0d y %b exp %b", mode, f, y4, e4));
        check(longint'(u4) == ref_u4, "M=4 integrator");
        check(y3 == e3, $sformatf("M=3 mode %0d frame %0d y %b exp %b", mode, f, y3, e3));
        check(longint'(u3) == ref_u3, "M=3 integrator");
        if (f % 50 == 0) begin
          // no change without en
          @(negedge clk);
          check(y4 == e4 && longint'(u4) == ref_u4, "holds without en");
        end
      end
      if (mode == 1) begin
        // x = FS/4 -> mean of (2y-1) = 1/4 -> ones fraction 5/8
        check(ones * 8 >= total * 5 - 8 && ones * 8 <= total * 5 + 8,
              $sformatf("mean output: %0d ones of %0d", ones, total));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
