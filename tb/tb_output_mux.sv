// tb_output_mux: checks the re-serialisation of the path outputs.
//
// Random frames are presented; over one frame of M tick_h pulses, with the
// phase counting 0..M-1, y_n must give frame bits 0, 1, .., M-1 in order,
// each one clock after its tick_h, and hold between ticks. y_sel must always
// equal the bit the phase points at.
module tb_output_mux;
  localparam int M = 4;
  logic clk = 0, rst = 1, en = 0;
  logic [1:0] phase = 0;
  logic [M-1:0] y_frame = 0;
  logic y_sel, y_n;
  int checks = 0, failures = 0;

  output_mux #(.M(M)) dut (.clk, .rst, .en, .phase, .y_frame, .y_sel, .y_n);

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
    logic [M-1:0] fr;
    @(negedge clk); @(negedge clk); rst = 0;
    check(y_n == 0, "reset value");
    for (int f = 0; f < 300; f++) begin
      fr = M'($urandom);
      y_frame = fr;
      for (int k = 0; k < M; k++) begin
        phase = 2'(k);
        #1;
        check(y_sel == fr[k], "combinational select");
        en = 1; @(negedge clk); en = 0;
        check(y_n == fr[k], $sformatf("frame %0d bit %0d", f, k));
        repeat ($urandom_range(0, 2)) begin
          phase = 2'($urandom);
          @(negedge clk);
          check(y_n == fr[k], "holds between ticks");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
