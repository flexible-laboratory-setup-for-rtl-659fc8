// tb_dwa_encoder: checks data weighted averaging selection.
//
// For random levels the selection must switch on exactly `count` elements,
// namely the ones that follow the previous selection cyclically; the
// pointer must move on by count modulo M; and the per-element use counts
// must never differ by more than one, which is what makes the mismatch
// average out. Tested for M = 4 and M = 5.
module tb_dwa_encoder;
  logic clk = 0, rst = 1, en = 0;
  logic [2:0] count4 = 0, count5 = 0;
  logic [3:0] sel4;
  logic [4:0] sel5;
  logic [1:0] ptr4;
  logic [2:0] ptr5;
  int checks = 0, failures = 0;

  dwa_encoder #(.M(4)) dut4 (.clk, .rst, .en, .count(count4), .sel(sel4), .ptr(ptr4));
  dwa_encoder #(.M(5)) dut5 (.clk, .rst, .en, .count(count5), .sel(sel5), .ptr(ptr5));

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
    int p4, p5, wraps;
    int use4 [4];
    int use5 [5];
    logic [3:0] e4;
    logic [4:0] e5;
    int mx, mn;
    p4 = 0; p5 = 0; wraps = 0;
    foreach (use4[i]) use4[i] = 0;
    foreach (use5[i]) use5[i] = 0;
    @(negedge clk); @(negedge clk); rst = 0;
    for (int t = 0; t < 2000; t++) begin
      count4 = 3'($urandom_range(0, 4));
      count5 = 3'($urandom_range(0, 5));
      #1;
      e4 = '0; for (int j = 0; j < int'(count4); j++) e4[(p4 + j) % 4] = 1'b1;
      e5 = '0; for (int j = 0; j < int'(count5); j++) e5[(p5 + j) % 5] = 1'b1;
      check(sel4 == e4, $sformatf("M=4 sel %b exp %b", sel4, e4));
      check(sel5 == e5, $sformatf("M=5 sel %b exp %b", sel5, e5));
      check(int'(ptr4) == p4 && int'(ptr5) == p5, "pointer");
      for (int i = 0; i < 4; i++) use4[i] += int'(e4[i]);
      for (int i = 0; i < 5; i++) use5[i] += int'(e5[i]);
      if (p4 + int'(count4) >= 4) wraps++;
      p4 = (p4 + int'(count4)) % 4;
      p5 = (p5 + int'(count5)) % 5;
      en = 1; @(negedge clk); en = 0;
      mx = 0; mn = 1 << 30;
      foreach (use4[i]) begin if (use4[i] > mx) mx = use4[i]; if (use4[i] < mn) mn = use4[i]; end
      check(mx - mn <= 1, "M=4 element use balanced");
      mx = 0; mn = 1 << 30;
      foreach (use5[i]) begin if (use5[i] > mx) mx = use5[i]; if (use5[i] < mn) mn = use5[i]; end
      check(mx - mn <= 1, "M=5 element use balanced");
    end
    // pointer holds without en
    count4 = 3; repeat (3) @(negedge clk);
    check(int'(ptr4) == p4, "pointer holds without en");
    check(wraps > 100, "pointer wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
