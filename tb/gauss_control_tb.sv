// gauss_control_tb: self-checking test of the raster address generator.
//
// 1. A one-clock start pulse: enable must stay high for exactly 256*256
//    clocks and (cnt2, cnt1) must step through the grid in raster order.
// 2. Idle for a while: counters and enable must hold.
// 3. start held high for two scans: the scans must follow without a gap.
module gauss_control_tb;
  import gauss_pkg::*;

  logic clk = 1'b0, reset_n = 1'b0, start = 1'b0;
  logic [ADDR_W-1:0] cnt1, cnt2;
  logic enable;
  int checks = 0, failures = 0;

  gauss_control dut (.clk, .reset_n, .start, .cnt1, .cnt2, .enable);

  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  // Follows enable for n clocks from point first, checking the raster order.
  task automatic scan(input int first, input int n);
    int idx = first;
    for (int i = 0; i < n; i++) begin
      checks++;
      if (!enable) fail($sformatf("enable low at point %0d", i));
      else if (cnt1 != ADDR_W'(idx % GRID) || cnt2 != ADDR_W'((idx / GRID) % GRID))
        fail($sformatf("point %0d: cnt2=%0d cnt1=%0d", i, cnt2, cnt1));
      idx++;
      @(posedge clk); #1;
    end
  endtask

  initial begin
    @(posedge clk); #1;
    checks++;
    if (enable || cnt1 != 0 || cnt2 != 0) fail("reset state");
    reset_n = 1'b1;
    repeat (3) @(posedge clk);
    #1 checks++;
    if (enable) fail("enable without start");

    // 1. Single scan from a one-clock start pulse.
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    scan(0, GRID * GRID);
    checks++;
    if (enable) fail("enable still high after one scan");

    // 2. Idle.
    repeat (50) @(posedge clk);
    #1 checks++;
    if (enable || cnt1 != 0 || cnt2 != 0) fail("idle state");

    // 3. Two back-to-back scans with start held high.
    start = 1'b1;
    @(posedge clk); #1;
    scan(0, 2 * GRID * GRID - 1);
    start = 1'b0;
    scan(2 * GRID * GRID - 1, 1);
    checks++;
    if (enable) fail("enable still high after two scans");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : gauss_control_tb
