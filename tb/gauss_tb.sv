// gauss_tb: end-to-end test of the 2D Gaussian surround generator at its
// default size (256 x 256 grid, scales 16, 64 and 128).
//
// Runs three complete scans: one started by a one-clock start pulse, then
// two back to back with start held high. For every valid output point the
// testbench works out the grid coordinate from its own count, x = col - 128
// and y = row - 128, and the expected value of each scale c with real
// arithmetic: k = floor((x^2 + y^2) / c^2), g = floor(128 * exp(-k)) for
// k <= 4, else 0.
//
// It also checks the timing: the first valid point 13 clocks after the clock
// that samples start, exactly 65536 valid points per scan, no gap between
// back-to-back scans, and gvalid low when idle. Mechanisms counted, each of
// which must occur at least once: row steps of the address counters,
// back-to-back scans, every table entry 0..4 used, and the zero output for
// scaled radii beyond the table.
module gauss_tb;
  import gauss_pkg::*;

  localparam int unsigned POINTS = GRID * GRID;

  logic clk = 1'b0, reset_n = 1'b0, start = 1'b0;
  logic [G_W-1:0] g1, g2, g3;
  logic gvalid;
  int checks = 0, failures = 0;

  // Mechanism counters.
  int n_row_steps = 0, n_back_to_back = 0, n_beyond_table = 0;
  int n_entry [0:EXP_MAX];

  gauss dut (.clk, .reset_n, .start, .g1, .g2, .g3, .gvalid);

  always #5 clk = ~clk;

  function automatic int ref_g(input int r2, input int c);
    int k;
    k = r2 / (c * c);
    return (k <= EXP_MAX) ? int'($floor(128.0 * $exp(-1.0 * k))) : 0;
  endfunction

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  task automatic check_point(input int idx);
    int x, y, r2;
    int e1, e2, e3;
    x  = (idx % GRID) - GRID / 2;
    y  = ((idx / GRID) % GRID) - GRID / 2;
    r2 = x * x + y * y;
    e1 = ref_g(r2, 16);
    e2 = ref_g(r2, 64);
    e3 = ref_g(r2, 128);
    checks++;
    if (int'(g1) != e1 || int'(g2) != e2 || int'(g3) != e3)
      fail($sformatf("point x=%0d y=%0d: g=%0d,%0d,%0d expected %0d,%0d,%0d",
                     x, y, g1, g2, g3, e1, e2, e3));
    if (idx % GRID == 0 && idx > 0) n_row_steps++;
    if (r2 / 256 <= EXP_MAX) n_entry[r2 / 256]++;
    if (r2 / 256 > EXP_MAX) n_beyond_table++;
  endtask

  // Counts clocks until gvalid, then checks n consecutive valid points.
  task automatic run_scans(input int nscans, input int first_latency);
    int wait_clocks = 0;
    while (!gvalid) begin
      @(posedge clk); #1;
      wait_clocks++;
      if (wait_clocks > 100) break;
    end
    checks++;
    if (wait_clocks != first_latency)
      fail($sformatf("first output after %0d clocks, expected %0d", wait_clocks, first_latency));
    for (int i = 0; i < nscans * POINTS; i++) begin
      checks++;
      if (!gvalid) fail($sformatf("gvalid low at point %0d", i));
      check_point(i);
      if (i > 0 && i % POINTS == 0) n_back_to_back++;
      @(posedge clk); #1;
    end
    checks++;
    if (gvalid) fail("gvalid high after the last point");
  endtask

  initial begin
    for (int k = 0; k <= EXP_MAX; k++) n_entry[k] = 0;
    repeat (3) @(posedge clk);
    #1 reset_n = 1'b1;
    repeat (20) @(posedge clk);
    #1 checks++;
    if (gvalid) fail("gvalid high while idle");

    // Scan 1: one-clock start pulse. The edge that samples start is the
    // first counted clock.
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    run_scans(1, LATENCY);

    repeat (30) @(posedge clk);
    #1 checks++;
    if (gvalid) fail("gvalid high while idle after a scan");

    // Scans 2 and 3: start stays high across the end of scan 2, so scan 3
    // follows at once; it is low again by the end of scan 3.
    start = 1'b1;
    fork
      begin
        repeat (POINTS + 10) @(posedge clk);
        #1 start = 1'b0;
      end
      begin
        @(posedge clk); #1;
        run_scans(2, LATENCY);
      end
    join

    // Every mechanism must have occurred.
    checks++;
    if (n_row_steps == 0) fail("no row step");
    checks++;
    if (n_back_to_back == 0) fail("no back-to-back scan");
    checks++;
    if (n_beyond_table == 0) fail("no scaled radius beyond the table");
    for (int k = 0; k <= EXP_MAX; k++) begin
      checks++;
      if (n_entry[k] == 0) fail($sformatf("table entry %0d never used", k));
    end
    $display("mechanisms: row_steps=%0d back_to_back=%0d beyond_table=%0d entries=%0d,%0d,%0d,%0d,%0d",
             n_row_steps, n_back_to_back, n_beyond_table,
             n_entry[0], n_entry[1], n_entry[2], n_entry[3], n_entry[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : gauss_tb
