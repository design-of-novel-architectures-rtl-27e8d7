// counter_tb: self-checking test of the enabled up counter.
//
// Drives enable with a random pattern for 1000 clocks (enough for several
// wraps of the 8-bit count), keeps its own count in an int and compares it,
// modulo 256, after every clock. Also checks the asynchronous reset in the
// middle of a clock period.
module counter_tb;
  localparam int unsigned WIDTH = 8;

  logic clk = 1'b0, reset_n = 1'b0, enable = 1'b0;
  logic [WIDTH-1:0] cnt_out;
  int checks = 0, failures = 0;
  int model = 0;

  counter #(.WIDTH(WIDTH)) dut (.clk, .reset_n, .enable, .cnt_out);

  always #5 clk = ~clk;

  task automatic check(input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (cnt_out !== exp) begin
      failures++;
      $display("FAIL %s: cnt_out=%0d expected %0d", what, cnt_out, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 check('0, "reset");
    reset_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      enable = (i < 600) ? 1'b1 : 1'($urandom_range(0, 1));
      @(posedge clk);
      if (enable) model = (model + 1) % (1 << WIDTH);
      #1 check(WIDTH'(model), "count");
    end
    // Asynchronous reset between edges.
    #2 reset_n = 1'b0;
    #1 check('0, "async reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : counter_tb
