// dual_port_rom_tb: self-checking test of the coordinate ROM.
//
// Checks the reset value, then reads every address on port 1 together with a
// random address on port 2 and compares each output, one clock later, with
// the coordinate addr - 128. Also checks the end points of the paper's table:
// 0 -> -128 and 255 -> 127.
module dual_port_rom_tb;
  import gauss_pkg::*;

  logic clk = 1'b0, reset_n = 1'b0;
  logic [ADDR_W-1:0] addr1 = '0, addr2 = '0;
  logic signed [DATA_W-1:0] dout1, dout2;
  int checks = 0, failures = 0;

  dual_port_rom dut (.clk, .reset_n, .addr1, .addr2, .dout1, .dout2);

  always #5 clk = ~clk;

  task automatic check(input logic signed [DATA_W-1:0] got, input int exp, input string what);
    checks++;
    if (int'(got) != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    @(posedge clk); #1;
    check(dout1, 0, "reset dout1");
    check(dout2, 0, "reset dout2");
    reset_n = 1'b1;
    for (int a = 0; a < GRID; a++) begin
      int b;
      b = int'($urandom_range(0, GRID - 1));
      addr1 = ADDR_W'(a);
      addr2 = ADDR_W'(b);
      @(posedge clk); #1;
      check(dout1, a - GRID / 2, $sformatf("port 1 addr %0d", a));
      check(dout2, b - GRID / 2, $sformatf("port 2 addr %0d", b));
    end
    addr1 = 8'd0; addr2 = 8'd255;
    @(posedge clk); #1;
    check(dout1, -128, "table first word");
    check(dout2, 127, "table last word");
    // Read is registered: the output must not follow a new address at once.
    addr1 = 8'd3;
    #1 check(dout1, -128, "registered read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : dual_port_rom_tb
