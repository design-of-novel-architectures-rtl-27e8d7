// gauss_paper_values_tb: replays the values printed in the reference
// simulation of the 2D Gaussian surround generator.
//
// The reference simulation shows, for a few grid points near the corner
// (x, y) = (-128, -128), the squares, the squared radius, the three scaled
// radii and the three outputs:
//   x^2 + y^2 = 32768 -> scaled 128, 8, 2 -> g = 0, 0, 17
//   x^2 + y^2 = 32258 -> scaled 126, 7, 1 -> g = 0, 0, 47
//   x^2 + y^2 = 32005 -> scaled 125
// and squares 16384, 16129, 15876, 15625, 15376, 15129, 14884, 14641,
// 14400, 14161 for coordinates -128 ... -119.
// This testbench runs one scan of the default design and checks those
// values on the internal nets of the generator for every point whose
// squared radius is one of the three above, and the squares of the first
// ten columns. The centre point (0, 0) must give 128 on all three scales.
module gauss_paper_values_tb;
  import gauss_pkg::*;

  logic clk = 1'b0, reset_n = 1'b0, start = 1'b0;
  logic [G_W-1:0] g1, g2, g3;
  logic gvalid;
  int checks = 0, failures = 0;
  int seen_32768 = 0, seen_32258 = 0, seen_32005 = 0, seen_centre = 0;

  gauss dut (.clk, .reset_n, .start, .g1, .g2, .g3, .gvalid);

  always #5 clk = ~clk;

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Squares printed for coordinates -128 ... -119.
  localparam int SQ [10] = '{16384, 16129, 15876, 15625, 15376, 15129, 14884, 14641, 14400, 14161};

  initial begin
    repeat (3) @(posedge clk);
    #1 reset_n = 1'b1;
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;

    fork
      begin
        // Squares at the multiplier output: column c of row 0 comes out of U3
        // 1 + 8 clocks after the counter shows it.
        wait (dut.enable);
        repeat (ROM_LATENCY + MULT_LATENCY) @(posedge clk);
        #1;
        for (int c = 0; c < 10; c++) begin
          expect_eq(int'(dut.result1), SQ[c], $sformatf("x^2 at x=%0d", c - 128));
          expect_eq(int'(dut.result2), SQ[0], "y^2 at y=-128");
          @(posedge clk); #1;
        end
      end
      begin
        while (!gvalid) begin @(posedge clk); #1; end
        while (gvalid) begin
          case (int'(dut.out1))
            32768: begin
              seen_32768++;
              expect_eq(int'(dut.sd1), 128, "sd1 of 32768");
              expect_eq(int'(dut.sd2), 8,   "sd2 of 32768");
              expect_eq(int'(dut.sd3), 2,   "sd3 of 32768");
              expect_eq(int'(g1), 0,  "g1 of 32768");
              expect_eq(int'(g2), 0,  "g2 of 32768");
              expect_eq(int'(g3), 17, "g3 of 32768");
            end
            32258: begin
              seen_32258++;
              expect_eq(int'(dut.sd1), 126, "sd1 of 32258");
              expect_eq(int'(dut.sd2), 7,   "sd2 of 32258");
              expect_eq(int'(dut.sd3), 1,   "sd3 of 32258");
              expect_eq(int'(g1), 0,  "g1 of 32258");
              expect_eq(int'(g2), 0,  "g2 of 32258");
              expect_eq(int'(g3), 47, "g3 of 32258");
            end
            32005: begin
              seen_32005++;
              expect_eq(int'(dut.sd1), 125, "sd1 of 32005");
            end
            0: begin
              seen_centre++;
              expect_eq(int'(g1), 128, "g1 at centre");
              expect_eq(int'(g2), 128, "g2 at centre");
              expect_eq(int'(g3), 128, "g3 at centre");
            end
            default: ;
          endcase
          @(posedge clk); #1;
        end
      end
    join

    expect_eq(seen_32768, 1, "points with x^2+y^2 = 32768");
    // Both sums have several decompositions into two squares, among them
    // 127^2 + 127^2 and 126^2 + 127^2; each must occur.
    expect_eq(int'(seen_32258 > 0), 1, "points with x^2+y^2 = 32258");
    expect_eq(int'(seen_32005 > 0), 1, "points with x^2+y^2 = 32005");
    expect_eq(seen_centre, 1, "centre points");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : gauss_paper_values_tb
