// scale_down_tb: exhaustive test of the three scale-down units.
//
// Applies every 17-bit squared radius to units with scales 16, 64 and 128
// and compares each output with the integer quotient by 256, 4096 and
// 16384. Includes the paper's printed cases: 32768 -> 128, 8, 2 and
// 32258 -> 126, 7, 1.
module scale_down_tb;
  import gauss_pkg::*;

  logic [SUM_W-1:0] n1 = '0;
  logic [SD_W-1:0] sd1, sd2, sd3;
  int checks = 0, failures = 0;

  scale_down #(.SCALE(16))  u16  (.n1, .n2(sd1));
  scale_down #(.SCALE(64))  u64  (.n1, .n2(sd2));
  scale_down #(.SCALE(128)) u128 (.n1, .n2(sd3));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < (1 << SUM_W); v++) begin
      n1 = SUM_W'(v);
      #1;
      check(int'(sd1), v / (16 * 16), "scale 16");
      check(int'(sd2), v / (64 * 64), "scale 64");
      check(int'(sd3), v / (128 * 128), "scale 128");
    end
    n1 = 17'd32768; #1;
    check(int'(sd1), 128, "32768/16^2");
    check(int'(sd2), 8, "32768/64^2");
    check(int'(sd3), 2, "32768/128^2");
    n1 = 17'd32258; #1;
    check(int'(sd1), 126, "32258/16^2");
    check(int'(sd2), 7, "32258/64^2");
    check(int'(sd3), 1, "32258/128^2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : scale_down_tb
