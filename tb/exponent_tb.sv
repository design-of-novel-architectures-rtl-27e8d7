// exponent_tb: self-checking test of the exponent table.
//
// For inputs 0..1023 and random 16-bit inputs, the expected value is worked
// out with real arithmetic: floor(128 * exp(-x)) for x <= 4 and 0 above.
// Also checks the paper's printed pairs 1 -> 47 and 2 -> 17.
module exponent_tb;
  import gauss_pkg::*;

  logic [SD_W-1:0] x = '0;
  logic [G_W-1:0] expout;
  int checks = 0, failures = 0;

  exponent dut (.x, .expout);

  function automatic int ref_exp(input int v);
    return (v <= 4) ? int'($floor(128.0 * $exp(-1.0 * v))) : 0;
  endfunction

  task automatic check(input int v, input int exp);
    x = SD_W'(v);
    #1;
    checks++;
    if (int'(expout) != exp) begin
      failures++;
      if (failures < 20) $display("FAIL x=%0d: got %0d expected %0d", v, expout, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 1024; v++) check(v, ref_exp(v));
    for (int i = 0; i < 1000; i++) begin
      int v;
      v = int'($urandom_range(0, 65535));
      check(v, ref_exp(v));
    end
    check(1, 47);
    check(2, 17);
    check(0, 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : exponent_tb
