// adder_tb: self-checking test of the digit-pipelined adder.
//
// One operand pair per clock: carry-chain corner cases (all ones plus one,
// all ones plus all ones, the paper's 16384 + 16384), then random pairs.
// The (W+1)-bit sum must appear exactly W/4 = 4 clocks after its operands.
module adder_tb;
  localparam int unsigned W = 16;
  localparam int unsigned LAT = W / 4;

  logic clk = 1'b0;
  logic [W-1:0] n0 = '0, n1 = '0;
  logic [W:0] sum;
  int checks = 0, failures = 0;
  int expq[$];

  adder #(.W(W), .DIGIT(4)) dut (.clk, .n0, .n1, .sum);

  always #5 clk = ~clk;

  initial begin
    repeat (LAT + 2) @(posedge clk);
    for (int i = 0; i < 4000 + LAT; i++) begin
      int a, b;
      case (i)
        0: begin a = 65535; b = 1; end
        1: begin a = 65535; b = 65535; end
        2: begin a = 16384; b = 16384; end
        3: begin a = 4095; b = 1; end
        4: begin a = 0; b = 0; end
        default: begin
          a = int'($urandom_range(0, 65535));
          b = int'($urandom_range(0, 65535));
        end
      endcase
      n0 = W'(a); n1 = W'(b);
      expq.push_back(a + b);
      @(posedge clk); #1;
      if (expq.size() >= LAT) begin
        int e;
        e = expq.pop_front();
        checks++;
        if (int'(sum) != e) begin
          failures++;
          if (failures < 20) $display("FAIL sum: got %0d expected %0d", sum, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : adder_tb
