// mult8u8u_tb: self-checking test of the pipelined multiplier.
//
// Feeds one operand pair per clock: all 256 squares (as the generator uses
// it), then 3000 random signed pairs including the extremes. Each expected
// product is computed with the simulator's own signed multiply and queued;
// the result must match exactly 8 clocks after its operands went in, with no
// bubbles between consecutive products. A second instance with W = 16 (the
// wider multiplier the design allows for larger grids) gets random 16-bit
// products and must answer 2*log2(16)+2 = 10 clocks later.
module mult8u8u_tb;
  localparam int unsigned W = 8;
  localparam int unsigned LAT = 8;

  logic clk = 1'b0;
  logic signed [W-1:0] n1 = '0, n2 = '0;
  logic signed [2*W-1:0] result;
  int checks = 0, failures = 0;
  int expq[$];

  mult8u8u #(.W(W)) dut (.clk, .n1, .n2, .result);

  localparam int unsigned LAT16 = 10;
  logic signed [15:0] m1 = '0, m2 = '0;
  logic signed [31:0] result16;
  longint expq16[$];

  mult8u8u #(.W(16)) dut16 (.clk, .n1(m1), .n2(m2), .result(result16));

  always #5 clk = ~clk;

  initial begin
    // Flush the pipeline (registers have no reset).
    repeat (LAT + 2) @(posedge clk);
    for (int i = 0; i < 256 + 3000 + LAT; i++) begin
      int a, b;
      if (i < 256) begin
        a = i - 128; b = a;
      end else if (i < 256 + 8) begin
        a = (i % 2 == 1) ? -128 : 127;
        b = (i % 4 < 2) ? -128 : 127;
      end else begin
        a = int'($urandom_range(0, 255)) - 128;
        b = int'($urandom_range(0, 255)) - 128;
      end
      n1 = W'(a); n2 = W'(b);
      expq.push_back(a * b);
      begin
        int c, d;
        c = (i == 300) ? -32768 : int'($urandom_range(0, 65535)) - 32768;
        d = (i == 300) ? -32768 : int'($urandom_range(0, 65535)) - 32768;
        m1 = 16'(c); m2 = 16'(d);
        expq16.push_back(longint'(c) * longint'(d));
      end
      @(posedge clk); #1;
      // Product of the operands applied LAT clocks ago.
      if (expq.size() >= LAT) begin
        int e;
        e = expq.pop_front();
        checks++;
        if (int'(result) != e) begin
          failures++;
          if (failures < 20) $display("FAIL product: got %0d expected %0d", result, e);
        end
      end
      if (expq16.size() >= LAT16) begin
        longint e16;
        e16 = expq16.pop_front();
        checks++;
        if (longint'(result16) != e16) begin
          failures++;
          if (failures < 20) $display("FAIL 16-bit product: got %0d expected %0d", result16, e16);
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
endmodule : mult8u8u_tb
