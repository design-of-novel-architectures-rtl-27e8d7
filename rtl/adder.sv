// adder: digit-pipelined adder, sum = n0 + n1 with a carry out.
//
// The W-bit operands are added DIGIT bits per clock, least significant digit
// first. Stage k adds digit k-1 of both operands and the carry from stage
// k-1, keeps the digits already summed, and passes the operands on shifted
// right by DIGIT so that the next digit is always in the low bits. After
// W/DIGIT clocks the full (W+1)-bit sum is out; one new sum enters and
// leaves every clock. There is no reset: the registers hold data only.
//
// The 4-bit digits and the per-stage operand shift (16384 becomes 1024, 64,
// 4 in successive stages of the paper's simulation) follow the paper. The
// paper's variant with 16-bit coordinates uses 32-bit operands; here W is
// 16, the width of the 8 x 8 multiplier's product.
module adder #(
  parameter int unsigned W     = 16,
  parameter int unsigned DIGIT = 4
) (
  input  logic         clk,
  input  logic [W-1:0] n0,
  input  logic [W-1:0] n1,
  output logic [W:0]   sum
);

  localparam int unsigned N = W / DIGIT;     // stages, one per digit

  // Stage k (1..N) registers; index 0 is the stage input.
  logic [W-1:0] n0_reg [N+1];
  logic [W-1:0] n1_reg [N+1];
  logic [W-1:0] s_reg  [N+1];   // digits summed so far, in place
  logic         c_reg  [N+1];   // carry into the next digit

  assign n0_reg[0] = n0;
  assign n1_reg[0] = n1;
  assign s_reg[0]  = '0;
  assign c_reg[0]  = 1'b0;

  for (genvar k = 1; k <= N; k++) begin : g_stage
    logic [DIGIT:0] d;
    assign d = {1'b0, n0_reg[k-1][DIGIT-1:0]} + {1'b0, n1_reg[k-1][DIGIT-1:0]}
             + (DIGIT + 1)'(c_reg[k-1]);
    always_ff @(posedge clk) begin
      n0_reg[k] <= n0_reg[k-1] >> DIGIT;
      n1_reg[k] <= n1_reg[k-1] >> DIGIT;
      s_reg[k]  <= s_reg[k-1] | (W'(d[DIGIT-1:0]) << (DIGIT * (k - 1)));
      c_reg[k]  <= d[DIGIT];
    end
  end

  assign sum = {c_reg[N], s_reg[N]};

endmodule : adder
