// split_add: two-clock pipelined adder that adds the low half of its operands
// on the first clock and the high half, with the carry from the low half, on
// the second.
//
// sum = a + b (mod 2^W) appears two clocks after a and b. Splitting the carry
// chain at LO halves the longest path of each clock; this is the "LSB" and
// "MSB" clock pair of every adder level in the paper's multiplier. There is
// no reset: the register contents are data only.
module split_add #(
  parameter int unsigned W  = 16,
  parameter int unsigned LO = 8
) (
  input  logic         clk,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] sum
);

  localparam int unsigned HI = W - LO;

  logic [LO-1:0] lo_q;
  logic          carry_q;
  logic [HI-1:0] a_hi_q, b_hi_q;

  // LSB clock: low half and its carry out; the high halves wait.
  always_ff @(posedge clk) begin
    {carry_q, lo_q} <= {1'b0, a[LO-1:0]} + {1'b0, b[LO-1:0]};
    a_hi_q          <= a[W-1:LO];
    b_hi_q          <= b[W-1:LO];
  end

  // MSB clock: high half with the carry, joined to the delayed low half.
  always_ff @(posedge clk) begin
    sum <= {a_hi_q + b_hi_q + HI'(carry_q), lo_q};
  end

endmodule : split_add
