// mult8u8u: pipelined W x W multiplier (W = 8), used as the squarer of the
// Gaussian generator.
//
// Signed operands are split into sign and magnitude, and the magnitudes are
// multiplied as unsigned numbers. Structure, one register bank per clock:
//   Clk(1)      partial products P1..P8, Pi = n1_mag if bit i-1 of n2_mag is
//               set, else 0; the product sign is registered alongside.
//   Clk(2..3)   first level: S1j = P(2j-1) + (P(2j) << 1), j = 1..4
//   Clk(4..5)   second level: S2j = S1(2j-1) + (S1(2j) << 2), j = 1..2
//   Clk(6..7)   third level: S31 = S21 + (S22 << 4)
//   Clk(8)      sign: result = sign ? -S31 : S31
// Each adder level is a split_add, low half on the first clock, high half
// on the second. result is the signed 2W-bit product, MULT latency
// 2*log2(W)+2 = 8 clocks after n1 and n2, one new product per clock.
//
// The sign/magnitude split, the eight partial products, the adder tree with
// its 1-, 2- and 4-bit shifts, the LSB/MSB clock pairs and the final sign
// clock follow the paper. The paper's text speaks of five pipeline levels
// while its detailed figure numbers eight clocks; this design has the eight.
// There is no reset, as the paper's multiplier has only a clock input.
module mult8u8u #(
  parameter int unsigned W = 8
) (
  input  logic                  clk,
  input  logic signed [W-1:0]   n1,
  input  logic signed [W-1:0]   n2,
  output logic signed [2*W-1:0] result
);

  localparam int unsigned L  = $clog2(W);   // adder levels (3)
  localparam int unsigned PW = 2 * W;       // width of every tree node

  // Magnitudes: -2^(W-1) maps to 2^(W-1), which still fits W unsigned bits.
  logic [W-1:0] n1_mag, n2_mag;
  assign n1_mag = n1[W-1] ? W'(-n1) : W'(n1);
  assign n2_mag = n2[W-1] ? W'(-n2) : W'(n2);

  // node[l][j]: j-th sum of level l; level 0 holds the partial products.
  logic [PW-1:0] node [L+1][W];
  logic          sign_q [2*L+1];

  // Clk(1): partial products and sign.
  always_ff @(posedge clk) begin
    for (int i = 0; i < W; i++) begin
      node[0][i] <= n2_mag[i] ? PW'(n1_mag) : '0;
    end
    sign_q[0] <= n1[W-1] ^ n2[W-1];
  end

  // Clk(2)..Clk(2L+1): adder tree, shift 2^l at level l.
  for (genvar l = 0; l < L; l++) begin : g_level
    for (genvar j = 0; j < (W >> (l + 1)); j++) begin : g_add
      split_add #(.W(PW), .LO(PW / 2)) u_add (
        .clk (clk),
        .a   (node[l][2*j]),
        .b   (node[l][2*j+1] << (1 << l)),
        .sum (node[l+1][j])
      );
    end
    for (genvar j = (W >> (l + 1)); j < W; j++) begin : g_unused
      assign node[l+1][j] = '0;
    end
  end

  // The sign travels with the tree.
  always_ff @(posedge clk) begin
    for (int k = 1; k <= 2 * L; k++) sign_q[k] <= sign_q[k-1];
  end

  // Clk(2L+2): apply the sign.
  always_ff @(posedge clk) begin
    result <= sign_q[2*L] ? -$signed(node[L][0]) : $signed(node[L][0]);
  end

endmodule : mult8u8u
