// scale_down: divides the squared radius by the square of the surround scale.
//
// n2 = floor(n1 / SCALE^2), so that the exponent stage sees
// (x^2 + y^2) / c^2 with c = SCALE. Combinational. For the paper's scales
// 16, 64 and 128 the divisor is a power of two (256, 4096, 16384) and the
// division is a right shift by 8, 12 or 14; another SCALE synthesises a
// constant divider.
//
// The three scale-down units and the scales are the paper's; the division by
// c^2 and the truncation are read from its printed simulation values
// (32768 gives 128, 8 and 2; 32258 gives 126, 7 and 1). The result saturates
// at the output width, which never happens for the paper's sizes.
module scale_down
  import gauss_pkg::*;
#(
  parameter int unsigned SCALE = 16,
  parameter int unsigned IW    = SUM_W,
  parameter int unsigned OW    = SD_W
) (
  input  logic [IW-1:0] n1,
  output logic [OW-1:0] n2
);

  localparam int unsigned DIV = SCALE * SCALE;
  localparam logic [IW-1:0] OMAX = IW'((64'd1 << OW) - 1);

  logic [IW-1:0] q;

  always_comb begin
    q  = n1 / IW'(DIV);
    n2 = (q > OMAX) ? '1 : OW'(q);
  end

endmodule : scale_down
