// exponent: look-up table for the Gaussian surround value.
//
// expout = floor(128 * exp(-x)) for x = 0..4, that is 128, 47, 17, 6, 2,
// and 0 for any larger x. Combinational.
//
// A table in place of an exponent circuit, and the input range 0..4, follow
// the paper. The amplitude 128 and the base e are taken from the paper's
// printed simulation values (x = 1 gives 47, x = 2 gives 17, large x gives
// 0). Giving 0 beyond 4 is this design's choice; floor(128*exp(-5)) is 0 as
// well, and rounding would give 1 there.
module exponent
  import gauss_pkg::*;
#(
  parameter int unsigned IW = SD_W,
  parameter int unsigned OW = G_W
) (
  input  logic [IW-1:0] x,
  output logic [OW-1:0] expout
);

  always_comb begin
    if (x <= IW'(EXP_MAX)) expout = OW'(EXP_LUT[x[$clog2(EXP_MAX+1)-1:0]]);
    else                   expout = '0;
  end

endmodule : exponent
