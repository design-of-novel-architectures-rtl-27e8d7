// gauss_pkg: sizes, latencies and the exponent table shared by the 2D
// Gaussian surround generator.
//
// The generator scans a 256 x 256 grid of coordinates (x, y), each in
// -128..127, and produces G(x, y) = 128 * exp(-(x^2 + y^2) / c^2) for the
// three surround scales c = 16, 64 and 128. The 8-bit coordinate width, the
// 256-point grid and the three scales are the paper's; the latencies follow
// from the pipeline structure of the multiplier and adder. The amplitude 128
// and the exponent table are derived from the printed simulation values of
// the original design (x^2+y^2 = 32768 gives scaled inputs 128, 8, 2; a
// scaled input of 1 gives 47 and of 2 gives 17).
package gauss_pkg;

  // Grid and coordinate format.
  localparam int unsigned ADDR_W = 8;               // ROM address / counter width
  localparam int unsigned DATA_W = 8;               // signed coordinate width
  localparam int unsigned GRID   = 1 << ADDR_W;     // 256 points per row and column

  // Datapath widths.
  localparam int unsigned PROD_W = 2 * DATA_W;      // square of a coordinate (16)
  localparam int unsigned SUM_W  = PROD_W + 1;      // x^2 + y^2 (17)
  localparam int unsigned SD_W   = 16;              // scaled radius, as the U6..U11 pins
  localparam int unsigned G_W    = 8;               // Gaussian output, gout[7:0]

  // Pipeline latencies in clocks.
  localparam int unsigned ROM_LATENCY  = 1;          // registered ROM read
  localparam int unsigned MULT_LATENCY = 2 * $clog2(DATA_W) + 2; // Clk(1)..Clk(8)
  localparam int unsigned ADD_DIGIT    = 4;          // adder digit width
  localparam int unsigned ADD_LATENCY  = PROD_W / ADD_DIGIT;  // one clock per digit (4)
  localparam int unsigned LATENCY      = ROM_LATENCY + MULT_LATENCY + ADD_LATENCY; // 13

  // Exponent table: EXP_LUT[k] = floor(128 * exp(-k)), k = 0..4; the peak
  // value 128 is the amplitude of the surround.
  // The exponent input is only meaningful in 0..4; larger inputs give 0.
  localparam int unsigned EXP_MAX  = 4;
  localparam logic [G_W-1:0] EXP_LUT [0:EXP_MAX] = '{8'd128, 8'd47, 8'd17, 8'd6, 8'd2};

endpackage : gauss_pkg
