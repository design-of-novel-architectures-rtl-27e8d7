// gauss: 2D Gaussian surround generator, three scales, one point per clock.
//
// After start, the generator walks a 256 x 256 grid in raster order and for
// each point (x, y), x and y in -128..127, outputs
//   g1 = 128 * exp(-(x^2 + y^2) / 16^2)
//   g2 = 128 * exp(-(x^2 + y^2) / 64^2)
//   g3 = 128 * exp(-(x^2 + y^2) / 128^2)
// with (x^2 + y^2) / c^2 truncated to an integer before the exponent.
//
// Datapath (unit names as in the paper's schematic):
//   U1 gauss_control   column/row counters -> ROM addresses
//   U2 dual_port_rom   one stored row of coordinates -> x (port 1), y (port 2)
//   U3, U4 mult8u8u    x*x and y*y, 8-clock pipelines
//   U5 adder           x^2 + y^2, 4-clock digit pipeline
//   U6..U8 scale_down  divide by 16^2, 64^2, 128^2
//   U9..U11 exponent   table of 128*exp(-k), k = 0..4
//
// Timing: the point at counter values (cnt2, cnt1) appears on g1..g3
// LATENCY = 13 clocks later (1 ROM + 8 multiplier + 4 adder), with gvalid
// high. A full scan is 65536 clocks of gvalid; with start held high, scans
// follow each other without a gap.
//
// The units, their connections and the three scales follow the paper; gvalid
// and its delay line are this design's addition, so that a user can tell the
// 65536 valid points from pipeline fill. The outputs are 8 bits wide, as the
// paper's text gives them; its synthesis schematic shows 16-bit pins for a
// 16-bit-data variant.
module gauss
  import gauss_pkg::*;
(
  input  logic           clk,
  input  logic           reset_n,
  input  logic           start,
  output logic [G_W-1:0] g1,
  output logic [G_W-1:0] g2,
  output logic [G_W-1:0] g3,
  output logic           gvalid
);

  logic        [ADDR_W-1:0] cnt1, cnt2;
  logic                     enable;
  logic signed [DATA_W-1:0] dout1, dout2;
  logic signed [PROD_W-1:0] result1, result2;
  logic        [SUM_W-1:0]  out1;
  logic        [SD_W-1:0]   sd1, sd2, sd3;

  // U1: raster counters.
  gauss_control u1_control (
    .clk     (clk),
    .reset_n (reset_n),
    .start   (start),
    .cnt1    (cnt1),
    .cnt2    (cnt2),
    .enable  (enable)
  );

  // U2: coordinates x (column) and y (row).
  dual_port_rom u2_rom (
    .clk     (clk),
    .reset_n (reset_n),
    .addr1   (cnt1),
    .addr2   (cnt2),
    .dout1   (dout1),
    .dout2   (dout2)
  );

  // U3, U4: squares.
  mult8u8u u3_mult (.clk(clk), .n1(dout1), .n2(dout1), .result(result1));
  mult8u8u u4_mult (.clk(clk), .n1(dout2), .n2(dout2), .result(result2));

  // U5: squared radius. Squares are never negative, so they add unsigned.
  adder #(.W(PROD_W), .DIGIT(ADD_DIGIT)) u5_adder (
    .clk (clk),
    .n0  (PROD_W'(result1)),
    .n1  (PROD_W'(result2)),
    .sum (out1)
  );

  // U6..U8: divide by the square of each scale.
  scale_down #(.SCALE(16))  u6_scale (.n1(out1), .n2(sd1));
  scale_down #(.SCALE(64))  u7_scale (.n1(out1), .n2(sd2));
  scale_down #(.SCALE(128)) u8_scale (.n1(out1), .n2(sd3));

  // U9..U11: exponent tables.
  exponent u9_exp  (.x(sd1), .expout(g1));
  exponent u10_exp (.x(sd2), .expout(g2));
  exponent u11_exp (.x(sd3), .expout(g3));

  // Valid flag, delayed by the datapath latency.
  logic [LATENCY-1:0] valid_q;

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) valid_q <= '0;
    else          valid_q <= {valid_q[LATENCY-2:0], enable};
  end

  assign gvalid = valid_q[LATENCY-1];

endmodule : gauss
