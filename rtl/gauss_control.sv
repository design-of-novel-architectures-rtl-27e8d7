// gauss_control: raster-scan address generator of the Gaussian generator.
//
// Two cascaded counters produce the ROM addresses: cnt1 (column, addr1) steps
// every clock while a scan runs, and cnt2 (row, addr2) steps on the clock
// where cnt1 is at its maximum, so (cnt2, cnt1) walks the grid
// (0,0), (0,1), ... (0,255), (1,0), ... (255,255) in raster order.
//
// A scan starts on the first clock where start is high while idle. enable is
// high for exactly GRID*GRID clocks of a scan and marks cnt1/cnt2 as a valid
// coordinate. At the last point the scan ends unless start is still high, in
// which case the next scan follows with no gap (continuous operation).
//
// The two 8-bit counters, their cascade through addr1 reaching its maximum,
// and the start input follow the paper. The run flag, the end-of-scan rule
// and the enable output are choices of this design.
module gauss_control
  import gauss_pkg::*;
#(
  parameter int unsigned AW = ADDR_W
) (
  input  logic          clk,
  input  logic          reset_n,
  input  logic          start,
  output logic [AW-1:0] cnt1,
  output logic [AW-1:0] cnt2,
  output logic          enable
);

  logic cnt1_max, last_point;

  assign cnt1_max   = (cnt1 == {AW{1'b1}});
  assign last_point = cnt1_max && (cnt2 == {AW{1'b1}});

  // Run flag: set by start, cleared after the last grid point.
  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n)                  enable <= 1'b0;
    else if (!enable)              enable <= start;
    else if (last_point && !start) enable <= 1'b0;
  end

  counter #(.WIDTH(AW)) u_cnt1 (
    .clk     (clk),
    .reset_n (reset_n),
    .enable  (enable),
    .cnt_out (cnt1)
  );

  counter #(.WIDTH(AW)) u_cnt2 (
    .clk     (clk),
    .reset_n (reset_n),
    .enable  (enable && cnt1_max),
    .cnt_out (cnt2)
  );

  // The row counter may only move when the column counter wraps.
  a_row_steps_on_wrap : assert property (@(posedge clk)
    (reset_n && $past(reset_n) && cnt2 != $past(cnt2)) |-> ($past(cnt1_max) && $past(enable)));

endmodule : gauss_control
