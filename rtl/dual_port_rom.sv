// dual_port_rom: 2^ADDR_W x DATA_W read-only memory with two read ports.
//
// Word a holds the signed coordinate a - 2^(ADDR_W-1): address 0 holds -128,
// address 255 holds 127. This one row of the coordinate array is all that is
// stored: the x array repeats it on every row and the y array repeats it on
// every column, so reading it with the column counter on port 1 and the row
// counter on port 2 gives x and y of every grid point.
//
// Each port registers its read: dout follows addr one clock later. reset_n
// clears both outputs asynchronously.
//
// The contents, the 256 x 8 size and the ports follow the paper; the
// registered read and the reset value are choices of this design.
module dual_port_rom
  import gauss_pkg::*;
#(
  parameter int unsigned AW = ADDR_W,
  parameter int unsigned DW = DATA_W
) (
  input  logic                 clk,
  input  logic                 reset_n,
  input  logic        [AW-1:0] addr1,
  input  logic        [AW-1:0] addr2,
  output logic signed [DW-1:0] dout1,
  output logic signed [DW-1:0] dout2
);

  localparam int unsigned DEPTH = 1 << AW;

  logic signed [DW-1:0] rom [DEPTH];

  // rom[a] = a - DEPTH/2, in DW-bit two's complement.
  for (genvar a = 0; a < DEPTH; a++) begin : g_word
    assign rom[a] = DW'(a - DEPTH / 2);
  end

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      dout1 <= '0;
      dout2 <= '0;
    end else begin
      dout1 <= rom[addr1];
      dout2 <= rom[addr2];
    end
  end

endmodule : dual_port_rom
