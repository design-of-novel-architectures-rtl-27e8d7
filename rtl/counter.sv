// counter: WIDTH-bit binary up counter with count enable.
//
// On every rising clk edge with enable high the count goes up by one and
// wraps from 2^WIDTH-1 to 0; with enable low it holds. reset_n is an
// asynchronous active-low reset to 0. The output is the register itself, so
// a new count is visible one clock after the enabled edge.
//
// The 8-bit width and the ports (reset_n, enable, clk, cnt_out) follow the
// paper's counter block; the asynchronous reset and the wrap-around are
// choices of this design.
module counter #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             reset_n,
  input  logic             enable,
  output logic [WIDTH-1:0] cnt_out
);

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n)    cnt_out <= '0;
    else if (enable) cnt_out <= cnt_out + 1'b1;
  end

endmodule : counter
