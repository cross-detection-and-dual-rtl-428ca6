// coarse_counter: free-running binary counter that extends the range of the
// TDC beyond one clock period. The published channel uses a 12-bit counter,
// giving 4096 x 1.818 ns = 7.4 us of range at 550 MHz. Clocking it with the
// capture clock, so that it lives in the same domain as the captured codes, is
// this design's choice.
//
// Interface: clk, synchronous active-high rst, count. Timing: count advances by
// one each rising clock edge and wraps to 0 after 2**COARSE_W-1.
`timescale 1ps/1ps
module coarse_counter #(
  parameter int unsigned COARSE_W = 12
) (
  input  logic                clk,
  input  logic                rst,
  output logic [COARSE_W-1:0] count
);

  always_ff @(posedge clk) begin
    if (rst) count <= '0;
    else     count <= count + 1'b1;
  end

endmodule
