// uart_tx: 8N1 serial transmitter for the readout records.
//
// A byte is accepted when valid and ready are both high. It is then sent as
// one start bit (0), eight data bits least significant first and one stop bit
// (1), each bit CLKS_PER_BIT clock cycles long; the line idles high. The
// default gives 115200 baud from a 550 MHz clock. The readout path is only
// named in the published design; frame, rate and handshake are this design's.
//
// Timing: ready is high while idle; a byte occupies the line for
// 10*CLKS_PER_BIT cycles, and ready returns the cycle after the stop bit ends.
`timescale 1ps/1ps
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 4774
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       txd
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [8:0]    shreg;     // {stop, data}, shifted out from bit 0
  logic [3:0]    bits_left;
  logic [CW-1:0] clk_cnt;

  assign ready = (bits_left == 4'd0);

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg     <= '1;
      bits_left <= '0;
      clk_cnt   <= '0;
      txd       <= 1'b1;
    end else if (bits_left == 4'd0) begin
      txd <= 1'b1;
      if (valid) begin
        shreg     <= {1'b1, data};
        bits_left <= 4'd10;
        clk_cnt   <= CW'(CLKS_PER_BIT - 1);
        txd       <= 1'b0;
      end
    end else if (clk_cnt != '0) begin
      clk_cnt <= clk_cnt - 1'b1;
    end else begin
      bits_left <= bits_left - 1'b1;
      shreg     <= {1'b1, shreg[8:1]};
      clk_cnt   <= CW'(CLKS_PER_BIT - 1);
      txd       <= shreg[0];
    end
  end

endmodule
