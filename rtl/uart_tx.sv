// uart_tx: asynchronous serial transmitter, 8 data bits, no parity, one stop bit.
//
// `start` with `data` loads a frame when the transmitter is idle (`busy` low);
// the start bit, eight data bits LSB first and the stop bit each last
// CLKS_PER_BIT clocks. The line idles high. Link format is this design's
// choice for the host link of the protection board.
`timescale 1ns/1ps
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 347
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       start,
  output logic       busy,
  output logic       txd
);
  logic [9:0] sh;
  logic [3:0] nbits;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);
  localparam logic [CW-1:0] LAST = CW'(CLKS_PER_BIT - 1);
  logic [CW-1:0] cnt;

  assign busy = (nbits != 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '1; nbits <= '0; cnt <= '0; txd <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (start) begin
        sh    <= {1'b1, data, 1'b0};
        nbits <= 4'd10;
        cnt   <= '0;
      end
    end else begin
      txd <= sh[0];
      if (cnt == LAST) begin
        cnt   <= '0;
        sh    <= {1'b1, sh[9:1]};
        nbits <= nbits - 1'b1;
      end else cnt <= cnt + 1'b1;
    end
  end
endmodule
