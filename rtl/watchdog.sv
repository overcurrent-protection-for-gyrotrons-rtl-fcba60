// watchdog: watchdog timer of the fast protection FPGA.
//
// A counter runs from `kick`; if TIMEOUT clocks pass without a kick,
// `expired` rises and stays high until the next kick. In this design the
// kick is every valid command frame from the control-room host, so an
// expiry means the host link has gone silent (1 s at 40 MHz by default).
// That the FPGA has a watchdog follows the system description; what it
// watches and its time are this design's choices.
`timescale 1ns/1ps
module watchdog #(
  parameter int unsigned TIMEOUT = 40_000_000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic kick,
  output logic expired
);
  localparam int unsigned CW = $clog2(TIMEOUT + 1);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; expired <= 1'b0;
    end else if (kick) begin
      cnt <= '0; expired <= 1'b0;
    end else if (cnt == CW'(TIMEOUT - 1)) begin
      expired <= 1'b1;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end
endmodule
