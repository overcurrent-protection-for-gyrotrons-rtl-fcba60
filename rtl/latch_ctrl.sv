// latch_ctrl: latch control of one fast-protection comparator channel.
//
// The comparator output reaches the trip output through a purely
// combinational OR, so no clock edge adds to the response time of the fast
// protection. The comparator output is also synchronised (two flip-flops);
// when it is seen high and the programmed latch time is not zero, the
// channel enters the latched state: `cmp_le` holds the comparator latch
// enable asserted, which keeps the comparator output high, and an internal
// hold register keeps `trip` high as well. The latched state lasts
// latch_time x LT_UNIT clocks (latch_time is in microseconds at the default
// 40 MHz clock). latch_time = LATCH_FOREVER holds until `clear`; latch_time
// = 0 disables latching so `trip` simply follows the comparator. `clear`
// always ends a latched state. When a latched state ends, by time-out or
// by `clear`, the comparator input is ignored for REARM clocks (400 ns at
// 40 MHz): the released latch enable needs about 160 ns to travel through
// the optocouplers to the comparator and back, and without the pause the
// comparator's own latched output would start a new latch period at once. If the comparator is still high after the pause, a
// new latch period starts.
//
// Latching the comparator for a controllable time follows the system
// description; the combinational trip path, the internal hold register and
// the time unit are this design's choices.
`timescale 1ns/1ps
module latch_ctrl
  import ocp_pkg::*;
#(
  parameter int unsigned LT_UNIT_CYC = ocp_pkg::LT_UNIT,
  parameter int unsigned REARM       = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmp_in,
  input  logic [LT_W-1:0] latch_time,
  input  logic            clear,
  output logic            cmp_le,
  output logic            trip,
  output logic            cmp_sync
);
  localparam int unsigned TW = LT_W + $clog2(LT_UNIT_CYC + 1);

  logic          hold;
  logic [TW-1:0] remain;   // clocks left in the latched state
  logic          forever_mode;
  logic [$clog2(REARM+1)-1:0] blank;   // clocks left before re-arming

  sync2 u_sync (.clk, .rst_n, .d(cmp_in), .q(cmp_sync));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= 1'b0; remain <= '0; forever_mode <= 1'b0; blank <= '0;
    end else if (clear) begin
      hold <= 1'b0; remain <= '0; forever_mode <= 1'b0;
      blank <= hold ? REARM[$bits(blank)-1:0] : '0;
    end else if (!hold) begin
      if (blank != '0) blank <= blank - 1'b1;
      else if (cmp_sync && latch_time != '0) begin
        hold         <= 1'b1;
        forever_mode <= (latch_time == LATCH_FOREVER);
        remain       <= TW'(latch_time) * TW'(LT_UNIT_CYC) - 1'b1;
      end
    end else if (!forever_mode) begin
      if (remain == '0) begin hold <= 1'b0; blank <= REARM[$bits(blank)-1:0]; end
      else              remain <= remain - 1'b1;
    end
  end

  assign cmp_le = hold;
  assign trip   = cmp_in | hold;

  // While the comparator is latched the channel must be tripping.
  a_latched_trips: assert property (@(posedge clk) disable iff (!rst_n) cmp_le |-> trip);
endmodule
