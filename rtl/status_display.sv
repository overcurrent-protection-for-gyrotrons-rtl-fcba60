// status_display: front-panel indicators of the fast protection board.
//
// `led_trip[ch]` lights when channel ch trips and stays lit (trip memory)
// until `clear` (a trip still present sets it again a clock later). `led_wdt` shows a watchdog expiry, `led_st_fail` lights
// when the last self-test found a tested channel that did not respond, and
// `led_run` blinks with a period of 2 x BLINK clocks (1 Hz at 40 MHz) while
// the FPGA is running. The system description shows a status display fed by the signal
// processing but not what it shows; the indicator set is this design's.
`timescale 1ns/1ps
module status_display #(
  parameter int unsigned N_CH  = 4,
  parameter int unsigned BLINK = 20_000_000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_CH-1:0] trip,
  input  logic            clear,
  input  logic            wdt_expired,
  input  logic            st_done,
  input  logic [N_CH-1:0] st_pass,
  input  logic [N_CH-1:0] st_mask,
  output logic [N_CH-1:0] led_trip,
  output logic            led_wdt,
  output logic            led_st_fail,
  output logic            led_run,
  output logic [N_CH-1:0] trip_mem
);
  localparam int unsigned BW = $clog2(BLINK + 1);
  logic [BW-1:0] bcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trip_mem <= '0; bcnt <= '0; led_run <= 1'b0;
    end else begin
      trip_mem <= clear ? '0 : (trip_mem | trip);
      if (bcnt == BW'(BLINK - 1)) begin bcnt <= '0; led_run <= ~led_run; end
      else bcnt <= bcnt + 1'b1;
    end
  end

  assign led_trip    = trip_mem;
  assign led_wdt     = wdt_expired;
  assign led_st_fail = st_done && ((st_mask & ~st_pass) != '0);
endmodule
