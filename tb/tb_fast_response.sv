// tb_fast_response: the input-output and response-time test of the fast
// protection, run on the complete unit with default parameters.
//
// 1. Input-output logic: with the latch time at 0, a rectangular overcurrent
//    pulse on each channel gives a protection pulse (dark fibres) of the same
//    width, shifted by the trip delay on both edges (67 ns rising; the
//    falling edge adds the same comparator, optocoupler and transmitter
//    delays).
// 2. Trip point in amperes: for each channel a threshold is set over the
//    host link and the current is stepped in 1 A (cathode) or 10 mA (anode)
//    steps; the first current that trips must be the first one whose
//    comparator voltage exceeds the threshold, computed here from the
//    transformer sensitivity (cathode 0.1 V/A behind x10, anode 1 V/A) and
//    the DAC scale (5 V / 4096).
`timescale 1ns/1ps
module tb_fast_response;
  import ocp_pkg::*;
  localparam realtime TCLK = 25.0;
  localparam realtime TBIT = TCLK * ocp_pkg::CLKS_PER_BIT;

  logic clk = 1'b0, rst_n = 1'b0, rst_btn_n = 1'b1, pwr_ok = 1'b1, rxd = 1'b1, txd;
  int ct_uv [N_FAST_CH];
  int shunt_uv [N_SLOW_CH];
  int daq_uv [N_SLOW_CH];
  logic [N_DEST-1:0] fast_light, slow_light;
  logic [N_FAST_CH-1:0] led_trip;
  logic [N_SLOW_CH-1:0] slow_active;
  logic led_wdt, led_st_fail, led_run;
  int checks = 0, failures = 0;

  overcurrent_protection dut (
    .clk, .rst_n, .rst_btn_n, .pwr_ok, .ct_uv, .shunt_uv, .uart_rxd(rxd), .uart_txd(txd),
    .fast_light, .slow_light, .daq_uv, .led_trip, .led_wdt, .led_st_fail, .led_run, .slow_active);

  always #(TCLK / 2) clk = ~clk;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic send_byte(input logic [7:0] b);
    rxd = 1'b0; #(TBIT);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; #(TBIT); end
    rxd = 1'b1; #(TBIT);
  endtask
  task automatic send_frame(input op_e op, input logic [3:0] ch, input logic [15:0] d);
    send_byte({op, ch}); send_byte(d[15:8]); send_byte(d[7:0]);
    #(TBIT);
  endtask

  // CT output voltage (uV) for a current in mA, and board voltage after the
  // attenuator.
  function automatic int ct_out_uv(input int c, input longint ma);
    return (c < N_FAST_CH / 2) ? int'(ma * 100) : int'(ma * 1000);   // 0.1 V/A, 1 V/A
  endfunction
  function automatic longint board_uv(input int c, input longint ma);
    return (c < N_FAST_CH / 2) ? ma * 100 / 10 : ma * 1000;
  endfunction

  initial begin
    #200ms;
    failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    realtime t_in_r, t_in_f, t_out_r, t_out_f;
    for (int c = 0; c < N_FAST_CH; c++) ct_uv[c] = 0;
    for (int s = 0; s < N_SLOW_CH; s++) shunt_uv[s] = 0;
    #200 rst_n = 1'b1;
    #50us;

    // 1. Pulse width is preserved, edges delayed by the chain.
    for (int c = 0; c < N_FAST_CH; c++) begin
      fork
        begin
          t_in_r = $realtime; ct_uv[c] = ct_out_uv(c, (c < 2) ? 400_000 : 4_000);
          #100us;
          t_in_f = $realtime; ct_uv[c] = 0;
        end
        begin
          @(negedge fast_light[0]); t_out_r = $realtime;
          @(posedge fast_light[0]); t_out_f = $realtime;
        end
      join
      check("rise delay ns", longint'(t_out_r - t_in_r), 67);
      check("fall delay ns", longint'(t_out_f - t_in_f), 67);
      check("pulse width ns", longint'(t_out_f - t_out_r), 100_000);
      #10us;
    end

    // 2. Trip point in amperes for a threshold set remotely.
    for (int c = 0; c < N_FAST_CH; c++) begin
      int code = (c < 2) ? 1638 + 400 * c : 819 + 300 * c;   // about 2.0 V / 1.0 V and up
      longint thr = (longint'(code) * 5_000_000) >>> 12;
      longint step = (c < 2) ? 1000 : 10;                      // mA
      longint expect_ma = 0, got_ma = -1;
      send_frame(OP_SET_THR, 4'(c), 16'(code));
      while (board_uv(c, expect_ma) <= thr) expect_ma += step;
      for (longint ma = expect_ma - 5 * step; ma <= expect_ma + 5 * step; ma += step) begin
        ct_uv[c] = ct_out_uv(c, ma);
        #200;
        if (fast_light == '0 && got_ma < 0) got_ma = ma;
        ct_uv[c] = 0;
        #300;
      end
      check("trip current mA", got_ma, expect_ma);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
