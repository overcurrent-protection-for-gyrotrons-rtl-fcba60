// tb_overcurrent_protection: end-to-end testbench of the whole protection,
// with every parameter at its default (40 MHz FPGA clock, 115200 baud host
// link, 1 s watchdog, 0.22 s slow-protection hold).
//
// The testbench plays the current transformers (output volts per channel),
// the shunts (millivolts), the control-room host (serial frames) and the
// receivers of the fibres. It checks, against values worked out here from
// the component values:
//   - the fast trip on a cathode channel (x10 attenuator) and an anode
//     channel (x1) at the default 2.5 V threshold, and no trip below it;
//   - the fast response time (7 + 50 + 10 = 67 ns, under the 100 ns bound);
//   - a threshold changed over the host link moving the trip point;
//   - a timed latch, a hold-until-reset latch and the comparator latch
//     enable holding the comparator itself, released by the front-panel
//     button and by the host reset command;
//   - a self-test through the real analog chain, and its status read-back;
//   - the watchdog expiry when the host goes silent;
//   - the slow trip: response under 31 us, hold for tau = 1.1 Rt Ct, no
//     trip below the threshold, and the DAQ voltage.
// Each mechanism is counted; one that never happened is a failure.
`timescale 1ns/1ps
module tb_overcurrent_protection;
  import ocp_pkg::*;
  localparam int unsigned NF = N_FAST_CH, NS = N_SLOW_CH, ND = N_DEST;
  localparam realtime TCLK = 25.0;                         // 40 MHz
  localparam realtime TBIT = TCLK * ocp_pkg::CLKS_PER_BIT; // one serial bit

  logic clk = 1'b0, rst_n = 1'b0, rst_btn_n = 1'b1, pwr_ok = 1'b1, rxd = 1'b1, txd;
  int ct_uv [NF];
  int shunt_uv [NS];
  int daq_uv [NS];
  logic [ND-1:0] fast_light, slow_light;
  logic [NF-1:0] led_trip;
  logic [NS-1:0] slow_active;
  logic led_wdt, led_st_fail, led_run;
  int checks = 0, failures = 0;

  // Mechanism counters.
  int n_fast_trip = 0, n_no_trip = 0, n_thr_set = 0, n_timed_latch = 0, n_hold_reset = 0;
  int n_cmp_latched = 0, n_btn_reset = 0, n_host_reset = 0, n_selftest = 0, n_wdt = 0;
  int n_slow_trip = 0, n_slow_no_trip = 0, n_status = 0;

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
  task automatic recv_byte(output logic [7:0] b);
    realtime t0 = $realtime;
    while (txd !== 1'b0) begin #(TCLK); if ($realtime - t0 > 40 * TBIT) begin b = '1; return; end end
    #(TBIT / 2);
    for (int i = 0; i < 8; i++) begin #(TBIT); b[i] = txd; end
    #(TBIT);
  endtask
  task automatic read_status(output status_t s);
    logic [7:0] hi, lo;
    fork
      begin recv_byte(hi); recv_byte(lo); end
      send_frame(OP_READ_STAT, 4'd0, 16'd0);
    join
    s = status_t'({hi, lo});
    n_status++;
  endtask

  // Apply a CT voltage on one channel and measure the time to a dark fibre.
  task automatic fast_step(input int c, input int uv, output realtime dt, output logic tripped);
    realtime t0;
    t0 = $realtime;
    ct_uv[c] = uv;
    tripped = 1'b0;
    dt = 0;
    while ($realtime - t0 < 1000.0) begin
      #1;
      if (fast_light == '0) begin tripped = 1'b1; dt = $realtime - t0; break; end
    end
  endtask

  // Threshold in uV of the DAC code, and CT volts (uV) for a board voltage.
  function automatic int thr_uv(input int code);
    return int'((longint'(code) * 5_000_000) >>> 12);
  endfunction

  initial begin
    #1500ms;
    failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    realtime dt, t0;
    logic tr;
    status_t s;
    for (int c = 0; c < NF; c++) ct_uv[c] = 0;
    for (int s2 = 0; s2 < NS; s2++) shunt_uv[s2] = 0;
    #200 rst_n = 1'b1;
    #50us;
    check("all fibres lit", {fast_light, slow_light}, 8'hFF);
    check("daq at 4 mA", daq_uv[0], 1_000_000);

    // ---- fast trip, default threshold 2.5 V, latch off (follows input)
    // Cathode channel 0: 30 V from the CT, x10 attenuator -> 3.0 V at the comparator.
    fast_step(0, 30_000_000, dt, tr);
    check("cathode trip", tr, 1);
    check("fast response ns", longint'(dt), 67);
    check("under 100 ns", dt < 100.0, 1);
    if (tr) n_fast_trip++;
    #1us ct_uv[0] = 0; #200 check("follows off", fast_light, 4'hF);
    // Cathode 20 V -> 2.0 V: below the threshold.
    fast_step(1, 20_000_000, dt, tr);
    check("cathode below", tr, 0); if (!tr) n_no_trip++;
    ct_uv[1] = 0;
    // Anode channel 2: 3.0 V, x1 -> trips; 2.0 V does not.
    fast_step(2, 2_000_000, dt, tr);
    check("anode below", tr, 0); if (!tr) n_no_trip++;
    fast_step(2, 3_000_000, dt, tr);
    check("anode trip", tr, 1); if (tr) n_fast_trip++;
    check("anode response", longint'(dt), 67);
    ct_uv[2] = 0; #200;
    check("trip leds", led_trip & 4'b0101, 4'b0101);

    // ---- threshold set remotely: channel 3 to 1.0 V (code 819)
    send_frame(OP_SET_THR, 4'd3, 16'd819);
    check("dac threshold", dut.g_fast[3].vthr, thr_uv(819));
    fast_step(3, 1_200_000, dt, tr);
    check("trip at new threshold", tr, 1);
    if (tr) n_thr_set++;
    ct_uv[3] = 0; #200;
    check("released", fast_light, 4'hF);

    // ---- timed latch: 20 us, on a 2 us overcurrent
    send_frame(OP_SET_LATCH, 4'd0, 16'd20);
    t0 = $realtime;
    ct_uv[2] = 3_000_000; #2us ct_uv[2] = 0;
    wait (fast_light == '1);
    dt = $realtime - t0;
    check("timed latch about 20 us", (dt > 20_000.0) && (dt < 20_500.0), 1);
    if (dt > 20_000.0) n_timed_latch++;

    // ---- hold until reset; comparator itself latched
    send_frame(OP_SET_LATCH, 4'd0, LATCH_FOREVER);
    ct_uv[2] = 3_000_000; #1us ct_uv[2] = 0;
    #100us;
    check("held", fast_light, 4'h0);
    check("comparator held by latch enable", dut.g_fast[2].u_cmp.out, 1);
    if (dut.g_fast[2].u_cmp.out) n_cmp_latched++;
    if (fast_light == '0) n_hold_reset++;
    rst_btn_n = 1'b0; #1us rst_btn_n = 1'b1; #1us;
    check("button reset", fast_light, 4'hF);
    if (fast_light == '1) n_btn_reset++;
    ct_uv[0] = 30_000_000; #1us ct_uv[0] = 0; #10us;
    check("held again", fast_light, 4'h0);
    send_frame(OP_RESET, 4'd0, 16'd0);
    #1us check("host reset", fast_light, 4'hF);
    if (fast_light == '1) n_host_reset++;

    // ---- self-test through the analog chain (latch off)
    send_frame(OP_SET_LATCH, 4'd0, 16'd0);
    send_frame(OP_SELFTEST, 4'd0, 16'h000F);
    #20us;
    read_status(s);
    check("self-test done", s.st_done, 1);
    check("self-test pass", s.st_pass, 4'hF);
    check("self-test led", led_st_fail, 0);
    check("self-test trip memory", s.trip_mem, 4'hF);
    if (s.st_done && s.st_pass == 4'hF) n_selftest++;

    // ---- slow trip: anode shunt 90 mV -> 18.4 mA -> 4.6 V > 4.0 V
    shunt_uv[1] = 50_000;                  // 12 mA -> 3.0 V: no trip
    #100us;
    check("daq 3.0 V", daq_uv[1], 3_000_000);
    check("slow below", slow_light, 4'hF);
    if (slow_light == '1) n_slow_no_trip++;
    t0 = $realtime;
    shunt_uv[1] = 90_000;
    wait (slow_light == '0);
    dt = $realtime - t0;
    check("slow response ns", longint'(dt), 30_210);
    check("under 31 us", dt < 31_000.0, 1);
    n_slow_trip++;
    check("daq 4.6 V", daq_uv[1], 4_600_000);
    shunt_uv[1] = 0;
    wait (slow_light == '1);
    dt = $realtime - t0;
    // 555 output high from 30.2 us to 30.2 us + 0.22 s, light back 10 ns later.
    check("slow hold ns", longint'(dt), 64'd220_030_210);
    check("fast unaffected", fast_light, 4'hF);

    // ---- watchdog: the host has been silent for about 0.22 s; wait out 1 s.
    check("wdt quiet so far", led_wdt, 0);
    #800ms;
    check("wdt expired", led_wdt, 1);
    if (led_wdt) n_wdt++;
    read_status(s);
    check("status wdt flag", s.wdt_expired, 1);
    #1us check("wdt kicked", led_wdt, 0);

    // ---- every mechanism happened
    check("mech fast trip", n_fast_trip > 0, 1);
    check("mech no trip", n_no_trip > 0, 1);
    check("mech remote threshold", n_thr_set > 0, 1);
    check("mech timed latch", n_timed_latch > 0, 1);
    check("mech hold until reset", n_hold_reset > 0, 1);
    check("mech comparator latch", n_cmp_latched > 0, 1);
    check("mech button reset", n_btn_reset > 0, 1);
    check("mech host reset", n_host_reset > 0, 1);
    check("mech self-test", n_selftest > 0, 1);
    check("mech watchdog", n_wdt > 0, 1);
    check("mech slow trip", n_slow_trip > 0, 1);
    check("mech slow no trip", n_slow_no_trip > 0, 1);
    check("mech status read", n_status > 0, 1);
    $display("INFO mechanisms: fast_trip=%0d no_trip=%0d thr_set=%0d timed_latch=%0d hold=%0d cmp_latch=%0d btn=%0d host_reset=%0d selftest=%0d wdt=%0d slow_trip=%0d slow_no_trip=%0d status=%0d",
             n_fast_trip, n_no_trip, n_thr_set, n_timed_latch, n_hold_reset, n_cmp_latched,
             n_btn_reset, n_host_reset, n_selftest, n_wdt, n_slow_trip, n_slow_no_trip, n_status);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
