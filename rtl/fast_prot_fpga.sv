// fast_prot_fpga: signal processing of the fast overcurrent protection,
// the logic of the anti-fuse FPGA on the fast protection board.
//
// Each of the N_CH comparator outputs (one per current transformer) enters
// a latch_ctrl channel. The channel trips are ORed and copied to the N_OUT
// protection outputs, one per destination (cathode power supply, anode
// power supply, interlock PLC, central control), each driving a fibre
// transmitter. The path from `cmp_in` to `prot` is combinational: the
// response time is set by the comparator, the optocouplers and the fibre
// transmitter, not by the 40 MHz clock. Around that path the FPGA keeps the
// comparator latch enables (latch time set by the host), the host link and
// register file (host_if: thresholds to the DACs, latch time, reset,
// self-test, status read), the watchdog on the host link, the self-test
// sequencer and the front-panel indicators.
//
// Reset: `rst_n` is the power-on reset. The front-panel button `rst_btn_n`
// (synchronised, active low) and the host OP_RESET command both release the
// latches and clear the trip memory. A watchdog expiry trips the outputs
// only when TRIP_ON_EXPIRE is set.
//
// Following the system description: one FPGA with latch, controllable latch
// time, reset, self-test, watchdog, status display and remotely set
// thresholds, protection sent to four destinations. The OR of all channels,
// the link, and all timing values are this design's choices.
`timescale 1ns/1ps
module fast_prot_fpga
  import ocp_pkg::*;
#(
  parameter int unsigned N_CH           = N_FAST_CH,
  parameter int unsigned N_OUT          = N_DEST,
  parameter int unsigned BIT_CLKS       = ocp_pkg::CLKS_PER_BIT,
  parameter int unsigned FRAME_GAP      = 40_000,
  parameter int unsigned LT_UNIT_CYC    = ocp_pkg::LT_UNIT,
  parameter int unsigned WDT_CYCLES     = 40_000_000,
  parameter bit          TRIP_ON_EXPIRE = 1'b0,
  parameter int unsigned ST_TIMEOUT     = 40,
  parameter int unsigned ST_PULSE       = 80,
  parameter int unsigned BLINK          = 20_000_000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rst_btn_n,
  input  logic [N_CH-1:0]  cmp_in,
  output logic [N_CH-1:0]  cmp_le,
  output logic [THR_W-1:0] thr_code [N_CH],
  output logic [N_CH-1:0]  test_pulse,
  output logic [N_OUT-1:0] prot,
  input  logic             uart_rxd,
  output logic             uart_txd,
  output logic [N_CH-1:0]  led_trip,
  output logic             led_wdt,
  output logic             led_st_fail,
  output logic             led_run
);
  logic [LT_W-1:0] latch_time;
  logic            cmd_reset, cmd_selftest, frame_ok, wdt_expired;
  logic [N_CH-1:0] st_mask, st_pass, cmp_sync, trip, trip_mem;
  logic            st_busy, st_done;
  logic            btn, btn_q, clear;
  status_t         status;

  // Front-panel reset button: synchronised, a press gives one clear pulse.
  sync2 #(.RST_VAL(1'b0)) u_btn (.clk, .rst_n, .d(~rst_btn_n), .q(btn));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) btn_q <= 1'b0;
    else        btn_q <= btn;
  end
  assign clear = cmd_reset | (btn & ~btn_q);

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    latch_ctrl #(.LT_UNIT_CYC(LT_UNIT_CYC)) u_latch (
      .clk, .rst_n, .cmp_in(cmp_in[c]), .latch_time, .clear,
      .cmp_le(cmp_le[c]), .trip(trip[c]), .cmp_sync(cmp_sync[c]));
  end

  assign prot = {N_OUT{(|trip) | (TRIP_ON_EXPIRE & wdt_expired)}};

  host_if #(.N_CH(N_CH), .BIT_CLKS(BIT_CLKS), .FRAME_GAP(FRAME_GAP)) u_host (
    .clk, .rst_n, .rxd(uart_rxd), .txd(uart_txd), .status(status),
    .thr_code, .latch_time, .cmd_reset, .cmd_selftest, .st_mask, .frame_ok);

  watchdog #(.TIMEOUT(WDT_CYCLES)) u_wdt (.clk, .rst_n, .kick(frame_ok), .expired(wdt_expired));

  self_test #(.N_CH(N_CH), .TIMEOUT(ST_TIMEOUT), .PULSE(ST_PULSE)) u_st (
    .clk, .rst_n, .start(cmd_selftest), .mask(st_mask), .cmp_sync,
    .test_pulse, .busy(st_busy), .done(st_done), .pass(st_pass));

  // The display sees the synchronised trips (comparator or hold).
  logic [N_CH-1:0] trip_seen;
  assign trip_seen = cmp_sync | cmp_le;

  status_display #(.N_CH(N_CH), .BLINK(BLINK)) u_disp (
    .clk, .rst_n, .trip(trip_seen), .clear, .wdt_expired, .st_done, .st_pass, .st_mask,
    .led_trip, .led_wdt, .led_st_fail, .led_run, .trip_mem);

  always_comb begin
    status             = '0;
    status.protect     = prot[0];
    status.wdt_expired = wdt_expired;
    status.st_busy     = st_busy;
    status.st_done     = st_done;
    for (int c = 0; c < N_CH && c < 4; c++) begin
      status.st_pass[c]  = st_pass[c];
      status.trip_mem[c] = trip_mem[c];
      status.cmp_now[c]  = cmp_sync[c];
    end
  end
endmodule
