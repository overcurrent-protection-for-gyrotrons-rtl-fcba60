// overcurrent_protection: the complete overcurrent protection of one
// gyrotron, a fast system and a slow system working in parallel. Top level;
// it contains behavioural models of the analog parts, so only the
// fast_prot_fpga inside it is synthesizable logic.
//
// Fast system (response well under 100 ns): each of the N_FAST current-
// transformer voltages `ct_uv` (channels below N_FAST/2 on the cathode
// current, behind a x10 attenuator; the others on the anode current, x1)
// is diode-clamped, compared with a threshold from a DAC set by the FPGA,
// and the comparator output reaches the FPGA through an optocoupler. The
// FPGA ORs the channels onto its N_DEST protection outputs, each driving a
// fibre transmitter `fast_light` that goes dark to request protection. The
// FPGA's comparator latch enables and self-test pulses also pass through
// optocouplers, as does its serial host link. Trip path delay with the
// default models: 7 ns comparator + 50 ns optocoupler + 10 ns fibre
// transmitter = 67 ns.
//
// Slow system (response under 31 us): each of the N_SLOW shunt voltages
// `shunt_uv` (0: cathode, 1: anode; 0-100 mV) goes through an isolating
// converter to a 4-20 mA loop, a 250 ohm burden resistor and clamp back to
// volts (also brought out on `daq_uv` for the data acquisition), and a
// 200 ns comparator against the fixed SLOW_THR_UV. An overcurrent triggers
// that channel's 555 monostable, which holds protection for
// tau = 1.1 Rt Ct (0.22 s by default); the 555 outputs are ORed onto the
// N_DEST slow fibres `slow_light`. Delay: 30 us + 200 ns + 10 ns.
//
// Following the system description: the two parallel systems, channel
// counts, attenuators, shunts, conditioning, comparator and optocoupler
// delays, the anti-fuse FPGA and the 555 timer, four destinations per
// system, light = normal. This design's own choices: the ordering of the
// channels, the fixed slow threshold, ORing channels onto every fibre, the
// self-test injection voltage and the use of the front-panel reset to also
// reset the 555s.
`timescale 1ns/1ps
module overcurrent_protection
  import ocp_pkg::*;
#(
  parameter int unsigned     N_FAST       = N_FAST_CH,
  parameter int unsigned     N_SLOW       = N_SLOW_CH,
  parameter int unsigned     N_OUT        = N_DEST,
  parameter int              CATH_ATTEN   = 10,
  parameter int              ANODE_ATTEN  = 1,
  parameter int              SLOW_THR_UV  = 4_000_000,
  parameter int              ST_INJECT_UV = 5_000_000,
  parameter longint unsigned RT_OHM       = 2_000,
  parameter longint unsigned CT_NF        = 100_000,
  parameter int unsigned     BIT_CLKS     = ocp_pkg::CLKS_PER_BIT,
  parameter int unsigned     FRAME_GAP    = 40_000,
  parameter int unsigned     LT_UNIT_CYC  = ocp_pkg::LT_UNIT,
  parameter int unsigned     WDT_CYCLES   = 40_000_000,
  parameter int unsigned     ST_TIMEOUT   = 40,
  parameter int unsigned     ST_PULSE     = 80,
  parameter int unsigned     BLINK        = 20_000_000,
  parameter int unsigned     FAST_CMP_NS  = 7,
  parameter int unsigned     SLOW_CMP_NS  = 200,
  parameter int unsigned     OPTO_NS      = 50,
  parameter int unsigned     FIBER_NS     = 10,
  parameter int unsigned     ISO_NS       = 30_000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rst_btn_n,
  input  logic              pwr_ok,
  input  int                ct_uv    [N_FAST],
  input  int                shunt_uv [N_SLOW],
  input  logic              uart_rxd,
  output logic              uart_txd,
  output logic [N_OUT-1:0]  fast_light,
  output logic [N_OUT-1:0]  slow_light,
  output int                daq_uv   [N_SLOW],
  output logic [N_FAST-1:0] led_trip,
  output logic              led_wdt,
  output logic              led_st_fail,
  output logic              led_run,
  output logic [N_SLOW-1:0] slow_active
);
  // ---------------------------------------------------------------- fast
  logic [N_FAST-1:0] cmp_raw, cmp_iso, le_fpga, le_iso, tp_fpga, tp_iso;
  logic [THR_W-1:0]  thr_code [N_FAST];
  logic [N_OUT-1:0]  fast_prot;
  logic              rxd_iso, txd_fpga;

  for (genvar c = 0; c < N_FAST; c++) begin : g_fast
    localparam int ATT = (c < N_FAST / 2) ? CATH_ATTEN : ANODE_ATTEN;
    int vcond, vthr, vtest;

    assign vtest = tp_iso[c] ? ST_INJECT_UV : 0;
    signal_conditioning #(.GAIN_NUM(1), .GAIN_DEN(ATT)) u_cond (
      .vin(ct_uv[c]), .test_uv(vtest), .vout_uv(vcond));
    threshold_dac #(.THR_W(THR_W), .VREF_UV(DAC_VREF_UV)) u_dac (
      .code(thr_code[c]), .vthr_uv(vthr));
    comparator #(.DELAY_NS(FAST_CMP_NS)) u_cmp (
      .vin_uv(vcond), .vthr_uv(vthr), .le(le_iso[c]), .out(cmp_raw[c]));
    optocoupler #(.DELAY_NS(OPTO_NS)) u_oc_cmp (.a(cmp_raw[c]), .y(cmp_iso[c]));
    optocoupler #(.DELAY_NS(OPTO_NS)) u_oc_le  (.a(le_fpga[c]), .y(le_iso[c]));
    optocoupler #(.DELAY_NS(OPTO_NS)) u_oc_tp  (.a(tp_fpga[c]), .y(tp_iso[c]));
  end

  optocoupler #(.DELAY_NS(OPTO_NS)) u_oc_rx (.a(uart_rxd), .y(rxd_iso));
  optocoupler #(.DELAY_NS(OPTO_NS)) u_oc_tx (.a(txd_fpga), .y(uart_txd));

  fast_prot_fpga #(
    .N_CH(N_FAST), .N_OUT(N_OUT), .BIT_CLKS(BIT_CLKS), .FRAME_GAP(FRAME_GAP),
    .LT_UNIT_CYC(LT_UNIT_CYC), .WDT_CYCLES(WDT_CYCLES), .ST_TIMEOUT(ST_TIMEOUT),
    .ST_PULSE(ST_PULSE), .BLINK(BLINK)
  ) u_fpga (
    .clk, .rst_n, .rst_btn_n, .cmp_in(cmp_iso), .cmp_le(le_fpga), .thr_code,
    .test_pulse(tp_fpga), .prot(fast_prot), .uart_rxd(rxd_iso), .uart_txd(txd_fpga),
    .led_trip, .led_wdt, .led_st_fail, .led_run);

  for (genvar d = 0; d < N_OUT; d++) begin : g_fast_tx
    fiber_tx #(.DELAY_NS(FIBER_NS)) u_tx (.prot(fast_prot[d]), .pwr_ok, .light(fast_light[d]));
  end

  // ---------------------------------------------------------------- slow
  logic [N_SLOW-1:0] slow_cmp;
  logic              slow_prot;

  for (genvar s = 0; s < N_SLOW; s++) begin : g_slow
    int iloop;
    signal_isolator #(.DELAY_NS(ISO_NS)) u_iso (.vin_uv(shunt_uv[s]), .iout_na(iloop));
    signal_conditioning #(.GAIN_NUM(250), .GAIN_DEN(1000)) u_cond (
      .vin(iloop), .test_uv(0), .vout_uv(daq_uv[s]));
    comparator #(.DELAY_NS(SLOW_CMP_NS)) u_cmp (
      .vin_uv(daq_uv[s]), .vthr_uv(SLOW_THR_UV), .le(1'b0), .out(slow_cmp[s]));
    timer555 #(.RT_OHM(RT_OHM), .CT_NF(CT_NF)) u_timer (
      .trig_n(~slow_cmp[s]), .reset_n(rst_btn_n), .out(slow_active[s]));
  end

  assign slow_prot = |slow_active;

  for (genvar d = 0; d < N_OUT; d++) begin : g_slow_tx
    fiber_tx #(.DELAY_NS(FIBER_NS)) u_tx (.prot(slow_prot), .pwr_ok, .light(slow_light[d]));
  end
endmodule
