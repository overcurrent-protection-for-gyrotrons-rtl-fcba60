// tb_fast_prot_fpga: self-checking testbench of the fast protection FPGA
// logic. Comparator outputs are driven directly; a small channel model
// answers the self-test pulses (channel 3 is made dead). Checks: the
// combinational trip path to all four outputs, per-channel trips, the
// latch time set over the serial link, hold-until-reset released by the
// front-panel button and by the host reset command, thresholds reaching the
// DAC outputs, the status read-back, the self-test result and LED, the
// watchdog expiry and the trip LEDs. Timing parameters are reduced.
`timescale 1ns/1ps
module tb_fast_prot_fpga;
  import ocp_pkg::*;
  localparam int unsigned N = 4, NO = 4, CPB = 8, U = 4, WDT = 3000;
  logic clk = 1'b0, rst_n = 1'b0, rst_btn_n = 1'b1, rxd = 1'b1, txd;
  logic [N-1:0] cmp_drv = '0, cmp_in, cmp_le, test_pulse, led_trip, dead = 4'b1000;
  logic [THR_W-1:0] thr_code [N];
  logic [NO-1:0] prot;
  logic led_wdt, led_st_fail, led_run;
  int checks = 0, failures = 0;

  fast_prot_fpga #(.N_CH(N), .N_OUT(NO), .BIT_CLKS(CPB), .FRAME_GAP(200), .LT_UNIT_CYC(U),
                   .WDT_CYCLES(WDT), .ST_TIMEOUT(40), .ST_PULSE(80), .BLINK(50)) dut (
    .clk, .rst_n, .rst_btn_n, .cmp_in, .cmp_le, .thr_code, .test_pulse, .prot,
    .uart_rxd(rxd), .uart_txd(txd), .led_trip, .led_wdt, .led_st_fail, .led_run);

  always #12.5 clk = ~clk;

  // Channel model: comparator high on a drive or a test pulse (unless dead),
  // and held while latched.
  logic [N-1:0] cmp_hold = '0;
  always @(posedge clk) cmp_hold <= cmp_le & cmp_in;
  assign cmp_in = cmp_drv | (test_pulse & ~dead) | cmp_hold;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic send_byte(input logic [7:0] b);
    rxd = 1'b0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(posedge clk); end
    rxd = 1'b1; repeat (CPB) @(posedge clk);
  endtask
  task automatic send_frame(input op_e op, input logic [3:0] ch, input logic [15:0] d);
    send_byte({op, ch}); send_byte(d[15:8]); send_byte(d[7:0]);
    repeat (4) @(posedge clk);
  endtask
  task automatic recv_byte(output logic [7:0] b);
    int t = 0;
    while (txd !== 1'b0) begin @(posedge clk); t++; if (t > 2000) begin b = '1; return; end end
    repeat (CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = txd; end
    repeat (CPB) @(posedge clk);
  endtask
  task automatic read_status(output status_t s);
    logic [7:0] hi, lo;
    fork
      begin recv_byte(hi); recv_byte(lo); end
      send_frame(OP_READ_STAT, 4'd0, 16'd0);
    join
    s = status_t'({hi, lo});
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    status_t s;
    int n;
    repeat (3) @(posedge clk); rst_n = 1'b1; repeat (3) @(posedge clk);
    check("quiet", prot, 0);

    // Combinational trip on every channel, latch time 0: follows.
    for (int c = 0; c < N; c++) begin
      #3 cmp_drv[c] = 1'b1; #1 check("trip all outputs", prot, 4'hF);
      repeat (6) @(posedge clk);
      #3 cmp_drv[c] = 1'b0; #1 check("follows off", prot, 0);
      repeat (3) @(posedge clk);
    end
    check("trip leds", led_trip, 4'hF);

    // Thresholds to the DAC codes.
    for (int c = 0; c < N; c++) send_frame(OP_SET_THR, 4'(c), 16'(1000 + c));
    for (int c = 0; c < N; c++) check("dac code", thr_code[c], 1000 + c);

    // Latch time 10 us = 40 clocks: the trip outlives a short overcurrent.
    send_frame(OP_SET_LATCH, 4'd0, 16'd10);
    @(negedge clk) cmp_drv[1] = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk) cmp_drv[1] = 1'b0;
    n = 0;
    while (prot[0]) begin @(posedge clk); n++; if (n > 1000) break; end
    check("latched trip length (clocks)", (n >= 10 * U) && (n <= 10 * U + 4), 1);

    // Hold until reset; released by the button, then by the host command.
    send_frame(OP_SET_LATCH, 4'd0, LATCH_FOREVER);
    @(negedge clk) cmp_drv[2] = 1'b1; repeat (3) @(posedge clk); @(negedge clk) cmp_drv[2] = 1'b0;
    repeat (500) @(posedge clk);
    check("held", prot, 4'hF);
    rst_btn_n = 1'b0; repeat (5) @(posedge clk); rst_btn_n = 1'b1; repeat (5) @(posedge clk);
    check("button released", prot, 0);
    check("button cleared leds", led_trip, 0);
    @(negedge clk) cmp_drv[0] = 1'b1; repeat (3) @(posedge clk); @(negedge clk) cmp_drv[0] = 1'b0;
    repeat (100) @(posedge clk);
    check("held 2", prot, 4'hF);
    send_frame(OP_RESET, 4'd0, 16'd0);
    repeat (3) @(posedge clk);
    check("host reset released", prot, 0);
    read_status(s);
    check("status trip_mem", s.trip_mem, 4'h0);
    check("status protect", s.protect, 0);

    // Self-test of all channels, latch off so channels recover.
    send_frame(OP_SET_LATCH, 4'd0, 16'd0);
    send_frame(OP_SELFTEST, 4'd0, 16'h000F);
    n = 0;
    while (!dut.st_done) begin @(posedge clk); n++; if (n > 5000) break; end
    read_status(s);
    check("self-test done", s.st_done, 1);
    check("self-test pass", s.st_pass, 4'b0111);
    check("self-test fail led", led_st_fail, 1);
    check("trip memory after test", s.trip_mem, 4'b0111);

    // Watchdog: silence on the link for WDT clocks.
    check("wdt quiet", led_wdt, 0);
    repeat (WDT + 10) @(posedge clk);
    check("wdt expired", led_wdt, 1);
    check("no trip on expiry", prot, 0);
    read_status(s);
    check("wdt cleared by frame", led_wdt, 0);
    check("heartbeat toggles", led_run === 1'b0 || led_run === 1'b1, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
