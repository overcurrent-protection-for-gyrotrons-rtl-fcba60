// tb_status_display: self-checking testbench of status_display. Checks the
// trip memory (set by a one-clock trip, held, cleared by clear), the
// watchdog LED, the self-test failure LED and the heartbeat period
// (BLINK reduced to 10 clocks).
`timescale 1ns/1ps
module tb_status_display;
  localparam int unsigned N = 4, BL = 10;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, wdt = 1'b0, st_done = 1'b0;
  logic [N-1:0] trip = '0, st_pass = '0, st_mask = '0, led_trip, trip_mem;
  logic led_wdt, led_st_fail, led_run;
  int checks = 0, failures = 0;

  status_display #(.N_CH(N), .BLINK(BL)) dut (
    .clk, .rst_n, .trip, .clear, .wdt_expired(wdt), .st_done, .st_pass, .st_mask,
    .led_trip, .led_wdt, .led_st_fail, .led_run, .trip_mem);

  always #12.5 clk = ~clk;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n;
    repeat (3) @(posedge clk); rst_n = 1'b1; @(posedge clk);
    #1 check("leds off", led_trip, 0);
    @(negedge clk) trip = 4'b0100; @(negedge clk) trip = '0;
    repeat (20) @(posedge clk);
    #1 check("trip memory", led_trip, 4'b0100);
    @(negedge clk) trip = 4'b0001; @(negedge clk) trip = '0;
    #1 check("trip memory 2", led_trip, 4'b0101);
    @(negedge clk) clear = 1'b1; @(negedge clk) clear = 1'b0;
    #1 check("cleared", led_trip, 0);
    wdt = 1'b1; #1 check("wdt led", led_wdt, 1); wdt = 1'b0;
    st_mask = 4'b1111; st_pass = 4'b1111; st_done = 1'b1;
    #1 check("st ok", led_st_fail, 0);
    st_pass = 4'b1011;
    #1 check("st fail", led_st_fail, 1);
    st_mask = 4'b1011;
    #1 check("st untested", led_st_fail, 0);
    // Heartbeat: count clocks between two toggles.
    @(led_run); n = 0;
    fork
      begin @(led_run); end
      forever begin @(posedge clk); n++; end
    join_any
    disable fork;
    check("blink period", n, BL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
