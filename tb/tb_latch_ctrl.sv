// tb_latch_ctrl: self-checking testbench of latch_ctrl. Checks that the
// trip follows the comparator combinationally with latching off (the
// behaviour measured on the board), that a latch time of N us holds the
// trip and the comparator latch enable for N x LT_UNIT clocks after the
// overcurrent is seen, that LATCH_FOREVER holds until clear, and that clear
// ends a latch early. LT_UNIT is reduced to 4 clocks.
`timescale 1ns/1ps
module tb_latch_ctrl;
  import ocp_pkg::*;
  localparam int unsigned U = 4;
  logic clk = 1'b0, rst_n = 1'b0, cmp_in = 1'b0, clear = 1'b0;
  logic [LT_W-1:0] latch_time = '0;
  logic cmp_le, trip, cmp_sync;
  int checks = 0, failures = 0;

  latch_ctrl #(.LT_UNIT_CYC(U)) dut (.clk, .rst_n, .cmp_in, .latch_time, .clear, .cmp_le, .trip, .cmp_sync);

  always #12.5 clk = ~clk;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // Count clocks for which the latch enable stays high after it rises.
  // Sampled 1 ns after each rising edge; returns after the first low sample.
  task automatic measure_hold(output int n);
    int t = 0;
    n = 0;
    while (!cmp_le && t < 10000) begin @(posedge clk); #1; t++; end
    while (cmp_le && n < 10000) begin n++; @(posedge clk); #1; end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (3) @(posedge clk); rst_n = 1'b1; repeat (3) @(posedge clk);

    // Latch time 0: trip follows the comparator with no clock in between.
    #3 cmp_in = 1'b1; #1 check("follow rise", trip, 1);
    repeat (10) @(posedge clk);
    check("no le when latch=0", cmp_le, 0);
    #3 cmp_in = 1'b0; #1 check("follow fall", trip, 0);
    repeat (5) @(posedge clk);

    // Latch time 5 us = 20 clocks.
    latch_time = 16'd5;
    @(negedge clk) cmp_in = 1'b1;
    #1 check("trip at once", trip, 1);
    repeat (3) @(posedge clk);
    @(negedge clk) cmp_in = 1'b0;           // short overcurrent
    #1 check("trip held", trip, 1);
    measure_hold(n);
    check("hold clocks", n, 5 * U);
    #1 check("released", trip, 0);
    repeat (30) @(posedge clk);    // past the re-arm pause

    // Hold until clear.
    latch_time = LATCH_FOREVER;
    @(negedge clk) cmp_in = 1'b1;
    repeat (4) @(posedge clk);
    @(negedge clk) cmp_in = 1'b0;
    repeat (300) @(posedge clk);
    #1 check("forever held", trip, 1);
    check("forever le", cmp_le, 1);
    @(negedge clk) clear = 1'b1; @(negedge clk) clear = 1'b0;
    #1 check("cleared", trip, 0);
    repeat (30) @(posedge clk);    // past the re-arm pause

    // Clear ends a timed latch early.
    latch_time = 16'd100;
    @(negedge clk) cmp_in = 1'b1;
    repeat (4) @(posedge clk);
    @(negedge clk) cmp_in = 1'b0;
    repeat (10) @(posedge clk);
    #1 check("timed held", trip, 1);
    @(negedge clk) clear = 1'b1; @(negedge clk) clear = 1'b0;
    #1 check("timed cleared", trip, 0);

    // A comparator still high after a release is ignored for the re-arm
    // pause (16 clocks), then latched again.
    repeat (30) @(posedge clk);
    latch_time = 16'd2;
    @(negedge clk) cmp_in = 1'b1;
    measure_hold(n);
    check("first hold", n, 2 * U);
    n = 1;
    while (n < 1000) begin @(posedge clk); #1; if (cmp_le) break; n++; end
    check("re-arm pause", n, 16 + 1);
    @(negedge clk) cmp_in = 1'b0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
