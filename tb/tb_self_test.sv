// tb_self_test: self-checking testbench of self_test. A model of the
// channels answers each test pulse after a few clocks, except a channel
// made dead. Checks the per-channel pass results, that only one channel is
// pulsed at a time, that only selected channels are pulsed, and the busy /
// done flags, for several masks.
`timescale 1ns/1ps
module tb_self_test;
  localparam int unsigned N = 4, TO = 40, PW = 80;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [N-1:0] mask = '0, cmp_sync, test_pulse, pass, dead = '0, pulsed;
  logic busy, done;
  logic [N-1:0] d1, d2, d3;
  int checks = 0, failures = 0, overlap = 0;

  self_test #(.N_CH(N), .TIMEOUT(TO), .PULSE(PW)) dut (
    .clk, .rst_n, .start, .mask, .cmp_sync, .test_pulse, .busy, .done, .pass);

  always #12.5 clk = ~clk;

  // Channel model: comparator output three clocks after the pulse.
  always_ff @(posedge clk) begin
    d1 <= test_pulse & ~dead; d2 <= d1; d3 <= d2;
    if (rst_n && $countones(test_pulse) > 1) overlap++;
    pulsed <= pulsed | test_pulse;
  end
  assign cmp_sync = d3;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic run(input logic [N-1:0] m, input logic [N-1:0] dd);
    int t = 0;
    dead = dd; pulsed = '0;
    @(negedge clk) begin mask = m; start = 1'b1; end
    @(negedge clk) start = 1'b0;
    #1 check("busy", busy, 1);
    check("done cleared", done, 0);
    while (busy) begin @(posedge clk); t++; if (t > 5000) break; end
    #1 check("done", done, 1);
    check("pass", pass, m & ~dd);
    check("pulsed only selected", pulsed, m);
    check("no overlap", overlap, 0);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    d1 = '0; d2 = '0; d3 = '0; pulsed = '0;
    repeat (3) @(posedge clk); rst_n = 1'b1; repeat (3) @(posedge clk);
    check("idle", busy, 0);
    run(4'hF, 4'h0);
    run(4'hF, 4'h4);
    run(4'h5, 4'h0);
    run(4'h8, 4'h8);
    run(4'hA, 4'h2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
