// tb_watchdog: self-checking testbench of watchdog. Checks that regular
// kicks keep it quiet, that it expires exactly TIMEOUT clocks after the
// last kick, and that a kick clears the expiry. TIMEOUT reduced to 50.
`timescale 1ns/1ps
module tb_watchdog;
  localparam int unsigned T = 50;
  logic clk = 1'b0, rst_n = 1'b0, kick = 1'b0, expired;
  int checks = 0, failures = 0;

  watchdog #(.TIMEOUT(T)) dut (.clk, .rst_n, .kick, .expired);
  always #12.5 clk = ~clk;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n;
    repeat (3) @(posedge clk); rst_n = 1'b1;
    for (int k = 0; k < 10; k++) begin
      repeat (T - 5) @(posedge clk);
      check("quiet while kicked", expired, 0);
      @(negedge clk) kick = 1'b1; @(negedge clk) kick = 1'b0;
    end
    // Count clocks from the kick to the expiry.
    n = 0;
    while (!expired) begin @(posedge clk); #1; n++; if (n > 1000) break; end
    check("expiry time", n, T);
    repeat (20) @(posedge clk);
    check("stays expired", expired, 1);
    @(negedge clk) kick = 1'b1; @(negedge clk) kick = 1'b0;
    #1 check("kick clears", expired, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
