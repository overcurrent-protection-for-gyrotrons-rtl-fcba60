// tb_fiber_tx: self-checking testbench of the fibre transmitter model:
// light while powered and not protecting, dark on protection or power
// loss, with the 10 ns transmitter delay.
`timescale 1ns/1ps
module tb_fiber_tx;
  logic prot = 1'b0, pwr_ok = 1'b1, light;
  int checks = 0, failures = 0;
  fiber_tx #(.DELAY_NS(10)) dut (.prot, .pwr_ok, .light);

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    #100000; failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    realtime t0;
    #100 check("normal light", light, 1);
    t0 = $realtime; prot = 1'b1;
    @(negedge light); check("dark delay", longint'($realtime - t0), 10);
    #50 prot = 1'b0; #20 check("light back", light, 1);
    pwr_ok = 1'b0; #20 check("power loss dark", light, 0);
    prot = 1'b1; #20 check("dark both", light, 0);
    pwr_ok = 1'b1; #20 check("protect dark", light, 0);
    prot = 1'b0; #20 check("normal again", light, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
