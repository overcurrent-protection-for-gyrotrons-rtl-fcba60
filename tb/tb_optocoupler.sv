// tb_optocoupler: self-checking testbench of the optocoupler model: the
// output copies the input 50 ns later, for rising and falling edges.
`timescale 1ns/1ps
module tb_optocoupler;
  logic a = 1'b0, y;
  int checks = 0, failures = 0;
  optocoupler #(.DELAY_NS(50)) dut (.a, .y);

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
    #200 check("idle", y, 0);
    for (int i = 0; i < 5; i++) begin
      t0 = $realtime; a = 1'b1;
      #49 check("not yet high", y, 0);
      @(posedge y); check("rise delay", longint'($realtime - t0), 50);
      #100 t0 = $realtime; a = 1'b0;
      #49 check("not yet low", y, 1);
      @(negedge y); check("fall delay", longint'($realtime - t0), 50);
      #100;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
