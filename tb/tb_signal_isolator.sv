// tb_signal_isolator: self-checking testbench of the isolating converter
// model: 0 mV -> 4 mA, 100 mV -> 20 mA, linear in between, saturating
// outside, and the 30 us response.
`timescale 1ns/1ps
module tb_signal_isolator;
  int vin = 0, iout;
  int checks = 0, failures = 0;
  signal_isolator #(.DELAY_NS(30_000)) dut (.vin_uv(vin), .iout_na(iout));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    #20_000_000; failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #40_000 check("4 mA at 0 mV", iout, 4_000_000);
    vin = 100_000;
    #29_999 check("not yet", iout, 4_000_000);
    #2 check("20 mA at 100 mV", iout, 20_000_000);
    vin = 150_000; #30_001 check("saturate hi", iout, 20_000_000);
    vin = -5_000;  #30_001 check("saturate lo", iout, 4_000_000);
    for (int i = 0; i < 20; i++) begin
      int a = int'($urandom_range(0, 100_000));
      vin = a; #30_001 check("linear", iout, 4_000_000 + a * 160);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
