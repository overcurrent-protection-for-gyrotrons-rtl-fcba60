// tb_threshold_dac: self-checking testbench of the threshold DAC model:
// end points and random codes against code x 5 V / 4096.
`timescale 1ns/1ps
module tb_threshold_dac;
  logic [11:0] code;
  int vthr;
  int checks = 0, failures = 0;
  threshold_dac #(.THR_W(12), .VREF_UV(5_000_000)) dut (.code, .vthr_uv(vthr));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    #100000; failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    code = 0;      #1 check("zero", vthr, 0);
    code = 2048;   #1 check("mid", vthr, 2_500_000);
    code = 4095;   #1 check("full", vthr, 4_998_779);
    for (int i = 0; i < 100; i++) begin
      code = 12'($urandom);
      #1 check("random", vthr, (longint'(code) * 5_000_000) / 4096);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
