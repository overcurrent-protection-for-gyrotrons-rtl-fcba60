// tb_signal_conditioning: self-checking testbench of the conditioning
// model in both uses: the fast-board voltage input behind a x10 attenuation
// and the slow-board 4-20 mA loop on 250 ohm. Checks the scaling, the test
// injection and both clamp levels against values computed here.
`timescale 1ns/1ps
module tb_signal_conditioning;
  int vin_f, test_f, vout_f, vin_s, vout_s;
  int checks = 0, failures = 0;

  signal_conditioning #(.GAIN_NUM(1), .GAIN_DEN(10)) u_fast (.vin(vin_f), .test_uv(test_f), .vout_uv(vout_f));
  signal_conditioning #(.GAIN_NUM(250), .GAIN_DEN(1000)) u_slow (.vin(vin_s), .test_uv(0), .vout_uv(vout_s));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  function automatic int clampv(input longint v);
    return (v > 5_600_000) ? 5_600_000 : (v < -600_000) ? -600_000 : int'(v);
  endfunction

  initial begin
    #1000;
    failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    test_f = 0;
    vin_f = 25_000_000; #1 check("fast 25V/10", vout_f, 2_500_000);
    vin_f = 80_000_000; #1 check("fast clamp hi", vout_f, 5_600_000);
    vin_f = -30_000_000; #1 check("fast clamp lo", vout_f, -600_000);
    vin_f = 0; test_f = 5_000_000; #1 check("test inject", vout_f, 5_000_000);
    test_f = 0;
    vin_s = 4_000_000;  #1 check("4 mA", vout_s, 1_000_000);
    vin_s = 20_000_000; #1 check("20 mA", vout_s, 5_000_000);
    vin_s = 30_000_000; #1 check("30 mA clamp", vout_s, 5_600_000);
    for (int i = 0; i < 50; i++) begin
      int a = int'($urandom_range(0, 200_000_000)) - 100_000_000;
      vin_f = a; #1 check("fast random", vout_f, clampv(longint'(a) / 10));
      vin_s = a / 4; #1 check("slow random", vout_s, clampv(longint'(a / 4) * 250 / 1000));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
