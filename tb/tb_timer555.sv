// tb_timer555: self-checking testbench of the 555 monostable model at
// both ends of the pulse-length range: Rt = 2 k and 102 k with Ct = 100 uF
// give tau = 0.22 s and 11.22 s. Checks the pulse length to the
// nanosecond, that re-triggers during the pulse are ignored, that a
// trigger held low stretches the pulse, that reset aborts it and that the
// timer can be triggered again right after a reset.
`timescale 1ns/1ps
module tb_timer555;
  logic trig_n = 1'b1, reset_n = 1'b1, out_a, out_b;
  int checks = 0, failures = 0;

  timer555 #(.RT_OHM(2_000),   .CT_NF(100_000)) u_a (.trig_n, .reset_n, .out(out_a));
  timer555 #(.RT_OHM(102_000), .CT_NF(100_000)) u_b (.trig_n, .reset_n, .out(out_b));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic pulse_trig;
    trig_n = 1'b0; #100 trig_n = 1'b1;
  endtask

  initial begin
    #60s; failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    realtime t0;
    #1000 check("idle a", out_a, 0); check("idle b", out_b, 0);
    t0 = $realtime; pulse_trig;
    #1 check("high a", out_a, 1); check("high b", out_b, 1);
    #100ms pulse_trig;                      // ignored re-trigger
    @(negedge out_a); check("tau a ns", longint'($realtime - t0), 220_000_000);
    @(negedge out_b); check("tau b ns", longint'($realtime - t0), 64'd11_220_000_000);
    // Trigger held low past tau keeps the output high.
    #1000 trig_n = 1'b0; #300ms check("held a", out_a, 1);
    trig_n = 1'b1; #1 check("released a", out_a, 0);
    check("b still high", out_b, 1);
    // Reset aborts.
    reset_n = 1'b0; #1 check("reset b", out_b, 0);
    #1000 reset_n = 1'b1;
    #1000 check("stays low after reset", out_b, 0);
    t0 = $realtime; pulse_trig;
    #1 check("re-triggers after reset", out_b, 1);
    #1s reset_n = 1'b0; #1000 reset_n = 1'b1;
    check("reset again", out_b, 0);
    t0 = $realtime; pulse_trig;
    @(negedge out_a); check("tau a again", longint'($realtime - t0), 220_000_000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
