// tb_comparator: self-checking testbench of the comparator model. Checks
// the 7 ns response of the fast-board comparator and the 200 ns response
// of the slow-board one, to the nanosecond, the comparison itself, and
// that a latched comparator keeps its high output after the input falls.
`timescale 1ns/1ps
module tb_comparator;
  int vin = 0, vthr = 2_000_000;
  logic le = 1'b0, out_f, out_s;
  int checks = 0, failures = 0;

  comparator #(.DELAY_NS(7))   u_f (.vin_uv(vin), .vthr_uv(vthr), .le, .out(out_f));
  comparator #(.DELAY_NS(200)) u_s (.vin_uv(vin), .vthr_uv(vthr), .le(1'b0), .out(out_s));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    realtime t0;
    #500;
    check("low", out_f, 0);
    t0 = $realtime; vin = 2_100_000;
    @(posedge out_f); check("fast delay ns", longint'($realtime - t0), 7);
    @(posedge out_s); check("slow delay ns", longint'($realtime - t0), 200);
    #300 vin = 1_000_000; #6 check("not yet", out_f, 1); #2 check("fell", out_f, 0);
    #300;
    // Latch: trip, latch, drop input; output must stay high.
    vin = 3_000_000; #20 le = 1'b1; #5 vin = 0; #500 check("latched high", out_f, 1);
    check("slow unlatched low", out_s, 0);
    le = 1'b0; #10 check("unlatched low", out_f, 0);
    // Threshold sweep.
    for (int i = 0; i < 40; i++) begin
      int a = int'($urandom_range(0, 4_000_000));
      vin = a; #250;
      check("compare fast", out_f, a > vthr);
      check("compare slow", out_s, a > vthr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
