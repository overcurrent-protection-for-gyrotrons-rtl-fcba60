// comparator: behavioural model of a latching voltage comparator (analog
// part, not synthesizable).
//
// While the latch enable `le` is low the output is high when vin_uv exceeds
// vthr_uv; the decision reaches `out` DELAY_NS later (7 ns for the fast
// board's comparator, 200 ns for the slow board's, both from the system
// description). While `le` is high the output keeps the value it had, so a
// comparator latched after an overcurrent keeps outputting high. No
// hysteresis is modelled (none is described).
`timescale 1ns/1ps
module comparator #(
  parameter int unsigned DELAY_NS = 7
) (
  input  int   vin_uv,
  input  int   vthr_uv,
  input  logic le,
  output logic out
);
  logic decide;
  always_latch begin
    if (!le) decide = (vin_uv > vthr_uv);
  end
  assign #(DELAY_NS) out = decide;
endmodule
