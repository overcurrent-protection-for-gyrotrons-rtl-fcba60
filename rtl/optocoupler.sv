// optocoupler: behavioural model of a high-speed optocoupler (analog part).
// The output follows the input DELAY_NS later; the 50 ns default is the
// typical response time given for the board's optocouplers.
`timescale 1ns/1ps
module optocoupler #(
  parameter int unsigned DELAY_NS = 50
) (
  input  logic a,
  output logic y
);
  assign #(DELAY_NS) y = a;
endmodule
