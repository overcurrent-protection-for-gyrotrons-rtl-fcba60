// timer555: behavioural model of a 555 timer wired as a monostable (analog
// part), the signal processing of the slow protection board.
//
// A falling edge on the active-low trigger, while the output is low and
// reset_n is high, sets the output high for tau = 1.1 x Rt x Ct. As in a
// real 555, triggers during the pulse are ignored, and if the trigger is
// still low when tau has passed the output stays high until it rises.
// reset_n low forces the output low at once and aborts the pulse.
// With Ct in nF, tau in ns = 1.1 x RT_OHM x CT_NF. The formula and the
// range 0.22 s .. 11.22 s come from the system description; Rt and Ct are
// not given, so Ct = 100 uF and Rt = 2 k .. 102 kOhm are assumed (the
// default is the 0.22 s end).
`timescale 1ns/1ps
module timer555 #(
  parameter longint unsigned RT_OHM = 2_000,
  parameter longint unsigned CT_NF  = 100_000
) (
  input  logic trig_n,
  input  logic reset_n,
  output logic out
);
  localparam longint unsigned TAU_NS = (11 * RT_OHM * CT_NF) / 10;

  logic q;
  initial q = 1'b0;

  always @(negedge trig_n) begin
    if (reset_n && !q) begin
      q = 1'b1;
      // The pulse ends after tau with the trigger released, or on reset.
      fork
        begin #(TAU_NS); wait (trig_n); end
        @(negedge reset_n);
      join_any
      disable fork;
      q = 1'b0;
    end
  end

  assign out = q && reset_n;
endmodule
