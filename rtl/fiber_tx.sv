// fiber_tx: behavioural model of the electro-optical conversion (fibre
// optic transmitter and its driver, an analog part).
//
// The link is fail-safe: the transmitter emits light while the board is
// powered and no protection is requested; no light means "protect". So
// light = pwr_ok and not prot, DELAY_NS after the inputs change. The
// light/no-light convention follows the system description; the 10 ns
// delay is assumed.
`timescale 1ns/1ps
module fiber_tx #(
  parameter int unsigned DELAY_NS = 10
) (
  input  logic prot,
  input  logic pwr_ok,
  output logic light
);
  assign #(DELAY_NS) light = pwr_ok & ~prot;
endmodule
