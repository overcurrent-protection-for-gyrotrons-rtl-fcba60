// signal_conditioning: behavioural model of the analog input conditioning
// of a protection channel (not synthesizable logic; an analog circuit).
//
// The input is scaled by GAIN_NUM/GAIN_DEN, a self-test voltage is added,
// and the result is clamped between CLAMP_LO_UV and CLAMP_HI_UV, as the
// fast switching diodes of the board do. On the fast board the input is
// the attenuated current-transformer voltage in microvolts and the gain is
// 1. On the slow board the input is the 4-20 mA loop current in nanoamperes
// and the 250 ohm burden resistor gives GAIN_NUM/GAIN_DEN = 250/1000
// (nA x ohm = nV, /1000 = uV). Output follows the input with no delay.
// Diode clamping and the 250 ohm resistor follow the system description;
// the clamp levels (one diode drop beyond 0 V and 5 V) are assumed.
`timescale 1ns/1ps
module signal_conditioning #(
  parameter int GAIN_NUM    = 1,
  parameter int GAIN_DEN    = 1,
  parameter int CLAMP_HI_UV = 5_600_000,
  parameter int CLAMP_LO_UV = -600_000
) (
  input  int vin,
  input  int test_uv,
  output int vout_uv
);
  always_comb begin
    longint v;
    v = longint'(vin) * longint'(GAIN_NUM) / longint'(GAIN_DEN) + longint'(test_uv);
    if (v > longint'(CLAMP_HI_UV))      vout_uv = CLAMP_HI_UV;
    else if (v < longint'(CLAMP_LO_UV)) vout_uv = CLAMP_LO_UV;
    else                      vout_uv = int'(v);
  end
endmodule
