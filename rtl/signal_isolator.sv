// signal_isolator: behavioural model of the slow board's signal isolation
// and conversion module (analog part): 0-100 mV shunt voltage in, 4-20 mA
// loop current out.
//
// iout_na = 4 mA + vin x 16 mA / 100 mV, with the input limited to
// 0..100 mV, delivered DELAY_NS after the input changes (a transport delay,
// 30 us being the bound on the module's response time in the system
// description). The linear transfer is assumed.
`timescale 1ns/1ps
module signal_isolator #(
  parameter int unsigned DELAY_NS = 30_000
) (
  input  int vin_uv,
  output int iout_na
);
  int target;
  always_comb begin
    int v;
    v = vin_uv;
    if (v < 0)       v = 0;
    if (v > 100_000) v = 100_000;
    target = 4_000_000 + v * 160;
  end
  initial iout_na = 4_000_000;
  always @(target) iout_na <= #(DELAY_NS) target;
endmodule
