// threshold_dac: behavioural model of the threshold-setting DAC (analog
// part) that turns the FPGA's threshold code into the comparator reference.
//
// vthr_uv = code x VREF_UV / 2^THR_W, with no settling delay. The system
// description only names a threshold-setting block; the 12-bit resolution
// and 5 V full scale are this design's assumptions.
`timescale 1ns/1ps
module threshold_dac #(
  parameter int unsigned THR_W   = 12,
  parameter int          VREF_UV = 5_000_000
) (
  input  logic [THR_W-1:0] code,
  output int               vthr_uv
);
  assign vthr_uv = int'((longint'(code) * VREF_UV) >>> THR_W);
endmodule
