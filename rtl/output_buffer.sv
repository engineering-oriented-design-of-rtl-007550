// output_buffer: forms the write pulse sent to the MTJ. The coarse level from
// the SR latch rises at the pulse start and falls after N x 8 ns; its copy
// through the selected delay tap falls k ns later. Their OR therefore rises
// with the latch and falls k ns after it: width = 8*N + k ns. How the fine
// delay lengthens the pulse is not spelled out in the published design; the
// OR is this design's choice. The analog drive stage itself (voltage level,
// strength) is outside this logic. Combinational.
module output_buffer (
  input  logic coarse_level,
  input  logic fine_level,
  output logic pulse
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb pulse = coarse_level | fine_level;
endmodule
