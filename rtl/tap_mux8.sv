// tap_mux8: the 8:1 multiplexer of the fine path. Select[2:0] (the low three
// bits of the control word) picks tap k of the delay chain, i.e. the input
// delayed by k ns. Combinational.
module tap_mux8
  import trng_pkg::*;
(
  input  logic [NUM_TAPS-1:0] taps,
  input  logic [FINE_W-1:0]   sel,
  output logic                y
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb y = taps[sel];
endmodule
