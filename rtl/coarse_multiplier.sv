// coarse_multiplier: scales the 5-bit coarse field by the programmable step
// (the published diagram shows "Step (1)", i.e. one clock period per coarse
// LSB by default). Purely combinational, unsigned: p = a * b.
module coarse_multiplier #(
  parameter int A_W = 5,
  parameter int B_W = 4
) (
  input  logic [A_W-1:0]     a,
  input  logic [B_W-1:0]     b,
  output logic [A_W+B_W-1:0] p
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb p = (A_W+B_W)'(a) * (A_W+B_W)'(b);
endmodule
