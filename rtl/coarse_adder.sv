// coarse_adder: adds the programmable bias (the published diagram shows
// "Bias (0)") to the scaled coarse count, giving the number of 8 ns clock
// periods the coarse pulse lasts. Combinational, unsigned, one carry bit.
module coarse_adder #(
  parameter int A_W = 9,
  parameter int B_W = 5
) (
  input  logic [A_W-1:0] a,
  input  logic [B_W-1:0] b,
  output logic [A_W:0]   s
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb s = (A_W+1)'(a) + (A_W+1)'(b);
endmodule
