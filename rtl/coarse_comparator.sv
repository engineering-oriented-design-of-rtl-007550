// coarse_comparator: decides the two edges of the coarse pulse.
// set_o   = start and a non-zero target: the SR latch rises on this edge.
// reset_o = the running count has reached the target: the latch falls on this
//           edge, target clock periods after it rose.
// A zero target never sets the latch, so a coarse field of 0 gives a 0 ns
// coarse part (the published diagram labels the coarse range 0-248 ns); the
// ">=" then stops the counter in the first cycle.
// Combinational.
module coarse_comparator #(
  parameter int CNT_W = 10
) (
  input  logic             start,
  input  logic             running,
  input  logic [CNT_W-1:0] count,
  input  logic [CNT_W-1:0] target,
  output logic             set_o,
  output logic             reset_o
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb begin
    set_o   = start && (target != '0);
    reset_o = running && (count >= target);
  end
endmodule
