// sr_latch: holds the coarse pulse level. Built as a clocked set/reset
// flip-flop, reset dominant, so that both coarse edges fall exactly on 125 MHz
// clock edges; the published diagram names an "SR Latch" without saying
// whether it is level-sensitive, and the clocked form is this design's choice.
// Timing: q follows s / r one clock edge later.
module sr_latch (
  input  logic clk,
  input  logic rst_n,
  input  logic s,
  input  logic r,
  output logic q
);
  timeunit 1ns;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= 1'b0;
    else if (r)  q <= 1'b0;
    else if (s)  q <= 1'b1;
  end
endmodule
