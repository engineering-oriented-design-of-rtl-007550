// coarse_counter: counts 125 MHz clock periods from the start of a pulse.
// `start` loads count = 1 and sets `running`; every following clock adds one
// until `stop` (the comparator match) clears `running`. So in the cycle after
// the k-th clock edge following start, count = k. The counter sits between
// the clock manager and the comparator in the published diagram; its exact
// encoding is this design's choice.
module coarse_counter #(
  parameter int CNT_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             stop,
  output logic [CNT_W-1:0] count,
  output logic             running
);
  timeunit 1ns;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count   <= '0;
      running <= 1'b0;
    end else if (start) begin
      count   <= CNT_W'(1);
      running <= 1'b1;
    end else if (stop) begin
      running <= 1'b0;
    end else if (running) begin
      count   <= count + CNT_W'(1);
    end
  end
endmodule
