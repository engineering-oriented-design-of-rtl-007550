// phase_detector: bang-bang phase detector of the DLL. On each rising edge of
// the 125 MHz reference it samples the clock delayed by the whole replica
// delay chain. If the chain is slightly shorter than one period the delayed
// clock is still high just after its own previous rising edge, so the sample
// is 1 ("up": lengthen the chain); if slightly longer, it is still low (0,
// shorten). Valid while the chain delay lies between half and one and a half
// periods. A second flop resynchronises the sample because it is taken close
// to an edge once locked. The published design names a "Phase Det" feeding the
// DLL; this circuit is this design's choice. Latency: two reference clocks.
module phase_detector (
  input  logic clk,
  input  logic rst_n,
  input  logic fb,
  output logic up
);
  timeunit 1ns;
  timeprecision 1ps;

  logic s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= 1'b0;
      up <= 1'b0;
    end else begin
      s1 <= fb;
      up <= s1;
    end
  end
endmodule
