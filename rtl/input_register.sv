// input_register: holds the 8-bit pulse-width control word for one TRNG step.
// On `load` (one cycle, issued by the step sequencer before each pulse) the
// word is captured; it then stays constant while the pulse is generated even
// if the calibration controller has already moved on. The register splits the
// word into the 5-bit coarse field (bits 7:3, units of 8 ns) and the 3-bit
// fine field (bits 2:0, units of 1 ns), as in the published block diagram.
// Timing: outputs change one clock after `load`. Reset clears the word; the
// load strobe and the reset value are this design's choice.
module input_register
  import trng_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  ctrl_word_t          cw_in,
  output logic [COARSE_W-1:0] coarse,
  output logic [FINE_W-1:0]   fine
);
  timeunit 1ns;
  timeprecision 1ps;

  ctrl_split_t q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '0;
    else if (load) q <= ctrl_split_t'(cw_in);
  end

  assign coarse = q.coarse;
  assign fine   = q.fine;
endmodule
