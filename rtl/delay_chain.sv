// delay_chain: BEHAVIOURAL MODEL of the analog delay line of the fine path
// (not synthesizable logic). Eight elements D0..D7 in series; tap k is the
// input delayed by k element delays, so Tap0 is the input itself and, with the
// DLL locked, Tap0..Tap7 are 0..7 ns as in the published tap diagram. `dout`
// is the end of the chain (8 element delays), which the DLL compares with one
// 8 ns clock period when the module is used as the replica line.
// Element delay = OFFSET_PS + delay_code * STEP_PS picoseconds; the offset
// stands for the intrinsic delay of an element at the current process,
// voltage and temperature, and the linear code law is this model's own.
// Every input edge is propagated; an element delay must stay below the
// shortest interval between input edges (the 4 ns half period of the clock
// for the replica line), since the simulator drops an edge that is still
// pending when the next one is scheduled.
module delay_chain #(
  parameter int NUM_TAPS  = 8,
  parameter int CODE_W    = 6,
  parameter int OFFSET_PS = 300,
  parameter int STEP_PS   = 20
) (
  input  logic                din,
  input  logic [CODE_W-1:0]   delay_code,
  output logic [NUM_TAPS-1:0] taps,
  output logic                dout
);
  timeunit 1ps;
  timeprecision 1ps;

  int unsigned unit_delay;   // element delay in ps
  logic [NUM_TAPS:0] node;

  always_comb unit_delay = OFFSET_PS + int'(delay_code) * STEP_PS;

  assign node[0] = din;

  for (genvar k = 0; k < NUM_TAPS; k++) begin : g_elem
    // propagate once at start-up, then on every change of the element input
    always begin
      node[k+1] <= #(unit_delay) node[k];
      @(node[k]);
    end
  end

  assign taps = node[NUM_TAPS-1:0];
  assign dout = node[NUM_TAPS];
endmodule
