// dll_controller: digital loop of the delay-locked loop. Every UPDATE_CYCLES
// reference clocks it steps the delay code of the delay chains one LSB up or
// down according to the phase detector, saturating at 0 and at the maximum
// code. The waiting time lets a code change reach the detector output (chain
// plus two flops) before the next decision. `locked` rises at the first
// reversal of direction, i.e. once the loop dithers around the point where
// eight element delays equal one 8 ns period (1 ns per tap), and stays high
// until reset. The published design names a DLL driven by the 125 MHz clock
// and the phase detector; the counter loop, its rate and the lock rule are
// this design's choice.
module dll_controller #(
  parameter int CODE_W        = 6,
  parameter int CODE_INIT     = 32,
  parameter int UPDATE_CYCLES = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              up,
  output logic [CODE_W-1:0] code,
  output logic              locked
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int TW = (UPDATE_CYCLES > 1) ? $clog2(UPDATE_CYCLES) : 1;
  localparam logic [CODE_W-1:0] CODE_MAX = '1;

  logic [TW-1:0] tick;
  logic          last_up;
  logic          have_last;
  logic          do_update;

  always_comb do_update = (tick == TW'(UPDATE_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick      <= '0;
      code      <= CODE_W'(CODE_INIT);
      locked    <= 1'b0;
      last_up   <= 1'b0;
      have_last <= 1'b0;
    end else begin
      tick <= do_update ? '0 : tick + TW'(1);
      if (do_update) begin
        if (up && code != CODE_MAX)  code <= code + CODE_W'(1);
        else if (!up && code != '0)  code <= code - CODE_W'(1);
        if (have_last && (last_up != up)) locked <= 1'b1;
        last_up   <= up;
        have_last <= 1'b1;
      end
    end
  end
endmodule
