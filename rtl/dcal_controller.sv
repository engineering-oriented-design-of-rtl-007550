// dcal_controller: Downcalibration-N self-stabilising feedback (N = 2 by
// default) acting on the pulse width.
// The published rule, first stated for the write voltage, is: after an output
// bit 1 lower the control value by (1-P0)*dW, after a 0 raise it by P0*dW,
// where P0 is the target switching probability. Downcalibration-N applies it
// only once every N output bits, using the most recent bit, and keeps all
// bits; N = 2 is the setting the published study found to remove the
// bit-to-bit correlation of calibrating after every bit. Here the control
// value is the pulse width in ns, held with FRAC_W fraction bits; the word
// actually applied, ctrl_word, is that value rounded to the nearest whole ns
// (the pulse generator has 1 ns resolution). Keeping the fraction, the step
// size dW = DELTA_Q / 2^FRAC_W ns (2 ns by default), the 8-bit encoding of P0
// (target_p0 / 256) and saturation at 0 and 255 ns are this design's choices.
// Interface: one bit_valid strobe per output bit; init_load sets the value to
// init_word (e.g. an arbitrary start point). Timing: ctrl_word changes the
// clock after the bit_valid that completes a group of N; cal_evt marks that
// clock and cal_dir gives the direction (1 = wider pulse).
module dcal_controller
  import trng_pkg::*;
#(
  parameter int CAL_N     = 2,
  parameter int P_W       = 8,
  parameter int FRAC_W    = 8,
  parameter int DELTA_Q   = 512,
  parameter int INIT_WORD = 128
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           init_load,
  input  ctrl_word_t     init_word,
  input  logic [P_W-1:0] target_p0,
  input  logic           bit_valid,
  input  logic           bit_in,
  output ctrl_word_t     ctrl_word,
  output logic           cal_evt,
  output logic           cal_dir
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int AW = CW_W + FRAC_W;
  localparam int NW = (CAL_N > 1) ? $clog2(CAL_N) : 1;
  localparam logic [AW-1:0] ACC_MAX = '1;

  logic [AW-1:0] acc;
  logic [NW-1:0] nbits;
  logic [AW:0]   inc, dec;    // P0*dW and (1-P0)*dW in 1/2^FRAC_W ns
  logic [AW:0]   rounded;

  always_comb begin
    inc = (AW+1)'((longint'(target_p0) * longint'(DELTA_Q)) >>> P_W);
    dec = (AW+1)'(((longint'(1) << P_W) - longint'(target_p0)) * longint'(DELTA_Q) >>> P_W);
    rounded = ({1'b0, acc} + (AW+1)'(1 << (FRAC_W - 1))) >> FRAC_W;
    ctrl_word = (rounded > (AW+1)'(255)) ? ctrl_word_t'(255) : ctrl_word_t'(rounded);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= AW'(INIT_WORD) << FRAC_W;
      nbits   <= '0;
      cal_evt <= 1'b0;
      cal_dir <= 1'b0;
    end else begin
      cal_evt <= 1'b0;
      if (init_load) begin
        acc   <= AW'(init_word) << FRAC_W;
        nbits <= '0;
      end else if (bit_valid) begin
        if (nbits == NW'(CAL_N - 1)) begin
          nbits   <= '0;
          cal_evt <= 1'b1;
          cal_dir <= ~bit_in;
          if (bit_in) acc <= ({1'b0, acc} < dec) ? '0 : AW'({1'b0, acc} - dec);
          else        acc <= ({1'b0, acc} + inc > {1'b0, ACC_MAX}) ? ACC_MAX : AW'({1'b0, acc} + inc);
        end else begin
          nbits <= nbits + NW'(1);
        end
      end
    end
  end
endmodule
