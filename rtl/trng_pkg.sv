// trng_pkg: constants and types shared by the pulse-width MTJ TRNG.
// The control word is 8 bits: the upper 5 select the pulse width in whole
// 8 ns periods of the 125 MHz clock, the lower 3 add 0..7 ns through a
// DLL-locked delay chain (so the pulse is 0..255 ns in 1 ns steps). These
// widths follow the published design; the step-sequencer state encoding is
// this implementation's own.
package trng_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int CW_W     = 8;   // control word width
  localparam int COARSE_W = 5;   // coarse field, units of one clock period
  localparam int FINE_W   = 3;   // fine field, units of one delay tap
  localparam int NUM_TAPS = 8;   // delay-chain taps Tap0..Tap7

  typedef logic [CW_W-1:0] ctrl_word_t;

  // Control word as it is split by the input register: {coarse, fine}.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } ctrl_split_t;

  typedef enum logic [2:0] {
    SEQ_IDLE,
    SEQ_LOAD,
    SEQ_FIRE,
    SEQ_PULSE,
    SEQ_READ,
    SEQ_RESET
  } seq_state_t;
endpackage
