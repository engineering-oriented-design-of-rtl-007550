// trng_sequencer: runs the TRNG one step at a time.
//   LOAD  - capture the current control word in the input register (1 clock)
//   FIRE  - start the pulse generator (1 clock)
//   PULSE - wait while the coarse counter / latch are busy; the clock in
//           which busy is first seen low (8 ns after the latch fell) also
//           covers the fine tail of the pulse, at most 7 ns
//   READ  - assert read_en for READ_CYCLES clocks; the MTJ state sensed in
//           the last of them becomes the output bit (bit_valid for 1 clock)
//   RESET - assert mtj_reset for RESET_CYCLES clocks to return the MTJ to its
//           initial state, then start the next step while enable is high.
// The published design states only that the MTJ is written by a pulse and
// then read, bit 1 meaning it switched (low-resistance P state); the phase
// lengths and the reset phase are this design's choice. Every bit is kept:
// Downcalibration-2 discards nothing. A step lasts
// 1 + 1 + (N_coarse + 1) + READ_CYCLES + RESET_CYCLES clocks, where N_coarse
// is the coarse pulse length in clocks.
module trng_sequencer
  import trng_pkg::*;
#(
  parameter int READ_CYCLES  = 2,
  parameter int RESET_CYCLES = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enable,
  input  logic busy,
  input  logic mtj_bit,
  output logic cw_load,
  output logic fire,
  output logic read_en,
  output logic mtj_reset,
  output logic bit_valid,
  output logic bit_out
);
  timeunit 1ns;
  timeprecision 1ps;

  seq_state_t state;
  logic [7:0] cnt;

  always_comb begin
    cw_load   = (state == SEQ_LOAD);
    fire      = (state == SEQ_FIRE);
    read_en   = (state == SEQ_READ);
    mtj_reset = (state == SEQ_RESET);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= SEQ_IDLE;
      cnt       <= '0;
      bit_valid <= 1'b0;
      bit_out   <= 1'b0;
    end else begin
      bit_valid <= 1'b0;
      unique case (state)
        SEQ_IDLE:  if (enable) state <= SEQ_LOAD;
        SEQ_LOAD:  state <= SEQ_FIRE;
        SEQ_FIRE:  state <= SEQ_PULSE;
        SEQ_PULSE: begin
          cnt <= '0;
          if (!busy) state <= SEQ_READ;
        end
        SEQ_READ: begin
          if (cnt == 8'(READ_CYCLES - 1)) begin
            bit_valid <= 1'b1;
            bit_out   <= mtj_bit;
            state     <= SEQ_RESET;
            cnt       <= '0;
          end else begin
            cnt <= cnt + 8'd1;
          end
        end
        SEQ_RESET: begin
          if (cnt == 8'(RESET_CYCLES - 1)) state <= enable ? SEQ_LOAD : SEQ_IDLE;
          else                             cnt   <= cnt + 8'd1;
        end
        default: state <= SEQ_IDLE;
      endcase
    end
  end
endmodule
