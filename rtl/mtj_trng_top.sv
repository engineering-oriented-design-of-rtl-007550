// mtj_trng_top: drift-resilient MTJ true random number generator with
// pulse-width control and Downcalibration-2 self-stabilisation.
// Each step the MTJ receives one write pulse whose width (0..255 ns, 1 ns
// steps) is set by an 8-bit control word; whether the MTJ switched is read
// back as the random bit. The width sets the switching probability through
// the MTJ's sigmoid response, and the Downcalibration-2 controller nudges the
// word after every second bit so that the probability tracks the target P0
// despite temperature or ageing drift, with no sensor and no discarded bits.
// Pulse generator (published block diagram): input register -> coarse field
// x Step + Bias -> coarse counter -> comparator -> SR latch gives N x 8 ns
// on the 125 MHz clock; the latch level runs through an 8-tap delay chain
// whose 8:1 mux (fine field) adds 0..7 ns to the falling edge. A DLL (phase
// detector + up/down counter on a replica chain) keeps the taps at 1 ns.
// The clock manager and the MTJ with its sense circuit are outside this
// module: clk is the managed 125 MHz clock, and pulse_out, mtj_read_en,
// mtj_reset and mtj_bit connect to the MTJ. coarse_step / coarse_bias are 1
// and 0 in the published design. The replica chain, the step sequencer and
// the OR that forms the pulse are this design's own.
module mtj_trng_top
  import trng_pkg::*;
#(
  parameter int CAL_N        = 2,
  parameter int DELTA_Q      = 512,
  parameter int READ_CYCLES  = 2,
  parameter int RESET_CYCLES = 4,
  parameter int OFFSET_PS    = 300,
  parameter int STEP_PS      = 20
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable,
  input  logic [7:0]          target_p0,
  input  logic [3:0]          coarse_step,
  input  logic [4:0]          coarse_bias,
  input  logic                init_load,
  input  ctrl_word_t          init_word,
  input  logic                mtj_bit,
  output logic                pulse_out,
  output logic                mtj_read_en,
  output logic                mtj_reset,
  output logic                rnd_valid,
  output logic                rnd_bit,
  output ctrl_word_t          ctrl_word,
  output logic                cal_evt,
  output logic                cal_dir,
  output logic                dll_locked,
  output logic [5:0]          dll_code
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int CNT_W = 10;

  logic                cw_load, fire;
  logic [COARSE_W-1:0] coarse;
  logic [FINE_W-1:0]   fine;
  logic [8:0]          scaled;
  logic [9:0]          target;
  logic [CNT_W-1:0]    count;
  logic                running, set_s, reset_s, latch_q;
  logic [NUM_TAPS-1:0] taps, ref_taps;
  logic                fine_q, ref_end, pd_up;

  // ---- step control and feedback ------------------------------------------
  trng_sequencer #(.READ_CYCLES(READ_CYCLES), .RESET_CYCLES(RESET_CYCLES)) u_seq (
    .clk, .rst_n, .enable, .busy(running | latch_q), .mtj_bit,
    .cw_load, .fire, .read_en(mtj_read_en), .mtj_reset,
    .bit_valid(rnd_valid), .bit_out(rnd_bit)
  );

  dcal_controller #(.CAL_N(CAL_N), .DELTA_Q(DELTA_Q)) u_dcal (
    .clk, .rst_n, .init_load, .init_word, .target_p0,
    .bit_valid(rnd_valid), .bit_in(rnd_bit),
    .ctrl_word, .cal_evt, .cal_dir
  );

  // ---- coarse path: N x 8 ns ------------------------------------------------
  input_register u_inreg (.clk, .rst_n, .load(cw_load), .cw_in(ctrl_word), .coarse, .fine);

  coarse_multiplier #(.A_W(COARSE_W), .B_W(4)) u_mul (.a(coarse), .b(coarse_step), .p(scaled));
  coarse_adder      #(.A_W(9), .B_W(5))        u_add (.a(scaled), .b(coarse_bias), .s(target));

  coarse_counter    #(.CNT_W(CNT_W)) u_cnt (.clk, .rst_n, .start(fire), .stop(reset_s), .count, .running);
  coarse_comparator #(.CNT_W(CNT_W)) u_cmp (.start(fire), .running, .count, .target,
                                            .set_o(set_s), .reset_o(reset_s));
  sr_latch u_latch (.clk, .rst_n, .s(set_s), .r(reset_s), .q(latch_q));

  // ---- fine path: 0..7 ns on the falling edge ------------------------------
  delay_chain #(.OFFSET_PS(OFFSET_PS), .STEP_PS(STEP_PS)) u_chain (
    .din(latch_q), .delay_code(dll_code), .taps, .dout()
  );
  tap_mux8 u_mux (.taps, .sel(fine), .y(fine_q));
  output_buffer u_obuf (.coarse_level(latch_q), .fine_level(fine_q), .pulse(pulse_out));

  // ---- DLL: replica chain locked to one clock period -----------------------
  delay_chain #(.OFFSET_PS(OFFSET_PS), .STEP_PS(STEP_PS)) u_replica (
    .din(clk), .delay_code(dll_code), .taps(ref_taps), .dout(ref_end)
  );
  phase_detector u_pd  (.clk, .rst_n, .fb(ref_end), .up(pd_up));
  dll_controller #(.CODE_W(6)) u_dll (.clk, .rst_n, .up(pd_up), .code(dll_code), .locked(dll_locked));

  // The input register must not change while a pulse is in flight.
  a_no_load_in_pulse: assert property (@(posedge clk) disable iff (!rst_n)
                                       cw_load |-> !(running || latch_q));
endmodule
