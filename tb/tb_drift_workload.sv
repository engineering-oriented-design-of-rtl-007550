// tb_drift_workload: the temperature-drift workload at one tenth of the
// published length: three segments of SEG_STEPS = 100,000 steps each (the
// published run uses 1,000,000 per segment) with the generator at its
// default parameters, P0 = 0.5 and the MTJ behavioural model.
//   segment 1 (linear):   25 C, then a ramp from 20 C to 30 C over the
//                         middle 60% of the segment, then 25 C
//   segment 2 (periodic): 25 C, then three sine periods of +-5 C over the
//                         middle 60%, then 25 C
//   segment 3 (abrupt):   25 C with a 3%-long jump to 40 C and a 3%-long
//                         drop to 15 C
// The segment shapes follow the published description (linear drift,
// periodic oscillation, sudden jump, 10..40 C); where the edges sit inside a
// segment is this test's choice. For every segment the bit mean must be
// within 0.02 of 0.5, and at most 3% of the non-overlapping 1000-bit windows
// (the published rolling window) may deviate from 0.5 by more than 0.08.
// The lag-1 autocorrelation of each segment must stay within +-0.015 (about
// five standard errors for 100,000 bits): calibrating every 2nd bit should
// leave no bit-to-bit correlation. (With CAL_N = 1, correction after every
// bit, the same run gives about -0.04.)
// For comparison it also reports how many windows a fixed 75 ns pulse (the
// 50% width at 25 C, no feedback) would push off by more than 0.08, from the
// same model's expected probabilities.
module tb_drift_workload;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int SEG_STEPS = 100_000;

  logic clk = 0, rst_n = 0, enable = 0, init_load = 0;
  logic [7:0] target_p0 = 8'd128, init_word = 8'd180;
  logic [3:0] coarse_step = 4'd1;
  logic [4:0] coarse_bias = 5'd0;
  logic mtj_bit, pulse_out, mtj_read_en, mtj_reset, rnd_valid, rnd_bit;
  logic [7:0] ctrl_word;
  logic cal_evt, cal_dir, dll_locked;
  logic [5:0] dll_code;
  real temp_c = 25.0;
  int checks = 0, failures = 0;
  longint cyc = 0;

  mtj_trng_top dut (.*);
  mtj_model    u_mtj (.pulse(pulse_out), .mtj_reset, .temp_c, .mtj_bit);

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real profile(int seg, int i);
    real x = real'(i) / real'(SEG_STEPS);
    case (seg)
      0: return (x >= 0.2 && x < 0.8) ? 20.0 + 10.0 * (x - 0.2) / 0.6 : 25.0;
      1: return (x >= 0.2 && x < 0.8) ? 25.0 + 5.0 * $sin(2.0 * 3.14159265 * 3.0 * (x - 0.2) / 0.6) : 25.0;
      default: return (x >= 0.30 && x < 0.33) ? 40.0 : (x >= 0.65 && x < 0.68) ? 15.0 : 25.0;
    endcase
  endfunction

  initial begin
    wait (cyc == 64'd20_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string names [3] = '{"linear", "periodic", "abrupt"};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (dll_locked);
    repeat (100) @(posedge clk);
    @(negedge clk) init_load = 1;
    @(negedge clk) begin init_load = 0; enable = 1; end
    for (int seg = 0; seg < 3; seg++) begin
      int ones, win, bad, nwin, fixed_bad;
      real fixed_win, sxy, r1, m;
      bit prev;
      longint pairs11;
      ones = 0; win = 0; bad = 0; nwin = 0; fixed_bad = 0; fixed_win = 0.0;
      pairs11 = 0; prev = 0;
      for (int i = 0; i < SEG_STEPS; i++) begin
        temp_c = profile(seg, i);
        fixed_win += 1.0 / (1.0 + $exp(-0.16 * (75.0 - (75.0 + 1.7 * (temp_c - 25.0)))));
        @(posedge clk iff rnd_valid);
        ones += int'(rnd_bit);
        win  += int'(rnd_bit);
        if (i > 0 && prev && rnd_bit) pairs11++;
        prev = rnd_bit;
        if (i % 1000 == 999) begin
          nwin++;
          if (win < 420 || win > 580) bad++;
          if (fixed_win < 420.0 || fixed_win > 580.0) fixed_bad++;
          win = 0;
          fixed_win = 0.0;
        end
      end
      $display("segment %s: mean %0.4f, windows off by >0.08: %0d of %0d (a fixed 75 ns pulse: %0d of %0d)",
               names[seg], real'(ones) / real'(SEG_STEPS), bad, nwin, fixed_bad, nwin);
      // lag-1 autocorrelation of the bit stream
      m   = real'(ones) / real'(SEG_STEPS);
      sxy = real'(pairs11) / real'(SEG_STEPS - 1);
      r1  = (sxy - m * m) / (m * (1.0 - m));
      $display("segment %s: lag-1 autocorrelation %0.4f", names[seg], r1);
      checks++;
      if (r1 < -0.015 || r1 > 0.015) begin
        failures++; $display("FAIL segment %s lag-1 autocorrelation", names[seg]);
      end
      checks++;
      if (real'(ones) / real'(SEG_STEPS) < 0.48 || real'(ones) / real'(SEG_STEPS) > 0.52) begin
        failures++; $display("FAIL segment %s mean", names[seg]);
      end
      checks++;
      if (bad * 100 > nwin * 3) begin
        failures++; $display("FAIL segment %s rolling windows", names[seg]);
      end
    end
    $display("simulated %0d clocks", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
