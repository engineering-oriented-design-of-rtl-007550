// tb_mtj_trng_top: end-to-end run of the whole TRNG at its default
// parameters, with the MTJ behavioural model closing the loop.
// Phases: (1) DLL lock, (2) P0 = 0.5 from start word 200, which must reach
// the transition region (< 90 ns) within 400 steps,
// (3) P0 = 51/256 and (4) 205/256 from random start words, (5) P0 = 0.5
// through a temperature profile of a linear ramp 20->30 C, a 20..30 C
// sinusoid (3 periods) and jumps to 40 C and 15 C, as in the published
// drift study but shortened. Checked on the fly, independently of the RTL:
// every write pulse is 8*(word>>3)+(word&7) ns wide (+-0.2 ns: the DLL dithers by one 20 ps code step,
// up to 7 x 20 ps on the widest fine setting) for the word
// in force, the step length is 9 + N_coarse clocks, the word only moves after
// every 2nd bit and in the direction set by that bit, and the output
// probability of each phase is within 0.04 of its target (0.05 under drift).
// Counted mechanisms (each must occur): DLL lock, upward and downward
// calibrations, pulses with and without a fine part, target changes.
module tb_mtj_trng_top;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 0, rst_n = 0, enable = 0, init_load = 0;
  logic [7:0] target_p0 = 8'd128, init_word = 8'd200;
  logic [3:0] coarse_step = 4'd1;
  logic [4:0] coarse_bias = 5'd0;
  logic mtj_bit, pulse_out, mtj_read_en, mtj_reset, rnd_valid, rnd_bit;
  logic [7:0] ctrl_word;
  logic cal_evt, cal_dir, dll_locked;
  logic [5:0] dll_code;
  real temp_c = 25.0;

  int checks = 0, failures = 0;
  int n_cal_up = 0, n_cal_dn = 0, n_fine = 0, n_nofine = 0, n_target = 0, n_lock = 0;
  longint cyc = 0;

  mtj_trng_top dut (.*);
  mtj_model    u_mtj (.pulse(pulse_out), .mtj_reset, .temp_c, .mtj_bit);

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $realtime);
    end
  endtask

  // ---- pulse-width monitor -----------------------------------------------
  realtime t_rise;
  logic [7:0] w_word;
  bit check_width = 0;
  always @(posedge pulse_out) begin
    t_rise = $realtime;
    w_word = ctrl_word;
  end
  always @(negedge pulse_out) if (check_width) begin
    real want, got;
    want = real'(w_word);
    got  = $realtime - t_rise;
    chk(got > want - 0.2 && got < want + 0.2, $sformatf("pulse %0.3f ns for word %0d", got, w_word));
    if (w_word[2:0] != 0) n_fine++; else n_nofine++;
  end

  // ---- step length, calibration cadence ------------------------------------
  longint last_valid = -1;
  int bits_since_init = 0;
  logic [7:0] word_at_bit;
  logic last_bit;
  always @(posedge clk) begin
    if (init_load) bits_since_init <= 0;
    if (rnd_valid && enable) begin
      if (last_valid >= 0 && check_width)
        chk(cyc - last_valid == 64'(9 + int'(w_word[7:3])), $sformatf("step length %0d", cyc - last_valid));
      last_valid  <= cyc;
      bits_since_init <= bits_since_init + 1;
      word_at_bit <= ctrl_word;
      last_bit    <= rnd_bit;
    end
    if (cal_evt) begin
      chk((bits_since_init % 2) == 0, "calibration only after every 2nd bit");
      chk(cal_dir == !last_bit, "direction follows most recent bit");
      if (cal_dir) n_cal_up++; else n_cal_dn++;
    end
  end

  // ---- helpers -------------------------------------------------------------
  task automatic run_steps(int n, output int ones);
    ones = 0;
    repeat (n) begin
      @(posedge clk iff rnd_valid);
      ones += int'(rnd_bit);
    end
  endtask

  task automatic start_target(logic [7:0] p0, logic [7:0] w0);
    @(negedge clk);
    target_p0 = p0;
    init_word = w0;
    init_load = 1;
    @(negedge clk);
    init_load = 0;
    n_target++;
  endtask

  task automatic phase(string name, logic [7:0] p0, int settle, int n, real tol);
    int ones;
    real frac;
    run_steps(settle, ones);
    run_steps(n, ones);
    frac = real'(ones) / real'(n);
    $display("phase %s: P0=%0.3f measured %0.4f over %0d bits, word %0d", name, real'(p0) / 256.0, frac, n, ctrl_word);
    chk(frac > real'(p0) / 256.0 - tol && frac < real'(p0) / 256.0 + tol, {"probability in ", name});
  endtask

  initial begin
    wait (cyc == 64'd3_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // (1) DLL lock before enabling the generator
    fork
      begin wait (dll_locked); n_lock++; end
      begin repeat (2000) @(posedge clk); end
    join_any
    disable fork;
    chk(dll_locked, "DLL locked");
    repeat (200) @(posedge clk);
    chk(dll_code >= 34 && dll_code <= 36, $sformatf("DLL code %0d (expect 35)", dll_code));
    check_width = 1;

    // (2) P0 = 0.5 from an arbitrary start word
    start_target(8'd128, 8'd200);
    @(negedge clk) enable = 1;
    // convergence time from word 200: the width must fall into the
    // transition region (< 90 ns) within a few hundred steps
    begin
      int nconv, ones;
      nconv = 0;
      while (ctrl_word >= 90 && nconv < 1000) begin
        run_steps(1, ones);
        nconv++;
      end
      $display("converged from word 200 to %0d in %0d steps", ctrl_word, nconv);
      chk(nconv < 400, "convergence within a few hundred steps");
    end
    phase("P0=0.5", 8'd128, 800, 4000, 0.04);
    chk(ctrl_word > 60 && ctrl_word < 90, "word settled near the 50% width");

    // (3), (4) biased targets from random start words
    start_target(8'd51, 8'($urandom_range(20, 235)));
    phase("P0=0.2", 8'd51, 800, 4000, 0.04);
    start_target(8'd205, 8'($urandom_range(20, 235)));
    phase("P0=0.8", 8'd205, 800, 4000, 0.04);

    // (5) temperature drift at P0 = 0.5
    start_target(8'd128, 8'($urandom_range(20, 235)));
    begin
      int ones, tot;
      run_steps(800, ones);
      tot = 0;
      for (int i = 0; i < 4000; i++) begin       // linear 20 -> 30 C
        temp_c = 20.0 + 10.0 * real'(i) / 4000.0;
        run_steps(1, ones); tot += ones;
      end
      $display("phase linear drift: measured %0.4f, word %0d", real'(tot) / 4000.0, ctrl_word);
      chk(real'(tot) / 4000.0 > 0.45 && real'(tot) / 4000.0 < 0.55, "probability under linear drift");
      chk(ctrl_word > 74 && ctrl_word < 94, "word tracked the ramp (C(30 C) = 83.5 ns)");
      tot = 0;
      for (int i = 0; i < 6000; i++) begin       // periodic, 3 periods
        temp_c = 25.0 + 5.0 * $sin(2.0 * 3.14159265 * 3.0 * real'(i) / 6000.0);
        run_steps(1, ones); tot += ones;
      end
      $display("phase periodic drift: measured %0.4f, word %0d", real'(tot) / 6000.0, ctrl_word);
      chk(real'(tot) / 6000.0 > 0.45 && real'(tot) / 6000.0 < 0.55, "probability under periodic drift");
      tot = 0;
      for (int i = 0; i < 4000; i++) begin       // abrupt: 40 C, back, 15 C, back
        temp_c = (i >= 500 && i < 1500) ? 40.0 : (i >= 2500 && i < 3500) ? 15.0 : 25.0;
        run_steps(1, ones); tot += ones;
      end
      $display("phase abrupt drift: measured %0.4f, word %0d", real'(tot) / 4000.0, ctrl_word);
      chk(real'(tot) / 4000.0 > 0.45 && real'(tot) / 4000.0 < 0.55, "probability under abrupt changes");
    end

    $display("mechanisms: dll_lock=%0d cal_up=%0d cal_down=%0d fine_pulses=%0d coarse_only_pulses=%0d target_changes=%0d",
             n_lock, n_cal_up, n_cal_dn, n_fine, n_nofine, n_target);
    chk(n_lock > 0, "mechanism: DLL lock");
    chk(n_cal_up > 0, "mechanism: upward calibration");
    chk(n_cal_dn > 0, "mechanism: downward calibration");
    chk(n_fine > 0, "mechanism: pulse with fine delay");
    chk(n_nofine > 0, "mechanism: pulse without fine delay");
    chk(n_target > 1, "mechanism: target change");
    $display("simulated %0d clocks", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
