// tb_dcal_controller: drives random bits into the Downcalibration-2 loop for
// targets P0 = 128/256, 51/256 and 205/256 and compares the control word with
// an independent model: every 2nd bit, value -= (1-P0)*2 ns on a 1 or
// += P0*2 ns on a 0 (kept in 1/256 ns, truncated), applied word = value
// rounded to whole ns. Also checks init_load, saturation at 0 and 255, that
// no update happens on the 1st bit of a pair, and cal_evt / cal_dir.
module tb_dcal_controller;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0, init_load = 0, bit_valid = 0, bit_in = 0;
  logic [7:0] init_word = '0, target_p0 = 8'd128, ctrl_word;
  logic cal_evt, cal_dir;
  int checks = 0, failures = 0;
  int model, nb, nevt;

  dcal_controller dut (.*);
  always #4 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (word=%0d model=%0d)", what, ctrl_word, model); end
  endtask

  function automatic int rnd(int v);
    int r = (v + 128) / 256;
    return (r > 255) ? 255 : r;
  endfunction

  task automatic send(bit b);
    bit_in = b; bit_valid = 1;
    @(negedge clk);
    bit_valid = 0;
    nb++;
    if (nb % 2 == 0) begin
      chk(cal_evt && cal_dir == !b, "cal_evt/cal_dir on 2nd bit");
      if (b) model = model - ((256 - int'(target_p0)) * 512) / 256;
      else   model = model + (int'(target_p0) * 512) / 256;
      if (model < 0) model = 0;
      if (model > 65535) model = 65535;
      nevt++;
    end else begin
      chk(!cal_evt, "no calibration on 1st bit");
    end
    chk(int'(ctrl_word) == rnd(model), $sformatf("word after bit %0d", nb));
    repeat ($urandom_range(2)) @(negedge clk);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p0s [3] = '{128, 51, 205};
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(ctrl_word == 128, "reset word");
    foreach (p0s[i]) begin
      target_p0 = 8'(p0s[i]);
      init_word = 8'($urandom_range(30, 220));
      init_load = 1; @(negedge clk); init_load = 0;
      model = int'(init_word) * 256; nb = 0;
      chk(int'(ctrl_word) == int'(init_word), "init_load");
      for (int k = 0; k < 600; k++) send(($urandom_range(255) < 128));
    end
    // saturation
    target_p0 = 8'd128;
    init_word = 8'd2; init_load = 1; @(negedge clk); init_load = 0;
    model = 512; nb = 0;
    for (int k = 0; k < 12; k++) send(1'b1);
    chk(ctrl_word == 0, "saturate low");
    init_word = 8'd253; init_load = 1; @(negedge clk); init_load = 0;
    model = 253 * 256; nb = 0;
    for (int k = 0; k < 12; k++) send(1'b0);
    chk(ctrl_word == 255, "saturate high");
    chk(nevt > 900, "calibration events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
