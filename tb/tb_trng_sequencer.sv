// tb_trng_sequencer: emulates the pulse generator (busy for N clocks after
// fire) and the MTJ (random sensed bit), and checks the phase order
// LOAD, FIRE, PULSE (N busy clocks + 1), READ x2, RESET x4, that bit_valid carries the bit
// sensed in the last read clock, and the step length 1+1+N+1+2+4 clocks.
module tb_trng_sequencer;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0, enable = 0, busy, mtj_bit = 0;
  logic cw_load, fire, read_en, mtj_reset, bit_valid, bit_out;
  int checks = 0, failures = 0;
  int busy_left = 0;
  int cyc = 0;

  trng_sequencer dut (.*);
  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // pulse generator stand-in: busy N clocks from the clock after fire
  int n_coarse = 3;
  always @(posedge clk) begin
    if (fire) busy_left <= n_coarse;
    else if (busy_left > 0) busy_left <= busy_left - 1;
  end
  assign busy = (busy_left > 0);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_load, t_prev, expect_bit;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (3) @(negedge clk);
    chk(!cw_load && !fire && !read_en && !mtj_reset, "idle while disabled");
    enable = 1;
    t_prev = -1;
    for (int s = 0; s < 40; s++) begin
      n_coarse = (s % 5) * 3 + 1;
      while (!cw_load) @(negedge clk);
      t_load = cyc;
      if (t_prev >= 0) chk(t_load - t_prev == 1 + 1 + ((s - 1) % 5) * 3 + 1 + 1 + 2 + 4, "step length");
      t_prev = t_load;
      @(negedge clk); chk(fire && !cw_load, "fire after load");
      @(negedge clk); chk(!fire, "fire one clock");
      for (int k = 0; k < n_coarse; k++) begin
        chk(busy && !read_en, "no read during pulse");
        @(negedge clk);
      end
      chk(!read_en, "tail clock after busy");
      @(negedge clk); chk(read_en, "read 1");
      @(negedge clk); chk(read_en, "read 2");
      mtj_bit = 1'($urandom);
      expect_bit = mtj_bit;
      @(posedge clk); #1;
      chk(bit_valid && bit_out == expect_bit[0], "bit strobe");
      for (int k = 0; k < 4; k++) begin
        chk(mtj_reset && !read_en, "reset phase");
        @(negedge clk);
        if (k == 1) chk(!bit_valid, "bit strobe one clock");
      end
      if (s == 39) enable = 0;
    end
    repeat (20) @(negedge clk);
    chk(!cw_load && !fire, "stops when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
