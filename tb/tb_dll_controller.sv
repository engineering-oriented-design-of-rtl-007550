// tb_dll_controller: checks the code steps once per 4 clocks in the
// direction of `up`, saturates at 0 and 63, and that `locked` rises at the
// first reversal of direction. A second part closes the loop around a
// behavioural delay chain plus phase detector and checks that the chain
// settles within one code step of 8 ns (element 300 + 20*code ps -> code 35).
module tb_dll_controller;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0, up = 0;
  logic [5:0] code;
  logic locked;
  int checks = 0, failures = 0;
  // closed loop
  logic rst2_n = 0, up2;
  logic [5:0] code2;
  logic locked2, fb;
  logic [7:0] taps_unused;

  dll_controller dut (.clk, .rst_n, .up, .code, .locked);
  always #4 clk = ~clk;

  delay_chain    u_rep (.din(clk), .delay_code(code2), .taps(taps_unused), .dout(fb));
  phase_detector u_pd  (.clk, .rst_n(rst2_n), .fb, .up(up2));
  dll_controller u_dll (.clk, .rst_n(rst2_n), .up(up2), .code(code2), .locked(locked2));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (code=%0d locked=%0b)", what, code, locked); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(code == 32 && !locked, "reset code");
    up = 1;
    repeat (4 * 10) @(negedge clk);
    chk(code == 42, "ten steps up");
    chk(!locked, "no lock without reversal");
    up = 0;
    repeat (4) @(negedge clk);
    chk(code == 41, "one step down");
    chk(locked, "lock after reversal");
    repeat (4 * 60) @(negedge clk);
    chk(code == 0, "saturate at 0");
    up = 1;
    repeat (4 * 70) @(negedge clk);
    chk(code == 63, "saturate at 63");
    // step timing: code changes only every 4th clock
    up = 0;
    c = int'(code);
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      if (int'(code) != c) begin
        chk(int'(code) == c - 1, "single step");
        c = int'(code);
      end
    end
    chk(int'(code) == 59, "4 steps in 16 clocks");

    // closed loop
    rst2_n = 1;
    repeat (400) @(negedge clk);
    chk(locked2, "closed loop locked");
    checks++;
    if (!(code2 >= 34 && code2 <= 36)) begin
      failures++; $display("FAIL closed-loop code %0d, expected 34..36", code2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
