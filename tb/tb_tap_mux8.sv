// tb_tap_mux8: every select value with random tap patterns.
module tb_tap_mux8;
  timeunit 1ns;
  timeprecision 1ps;
  logic [7:0] taps;
  logic [2:0] sel;
  logic y;
  int checks = 0, failures = 0;

  tap_mux8 dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      taps = (i < 8) ? 8'(1 << i) : 8'($urandom);
      sel  = 3'(i);
      #1;
      checks++;
      if (y != taps[i % 8]) begin failures++; $display("FAIL taps=%b sel=%0d y=%0b", taps, sel, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
