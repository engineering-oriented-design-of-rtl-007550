// tb_output_buffer: truth table of the pulse former, plus a timed case where
// a 24 ns coarse level and its 5 ns-delayed copy give a 29 ns pulse.
module tb_output_buffer;
  timeunit 1ns;
  timeprecision 1ps;
  logic coarse_level = 0, fine_level = 0, pulse;
  int checks = 0, failures = 0;
  realtime t_rise, t_fall;

  output_buffer dut (.*);

  always @(posedge pulse) t_rise = $realtime;
  always @(negedge pulse) t_fall = $realtime;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {coarse_level, fine_level} = 2'(i);
      #1;
      checks++;
      if (pulse != (i != 0)) begin failures++; $display("FAIL case %0d", i); end
    end
    coarse_level = 0; fine_level = 0; #10;
    fork
      begin coarse_level = 1; #24 coarse_level = 0; end
      begin #5 fine_level = 1; #24 fine_level = 0; end
    join
    #5;
    checks++;
    if (t_fall - t_rise < 28.99 || t_fall - t_rise > 29.01) begin
      failures++; $display("FAIL width %0t", t_fall - t_rise);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
