// tb_coarse_multiplier: exhaustive check of p = a * b for a 5-bit coarse
// field and a 4-bit step.
module tb_coarse_multiplier;
  timeunit 1ns;
  timeprecision 1ps;
  logic [4:0] a;
  logic [3:0] b;
  logic [8:0] p;
  int checks = 0, failures = 0;

  coarse_multiplier #(.A_W(5), .B_W(4)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++)
      for (int j = 0; j < 16; j++) begin
        a = 5'(i); b = 4'(j);
        #1;
        checks++;
        if (int'(p) != i * j) begin
          failures++;
          $display("FAIL %0d*%0d gave %0d", i, j, p);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
