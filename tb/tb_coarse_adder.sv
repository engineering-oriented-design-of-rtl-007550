// tb_coarse_adder: random and corner checks of s = a + b (9-bit + 5-bit).
module tb_coarse_adder;
  timeunit 1ns;
  timeprecision 1ps;
  logic [8:0] a;
  logic [4:0] b;
  logic [9:0] s;
  int checks = 0, failures = 0;

  coarse_adder #(.A_W(9), .B_W(5)) dut (.*);

  task automatic try(int x, int y);
    a = 9'(x); b = 5'(y);
    #1;
    checks++;
    if (int'(s) != x + y) begin
      failures++;
      $display("FAIL %0d+%0d gave %0d", x, y, s);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    try(0, 0); try(511, 31); try(255, 0); try(13, 1);
    for (int i = 0; i < 500; i++) try(int'($urandom_range(511)), int'($urandom_range(31)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
