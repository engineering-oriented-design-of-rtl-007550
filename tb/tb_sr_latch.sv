// tb_sr_latch: random set/reset sequences against a reset-dominant model.
module tb_sr_latch;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0, s = 0, r = 0, q;
  logic model = 0;
  int checks = 0, failures = 0;

  sr_latch dut (.*);
  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      s = 1'($urandom); r = ($urandom_range(3) == 0);
      @(posedge clk);
      model = r ? 1'b0 : (s ? 1'b1 : model);
      @(negedge clk);
      checks++;
      if (q != model) begin failures++; $display("FAIL step %0d s=%0b r=%0b q=%0b", i, s, r, q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
