// tb_input_register: loads random control words and checks the 5/3-bit split
// one clock later, and that the outputs hold while load is low.
module tb_input_register;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0, load = 0;
  logic [7:0] cw_in = '0;
  logic [4:0] coarse;
  logic [2:0] fine;
  int checks = 0, failures = 0;
  logic [7:0] held;

  input_register dut (.*);
  always #4 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk({coarse, fine} == 8'h00, "reset value");
    for (int i = 0; i < 200; i++) begin
      cw_in = 8'($urandom);
      load  = 1;
      @(negedge clk);
      load = 0;
      held = cw_in;
      chk(coarse == held[7:3] && fine == held[2:0], $sformatf("split of %02h", held));
      cw_in = ~cw_in;
      @(negedge clk);
      chk(coarse == held[7:3] && fine == held[2:0], "hold without load");
    end
    // the word printed in the published diagram: 01101110 -> 01101 / 110
    cw_in = 8'b0110_1110; load = 1; @(negedge clk); load = 0;
    chk(coarse == 5'b01101 && fine == 3'b110, "diagram example");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
