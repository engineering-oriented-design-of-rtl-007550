// tb_coarse_counter: starts the counter, checks count = k k clocks after
// start, that stop freezes it, and that a new start restarts from 1.
module tb_coarse_counter;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0, start = 0, stop = 0;
  logic [9:0] count;
  logic running;
  int checks = 0, failures = 0;

  coarse_counter #(.CNT_W(10)) dut (.*);
  always #4 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (count=%0d running=%0b)", what, count, running); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(!running && count == 0, "reset");
    for (int n = 1; n < 40; n += 3) begin
      start = 1; @(negedge clk); start = 0;
      for (int k = 1; k <= n; k++) begin
        chk(running && int'(count) == k, $sformatf("count %0d of %0d", k, n));
        if (k == n) stop = 1;
        @(negedge clk);
        stop = 0;
      end
      chk(!running, "stopped");
      @(negedge clk);
      chk(!running && int'(count) == n, "frozen after stop");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
