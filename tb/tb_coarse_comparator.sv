// tb_coarse_comparator: random stimulus against the rule
// set = start & target!=0, reset = running & count>=target.
module tb_coarse_comparator;
  timeunit 1ns;
  timeprecision 1ps;
  logic start, running;
  logic [9:0] count, target;
  logic set_o, reset_o;
  int checks = 0, failures = 0;

  coarse_comparator #(.CNT_W(10)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      start   = 1'($urandom);
      running = 1'($urandom);
      target  = 10'($urandom_range(40));
      count   = (i % 3 == 0) ? target : 10'($urandom_range(40));
      #1;
      checks++;
      if (set_o != (start && target != 0) || reset_o != (running && count >= target)) begin
        failures++;
        $display("FAIL s=%0b r=%0b c=%0d t=%0d -> %0b %0b", start, running, count, target, set_o, reset_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
