// tb_phase_detector: feeds the detector a copy of its clock delayed by less
// and by more than one 8 ns period and checks the "up" decision two clocks
// later (1 when the delay is short, 0 when long).
module tb_phase_detector;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0, fb, up;
  real  dly = 7.0;
  int checks = 0, failures = 0;

  phase_detector dut (.*);
  always #4 clk = ~clk;
  // delay line built from 10 short stages (each stage shorter than half a
  // clock period so that every edge propagates)
  logic [10:0] stg;
  assign stg[0] = clk;
  for (genvar i = 0; i < 10; i++) begin : g_dly
    always @(stg[i]) stg[i+1] <= #(dly / 10.0) stg[i];
  end
  assign fb = stg[10];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real cases [6] = '{7.0, 8.6, 6.0, 9.5, 7.8, 10.5};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    foreach (cases[i]) begin
      dly = cases[i];
      repeat (4) @(negedge clk);
      for (int n = 0; n < 5; n++) begin
        checks++;
        if (up != (cases[i] < 8.0)) begin
          failures++;
          $display("FAIL delay %0.1f ns: up=%0b", cases[i], up);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
