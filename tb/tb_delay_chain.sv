// tb_delay_chain: for several delay codes, sends an edge into the chain and
// checks that tap k and the chain end switch k and 8 element delays later,
// with element delay = 300 ps + code x 20 ps (the model's defaults), for
// both the rising and the falling edge.
module tb_delay_chain;
  timeunit 1ns;
  timeprecision 1ps;
  logic din = 0;
  logic [5:0] delay_code = '0;
  logic [7:0] taps;
  logic dout;
  int checks = 0, failures = 0;
  realtime t_edge [9];
  realtime t0;

  delay_chain dut (.*);

  // edge times are found by polling every picosecond
  task automatic watch(realtime span);
    logic [8:0] last, now;
    last = {dout, taps};
    repeat (int'(span * 1000.0)) begin
      #0.001;
      now = {dout, taps};
      for (int k = 0; k <= 8; k++)
        if (now[k] != last[k]) t_edge[k] = $realtime;
      last = now;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int codes [5] = '{0, 10, 35, 50, 63};
    #20;
    foreach (codes[i]) begin
      delay_code = 6'(codes[i]);
      #20;
      for (int e = 0; e < 2; e++) begin
        t0  = $realtime;
        din = ~din;
        watch(30.0);
        for (int k = 0; k <= 8; k++) begin
          realtime want;
          want = real'(k) * real'(300 + codes[i] * 20) / 1000.0;
          checks++;
          if (t_edge[k] - t0 < want - 0.0015 || t_edge[k] - t0 > want + 0.0015) begin
            failures++;
            $display("FAIL code %0d tap %0d: %0.3f ns after edge, want %0.3f", codes[i], k, t_edge[k] - t0, want);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
