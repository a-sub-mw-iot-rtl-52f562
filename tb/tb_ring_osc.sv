// tb_ring_osc: self-checking test of the ring-oscillator model. With the
// default 25 MHz it checks the 40 ns period and 50% duty cycle over a burst,
// that no edge appears while disabled, that the clock ends low after the
// enable falls, and that it restarts on the next enable, as the Control
// Unit switches it on and off once per readout.
`timescale 1ns / 1ps
module tb_ring_osc;
  logic en = 0, clk;
  int checks = 0, failures = 0, rises = 0;
  realtime last_rise = -1, last_fall = -1;

  ring_osc dut (.en_i(en), .clk_o(clk));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    if (rises > 0) check($realtime - last_rise > 39.99 && $realtime - last_rise < 40.01,
                         $sformatf("period %0.3f ns", $realtime - last_rise));
    last_rise = $realtime;
    rises++;
  end
  always @(negedge clk) if (last_rise >= 0) begin
    check($realtime - last_rise > 19.99 && $realtime - last_rise < 20.01, "high phase 20 ns");
    last_fall = $realtime;
  end

  initial begin
    #100000; failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    #500;
    check(rises == 0 && clk == 0, "no clock while disabled");
    for (int burst = 0; burst < 3; burst++) begin
      rises = 0;
      en = 1;
      #4000;                      // 100 periods
      en = 0;
      #200;
      check(rises == 100, $sformatf("%0d rising edges in 4 us, expected 100", rises));
      check(clk == 0, "stops low");
      rises = 0;
      #2000;
      check(rises == 0, "stays stopped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
