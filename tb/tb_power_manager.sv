// tb_power_manager: self-checking test of the PULP power manager state
// machine. It walks idle -> power-up -> active -> idle, checks the outputs in
// each state, the cycle counts through the synchronizers (enables one cycle
// after wake-up, fetch-enable three cycles after both acknowledges, gates off
// three cycles after the EOC edge), that one acknowledge alone is not enough,
// that a wake-up while active is ignored and that an EOC level already high
// on entry does not end the activation.
`timescale 1ns / 1ps
module tb_power_manager;
  logic clk = 0, rst_n = 1, wake = 0, eoc = 0;
  logic [1:0] ack = 0, pg_en;
  logic fetch_en, busy;
  int checks = 0, failures = 0;

  power_manager dut (.clk_i(clk), .rst_ni(rst_n), .wake_i(wake), .pg_ack_i(ack),
                     .eoc_i(eoc), .pg_en_o(pg_en), .fetch_en_o(fetch_en), .busy_o(busy));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (pg_en=%b fetch=%b busy=%b)", msg, pg_en, fetch_en, busy); end
  endtask

  task automatic expect_state(input logic [1:0] en, input logic fe, input string msg);
    check(pg_en == en && fetch_en == fe && busy == (en != 0), msg);
  endtask


  initial begin
    #100000; failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk); #1;
    expect_state(2'b00, 0, "idle after reset");
    for (int round = 0; round < 3; round++) begin
      // wake-up pulse of one cycle
      @(negedge clk) wake = 1;
      @(negedge clk) wake = 0;
      expect_state(2'b11, 0, "power-up one cycle after wake-up");
      // only FLL gate acknowledges: must stay in power-up
      ack = 2'b01;
      repeat (6) @(negedge clk);
      expect_state(2'b11, 0, "power-up holds with one acknowledge");
      if (round == 1) eoc = 1;            // stale EOC level from software
      @(negedge clk) ack = 2'b11;
      n = 0;
      while (!fetch_en && n < 20) begin @(negedge clk); n++; end
      check(n == 3, $sformatf("fetch-enable %0d cycles after acknowledge, expected 3", n));
      expect_state(2'b11, 1, "active");
      // wake-up while active is ignored
      @(negedge clk) wake = 1;
      @(negedge clk) wake = 0;
      repeat (5) @(negedge clk);
      expect_state(2'b11, 1, "active holds (stale EOC or wake-up)");
      if (eoc) begin @(negedge clk) eoc = 0; repeat (4) @(negedge clk); end
      @(negedge clk) eoc = 1;
      n = 0;
      while (busy && n < 20) begin @(negedge clk); n++; end
      check(n == 3, $sformatf("power-down %0d cycles after EOC edge, expected 3", n));
      expect_state(2'b00, 0, "idle after EOC");
      ack = 0;
      @(negedge clk) eoc = 0;
      repeat (5) @(negedge clk);
      expect_state(2'b00, 0, "idle holds without wake-up");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
