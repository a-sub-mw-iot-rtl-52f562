// tb_dc_fifo: self-checking test of the dual-clock FIFO. The write side is
// clocked by a bursty 80 MHz strobe (like the sensor's Write-Enable), the
// read side by a 25 MHz clock that is also stopped for a while. Checks: the
// data come out in order with none lost or repeated; the FIFO reports full
// after exactly 2**AW writes while the reader is stopped; empty at reset and
// after draining; the write-to-read latency through the synchronizers.
`timescale 1ns / 1ps
module tb_dc_fifo;
  localparam int W = 16, AW = 4;
  logic wclk = 0, rclk = 0, rst_n = 1, wr = 0, rclk_en = 1;
  logic rd;
  logic [W-1:0] wdata = 0, rdata;
  logic full, empty;
  int checks = 0, failures = 0;
  int unsigned exp_q[$];
  int nread = 0, nwritten = 0;

  dc_fifo #(.WIDTH(W), .AW(AW)) dut (
    .wclk_i(wclk), .wrst_ni(rst_n), .wr_i(wr), .wdata_i(wdata), .full_o(full),
    .rclk_i(rclk), .rrst_ni(rst_n), .rd_i(rd), .rdata_o(rdata), .empty_o(empty));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always #20 if (rclk_en || rclk) rclk = ~rclk;

  // reader: pops whenever not empty, compares with the model
  assign rd = !empty;
  always @(posedge rclk) if (rst_n && !empty) begin
    int unsigned e;
    e = exp_q.pop_front();
    check(rdata == W'(e), $sformatf("read %0d: got %h exp %h", nread, rdata, W'(e)));
    nread++;
  end

  // one write-clock strobe; with en = 0 the strobe comes without a write
  // (as when the sensor's pixel is dropped) and only moves the synchronizer
  task automatic wpulse(input logic [W-1:0] d, input logic en = 1'b1);
    wdata = d; wr = en;
    #2 wclk = 1;
    #6.25 wclk = 0;
    wr = 0;
    #4.25;
  endtask

  initial begin
    #1000000; failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int lat;
    #1 rst_n = 0;
    #50 rst_n = 1; #100;
    check(empty && !full, "empty after reset");
    // 1. reader stopped: exactly 2**AW writes fit
    @(negedge rclk) rclk_en = 0;
    #100;
    for (int i = 0; i < 2**AW; i++) begin
      check(!full, "not full before 16 writes");
      exp_q.push_back(i); wpulse(W'(i)); nwritten++;
    end
    wpulse(16'hdead);                        // refused: FIFO full
    check(full, "full after 16 writes");
    rclk_en = 1;
    wait (nread == 2**AW);
    #400;
    check(empty, "empty after draining");
    // 2. bursts at 80 MHz against a 25 MHz reader, write only when not full
    for (int b = 0; b < 200; b++) begin
      int n;
      n = $urandom_range(1, 12);
      for (int k = 0; k < n; k++) begin
        logic [W-1:0] d;
        d = W'($urandom);
        if (!full) begin exp_q.push_back(32'(d)); wpulse(d); nwritten++; end
        else wpulse(d, 1'b0);
      end
      #($urandom_range(0, 300));
    end
    #2000;
    check(nread == nwritten, $sformatf("all %0d words read (%0d)", nwritten, nread));
    check(empty && exp_q.size() == 0, "empty at end");
    // 3. latency: one write, count read-clock edges until not empty
    @(posedge rclk); #1;
    exp_q.push_back(32'h1234); wpulse(16'h1234);
    lat = 0;
    while (empty) begin @(posedge rclk); #1; lat++; end
    check(lat >= 2 && lat <= 3, $sformatf("latency %0d read clocks, expected 2..3", lat));
    #400;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
