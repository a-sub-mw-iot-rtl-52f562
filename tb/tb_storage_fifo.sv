// tb_storage_fifo: self-checking test of the 1024-pixel storage memory.
// Frames of random length are written as 4-pixel packets (last one short)
// on a 25 MHz clock, then read back pixel by pixel on a 5 MHz clock as the
// SPI slave does. Checks: pixel order and contents, the stored count, avail_o
// dropping after the last pixel, refusal of packets once 1024 pixels
// (256 packets) are held, and clearing by reset.
`timescale 1ns / 1ps
module tb_storage_fifo;
  import cam_pkg::*;
  localparam int DEPTH = 1024;
  logic wclk = 0, rclk = 0, rst_n = 1, wr = 0, pop = 0;
  packet_t pkt = '0;
  logic full, avail;
  logic [10:0] stored;
  pixel_t rdata;
  pixel_t exp_q[$];
  int checks = 0, failures = 0;

  storage_fifo #(.DEPTH_PIX(DEPTH)) dut (
    .wclk_i(wclk), .wrst_ni(rst_n), .wr_i(wr), .pkt_i(pkt), .full_o(full), .stored_o(stored),
    .rclk_i(rclk), .rrst_ni(rst_n), .pop_i(pop), .avail_o(avail), .rdata_o(rdata));

  always #20  wclk = ~wclk;
  always #100 rclk = ~rclk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #20000000; failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    #1;
    for (int frame = 0; frame < 4; frame++) begin
      int npix, kept;
      npix = (frame == 2) ? 1500 : (frame == 3) ? DEPTH : $urandom_range(1, 700);
      exp_q.delete();
      rst_n = 0; #300 rst_n = 1;
      @(negedge wclk);
      check(stored == 0 && !avail && !full, "empty after reset");
      kept = 0;
      for (int i = 0; i < npix; i += 4) begin
        int n;
        n = (npix - i < 4) ? npix - i : 4;
        pkt = '0; pkt.n = 3'(n);
        for (int k = 0; k < n; k++) begin
          pkt.pix[k] = pixel_t'($urandom);
          if (kept < DEPTH) exp_q.push_back(pkt.pix[k]);
        end
        if (kept < DEPTH) kept += n;
        wr = 1;
        @(negedge wclk);
        wr = 0;
      end
      @(negedge wclk);
      check(int'(stored) == kept, $sformatf("stored %0d, expected %0d", stored, kept));
      check(full == (npix >= DEPTH), "full flag");
      // read back on the slow clock; data valid one read edge after reset
      @(negedge rclk);
      for (int i = 0; i < kept; i++) begin
        pixel_t e;
        e = exp_q.pop_front();
        check(avail, "pixel available");
        check(rdata == e, $sformatf("pixel %0d: got %h exp %h", i, rdata, e));
        pop = 1; @(negedge rclk); pop = 0;
        if ($urandom_range(0, 1)) @(negedge rclk);
      end
      check(!avail, "no pixel after the last one");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
