// tb_pixel_counter: self-checking test of the pixel counter. A model FIFO
// offers packets at random times; after the end-of-frame flag the leftover
// packet is offered on part_i. Checks: every packet reaches the storage write
// port in order, one per clock while the FIFO has data (the rate the 25 MHz
// clock needs), the leftover packet is written last only when it holds
// pixels, count_o equals all pixels, done_o rises only after the FIFO is
// empty, and overflow_o is set when the storage reports full.
`timescale 1ns / 1ps
module tb_pixel_counter;
  import cam_pkg::*;
  logic clk = 0, rst_n = 1, frame_done = 0, st_full = 0;
  logic empty, rd, st_wr, done, ovf;
  packet_t pkt, part = '0, st_pkt;
  logic [CNTW-1:0] count;
  packet_t fifo_q[$], exp_q[$];
  int checks = 0, failures = 0, busy_cycles = 0, pop_cycles = 0;

  pixel_counter dut (.clk_i(clk), .rst_ni(rst_n), .empty_i(empty), .pkt_i(pkt), .rd_o(rd),
    .frame_done_i(frame_done), .part_i(part), .st_wr_o(st_wr), .st_pkt_o(st_pkt),
    .st_full_i(st_full), .count_o(count), .done_o(done), .overflow_o(ovf));

  always #20 clk = ~clk;
  assign empty = (fifo_q.size() == 0);
  assign pkt   = empty ? '0 : fifo_q[0];

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (!empty) begin busy_cycles++; if (rd) pop_cycles++; end
    if (st_wr) begin
      packet_t e;
      e = exp_q.pop_front();
      check(st_pkt == e, "packet written to storage in order");
    end
    if (rd) void'(fifo_q.pop_front());
  end

  function automatic packet_t rand_pkt(input int n);
    packet_t p;
    p = '0; p.n = 3'(n);
    for (int i = 0; i < n; i++) p.pix[i] = pixel_t'($urandom);
    return p;
  endfunction

  initial begin
    #2000000; failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    #1;
    for (int frame = 0; frame < 5; frame++) begin
      int npk, left, pix;
      rst_n = 0; frame_done = 0; st_full = 0; fifo_q.delete(); exp_q.delete();
      busy_cycles = 0; pop_cycles = 0;
      #100 rst_n = 1;
      npk  = $urandom_range(0, 40);
      left = (frame == 0) ? 0 : $urandom_range(0, 3);
      pix  = 0;
      for (int i = 0; i < npk; i++) begin
        packet_t p;
        p = rand_pkt(4);
        @(negedge clk);
        if (frame == 4 && i > npk / 2) st_full = 1;   // storage fills up
        fifo_q.push_back(p);
        if (!st_full) exp_q.push_back(p);
        pix += 4;
        if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 4)) @(negedge clk);
      end
      part = rand_pkt(left);
      if (left > 0 && !st_full) exp_q.push_back(part);
      pix += left;
      frame_done = 1;
      check(!done, "not done before end of frame is seen");
      wait (done);
      @(negedge clk);
      check(int'(count) == pix, $sformatf("count %0d, expected %0d", count, pix));
      check(fifo_q.size() == 0 && exp_q.size() == 0, "all packets stored");
      check(pop_cycles == busy_cycles, "one packet per clock while data waits");
      check(ovf == (frame == 4 && npk > npk / 2 + 1), "overflow flag");
      repeat (5) @(negedge clk);
      check(done && int'(count) == pix, "done and count hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
