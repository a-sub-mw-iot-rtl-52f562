// tb_input_stage: self-checking test of the datapath input register. Several
// random frames are streamed in the sensor's native format (one byte per
// asserted pixel on a Write-Enable edge, an EOR pulse after each of the 64
// rows, 12.5 ns per pixel = 80 Mpixel/s). The packets written into a model
// FIFO on the WE edges are compared with the expected (x, y, sign) pixels
// grouped by four; the leftover pixels, the end-of-frame flag after exactly
// 64 EOR pulses and the drop counter (with the FIFO held full) are checked.
`timescale 1ns / 1ps
module tb_input_stage;
  import cam_pkg::*;
  logic rst_n = 1, we = 0, eor = 0, full = 0;
  logic [7:0] data = 0;
  logic wr, frame_done;
  packet_t wdata, part;
  logic [7:0] drops;
  int checks = 0, failures = 0;
  pixel_t exp_q[$];
  int got_pkts, dropped_pkts;

  input_stage dut (.rst_ni(rst_n), .we_i(we), .eor_i(eor), .data_i(data),
                   .wr_o(wr), .wdata_o(wdata), .full_i(full),
                   .frame_done_o(frame_done), .part_o(part), .drops_o(drops));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // model FIFO: compare every written packet with the expected pixels
  always @(posedge we) begin
    if (wr) begin
      got_pkts++;
      check(wdata.n == 3'd4, "packet carries 4 pixels");
      for (int i = 0; i < 4; i++) begin
        pixel_t e;
        e = exp_q.pop_front();
        check(wdata.pix[i] == e, $sformatf("packet pixel %0d: got %h exp %h", i, wdata.pix[i], e));
      end
    end else if (full && dut.fill_q == 2'd3) begin
      dropped_pkts++;
      for (int i = 0; i < 4; i++) void'(exp_q.pop_front());
    end
  end

  task automatic send_pixel(input logic [6:0] y, input logic s, input int row);
    pixel_t p;
    p.sign = s; p.y = y; p.x = XW'(row);
    exp_q.push_back(p);
    data = {s, y};
    #3 we = 1;
    #6.25 we = 0;
    #3.25;
  endtask

  task automatic pulse_eor();
    #5 eor = 1;
    #6.25 eor = 0;
    #5;
  endtask

  initial begin
    #2000000; failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    #1;
    for (int frame = 0; frame < 4; frame++) begin
      int total;
      total = 0;
      rst_n = 0; got_pkts = 0; dropped_pkts = 0; exp_q.delete();
      #20 rst_n = 1; #20;
      check(!frame_done && part.n == 0, "cleared by reset");
      for (int row = 0; row < ROWS; row++) begin
        int n;
        n = (frame == 0) ? (row % 5) : $urandom_range(0, 9);
        // frame 3: FIFO reported full for rows 10..19, packets are dropped
        full = (frame == 3) && row >= 10 && row < 20;
        for (int k = 0; k < n; k++) begin
          send_pixel(7'($urandom_range(0, 127)), 1'($urandom), row);
          total++;
        end
        check(frame_done == 0 || row == ROWS, "no early end of frame");
        pulse_eor();
      end
      full = 0;
      check(frame_done == 1, "frame done after 64 EOR pulses");
      check(int'(part.n) == total % 4, $sformatf("leftover %0d, expected %0d", part.n, total % 4));
      check(got_pkts + dropped_pkts == total / 4, "number of packets");
      for (int i = 0; i < int'(part.n); i++) begin
        pixel_t e;
        e = exp_q.pop_front();
        check(part.pix[i] == e, "leftover pixel");
      end
      check(int'(drops) == dropped_pkts, $sformatf("drop counter %0d, expected %0d", drops, dropped_pkts));
      if (frame == 3) check(dropped_pkts > 0, $sformatf("drops exercised (%0d, counter %0d, pkts %0d, total %0d)", dropped_pkts, drops, got_pkts, total));
      // EOR beyond 64 must not wrap the row counter
      pulse_eor();
      check(frame_done == 1, "row counter saturates");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
