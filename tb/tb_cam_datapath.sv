// tb_cam_datapath: self-checking test of the whole datapath with the vision
// chip model and the 25 MHz ring oscillator. For frames of 0 to 3000 asserted
// pixels it resets the datapath, starts the oscillator and the clock gate,
// lets the sensor stream at 80 Mpixel/s, waits for done, stops the clock and
// reads the storage memory back on a 5 MHz clock. Checked: the pixel count,
// the stored pixels against the model's frame (first 1024 in raster order
// with the x coordinate recovered from EOR pulses), the stored count and the
// overflow flag past 1024 pixels, no packet lost in the dual-clock FIFO at
// the peak rate (the reason for the 4-pixel input register), done within a
// few oscillator cycles of the last EOR pulse, and no datapath clock while
// the gate is closed.
`timescale 1ns / 1ps
module tb_cam_datapath;
  import cam_pkg::*;
  logic rst_n = 1, ro_en = 0, clk_en = 0, rd_clk = 0, pop = 0;
  logic sen_frame = 0, sen_rd = 0;
  logic [7:0] data;
  logic we, eor, ro_clk, done, ovf, avail;
  logic [CNTW-1:0] count;
  logic [7:0] drops;
  logic [10:0] stored;
  pixel_t pix;
  int checks = 0, failures = 0, gclk_edges = 0;

  vision_chip_model sensor (.sen_frame_i(sen_frame), .sen_mode_i(1'b1), .sen_rd_i(sen_rd),
    .sen_cnt_hi_i(1'b0), .data_o(data), .we_o(we), .eor_o(eor));
  ring_osc u_ro (.en_i(ro_en), .clk_o(ro_clk));
  cam_datapath dut (.rst_ni(rst_n), .data_i(data), .we_i(we), .eor_i(eor),
    .ro_clk_i(ro_clk), .clk_en_i(clk_en), .done_o(done), .count_o(count),
    .overflow_o(ovf), .drops_o(drops), .stored_o(stored),
    .rd_clk_i(rd_clk), .pop_i(pop), .avail_o(avail), .pix_o(pix));

  always @(posedge dut.gclk) gclk_edges++;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic rd_tick();
    #100 rd_clk = 1; #100 rd_clk = 0;
  endtask

  initial begin
    #50000000; failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    static int sizes[6] = '{0, 3, 250, 1023, 1030, 3000};
    foreach (sizes[f]) begin
      int n, kept, e0;
      realtime t_eor, t_done;
      n = sizes[f];
      sensor.set_activity(n);
      #100 sen_frame = 1; #100 sen_frame = 0; #100;
      check(sensor.frame_q.size() == n, "model frame size");
      // start of readout: reset, oscillator, gate, read request
      rst_n = 0; #100 rst_n = 1;
      ro_en = 1; #200 clk_en = 1; #200;
      sen_rd = 1;
      wait (dut.frame_done);
      t_eor = $realtime;
      wait (done);
      t_done = $realtime;
      check(t_done - t_eor < 500.0, $sformatf("done %0.1f ns after last EOR", t_done - t_eor));
      sen_rd = 0;
      #100 clk_en = 0; #400;
      e0 = gclk_edges;
      ro_en = 0; #1000;
      check(gclk_edges == e0, "no datapath clock with gate closed");
      kept = (n < 1024) ? n : 1024;
      check(int'(count) == n, $sformatf("count %0d, expected %0d", count, n));
      check(int'(stored) == kept, $sformatf("stored %0d, expected %0d", stored, kept));
      check(ovf == (n > 1024), "overflow flag");
      check(drops == 0, "no packet lost at 80 Mpixel/s");
      // read back through the storage port
      rd_tick();
      for (int i = 0; i < kept; i++) begin
        check(avail && pix == sensor.frame_q[i],
              $sformatf("pixel %0d: got %h exp %h", i, pix, sensor.frame_q[i]));
        pop = 1; rd_tick(); pop = 0;
      end
      check(!avail, "storage empty after last pixel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
