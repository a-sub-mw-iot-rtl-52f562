// tb_workloads: runs the FPGA at its default parameters under the three
// monitoring applications the node is tuned for, which differ in their
// wake-up threshold: parking entrance (100), street traffic (40) and people
// activity (80). Real video is not available to a simulation, so each
// application gets a synthetic activity trace of 40 frames at 10 fps. Quiet
// frames have a few pixels of noise (below half the threshold), and runs of
// "object" frames have between 1.25x and 20x the threshold. The fraction of
// object frames follows the share of relevant frames reported for each
// application (16 %, 60.5 %, 65.4 %).
//
// A reference model written here independently of the RTL applies the
// Idle/Active rules frame by frame. It predicts the sensor mode after each
// frame, the number of Active readouts and the number of wake-ups. The
// testbench checks the design against that model and checks every pixel the
// processor model reads over SPI. It then prints, per application, the
// fraction of frames that woke the processor and the ring oscillator's share
// of the frame time.
`timescale 1ns / 1ps
module tb_workloads;
  import cam_pkg::*;
  localparam time SPI_HALF = 100;
  localparam int NF = 40;
  localparam int NAPP = 3;
  localparam int THR[NAPP] = '{100, 40, 80};
  localparam int PCT[NAPP] = '{160, 605, 654};      // relevant frames, per mille

  logic clk32k = 0, rst_n = 1;
  logic sck = 0, cs_n = 1, mosi = 0, miso;
  logic [7:0] sen_data;
  logic sen_we, sen_eor, sen_frame, sen_mode, sen_rd, sen_cnt_hi;
  logic [1:0] pg_en, pg_ack = 2'b00;
  logic fetch_en, eoc = 0, wake, ro_en;
  int checks = 0, failures = 0;
  int act[NF];
  int frame = -1, app = 0;
  int wakes = 0, readouts = 0, pixels_read = 0;
  realtime ro_on_t, ro_total = 0;

  smart_cam_fpga dut (
    .clk32k_i(clk32k), .rst_ni(rst_n),
    .sen_data_i(sen_data), .sen_we_i(sen_we), .sen_eor_i(sen_eor),
    .sen_frame_o(sen_frame), .sen_mode_o(sen_mode), .sen_rd_o(sen_rd), .sen_cnt_hi_o(sen_cnt_hi),
    .spi_sck_i(sck), .spi_cs_ni(cs_n), .spi_mosi_i(mosi), .spi_miso_o(miso),
    .pg_en_o(pg_en), .pg_ack_i(pg_ack), .fetch_en_o(fetch_en), .eoc_i(eoc),
    .wake_o(wake), .ro_en_o(ro_en));

  vision_chip_model sensor (.sen_frame_i(sen_frame), .sen_mode_i(sen_mode), .sen_rd_i(sen_rd),
    .sen_cnt_hi_i(sen_cnt_hi), .data_o(sen_data), .we_o(sen_we), .eor_o(sen_eor));

  `include "spi_master.svh"

  always #15259 clk32k = ~clk32k;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL (app %0d frame %0d): %s", app, frame, msg); end
  endtask

  always @(posedge sen_frame) begin
    frame++;
    sensor.set_activity((frame >= 0 && frame < NF) ? act[frame] : 0);
  end

  always @(pg_en) begin
    if (pg_en == 2'b11) begin #590_000; if (pg_en == 2'b11) pg_ack = 2'b11; end
    else pg_ack = 2'b00;
  end

  always @(posedge ro_en) ro_on_t = $realtime;
  always @(negedge ro_en) begin ro_total += $realtime - ro_on_t; readouts++; end
  always @(posedge wake) wakes++;

  // processor: boot, read all stored pixels, compare, EOC
  always @(posedge fetch_en) begin : cpu
    logic [15:0] nst;
    logic [15:0] words[$];
    int kept;
    bit ok;
    #61_000;
    spi_read(REG_STORED, nst);
    kept = int'(nst);
    check(kept == ((sensor.frame_q.size() < 1024) ? sensor.frame_q.size() : 1024), "stored pixels");
    spi_xfer(1'b0, REG_DATA, 16'h0000, kept, words);
    ok = 1;
    for (int i = 0; i < kept; i++) if (words[i] != {2'b10, sensor.frame_q[i]}) ok = 0;
    check(ok, "pixels read over SPI match the sensor frame");
    pixels_read += kept;
    eoc = 1;
    wait (!fetch_en);
    #1000 eoc = 0;
  end

  initial begin
    #(64'd20_000_000_000); failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    for (app = 0; app < NAPP; app++) begin
      int thr, ref_wakes, ref_ro, relevant;
      bit ref_active;
      int ref_mode[NF];
      thr = THR[app];
      // activity trace: object runs of 2..8 frames at the target share
      relevant = 0;
      for (int f = 0; f < NF; ) begin
        int len;
        bit obj;
        len = $urandom_range(2, 8);
        obj = ($urandom_range(0, 999) < PCT[app]);
        for (int k = 0; k < len && f < NF; k++, f++) begin
          act[f] = obj ? $urandom_range(thr + thr / 4 + 1, thr * 20) : $urandom_range(0, thr / 2);
          if (obj) relevant++;
        end
      end
      // reference model of the Idle/Active rules
      ref_active = 0; ref_wakes = 0; ref_ro = 0;
      for (int f = 0; f < NF; f++) begin
        if (!ref_active) begin
          if (act[f] > thr) ref_active = 1;
        end else begin
          ref_ro++;
          if (act[f] > thr) ref_wakes++;
          else ref_active = 0;
        end
        ref_mode[f] = int'(ref_active);
      end
      // reset, configure, run
      rst_n = 0; #100_000 rst_n = 1; #10_000;
      frame = -1; wakes = 0; readouts = 0; ro_total = 0; pixels_read = 0;
      spi_write(REG_THRESH, 16'(thr));
      spi_write(REG_CTRL, 16'h0001);
      @(posedge sen_frame);
      for (int f = 0; f < NF; f++) begin
        @(posedge sen_frame); #1;
        check(int'(sen_mode) == ref_mode[f], $sformatf("mode after frame %0d (activity %0d)", f, act[f]));
      end
      spi_write(REG_CTRL, 16'h0000);
      wait (!fetch_en && pg_en == 2'b00);
      #1_000_000;
      check(readouts == ref_ro, $sformatf("readouts %0d, reference %0d", readouts, ref_ro));
      check(wakes == ref_wakes, $sformatf("wake-ups %0d, reference %0d", wakes, ref_wakes));
      check(int'(dut.skips) == 0, "no readout skipped at 10 fps");
      // gating the oscillator to the readout must save at least 39x against
      // leaving it on for the whole 100 ms frame
      if (readouts > 0)
        check(ro_total / readouts < 100_000_000.0 / 39.0,
              $sformatf("oscillator on %0.1f us per readout", ro_total / readouts / 1000.0));
      $display("app %0d: threshold %0d, object frames %0d/%0d, wake-ups %0d (%0.1f %% of frames), pixels read %0d, oscillator on %0.3f %% of the time",
               app, thr, relevant, NF, wakes, 100.0 * wakes / NF, pixels_read,
               100.0 * ro_total / (NF * 3277.0 * 30517.578));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
