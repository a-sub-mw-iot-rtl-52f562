// tb_smart_cam_fpga: end-to-end test of the FPGA with every parameter at its
// default: 32.768 kHz reference, 10 fps frame timing, 25 MHz ring oscillator,
// 1024-pixel storage. Around it: the vision chip model, a power-gate model
// that acknowledges 590 us after being enabled (the paper's power-on and FLL
// lock time), and a processor model that, once fetch-enable rises, waits the
// 61 us boot time, reads status and pixels over SPI at 5 MHz, checks them
// against the sensor model's frame and raises EOC.
//
// Ten frames with a scheduled activity take the design through every
// mechanism: Idle frame below the threshold, Idle -> Active switch, Active
// readout with wake-up, storage overflow (1500 pixels), partial last packet,
// return to Idle, readout skipped while the processor is still busy, and the
// full power-manager cycle. Each mechanism is counted; one that never
// happens is a failure. Wake-ups, skips, modes and oscillator on-time are
// compared with the expected values for the schedule.
`timescale 1ns / 1ps
module tb_smart_cam_fpga;
  import cam_pkg::*;
  localparam time SPI_HALF = 100;          // 5 MHz SPI
  localparam realtime T_ON   = 590_000.0;  // ns, power-on and FLL lock
  localparam realtime T_BOOT = 61_000.0;   // ns, boot at 30 MHz
  localparam int NFRAMES = 10;
  localparam int THR = 80;
  // activity per frame and expected outcome (see header)
  localparam int ACT[NFRAMES] = '{20, 500, 601, 1500, 10, 300, 403, 350, 350, 0};
  // 0 idle below, 1 idle->active, 2 readout+wake, 3 readout->idle, 4 skip
  localparam int OUTCOME[NFRAMES] = '{0, 1, 2, 2, 3, 1, 2, 4, 2, 3};
  localparam int SLOW_FRAME = 6;           // processor stays busy for 150 ms

  logic clk32k = 0, rst_n = 1;
  logic sck = 0, cs_n = 1, mosi = 0, miso;
  logic [7:0] sen_data;
  logic sen_we, sen_eor, sen_frame, sen_mode, sen_rd, sen_cnt_hi;
  logic [1:0] pg_en, pg_ack = 2'b00;
  logic fetch_en, eoc = 0, wake, ro_en;
  int checks = 0, failures = 0;
  int frame = -1;
  int cnt_idle_below = 0, cnt_switch = 0, cnt_readout = 0, cnt_wake = 0, cnt_overflow = 0;
  int cnt_back_idle = 0, cnt_skip = 0, cnt_partial = 0, cnt_pm_cycle = 0;
  realtime ro_on_t, ro_total = 0, ro_max = 0, pg_on_t;
  int wake_frame[$];
  bit slow_pending = 0;

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
    if (!cond) begin failures++; $display("FAIL (frame %0d): %s", frame, msg); end
  endtask

  // frame bookkeeping: set the activity of the frame that starts now
  always @(posedge sen_frame) begin
    frame++;
    if (frame < NFRAMES) sensor.set_activity(ACT[frame]);
    else                 sensor.set_activity(0);
  end

  // power gates: acknowledge T_ON after enable, drop with it
  always @(pg_en) begin
    if (pg_en == 2'b11) begin pg_on_t = $realtime; #(T_ON); if (pg_en == 2'b11) pg_ack = 2'b11; end
    else pg_ack = 2'b00;
  end

  // ring oscillator on-time per readout
  always @(posedge ro_en) ro_on_t = $realtime;
  always @(negedge ro_en) begin
    ro_total += $realtime - ro_on_t;
    if ($realtime - ro_on_t > ro_max) ro_max = $realtime - ro_on_t;
    cnt_readout++;
  end

  always @(posedge wake) begin cnt_wake++; wake_frame.push_back(frame); end

  // processor model: boot, read over SPI, check, signal EOC
  always @(posedge fetch_en) begin : cpu
    logic [15:0] st, cnt, nst;
    logic [15:0] words[$];
    int n, kept;
    check($realtime - pg_on_t >= T_ON, "fetch-enable only after the power gates acknowledged");
    cnt_pm_cycle++;
    #(T_BOOT);
    n = sensor.frame_q.size();
    kept = (n < 1024) ? n : 1024;
    spi_read(REG_STATUS, st);
    check(st[1] && st[0], $sformatf("status: data ready, Active (%h)", st));
    check(st[4] == (n > 1024), "status overflow bit");
    if (st[4]) cnt_overflow++;
    spi_read(REG_COUNT, cnt);
    check(int'(cnt) == n, $sformatf("pixel count %0d, expected %0d", cnt, n));
    check(int'(cnt) > THR, "wake-up only above the threshold");
    spi_read(REG_STORED, nst);
    check(int'(nst) == kept, $sformatf("stored %0d, expected %0d", nst, kept));
    if (kept % 4 != 0) cnt_partial++;
    spi_xfer(1'b0, REG_DATA, 16'h0000, kept + 1, words);
    for (int i = 0; i < kept; i++)
      if (words[i] != {2'b10, sensor.frame_q[i]}) begin
        check(0, $sformatf("pixel %0d: got %h exp %h", i, words[i], {2'b10, sensor.frame_q[i]}));
        break;
      end
    checks++;
    check(words[kept] == 16'h0000, "end of stored pixels");
    if (frame == SLOW_FRAME) #150_000_000;
    eoc = 1;
    wait (!fetch_en);
    #1000 eoc = 0;
  end

  initial begin
    #(64'd1_400_000_000); failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic [15:0] d;
    int prev_skips, prev_wakes, prev_ro;
    logic prev_mode;
    #1 rst_n = 0;
    #100000 rst_n = 1;
    #10000;
    // configuration by the processor: defaults for period, threshold 80, run
    spi_write(REG_THRESH, 16'(THR));
    spi_read(REG_FPERIOD, d); check(d == 16'd3277, "10 fps frame period");
    spi_write(REG_CTRL, 16'h0001);
    // frames: evaluate each one at the start of the next
    @(posedge sen_frame);
    for (int f = 0; f < NFRAMES; f++) begin
      prev_mode  = sen_mode;
      prev_wakes = cnt_wake;
      prev_ro    = cnt_readout;
      prev_skips = int'(dut.skips);
      @(posedge sen_frame);
      #1;
      unique case (OUTCOME[f])
        0: begin
          check(!prev_mode && !sen_mode && cnt_readout == prev_ro, "Idle frame below threshold");
          if (!sen_mode) cnt_idle_below++;
        end
        1: begin
          check(!prev_mode && sen_mode && cnt_readout == prev_ro, "switch Idle -> Active");
          if (sen_mode) cnt_switch++;
        end
        2: check(prev_mode && sen_mode && cnt_readout == prev_ro + 1 && cnt_wake == prev_wakes + 1,
                 "Active readout with wake-up");
        3: begin
          check(prev_mode && !sen_mode && cnt_readout == prev_ro + 1 && cnt_wake == prev_wakes,
                "Active readout below threshold, back to Idle");
          if (!sen_mode) cnt_back_idle++;
        end
        4: begin
          check(prev_mode && sen_mode && cnt_readout == prev_ro && int'(dut.skips) == prev_skips + 1,
                "readout skipped while processor busy");
          if (int'(dut.skips) == prev_skips + 1) cnt_skip++;
        end
        default: ;
      endcase
    end
    wait (!fetch_en && pg_en == 2'b00);
    #1000000;
    check(ro_max < 600_000.0, $sformatf("oscillator on at most %0.0f us per readout", ro_max / 1000.0));
    check(cnt_readout > 0 && (ro_total / cnt_readout) > 250_000.0, "oscillator covers the 300 us readout");
    $display("readouts %0d, mean oscillator on-time %0.1f us of a 100 ms frame",
             cnt_readout, ro_total / cnt_readout / 1000.0);
    $display("mechanisms: idle_below=%0d switch=%0d readout=%0d wake=%0d overflow=%0d back_idle=%0d skip=%0d partial=%0d pm_cycle=%0d",
             cnt_idle_below, cnt_switch, cnt_readout, cnt_wake, cnt_overflow, cnt_back_idle,
             cnt_skip, cnt_partial, cnt_pm_cycle);
    check(cnt_idle_below > 0, "mechanism: Idle frame below threshold");
    check(cnt_switch > 0,     "mechanism: Idle -> Active switch");
    check(cnt_readout > 0,    "mechanism: Active readout with oscillator");
    check(cnt_wake == 4,      $sformatf("mechanism: wake-up events %0d, expected 4", cnt_wake));
    check(cnt_overflow > 0,   "mechanism: storage overflow");
    check(cnt_back_idle > 0,  "mechanism: Active -> Idle");
    check(cnt_skip > 0,       "mechanism: skipped readout");
    check(cnt_partial > 0,    "mechanism: partial last packet");
    check(cnt_pm_cycle == 4,  "mechanism: power-manager cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
