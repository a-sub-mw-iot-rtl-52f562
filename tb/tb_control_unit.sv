// tb_control_unit: self-checking test of the Control Unit on its 32 kHz
// clock, with a short frame (40 cycles, readout 10 cycles after the frame
// start) so that many frames run quickly. A sensor model answers the Idle
// count read over the 8-bit bus; a datapath model raises done a set number
// of cycles after its clock gate opens and reports a pixel count. Checked
// per frame: frame pulses every 40 cycles; in Idle no oscillator activity
// and a switch to Active only when the count exceeds the threshold; in
// Active the order datapath reset -> oscillator on -> clock gate open ->
// done -> gate closed -> oscillator off, the oscillator on-time, a single
// wake-up pulse when the counted pixels exceed the threshold and a return to
// Idle otherwise; a skipped readout while the processor is busy.
`timescale 1ns / 1ps
module tb_control_unit;
  import cam_pkg::*;
  localparam int FP = 40, EXP = 10, DONE_LAT = 6;
  logic clk = 0, rst_n = 1, run = 0, pm_busy = 0;
  logic [15:0] thresh = 16'd80;
  logic sen_frame, sen_rd, sen_cnt_hi, ro_en, dp_clk_en, dp_rst_n, wake, data_rdy;
  sens_mode_e mode;
  logic [7:0] sen_data;
  logic dp_done = 0;
  logic [CNTW-1:0] dp_count = 0, last_count, idle_count = 0;
  logic [15:0] frames, skips;
  int checks = 0, failures = 0;
  int cyc = 0, last_frame = -1, wakes = 0, ro_cycles = 0, gate_cycles = 0;
  int ro_rise = -1, gate_rise = -1, gate_fall = -1, ro_fall = -1, rst_cyc = -1;

  control_unit dut (.clk_i(clk), .rst_ni(rst_n), .run_i(run), .fperiod_i(16'(FP)),
    .expose_i(16'(EXP)), .thresh_i(thresh),
    .sen_frame_o(sen_frame), .sen_mode_o(mode), .sen_rd_o(sen_rd), .sen_cnt_hi_o(sen_cnt_hi),
    .sen_data_i(sen_data), .ro_en_o(ro_en), .dp_clk_en_o(dp_clk_en), .dp_rst_no(dp_rst_n),
    .dp_done_i(dp_done), .dp_count_i(dp_count), .pm_busy_i(pm_busy), .wake_o(wake),
    .data_rdy_o(data_rdy), .last_count_o(last_count), .frames_o(frames), .skips_o(skips));

  always #15259 clk = ~clk;     // 32.768 kHz

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // sensor model: Idle count on the data bus, byte selected by sen_cnt_hi
  assign sen_data = sen_cnt_hi ? 8'(idle_count >> 8) : idle_count[7:0];

  // datapath model: done DONE_LAT cycles after the gate opens, cleared by reset
  int open_cycles = 0;
  always @(posedge clk or negedge dp_rst_n) begin
    if (!dp_rst_n) begin dp_done <= 0; open_cycles <= 0; end
    else if (dp_clk_en) begin
      open_cycles <= open_cycles + 1;
      if (open_cycles == DONE_LAT) dp_done <= 1;
    end
  end

  // event log on the falling edge (outputs settled)
  always @(negedge clk) begin
    cyc++;
    if (sen_frame) begin
      if (last_frame >= 0) check(cyc - last_frame == FP, "frame period");
      last_frame = cyc;
    end
    if (wake) wakes++;
    if (ro_en) ro_cycles++;
    if (dp_clk_en) begin
      gate_cycles++;
      check(ro_en, "clock gate open only with oscillator running");
    end
    if (!dp_rst_n) rst_cyc = cyc;
    if (ro_en && ro_rise < 0) ro_rise = cyc;
    if (dp_clk_en && gate_rise < 0) gate_rise = cyc;
    if (!dp_clk_en && gate_rise >= 0 && gate_fall < 0) gate_fall = cyc;
    if (!ro_en && ro_rise >= 0 && ro_fall < 0) ro_fall = cyc;
  end

  task automatic clear_log();
    wakes = 0; ro_cycles = 0; gate_cycles = 0;
    ro_rise = -1; gate_rise = -1; gate_fall = -1; ro_fall = -1; rst_cyc = -1;
  endtask

  // run one frame from just after its frame pulse to the next
  task automatic one_frame();
    clear_log();
    @(posedge sen_frame);
    @(negedge clk);
  endtask

  initial begin
    #(64'd30518 * 2000); failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    #1 rst_n = 0;
    #40000 rst_n = 1;
    @(negedge clk) run = 1;
    @(posedge sen_frame); @(negedge clk);
    // 1. Idle, few pixels: stays Idle, oscillator never on
    idle_count = 14'd80;
    one_frame();
    check(mode == SENS_IDLE && ro_cycles == 0 && wakes == 0, "Idle below threshold");
    check(last_count == 14'd80, "Idle count read over two bytes");
    // 2. Idle count 4660 > threshold: switch to Active
    idle_count = 14'd4660;
    one_frame();
    check(mode == SENS_ACTIVE && ro_cycles == 0, "switch to Active, no readout yet");
    check(last_count == 14'd4660, "Idle count 4660 read");
    // 3. Active readout with 500 pixels: wake-up
    dp_count = 14'd500;
    one_frame();
    check(rst_cyc >= 0 && rst_cyc < ro_rise, "datapath reset before oscillator on");
    check(gate_rise == ro_rise + 1, "clock gate opens one cycle after oscillator");
    check(ro_fall == gate_fall + 1, "oscillator stops one cycle after gate closes");
    check(gate_cycles == DONE_LAT + 4, $sformatf("gate open %0d cycles", gate_cycles));
    check(ro_cycles == gate_cycles + 2, $sformatf("oscillator on %0d cycles", ro_cycles));
    check(wakes == 1 && data_rdy, "one wake-up pulse, data ready");
    check(last_count == 14'd500 && mode == SENS_ACTIVE, "count kept, stays Active");
    // 4. processor busy: readout skipped
    pm_busy = 1;
    one_frame();
    check(ro_cycles == 0 && wakes == 0 && skips == 16'd1, "readout skipped while busy");
    pm_busy = 0;
    // 5. Active readout with few pixels: no wake-up, back to Idle
    dp_count = 14'd30;
    one_frame();
    check(ro_cycles > 0 && wakes == 0 && !data_rdy, "no wake-up below threshold");
    check(mode == SENS_IDLE, "back to Idle");
    // 6. Idle again with threshold raised: no switch
    thresh = 16'd5000; idle_count = 14'd4660;
    one_frame();
    check(mode == SENS_IDLE && ro_cycles == 0, "threshold respected");
    check(frames >= 16'd6, "frame counter");
    // 7. stop: no more frame pulses
    run = 0;
    clear_log();
    repeat (3 * FP) @(negedge clk);
    check(ro_cycles == 0 && cyc - last_frame >= 3 * FP - 1, "stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
