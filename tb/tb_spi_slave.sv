// tb_spi_slave: self-checking test of the SPI slave. A mode-0 master at
// 5 MHz checks the configuration reset values, writes and reads back every
// configuration register, reads the status registers from the inputs, and
// reads the storage memory (a model queue here) in one burst: each word must
// be {1, 0, pixel} in order, one pop per word, and 16'h0000 once the memory
// is empty. It also checks that a read does not change a register.
`timescale 1ns / 1ps
module tb_spi_slave;
  import cam_pkg::*;
  localparam time SPI_HALF = 100;
  logic rst_n = 1, sck = 0, cs_n = 1, mosi = 0, miso;
  logic run;
  logic [15:0] fperiod, expose, thresh;
  logic [15:0] status = 16'h0015, frames = 16'd321, skips = 16'd7;
  logic [CNTW-1:0] count = 14'd1234;
  logic [10:0] stored = 11'd999;
  logic pop, avail;
  pixel_t pix;
  pixel_t mem_q[$];
  int checks = 0, failures = 0, pops = 0;

  spi_slave dut (.rst_ni(rst_n), .sck_i(sck), .cs_ni(cs_n), .mosi_i(mosi), .miso_o(miso),
    .run_o(run), .fperiod_o(fperiod), .expose_o(expose), .thresh_o(thresh),
    .status_i(status), .count_i(count), .stored_i(stored), .frames_i(frames), .skips_i(skips),
    .pop_o(pop), .avail_i(avail), .pix_i(pix));

  `include "spi_master.svh"

  // storage model: head pixel visible, popped on the SCK edge
  assign avail = (mem_q.size() != 0);
  assign pix   = avail ? mem_q[0] : '0;
  always @(posedge sck) if (pop) begin void'(mem_q.pop_front()); pops++; end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #10000000; failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic [15:0] d;
    logic [15:0] words[$];
    pixel_t exp_q[$];
    #1 rst_n = 0;
    #50 rst_n = 1; #50;
    check(!run && fperiod == 16'd3277 && expose == EXPOSE_RST && thresh == THRESH_RST, "reset values");
    spi_read(REG_FPERIOD, d); check(d == 16'd3277, "read frame period reset value");
    for (int i = 0; i < 10; i++) begin
      logic [15:0] a, b, c;
      a = 16'($urandom); b = 16'($urandom); c = 16'($urandom);
      spi_write(REG_FPERIOD, a); spi_write(REG_EXPOSE, b); spi_write(REG_THRESH, c);
      check(fperiod == a && expose == b && thresh == c, "configuration outputs after write");
      spi_read(REG_FPERIOD, d); check(d == a, $sformatf("read back frame period %h/%h", d, a));
      spi_read(REG_EXPOSE, d);  check(d == b, "read back exposure");
      spi_read(REG_THRESH, d);  check(d == c, "read back threshold");
      check(fperiod == a, "read leaves register unchanged");
    end
    spi_write(REG_CTRL, 16'h0001); check(run, "run bit set");
    spi_read(REG_CTRL, d);         check(d == 16'h0001, "read run bit");
    spi_read(REG_STATUS, d);       check(d == status, "status register");
    spi_read(REG_COUNT, d);        check(d == 16'd1234, "count register");
    spi_read(REG_STORED, d);       check(d == 16'd999, "stored register");
    spi_read(REG_FRAMES, d);       check(d == 16'd321, "frames register");
    spi_read(REG_SKIPS, d);        check(d == 16'd7, "skips register");
    spi_write(REG_STATUS, 16'hFFFF);
    spi_read(REG_STATUS, d);       check(d == status, "status unchanged by write");
    // burst read of the storage memory
    for (int i = 0; i < 37; i++) begin
      pixel_t p;
      p = pixel_t'($urandom);
      mem_q.push_back(p); exp_q.push_back(p);
    end
    pops = 0;
    spi_xfer(1'b0, REG_DATA, 16'h0000, 40, words);
    for (int i = 0; i < 40; i++) begin
      if (i < 37) check(words[i] == {2'b10, exp_q[i]}, $sformatf("pixel word %0d: %h", i, words[i]));
      else        check(words[i] == 16'h0000, "empty marker after last pixel");
    end
    check(pops == 37 && mem_q.size() == 0, $sformatf("one pop per pixel (%0d)", pops));
    spi_write(REG_CTRL, 16'h0000); check(!run, "run bit cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
