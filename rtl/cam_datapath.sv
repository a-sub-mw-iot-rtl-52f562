// cam_datapath: the DataPath (DP) of the camera interface. During an Active
// readout it gathers the sensor's pixel stream, converts it to (x, y, sign)
// pixels, counts them and stores up to 1024 of them for the processor.
//
// Structure, as in the paper's block diagram: input stage (4-pixel input
// register) -> dual-clock FIFO -> pixel counter -> storage FIFO. The input
// stage and the FIFO write port run on the sensor's Write-Enable strobe (up
// to 80 Mpixel/s, 20 Mpacket/s); the rest runs on the 25 MHz ring-oscillator
// clock, gated by the Control Unit's clk_gate signal. The storage read port
// runs on the SPI clock. The reset rst_ni is held low by the Control Unit
// between readouts; releasing it clears the previous frame.
//
// Interface: sensor (data_i, we_i, eor_i), ro_clk_i, clk_en_i, rst_ni,
// results for the Control Unit (done_o, count_o, overflow_o, drops_o,
// stored_o) and the storage read port (rd_clk_i, pop_i, avail_o, pix_o).
// done_o and count_o are in the ring-oscillator domain; count_o is stable
// once done_o is high.
`timescale 1ns / 1ps
module cam_datapath
  import cam_pkg::*;
#(
  parameter int unsigned DEPTH_PIX = 1024,
  parameter int unsigned FIFO_AW   = 4
) (
  input  logic            rst_ni,
  // sensor
  input  logic [7:0]      data_i,
  input  logic            we_i,
  input  logic            eor_i,
  // ring oscillator and clock gate
  input  logic            ro_clk_i,
  input  logic            clk_en_i,
  // results
  output logic            done_o,
  output logic [CNTW-1:0] count_o,
  output logic            overflow_o,
  output logic [7:0]      drops_o,
  output logic [$clog2(DEPTH_PIX):0] stored_o,
  // storage read port
  input  logic            rd_clk_i,
  input  logic            pop_i,
  output logic            avail_o,
  output pixel_t          pix_o
);
  logic    gclk;
  logic    wr, full, rd, empty, frame_done, st_wr, st_full;
  packet_t wdata, rdata, part, st_pkt;

  clk_gate u_cg (.clk_i(ro_clk_i), .rst_ni(rst_ni), .en_i(clk_en_i), .gclk_o(gclk));

  input_stage u_in (
    .rst_ni, .we_i, .eor_i, .data_i,
    .wr_o(wr), .wdata_o(wdata), .full_i(full),
    .frame_done_o(frame_done), .part_o(part), .drops_o
  );

  dc_fifo #(.WIDTH($bits(packet_t)), .AW(FIFO_AW)) u_fifo (
    .wclk_i(we_i), .wrst_ni(rst_ni), .wr_i(wr), .wdata_i(wdata), .full_o(full),
    .rclk_i(gclk), .rrst_ni(rst_ni), .rd_i(rd), .rdata_o(rdata), .empty_o(empty)
  );

  pixel_counter u_cnt (
    .clk_i(gclk), .rst_ni,
    .empty_i(empty), .pkt_i(rdata), .rd_o(rd),
    .frame_done_i(frame_done), .part_i(part),
    .st_wr_o(st_wr), .st_pkt_o(st_pkt), .st_full_i(st_full),
    .count_o, .done_o, .overflow_o
  );

  storage_fifo #(.DEPTH_PIX(DEPTH_PIX)) u_store (
    .wclk_i(gclk), .wrst_ni(rst_ni), .wr_i(st_wr), .pkt_i(st_pkt),
    .full_o(st_full), .stored_o,
    .rclk_i(rd_clk_i), .rrst_ni(rst_ni), .pop_i, .avail_o, .rdata_o(pix_o)
  );
endmodule
