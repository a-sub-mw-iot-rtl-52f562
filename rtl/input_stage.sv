// input_stage: front end of the datapath. It converts the sensor's native
// Active-mode stream into (x, y, sign) pixels and gathers four pixels into
// one packet before they enter the dual-clock FIFO.
//
// How it works. The sensor puts one byte per asserted pixel on its 8-bit data
// bus and marks it with a rising edge of Write-Enable (WE); a rising edge of
// End-Of-Row (EOR) marks the end of each of the 64 rows. The module is
// clocked by those two strobes themselves: an EOR-clocked counter gives the
// row index x, and a WE-clocked input register collects pixels. On every
// fourth WE edge the three held pixels plus the one on the bus form a packet,
// which is written into the FIFO on that same edge (wr_o is combinational
// and the FIFO's write port shares the WE clock). A packet thus goes out at a
// quarter of the sensor's 80 Mpixel/s peak rate, which is what lets a 25 MHz
// ring-oscillator clock drain it. After the 64th EOR pulse frame_done_o is
// high; the last 0..3 pixels stay in part_o, static because the sensor has
// finished, and the pixel counter collects them from there.
//
// Follows the paper: sampling on the WE rising edge, 7-bit y plus sign per
// byte, x from the count of EOR pulses, end of stream after 64 EOR pulses,
// 4 pixels per packet. This design's own choices: clocking the register by
// WE and EOR directly, the bit layout of the byte (see cam_pkg), dropping a
// packet when the FIFO is full (counted in drops_o) and the partial-packet
// hand-off.
//
// Some output bits are constant by construction, because packet_t is shared
// with full packets: wdata_o.n is always 4, and part_o's fourth slot and the
// top bit of its count are always zero.
//
// Interface: rst_ni (async, held low between readouts), we_i/eor_i/data_i
// from the sensor, wr_o/wdata_o/full_i to the FIFO write port.
`timescale 1ns / 1ps
module input_stage
  import cam_pkg::*;
(
  input  logic          rst_ni,
  input  logic          we_i,
  input  logic          eor_i,
  input  logic [7:0]    data_i,
  // FIFO write port (clocked by we_i)
  output logic          wr_o,
  output packet_t       wdata_o,
  input  logic          full_i,
  // end of frame and leftover pixels
  output logic          frame_done_o,
  output packet_t       part_o,
  output logic [7:0]    drops_o
);
  logic [XW:0]          rows_q;     // EOR pulses seen, 0..64
  pixel_t [PKT_PIX-2:0] hold_q;     // pixels waiting for a full packet
  logic [1:0]           fill_q;     // how many of hold_q are valid
  pixel_t               cur;

  // Row counter: x coordinate of the pixels that follow.
  always_ff @(posedge eor_i or negedge rst_ni) begin
    if (!rst_ni)                 rows_q <= '0;
    else if (rows_q != (XW+1)'(ROWS)) rows_q <= rows_q + 1'b1;
  end

  assign frame_done_o = (rows_q == (XW+1)'(ROWS));
  assign cur          = decode_byte(data_i, rows_q[XW-1:0]);

  // Fourth pixel: the packet leaves on this very edge.
  always_comb begin
    wdata_o.n   = 3'(PKT_PIX);
    wdata_o.pix = {cur, hold_q[2], hold_q[1], hold_q[0]};
    wr_o        = (fill_q == 2'd3) && !full_i;
  end

  always_ff @(posedge we_i or negedge rst_ni) begin
    if (!rst_ni) begin
      hold_q  <= '0;
      fill_q  <= '0;
      drops_o <= '0;
    end else begin
      if (fill_q != 2'd3) hold_q[fill_q] <= cur;
      fill_q         <= fill_q + 1'b1;      // wraps 3 -> 0 with the packet
      if (fill_q == 2'd3 && full_i && drops_o != 8'hFF) drops_o <= drops_o + 1'b1;
    end
  end

  always_comb begin
    part_o     = '0;
    part_o.n   = {1'b0, fill_q};
    for (int i = 0; i < PKT_PIX - 1; i++) part_o.pix[i] = hold_q[i];
  end
endmodule
