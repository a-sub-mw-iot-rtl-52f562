// storage_fifo: the Storage Memory of the camera interface. It keeps the
// pixels of one Active readout until the processor has read them over SPI.
//
// How it works. The write side, in the ring-oscillator domain, stores one
// packet of up to four pixels per clock in a memory of DEPTH_PIX/4 words of
// four pixels and keeps the number of stored pixels. Only the last packet of
// a frame may be short, so pixel i sits in word i/4, slot i%4. When the
// memory is full further packets are refused (full_o); they are lost, which
// the paper accepts because its tracking software recovers from missed data.
// The read side, in the SPI clock domain, pops one pixel at a time. Its data
// register is refreshed on every read clock edge from the entry at the next
// read pointer, so rdata_o is valid one read-clock edge after a reset or a
// pop. Writing and reading never overlap in time: the Control Unit wakes the
// processor only after the readout has ended, and starts the next one only
// after the processor has finished. The stored count is therefore static
// when the read side uses it, and no synchronizer is needed for it.
//
// Follows the paper: 1024-pixel capacity (12.5% of the 8192 pixels) and a
// write rate of one 4-pixel packet per datapath clock. Own choices: the
// word organisation, the read-side prefetch register and the drop-when-full
// rule.
//
// Interface: write port (wclk_i, wrst_ni, wr_i, pkt_i, full_o, stored_o),
// read port (rclk_i, rrst_ni, pop_i, avail_o, rdata_o).
`timescale 1ns / 1ps
module storage_fifo
  import cam_pkg::*;
#(
  parameter int unsigned DEPTH_PIX = 1024
) (
  input  logic          wclk_i,
  input  logic          wrst_ni,
  input  logic          wr_i,
  input  packet_t       pkt_i,
  output logic          full_o,
  output logic [$clog2(DEPTH_PIX):0] stored_o,
  input  logic          rclk_i,
  input  logic          rrst_ni,
  input  logic          pop_i,
  output logic          avail_o,
  output pixel_t        rdata_o
);
  localparam int unsigned NWORD = DEPTH_PIX / PKT_PIX;
  localparam int unsigned PW    = $clog2(DEPTH_PIX);
  localparam int unsigned WW    = $clog2(NWORD);

  pixel_t [PKT_PIX-1:0] mem [NWORD];
  logic [WW:0]          wptr_q;      // words written
  logic [PW:0]          rptr_q, rptr_n;
  pixel_t [PKT_PIX-1:0] rword;

  // write side
  assign full_o = (wptr_q == (WW+1)'(NWORD));

  always_ff @(posedge wclk_i) begin
    if (wr_i && !full_o) mem[wptr_q[WW-1:0]] <= pkt_i.pix;
  end

  always_ff @(posedge wclk_i or negedge wrst_ni) begin
    if (!wrst_ni) begin
      wptr_q   <= '0;
      stored_o <= '0;
    end else if (wr_i && !full_o) begin
      wptr_q   <= wptr_q + 1'b1;
      stored_o <= stored_o + (PW+1)'(pkt_i.n);
    end
  end

  // read side
  assign avail_o = (rptr_q < stored_o);
  assign rptr_n  = rptr_q + (PW+1)'(pop_i && avail_o);
  assign rword   = mem[rptr_n[PW-1:2]];

  always_ff @(posedge rclk_i or negedge rrst_ni) begin
    if (!rrst_ni) begin
      rptr_q  <= '0;
      rdata_o <= '0;
    end else begin
      rptr_q  <= rptr_n;
      rdata_o <= rword[rptr_n[1:0]];
    end
  end
endmodule
