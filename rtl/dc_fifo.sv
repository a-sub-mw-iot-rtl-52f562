// dc_fifo: dual-clock FIFO between the sensor's Write-Enable domain and the
// ring-oscillator domain of the datapath.
//
// Classic Gray-pointer design: each side keeps a binary and a Gray pointer of
// AW+1 bits; the Gray pointer of one side is passed through two flip-flops
// into the other side, where full (write) or empty (read) is computed. Both
// flags are pessimistic while a pointer is in flight, so no entry is lost or
// read twice. Because the write clock is the sensor strobe, which stops at
// the end of a readout, the write side may see the read pointer late; that
// only makes it report full early. The FIFO and its role follow the paper;
// depth, width and the Gray-pointer scheme are this design's own.
//
// Interface: write port (wclk_i, wrst_ni, wr_i, wdata_i, full_o) and read
// port (rclk_i, rrst_ni, rd_i, rdata_o, empty_o). rdata_o shows the head
// entry while empty_o is low; rd_i pops it on the next rclk_i edge.
`timescale 1ns / 1ps
module dc_fifo #(
  parameter int unsigned WIDTH = 59,
  parameter int unsigned AW    = 4          // 16 entries
) (
  input  logic             wclk_i,
  input  logic             wrst_ni,
  input  logic             wr_i,
  input  logic [WIDTH-1:0] wdata_i,
  output logic             full_o,
  input  logic             rclk_i,
  input  logic             rrst_ni,
  input  logic             rd_i,
  output logic [WIDTH-1:0] rdata_o,
  output logic             empty_o
);
  logic [WIDTH-1:0] mem [2**AW];
  logic [AW:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [AW:0] wgray_s1, wgray_s2, rgray_s1, rgray_s2;
  logic [AW:0] wbin_n, rbin_n;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  assign full_o = (wgray_q == {~rgray_s2[AW:AW-1], rgray_s2[AW-2:0]});
  assign wbin_n = wbin_q + (AW+1)'(wr_i && !full_o);

  always_ff @(posedge wclk_i) begin
    if (wr_i && !full_o) mem[wbin_q[AW-1:0]] <= wdata_i;
  end

  always_ff @(posedge wclk_i or negedge wrst_ni) begin
    if (!wrst_ni) begin
      wbin_q   <= '0;
      wgray_q  <= '0;
      rgray_s1 <= '0;
      rgray_s2 <= '0;
    end else begin
      wbin_q   <= wbin_n;
      wgray_q  <= bin2gray(wbin_n);
      rgray_s1 <= rgray_q;
      rgray_s2 <= rgray_s1;
    end
  end

  // the pointers may never be more than the depth apart
  a_no_overrun: assert property (@(posedge wclk_i) disable iff (!wrst_ni)
                                 (wbin_q - rbin_q) <= (AW+1)'(2**AW))
    else $error("write pointer overran the read pointer");

  // read side
  assign empty_o = (rgray_q == wgray_s2);
  assign rbin_n  = rbin_q + (AW+1)'(rd_i && !empty_o);
  assign rdata_o = mem[rbin_q[AW-1:0]];

  always_ff @(posedge rclk_i or negedge rrst_ni) begin
    if (!rrst_ni) begin
      rbin_q   <= '0;
      rgray_q  <= '0;
      wgray_s1 <= '0;
      wgray_s2 <= '0;
    end else begin
      rbin_q   <= rbin_n;
      rgray_q  <= bin2gray(rbin_n);
      wgray_s1 <= wgray_q;
      wgray_s2 <= wgray_s1;
    end
  end
endmodule
