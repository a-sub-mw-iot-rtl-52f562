// vision_chip_model: behavioural model of the 128 x 64 binary contrast
// imager, for testbenches only. The real sensor computes spatial contrast
// and a frame difference in analog circuits; this model only reproduces its
// digital output behaviour as the camera interface sees it.
//
// At each sen_frame_i pulse a new frame is made: npix asserted pixels (set
// by the testbench with set_activity) at random positions and signs, kept
// in raster order in the queue frame_q. Idle mode: while sen_rd_i is high
// the 14-bit count of asserted pixels is on data_o, low byte or (with
// sen_cnt_hi_i) high byte. Active mode: a rising sen_rd_i starts the raster
// readout: per row, each pixel's byte {sign, y} with a Write-Enable pulse
// every 12.5 ns (80 Mpixel/s), then an End-Of-Row pulse; rows are ROW_NS
// apart so that a full readout takes about 300 us, the paper's readout time.
// The byte layout and row timing are assumptions of this design.
`timescale 1ns / 1ps
module vision_chip_model
  import cam_pkg::*;
#(
  parameter int ROW_NS = 4600
) (
  input  logic       sen_frame_i,
  input  logic       sen_mode_i,
  input  logic       sen_rd_i,
  input  logic       sen_cnt_hi_i,
  output logic [7:0] data_o,
  output logic       we_o,
  output logic       eor_o
);
  int     npix = 0;          // activity of the next frame
  pixel_t frame_q[$];        // current frame, raster order
  logic [7:0] stream_byte = 0;
  logic   streaming = 0;
  int     readouts = 0;

  function automatic void set_activity(input int n);
    npix = n;
  endfunction

  // build a frame of n pixels in raster order (row by row, y ascending)
  function automatic void make_frame(input int n);
    int per_row[ROWS];
    frame_q.delete();
    foreach (per_row[r]) per_row[r] = 0;
    for (int i = 0; i < n; i++) per_row[$urandom_range(0, ROWS - 1)]++;
    for (int r = 0; r < ROWS; r++) begin
      int ys[$];
      for (int k = 0; k < per_row[r]; k++) ys.push_back($urandom_range(0, COLS - 1));
      ys.sort();
      foreach (ys[k]) begin
        pixel_t p;
        p.sign = 1'($urandom);
        p.x    = XW'(r);
        p.y    = YW'(ys[k]);
        frame_q.push_back(p);
      end
    end
  endfunction

  initial begin
    we_o  = 1'b0;
    eor_o = 1'b0;
  end

  always @(posedge sen_frame_i) make_frame(npix);

  logic [CNTW-1:0] cnt;
  assign cnt    = CNTW'(frame_q.size());
  assign data_o = streaming ? stream_byte
                : (sen_cnt_hi_i ? 8'(cnt >> 8) : cnt[7:0]);

  always @(posedge sen_rd_i) begin
    if (sen_mode_i) begin
      int idx;
      idx = 0;
      streaming = 1'b1;
      readouts++;
      #100;
      for (int r = 0; r < ROWS; r++) begin
        while (idx < frame_q.size() && int'(frame_q[idx].x) == r) begin
          stream_byte = {frame_q[idx].sign, frame_q[idx].y};
          #3     we_o = 1'b1;
          #6.25  we_o = 1'b0;
          #3.25;
          idx++;
        end
        #(ROW_NS);
        eor_o = 1'b1;
        #12.5 eor_o = 1'b0;
      end
      streaming = 1'b0;
    end
  end
endmodule
