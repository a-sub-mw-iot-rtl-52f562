// cam_pkg: types and constants shared by the camera-interface FPGA design.
//
// The vision chip is a 128 x 64 binary spatial-contrast imager. In Active
// mode it streams the asserted pixels of a frame in raster order: per pixel
// one byte holding a 7-bit column coordinate and a sign bit, plus an
// End-Of-Row pulse per row. The camera interface turns this into (x, y, sign)
// pixel records, groups four of them into a packet (the input register of the
// datapath) and stores up to 1024 pixels. Array size, byte format, packet size
// and storage size follow the paper; the bit order inside the byte, the record
// layout and the SPI register map below are this design's own choices.
`timescale 1ns / 1ps
package cam_pkg;

  // Imager geometry (paper: 128x64 imager, 7-bit column coordinate, 64 rows).
  localparam int unsigned COLS      = 128;
  localparam int unsigned ROWS      = 64;
  localparam int unsigned YW        = $clog2(COLS); // 7            // column coordinate width
  localparam int unsigned XW        = $clog2(ROWS); // 6            // row coordinate width
  localparam int unsigned CNTW      = 14;           // 0..8192 fits in 14 bits

  // Pixels gathered per packet by the input register (paper: 4).
  localparam int unsigned PKT_PIX   = 4;

  // One asserted pixel after conversion to (x, y) format.
  typedef struct packed {
    logic          sign;   // polarity of the frame difference (+1 / -1)
    logic [XW-1:0] x;      // row index = number of EOR pulses seen so far
    logic [YW-1:0] y;      // column coordinate sent by the sensor
  } pixel_t;               // 14 bits

  // A packet of up to four pixels; pixel 0 is the oldest.
  typedef struct packed {
    logic [2:0]                 n;    // number of valid pixels, 1..4
    pixel_t [PKT_PIX-1:0]       pix;
  } packet_t;              // 59 bits

  // Byte on the sensor data bus during Active readout (assumed layout).
  function automatic pixel_t decode_byte(input logic [7:0] b, input logic [XW-1:0] row);
    pixel_t p;
    p.sign = b[7];
    p.y    = b[YW-1:0];
    p.x    = row;
    return p;
  endfunction

  // Sensor readout modes (paper: Idle and Active).
  typedef enum logic {
    SENS_IDLE   = 1'b0,
    SENS_ACTIVE = 1'b1
  } sens_mode_e;

  // SPI register map (assumed). Command byte = {write, addr[6:0]}, then one
  // 16-bit data word MSB first; reads of REG_DATA may continue for more
  // words, each popping one stored pixel.
  typedef enum logic [6:0] {
    REG_CTRL     = 7'h00,  // bit0 run (start frame timing)
    REG_FPERIOD  = 7'h01,  // frame period in 32 kHz cycles
    REG_EXPOSE   = 7'h02,  // exposure time in 32 kHz cycles
    REG_THRESH   = 7'h03,  // wake-up pixel threshold
    REG_STATUS   = 7'h04,  // {.., overflow, data_ready, mode}
    REG_COUNT    = 7'h05,  // pixels of the last Active readout
    REG_STORED   = 7'h06,  // pixels held in the storage memory
    REG_FRAMES   = 7'h07,  // frame counter (wraps)
    REG_SKIPS    = 7'h08,  // Active readouts skipped, processor busy
    REG_DATA     = 7'h10   // storage memory read port
  } reg_addr_e;

  // Reset values of the configuration registers. 3277 cycles of 32.768 kHz
  // give the paper's 10 fps; exposure and threshold are assumptions (the
  // threshold values used by the paper are 40, 80 and 100 per application).
  localparam logic [15:0] FPERIOD_RST = 16'd3277;
  localparam logic [15:0] EXPOSE_RST  = 16'd1638;
  localparam logic [15:0] THRESH_RST  = 16'd80;

endpackage
