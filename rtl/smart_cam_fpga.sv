// smart_cam_fpga: the low-power FPGA that sits between the binary contrast
// vision chip and the PULP processor. It holds the camera interface (Control
// Unit, ring oscillator, DataPath, SPI slave) and the external power manager
// of the processor.
//
// Event-driven operation. In every frame the 32 kHz Control Unit reads the
// sensor's count of changed pixels. While the count stays at or below the
// threshold nothing else runs: the ring oscillator is off and the processor
// is power-gated. When the count exceeds the threshold the sensor is put in
// Active mode; in the next frame the ring oscillator and the datapath clock
// run only for the readout, the pixels are converted to (x, y) form, counted
// and stored, and, if there are more than the threshold, a wake-up event
// goes to the power manager. That one powers the cluster and FLL regions,
// waits for the power gates' acknowledge, raises fetch-enable, and turns the
// regions off again on the processor's End-Of-Computation (EOC) signal. In
// between, the processor reads the pixels through the SPI slave.
//
// Clock domains: clk32k_i (Control Unit, power manager), the sensor's
// Write-Enable strobe (input register, FIFO write side), the on-chip ring
// oscillator (rest of the datapath, gated) and the SPI clock (SPI slave,
// storage read side). See the sub-modules for the crossings.
//
// Ports: sensor data and control, SPI slave pins, power-gate enables and
// acknowledges, fetch-enable, EOC; wake_o and ro_en_o are brought out for
// observation. STATUS register layout: {11'b0, overflow, drops, busy,
// data_ready, mode}.
`timescale 1ns / 1ps
module smart_cam_fpga
  import cam_pkg::*;
#(
  parameter int unsigned DEPTH_PIX = 1024,
  parameter int unsigned FIFO_AW   = 4,
  parameter int unsigned RO_MHZ    = 25
) (
  input  logic       clk32k_i,
  input  logic       rst_ni,
  // vision chip
  input  logic [7:0] sen_data_i,
  input  logic       sen_we_i,
  input  logic       sen_eor_i,
  output logic       sen_frame_o,
  output logic       sen_mode_o,
  output logic       sen_rd_o,
  output logic       sen_cnt_hi_o,
  // SPI slave
  input  logic       spi_sck_i,
  input  logic       spi_cs_ni,
  input  logic       spi_mosi_i,
  output logic       spi_miso_o,
  // PULP power control
  output logic [1:0] pg_en_o,
  input  logic [1:0] pg_ack_i,
  output logic       fetch_en_o,
  input  logic       eoc_i,
  // observation
  output logic       wake_o,
  output logic       ro_en_o
);
  logic            ro_clk, dp_clk_en, dp_rst_cu, dp_rst_n;
  logic            dp_done, dp_ovf, avail, pop, pm_busy, data_rdy, run;
  logic [CNTW-1:0] dp_count, last_count;
  logic [7:0]      drops;
  logic [10:0]     stored;
  logic [15:0]     fperiod, expose, thresh, frames, skips, status;
  pixel_t          pix;
  sens_mode_e      mode;

  assign dp_rst_n   = rst_ni & dp_rst_cu;
  assign sen_mode_o = (mode == SENS_ACTIVE);
  assign status     = {11'd0, dp_ovf, drops != 8'd0, pm_busy, data_rdy, sen_mode_o};

  ring_osc #(.FREQ_MHZ(RO_MHZ)) u_ro (.en_i(ro_en_o), .clk_o(ro_clk));

  control_unit u_cu (
    .clk_i(clk32k_i), .rst_ni,
    .run_i(run), .fperiod_i(fperiod), .expose_i(expose), .thresh_i(thresh),
    .sen_frame_o, .sen_mode_o(mode), .sen_rd_o, .sen_cnt_hi_o, .sen_data_i,
    .ro_en_o, .dp_clk_en_o(dp_clk_en), .dp_rst_no(dp_rst_cu),
    .dp_done_i(dp_done), .dp_count_i(dp_count),
    .pm_busy_i(pm_busy), .wake_o,
    .data_rdy_o(data_rdy), .last_count_o(last_count), .frames_o(frames), .skips_o(skips)
  );

  cam_datapath #(.DEPTH_PIX(DEPTH_PIX), .FIFO_AW(FIFO_AW)) u_dp (
    .rst_ni(dp_rst_n), .data_i(sen_data_i), .we_i(sen_we_i), .eor_i(sen_eor_i),
    .ro_clk_i(ro_clk), .clk_en_i(dp_clk_en),
    .done_o(dp_done), .count_o(dp_count), .overflow_o(dp_ovf), .drops_o(drops),
    .stored_o(stored),
    .rd_clk_i(spi_sck_i), .pop_i(pop), .avail_o(avail), .pix_o(pix)
  );

  spi_slave u_spi (
    .rst_ni, .sck_i(spi_sck_i), .cs_ni(spi_cs_ni), .mosi_i(spi_mosi_i), .miso_o(spi_miso_o),
    .run_o(run), .fperiod_o(fperiod), .expose_o(expose), .thresh_o(thresh),
    .status_i(status), .count_i(last_count), .stored_i(11'(stored)), .frames_i(frames), .skips_i(skips),
    .pop_o(pop), .avail_i(avail), .pix_i(pix)
  );

  power_manager u_pm (
    .clk_i(clk32k_i), .rst_ni, .wake_i(wake_o), .pg_ack_i, .eoc_i,
    .pg_en_o, .fetch_en_o, .busy_o(pm_busy)
  );
endmodule
