// control_unit: the always-on Control Unit (CU) of the camera interface,
// clocked by the free-running 32 kHz reference.
//
// What it does. It times the sensor frame by frame, reads the sensor's pixel
// counter in Idle mode, switches the sensor between Idle and Active on the
// wake-up threshold, turns the ring oscillator and the datapath clock on only
// for an Active readout, and sends the wake-up event to the processor's
// power manager when a readout holds enough pixels.
//
// How it works. A frame timer counts fperiod_i cycles (3277 cycles of
// 32.768 kHz = 10 fps) and pulses sen_frame_o at the start of each frame.
// After expose_i cycles the frame is read out:
//   * Idle mode: sen_rd_o is raised and the 14-bit pixel count is read from
//     the 8-bit data bus in two cycles (low byte, then high byte selected by
//     sen_cnt_hi_o). If it exceeds thresh_i the sensor is switched to Active,
//     so the next frame is read out in full.
//   * Active mode: if the processor is still busy with the previous frame
//     the readout is skipped. Otherwise the datapath reset is pulsed, the
//     ring oscillator is enabled, the datapath clock gate opened and sen_rd_o
//     raised; the CU then waits for the datapath's done flag (synchronized),
//     closes the gate and stops the oscillator one cycle later. If the counted
//     pixels exceed thresh_i a one-cycle wake_o pulse is sent and data_rdy_o
//     set; otherwise the sensor returns to Idle. A readout still running when
//     the frame ends is closed at that point.
//
// Follows the paper: 32 kHz clocking, Idle count vs. threshold deciding the
// switch to Active, ring oscillator and clock gate enabled only during the
// readout, wake-up after the readout completes. The sensor's own control
// sequence is documented elsewhere and not in the paper, so the sensor
// control port here is abstract (frame, mode, read, byte select); the
// return to Idle, the busy skip and the two-byte count format are this
// design's choices.
//
// Interface: clk_i (32 kHz), rst_ni, configuration (run_i, fperiod_i,
// expose_i, thresh_i, quasi-static, written over SPI), sensor control and
// data bus, datapath control/results, pm_busy_i, wake_o and status outputs.
`timescale 1ns / 1ps
module control_unit
  import cam_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  // configuration
  input  logic            run_i,
  input  logic [15:0]     fperiod_i,
  input  logic [15:0]     expose_i,
  input  logic [15:0]     thresh_i,
  // sensor
  output logic            sen_frame_o,
  output sens_mode_e      sen_mode_o,
  output logic            sen_rd_o,
  output logic            sen_cnt_hi_o,
  input  logic [7:0]      sen_data_i,
  // datapath
  output logic            ro_en_o,
  output logic            dp_clk_en_o,
  output logic            dp_rst_no,
  input  logic            dp_done_i,
  input  logic [CNTW-1:0] dp_count_i,
  // power manager
  input  logic            pm_busy_i,
  output logic            wake_o,
  // status
  output logic            data_rdy_o,
  output logic [CNTW-1:0] last_count_o,
  output logic [15:0]     frames_o,
  output logic [15:0]     skips_o
);
  typedef enum logic [3:0] {
    C_WAIT, C_CNT_LO, C_CNT_HI, C_DECIDE,
    C_DP_RST, C_RO_ON, C_READ, C_RO_OFF, C_CHECK
  } cstate_e;

  cstate_e     state_q;
  logic [15:0] tmr_q;
  logic [7:0]  cnt_lo_q;
  logic        done_s;
  logic        frame_end;

  sync_2ff u_sync_done (.clk_i, .rst_ni, .d_i(dp_done_i), .q_o(done_s));

  assign frame_end = run_i && (tmr_q >= fperiod_i - 16'd1);

  // rules of the oscillator / clock-gate handshake
  a_gate_needs_osc: assert property (@(posedge clk_i) disable iff (!rst_ni) dp_clk_en_o |-> ro_en_o)
    else $error("datapath clock gate open while the ring oscillator is off");
  a_wake_single: assert property (@(posedge clk_i) disable iff (!rst_ni) wake_o |=> !wake_o)
    else $error("wake-up event longer than one cycle");

  // outputs decoded from the state
  always_comb begin
    sen_rd_o     = 1'b0;
    sen_cnt_hi_o = 1'b0;
    ro_en_o      = 1'b0;
    dp_clk_en_o  = 1'b0;
    dp_rst_no    = 1'b1;
    unique case (state_q)
      C_CNT_LO: sen_rd_o = 1'b1;
      C_CNT_HI: begin sen_rd_o = 1'b1; sen_cnt_hi_o = 1'b1; end
      C_DP_RST: dp_rst_no = 1'b0;
      C_RO_ON:  ro_en_o = 1'b1;
      C_READ:   begin ro_en_o = 1'b1; dp_clk_en_o = 1'b1; sen_rd_o = 1'b1; end
      C_RO_OFF: ro_en_o = 1'b1;
      default:  ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= C_WAIT;
      tmr_q        <= '0;
      sen_frame_o  <= 1'b0;
      sen_mode_o   <= SENS_IDLE;
      cnt_lo_q     <= '0;
      wake_o       <= 1'b0;
      data_rdy_o   <= 1'b0;
      last_count_o <= '0;
      frames_o     <= '0;
      skips_o      <= '0;
    end else begin
      sen_frame_o <= 1'b0;
      wake_o      <= 1'b0;

      // frame timer
      if (!run_i) begin
        tmr_q <= '0;
      end else if (frame_end) begin
        tmr_q       <= '0;
        sen_frame_o <= 1'b1;
        frames_o    <= frames_o + 1'b1;
      end else begin
        tmr_q <= tmr_q + 1'b1;
      end

      unique case (state_q)
        C_WAIT: if (run_i && tmr_q == expose_i) begin
          if (sen_mode_o == SENS_IDLE) state_q <= C_CNT_LO;
          else if (pm_busy_i) begin
            skips_o <= skips_o + 1'b1;
            state_q <= C_WAIT;
          end else begin
            data_rdy_o <= 1'b0;
            state_q    <= C_DP_RST;
          end
        end
        C_CNT_LO: begin cnt_lo_q <= sen_data_i; state_q <= C_CNT_HI; end
        C_CNT_HI: begin
          last_count_o <= {sen_data_i[CNTW-9:0], cnt_lo_q};
          state_q      <= C_DECIDE;
        end
        C_DECIDE: begin
          if (32'(last_count_o) > 32'(thresh_i)) sen_mode_o <= SENS_ACTIVE;
          state_q <= C_WAIT;
        end
        C_DP_RST: state_q <= C_RO_ON;
        C_RO_ON:  state_q <= C_READ;
        C_READ:   if (done_s || frame_end) state_q <= C_RO_OFF;
        C_RO_OFF: begin
          last_count_o <= dp_count_i;
          state_q      <= C_CHECK;
        end
        C_CHECK: begin
          if (32'(last_count_o) > 32'(thresh_i)) begin
            wake_o     <= 1'b1;
            data_rdy_o <= 1'b1;
          end else begin
            sen_mode_o <= SENS_IDLE;
          end
          state_q <= C_WAIT;
        end
        default: state_q <= C_WAIT;
      endcase
    end
  end
endmodule
