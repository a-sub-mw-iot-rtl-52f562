// spi_slave: SPI slave port through which the processor configures the
// camera interface and reads out the stored pixels.
//
// Protocol (SPI mode 0, MSB first; the paper gives only the port and the
// 5 MHz clock, so the frame format and register map are this design's own):
// with cs_ni low the master sends a command byte {write, addr[6:0]}, followed
// by 16-bit data words. A write stores the first word into the addressed
// configuration register. A read returns the register on MISO in the word
// after the command; a read of REG_DATA may go on for any number of words,
// each popping one pixel from the storage memory as {valid, 1'b0, pixel},
// or 16'h0000 once the memory is empty.
//
// How it works. The whole module runs on SCK: MOSI is shifted in on rising
// edges, MISO is shifted out on falling edges. Raising cs_ni (or the global
// reset) resets the bit counters asynchronously. The configuration registers are reset by rst_ni
// and are read by the 32 kHz Control Unit as quasi-static values: software
// writes them before it sets the run bit. The status inputs come from other
// clock domains and are sampled while the processor reads them, when they
// are not changing (the processor only reads after a wake-up).
//
// Interface: SPI pins (sck_i, cs_ni, mosi_i, miso_o), configuration outputs,
// status inputs, storage read port (pop_o, avail_i, pix_i).
`timescale 1ns / 1ps
module spi_slave
  import cam_pkg::*;
(
  input  logic            rst_ni,
  input  logic            sck_i,
  input  logic            cs_ni,
  input  logic            mosi_i,
  output logic            miso_o,
  // configuration
  output logic            run_o,
  output logic [15:0]     fperiod_o,
  output logic [15:0]     expose_o,
  output logic [15:0]     thresh_o,
  // status
  input  logic [15:0]     status_i,
  input  logic [CNTW-1:0] count_i,
  input  logic [10:0]     stored_i,
  input  logic [15:0]     frames_i,
  input  logic [15:0]     skips_i,
  // storage memory read port
  output logic            pop_o,
  input  logic            avail_i,
  input  pixel_t          pix_i
);
  logic        in_cmd_q;
  logic [2:0]  ccnt_q;
  logic [3:0]  dcnt_q;
  logic [6:0]  csr_q;          // command shift register
  logic [14:0] dsr_q;          // data shift register
  logic        wr_q;
  reg_addr_e   addr_q;
  logic [15:0] word_q, tx_q, rword;
  logic [7:0]  cmd;
  logic        load_cmd, load_data;
  logic        clr;             // transaction reset: CS high or global reset

  assign clr = cs_ni | ~rst_ni;

  assign cmd       = {csr_q, mosi_i};
  assign load_cmd  = in_cmd_q && ccnt_q == 3'd7 && !cmd[7];
  assign load_data = !in_cmd_q && dcnt_q == 4'd15 && !wr_q && addr_q == REG_DATA;

  // value returned by a read of address a (REG_DATA handled by pop logic)
  function automatic logic [15:0] reg_value(input logic [6:0] a);
    unique case (a)
      REG_CTRL:    return {15'd0, run_o};
      REG_FPERIOD: return fperiod_o;
      REG_EXPOSE:  return expose_o;
      REG_THRESH:  return thresh_o;
      REG_STATUS:  return status_i;
      REG_COUNT:   return 16'(count_i);
      REG_STORED:  return 16'(stored_i);
      REG_FRAMES:  return frames_i;
      REG_SKIPS:   return skips_i;
      REG_DATA:    return avail_i ? {2'b10, pix_i} : 16'h0000;
      default:     return 16'h0000;
    endcase
  endfunction

  assign rword = reg_value(load_cmd ? cmd[6:0] : addr_q);
  assign pop_o = (load_cmd && cmd[6:0] == REG_DATA) || load_data ? avail_i : 1'b0;

  // receive side, rising edges
  always_ff @(posedge sck_i or posedge clr) begin
    if (clr) begin
      in_cmd_q <= 1'b1;
      ccnt_q   <= '0;
      dcnt_q   <= '0;
      csr_q    <= '0;
      dsr_q    <= '0;
      wr_q     <= 1'b0;
      addr_q   <= REG_CTRL;
      word_q   <= '0;
    end else if (in_cmd_q) begin
      csr_q  <= cmd[6:0];
      ccnt_q <= ccnt_q + 1'b1;
      if (ccnt_q == 3'd7) begin
        in_cmd_q <= 1'b0;
        wr_q     <= cmd[7];
        addr_q   <= reg_addr_e'(cmd[6:0]);
        if (!cmd[7]) word_q <= rword;
      end
    end else begin
      dsr_q  <= {dsr_q[13:0], mosi_i};
      dcnt_q <= dcnt_q + 1'b1;
      if (load_data) word_q <= rword;
    end
  end

  // configuration registers: written at the end of the first data word
  always_ff @(posedge sck_i or negedge rst_ni) begin
    if (!rst_ni) begin
      run_o     <= 1'b0;
      fperiod_o <= FPERIOD_RST;
      expose_o  <= EXPOSE_RST;
      thresh_o  <= THRESH_RST;
    end else if (!in_cmd_q && wr_q && dcnt_q == 4'd15) begin
      unique case (addr_q)
        REG_CTRL:    run_o     <= mosi_i;
        REG_FPERIOD: fperiod_o <= {dsr_q, mosi_i};
        REG_EXPOSE:  expose_o  <= {dsr_q, mosi_i};
        REG_THRESH:  thresh_o  <= {dsr_q, mosi_i};
        default: ;
      endcase
    end
  end

  // transmit side, falling edges: load a word at each word start
  always_ff @(negedge sck_i or posedge clr) begin
    if (clr)                           tx_q <= '0;
    else if (!in_cmd_q && dcnt_q == '0) tx_q <= word_q;
    else                               tx_q <= {tx_q[14:0], 1'b0};
  end

  assign miso_o = tx_q[15];
endmodule
