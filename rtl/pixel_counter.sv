// pixel_counter: read side of the datapath, in the ring-oscillator clock
// domain. It drains packets from the dual-clock FIFO, counts the pixels they
// carry and writes each packet into the storage memory, one packet per clock.
//
// How it works. While the FIFO is not empty a packet is popped every cycle,
// its pixel count (4) is added to count_o and the packet is forwarded to the
// storage memory. When the sensor's end-of-frame flag (synchronized here) is
// seen and the FIFO is empty, the module waits one more cycle for the last
// write pointer to arrive, then takes the 0..3 leftover pixels from the input
// register (static at that point) as a final short packet, and raises done_o.
// One packet per 25 MHz cycle is 100 Mpixel/s, above the sensor's 80 Mpixel/s
// peak, as the paper requires of its 25 MHz clock. Counting all pixels, also
// those the full storage cannot keep, and the overflow flag are this design's
// choices; the paper only names the block.
//
// Interface: clk_i (gated ring-oscillator clock), rst_ni (async, low between
// readouts), FIFO read port, frame_done_i (sensor domain), part_i, storage
// write port (st_wr_o, st_pkt_o, st_full_i), count_o, done_o, overflow_o.
`timescale 1ns / 1ps
module pixel_counter
  import cam_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  // dual-clock FIFO read port
  input  logic            empty_i,
  input  packet_t         pkt_i,
  output logic            rd_o,
  // end of frame from the input stage
  input  logic            frame_done_i,
  input  packet_t         part_i,
  // storage memory write port
  output logic            st_wr_o,
  output packet_t         st_pkt_o,
  input  logic            st_full_i,
  // results
  output logic [CNTW-1:0] count_o,
  output logic            done_o,
  output logic            overflow_o
);
  typedef enum logic [1:0] {S_RUN, S_SETTLE, S_FLUSH, S_DONE} state_e;
  state_e state_q;
  logic   fdone_s;

  sync_2ff u_sync_done (.clk_i(clk_i), .rst_ni(rst_ni), .d_i(frame_done_i), .q_o(fdone_s));

  always_comb begin
    rd_o     = 1'b0;
    st_wr_o  = 1'b0;
    st_pkt_o = pkt_i;
    unique case (state_q)
      S_RUN, S_SETTLE: begin
        rd_o    = !empty_i;
        st_wr_o = !empty_i && !st_full_i;
      end
      S_FLUSH: begin
        st_pkt_o = part_i;
        st_wr_o  = (part_i.n != '0) && !st_full_i;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= S_RUN;
      count_o    <= '0;
      overflow_o <= 1'b0;
    end else begin
      unique case (state_q)
        S_RUN:    if (fdone_s && empty_i) state_q <= S_SETTLE;
        S_SETTLE: if (empty_i) state_q <= S_FLUSH;
        S_FLUSH:  state_q <= S_DONE;
        default:  ;
      endcase
      if (rd_o) begin
        count_o <= count_o + CNTW'(pkt_i.n);
        if (st_full_i) overflow_o <= 1'b1;
      end
      if (state_q == S_FLUSH && part_i.n != '0) begin
        count_o <= count_o + CNTW'(part_i.n);
        if (st_full_i) overflow_o <= 1'b1;
      end
    end
  end

  assign done_o = (state_q == S_DONE);

  // FIFO handshake: never pop an empty FIFO
  a_no_pop_empty: assert property (@(posedge clk_i) disable iff (!rst_ni) rd_o |-> !empty_i)
    else $error("pop of an empty FIFO");
endmodule
