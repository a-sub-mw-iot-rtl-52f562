// power_manager: the external PULP power manager. It powers the processor's
// cluster and FLL regions up when the camera interface has data, starts the
// processor, and powers it down again when the software signals the end of
// its computation.
//
// State machine (the paper's Fig. 4): idle --wake-up event--> power-up
// (power-gate enables on) --acknowledge from the power gates--> active
// (fetch-enable on) --EOC--> idle (gates and fetch-enable off). The SoC
// region is never gated, so L2 keeps the program between activations.
//
// Own choices: the power-gate acknowledge is one bit per gated region
// (FLL, cluster) and both must be high; acknowledge and EOC come from off-chip
// and pass through two-flip-flop synchronizers; EOC is taken on its rising
// edge, so a level left high by the previous run cannot end the next one.
// busy_o (any state but idle) tells the Control Unit that the storage memory
// is still in use.
//
// Interface: clk_i (32 kHz), rst_ni, wake_i (one-cycle pulse), pg_ack_i,
// eoc_i, pg_en_o[0] FLL region, pg_en_o[1] cluster region, fetch_en_o,
// busy_o. Timing: the power-gate enables rise on the clock edge after the
// wake-up pulse; fetch-enable rises 3 cycles after both acknowledges; the
// gates open 3 cycles after the rising EOC edge.
`timescale 1ns / 1ps
module power_manager (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       wake_i,
  input  logic [1:0] pg_ack_i,
  input  logic       eoc_i,
  output logic [1:0] pg_en_o,
  output logic       fetch_en_o,
  output logic       busy_o
);
  typedef enum logic [1:0] {PM_IDLE, PM_POWER_UP, PM_ACTIVE} pm_state_e;
  pm_state_e  state_q;
  logic [1:0] ack_s;
  logic       eoc_s, eoc_q;

  sync_2ff u_sync_ack0 (.clk_i, .rst_ni, .d_i(pg_ack_i[0]), .q_o(ack_s[0]));
  sync_2ff u_sync_ack1 (.clk_i, .rst_ni, .d_i(pg_ack_i[1]), .q_o(ack_s[1]));
  sync_2ff u_sync_eoc  (.clk_i, .rst_ni, .d_i(eoc_i),       .q_o(eoc_s));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= PM_IDLE;
      eoc_q   <= 1'b0;
    end else begin
      eoc_q <= eoc_s;
      unique case (state_q)
        PM_IDLE:     if (wake_i)          state_q <= PM_POWER_UP;
        PM_POWER_UP: if (&ack_s)          state_q <= PM_ACTIVE;
        PM_ACTIVE:   if (eoc_s && !eoc_q) state_q <= PM_IDLE;
        default:                          state_q <= PM_IDLE;
      endcase
    end
  end

  // fetch-enable only with both regions powered
  a_fetch_powered: assert property (@(posedge clk_i) disable iff (!rst_ni) fetch_en_o |-> pg_en_o == 2'b11)
    else $error("fetch-enable without power");

  assign pg_en_o    = (state_q == PM_IDLE) ? 2'b00 : 2'b11;
  assign fetch_en_o = (state_q == PM_ACTIVE);
  assign busy_o     = (state_q != PM_IDLE);
endmodule
