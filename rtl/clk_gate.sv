// clk_gate: glitch-free clock gate built from flip-flops only. The enable is
// synchronized into the clock domain on rising edges, then re-registered on
// the falling edge, so it can change only while the clock is low; the gated
// clock is the AND of the two. This is the clk_gate path from the Control
// Unit to the datapath; the flip-flop form (instead of a latch-based cell) is
// this design's choice.
//
// Interface: clk_i, rst_ni (async), en_i (any domain), gclk_o.
// Timing: gclk_o starts two to three clk_i cycles after en_i rises and
// stops as many cycles after it falls, always with full-width pulses.
`timescale 1ns / 1ps
module clk_gate (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic en_i,
  output logic gclk_o
);
  logic en_s, en_neg;

  sync_2ff u_sync (.clk_i(clk_i), .rst_ni(rst_ni), .d_i(en_i), .q_o(en_s));

  always_ff @(negedge clk_i or negedge rst_ni) begin
    if (!rst_ni) en_neg <= 1'b0;
    else         en_neg <= en_s;
  end

  assign gclk_o = clk_i & en_neg;
endmodule
