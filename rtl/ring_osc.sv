// ring_osc: behavioural model of the on-FPGA ring oscillator (not synthesizable
// logic; a real ring oscillator is an odd chain of inverters placed by hand).
//
// The oscillator clocks the camera-interface datapath. It runs only while the
// Control Unit holds en_i high, that is during the short sensor readout, and
// is stopped for the rest of the frame to save power. The 25 MHz default is
// the paper's frequency; the start-up delay and the rule that the output
// stops low are this model's own choices.
//
// Interface: en_i (async enable from the Control Unit), clk_o (clock).
// Timing:    after en_i rises the first rising edge comes one half period
//            later; after en_i falls the clock finishes its high phase and
//            stays low, so no short pulse is produced.
`timescale 1ns / 1ps
module ring_osc #(
  parameter int unsigned FREQ_MHZ = 25
) (
  input  logic en_i,
  output logic clk_o
);
  localparam realtime HALF_NS = 500.0 / FREQ_MHZ;

  initial clk_o = 1'b0;

  always begin
    wait (en_i);
    #(HALF_NS) clk_o = 1'b1;
    #(HALF_NS) clk_o = 1'b0;
  end
endmodule
