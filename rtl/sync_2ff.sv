// sync_2ff: two-flip-flop synchronizer for a single-bit level crossing into
// the clock domain of clk_i. Output follows d_i after two to three clk_i
// edges. Used for every control level that crosses between the 32 kHz,
// ring-oscillator, sensor and SPI clock domains of this design.
`timescale 1ns / 1ps
module sync_2ff #(
  parameter logic RST_VAL = 1'b0
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic d_i,
  output logic q_o
);
  logic meta;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      meta <= RST_VAL;
      q_o  <= RST_VAL;
    end else begin
      meta <= d_i;
      q_o  <= meta;
    end
  end
endmodule
