// dat_xor_decoder: receiver-side XOR demodulation of the encoded lanes.
//
// Each encoded data lane is XORed twice with the phase-shifted receive
// clock: once with the clock itself (result A) and once, through a second
// copy of the lane, with the inverted clock (result B).  With the clock
// aligned to the lane, A reproduces the transmitted data and B its
// complement.  On the real board the two copies are routed separately and
// the duty cycle of the lane depends on the data level, so A is exact only
// while the data is low (narrow low-going spikes while it is high) and B
// exact only while the data is high; the dual-edge flip-flop that follows
// (dat_ddr_ff) combines them into a clean output.  Purely combinational.
//
// Interface: ps_clk from the phase-shifting clock manager; clk_en (a CSR
// bit) gates it, so with the clock disabled A = lane and B = ~lane.
//
// Follows the design description: A = encoded data XOR phase-shifted
// clock, B = encoded data XOR inverted phase-shifted clock.  The clock
// gating by an AND gate is this design's own choice.
`timescale 1ns / 1ps
module dat_xor_decoder #(
  parameter int unsigned NUM_DATA = dat_pkg::NUM_DATA_CH
) (
  input  logic                ps_clk,   // phase-shifted receive clock
  input  logic                clk_en,   // CSR: enable the decoding clock
  input  logic [NUM_DATA-1:0] lanes,    // encoded data lanes
  output logic [NUM_DATA-1:0] a,        // lane XOR clock
  output logic [NUM_DATA-1:0] b         // lane XOR inverted clock
);

  logic clk_g, clk_g_n;
  assign clk_g   = ps_clk & clk_en;
  assign clk_g_n = ~clk_g;

  always_comb begin
    for (int i = 0; i < NUM_DATA; i++) begin
      a[i] = lanes[i] ^ clk_g;
      b[i] = lanes[i] ^ clk_g_n;
    end
  end

endmodule
