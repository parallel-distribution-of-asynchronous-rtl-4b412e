// dat_xor_encoder: transmitter-side XOR modulation of the data channels
// with the 25 MHz clock.
//
// The optical link module switches off a lane whose duty cycle exceeds 57%
// within 1 us, so a long high level cannot be sent as it is.  Each data
// channel is therefore XORed with the 25 MHz clock: a low input sends the
// clock, a high input sends the inverted clock, and every lane toggles at
// 25 MHz with a 50% duty cycle whatever the data does.  A twelfth XOR gate
// combines the clock with constant 0, giving the receiver a copy of the
// clock that passed through the same kind of gate as the data (same delay
// and duty cycle).  The encoder is purely combinational: no dead time, and
// an input edge reaches the lane after only the gate delay.
//
// Interface: lanes[NUM_DATA-1:0] are the encoded data, lanes[NUM_DATA] the
// encoded clock.  clk_en (a CSR bit) gates the clock; with it low each lane
// carries its raw input and the clock lane is held low.
//
// Follows the design description: fan-out of the clock to 12 XOR gates,
// the twelfth with ground.  The gating of the clock by an AND gate is this
// design's own way of implementing the "clock enable" control bit.
`timescale 1ns / 1ps
module dat_xor_encoder #(
  parameter int unsigned NUM_DATA = dat_pkg::NUM_DATA_CH
) (
  input  logic                clk_osc,  // 25 MHz oscillator clock
  input  logic                clk_en,   // CSR: enable the coding clock
  input  logic [NUM_DATA-1:0] data_in,  // asynchronous data channels
  output logic [NUM_DATA:0]   lanes     // encoded data + encoded clock lane
);

  logic clk_g;
  assign clk_g = clk_osc & clk_en;

  always_comb begin
    for (int i = 0; i < NUM_DATA; i++)
      lanes[i] = data_in[i] ^ clk_g;
    lanes[NUM_DATA] = 1'b0 ^ clk_g;
  end

endmodule
