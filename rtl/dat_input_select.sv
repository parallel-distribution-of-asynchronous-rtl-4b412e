// dat_input_select: per-channel choice between the two front-panel inputs
// of the DAT transmitter.
//
// Every data channel arrives twice at the transmitter, once from the 26-way
// IDC header and once from a twin-axial LEMO connector.  A 2:1 multiplexer
// per channel picks one of them, under control of one CSR bit per channel
// (sel[i] = 0: IDC, 1: LEMO).  The path is purely combinational, so a pulse
// of any width passes with no dead time; only the select bits are static
// (set over VME).
//
// Follows the design description: one multiplexer per channel, each
// selected individually over VME.  The bit polarity is this design's own.
`timescale 1ns / 1ps
module dat_input_select #(
  parameter int unsigned NUM_CH = dat_pkg::NUM_DATA_CH
) (
  input  logic [NUM_CH-1:0] idc_in,   // channels from the IDC header
  input  logic [NUM_CH-1:0] lemo_in,  // channels from the LEMO connectors
  input  logic [NUM_CH-1:0] sel,      // 0 = IDC, 1 = LEMO, per channel
  output logic [NUM_CH-1:0] data_out  // selected channels
);

  always_comb begin
    for (int i = 0; i < NUM_CH; i++)
      data_out[i] = (sel[i] == dat_pkg::IN_SEL_LEMO) ? lemo_in[i] : idc_in[i];
  end

endmodule
