// dat_ddr_ff: the receiver's output flip-flop, set by a rising edge of A
// and cleared by a rising edge of B.
//
// Rules (one output, two edge-sensitive inputs):
//   A rising  -> Q = 1        A falling -> Q holds
//   B rising  -> Q = 0        B falling -> Q holds
// A is the decoded data (exact while the data is low, spiking low while it
// is high) and B the decoded complement (exact while the data is high,
// spiking low while it is low).  A spike on A ends in a rising edge of A,
// which only re-asserts Q = 1; a spike on B only re-asserts Q = 0.  The
// spikes are therefore filtered out while real data edges pass.
//
// The board uses the FPGA's dual-data-rate output register with its two
// clocks driven by A and B and its two data inputs tied to 1 and 0.  Here
// the same behaviour is built from two ordinary flip-flops, each clocked by
// one of the edges, whose outputs are XORed:
//   on A rising: qa <= ~qb  (so qa ^ qb = 1)
//   on B rising: qb <=  qa  (so qa ^ qb = 0)
// Only edges change the state; the output follows one XOR delay after the
// edge.  Simultaneous rising edges of A and B are not covered by the rules
// and do not occur in operation (B is the complement of A).  The
// cross-coupling between the two clock domains is intended: each flop
// samples the other while the other is static.
//
// Follows the design description (the rule table).  The two-flop
// construction and the asynchronous reset to Q = 0 are this design's own.
`timescale 1ns / 1ps
module dat_ddr_ff (
  input  logic rst_n,  // asynchronous reset, Q = 0
  input  logic a,      // set edge
  input  logic b,      // clear edge
  output logic q
);

  logic qa, qb;

  always_ff @(posedge a or negedge rst_n) begin
    if (!rst_n) qa <= 1'b0;
    else        qa <= ~qb;
  end

  always_ff @(posedge b or negedge rst_n) begin
    if (!rst_n) qb <= 1'b0;
    else        qb <= qa;
  end

  assign q = qa ^ qb;

endmodule
