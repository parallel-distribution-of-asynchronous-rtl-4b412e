// paroli_link_model: behavioural model of a twelve-lane parallel optical
// link (optical transmitter, fibre ribbon, optical receiver) for
// testbenches.
//
// Each lane is a transport delay of DELAY_NS plus LANE_SKEW_NS[lane].  The
// received lane is forced low while tx_enable or rx_enable is low or while
// the lane is tripped.  Laser safety: the transmitter input of each lane is
// sampled every 1 ns; if it was high for more than DUTY_LIMIT_PCT percent of
// a 1 us window (windows taken back to back), the lane is switched off
// until tx_enable is taken low.  This reproduces the rule that a lane shuts
// down above 57% duty cycle within 1 us, with back-to-back rather than
// sliding windows.
`timescale 1ns / 1ps
module paroli_link_model #(
  parameter int  NUM_LANES      = 12,
  parameter real DELAY_NS       = 10.0,
  parameter real LANE_SKEW_NS [NUM_LANES] = '{default: 0.0},
  parameter int  WINDOW_NS      = 1000,
  parameter int  DUTY_LIMIT_PCT = 57
) (
  input  logic [NUM_LANES-1:0] tx_lanes,
  input  logic                 tx_enable,
  input  logic                 rx_enable,
  output logic [NUM_LANES-1:0] rx_lanes,
  output logic [NUM_LANES-1:0] tripped
);
  logic [NUM_LANES-1:0] dly;

  for (genvar i = 0; i < NUM_LANES; i++) begin : g_lane
    initial dly[i] = 1'b0;
    always @(posedge tx_lanes[i]) fork
      #(DELAY_NS + LANE_SKEW_NS[i]) dly[i] = 1'b1;
    join_none
    always @(negedge tx_lanes[i]) fork
      #(DELAY_NS + LANE_SKEW_NS[i]) dly[i] = 1'b0;
    join_none
  end

  assign rx_lanes = dly & {NUM_LANES{tx_enable & rx_enable}} & ~tripped;

  // Duty-cycle monitor.
  initial begin
    int high [NUM_LANES];
    tripped = '0;
    forever begin
      for (int i = 0; i < NUM_LANES; i++) high[i] = 0;
      for (int t = 0; t < WINDOW_NS; t++) begin
        #1;
        if (!tx_enable) tripped = '0;
        for (int i = 0; i < NUM_LANES; i++)
          if (tx_enable && tx_lanes[i]) high[i]++;
      end
      for (int i = 0; i < NUM_LANES; i++)
        if (high[i] * 100 > DUTY_LIMIT_PCT * WINDOW_NS) tripped[i] = 1'b1;
    end
  end
endmodule
