// dcm_phase_shift: behavioural model (not synthesizable) of the FPGA's
// digital clock manager used at the receiver to phase-shift the received
// 25 MHz clock.
//
// On the board the received clock lane enters a clock manager whose
// feedback loop cancels its own insertion delay and adds a fixed phase
// shift, set when the FPGA is configured, in steps of 1/256 of the clock
// period (156.25 ps at 25 MHz).  The shift is chosen per cable so that the
// shifted clock lines up with the encoded data lanes.  This model stands in
// for that hard macro: clk0 is clkin delayed by
//   ((PHASE_SHIFT mod 256) / 256) * CLKIN_PERIOD_PS
// (a negative shift is taken modulo one period, i.e. as an early clock).
// locked rises after LOCK_CYCLES rising edges of clkin following reset;
// clk0 is held low until then and starts with the next whole pulse.  The delay is a transport delay, so the
// duty cycle of clkin is kept.
//
// Ports follow the macro's names (CLKIN, RST, CLK0, LOCKED) in lower case.
// The phase step (1/256 period) follows the design description (156 ps at
// 25 MHz); the lock time and the absence of duty-cycle correction are this
// model's own simplifications.
`timescale 1ns / 1ps
module dcm_phase_shift #(
  parameter int unsigned CLKIN_PERIOD_PS = dat_pkg::CLK_PERIOD_PS,
  parameter int          PHASE_SHIFT     = 0,    // -255 .. 255 steps
  parameter int unsigned LOCK_CYCLES     = 4
) (
  input  logic clkin,
  input  logic rst,
  output logic clk0,
  output logic locked
);

  localparam int unsigned STEPS    = dat_pkg::PS_STEPS_PER_PERIOD;
  localparam int unsigned SHIFT_M  = unsigned'((PHASE_SHIFT % int'(STEPS) + int'(STEPS)) % int'(STEPS));
  // Delay in ns (the time unit of this file).
  localparam realtime DELAY_NS = real'(SHIFT_M) * real'(CLKIN_PERIOD_PS) / real'(STEPS) / 1000.0;

  logic        clk_dly;
  logic [7:0]  lock_cnt;

  initial begin
    assert (PHASE_SHIFT > -int'(STEPS) && PHASE_SHIFT < int'(STEPS))
      else $error("PHASE_SHIFT out of range");
  end

  // Transport delay of the input clock (a zero shift is a plain wire, so
  // that the output changes in the same instant as the input).
  if (SHIFT_M == 0) begin : g_zero
    always_comb clk_dly = clkin;
  end else begin : g_shift
    // Each input edge schedules its own output edge, so that edges closer
    // together than the delay are all kept (transport delay).
    always @(posedge clkin) fork
      #(DELAY_NS) clk_dly = 1'b1;
    join_none
    always @(negedge clkin) fork
      #(DELAY_NS) clk_dly = 1'b0;
    join_none
  end

  always_ff @(posedge clkin or posedge rst) begin
    if (rst) begin
      lock_cnt <= '0;
      locked   <= 1'b0;
    end else if (!locked) begin
      lock_cnt <= lock_cnt + 8'd1;
      if (lock_cnt + 8'd1 >= 8'(LOCK_CYCLES)) locked <= 1'b1;
    end
  end

  // The output is enabled only while the delayed clock is low, so the
  // first output pulse after lock is a full one.
  logic out_en;
  always_ff @(negedge clk_dly or posedge rst) begin
    if (rst) out_en <= 1'b0;
    else     out_en <= locked;
  end

  assign clk0 = clk_dly & out_en;

endmodule
