// dat_top: one DAT transmitter/receiver pair, the complete signal chain of
// the Digital Asynchronous Transceiver apart from the optics.
//
// The transmitter FPGA (dat_tx_fpga) XOR-encodes eleven asynchronous
// front-panel signals with a 25 MHz clock and drives twelve lanes
// (tx_lanes, [NUM_DATA] = clock lane) to the parallel optical transmitter.
// The receiver FPGA (dat_rx_fpga) takes twelve lanes back (rx_lanes) from
// the parallel optical receiver or the wire interconnect, aligns the
// received clock, decodes and restores the eleven signals and presents them
// with the clock on the front panel.  The two FPGAs sit on separate VME
// modules, usually hundreds of metres apart, so each has its own VME port
// and the optical link, fibre ribbon and level translators between and
// around them are outside this module: tx_lanes/tx_laser_en go to the
// optical transmitter, rx_lanes/rx_link_en come from the optical receiver.
//
// Timing: from a front-panel input to the matching output the path is
// combinational apart from the final set/reset flip-flop, so the latency is
// the gate delays plus the link delay and there is no dead time.
// PHASE_SHIFT (1/256-period steps) sets the receiver clock alignment and
// has to match the cable and boards; 0 suits a link whose clock and data
// lanes have equal delay.
//
// Structure and channel counts follow the design description; the split of
// ports and the default phase setting are this design's own.
`timescale 1ns / 1ps
module dat_top #(
  parameter int unsigned NUM_DATA    = dat_pkg::NUM_DATA_CH,
  parameter int          PHASE_SHIFT = 0
) (
  // ---- transmitter module ----
  input  logic                tx_clk_osc,       // 25 MHz oscillator
  input  logic [NUM_DATA-1:0] tx_idc_in,
  input  logic [NUM_DATA-1:0] tx_lemo_in,
  output logic [NUM_DATA:0]   tx_lanes,
  output logic                tx_laser_en,
  output logic                tx_led,
  output logic                tx_test_hdr_en,
  input  logic                tx_vme_sysclk,
  input  logic                tx_vme_sysreset_n,
  input  logic [7:0]          tx_base_addr,
  input  logic [15:0]         tx_module_id,
  input  logic [15:1]         tx_vme_addr,
  input  logic [5:0]          tx_vme_am,
  input  logic                tx_vme_as_n,
  input  logic                tx_vme_ds0_n,
  input  logic                tx_vme_ds1_n,
  input  logic                tx_vme_write_n,
  input  logic [15:0]         tx_vme_data_i,
  output logic [15:0]         tx_vme_data_o,
  output logic                tx_vme_data_oe,
  output logic                tx_vme_dtack_n,
  // ---- receiver module ----
  input  logic [NUM_DATA:0]   rx_lanes,
  output logic                rx_link_en,
  output logic [NUM_DATA:0]   rx_out_lemo,
  output logic [NUM_DATA:0]   rx_out_idc,
  output logic                rx_led,
  output logic                rx_test_hdr_en,
  output logic                rx_dcm_locked,
  input  logic                rx_vme_sysclk,
  input  logic                rx_vme_sysreset_n,
  input  logic [7:0]          rx_base_addr,
  input  logic [15:0]         rx_module_id,
  input  logic [15:1]         rx_vme_addr,
  input  logic [5:0]          rx_vme_am,
  input  logic                rx_vme_as_n,
  input  logic                rx_vme_ds0_n,
  input  logic                rx_vme_ds1_n,
  input  logic                rx_vme_write_n,
  input  logic [15:0]         rx_vme_data_i,
  output logic [15:0]         rx_vme_data_o,
  output logic                rx_vme_data_oe,
  output logic                rx_vme_dtack_n
);

  dat_tx_fpga #(.NUM_DATA(NUM_DATA)) u_tx (
    .clk_osc        (tx_clk_osc),
    .idc_in         (tx_idc_in),
    .lemo_in        (tx_lemo_in),
    .lanes          (tx_lanes),
    .laser_en       (tx_laser_en),
    .led            (tx_led),
    .test_hdr_en    (tx_test_hdr_en),
    .vme_sysclk     (tx_vme_sysclk),
    .vme_sysreset_n (tx_vme_sysreset_n),
    .base_addr      (tx_base_addr),
    .module_id      (tx_module_id),
    .vme_addr       (tx_vme_addr),
    .vme_am         (tx_vme_am),
    .vme_as_n       (tx_vme_as_n),
    .vme_ds0_n      (tx_vme_ds0_n),
    .vme_ds1_n      (tx_vme_ds1_n),
    .vme_write_n    (tx_vme_write_n),
    .vme_data_i     (tx_vme_data_i),
    .vme_data_o     (tx_vme_data_o),
    .vme_data_oe    (tx_vme_data_oe),
    .vme_dtack_n    (tx_vme_dtack_n)
  );

  dat_rx_fpga #(.NUM_DATA(NUM_DATA), .PHASE_SHIFT(PHASE_SHIFT)) u_rx (
    .lanes          (rx_lanes),
    .link_en        (rx_link_en),
    .out_lemo       (rx_out_lemo),
    .out_idc        (rx_out_idc),
    .led            (rx_led),
    .test_hdr_en    (rx_test_hdr_en),
    .dcm_locked     (rx_dcm_locked),
    .vme_sysclk     (rx_vme_sysclk),
    .vme_sysreset_n (rx_vme_sysreset_n),
    .base_addr      (rx_base_addr),
    .module_id      (rx_module_id),
    .vme_addr       (rx_vme_addr),
    .vme_am         (rx_vme_am),
    .vme_as_n       (rx_vme_as_n),
    .vme_ds0_n      (rx_vme_ds0_n),
    .vme_ds1_n      (rx_vme_ds1_n),
    .vme_write_n    (rx_vme_write_n),
    .vme_data_i     (rx_vme_data_i),
    .vme_data_o     (rx_vme_data_o),
    .vme_data_oe    (rx_vme_data_oe),
    .vme_dtack_n    (rx_vme_dtack_n)
  );

endmodule
