// dat_tx_fpga: logic of the DAT transmitter (DAT-TX) FPGA.
//
// Eleven asynchronous data channels arrive twice, from the IDC header and
// from the LEMO connectors (22 inputs).  Per channel a multiplexer selects
// one of them (dat_input_select), and the selected signal is XORed with the
// 25 MHz oscillator clock (dat_xor_encoder).  The eleven encoded channels
// and a twelfth lane carrying the clock (XORed with 0) leave the FPGA for
// the parallel optical transmitter.  The data path is combinational from
// input pin to lane: there is no sampling and so no dead time, and every
// lane sees the same kind of gate, so the lanes stay aligned with the clock
// lane.
//
// The VME register set (dat_vme_regs, clocked by VME SYSCLK) holds the
// static controls: input selection, clock enable, laser enable (pin
// laser_en to the optical transmitter), user LED and test-header enable.
//
// Follows the design description for the structure: 22 inputs, per-channel
// multiplexers selected over VME, 12 XOR gates with the twelfth on ground,
// and the CSR controls.  Signal standards (LVPECL in, LVDS out) are I/O
// buffer settings and not modelled; the register details are this design's
// own.
`timescale 1ns / 1ps
module dat_tx_fpga #(
  parameter int unsigned NUM_DATA     = dat_pkg::NUM_DATA_CH,
  parameter logic [15:0] MODEL_NUMBER = dat_pkg::MODEL_DAT_TX
) (
  // 25 MHz oscillator
  input  logic                clk_osc,
  // front-panel inputs
  input  logic [NUM_DATA-1:0] idc_in,
  input  logic [NUM_DATA-1:0] lemo_in,
  // to the optical transmitter
  output logic [NUM_DATA:0]   lanes,       // [NUM_DATA] = clock lane
  output logic                laser_en,
  // front panel / board
  output logic                led,
  output logic                test_hdr_en,
  // VME
  input  logic                vme_sysclk,
  input  logic                vme_sysreset_n,
  input  logic [7:0]          base_addr,
  input  logic [15:0]         module_id,
  input  logic [15:1]         vme_addr,
  input  logic [5:0]          vme_am,
  input  logic                vme_as_n,
  input  logic                vme_ds0_n,
  input  logic                vme_ds1_n,
  input  logic                vme_write_n,
  input  logic [15:0]         vme_data_i,
  output logic [15:0]         vme_data_o,
  output logic                vme_data_oe,
  output logic                vme_dtack_n
);

  dat_pkg::csr_t       csr;
  logic [NUM_DATA-1:0] sel_data;
  logic [NUM_DATA-1:0] in_sel;

  dat_vme_regs #(
    .MODEL_NUMBER (MODEL_NUMBER),
    .CSR_MASK     (dat_pkg::CSR_MASK_TX)
  ) u_regs (
    .clk         (vme_sysclk),
    .rst_n       (vme_sysreset_n),
    .base_addr   (base_addr),
    .module_id   (module_id),
    .vme_addr    (vme_addr),
    .vme_am      (vme_am),
    .vme_as_n    (vme_as_n),
    .vme_ds0_n   (vme_ds0_n),
    .vme_ds1_n   (vme_ds1_n),
    .vme_write_n (vme_write_n),
    .vme_data_i  (vme_data_i),
    .vme_data_o  (vme_data_o),
    .vme_data_oe (vme_data_oe),
    .vme_dtack_n (vme_dtack_n),
    .csr         (csr)
  );

  assign in_sel = NUM_DATA'(csr.in_sel);

  dat_input_select #(.NUM_CH(NUM_DATA)) u_sel (
    .idc_in   (idc_in),
    .lemo_in  (lemo_in),
    .sel      (in_sel),
    .data_out (sel_data)
  );

  dat_xor_encoder #(.NUM_DATA(NUM_DATA)) u_enc (
    .clk_osc (clk_osc),
    .clk_en  (csr.clk_en),
    .data_in (sel_data),
    .lanes   (lanes)
  );

  assign laser_en    = csr.laser_en;
  assign led         = csr.led;
  assign test_hdr_en = csr.test_hdr_en;

endmodule
