// dat_rx_fpga: logic of the DAT receiver (DAT-RX) FPGA.
//
// Twelve lanes arrive from the parallel optical receiver (or from the wire
// interconnect used for debugging): eleven XOR-encoded data channels and
// the clock lane.  The clock lane feeds a clock manager that shifts its
// phase by PHASE_SHIFT steps of 1/256 period (dcm_phase_shift), so that the
// shifted clock lines up with the encoded data at the decoding gates.  Each
// data lane is XORed with the shifted clock (A) and with its inverse (B)
// (dat_xor_decoder), and a flip-flop set by rising A and cleared by rising
// B (dat_ddr_ff) restores the original signal.  The recovered channels and
// the received clock are driven to the front panel twice, for the LEMO
// connectors and for the IDC header.
//
// Latency is a few gate delays plus the link; no sampling takes place, so
// the receiver has no dead time.  The correct PHASE_SHIFT depends on the
// board and cable; a wrong one yields narrow spurious pulses at 25 or 50
// MHz whose width equals the misalignment.
//
// The VME register set (clocked by VME SYSCLK) holds clock enable, the
// enable of the optical receiver module (link_en), the user LED and the
// test-header enable.  SYSRESET* also resets the clock manager and clears
// the output flip-flops.
//
// Follows the design description: phase-shifted clock, A and B XOR results,
// dual-edge output flip-flop, eleven data outputs plus the clock on the
// front panel.  Which clock copy drives the front-panel clock output, the
// use of the laser-enable bit as optical receiver enable, and the reset
// connections are this design's own choices.
`timescale 1ns / 1ps
module dat_rx_fpga #(
  parameter int unsigned NUM_DATA     = dat_pkg::NUM_DATA_CH,
  parameter int          PHASE_SHIFT  = 0,
  parameter logic [15:0] MODEL_NUMBER = dat_pkg::MODEL_DAT_RX
) (
  // from the optical receiver
  input  logic [NUM_DATA:0]   lanes,        // [NUM_DATA] = clock lane
  output logic                link_en,
  // front panel: NUM_DATA data channels + clock, two copies
  output logic [NUM_DATA:0]   out_lemo,
  output logic [NUM_DATA:0]   out_idc,
  output logic                led,
  output logic                test_hdr_en,
  output logic                dcm_locked,
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
  logic                ps_clk;
  logic [NUM_DATA-1:0] dec_a, dec_b, q;
  logic [NUM_DATA:0]   front;

  dat_vme_regs #(
    .MODEL_NUMBER (MODEL_NUMBER),
    .CSR_MASK     (dat_pkg::CSR_MASK_RX)
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

  dcm_phase_shift #(
    .PHASE_SHIFT (PHASE_SHIFT)
  ) u_dcm (
    .clkin  (lanes[NUM_DATA]),
    .rst    (~vme_sysreset_n),
    .clk0   (ps_clk),
    .locked (dcm_locked)
  );

  dat_xor_decoder #(.NUM_DATA(NUM_DATA)) u_dec (
    .ps_clk (ps_clk),
    .clk_en (csr.clk_en),
    .lanes  (lanes[NUM_DATA-1:0]),
    .a      (dec_a),
    .b      (dec_b)
  );

  for (genvar i = 0; i < NUM_DATA; i++) begin : g_ff
    dat_ddr_ff u_ff (
      .rst_n (vme_sysreset_n),
      .a     (dec_a[i]),
      .b     (dec_b[i]),
      .q     (q[i])
    );
  end

  assign front       = {lanes[NUM_DATA], q};
  assign out_lemo    = front;
  assign out_idc     = front;
  assign link_en     = csr.laser_en;
  assign led         = csr.led;
  assign test_hdr_en = csr.test_hdr_en;

endmodule
