// dat_pkg: constants and types shared by the Digital Asynchronous
// Transceiver (DAT) logic.
//
// The DAT carries eleven asynchronous digital signals plus a copy of a
// 25 MHz clock over a twelve-lane parallel optical link.  Each data signal
// is XOR-encoded with the clock at the transmitter so that the optical
// lanes always toggle (the laser duty-cycle limit), and is recovered at the
// receiver by XOR with a phase-aligned copy of the received clock followed
// by a dual-edge set/reset flip-flop.
//
// Taken from the description of the design: 11 data channels, 12 optical
// lanes (11 data + clock), 25 MHz encoding clock, a 16-bit register set of
// three registers (model number, ID, control/status register), a phase
// shift resolution of 1/256 of the clock period (156 ps at 25 MHz).
// This design's own choices: the register offsets, the CSR bit layout, the
// model-number values and the accepted VME address modifiers.
`timescale 1ns / 1ps
package dat_pkg;

  // Channel counts.
  localparam int unsigned NUM_DATA_CH = 11;               // data channels
  localparam int unsigned NUM_LANES   = NUM_DATA_CH + 1;  // + clock lane

  // Encoding clock: 25 MHz, 40 ns period.
  localparam int unsigned CLK_PERIOD_PS = 40_000;
  // DCM fine phase shift: 1/256 of a period per step (156.25 ps at 25 MHz).
  localparam int unsigned PS_STEPS_PER_PERIOD = 256;

  // Register interface: 16-bit registers.
  localparam int unsigned REG_W = 16;

  // Register select, taken from VME address bits A2..A1 (word offsets
  // 0x0, 0x2, 0x4 from the board base address).
  typedef enum logic [1:0] {
    REG_MODEL = 2'd0,   // read only: module model number
    REG_ID    = 2'd1,   // read only: module ID
    REG_CSR   = 2'd2    // read/write: control and status register
  } reg_sel_e;

  // Control and status register.  in_sel[i] chooses the source of data
  // channel i at the transmitter: 0 = IDC header, 1 = LEMO connector.
  typedef struct packed {
    logic                   spare;        // bit 15, reads as written if writable
    logic                   test_hdr_en;  // bit 14, enable the test header pins
    logic                   led;          // bit 13, front panel user LED
    logic                   clk_en;       // bit 12, enable the XOR coding clock
    logic                   laser_en;     // bit 11, enable the optical link module
    logic [NUM_DATA_CH-1:0] in_sel;       // bits 10..0, per-channel input select
  } csr_t;

  localparam logic IN_SEL_IDC  = 1'b0;
  localparam logic IN_SEL_LEMO = 1'b1;

  // Writable CSR bits: all control bits on the transmitter; the receiver
  // has no input multiplexers, so its in_sel bits read as zero.
  localparam logic [REG_W-1:0] CSR_MASK_TX = 16'h7FFF;
  localparam logic [REG_W-1:0] CSR_MASK_RX = 16'h7800;

  // Model numbers that identify the two module types to crate-scanning
  // software.
  localparam logic [REG_W-1:0] MODEL_DAT_TX = 16'hDA71;
  localparam logic [REG_W-1:0] MODEL_DAT_RX = 16'hDA72;

  // VME address modifiers for A16 short I/O (non-privileged, supervisory).
  localparam logic [5:0] AM_A16_USER  = 6'h29;
  localparam logic [5:0] AM_A16_SUPER = 6'h2D;

endpackage
