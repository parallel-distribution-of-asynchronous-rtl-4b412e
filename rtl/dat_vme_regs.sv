// dat_vme_regs: VME slave holding the three 16-bit registers of a DAT
// module: model number, module ID and the control/status register (CSR).
//
// The CSR drives every static control of the module: the laser (optical
// link) enable, the coding-clock enable, the per-channel input selection of
// the transmitter, the front-panel user LED and the test-header enable.
//
// Bus: A16 short I/O, D16.  The slave answers when AS* and a data strobe
// are asserted, the address modifier is 0x29 or 0x2D, A15..A8 equal the
// board address set by jumpers (base_addr) and A7..A3 are zero.  A2..A1
// select the register (0 model, 1 ID, 2 CSR); offset 3 and every other
// address get no DTACK* (the bus timer then signals an error).  DS1* and
// DS0* enable the upper and lower byte of a write.  The strobes are
// synchronised to the local clock (VME SYSCLK, 16 MHz) with two flip-flops;
// address, data and WRITE* are stable while the strobes are asserted and
// are sampled directly.  Timing: DTACK* is asserted three clocks after the
// data strobe falls and released three clocks after both strobes rise.
// Read data is driven (vme_data_oe) only while DTACK* is asserted for a
// read.  Reset (SYSRESET*) clears the CSR: laser off, clock off, all
// channels on the IDC header, LED off.
//
// Follows the design description: three 16-bit registers, the first two
// read-only (model, ID), the third the CSR with the listed controls.  The
// bus cycle timing, addresses, bit layout and reset values are this
// design's own choices.
`timescale 1ns / 1ps
module dat_vme_regs #(
  parameter logic [15:0] MODEL_NUMBER = dat_pkg::MODEL_DAT_TX,
  parameter logic [15:0] CSR_MASK     = dat_pkg::CSR_MASK_TX
) (
  input  logic              clk,          // VME SYSCLK
  input  logic              rst_n,        // VME SYSRESET*
  input  logic [7:0]        base_addr,    // board address, A15..A8
  input  logic [15:0]       module_id,    // board ID (strapped)
  input  logic [15:1]       vme_addr,
  input  logic [5:0]        vme_am,
  input  logic              vme_as_n,
  input  logic              vme_ds0_n,
  input  logic              vme_ds1_n,
  input  logic              vme_write_n,
  input  logic [15:0]       vme_data_i,
  output logic [15:0]       vme_data_o,
  output logic              vme_data_oe,
  output logic              vme_dtack_n,
  output dat_pkg::csr_t     csr
);
  import dat_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_ACK, S_WAIT} state_e;

  logic [1:0] as_sync, ds0_sync, ds1_sync;   // active-high, synchronised
  logic       as_s, ds0_s, ds1_s, ds_any;
  logic       hit;
  reg_sel_e   rsel;
  state_e     state;
  logic [15:0] csr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      as_sync  <= '0;
      ds0_sync <= '0;
      ds1_sync <= '0;
    end else begin
      as_sync  <= {as_sync[0],  ~vme_as_n};
      ds0_sync <= {ds0_sync[0], ~vme_ds0_n};
      ds1_sync <= {ds1_sync[0], ~vme_ds1_n};
    end
  end

  assign as_s   = as_sync[1];
  assign ds0_s  = ds0_sync[1];
  assign ds1_s  = ds1_sync[1];
  assign ds_any = ds0_s | ds1_s;

  assign rsel = reg_sel_e'(vme_addr[2:1]);
  assign hit  = (vme_am == AM_A16_USER || vme_am == AM_A16_SUPER)
             && vme_addr[15:8] == base_addr
             && vme_addr[7:3]  == '0
             && vme_addr[2:1]  != 2'd3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      csr_q      <= '0;
      vme_data_o <= '0;
    end else begin
      unique case (state)
        S_IDLE:
          if (as_s && ds_any) begin
            if (hit) begin
              if (!vme_write_n) begin
                if (rsel == REG_CSR) begin
                  if (ds1_s) csr_q[15:8] <= vme_data_i[15:8] & CSR_MASK[15:8];
                  if (ds0_s) csr_q[7:0]  <= vme_data_i[7:0]  & CSR_MASK[7:0];
                end
              end else begin
                unique case (rsel)
                  REG_MODEL: vme_data_o <= MODEL_NUMBER;
                  REG_ID:    vme_data_o <= module_id;
                  default:   vme_data_o <= csr_q;
                endcase
              end
              state <= S_ACK;
            end else begin
              state <= S_WAIT;     // not for this board: stay silent
            end
          end
        S_ACK, S_WAIT:
          if (!ds_any) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign vme_dtack_n = (state != S_ACK);
  assign vme_data_oe = (state == S_ACK) && vme_write_n;
  assign csr         = csr_t'(csr_q);

  // Bus rules: the slave drives data only during a read it acknowledges,
  // and acknowledges only while the master's strobe is (synchronously) seen.
  a_oe_only_read: assert property (@(posedge clk) disable iff (!rst_n)
    vme_data_oe |-> (!vme_dtack_n && vme_write_n));
  a_dtack_needs_ds: assert property (@(posedge clk) disable iff (!rst_n)
    $fell(vme_dtack_n) |-> $past(ds_any));

endmodule
