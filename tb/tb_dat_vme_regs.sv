// tb_dat_vme_regs: self-checking test of the VME register set.
//
// A VME master written here runs A16/D16 cycles against two instances, one
// configured as a transmitter (all CSR bits but 15 writable) and one as a
// receiver (only bits 14..11 writable).  Checked: model number and ID read
// back; CSR write/read-back and the decoded CSR fields; byte writes with a
// single data strobe; the writable-bit masks; that a wrong board address, a
// wrong address modifier and the unused offset get no DTACK*; that reset
// clears the CSR; that DTACK* comes exactly three SYSCLK rising edges after
// the data strobe and that read data is driven only during the acknowledge.
`timescale 1ns / 1ps
module tb_dat_vme_regs;
  import dat_pkg::*;

  logic        clk = 1'b0, rst_n;
  logic [15:1] addr;
  logic [5:0]  am;
  logic        as_n, ds0_n, ds1_n, write_n;
  logic [15:0] wdata;
  logic [15:0] rdata_tx, rdata_rx;
  logic        oe_tx, oe_rx, dtack_tx, dtack_rx;
  csr_t        csr_tx, csr_rx;
  int checks = 0, failures = 0;

  always #31.25 clk = ~clk;   // 16 MHz VME SYSCLK

  dat_vme_regs #(.MODEL_NUMBER(MODEL_DAT_TX), .CSR_MASK(CSR_MASK_TX)) u_tx (
    .clk(clk), .rst_n(rst_n), .base_addr(8'h40), .module_id(16'h1234),
    .vme_addr(addr), .vme_am(am), .vme_as_n(as_n), .vme_ds0_n(ds0_n), .vme_ds1_n(ds1_n),
    .vme_write_n(write_n), .vme_data_i(wdata), .vme_data_o(rdata_tx), .vme_data_oe(oe_tx),
    .vme_dtack_n(dtack_tx), .csr(csr_tx));

  dat_vme_regs #(.MODEL_NUMBER(MODEL_DAT_RX), .CSR_MASK(CSR_MASK_RX)) u_rx (
    .clk(clk), .rst_n(rst_n), .base_addr(8'h41), .module_id(16'h0077),
    .vme_addr(addr), .vme_am(am), .vme_as_n(as_n), .vme_ds0_n(ds0_n), .vme_ds1_n(ds1_n),
    .vme_write_n(write_n), .vme_data_i(wdata), .vme_data_o(rdata_rx), .vme_data_oe(oe_rx),
    .vme_dtack_n(dtack_rx), .csr(csr_rx));

  // Wired-OR of the two slaves' open-collector DTACK* and tri-state data.
  wire        dtack_n = dtack_tx & dtack_rx;
  wire [15:0] rdata   = oe_tx ? rdata_tx : rdata_rx;
  wire        oe_any  = oe_tx | oe_rx;

  int edges_to_ack;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // One bus cycle.  Returns whether it was acknowledged and the read data.
  task automatic cycle(input logic [15:0] a, input logic [5:0] m, input bit wr,
                       input logic [15:0] d, input logic [1:0] ds,
                       output bit acked, output logic [15:0] rd);
    acked = 0; rd = '0; edges_to_ack = 0;
    @(negedge clk);
    addr = a[15:1]; am = m; write_n = !wr; wdata = d;
    #10 as_n = 1'b0;
    @(negedge clk);
    ds1_n = !ds[1]; ds0_n = !ds[0];
    for (int e = 0; e < 12; e++) begin
      @(posedge clk); #1;
      edges_to_ack++;
      if (!wr) chk(!oe_any || !dtack_n, "data driven without DTACK");
      if (!dtack_n) begin
        acked = 1;
        if (!wr) begin
          chk(oe_any, "read data driven during DTACK");
          rd = rdata;
        end
        break;
      end
    end
    ds0_n = 1'b1; ds1_n = 1'b1;
    #10 as_n = 1'b1;
    repeat (4) @(posedge clk);
    #1 chk(dtack_n && !oe_any, "DTACK and data released");
  endtask

  task automatic wr16(input logic [15:0] a, input logic [15:0] d, output bit ok);
    logic [15:0] dummy;
    cycle(a, AM_A16_USER, 1, d, 2'b11, ok, dummy);
  endtask

  task automatic rd16(input logic [15:0] a, output logic [15:0] d, output bit ok);
    cycle(a, AM_A16_SUPER, 0, '0, 2'b11, ok, d);
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    logic [15:0] d;
    addr = '0; am = '0; as_n = 1; ds0_n = 1; ds1_n = 1; write_n = 1; wdata = '0;
    rst_n = 1'b1;  // a real falling edge for the asynchronous resets
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    rd16(16'h4000, d, ok); chk(ok && d == MODEL_DAT_TX, "TX model number");
    chk(edges_to_ack == 3, $sformatf("DTACK latency %0d edges", edges_to_ack));
    rd16(16'h4002, d, ok); chk(ok && d == 16'h1234, "TX ID");
    rd16(16'h4100, d, ok); chk(ok && d == MODEL_DAT_RX, "RX model number");
    rd16(16'h4102, d, ok); chk(ok && d == 16'h0077, "RX ID");
    rd16(16'h4004, d, ok); chk(ok && d == 16'h0000, "TX CSR reset value");

    wr16(16'h4004, 16'h5A5A, ok); chk(ok, "TX CSR write acked");
    chk(edges_to_ack == 3, "write DTACK latency");
    rd16(16'h4004, d, ok); chk(ok && d == 16'h5A5A, $sformatf("TX CSR readback %h", d));
    chk(csr_tx.in_sel == 11'h25A && csr_tx.laser_en == 1'b1 && csr_tx.clk_en == 1'b1 &&
        csr_tx.led == 1'b0 && csr_tx.test_hdr_en == 1'b1, "TX CSR fields");
    wr16(16'h4004, 16'hFFFF, ok);
    rd16(16'h4004, d, ok); chk(d == 16'h7FFF, "TX CSR mask");

    // Byte writes: DS0* only (low byte), then DS1* only (high byte).
    cycle(16'h4004, AM_A16_USER, 1, 16'h0000, 2'b01, ok, d); chk(ok, "byte write acked");
    rd16(16'h4004, d, ok); chk(d == 16'h7F00, $sformatf("low byte write %h", d));
    cycle(16'h4004, AM_A16_USER, 1, 16'h1234, 2'b10, ok, d);
    rd16(16'h4004, d, ok); chk(d == 16'h1200, $sformatf("high byte write %h", d));

    wr16(16'h4104, 16'hFFFF, ok); chk(ok, "RX CSR write");
    rd16(16'h4104, d, ok); chk(d == 16'h7800, $sformatf("RX CSR mask %h", d));
    chk(csr_rx.laser_en && csr_rx.clk_en && csr_rx.led && csr_rx.test_hdr_en && csr_rx.in_sel == '0,
        "RX CSR fields");
    rd16(16'h4004, d, ok); chk(d == 16'h1200, "TX CSR untouched by RX write");

    // Cycles that no board may answer.
    rd16(16'h4204, d, ok); chk(!ok, "wrong board address not acked");
    rd16(16'h4006, d, ok); chk(!ok, "offset 6 not acked");
    rd16(16'h4014, d, ok); chk(!ok, "A7..A3 nonzero not acked");
    cycle(16'h4004, 6'h39, 0, '0, 2'b11, ok, d); chk(!ok, "A24 modifier not acked");
    cycle(16'h4004, 6'h09, 1, 16'h0000, 2'b11, ok, d); chk(!ok, "A32 write not acked");
    rd16(16'h4004, d, ok); chk(d == 16'h1200, "ignored write left CSR alone");

    rst_n = 1'b0; #100 rst_n = 1'b1;
    rd16(16'h4004, d, ok); chk(ok && d == 16'h0000, "reset clears TX CSR");
    rd16(16'h4104, d, ok); chk(ok && d == 16'h0000, "reset clears RX CSR");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
