// tb_dat_tx_fpga: self-checking test of the transmitter FPGA logic.
// Through a VME master the CSR is programmed; then random IDC and LEMO
// inputs are applied while the 25 MHz clock runs.  Every 1 ns each lane is
// compared with (selected input XOR clock), the selection worked out here
// from the CSR word written, and the clock lane with the clock.  Also
// checked: after reset the clock is off and all lanes follow the IDC inputs
// raw; the model number; the laser-enable, LED and test-header outputs.
`timescale 1ns / 1ps
module tb_dat_tx_fpga;
  localparam int N = 11;
  logic clk25 = 1'b0, sysclk = 1'b0, rst_n;
  logic [N-1:0] idc, lemo;
  logic [N:0] lanes;
  logic laser_en, led, test_en;
  logic [15:1] addr; logic [5:0] am; logic as_n, ds0_n, ds1_n, write_n;
  logic [15:0] wdata, rdata; logic oe, dtack_n;
  int checks = 0, failures = 0;

  always #20 clk25 = ~clk25;
  always #31.25 sysclk = ~sysclk;

  dat_tx_fpga dut (
    .clk_osc(clk25), .idc_in(idc), .lemo_in(lemo), .lanes(lanes), .laser_en(laser_en),
    .led(led), .test_hdr_en(test_en), .vme_sysclk(sysclk), .vme_sysreset_n(rst_n),
    .base_addr(8'h40), .module_id(16'h0001), .vme_addr(addr), .vme_am(am), .vme_as_n(as_n),
    .vme_ds0_n(ds0_n), .vme_ds1_n(ds1_n), .vme_write_n(write_n), .vme_data_i(wdata),
    .vme_data_o(rdata), .vme_data_oe(oe), .vme_dtack_n(dtack_n));

  vme_master_bfm bfm (.clk(sysclk), .addr(addr), .am(am), .as_n(as_n), .ds0_n(ds0_n),
    .ds1_n(ds1_n), .write_n(write_n), .wdata(wdata), .dtack_n(dtack_n), .rdata(rdata));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic run_random(input logic [N-1:0] sel, input bit clk_on, input int ns);
    logic [N-1:0] d;
    for (int t = 0; t < ns; t++) begin
      if (t % 7 == 3) begin idc = N'($urandom); lemo = N'($urandom); end
      #1;
      for (int i = 0; i < N; i++) d[i] = sel[i] ? lemo[i] : idc[i];
      chk(lanes == {clk25 & clk_on, d ^ {N{clk25 & clk_on}}},
          $sformatf("lanes %h sel %h", lanes, sel));
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok; logic [15:0] d;
    idc = '0; lemo = '0;
    rst_n = 1'b1;  // a real falling edge for the asynchronous resets
    #1 rst_n = 1'b0;
    #200 rst_n = 1'b1;
    bfm.read16(16'h4000, d, ok); chk(ok && d == dat_pkg::MODEL_DAT_TX, "model number");
    chk(!laser_en && !led && !test_en, "outputs off after reset");
    run_random('0, 1'b0, 200);                                  // clock off, IDC raw
    bfm.write16(16'h4004, 16'h1800 | 16'h0000, ok);             // laser + clock, all IDC
    chk(laser_en && !led && !test_en, "laser enabled");
    run_random('0, 1'b1, 400);
    bfm.write16(16'h4004, 16'h1800 | 16'h02A5, ok);             // mixed selection
    run_random(11'h2A5, 1'b1, 400);
    bfm.write16(16'h4004, 16'h7800 | 16'h07FF, ok);             // all LEMO, LED, test
    chk(laser_en && led && test_en, "LED and test header enabled");
    run_random(11'h7FF, 1'b1, 400);
    bfm.write16(16'h4004, 16'h0000, ok);
    chk(!laser_en, "laser disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
