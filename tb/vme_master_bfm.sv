// vme_master_bfm: testbench VME master for A16/D16 single cycles.
// write16/read16 drive address, AM, WRITE*, AS* and both data strobes, wait
// up to 12 SYSCLK edges for DTACK* and release the bus; ok reports whether
// the cycle was acknowledged.  Strobes change on the falling SYSCLK edge.
`timescale 1ns / 1ps
module vme_master_bfm (
  input  logic        clk,
  output logic [15:1] addr,
  output logic [5:0]  am,
  output logic        as_n,
  output logic        ds0_n,
  output logic        ds1_n,
  output logic        write_n,
  output logic [15:0] wdata,
  input  logic        dtack_n,
  input  logic [15:0] rdata
);
  initial begin
    addr = '0; am = '0; as_n = 1'b1; ds0_n = 1'b1; ds1_n = 1'b1; write_n = 1'b1; wdata = '0;
  end

  task automatic cycle(input logic [15:0] a, input bit wr, input logic [15:0] d,
                       output bit ok, output logic [15:0] rd);
    ok = 0; rd = '0;
    @(negedge clk);
    addr = a[15:1]; am = dat_pkg::AM_A16_USER; write_n = !wr; wdata = d;
    #10 as_n = 1'b0;
    @(negedge clk);
    ds0_n = 1'b0; ds1_n = 1'b0;
    for (int e = 0; e < 12; e++) begin
      @(posedge clk); #1;
      if (!dtack_n) begin
        ok = 1;
        rd = rdata;
        break;
      end
    end
    ds0_n = 1'b1; ds1_n = 1'b1;
    #10 as_n = 1'b1;
    repeat (4) @(posedge clk);
  endtask

  task automatic write16(input logic [15:0] a, input logic [15:0] d, output bit ok);
    logic [15:0] unused;
    cycle(a, 1'b1, d, ok, unused);
  endtask

  task automatic read16(input logic [15:0] a, output logic [15:0] d, output bit ok);
    cycle(a, 1'b0, '0, ok, d);
  endtask
endmodule
