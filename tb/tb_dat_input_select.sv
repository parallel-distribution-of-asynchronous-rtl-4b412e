// tb_dat_input_select: self-checking test of the per-channel input
// multiplexer.  Random IDC, LEMO and select words are applied; each output
// bit is compared with the input the select bit names, computed here bit
// by bit.  All-IDC and all-LEMO selections are checked explicitly.
`timescale 1ns / 1ps
module tb_dat_input_select;
  localparam int N = 11;
  logic [N-1:0] idc, lemo, sel, out;
  int checks = 0, failures = 0;

  dat_input_select #(.NUM_CH(N)) dut (.idc_in(idc), .lemo_in(lemo), .sel(sel), .data_out(out));

  task automatic check_vec();
    logic [N-1:0] exp;
    #1;
    for (int i = 0; i < N; i++) exp[i] = sel[i] ? lemo[i] : idc[i];
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL idc=%h lemo=%h sel=%h out=%h exp=%h", idc, lemo, sel, out, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idc = '0; lemo = '1; sel = '0; check_vec();
    if (out !== '0) failures++;
    sel = '1; check_vec();
    if (out !== '1) failures++;
    for (int k = 0; k < 500; k++) begin
      idc = N'($urandom); lemo = N'($urandom); sel = N'($urandom);
      check_vec();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
