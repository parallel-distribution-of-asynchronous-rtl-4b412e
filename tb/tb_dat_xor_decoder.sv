// tb_dat_xor_decoder: self-checking test of the receiver XOR decoder.
// Random lane and clock values are applied; A must equal lane XOR clock and
// B lane XOR inverted clock (computed here).  An encode/decode round trip
// (lane = data XOR clock, same clock) must give A = data, B = ~data.  With
// the clock disabled A = lane and B = ~lane.
`timescale 1ns / 1ps
module tb_dat_xor_decoder;
  localparam int N = 11;
  logic clk, en;
  logic [N-1:0] lanes, a, b, data;
  int checks = 0, failures = 0;

  dat_xor_decoder #(.NUM_DATA(N)) dut (.ps_clk(clk), .clk_en(en), .lanes(lanes), .a(a), .b(b));

  task automatic chk(input logic [N-1:0] ea, input logic [N-1:0] eb, input string what);
    #1;
    checks++;
    if (a !== ea || b !== eb) begin
      failures++;
      $display("FAIL %s lanes=%h clk=%b en=%b a=%h b=%h exp %h %h", what, lanes, clk, en, a, b, ea, eb);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1'b1;
    for (int k = 0; k < 300; k++) begin
      lanes = N'($urandom); clk = 1'($urandom);
      chk(lanes ^ {N{clk}}, lanes ^ {N{~clk}}, "random");
    end
    for (int k = 0; k < 200; k++) begin
      data = N'($urandom); clk = 1'($urandom);
      lanes = data ^ {N{clk}};
      chk(data, ~data, "round trip");
    end
    en = 1'b0;
    for (int k = 0; k < 50; k++) begin
      lanes = N'($urandom); clk = 1'($urandom);
      chk(lanes, ~lanes, "clock disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
