// tb_dat_xor_encoder: self-checking test of the transmitter XOR encoder.
// A 25 MHz clock runs while random data patterns are held for whole clock
// periods.  Every 1 ns the lanes are compared with data XOR clock (clock
// lane: the clock itself).  For each pattern the high time of every lane
// over one period is measured and must be 50% whatever the data (the
// property that keeps the optical link inside its duty-cycle limit).  With
// the clock disabled the lanes must carry the raw data.
`timescale 1ns / 1ps
module tb_dat_xor_encoder;
  localparam int N = 11;
  logic clk = 1'b0, en;
  logic [N-1:0] data;
  logic [N:0] lanes;
  int checks = 0, failures = 0;

  dat_xor_encoder #(.NUM_DATA(N)) dut (.clk_osc(clk), .clk_en(en), .data_in(data), .lanes(lanes));

  always #20 clk = ~clk;   // 25 MHz

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int high[N+1];
    logic [N:0] exp;
    en = 1'b1; data = '0;
    @(posedge clk); #0.5;
    for (int p = 0; p < 40; p++) begin
      data = (p == 0) ? '0 : (p == 1) ? '1 : N'($urandom);
      for (int l = 0; l <= N; l++) high[l] = 0;
      for (int t = 0; t < 40; t++) begin
        #1;
        exp = {clk, data ^ {N{clk}}};
        checks++;
        if (lanes !== exp) begin
          failures++;
          $display("FAIL t=%0t lanes=%h exp=%h", $time, lanes, exp);
        end
        for (int l = 0; l <= N; l++) high[l] += int'(lanes[l]);
      end
      for (int l = 0; l <= N; l++) begin
        checks++;
        if (high[l] != 20) begin
          failures++;
          $display("FAIL duty lane %0d high %0d/40 ns", l, high[l]);
        end
      end
    end
    en = 1'b0;
    for (int k = 0; k < 50; k++) begin
      data = N'($urandom);
      #3;
      checks++;
      if (lanes !== {1'b0, data}) begin
        failures++;
        $display("FAIL clock disabled lanes=%h", lanes);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
