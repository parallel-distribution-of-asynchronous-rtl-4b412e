// tb_dcm_phase_shift: self-checking test of the clock-manager model.
// Four instances with phase shifts of 0, +6, +128 and -10 steps receive a
// 25 MHz clock.  The test checks that each output stays low until it has
// seen four input rising edges after reset, that LOCKED then rises, and that
// every output rising edge follows the input rising edge by
// (shift mod 256) * 40 ns / 256 (156.25 ps per step), within 1 ps, and that
// the output keeps the input's 50% duty cycle.
`timescale 1ns / 1ps
module tb_dcm_phase_shift;
  localparam int NI = 4;
  localparam int SHIFTS [NI] = '{0, 6, 128, -10};
  logic clk = 1'b0, rst;
  logic [NI-1:0] clk0, locked;
  int checks = 0, failures = 0;
  realtime t_in;
  int n_rise [NI];

  for (genvar i = 0; i < NI; i++) begin : g
    dcm_phase_shift #(.PHASE_SHIFT(SHIFTS[i])) dut (
      .clkin(clk), .rst(rst), .clk0(clk0[i]), .locked(locked[i]));
  end

  always #20 clk = ~clk;
  always @(posedge clk) t_in = $realtime;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar i = 0; i < NI; i++) begin : g_meas
    realtime t_rise;
    always @(posedge clk0[i]) begin
      real exp_ns, got_ns;
      t_rise = $realtime;
      n_rise[i]++;
      exp_ns = real'(((SHIFTS[i] % 256) + 256) % 256) * 40.0 / 256.0;
      // input rising edge this output edge belongs to
      got_ns = t_rise - t_in;
      if (got_ns < 0.0) got_ns += 40.0;
      if (exp_ns == 0.0 && got_ns > 39.0) got_ns -= 40.0;
      chk(got_ns > exp_ns - 0.001 && got_ns < exp_ns + 0.001,
          $sformatf("inst %0d phase %0.4f ns, expected %0.4f", i, got_ns, exp_ns));
    end
    always @(negedge clk0[i]) if (locked[i] && n_rise[i] > 1)
      chk(($realtime - t_rise) > 19.999 && ($realtime - t_rise) < 20.001,
          $sformatf("inst %0d high time %0.4f", i, $realtime - t_rise));
  end

  initial begin
    rst = 1'b0;
    #1 rst = 1'b1;
    for (int i = 0; i < NI; i++) n_rise[i] = 0;
    #100;
    @(negedge clk) rst = 1'b0;
    repeat (3) begin
      @(posedge clk); #1;
      chk(locked == '0, "locked too early");
    end
    @(posedge clk); #1;
    chk(locked == '1, "locked after 4 edges");
    repeat (50) @(posedge clk);
    #50;
    for (int i = 0; i < NI; i++) chk(n_rise[i] > 45, "outputs toggling");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
