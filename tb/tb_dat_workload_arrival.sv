// tb_dat_workload_arrival: the arrival-time measurement and the long
// housekeeping flag, run through a default DAT pair.
//
// Part 1 (arrival time): all eleven channels carry a periodic 1 MHz input,
// 200 ns wide, over a 60 m fibre (300 ns at 5 ns/m).  For every pulse the
// falling edge at the receiver output is timed against the falling edge at
// the transmitter input; the mean per channel, the channel-to-channel skew
// of the means and the peak-to-peak spread are computed.  In this model the
// only delay is the link, so every arrival time must be 300.000 ns, the
// skew and the spread 0, and the rising edges must arrive likewise.
// Part 2 (housekeeping flag): channel 5 is held high for 1 ms while channel
// 6 keeps pulsing; the output must stay high for the whole millisecond and
// no lane may trip the 57% duty-cycle limit of the link.
`timescale 1ns / 1ps
module tb_dat_workload_arrival;
  localparam int N = 11;
  localparam real LINK_NS = 300.0;
  logic clk25 = 1'b0, sysclk = 1'b0, rst_n;
  logic [N-1:0] idc;
  logic [N:0] tx_l, rx_l, trip;
  logic laser, rxen;
  logic [N:0] out, outi;
  logic txled, txth, rxled, rxth, lock;
  logic [15:1] addr; logic [5:0] am; logic as_n, ds0_n, ds1_n, write_n;
  logic [15:0] wdata, rd0, rd1; logic oe0, oe1, dt0, dt1;
  int checks = 0, failures = 0;

  always #20 clk25 = ~clk25;
  always #31.25 sysclk = ~sysclk;

  dat_top u_dat (
    .tx_clk_osc(clk25), .tx_idc_in(idc), .tx_lemo_in('0), .tx_lanes(tx_l),
    .tx_laser_en(laser), .tx_led(txled), .tx_test_hdr_en(txth),
    .tx_vme_sysclk(sysclk), .tx_vme_sysreset_n(rst_n), .tx_base_addr(8'h40), .tx_module_id(16'h0001),
    .tx_vme_addr(addr), .tx_vme_am(am), .tx_vme_as_n(as_n), .tx_vme_ds0_n(ds0_n), .tx_vme_ds1_n(ds1_n),
    .tx_vme_write_n(write_n), .tx_vme_data_i(wdata), .tx_vme_data_o(rd0), .tx_vme_data_oe(oe0),
    .tx_vme_dtack_n(dt0),
    .rx_lanes(rx_l), .rx_link_en(rxen), .rx_out_lemo(out), .rx_out_idc(outi), .rx_led(rxled),
    .rx_test_hdr_en(rxth), .rx_dcm_locked(lock),
    .rx_vme_sysclk(sysclk), .rx_vme_sysreset_n(rst_n), .rx_base_addr(8'h41), .rx_module_id(16'h0002),
    .rx_vme_addr(addr), .rx_vme_am(am), .rx_vme_as_n(as_n), .rx_vme_ds0_n(ds0_n), .rx_vme_ds1_n(ds1_n),
    .rx_vme_write_n(write_n), .rx_vme_data_i(wdata), .rx_vme_data_o(rd1), .rx_vme_data_oe(oe1),
    .rx_vme_dtack_n(dt1));

  paroli_link_model #(.NUM_LANES(N+1), .DELAY_NS(LINK_NS)) u_link (
    .tx_lanes(tx_l), .tx_enable(laser), .rx_enable(rxen), .rx_lanes(rx_l), .tripped(trip));

  vme_master_bfm bfm (.clk(sysclk), .addr(addr), .am(am), .as_n(as_n), .ds0_n(ds0_n),
    .ds1_n(ds1_n), .write_n(write_n), .wdata(wdata), .dtack_n(dt0 & dt1),
    .rdata(oe0 ? rd0 : rd1));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // edge timing: input edges are queued, output edges matched in order
  realtime in_fall [N][$], in_rise [N][$];
  real sum [N], mn [N], mx [N];
  int  cnt [N], rise_bad = 0;
  bit  measuring = 0;
  for (genvar i = 0; i < N; i++) begin : g_t
    always @(negedge idc[i]) if (measuring) in_fall[i].push_back($realtime);
    always @(posedge idc[i]) if (measuring) in_rise[i].push_back($realtime);
    always @(negedge out[i]) if (measuring && in_fall[i].size() > 0) begin
      real a;
      a = $realtime - in_fall[i].pop_front();
      sum[i] += a; cnt[i]++;
      if (a < mn[i]) mn[i] = a;
      if (a > mx[i]) mx[i] = a;
    end
    always @(posedge out[i]) if (measuring && in_rise[i].size() > 0) begin
      real a;
      a = $realtime - in_rise[i].pop_front();
      if (a < LINK_NS - 0.001 || a > LINK_NS + 0.001) rise_bad++;
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    real mean, mean_min, mean_max, pp;
    idc = '0;
    for (int i = 0; i < N; i++) begin sum[i] = 0; cnt[i] = 0; mn[i] = 1e9; mx[i] = -1e9; end
    rst_n = 1'b1;  // a real falling edge for the asynchronous resets
    #1 rst_n = 1'b0;
    #500 rst_n = 1'b1;
    bfm.write16(16'h4004, 16'h1800, ok); chk(ok, "TX CSR");
    bfm.write16(16'h4104, 16'h1800, ok); chk(ok, "RX CSR");
    #1000;
    // Part 1: 1 MHz, 200 ns wide, 50 periods; input edges off the clock edges
    @(posedge clk25); #3.3;
    measuring = 1;
    for (int p = 0; p < 50; p++) begin
      idc = '1; #200;
      idc = '0; #800;
    end
    #(LINK_NS + 50);
    measuring = 0;
    mean_min = 1e9; mean_max = -1e9; pp = 0;
    for (int i = 0; i < N; i++) begin
      chk(cnt[i] == 50, $sformatf("channel %0d: %0d pulses arrived", i, cnt[i]));
      mean = (cnt[i] > 0) ? sum[i] / cnt[i] : 0;
      if (mean < mean_min) mean_min = mean;
      if (mean > mean_max) mean_max = mean;
      if (mx[i] - mn[i] > pp) pp = mx[i] - mn[i];
      chk(mean > LINK_NS - 0.001 && mean < LINK_NS + 0.001,
          $sformatf("channel %0d mean arrival %0.4f ns", i, mean));
    end
    chk(mean_max - mean_min < 0.001, $sformatf("skew %0.4f ns", mean_max - mean_min));
    chk(pp < 0.001, $sformatf("peak-to-peak spread %0.4f ns", pp));
    chk(rise_bad == 0, $sformatf("%0d rising edges off time", rise_bad));
    chk(trip == '0, "no lane tripped by the 1 MHz pulses");
    $display("arrival: mean %0.3f..%0.3f ns, skew %0.3f ns, spread %0.3f ns",
             mean_min, mean_max, mean_max - mean_min, pp);

    // Part 2: 1 ms housekeeping flag on channel 5, pulses on channel 6
    idc[5] = 1'b1;
    #(LINK_NS + 10);
    for (int us = 0; us < 1000; us++) begin
      idc[6] = 1'b1; #200; idc[6] = 1'b0; #800;
      chk(out[5] == 1'b1, "flag held at the output");
    end
    idc[5] = 1'b0;
    #(LINK_NS + 10);
    chk(out[5] == 1'b0, "flag released");
    chk(trip == '0, "no lane tripped by the 1 ms flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
