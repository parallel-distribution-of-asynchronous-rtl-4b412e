// tb_dat_top: end-to-end test of a DAT transmitter/receiver pair at the
// design's default parameters.
//
// Two complete pairs (dat_top, no parameter overrides) share the 25 MHz
// clock, the front-panel inputs and one VME bus:
//   u0  linked by an optical link model whose twelve lanes have equal
//       delay (10 ns): receiver clock aligned with the data.
//   u1  the same, but the clock lane arrives 1.25 ns late: the receiver is
//       misaligned and must emit spurious pulses 1.25 ns wide.
// The link model also applies the laser-safety rule (lane off above 57%
// duty cycle within 1 us).
//
// Sequence and what is checked:
//   scan     the four modules are found by reading their model numbers;
//            an empty address is not acknowledged
//   dark     with the lasers off (reset state) the outputs stay low
//   random   trigger-like pulses (5..100 ns wide, 0.2..1 us apart) on all
//            IDC and LEMO inputs; u0's outputs must equal the selected
//            inputs delayed by the link at every 0.5 ns sample and change
//            exactly as often; the front-panel clock must be the link clock
//   select   odd channels switched to LEMO over VME, random again
//   minimum  bursts of 5 ns pulses with 5 ns gaps (200 MHz) on channel 3;
//            each output pulse must be 5.000 ns wide
//   long     channel 0 held high for 3 us: output stays high, no lane trips
//   trip     coding clock disabled with the laser on and channel 0 high:
//            the lane must trip; cycling the laser enable clears it
// Every mechanism is counted and a failure is counted for one that never
// happened.  The latency check is exact: the FPGA path adds no delay in
// this model, so outputs equal the inputs 10 ns (the link) earlier.
`timescale 1ns / 1ps
module tb_dat_top;
  localparam int N = 11;
  localparam int LINK_STEPS = 20;                 // 10 ns link in 0.5 ns steps
  logic clk25 = 1'b0, sysclk = 1'b0, rst_n;
  logic [N-1:0] idc, lemo;

  // pair 0 / pair 1 signals
  logic [N:0] tx_l0, tx_l1, rx_l0, rx_l1, trip0, trip1;
  logic       laser0, laser1, rxen0, rxen1;
  logic [N:0] out0, out1, outi0, outi1;
  logic       txled0, txled1, txth0, txth1, rxled0, rxled1, rxth0, rxth1, lock0, lock1;

  logic [15:1] addr; logic [5:0] am; logic as_n, ds0_n, ds1_n, write_n;
  logic [15:0] wdata;
  logic [15:0] rd [4]; logic oe [4]; logic dt [4];

  int checks = 0, failures = 0;

  always #20 clk25 = ~clk25;
  always #31.25 sysclk = ~sysclk;

  dat_top u0 (
    .tx_clk_osc(clk25), .tx_idc_in(idc), .tx_lemo_in(lemo), .tx_lanes(tx_l0),
    .tx_laser_en(laser0), .tx_led(txled0), .tx_test_hdr_en(txth0),
    .tx_vme_sysclk(sysclk), .tx_vme_sysreset_n(rst_n), .tx_base_addr(8'h40), .tx_module_id(16'h0010),
    .tx_vme_addr(addr), .tx_vme_am(am), .tx_vme_as_n(as_n), .tx_vme_ds0_n(ds0_n), .tx_vme_ds1_n(ds1_n),
    .tx_vme_write_n(write_n), .tx_vme_data_i(wdata), .tx_vme_data_o(rd[0]), .tx_vme_data_oe(oe[0]),
    .tx_vme_dtack_n(dt[0]),
    .rx_lanes(rx_l0), .rx_link_en(rxen0), .rx_out_lemo(out0), .rx_out_idc(outi0), .rx_led(rxled0),
    .rx_test_hdr_en(rxth0), .rx_dcm_locked(lock0),
    .rx_vme_sysclk(sysclk), .rx_vme_sysreset_n(rst_n), .rx_base_addr(8'h41), .rx_module_id(16'h0011),
    .rx_vme_addr(addr), .rx_vme_am(am), .rx_vme_as_n(as_n), .rx_vme_ds0_n(ds0_n), .rx_vme_ds1_n(ds1_n),
    .rx_vme_write_n(write_n), .rx_vme_data_i(wdata), .rx_vme_data_o(rd[1]), .rx_vme_data_oe(oe[1]),
    .rx_vme_dtack_n(dt[1]));

  dat_top u1 (
    .tx_clk_osc(clk25), .tx_idc_in(idc), .tx_lemo_in(lemo), .tx_lanes(tx_l1),
    .tx_laser_en(laser1), .tx_led(txled1), .tx_test_hdr_en(txth1),
    .tx_vme_sysclk(sysclk), .tx_vme_sysreset_n(rst_n), .tx_base_addr(8'h50), .tx_module_id(16'h0020),
    .tx_vme_addr(addr), .tx_vme_am(am), .tx_vme_as_n(as_n), .tx_vme_ds0_n(ds0_n), .tx_vme_ds1_n(ds1_n),
    .tx_vme_write_n(write_n), .tx_vme_data_i(wdata), .tx_vme_data_o(rd[2]), .tx_vme_data_oe(oe[2]),
    .tx_vme_dtack_n(dt[2]),
    .rx_lanes(rx_l1), .rx_link_en(rxen1), .rx_out_lemo(out1), .rx_out_idc(outi1), .rx_led(rxled1),
    .rx_test_hdr_en(rxth1), .rx_dcm_locked(lock1),
    .rx_vme_sysclk(sysclk), .rx_vme_sysreset_n(rst_n), .rx_base_addr(8'h51), .rx_module_id(16'h0021),
    .rx_vme_addr(addr), .rx_vme_am(am), .rx_vme_as_n(as_n), .rx_vme_ds0_n(ds0_n), .rx_vme_ds1_n(ds1_n),
    .rx_vme_write_n(write_n), .rx_vme_data_i(wdata), .rx_vme_data_o(rd[3]), .rx_vme_data_oe(oe[3]),
    .rx_vme_dtack_n(dt[3]));

  paroli_link_model #(.NUM_LANES(N+1), .DELAY_NS(10.0)) u_link0 (
    .tx_lanes(tx_l0), .tx_enable(laser0), .rx_enable(rxen0), .rx_lanes(rx_l0), .tripped(trip0));

  paroli_link_model #(.NUM_LANES(N+1), .DELAY_NS(10.0),
    .LANE_SKEW_NS('{0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 1.25})
  ) u_link1 (
    .tx_lanes(tx_l1), .tx_enable(laser1), .rx_enable(rxen1), .rx_lanes(rx_l1), .tripped(trip1));

  wire        dtack_n = dt[0] & dt[1] & dt[2] & dt[3];
  wire [15:0] rdata   = oe[0] ? rd[0] : oe[1] ? rd[1] : oe[2] ? rd[2] : rd[3];

  vme_master_bfm bfm (.clk(sysclk), .addr(addr), .am(am), .as_n(as_n), .ds0_n(ds0_n),
    .ds1_n(ds1_n), .write_n(write_n), .wdata(wdata), .dtack_n(dtack_n), .rdata(rdata));

  // ---------------------------------------------------------------------
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // mechanism counters
  int n_scan = 0, n_dark = 0, n_random_ok = 0, n_select = 0, n_min_pulse = 0,
      n_long = 0, n_trip = 0, n_trip_clear = 0, n_spurious = 0;

  // output transition counting (pair 0) and spurious pulses (pair 1)
  bit      counting = 0;
  int      n_in_tr = 0, n_out_tr = 0;
  realtime t_last0 [N], t_last1 [N];
  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(out0[i]) begin
      if (counting) n_out_tr++;
      if (i == 3 && out0[i] == 1'b0 && ($realtime - t_last0[i]) > 4.999 &&
          ($realtime - t_last0[i]) < 5.001) n_min_pulse++;
      t_last0[i] = $realtime;
    end
    always @(out1[i]) begin
      if (($realtime - t_last1[i]) > 1.245 && ($realtime - t_last1[i]) < 1.255) n_spurious++;
      t_last1[i] = $realtime;
    end
  end

  // stimulus state
  logic [N-1:0] sel_now;
  int next_idc [N], next_lemo [N];
  logic [N-1:0] hist [64];
  int k = 0;
  bit checking = 0;

  function automatic logic [N-1:0] selected();
    for (int i = 0; i < N; i++) selected[i] = sel_now[i] ? lemo[i] : idc[i];
  endfunction

  // One 2.5 ns step: optional input changes 0.2 ns after the 0.5 ns grid,
  // then five 0.5 ns samples checked against the input history.
  task automatic step(input bit random_mode, input int s);
    logic [N-1:0] sel_before;
    sel_before = selected();
    if (random_mode)
      for (int i = 0; i < N; i++) begin
        if (s >= next_idc[i]) begin
          idc[i] = ~idc[i];
          next_idc[i] = s + (idc[i] ? $urandom_range(2, 40) : $urandom_range(80, 400));
        end
        if (s >= next_lemo[i]) begin
          lemo[i] = ~lemo[i];
          next_lemo[i] = s + (lemo[i] ? $urandom_range(2, 40) : $urandom_range(80, 400));
        end
      end
    if (counting) n_in_tr += $countones(sel_before ^ selected());
    for (int j = 0; j < 5; j++) begin
      #0.3;
      hist[k % 64] = selected();
      if (checking && k >= LINK_STEPS) begin
        chk(out0[N-1:0] == hist[(k - LINK_STEPS) % 64],
            $sformatf("pair 0 output %h expected %h", out0[N-1:0], hist[(k - LINK_STEPS) % 64]));
        chk(out0[N] == rx_l0[N] && outi0 == out0, "front-panel clock and IDC copy");
      end
      k++;
      #0.2;
    end
  endtask

  task automatic run_random(input int steps);
    for (int s = 0; s < steps; s++) step(1'b1, s);
  endtask

  task automatic run_quiet(input int steps);
    for (int s = 0; s < steps; s++) step(1'b0, s);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok; logic [15:0] d;
    idc = '0; lemo = '0; sel_now = '0;
    for (int i = 0; i < N; i++) begin
      next_idc[i] = $urandom_range(0, 200); next_lemo[i] = $urandom_range(0, 200);
      t_last0[i] = 0; t_last1[i] = 0;
    end
    for (int i = 0; i < 64; i++) hist[i] = '0;
    rst_n = 1'b1;  // a real falling edge for the asynchronous resets
    #1 rst_n = 1'b0;
    #500 rst_n = 1'b1;

    // scan: identify transmitters and receivers by model number
    bfm.read16(16'h4000, d, ok); chk(ok && d == dat_pkg::MODEL_DAT_TX, "scan 0x40 TX"); n_scan += int'(ok);
    bfm.read16(16'h4100, d, ok); chk(ok && d == dat_pkg::MODEL_DAT_RX, "scan 0x41 RX"); n_scan += int'(ok);
    bfm.read16(16'h5000, d, ok); chk(ok && d == dat_pkg::MODEL_DAT_TX, "scan 0x50 TX"); n_scan += int'(ok);
    bfm.read16(16'h5100, d, ok); chk(ok && d == dat_pkg::MODEL_DAT_RX, "scan 0x51 RX"); n_scan += int'(ok);
    bfm.read16(16'h6000, d, ok); chk(!ok, "empty slot not acknowledged");
    bfm.read16(16'h4002, d, ok); chk(ok && d == 16'h0010, "TX ID");

    // dark: lasers off after reset, outputs must not follow the inputs
    @(posedge clk25); #0.2;
    for (int s = 0; s < 400; s++) begin
      step(1'b1, s);
      if (out0[N-1:0] == '0 && rx_l0 == '0) n_dark++;
    end
    chk(n_dark == 400, "outputs dark with the laser off");
    chk(!laser0 && !txled0 && !txth0 && !rxen0, "reset state of the controls");

    // enable both pairs: laser and clock on, all channels on IDC
    bfm.write16(16'h4004, 16'h1800, ok); chk(ok, "TX0 CSR");
    bfm.write16(16'h4104, 16'h1800, ok); chk(ok, "RX0 CSR");
    bfm.write16(16'h5004, 16'h1800, ok); chk(ok, "TX1 CSR");
    bfm.write16(16'h5104, 16'h1800, ok); chk(ok, "RX1 CSR");
    bfm.write16(16'h4104, 16'h3800, ok); chk(rxled0, "RX LED on");
    bfm.read16(16'h4104, d, ok); chk(d == 16'h3800, "RX CSR readback");
    chk(laser0 && rxen0 && lock0 && lock1, "links enabled, clock managers locked");

    // random trigger pulses, IDC inputs
    @(posedge clk25); #0.2;
    run_quiet(2 * LINK_STEPS);
    checking = 1; counting = 1;
    run_random(4000);                                       // 10 us
    run_quiet(2 * LINK_STEPS);
    counting = 0;
    chk(n_out_tr == n_in_tr && n_in_tr > 100,
        $sformatf("pair 0 transitions: out %0d in %0d", n_out_tr, n_in_tr));
    if (n_out_tr == n_in_tr) n_random_ok++;

    // select LEMO on odd channels
    checking = 0;
    bfm.write16(16'h4004, 16'h1800 | 16'h02AA, ok); chk(ok, "select write");
    sel_now = 11'h2AA;
    @(posedge clk25); #0.2;
    run_quiet(2 * LINK_STEPS);
    checking = 1;
    run_random(4000);
    n_select++;

    // minimum pulse width: 5 ns pulses, 5 ns gaps, channel 3 on IDC
    run_quiet(100);
    checking = 0;
    bfm.write16(16'h4004, 16'h1800, ok);
    sel_now = '0;
    idc = '0; lemo = '0;
    @(posedge clk25); #0.2;
    run_quiet(2 * LINK_STEPS);
    checking = 1;
    n_min_pulse = 0;
    for (int b = 0; b < 5; b++) begin
      for (int p = 0; p < 10; p++) begin
        idc[3] = 1'b1; run_quiet(2);
        idc[3] = 1'b0; run_quiet(2);
      end
      run_quiet(200);
    end
    chk(n_min_pulse == 50, $sformatf("5 ns pulses reproduced: %0d of 50", n_min_pulse));

    // long high level: 3 us on channel 0, no lane may trip
    idc[0] = 1'b1;
    run_quiet(1200);
    chk(out0[0] == 1'b1 && trip0 == '0, "long pulse held, no trip");
    if (out0[0] == 1'b1 && trip0 == '0) n_long++;
    idc[0] = 1'b0;
    run_quiet(100);

    // laser safety: clock off, laser on, channel 0 high for 2.5 us
    checking = 0;
    bfm.write16(16'h4004, 16'h0800, ok);
    idc[0] = 1'b1;
    run_quiet(1000);
    chk(trip0[0] == 1'b1 && trip0[N] == 1'b0, $sformatf("lane 0 tripped, clock lane not (%h)", trip0));
    if (trip0[0]) n_trip++;
    idc[0] = 1'b0;
    bfm.write16(16'h4004, 16'h0000, ok);
    run_quiet(10);
    chk(trip0 == '0, "trip cleared by laser disable");
    if (trip0 == '0) n_trip_clear++;
    bfm.write16(16'h4004, 16'h1800, ok);

    // misaligned pair
    chk(n_spurious > 100, $sformatf("misaligned pair spurious 1.25 ns pulses: %0d", n_spurious));

    $display("mechanisms: scan=%0d dark=%0d random=%0d select=%0d min_pulse=%0d long=%0d trip=%0d trip_clear=%0d spurious=%0d",
             n_scan, n_dark, n_random_ok, n_select, n_min_pulse, n_long, n_trip, n_trip_clear, n_spurious);
    chk(n_scan == 4 && n_dark > 0 && n_random_ok > 0 && n_select > 0 && n_min_pulse > 0 &&
        n_long > 0 && n_trip > 0 && n_trip_clear > 0 && n_spurious > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
