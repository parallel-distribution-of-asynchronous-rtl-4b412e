// tb_dat_rx_fpga: self-checking test of the receiver FPGA logic.
//
// A reference encoder written here (lane = data XOR 25 MHz clock, clock lane
// = clock) feeds a link model whose data lanes arrive 1.25 ns (8 phase
// steps) after the clock lane.  Two receivers see the same lanes:
//   u_al  PHASE_SHIFT = 8: clock aligned with the data lanes.  Its outputs
//         must equal the data delayed by the link (6.25 ns) at every
//         0.5 ns sample and change exactly as often as the data.
//   u_mis PHASE_SHIFT = 0: clock 1.25 ns early.  It must produce spurious
//         pulses as wide as the misalignment (1.25 ns) and none wider
//         (narrower intervals arise where a data edge follows a spike).
// Also checked: model number over VME, DCM lock, the front-panel clock
// output equal to the received clock lane, LEMO and IDC copies equal.
// Data changes on a 2.5 ns grid with pulses and gaps of at least 5 ns.
// Such dense random data can push a lane's duty cycle past the optical
// link's 57% limit, so the link model's duty monitor is switched off here.
`timescale 1ns / 1ps
module tb_dat_rx_fpga;
  localparam int N = 11;
  localparam real DLY = 6.25;
  logic clk25 = 1'b0, sysclk = 1'b0, rst_n;
  logic [N-1:0] data;
  logic [N:0] tx_l, rx_l, tripped;
  logic [N:0] lemo_al, idc_al, lemo_mis, idc_mis;
  logic link_en_al, link_en_mis, led0, led1, th0, th1, lock_al, lock_mis;
  logic [15:1] addr; logic [5:0] am; logic as_n, ds0_n, ds1_n, write_n;
  logic [15:0] wdata, rd_al, rd_mis; logic oe_al, oe_mis, dt_al, dt_mis;
  int checks = 0, failures = 0;

  always #20 clk25 = ~clk25;
  always #31.25 sysclk = ~sysclk;

  assign tx_l = {clk25, data ^ {N{clk25}}};

  paroli_link_model #(.NUM_LANES(N+1), .DELAY_NS(5.0), .DUTY_LIMIT_PCT(101),
    .LANE_SKEW_NS('{1.25, 1.25, 1.25, 1.25, 1.25, 1.25, 1.25, 1.25, 1.25,
                    1.25, 1.25, 0.0})
  ) u_link (.tx_lanes(tx_l), .tx_enable(1'b1), .rx_enable(1'b1), .rx_lanes(rx_l), .tripped(tripped));

  dat_rx_fpga #(.PHASE_SHIFT(8)) u_al (
    .lanes(rx_l), .link_en(link_en_al), .out_lemo(lemo_al), .out_idc(idc_al), .led(led0),
    .test_hdr_en(th0), .dcm_locked(lock_al), .vme_sysclk(sysclk), .vme_sysreset_n(rst_n),
    .base_addr(8'h41), .module_id(16'h0002), .vme_addr(addr), .vme_am(am), .vme_as_n(as_n),
    .vme_ds0_n(ds0_n), .vme_ds1_n(ds1_n), .vme_write_n(write_n), .vme_data_i(wdata),
    .vme_data_o(rd_al), .vme_data_oe(oe_al), .vme_dtack_n(dt_al));

  dat_rx_fpga #(.PHASE_SHIFT(0)) u_mis (
    .lanes(rx_l), .link_en(link_en_mis), .out_lemo(lemo_mis), .out_idc(idc_mis), .led(led1),
    .test_hdr_en(th1), .dcm_locked(lock_mis), .vme_sysclk(sysclk), .vme_sysreset_n(rst_n),
    .base_addr(8'h42), .module_id(16'h0003), .vme_addr(addr), .vme_am(am), .vme_as_n(as_n),
    .vme_ds0_n(ds0_n), .vme_ds1_n(ds1_n), .vme_write_n(write_n), .vme_data_i(wdata),
    .vme_data_o(rd_mis), .vme_data_oe(oe_mis), .vme_dtack_n(dt_mis));

  wire dtack_n = dt_al & dt_mis;
  wire [15:0] rdata = oe_al ? rd_al : rd_mis;

  vme_master_bfm bfm (.clk(sysclk), .addr(addr), .am(am), .as_n(as_n), .ds0_n(ds0_n),
    .ds1_n(ds1_n), .write_n(write_n), .wdata(wdata), .dtack_n(dtack_n), .rdata(rdata));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Transition counting and spurious-pulse widths on channel 0..N-1.
  int      n_data = 0, n_al = 0, n_mis = 0, n_spur_w = 0, n_spur_bad = 0;
  bit      counting = 0;
  realtime t_mis_edge [N];
  for (genvar i = 0; i < N; i++) begin : g_cnt
    always @(lemo_al[i])  if (counting) n_al++;
    always @(lemo_mis[i]) begin
      if (counting) begin
        realtime w;
        n_mis++;
        w = $realtime - t_mis_edge[i];
        if (w > 1.245 && w < 1.255) n_spur_w++;    // a spike of the misalignment width
        if (w > 1.255 && w < 2.0)   n_spur_bad++;  // nothing should be wider

      end
      t_mis_edge[i] = $realtime;
    end
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok; logic [15:0] d;
    logic [N-1:0] hist [64];
    int k, hold [N];
    data = '0;
    for (int i = 0; i < N; i++) begin hold[i] = 0; t_mis_edge[i] = 0; end
    rst_n = 1'b1;  // a real falling edge for the asynchronous resets
    #1 rst_n = 1'b0;
    #300 rst_n = 1'b1;
    bfm.read16(16'h4100, d, ok); chk(ok && d == dat_pkg::MODEL_DAT_RX, "model number");
    bfm.write16(16'h4104, 16'h1800, ok); chk(ok, "CSR write u_al");
    bfm.write16(16'h4204, 16'h1800, ok); chk(ok, "CSR write u_mis");
    chk(link_en_al && lock_al && lock_mis, "link enabled and DCMs locked");
    @(posedge clk25);
    #0.2;                        // data changes 0.2 ns after the 0.5 ns grid,
                                 // never on a clock edge
    counting = 1;
    for (int i = 0; i < 64; i++) hist[i] = '0;
    k = 0;
    for (int step = 0; step < 40000; step++) begin   // 20 us in 0.5 ns steps
      if (step % 5 == 0)
        for (int i = 0; i < N; i++) begin
          hold[i]++;
          if (hold[i] >= 2 && $urandom_range(0, 2) == 0) begin data[i] = ~data[i]; hold[i] = 0; n_data++; end
        end
      #0.3;                      // sample instant on the 0.5 ns grid
      hist[k % 64] = data;
      if (k >= 12) begin
        chk(lemo_al[N-1:0] == hist[(k - 12) % 64], $sformatf("aligned output %h exp %h",
            lemo_al[N-1:0], hist[(k - 12) % 64]));
        chk(idc_al == lemo_al && lemo_al[N] == rx_l[N], "IDC copy and clock output");
      end
      k++;
      #0.2;
    end
    #20;
    counting = 0;
    chk(n_al == n_data, $sformatf("aligned transitions %0d, data %0d", n_al, n_data));
    chk(n_spur_w > 100, $sformatf("misaligned receiver spurious pulses: %0d", n_spur_w));
    chk(n_spur_bad == 0, $sformatf("%0d spurious pulses of wrong width", n_spur_bad));
    $display("data transitions %0d, aligned %0d, misaligned %0d (spurious pulses %0d)",
             n_data, n_al, n_mis, n_spur_w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
