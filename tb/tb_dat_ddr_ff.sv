// tb_dat_ddr_ff: self-checking test of the receiver output flip-flop.
//
// Part 1 walks through the rule table: rising A sets Q, rising B clears Q,
// falling edges of either leave Q alone, repeated edges keep the state.
// Part 2 applies the waveforms the receiver produces on the board: A equals
// the data but, while the data is high, dips low for 0.3 ns at every
// 25 MHz clock edge; B equals the inverted data but dips low at every clock
// edge while the data is low.  Q must follow the data at every 0.1 ns step
// (after a 50 ps settle) and change state exactly as often as the data does
// (no spikes get through).
`timescale 1ns / 1ps
module tb_dat_ddr_ff;
  logic rst_n, a, b, q;
  int checks = 0, failures = 0;

  dat_ddr_ff dut (.rst_n(rst_n), .a(a), .b(b), .q(q));

  task automatic expect_q(input logic e, input string what);
    #1;
    checks++;
    if (q !== e) begin
      failures++;
      $display("FAIL %s: q=%b expected %b", what, q, e);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int q_changes = 0;
  always @(q) if (rst_n) q_changes++;

  initial begin
    logic d, d_prev;
    int   d_changes, phase_ps;
    a = 1'b0; b = 1'b0; rst_n = 1'b1;
    #1 rst_n = 1'b0;
    #5 expect_q(1'b0, "reset");
    rst_n = 1'b1;
    expect_q(1'b0, "after reset");
    a = 1'b1; expect_q(1'b1, "A rise sets");
    a = 1'b0; expect_q(1'b1, "A fall holds 1");
    a = 1'b1; expect_q(1'b1, "A rise again keeps 1");
    b = 1'b1; expect_q(1'b0, "B rise clears");
    b = 1'b0; expect_q(1'b0, "B fall holds 0");
    a = 1'b0; expect_q(1'b0, "A fall holds 0");
    b = 1'b1; expect_q(1'b0, "B rise keeps 0");
    a = 1'b1; expect_q(1'b1, "A rise sets after B");
    b = 1'b0; expect_q(1'b1, "B fall holds 1");
    a = 1'b0; b = 1'b0;
    rst_n = 1'b0; #1 rst_n = 1'b1;
    expect_q(1'b0, "reset from 1");

    // Part 2: board-like A/B waveforms with 0.3 ns spikes at clock edges.
    d = 1'b0; d_prev = 1'b0; d_changes = 0; q_changes = 0;
    a = 1'b0; b = 1'b1;
    #1;
    q_changes = 0;
    for (int step = 0; step < 60000; step++) begin  // 6 us in 0.1 ns steps
      if (step % 50 == 25 && $urandom_range(0, 3) == 0) d = ~d;  // 5 ns grid, off the clock edges
      phase_ps = (step * 100) % 20000;          // time since last clock edge
      if (d != d_prev) d_changes++;
      d_prev = d;
      a = d  && !(phase_ps < 300);
      b = !d && !(phase_ps < 300);
      if (d) b = 1'b0;
      if (!d) a = 1'b0;
      #0.05;
      checks++;
      if (q !== d) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0t q=%b data=%b", $time, q, d);
      end
      #0.05;
    end
    checks++;
    if (q_changes != d_changes) begin
      failures++;
      $display("FAIL q changed %0d times, data %0d times", q_changes, d_changes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
