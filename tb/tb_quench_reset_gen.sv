// tb_quench_reset_gen: self-checking testbench of the quench/reset sequencer.
//
// For each configuration the testbench raises apd_pulse, finds the clock
// edge that samples it (edge 0) and then checks QUENCH_ENABLE, RESET, busy
// and trigger after every following edge against the schedule worked out
// here from the configuration alone:
//   QUENCH_ENABLE low for Qe <= k < Qe+G+R   (AQ mode only)
//   RESET high        for Qe+G <= k < Qe+G+R
// with Q = max(quench,1), G = gap, R = max(reset,1), D = deadtime and
// Qe = max(Q, D-G-R). The
// pulse is dropped when the reset starts, as the real detector does. It
// covers AQ, PQAR and PQ modes, zero gap, zero durations, deadtime
// stretching of the quench, maximum durations, a configuration change in mid-cycle, a
// pulse still high at re-arm (which must not start a new cycle), and a
// pulse that falls and rises again while a cycle runs (which must start one
// at re-arm).
module tb_quench_reset_gen;
  timeunit 1ns; timeprecision 1ps;
  import aq_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    apd_pulse = 1'b0;
  aq_cfg_t cfg;
  logic    quench_enable, reset_out, busy, trigger;
  int      checks = 0, failures = 0;

  always #2.5 clk = ~clk;  // 200 MHz

  quench_reset_gen dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Run one detection cycle with configuration c and check every edge.
  // hold_high keeps the pulse high through re-arm.
  task automatic run_cycle(input aq_cfg_t c, input bit hold_high = 1'b0,
                           input aq_cfg_t c_mid = '0, input bit change_mid = 1'b0);
    int q, g, r, d, rearm, k;
    bit aq, active;
    q = (c.quench == 0) ? 1 : int'(c.quench);
    g = int'(c.gap);
    r = (c.reset == 0) ? 1 : int'(c.reset);
    d = int'(c.deadtime);
    if (d - g - r > q) q = d - g - r;  // deadtime stretches the quench
    rearm = q + g + r;
    aq = (c.mode == MODE_AQ);
    active = (c.mode == MODE_AQ || c.mode == MODE_PQAR);
    cfg = c;
    @(negedge clk);
    check(quench_enable == aq, "armed QUENCH_ENABLE level");
    check(!busy && !reset_out, "idle before pulse");
    apd_pulse = 1'b1;
    @(posedge clk);  // edge 0
    #0.1;
    for (k = 0; k <= rearm + 2; k++) begin
      if (k > 0) begin
        @(posedge clk);
        #0.1;
      end
      if (!active) begin
        check(!quench_enable && !reset_out && !busy && !trigger, "passive mode stays idle");
      end else if (!(hold_high && k > rearm)) begin
        check(quench_enable == (aq && (k < q || k >= rearm)), $sformatf("QE k=%0d", k));
        check(reset_out == (k >= q + g && k < q + g + r), $sformatf("RESET k=%0d", k));
        check(busy == (k < rearm), $sformatf("busy k=%0d", k));
        check(trigger == (k == 0), $sformatf("trigger k=%0d", k));
      end
      if (change_mid && k == 0) cfg = c_mid;
      if (!hold_high && k == q + g) begin
        @(negedge clk);
        apd_pulse = 1'b0;
      end
      if (hold_high && k > rearm) begin
        // the old pulse still high after re-arm must not start a new cycle
        check(!trigger && !busy && quench_enable, "no false retrigger on a stale pulse");
      end
    end
    apd_pulse = 1'b0;
    repeat (rearm + 2) @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  aq_cfg_t c, c2;
  initial begin
    cfg = CFG_DEFAULT;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // default: 10 ns quench, 5 ns gap, 5 ns reset
    run_cycle(CFG_DEFAULT);
    // chip-scale setting: 25 ns quench, 10 ns gap, 15 ns reset
    c = '{mode: MODE_AQ, quench: 8'd5, gap: 8'd2, reset: 8'd3, deadtime: 8'd0};
    run_cycle(c);
    // zero gap, zero durations read as one cycle
    c = '{mode: MODE_AQ, quench: 8'd0, gap: 8'd0, reset: 8'd0, deadtime: 8'd0};
    run_cycle(c);
    // deadtime longer than the phases stretches the quench
    c = '{mode: MODE_AQ, quench: 8'd2, gap: 8'd1, reset: 8'd2, deadtime: 8'd12};
    run_cycle(c);
    // deadtime shorter than the phases has no effect
    c = '{mode: MODE_AQ, quench: 8'd4, gap: 8'd1, reset: 8'd2, deadtime: 8'd3};
    run_cycle(c);
    // PQAR: reset only
    c = '{mode: MODE_PQAR, quench: 8'd6, gap: 8'd1, reset: 8'd2, deadtime: 8'd0};
    run_cycle(c);
    // PQ and OFF: nothing
    c = '{mode: MODE_PQ, quench: 8'd2, gap: 8'd1, reset: 8'd1, deadtime: 8'd0};
    run_cycle(c);
    c.mode = MODE_OFF;
    run_cycle(c);
    // maximum durations (1000 ns range needs 200 cycles)
    c = '{mode: MODE_AQ, quench: 8'd200, gap: 8'd3, reset: 8'd200, deadtime: 8'd255};
    run_cycle(c);
    // configuration rewritten in mid-cycle: running cycle keeps the old one
    c  = '{mode: MODE_AQ, quench: 8'd3, gap: 8'd2, reset: 8'd2, deadtime: 8'd0};
    c2 = '{mode: MODE_AQ, quench: 8'd9, gap: 8'd0, reset: 8'd7, deadtime: 8'd0};
    run_cycle(c, 1'b0, c2, 1'b1);
    // pulse held high through re-arm
    c = '{mode: MODE_AQ, quench: 8'd2, gap: 8'd1, reset: 8'd1, deadtime: 8'd0};
    run_cycle(c, 1'b1);
    apd_pulse = 1'b0;
    repeat (4) @(posedge clk);
    // pulse falls and rises again during a (stretched) cycle: new cycle at re-arm
    begin
      int e0, e;
      c = '{mode: MODE_AQ, quench: 8'd2, gap: 8'd1, reset: 8'd1, deadtime: 8'd10};
      cfg = c;
      @(negedge clk); apd_pulse = 1'b1;
      @(posedge clk); #0.1;
      check(trigger, "hold-off test first trigger");
      repeat (3) @(negedge clk);
      apd_pulse = 1'b0;
      repeat (3) @(negedge clk);
      apd_pulse = 1'b1;         // second pulse while the cycle still runs
      e = 0;
      for (e0 = 1; e0 < 20 && e == 0; e0++) begin
        @(posedge clk); #0.1;
        if (trigger) e = e0;
      end
      // the loop started after edge 5; re-arm is at edge 10, trigger at 11
      check(e + 5 == 11, $sformatf("second trigger one edge after re-arm, edge %0d", e + 5));
      @(negedge clk); apd_pulse = 1'b0;
      repeat (20) @(posedge clk);
    end
    // a fresh cycle after all of that
    run_cycle(CFG_DEFAULT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
