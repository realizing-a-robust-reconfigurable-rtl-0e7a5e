// tb_pulse_counter: self-checking testbench of the gated avalanche counter.
//
// Runs with a short gate (GATE_CYCLES = 50) and a 4-bit counter so that
// saturation is reachable. A random number of one-cycle pulses is placed in
// each gate, some of them on the gate's last cycle; the testbench counts
// them itself and checks, at every gate_done, the latched count, the
// saturated flag and the gate number. It also checks that gate_done comes
// exactly every GATE_CYCLES cycles, and that count_out holds between gates.
module tb_pulse_counter;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned COUNT_W = 4;
  localparam int unsigned GATE    = 50;

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic               pulse_rise = 1'b0;
  logic [COUNT_W-1:0] count_out;
  logic               saturated;
  logic [15:0]        gate_num;
  logic               gate_done;
  int checks = 0, failures = 0;

  always #2.5 clk = ~clk;

  pulse_counter #(.COUNT_W(COUNT_W), .GATE_CYCLES(GATE)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (GATE * 40) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stimulus and reference: cycle index within the gate is tracked here.
  int cyc = 0;           // cycles since reset released
  int ref_cnt = 0;       // pulses in the current gate
  int exp_cnt [$];       // expected result of each finished gate
  int last_done = -1;
  int gates_seen = 0;
  int n_sat = 0;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < 30; g++) begin
      int density;
      density = (g % 7 == 3) ? 60 : (g % 5 == 1 ? 0 : int'($urandom_range(5, 30)));
      ref_cnt = 0;
      for (int i = 0; i < GATE; i++) begin
        pulse_rise = ($urandom_range(0, 99) < density) || (g == 2 && i == GATE - 1);
        if (pulse_rise) ref_cnt++;
        @(negedge clk);
      end
      exp_cnt.push_back(ref_cnt);
    end
    pulse_rise = 1'b0;
    repeat (5) @(negedge clk);
    check(gates_seen == 30, "number of gates");
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Checker: samples after each rising edge.
  always @(posedge clk) begin
    if (rst_n) begin
      #0.1;
      cyc++;
      if (gate_done) begin
        int e;
        // the gate ends on the edge that samples the gate's last pulse slot,
        // before the stimulus loop files the gate's total
        e = ref_cnt;
        check(exp_cnt.size() == gates_seen, "gate aligned with stimulus");
        check(int'(count_out) == ((e > 15) ? 15 : e), $sformatf("count gate %0d exp %0d got %0d", gates_seen, e, count_out));
        check(saturated == (e > 15), "saturated flag");
        if (e > 15) n_sat++;
        check(int'(gate_num) == gates_seen + 1, "gate number");
        if (last_done >= 0) check(cyc - last_done == GATE, "gate period");
        last_done = cyc;
        gates_seen++;
      end
    end
  end
endmodule
