// tb_out_pulse_trimmer: self-checking testbench of the OUT pulse trimmer
// model. Clock edges of varying length and spacing arrive on clk_in; every
// edge that finds the flip-flop idle and recovered must give an OUT pulse
// starting T_CQ (2 ns) later and lasting T_TRIM (20 ns), whatever the input
// pulse width; edges during the pulse or the 5 ns recovery must be ignored.
// out_n must always be the complement of out.
module tb_out_pulse_trimmer;
  timeunit 1ns; timeprecision 1ps;

  logic clk_in = 1'b0;
  logic out, out_n;
  int   checks = 0, failures = 0;

  out_pulse_trimmer dut (.clk_in, .out, .out_n);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #100us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: when the next OUT pulse may start.
  realtime ready_at = 0.0;
  realtime exp_rise [$];

  always @(posedge clk_in) begin
    if ($realtime >= ready_at) begin
      exp_rise.push_back($realtime + 2.0);
      ready_at = $realtime + 2.0 + 20.0 + 5.0;
    end
  end

  always @(posedge out) begin
    realtime t, e;
    t = $realtime;
    check(exp_rise.size() > 0, "OUT pulse expected");
    if (exp_rise.size() > 0) begin
      e = exp_rise.pop_front();
      check(t > e - 0.01 && t < e + 0.01, $sformatf("OUT rise at %0.2f, expected %0.2f", t, e));
    end
    @(negedge out);
    check($realtime - t > 19.99 && $realtime - t < 20.01,
          $sformatf("OUT width %0.2f ns", $realtime - t));
  end

  always @(out or out_n) begin
    #0.001;
    check(out_n == ~out, "out_n complements out");
  end

  initial begin
    #50ns;
    for (int i = 0; i < 200; i++) begin
      clk_in = 1'b1;
      #($urandom_range(1000, 60000) * 1ps);
      clk_in = 1'b0;
      #($urandom_range(1000, 40000) * 1ps);
    end
    #100ns;
    check(exp_rise.size() == 0, "every expected pulse seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
