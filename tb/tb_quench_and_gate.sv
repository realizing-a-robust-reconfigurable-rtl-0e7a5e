// tb_quench_and_gate: self-checking testbench of the AND gate model.
// Applies all input combinations and random input changes, and checks
// that QUENCH equals Q AND QUENCH_ENABLE one gate delay (1 ns) after each
// change, and has not yet changed just before that.
module tb_quench_and_gate;
  timeunit 1ns; timeprecision 1ps;

  logic q = 1'b0, quench_enable = 1'b0, quench;
  int   checks = 0, failures = 0;

  quench_and_gate dut (.*);

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

  initial begin
    logic prev;
    #5ns;
    for (int i = 0; i < 300; i++) begin
      logic nq, ne;
      nq = (i < 4) ? i[0] : 1'($urandom);
      ne = (i < 4) ? i[1] : 1'($urandom);
      prev = q & quench_enable;
      q = nq;
      quench_enable = ne;
      #0.9ns;
      check(quench == prev, "output holds for the gate delay");
      #0.2ns;
      check(quench == (nq & ne), $sformatf("AND %b&%b", nq, ne));
      #($urandom_range(1, 5) * 1ns);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
