// tb_inverting_buffer: self-checking testbench of the inverting buffer
// model. After each random input change the output must still show the old
// value 0.9 ns later and the inverted new value 1.1 ns later.
module tb_inverting_buffer;
  timeunit 1ns; timeprecision 1ps;

  logic a = 1'b0, y;
  int   checks = 0, failures = 0;

  inverting_buffer dut (.*);

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
    #5ns;
    check(y == 1'b1, "initial inversion");
    for (int i = 0; i < 300; i++) begin
      logic na, prev;
      na = (i % 3 == 0) ? ~a : 1'($urandom);
      prev = ~a;
      a = na;
      #0.9ns;
      check(y == prev, "output holds for the delay");
      #0.2ns;
      check(y == ~na, "output inverted after 1 ns");
      #($urandom_range(1, 5) * 1ns);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
