// inverting_buffer: behavioural model of one discrete inverting buffer on the
// detector board. Not FPGA logic: it carries the part's propagation delay.
//
// y = NOT a, after T_PD (transport delay). The board has two of them on the
// comparator's inverted output: one drives APD_PULSE to the FPGA, the other
// clocks the OUT pulse trimmer. The inversion follows the paper; the 1 ns
// delay is this model's own assumption.
module inverting_buffer #(
  parameter realtime T_PD = 1.0ns
) (
  input  logic a,
  output logic y
);
  timeunit 1ns; timeprecision 1ps;

  assign #(T_PD) y = ~a;
endmodule
