// quench_and_gate: behavioural model of the discrete fast AND gate on the
// detector board. Not synthesizable logic for the FPGA: it stands for a
// separate logic part and carries its propagation delay.
//
// QUENCH = Q AND QUENCH_ENABLE. Q comes straight from the comparator, so an
// avalanche turns the quench transistors on without a round trip through
// the FPGA; the FPGA only opens the loop (QUENCH_ENABLE low) to end the
// quench, or keeps it open for the passive modes. The output follows any
// input change after T_PD (transport delay).
//
// The AND function and its place in the loop follow the paper. The paper
// gives only the 9 ns sum of comparator, gate and transistor delays; the
// 1 ns gate delay is this model's own assumption.
module quench_and_gate #(
  parameter realtime T_PD = 1.0ns
) (
  input  logic q,              // comparator output Q
  input  logic quench_enable,  // QUENCH_ENABLE from the FPGA
  output logic quench          // QUENCH to N1
);
  timeunit 1ns; timeprecision 1ps;

  assign #(T_PD) quench = q & quench_enable;
endmodule
