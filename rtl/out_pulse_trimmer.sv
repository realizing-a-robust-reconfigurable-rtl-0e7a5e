// out_pulse_trimmer: behavioural model of the D flip-flop pulse trimmer that
// makes the board's OUT signal. Not FPGA logic: its pulse width is set by an
// RC network (R4, C1), which only a timed model can represent.
//
// The flip-flop's D input is tied high and it is clocked by the inverted
// comparator output, so an avalanche sets Q (OUT) after T_CQ. Its inverted
// output discharges C1 through R4 into the active-low clear; after T_TRIM
// the clear trips and OUT falls, giving a pulse of fixed width whatever the
// length of the avalanche. While OUT is high, and for T_RECOVER after it
// falls while C1 recharges, further clock edges have no effect.
//
// The 20 ns pulse width and the structure follow the paper. The paper gives
// about 6 ns from avalanche to OUT for comparator, buffer and flip-flop
// together; the 2 ns clock-to-output and 5 ns recovery are this model's own.
module out_pulse_trimmer #(
  parameter realtime T_CQ      = 2.0ns,
  parameter realtime T_TRIM    = 20.0ns,
  parameter realtime T_RECOVER = 5.0ns
) (
  input  logic clk_in,  // from the inverting buffer
  output logic out,     // OUT, to the coaxial connector
  output logic out_n    // inverted output, feeds R4/C1
);
  timeunit 1ns; timeprecision 1ps;

  // The flip-flop and the RC network are modelled by their timing: an
  // accepted clock edge toggles rise_tog T_CQ later, and every rise_tog
  // toggle is echoed on fall_tog T_TRIM later, when the clear trips. OUT is
  // high between the two. An edge is accepted only once the previous pulse
  // has ended and C1 has recharged (free_at). Each delayed assignment sits
  // in a block of its own so every simulator applies it to that signal alone.
  logic    rise_tog;
  logic    fall_tog;
  realtime free_at;

  always @(posedge clk_in) begin
    if ($realtime >= free_at) begin
      free_at = $realtime + T_CQ + T_TRIM + T_RECOVER;
      rise_tog <= #(T_CQ) ~rise_tog;
    end
  end

  always @(rise_tog) fall_tog <= #(T_TRIM) rise_tog;

  assign out   = rise_tog ^ fall_tog;
  assign out_n = ~out;

  initial begin
    rise_tog = 1'b0;
    fall_tog = 1'b0;
    free_at  = 0.0;
  end
endmodule
