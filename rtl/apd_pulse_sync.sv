// apd_pulse_sync: brings the asynchronous APD_PULSE into the 200 MHz domain.
//
// APD_PULSE comes from the comparator on the detector board and has no
// relation to the FPGA clock. A chain of STAGES flip-flops (two by default)
// resolves metastability; the module outputs the synchronised level and a
// one-cycle pulse on each rising edge of it. Latency from input edge to
// level output is STAGES clock cycles (10 ns at 200 MHz), and the rise
// pulse comes out in the same cycle as the level. Pulses shorter than one
// clock period can be missed; the avalanche pulse lasts the whole deadtime
// (at least 35 ns), so this does not arise. The paper does not describe a
// synchroniser; this one is the conventional choice.
module apd_pulse_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic pulse_async,
  output logic level,
  output logic rise
);
  timeunit 1ns; timeprecision 1ps;

  logic [STAGES-1:0] sync_q;
  logic              level_d;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync_q  <= '0;
      level_d <= 1'b0;
    end else begin
      sync_q  <= {sync_q[STAGES-2:0], pulse_async};
      level_d <= sync_q[STAGES-1];
    end
  end

  assign level = sync_q[STAGES-1];
  assign rise  = sync_q[STAGES-1] & ~level_d;
endmodule
