// aq_fpga_top: programmable-logic part of the active-quench SoC.
//
// One AXI4-Lite register bank serves NUM_CH identical detector channels.
// Each channel takes the APD_PULSE line from its detector board, brings it
// into the 200 MHz clock domain (apd_pulse_sync), and feeds it to
//   - a quench_reset_gen, which drives QUENCH_ENABLE and RESET back to the
//     board, and
//   - a pulse_counter, which counts avalanches per one-second gate.
// The register bank supplies each channel's mode and durations and returns
// its count, gate number and live status.
//
// Timing: an APD_PULSE edge reaches the sequencer two clock cycles after it
// arrives (synchroniser), and the sequencer's outputs are registered, so
// QUENCH_ENABLE falls quench+3 cycles after the edge, up to one cycle more
// depending on where the edge falls relative to the clock.
//
// Follows the paper: the quench/reset generator and pulse counter per
// detector, replicated for a second detector, sharing one processor over
// AXI. The default of one channel is the single-detector system of the
// paper's block diagram; the two-detector setup is NUM_CH = 2. The
// synchroniser and the single clock domain are this design's own choices.
module aq_fpga_top
  import aq_pkg::*;
#(
  parameter int unsigned NUM_CH      = 1,
  parameter int unsigned ADDR_W      = 8,
  parameter int unsigned COUNT_W     = 24,
  parameter int unsigned GATE_CYCLES = 200_000_000
) (
  input  logic              clk,            // 200 MHz
  input  logic              rst_n,
  // AXI4-Lite slave from the processor
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // detector boards
  input  logic [NUM_CH-1:0] apd_pulse,      // APD_PULSE, asynchronous
  output logic [NUM_CH-1:0] quench_enable,  // QUENCH_ENABLE
  output logic [NUM_CH-1:0] reset_out       // RESET
);
  timeunit 1ns; timeprecision 1ps;

  aq_cfg_t            cfg       [NUM_CH];
  logic [COUNT_W-1:0] count     [NUM_CH];
  logic               saturated [NUM_CH];
  logic [15:0]        gate_num  [NUM_CH];
  logic               busy      [NUM_CH];
  logic               qe        [NUM_CH];
  logic               rst_sw    [NUM_CH];

  aq_axi_regs #(
    .NUM_CH (NUM_CH),
    .ADDR_W (ADDR_W),
    .COUNT_W(COUNT_W)
  ) u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready,
    .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready,
    .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .cfg, .count, .saturated, .gate_num, .busy, .qe, .rst_sw
  );

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic pulse_level, pulse_rise;

    apd_pulse_sync #(.STAGES(2)) u_sync (
      .clk, .rst_n,
      .pulse_async(apd_pulse[c]),
      .level      (pulse_level),
      .rise       (pulse_rise)
    );

    quench_reset_gen u_qrg (
      .clk, .rst_n,
      .apd_pulse    (pulse_level),
      .cfg          (cfg[c]),
      .quench_enable(qe[c]),
      .reset_out    (rst_sw[c]),
      .busy         (busy[c]),
      .trigger      ()
    );

    pulse_counter #(
      .COUNT_W    (COUNT_W),
      .GATE_CYCLES(GATE_CYCLES)
    ) u_cnt (
      .clk, .rst_n,
      .pulse_rise(pulse_rise),
      .count_out (count[c]),
      .saturated (saturated[c]),
      .gate_num  (gate_num[c]),
      .gate_done ()
    );

    assign quench_enable[c] = qe[c];
    assign reset_out[c]     = rst_sw[c];
  end
endmodule
