// aq_system: the digital side of the reconfigurable active-quench system,
// from comparator outputs to the quench/reset transistor drives.
//
// Per detector channel:
//   comparator Q ----------------------------> AND --> QUENCH (to N1/P1)
//   FPGA QUENCH_ENABLE ----------------------> AND
//   comparator Q-bar -> inverting buffer -> APD_PULSE -> FPGA
//   comparator Q-bar -> inverting buffer -> D-FF trimmer -> OUT (20 ns)
//   FPGA RESET -------------------------------------------> RESET (to N2)
// The FPGA part (aq_fpga_top) is synthesizable; the AND gate, inverters and
// trimmer are timed behavioural models of discrete parts, so this top is a
// simulation model of the board-plus-FPGA system, not a synthesis top. The
// detector, comparator and transistors are analog and attach at the ports:
// comp_q / comp_qn come from the comparator, quench / reset drive the
// transistor gates. The processor attaches at the AXI4-Lite port.
//
// Timing: the quench starts through the AND gate within one gate delay of
// Q, independent of the FPGA clock; QUENCH_ENABLE falls about quench+3
// 5 ns cycles after APD_PULSE rises (synchroniser plus registered output),
// and the gap, reset and deadtime follow as in quench_reset_gen.
//
// The connections follow the paper's block diagram; NUM_CH = 2 gives the
// two-detector setup in which the whole channel is duplicated.
module aq_system
  import aq_pkg::*;
#(
  parameter int unsigned NUM_CH      = 1,
  parameter int unsigned ADDR_W      = 8,
  parameter int unsigned COUNT_W     = 24,
  parameter int unsigned GATE_CYCLES = 200_000_000
) (
  input  logic              clk,      // 200 MHz
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
  // analog front end
  input  logic [NUM_CH-1:0] comp_q,   // comparator Q
  input  logic [NUM_CH-1:0] comp_qn,  // comparator Q-bar
  output logic [NUM_CH-1:0] quench,   // QUENCH, gate of N1
  output logic [NUM_CH-1:0] reset,    // RESET, gate of N2
  output logic [NUM_CH-1:0] out,      // OUT, trimmed 20 ns avalanche pulse
  output logic [NUM_CH-1:0] apd_pulse // APD_PULSE, as seen by the FPGA
);
  timeunit 1ns; timeprecision 1ps;

  logic [NUM_CH-1:0] quench_enable;

  aq_fpga_top #(
    .NUM_CH     (NUM_CH),
    .ADDR_W     (ADDR_W),
    .COUNT_W    (COUNT_W),
    .GATE_CYCLES(GATE_CYCLES)
  ) u_fpga (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready,
    .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready,
    .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .apd_pulse    (apd_pulse),
    .quench_enable(quench_enable),
    .reset_out    (reset)
  );

  for (genvar c = 0; c < NUM_CH; c++) begin : g_board
    logic trim_clk;
    logic out_n;

    quench_and_gate u_and (
      .q            (comp_q[c]),
      .quench_enable(quench_enable[c]),
      .quench       (quench[c])
    );

    inverting_buffer u_inv_pulse (
      .a(comp_qn[c]),
      .y(apd_pulse[c])
    );

    inverting_buffer u_inv_trim (
      .a(comp_qn[c]),
      .y(trim_clk)
    );

    out_pulse_trimmer u_trim (
      .clk_in(trim_clk),
      .out   (out[c]),
      .out_n (out_n)
    );
  end
endmodule
