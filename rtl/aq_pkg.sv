// aq_pkg: types and constants shared by the active-quench controller.
//
// The quench/reset logic runs on one 200 MHz clock, so every timing value
// is a count of 5 ns clock cycles. A channel is configured by an aq_cfg_t:
// an operating mode and four durations (quench, gap between quench and
// reset, reset, and minimum deadtime). The 200 MHz clock, the 5 ns step, the
// 24-bit counter and the three modes (active quench, passive quench with
// active reset, passive quench) follow the published design; the 8-bit
// timer width, the mode encoding and the register map are this design's
// own choices.
package aq_pkg;
  timeunit 1ns; timeprecision 1ps;

  // Quench/reset clock and the resulting timing step.
  localparam int unsigned CLK_HZ      = 200_000_000;
  localparam int unsigned STEP_NS     = 5;
  // Width of every duration register: 255 x 5 ns = 1275 ns covers the
  // 1000 ns maximum of the quench, reset and deadtime ranges.
  localparam int unsigned TIMER_W     = 8;

  typedef logic [TIMER_W-1:0] dur_t;

  // Operating mode of one channel.
  //   MODE_AQ   : QUENCH_ENABLE armed, quench then reset (active quench)
  //   MODE_PQAR : QUENCH_ENABLE always low, reset after the quench time
  //   MODE_PQ   : QUENCH_ENABLE and RESET always low (passive quench)
  //   MODE_OFF  : encoding 3, treated like MODE_PQ
  typedef enum logic [1:0] {
    MODE_AQ   = 2'd0,
    MODE_PQAR = 2'd1,
    MODE_PQ   = 2'd2,
    MODE_OFF  = 2'd3
  } aq_mode_e;

  typedef struct packed {
    aq_mode_e mode;
    dur_t     quench;    // QUENCH_ENABLE held high after detection, cycles
    dur_t     gap;       // both switches off between quench and reset, cycles
    dur_t     reset;     // RESET pulse width, cycles
    dur_t     deadtime;  // minimum detection-to-rearm time, cycles (0: none)
  } aq_cfg_t;

  // Power-on configuration: 10 ns quench, 5 ns gap, 5 ns reset, active
  // quench, no extra deadtime hold-off.
  localparam aq_cfg_t CFG_DEFAULT = '{
    mode: MODE_AQ, quench: 8'd2, gap: 8'd1, reset: 8'd1, deadtime: 8'd0
  };

  // AXI4-Lite register map, one 32-byte window per channel at ch*0x20.
  localparam int unsigned CH_STRIDE  = 32'h20;
  localparam logic [4:0] REG_MODE     = 5'h00;  // [1:0] mode
  localparam logic [4:0] REG_QUENCH   = 5'h04;  // [7:0] quench cycles
  localparam logic [4:0] REG_GAP      = 5'h08;  // [7:0] gap cycles
  localparam logic [4:0] REG_RESET    = 5'h0C;  // [7:0] reset cycles
  localparam logic [4:0] REG_DEADTIME = 5'h10;  // [7:0] deadtime cycles
  localparam logic [4:0] REG_COUNT    = 5'h14;  // RO [23:0] count, [31] saturated
  localparam logic [4:0] REG_GATE     = 5'h18;  // RO [15:0] gates completed
  localparam logic [4:0] REG_STATUS   = 5'h1C;  // RO [0] busy, [1] QE, [2] RESET

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
endpackage
