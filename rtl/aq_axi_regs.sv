// aq_axi_regs: AXI4-Lite register bank between the processor and the
// quench/reset channels.
//
// The processor side of the SoC reaches the quench logic through a
// memory-mapped AXI bus. Each channel owns a 32-byte window at ch*0x20:
//   0x00 MODE     RW [1:0]  0 AQ, 1 PQAR, 2 PQ, 3 off (behaves as PQ)
//   0x04 QUENCH   RW [7:0]  quench time, 5 ns cycles
//   0x08 GAP      RW [7:0]  quench-to-reset gap, 5 ns cycles
//   0x0C RESET    RW [7:0]  reset time, 5 ns cycles
//   0x10 DEADTIME RW [7:0]  minimum detection-to-rearm time, 5 ns cycles
//   0x14 COUNT    RO [23:0] avalanches in the last one-second gate,
//                    [31] the counter saturated in that gate
//   0x18 GATE     RO [15:0] number of gates completed
//   0x1C STATUS   RO [0] busy, [1] QUENCH_ENABLE, [2] RESET
// Writes to read-only registers are ignored; wdata[31:8] and wstrb[3:1]
// are unused because every writable field fits in byte 0. An address beyond the last
// channel answers SLVERR; everything else answers OKAY. Only byte lane 0
// (wstrb[0]) carries configuration bits. Configuration resets to
// aq_pkg::CFG_DEFAULT (AQ, 10 ns quench, 5 ns gap, 5 ns reset, no hold-off).
//
// Handshake: one write and one read may be outstanding. A write is taken in
// the cycle both AWVALID and WVALID are high and no response is pending
// (AWREADY and WREADY are raised together in that cycle); BVALID follows one
// cycle later. A read address is taken when no read data is pending; RVALID
// follows one cycle later. The bank runs on the 200 MHz quench clock.
//
// The paper shows an AXI bus between the FPGA blocks and the microcontroller
// and says the parameters are registers set at run time. The AXI4-Lite
// profile, the register map, the single clock and the error response are
// this design's own choices.
module aq_axi_regs
  import aq_pkg::*;
#(
  parameter int unsigned NUM_CH  = 1,
  parameter int unsigned ADDR_W  = 8,
  parameter int unsigned COUNT_W = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]   s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [31:0]         s_wdata,
  input  logic [3:0]          s_wstrb,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [ADDR_W-1:0]   s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  // channel side
  output aq_cfg_t             cfg       [NUM_CH],
  input  logic [COUNT_W-1:0]  count     [NUM_CH],
  input  logic                saturated [NUM_CH],
  input  logic [15:0]         gate_num  [NUM_CH],
  input  logic                busy      [NUM_CH],
  input  logic                qe        [NUM_CH],
  input  logic                rst_sw    [NUM_CH]
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned CHW = (ADDR_W > 5) ? ADDR_W - 5 : 1;

  logic            wr_fire, rd_fire;
  logic [CHW-1:0]  wr_ch, rd_ch;
  logic [4:0]      wr_off, rd_off;
  logic            wr_hit, rd_hit;
  logic [31:0]     rd_word;

  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign rd_fire   = s_arvalid && !s_rvalid;
  assign s_arready = !s_rvalid;

  assign wr_off = s_awaddr[4:0];
  assign rd_off = s_araddr[4:0];
  assign wr_ch  = CHW'(s_awaddr >> 5);
  assign rd_ch  = CHW'(s_araddr >> 5);
  assign wr_hit = (32'(s_awaddr >> 5) < NUM_CH);
  assign rd_hit = (32'(s_araddr >> 5) < NUM_CH);

  // Write path.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CH; c++) cfg[c] <= CFG_DEFAULT;
      s_bvalid <= 1'b0;
      s_bresp  <= RESP_OKAY;
    end else begin
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        s_bresp  <= wr_hit ? RESP_OKAY : RESP_SLVERR;
        if (wr_hit && s_wstrb[0]) begin
          for (int c = 0; c < NUM_CH; c++) begin
            if (32'(wr_ch) == c) begin
              unique case (wr_off)
                REG_MODE:     cfg[c].mode     <= aq_mode_e'(s_wdata[1:0]);
                REG_QUENCH:   cfg[c].quench   <= s_wdata[TIMER_W-1:0];
                REG_GAP:      cfg[c].gap      <= s_wdata[TIMER_W-1:0];
                REG_RESET:    cfg[c].reset    <= s_wdata[TIMER_W-1:0];
                REG_DEADTIME: cfg[c].deadtime <= s_wdata[TIMER_W-1:0];
                default: ;
              endcase
            end
          end
        end
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
    end
  end

  // Read decode.
  always_comb begin
    rd_word = '0;
    for (int c = 0; c < NUM_CH; c++) begin
      if (32'(rd_ch) == c) begin
        unique case (rd_off)
          REG_MODE:     rd_word = 32'(cfg[c].mode);
          REG_QUENCH:   rd_word = 32'(cfg[c].quench);
          REG_GAP:      rd_word = 32'(cfg[c].gap);
          REG_RESET:    rd_word = 32'(cfg[c].reset);
          REG_DEADTIME: rd_word = 32'(cfg[c].deadtime);
          REG_COUNT:    rd_word = {saturated[c], 31'(count[c])};
          REG_GATE:     rd_word = 32'(gate_num[c]);
          REG_STATUS:   rd_word = {29'd0, rst_sw[c], qe[c], busy[c]};
          default:      rd_word = '0;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      s_rresp  <= RESP_OKAY;
    end else if (rd_fire) begin
      s_rvalid <= 1'b1;
      s_rdata  <= rd_hit ? rd_word : 32'd0;
      s_rresp  <= rd_hit ? RESP_OKAY : RESP_SLVERR;
    end else if (s_rvalid && s_rready) begin
      s_rvalid <= 1'b0;
    end
  end

  // AXI rules for the responses this slave drives.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_bvalid && !s_bready) |=> (s_bvalid && $stable(s_bresp)));
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_rvalid && !s_rready) |=> (s_rvalid && $stable(s_rdata) && $stable(s_rresp)));
endmodule
