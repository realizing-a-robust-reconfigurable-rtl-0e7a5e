// tb_aq_axi_regs: self-checking testbench of the AXI4-Lite register bank.
//
// Two channels. The testbench writes random values to every writable
// register of both channels and reads them back, checks that the cfg
// outputs carry them, drives the read-only inputs (count, saturated, gate
// number, status bits) with random values and reads them through the bus,
// and checks the power-on values, that writes with byte lane 0 disabled or
// to read-only registers change nothing, that an address beyond the last
// channel answers SLVERR, and that responses survive BREADY/RREADY stalls.
// The AXI response-hold assertions in the bank run throughout.
module tb_aq_axi_regs;
  timeunit 1ns; timeprecision 1ps;
  import aq_pkg::*;

  localparam int unsigned NCH = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2.5 clk = ~clk;

  axi_lite_master_if #(.AW(8)) m (.clk(clk));

  aq_cfg_t     cfg       [NCH];
  logic [23:0] count     [NCH];
  logic        saturated [NCH];
  logic [15:0] gate_num  [NCH];
  logic        busy      [NCH];
  logic        qe        [NCH];
  logic        rst_sw    [NCH];

  aq_axi_regs #(.NUM_CH(NCH), .ADDR_W(8), .COUNT_W(24)) dut (
    .clk, .rst_n,
    .s_awaddr(m.awaddr), .s_awvalid(m.awvalid), .s_awready(m.awready),
    .s_wdata(m.wdata), .s_wstrb(m.wstrb), .s_wvalid(m.wvalid), .s_wready(m.wready),
    .s_bresp(m.bresp), .s_bvalid(m.bvalid), .s_bready(m.bready),
    .s_araddr(m.araddr), .s_arvalid(m.arvalid), .s_arready(m.arready),
    .s_rdata(m.rdata), .s_rresp(m.rresp), .s_rvalid(m.rvalid), .s_rready(m.rready),
    .cfg, .count, .saturated, .gate_num, .busy, .qe, .rst_sw
  );

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  logic [1:0]  resp;
  logic [7:0]  vals [NCH][5];

  function automatic logic [7:0] field(input int c, input int r);
    case (r)
      0: return {6'd0, cfg[c].mode};
      1: return cfg[c].quench;
      2: return cfg[c].gap;
      3: return cfg[c].reset;
      default: return cfg[c].deadtime;
    endcase
  endfunction

  initial begin
    m.init();
    for (int c = 0; c < NCH; c++) begin
      count[c] = '0; saturated[c] = 1'b0; gate_num[c] = '0;
      busy[c] = 1'b0; qe[c] = 1'b0; rst_sw[c] = 1'b0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // power-on values
    for (int c = 0; c < NCH; c++) begin
      m.read(8'(c * 32 + 'h00), d, resp); check(d == 32'(MODE_AQ) && resp == RESP_OKAY, "reset mode");
      m.read(8'(c * 32 + 'h04), d, resp); check(d == 32'd2, "reset quench");
      m.read(8'(c * 32 + 'h08), d, resp); check(d == 32'd1, "reset gap");
      m.read(8'(c * 32 + 'h0C), d, resp); check(d == 32'd1, "reset reset");
      m.read(8'(c * 32 + 'h10), d, resp); check(d == 32'd0, "reset deadtime");
    end

    // random writes, read back, cfg outputs
    for (int it = 0; it < 6; it++) begin
      for (int c = 0; c < NCH; c++)
        for (int r = 0; r < 5; r++) begin
          vals[c][r] = (r == 0) ? 8'($urandom_range(0, 3)) : 8'($urandom);
          m.write(8'(c * 32 + r * 4), {24'($urandom), vals[c][r]}, resp, 4'hF, it % 3);
          check(resp == RESP_OKAY, "write OKAY");
        end
      for (int c = 0; c < NCH; c++)
        for (int r = 0; r < 5; r++) begin
          m.read(8'(c * 32 + r * 4), d, resp, it % 2);
          check(d == 32'(vals[c][r]) && resp == RESP_OKAY,
                $sformatf("readback ch%0d reg%0d exp %0h got %0h", c, r, vals[c][r], d));
          check(field(c, r) == vals[c][r], "cfg output");
        end
    end

    // byte lane 0 disabled: no change
    m.write(8'h04, 32'h000000AA, resp, 4'b1110);
    m.read(8'h04, d, resp);
    check(d == 32'(vals[0][1]), "wstrb[0]=0 ignored");

    // read-only registers
    for (int it = 0; it < 8; it++) begin
      for (int c = 0; c < NCH; c++) begin
        count[c] = 24'($urandom); saturated[c] = 1'($urandom);
        gate_num[c] = 16'($urandom); busy[c] = 1'($urandom);
        qe[c] = 1'($urandom); rst_sw[c] = 1'($urandom);
      end
      for (int c = 0; c < NCH; c++) begin
        m.read(8'(c * 32 + 'h14), d, resp);
        check(d == {saturated[c], 7'd0, count[c]}, "COUNT register");
        m.read(8'(c * 32 + 'h18), d, resp);
        check(d == {16'd0, gate_num[c]}, "GATE register");
        m.read(8'(c * 32 + 'h1C), d, resp);
        check(d == {29'd0, rst_sw[c], qe[c], busy[c]}, "STATUS register");
      end
    end
    m.write(8'h14, 32'hFFFFFFFF, resp);
    check(resp == RESP_OKAY, "write to RO answers OKAY");
    for (int r = 0; r < 5; r++) check(field(0, r) == vals[0][r], "RO write changes no config");

    // out-of-range channel
    m.write(8'(NCH * 32 + 4), 32'h5, resp);
    check(resp == RESP_SLVERR, "write beyond last channel SLVERR");
    m.read(8'(NCH * 32 + 4), d, resp);
    check(resp == RESP_SLVERR && d == 0, "read beyond last channel SLVERR");
    for (int c = 0; c < NCH; c++)
      for (int r = 0; r < 5; r++) check(field(c, r) == vals[c][r], "bad address changes nothing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
