// tb_aq_system_full: one complete measurement on the system at its default
// size: one channel, 24-bit counter, one-second counting gate at 200 MHz.
//
// The processor (played over AXI4-Lite) programs the fastest active-quench
// setting (10 ns quench, 5 ns gap, 10 ns reset), photons arrive at about
// 2 Mcps for the first 2 ms of the first gate, and after the gate closes
// (1 s of simulated time) the COUNT register must equal the number of
// avalanches the detector model produced, the GATE register must read 1,
// every avalanche must have produced one RESET and one OUT pulse, and the
// quench and reset transistors must never have conducted together.
module tb_aq_system_full;
  timeunit 1ns; timeprecision 1ps;
  import aq_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2.5 clk = ~clk;

  axi_lite_master_if #(.AW(8)) m (.clk(clk));

  logic [0:0] comp_q, comp_qn, quench, reset, out, apd_pulse;
  logic       armed;
  logic       photon = 1'b0;

  aq_system dut (
    .clk, .rst_n,
    .s_awaddr(m.awaddr), .s_awvalid(m.awvalid), .s_awready(m.awready),
    .s_wdata(m.wdata), .s_wstrb(m.wstrb), .s_wvalid(m.wvalid), .s_wready(m.wready),
    .s_bresp(m.bresp), .s_bvalid(m.bvalid), .s_bready(m.bready),
    .s_araddr(m.araddr), .s_arvalid(m.arvalid), .s_arready(m.arready),
    .s_rdata(m.rdata), .s_rresp(m.rresp), .s_rvalid(m.rvalid), .s_rready(m.rready),
    .comp_q, .comp_qn, .quench, .reset, .out, .apd_pulse
  );

  apd_frontend_model u_fe (
    .photon(photon), .quench(quench[0]), .reset(reset[0]),
    .comp_q(comp_q[0]), .comp_qn(comp_qn[0]), .armed(armed)
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
    #1200ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_out = 0, n_rst = 0;
  always @(posedge out[0]) n_out++;
  always @(posedge reset[0]) n_rst++;

  initial begin
    logic [31:0] d;
    logic [1:0]  resp;
    int          n_photon;
    m.init();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    m.write(8'h00, 32'(MODE_AQ), resp);
    m.write(8'h04, 32'd2, resp);
    m.write(8'h08, 32'd1, resp);
    m.write(8'h0C, 32'd2, resp);
    m.write(8'h10, 32'd0, resp);
    check(resp == RESP_OKAY, "configuration written");
    n_photon = 0;
    while ($realtime < 2ms) begin
      #($urandom_range(1, 1000) * 1ns);
      photon = 1'b1;
      #1ns;
      photon = 1'b0;
      n_photon++;
    end
    // wait for the first one-second gate to close
    d = 0;
    while (d == 0) begin
      #1ms;
      m.read(8'h18, d, resp);
    end
    check(d == 32'd1, "one gate completed");
    m.read(8'h14, d, resp);
    $display("photons %0d, avalanches %0d, COUNT %0d", n_photon, u_fe.n_avalanche, d);
    check(d == 32'(u_fe.n_avalanche), "COUNT equals avalanches in the gate");
    check(u_fe.n_avalanche > 1000, "enough avalanches");
    check(n_out == u_fe.n_avalanche, "one OUT per avalanche");
    check(n_rst == u_fe.n_avalanche, "one RESET per avalanche");
    check(u_fe.n_shoot_through == 0, "no P1/N2 overlap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
