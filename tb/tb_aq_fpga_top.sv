// tb_aq_fpga_top: self-checking testbench of the FPGA logic with two
// channels (the two-detector setup) and a short counting gate.
//
// The testbench plays the processor over AXI4-Lite and the detector board
// at the APD_PULSE pins. Each channel gets its own configuration; pulses
// arrive at random times unrelated to the clock. For every pulse the
// testbench measures, in nanoseconds, the time from the pulse to the fall
// of QUENCH_ENABLE and the widths of the gap and of RESET, and checks them
// against the configured cycle counts (the quench stretched to meet the
// deadtime register where that is longer) plus the synchroniser latency
// (10 to 15 ns). The pulse is withdrawn when RESET rises, as the detector
// would. After each burst, which lies inside one counting gate, the
// COUNT register must equal the number of pulses sent. The configuration
// is then changed (including PQAR and PQ modes) and the test repeated.
module tb_aq_fpga_top;
  timeunit 1ns; timeprecision 1ps;
  import aq_pkg::*;

  localparam int unsigned NCH  = 2;
  localparam int unsigned GATE = 2000;  // 10 us gate

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2.5 clk = ~clk;

  axi_lite_master_if #(.AW(8)) m (.clk(clk));

  logic [NCH-1:0] apd_pulse = '0;
  logic [NCH-1:0] quench_enable, reset_out;

  aq_fpga_top #(.NUM_CH(NCH), .ADDR_W(8), .COUNT_W(24), .GATE_CYCLES(GATE)) dut (
    .clk, .rst_n,
    .s_awaddr(m.awaddr), .s_awvalid(m.awvalid), .s_awready(m.awready),
    .s_wdata(m.wdata), .s_wstrb(m.wstrb), .s_wvalid(m.wvalid), .s_wready(m.wready),
    .s_bresp(m.bresp), .s_bvalid(m.bvalid), .s_bready(m.bready),
    .s_araddr(m.araddr), .s_arvalid(m.arvalid), .s_arready(m.arready),
    .s_rdata(m.rdata), .s_rresp(m.rresp), .s_rvalid(m.rvalid), .s_rready(m.rready),
    .apd_pulse, .quench_enable, .reset_out
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
    #2ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  aq_cfg_t cfgs [NCH];
  int      sent [NCH];

  task automatic program_ch(input int c, input aq_cfg_t k);
    logic [1:0] resp;
    m.write(8'(c * 32 + 'h00), 32'(k.mode), resp);
    m.write(8'(c * 32 + 'h04), 32'(k.quench), resp);
    m.write(8'(c * 32 + 'h08), 32'(k.gap), resp);
    m.write(8'(c * 32 + 'h0C), 32'(k.reset), resp);
    m.write(8'(c * 32 + 'h10), 32'(k.deadtime), resp);
    check(resp == RESP_OKAY, "program OKAY");
    cfgs[c] = k;
  endtask

  // One detection on channel c; checks the timing in ns.
  task automatic one_pulse(input int c);
    realtime t0, t_qe, t_rs, t_re;
    real q, g, r;
    aq_cfg_t k;
    k = cfgs[c];
    q = (k.quench == 0) ? 1.0 : real'(k.quench);
    g = real'(k.gap);
    r = (k.reset == 0) ? 1.0 : real'(k.reset);
    if (real'(k.deadtime) - g - r > q) q = real'(k.deadtime) - g - r;  // stretched quench
    #($urandom_range(0, 4999) * 1ps);
    t0 = $realtime;
    apd_pulse[c] = 1'b1;
    sent[c]++;
    if (k.mode == MODE_PQ || k.mode == MODE_OFF) begin
      #200ns;
      check(!reset_out[c] && !quench_enable[c], "PQ mode: no drive");
      apd_pulse[c] = 1'b0;
      #100ns;
      return;
    end
    if (k.mode == MODE_AQ) begin
      check(quench_enable[c], "QE armed in AQ");
      @(negedge quench_enable[c]);
      t_qe = $realtime;
      check(t_qe - t0 >= 10.0 + 5.0 * q && t_qe - t0 <= 15.0 + 5.0 * q,
            $sformatf("ch%0d quench time %0.2f ns for %0d cycles", c, t_qe - t0, k.quench));
    end else begin
      check(!quench_enable[c], "QE low in PQAR");
      t_qe = -1.0;
    end
    @(posedge reset_out[c]);
    t_rs = $realtime;
    apd_pulse[c] = 1'b0;
    check(t_rs - t0 >= 10.0 + 5.0 * (q + g) && t_rs - t0 <= 15.0 + 5.0 * (q + g),
          $sformatf("ch%0d reset start %0.2f ns", c, t_rs - t0));
    if (t_qe > 0.0) check(t_rs - t_qe > 5.0 * g - 0.1 && t_rs - t_qe < 5.0 * g + 0.1, "gap width");
    check(!quench_enable[c], "QE low during RESET");
    @(negedge reset_out[c]);
    t_re = $realtime;
    check(t_re - t_rs > 5.0 * r - 0.1 && t_re - t_rs < 5.0 * r + 0.1,
          $sformatf("ch%0d reset width %0.2f ns", c, t_re - t_rs));
    #1;
    check(quench_enable[c] == (k.mode == MODE_AQ), "re-armed after reset");
    #($urandom_range(5, 40) * 1ns);
  endtask

  task automatic read_reg(input int c, input int off, output logic [31:0] d);
    logic [1:0] resp;
    m.read(8'(c * 32 + off), d, resp);
  endtask

  // Wait for the start of a fresh gate on channel 0 (both share the phase).
  task automatic sync_gate();
    logic [31:0] g0, g1;
    read_reg(0, 'h18, g0);
    g1 = g0;
    while (g1 == g0) read_reg(0, 'h18, g1);
  endtask

  task automatic burst(input int n);
    logic [31:0] d;
    sync_gate();
    for (int c = 0; c < NCH; c++) sent[c] = 0;
    fork
      for (int i = 0; i < n; i++) one_pulse(0);
      for (int i = 0; i < n; i++) one_pulse(1);
    join
    sync_gate();
    for (int c = 0; c < NCH; c++) begin
      read_reg(c, 'h14, d);
      check(d == 32'(sent[c]), $sformatf("ch%0d COUNT exp %0d got %0d", c, sent[c], d));
    end
  endtask

  initial begin
    m.init();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    cfgs[0] = CFG_DEFAULT;
    cfgs[1] = CFG_DEFAULT;
    burst(20);
    program_ch(0, '{mode: MODE_AQ, quench: 8'd5, gap: 8'd2, reset: 8'd3, deadtime: 8'd0});
    program_ch(1, '{mode: MODE_AQ, quench: 8'd2, gap: 8'd1, reset: 8'd2, deadtime: 8'd0});
    burst(20);
    program_ch(0, '{mode: MODE_PQAR, quench: 8'd8, gap: 8'd1, reset: 8'd2, deadtime: 8'd0});
    program_ch(1, '{mode: MODE_PQ, quench: 8'd2, gap: 8'd1, reset: 8'd1, deadtime: 8'd0});
    burst(15);
    program_ch(0, '{mode: MODE_AQ, quench: 8'd20, gap: 8'd4, reset: 8'd10, deadtime: 8'd60});
    program_ch(1, '{mode: MODE_AQ, quench: 8'd1, gap: 8'd1, reset: 8'd1, deadtime: 8'd0});
    burst(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
