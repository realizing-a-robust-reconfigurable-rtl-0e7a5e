// tb_aq_system: end-to-end testbench of the active-quench system.
//
// Two channels (the two-detector setup), each closed through a behavioural
// photodiode/comparator/transistor model, with an 8-bit counter and a 20 us
// counting gate so that every mechanism shows up in a short run. The
// testbench plays the processor over AXI4-Lite and runs these phases:
//   1. high photon rate, channel 0 at the fastest setting (10 ns quench,
//      5 ns gap, 5 ns reset), channel 1 at the chip-scale setting (25 ns,
//      10 ns, 15 ns): measures the deadtime as the shortest spacing of OUT
//      pulses, and overflows channel 0's counter;
//   2. low rate, both active quench: exact counts;
//   3. run-time mode switch: channel 0 to PQAR, channel 1 to PQ;
//   4. channel 0 back to active quench with a 150 ns deadtime setting,
//      which stretches the quench.
// In every gate the COUNT register must equal the avalanches the diode
// model produced (or the saturated value with bit 31 set). Throughout, it
// checks that every avalanche gives one 20 ns OUT pulse, that QUENCH pulses
// once per avalanche in active quench only, that in active
// quench and PQAR each avalanche is ended by exactly one RESET pulse, and
// that P1 and N2 never conduct together. Each mechanism (active quench,
// PQAR, PQ, deadtime stretch, saturation, lost photons during deadtime, mode
// switch, both channels busy in the same gate) is counted and must occur.
module tb_aq_system;
  timeunit 1ns; timeprecision 1ps;
  import aq_pkg::*;

  localparam int unsigned NCH     = 2;
  localparam int unsigned GATE    = 4000;  // 20 us
  localparam int unsigned COUNT_W = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2.5 clk = ~clk;

  axi_lite_master_if #(.AW(8)) m (.clk(clk));

  logic [NCH-1:0] comp_q, comp_qn, quench, reset, out, apd_pulse, armed;
  logic [NCH-1:0] photon = '0;

  aq_system #(.NUM_CH(NCH), .ADDR_W(8), .COUNT_W(COUNT_W), .GATE_CYCLES(GATE)) dut (
    .clk, .rst_n,
    .s_awaddr(m.awaddr), .s_awvalid(m.awvalid), .s_awready(m.awready),
    .s_wdata(m.wdata), .s_wstrb(m.wstrb), .s_wvalid(m.wvalid), .s_wready(m.wready),
    .s_bresp(m.bresp), .s_bvalid(m.bvalid), .s_bready(m.bready),
    .s_araddr(m.araddr), .s_arvalid(m.arvalid), .s_arready(m.arready),
    .s_rdata(m.rdata), .s_rresp(m.rresp), .s_rvalid(m.rvalid), .s_rready(m.rready),
    .comp_q, .comp_qn, .quench, .reset, .out, .apd_pulse
  );

  int fe_aval [NCH];   // avalanches so far, per channel
  int fe_pass [NCH];   // passive recoveries so far
  int fe_shoot [NCH];  // P1/N2 overlaps so far
  for (genvar c = 0; c < NCH; c++) begin : g_fe
    apd_frontend_model u_fe (
      .photon(photon[c]), .quench(quench[c]), .reset(reset[c]),
      .comp_q(comp_q[c]), .comp_qn(comp_qn[c]), .armed(armed[c])
    );
    assign fe_aval[c]  = u_fe.n_avalanche;
    assign fe_pass[c]  = u_fe.n_passive_recover;
    assign fe_shoot[c] = u_fe.n_shoot_through;
  end

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #3ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- photon sources -------------------------------------------------
  bit      src_on   [NCH];
  int      mean_ns  [NCH];
  int      n_photon [NCH];
  int      n_lost   [NCH];   // photons that found the diode not armed
  for (genvar c = 0; c < NCH; c++) begin : g_src
    initial begin
      n_photon[c] = 0; n_lost[c] = 0; src_on[c] = 1'b0; mean_ns[c] = 100;
      forever begin
        #($urandom_range(1000, 2000 * mean_ns[c]) * 1ps);
        if (src_on[c]) begin
          n_photon[c]++;
          if (!armed[c]) n_lost[c]++;
          photon[c] = 1'b1;
          #1ns;
          photon[c] = 1'b0;
        end
      end
    end
  end

  // ---- observers ------------------------------------------------------
  int      n_out [NCH];
  int      n_rst [NCH];
  int      n_qch [NCH];
  realtime last_out [NCH];
  realtime min_gap  [NCH];
  for (genvar c = 0; c < NCH; c++) begin : g_obs
    initial begin
      n_out[c] = 0; last_out[c] = -1.0; min_gap[c] = 1.0e9;
    end
    always @(posedge out[c]) begin
      realtime t;
      t = $realtime;
      n_out[c]++;
      if (last_out[c] >= 0.0 && t - last_out[c] < min_gap[c]) min_gap[c] = t - last_out[c];
      last_out[c] = t;
      @(negedge out[c]);
      check($realtime - t > 19.9 && $realtime - t < 20.1, $sformatf("OUT pulse is 20 ns: %0.2f", $realtime - t));
    end
    initial n_rst[c] = 0;
    initial n_qch[c] = 0;
    always @(posedge reset[c]) n_rst[c]++;
    always @(posedge quench[c]) begin
      n_qch[c]++;
      check(comp_q[c], "QUENCH rises only on an avalanche");
    end
  end

  // ---- processor ------------------------------------------------------
  task automatic program_ch(input int c, input aq_cfg_t k);
    logic [1:0] resp;
    m.write(8'(c * 32 + 'h00), 32'(k.mode), resp);
    m.write(8'(c * 32 + 'h04), 32'(k.quench), resp);
    m.write(8'(c * 32 + 'h08), 32'(k.gap), resp);
    m.write(8'(c * 32 + 'h0C), 32'(k.reset), resp);
    m.write(8'(c * 32 + 'h10), 32'(k.deadtime), resp);
    check(resp == RESP_OKAY, "program OKAY");
  endtask

  task automatic read_reg(input int c, input int off, output logic [31:0] d);
    logic [1:0] resp;
    m.read(8'(c * 32 + off), d, resp);
  endtask

  task automatic sync_gate();
    logic [31:0] g0, g1;
    read_reg(0, 'h18, g0);
    g1 = g0;
    while (g1 == g0) read_reg(0, 'h18, g1);
  endtask

  // mechanism counters
  int mech_aq = 0, mech_pqar = 0, mech_pq = 0, mech_stretch = 0;
  int mech_sat = 0, mech_lost = 0, mech_switch = 0, mech_both = 0;

  // Run one gate with the sources at the given rates; check the counts.
  task automatic run_gate(input int mean0, input int mean1, input aq_mode_e m0,
                          input aq_mode_e m1, output int aval [NCH]);
    int a0 [NCH], o0 [NCH], r0 [NCH], p0 [NCH], q0 [NCH];
    logic [31:0] d;
    sync_gate();
    for (int c = 0; c < NCH; c++) begin
      a0[c] = fe_aval[c];
      o0[c] = n_out[c];
      r0[c] = n_rst[c];
      q0[c] = n_qch[c];
      p0[c] = fe_pass[c];
    end
    mean_ns[0] = mean0; mean_ns[1] = mean1;
    src_on[0] = 1'b1; src_on[1] = 1'b1;
    #15us;
    src_on[0] = 1'b0; src_on[1] = 1'b0;
    sync_gate();
    for (int c = 0; c < NCH; c++) begin
      int a, o, r, p, qn;
      aq_mode_e md;
      md = (c == 0) ? m0 : m1;
      a = fe_aval[c] - a0[c];
      o = n_out[c] - o0[c];
      r = n_rst[c] - r0[c];
      p = fe_pass[c] - p0[c];
      qn = n_qch[c] - q0[c];
      check(qn == ((md == MODE_AQ) ? a : 0), $sformatf("ch%0d QUENCH pulses %0d for %0d avalanches", c, qn, a));
      aval[c] = a;
      read_reg(c, 'h14, d);
      if (a > (1 << COUNT_W) - 1) begin
        check(d == {1'b1, 31'((1 << COUNT_W) - 1)}, $sformatf("ch%0d saturated COUNT %0h", c, d));
        mech_sat++;
      end else begin
        check(d == 32'(a), $sformatf("ch%0d COUNT exp %0d got %0d", c, a, d));
      end
      check(o == a, $sformatf("ch%0d one OUT per avalanche %0d/%0d", c, o, a));
      if (md == MODE_AQ || md == MODE_PQAR) begin
        check(r == a, $sformatf("ch%0d one RESET per avalanche %0d/%0d", c, r, a));
        check(p == 0, "no passive recovery with active reset");
        if (md == MODE_AQ) mech_aq += a; else mech_pqar += a;
      end else begin
        check(r == 0, "no RESET in PQ");
        check(p == a, "every PQ avalanche recovers passively");
        mech_pq += p;
      end
      check(a > 0, "avalanches in gate");
    end
    if (aval[0] > 0 && aval[1] > 0) mech_both++;
  endtask

  int av [NCH];
  initial begin
    m.init();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;

    // 1: fastest and chip-scale settings at a high rate
    program_ch(0, '{mode: MODE_AQ, quench: 8'd2, gap: 8'd1, reset: 8'd1, deadtime: 8'd0});
    program_ch(1, '{mode: MODE_AQ, quench: 8'd5, gap: 8'd2, reset: 8'd3, deadtime: 8'd0});
    min_gap[0] = 1.0e9; min_gap[1] = 1.0e9;
    run_gate(20, 20, MODE_AQ, MODE_AQ, av);
    $display("deadtime: fastest setting %0.1f ns, chip-scale setting %0.1f ns",
             min_gap[0], min_gap[1]);
    check(min_gap[0] >= 30.0 && min_gap[0] <= 45.0, "fastest deadtime near 35 ns");
    check(min_gap[1] >= 60.0 && min_gap[1] <= 75.0, "chip-scale deadtime near 65 ns");

    // 2: low rate, exact counts
    run_gate(200, 300, MODE_AQ, MODE_AQ, av);

    // 3: switch modes at run time
    program_ch(0, '{mode: MODE_PQAR, quench: 8'd8, gap: 8'd1, reset: 8'd2, deadtime: 8'd0});
    program_ch(1, '{mode: MODE_PQ, quench: 8'd2, gap: 8'd1, reset: 8'd1, deadtime: 8'd0});
    mech_switch++;
    run_gate(200, 600, MODE_PQAR, MODE_PQ, av);

    // 4: deadtime setting of 150 ns
    program_ch(0, '{mode: MODE_AQ, quench: 8'd2, gap: 8'd1, reset: 8'd1, deadtime: 8'd30});
    program_ch(1, '{mode: MODE_AQ, quench: 8'd2, gap: 8'd1, reset: 8'd1, deadtime: 8'd0});
    mech_switch++;
    min_gap[0] = 1.0e9;
    run_gate(40, 200, MODE_AQ, MODE_AQ, av);
    $display("deadtime with 150 ns deadtime setting: %0.1f ns", min_gap[0]);
    check(min_gap[0] >= 150.0 && min_gap[0] <= 175.0, "deadtime register sets the deadtime");
    if (min_gap[0] >= 150.0) mech_stretch++;

    for (int c = 0; c < NCH; c++) begin
      check(fe_shoot[c] == 0, $sformatf("ch%0d no P1/N2 overlap", c));
      mech_lost += n_lost[c];
    end
    $display("mechanisms: aq=%0d pqar=%0d pq=%0d stretch=%0d saturate=%0d lost=%0d switch=%0d both=%0d",
             mech_aq, mech_pqar, mech_pq, mech_stretch, mech_sat, mech_lost, mech_switch, mech_both);
    check(mech_aq > 0, "active quench happened");
    check(mech_pqar > 0, "PQAR happened");
    check(mech_pq > 0, "PQ happened");
    check(mech_stretch > 0, "deadtime stretch happened");
    check(mech_sat > 0, "counter saturation happened");
    check(mech_lost > 0, "photons lost in deadtime happened");
    check(mech_switch > 0, "mode switch happened");
    check(mech_both > 0, "both channels active together");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
