// apd_frontend_model: behavioural model of the analog part of one detector
// channel: the Geiger-mode photodiode, the sense/ballast resistors, the
// comparator and the three switching transistors. Testbench use only.
//
// An avalanche starts on a rising edge of `photon` if the diode is armed
// (above breakdown, not being reset and not held at V_QUENCH by P1). The
// comparator then raises Q (and lowers Q-bar) after T_COMP. QUENCH turns the
// quench transistors (N1 then P1) on after T_SW_ON and off after T_SW_OFF;
// RESET turns the reset transistor N2 on or off after T_RST. While P1 is on
// the anode sits at the quench voltage. When N2 comes on, the anode is pulled
// to ground, the diode is armed again and Q falls after T_COMP. Without any
// reset the diode recharges through the ballast resistor T_PASSIVE after the
// avalanche or after P1 turns off, whichever is later (passive recovery): Q
// falls then, but the slow recharge through the ballast leaves the diode
// unable to fire for a further T_TAIL.
// The model counts avalanches, active resets, passive recoveries and any
// moment at which P1 and N2 conduct together (shoot-through).
// Delays: T_COMP + AND gate + T_SW_ON is the paper's ~9 ns quench response
// (3 + 1 + 5 ns); the split, T_SW_OFF, T_RST and T_PASSIVE are assumed.
module apd_frontend_model #(
  parameter realtime T_COMP    = 3.0ns,
  parameter realtime T_SW_ON   = 5.0ns,
  parameter realtime T_SW_OFF  = 3.0ns,
  parameter realtime T_RST     = 2.0ns,
  parameter realtime T_PASSIVE = 300.0ns,
  parameter realtime T_TAIL    = 20.0ns
) (
  input  logic photon,
  input  logic quench,   // QUENCH, gate of N1
  input  logic reset,    // RESET, gate of N2
  output logic comp_q,
  output logic comp_qn,
  output logic armed
);
  timeunit 1ns; timeprecision 1ps;

  logic p1_on, n2_on, aval, tail;
  int   n_avalanche, n_active_reset, n_passive_recover, n_shoot_through;
  int   gen;

  initial begin
    p1_on = 1'b0; n2_on = 1'b0; aval = 1'b0; tail = 1'b0; comp_q = 1'b0;
    n_avalanche = 0; n_active_reset = 0; n_passive_recover = 0;
    n_shoot_through = 0; gen = 0;
  end

  assign comp_qn = ~comp_q;
  assign armed   = !aval && !n2_on && !p1_on && !tail;

  always @(quench) begin
    if (quench) p1_on <= #(T_SW_ON) 1'b1;
    else        p1_on <= #(T_SW_OFF) 1'b0;
  end

  always @(reset) n2_on <= #(T_RST) reset;

  always @(posedge p1_on) if (n2_on) n_shoot_through++;
  always @(posedge n2_on) begin
    if (p1_on) n_shoot_through++;
    if (aval) begin
      aval = 1'b0;
      n_active_reset++;
      gen++;
      comp_q <= #(T_COMP) 1'b0;
    end
  end

  always @(posedge photon) begin
    if (armed) begin
      aval = 1'b1;
      n_avalanche++;
      comp_q <= #(T_COMP) 1'b1;
      start_passive();
    end
  end

  always @(negedge p1_on) if (aval) start_passive();
  always @(posedge p1_on) gen++;

  // Passive recovery timer; a newer event (P1 on, reset, another start)
  // cancels an older timer through the generation number.
  task automatic start_passive();
    int my_gen;
    gen++;
    my_gen = gen;
    fork
      begin
        #(T_PASSIVE);
        if (my_gen == gen && aval && !p1_on) begin
          aval = 1'b0;
          tail = 1'b1;
          n_passive_recover++;
          comp_q <= #(T_COMP) 1'b0;
          #(T_TAIL);
          tail = 1'b0;
        end
      end
    join_none
  endtask
endmodule
