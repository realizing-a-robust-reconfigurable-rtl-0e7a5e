// pulse_counter: avalanche counter with a fixed gate, one per channel.
//
// Every rising edge of the synchronised APD_PULSE (one per avalanche, in
// every operating mode) increments a COUNT_W-bit counter. A free-running
// gate timer ends a gate every GATE_CYCLES clock cycles (one second at
// 200 MHz by default); at that edge the counter value, including an edge
// arriving in the same cycle, is copied to count_out, the gate number is
// incremented, gate_done pulses for one cycle, and counting restarts from
// zero. count_out therefore always holds the avalanches of the last complete
// gate, i.e. counts per second, and stays stable for software to read.
// If more than 2^COUNT_W - 1 edges arrive in one gate the counter stops at
// its maximum and the saturated flag is reported with that gate's result.
//
// Follows the paper: a 24-bit counter of APD_PULSE recording the avalanches
// per second. This design's own choices: the free-running gate, latching of
// the result, saturation instead of wrap-around, and the 16-bit gate number.
module pulse_counter #(
  parameter int unsigned COUNT_W     = 24,
  parameter int unsigned GATE_CYCLES = 200_000_000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pulse_rise,  // one-cycle pulse per avalanche
  output logic [COUNT_W-1:0] count_out,   // count of the last complete gate
  output logic               saturated,   // last gate exceeded the counter
  output logic [15:0]        gate_num,    // gates completed since reset
  output logic               gate_done    // one cycle at the end of a gate
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned GW = (GATE_CYCLES > 1) ? $clog2(GATE_CYCLES) : 1;

  logic [GW-1:0]      gate_q;
  logic [COUNT_W-1:0] acc_q, acc_inc;
  logic               sat_q, sat_inc;
  logic               gate_end;

  assign gate_end = (gate_q == GW'(GATE_CYCLES - 1));

  always_comb begin
    acc_inc = acc_q;
    sat_inc = sat_q;
    if (pulse_rise) begin
      if (acc_q == '1) sat_inc = 1'b1;
      else             acc_inc = acc_q + COUNT_W'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gate_q    <= '0;
      acc_q     <= '0;
      sat_q     <= 1'b0;
      count_out <= '0;
      saturated <= 1'b0;
      gate_num  <= '0;
      gate_done <= 1'b0;
    end else begin
      gate_done <= gate_end;
      if (gate_end) begin
        gate_q    <= '0;
        count_out <= acc_inc;
        saturated <= sat_inc;
        gate_num  <= gate_num + 16'd1;
        acc_q     <= '0;
        sat_q     <= 1'b0;
      end else begin
        gate_q    <= gate_q + GW'(1);
        acc_q     <= acc_inc;
        sat_q     <= sat_inc;
      end
    end
  end
endmodule
