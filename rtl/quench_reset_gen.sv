// quench_reset_gen: per-channel quench/reset sequencer of the active-quench
// controller.
//
// Function. While the detector is armed, QUENCH_ENABLE is held high so that
// the discrete AND gate can start quenching the avalanche on its own, without
// waiting for the FPGA. When the synchronised APD_PULSE is seen high, the
// sequencer starts a detection cycle, provided the pulse has been seen low
// at least once since the previous detection began:
//   QUENCH : QUENCH_ENABLE stays high for cfg.quench cycles, or longer if
//            cfg.deadtime asks for it (see below),
//   GAP    : QUENCH_ENABLE low, RESET low for cfg.gap cycles, so that the
//            quench transistors are off before the reset transistor turns on,
//   RESET  : RESET high for cfg.reset cycles,
// and then it re-arms (QUENCH_ENABLE high again). In PQAR mode the same
// sequence runs with QUENCH_ENABLE held low throughout, so the avalanche is
// quenched passively by the ballast resistor and only the reset is active.
// In PQ mode (and the unused encoding MODE_OFF) both outputs stay low and no
// cycle is started.
//
// The deadtime register sets the minimum time from detection to the end of
// the reset. When it is longer than quench + gap + reset, the quench phase
// is stretched to make up the difference: Qe = max(Q, D - G - R). The
// detector stays below breakdown for the whole deadtime that way; a pause
// after the reset would leave it armed but unwatched.
//
// Timing. All durations are in 200 MHz clock cycles (5 ns steps). Counting
// from the clock edge that samples apd_pulse high (edge 0), QUENCH_ENABLE
// falls at edge Qe, RESET rises at edge Qe+G and falls at edge Qe+G+R, and
// QUENCH_ENABLE rises again at that same edge, where Q = max(quench,1),
// G = gap, R = max(reset,1), D = deadtime and Qe = max(Q, D-G-R). Outputs are registered, so they
// cannot glitch; RESET and QUENCH_ENABLE are never high together unless
// gap = 0. The configuration is sampled at edge 0 and held for the whole
// cycle, so software may rewrite it at any time.
//
// Follows the paper: the phase order and the meaning of quench time, gap
// ("delay between quench and reset"), reset time, the three modes and the
// 5 ns step. This design's own choices: the trigger rule, zero quench/reset
// read as one cycle, and the deadtime register implemented by stretching the
// quench (the paper varies the deadtime by changing only the quench time). The trigger rule ("high, and seen low since the
// last detection") matters because APD_PULSE reaches the sequencer through
// a two-flip-flop synchroniser and the detector board's own delays: with a
// 5 ns reset the synchronised pulse of the old avalanche is often still high
// when the sequencer re-arms, and a plain level trigger would start a false
// second cycle. A plain edge trigger would instead miss an avalanche that
// begins during a deadtime hold-off and leave the detector quenched; with
// this rule an avalanche that the sequencer could not see yet (its pulse
// fell and rose again while the cycle ran) starts a cycle at re-arm. If APD_PULSE never falls (the reset failed to restore the
// detector), no new cycle starts.
module quench_reset_gen
  import aq_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    apd_pulse,      // synchronised APD_PULSE level
  input  aq_cfg_t cfg,            // live configuration from the registers
  output logic    quench_enable,  // QUENCH_ENABLE to the AND gate
  output logic    reset_out,      // RESET to the reset transistor
  output logic    busy,           // a detection cycle is in progress
  output logic    trigger         // one cycle, first cycle of a detection
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned TW = TIMER_W;  // duration width, from the package

  typedef enum logic [2:0] {
    S_ARMED  = 3'd0,
    S_QUENCH = 3'd1,
    S_GAP    = 3'd2,
    S_RESET  = 3'd3
  } state_e;

  localparam int unsigned EW = TW + 2;  // room for deadtime - gap - reset

  state_e          state_q, state_d;
  aq_cfg_t         cur_q, cur_d;        // configuration of the running cycle
  logic [TW-1:0]   timer_q, timer_d;
  logic [EW-1:0]   stretch;             // deadtime - gap - reset, signed
  logic            qe_d, rst_d, trig_d;
  logic            low_seen_q;          // pulse was low since last trigger
  aq_mode_e        mode_d;

  function automatic logic [TW-1:0] at_least_one(input logic [TW-1:0] n);
    return (n == '0) ? TW'(0) : n - TW'(1);
  endfunction

  // Quench length needed to meet the deadtime: D - G - max(R,1), as a
  // signed EW-bit value (negative or small means no stretching).
  assign stretch = EW'(cfg.deadtime) - EW'(cfg.gap)
                 - ((cfg.reset == '0) ? EW'(1) : EW'(cfg.reset));

  always_comb begin
    state_d   = state_q;
    cur_d     = cur_q;
    timer_d   = timer_q;
    trig_d    = 1'b0;

    unique case (state_q)
      S_ARMED: begin
        if (apd_pulse && low_seen_q && (cfg.mode == MODE_AQ || cfg.mode == MODE_PQAR)) begin
          state_d   = S_QUENCH;
          cur_d     = cfg;
          timer_d   = at_least_one(cfg.quench);
          if (!stretch[EW-1] && stretch > EW'(cfg.quench) && stretch > EW'(1))
            timer_d = TW'(stretch - EW'(1));
          trig_d    = 1'b1;
        end
      end
      S_QUENCH: begin
        if (timer_q == '0) begin
          if (cur_q.gap == '0) begin
            state_d = S_RESET;
            timer_d = at_least_one(cur_q.reset);
          end else begin
            state_d = S_GAP;
            timer_d = cur_q.gap - TW'(1);
          end
        end else begin
          timer_d = timer_q - TW'(1);
        end
      end
      S_GAP: begin
        if (timer_q == '0) begin
          state_d = S_RESET;
          timer_d = at_least_one(cur_q.reset);
        end else begin
          timer_d = timer_q - TW'(1);
        end
      end
      S_RESET: begin
        if (timer_q == '0) begin
          state_d = S_ARMED;
        end else begin
          timer_d = timer_q - TW'(1);
        end
      end
      default: state_d = S_ARMED;
    endcase

    // Registered outputs follow the next state.
    mode_d = (state_q == S_ARMED) ? cfg.mode : cur_q.mode;
    unique case (state_d)
      S_ARMED:  qe_d = (cfg.mode == MODE_AQ);
      S_QUENCH: qe_d = (mode_d == MODE_AQ);
      default:  qe_d = 1'b0;
    endcase
    rst_d = (state_d == S_RESET);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q       <= S_ARMED;
      cur_q         <= CFG_DEFAULT;
      timer_q       <= '0;
      quench_enable <= 1'b0;
      reset_out     <= 1'b0;
      trigger       <= 1'b0;
      low_seen_q    <= 1'b1;
    end else begin
      if (trig_d)          low_seen_q <= 1'b0;
      else if (!apd_pulse) low_seen_q <= 1'b1;
      state_q       <= state_d;
      cur_q         <= cur_d;
      timer_q       <= timer_d;
      quench_enable <= qe_d;
      reset_out     <= rst_d;
      trigger       <= trig_d;
    end
  end

  assign busy = (state_q != S_ARMED);

  // The reset transistor and the quench transistors must not conduct together
  // when a gap is configured.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    (reset_out && cur_q.gap != '0) |-> !quench_enable);
endmodule
