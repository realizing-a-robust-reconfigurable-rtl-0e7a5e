# Reconfigurable active quenching for Geiger-mode avalanche photodiodes

A Geiger-mode avalanche photodiode (APD) biased above breakdown turns one
photon into a self-sustaining avalanche. The circuit around it must then
**quench** the avalanche by pulling the bias below breakdown, and **reset**
the diode by restoring the bias so it can detect the next photon. The time
from the avalanche to the end of the reset is the **deadtime**. Short
deadtimes give high count rates. Deadtimes that are too short raise the
after-pulsing probability: trapped carriers set off false avalanches.

In this design the part of the quench loop that must be fast is a few
discrete parts next to the diode. The timing is set by programmable logic
on an FPGA, which also counts avalanches. A processor on the same SoC
programs the logic through memory-mapped registers, so the quench time,
reset time and deadtime can be changed at run time to suit a different
detector or temperature. This RTL covers:

- the FPGA logic: the quench/reset sequencer, the avalanche counter and the
  register bank;
- timed behavioural models of the discrete logic parts on the detector
  board: the AND gate, the inverting buffers and the flip-flop that trims
  the output pulses;
- testbenches that close the loop through a behavioural model of the diode,
  the comparator and the switching transistors.

## The quench loop

```
            V_BIAS                      V_QUENCH
              |                            |
           GM-APD                    P1 (via N1) ----+
              |  anode                               |
              +------------------+-------------------+
              |                  |
             R_B               N2 (reset, to ground)
              |
      +-------+-------- comparator (+)      V_REF (-)
      |                     |  Q ----------------------------> AND --> QUENCH --> N1/P1
     R_S                    |                 QUENCH_ENABLE -> AND
      |                     |  Q-bar -> inverter -> APD_PULSE -> FPGA
     GND                    |  Q-bar -> inverter -> D-FF (R4/C1 clear) -> OUT (20 ns)
                                                      FPGA RESET ---------> N2
```

When an avalanche starts, the anode voltage rises over the sense resistor
R_S and the comparator raises Q. Q goes straight to an AND gate whose other
input, QUENCH_ENABLE, is held high by the FPGA while the detector is armed.
The AND output turns on N1 and then P1, which pull the anode up to
V_QUENCH and take the diode below breakdown. This path does not pass
through the FPGA. It takes about 9 ns in the published measurements.

The FPGA sees the avalanche as APD_PULSE, an inverted copy of Q-bar, and
times the rest of the cycle:

1. **Quench.** QUENCH_ENABLE stays high for the programmed quench time.
2. **Gap.** QUENCH_ENABLE goes low, and both P1 and N2 are off for the
   programmed gap. This keeps P1 and N2 from conducting at the same time.
3. **Reset.** RESET is high for the programmed reset time. N2 pulls the
   anode to ground, the diode is above breakdown again, and the comparator
   drops Q.
4. **Re-arm.** RESET goes low and QUENCH_ENABLE goes high again.

All durations count cycles of the 200 MHz clock, so they move in 5 ns
steps. With a 10 ns quench, a 5 ns gap and a 5 ns reset, the closed loop in
`tb_aq_system` shows a deadtime of 36.4 ns. The published circuit
measured 35 ns.

## The sequencer (`quench_reset_gen`)

The sequencer has four states: ARMED, QUENCH, GAP and RESET. Edge 0 is the
clock edge that first samples the synchronised pulse high. Writing
Q = max(quench,1), G = gap, R = max(reset,1) and D = deadtime (all in
cycles), the outputs are:

| signal        | edges (after edge 0)             |
|---------------|----------------------------------|
| QUENCH_ENABLE | low for Qe <= k < Qe+G+R (AQ)    |
| RESET         | high for Qe+G <= k < Qe+G+R      |
| busy          | high for k < Qe+G+R              |

where **Qe = max(Q, D − G − R)**.

The deadtime register is a lower bound on the time from detection to the
end of the reset. It works by making the quench longer, because the
deadtime is changed by changing only the quench time. A pause after the
reset would not work: the diode would already be above breakdown but
unwatched. With D = 0 (the reset value), the quench time alone applies.

Outputs are registered, so they cannot glitch. The configuration is copied
at edge 0 and kept for the whole cycle, so software may rewrite it at any
time. A change takes effect at the next detection.

**Trigger rule.** A cycle starts when the synchronised APD_PULSE is high
*and* has been low at least once since the previous detection. The rule
exists for two reasons:

- APD_PULSE reaches the sequencer through a two-flip-flop synchroniser. It
  also falls only after the reset has pulled the anode down and the
  comparator has switched. With a 5 ns reset, the old pulse is often still
  high at re-arm. A plain level trigger would then start a false second
  cycle.
- A plain edge trigger would miss a pulse that fell and rose again while a
  cycle was running.

If the reset fails and APD_PULSE never falls, no new cycle starts.

**Modes** (register MODE):

| code | mode | behaviour |
|------|------|-----------|
| 0 | AQ, active quench | the full cycle above |
| 1 | PQAR, passive quench with active reset | QUENCH_ENABLE always low, so the ballast resistor R_B quenches; RESET still follows after the quench time plus the gap |
| 2 | PQ, passive quench | QUENCH_ENABLE and RESET always low; the diode quenches and recovers through R_B |
| 3 | off | same as PQ |

In every mode the avalanches are still counted.

## Counting (`pulse_counter`)

Every rising edge of the synchronised APD_PULSE adds one to a 24-bit
counter. A free-running gate of 200,000,000 cycles (one second) copies the
count to the COUNT register and starts again from zero, so COUNT is always
the number of avalanches per second. The GATE register counts the gates,
so software can tell when a new result is ready. A gate with more than
2^24 − 1 avalanches stops at that value and sets bit 31 of COUNT. The
counter does not wrap.

A 24-bit per-second counter holds up to 16.7 million counts. That is
enough for the dark and background rates reported for these detectors
(tens of kcps to about 2 Mcps). It is less than the 28 Mcps that a 35 ns
deadtime allows in principle, so a detector saturated with light shows
up as a saturated count.

## Register map (`aq_axi_regs`)

The processor reaches the logic over AXI4-Lite. Each channel has a 32-byte
window at `channel × 0x20`. Durations are in 5 ns cycles.

| offset | name     | access | bits |
|--------|----------|--------|------|
| 0x00   | MODE     | RW | [1:0] mode, reset 0 (AQ) |
| 0x04   | QUENCH   | RW | [7:0], reset 2 (10 ns) |
| 0x08   | GAP      | RW | [7:0], reset 1 (5 ns) |
| 0x0C   | RESET    | RW | [7:0], reset 1 (5 ns) |
| 0x10   | DEADTIME | RW | [7:0], reset 0 (no stretch) |
| 0x14   | COUNT    | RO | [23:0] avalanches in the last gate, [31] saturated |
| 0x18   | GATE     | RO | [15:0] gates completed |
| 0x1C   | STATUS   | RO | [0] busy, [1] QUENCH_ENABLE, [2] RESET |

The 8-bit fields cover 5 ns to 1275 ns. This includes the published ranges:

- quench time: 10 to 1000 ns;
- reset time: 5 to 1000 ns;
- deadtime: 35 to 1000 ns.

The published minimum quench of 10 ns is a limit of the loop's delays, not
of the register.

Only byte lane 0 is written. Writes to read-only registers are ignored. An
address beyond the last channel answers SLVERR.

Handshake: one write and one read may be outstanding at a time. AWREADY and
WREADY rise together in the cycle in which both AWVALID and WVALID are high
and no write response is pending. BVALID and RVALID follow one cycle after
their request is accepted. Assertions in the module check that BVALID and
RVALID, with their data, hold until they are accepted.

The bank runs on the 200 MHz quench clock. A design with a separate
processor bus clock would need a clock-domain crossing here.

## Several detectors

`NUM_CH` copies the synchroniser, sequencer and counter for each detector
and gives each copy its own register window. The default of 1 is the
single-detector system. With `NUM_CH = 2`, one processor runs a commercial
APD and a chip-scale APD side by side, each with its own settings. The
chip-scale setting (25 ns quench, 10 ns gap, 15 ns reset) gives a 67 ns
deadtime in `tb_aq_system`. The published figure is about 65 ns.

## Board logic models

These are timed behavioural models. They are not FPGA logic.

- `quench_and_gate`: QUENCH = Q AND QUENCH_ENABLE, after 1 ns.
- `inverting_buffer`: y = NOT a, after 1 ns. The board has one buffer for
  APD_PULSE and one for the trimmer clock.
- `out_pulse_trimmer`: a D flip-flop with D tied high, clocked by the
  buffered Q-bar. Its inverted output discharges an RC network (R4, C1)
  into its own clear. The result is a 20 ns OUT pulse for every avalanche,
  2 ns after the clock edge. Edges that arrive during the pulse, or during
  5 ns of recovery after it, are ignored.

Only the total delays are published: about 9 ns from avalanche to quench,
and about 6 ns from avalanche to OUT. The split used here is chosen to
match them: 3 ns comparator + 1 ns gate + 5 ns transistors, and
3 ns + 1 ns + 2 ns.

## Top levels

- `aq_fpga_top`: the synthesizable FPGA logic. Its ports are the AXI4-Lite
  slave, APD_PULSE in, and QUENCH_ENABLE and RESET out, one bit per
  channel.
- `aq_system`: `aq_fpga_top` plus the board logic models. The analog parts
  connect at its ports:
  - `comp_q` and `comp_qn` come from the comparator;
  - `quench` and `reset` drive the transistor gates;
  - `out` is the trimmed pulse;
  - `apd_pulse` is exposed for observation.

  Because it contains the timed models, `aq_system` is a simulation top,
  not a synthesis top.

## What is not here

The photodiode, the comparator, the MOSFET switches, the resistors and the
high-voltage bias and quench supplies are analog and are not modelled in
`rtl/`. `tb/apd_frontend_model.sv` stands in for them in the testbenches.
It models the avalanche, the comparator delay, the switch delays, passive
recovery through the ballast resistor after 300 ns, and a count of any
moment at which P1 and N2 conduct together. The processor software and its
link to a PC are not part of the RTL; the testbenches act as the AXI
master.

## Where this RTL goes beyond the published description

- **Deadtime register.** It stretches the quench, as described above. The
  published description lists the deadtime as a parameter but gives no
  mechanism, other than varying it through the quench time.
- **Trigger rule and synchroniser.** Both are this design's own.
- **Choices not given in the published description:**
  - the 8-bit timer width;
  - the mode encoding;
  - the register map and the AXI4-Lite profile;
  - the single clock domain;
  - synchronous active-low reset, with the power-on values in the register
    table;
  - the free-running one-second gate with latched results and saturation.
- **PQAR timing.** The time before the reset is the QUENCH register plus
  the GAP register.
- **Minimum quench.** The published circuit ends the shortest quench about
  10 ns after the comparator fires; that is its own APD_PULSE-to-
  QUENCH_ENABLE delay. Here the synchroniser and the registered output
  add 10 to 15 ns to the programmed quench time. QUENCH_ENABLE therefore
  falls 15 to 20 ns after APD_PULSE even at QUENCH = 1. The closed-loop
  deadtime still comes out near the published 35 ns, because the model's
  reset path is short.
- **Reset length.** The reset ends when its timer expires. The sequencer
  does not wait for the comparator to fall. An unsynchronised path from Q
  could shorten the loop further, but it was not built here.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops, and it has a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_aq_system \
    rtl/aq_pkg.sv rtl/aq_system.sv tb/axi_lite_master_if.sv \
    tb/apd_frontend_model.sv tb/tb_aq_system.sv
./obj_dir/Vtb_aq_system
```

`-Irtl -Itb` lets Verilator find the other modules by file name. For the
other testbenches, change the top module and file names. List
`rtl/aq_pkg.sv` first whenever the unit imports it.

| testbench | what it checks |
|-----------|----------------|
| `tb_quench_reset_gen` | every output after every edge against the schedule above. Covers all modes, zero gap and zero durations, deadtime stretch, maximum durations, a mid-cycle rewrite, a stale pulse (no retrigger) and a pulse that falls and rises again during a cycle |
| `tb_pulse_counter` | exact counts per gate, including pulses on the gate's last cycle; saturation; gate period; gate number |
| `tb_aq_axi_regs` | read-back of every register, read-only registers, byte strobe, SLVERR, and BREADY/RREADY stalls, with two channels |
| `tb_aq_fpga_top` | two channels with pulses at random times. Checks the quench, gap and reset times in ns, the COUNT register per gate, PQAR and PQ |
| `tb_quench_and_gate`, `tb_inverting_buffer`, `tb_out_pulse_trimmer` | function and delays of the board models |
| `tb_aq_system` | closed loop with two channels, an 8-bit counter and a 20 µs gate. Measures the deadtime at the fastest and chip-scale settings and with the deadtime register. Runs a mode switch and counter overflow. Checks one OUT and one RESET per avalanche, one QUENCH per avalanche in active quench and none in the passive modes, no P1/N2 overlap, and that each mechanism occurred |
| `tb_aq_system_full` | the default-size system: one channel, 24-bit counter, one-second gate. Runs 2 ms of photons and checks the count after the gate closes. About 3 minutes of simulation |

Everything that takes effect in time — deadtime, rates, gate length — scales
with the 200 MHz clock assumed in `aq_pkg::CLK_HZ` and with `GATE_CYCLES`.
If you run the logic at another clock frequency, change `GATE_CYCLES` to
keep a one-second gate, and read the durations as multiples of the new
clock period.
