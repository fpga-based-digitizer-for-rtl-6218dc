# A BGO time-of-flight PET digitizer in FPGA logic

A BGO crystal hit by a 511 keV photon gives off two kinds of light. A few prompt Cherenkov photons
arrive first and mark the time. The slow scintillation light that follows carries the energy. A
SiPM front end turns these into two signals per crystal:

- a fast **timing** signal (T);
- a slow **energy** signal (E), whose rising edge carries small local spikes.

Each signal goes through an LVDS input buffer used as a comparator against a threshold voltage.
The FPGA therefore sees two digital lines per channel, `buffered_t` and `buffered_e`.

This RTL digitizes a pair of such channels:

- **Timing.** A tapped carry-chain TDC on a 550 MHz clock timestamps the T edge to about 10 ps.
- **Energy.** A time-over-threshold counter measures how long E stays above threshold. It ignores
  the short drop-outs that the spikes cause.
- **Coincidence.** When both channels have a hit and both energies are above a cut-off, the raw
  TDC codes, coarse counts and TOT values of both channels go out over a UART. The host computes
  the time difference and the energy spectrum from them.

The design follows the block diagram and flowchart of a published FPGA digitizer for BGO TOF-PET,
built there on a Xilinx Virtex-7. That publication gives the structure, the sizes (550 MHz, 44
CARRY4s, 12-bit coarse counter, 10-bit TOT counter saturating at 1000, UPT of 4 clocks, TOT
cut-off 60, 55 MHz UART clock) and the behaviour of each block. It does not give register-level
detail. Where it is silent, this RTL makes its own choices. They are marked below and in each
file's header comment.

```
            buffered_t[c] ──┐                 ┌──────────── DSM TDC ───────────────┐
                            ├─ & ─ gated_t ──▶│ input logic ─▶ 44×CARRY4 line      │
            buffered_e[c] ─┐│                 │ cross-detection sampler (2-1-4-3)  │──┐
                           ││   gate_en       │ 12-bit coarse counter, encoder     │  │
                           │└──────┐          └────────────────────────────────────┘  │ rec[c]
                           └─ & ─ gated_e ──▶ NRBC: double-check logic ─▶ TOT counter ─┤
                                   │                                                   │
                       channel controller (stable check, T–E window, TOT cut-off)      │
                                   │ meas_done, energy_flag                            │
                                   ▼                                                   ▼
                           main controller ── uart_start / uart_done ──▶ UART logic ─▶ uart_txd
                           (sys_rst, coincidence decision)               (55 MHz clock)
```

## Clocks and the measurement cycle

There are three clocks, all inputs to the top (`bgo_tof_top`):

- `clk`, the 550 MHz system clock (T = 1.818 ns). The controllers, the NRBC and the TDC input
  logic run on it.
- `clk_ph`, the same frequency with a phase offset. It clocks the TDC sampling registers and the
  coarse counter. The phase is not specified. Any offset works that leaves the TDC pulse time to
  settle in the line before the sampling edge; the testbenches use 20 ps.
- `uart_clk`, 55 MHz, for the UART logic only.

The design runs one event cycle at a time:

1. The main controller pulses `sys_rst`. This clears both channels and restarts the coarse
   counters, so every timestamp counts from the same instant.
2. Each channel controller waits until its T and E inputs are quiet, then opens its gates.
3. Each channel measures one hit (TDC plus TOT), checks it and raises `meas_done`.
4. The main controller waits for `meas_done` from every channel.
   - If every `energy_flag` is high, it starts the UART, waits for `uart_done` and loops back
     to 1.
   - Otherwise it loops straight back to 1 and the event is dropped.

The main controller has no time-out, as in the published flowchart. A channel that has finished
waits, holding its data, for as long as its partner takes. In a real detector the partner
eventually sees a hit (noise or a single photon), and the energy cut-off then throws the pair
away.

## The dual-side monitoring TDC (`dsm_tdc`)

This is the part that needs the most care.

**Input logic** (`tdc_input_logic`). A rising edge of `gated_t` sets a flip-flop clocked by the
signal itself. The TDC pulse `tdc_in` rises at that moment: this edge is the *start of
propagation* (SOP). A `clk` flip-flop then sees the hit and ends the pulse at the next
system-clock edge: the *end of propagation* (EOP). At that instant the pulse occupies a stretch of
the delay line whose length is the distance from the hit to the next clock edge. `capture_en`
rises with the EOP and selects exactly one `clk_ph` edge for sampling.

**Delay line** (`carry4_delay_line`). The line is 44 CARRY4 primitives of four taps each, 176
taps, sized so the line spans one clock period (about 10.3 ps per tap).

- The first CARRY4 is wide enough to hold the falling edge (the EOP).
- The other 43 hold the rising edge (the SOP).

A carry chain cannot be written as portable logic, so this file is a behavioural model. Each tap
is an inertial `assign #` delay; the file header lists its parameters `TAP_PS` and `IN_PS`. On
the FPGA it would be a placed CARRY4 chain.

**Cross-detection sampling** (`tdc_sampler`). Inside a real CARRY4, the carry outputs do not
switch in index order. Sampling them as 1-2-3-4 gives "bubbles" (isolated wrong bits) in the
thermometer code. Reading each group of four as 2-1-4-3 (`code[k] = raw[k^1]`) removes them. The
model reproduces the out-of-order switching: output 1 leads output 0, and 3 leads 2. Without the
reordering the testbench sees bubbles.

**Encoder** (`dsm_fine_encoder`). The sampled code holds a block of ones:

- its low end is where the EOP has reached;
- its high end (+1) is where the SOP has reached.

The encoder finds both ends with priority searches and reports `fine = sop - eop`. Both edges
travel the same clock-to-line path, so subtracting the EOP position removes that path's delay and
its drift. This is the "dual-side" correction. `eop_ok` flags a code whose EOP is not in the
first CARRY4.

**Coarse counter** (`coarse_counter`). A 12-bit counter on `clk_ph`, cleared by `sys_rst`. It is
latched at the sampling edge. 4096 periods give a range of about 7.4 µs after each system reset.

**Hit time.** With the reset released at a known clock edge, the hit time is

    t_hit = (coarse + ½)·T − fine·T_tap        (plus a fixed offset)

The time difference between two channels is the difference of two such values, so the constant
drops out. `T_tap` is a calibration constant: on hardware it comes from a code-density test. The
testbenches use the model's own `TAP_PS`.

## The noise-resistant binary counter (`nrbc`)

The E comparator output rises when the energy pulse crosses the threshold. Local spikes on the
rising edge can make it drop low for a clock or two and rise again. A plain gated counter would
stop at the first drop and report a tiny energy.

The **double-check logic** (`double_check_logic`) keeps an activation signal instead:

- It rises on the first high sample of the (synchronised) `gated_e`.
- When the input is first seen low, it does not end at once. It waits UPT clocks (the
  "user-defined period", a run-time input `upt`) and looks again.
  - If the input is high again, the activation continues and the gap is counted.
  - If it is still low, the activation ends.
- It also ends when the TOT counter is full.

The **TOT counter** (`tot_counter`) counts `clk` cycles while the activation is high, up to
`TOT_MAX = 1000`.

So a clean pulse N clocks long reads N + UPT, and the smallest possible value is 1 + UPT. Gaps
shorter than UPT are bridged; longer ones end the measurement. UPT = 4 is the value chosen for the
published hardware: the comparator drop-outs it saw were at most five clocks wide.

The published average readings for 4 ns pulses are 3.8, 4.9 and 7.1 counts at UPT 1, 2 and 4.
This RTL gives about 3.2, 4.2 and 6.2 (width/T + UPT). The slopes agree; the offset of about
0.7–0.9 counts is not explained by the information available and is not reproduced.

## The channel controller (`channel_controller`)

One per channel, on `clk`. Its states are CHECK → ARMED → WINDOW → MEASURE → HOLD:

- **CHECK.** It holds the TDC and NRBC cleared. It waits until `buffered_t` and `buffered_e`
  have both been low for `STABLE_CYCLES` clocks, so that a measurement never starts in the
  middle of a pulse.
- **ARMED.** The gates are open. It waits for the first of a TDC hit or an NRBC activation.
- **WINDOW.** The other of the two must follow within `te_window` clocks. If it does not, the
  channel counts a rejection (`reject` pulse) and returns to CHECK. This throws away timing
  triggers caused by noise without a matching energy signal, and the reverse.
- **MEASURE.** It waits for the TDC result and the end of the TOT measurement.
- **HOLD.** It raises `meas_done` and sets `energy_flag = (tot > tot_cutoff)`. The gates are
  closed and all values are held until the next `sys_rst`.

`clr` and `gate_en` are registered. `clr` is held low while `sys_rst` is high, so every reset
ends with a rising `clr` edge. The TDC hit flip-flop uses that edge as its asynchronous clear.

## UART frame (`uart_logic`, `uart_tx`)

The UART logic crosses into the 55 MHz domain. The handshake with the main controller is
four-phase: `uart_start` up, `uart_done` up, `uart_start` down, `uart_done` down. Two-flip-flop
synchronisers sit on both sides.

The frame is 8N1, least significant bit first. Per channel, in channel order, it carries 26
bytes:

| bytes | field |
|-------|-------|
| 0–21  | sampled TDC code, 176 bits in sampling (2-1-4-3) order, bit 0 first |
| 22–23 | TOT value (10 bits), low byte first |
| 24–25 | coarse count (12 bits), low byte first |

The field order follows the published diagram. Choices of this design:

- the byte packing;
- no header or checksum;
- the bit rate: `CLKS_PER_BIT = 477`, i.e. 115 200 Bd from 55 MHz.

A two-channel frame of 52 bytes takes 4.5 ms. The encoded `fine_t` result is available on the
`rec` ports but is not sent: the host decodes the raw code.

## Parameters and run-time settings

Shared constants are in `bgo_pkg`.

| name | default | origin |
|------|---------|--------|
| `N_CARRY4` / `N_TAPS` | 44 / 176 | published |
| `COARSE_W` | 12 | published |
| `TOT_W`, `TOT_MAX` | 10, 1000 | published |
| `UPT_DEFAULT` (input `upt`, 4 bits) | 4 | published |
| `TOT_CUTOFF_DEFAULT` (input `tot_cutoff`) | 60 | published |
| `TE_WINDOW_DEFAULT` (input `te_window`, 8 bits) | 32 clocks | assumed; the published value is found by experiment and not given |
| `STABLE_CYCLES` | 2 | assumed |
| `UART_CLKS_PER_BIT_DEFAULT` | 477 | assumed bit rate |
| top `NCH` | 2 | published (two channels) |

## Where this departs from, or goes beyond, the published design

- The LVDS comparators and the PLL are outside the RTL. Their outputs are top-level inputs.
- On the published board the two timing inputs had a 480 ps routing offset. The model has none.
- The following are this design's own, because no register-level description is published:
  - the TDC pulse ending at the first `clk` edge after the hit;
  - the one-shot capture enable;
  - the register stage after the encoder.
- The exact double-check rule (look again once, UPT clocks after the first low sample) is a
  reading of the published description. It reproduces the stated count range 1 + UPT … 1000.
- The T–E window is symmetric: whichever of T and E comes first starts it. The published text
  only describes rejecting a T that comes too early relative to E.
- The main controller also counts sent and dropped events (`valid_events`, `dropped_events`) for
  observation.

## Simulating

Every file in `rtl/` is one module or package and needs `rtl/bgo_pkg.sv` first. Every testbench
in `tb/` is self-checking and ends with a line `TB_RESULT checks=N failures=M`.

Example, the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
          rtl/bgo_pkg.sv $(ls rtl/*.sv | grep -v bgo_pkg) tb/bgo_tof_top_tb.sv \
          --top-module bgo_tof_top_tb -Mdir obj && obj/Vbgo_tof_top_tb
```

The package must come first on the command line.

| testbench | what it exercises |
|-----------|-------------------|
| `carry4_delay_line_tb` | tap delays, 2-1-4-3 switching order, pulse propagation |
| `tdc_input_logic_tb`, `tdc_sampler_tb`, `coarse_counter_tb` | pulse shape, single capture, reordering, latching |
| `dsm_fine_encoder_tb` | codes with every EOP/SOP run, empty code, `eop_ok` |
| `dsm_tdc_tb` | 200 random hit times; fine code and coarse count exact |
| `double_check_logic_tb`, `tot_counter_tb`, `nrbc_tb` | gap bridging, saturation, the pulse-width sweep 4 ns–1.8 µs at UPT 1, 2 and 4 |
| `channel_controller_tb`, `bgo_tof_digitizer_tb` | stable check, T–E window in both orders, cut-off, spikes |
| `main_controller_tb`, `uart_logic_tb` | coincidence decision, handshake, frame contents and duration |
| `bgo_tof_top_tb` | two channels end to end, with the UART shortened to 8 clocks per bit |
| `bgo_tof_full_tb` | one coincidence with every top parameter at its default (full 477-clock UART bit), about 2 minutes |

`bgo_tof_top_tb` decodes the UART frames the way a host would. It recomputes the time difference
for the intervals ±2050 ps, ±260 ps, 0 ps and two others, and checks each to within three taps.
The errors seen are below 10 ps. It also counts each mechanism at least once:

- coincidences sent;
- an event dropped by the energy cut-off;
- a T–E window rejection;
- a spike gap bridged by the double-check logic;
- a saturated TOT;
- a time difference longer than one clock.

Verilator has only two-state values. The testbenches reset everything they read, and they pass
with random initial values (`+verilator+rand+reset+2`).

## Synthesis notes

All blocks except the delay line are synthesizable. For synthesis, replace
`carry4_delay_line` with a CARRY4 chain, placed by constraints. Lint reports the asynchronous
clear of the TDC hit flip-flop, which is also driven by a synchronous signal. That is intended:
the flip-flop is clocked by the hit itself, and `clr` only releases it between events.
