# Waveform capture device: picosecond snapshots from an FPGA carry chain

A digital signal is sent down a long FPGA carry chain, the fast ripple path
meant for adders. Each carry element delays the signal by about 5 ps, and each
element's output has its own flip-flop. When all those flip-flops are clocked
together, they freeze the last *K* × 5 ps of the signal's history as a *K*-bit
word. At *K* = 1300 and a 200 MHz capture clock, every 5 ns clock period yields
a 6.5 ns snapshot. Consecutive snapshots therefore overlap, and a run of
snapshots records the waveform with no gaps. The words are not encoded in any
way: the word is the waveform. The same data serves as a time-to-digital
converter (the carry index of an edge gives its time) and as a logic-analyser
trace.

The delay per carry is not known in advance, so it is measured by *dynamic
phase calibration*. A second PLL output is fed through the chain instead of
the signal under test. Between captures, the PLL's dynamic phase-shift port
moves that output by a fixed step (78 ps on this FPGA family). Between two
words the edge moves by (step / carry delay) carries, so one capture run of
512 words gives the carry delay directly.

This repository gives SystemVerilog for the logic of the device and a
behavioural model of the carry chain, plus testbenches that run the device at
full size.

## Block structure

```
 ext_signal ──►┌──────────────┐ s  ┌─────────────┐ tap_n ┌─────────────┐ x  ┌─────────────┐
 cal_signal ──►│cal_select_mux├───►│ carry_chain ├──────►│ tdl_capture ├───►│ capture_ram ├──► rd_data
               └──────▲───────┘    │ copy gate + │ K bits│ K flops, ↑C │    │ 512 x K,    │
                      │            │ K carry el. │       └─────────────┘    │ write on ↓C │
                      │            └─────────────┘                          └──────▲──────┘
                      │ cal_select                                 we, addr        │
               ┌──────┴──────────────────────────────────────────────────────────┴──┐
 start, mode ─►│                         wcd_control  (clock C)                       │
 phase_done ──►│  capture: 512 consecutive writes   calibration: write, step, wait…   ├─► phase_step,
               └──────────────────────────────────────────────────────────────────────┘   phase_updn,
                                                                                          phase_cnt_sel
```

| File | Kind | What it is |
|---|---|---|
| `rtl/wcd_pkg.sv` | package | default sizes, control-state and mode enums |
| `rtl/cal_select_mux.sv` | RTL | selects the signal under test or the calibration signal |
| `rtl/carry_chain.sv` | behavioural model | copy gate plus K carry elements with separate rise and fall delays |
| `rtl/tdl_capture.sv` | RTL | K capture registers on the rising edge of C |
| `rtl/capture_ram.sv` | RTL | 512 × K buffer, written on the falling edge of C, with a separate read port |
| `rtl/wcd_control.sv` | RTL | run sequencing and PLL phase-step handshake |
| `rtl/wcd_top.sv` | RTL top | wires the above together |

Outside the top, and reached through its ports:
- the PLL with dynamic phase shift, which supplies `clk_c` and `cal_signal` and takes the `phase_*` signals;
- the 50 MHz board oscillator that the PLL locks to;
- the input pad and I/O buffer of the external signal;
- the JTAG logic that reads the RAM out (`rd_clk`, `rd_addr`, `rd_data`).

All four are vendor or board parts. `tb/dps_pll_model.sv` stands in for the PLL
in simulation.

## The tapped delay line

**Carry element.** Each carry element is an adder cell with its two operand
inputs tied to 0 and 1. Its carry-out therefore equals its carry-in, and its
sum output is the inverted carry-in. The carry-out feeds the next element. The
sum output `tap_n[k]` goes to capture register *k*. The signal cannot enter a
carry input straight from general routing, so it first passes a *copy gate*.
The copy gate is much slower than a carry element.

**Capture word.** With `x[0]` the element nearest the input, the register
outputs after a rising edge of C at time *t* are

    x[k] = S(t − d_copy − k·τ)

The registers store the inverted taps. `tdl_capture` inverts them back, so `x`
has the polarity of *S*. Bit 0 is the newest sample and bit K−1 the oldest.

**Timing model.** `carry_chain` gives every element the same two transport
delays: `TAU_RISE_FS` = 4910 fs for a rising edge and `TAU_FALL_FS` = 4540 fs
for a falling one. These are the measured values for carry chains in MLAB
cells. The copy gate adds `COPY_DELAY_FS`, which is 50 ps. An edge that enters
at time *te* reaches tap *k* at *te* + d_copy + k·τ.

**Pulse shrinking.** Because τ_rise > τ_fall, the falling edge of a high pulse
gains 0.37 ps on its rising edge at every element. A pulse loses about 480 ps
over the full 1300-element chain. When the falling edge catches the rising
edge, the pulse is gone: the model stops the overtaken edge there, and nothing
of the pulse reaches the later taps. Pulses wider than K·(τ_rise − τ_fall)
survive the whole chain, which is the condition the device needs.

**Copy gate.** The copy gate is inertial. An input pulse shorter than its
50 ps delay never enters the chain, which models the low-pass effect of the
slow first cell.

**Not modelled.** The model leaves out three effects seen on the FPGA:
- bubbles, caused by clock skew between the registers;
- the extra expansion at the start of the chain;
- the slower middle section of the chain.

In simulation every element is identical.

**Performance.** Each input edge starts one process that walks down the
chain, one element per delay. Simulation cost is therefore proportional to
edges × K. A model with one process per element, all sensitive to a shared
vector, costs K² and was about a hundred times slower at K = 1300.

**Synthesis.** `carry_chain` is not synthesizable: synthesis drops the delays
and leaves wires. To build the device on hardware, replace this module with the
vendor's arithmetic-cell primitives. The operand LUT masks must be constant,
the cells must be placed in one column by location constraints, and the chain
path must be declared a false path in timing analysis.

## The capture clock and the RAM

Everything runs on the single capture clock C (200 MHz, T = 5 ns).
- On the rising edge, the TDL registers take the chain state.
- On the falling edge, the RAM stores `x` if `we` is high, at address
  `ram_addr`.

The control logic changes `we` and `ram_addr` on the rising edge. So the word
written at a falling edge is the word captured on the rising edge just before
it. The half-period offset keeps the RAM from reading a word while the
registers are changing.

For continuous capture the chain must be at least as long as the clock
period, K·τ ≥ T. At 1300 × 4.91 ps = 6.4 ns against 5 ns this holds with
1.4 ns of overlap.

The read port is separate and registered: `rd_data` shows the word one rising
edge of `rd_clk` after `rd_addr`. On the board, this port is where JTAG readout
attaches.

## Control logic and the phase-shift handshake

`wcd_control` takes `start` (a level) and `mode`, and samples both when it is
idle or done.

**Capture mode.** The external signal is selected.
- The edge of C that sees `start` raises `we` with address 0.
- The address then counts up on each of the next 511 edges.
- `done` rises after the last word.

So 512 words are written in 512 consecutive cycles, 2.56 µs with no dead time.

**Calibration mode.** The PLL's calibration output is selected.
- After `SETTLE_CYCLES` (8) cycles the chain holds only the calibration signal, and word 0 is written at zero shift.
- Then, for n = 1 … 511:
  1. `phase_step` is held high for `PHASESTEP_CYCLES` = 8 cycles of C. That is
     40 ns, two periods of the 50 MHz reference, which is the minimum the PLL
     requires.
  2. The logic waits until `phase_done` has been seen low and then high again.
     `phase_done` comes from the PLL's scan-clock domain and passes a two-flop
     synchronizer.
  3. On the third edge after `phase_done` returns high, the address becomes
     n and one word is written.

The PLL's re-lock time varies: it takes from 2 to several dozen reference
cycles, depending on the device. So there is no time-out, and calibration has
dead time between words.

**Word n always holds the capture after exactly n phase steps.** The phase
offset of word n is therefore n·Δt, which is all the calibration needs.

`phase_updn` (1, positive direction) and `phase_cnt_sel` (5'd1, the PLL counter
that drives the calibration output) are constants. They are set once.

Assertions in `wcd_control` check that the RAM is written only while capturing
or in the calibration write state, never while a phase step is held, and never
beyond DEPTH.

## Using calibration data

Capture times fall on edges of C, and a 100 MHz calibration signal has two C
edges per period. So successive words do not all see the pulse at the same
phase. A robust way to get the carry delay is the one `tb_wcd_top` uses:
1. For word n, compute the time since the calibration edge entered:
   d_n = (t_capture − n·Δt) mod P.
2. Find the carry index of the rising edge, which is the deep end of the run
   of ones.
3. Fit that index against d_n. The inverse slope is τ_rise.
4. Do the same for the falling edge, using d_n − t_high, to get τ_fall.

If you read the data only at captures a whole calibration period apart, this
reduces to the simple rule τ = Δt / (carries moved per step).

Pulse shrinking can be measured by running the calibration with a signal that
puts several pulses in the chain at once. Fit pulse width (in carries) against
the carry index of each pulse's falling edge: the slope is τ_fall/τ_rise − 1.

Two correction steps are done in software on the captured words, not in this
RTL:
- the run-length error correction, which fills bubbles and stretches pulses by
  a constant factor;
- conversion from carry index to time.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `K` | 1300 | top, chain, TDL | carry elements and bits per word (the FPGA column allows up to 1740; about 1500 keeps sub-ns pulses) |
| `DEPTH` | 512 | top, RAM, control | words per run |
| `PHASESTEP_CYCLES` | 8 | top, control | phase-step hold in cycles of C (2 × 50 MHz at 200 MHz) |
| `SETTLE_CYCLES` | 8 | top, control | wait after selecting the calibration input |
| `TAU_RISE_FS`, `TAU_FALL_FS` | 4910, 4540 | top, chain | carry delays of the model |
| `COPY_DELAY_FS` | 50000 | top, chain | copy-gate delay of the model |
| `PHASE_CNT_SEL`, `PHASE_UP` | 5'd1, 1 | control | static PLL port values |

All defaults are the design's full size; no size was reduced for the tools.

## Simulation

Every file sets `timeunit 1ps; timeprecision 1fs`: the carry delays need
femtosecond resolution. Testbenches need `--timing`. For example, the full-size
end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/wcd_pkg.sv tb/tb_wcd_top.sv --top-module tb_wcd_top
./obj_dir/Vtb_wcd_top
```

Each testbench prints `TB_RESULT checks=N failures=M`.

| Testbench | What it shows | Run time |
|---|---|---|
| `tb_carry_chain` | every tap of the 1300-element chain matches the arrival rule at 260 sample times; exit width = entry width − K·(τ_r − τ_f); a 30 ps glitch is filtered, a 70 ps pulse enters and dies inside the chain | < 1 s |
| `tb_tdl_capture` | registers sample only on the rising edge; polarity restored | < 1 s |
| `tb_cal_select_mux` | exhaustive | < 1 s |
| `tb_capture_ram` | full 512 × 1300 RAM; only falling-edge writes land; enable respected; 1-cycle read latency | < 1 s |
| `tb_wcd_control` | capture: 512 back-to-back writes; calibration: 8-cycle step pulses, no write before the PLL is done, write 3 cycles after `phase_done`, 511 steps | < 1 s |
| `tb_wcd_top` | full size, no parameter overrides: capture run of a random pulse train (including pulses too narrow to cross the chain) and calibration run, every bit of all 1024 words checked against edge arrival times; τ_rise and τ_fall recovered from RAM contents (4.910 / 4.540 ps); counts capture run, calibration run, input switch, phase steps, long re-locks, visibly shrunk pulses and pulses dying in the chain | ~7 s |
| `tb_ro_workload` | 19-inverter ring oscillator (240 ps per gate) captured for 2.56 µs; pulse widths give 236 ps per gate | ~2 s |
| `tb_shrink_workload` | 600 MHz, 50 % duty calibration signal with 104 ps steps; fitted width-vs-position slope −0.0754 (model: 4.54/4.91 − 1) | ~35 s |

`tb/dps_pll_model.sv` gives C, the calibration pulse train and the phase-shift
handshake. The re-lock time is random. The model gives the true phase only to
the checks. `tb/ring_oscillator_model.sv` is a transport-delay inverter ring.

## Where this RTL departs from, or adds to, the device described

- **Carry chain.** It is a behavioural model with ideal, identical elements.
  The real chain is vendor primitives with placement constraints. Bubbles,
  start-of-chain expansion and mid-chain effects are absent.
- **Copy gate.** The 50 ps delay is a chosen number. It is modelled as a
  simple inertial delay, not as the gate's real analog response.
- **Tap polarity.** The registers take the carry cells' sum outputs, which are
  inverted, and the word is inverted back after the registers. Where the
  original restores the polarity is not known.
- **Run control.** The start/mode handshake, the settle wait before calibration
  word 0, the state encoding, the synchronizer and the rule "low, then high
  again" on `phase_done` are choices made here.
- **Phase-step hold.** The hold is timed in cycles of C, 8 of them, rather than
  by the 50 MHz reference itself. Both clocks come from the same reference, so
  8 cycles cover two reference edges.
- **Number of phase steps.** A calibration run stores 512 words after 0 … 511
  steps. 512 × 78 ps is 40 ns, four periods of the 100 MHz calibration signal;
  the description's "4π" for this run does not match that.
- **Read port.** It is an ordinary synchronous port. The JTAG transport behind
  it is not included.
- **Number of TDLs.** There is one TDL. The three-node ring-oscillator
  experiment, with one TDL per node captured together, would need three chains
  and three RAMs, and is not part of this top.
- **Resource counts.** The reported FPGA resource counts (about 1537 ALMs in
  total) are not a target of this RTL. Its RAM is an inferred array.
