# Automatic beam synchronization of a divided RF clock

A time-of-flight detector measures particle arrival times against a clock, so
that clock must stay at a fixed phase to the beam bunches. Here the clock comes
from the accelerator's 499.8 MHz RF signal, divided by 12 to 41.67 MHz. A
divider can start on any of the 12 RF edges of its period. The bunches come
every 8 ns, which is 4 RF periods, so after every power-up the clock could be
in any of four phases relative to the bunches. The accelerator also provides a
beam synchronization signal, BSYNC. Its leading edge marks the bunch phase.

This RTL models one clock module of the end-cap TOF upgrade of BESIII. Two
things set the phase:

* **Sync control and sync detector.** A small flip-flop circuit restarts the
  divider on a delayed copy of BSYNC. A second circuit reports, as a 2-bit
  flag, whether the delayed BSYNC edge falls in the expected RF period.
* **Auto-sync controller.** Control logic, an FPGA on the real board, moves the
  BSYNC delay in 9 ps steps. It finds the two edges of the range of delays
  where the flag stays good, which is about 2 ns wide (the *synchronization
  window*). It then parks the delay in the middle of that range and restarts
  the divider once more.

The centre is the safest point. There the delayed edge is furthest from both RF
edges that could capture it, so jitter and temperature drift cannot move the
divider to a neighbouring phase.

The design follows the method published for the BESIII ETOF clock system:
"Clock Auto-synchronizing Method for BES III ETOF Upgrade" by Wang Si-Yu, Cao
Ping, Liu Shu-Bin and An Qi. That publication gives the circuit of the restart
and detect flip-flops, the flowchart of the search, and the register addresses
of its results. This RTL fills in everything else, as noted below.

## Block diagram

```
          BSYNC ───────────┬──────────────────────────────────────┐
                           │                                      │
                 ┌─────────▼────────┐ bsync_dly                   │
 delay_code ◄────┤ (external delay  ├──────────┬──────────────┐   │
  (10 bit)       │  line, ~9 ps/LSB)│          │              │   │
                 └──────────────────┘   ┌──────▼──────┐ ┌─────▼───▼──────┐
                                        │sync_detector│ │  sync_control  │
   RF 499.8 MHz ──────────────────────► │ D3..D10     │ │ D1, D2, ÷12    │◄── RF
                                        └──────┬──────┘ └──┬──────────▲──┘
                                     SynFlag[1:0]   tof_clk│     arm  │
                                               │    ┌──────▼───────┐  │
           opt_clk_in (slave) ────────────────────► │ clock_fanout │◄─┼── osc 83.3 MHz
                                               │    │ mux, ÷2, ×20 │  │
                                               │    └──┬────────┬──┘  │
                                               │ sys_clk│   5 optical + 15 LVPECL outputs
                                        ┌──────▼───────▼──┐           │
                                        │ auto_sync_ctrl  ├───────────┤
                                        │ sync_regs       │◄─► register bus (crate computer)
                                        └─────────────────┘
```

`clock_module_top` wires these five modules together. The following parts lie
outside it and reach it through ports:

* the delay line chip
* the optical receivers and transmitters
* the oscillator
* the VME crate-bus interface

## How a clock phase turns into a flag

Hardware that matches the figures of the method is in `sync_control.sv` and
`sync_detector.sv`.

**Divider restart (`sync_control`).** D2 is clocked by BSYNC and D1 by the
delayed BSYNC. Both have their data input tied high. While D2 is set and D1 is
not, the divider is held in reset. The divider therefore restarts on the first
RF rising edge after the delayed edge. Call that edge *r0*. Once set, both
flip-flops stay set, so later BSYNC edges do nothing. The controller pulses
`arm` to clear them. The next BSYNC then gives exactly one restart. During
reset the counter holds 3. Since the clock is high for counts 6 to 11, the TOF
clock rises on RF edge *r2*, two RF periods after *r0*.

**Detector (`sync_detector`).** D3 and D4 turn the TOF clock into a pulse one
RF period wide at the same phase. This pulse is the "1/12 duty clock". D5 to D8
shift the delayed BSYNC along on the RF clock, giving taps DL1 to DL4. On the
rising edge of the pulse, D9 samples DL4 and D10 samples DL3, so
SynFlag = {D10, D9}:

| delayed edge first caught by RF edge | DL3 at the TOF edge | DL4 | SynFlag |
|---|---|---|---|
| one period later than *r0* | 0 | 0 | 00 |
| **r0** | **1** | **0** | **10**: synchronized |
| one period earlier | 1 | 1 | 11 |

The divider and the detector sample the delayed edge on the same RF rising
edges. Suppose the divider was restarted with delay *d0*. Any delay *d* whose
edge lands in the same RF period as *d0* then reads 10. Every other delay reads
00 or 11. The range of good delays is the window: one RF period, 2 ns, or
about 222 codes at 9 ps. The windows for neighbouring RF periods lie end to end
along the delay axis.

SynFlag reads 10 for only one TOF period after each BSYNC leading edge. After
that, both taps are 1 while BSYNC stays high. A single *test* in the controller
therefore waits `SETTLE_CYCLES`, then watches for `TEST_CYCLES` system-clock
cycles. It passes if 10 appeared at least once. `TEST_CYCLES` (64 cycles,
1.5 µs) must cover at least one BSYNC period.

## The search (`auto_sync_ctrl`)

The state machine runs on the 41.67 MHz system clock. It follows the published
flowchart:

1. **Start.** Set Delay to the initial data and restart the divider. After
   `RESET_WAIT` cycles, test.
2. **Retry.** If the test fails, the initial delay sat in an unstable spot. Add
   0x30 to both the delay and the initial data, restart the divider and test
   again. A second failure ends in ERROR.
3. **Step 1: maximum.**
   * Add 0x30 while the test passes.
   * Then subtract 0x4 until it passes.
   * Then add 0x1 while it passes.
   * Set Max to Delay − 1.
   * Confirm: set the delay to Max and test 8 times in a row. On any failure,
     set Max to Max − 1 and start the 8 tests again.
4. **Step 2: minimum.** This mirrors Step 1, starting again from the initial
   data:
   * Subtract 0x30 while the test passes.
   * Then add 0x4 until it passes.
   * Then subtract 0x1 while it passes.
   * Set Min to Delay + 1.
   * Confirm with 8 passing tests in a row. On any failure, set Min to
     Min + 1 and start the 8 tests again.
5. **Centre.** Compute Centre = (Max + Min) / 2 and put it on the delay line.
   Restart the divider, this time at the centre.

The window edges are noisy. With jitter, a code within a few steps of an edge
passes some tests and fails others. The 8 repeated tests push each edge inward
until it is stable. With the default parameters a run takes about 60 to 80
tests. At 68 cycles per test that is roughly 100 to 150 µs.

This design adds the following, which the flowchart does not cover:

* A step that would leave the code range 0 to 1023 ends in ERROR.
* A Max that shrinks back to the initial data ends in ERROR.
* A Min that meets Max ends in ERROR.

## Registers (`sync_regs`)

The register bus uses 16-bit addresses and 16-bit data. A write takes effect on
the clock edge. A read is combinational in the cycle that `rd` is high.

| address | access | content | origin |
|---|---|---|---|
| 0xf000 | W | bit0: start a run; bit1: re-arm the divider reset by hand | own choice |
| 0xf000 | R | {error, done, busy} in bits 2..0 | own choice |
| 0xf010 | R/W | clock mode: 0 master (RF/12), 1 slave (optical 41.67 MHz), 2 off-line (oscillator/2) | own choice |
| 0xf020 | R | SynFlag | own choice |
| 0xf030 | W/R | manual delay code (takes over until the next start); reads the code on the delay line | own choice |
| 0xf040 | R/W | initial delay data (reset 0x100; a run writes back the value it used) | published |
| 0xf050 | R | centre | published |
| 0xf0c0 | R | minimum | published |
| 0xf0d0 | R | maximum | published |

The manual registers keep the old way of working. By hand, an operator can
write a delay, restart the divider and read the flag, then compare the result
with the automatic one.

## Clock sources and fan-out (`clock_fanout`)

A master module runs on RF/12. A slave module runs on the 41.67 MHz clock it
receives over fibre from the master. A module with neither runs off-line on
its 83.3 MHz oscillator divided by 2. The selected clock is copied to 5 optical
channels (trigger and slave modules) and 15 LVPECL channels (other modules in
the crate). The same clock drives the control logic and the detector's D3.
The multiplexer is a plain one, so switch the mode only while nothing depends
on the clock.

## Where this model departs from the published design, and why

* **The one-shot gate and clear pins.** The schematic draws the gate and the
  flip-flops' clear pins without printing a gate type or a connection. This
  design uses an AND of D1's inverted output and D2's output. The controller
  drives both clear inputs. Reset also clears them, so the first BSYNC after
  reset gives the divider a phase.
* **The detector shift chain.** The schematic draws a small circle at one input
  of the first chain flip-flop. Its meaning is not given, and it is not
  modelled: all of D5 to D8 use the rising RF edge. The counter's reset value
  (3) was chosen so that the delay used for the restart always reads 10.
* **"8 times".** The flowchart says to repeat a test 8 times; the prose says
  more than 8 times. This design uses 8 passes in a row. The earlier
  single-test search, whose adjacent windows overlapped, is not provided.
* **Tests and waits.** What one test is, the wait after a restart, and the
  clock of the control logic are this design's choices. So are all register
  addresses other than the four published ones.
* **Re-arm timing.** The re-arm must not end between a BSYNC edge and its
  delayed copy, or that restart is lost. After any restart, the system-clock
  edges, and hence the end of `arm`, fall a few ns after the delayed edge.
  This holds as long as the total delay stays below about 18 ns.
* **Out of scope.** The delay line, the optical links, the oscillator, the
  VME64x protocol and the power supply are not modelled as logic. The
  testbench model `tb/sy89295_model.sv` stands in for the delay line. It uses
  a 3.2 ns offset (this design's assumption), 9 ps per code (the published
  figure) and ±10 ps random jitter per edge.

## Behaviour in simulation

`tb_clock_module_top` runs the whole module with every parameter at its
default. It uses a 2 ns RF clock (500 MHz rather than 499.8 MHz) and a BSYNC
period of 816 ns. Runs from the initial values 0x100, 0x1a0 and 0x280 find
these windows:

| initial | minimum | maximum | centre |
|---|---|---|---|
| 0x100 | 0xa4 | 0x180 | 0x112 |
| 0x1a0 | 0x183 | 0x25f | 0x1f1 |
| 0x280 | 0x262 | 0x33d | 0x2cf |

Each window is within 1 to 2 codes of the edges predicted from the stimulus
alone. The windows are 220 to 222 codes wide and adjoin one another. The
published measurements show the same pattern: three adjoining windows of about
215 codes, which suggests a step nearer 9.4 ps. After each run:

* the delayed BSYNC edge sits within 10 ps of the middle of its RF period;
* the TOF clock rises two RF periods after the capturing edge;
* SynFlag reads 10 once per BSYNC.

A run started right at a window edge takes the +0x30 retry.

`tb_fiber_windows` runs two modules side by side. Their BSYNC phases stand for
two fibres of different length, as in the published fibre test. The windows
found are 0x109..0x1e4 (centre 0x176) and 0xb1..0x18d (centre 0x11f). The
published measurements were 0x108..0x1e0 (0x174) and 0xb0..0x18b (0x11d). The testbench also
drives manual delay, manual restart, and mode changes to off-line and slave
and back.

## Files and how to simulate

All sources are in `rtl/` (one module or package per file) and `tb/`.

| file | content |
|---|---|
| `rtl/clk_sync_pkg.sv` | widths, step sizes, SynFlag code, register map, mode enum, result struct |
| `rtl/sync_control.sv` | D1, D2, gate, divide-by-12 |
| `rtl/sync_detector.sv` | D3 to D10, SynFlag |
| `rtl/auto_sync_ctrl.sv` | window search |
| `rtl/sync_regs.sv` | registers and manual operation |
| `rtl/clock_fanout.sv` | source selection, ÷2, 20 outputs |
| `rtl/clock_module_top.sv` | one clock module |
| `tb/sy89295_model.sv` | behavioural delay line (testbench only) |
| `tb/tb_<module>.sv` | self-checking testbench for each module |
| `tb/tb_fiber_windows.sv` | two modules, two BSYNC phases (two fibre lengths) |

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/clk_sync_pkg.sv \
          tb/tb_clock_module_top.sv --top-module tb_clock_module_top
./obj_dir/Vtb_clock_module_top
```

Replace `clock_module_top` with `sync_control`, `sync_detector`,
`auto_sync_ctrl`, `sync_regs` or `clock_fanout` to run the unit tests. Every
testbench finishes in well under a second.

The sources use `timeunit 1ns; timeprecision 1ps;`. The flip-flops of the
sync circuits are clocked directly by BSYNC, the delayed BSYNC and the divided
clock, as on the board, so the top is a multi-clock design. When changing
`TEST_CYCLES`, keep it at least as long as the BSYNC period, measured in
system-clock cycles.
