# CEE trigger system: FPGA trigger logic in SystemVerilog

In a heavy-ion collision, the number of charged particles hitting the
time-of-flight walls rises as the collision becomes more central. The CEE
trigger turns that count into a decision once per beam particle. Front-end
time digitisers report how many of their channels fired. The trigger then
works in three steps:

1. Slave boards close to the detector add these counts up.
2. A master board adds the totals from the inner (iTOF) and end-cap (eTOF)
   walls.
3. The master sorts the event into one of three classes:
   - too few hits: noise;
   - a moderate number: minimum bias;
   - many hits: central;
   - above an upper limit, the event is treated as noise again.

A start counter (T0) must confirm that a beam particle passed. An active
collimator (AC) upstream of the target vetoes reactions that happened before
the target. The resulting global trigger (GTRG) is sent back down the same
tree of boards to every front end in the experiment. The run-control
commands (start, stop, time synchronisation) travel on the same links as the
triggers.

This repository holds synthesizable RTL for the logic of the three board
types:

- **STM L1**: first-level slave trigger module.
- **STM L2**: second-level slave trigger module.
- **MTM**: master trigger module.

It also holds a top level that wires a full system from them, and a
self-checking testbench for every module. Everything runs on the single
global 40 MHz clock, so a cycle is 25 ns.

```
 TDM x10 --serial--> STM L1 x10 --16b word--> STM L2 --serial--> +-----+ <--16b-- STM L1 (T0)
   (iTOF branch)       sum, threshold           sum                |     | <--16b-- STM L1 (AC)
 TDM x10 --serial--> STM L1 x10 --16b word--> STM L2 --serial--> | MTM |
   (eTOF branch)                                                   |     | --16b--> STM L1 (ZDC, pixel)
                                  TPC, MWDC: STM L2 -> 10 STM L1   +-----+ --serial--> 4 x STM L2
   downlink: every board fans the GTRG / command frame out to all of its outputs
```

## Board tree and default sizes

The parameter defaults of `cee_trigger_top` give the full system:

| Branch | Boards | Uplink | Downlink outputs |
|---|---|---|---|
| iTOF, eTOF (each) | 1 STM L2 + 10 STM L1 | 10 TDM lines per L1 | 11 per L1 (10 TDM + 1 clock module) |
| TPC, MWDC (each) | 1 STM L2 + 10 STM L1 | none | 10 FEMM lines per L1 |
| T0, AC | 1 STM L1 each | 1 line, hit = multiplicity 1 | 10 |
| ZDC, silicon pixel | 1 STM L1 each | none | 10 |

That is 460 front-end downlink lines in total. The board counts are
parameters: `N_TOF_L1`, `N_TRK_L1`, `N_TDM` and `N_FEMM` on the top, and
`N_IN`, `N_OUT` and `N_L1` on the boards. Boards without an uplink are the
same modules with `HAS_UPLINK = 0`, so no summing logic is built for them.

## Links and frame formats

Boards talk over two kinds of link. Serial lines appear where the real
hardware has LEMO cables or front-end connectors. Transceiver words appear
where the real hardware uses optical fibre.

**Serial frame** (TDM → STM L1, STM L2 ↔ MTM, STM L1 → front ends):

- An idle line is 0.
- A frame is a start bit `1` followed by 10 data bits, MSB first, one bit per
  cycle, so 11 cycles per frame.
- A multiplicity of 4 is sent as `1 0000000100`.
- Frames may follow each other without a gap.
- `piso_tx` sends frames and `sipo_rx` receives them. The receiver samples on
  the common clock and needs no clock recovery.

**Transceiver word** (STM L1 ↔ STM L2, T0/AC/ZDC/pixel STM L1 ↔ MTM): a
16-bit parallel word, valid for one cycle.

- Uplink: the word is the multiplicity itself, and 0 means nothing to report.
- Downlink: the word is `{1, 00000, kind[1:0], code[7:0]}`, and 0 means idle.

**Downlink payload.** The 10 data bits of a downlink frame are
`{kind, code}`:

| kind | code | meaning |
|---|---|---|
| 00 | 00 | global trigger: the whole frame is a single start-bit pulse |
| 01 | 01 | start acquisition |
| 01 | 02 | stop acquisition |
| 01 | 03 | time synchronisation: the MTM clears its 48-bit time stamp and the front ends are told to clear theirs |

Because a trigger is all zeros, a trigger on a serial line is one pulse of one
cycle. A front end that only needs the trigger edge can therefore ignore the
framing altogether.

## Uplink: from hit counts to one total

**STM L1** (`stm_l1`):

- Each TDM line is decoded by its own `sipo_rx`.
- `mult_sum` adds every word that arrives within a 3-cycle (75 ns) window.
  The window opens on the first word of an event. Frames that start up to 2
  cycles after it still count.
- `l1_thr_judge` forwards the sum only if it reaches the board's `threshold`.
  Otherwise it sends 0. A threshold of 1 passes every non-empty sum.
- The transceiver word appears 4 cycles after the last bit of the earliest
  frame.

**STM L2** (`stm_l2`):

- Aligns the words from its 10 STM L1 boards in a second 3-cycle window.
- Adds them, saturating to 10 bits.
- Sends the total to the MTM as a serial frame.
- Because a frame occupies the line for 11 cycles, a second total that
  arrives while a frame is being sent is lost. It is counted in the board's
  state word.

**MTM** (`mtm`):

- Decodes the two TOF frames and adds them in a coincidence gate of `gate`
  cycles, programmable with a default of 3.
- `mult_sum` also reports which inputs contributed.
- In beam mode both iTOF and eTOF must be present. An event that fires only
  eTOF (a very peripheral collision, or a reaction behind the tracker) is
  therefore rejected.
- In cosmic mode either wall is enough.

## The MTM decision

`mtm_thr_judge` sorts the TOF total M against three registers:

| condition | class | output |
|---|---|---|
| M ≤ M_l or M ≥ M_h | noise | no trigger |
| M_l < M < M_e | minimum bias | `low_thr` |
| M_e ≤ M < M_h | central / semi-central | `high_thr` |

The defaults are the beam-test values: M_l = 3, M_e = 10 and M_h = 100.
The paper leaves M = M_e unassigned; this design puts it in the central
class.

T0 and AC arrive as transceiver words, and any non-zero word counts as a hit.
The TOF path is much slower than T0 and AC: the TOF count goes through two
board levels and two serial frames. So each of the four signals (T0, AC,
minimum bias, central) goes through its own `delay_widen` stage:

- The stage delays the rising edge by a programmable number of cycles.
- It then stretches the signal to a programmable width.

The defaults are a T0 and AC delay of 36 cycles (900 ns), a TOF delay of 0,
and all widths 8 cycles (200 ns).

`gtrg_logic` then forms the trigger:

```
beam:      minbias = T0 & !AC & low_thr
           central = T0 & !AC & high_thr, then the divider (pass 1 of N)
           GTRG    = minbias | central
cosmic:    GTRG    = low_thr | high_thr   (T0 and AC ignored)
self-test: GTRG    = selftest_gen pulse, one every `period` cycles
GTRG passes only while the run is started (START..STOP) and, if the spill
gate is enabled, while the slow-extraction `spill` input is high.
```

- Each class is edge-detected, so one coincidence gives one GTRG pulse.
- GTRG is a one-cycle pulse.
- Its 3-bit class tag `gtrg_cls` = {central, minimum bias, self-test} is
  also reported.
- The divider applies only to the central class, because that is where the
  divider sits in the master's block diagram. A factor of 0 or 1 passes every
  event.

## Downlink: triggers and commands on shared links

**`fanout_tx`** (in the MTM, and the same coding in the slave boards):

- Sends each GTRG or command through a single `piso_tx` to all serial
  outputs at once, and as a 16-bit word to all transceiver lanes in the same
  cycle.
- A trigger always wins over a command.
- A trigger that comes while a frame is still on the line is held (one deep)
  and sent right after that frame. This is reported as `deferred`.
- A third trigger inside the same 11 cycles is dropped (`lost`).

**Slave boards:**

- STM L2 decodes the serial frame from the MTM and re-sends it as a
  transceiver word to each of its STM L1 boards 2 cycles after the frame
  ends.
- STM L1 turns a received word into a serial frame on all of its front-end
  outputs in the next cycle.

**Commands:** the DAQ queues commands into an 8-deep FIFO (`sync_fifo`).
`global_sync` then:

- Takes the commands from the FIFO one at a time.
- Holds each command until the fan-out accepts it, so no command is lost to
  a trigger.
- On acceptance, START sets the `running` flag that enables GTRG, STOP clears
  it, and TSYNC clears the 48-bit time stamp.

The time stamp counts clock cycles and is the system's global time. It
leaves the MTM and the top level on the `timestamp` port.

## Control from the DAQ

The MTM, every STM L2 and the tracking STM L1 boards each have a `daq_if`.
The DAQ writes 32-bit command words:

| bits [31:28] | action |
|---|---|
| 1 (CFG) | write trigger register [27:24] with data [23:0] |
| 2 (SYNC) | queue global command [7:0] (START 1, STOP 2, TSYNC 3) |
| 3 (STATE) | read the state word, returned as 16-bit words, least significant first, starting 2 cycles after the request |

MTM trigger registers (`trig_mode_ctrl`; the new value is live one cycle
after the write):

| reg | field | reset value |
|---|---|---|
| 0 | mode: 0 beam, 1 cosmic, 2 self-test | beam |
| 1 / 2 / 3 | T0 / AC / TOF delay, cycles | 36 / 36 / 0 |
| 4 | widths: [7:0] T0, [15:8] AC, [23:16] TOF | 8 / 8 / 8 |
| 5 | TOF coincidence gate, cycles | 3 |
| 6 / 7 / 8 | M_l / M_e / M_h | 3 / 10 / 100 |
| 9 | central-class division factor | 1 |
| A | self-test period, cycles | 40000 (1 kHz) |
| B | [0]: pass GTRG only during spill | 0 |

**State words** are wrapping 16-bit event counters (`state_module`):

- **MTM, 80 bits**: GTRG, minimum-bias triggers, central triggers, TOF
  coincidences seen, triggers deferred behind a frame.
- **STM L2, 80 bits**: sums formed, frames sent up, sums lost on a busy line,
  triggers passed down, commands passed down.
- **STM L1, 128 bits** (a port): input frames, sums formed, sums passed,
  sums rejected, triggers received, commands received, downlink frames
  dropped on a busy line, downlink frames sent.
- **Tracking STM L1, 80 bits over DAQ**: boards built with `HAS_DAQ = 1`
  (TPC and MWDC in the top) have their own `daq_if`. It returns input
  frames, triggers, commands, dropped frames and sent frames.

## Timing

The following was measured in the end-to-end testbench, with the boards
connected directly and no fibre delay:

| path | cycles | time |
|---|---|---|
| TDM frame start → GTRG at the MTM (T0 delay set to 20) | 38 | 950 ns |
| TDM frame start → trigger frame on an iTOF front-end line | 52 | 1.3 µs |
| GTRG → start bit on a TOF front-end line (via STM L2 and STM L1) | 14 | 350 ns |

The prototype system was measured at a 2.6 µs round trip. That figure
includes the transceivers, fibres and cables, and a 900 ns T0 delay chosen to
match them. The testbench checks that the modelled round trip stays below it.

In the simulation the links add no delay, so the T0/AC delay has to be
shortened to about 20 cycles to line T0 up with the TOF total. With real
fibres, the 36-cycle default is the value used in the beam test.

## Where this RTL departs from, or goes beyond, the published description

- The published description gives the block structure, the uplink frame
  example, the 75 ns window, the trigger equation and firing table, the
  three thresholds and their beam-test values, the 900 ns / 200 ns settings,
  the three running modes, the command set, and the widths of the 32-bit
  mode command and of the 80/128-bit state words.

- The following are this design's own choices:
  - the downlink coding;
  - the DAQ word classes and register map;
  - the contents of the state words;
  - the AC delay;
  - the self-test period;
  - edge detection in the trigger gates;
  - trigger-over-command priority with a one-deep pending trigger;
  - the loss rule for a busy L2 uplink;
  - the spill-gate enable.

- The block diagrams label the MTM's TOF input converters "PISO" and its
  T0/AC converters "SIPO". The text defines the terms the other way round.
  Here every receiver is a deserialiser (`sipo_rx`) and every transmitter a
  serialiser (`piso_tx`).

- The master's block diagram labels all four serial outputs "STM L2 iTOF".
  Here they go to the iTOF, eTOF, TPC and MWDC STM L2 boards, as the
  system overview shows.

- A laser-test trigger is listed among the system's tasks, but no mechanism
  for it is described. The programmable-period self-test mode is the only
  test trigger built.

- The "preprocess" step before each sum is not described. It is taken to be
  time alignment within the window plus saturation.

- The STM L1 diagram sends its 128-bit state word out of an eleventh output.
  Here the state word is a port, and the eleventh output carries the
  trigger like the others.

- Only the tracking STM L1 boards have a DAQ interface, as in their board
  diagram. The TOF, T0, AC, ZDC and pixel STM L1 boards expose their state
  word as a port.

- Not included, because they are not logic that can be written from the
  description:
  - the Xilinx GTP transceivers with their 8b/10b coding, and the SFP
    optics (replaced by direct 16-bit connections);
  - the PLLs (one 40 MHz clock is assumed everywhere, including the DAQ
    side, which runs at 125 MHz on the real boards);
  - remote firmware update through SPI flash;
  - the temperature, humidity and current sensors;
  - the front-end digitisers and the DAQ and clock electronics themselves.

## Files

`rtl/` has one unit per file:

- `cee_trig_pkg.sv`: shared types, codes and register map.
- Link units: `piso_tx`, `sipo_rx`.
- Arithmetic: `mult_sum`, `l1_thr_judge`, `mtm_thr_judge`.
- Trigger path: `delay_widen`, `divider`, `selftest_gen`, `gtrg_logic`.
- Control: `trig_mode_ctrl`, `sync_fifo`, `global_sync`, `fanout_tx`,
  `state_module`, `daq_if`.
- The three boards: `stm_l1`, `stm_l2`, `mtm`.
- The system: `cee_trigger_top`.

Each file opens with a description of its function, ports and cycle timing.

`tb/` has `tb_<module>.sv` for every module. Each testbench:

- computes its expected values independently of the RTL;
- prints `TB_RESULT checks=N failures=M`;
- stops itself through a watchdog if the design hangs.

`tb_cee_trigger_top` runs the full-size system with every parameter at its
default. It:

- decodes all 460 front-end lines independently;
- checks that every trigger and command reaches every line exactly once;
- exercises each mechanism at least once, failing any that never happened:
  - minimum-bias and central classes;
  - AC veto;
  - high and low noise cuts;
  - the STM L1 threshold;
  - STM L2 uplink loss;
  - the divider;
  - cosmic and self-test modes;
  - the spill gate;
  - a trigger deferred behind a command;
  - start, stop and time synchronisation;
  - state read-out over the DAQ links of the MTM, an STM L2 and a tracking
    STM L1.

It runs in well under a minute.

`tb_beam_test` runs the prototype beam-test setup: one STM L1 and one STM L2
per TOF branch, with the beam-test register values. It feeds 300 random
events of the four kinds in the firing table:

| event kind | T0 | iTOF | eTOF | AC | expected result |
|---|---|---|---|---|---|
| on target | yes | yes | yes | no | classified |
| very peripheral | yes | no | yes | no | no trigger |
| off target, upstream | yes | yes | yes | yes | vetoed |
| off target, after the TPC | yes | no | yes | no | no trigger |

A reference model predicts each decision and its class. At the end the
testbench compares the MTM's state counters, read over the DAQ link, with the
model.

## Simulating

With Verilator 5 (two-state simulation; all state is reset, so random
initial values do no harm):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    --top-module tb_cee_trigger_top rtl/cee_trig_pkg.sv tb/tb_cee_trigger_top.sv
./obj_dir/Vtb_cee_trigger_top
```

Replace the top module name to run any other testbench. Adding
`+verilator+rand+reset+2` at run time starts every unreset variable at a
random value, which is a good test of reset coverage.
