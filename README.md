# Kicker trigger controller for the HIRFL-CSR ring-to-ring transfer

At the HIRFL-CSR in Lanzhou, a heavy-ion beam is accumulated, cooled and
accelerated in the main ring (CSRm). It is then kicked out, sent through the
RIBLL2 transfer line and kicked into the experimental ring (CSRe). Six pulsed
power supplies drive the CSRm extraction kicker. Four more drive the CSRe
injection kicker. Each supply needs a charging trigger and a discharging
trigger. The discharge must come at the right moment relative to the bunch:
if it comes too early or too late, the kick misses the bunch or only
partly kicks it.

The ring has no bunch phase probe. The bunches are locked to the ring's RF,
though, so the RF phase shows where they are. The controller therefore:

1. waits for the timing system's *kicker event code* (0xC00F0001), which marks
   the extraction step of the machine cycle;
2. checks that the RF really is at the *extraction vertex frequency*, the top
   plateau of the cycle's frequency ramp (0.870633 MHz in the reference run),
   by measuring the RF period over and over;
3. takes the next RF rising edge as the time reference T0;
4. counts from T0 on a 400 MHz clock and fires every trigger after its own
   delay. The delays have 2.5 ns resolution and can be set one by one.

This repository holds the FPGA logic of such a controller, written in
SystemVerilog. It is a reconstruction from a published description of the
system (an ARM + DSP + FPGA board with a 400 MHz Cyclone III), which
describes the functions but not the circuit. Everything below marked *design
choice* is this implementation's own decision.

## Block structure

```
 evt_valid/evt_code ─► event_code_match ──hit──┐
                                               ▼
 rf_in ─► rf_phase_detector ──rf_rise,locked─► kick_sequencer ──fire (T0)──┐
                ▲                                   ▲                      │
                │ vertex period, tolerance,         │ enable               ▼
                │ lock count                        │         ┌─ delay_channel ─► csrm_charge[5:0]
 host bus ─► kick_regs ─────── delays, width ───────┴────────►├─ delay_channel ─► pretrig_diag
                ▲                                             ├─ delay_channel ─► pretrig_phys
                └──── status (state, lock, period, counts)    ├─ 6 × delay_channel ─► csrm_discharge[i]
                                                              └─ 4 × delay_channel ─► csre_discharge[j]
```

| module | role |
| --- | --- |
| `kick_pkg` | widths, register map, reset values, `kick_cfg_t` / `kick_status_t` structs, sequencer state enum |
| `event_code_match` | compares each received 32-bit event code with the programmed one and gives a one-cycle `hit` |
| `rf_phase_detector` | synchronises the RF square wave, marks rising edges, measures the period in ticks, decides lock |
| `kick_sequencer` | IDLE → ARMED → FIRING state machine that issues the common start strobe `fire` (T0) |
| `delay_channel` | a down-counter delay and pulse generator: one per trigger output |
| `kick_regs` | host-writable settings and read-back status |
| `kicker_ctrl_top` | wires it together: 13 delay channels driving 18 outputs |

Parts that sit around the FPGA logic are not modelled: the PLL that makes the
400 MHz clock, the ARM11 host with its web server and operator page, the DSP,
the timing-event receiver, the RF analog front end, the fibre-optic
transmitters and the power supplies. Their signals are ports of
`kicker_ctrl_top`.

## From RF edge to trigger: the timing chain

Everything runs on one 400 MHz clock, so one tick is 2.5 ns. There is no
delay line and no monostable. Every trigger is a counter that starts from
the same strobe, so all outputs keep a fixed phase relation to the captured
RF edge and do not drift.

The latency is fixed and exact. Take an RF rising edge that arrives at `rf_in`
in clock cycle *e*:

| cycle | what happens |
| --- | --- |
| e+1, e+2 | two synchroniser flip-flops |
| e+3 | `rf_rise` is high (registered edge detect); `period`, `match_count` and `locked` update |
| e+4 | `fire` is high if the sequencer was ARMED and `locked` was high in cycle e+3 |
| e+5+D | an output with total delay D (ticks) goes high |
| e+5+D+W | it goes low again; W is the pulse width (400 ticks = 1 µs after reset) |

Because `rf_in` is asynchronous, the real edge falls somewhere within the
2.5 ns before the sampling clock edge. That quantisation is the controller's
resolution. The fixed 5-cycle (12.5 ns) offset is the same for every output,
so it cancels out between channels. It can also be folded into the group
delays.

### Total delay of each output

| output | delay from T0 (ticks) |
| --- | --- |
| `csrm_charge[5:0]` | 0 (all six together) |
| `pretrig_diag` | `DIAG_DELAY` |
| `pretrig_phys` | `PHYS_DELAY` |
| `csrm_discharge[i]` | `INTERVAL + CSRM_DELAY + CSRM_CH[i]` |
| `csre_discharge[j]` | `INTERVAL + CSRE_DELAY + CSRE_CH[j]` |

The three-part discharge delay follows the fields of the system's operator
page. `INTERVAL` is the charge-to-discharge interval. The group delay is
common to one ring's supplies. The channel delay trims each supply on its own.
Adding the three parts together is a *design choice*. In the reference run,
the CSRm group delay is 1500 ns (600 ticks) and the CSRe group delay is 680 ns
(272 ticks). The CSRe kicker is told to fire earlier because its trigger has
to cover about 200 m of signal path to the CSRe supplies, while the bunch
covers the distance between the two kickers. With pre-trigger delays of 0 the
pre-triggers lead the discharge triggers by a few microseconds (about 3.6 µs
in the reference run). Beam diagnostics and experiments use that lead time to
get ready.

## Finding the vertex frequency

During one machine cycle (20–35 s) the RF sweeps up to an injection plateau
(about 0.5 MHz), sweeps up again to the extraction plateau, and falls back to
zero after extraction. A kick is allowed only on the extraction plateau.
`rf_phase_detector` counts clock ticks between successive RF rising edges:

* a period within `VERTEX_PERIOD ± PERIOD_TOL` ticks adds one to `match_count`;
* a period outside that window, or no edge for longer than
  `VERTEX_PERIOD + PERIOD_TOL` ticks (the RF has stopped), clears `match_count`;
* `locked = match_count ≥ LOCK_PERIODS`.

At 0.870633 MHz one period is 400 / 0.870633 = 459.43 ticks. The measured
period is therefore 459 or 460, and the reset window is 459 ± 2. The source
says the frequency is compared "tens of thousands of times" to identify the
vertex frequency. `LOCK_PERIODS` resets to 10000, which takes about 11.5 ms at
the vertex frequency. The plateau lasts much longer than that. The period
window, the tolerance and the choice of the rising edge are *design choices*.

## Sequencer

`kick_sequencer` has three states:

* **IDLE**: when `event_hit` arrives and `enable` is set, it goes to ARMED.
* **ARMED**: it waits for an `rf_rise` while `locked` is high. That edge is
  the capture. It raises `fire` for one cycle, counts the capture and goes to
  FIRING. Clearing `enable` in this state drops back to IDLE.
* **FIRING**: it waits until no delay channel is busy any more, then returns
  to IDLE.

An event that arrives while ARMED or FIRING is ignored. There is no timeout
while ARMED. If the RF never locks, the controller waits until it is disabled
or reset. All of this is a *design choice*; the source does not say.

## Register map

32-bit words on a simple synchronous bus: `bus_we`, a 6-bit word address and
`bus_wdata`. `bus_rdata` is a combinational read of `bus_addr`. The bus
protocol is a *design choice*: the host-to-FPGA interface is not described in
the source. All times are in ticks of 2.5 ns, and the host converts from ns
or µs.

| addr | name | reset | meaning |
| --- | --- | --- | --- |
| 0x00 | CTRL | 1 | bit 0: enable arming |
| 0x01 | EVENT_CODE | 0xC00F0001 | kicker event code |
| 0x02 | VERTEX_PERIOD | 459 | RF period at the vertex frequency (0.870633 MHz) |
| 0x03 | PERIOD_TOL | 2 | allowed deviation, ticks |
| 0x04 | LOCK_PERIODS | 10000 | consecutive matching periods for lock |
| 0x05 | INTERVAL | 0 | charge → discharge interval |
| 0x06 | CSRM_DELAY | 600 | CSRm group discharge delay (1500 ns) |
| 0x07 | CSRE_DELAY | 272 | CSRe group discharge delay (680 ns) |
| 0x08 | DIAG_DELAY | 0 | beam-diagnostics pre-trigger delay |
| 0x09 | PHYS_DELAY | 0 | physics-experiment pre-trigger delay |
| 0x0A | PULSE_WIDTH | 400 | trigger width (1 µs); 0 acts as 1 |
| 0x10–0x15 | CSRM_CH0..5 | 0 | per-supply CSRm delays |
| 0x18–0x1B | CSRE_CH0..3 | 0 | per-supply CSRe delays |
| 0x20 | STATUS (ro) | | [31:30] state, [29] locked, [15:0] match_count |
| 0x21 | MEAS_PERIOD (ro) | | last measured RF period |
| 0x22 | COUNTS (ro) | | [31:16] kicker events seen, [15:0] captures |

Unmapped addresses read as 0 and ignore writes. The 32-bit delay counters
reach 10.7 s, far more than any kick timing needs. The 16-bit period counter
covers RF frequencies down to about 6.1 kHz.

## Departures and open points

* **Event link.** Event codes arrive as a 32-bit word with a valid strobe,
  already in the 400 MHz domain. The real link and its decoding are not
  modelled.
* **Charge timing.** All six CSRm charge triggers fire together at T0. The
  CSRe supplies get only discharge triggers. The source describes charge and
  discharge triggers for the CSRm and a discharge trigger for the CSRe, but
  not when charging starts.
* **Conflicting CSRm setting.** The operator-page screenshot shows 0 ns for
  the CSRm discharge trigger, while the parameter list says 1500 ns. The reset
  value follows the list (1500 ns).
* **Not implemented.** The operator page also shows an "Event Frequency" field
  (391000 Hz) and twelve on/off switches. Their function is not explained.
  Remote switching of supplies is described only as a future plan.
  Reference-voltage setting (RS485 to a separate module) is on another board
  and is also only a future plan.
* **Single clock.** The 400 MHz clock is assumed to come from an on-chip PLL.
  Closing timing at 400 MHz on a real FPGA may need the 32-bit delay adders in
  `kicker_ctrl_top` pipelined or moved to the host. They are combinational
  here. Their inputs change only on register writes, so they are stable when
  `fire` samples them.

## Simulation

Each block has a self-checking testbench in `tb/`. Each one prints a single
`TB_RESULT checks=N failures=M` line and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/kick_pkg.sv tb/tb_kicker_ctrl_top.sv --top-module tb_kicker_ctrl_top
./obj_dir/Vtb_kicker_ctrl_top
```

Substitute any other testbench name (`tb_delay_channel`, `tb_event_code_match`,
`tb_rf_phase_detector`, `tb_kick_sequencer`, `tb_kick_regs`, `tb_machine_cycle`).

* `tb_delay_channel`: random delays and widths. The rise must come exactly
  D+1 cycles after the start cycle, and the pulse must last max(W,1) cycles.
  A restart while counting must re-time the channel.
* `tb_event_code_match`: the kicker code, codes that differ from it in one
  bit, the other steps' codes and random words, checked against a reference
  count.
* `tb_rf_phase_detector`: RF driven at exact integer-tick periods. It steps
  through a 0.5 MHz plateau (no lock), the vertex frequency (lock after exactly
  `LOCK_PERIODS` matches), jitter within tolerance, one bad period, and RF
  loss. Every `rf_rise`, period and lock decision is compared with a model.
* `tb_kick_sequencer`: directed cases plus 20000 random cycles against a
  cycle-accurate model.
* `tb_kick_regs`: reset values worked out by hand from the reference settings,
  then random writes and read-back.
* `tb_kicker_ctrl_top`: runs the whole controller at its default (reset)
  settings, including the full 10000-period lock. It runs about 5 million
  cycles, which takes a few seconds. It fires five extractions: reset
  settings, per-supply delays of 2068/2128/2095/2208/2468/2008 ns as on the
  operator page (rounded to ticks) with a 1 µs interval, and three random
  settings. For each shot it predicts the rise cycle of all 18 outputs from
  the RF edge it drove (e+5+D) and checks it to the cycle. It also checks the
  pulse widths and that every output fires exactly once. It counts that each
  mechanism happened: foreign event codes ignored, waiting for lock, lock
  gained and lost, capture, and abort.
* `tb_machine_cycle`: two whole machine cycles with compressed time. Each
  cycle has RF off, a sweep to the 0.5 MHz plateau, accumulation, a slow
  sweep through the lock window to the vertex frequency, storage, extraction
  and a sweep back down. It uses the reset lock count of 10000. It checks that
  no sweep locks, that lock comes exactly 10000 matching periods into the
  plateau, that each cycle gives exactly one shot, timed to the cycle, and
  that a kicker event during recovery fires nothing. It runs about
  17 million cycles, which takes about 15 s.

To change the channel counts, edit `N_CSRM` / `N_CSRE` in `kick_pkg`. The
register map has room for 8 channels per ring. To change the reset settings,
edit the `RST_*` constants there.
