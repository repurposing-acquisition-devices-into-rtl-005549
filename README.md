# Timing Hub: trigger-based time reconstruction with transient recorders

Breakdown events in a high-voltage vacuum system are short (about 100 µs of
damped ringing below 10 MHz), random in time, and seen by acquisition boards
that sit far apart, are electrically floating, and do not share a clock. The
usual answer is clock distribution (PTP, White Rabbit) and timestamping at
every board. This design does without it. When any board sees the event it
emits a trigger pulse, and all those pulses meet at a central **Timing Hub
(THub)**. The hub does two things with them:

* it **dispatches** every incoming trigger to the other boards, so that all of
  them record the same event;
* it **records** the logic state of all its trigger lines as a transient, one
  bit per line, sampled at 125 MHz. The recorded window shows in which order
  the triggers arrived and how many 8 ns samples apart.

Each recorded arrival time is then corrected offline for the calibrated
delay of its own path: fiber time of flight, converters, and processing in
the sending board and in the hub. The result is the true relative timing of
the boards' own trigger instants, and hence of their waveforms. Only the hub's
clock matters, and only for the few microseconds the triggers take to arrive.
Hubs can be chained into a tree: a child hub looks like one more device to its
parent.

The hub is a small FPGA board running an oscilloscope-style transient
recorder, with the ADC parallel bus rerouted to six LVDS trigger inputs. The
recorder stores each trigger line where an ADC bit would have been. The
SystemVerilog here models that recorder, the trigger dispatch matrix, the
capture path and a round-trip calibration unit, and joins them into one hub.

## Block diagram

```
 trig_in[5:0] ──┬──────────────► trig_plex ──────────► OR ──► trig_out[5:0]
 (from fibers)  │               (route_map, no self-route)  ▲     (to fibers)
                │                                          │ pulse
                └─► trig_capture ──┬─► transient_recorder ──► m_axis_* (windows)
                    2-FF sync,     │   rec_trigger            rec_trig_out
                    bit i = port i │   rec_buffer (16384 x 16)
                                   └─► self_cal ──► cal_round_trip, cal_done
```

| file | role |
|---|---|
| `rtl/thub_pkg.sv` | shared constants and types: port count, widths, configuration structs, state enum |
| `rtl/trig_plex.sv` | combinational dispatch matrix |
| `rtl/trig_capture.sv` | synchronizer; packs the six lines into the ADC sample word |
| `rtl/rec_trigger.sv` | trigger condition (level, external, software) and duration check |
| `rtl/rec_buffer.sv` | dual-port block RAM used as the circular buffer |
| `rtl/transient_recorder.sv` | armed / check / post / read state machine, window locking, readout, re-arm, trigger-out |
| `rtl/self_cal.sv` | round-trip calibration: fires a pulse out of one port, counts clocks until the answer returns |
| `rtl/thub_top.sv` | one hub |

Everything runs on a single 125 MHz sample clock with an active-low asynchronous
reset. `trig_in` is asynchronous; every other input is synchronous to the clock.

## Dispatch: `trig_plex`

`route_map[i][j] = 1` forwards port *i* to port *j*:
`trig_out[j] = OR over i≠j of (trig_in[i] & route_map[i][j])`. The diagonal
is ignored in logic. A trigger can therefore never go back out of the port it
came in on. This one rule is what makes chains and trees of hubs safe. Hub A
forwards a trigger to hub B, and B forwards it to all its other ports but never
back to A. Echoes from devices behind B do return to A, but only as new edges
on a line that is already high. The matrix is purely combinational, so the
forwarding delay is only the gate and pad delay.

## Recording: `transient_recorder`

### States

```
IDLE --arm--> ARMED <--> CHECK --validated--> POST --post count reached--> READ
                ^                                                           |
                +------------------ last beat accepted, multi = 1 ----------+
                                    (multi = 0: back to IDLE)
`stop`: IDLE from any state
```

* **ARMED**: every valid sample is written to the circular buffer, whose
  write pointer wraps freely.
* **CHECK**: the trigger condition has been seen on the current sample and
  must last `hold` consecutive valid samples (`hold` = N_th; 0 is treated
  as 1). If it drops, the recorder returns to ARMED and the count restarts.
  Samples are still written.
* **Validation**: this happens on the sample that completes the count, which
  is the *trigger sample*. In that cycle the recorder latches the source flags
  and the buffer address, and increments `event_count`. It then starts a
  `TRIG_OUT_LEN`-cycle pulse on `trig_out`, beginning the next cycle. It also
  locks the pre-trigger length: `pre_len = min(cfg.pre, samples written since
  arming)`. A trigger that comes soon after arming therefore gives a shorter
  pre-trigger part instead of stale data.
* **POST**: writes continue until `post` samples, the trigger sample
  included, are stored.
* **READ**: acquisition is suspended, and input samples are dropped. The
  window of `pre_len + post` samples goes out oldest first on the AXI-Stream
  port. `m_tlast` marks the last sample, and `m_tuser` carries the trigger
  source flags `{sw, tr, th}`.

Configuration is captured at arm and at each re-arm. `post` is clamped to
1..DEPTH and `pre` to DEPTH − post, so a window never overwrites itself.

### Trigger sources (`rec_trigger`)

The recorder listens to all enabled sources at once:

* `th`, the level trigger: the sample, read as unsigned, is **greater than**
  `threshold`. In a hub the threshold is 0, so any set trigger bit fires.
* `tr`, the external trigger: a level input.
* `sw`, the software trigger: a one-cycle command, held until it is
  validated so that it also passes a `hold` above 1.

### Cycle timing

* The trigger sample is the one present in the cycle where `fire` is high.
  With `hold = N`, that is N−1 samples after the condition first appears.
  This is the N_th/f_s term of the threshold-trigger delay below.
* `trig_out` rises one clock after the trigger sample.
* The first output beat is valid two clocks after the last post-trigger write.
  With `m_tready` held high, one sample leaves per clock, and READ lasts W + 1
  clocks for a W-sample window. Under backpressure, data and `tlast` hold
  (there is a concurrent assertion for this).
* In a hub, an edge on `trig_in` reaches the recorder two clocks later, through
  the synchronizer. These fixed clocks are part of the hub processing delay
  t_p and are the same for every port.

## Reading a window

Bit *i* of every recorded sample is port *i*. The relative times come from the
first rising edge of each bit, counted from the first bit that rises.

```
times[*] = -1; mask = 1 << parent_port     # parent_port: the link to the parent hub, if any
first = none
for id, s in enumerate(window):
    new = s & ~mask
    if new:
        mask |= new
        for each bit i in new:
            if first is none: first = id
            times[i] = (id - first) * 8 ns
```

The parent port is masked because its trigger is the parent's echo, not a
local event. Each time is then back-projected to the instant the event
happened at its source:

    t_true,i = t_s,i − (t_dl,i + t_p)
    t_dl,i   = l_i · τ_fiber + Δ_tr,i   (device triggered externally)
             = l_i · τ_fiber + Δ_th,i   (device triggered by its own threshold)
    Δ_th     = Δ_d + N_th / f_s

`m_tuser` tells which case applies to the hub's own window. For a device, the
recorder on that device records its source the same way. Only the trigger-out
path of a device enters t_dl; its trigger-in path only starts it. A child
hub's times are moved into the parent's time base by adding the calibrated
parent-to-child link delay, and this is applied recursively from the root.
Where the reference instant is needed, the child's parent-port edge anchors
its window to the parent.

Calibration values used in the facility this method comes from, and in the
tree testbench:

| quantity | value |
|---|---|
| 100 m hub-to-hub fiber | 450 ns |
| 30 m hub-to-device fiber | 140 ns |
| Δ_tr, external-trigger latency of a device | 100 ns |
| t_p, hub internal delay | 80 ns |
| Δ_d, device activation time | 85 ns |
| sample period | 8 ns |

The fiber delays can be measured as round trips through the hub itself. For
hub to hub: send a trigger out of a port and see the echo come back. For a
device: its external-trigger response gives `2·l·τ + Δ_tr`. The threshold
delay has to come from the device.

## Calibration: `self_cal`

The hub can take these round trips itself. A `cal_start` pulse latches
`cal_tx_port` and `cal_rx_port`. From the next clock the unit drives a
`TRIG_OUT_LEN`-cycle pulse out of `cal_tx_port`, OR-ed with the dispatch
matrix output. It then counts clocks until the first rising edge on the
synchronized line of `cal_rx_port`. A line that is already high at the start
must first fall. The count appears on `cal_round_trip` together with a
one-cycle `cal_done`. If no edge comes within 2^`CAL_CNT_W` − 1 clocks,
`cal_timed_out` is set. With the two-stage synchronizer,
`cal_round_trip = ceil(RT / 8 ns) + 1`, so the round trip RT is
`(cal_round_trip − 1) · 8 ns`, within one sample. Arm the recorder after
calibrating, or the calibration pulses will be recorded as events.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_PORTS` | 6 | trigger ports per hub (six LVDS inputs on the board) |
| `DEPTH` | 16384 | buffer depth in samples; must be a power of two. 16384 × 8 ns = 131 µs, enough for a 100 µs breakdown window plus 3884 pre-trigger samples |
| `SYNC_STAGES` | 2 | synchronizer depth on the trigger lines |
| `TRIG_OUT_LEN` | 8 | recorder trigger-out pulse width and calibration pulse width, in clocks |
| `CAL_CNT_W` | 16 | calibration counter width; the timeout is 2^CAL_CNT_W − 1 clocks (524 µs) |
| `thub_pkg::ADC_BITS` | 14 | width of the ADC bus the lines replace; bits 13:6 read 0 |
| `thub_pkg::SAMPLE_W` | 16 | sample word width |
| `thub_pkg::CNT_W` | 24 | width of `pre`, `post` and `hold` |

Run-time configuration (`thub_pkg::rec_cfg_t`): `trig.lvl_en`, `trig.ext_en`,
`trig.threshold`, `trig.hold`, `pre`, `post`, `multi`. For hub operation use
`lvl_en = 1`, `threshold = 0`, `hold = 1` and `multi = 1`.

## What follows the source method and what is this design's own

The following follow the published hub:

* the six trigger ports;
* 125 MHz sampling of the rerouted ADC bus;
* the zero threshold ("any bit");
* dispatch with no reflection to the source port;
* the recorder's sequence: armed writing into a circular block-RAM buffer,
  a checking state for the trigger duration, event registration with a locked
  pre-trigger window, post-trigger writing, a suspended acquisition while the
  window is read out over AXI-Stream, automatic re-arm, a trigger-out per
  event, and the trigger source recorded per transient;
* the reconstruction and back-projection rules;
* all calibration numbers.

The following are this design's choices, because the source does not give them:

* **Buffer depth** 16384 × 16 bit. The source only says the whole internal
  memory is used.
* **Which side of the lines is recorded.** The recorder samples the incoming
  `trig_in` lines, so each bit is one device's trigger-out. It does not sample
  the dispatched outputs.
* **Bit order**: bit *i* = port *i*.
* **Synchronizer**: two flip-flops.
* **Combinational dispatch matrix.**
* **Level comparison** is unsigned and strictly greater than the threshold.
* **Duration check** applies to all sources, and a software command is held
  until validated.
* **Trigger sample**: the trigger instant is the validated sample, and the
  pre-trigger length is the minimum of the request and the data available.
* **Clamping** of `pre` and `post`.
* **Stream sideband**: `tlast` and `tuser` usage.
* **Trigger-out** pulse width.
* **Control interface**: plain ports instead of a processor bus.
* **Calibration unit**: the source proposes having the hub send a trigger and
  measure the round trip on the same line, but it calibrated by hand. The
  edge-to-edge counter, pulse width, timeout and port selection here are this
  design's own.

The following are not modelled in RTL:

* LVDS receivers and level shifters, the optical links and converters, and
  the bypassed ADC;
* the processor, DMA to DDR and the control software;
* the offline reconstruction and the NTP absolute-time stamping. The
  reconstruction is reimplemented in the testbenches as the reference;
* the streaming acquisition mode of the recorder module, which the hub does
  not use.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
They assume a 1 ns time unit.

| testbench | what it shows |
|---|---|
| `tb_trig_plex` | 2000 random maps and inputs against the dispatch rule; all-to-all, diagonal-only and parent/child maps |
| `tb_trig_capture` | every sample equals the line state two clocks earlier; upper bits zero; valid after reset |
| `tb_rec_trigger` | threshold 0 and above-threshold firing, glitch rejection under `hold`, invalid samples not counted, external and software sources, disable, random runs against a reference counter |
| `tb_rec_buffer` | random write/read with stalls against a model array; read-during-write returns the old word |
| `tb_transient_recorder` | `DEPTH` = 64. Sample data carries its own index, so each window must be an exact index range. Covers single shot, short pre-trigger lock, glitch rejection, re-arm, backpressure with input gaps, stop, external and software triggers, clamping, a full window after wrap-around, trigger-out width and delay, and READ length = W + 1 |
| `tb_thub_top` | three hubs at default parameters in a tree (450 ns and 225 ns links; 140 ns and 280 ns device fibers), each hub on its own clock phase, with behavioural devices and fibers. Two breakdown scenarios; all relative times within one sample of the values expected from the delays; back-projection recovers 100 ns and 200 ns separations, also across hubs; counts dispatch, blocked reflection, backpressure, re-arm, parent masking and trigger-out. Before arming, hub 1's calibration unit measures the D1 and D2 device round trips and the round trip through the link to hub 2 and its devices; each result must be within one sample of the modelled delay |
| `tb_self_cal` | pulse width and port; counts for random delays and port pairs against the expected value; a line already high at start; start ignored while busy; timeout |
| `tb_thub_bd_window` | one hub at default size records a full 16384-sample window (3884 pre + 12500 post = a 100 µs breakdown); every sample is checked against the applied line states |

Helpers: `tb/fiber_link.sv` (transport delay) and `tb/device_model.sv` (a
device that answers a trigger-in after Δ_tr, or a local event after Δ_th,
then stays busy).

To simulate one testbench with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv rtl/thub_pkg.sv tb/tb_thub_top.sv --top-module tb_thub_top
./obj_dir/Vtb_thub_top
```

Each run takes well under a second. To lint the hub, run
`verilator --lint-only -Wall rtl/thub_pkg.sv rtl/*.sv --top-module thub_top`.
The remaining lint warnings are expected. The package constant `SAMPLE_NS`
is used only by testbenches, and `rst_n` appears both in the asynchronous
reset and in the assertion's `disable iff`.
