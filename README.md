# Real-time power side-channel leakage monitor with adaptive countermeasures

Software running on a processor can leak its secrets through the chip's power
draw even when the code itself is written with countermeasures: the hardware
below it (registers, buses, pipeline stages) creates physical effects that no
compiler controls. This design watches the power draw of the chip while it
runs, decides in real time where on the die leakage shows, and switches a
countermeasure on *only there and only while* the leakage lasts.

It has three layers, one lane per place on the die:

1. **Power sensors.** A grid of ring oscillators spread over the layout. A
   ring oscillator slows down when its local supply sags, so its frequency
   mirrors the power drawn by the logic around it. Each oscillator is read out
   by counting its edges over a sampling window.
2. **Leakage detection.** For every sensor a leakage metric is kept. When the
   metric of a sensor exceeds a high threshold, that sensor's alarm bit is set;
   the alarm vector names the location of the leakage.
3. **Adaptive countermeasure control.** Next to every sensor sits an adaptive
   countermeasure cell (ACC). The detector's alarm turns that ACC on; the
   controller turns it off only once the sensor's metric has fallen below
   `Th_low`.

The host processor of the SoC (a RISC-V core in the reference chip) reaches
all of it as a co-processor through a small register file.

This RTL implements layers 1-3 and the register interface. The ACC itself,
i.e. what countermeasure is applied, is not defined by the design and is left
outside: the top module brings out one enable per ACC.

## Block diagram

```
              droop[i] (local supply drop, physical coupling)
                 |
  +--------------v--------------+        one lane per sensor, N_SENSORS = 16 (4 x 4 grid)
  | ro_sensor  (ring oscillator)|  behavioural model
  +--------------+--------------+
                 | ro_clk[i]
  +--------------v--------------+   sample (every WINDOW clocks)   +--------------+
  | ro_counter                  |<---------------------------------| sample_timer |
  |  Gray counter + synchroniser|                                  +--------------+
  +--------------+--------------+
                 | count[i]
  +--------------v--------------+
  | leakage_detector            |  metric[i] = avg |count[i] - REF[i]|
  |                             |  alarm[i]  = metric[i] > Th_high  ----> alarm[i]
  +--------------+--------------+
                 | alarm[i], metric[i]
  +--------------v--------------+
  | acc_controller              |  OFF -> ON  on alarm
  |                             |  ON  -> OFF if metric < Th_low   ----> acc_en[i] -> ACC i
  +-----------------------------+

  sensor_coproc: processor register bus  <->  CTRL, WINDOW, TH_HIGH, TH_LOW, REF[i]
                                               COUNT[i], METRIC[i], ALARM, ALARM_LOG, ACC_EN, SAMPLES
                                               ALARM_LOG != 0  ----> irq
```

## The two-threshold controller

This is the heart of the adaptive part. A single threshold would switch a
countermeasure on and off every time a noisy metric crossed it. With two
thresholds the cell has memory:

| state | alarm (metric > Th_high) | Th_low <= metric <= Th_high | metric < Th_low |
|-------|------------------|-----------------------------|-----------------|
| OFF   | ON               | OFF                         | OFF             |
| ON    | ON               | ON (hold)                   | OFF             |

The controller holds one such state per ACC and evaluates it only when the
detector delivers new metrics (once per sampling window). The upper
comparison is made in the detector, because its result is also the alarm
that names the leaking site. The lower one is made in the controller. Both
comparisons are strict. The thresholds are shared by all cells and set by
software. If software sets `Th_low > Th_high`, an alarm wins, and a cell turns
off as soon as its metric is no longer above `Th_high`.

The behaviour this produces in a closed loop is the point of the scheme. When
a site leaks, its metric climbs, crosses `Th_high`, and its ACC turns on. If
the countermeasure works, the local power no longer depends on the data, the
metric decays, and once it is below `Th_low` the ACC turns off again. If the
leaking code is still running, the metric climbs again and the cycle repeats.
Protection is spent only in the part of the chip that leaks, and only for as
long as it leaks. The end-to-end testbench shows this cycle several times for
two leaking sites. Every other site stays off throughout.

## The leakage metric

The design fixes *where* the metric lives (one per sensor), *what* it
triggers (the alarm and the ACC) and how it is used (two thresholds). It
leaves the metric itself open. A fixed-versus-random test such as TVLA cannot
be used, because a running program does not sort its inputs into fixed and
random sets. This implementation takes the simplest distribution-based metric
that can run in hardware every window:

* Software first characterises every sensor while the chip runs
  secret-independent (random) activity and stores the mean count as `REF[i]`.
* Every window, each lane forms `dev = |count - REF|`, saturated to
  `METRIC_W` bits, and updates an exponential moving average

  `metric <= metric + floor((dev - metric) / 2^EMA_SHIFT)` (default `EMA_SHIFT = 3`, alpha = 1/8).

The average smooths single noisy windows and makes the metric drift over many
windows, rising and falling smoothly between the two thresholds. Because the
shift rounds towards minus infinity, the average settles up to
`2^EMA_SHIFT - 1` below a constant input and always decays to 0 when the
input is 0. **This metric is this implementation's choice, not part of the
design.** It reacts to any lasting departure from the characterised power
level, not only to data-dependent variation. Replacing it means changing
`metric_next` in `leakage_detector.sv`. Nothing else depends on how the
metric is formed.

## Power sensors and their read-out

`ro_sensor` is a **behavioural model**: an odd ring of inverters is a
combinational loop and has no synthesizable RTL form. In silicon it is a
NAND-enabled inverter chain placed next to the logic it watches. The model's
half period is

`STAGES * (STAGE_PS + DROOP_PS_PER_LSB * droop)` ps,

with 31 stages, 100 ps per stage and 2 ps per droop step by default. That is
about 160 MHz at nominal supply and about 26 MHz at the deepest drop. `droop`
(0..255) stands for the local supply drop; it is how the model is coupled to
the activity around it and is not a pin of the real cell. The ring length,
delays and linear law are model choices.

`ro_counter` counts oscillator edges in the oscillator's own clock domain. The
count is Gray-coded there and crosses into the system clock through two flops,
so a sample is at most one edge off. On every `sample` strobe it outputs the
difference to the previous strobe, modulo 2^`CNT_W`. Edges that arrive in the
last two system clocks of a window fall into the next window; none are lost.
A window must hold fewer than 2^`CNT_W` edges: with the defaults (16 bits,
1024 clocks at 50 MHz) that is up to about 3.2 GHz. One `sample_timer` closes
the windows of all sensors in the same cycle.

## Timing

Take the cycle in which the sample strobe closes a window as `t`:

| cycle | event |
|-------|-------|
| t     | `sample` high |
| t+1   | `count[i]` valid for all sensors, `SAMPLES` incremented next |
| t+2   | `metric[i]` and `alarm[i]` updated |
| t+3   | `acc_en[i]` updated |

So an ACC reacts three clocks after the end of the window in which its metric
crossed `Th_high`. In the testbench the ACC turns on exactly one cycle after
its alarm rises. The sampling window defaults to 1024 system clocks and can be
set from 1 to 65535.

## Register interface

It is a single-beat bus (`lsd_pkg::bus_req_t` / `bus_rsp_t`). A request is
`valid`, `we`, a 10-bit byte address and 32-bit write data. `ready` and the
read data follow exactly one cycle later. Writes take effect in the cycle after
the request. Unmapped reads return 0 and unmapped writes are ignored.
Assertions in `sensor_coproc` check the response timing and word alignment.

| address        | name      | access | meaning |
|----------------|-----------|--------|---------|
| 0x000          | CTRL      | rw     | [0] sensors on, [1] detector on, [2] controller on (reset 0) |
| 0x004          | WINDOW    | rw     | system clocks per window (reset 1024) |
| 0x008          | TH_HIGH   | rw     | Th_high (reset all ones: no alarms until programmed) |
| 0x00C          | TH_LOW    | rw     | Th_low (reset 0) |
| 0x010          | ALARM     | r      | live alarm vector |
| 0x014          | ALARM_LOG | r/w1c  | sticky alarm vector; a new alarm wins over a clear in the same cycle; drives `irq` |
| 0x018          | ACC_EN    | r      | ACC enables |
| 0x01C          | SAMPLES   | r      | windows sampled since reset |
| 0x100 + 4*i    | COUNT[i]  | r      | edges in the last window |
| 0x200 + 4*i    | REF[i]    | rw     | characterised reference count (reset 0) |
| 0x300 + 4*i    | METRIC[i] | r      | leakage metric |

Turning the detector off clears all metrics and alarms. Turning the controller
off turns every ACC off. The vector registers limit `N_SENSORS` to 32.

A typical bring-up: set `CTRL = 1`, let a few windows pass under random
activity, and average `COUNT[i]` into `REF[i]`. Then set `TH_HIGH` and
`TH_LOW`, and write `CTRL = 7`.

## Parameters

| parameter (top)  | default | origin |
|------------------|---------|--------|
| `N_SENSORS`      | 16      | the 4 x 4 sensor/ACC grid of the design's overview |
| `CNT_W`          | 16      | own choice |
| `METRIC_W`       | 16      | own choice |
| `EMA_SHIFT`      | 3       | own choice |
| `WINDOW_RST`     | 1024    | own choice |
| `RO_STAGES`, `RO_STAGE_PS`, `RO_DROOP_PS` | 31, 100, 2 | own choice (model only) |

## What follows the design and what does not

Follows the design:
* ring-oscillator power sensors spread over the chip, one per region, read
  through their frequency;
* a leakage metric per sensor, an alarm that names the leaking location;
* one ACC per sensor, switched on above `Th_high` and off below `Th_low`;
* access from the host processor as a co-processor.

This implementation's own choices:
* the metric (moving average of the deviation from a characterised
  reference);
* the edge-counting read-out with its Gray-code crossing, and the window
  length;
* the register bus, the register map and the reset values;
* the sticky alarm log and the interrupt;
* all widths; the strict comparisons; evaluating only once per window;
* the oscillator's delay law.

Not built:
* **The ACC.** What countermeasure a cell applies is not defined, so only its
  enable exists (`acc_en[i]`).
* **A power-model alternative to the sensors.** Estimating power on chip
  from a model of the logic, instead of measuring it with oscillators, is
  named as a possible direction but not specified; only the oscillator
  sensors of the reference chip are implemented.
* **The host processor, its on-chip RAM and the pads.** These belong to the
  SoC around the monitor. The reference chip's RAM is eight SRAM macros of
  8192 x 8.

Synthesis: every module except `ro_sensor` is synthesizable. The top
instantiates the behavioural oscillators, so for silicon they must be replaced
by real oscillator cells with the same three ports. `rst_n` is used as an
asynchronous reset in the flops and synchronously in the protocol assertions,
which lint tools report; that is intended.

## Files

`rtl/`
* `lsd_pkg.sv`: sizes, bus structs, register map, controller state type
* `ro_sensor.sv`: ring-oscillator model (behavioural)
* `ro_counter.sv`: oscillator read-out
* `sample_timer.sv`: common window strobe
* `leakage_detector.sv`: metric and alarm per sensor
* `acc_controller.sv`: two-threshold ACC control per sensor
* `sensor_coproc.sv`: register interface
* `leakage_monitor_top.sv`: everything wired together

`tb/`: one self-checking testbench per block. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.
* `tb_ro_sensor`: oscillator period against the delay law, enable
* `tb_ro_counter`: counts within one edge, running total, valid timing, counter wrap (8-bit)
* `tb_leakage_detector`: metrics and alarms against an integer model, saturation, disable
* `tb_acc_controller`: hysteresis against a model, hold between thresholds, disable
* `tb_sensor_coproc`: every register, sticky log, response timing
* `tb_leakage_monitor_top`: the whole monitor at its default size. It
  characterises the 16 sensors and checks every count against the
  oscillator's frequency. Then it lets two sites leak and checks their
  metrics against a model fed from the bus. It checks that ACCs turn on and
  off repeatedly at those two sites only, that the alarm log names them, and
  that the interrupt works. Finally it shortens the sampling window and
  checks the new cadence and counts. It counts windows, alarms, turn-ons,
  turn-offs, hysteresis holds, interrupts and window changes, and each must
  occur. It takes about
  4 ms of simulated time (a few seconds).

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -y rtl -y tb rtl/lsd_pkg.sv tb/tb_leakage_monitor_top.sv \
  --top-module tb_leakage_monitor_top -o sim
obj_dir/sim
```

Replace the testbench name to run another one. `--timing` is needed for the
oscillator model and the testbench clocks. Lint warnings remain for unused
package constants, the asynchronous/synchronous use of `rst_n`, and the
oscillator's data-dependent delay.
