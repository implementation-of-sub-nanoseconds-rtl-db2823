# Sub-nanosecond vernier TDC in a muon-telescope sensor FPGA

A muon telescope for volcano radiography is built from scintillator planes. Each
plane is read by its own "smart sensor": two 32-channel front-end chips, an ADC,
an FPGA, a FIFO and a small Linux processor. All sensors share a 20 MHz clock
bus and a one-pulse-per-second (PPS) signal. Each FPGA multiplies the clock to
100 MHz and runs a local counter that PPS resets, so the clock alone gives every
event a timestamp in 10 ns steps. To tell muons that cross the telescope forward
from those going backward (and from random coincidences), the time of flight
between planes must be measured about fifty times more finely.

The design in this repository adds that fine time inside the FPGA, with no
extra hardware. Two ring oscillators with slightly different periods, T0 ≈ 2.2 ns
and T1 = T0 − Δt with Δt ≈ 0.2 ns, form a **vernier**:
- the trigger starts the slow one;
- the next 100 MHz clock edge starts the fast one;
- the fast oscillator gains Δt per period on the slow one, and a phase detector
  notices when it has caught up.

The two period counts N0 and N1 at that moment give the position of the trigger
inside the 10 ns clock period, with a step of Δt. Two on-line calibrations
measure T0 and Δt against the 100 MHz clock, because both depend on the FPGA
routing and differ from chip to chip.

The SystemVerilog models the sensor FPGA completely: the TDC, its calibration,
the time base, trigger selection, the front-end readout sequencer and the
writer into the external FIFO. Behavioural models stand in for the two parts
that only exist as FPGA primitives: the ring oscillators and the PLL.

## Block structure

```
 clk20 ─► pll_x5 ──► clk100 ─┬─► timestamp_counter (PPS reset) ─► timestamp, cycle, pps_flag
                             │
 fe_trig[1:0], ext_trig ─► trigger_logic ─► trig ─┐      (LED pulse generator ─► led_pulse)
                                                  ▼
                     tdc_calibration ─► int_trig ─► vernier_tdc ◄──► ring_oscillator (slow, T0)
                        (owns the TDC while busy)     │   ▲ ◄──► ring_oscillator (fast, T1)
                                                      │   └ phase_detector, tdc_counter ×2
                                 fast_en (stop), ready, N0, N1
                                                      ▼
                     fe_readout: hold, mux_clk, adc_conv, adc_data ─► event words
                                                      ▼
                     fifo_writer: cycle word priority, drops on full, IRQ ─► fifo_wdata/fifo_wen
```

| File | Contents |
|---|---|
| `rtl/tdc_pkg.sv` | Widths, word tags, configuration (`cfg_t`) and status (`status_t`) records |
| `rtl/ring_oscillator.sv` | Gated ring oscillator: an AND gate and three inverters, one delay per stage and edge (behavioural) |
| `rtl/phase_detector.sv` | Two flip-flops clocked by the fast oscillator that sample the slow one |
| `rtl/tdc_counter.sv` | The N0 / N1 period counters: asynchronous clear, a stop input |
| `rtl/vernier_tdc.sv` | Start, stop and latch flip-flops, the phase detector and both counters |
| `rtl/tdc_calibration.sv` | T0 and Δt calibration sequencer |
| `rtl/timestamp_counter.sv` | 27-bit 100 MHz counter, PPS synchronizer, 8-bit cycle number |
| `rtl/trigger_logic.sv` | Trigger source select: chip OR, chip AND, external. LED pulse generator |
| `rtl/fe_readout.sv` | Event sequencer: timestamp latch, hold, TDC word, 5 MHz multiplexed ADC readout, zero suppression |
| `rtl/fifo_writer.sv` | Merges cycle words and event words into the FIFO. Occupancy, drops, interrupt |
| `rtl/pll_x5.sv` | 20 MHz to 100 MHz clock multiplier (behavioural) |
| `rtl/tdc_sensor_fpga.sv` | The top: the sensor FPGA |

Every file uses `` `timescale 1ns / 1fs ``. The oscillator stage delays are in
the tenths of a nanosecond and differ by about a picosecond. A 1 ps precision
would round them and make the two oscillators' edges coincide artificially.

## The vernier measurement

### Sequence

Three flip-flops control one measurement. The TDC clear line resets them all.

1. **Start.** The start flip-flop (D = 1) is clocked by the trigger itself.
   Its output enables the slow oscillator, which makes its first rising edge
   T0 after the trigger.
2. **Stop.** The stop flip-flop (D = start) is clocked by the 100 MHz clock.
   The first clock edge after the trigger sets it. That enables the fast
   oscillator, whose first rising edge comes T1 after that clock edge.
   The stop output also tells the readout that an event has begun, and
   the readout latches the coarse timestamp on that same edge.
3. **Catch-up.** The fast oscillator starts T later than the slow one
   (0 < T ≤ 10 ns) and gains Δt each period. So after about
   (T mod T0)/Δt periods, a fast rising edge passes a slow rising edge.
4. **Phase detection.** On each fast rising edge the phase detector samples
   the slow oscillator into q1, and q1 into q2. Since the fast edges drift
   earlier within the slow cycle, the sampled level is 1 while each fast edge
   sits just after a slow rising edge. It turns 0 once the fast edge has moved
   in front of that rising edge. `phase = q2 & ~q1` marks this 1-to-0 change
   and is high for one fast period.
5. **Latch.** The phase pulse clocks the latch flip-flop (D = 1). Its output
   `ready` (the read request) stops both counters. Counter N0 counts slow
   rising edges and N1 counts fast rising edges.

### What N0 and N1 mean

The simulated model obeys the following relation exactly (checked over
hundreds of trigger positions):

```
T = N0·T0 − N1·T1 + T0 − e,        0 ≤ e < Δt
  = (N0 − N1)·T0 + N1·Δt + T0 − e
```

Here T is the time from the trigger to the stop clock edge. The textbook
vernier formula is T = (N0 − N1)·T0 + N1·Δt. This implementation adds a
constant T0, which comes from the latch stopping the counters one slow edge
late. Like the cable and synchronizer delays, it is a fixed offset, and a
per-sensor offset calibration removes it. The residual e is the quantization
of the vernier, uniform over one Δt.

The event time inside the DAQ cycle is then:

```
t_event = timestamp · 10 ns − T
```

Both outputs are in the data words, so the processor or the event builder can
do this arithmetic.

### Counter widths and dead time

For T0 = 2.2 ns and Δt = 0.2 ns:
- N1 is at most T0/Δt + 1 ≈ 12;
- N0 is at most N1 + 10/T0 + 1 ≈ 17;
- `ready` rises at most ≈ 25 ns after the stop edge.

The 8-bit counters therefore have plenty of headroom. The TDC dead time grows
with T0/Δt, so finer resolution costs dead time. The readout gives up on the
TDC after 64 clocks (640 ns). If that happens, the TDC word carries `valid = 0`.

### Metastability

The stop flip-flop samples an asynchronous start. The phase detector samples
one free-running oscillator with the other. Both can go metastable; the vernier
relies on this sampling. A late or early resolution moves the detection by at
most one fast period, i.e. one Δt step. It cannot lose the measurement, because
the fast oscillator keeps catching up until the latch is set. Lint tools report
`start_q`, `stop_q` and the oscillator output as "flopped both synchronously and
asynchronously". That is inherent to the circuit, and the module headers say so.

## Ring oscillators

`ring_oscillator` is the published example oscillator: an AND gate
(enable & S3) followed by three inverting cells, with S3 fed back to the gate.
Each of the four stages has its own low-to-high and high-to-low delay. The
period is the sum of all eight. At rest S3 = 1, so the first rising edge at the
output comes exactly one period after enable rises, and the ring halts within a
period once enable falls.

In the FPGA the delays come from placement and routing. Reproducing a given
period requires freezing the layout of these cells. The model has no layout;
its delays are parameters:

| Oscillator | TPLH / TPHL per stage | Period |
|---|---|---|
| slow | 0.2760 / 0.2748 ns | T0 = 2.2032 ns |
| fast | 0.2505 / 0.2498 ns | T1 = 2.0012 ns |

This gives Δt = 0.202 ns. The values are deliberately irregular, so that slow
and fast edges never land on the same femtosecond by accident. Change the top's
`SLOW_TPLH`, `SLOW_TPHL`, `FAST_TPLH` and `FAST_TPHL` parameters to model
another chip.

## Calibration

`tdc_calibration` borrows the TDC while `cal_busy` is high. During that time:
- it drives the start through an internal trigger;
- it ORs its own clear into the TDC clear;
- the readout sequencer is disabled.

Both procedures start with two clocks of clear, release the clear, and fire the
internal trigger on the next clock.

**T0 (`CAL_T0`).** The fast oscillator is inhibited (`fast_inhibit`), so the
slow one runs alone. After `n_ref` clock periods the clear stops it. An 8-bit
counter clocked by the slow oscillator has counted N_cal0 periods in that
window:

```
T0 = n_ref · 10 ns / N_cal0        (error ≈ T0 / N_cal0)
```

To use the whole 8-bit range, choose `n_ref` so that N_cal0 is just under 256:
n_ref = 56 for T0 ≈ 2.2 ns (N_cal0 = 255 in simulation, T0 = 2.196 ns against
2.2032 ns). A wrap is flagged in `cal0_ovf`.

**Δt (`CAL_DT`).** Both oscillators run freely, and the phase detector fires
each time the fast one catches up. Each detection toggles a flip-flop in the
fast-oscillator domain. A two-flip-flop synchronizer carries the toggle into
the slow-oscillator domain, which counts slow periods between consecutive
detections (N_cal1). The first interval runs from the start, not from a
detection, so it is thrown away. The next 16 intervals are summed into
`n_cal1_sum`. The sequencer waits for the sixteenth, or gives up after 4096
clocks and sets `cal_error`.

The interval between detections is exactly T0·T1/Δt, i.e. T1/Δt slow periods.
Hence:

```
Δt = T0 / (mean N_cal1 + 1)        exact
Δt ≈ T0 / mean N_cal1              first-order form; reads high by T0/T1 (≈ 10 %)
```

With the default oscillators, the simulation gives a sum of 159 (mean 9.94),
so Δt = 0.2008 ns against the true 0.202 ns. Dividing is left to the processor,
which reads `n_cal0` and `n_cal1_sum` from the status record.

## Time base

`pll_x5` multiplies the 20 MHz bus clock by five. It is a behavioural model:
it measures the input period, emits five output periods per input period,
aligned to the input's rising edge, and reports `locked` from the third input
edge. Reset inside the FPGA is `rst_n` and `locked`, synchronized to 100 MHz.

While in reset, the TDC clear line toggles at 20 MHz instead of staying high.
The TDC's asynchronously cleared flip-flops are modelled with edge-sensitive
clears, so a pulse guarantees that each of them is cleared whatever state it
powered up in.

`timestamp_counter` has a 27-bit counter at 100 MHz, enough for 1.34 s and so
for a full 1 s DAQ cycle in 10 ns steps. It saturates rather than wraps if PPS
is missing. PPS is synchronized by two flip-flops and edge-detected. Its edge:
- restarts the counter at 0;
- increments the 8-bit cycle number;
- raises `pps_flag` for one clock.

The counter reads 0 three clocks after the PPS edge reaches the pin; this
fixed latency is part of the per-sensor offset.

## Triggers and the LED pulse

`trigger_logic` selects the TDC start (`cfg.trig_src`):

| Source | Start signal |
|---|---|
| `TRIG_FE_OR` | Either front-end chip's trigger output |
| `TRIG_FE_AND` | Fast coincidence: both chips high at the same time |
| `TRIG_EXT` | The external trigger input |

The selection is purely combinational. The start flip-flop sees the
asynchronous trigger edge itself, never a resampled copy, so no time
information is lost before the TDC.

With `cfg.led_en`, a pulse two clocks wide and synchronous to the 100 MHz clock
appears on `led_pulse` every `cfg.led_period` clocks. It is meant for the LED
that flashes the photomultiplier for gain measurements. Looped back through an
external delay line into `ext_trig`, it also gives the linearity test described
under Verification.

## Event readout

`fe_readout` turns one trigger into one event record:

1. **Idle.** The TDC is armed. When its stop flip-flop rises, the sequencer
   latches the timestamp counter. This value is the 10 ns count of the stop
   edge that ends the TDC measurement.
2. **Hold.** After `cfg.hold_delay` clocks, `hold` freezes the front-end
   chips' slow shapers (track and hold).
3. **Header.** The sequencer writes the EVENT word with the timestamp.
4. **TDC.** Once `ready` arrives (through a 2-flip-flop synchronizer) it writes
   the TDC word with N0, N1 and `valid`. It then holds the TDC in clear until
   it returns to idle. Triggers during the dead time are therefore ignored.
5. **Convert.** The sequencer steps through 32 channel slots of 20 clocks each
   (200 ns, 5 MHz).
   - `mux_clk` rests high and goes low for the first half of each slot, giving
     one low pulse per channel; its falling edge advances the chips' analogue
     multiplexers.
   - `adc_conv` pulses at mid-slot.
   - On the last clock of the slot, the ADC outputs of both chips are captured.
   - Samples strictly above `cfg.zs_threshold` are written as ADC words during
     the next slot. Zero suppression drops the rest.
   - If a capture would overwrite samples not yet written, the slot timer
     stalls for a clock.
6. **Done.** `hold` is released.

The dead time is hold_delay + about 4 + 32·20 clocks, ≈ 6.6 µs for the
defaults. About 6.4 µs of that is the 32 multiplexed channels.

### Data words (36 bits, the FIFO width)

| Tag [35:32] | Word | Payload |
|---|---|---|
| 1 | CYCLE | [7:0] new cycle number, written on each PPS |
| 2 | EVENT | [26:0] timestamp in 10 ns units since PPS |
| 3 | TDC | [16] valid, [15:8] N1, [7:0] N0 |
| 4 | ADC | [17:12] channel (chip·32 + ch), [11:0] ADC value |

An event is one EVENT word, one TDC word and zero to 64 ADC words, in that
order. CYCLE words can fall between an event's words, and they mark where a
timestamp restarts.

## FIFO writer and interrupt

`fifo_writer` merges the PPS cycle word with the event stream:
- **Cycle-word priority.** The cycle word is written on the clock after
  `pps_flag`. For that clock, `ev_ready` is low and event words wait.
- **Registered write port.** `fifo_wen` and `fifo_wdata` come straight from
  flip-flops.
- **Drops.** While `fifo_full` is high, words are dropped and counted in
  `dropped_words`, never stalled, so the sequencer's timing stays fixed.
- **Occupancy.** The writer tracks occupancy from its own writes and the
  processor's `fifo_rd` strobes.
- **Interrupt.** `irq` is raised by a PPS (held until `irq_ack`) or by
  occupancy at or above `cfg.irq_threshold` (0 disables it).

## Configuration and status

The top, `tdc_sensor_fpga`, exposes its registers as two packed structs.
Inputs and outputs are listed under the Block structure diagram.

- `cfg_t`: trigger source, LED enable and period, hold delay, zero-suppression
  threshold, IRQ threshold, calibration mode, a one-clock `cal_start` pulse and
  `n_ref`.
- `status_t`: cycle number, live timestamp, readout busy, calibration busy,
  done and error, N_cal0 with its overflow flag, the N_cal1 sum, FIFO
  occupancy and the dropped-word count.

The processor bus that would map these onto addresses is not modelled.

## Verification

Each block has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=<n> failures=<n>` and stops on a watchdog if it hangs.
Random stimulus uses `$urandom`.

| Testbench | What it checks |
|---|---|
| `tb_ring_oscillator` | Each period against the delay sum; first edge one period after enable; halt when disabled |
| `tb_phase_detector` | Pulse exactly when a fast edge overtakes a slow rising edge, for many phase offsets |
| `tb_tdc_counter` | Counts while not stopped, holds while stopped, wraps, async clear |
| `tb_vernier_tdc` | 100 trigger positions across the 10 ns period; the relation above holds with 0 ≤ e < Δt (observed 0.0004–0.2005 ns) |
| `tb_tdc_calibration` | N_cal0 against n_ref·10/T0 for two n_ref values; N_cal1 sum against 16·T1/Δt; busy/done handshake |
| `tb_timestamp_counter` | Counter against a reference model through random PPS edges; cycle number and its wrap; 3-clock PPS latency |
| `tb_trigger_logic` | OR, AND and external selection; LED period and width |
| `tb_fe_readout` | Word sequence, timestamps, hold timing, multiplexer slots, zero suppression, ADC values, stall under back-pressure, TDC timeout |
| `tb_fifo_writer` | Cycle-word priority and latency, word order, drops on full, occupancy, both IRQ causes |
| `tb_pll_x5` | Five output periods per input period, phase alignment, lock |
| `tb_tdc_sensor_fpga` | End-to-end at default parameters; see below |
| `tb_two_sensors` | Two sensors with different oscillators; see below |

### End-to-end test

The end-to-end test drives the top with its default parameters. It shortens
only the PPS period, to 30 µs. It models the chips, their ADCs, the FIFO and a
processor that drains the FIFO on interrupt. It then checks every written word:
- every timestamp equals the counter at the first clock edge after the trigger;
- every TDC result gives the true trigger-to-edge time to within one Δt, by the
  relation above;
- every ADC word is the expected sample above threshold;
- cycle numbers count up by one.

It runs, in order:
1. Both calibrations.
2. Chip triggers at random sub-picosecond positions, with extra triggers during
   the dead time.
3. Coincidence mode, with single-chip triggers that must be rejected.
4. The linearity test: LED pulse mode, looped back through a delay stepped by
   100 ps from 0.35 to 11.25 ns (110 steps, across a clock-period boundary).
5. A sweep of trigger times until a cycle word collides with an ADC word.
6. A stretch with the FIFO full.

It counts each mechanism and fails if any never occurred: both calibrations,
dead-time rejection, coincidence rejection, external trigger, cycle word
holding off event words, zero suppression, FIFO-full drops, and IRQ by PPS and
by threshold. In the linearity sweep:
- the fitted slope of TDC time against delay is −1.001;
- residuals stay below 70 ps;
- an output repeats for at most 2 steps, as expected for 100 ps steps at
  Δt = 0.2 ns.

### Two sensors side by side

Two instances of the top model sensors on different FPGAs:

| Sensor | T0 | Δt |
|---|---|---|
| A | 2.2032 ns | 0.202 ns |
| B | 2.31 ns | 0.23 ns |

They share the clock bus, and sensor B's cable is 1.37 ns longer. Each sensor
calibrates itself. Sensor A's LED pulse then goes through a delay stepped by
100 ps over 12 ns and into both external triggers. Each sensor converts its
events with its own T0 and Δt.

The difference between the two sensors' event times stays at 1.38 ns, which is
the cable skew, with a spread of 0.35 ns. The spread comes from the two
quantization steps plus the calibration errors, and stays within the check's
limit of about twice the larger Δt. Each sensor follows the delay with unit
slope. The constant difference is the offset that a system-level calibration
between sensors removes.

## Simulating

The testbenches need Verilator 5 with timing support. The timing-related
warnings the tools print are explained in the module headers, and
`-Wno-fatal` keeps them from stopping the build. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    --top-module tb_tdc_sensor_fpga rtl/tdc_pkg.sv tb/tb_tdc_sensor_fpga.sv
./obj_dir/Vtb_tdc_sensor_fpga
```

Replace the top module and file to run another testbench. The end-to-end run
simulates about 3 ms and takes a few seconds. Adding
`+verilator+rand+reset+2` randomizes the power-up state; all testbenches pass
with it.

All blocks except `ring_oscillator`, `pll_x5` and the top, which instantiates
them, are synthesizable. Only the oscillators depend on real placement: in an
FPGA they are hand-placed logic cells, and their periods have to be measured
with the calibration above.

## Departures and limits

- **Constant offset.** The TDC result carries a constant +T0 offset compared
  with the textbook vernier formula. The latch arrangement causes it; see
  "What N0 and N1 mean". It is removed together with the other fixed delays.
- **Δt formula.** The calibration recovers Δt with the exact relation
  T0/(mean + 1). The simpler T0/mean reads about 10 % high.
- **Own choices.** The original text does not specify these, so this design
  chose them:
  - the word format and tags;
  - the 27-bit and 8-bit widths;
  - the number of Δt intervals averaged (16) and the calibration timeouts;
  - the ADC timing inside a slot;
  - parallel conversion of both chips;
  - drop-on-full instead of stalling;
  - the IRQ rules;
  - the LED pulse width;
  - the lock rule of the PLL model;
  - the T0 oscillator inhibit used by the T0 calibration.
- **Not included:**
  - data compression: the controller board is said to compress the data, but
    no scheme is given, so words are written uncompressed;
  - the later adjustable oscillators (LCELL paths selected by multiplexers,
    or P-over-N combinations) that tune the resolution at run time;
  - the front-end chips, ADC, FIFO, processor, clock decoder and clock bus
    hardware, which the testbench only models;
  - offset calibration between sensors, which happens in software on the
    recorded N0, N1 and timestamps.
- **Modelled oscillators.** The oscillators are ideal: no jitter, and no
  temperature or supply drift. The measured resolution of a real chip (about
  240 ps average in the field) therefore cannot be reproduced in simulation.
  Only the principle and the arithmetic can be checked.
