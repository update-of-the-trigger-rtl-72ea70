# A digital majority-sum trigger for a dual-phase xenon TPC

In a dual-phase xenon time projection chamber every particle interaction
produces two light signals: a prompt scintillation flash (S1) and, some
hundreds of microseconds later, a larger electroluminescence signal (S2) made
of a few pulses a few hundred nanoseconds apart. Each waveform digitizer of
the experiment outputs a "majority" signal proportional to how many of its
channels are over threshold; these are summed in an analog fan-in into a
single **majority-sum** waveform. The trigger described here digitises that
waveform with a 12-bit ADC at 50 MS/s and decides, sample by sample in an
FPGA, whether it contains an S2. It replaces an analog chain (shaping
amplifier plus discriminator) and adds three things the analog chain could not
do: look at the pulse *structure* (number of peaks, time over threshold, peak
amplitude), hold off on the long afterpulse tail of very large S2s, and
recognise discharges (long trains of small pulses) and veto them.

This repository holds synthesizable SystemVerilog for the FPGA logic and a
self-checking testbench for each part. Everything runs on one 50 MHz clock,
one ADC sample per clock, with no buffering: the trigger decision is made on
the fly, a few clocks after the last sample of the pulse that completes it.

## Signal path

```
            +-------------+   sample   +-------------+ trig_strobe +---------------+
adc_data -->| adc_capture |----------->| trigger_fsm |------------>| trigger_pulse |--> trig_out (TTL)
adc_otr  -->| (2 cycles)  |            |             |             | (9 cycles)    |
            +-------------+            +-------------+             +---------------+
                                          |   ^ veto
                                    above |   |
                                          v   |
                                       +----------------+
                                       | discharge_veto |
                                       +----------------+
            +---------+  bytes  +-------------+  cfg (thresholds, wait times)
uart_rxd -->| uart_rx |-------->| config_regs |-----> trigger_fsm, discharge_veto
            +---------+         +-------------+
```

| Module | File | Role |
|---|---|---|
| `trig_pkg` | `rtl/trig_pkg.sv` | sample/time types, state encoding, configuration record, register map, reset values |
| `adc_capture` | `rtl/adc_capture.sv` | two-stage capture of the ADC bus, out-of-range samples forced to full scale |
| `trigger_fsm` | `rtl/trigger_fsm.sv` | the peak-finding state machine and the event variables |
| `discharge_veto` | `rtl/discharge_veto.sv` | discharge identification and veto |
| `trigger_pulse` | `rtl/trigger_pulse.sv` | 180 ns output pulse |
| `uart_rx` | `rtl/uart_rx.sv` | 8N1 serial receiver, 115200 baud |
| `config_regs` | `rtl/config_regs.sv` | command decoder and register file |
| `trigger_top` | `rtl/trigger_top.sv` | top level |

Outside the FPGA, and not modelled here: the ADC chip itself (an AD9226), the
50 MHz board oscillator, and the NIM modules that turn the TTL output into NIM
and then ECL for the experiment's trigger logic and scaler.

## The peak-finding state machine

This is the heart of the design (`trigger_fsm`). Its states and their meaning:

| State | Meaning |
|---|---|
| IDLE | input at baseline, no event open |
| PeakUp | on the rising edge of a peak; the peak amplitude follows the sample |
| PeakDown | past the top of a peak, still above threshold |
| Decide | first sample back at or below threshold; the event is judged |
| Wait | judged not (yet) good enough; waiting `peak_wait` cycles for another peak |
| Trigger | one cycle; the trigger is issued |
| TriggerWait | dead time of `trig_wait` cycles after a trigger |
| AfterPulse | extra dead time after a very large S2, until the input has been quiet |

"Above" means the sample is strictly larger than `threshold` (an absolute ADC
value, not baseline-subtracted). The transitions:

| From | Condition (first match wins) | To | Event variables |
|---|---|---|---|
| IDLE | above | PeakUp | peaks = 1, ToT = 1, amplitude = sample |
| PeakUp, PeakDown | not above | Decide | - |
| PeakUp, PeakDown | above and sample > previous sample | PeakUp | ToT+1, amplitude = max; a new peak if coming from PeakDown |
| PeakUp, PeakDown | above, not rising | PeakDown | ToT+1 |
| Decide | all three conditions pass and no veto | Trigger | - |
| Decide | above | PeakUp | new peak, ToT+1 |
| Decide | otherwise | Wait | - |
| Wait | above | PeakUp | new peak, ToT+1 |
| Wait | `peak_wait` cycles spent | IDLE | event dropped |
| Trigger | always | TriggerWait | - |
| TriggerWait | `trig_wait` cycles spent and amplitude >= `large_amp` | AfterPulse | - |
| TriggerWait | `trig_wait` cycles spent | IDLE | cleared |
| AfterPulse | input at or below threshold for `ap_quiet` consecutive cycles | IDLE | cleared |

The three conditions checked in Decide are: number of peaks >= `npeak_min`,
accumulated time over threshold (number of above-threshold samples of the
whole event) >= `tot_min`, and largest peak amplitude of the event >=
`amp_min`. Because Decide is entered at the end of every peak, an S2 made of
several small peaks triggers at the end of the peak that makes it pass, while
a lone S1-like peak falls through Wait back to IDLE.

**Timing.** The state register and a copy of the sample (`sample_q`) load on
the same clock edge, so in any cycle `state` is the classification of
`sample_q`. A sample that is on the ADC pins at clock edge n reaches the state
machine (as `sample_q` with its `state`) after edge n+2. If that sample is the
Decide sample of a passing event, the machine is in Trigger after edge n+3 and
`trig_out` rises after edge n+4 and stays high for 9 cycles (180 ns).

**Worked example.** With baseline 51, threshold 68 and the reset settings
(3 peaks, ToT 5, amplitude 150):

| Sample | 51 | 51 | 145 | 189 | 100 | 52 | 53 | 192 | 145 | 55 | 51 | 198 | 154 | 62 | 51 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| State | IDLE | IDLE | PeakUp | PeakUp | PeakDown | Decide | Wait | PeakUp | PeakDown | Decide | Wait | PeakUp | PeakDown | Decide | Trigger |

At the third Decide the event holds 3 peaks, 7 samples over threshold and an
amplitude of 198, and the trigger is issued. At the first two Decides the peak
count is too low.

## Dead time: trigger-wait and afterpulse

A large S2 is followed by a long tail of PMT afterpulses, which would
otherwise produce a stream of further triggers. After every trigger the
machine ignores the input for `trig_wait` cycles (2 ms by default). If the
triggering event's amplitude reached `large_amp`, it then also waits in
AfterPulse until the input has stayed at or below threshold for `ap_quiet`
consecutive cycles (50 us by default); every above-threshold sample restarts
that count. There is no upper limit on how long AfterPulse lasts: a tail of
30 ms or more simply keeps it there. While in either state the event
variables are held, and no peak is counted.

For a trigger-efficiency measurement a second board can run the same logic
with `trig_wait` set very short over the UART, so that S2s which follow a
triggered S2 inside the same event still produce an output.

## Discharge veto

A discharge appears as a long train of small pulses. Each of them may look
like a small S2, so without protection a discharge yields one trigger per
trigger-wait period. `discharge_veto` keeps its own running count of
above-threshold samples, independent of the state machine (it keeps counting
through TriggerWait), and clears it when the input has been quiet for
`dis_gap` cycles, i.e. when the train has ended. When the count reaches
`dis_tot`, the input is declared a discharge: a one-cycle `discharge` strobe
is given and `veto` goes high for `dis_veto` cycles, re-armed by every further
above-threshold sample. While `veto` is high, Decide never goes to Trigger.
The first trigger of a discharge can still happen (before the train is long
enough to be recognised); the repeats are suppressed. In the end-to-end test
an 8 ms train gives one trigger with the veto and four with it disconnected.

## Configuration over the UART

All thresholds and times are registers, loaded with the values below at
reset and writable over a 115200-baud 8N1 serial line. A write is four bytes:
the register address, then a 24-bit value, most significant byte first. If
more than 20 ms pass between bytes of a command the partial command is
dropped, so the stream resynchronises after a lost byte. Unknown addresses are
ignored. Times are in 20 ns clock cycles.

| Addr | Register | Width | Reset value |
|---|---|---|---|
| 0x00 | `threshold` | 12 | 68 |
| 0x01 | `npeak_min` | 16 | 3 |
| 0x02 | `tot_min` (samples) | 24 | 5 |
| 0x03 | `amp_min` | 12 | 150 |
| 0x04 | `peak_wait` | 24 | 25 (500 ns) |
| 0x05 | `trig_wait` | 24 | 100 000 (2 ms) |
| 0x06 | `large_amp` | 12 | 3000 |
| 0x07 | `ap_quiet` | 24 | 2 500 (50 us) |
| 0x08 | `dis_tot` (samples) | 24 | 1 000 (20 us) |
| 0x09 | `dis_gap` | 24 | 250 (5 us) |
| 0x0A | `dis_veto` | 24 | 500 000 (10 ms) |

The port is write-only; there is no read-back.

## What follows the published design and what does not

Taken from the published description of the system: the 12-bit 50 MS/s
digitisation, the single 50 MHz clock, the state names and the main
transitions of the state machine, the three event variables compared with
configurable thresholds, the example threshold of 68 and the example
waveform, the peak-wait ("several hundred ns") and trigger-wait ("several
ms") dead times, the longer wait after very large S2s until the afterpulses
return to baseline, a separate discharge-veto module based on long
accumulated time over threshold, the 180 ns TTL trigger pulse, and the UART
configuration port.

Choices made here where the description is silent:

* "Rising" means strictly larger than the previous sample; an equal sample
  moves to PeakDown. A rise in PeakDown starts a new peak.
* Decide can go straight to PeakUp if the next sample is already above
  threshold; Wait drops the event to IDLE when `peak_wait` expires.
* Each condition is "at least"; the amplitude compared is the largest peak
  of the event; time over threshold counts all above-threshold samples of the
  event.
* The end of the afterpulse wait is defined as `ap_quiet` consecutive quiet
  cycles after `trig_wait`; the size that counts as "very large" is
  `large_amp`.
* Discharges are identified by accumulated time over threshold alone. The
  published text also calls them very low in amplitude; no amplitude cut is
  applied. The quiet gap that ends a train and the veto re-arming are this
  design's.
* All reset values except the threshold are chosen here; `npeak_min`,
  `tot_min` and `amp_min` are picked so that the example waveform triggers on
  its third peak and not earlier.
* The trigger output is registered: it rises in the first TriggerWait cycle.
* ADC out-of-range samples are forced to 0 or 4095; the ADC is assumed to
  deliver straight binary.
* The UART frame, baud rate, command format and register map are this
  design's.
* The published description calls the machine one whose next state depends
  only on the present state and the present sample. Here the decision also
  depends on the event counters and the wait timers, which the same
  description requires.

## Size

After generic synthesis the whole top is about 310 word-level cells and 494
flip-flops, with no memories; most of the flip-flops are the eleven
configuration registers (about 200 bits) and the 24-bit timers. This is a
small fraction of a Spartan-6 LX16.

## Simulation

Each module has a testbench in `tb/` that prints one line
`TB_RESULT checks=N failures=M` and ends. For example, with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/trig_pkg.sv tb/tb_trigger_fsm.sv \
          --top-module tb_trigger_fsm
./obj_dir/Vtb_trigger_fsm
```

| Testbench | What it checks |
|---|---|
| `tb_trigger_fsm` | the worked example cycle by cycle, event variables at Decide, exact trigger-wait, peak-wait and afterpulse lengths, veto blocking |
| `tb_discharge_veto` | isolated pulses are not a discharge, identification on exactly the `dis_tot`-th sample, veto length, clearing after a gap |
| `tb_trigger_pulse` | 9-cycle (180 ns) pulse, restart |
| `tb_adc_capture` | 2-cycle latency and out-of-range rule on random data |
| `tb_uart_rx` | 200 random bytes, framing error, glitch rejection |
| `tb_config_regs` | every register written and compared with a model, unknown address, timeout resynchronisation |
| `tb_trigger_top` | the whole design at its default parameters and reset settings: the example S2, dead time, a lone peak, a large out-of-range S2 with a 6 ms afterpulse tail, an 8 ms discharge train, and reconfiguration over the UART to a relaxed trigger-wait; each mechanism is counted and must occur |

| `tb_efficiency_measurement` | two boards on the same input, one with the trigger-wait relaxed to 1 us over its UART; 300 events of a main S2 plus a random after-trigger S2; the relaxed board must trigger on an after-trigger S2 exactly when the generated samples meet the conditions, the normal board exactly once per event; prints the efficiency per size bin |

`tb_trigger_top` simulates about 30 ms of detector time, with no parameter
overridden, in well under a second; `tb_efficiency_measurement` about 600 ms
in a few seconds. A typical efficiency printout (pulse shapes are synthetic,
so the numbers only show the shape of the turn-on, not detector behaviour):

```
  [   0, 200):   0 of  89  = 0.00
  [ 200, 400):   6 of  66  = 0.09
  [ 400, 600):  37 of  59  = 0.63
  [ 600, 800):  35 of  35  = 1.00
```
