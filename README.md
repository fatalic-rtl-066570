# FATALIC front-end: RTL and behavioural model

The chip reads one photomultiplier (PMT) of a hadronic calorimeter. Its input is
a current pulse whose charge can be anywhere from about 25 fC to 1.2 nC, which is
more than 18 bits of dynamic range. The supply is only 1.6 V, so no single
voltage amplifier and 12-bit ADC can cover that range. The chip works in current
mode instead:

* a current conveyor splits the PMT current into several copies of fixed ratio;
* each copy is integrated and shaped separately;
* each shaped copy has its own 12-bit pipelined ADC.

Three fast channels (gains x64, x8 and x1, called high, medium and low) are
sampled at the 40 MHz bunch-crossing clock. A fourth, slow channel takes most of
the current. It integrates with a 100 us time constant and measures the tiny DC
currents that a caesium calibration source produces.

The output pins can carry only two 12-bit words per clock. A digital block
therefore sends the medium gain on every clock. It chooses per sample whether
the high or the low gain goes with it, and sends the slow channel on a single
serial pin.

This repository holds two kinds of code:

* synthesizable SystemVerilog for the digital part: ADC correction, gain switch,
  DDR output and slow serializer;
* behavioural models, using `real` signals, for the analog part: conveyor,
  shapers and the stages of the pipelined ADC.

Together they form one model of the chip, from the PMT current to the output
pins, and it can be simulated with Verilator.

## Signal path

```
             +--> x64 (HG) shaper, tau 25 ns --> 12-bit pipeline ADC --+
 i_pmt --> current conveyor --> x8 (MG) shaper ---------> ADC ---------+--> digital_block --> dout[11:0] (DDR)
             +--> x1 (LG) shaper ----------------------> ADC ----------+                  --> gain_flag
             +--> slow (87.5 %), tau 100 us --> ADC @ 833 kS/s --------+                  --> slow_sdata
```

| file | kind | role |
|---|---|---|
| `fatalic_pkg.sv` | package | constants: 12 bits, 12 stages, threshold 600, slow divider 48, 4 clocks per serial bit, latency 8; stage-word and gain-flag types; per-stage skew function |
| `current_conveyor_model.sv` | model | splits the PMT current by transistor width; subtracts the bias; adds the pedestal-tuning currents |
| `shaper_model.sv` | model | differential transimpedance amplifier with RC feedback (first-order low pass) |
| `adc_stage_model.sv` | model | one 1.5-bit pipeline stage: a two-threshold flash, a DAC, and a residue amplifier with gain 2 |
| `pipeline_adc_model.sv` | model | 12 stages in a chain; each stage's 2-bit word is delayed as a real pipeline would deliver it |
| `adc_digital_correction.sv` | RTL | realigns the stage words; overlap-adds them into a 12-bit code |
| `gain_selector.sv` | RTL | dynamic gain switch |
| `fast_output_ddr.sv` | RTL | medium gain while the clock is high, alternative gain while it is low |
| `slow_serializer.sv` | RTL | 833 kHz conversion strobe; 12-bit frame shifted out at 10 Mbit/s |
| `digital_block.sv` | RTL | four correction units, the gain selector, the DDR output and the serializer |
| `fatalic.sv` | top | the complete channel |

## Current conveyor

The PMT current enters the sources of four common-gate NMOS transistors. They
have the same length and different widths: Wf, Wf/8, Wf/64 and 8·Wf. The current
divides in proportion to width:

* 1/(585/64) = 10.9 % goes to the high-gain channel;
* 1.4 % goes to the medium-gain channel;
* 0.17 % goes to the low-gain channel;
* 87.5 % goes to the slow channel.

The four branches carry a common bias current, set to 0.5 mA in the model. A
replica ("dummy") stage makes the same bias, which is subtracted at the output,
so only the signal remains. Each output also takes a pedestal-tuning current; on
the chip this comes from a small DAC. The model applies the split, the
subtraction and the tuning ideally. Input impedance and noise are not modelled.

## Shapers

Each channel converts its current to a differential voltage with an amplifier
that has R parallel to C in both feedback paths. The model is the first-order
equation

    tau * dV/dt = 2·R·I − V,       tau = R·C

It is stepped exactly with `V += (2RI − V)·(1 − exp(−dt/tau))`. The fast shapers
use R = 5 kOhm and C = 5 pF (tau = 25 ns, dt = 0.5 ns). The slow shaper uses
R = 500 kOhm and C = 200 pF (tau = 100 us, dt = 5 ns).

The factor 2, one R in each half of the differential output, is this design's
reading of the schematic. It gives 0.28 nA of input current per slow-channel
count, close to the chip's design value of 0.25 nA/count.

A PMT pulse with the specified 4 ns rise and 36 ns fall makes the fast shaper
peak 20-30 ns after the pulse starts. If the pulse starts on a clock edge, the
second 40 MHz sample is therefore the peak sample. The end-to-end test checks
this.

The model has no output clipping. During a large pulse the slow integrator goes
far beyond the ADC range; it then recovers with its 100 us time constant.

## Pipelined ADC and its digital correction

This is the part that needs the most care. The analog pipeline and the digital
block must agree on the timing.

### One stage

Each stage takes an input Vin in ±Vref, with Vref = 0.5 V. Two comparators at
±Vref/4 (±125 mV) produce a 2-bit word [b2 b1]. A DAC of 0 or ±Vref/2 is
subtracted, and the difference is amplified by 2:

| Vin | word | residue to next stage |
|---|---|---|
| above +Vref/4 | `10` | 2·Vin − Vref |
| between the thresholds | `01` | 2·Vin |
| below −Vref/4 | `00` | 2·Vin + Vref |

The word `11` never occurs, so each stage resolves 1.5 bits. Because of this
half-bit of redundancy, a comparator offset of up to ±Vref/4 can change a
stage's word without changing the final code. The residue stays in range, and
the later stages make up the difference. `pipeline_adc_model` has a
`CMP_OFFSET` parameter that shifts the thresholds of every stage, with
alternating sign. `tb_adc_conversion` runs converters with ±100 mV offsets and
gets the same codes, within one count, as the ideal converter.

### Overlap addition

Stage s (s = 0 is first) carries the weight 2^(11−s). Adding the 2-bit words
with one bit of overlap gives

    D = sum over s of word_s · 2^(11−s)

Each stage's b2 lands on the same weight as the previous stage's b1. D has 13
significant bits, and the code is D >> 1. With this choice a 0 V input (all
stages `01`) reads 2047, the middle of the range. The full range −0.5…+0.5 V
maps to 0…4095.

The adder is built as a carry-save pair followed by one carry-propagate add:

* the twelve b1 bits form one vector;
* the twelve b2 bits, shifted one place up, form the second vector;
* the two vectors are registered (the carry-save register);
* they are then added in a second register.

A 13-bit sum cannot exceed 4095 after the shift, unless an illegal `11` word
appears. The sum saturates in that case, and an assertion reports it.

### Timing and the 8-clock latency

In a pipelined ADC, the later stages resolve the same sample later. The chip's
overall figure is a conversion latency of eight 40 MHz clocks, fixed after every
power-up. The per-stage split is this design's choice, built so that the total
comes to exactly 8:

| where | clocks |
|---|---|
| stage s word, from the sampling edge to the digital block (stage output latch + two stages per clock) | 1 + floor(s/2) |
| alignment shift registers in `adc_digital_correction` (stage s is delayed by 5 − floor(s/2)) | 5 − floor(s/2) |
| carry-save register | 1 |
| final-add register | 1 |
| **total, from sampling edge to `code`** | **8** |

`fast_output_ddr` registers once more, so the medium-gain code of a sample taken
at rising edge n is on `dout` during the high phase after edge n + 9. The
alternative code of the same sample follows in the low phase right after.

The same correction block serves the slow ADC. There every register advances
only when `en`, the 833 kHz strobe, is high. The latency is then 8 slow
conversions.

`stage_skew(s)` in the package sets the skew, and both the ADC model and the
correction read it. Changing it keeps the two consistent, but it moves the total
latency away from 8 clocks. `pipeline_adc_model` has a check that reports this.

## Gain switch and DDR output

`gain_selector` is combinational. Its rule looks only at the low-gain code:

    alt = (lg_code >= 600 || force_lg) ? lg_code : hg_code
    gain_flag = 1 when alt is the low-gain code

On the model's gains, the high gain saturates near 42 pC. The low gain reaches
600 counts near 270 pC. Between the two, the alternative word is a saturated high
gain, and the medium gain (which reaches about 335 pC) carries the measurement.
The `force_lg` bit makes the alternative word low gain for every sample.

A back end usually adds its own rule: after the high gain has saturated, it
ignores the high gain for the next seven samples while that channel recovers.
That rule runs in the readout board's FPGA, not in this chip.

Range of each gain in the model, with pedestals set to 204 counts (peak sample
of a standard PMT pulse):

| gain | counts/pC | fC/count | saturates at |
|---|---|---|---|
| high (x64) | 92 | 10.9 | 42 pC |
| medium (x8) | 11.6 | 86 | 335 pC |
| low (x1) | 1.44 | 690 | 2.7 nC |

The chip was designed for full scale at about 20 pC, 164 pC and 1.3 nC. On
silicon it measured 2.46, 20.4 and 211 fC/count. See the departures below.

`fast_output_ddr` registers the medium code, the alternative code and the flag
on the rising edge. It copies the alternative code and the flag into a
falling-edge register. The pins are driven by

    dout = clk ? mg_q : alt_q

so the medium gain can be latched on the rising edge and the alternative on the
falling edge. Both belong to the same sample.

## Slow serial channel

`slow_serializer` counts the 40 MHz clock modulo 48. It raises `conv_en` when
the count is 0, giving one slow conversion every 1.2 us (833 kS/s). At count 47
it loads the latest slow code into a shift register. It then sends the 12 bits
MSB first, four clocks (100 ns) per bit, which is 10 Mbit/s. 12 bits × 4 clocks
fill the 48-clock period exactly, so frames follow each other without a gap.

The first frame starts at reset release. There is no start bit or frame marker:
a receiver needs `conv_en`, or the reset time, to find the frame boundary.
Because of the slow ADC's own 8-conversion latency, frame j carries the slow
sample taken 9 frames earlier.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_adc_digital_correction` | stage words of random and corner voltages with the pipeline skew; code = reference overlap sum and ideal transfer function; latency; enable gating |
| `tb_gain_selector` | all threshold edges (599/600/601); force bit; random codes |
| `tb_fast_output_ddr` | pin value in each half-period against a cycle-exact reference |
| `tb_slow_serializer` | strobe period 48; frame bits and bit period 4 clocks; MSB first |
| `tb_current_conveyor_model` | split ratios; bias removal; tuning currents |
| `tb_shaper_model` | step response every ns for both signs (DC gain 2R, 25 ns); PMT-pulse waveform against a fine-step reference, peak at 20-30 ns; slow step over 1 ms |
| `tb_adc_stage_model` | 1 mV sweep of ±500 mV plus points around ±125 mV; word and residue against the stage table |
| `tb_pipeline_adc_model` | words of every stage against a reference conversion, with the 1 + s/2 delay; 1-in-48 enable |
| `tb_adc_conversion` | ADC model + correction: random voltages convert to floor((V+0.5 V)·4096) within one count, 8 clocks later; same with ±100 mV comparator offsets; full-range ramp: INL ≤ 1 LSB, every inner code 8 ± 1 ramp samples wide |
| `tb_digital_block` | four ADCs' stage words; alternative gain choices; forced low gain; slow frames |
| `tb_fatalic` | full chip at its default parameters (see below) |
| `tb_fatalic_charge_scan` | full chip: pulses from 25 fC to 1.2 nC; charge rebuilt from the pins with the most sensitive unsaturated gain, within 1% + 1.5 counts; each gain used |
| `tb_fatalic_slow_scan` | full chip: DC currents 0 to 1 uA; averaged serial slow codes within 1.5 counts of ideal; 0.5 nA resolved; slope within 1% |

`tb_fatalic` runs the whole model for 1.4 ms of simulated time, which takes about
a second. It applies:

* pedestal currents;
* a steady 0.5 uA anode current, as during a caesium scan;
* PMT pulses of 0.5, 1, 2, 20, 150, 600 and 1200 pC;
* one 20 pC pulse with `force_lg` set.

It checks:

* the pedestals against the ideal conversion;
* that the peak medium-gain sample is the second one after the pulse start;
* the x8 ratio between high and medium gain;
* the linearity of the medium gain;
* the correctness of every gain-flag decision;
* that the slow code settles on the ideal conversion of the DC current.

It counts how often each output mode occurred. Each mode must occur at least
once: high gain, saturated high gain, low gain by threshold, forced low gain,
and slow frames.

To run a testbench with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
        rtl/fatalic_pkg.sv tb/tb_fatalic.sv --top-module tb_fatalic
    ./obj_dir/Vtb_fatalic

## How far the model can be trusted

**Taken from the chip's description:**

* the channel structure and gain ratios;
* the shaper R and C values;
* the stage transfer table and thresholds;
* 12 stages, 12 bits, and the 8-clock latency;
* the threshold of 600 counts, compared with "greater or equal";
* the force bit;
* medium gain on the rising edge and alternative gain on the falling edge;
* the 833 kS/s slow ADC with a 10 Mbit/s serial output.

**This design's own choices**, where the description is silent:

* the per-stage skew (two stages per clock);
* which redundant bit is dropped (mid-scale reads 2047);
* the carry-save split;
* the flag encoding (1 = low gain);
* an asynchronous active-low reset;
* MSB-first serial order with no frame marker;
* the position of the slow strobe in its 48-clock period;
* the pedestal DAC as an ideal current input;
* the factor 2 in the shaper gain.

**Known departures:**

* *Absolute gain.* The ideal first-order shaper gives about 92 high-gain
  counts/pC, i.e. about 11 fC/count. The chip was designed for about 5 fC/count
  (25 fC to 20 pC over 4096 counts) and was measured at about 2.5 fC/count.
  Gain ratios, timing and digital behaviour are unaffected, but the model's
  range in charge is about two times the design's in every gain. The likely
  cause is the first-order shaper model, which ignores the amplifier's finite
  bandwidth and the conveyor's real current gain. To match the design range,
  raise `FAST_R_OHM` and lower `FAST_C_F` by the same factor; that keeps the
  25 ns time constant. The measured gain ratios (8.3 and 10.4) are not exactly
  8; the model uses the ideal 8.
* *Analog non-idealities.* The model has no noise, finite amplifier gain,
  clipping, input impedance or capacitor mismatch. The ADC is ideal apart from
  the optional comparator offset.
* *Transistor-level parts.* The comparator, the residue amplifier and the
  sampling switches are represented only by their function inside
  `adc_stage_model`. The pads, package and the readout boards that average the
  slow channel over 10 ms and serialize the data are not part of this code.

The synthesizable blocks (`adc_digital_correction`, `gain_selector`,
`fast_output_ddr`, `slow_serializer`, `digital_block`) are plain single-clock
logic. The exception is the falling-edge register in the DDR output. The
digital block synthesizes to about 440 flip-flops.
