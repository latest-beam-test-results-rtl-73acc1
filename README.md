# FONT4 intra-train beam feedback processor

At the interaction point of a linear collider the two beams must collide
head-on to within a few nanometres. Ground motion and magnet vibration move
them apart from one bunch train to the next. Within one train there is time
to fix this. The outgoing beam is deflected by the other beam, and that
deflection shows the offset. A beam position monitor (BPM) measures it, and
a kicker steers the *following* bunches of the train back into collision.
That only works if the measurement, the processing and the kick all happen
within one bunch spacing (about 150 ns for the ILC).

FONT4 is a prototype of such a feedback, tested at the extraction line of
the KEK ATF with 3-bunch trains at 140-154 ns spacing. An analogue front end
turns the BPM pickup signals into a sum and a difference pulse. A digital
board then does the rest: an FPGA, two ADCs and two DACs. The DAC drives a
fast amplifier and a stripline kicker. The loop measures bunch 1 and
corrects bunches 2 and 3. The reported latency is about 132 ns without
charge normalisation and about 140 ns with it.

This repository holds synthesizable SystemVerilog for the digital part: the
FPGA firmware between the ADC words and the DAC word. The analogue front
end, the converters, the amplifier and the beamline hardware are outside
it. The testbenches model them simply.

## The loop

```
 trig_in ──► bunch_timing ──sample_pulse──┐
                                          ▼
 adc_sum, adc_diff ──► adc_capture ──► charge_normaliser ──► gain_lut
   (ADCs, 357/4 Ms/s)    peak sample     diff / sum, 3 ticks   correction table
                                                                   │
 dac_data ◄── dac_output ◄── kick_delay ◄── delay_loop_acc ◄───────┘
   (DAC)      gate, saturate   0..31 ticks    kick += correction

 sample_clock_gen: 357 MHz / 4 converter clock and strobe
```

For each bunch the processor takes the peak of the sum (Σ) and difference
(Δ) signals. It forms the position y = Δ/Σ and looks up a correction
c = T[y] in a gain table. It adds c to the kick it already holds:

    kick(n) = kick(n-1) + T[y(n)]

The new kick goes to the DAC and is applied to every later bunch. The sum
is the *delay loop* of the earlier analogue FONT systems. There the old
kick came back through a delay line. Here it is an accumulator. It does
two things:

* it holds the correction after it has been found, so bunch 3 is still
  corrected even though bunch 2 arrives already on axis and measures zero;
* it makes the loop integrating. With a linear table T[y] = −G·y and a
  constant incoming offset u0, bunch k is seen at u0·(1−G)^(k−1). G = 1
  corrects fully from bunch 2 on. G < 1 under-corrects and G > 1
  over-corrects, with alternating sign. The prototype's beam tests show
  the same under- and over-correction at low and high gain.

The sign of the loop and the units of the kick are in the table contents,
not in the logic.

## Clock and timing

All logic runs on one clock. It is 357 MHz (2.8 ns) and locked to the
accelerator RF, so bunch arrival times are fixed numbers of ticks.
`sample_clock_gen` divides it by 4 for the ADCs and the DAC (89.25 Ms/s).
It also makes a one-tick `strobe` in the last tick of each converter
period. New ADC words are taken and the DAC word is changed on that
strobe.

`bunch_timing` is started by the pre-beam trigger. The trigger is
asynchronous. A two-flop synchroniser and an edge detector turn it into
`train_start`. The tick counter then gives bunch k its peak-sample pulse at

    train_start + first_delay + k·bunch_spacing + 1      (k = 0 .. n_bunches−1)

`first_delay` puts the sample on the peak of the front-end pulse. A
converter sample comes only every 11.2 ns, so the sample has to be phased
to the peak. This is done with `first_delay` and the trigger timing.
`train_active` is the window in which the DAC may drive the kicker. It
opens with the train and closes one bunch spacing after the last sample.
Outside it the accumulator is held at zero and the DAC word is zero. A
trigger during a train restarts the train.

### Latency budget, in 2.8 ns ticks

| stage | ticks |
|---|---|
| peak capture (`adc_capture`) | 1 |
| charge normalisation | 3 (0 when bypassed) |
| gain table read | 1 |
| accumulator | 1 |
| added kick delay | `kick_delay` (0 in normal use) |
| wait for the next converter strobe | 1 – 4 |

That gives 7 to 10 ticks (20–28 ns) from the sample to the DAC word. The
3-tick (8.4 ns) cost of normalisation is the prototype's own figure. The
other stage boundaries are this design's choices. The rest of the roughly
130 ns loop is outside the FPGA: ADC pipeline, DAC, amplifier rise time
(35 ns to 90 %), cables and beam flight time. Because 55 ticks is not a
multiple of 4, each bunch sees the converter grid at a different phase. The
timing slack therefore differs by up to 3 ticks from bunch to bunch.

## Charge normalisation

The difference signal of a stripline BPM is proportional to position
*times* bunch charge. Charge jitter would appear as position jitter, so Δ
is divided by Σ. A divider is too slow here, so `charge_normaliser` uses a
table of reciprocals and one multiply, in three pipeline steps:

1. `recip = R[a]` is read from a 1024 × 16-bit ROM. The address a is bits
   12..3 of Σ, the top ten magnitude bits of a 14-bit word. The table holds

       R[a] = min(65535, round(65536 / a)),   R[0] = 65535

   and is computed by the elaboration-time loop in the module, not read
   from a file.
2. `prod = Δ · recip` (14 × 17-bit signed multiply).
3. `pos = sat14(prod >>> 6)`.

This gives pos = Δ/Σ · 2^13, a Q1.13 number: ±8192 is a difference as
large as the sum. Taking Σ to ten bits costs at most 1/a of relative
error. That is below 0.4 % for sums above a quarter of full scale; the
testbench checks the result to 1 % of full scale over that range. A zero
or negative sum reads R[0], and the result saturates.

With `cfg.norm_enable = 0` the unit is bypassed combinationally. Then
`pos = Δ` in the same tick and the loop is 3 ticks shorter. The prototype's
latency measurement was made with firmware of this kind. In bypass mode
the position scales with charge, so the gain table must be loaded for the
nominal charge.

## Gain table

`gain_lut` is a 1024 × 16-bit RAM addressed by the top 10 bits of `pos`,
read as an unsigned index in two's-complement order. Entry i covers
positions `signed(i)·16 … signed(i)·16+15`. The read takes one tick. The
control host loads the table through `gain_wr_en/addr/data`; a read and a
write of the same entry in one tick return the old value. The table starts
at zero, so an unloaded processor never kicks. Because it is a table, any
curve can be loaded, not only a linear gain: limiting, dead bands, or a
different gain per sign.

## Kick delay and the latency measurement

The prototype's latency was measured on the beam. The kick to
bunch 2 was delayed on purpose, step by step, until bunch 2 was no longer
corrected. The added delay at that point is the timing slack, and the
bunch spacing minus the slack is the loop latency. `kick_delay` provides
this: a 31-stage shift register of kick words with a tap select. The
setting is `cfg.kick_delay`, in 2.8 ns steps up to 86.8 ns; 0 means no
register. `tb_font4_latency_scan` replays the measurement.

## Output

`dac_output` saturates the 16-bit kick to the 14-bit two's-complement DAC
word and loads it on the converter strobe. The word is forced to zero when
`cfg.fb_enable` is low ("feedback off") or outside the train window. Only
one of the board's two DAC channels is used: the one carrying the kick.

## Interface of `font4_fb_top`

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | 357 MHz beam-locked clock; asynchronous active-low reset |
| `trig_in` | in | 1 | pre-beam trigger, asynchronous |
| `cfg` | in | `fb_cfg_t` | `fb_enable`, `norm_enable`, `n_bunches`, `first_delay`, `bunch_spacing`, `kick_delay`; hold stable during a train |
| `gain_wr_en/addr/data` | in | 1/10/16 | gain table load |
| `adc_clk`, `dac_clk` | out | 1 | converter clocks, 357/4 MHz |
| `adc_sum`, `adc_diff` | in | 14 | two's-complement ADC words, Σ and Δ |
| `dac_data` | out | 14 | kick word, two's complement |
| `train_active`, `bunch_sampled`, `bunch_idx`, `pos_valid`, `pos`, `kick_valid`, `kick` | out | | monitoring |

All widths come from `font4_pkg`. There, `BUNCH_W = 6` allows trains of up
to 63 bunches, and `TICK_W = 12` allows delays of up to 11.5 µs.

## What is the prototype's and what is this design's

Taken from the prototype:

* the 357 MHz beam-locked clock and the 357/4 converter rate;
* the pre-beam trigger;
* sampling at the pulse peak;
* the sum and difference inputs;
* charge normalisation by a reciprocal table, costing 3 clock cycles;
* the gain stage as a RAM lookup table;
* the delay loop as an accumulator;
* the DAC output;
* the deliberate kick delay and the firmware without normalisation, both
  used for the latency measurement;
* trains of 3 bunches, to be extended to 20 or 60.

This design's own choices:

* all widths: 14-bit converters, Q1.13 position, 16-bit correction and
  kick;
* table sizes and the reciprocal rounding;
* the pipeline split;
* how peak-sample times are programmed;
* the trigger synchroniser;
* the train window and the zero kick outside it;
* saturation in place of wrap-around;
* the gain table load port and the configuration struct (the board's
  control link is not described);
* putting the kick delay and the normalisation bypass into one firmware
  as run-time settings, off by default;
* driving only one DAC channel.

The board also has a PROM, a JTAG port, a 40 MHz oscillator, RS232, GPIO
and spare trigger inputs and digital outputs. Their role in the firmware
is unknown, and they are not modelled.

## Capacity

* ATF trains (3 bunches at 140–154 ns = 50–55 ticks) fit with a wide
  margin.
* The planned 60-bunch trains fit: the last sample comes at
  `first_delay + 59·55` ticks, under 4096 for `first_delay` ≤ 850. The
  window lasts 9.2 µs, inside the amplifier's 10 µs pulse limit.
* A full ILC train (3000–6000 bunches, about 1 ms) does not fit the
  default counters. It needs `BUNCH_W = 13` and `TICK_W = 19`; nothing
  else changes.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sample_clock_gen` | converter clock phase, strobe spacing |
| `tb_bunch_timing` | sample ticks and bunch numbers for 3- and 60-bunch trains, empty train, retrigger, window length |
| `tb_adc_capture` | the captured pair is the last strobed ADC word, one tick latency |
| `tb_charge_normaliser` | bit-exact against an independent reciprocal model, within 1 % of Δ/Σ, 3-tick latency, bypass |
| `tb_gain_lut` | random table load and read-back, read-during-write |
| `tb_delay_loop_acc` | saturating running sum, clear, both limits |
| `tb_kick_delay` | every tap 0..31 |
| `tb_dac_output` | strobe timing, saturation, feedback-off and window gating |
| `tb_font4_fb_top` | closed loop at default parameters (see below) |
| `tb_font4_latency_scan` | the kick-delay scan, with and without normalisation |

The two top-level tests close the loop through a beam model. Each bunch
has an incoming offset and a fixed charge. The kicker adds the DAC word as
it stood `ALAT` ticks before the bunch reaches the BPM. The ADC words are
Σ = Q and Δ = Q·u/8192.

`tb_font4_fb_top` runs feedback off; low, matched and high gain (0.5, 1,
1.5); the normalisation bypass; a kick delayed past the slack; and a
60-bunch train. It checks every bunch against the recursion above. It
also checks the sample-to-kick latency: 5 ticks with normalisation, 2
without. Each of these mechanisms is counted and must occur.

`ALAT = 33` ticks is chosen so that the bypassed slack is near 22 ns, the
value the prototype measured. The scan then finds 8 ticks (22.4 ns)
without normalisation and 5 ticks (14.0 ns) with it. The absolute slack
depends on that choice. The 3-tick difference does not, and it is
checked exactly.

To run any testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_font4_fb_top -y rtl -y tb +libext+.sv -Irtl \
  rtl/font4_pkg.sv tb/tb_font4_fb_top.sv -o sim
./obj_dir/sim
```

Each testbench runs in well under a second. The RTL is plain
SystemVerilog-2017 with no vendor primitives. The two tables are inferred
as RAM/ROM.
