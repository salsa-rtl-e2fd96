# SALSA digital readout: RTL for the DSP and I/O of a 64-channel MPGD readout chip

SALSA is a readout ASIC for micro-pattern gaseous detectors (Micromegas,
µ-RWell and similar) planned for the trackers of the EPIC experiment at the
Electron-Ion Collider. Each of its 64 channels has an analog front end (charge
amplifier, pole-zero cancellation, shaper) and a 12-bit SAR ADC sampling at
5 to 50 MS/s. A DSP then cleans the samples and removes the empty ones, so that
the data of all 64 channels fit in one to four 1 Gb/s serial links. The chip
runs in continuous (triggerless) readout or selects data with external
triggers, and it can send trigger primitives of its own.

This repository gives synthesizable SystemVerilog for the digital part of that
chip, built from the architecture described in *"SALSA: a new versatile readout
chip for MPGD detectors"* (D. Neyret et al.). That description gives the
block diagram and what each DSP stage does, but not how. Every algorithm
inside a block, every width beyond the ADC's 12 bits, the word and frame
formats and the register map are this design's own choices. They are marked
as such below and in each file header. The analog parts (front end, ADC
DAC and comparator, PLL, bandgap, bias) are not modelled. The RTL meets them
at ports of the top level.

## Signal chain

```
           analog channel x64              DSP (per channel unless noted)
 pad -> CSA -> PZC/shaper -> [SAR DAC+comparator] <-> sar_logic
                                                        |
  pedestal -> cmn (all 64 channels at once) -> baseline_follow -> iir_filter
                   |                                                 |
                   +-> seeds -> trig_prim -> prim_o / trigger link   +-> zero_suppress --+
                                                                     +-> feature_extract +-> (mode)
                                                                                             |
  sync_fifo (16 words) -> trig_window -> out_buffer (round robin, 32 words) -> serializer_tx x4
```

`salsa_top` wires all of this together. `clk_mgmt` makes the sample strobe,
`sync_cmd` keeps the timestamp and takes the trigger and sync lines, and
`i2c_slave` with `slow_control` holds the configuration.

The published diagram and text disagree on the order of the corrections. The
diagram draws a "digital shaper" first and a combined "pedestal/baseline"
block before common mode. The text lists pedestal equalisation, common mode
correction, baseline following, IIR filtering, then suppression. This RTL
follows the text. The diagram marks the digital shaper, the DSP FIFO, the
amplitude/timing (feature) block and the trigger-primitive serial link as
envisaged rather than baseline. All four are built here.

## Clocking and timing

The whole design runs on one clock. It is taken to be the 1 GHz bit clock of
the serial links, which the chip's PLL (3.2 GHz nominal) would provide. The
ADC rate is set as an integer number of core clocks per sample (register
0x8C). 20 gives 50 MS/s and 200 gives 5 MS/s. Values below 14 are raised to
14, because a conversion needs 13 clocks.

A sample goes through these stages:

| stage | clocks after the strobe |
|---|---|
| SAR conversion (one bit per clock, MSB first) | 13 |
| pedestal, cmn, baseline_follow, iir_filter | +1 each |
| zero_suppress or feature_extract | +1 |
| written into the channel FIFO | +1 (first word visible) |

Each stage is a register with a valid bit, and the sample timestamp travels
alongside in `salsa_top`. The timestamp is the 16-bit count of sample strobes
since the last sync command.

## The corrections

All samples after the pedestal stage are signed 14-bit values.

- **Pedestal and polarity** (`pedestal`): `y = x - ped[ch]`, negated when
  the polarity bit says the detector gives negative pulses. From here on a
  pulse is always positive.
- **Common mode** (`cmn`): noise seen by all channels at once is removed by
  subtracting the floor of the mean of the 64 channels in the same sample.
  The sum is arithmetic-shifted right by 6, so the channel count must be a
  power of two. Hits are not excluded from the mean, so a pulse of height A
  on one channel lowers all the others by about A/64. Each channel's
  corrected value is compared with the seed threshold to give one trigger
  seed per channel.
- **Baseline following** (`baseline_follow`): a slow low-pass estimate `b`
  (8 fractional bits) moves toward each sample by `(x-b)/2^k`, but only if
  the sample lies within ±band of the estimate. Pulses therefore do not
  pull the baseline, and the output is `x - floor(b)`. A baseline step
  larger than the band is taken as signal and is never followed. Keep the
  band above the largest expected drift step.
- **IIR filter** (`iir_filter`): `acc += (x-acc)/2^k` with 8 fractional
  bits, giving a single pole at 1-2^-k. k=0 turns the filter off.

## Zero suppression and pulse features

`zero_suppress` keeps a sample only if it is strictly above the threshold.
`feature_extract` treats a run of samples above the same threshold as one
pulse. When the run ends it sends one word with the peak amplitude, the
timestamp of the first sample above threshold (time of arrival) and the
number of samples above threshold (width, saturating at 255). A mode bit
chooses which of the two streams goes to the FIFO. Both use the same
43-bit word (`salsa_pkg::hit_t`, most significant field first):

| ch (6) | feat (1) | ts (16) | amp (12) | width (8) |
|---|---|---|---|---|

Amplitudes above 4095 are clipped. Sample words have width 0 and feat 0.

## Continuous and triggered readout

`trig_window` sits between a channel's FIFO and the output buffer.

- **Continuous mode:** every word passes.
- **Triggered mode:** a trigger that arrives when the timestamp is T opens
  the window `[T - latency, T - latency + length)`. Both are in samples,
  from registers 0x89/0x8A, and the comparison is modulo 2^16.
  - The word at the FIFO head passes if its timestamp is inside the window
    of the latest trigger.
  - It is dropped if it is older than `now - latency`, because no later
    trigger could still select it.
  - Otherwise it waits.

Only the latest trigger is remembered. Triggers must therefore be spaced by
more than the latency plus the window length, or words between them may be
lost. The FIFO must also hold a latency's worth of hits of its channel.

A trigger line edge reaches `trig_window` three clocks after the pin, through
a two-flop synchroniser and edge detection. The trigger's timestamp is the
timestamp counter at that moment.

## Trigger primitives

`trig_prim` counts the seeds of each sample. When the count reaches the
programmed multiplicity (register 0x88, 0 = off), it emits
`{timestamp, count}` (23 bits). The primitive appears on `prim_vld_o/prim_o`
one clock after the common-mode stage. It is also queued (4 entries) for a
fifth serial line, `trig_link_o`, which uses the same framing as the data
links. A primitive that finds the queue full is counted as an overflow.

## Output buffer and links

`out_buffer` takes at most one word per clock from the 64 channel FIFOs,
choosing round robin after the last channel served. It stores the words in
a 32-word FIFO and hands the oldest to an enabled, ready link, also round
robin. Register 0x8B enables links 1 to 4.

`serializer_tx` sends 45-bit frames back to back, MSB first:

- `11` followed by the 43-bit word for data;
- `10` followed by 43 zeros when there is nothing to send.

Since every frame begins with a 1, a receiver aligns on the first 1 after the
link is enabled. A disabled link is held at 0. One link carries at most one
word per 45 ns at 1 GHz, which is 22.2 M words/s.

Each serializer has a one-word holding register and accepts a word on any
clock while that register is empty. This matters because the buffer serves
one link per clock, and the four links' frames are usually aligned. If a
link took a word only on the clock its frame ends, the buffer could feed only
one of the four links each time, and four links would carry no more than one.

The channel FIFOs do not push back on the DSP, because samples arrive at a
fixed rate. A word that finds its FIFO full is dropped, and the drop is
counted in a monitoring register.

## Capacity against the specified rates

| case | needed | built | fits |
|---|---|---|---|
| raw samples, 64 ch at 50 MS/s (spec) | 3.2 G words/s | 88.9 M words/s on 4 links | no: suppression is essential |
| zero-suppressed samples, 64 ch, 100 kHz hit rate (spec), about 10 samples per hit (estimate) | 64 M words/s | 88.9 M words/s on 4 links | yes, with 4 links |
| pulse features, 64 ch, 100 kHz hit rate | 6.4 M words/s | 22.2 M words/s per link | yes, on 1 link |
| sampling rate 5-50 MS/s (spec) | 20-200 clocks per sample | 14-255 | yes |

The 10 samples per hit is an estimate for 50-100 ns signals after a shaper
with 50-500 ns peaking time at 50 MS/s. It is not a published number.

`tb_salsa_rate` runs these cases on the full chip. All 64 channels receive
random pulses 10 samples long at 100 kHz each, over 4000 samples at 50 MS/s:

- On four links, all of about 5000 sample words arrive.
- On one link in feature mode, all of about 460 pulse words arrive.
- Samples on a single link overflow as expected. About half the words are
  dropped, and every drop shows in the overflow counter.

Averages alone do not settle the FIFO depth. When several pulses coincide,
a channel must hold most of its pulse while the shared buffer is busy. With
8-word channel FIFOs a few words in 5000 were lost, so the default is 16.

## Slow control

The chip is an I2C target at address 0x42. A write sends the register address
and then any number of data bytes, with the address advancing after each.
A read returns bytes from the current address, which also advances after each
byte, until the controller answers NACK. SCL and SDA are oversampled by the
core clock. SDA is an open-drain output, `sda_oe_o = 1` pulling it low.

| address | content |
|---|---|
| 0x00 + 2·ch / 0x01 + 2·ch | pedestal of channel ch, low 8 / high 4 bits |
| 0x80 | bit 0 polarity (1 = negative pulses), 1 common mode on, 2 baseline following on, 3 feature mode, 4 triggered mode |
| 0x81 | bits 3:0 baseline shift k, 7:4 IIR shift k |
| 0x82/0x83 | suppression threshold (also the feature threshold) |
| 0x84/0x85 | baseline following band |
| 0x86/0x87 | trigger seed threshold |
| 0x88 | primitive multiplicity (0 = off) |
| 0x89 / 0x8A | trigger latency / window length, samples |
| 0x8B | bits 3:0 enabled links |
| 0x8C | core clocks per sample |
| 0x8D | front end: 1:0 charge range, 4:2 peaking time, 5 add the 6 mm input transistor |
| 0x90/0x91 | read only: dropped words (FIFO overflows) |
| 0x92/0x93 | read only: trigger primitives sent |

After reset all corrections are off, link 0 is on and the rate is 50 MS/s.
The suppression threshold is 32 and the seed threshold and band are 64.
The front-end fields go to the analog channels on `fe_*_o` and are not used
digitally. The published front end has 4 charge ranges, 8 peaking times and
a switchable 6 mm input transistor, hence the field widths.

## What is outside the RTL

The top-level ports stand where analog or unpublished parts connect:

- `adc_dac_o[ch]` / `adc_cmp_i[ch]`: trial code to and decision from each
  channel's SAR DAC and comparator. `adc_sample_o` is the sample instant.
- `fe_*_o`: settings for the charge amplifier and shaper.
- `clk`: the PLL output.
- `link_o`, `trig_link_o`: to the analog line drivers.

The analog test input, the bandgap, bias generator and the debug block of the published diagram have
no digital function that is described, and they are absent.

## Departures and limits

- The algorithms of the correction stages, the feature definitions, the
  trigger window rule, all widths beyond 12 bits, both word formats, the
  framing, the buffer sizes and the register map are this design's.
- The two FIFO columns of the published diagram (one in the DSP, one in the
  serial I/O) are merged into one 16-word FIFO per channel.
- A single 1 GHz clock replaces the chip's several clocks. The link line
  code (for example 8b/10b) is not modelled.
- The published diagram shows trigger seeds twice, at the common-mode stage
  and again beside the feature block. Seeds are taken here only from the
  common-mode corrected samples, so a primitive does not depend on the
  baseline and IIR stages or on the readout mode.
- A common-mode estimate that excludes hit channels, keeping samples
  around a hit, and multiple pending triggers are not implemented.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb_salsa_top` runs the whole chip at its
full size (64 channels, 4 links). It configures the chip over I2C and drives
an ideal analog model. It checks every word on every link, and every trigger
primitive on the port and the trigger link, against its own model of the
chain. Its phases cover:

- continuous zero suppression;
- four links, negative polarity and common-mode noise;
- features with baseline following and IIR filtering on a shifted baseline;
- triggered readout, with words passed and dropped;
- trigger primitives;
- FIFO overflow.

It counts each of these mechanisms and fails if one never occurred. It runs
in well under a second. `tb_salsa_rate` is the rate test described under the
capacity table above.

With Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/salsa_pkg.sv tb/tb_salsa_top.sv \
          --top-module tb_salsa_top -o sim
./obj_dir/sim
```

Replace `tb_salsa_top` with any other `tb_*` name to run a block test.
`salsa_pkg.sv` must come first, because every file imports it.
