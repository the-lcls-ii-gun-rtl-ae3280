# A digital LLRF controller for a VHF gun and an L-band buncher

This is the firmware of a low-level RF (LLRF) controller for the normal-conducting
injector cavities of an X-ray FEL: a 185.7 MHz VHF copper gun and a 1.3 GHz
two-cell copper buncher, and the similar gun of a second facility. Analog
mixers bring the cavity probe, forward, reflected and phase-reference signals
down to an intermediate frequency (IF). The controller samples them, turns
them into complex baseband, and closes two kinds of loop around the cavity:

- a **self-excited loop (SEL)** that drives the cavity at its own phase, so
  it rings at its own resonance even while its frequency moves during
  warm-up;
- **amplitude and phase feedback** against a set point and the averaged
  phase reference line (PRL).

The drive is mixed back up to an IF and sent to a DAC. Around that core, the
firmware adds:

- a recorder of every channel with RF-pulse-aligned triggers;
- an automatic scan for the SEL phase offset;
- a detune measurement for a slow software loop that retunes the oscillators.

A register bank gives software access to all of it.

All of it is synthesizable SystemVerilog, except a behavioural cavity emulator
used for closed-loop simulation.

## Signal flow

```
 ADC lanes (8 x serial, 16-bit words)
   |
 adc_deser                                  ADC clock domain
   | 8 x 16-bit samples
 ddc_mixer x8  <-- nco (down IF: 32-bit phase accumulator + CORDIC)
   | 8 x baseband I/Q (18 bit)
   +--> cic_decim x8 ------------------------------+
   |                                               v
   |    drive --> cic_decim ------------------> waveform_buffer (9 channels)
   |                                               ^ triggers
   +--> stream_select (SEL) --> iq_lowpass --+     |
   +--> stream_select (FB)  --> iq_lowpass --+--> sel_feedback --> drive
   +--> stream_select (PRL) --> prl_phase_avg -+   |  cav_amp, cav_phase
                                                   +--> sel_phase_scan (SEL offset)
                                                   +--> detune_calc (to software)
 rf_pulse_gen: RF gate, rise/fall strobes (triggers, scan, core)
 reg_bank: configuration and status for software

 drive --> upconverter (DAC clock domain, own nco at the up IF) --> DAC (16 bit)
```

`llrf_top` wires these blocks together. The network interface that carries
register traffic to the host is not part of this design: its local bus is
brought out as ports (`bus_*`).

## Frequency plans and number formats

Every oscillator is a 32-bit phase accumulator followed by an 18-stage
CORDIC. The frequency word is `round(f_IF / f_clk * 2^32) mod 2^32`. A word
above half the range is a negative frequency: it is the same thing as an IF
above the Nyquist frequency, seen through its alias.

| setup       | f_ADC (MHz) | down IF (MHz) | down word    | f_DAC (MHz) | up IF (MHz) | up word      |
|-------------|-------------|---------------|--------------|-------------|-------------|--------------|
| gun         | 94.286      | 20.714        | `0x383dd182` | 188.57      | 34.285      | `0x2e8b7a78` |
| buncher     | 94.286      | 20            | `0x364d889c` | 188.57      | 145         | `0xc4d99809` |
| second gun  | 102.14      | 74.288        | `0xba315865` | 204.29      | 18.571      | `0x17458e43` |

- The gun words are the reset values.
- The buncher's 145 MHz is above the DAC Nyquist frequency. Its word makes the
  DAC produce the 43.57 MHz alias, and the analog up-mixer chain selects the
  image.
- The second gun's 74.288 MHz down IF is sampled as its 27.852 MHz alias.
- In all three plans f_DAC = 2 f_ADC. The design relies on this (see Clocks).

Number formats, from `llrf_pkg`:

| quantity            | format |
|---------------------|--------|
| ADC sample          | 16 bits, signed |
| baseband I/Q        | 18 bits, signed (`iq_t`) |
| phase               | 18 bits unsigned, 2^18 = one turn (0.00137 degree per LSB) |
| amplitude           | 20 bits unsigned, in CORDIC units |
| DAC word            | 16 bits, signed |
| frequency word      | 32 bits |

A vectoring CORDIC returns 1.6468 times the vector length. Every amplitude
the controller reports or regulates (`cav_amp`, `fb_amp`, `amp_set`) carries
that factor.

Oscillators are driven with amplitude 79590. That is 0.6073 of full scale,
so the CORDIC gain brings the harmonics to just under 2^17.

The down-mixer keeps bits [32:15] of the 34-bit product. A full-scale ADC
tone therefore gives baseband vectors of about 2^17.

## The controller core (`sel_feedback`)

This is the part that needs the most care. Two probe streams come in, each
chosen from the eight ADC channels by its own selector and smoothed by a
one-pole low-pass (`iq_lowpass`, coefficient 1/16). The low-pass removes the
mixer image at twice the IF:

- the **SEL probe**;
- the **feedback (FB) probe**.

Usually both are the same cavity probe.

### Stage 1: polar conversion

Two vectoring CORDICs turn the probes into amplitude and phase:

```
cav_amp, cav_phase = |sel|, arg(sel)
fb_amp,  fb_phase  = |fb|,  arg(fb) + fb_ofs - ref_phase
```

- `fb_ofs` is an independent, software-set phase offset on the feedback
  input.
- `ref_phase` is the averaged PRL phase from `prl_phase_avg`.

Because the reference is subtracted, the phase loop locks the cavity to the
phase reference line, not to the local oscillator. The end-to-end test moves
the PRL phase by 1/8 turn and checks that the locked cavity phase follows.

### Stage 2: errors

```
amp_err   = amp_set   - fb_amp
phase_err = phase_set - fb_phase    (wrapped, signed)
```

### Stage 3: PI loops

There is one PI loop each for amplitude and phase:

```
integ += ki * err           (clamped)
corr   = (kp * err + integ) >> 16
```

- `kp` and `ki` are 16-bit registers.
- The integrators are cleared whenever their loop is not active or RF is off.
  A pulsed cavity therefore starts every pulse from the feed-forward drive.

### Stage 4: polar drive, by mode

| mode            | drive amplitude       | drive phase              |
|-----------------|-----------------------|--------------------------|
| `MODE_OPEN`     | `drive_amp`           | `drive_phase`            |
| `MODE_SEL`      | `drive_amp`           | `cav_phase + sel_ofs`    |
| `MODE_SEL_AMP`  | `drive_amp + corr_a`  | `cav_phase + sel_ofs`    |
| `MODE_FEEDBACK` | `drive_amp + corr_a`  | `drive_phase + corr_p`   |

The amplitude is clipped to `[0, amp_max]` and forced to zero while RF is
off.

### Stage 5: back to I/Q

The amplitude is scaled by 0.6073 so that the CORDIC gain cancels. A rotating
CORDIC then turns the polar drive back into I/Q, so `|drive|` equals the
commanded amplitude to within 0.5 %.

### How SEL works

In SEL the drive has no phase of its own: it copies the cavity's phase,
rotated by `sel_ofs`. The loop oscillates at the frequency where the phase
around the loop is a whole number of turns. That phase is made up of the
cavity's response, the loop delay and `sel_ofs`.

With the right `sel_ofs` that frequency is the cavity resonance. The field is
then as large as the drive allows, and it follows the resonance wherever it
goes, with no frequency word involved. This is why the gun, whose resonance
moves a lot while it warms up, is brought up in SEL.

An offset far from the right value does not kill the field. With about 60
clocks of delay around the loop, the loop closes again off resonance at a
lower amplitude. With the offset half a turn wrong, the emulated cavity drops
to about half its field.

Once the field is up, `MODE_SEL_AMP` adds amplitude regulation. Full
`MODE_FEEDBACK` then takes the phase as well. That step needs the oscillator
frequencies to match the cavity, which is what the detune measurement is for.

### Timing

- `cav_*` and `fb_*` lag the probes by STAGES + 2 clocks.
- The drive lags the probes by 2*STAGES + 8 = 44 clocks, measured in the
  block's testbench.
- Add 1 clock for the selector and 1 for the low-pass ahead of the core.
- Add about 5 clocks of mixing and deserialization and 3 DAC clocks of
  up-conversion.

## SEL phase scan (`sel_phase_scan`)

The right SEL offset depends on cables, mixers and filters, so the firmware
finds it during bring-up:

1. Software writes a start offset, a step and a number of steps, then starts
   the scan.
2. Each RF pulse runs with the next offset.
3. At the pulse's falling edge, the cavity amplitude is compared with the
   best so far.
4. When the last pulse ends, the offset that gave the largest amplitude is
   applied to the SEL drive and published with its amplitude.
5. A later software write of the offset takes over again.

In the end-to-end test a 16-step scan finds the offset and the CW SEL field
matches the scan's best amplitude. The resolution is limited by the step
size and by the image ripple on a single amplitude sample (a few per cent).
A finer scan can be run around the first result.

## Detune (`detune_calc`)

When the cavity rings away from the oscillator frequency, its phase, measured
against the down-conversion oscillator, advances steadily. The block works
like this:

- It samples `cav_phase` every 2^`stride_log2` clocks (default 16) while RF
  is on.
- It sums 2^8 wrapped differences.
- It publishes the sum. The frequency offset is

```
df = detune * f_ADC / 2^(18 + stride_log2 + 8)
```

Software uses `df` to trim the frequency words (the slow loop). A window in
which RF drops is thrown away.

In SEL the field rotates at the loop frequency, which is the cavity resonance
when the offset is right. The test compares the published value with the
emulated field's actual rotation and finds them equal to within 1 %.

## Waveform recorder (`waveform_buffer`, `cic_decim`)

Nine channels are recorded: the eight ADC channels (named CAV1, CAV2, FWD1,
REV1, FWD2, REV2, DRV1, PRL7_1) and the drive.

### Decimation

Each channel goes through a second-order CIC decimator:

- decimation 2^`dec_log2`, up to 2^12, default 64;
- DC gain exactly 1 (the output is shifted right by 2 `dec_log2`).

The ninth CIC decimates the drive, as the recorder's DAC channel.

### Rows and triggers

Decimated samples are written as rows of 9 x 36 bits into a circular memory
of 2048 rows. After arming:

1. The recorder first fills 2048 - `post` rows.
2. It then accepts a trigger.
3. It writes `post` more rows and stops in DONE.

The record thus holds the samples before and after the trigger, with the
trigger row at index 2048 - `post`.

| source   | trigger event |
|----------|---------------|
| `Always` | at once |
| `Delay`  | `delay` clocks after the RF rising edge |
| `Rising` | RF rising edge |
| `Decay`  | RF falling edge (the default; shows the cavity decay) |
| `Ext`    | external input `ext_trig` |

An event that falls between two decimated rows is held until the next row.
`trig_count` counts accepted triggers.

### Modes

- **Single:** stays in DONE until software arms again.
- **Normal:** re-arms as soon as software reports the read-out finished.

### Read-out

Software reads the record through the register window (`addr[19]` = 1).
Row 0 is the oldest row.

## Register map (`reg_bank`, `llrf_pkg`)

The bus uses 20-bit word addresses and 32-bit data.

- A write takes effect on the next clock.
- A read returns `rdata` with `rvalid` two clocks after `re`.
- A write and a read must not share a clock.

Concurrent assertions in `reg_bank` check these bus rules in simulation.

Configuration registers (read/write):

| addr | name        | contents |
|------|-------------|----------|
| 0x00 | DN_STEP     | down-conversion frequency word |
| 0x01 | UP_STEP     | up-conversion frequency word |
| 0x02 | MODE        | 0 open, 1 SEL, 2 SEL + amplitude loop, 3 feedback |
| 0x03 | SEL_OFS     | SEL phase offset (a write overrides a scan result) |
| 0x04 | FB_OFS      | feedback-input phase offset |
| 0x05 | AMP_SET     | amplitude set point |
| 0x06 | PH_SET      | phase set point |
| 0x07 | DRV_AMP     | feed-forward drive amplitude |
| 0x08 | DRV_PH      | feed-forward drive phase |
| 0x09 | KP          | proportional gain |
| 0x0A | KI          | integral gain |
| 0x0B | AMP_MAX     | drive amplitude limit |
| 0x0C | CIC_DEC     | log2 of the decimation |
| 0x0D | CHSEL       | [2:0] SEL probe, [6:4] FB probe, [10:8] reference channel |
| 0x0E | CW          | 1 = continuous wave |
| 0x0F | PERIOD      | pulse period, in ADC clocks |
| 0x10 | WIDTH       | pulse width, in ADC clocks |
| 0x11 | TRIG_SRC    | 0 Always, 1 Delay, 2 Rising, 3 Decay, 4 Ext |
| 0x12 | TRIG_MODE   | 0 Single, 1 Normal |
| 0x13 | TRIG_DLY    | trigger delay |
| 0x14 | POST        | post-trigger rows |
| 0x15 | CMD         | bit 0 arm, bit 1 read-out done, bit 2 start scan (pulses) |
| 0x16 | SCAN_START  | phase scan start offset |
| 0x17 | SCAN_STEP   | phase scan step |
| 0x18 | SCAN_N      | number of scan steps |
| 0x19 | DET_STRIDE  | detune sample stride, log2 |

Status registers (read only):

| addr | name        | contents |
|------|-------------|----------|
| 0x20 | DETUNE      | detune sum |
| 0x21 | BEST_PH     | scan result: best offset |
| 0x22 | BEST_AMP    | scan result: amplitude at the best offset |
| 0x23 | STATUS      | [1:0] recorder state, [3] scan busy |
| 0x24 | TRIG_CNT    | accepted triggers |
| 0x25 | PRL_PH      | averaged reference phase |
| 0x26 | CAV_AMP     | SEL-probe amplitude |
| 0x27 | CAV_PH      | SEL-probe phase |
| 0x28 | FB_AMP      | FB-probe amplitude |
| 0x29 | FB_PH       | FB-probe phase, referenced to the PRL |
| 0x2A | SEL_APPLIED | SEL offset in use |

Waveform window: `addr[19]` = 1 and `addr[18:0] = {row, channel[3:0], Q/not I}`.

Reset state:

- gun frequency words;
- open loop with zero drive and RF off;
- decimation 64;
- SEL and FB on CAV1, reference on PRL7_1;
- recorder on Decay, in Normal mode, post = 1024.

Unknown addresses read `0xDEADBEEF`.

## Clocks and resets

| domain  | clock     | contents |
|---------|-----------|----------|
| serial  | `ser_clk` | the ADC bit clock, 16 per ADC clock |
| ADC     | `adc_clk` | everything except up-conversion |
| DAC     | `dac_clk` | twice the ADC clock; the up-converter |

All three come from one clock chip, locked to the LO, with aligned edges.
No crossing uses a synchronizer:

- The deserializer copies each finished word into a holding register
  mid-frame. The ADC clock, aligned with the frame, always samples it when
  stable.
- The drive crosses into the DAC domain as a related-clock register transfer.

If the clocks were not related, both crossings would need proper
synchronizers.

Each domain has its own synchronous reset (`ser_rst`, `rst`, `dac_rst`).
Hold each for at least 20 clocks of its domain.

## Cavity emulator (`cavity_emulator`, behavioural)

For closed-loop simulation, a real-number model stands in for everything
between the DAC and the ADCs:

1. It demodulates the DAC stream at the up IF and removes the image with three
   one-pole sections, giving the forward wave F.
2. Each ADC clock it integrates a first-order cavity:

   ```
   V += BW (F - V) + j 2 pi DETUNE V
   ```

   BW is the half bandwidth in radians per clock, default 0.02 (a 50-clock
   fill time). DETUNE is the resonance offset in turns per clock.
3. It puts V (probe), F (forward) and F - V (reflected) back on the down IF
   as 16-bit ADC words.

It is not synthesizable and is meant only for testbenches.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`.

To run one with Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/llrf_pkg.sv tb/tb_llrf_top.sv --top-module tb_llrf_top -o sim
./obj_dir/sim
```

The unit tests compare outputs with values computed independently in the
testbench:

- real-number CORDIC, NCO, mixer and up-converter references;
- a plain-sum CIC model;
- a counter model of the pulse generator;
- a row-numbered recorder pattern.

Where a latency is stated in a header, the testbench measures it.

`tb_llrf_top` runs the whole controller at its default sizes, with the
emulator in the loop, through one bring-up sequence. It counts each
mechanism it exercises and fails any that never happened:

- open-loop fill;
- probe channel switching;
- pulsed RF;
- the 16-pulse SEL phase scan;
- CW SEL with the found offset, and the effect of a wrong offset;
- detune measurement;
- SEL with amplitude loop;
- full amplitude and phase feedback;
- tracking of a moved phase reference;
- each of the five trigger sources, each checked against the recorded data;
- recording time against decimation;
- Normal-mode re-arm and Single-mode stop;
- recording of the drive channel;
- controller mode switches.

It takes about 10 seconds.

`tb_llrf_workloads` repeats the closed loop in each of the three frequency
plans. Only clock ratios matter to the logic, so one time base serves all
three. In each plan it checks:

- the open-loop fill, which must be the same in every plan;
- amplitude and phase feedback reaching their set points.

It then records a full buffer at decimation 64 and checks the recorded
cavity and drive amplitudes row by row. It takes about 15 seconds.

## Where this design stops

**Block structure.** The block structure follows a functional description of
the original firmware; its detailed block diagram was not available. Where
that description only names a function, the simplest implementation that
performs it was chosen. This applies to:

- the polar SEL/PI core and its four modes;
- the CIC order;
- the boxcar reference average;
- the phase-slope detune;
- the recorder's pre/post scheme;
- the register map;
- all widths.

Each file's header says which parts follow the original description and
which are this design's.

**Not included:**

- the network interface and its protocol stack;
- the configuration of the clock chip;
- the analog mixers, ADCs, DACs and amplifiers;
- the software side: the slow frequency-tracking loop, trigger holdoff and
  rate limits, and statistics.

The controller offers what these need (detune, trigger count, register
access) but does not implement them.

**Field stability not established.** The original system specifies field
stability of 0.01 % and 0.015 degree (gun) and 0.3 % and 0.05 degree
(buncher). The word widths resolve those limits: 0.015 degree is 11 phase
LSB. Whether a closed loop meets them depends on noise and on the analog
chain, which the emulator does not model. The loop gains used in the test
(kp = 8192, ki = 64) only show convergence; they are not a tuning.
