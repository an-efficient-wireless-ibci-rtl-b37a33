# Adaptive-sample-rate controller for a wireless neural recording headstage

A wireless intracortical recording headstage spends most of its power in two
places: the amplifier/ADC chip that digitises every electrode, and the logic
that processes those samples. Most electrodes do not need the full sample
rate for their spikes to be detected well. Some see large, slow spikes. Others
see nothing worth detecting. Compressing the data after digitisation saves
radio bandwidth, but the ADC has already paid for every sample.

This controller moves the saving to the ADC itself. A server watches the
recording and chooses two numbers for every electrode *i*:

* an integer **down-sampling factor** `x_i`. The electrode is converted only in
  every `x_i`-th scheduling round. In the other rounds its conversion command
  is never issued.
* a **detection threshold** `th_i`, in units of that electrode's own noise
  level.

The headstage then does very little. It runs the ADC command schedule with
one modulo counter per electrode. It band-pass filters and noise-normalises
each sample that was actually taken, and compares it with `th_i`. Only the
threshold crossings go over the radio. The server can update the
configuration at any time. If the downlink goes quiet, the headstage keeps
running on the last configuration it received.

The RTL targets an FPGA that sits between an Intan RHD2132 32-channel front
end and an ESP32-S3 Wi-Fi module. Both external chips are joined to it by SPI.

```
            RHD2132 (32 electrodes)                    ESP32-S3 (radio, SPI master)
                 ^  |                                          ^  |
             SPI |  v                                      SPI |  v
  +---------------------------+                       +---------------------+
  | adc_sequencer             |                       | esp_spi_slave       |
  |  intan_spi_master         |                       +---------------------+
  +---------------------------+                         ^ uplink     | downlink
     ^ sample_en     | samples                          |            v
  +----------------+ v                      +------------------+  +------------------+
  | rate_scheduler | bandpass_filter        | event_packetizer |  | config_receiver  |
  +----------------+   -> noise_whitener    |  (byte FIFO)     |  | (shadow + commit)|
     ^ x_i, restart       -> spike_detector +------------------+  +------------------+
     |                         (th_i)   events ^   ^ samples (calibration)   | x_i, th_i, mode
     +-----------------------------------------|---|-------------------------+
```

`headstage_top` wires these blocks together. The only parts not in this RTL are
the two external chips and the software that runs on the server.

## Rounds, slots and rates

Time on the ADC interface is divided into **rounds**. A round holds
`32 + AUX` **slots**, each `SLOT_CYCLES` clock cycles long:

* slots 0..31 belong to electrodes 0..31;
* the `AUX` slots at the end of the round (2 by default) carry filler commands.

In slot *k* the sequencer issues `CONVERT(k)` only if the rate scheduler
enables electrode *k* in the current round. Otherwise the slot stays silent:
chip select stays high and the front end performs no conversion. That silent
slot is where the power saving comes from.

The rate scheduler keeps one phase counter per electrode. The counter runs
from 0 to `x_i - 1` and advances once per round. The electrode is enabled when
its counter is 0, which is the rule *r mod x_i = 0* for round *r*. When a new
configuration is committed, every counter and the round number restart at 0.
So every electrode is sampled in the first round of a new schedule, and the
time stamps count rounds from that moment.

With the defaults (46-cycle slots and 2 filler slots) a round is
34 × 46 = 1564 cycles. At a 48 MHz clock that gives every electrode a full
rate of 30.7 kS/s. Factor `x` gives 30.7/x kS/s. The factor field is 4 bits
wide, so factors 1 to 15 are available. A factor of 0 is treated as 1.

Choosing the factor is the server's job. For a target rate `s_i`, it picks the
largest supported `x` with `R/x ≥ s_i`, where `R` is the full per-electrode
rate. The downlink carries `x_i` itself, not `s_i`, so the headstage needs no
divider for this.

The published description writes the full rate as `N_s · f_clk / N_t`, where
`N_s` is the number of sampling-command cycles in a round of `N_t` cycles.
Read literally, that is the command rate of the whole interface. This RTL
gives each electrode one slot per round, so each electrode's full rate is
`f_clk / N_t`. The factor rule `ŝ_i = R/x_i` holds unchanged with that `R`.

## Talking to the RHD2132

`intan_spi_master` performs one 16-bit SPI mode-0 transaction, MSB first.
SCLK runs at `clk / (2·HALF)`, which is 24 MHz for `HALF = 1` at 48 MHz. A
transaction occupies `1 + 33·HALF` cycles. An elaboration-time assertion
checks that `SLOT_CYCLES` can hold one transaction.

The front end answers every command **two transactions later**. The reply
clocked in during transaction *n* belongs to the command sent in transaction
*n−2*. `adc_sequencer` therefore pushes a tag (electrode, round, is-sample)
into a three-deep history every time it starts a transaction. Each reply is
labelled with the oldest entry. Silent slots push nothing, because no
transaction takes place. This is why skipped conversions cost nothing and do
not disturb the pairing.

The two filler `READ(63)` commands at the end of each round push the round's
last two conversions out of the chip before the round ends.

After reset the sequencer sends one `CALIBRATE` command and nine filler
commands, the front end's ADC self-calibration, before round 0 begins.
`running` goes high at that point. No amplifier registers are written, so the
front end runs at its power-on register settings.

The ADC code is offset-binary. It is converted to two's complement by
inverting its MSB.

## Conditioning and detection

Samples of all electrodes travel down one shared pipeline, one at a time,
each tagged with its electrode and round. Every stage keeps its state in a
per-electrode array indexed by the tag.

* **Band-pass** (`bandpass_filter`) keeps two exponential averages per
  electrode, a fast one with weight 2^-KF and a slow one with weight 2^-KS.
  It outputs their difference. This uses shifts and adds only, and the result
  appears one cycle later. A filter only advances when its electrode is
  sampled. Its corner frequencies are therefore proportional to that
  electrode's sample rate. With KF = 1 and KS = 5 at 30 kS/s the pass band is
  about 150 Hz to a few kHz.
* **Noise normalisation** (`noise_whitener`) tracks each electrode's mean
  absolute value `m_i`. This is an exponential average with weight 2^-KN and 4
  fraction bits, starting at `NOISE_INIT`/16 codes. The block divides the
  sample by `m_i`, using the estimate held before this sample, and then
  updates the estimate. The quotient is a signed Q8.8 number, "multiples of
  the noise level". A restoring divider produces one bit per cycle, so the
  result comes 28 cycles after a sample is accepted. That is far shorter than
  a slot, and `in_ready` is asserted to be high whenever a sample arrives.
  Normalisation is per electrode only; there is no spatial whitening across
  electrodes.
* **Detection** (`spike_detector`) compares each normalised sample with the
  electrode's `th_i`, also in Q8.8. Spikes are negative-going, so the test is
  `sample < th_i`. An event fires on the first sample below threshold after
  one that was not. A spike produces one event however many samples it spans,
  and no dead time is added. The reset threshold is −4.0 for all electrodes.

The end-to-end latency from the last SCLK edge of a reply to the spike packet
in the FIFO is about 30 cycles.

## The radio link

The ESP32-S3 is the SPI master (mode 0, MSB first). `esp_spi_slave`
synchronises its pins into the FPGA clock, so its SCLK must be slower than
clk/8. A single SPI link carries both directions:

* the bytes the radio module shifts in are the **downlink**;
* the bytes it receives back are the **uplink**.

Whenever the uplink FIFO is not empty, `esp_data_rdy` is high. A FIFO byte is
only removed once its first bit has really been clocked out, so ending a
transfer early loses nothing. When the FIFO is empty the FPGA sends `00`.

### Uplink packets (5 bytes each)

| mode        | bytes                                   | meaning                                   |
|-------------|-----------------------------------------|-------------------------------------------|
| streaming   | `E5 ch ts[23:16] ts[15:8] ts[7:0]`      | spike on electrode `ch` in round `ts`     |
| calibration | `CA ch ts[7:0] d[15:8] d[7:0]`          | normalised sample `d` (Q8.8) of `ch`      |

Calibration mode exists so that the server can collect pre-processed signal
and build spike templates before streaming starts. At full rate it produces
far more data than the radio link can carry, so expect drops.

`event_packetizer` writes each packet into a 256-byte FIFO, one byte per
cycle. A packet is accepted only if the whole packet fits. Otherwise it is
dropped whole and `drop_cnt` counts it. A packet that arrives while the
previous one is still being written is also dropped. The uplink therefore
never contains a partial packet.

### Downlink frames

```
A5 01 {x_0 th_0[15:8] th_0[7:0]} ... {x_31 th_31[15:8] th_31[7:0]} chk   configuration (99 bytes)
A5 02 m chk                                                          mode: m[0]=1 calibration
```

`chk` is the XOR of every byte after `A5`. A frame must lie within one
chip-select period, and raising chip select aborts a partial frame. Frames
with a bad checksum, an unknown opcode or an early end are discarded and
counted in `err_cnt`.

`config_receiver` fills a shadow copy of the configuration as the bytes
arrive. A complete, correct configuration becomes active only at the end of
a round:

* `commit` pulses in the cycle of `round_end`;
* factors and thresholds change on the next edge;
* the rate scheduler restarts at round 0.

Mode changes also take effect at a round boundary. A new frame that begins
before a pending frame of the same kind has been applied cancels the pending
one, even if the new frame later turns out to be corrupt. The shadow copy is
overwritten byte by byte, so it can no longer be trusted. Nothing ever clears
the active configuration except reset, so a lost link simply leaves the last
schedule running. Reset state: all factors 1 (full rate), all thresholds
−4.0, streaming mode.

## Parameters

| where            | parameter      | default | meaning                                         |
|------------------|----------------|---------|-------------------------------------------------|
| `hs_pkg`         | `NUM_CH`       | 32      | electrodes (one RHD2132)                        |
| `hs_pkg`         | `DS_W`         | 4       | factor width: factors 1..15                     |
| `hs_pkg`         | `TS_W`         | 24      | round counter / time stamp width                |
| `headstage_top`  | `AUX`          | 2       | filler slots per round                          |
| `headstage_top`  | `SLOT_CYCLES`  | 46      | clock cycles per slot (≥ 2 + 33·HALF)           |
| `headstage_top`  | `HALF`         | 1       | RHD2132 SCLK half period in clock cycles        |
| `headstage_top`  | `STARTUP`      | 10      | commands sent after reset (CALIBRATE + fillers) |
| `headstage_top`  | `KF`, `KS`     | 1, 5    | band-pass average weights 2^-KF, 2^-KS          |
| `headstage_top`  | `KN`           | 10      | noise-estimate weight 2^-KN                     |
| `headstage_top`  | `NOISE_INIT`   | 320     | initial noise estimate, 4 fraction bits (20.0)  |
| `headstage_top`  | `TH_DEFAULT`   | −1024   | reset threshold, Q8.8 (−4.0)                    |
| `headstage_top`  | `FIFO_DEPTH`   | 256     | uplink FIFO bytes                               |

The clock frequency is not a parameter. The round length in cycles is fixed
by `SLOT_CYCLES` and `AUX`, and the rates scale with whatever clock is
supplied. At 48 MHz the defaults give 30.7 kS/s per electrode.

## What follows the published headstage and what is this design's own

These parts follow the published headstage:

* the split of work: the server chooses per-electrode factors and
  thresholds, and the headstage executes the schedule, filters, whitens,
  thresholds and sends only spike events;
* the integer factor per electrode and the *r mod x* rule with one modulo
  counter per electrode;
* sampling opportunities that are skipped rather than decimated;
* continuing on the last configuration when the downlink fails;
* the RHD2132 and ESP32-S3 on either side of the FPGA, both on SPI.

These parts are this design's own choices, because the published description
does not give them:

* the clock rate, slot length, filler slots and start-up sequence;
* the filter structure and its constants;
* whitening as a per-electrode division by mean absolute value;
* the crossing rule and the Q8.8 threshold unit;
* every packet and frame format, the FIFO size and the drop policy;
* which side of the radio link is SPI master;
* commit at a round boundary with a round-counter restart;
* the calibration upload mode and how it is switched.

Where the published rate formula and the one-slot-per-electrode schedule
differ, see the note at the end of *Rounds, slots and rates*.

Not implemented:

* the RHD2132's register configuration (bandwidth, DSP offset removal);
* the CONVERT fast-settle bit;
* any impedance or auxiliary measurements;
* the server side: the rate/threshold predictor, the optimiser, spike sorting
  and decoding.

## Files

`rtl/` — synthesizable, one unit per file:

| file                    | contents                                                        |
|-------------------------|-----------------------------------------------------------------|
| `hs_pkg.sv`             | sizes, sample/spike structs, RHD2132 commands, framing bytes     |
| `rate_scheduler.sv`     | per-electrode modulo counters, round counter                    |
| `intan_spi_master.sv`   | one 16-bit SPI transaction                                      |
| `adc_sequencer.sv`      | round/slot timing, command choice, reply tagging                |
| `bandpass_filter.sv`    | per-electrode two-average band-pass                             |
| `noise_whitener.sv`     | per-electrode noise estimate and divider                        |
| `spike_detector.sv`     | per-electrode threshold crossing                                |
| `sync_fifo.sv`          | show-ahead byte FIFO (helper)                                    |
| `event_packetizer.sv`   | uplink packet framing, FIFO, drop counting                      |
| `esp_spi_slave.sv`      | SPI slave byte link to the radio module                         |
| `config_receiver.sv`    | downlink parser, shadow and active configuration                |
| `headstage_top.sv`      | the controller                                                  |

`tb/` contains one self-checking testbench per block (`tb_<block>.sv`). It
also holds two behavioural models used by the testbenches:

* `rhd2132_model.sv`, the front end's SPI side, with synthetic noise and
  spikes and the two-command reply delay;
* `esp_host_model.sv`, the radio module as SPI master.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and finishes. For
example, the end-to-end test at the default parameters:

```
verilator --binary --timing --assert --timescale 1ns/1ps --top-module tb_headstage_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/hs_pkg.sv tb/tb_headstage_top.sv
./obj_dir/Vtb_headstage_top
```

Replace the testbench name to run any other test. The tests need no input
files. Synthesis with yosys (slang front end) reads `rtl/` the same way, with
`headstage_top` as top.

## How it was verified

| testbench                 | what it checks                                                                     |
|---------------------------|------------------------------------------------------------------------------------|
| `tb_rate_scheduler`       | enable pattern against *r mod x* for random factors, restart, factor 0             |
| `tb_intan_spi_master`     | bit order, 16 clocks, latency, reply capture (HALF = 1 and 3)                      |
| `tb_adc_sequencer`        | commands per slot, skipped slots, reply-to-tag pairing, round length, start-up    |
| `tb_bandpass_filter`      | bit-exact outputs against a reference, per-electrode independence                  |
| `tb_noise_whitener`       | quotients and noise estimates against a reference, latency of 28 cycles            |
| `tb_spike_detector`       | one event per crossing, per-electrode thresholds                                   |
| `tb_event_packetizer`     | packet bytes, both modes, overflow drops and counts (small FIFO)                    |
| `tb_esp_spi_slave`        | downlink bytes, uplink order, no loss on early chip-select release                 |
| `tb_config_receiver`      | frames, checksum, aborts, clipping, commit at round end, random frame sequences  |
| `tb_headstage_top`        | the whole controller with both models at default parameters (below)                |
| `tb_workload_subsets`     | server-side factor choice and measured per-electrode rates on 32-electrode subsets |

`tb_headstage_top` runs the controller with a 32-electrode front-end model
and the radio model. It works through five phases:

1. start-up calibration;
2. a rejected frame, then a configuration with factors 1–6;
3. 300 rounds of streaming;
4. calibration mode, in which the radio falls behind;
5. streaming again.

A reference model in the testbench predicts every spike event from the
front-end model's conversions. The test checks:

* each electrode's conversion count against ⌈300/x⌉;
* the spike packets against the reference events, byte for byte and in order;
* the time stamps against the factors;
* the raw packets against the reference samples.

It also counts each mechanism and fails if any never happens: calibration
command, rejected frame, commit, skipped conversion, spike packet, raw packet,
overflow drop and mode switch. It runs in a few seconds.

`tb_workload_subsets` plays the server for recordings from larger arrays
that are split into 32-electrode subsets. It runs at a 48 MHz clock. It draws
a target rate for every electrode and picks the largest factor that still
meets it. Then it checks at the front-end model that each electrode is
converted exactly ⌈N/x⌉ times in N rounds, and that the measured rate is at
least the target.

It runs two subsets:

* a full subset, including the boundary targets R, R/2 and R/15;
* the last subset of a 100-electrode array, where only 4 inputs are live and
  the idle inputs run at factor 15.

With the default random seed, the full subset needs about 43 % fewer
conversions than full-rate sampling, and the partial subset about 68 %
fewer. The test prints these figures; they depend on the drawn targets.

For every block, a copy with one deliberate bug (for example, replies paired
with the wrong command, or a commit that does not wait for the round
boundary) was run against the same testbench, and the testbench failed each
time.

Limits of this verification:

* The front end is a model. Real RHD2132 timing, such as MISO delay over a
  cable, is not exercised.
* The filters are checked against a reference written from the same
  description, not against recorded neural data.
* Detection quality versus sample rate, which is the server's model, is
  outside this RTL.
