# Tardis-ASKAP: real-time incoherent de-dispersion and pulse detection in FPGA logic

A dispersed radio pulse reaches the low end of the band later than the
high end. The delay goes as DM/ν². To find such pulses, each beam's
dynamic spectrum S[c,t] (channel c, integration t) is summed along many
trial dispersion curves, and each summed time series is searched for
excursions. Tardis-ASKAP does this in real time for 36 beams:

- 304 channels of 1 MHz.
- 1 ms integrations.
- 448 trial DMs per beam.
- Pulse widths of 1, 2, 4, 8 and 16 ms.

This repository holds synthesizable SystemVerilog for the FPGA part of that
system. It covers the antenna/polarization combiner, the four
de-disperser-and-detector (DD) FPGAs, and the way they are chained. The
design follows a published description of Tardis. Where that description
stops, the choices made here are marked as such, both below and in the
header comment of every file.

## The algorithm

Trial d picks a run of samples in every channel. The run goes from an
earliest offset E to a latest offset L, relative to the output sample:

    A[d,n] = Σ_c Σ_{Δ=E(d,c)}^{L(d,c)} S[c, n+Δ]

Summing every run directly costs too much. Tardis computes J outputs at
once from the previous output by differencing:

    A[d,n+j] = A[d,n] + Σ_c Σ_{i=1..j} ( S[c,n+i+L] − S[c,n+i+E−1] )

For one trial and one channel, the J "latest" samples S[n+1+L .. n+J+L] and
the J "earliest minus one" samples S[n+E .. n+J+E−1] give J differences.
Their prefix sums are the channel's contribution to all J outputs. After
all channels have been added to accumulators that start at A[d,n], the
accumulators hold A[d,n+1..n+J]. The group size is J = 16.

Offsets are stored non-negative, relative to the newest sample:
`eoff = −E`, `loff = −L`, with `eoff ≥ loff ≥ 0`. For output sample m, the
run covers times m−eoff .. m−loff. Samples at times before the first
spectrum count as zero. Output group g covers m = gJ .. gJ+J−1.

Note on the subtracted sample: the printed datapath figure of the original
labels the subtracted inputs S[n+j+E]. The difference equation, which
follows from the definition, uses S[n+i+E−1]. This design follows the
equation. The testbenches check every output against the direct sum
above.

## System structure

```
 per-antenna      +----------------+   daisy chain   +---------+   +---------+
 spectra -------> | antenna_summer | --------------> | dd_fpga | ->| dd_fpga | -> ... (NDD = 4)
 (valid/ready)    +----------------+  spec_sample_t  | beams   |   | beams   |
                                                     | 0..8    |   | 9..17   |
                                                     +---------+   +---------+
```

`tardis_askap` (top) connects these parts:

- **antenna_summer**: adds beam b, channel c of all 36 antennas × 2
  polarizations. It keeps full precision: 16 + log2(72) bits in an
  accumulator RAM of 36 × 304 words. The sum is then shifted right by a
  programmable amount and saturated to 16 bits.
- **dd_fpga** ×4: each DD FPGA takes 9 beams (`beam_base = 9i`) from the
  stream and passes the whole stream on to the next one.

Inside each `dd_fpga`:

| block | what it holds / does |
|---|---|
| `corner_turner` | Forwards the stream. Captures its B beams in a two-half batch buffer of K = J spectra. Writes each full batch to the FTA channel by channel: K consecutive times per channel, one word per time carrying all B beams. |
| `fta` | Frequency-time array. A circular buffer of the last 2^14 spectra of every channel (16.4 s). One word = B × 16 bits. Address = channel·2^14 + time. |
| `sst` | Sample selection table. (eoff, loff) for every trial and channel, plus a channel table: processing order, enable flag, and the widest window of any trial in that channel. |
| `dd_controller` | State machines shared by all beams. A fetcher loads windows from the FTA; a processor sequences the engines. |
| `dd_buffer` ×B | Caches one channel's window. Double-buffered. Time-striped over J banks so that any J consecutive samples come out in one cycle. |
| `dd_engine` ×B | The differencing datapath described above. |
| `acc_memory` ×B | Two regions of D × J 32-bit accumulators: one being built, one being searched. |
| `transient_detector` ×B | Boxcar filter, running mean/variance, threshold test, per-trial flags. |

In the original system the FTA and SST live in DDR3 SDRAM on the FPGA
module. Here they are plain on-chip arrays with one write port and one
registered read port. The memory controller, host software, network cards
and PCIe fabric are outside this RTL; their signals are the top's ports.

## How a group is processed

The three stages work on neighbouring groups at the same time:

- The corner-turner stores batch g+1.
- The engines de-disperse group g.
- The detectors search group g−1.

The controller (`dd_controller.sv`) steps through group g as follows:

1. **Wait** until the corner-turner has written batch g, i.e. spectra up
   to time gJ+J−1.
2. **Init pass.** For each active trial (`n_trials` = N_T), one engine step
   reads lane J−1 (the last finished sample of group g−1) from the other
   accumulator region and writes it into all J lanes. In the very first
   group it writes zero.
3. **Channel passes.** Slots of the channel table are visited in order,
   and disabled slots are skipped.
   - The fetcher copies the channel's window, times
     gJ−eoff_max−1 .. gJ+J−1−loff_min, from the FTA into one region of
     every beam's buffer. It can run at most one channel ahead of the
     processor.
   - For each trial, the processor reads the SST entry and issues two
     buffer reads: the J latest samples (base gJ−loff) on one cycle and
     the J earliest-minus-one samples (base gJ−eoff−1) on the next.
   - It clocks one engine step every second cycle, so each engine does
     3J−1 additions per two clocks.
   - Between channels, the engine pipeline (J+2 stages) drains. This
     stops a trial's accumulator from being read before its previous
     update has been written back. It costs J+2 steps per channel, about
     4% at D = 448.
4. **Completion.** Once every detector has finished group g−1:
   - the accumulator regions swap;
   - the detectors start on group g;
   - `groups_done` advances, which frees the corner-turner to write
     batch g+2.

Flow control comes from that last step. If de-dispersion or detection
falls behind, the corner-turner's two halves fill up and its `in_ready`
goes low. The stall travels back along the daisy chain and through the
summer to the data source.

Constraint on the SST: `eoff ≤ 2^14 − 2J − 1`, so that a group's window
has not yet been overwritten in the FTA. That is about 16.35 s of delay at
1 ms, which covers the 3,000 pc/cm³ target at 700–1,004 MHz (about 13 s).

### The de-dispersion engine (`dd_engine.sv`)

Pipeline for one step, J lanes:

- **Stage 1:** J subtractors compute lat[j] − ear[j].
- **Stages 2..J:** one ripple adder per stage forms the prefix sum. Stage
  s adds lane s−2 into lane s−1.
- **Stage J+1:** J adders add the prefix sums to the accumulators of the
  trial. In an init step, a multiplexer loads A[d,n] (or zero) instead.

Timing:

- Latency is J+2 engine steps, which is 2(J+2) clocks.
- The accumulators are read combinationally in the ce cycle of the last
  stage and written on the following clock.
- An assertion checks that `ce` is never high on two consecutive cycles.

### The buffer (`dd_buffer.sv`)

The sample at time t is stored in bank t mod J, row (t div J), in one of
two regions. To read J consecutive samples from `rd_base`, every bank
computes its own row. A barrel shifter driven by `rd_base mod J` then puts
time rd_base+j on lane j. Each region is one full FTA channel deep.

### The transient detector (`transient_detector.sv`)

For one trial the detector works through these steps:

1. It loads the J finished samples into a boxcar RAM of 2J−1 words.
2. Level l+1 is built from pairs of level l: `(x[2i] + x[2i+1]) / 2`,
   giving log2(J)+1 = 5 levels.
3. For every sample x of every level, it updates the statistics of
   (trial, level):

   ```
   μn  = μ + (x − μ) / M
   σ²n = σ² + ((x − μn)(x − μ) − σ²) / S        (M, S powers of two, 2..1024)
   ```
4. It flags a detection when `x − μn > ξ·sqrt(σ²n)`.

The remaining details:

- **Fixed point.** μ has 8 fractional bits and σ² has 16.
- **Square root.** Computed two result bits per cycle.
- **Cycle count.** Each trial takes exactly 45J−17 clocks: 1 + J load
  cycles, 22 cycles per boxcar sample, and 4 closing cycles. At full size
  that is 448 × 703 = 314,944 clocks per group (1.35 ms at 233 MHz).
- **Outputs per group.** One D-bit flag vector with a valid strobe. It
  also streams out the de-dispersed samples (level 0). Software can read
  the statistics of any trial and level through a monitor port.
- **First group.** The statistics start with μ = x and σ² = 0.

A property of these equations is worth knowing when choosing settings.
The variance is updated with the very sample being tested, so a single
outlier can reach at most about sqrt(S) standard deviations above the
mean. With ξ = 6, S must therefore be at least 64. The testbenches use
S = 256.

## Interfaces and data types

`tardis_pkg.sv` defines the shared types and widths:

- `spec_sample_t` is one stream sample: 16-bit data, 7-bit beam, 12-bit
  channel, and `last` (end of spectrum).
- `sst_entry_t` is {eoff, loff}, 16 bits each.
- `chan_entry_t` is {chan, en, eoff_max, loff_min}.
- Accumulators and time-series samples are 32 bits.

Top-level ports of `tardis_askap`:

- **Input stream.** `in_valid/in_ready/in_data/in_ant/in_pol/in_beam/in_chan`.
  Within one integration the antenna/polarization frames must come in
  order (antenna 0 pol 0 first, the last antenna's pol 1 last). Inside a
  frame, any beam/channel order works. `scale_shift` sets the combining
  shift.
- **Software settings.** These are broadcast to every DD FPGA:
  - `n_trials`, `log2m`, `log2s`, `xi` (1..32);
  - SST writes (`sw_trial_we`, `sw_trial`, `sw_chan`, `sw_entry`);
  - channel-table writes (`sw_slot_we`, `sw_slot`, `sw_slot_entry`).

  The channel table also selects the processing order; interleaving high
  and low channels spreads out the FTA traffic. Program the tables before
  streaming.
- **Results per DD FPGA and beam.** `flags_valid/flags`, `ts_*` (time
  series), `mon_*` (statistics), and `groups_done`.

Defaults: NANT = 36, NBEAM = 36, NDD = 4, C = 304, D = 448, J = 16,
DEPTH = 16384. The same RTL covers the other published variants through
parameters:

- **single-dish:** C = 1024, D = 512, J = 64, one beam per FPGA;
- **MWA:** C = 3072, D = 1024, J = 64, DEPTH = 65536.

At those sizes the group time easily covers both de-dispersion and
detection.

## Verification

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. Run one with plain Verilator from the
repository root:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_dd_fpga \
          rtl/tardis_pkg.sv tb/tb_dd_fpga.sv -Mdir obj -o sim && obj/sim
```

| testbench | size | what is checked |
|---|---|---|
| `tb_antenna_summer` | 3 ant, 2 beams, 4 ch | every combined sample, shift, saturation, back-pressure |
| `tb_corner_turner` | B=2, K=4, C=3 | every FTA write (order, time, both beams), forwarding, stall while the de-disperser holds, release |
| `tb_fta`, `tb_sst`, `tb_acc_memory`, `tb_dd_buffer` | small | reference-model memory checks; buffer lane rotation at every base |
| `tb_dd_engine` | J=4 | results of init and channel steps over two intervals; latency 2(J+2) clocks |
| `tb_dd_controller` | J=4, D=3, C=4 | fetch windows, step counts and spacing, read bases, region alternation, waiting for the detector |
| `tb_transient_detector` | J=4, D=3 | flags, time series and statistics against a 128-bit reference model; D(45J−17) busy cycles |
| `tb_dd_fpga` | B=2, C=8, D=6, J=4, depth 64 | every de-dispersed sample against the direct sum; interleaved order, a disabled channel, FTA wrap, input stalls, forwarding, a detected pulse |
| `tb_tardis_askap` | 2 ant, 4 beams, 2 DD FPGAs | the whole chain end to end; counts stalls, saturations, FTA wraps, skipped channels, detections, region swaps, chained data |
| `tb_tardis_askap_full` | **full default size** | one complete group through 36×2 inputs, 36 beams, 4 DD FPGAs; spot checks of de-dispersed samples at three trials; 314,944-cycle detector time; 448×305 engine steps; flag latency under 3J integrations |

The full-size run streams 12.6 million input samples. It finishes in about
2–3 minutes of simulation after a one-minute build, and needs about
400 MB.

## Departures and limits

- **Memories.** The FTA and SST are arrays, not SDRAM. Burst efficiency
  and SDRAM bandwidth limits are therefore not modelled.
- **Pipeline drain.** The engine pipeline drains between channels. This
  is a simplification: it costs J+2 steps per channel.
- **Overwrite rule.** The corner-turner does not write batch b before group
  b−1 is finished. The FTA overwrite protection is this design's own rule.
- **Detector details.** The detector's fixed-point formats, its
  cycle-by-cycle schedule and its first-group initialisation are this
  design's own. Only the total cycle count follows the description.
- **Summer.** The summer's input order and its programmable shift are
  assumptions. The original only says the sum keeps bit growth and is
  scaled back to 16 bits.
- **Not included.** RFI excision beyond disabling channels, the trigger
  and voltage-buffer machinery, and the host software.
