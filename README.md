# FADR: FPGA data acquisition for a dual-phase xenon dark-matter detector

A dark-matter detector of the LZ kind watches about 750 photomultiplier tubes
(PMTs). High-gain and low-gain copies of their signals give 1359 channels.
An interaction gives two flashes: a fast one (S1, tens of nanoseconds) and a
delayed one (S2, microseconds, up to about a millisecond later).
Most of the time the channels show only baseline and noise. Recording all of
it at 100 MHz × 14 bits would be 2.7 GB/s, most of it noise.

FADR handles this in two ways:

- It keeps only the pieces of each waveform that leave the baseline. This is
  *Pulse Only Digitization*, and each kept piece is a *POD*.
- It decides in real time, from digital filters running on every channel,
  which stretches of time are worth keeping at all (*events*).

This repository holds synthesizable SystemVerilog for the logic of the whole
system and a self-checking testbench for each block. It covers:

- the firmware of the 32-channel digitizer (DDC-32);
- the Data Sparsifiers (the trigger boards);
- the Data Sparsifier Master and the DAQ Master;
- the Data Extractors.

Everything runs in one 100 MHz clock domain. Between boards the links are
plain wires.

## 1. The system at a glance

```
            +--------------------------- fadr_chain (x4) ------------------------------+
 ADC ----> | ddc32 x N:  waveform_injector -> ChMux -> 32 x ddc_channel                |
 samples   |               ddc_channel: pod_zero_suppression -> pod_buffer (2 x pod_bank)|
           |                            s1_filter, s2_filter (trigger)                  |
           |                            2 x s1_filter + s2_filter (rate monitors)       |
           |             ddc_digital_sum, spy_selector, ddc_readout (+ crc32_engine)    |
           |   data_sparsifier x NDS  (coincidence windows, multiplicity, sum)          |
           |   data_extractor  x NDE  (event collection, packets, CRC)  ---------------+--> de_out
           +-----------------------------+----------------------------------------------+
                                          | S1/S2 multiplicity per chain, digital sums
                       ext triggers --> sparsifier_master --trig--> daq_master
                       (random, PPS,     (OR of sources,        (pre/post windows,
                        DD|LED, aux)      downscale, run start)   holdoff, event ids)
                                          |                          |
                                          +-- ts_clear -> timestamp_counter
                                                                     +--> event_start / event_close /
                                                                          extract to all chains
```

The four processing chains, with their sizes as the top-level parameter
defaults:

| chain          | DDC-32s | Data Sparsifiers | Data Extractors | channels used |
|----------------|---------|------------------|-----------------|---------------|
| TPC high gain  | 16      | 2                | 6               | 494           |
| TPC low gain   | 16      | 2                | 6               | 494           |
| Skin           | 5       | 1                | 1               | 131           |
| Outer detector | 8       | 1                | 1               | 240           |

This gives 45 digitizers, 1440 inputs and 14 extractors.

How the digitizers are wired into a chain:

- Digitizer `d` of a chain reports to Data Sparsifier `d/8`. A sparsifier
  takes up to eight digitizers.
- Digitizer `d` is read out by Data Extractor `d mod NDE`. In the TPC chains
  the 16 digitizers therefore spread as 3,3,3,3,2,2 over the six
  extractors.
- A chain's sparsifier multiplicities are added into one S1 and one S2
  multiplicity for the chain.

All digitizers of a chain share one filter setting (`chain_cfg`).

## 2. From sample to POD

### Zero suppression (`pod_zero_suppression`)

The baseline is the mean of the 32 samples before the current one. The
comparison is made on sums (32 × sample against the 32-sample sum), so the
fractional mean is exact.

- A sample is *above threshold* when `baseline − sample > pod_thr`. PMT
  pulses are negative-going; the ADC range is offset so that almost all of
  it lies below the baseline.
- A POD holds everything above threshold, plus 32 samples before the first
  crossing and 32 after the last sample above threshold.
- A new crossing inside those 32 post-samples extends the same POD, so
  overlapping PODs merge.

To make the pre-samples possible, the stream is delayed by 32 samples. The
POD is then written in time order. A counter holds the distance, in
samples, to the latest crossing. A delayed sample is kept when that
distance is at most 64 samples. This one rule gives the pre-samples, the
post-samples and the merging. The baseline keeps running through pulses.

With zero suppression switched off (`zs_on` = 0), the channel records 500
raw samples after each `raw_trig` instead. The *channel multiplexer* makes
this useful: with `ch_mux[c]` = 1, digital channel `c` takes ADC channel
`c xor 1`. One ADC can then be recorded raw in one channel and
zero-suppressed in its partner. That is how the POD algorithm is checked
against the raw waveform.

### The POD memory: two banks, each a ring (`pod_bank`, `pod_buffer`)

Each channel owns two banks. A bank has a *header memory* of 250 words of
72 bits and a *sample memory* of 5120 words of 16 bits:

```
header word:  [71:24] time stamp of the first stored sample
              [23:11] address of the first sample in the sample memory
              [10:0]  number of samples
```

- **Writing.** Samples of successive PODs are written back to back. The
  header is written when the POD ends. A POD longer than 2047 samples (the
  11-bit length) continues as a new POD.
- **Full bank.** If either memory is full, further samples are lost. The
  bank's sticky `trunc` flag is set and travels with the channel's data,
  since the header has no spare bit. The moment the bank first fills is
  kept as its end time.
- **Pruning (the filling bank as a circular buffer).** While no event is
  pending, the oldest POD is dropped once it ends before `now − pre_window`.
  Dropping frees its header and its samples, at most one POD per clock.
  When a trigger is accepted, the prune limit freezes at
  `trigger time − pre_window`. From then on the bank keeps everything it
  receives until the event closes.
- **Bank switching.** At `event_close` (end of the post-event window) the
  filling bank closes. Writing moves to the other bank at once if that bank
  is empty.
- **Dead time.** If the other bank is still waiting to be read out, the
  channel has nowhere to write. It is *dead* until the readout frees a bank.
  `live` is the AND of all channels, and the DAQ Master accepts no trigger
  while it is low.
- **Start and end times.** Each bank records when it became ready (start
  time) and when it closed or first filled (end time). The live time can be
  computed from these offline.

### Time stamps

One 48-bit counter counts 10 ns clocks. It wraps after 32 days.

- The Data Sparsifier Master clears it on the first rising PPS edge after
  `run_start`. Time zero of a run is then a GPS second.
- The waveform injector sits in front of the channels and delays samples by
  two clocks. Each digitizer therefore stamps PODs with the counter value
  from two clocks earlier, so a POD's time stamp is the time its first
  sample left the ADC.

## 3. Finding events

### The S1 and S2 filters (`s1_filter`, `s2_filter`, `three_lobe_sums`)

Both filters are three-lobe boxcar FIRs over the raw samples `a`. The
centre lobe has weight −1, so a negative-going pulse in the centre lobe
gives a positive F. F is proportional to the pulse area. The side lobes
subtract the local baseline, so the channel's DC offset drops out. Write
A, B and C for the sums over the oldest, middle and newest lobe:

```
S1:  F = ½·A − B + ½·C      lobes N, N, N        (N ≤ 16, run-time)
S2:  F = 2·A − B + 2·C      lobes M, 4M, M       (M ≤ 128, central lobe ≤ 512)
```

- Lobe weights sum to zero, so a flat baseline gives F = 0 whatever its
  level.
- The S1 filter is computed as 2F, which keeps it in integers, and compared
  with 2T.
- A channel is *above threshold* when F > T.
- `three_lobe_sums` keeps the three running sums with a delay line:
  add at the lobe's leading edge, subtract at its trailing edge. After
  reset the output stays 0 until the whole window has filled.

Each channel runs two trigger filters (S1 and S2). It also runs three
monitor filters with their own settings:

- an S1 filter tuned to electronics noise;
- an S1 filter tuned to single photoelectrons;
- a second S2 filter.

### Coincidence and multiplicity (`data_sparsifier`)

A channel above threshold contributes to the multiplicity for the next C
samples, the coincidence window. C is set separately for S1 and S2. Each
channel has a down-counter:

- it is reloaded with C while the channel is above threshold;
- the multiplicity is the number of masked-in channels whose counter is
  non-zero.

The masks choose which PMTs take part, for example only the top TPC array
for the S2 trigger.

### Event selection (`sparsifier_master`)

There are twelve trigger sources:

- an S1 and an S2 multiplicity trigger per chain (8);
- random;
- GPS (the PPS itself);
- calibration (DD generator OR LED);
- an auxiliary input.

How sources are handled:

- A multiplicity source fires on the rising edge of
  `multiplicity ≥ required`. A required value of 0 disables it.
- External inputs are synchronised and fire on their rising edge.
- With a downscale factor D > 1, only every D-th firing of that source
  passes.
- The selection is the OR of the passed sources.
- A trigger is issued only while the run is on and the DAQ Master is ready.
  A source that fires while the master is busy is reported on
  `extra_trig` / `extra_src` instead. The published system writes such
  triggers into the data stream; here they only appear on these ports.
- Every source's firing rate is counted over each monitoring period
  (10 s).

### Event windows (`daq_master`)

An accepted trigger at time t has these effects:

1. Every digitizer gets `event_start` and `event_time = t`. This freezes
   pruning, so the pre-event window [t − pre, t] is kept.
2. After `post_window` samples, `event_close` closes the filling banks on
   all digitizers at once. The event number goes to the Data Extractors.
3. A holdoff of `holdoff` samples follows, during which no trigger is
   accepted. It avoids retriggering on the tail of a large S2.
4. Triggers during the post-event window do not extend it.

The master counts the clocks in which it could not take a trigger, split
three ways: `busy_cycles` (window), `hold_cycles` (holdoff) and
`full_cycles` (some channel dead). The first science run used 2 ms pre,
2.5 ms post and 2 ms holdoff: 200000 / 250000 / 200000 samples. The window
registers are 20 bits wide (up to 10.5 ms).

## 4. Getting the data out

### Digitizer readout stream (`ddc_readout`)

A digitizer sends an event once every channel has a closed bank waiting.
The stream is 16-bit words at one word per clock while `ready` is high:

```
{D,0,ddc_id[7:0]}
per channel c = 0..31:
   {C,000000,trunc,c[4:0]}  start[47:32] start[31:16] start[15:0]
   end[47:32] end[31:16] end[15:0]  {00000000,pod_count[7:0]}
   per POD:  ts[47:32] ts[31:16] ts[15:0]  {B,0,len[10:0]}  len x {00,sample[13:0]}
{E,000}  crc[31:16]  crc[15:0]          (last)
```

The CRC-32 is the Ethernet/zlib CRC, taken over every word before the
`{E,000}` marker, high byte first. Sample words are fetched one clock ahead
through the sample memories' registered read port. This sustains one word
per clock.

### Packets (`data_extractor`)

For each event number, an extractor copies the streams of its digitizers
one after another into packets of at most 4400 payload words (8800 bytes, a
jumbo frame). The packet layout is:

```
event_id[31:16]  event_id[15:0]  sequence number
payload (<= 4400 words)
{last_packet_of_event, word_count[14:0]}  crc[31:16]  crc[15:0]   (last)
```

Each packet's CRC covers its payload. The receiver rebuilds the digitizer
records and checks their own CRCs. The UDP/Ethernet transmitter that
would consume `de_out` is not part of this design.

### The digital sum

This is the path of the whole-detector sum that can be used for a total-area
cut:

1. A digitizer sums its masked-in channels and keeps bits [19:3] (17 bits).
2. A sparsifier adds up to eight of these and keeps bits [19:2] (18 bits).
3. The master adds the top and bottom array sums into 19 bits.

In this design, the two sparsifiers of the TPC high-gain chain are taken as
the top and bottom arrays.

## 5. Monitoring and test features

- **Rates.** Every channel counts five rates per 10 s period:
  - crossings of the noise filter;
  - crossings of the single-photoelectron filter;
  - crossings of the S2 monitor filter;
  - POD threshold crossings;
  - samples beyond the POD threshold.

  They are read one channel and kind at a time (`rate_ch`, `rate_kind`).
- **Spy outputs.** Each digitizer drives two 14-bit DAC words. Each can show
  one channel, the digitizer sum (top 14 bits) or a channel's S1 filter
  value (clamped, offset to mid-scale).
- **Arbitrary waveform injection.** A 16384-sample memory of signed offsets
  is written through `inj_wr_*`. `inj_strobe` plays `inj_len` samples of it
  into none, one or all channels of every digitizer. The result is added to
  the real ADC samples and clamped to 14 bits, so the test includes real
  ADC noise.

## 6. Timing reference

| path | latency |
|---|---|
| ADC sample → channel input (injector) | 2 clocks |
| channel input → trigger flag | 1 clock (plus the filter's own delay) |
| flag → sparsifier multiplicity | 2 clocks; counts for C clocks |
| multiplicity reaching the requirement → `trig` | 2 clocks |
| `trig` → `event_start` on digitizers | 1 clock |
| spy / digital-sum output | 3 clocks after the ADC sample |
| readout and extractor throughput | 1 word/clock; an extractor adds 6 words per packet |

## 7. Where this differs from the published system

- **Sample memory size.** The sample memory holds 5120 words per bank, as
  the published memory map shows. The text quotes 18,412 samples per buffer
  elsewhere.
- **Sensors chain.** There are four processing chains and 14 extractors. A
  fifth sensors digitizer listed with the hardware is not included.
- **Skin digitizer count.** The Skin chain has 5 digitizers, as in the
  hardware table; one drawing shows 6.
- **Design-specific formats and choices.** These were chosen here, not
  taken from the published system:
  - the readout word format and the packet header;
  - the CRC variant and byte order;
  - the trigger source numbering and the auxiliary trigger;
  - the injection memory format and its depth;
  - the spy scaling;
  - how digitizers are assigned to extractors and sparsifiers;
  - the truncation flag per bank instead of per POD.
- **Trigger latency.** The published system measures about 93 samples from
  the multiplicity condition to the trigger time stamp. That figure includes
  the board links. Here the latency is a few clocks.
- **Not recorded with the event.** The list of PMTs that contributed to the
  trigger is not stored with the event. Neither are the trigger sources or
  the extra triggers: they leave on top-level ports only.
- **Other parts not modelled:**
  - x–y fiducialization of the S2 trigger;
  - the total-area cut itself (the sum is only produced);
  - the board processors;
  - the UDP stack;
  - the analog front end, the ADCs and the DACs.

## 8. Simulating and changing it

All files use one package, `rtl/fadr_pkg.sv`. A block's testbench is
`tb/tb_<block>.sv`. With Verilator 5:

```
verilator --binary --timing -Irtl -Itb rtl/fadr_pkg.sv tb/tb_fadr_top.sv \
          --top-module tb_fadr_top -Mdir obj_top && obj_top/Vtb_fadr_top
```

Every testbench ends by printing `TB_RESULT checks=N failures=M`. Each also
has a watchdog.

Most block testbenches shrink the block through its parameters (fewer
channels, smaller memories, short rate periods). They compare it with an
independent model: a reference FIR, a bit-serial CRC, a POD model, a
coincidence model and so on. They also check latencies in clocks.

The two system-level testbenches:

- **`tb_fadr_top`** runs the whole design with small chains (2+1+1+1
  digitizers of 2 channels) through a run. It counts each mechanism and
  fails if one never happens:
  - run start on PPS;
  - S1 and S2 multiplicity triggers, random, GPS, calibration and auxiliary
    triggers, and downscaling;
  - extra triggers in the window;
  - injection;
  - channel multiplexing and raw capture;
  - truncation and dead time;
  - POD splitting;
  - CRC-checked packet reassembly.
- **`tb_fadr_top_full`** instantiates the top with every parameter at its
  default (45 × 32 channels, full memories). It takes it through one
  acquisition:
  - PPS run start;
  - S2 pulses on eight TPC channels, which must give one S2 trigger;
  - every one of the 14 extractors must deliver the event, with a
    well-formed, CRC-correct record per digitizer;
  - exactly the eight pulsed channels must hold PODs.

  The event windows are set to a few hundred clocks here so the test stays
  short. The windows are run-time settings, not parameters. The C++ build
  of this model takes about a quarter of an hour on four cores; the run
  itself takes a few seconds.

All sizes are parameters with the published values as defaults, so a
different detector only needs new top-level parameters.
