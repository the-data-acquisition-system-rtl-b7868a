# Front-end logic of a dual-phase xenon dark-matter detector DAQ

A xenon time projection chamber sees an interaction twice: a prompt, short
flash of scintillation light (S1, tens of nanoseconds) and, up to hundreds of
microseconds later, a broad electroluminescence pulse (S2, a few microseconds)
made by the ionisation electrons. About 1300 photomultiplier channels are
digitized continuously at 100 MHz with 14 bits. Keeping all of that is
impossible, so the digitizers hold recent pulses in on-chip circular buffers
while a separate sparsification path watches compact summaries of every
channel and decides, in real time, which stretches of time are worth reading
out.

This RTL models that system as one synchronous design:

```
ADC samples ─► ddc32 (x42) ──trigger primitives──► ds_board (x6) ─► dsm ─► trigger
                 │  S1/S2 filters, hits,                                   │
                 │  digital sum, pulse-only buffers                        ▼
                 │◄────────────── readout window command ─────────── daq_master
                 └──waveform words──► data_extractor (x14) ──► UDP/Ethernet bytes
```

The boards are grouped by detector region, each with its own digitizers,
sparsification boards and extractors:

| group          | channels in use | DDC-32 | DS | DE / Ethernet link |
|----------------|-----------------|--------|----|--------------------|
| TPC low gain   | 488             | 16     | 2  | 6                  |
| TPC high gain  | 488             | 16     | 2  | 6                  |
| skin           | 180             | 6      | 1  | 1                  |
| outer detector | 120             | 4      | 1  | 1                  |

The TPC signals go through dual-gain amplifiers, which is why the TPC appears
twice. 42 digitizers give 1344 inputs for the 1276 channels.

## The pulse-area filters

Every channel, and the total sum at the master, runs two integrating filters
with three adjacent rectangular windows (`three_window_filter`):

* **S1 filter** (`s1_filter`): windows of n, n, n samples weighted +½, −1, +½.
* **S2 filter** (`s2_filter`): windows of n, 4n, n weighted +1, −½, +1.

Both kernels sum to zero. A constant baseline therefore produces zero output,
which is the "real-time baseline subtraction". A negative-going PMT pulse that
fits inside the middle window gives an output proportional to its area: the
full area for S1 and half of it for S2, with negative side lobes while the
pulse crosses the outer windows. To stay in integers, both modules output
**twice** the filter value (`area_x2`, weights +1/−2/+1 and +2/−1/+2).

Example (S1, n = 6): a pulse with samples 157, 150, 10, 30, 155 on a baseline
of 160 has an area of 298. `area_x2` first dips to −298, then peaks at 596,
then dips to −298 again, and is zero before and after. `tb_s1_filter` checks
exactly this.

Each window keeps a running sum. Every cycle the sum gains the sample that
enters the window and loses the one that leaves it. The samples live in one
circular delay line of 2n+n_mid entries with three read taps. The cost is
therefore independent of n, which matters for the S2 filter (300 taps at
n = 50). After reset, a leaving sample counts as zero until the line has
filled once, so the delay memory needs no clearing; `valid` rises at that
point. Latency is two cycles from sample to output.

n = 6 for S1 corresponds to the ~60 ns full width at tenth maximum of an S1
pulse. n = 50 for S2 (a 2 µs middle window) is a choice within "a few
microseconds".

## Digitizer (`ddc32`)

Per channel: an S1 and an S2 filter, each compared with a per-board threshold
(`cfg.s1_thr`, `cfg.s2_thr`, in `area_x2` units), giving two 32-bit hit
vectors. Their popcounts are the multiplicities. The board also forms a
digital sum of the raw samples of the channels selected by `cfg.sum_mask`.
These trigger primitives (`ddc_tp_t`) leave every cycle.

**Pulse-only buffer (`pod_buffer`).** A sample counts as "pulse" when it is
more than `pod_thr` counts below the configured `baseline`. Each such sample
keeps PRE = 8 samples before it and POST = 8 after the last one. Kept samples
go, with their 32-bit timestamp, into a 4096-word circular memory per channel.
When the memory is full, the oldest word is overwritten and counted.

**Readout.** A readout command carries an event number and a time window. For
each command the buffer walks from its oldest word:

* Words older than the window are freed for good. Commands arrive in time
  order, so no later event can need them.
* Words inside the window are sent but not freed, so overlapping windows of
  later events can read them again.
* The walk stops at the first word past the window.

The reader takes two cycles per word. The digitizer sends an event-header
word, then channels 0 to 31 in turn, then an event-end word. Every word is a
64-bit `wave_word_t` = {kind, board, channel, timestamp or event number,
sample}. Commands wait in a 4-entry FIFO, and a full FIFO pushes back on the
DAQ Master.

All boards count the same 10 ns timestamp. Each board clears its counter on
the DAQ Master's `sync` pulse.

## Sparsification: `ds_board` and `dsm`

A DS board adds the multiplicities and digital sums of its digitizers (8 per
board in the TPC) and passes on their hit vectors; this takes one cycle. The
master (`dsm`) then:

* adds the multiplicities per detector group;
* adds the sums of the groups chosen in `sum_groups` into a total-sum
  waveform, and filters it with its own S1 and S2 filters (total pulse area);
* checks twelve trigger sources, each with its own enable bit:
  * bits 0–3: group S1 multiplicity;
  * bits 4–7: group S2 multiplicity;
  * bit 8: total-sum S1 area;
  * bit 9: total-sum S2 area;
  * bit 10: external heartbeat;
  * bit 11: LED calibration sync.

A trigger is issued when any enabled source is active, unless one was issued
in the last 400 cycles (the hold-off). 400 cycles matches the maximum design
event rate of 250 kHz. Requests during the hold-off are counted as suppressed.
With each trigger the DSM outputs a record of the group multiplicities and
total-sum areas (`record`). This record is meant to be stored with the event.

Each group has its own thresholds, because groups see different signals: the
outer detector has no S2, for example.

## Readout: `daq_master` and `data_extractor`

The DAQ Master turns a trigger at time T into the window [T−100, T+300]. It
issues the command as a broadcast once T+300+16 has passed, and only when
every digitizer's command FIFO has room. Otherwise it stalls, with up to 16
commands queued. Triggers that arrive while the queue is full are dropped and
counted.

Each Data Extractor serves its digitizers in order, one whole event at a time
(3 per extractor in the TPC; the last TPC extractor serves one). It packs the
words into frames of at most 180 words and sends them one byte per clock on a
GMII-style interface. Each frame has:

* preamble and SFD;
* Ethernet header, type 0x0800;
* IPv4 header with checksum, and a UDP header with checksum 0;
* an 8-byte application header: event number, last-packet flag, per-link
  sequence number and word count;
* the payload words, most significant byte first;
* CRC-32 FCS, then a 12-byte gap.

The sequence number and word count let the receiving computer check that
nothing was lost. This is what makes plain UDP usable on the dedicated
point-to-point link.

## What is modelled and what is not

Follows the source description:

* the channel, board and link counts;
* 14 bits at 100 MHz;
* the two filter kernels and the S1 width;
* hit and multiplicity vectors and the masked digital sum;
* the total-sum filters at the master;
* the external triggers and the 250 kHz event rate;
* circular pulse-only buffers read out on selection;
* UDP/Ethernet packaging with application-level consistency data.

This design's own choices:

* the S2 window (n = 50);
* the baseline-suppression rule, PRE/POST and buffer depth;
* all word and frame layouts;
* the OR-of-thresholds trigger rule and the hold-off;
* window lengths, queue depths and the mapping of boards to DS and DE.

Not built:

* ADCs, amplifiers and PMTs;
* the HDMI/SerDes links between boards: their protocol is unspecified, so
  here all boards share one clock and are wired directly;
* the board-control processors: configuration enters as ports;
* the receiving computers and the event builder;
* selection on hit patterns and S1/S2 pulse-shape discrimination: the
  criteria are not specified;
* merging of the DSM record into the Ethernet streams: it leaves the top as
  `rec_valid`/`record`.

The extractor's byte interface runs at 100 MHz, which gives 100 MB/s raw per
link. A real 1 Gbit MAC runs at 125 MHz, which would need a clock-domain
crossing. At 100 MHz, about 95 MB/s of payload per link falls short of the
~107 MB/s per link needed for a 1.5 GB/s peak over 14 links.

## Files

* `rtl/lz_daq_pkg.sv`: widths, group board counts, and the structs for trigger
  primitives, configuration, commands, waveform words and trigger records.
* `rtl/three_window_filter.sv`, `rtl/s1_filter.sv`, `rtl/s2_filter.sv`: the
  filters.
* `rtl/pod_buffer.sv`: the channel buffer.
* `rtl/sync_fifo.sv`: a small FIFO.
* `rtl/ddc32.sv`, `rtl/ds_board.sv`, `rtl/dsm.sv`, `rtl/daq_master.sv`,
  `rtl/data_extractor.sv`: the boards.
* `rtl/lz_daq_top.sv`: the whole system. Group sizes are parameters
  (`N_DDC_G`, `N_DS_G`, `N_DE_G`).

## Simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
          --top-module tb_lz_daq_top rtl/lz_daq_pkg.sv tb/tb_lz_daq_top.sv
./obj_dir/Vtb_lz_daq_top
```

* `tb_lz_daq_top` runs a reduced system (6 digitizers, 5 links). It provokes
  every trigger source, the hold-off, a DAQ Master stall, dropped triggers,
  events split over several frames, and a buffer overflow. It decodes every
  frame on every link, checks its CRC, and compares every sample with the
  generated input.
* `tb_lz_daq_full` runs the full-size system at its default parameters (1344
  inputs, 14 links) through one S1-multiplicity event, end to end.
