# Data acquisition and real-time processing FPGA for a radial neutron camera

This RTL is a two-channel FPGA front end for scintillation detectors. The
detectors see a mix of neutrons and gamma rays at high count rates. Each
detector signal is digitised at 1.6 GS/s with 12 bits. The FPGA does three
jobs in real time:

- It turns every detector pulse into an **event record**: a time stamp, a
  window of raw samples, and the number of piled-up pulses. These records are
  for archiving.
- It classifies every pulse as **neutron or gamma** from the pulse's peak and
  its area. This is pulse-shape discrimination, PSD.
- It can build **pulse-height spectra** (PHS) of both particle types, with a
  set of counters, for each control cycle of the plant (for example every 2 ms).

Everything goes to a host computer over PCIe by DMA. After each DMA transfer
the FPGA writes a status word into host memory. The host therefore learns
what arrived by polling its own memory, not by reading registers across the
bus.

The target is a Xilinx Kintex-7 board with an FMC carrying two 1.6 GS/s ADCs
and a programmable clock synthesizer. The ADCs, the synthesizer and the PCIe
hard block are outside this RTL. Their signals are the ports of the top
module, `rnc_daq_top`.

## Data path of one channel

```
ADC (demux mode)  2 x 12-bit DDR buses, 400 MHz
  -> ddr_capture     4 samples per 400 MHz clock
  -> averaging_inv   average of the 4 -> one 13-bit sample per clock, optional inversion
  -> dts_filter      trapezoidal shaper with baseline subtraction, or bypass
  -> event_detector  level or first-derivative threshold, upward crossing
       |-> pulse_window -> event_packet_buffer (16b -> 64b, clock crossing) -> DMA 0
       '-> psd -> [phs_counts] -> process_packet_buffer (clock crossing)   -> DMA 1
```

`channel_proc` holds this chain. The event path stores *raw* conditioned
samples. These are delayed by the filter and trigger latency (5 clocks), so
the sample shown in the trigger cycle is the one that crossed the threshold.
The PSD works on the *filter output*, or on the raw stream when the filter is
bypassed.

### Conditioning

In demux mode each ADC delivers two 12-bit buses, and both clock edges carry
data. That gives four samples per 400 MHz sampling clock. `ddr_capture`
models the FPGA's input DDR registers. `averaging_inv` adds the four samples
and keeps the sum divided by two. That is a 13-bit average, one bit more than
the ADC, which matches the resolution gained by averaging four samples.
`invert` mirrors the value so that negative detector pulses come out
positive.

### Filter

The filter slot is generic and can be bypassed. The filter provided is a
recursive digital trapezoidal shaper. With v = x − offset:

- d[n] = v[n] − v[n−K] − v[n−L] + v[n−K−L]
- p[n] = p[n−1] + d[n]
- r[n] = p[n] + M·d[n]
- s[n] = s[n−1] + r[n]
- y[n] = s[n] >> shift, saturated to 16 bits

M cancels the exponential decay of the pulse (pole-zero correction). The
height of the trapezoid is then proportional to the pulse energy.

The shaper has a DC gain of K·L. The baseline offset must therefore be
subtracted first, and the `offset` field of register THRESH does that.
Bypassed or not, the filter has a latency of 4 clocks, so the later stages
see the same timing in both modes.

### Trigger

- The **level** trigger fires when the sample crosses the threshold upward.
- The **derivative** trigger applies the same test to x[n] − x[n−1]. It reacts
  to the fast leading edge and ignores slow baseline drift.

Either trigger fires once per crossing, as a one-clock pulse.

### Event storage (`pulse_window`)

This is the part with the most rules. An event is written as 16-bit words:

| words | content |
|---|---|
| 0–3 | 64-bit time stamp of the trigger, least significant word first |
| 4 … n·PWIDTH−3 | raw samples, starting PTRG samples before the trigger |
| n·PWIDTH−2 | P: number of triggers in the event (16 bit) |
| n·PWIDTH−1 | {n−1 (8 bit), end tag 0xEE (8 bit)} |

A host finds the end of an event by looking at word k·PWIDTH−1 for
k = 1, 2, …. It must check both bytes there: the end tag and k−1. A raw
sample in that position can have 0xEE as its low byte, and at high pile-up
rates that does happen.

A counter runs down from PWIDTH over each window. A trigger that arrives
while the counter is in the second half of the current window marks pile-up.
The event is then extended by one more PWIDTH instead of being closed. The
decision is taken three words before the window ends, so that the trailer can
still be placed.

Every trigger during the event increments P. A trigger that comes when no
event can start (the buffer has no room for a PWIDTH) increments
`lost_events`. So does a trigger that comes during the two trailer words. As
a result, each trigger is accounted for exactly once: either in some event's
P or in `lost_events`.

The writer only starts or extends an event when the packet buffer reports
room for another PWIDTH. Events therefore always reach the host whole.

The samples come from a delay line tapped at PTRG + 4. That makes the four
time-stamp words and the pre-trigger samples come out in the right order.
PTRG can be at most `PTRG_MAX` (60).

The default PWIDTH is 64 and the default PTRG is 16. PWIDTH must be a
multiple of 4 and at least 8. Because it is a multiple of 4, every event
starts on a 64-bit boundary in the host ring buffer.

### Pulse-shape discrimination (`psd`)

For `psd_len` samples from the trigger on, the PSD block keeps two values:

- the **peak**: the maximum sample;
- the **charge integral** CI: the sum of the positive samples.

A pulse is classed as a **neutron** when CI·256 > slope·peak, and as a
**gamma** otherwise. `slope` is an 8.8 fixed-point number, so the test is the
ratio CI/peak against the slope, done without a divider. Further triggers
inside the window are counted as pile-up (PU, saturating at 7).

Each pulse gives two 64-bit words:

| word | bits | field |
|---|---|---|
| 1 | [48:0] | time stamp |
| 2 | [56:32] | CI (25 bit, saturating) |
| 2 | [21:19] | PU |
| 2 | [18:16] | one-hot class: 100 neutron, 010 gamma, 001 LED |
| 2 | [12:0] | peak |

LED calibration pulses are not detected, so the LED bit is never set.

### Spectra and counters (`phs_counts`)

When `phs_en` is set, the PSD words go to the spectrum builder instead of to
the host. Binning:

- The pulse height (peak, or CI when `phs_use_ci` is set) gives bin = value >> `phs_shift`.
- There are 1024 bins by default.
- Bins and counters are 16 bits and saturating.
- Pile-up events are counted but not added to the spectra. The neutron and
  gamma totals (and the window counts) cover the same single events as the
  spectra, so neutron + gamma + LED = single.

The bins live in two banks of NBINS/2 64-bit words, each word holding
{N bin 2k+1, N bin 2k, γ bin 2k+1, γ bin 2k}. An event is one
read-modify-write of one 16-bit lane.

At each `sdn_tick` the banks swap. The full bank is then sent and cleared
word by word, while the other bank collects new events. A PHS packet is:

```
word 0                {16'h0, time stamp [47:0]}
words 1 .. NBINS/2    spectrum lines, bins 0,1 first
count word 1          {LED, single, pile-up, total}
count word 2          {0, 0, gamma total, neutron total}
count word 3          {n in DT window, n in DD window, gamma in DT window, gamma in DD window}
```

DT and DD are two bin windows, set by registers. Their intended use is around
the 14 MeV and 2.5 MeV neutron lines.

A tick that arrives while a packet is still being sent is not honoured. It is
counted in `phs_overruns`, and the cycle simply goes on. After reset both
banks are cleared, which takes NBINS/2 clocks.

## PCIe side

All of this runs on the endpoint's user clock. The channels reach it through
dual-clock FIFOs with Gray-coded pointers (`async_fifo`).

### DMA engine and host buffers

`dma_engine` serves four sources:

| source | data | channel |
|---|---|---|
| 0 | DMA 0, events | 0 |
| 1 | DMA 0, events | 1 |
| 2 | DMA 1, PSD or PHS | 0 |
| 3 | DMA 1, PSD or PHS | 1 |

Each source writes into its own ring buffer in host memory. The base address
comes from a register, and the size is the common `ring_mask + 1`. Bases must
be aligned to the smaller of the ring size and 4 KiB.

A source is served, round robin, when it meets either condition:

- it holds a full burst (32 Q-words, 256 bytes; the host must accept
  256-byte write payloads, or `BURST` must be set to 16);
- it has held data for `FLUSH_CYCLES` (4096) clocks without reaching a burst.
  This is the flush that delivers the tail of a run.

A transfer is also cut at the end of its ring and at every 4 KiB boundary.

Every DMA 0/1 transfer is followed by a DMA 2 write of one status Q-word to
the status address:

| bits | field |
|---|---|
| [63:62] | DMA (0/1) |
| [61:60] | channel |
| [59:44] | DMA 0 transfers so far |
| [43:28] | DMA 1 transfers so far |
| [27:0] | ring offset just past the data |

The host reads new data up to that offset.

### TLP formatting (`pcie_tx_engine`, `pcie_rx_engine`)

The endpoint interface is a 64-bit stream with DW0 in bits [31:0]. The
transmit side builds PCIe Memory Write packets:

- Above 4 GiB they use a 4-DW header.
- Below 4 GiB they use a 3-DW header. There the payload is shifted by one DW,
  and the packet ends with a half beat (`tkeep = 0x0F`).

A register read is answered with a one-DW Completion with Data. A pending
completion goes out before the next write packet.

The receive side decodes one-DW Memory Writes and Memory Reads, with either
header size. Other packets are ignored. The register index is address bits
[6:2] of the BAR.

### Registers (`system_control`)

All registers are 32 bits.

| idx | name | fields (reset value) |
|---|---|---|
| 0 | CTRL | [0] acq_en, [1] filter_bypass, [2] trig_deriv, [3] phs_en, [4] phs_use_ci, [5] invert, [6] ts_clear, [7] pll_start (self-clearing), [8] dma_en |
| 1 | THRESH | [15:0] threshold (200), [31:16] filter offset (0) |
| 2 | WINDOW | [15:0] PWIDTH (64), [31:16] PTRG (16) |
| 3 | DTS | [15:0] M (20), [20:16] shift (4) |
| 4 | PSD | [15:0] psd_len (32), [31:16] slope 8.8 (0x0300) |
| 5 | PHS | [4:0] phs_shift (5) |
| 6, 7 | WIN_DT, WIN_DD | [15:0] low bin, [31:16] high bin (0, 1023) |
| 8–15 | DMA bases | {low, high} word pairs for sources 0..3 |
| 16, 17 | status address | low, high |
| 18 | ring mask | 0xFFFF (64 KiB rings) |
| 19–29 | synthesizer | eleven 24-bit words |
| 30 | losses (read only) | [31:24] ch 1 losses, [23:16] ch 0 losses, [15:8] ch 1 PHS packets, [7:0] ch 0 PHS packets |
| 31 | ID (read only) | 0x524E4301 |

A channel's "losses" byte is the sum of four counters: lost events, event
FIFO overflows, dropped PSD packets and PHS overruns.

The configuration is meant to be changed while acquisition is stopped. Only
`acq_en` and `ts_clear` are synchronised into the sampling-clock domain. The
loss counters are read across the clock boundary as a snapshot.

Writing `pll_start` sends the eleven words to the ADC clock synthesizer
(`pll_control`):

- three-wire port: clock, data, latch enable;
- MSB first, with data changing while the clock is low;
- a latch-enable pulse after each 24-bit word;
- the whole set takes 11 × 49 × `CLK_DIV` clocks.

## Where this departs from, or adds to, the original design

- **Additions.** These are needed for correct operation, but nothing in the
  description specifies them:
  - the baseline subtraction before the shaper;
  - the buffer-space check and the loss counters;
  - the ring buffers, bursts, flush rule and 4 KiB splitting of the DMA;
  - the status-word layout;
  - the register map;
  - the synthesizer serial protocol.
- **PSD packet.** The printed field for CI overlaps its neighbour. CI is
  placed at [56:32]. The class encoding is one-hot. The direction of the slope
  test (neutron above the slope) is a choice.
- **Shaper.** The original adjusts the shaper parameters to give
  near-Gaussian pulses. The adjustment is not known, so the textbook
  trapezoid is used; K, L, M and the shift are the knobs.
- **Not built.** These are outside the FPGA or not specified:
  - the ADCs, the synthesizer and the PCIe hard block;
  - a "buffer" shown after the averaging stage, whose function is not given;
  - LED pulse detection.
- **Spectra.** Pile-up events are excluded from the spectra, and overrunning
  ticks are dropped. Both are this design's rules.
- **Timing.** Timing closure at 400 MHz has not been checked; only simulation
  has been done.

## Capacity at the default sizes

- **Link bandwidth.** Two ADCs are expected to produce about 0.5 GB/s each, so
  1 GB/s in total. Continuous acquisition of both channels, every sample
  kept, is 2 × 400 MS/s × 2 bytes = 1.6 GB/s. The transmit stream is 64 bits
  wide; at a 250 MHz endpoint clock that is 2 GB/s raw. A full transfer takes
  39 clocks for 32 payload Q-words (2 header beats, 3 status beats and 2
  turnaround clocks), so 1.64 GB/s of payload remains. That just covers
  continuous acquisition, with little margin. With `BURST` = 16 it falls to
  about 1.4 GB/s.
- **Event rate.** The event writer is busy for PWIDTH clocks per event. At
  PWIDTH = 64 that allows up to 6.25 Mevents/s per channel, above the 2
  Mevents/s per channel (4 per board) the design must handle.
- **Spectra.** At 500 kevents/s per channel and a 2 ms cycle, a spectrum
  collects about 1000 events. That is far below the 16-bit limits. A
  4.1 kB PHS packet is sent in about 4 µs.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one:

- compares the block against values computed independently;
- prints `TB_RESULT checks=<n> failures=<m>`;
- has a watchdog.

They use plain `$urandom` and need no other files. For example:

```
verilator --binary --timing -Irtl -y rtl +libext+.sv rtl/rnc_pkg.sv tb/tb_psd.sv --top-module tb_psd
./obj_dir/Vtb_psd
```

`tb_rnc_daq_top` runs the whole design at its default parameters. It drives
synthetic detector pulses into both channels, about 10 % of them piled up.
Acting as the host, it configures the design over PCIe register writes and
reads registers back. It parses every packet sent: events, PSD and PHS
packets, status words, completions and the synthesizer serial stream.

It runs four phases:

1. bypass with the level trigger, PSD mode;
2. trapezoidal filter with the level trigger, PHS mode, with a forced overrun;
3. bypass with the derivative trigger, PSD mode;
4. DMA stopped while pulses continue, so events are lost and PSD packets are
   dropped, then a full drain.

It counts each mechanism and fails if any never occurred:

- bypass and filter;
- both triggers;
- pile-up extension;
- losses and drops;
- both DMA 1 modes;
- PHS overrun;
- DMA flush;
- 3-DW and 4-DW writes;
- status writes;
- register reads;
- synthesizer programming.

The end-to-end run takes well under a minute with Verilator.

`tb_workload_phs` runs the spectrum workload at full rate, again on the whole
design at default parameters. Both channels receive Poisson-distributed
pulses at 500 kevents/s each: short gamma-like pulses on channel 0, long
neutron-like pulses on channel 1. It simulates two real-time cycles of 2 ms
in PHS mode, with events streamed on DMA 0 at the same time. It checks:

- one PHS packet per channel per cycle, with no overrun and no drop;
- that the counts agree with the PSD results and the spectra;
- that at least 95 % of each channel is given the right class;
- that pile-up appears at a plausible share;
- that every trigger is either in an event or counted as lost;
- that the measured rate is within 10 % of 500 kevents/s.

It takes a few seconds with Verilator.

`tb_workload_stream` measures that link budget. It keeps both event sources
of the DMA engine full and lets the transmit stream run unthrottled. It then
checks that at least 0.80 payload Q-words per clock get through (1.6 GB/s
at 250 MHz) and that the two channels share the link fairly. The measured
figure is 0.82.

`tb_workload_rate` is the same test at the peak rate the design must handle,
2 Mevents/s per channel (4 per board). At that rate many events are extended
several times by pile-up, and some triggers fall on trailer words and are
counted as lost. The test checks that no event buffer overflows and no
real-time packet is dropped. It takes about 20 seconds.
