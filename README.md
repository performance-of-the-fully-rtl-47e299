# GALILEO preprocessing FPGA: a fully digital gamma-ray front end in SystemVerilog

GALILEO is a gamma-ray spectrometer built from high-purity germanium (HPGe)
detectors. Its read-out digitizes every preamplifier signal directly, with
14 bits at 100 Msps. All the work an analog shaping amplifier and a
discriminator used to do then happens in one FPGA per 36 channels:
- find the pulses;
- measure their energy;
- keep a short trace of each;
- ask the array-wide trigger system whether the event is wanted;
- ship the wanted ones to a PC at up to 400 MB/s.

This repository holds RTL for that preprocessing FPGA. It covers everything
between the decoded serial links of the digitizers and the host link. Both
link layers are outside it: the JESD204A decoders and the PCI Express
endpoint.

The main idea is to treat each channel as an independent self-triggering
spectrometer. Every channel holds a tentative event, made of energy,
timestamp and trace, in a local slot while the global trigger tree decides
about it. The channel must never miss the decision window, and it must never
mix up which energy belongs to which pulse.

```
 36 links  ┌─────────────┐   ┌──────────────────────────── channel_proc (x36) ───────────────────────────┐
 ─────────►│ deskew_fifo │──►│ trigger_l1 ──► idle_trigger                                                 │
 (14 bit)  │  (x36)      │   │     │               │                                                       │
           └─────┬───────┘   │     ▼               ▼                                                       │  ┌─────────────────┐
   sync pulse    │ release   │  event_buffer ◄── trapezoid_energy ◄── baseline_restorer (on filter output) │─►│ readout_arbiter │─► 32 bit, 400 MB/s
   marker  ──────┘ (AND)     │  (slots, GTS request/reply, time-out)                                       │  └─────────────────┘
                             └────────────────────────────────────────────────────────────────────────────┘
       gts_leaf: timestamp, request round robin, reply routing ◄──► GTS tree
       spectra_trace_ram: long traces or histogram of one selected channel
       slow_ctrl_regs: host register map
```

## Lining the channels up

Each channel comes over its own serial link, so the channels arrive with
different, unknown latencies. To remove the differences, a synchronization
pulse is injected at the same instant at every ADC input.

`deskew_fifo` exists once per channel. When the host arms alignment
(register 0x001 bit 0), the FIFO is emptied and then writes nothing until
it sees the marker, the first sample at or above `sync_thr`. Once every
channel has seen its marker, a common release (the AND of all `sync_seen`
flags) starts reading all the FIFOs in the same cycle. From then on, equal
sample times leave every FIFO together. Channels whose link is faster
simply hold more entries.

`overflow` reports a FIFO that filled up before the release. That means the
latency spread is larger than `DESKEW_DEPTH` (16 samples) allows. After
reset, and before the first arm, the FIFOs pass data through unaligned.

## Triggering

`trigger_l1` forms the difference `x[n] - x[n-D]` of the aligned samples,
with D from 1 to 16 and default 4. This is the leading-edge step of a
charge-sensitive preamplifier pulse, and it is proportional to the pulse's
energy. The trigger fires for one cycle when that difference crosses the
threshold. It re-arms only when:
- the difference has fallen below the threshold again, and
- a programmable hold-off has expired.

The hold-off keeps one pulse from firing twice.

`idle_trigger` makes fake triggers. When a channel has had no real trigger
for `idle_period` cycles, it fires one. The event builder downstream then
sees a minimum event rate from every channel even when nothing is
happening. Idle events carry a tag bit, skip validation by the trigger tree,
and stay out of the spectrum histogram. A period of 0 switches the idle
trigger off.

## Energy: the trapezoid and its baseline

`trapezoid_energy` is the recursive trapezoidal shaper for exponentially
decaying pulses, with rise time k, flat top m and pole-zero constant M. M is
the preamplifier decay time in samples. The recursion is:

```
d[n] = v[n] - v[n-k] - v[n-l] + v[n-l-k]      (l = k + m)
p[n] = p[n-1] + d[n]
r[n] = p[n] + M * d[n]
s[n] = s[n-1] + r[n]
```

A step of height A that decays with time constant M gives a trapezoid whose
flat top is A·k·(M+1). Four points about the implementation:
- The delay taps come from a circular buffer of `DLY_DEPTH` = 4096 samples,
  so k + l can be up to 4095.
- All arithmetic is 48-bit signed, enough for k, m ≤ 1023 and M < 65536.
- On a taken trigger, a counter waits k + m/2 samples. The output is then
  read in the middle of the flat top, the baseline estimate is subtracted,
  and the result is shifted right by `e_shift` and clipped to 0..65535.
- `busy` covers that wait. The channel never starts a second measurement
  while one is open; an assertion checks this.

The trapezoid is insensitive to a constant input offset, because the two
differences cancel it. At high rates, though, the filter output between
pulses wanders. Pole-zero mismatch, overlapping tails and low-frequency
noise leave a residue that adds to every energy.

`baseline_restorer` measures that residue on the filter output itself. It
keeps an exponential average `b += (s - b) >> blr_shift`, and only while
the channel is quiet. The restorer is auto-triggered: each real trigger
freezes the average for `blr_window` samples. That window should cover the
whole trapezoid, 2k + m, plus some margin. The filter output goes through a
16-sample delay before it is averaged, so the freeze begins before the
leading edge of the pulse reaches the averager. The estimate is subtracted
at the energy pick-off. `blr_en` = 0 turns the restorer off.

## Events, slots and validation

`event_buffer` is where a trigger becomes an event. A pre-trigger ring
always holds the last `PRE_TRIG` samples. A taken trigger starts a capture
of `TRACE_LEN` samples, beginning `PRE_TRIG` samples before the trigger,
into one of `NSLOTS` slots of a trace RAM. Samples are packed two per
32-bit word. The slot also keeps the trigger's timestamp and, once the
filter delivers it, the energy.

A trigger is taken only when all of these hold:
- a slot is free;
- no capture is running;
- no energy measurement is pending;
- no trigger-tree request of this channel is waiting to be sent.

Otherwise the trigger is counted as lost (per-channel register 6). This
rule is deliberately strict: it guarantees that the energy stored in a slot
was measured on that slot's own pulse.

After a real trigger, the channel asks the trigger tree for a decision. The
request goes through `gts_leaf` and names the channel and the slot. The slot
then waits for one of three outcomes:

| Outcome | Effect |
|---|---|
| Accept | The event is streamed out, then the slot is freed. |
| Reject | The slot is freed at once (rejects counted in register 6). |
| No answer within `TIMEOUT` cycles of the trigger | The slot is freed (time-outs counted in register 7). The default is 2000 cycles, 20 µs at 100 MHz. |

Idle events do not wait for a decision; they are streamed out directly.
With 4 slots, a channel keeps up with 4 triggers per 20 µs, even if the
tree uses its whole decision window.

Event format on the output stream (32-bit words; `last` is set on the
final word):

| Word | Content |
|---|---|
| 0 | `[31:28]` = 0xE, `[27]` idle, `[21:16]` channel, `[15:0]` event number of the channel |
| 1 | timestamp[47:16] |
| 2 | timestamp[15:0], energy[15:0] |
| 3 … 2+TRACE_LEN/2 | samples 2i+1 and 2i, as signed 16-bit values, of the trace |

With the defaults an event is 103 words long.

`readout_arbiter` merges the 36 event streams into one. It uses a round
robin among channels with an event ready, and it keeps a channel until that
event's last word is accepted, so events are never interleaved. The output
moves one 32-bit word per 100 MHz cycle, which is 400 MB/s.

## The trigger tree leaf

`gts_leaf` is the board's connection to the GTS tree, the array-wide global
trigger and synchronization system. It does three things:
- It keeps the 48-bit timestamp: a counter on the common 100 MHz clock,
  which the tree (or the host, register 0x001 bit 2) can load.
- It collects the channels' requests and sends them one at a time to the
  tree, choosing among waiting channels by round robin. The request is a
  valid/ready word `{channel, slot}`.
- It decodes each reply `{channel, slot, accept}` back to its channel.

The tree's own link protocol is not part of this design. These plain words
stand in for it.

## Long traces and online spectra

A normal trace is a few hundred samples long. For noise studies, or to look
at a misbehaving channel, `spectra_trace_ram` gives one selected channel a
131072 × 32-bit dual-port RAM. That is 4 Mbit, or 262144 samples. The RAM
works in one of four modes:

| Mode | Behaviour |
|---|---|
| `LT_OFF` | Nothing is written. |
| `LT_FREE` | On arm, record `lt_len` words, two samples per word. |
| `LT_TRIGGERED` | After arm, wait for the channel's next real trigger, then record. |
| `LT_HISTO` | Each energy of a real trigger increments bin `energy >> h_shift`, clipped to the last bin, whether or not the trigger tree accepts the event. The result is the detector's true singles spectrum. |

The histogram update is a read-modify-write that takes two cycles. An
energy that arrives during an update is dropped and counted (status
register bits 31:16). At the trigger rates of a germanium detector this
never happens.

The host reads, and clears, the RAM through the second port.

## Host registers

The host sees 32-bit words. When `h_addr[19]` = 1 it accesses the RAM
above; otherwise it accesses the register file. Read data is valid the
cycle after `h_rd`.

| Address | Content |
|---|---|
| 0x000 | ID, 0x47414C49 |
| 0x001 | write pulses: [0] align arm, [1] long-trace arm, [2] timestamp load |
| 0x002 | sync marker threshold |
| 0x003 | [1:0] RAM mode, [13:8] channel, [19:16] histogram bin shift |
| 0x004 | long-trace length in words |
| 0x005 / 0x006 | timestamp preset, low 32 / high 16 bits |
| 0x007 | status: [0] aligned, [1] long trace busy, [2] done, [31:16] histogram drops |
| 0x008 / 0x009 | timestamp, low / high |
| 0x100 + 8·ch + 0 | [15:0] trigger threshold, [19:16] D, [30] baseline restorer on, [31] channel on |
| … + 1 | trigger hold-off |
| … + 2 | idle period, 0 = off |
| … + 3 | [9:0] k, [25:16] m |
| … + 4 | [15:0] M, [21:16] energy shift |
| … + 5 | [15:0] baseline freeze window, [19:16] baseline average shift |
| … + 6 | lost triggers [15:0], rejected events [31:16] (read only) |
| … + 7 | timed-out events (read only) |

Reset defaults:

| Setting | Default |
|---|---|
| Trigger threshold | 100 |
| D | 4 |
| Hold-off | 250 |
| Idle trigger | off |
| k / m | 200 / 50 (2 µs rise, 0.5 µs flat top) |
| M | 5000 (50 µs decay) |
| Energy shift | 20 |
| Baseline shift / window | 4 / 600 |
| Baseline restorer, channel | both on |
| Sync threshold | 12000 |

## What comes from the published description and what does not

The published description of this electronics gives the processing steps and
their order:
- a latency-compensating FIFO after link decoding, aligned by a sync pulse;
- a threshold first-level trigger that starts both energy computation and
  trace capture, and sends a request to the trigger tree;
- fake triggers that give tagged idle events and a minimum rate;
- a trapezoidal energy filter with an auto-triggered baseline restorer;
- RAM that holds energy and trace until accept, reject or a 20 µs time-out;
- a leaf of the trigger tree that supplies the timestamp;
- a dual-port RAM for long traces (triggered or not) or for histograms that
  ignore validation;
- host-mapped registers;
- 36 channels at 100 Msps, 14 bits and 400 MB/s.

Everything below that level was chosen here:
- the FIFO depth and the threshold marker detection;
- the differentiator trigger and its hold-off;
- the pick-off point, widths and saturation of the energy;
- how the baseline restorer works;
- the slot count, the lost-trigger rule and the event word format;
- the round-robin policies;
- the request/reply word format;
- the register map;
- the RAM depth (the description says only "a few hundred thousand
  samples").

Points where this RTL departs from, or narrows, the description:
- **Trigger quantity.** The description says the trigger fires when "the
  energy" of the pulse exceeds a threshold. Here that is the D-sample
  difference of the leading edge. It is proportional to energy but
  available within a few samples, which the trapezoid output is not.
- **Baseline restorer placement.** The restorer works on the filter output,
  not on the input samples. Subtracting a drifting estimate from the input
  of a pole-zero corrected trapezoid would leave a lasting offset in its
  output, while the filter already removes a constant input offset.
- **Timestamp source.** The description says the trigger system "provides
  a timestamp" on a request. Here the event takes the leaf's timestamp
  counter at the trigger sample. That counter is kept in step with the
  tree by loading it.
- **Late replies.** A reply that arrives after the time-out is ignored.
- **What is absent.** The serial link decoders, the PCI Express endpoint,
  the control card of the digitizers (clock and sync distribution, and
  slow-control buses to the ADC boards), and the driver and software
  stack are not included. Neither is the tree's optical protocol. Their
  signals are ports of the top.
- **Energy resolution.** The 0.97 keV FWHM at 59.6 keV and 2.0 keV at
  1332.5 keV measured with the real system depend on the detector and the
  analog chain. A simulation of this RTL cannot reproduce them.

## Files and parameters

| File | Content |
|---|---|
| `rtl/galileo_pkg.sv` | Widths, the per-channel configuration struct `ch_cfg_t`, RAM modes, trigger-tree word types |
| `rtl/galileo_preproc_top.sv` | The 36-channel board |
| `rtl/channel_proc.sv` | One channel |
| other `rtl/*.sv` | One block each, as above |
| `tb/tb_<block>.sv` | Self-checking testbenches |
| `tb/gts_root_model.sv` | Behavioural trigger tree (random delays; chosen channels rejected or never answered) |

Top-level parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_CH` | 36 | Channels |
| `TRACE_LEN` | 200 | Trace samples (even) |
| `PRE_TRIG` | 40 | Pre-trigger samples |
| `NSLOTS` | 4 | Event slots per channel (at most 4) |
| `TIMEOUT` | 2000 | Validation window, in cycles |
| `LT_DEPTH` | 131072 | Words of the long-trace/spectrum RAM |
| `DESKEW_DEPTH` | 16 | Deskew FIFO entries |

Everything runs on one 100 MHz clock, the trigger-tree clock, with an
active-low asynchronous reset.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself.
A watchdog ends a hung run with a failure. For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/galileo_pkg.sv tb/tb_galileo_preproc_top.sv \
    --top-module tb_galileo_preproc_top -Mdir obj_top
./obj_top/Vtb_galileo_preproc_top +verilator+rand+reset+2
```

`tb_galileo_preproc_top` runs the whole board at its default parameters. It
checks:
- alignment of 36 channels with different link latencies;
- about 300 real triggers with their energies and timestamps;
- idle events;
- lost triggers from pile-up;
- rejected and timed-out events (from the behavioural trigger tree);
- a histogram compared bin by bin with the energies read out;
- a long trace compared with the input;
- a burst of events leaving at one word per cycle.

It counts each of these mechanisms and fails if any of them never happened.

`tb_workload_spectrum` also uses the full board at its defaults. It plays the
single-detector spectrum measurement: 90 pulses from an 241Am + 60Co source
(59.6, 1173.2 and 1332.5 keV) arrive on one channel, at random spacing and on
each other's tails. The online histogram must then hold every pulse once,
with each line within half a percent of the bin predicted by the gain
formula below. The 0-7 MeV range over 14 bits gives 7000/16384 keV per
code, and the default trapezoid has a gain of k·(M+1)/2^20 = 0.954.
With the ±2-code input noise of the test, each line is 2 bins (0.9 keV)
wide.
The block testbenches use smaller parameters (shorter traces, a smaller
RAM) so they finish in seconds.
