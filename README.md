# Injection-point BPM readout: programmable-logic firmware for an RFSoC

At the SuperKEKB injection points, a dedicated beam position monitor (BPM) has four
stripline electrodes. It sees the beam that is about to be injected into the storage
ring. In two-bunch injection, two bunches pass the BPM 96 ns apart in the same
injection cycle. Their trajectories are tuned separately, so the readout has to
record the two signals without mixing them. Analog filters stretch the ~2 ns pickup
pulse to just under 96 ns, so that more samples fall on it without the two bunches
overlapping. An RFSoC then digitises the four electrode signals directly at
4.072 GSPS.

This RTL is the programmable-logic (PL) part of that readout. It does four things:

* It records the four ADC streams continuously. On each injection trigger, delayed by a
  programmable amount, it ships out a **300 ns window**. That window holds both bunches
  plus some margin.
* On a software request, it ships out a longer **2 µs window** for monitoring and
  debugging.
* It gives the processor **register access** to set all of the above up.
* It **replays arbitrary waveforms** on the two DACs. This is used for bench tests,
  for example looping the DACs back into the ADCs.

The beam position is not computed here. Software on a server receives the
windows and integrates |signal| over a time window per bunch and electrode. It
then fits the four integrals against a simulated signal map of the chamber. At
25 Hz there is no need to do that in logic.

The system architecture (RF data converter, two ring-buffer stacks, DMA, AXI-Lite
register bridge, DAC playback) follows the published description of the device
(B. Urbschat, G. Mitsuka, L. Ruckman, "Application of RFSoC Technology for Beam
Position Monitors at the SuperKEKB Storage Rings Injection Points"). That
description gives the blocks, the sample rates, the channel counts and the two
buffer lengths. It does not give their internals. All the internal mechanisms,
widths, timing and the register map below are this implementation's choices. They
are marked as such in the
[departures and choices](#what-follows-the-published-design-and-what-does-not)
section.

## Sample rates, fabric clock and word packing

| quantity | value | origin |
|---|---|---|
| ADC channels | 4 (electrodes A–D) | published |
| ADC rate | 4.072 GSPS = 8 × 509 MHz (RF reference) | published |
| DAC channels, rate | 2, 6.108 GSPS = 12 × 509 MHz | published |
| ADC resolution | 14 bit, carried MSB-aligned in 16-bit words | 14 bit published; 16-bit container chosen |
| fabric clock | 254.5 MHz = 4.072 GHz / 16 | chosen |
| ADC samples per fabric cycle | 16 (one 256-bit word per channel) | chosen |
| DAC samples per fabric cycle | 24 (one 384-bit word per channel) | follows from the above |

In every word, sample 0 is the earliest in time and occupies bits 15:0. Sample *k*
occupies bits 16k+15:16k. The whole design runs on the single clock `clk` with a
synchronous, active-high `rst`. Memories are not reset. The injection trigger input
is the only asynchronous signal.

All shared constants and the register map are in `rtl/bpm_pkg.sv`.

## Block structure

```
               adc_data[4]  (16 samples / channel / cycle)
RF data  ──────────────┬──────────────────────────────┐
converter              ▼                              ▼
(outside)   ┌───────────────────────┐     ┌───────────────────────┐
            │ ring_buffer u_inj_buf │     │ ring_buffer u_live_buf│
inj_trig ─► │ 4 × 76 words (300 ns) │     │ 4 × 509 words (2 µs)  │
 trigger_   │ trigger: delayed inj. │     │ trigger: LIVE_REQ     │
 delay ───► └──────────┬────────────┘     └──────────┬────────────┘
                       │ inj_axis_*                  │ live_axis_*     ──► DMA (outside)
                       ▼                             ▼
            ┌───────────────────────┐     ┌───────────────────────┐
AXI-Lite ─► │ axil_regs             │ ──► │ dac_playback          │ ──► dac_data[2]
(from PS    │ control / status /    │     │ 2 × 512 words, loop   │     (to RF data
 bridge)    │ DAC memory window     │     └───────────────────────┘      converter)
            └───────────────────────┘
```

| module | role |
|---|---|
| `rfsoc_bpm_top` | wires everything together; its ports go to the RF data converter, the DMA engine and the AXI-Lite bridge |
| `trigger_delay` | synchronises the injection trigger and delays it by a programmable number of cycles |
| `ring_buffer` | one stack of four channel rings with freeze-and-stream readout (instantiated twice) |
| `axil_regs` | AXI-Lite register slave, DAC memory write window |
| `dac_playback` | waveform memories and looping playback for the two DACs |
| `bpm_pkg` | constants, register addresses, the control-register struct |

The following are outside this RTL and appear only as ports:

* the RF data converter (ADCs, DACs, step attenuators, sampling PLL);
* the DMA engine that moves the streams into processor memory;
* the AXI4-to-AXI-Lite bridge;
* the processor system itself.

## Capturing an injection

This is the part that decides whether the two bunches end up in the window. It is
worth understanding in detail.

### Ring-buffer life cycle

Each ring-buffer stack writes all four channels together at one write pointer. It
keeps them as one memory, one word wide per channel. A stack has three states:

1. **FILL**: After reset and after every readout, the stack records `DEPTH` new words
   before it accepts a trigger. This guarantees that a capture never contains data
   from before the previous readout. Triggers in this state are dropped and counted.
2. **ARMED**: Recording continues, overwriting the oldest word. The first trigger
   *freezes* the ring. The word written in the trigger cycle is the newest word kept.
   The oldest word kept is the one where the next write would have gone.
3. **READOUT**: Recording stops. The stack sends four AXI-Stream frames:
   * channel 0 first, then 1, 2 and 3;
   * each frame is `DEPTH` beats long, oldest word first;
   * `TDEST` carries the channel number;
   * `TLAST` marks the last beat of each frame.

   Once the final beat has been accepted, the stack returns to FILL. Triggers in
   this state are dropped and counted.

The memory has one cycle of read latency, and its read register *is* the stream's
output register. So the stream runs at one beat per cycle when the DMA never
stalls. Readout times with no stalls:

* injection capture: 4 × 76 beats + 1 = 305 cycles = 1.2 µs;
* live capture: 4 × 509 + 1 = 2037 cycles = 8.0 µs.

Both are negligible against the 40 ms between injections at the maximum 25 Hz
trigger rate. `TREADY` may drop at any time. `TVALID`, the data, `TDEST` and `TLAST`
then hold, and an assertion in `ring_buffer` checks this rule.

### Trigger path and the choice of delay

The injection trigger from accelerator controls passes these stages in
`trigger_delay`:

1. a two-flop synchroniser;
2. a rising-edge detector;
3. a down-counter loaded from `TRIG_DELAY`.

Suppose the input is first sampled high at clock edge *t* and `TRIG_DELAY` = *D*.
Then the delayed pulse freezes the injection buffer at edge *t + D + 4*. The
captured window is therefore the 76 words, or 1216 samples (298.6 ns), ending with
the word on `adc_data` at that edge.

Two kinds of trigger edge are ignored and counted in `TRIG_IGNORED`:

* an edge that arrives while a delay is still counting;
* an edge that arrives while the trigger is disabled.

To centre the two bunches, let the first bunch reach the ADCs *a* ns after the
trigger edge. Its signal lasts *L* ns (< 96 ns), and the second bunch ends at
*a* + 96 + *L* ns. Set

    (D + 4) × 3.93 ns  ≈  a + 96 ns + L + m,

where *m* is the margin wanted after the second bunch. The margin before the first
bunch is then 298.6 − (96 + *L* + *m*) ns. For *L* ≈ 70 ns and *m* ≈ 60 ns, about
70 ns is left before the first bunch. The delay has a 16-bit range, up to 257 µs.

### Live display buffer

The live display buffer is the same module with `DEPTH` = 509 (8144 samples, 2.000 µs
at 4.072 GSPS). It is triggered by writing 1 to `LIVE_REQ` instead of by the
injection trigger. The freeze happens one cycle after the register write is
accepted. The two stacks are independent: both can record and stream at the same
time.

## Register map

AXI-Lite, 17-bit byte addresses, 32-bit data. A write is taken when `AWVALID` and
`WVALID` are both high, and the response follows one cycle later. Read data also
follows one cycle after the address. `WSTRB` is ignored: every write is a full
32-bit write. Unmapped addresses answer `SLVERR`.

| address | name | access | contents |
|---|---|---|---|
| 0x0000 | ID | RO | 0x42504D31 |
| 0x0004 | SCRATCH | RW | free |
| 0x0008 | CONTROL | RW | bit0 injection-trigger enable, bit1 DAC0 playback, bit2 DAC1 playback |
| 0x000C | TRIG_DELAY | RW | delay *D* in fabric cycles (16 bit) |
| 0x0010 | LIVE_REQ | WO | write bit0 = 1: capture the live buffer once |
| 0x0014 | DAC_LEN | RW | DAC loop length in words, minus one (both channels) |
| 0x0018 | TRIG_COUNT | RO | injection triggers accepted by the delay |
| 0x001C | TRIG_IGNORED | RO | trigger edges ignored (delay running, or disabled) |
| 0x0020 | STATUS | RO | bit0/1 injection/live buffer reading out, bit2/3 injection/live buffer armed |
| 0x0024 | INJ_FRAMES | RO | injection captures completed |
| 0x0028 | LIVE_FRAMES | RO | live captures completed |
| 0x002C | INJ_DROPS | RO | injection triggers dropped by the buffer (filling or busy) |
| 0x0030 | LIVE_DROPS | RO | live requests dropped (filling or busy) |
| 0x10000 + 0x8000·ch + 4·k | DAC memory | WO | channel *ch*, samples 2k (bits 15:0) and 2k+1 (bits 31:16) |

A typical start-up sequence:

1. Write `TRIG_DELAY`.
2. Write `CONTROL` = 1.
3. Wait until `STATUS[2]` is set (76 cycles after reset).

## DAC playback

Each DAC channel has a memory of 512 words × 24 samples, which is 12288 samples
(2.01 µs at 6.108 GSPS).

Software loads a waveform as a plain list of sample pairs, which are 32-bit writes to
consecutive addresses. Internally, pair *k* lands in word *k* div 12, lane
*k* mod 12.

While a channel is enabled, it plays words 0 … `DAC_LEN` in a loop without gaps,
one word per cycle. Timing:

* If the enable is first seen at edge *e*, word 0 appears after edge *e*+1.
* A disabled channel outputs zero.
* A channel restarts from word 0 when it is enabled again.

The DAC memory window is write-only.

## What follows the published design and what does not

These points come from the published description:

* the block structure above;
* the four ADC and two DAC channels;
* the 4.072 GSPS and 6.108 GSPS rates, integer multiples of the accelerator's RF
  clock (508.89 MHz, drawn as 509 MHz in the block diagram);
* a ~300 ns injection buffer read out on a delayed injection trigger;
* a ~2 µs buffer read out on software request (the 8144-sample size is the one the
  authors use for their ADC measurements);
* AXI-Stream to a DMA engine;
* AXI-Lite register access;
* waveform replay on the DACs.

The rest is this implementation's own:

* **Clocking**: one fabric clock of 254.5 MHz (16 ADC / 24 DAC samples per cycle) for
  everything. A hardware build would normally run the AXI-Lite and DMA sides on
  their own clocks, with clock-domain crossings that are not modelled here.
* **Sampling rate**: the publication's text also gives 4.065 GHz as the sampling
  frequency, while its block diagram and its ADC measurements use 4.072 GSPS.
  8 × 508.89 MHz is 4.071 GHz, so 4.072 GSPS is used throughout. The logic does not
  depend on the exact rate. Only the conversions from words to nanoseconds do.
* **Capture scheme**: freeze on trigger, fill-before-arm, drop-and-count of triggers
  that arrive while a stack is busy, and one frame per channel with the channel
  number in `TDEST`.
* **Trigger conditioning**: two-flop synchroniser, delay in whole fabric cycles, no
  re-trigger while the delay counts.
* **Register map and bus behaviour**: addresses, `SLVERR` for unmapped addresses,
  `WSTRB` ignored.
* **DAC playback**: memory size, pairwise loading, continuous loop with one shared
  length.
* **Buffer sizes**: 76 words (298.6 ns) for "around 300 ns", and 509 words
  (2.000 µs) for "around 2 µs".

Two further points of difference:

* The published block diagram draws the DAC playback block as a stack of boxes,
  like the four-channel ring buffers. Here it has two channels, one per DAC.
* The published firmware is built on an existing SoC framework. Its internal
  stream and register conventions are not known and are not reproduced.

The capture path would accept triggers far faster than the 25 Hz injection rate.
Each capture needs 305 cycles of readout plus 76 cycles of refill, so the limit is
about 660 kHz.

These are not implemented:

* dynamic use of the converter's step attenuators (mentioned as future work);
* any processing in logic (the integrals and the position fit run in software);
* the DMA engine, the AXI bridge and the converter itself.

## Resources

With default parameters, the design after coarse synthesis contains:

* 992 256 memory bits:
  * injection buffer: 77 824;
  * live buffer: 521 216;
  * DAC memories: 393 216;
* about 470 flip-flops;
* a few hundred word-level cells.

In an RFSoC the memories map onto block RAM. The injection and live memories are
1024 bits wide (four 256-bit channel words).

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_trigger_delay` | pulse at exactly *D* + 3 cycles for delays 0, 1, 2, 5, 37 and random ones; edges during a running delay and while disabled are ignored and counted |
| `tb_ring_buffer` | reference model of fill / armed / readout: every beat's data, `TDEST` and `TLAST`, readout time of `4·DEPTH + 1` cycles, drops while filling and while busy, random input gaps, random `TREADY` stalls and random triggers (reduced size: 2 samples per word, depth 10) |
| `tb_dac_playback` | shuffled loading of both memories, output words against the loaded waveform for two loop lengths, restart on re-enable, silence when disabled (reduced size) |
| `tb_axil_regs` | every register, write-address and write-data in either order, held responses, `LIVE_REQ` pulses, DAC-window writes, `SLVERR` for unmapped addresses and out-of-range memory writes |
| `tb_rfsoc_bpm_top` | whole design at **default sizes** (see below) |
| `tb_live_enob` | an ADC effective-number-of-bits measurement through the live buffer at default sizes (see below) |

The top-level test feeds a synthetic two-bunch injection into all four channels. The
signal is two decaying 509 MHz bursts, 70 ns long and 96 ns apart, with a different
amplitude per channel, on top of a deterministic noise pattern. The test acts as
accelerator controls, processor and DMA. It checks:

* every captured word against the known input;
* that each 300 ns window ends exactly at the delayed trigger;
* that both bunches lie inside the window;
* that their |signal| integrals agree;
* that the 96 ns gap between them holds only noise.

It also exercises and counts each of the following, and fails if any of them never
happened:

* DMA stalls;
* simultaneous injection and live readouts;
* a trigger dropped because the buffer was busy;
* a live request dropped because the buffer was busy;
* a trigger ignored while disabled;
* all status counters;
* DAC playback over the full 512-word memories and over a short loop.

`tb_live_enob` repeats the converter characterisation that the 8144-sample
record is meant for. Each channel receives a sine with a whole number of periods
per record (f = n × 4.072 GHz / 8144, with n = 300, 3000 and 3999, i.e. 150 MHz,
1.5 GHz and 1999.5 MHz). Uniform noise is added so that the ideal ENOB of each
channel equals a chosen value: 10.08, 10.00, 10.06 and 9.97, the levels real
hardware showed at 150 MHz.

For each tone, the test:

1. requests one live capture;
2. checks every beat;
3. computes SINAD from the received record alone, using the tone's DFT bin and
   Parseval's theorem for the total power, with no window;
4. requires the resulting ENOB to match the channel's target within 0.06 bit.

A record that lost, repeated or reordered a word would smear the
tone over other bins and fail this check.

Run from the directory that holds `rtl/` and `tb/` (the package must come first):

```sh
RTL="rtl/bpm_pkg.sv rtl/trigger_delay.sv rtl/ring_buffer.sv rtl/dac_playback.sv rtl/axil_regs.sv rtl/rfsoc_bpm_top.sv"
verilator --binary --timing --assert -Wno-fatal --top-module tb_rfsoc_bpm_top $RTL tb/tb_rfsoc_bpm_top.sv
./obj_dir/Vtb_rfsoc_bpm_top
```

Replace the testbench name to run the others. Each runs in under a second. The lint check is
`verilator --lint-only -Wall $RTL --top-module rfsoc_bpm_top`. The only warning
it leaves is the unused `WSTRB` input, which is unused on purpose.
