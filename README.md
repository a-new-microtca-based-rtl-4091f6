# Five-channel MicroTCA waveform digitizer: acquisition and readout logic

A muon storage-ring experiment measures the anomalous magnetic moment by counting
decay positrons in 24 calorimeters. At high rates two positrons that arrive close
together look like one positron of higher energy ("pileup"). Separating them in time
takes finer digitization than the previous generation: 12 bits at 800 MSPS instead of
8 bits at 400 MSPS. The digitizer described here is one MicroTCA card (an Advanced
Mezzanine Card) with five such channels. Each channel has its own ADC, its own
FPGA and its own 1-Gbit DDR3 buffer. A sixth FPGA configures the channels and
reads out their buffers one after the other. The data go over the backplane to an
AMC13 module and from there to data acquisition.

This repository holds SystemVerilog for the logic of that card: the per-channel
acquisition FPGA, the controller FPGA, and the reference-clock multiplexer between
them and the clock synthesizer. The card's architecture and the acquisition modes
follow a published design. Widths, encodings, framing and all cycle-level timing are
choices made here, because the publication does not give them. Each module's opening
comment says which is which.

## The card and what is modelled

```
 analog front end ──► ADC ×5 ──► chan_ctrl ×5 ◄──► DDR3 ×5          (one per channel)
                                   ▲    │
                    triggers, mode,│    │ channel link (words)
                    pattern, pre/post   ▼
  TTC trigger/command ──► master_ctrl ──► amc13_tx ──► 8b/10b words to AMC13
  register bus (IPbus) ─►   │   ▲
                            │   └── front-panel trigger (SMA)
                   clk_sel  ▼
  backplane ref clock ──► ref_clk_mux ──► clock synthesizer (PLL) ──► ADC sampling clocks
  front-panel ref clock ─►
```

Only logic is written as RTL. These parts are ports of `wfd_top`:

* **ADCs.** 12-bit samples arrive on `adc_sample[c]`.
* **DDR3 memories and their controller.** Each channel drives a simple word request
  port (`mem_req[c]`, with ready and read-data signals). `tb/ddr3_model.sv` answers it
  in simulation with random stalls and a fixed read latency.
* **TTC receiver.** The experiment's trigger and control stream is taken as already
  decoded: a one-cycle `ttc_trig` strobe and an 8-bit broadcast command with
  `ttc_cmd_valid`.
* **IPbus endpoint.** It is replaced by a plain register bus (`reg_wr`, `reg_addr`,
  `reg_wdata`, `reg_rdata`).
* **Clock synthesizer.** It receives `synth_refclk` from the multiplexer.
* **AMC13 link.** `amc13_code` is the 10-bit code word for the serializer, one per
  clock.

Analog conditioning, the PLL, power, the management microcontroller and its
flash/EEPROM have no logic that can be written from what is known about them.

**Clocking.** The whole design runs on one clock and takes one sample per clock per
channel. On the card the channels run from the synthesizer's sampling clocks, and the
FPGAs are joined by 5-Gbit/s serial links. The links are modelled here as parallel
streams with valid/ready. Clock-domain crossings and serializers are not part of this
RTL.

## Acquisition in synchronous mode: patterns of windows

This is the main mode. A TTC trigger makes every enabled channel store a regular
pattern of samples. The pattern has three numbers:

* `n_windows`: how many sampling windows there are;
* `length`: how many samples each window holds;
* `gap`: how many samples are skipped between two windows.

Three patterns are kept in registers. A TTC command chooses which one applies to the
triggers that follow. The sequencer (`acq_pattern_seq`) latches the pattern when the
trigger arrives. It then counts through window, gap, window, and so on.

Exact timing, counted in `chan_ctrl` from the cycle in which the channel sees its
trigger (call that cycle T):

| window k | samples stored (by cycle they were on the ADC bus) |
|---|---|
| 0 | T+1 … T+length |
| k | T+1+k·(length+gap) … T+k·(length+gap)+length |

The last sample is at T + n·length + (n−1)·gap. A pattern with zero windows or zero
length stores nothing. A trigger that arrives while a pattern is running is dropped,
not queued, and reported on `ch_trig_lost`. At the top level the TTC trigger is
registered once in the controller, so T is one cycle after `ttc_trig` (see the
trigger-source register below for starting a pattern from the front panel). Several
triggers before a readout append their samples to the same buffer.

## Acquisition in asynchronous mode: a window around a front-panel trigger

In this mode every sample goes into a circular RAM of `CIRC_DEPTH` (4096) samples. A
trigger from the front-panel connector keeps `pre` samples before the trigger and
`post` samples from the trigger on. Those samples are copied into the DDR3 buffer,
where they wait for a readout command.

The trick in `circ_buffer` is that nothing is copied in advance. When the trigger
arrives, the read pointer is set to (write pointer − `pre`). From then on it advances
one step per clock, exactly as fast as the write pointer. So it always trails the
write pointer by `pre` samples. The oldest pre-trigger sample comes out first, and the
post-trigger samples have always been written before they are read. The stream leaves
without gaps, starting two cycles after the trigger cycle.

The only edge case is `pre` = DEPTH−1. Then reading and writing hit the same address
in the same cycle. The RAM is read-first, so the read returns the older sample, which
is the one wanted. Larger `pre` values are clipped to DEPTH−1. The front-panel trigger
is an asynchronous level. The controller synchronises it with two flops and triggers
on its rising edge, so the channels see it three cycles after the edge. Pre-trigger
samples are only meaningful once the RAM has been filled after reset.

TTC commands switch between the two modes. `mode` steers the channel trigger to one
path and selects that path's output for the buffer. A mode switch while an
acquisition is running is not guarded against.

## The channel buffer and its frame

`buffer_ctrl` writes the chosen samples to the DDR3 at consecutive addresses. Each
12-bit sample takes one 16-bit word, zero-extended. The word count is 2^ADDR_W
(2^26 = 64 M words = 1 Gbit, the size of an x16 1-Gbit DDR3).

A 16-deep FIFO absorbs cycles in which the memory is not ready. A sample is dropped,
and the sticky `overflow` flag is set, when it finds any of these:

* the FIFO full;
* the memory full;
* a readout in progress.

When the controller asks for a readout, the channel first drains its FIFO. It then
sends this frame over its link:

| word | content |
|---|---|
| 0 (first) | `{overflow, 4'b0, count[26:16]}` |
| 1 | `count[15:0]` (last, if count is 0) |
| 2 … count+1 | the samples in order, `{4'b0, sample}` (the final one marked last) |

Reads are issued only while the read FIFO and the reads in flight leave room. This
lets the memory have any read latency while the link applies back-pressure. After the
frame the buffer is empty again and `overflow` is cleared.

## Readout of the card: one event per readout command

A TTC readout command starts `readout_seq` in the controller. It asks channel 0 for
its frame, passes it on unchanged, then does the same for channels 1 to 4. The
result is one event:

| word | content |
|---|---|
| first | `{0xA, event number[11:0]}` |
| per channel c | `{0xC, c}`, then channel c's frame |
| last | `{0xE, number of channel-frame words mod 4096}` |

Every channel is read, including channels whose trigger is disabled. Those send a
frame with a count of zero.

`amc13_tx` sends the event as bytes, one per clock, and 8b/10b encodes them
(`enc8b10b`):

* K28.5 while idle;
* K27.7 before the first word;
* each word, high byte first;
* K29.7 after the last word;
* K28.5 if the next word is not yet available in the middle of an event.

One word therefore takes two clocks. The encoder uses the standard 5b/6b and 3b/4b
tables with running disparity, and accepts the control characters K28.0–7, K23.7,
K27.7, K29.7 and K30.7. `code[9]` is bit *a*, the first bit on the line.

## Control: registers and TTC commands

Register map (32-bit data, 8-bit address):

| address | register | reset |
|---|---|---|
| 0x00 | channel trigger enables, bit c = channel c | all enabled |
| 0x01 | reference clock select: 0 backplane, 1 front panel | 0 |
| 0x02 | `pre` [15:0] | 0 |
| 0x03 | `post` [31:0] | 0 |
| 0x04 | synchronous-mode trigger source: 0 TTC, 1 front panel | 0 |
| 0x10+4p | pattern p `n_windows` [15:0], p = 0…2 | 0 |
| 0x11+4p | pattern p `gap` | 0 |
| 0x12+4p | pattern p `length` | 0 |

Unmapped addresses read as zero.

TTC broadcast commands:

| code | action |
|---|---|
| 0x10, 0x11, 0x12 | use pattern 0, 1 or 2 for the following triggers |
| 0x20 | read out all channels |
| 0x30 / 0x31 | synchronous / asynchronous mode |
| 0x40 | clear all channel buffers |

After reset the card is in synchronous mode with pattern 0. Triggers go only to the
channels whose enable bit is set, so any subset of the five can take data.

Register 0x04 lets the front-panel trigger start the synchronous pattern instead of
the TTC trigger. This is for running the card on a bench without a TTC system.
The front-panel path has the same two-flop synchroniser, so T is three cycles after
the rising edge rather than one cycle after `ttc_trig`. In asynchronous mode the
front panel is always the trigger source, whatever 0x04 holds.

## How far it follows the published design

Taken from the publication:

* five independent channels of 12-bit samples;
* a 1-Gbit DDR3 buffer per channel;
* a separate controller that reads the channels one after another and sends the
  data to the AMC13 with 8b/10b encoding;
* triggers and control commands over TTC, and configuration over IPbus;
* a pattern of (number of windows, gap, window length) kept in configuration
  registers, with three patterns selectable by TTC command;
* an asynchronous mode with a circular buffer and a pre/post-trigger window from a
  front-panel trigger, read out by TTC command;
* per-channel trigger enables;
* a 2:1 multiplexer, controlled by the controller FPGA, that chooses the backplane
  or the front-panel reference clock.

Chosen here:

* **Sizes and encodings:** all register widths, the register map, the TTC command
  codes, the circular-buffer depth (4096), one sample per 16-bit memory word, and the
  framing of channel frames and events (including the K-characters on the AMC13 link).
* **Behaviour:** the trigger-source register for stand-alone synchronous running,
  dropping triggers while busy, the overflow policy, the clear command,
  and the single clock domain.
* **What is missing from the card's function:**
  * the 25-ps per-channel clock delays and the pedestal-offset DACs, which sit in
    analog parts;
  * the TTS status path back to the AMC13;
  * any use of the flash and EEPROM.

Known limits:

* Storing one sample per memory word instead of packing them costs a quarter of the
  buffer. A channel holds 2^26 samples, 83.9 ms of continuous data at 800 MSPS.
* An FPGA cannot take one 12-bit sample per clock at 800 MHz. A practical version
  would widen the datapath to several samples per clock.
* The event word count wraps at 4096.
* **Memory bandwidth.** The memory port takes at most one word per clock, which is
  exactly the sample rate. Only the 16-word write FIFO absorbs memory stalls. A memory
  that refuses writes for more than 16 cycles in total during one long window loses
  samples, which is flagged as overflow. A real x16 DDR3 has about twice the bandwidth
  needed. To reach it, widen the port (several samples per request) in
  `buffer_ctrl`.

## Simulation

Every module in `rtl/` except the helper FIFO, which is exercised through
`buffer_ctrl`, has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. `tb/tb_wfd_top.sv` runs the whole card at its
default sizes, with five behavioural DDR3s:

* three patterns on a subset of channels, with one trigger lost while busy;
* an asynchronous pre/post window;
* a synchronous pattern started by a front-panel trigger;
* a buffer overflow;
* a clear;
* a reference-clock switch.

It rebuilds each event from the byte stream to the AMC13 and compares it word by word
with the event computed from the ADC ramps. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/wfd_pkg.sv \
    tb/tb_wfd_top.sv --top-module tb_wfd_top -y rtl -y tb +libext+.sv
./obj_dir/Vtb_wfd_top +verilator+rand+reset+2
```

`tb/tb_wfd_workload.sv` is a longer run on the same card. All five channels take 16
windows of 2000 samples with gaps of 1000. The test checks three things:

* the acquisition lasts exactly 16·2000 + 15·1000 cycles;
* all 160,000 samples arrive at the AMC13 side in order;
* the link moves one word per two clocks.

Replace `tb_wfd_top` with any other testbench name to run one block. Verilator
starts uninitialised variables at random values, so everything that is read is reset.

## Files

* `rtl/wfd_pkg.sv`: shared constants, the pattern and link-word structs, command
  codes.
* `rtl/wfd_top.sv`: the card.
  * `rtl/master_ctrl.sv`: the controller FPGA, made of
    `config_regs`, `ttc_cmd_decoder`, `readout_seq` and `amc13_tx`/`enc8b10b`.
  * `rtl/chan_ctrl.sv`: one channel FPGA, made of `acq_pattern_seq`, `circ_buffer`,
    and `buffer_ctrl` with `sync_fifo`.
  * `rtl/ref_clk_mux.sv`: the reference clock multiplexer.
* `tb/`: one testbench per module, and `ddr3_model.sv`, the behavioural memory.
