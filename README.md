# Triggerless 32-channel ADC readout with ping-pong circular buffers and PTP timestamping

A liquid-argon time projection chamber has to be read continuously: a
particle can cross it at any moment, and the charge it leaves drifts to the
wire planes over a long, fixed drift time. The readout described here
needs no hardware trigger. Every ADC channel writes its samples all the time
into a circular buffer in an external RAM. While the signal stays below a
per-channel threshold, new samples just overwrite the oldest ones, so the
buffer itself does the zero suppression. When a sample crosses the
threshold, the channel keeps writing for one drift time and then freezes the
buffer. The frozen buffer holds the pulse and the samples that came before
it. The channel then goes on in a second buffer while a CPU ships the first
one over Gigabit Ethernet (UDP). The computers that receive the data decide
in software what is an event.

This RTL is the FPGA logic of one such board, an AMC (Advanced Mezzanine
Card) for a MicroTCA crate:

* 32 ADC channels: four octal 10-bit ADCs with serial LVDS outputs,
  sampling at 2.5 MS/s.
* An external dual-port RAM of 64 banks of 8192 x 18 bits, two banks per
  channel.
* A soft CPU and a Gigabit MAC. Both are outside this RAM logic.
* A PTP (IEEE 1588) timestamping unit on the Gigabit link. On this link
  the receiver recovers the master's clock, so the slave needs only an
  offset correction.

It follows the architecture of C. Girerd et al., "MicroTCA implementation
of synchronous Ethernet-Based DAQ systems for large scale experiments".
Where that description stops, this design makes its own choices, and they
are listed below.

## Block structure

```
            ADC bit clock domain          | memory clock domain (>= 32 x sample rate)
 serial ──► lvds_deser ──► trigger_detect ─► async_fifo ─► write_fsm ─► sync_fifo B0 ─┐
 lane                          ▲ threshold                   ▲   │      sync_fifo B1 ─┤
                                                  grant/bank │   │ ready, trigger addr│
                                                         main_fsm ◄─ FIFO empty ──────┤
                                                             │ event in a full bank   │
   token from channel n-1 ──► read_fsm ──► token to n+1      ▼                        │
                                 │ event flag, bank, trigger address ──► daq_regs ◄─► CPU bus
                                                                                      │
     (x32 channel_receiver)      all 64 output FIFOs ──► fifo_out_ctrl ──► RAM write port

 GMII rx / tx ──► ptp_frame_detector (x2) ◄── ptp_clock (125 MHz, 8 ns) ──► PPS
                           └────────── ptp_unit registers ◄─► CPU bus
```

`amc_daq_top` holds 32 `channel_receiver`s in a token ring, plus the shared
`fifo_out_ctrl`, the acquisition registers `daq_regs` and the `ptp_unit`.
Shared types, constants and both register maps are in `daq_pkg`.

## Clocks

| Clock | Drives | Board value |
|---|---|---|
| ADC bit clock (`adc_dco`, one per ADC) | deserialiser, trigger detection, write side of the input FIFO | 10 bits per 2.5 MS/s sample |
| Memory clock (`clk_mem`) | everything else on the acquisition side, and the CPU register bus | at least 32 x 2.5 MHz = 80 MHz |
| GMII clock (`clk_gmii`) | PTP clock, frame detectors and PTP registers | 125 MHz; recovered by the PHY on a slave |

Only one signal crosses between the ADC and memory domains: the sample
stream, through the Gray-pointer `async_fifo`. Thresholds cross the other
way unsynchronised. They are configuration and must not change while
acquisition runs.

## A channel, sample by sample

1. **Deserialisation.** `lvds_deser` shifts one bit per bit-clock edge,
   MSB first. A rising frame clock marks the first bit of a word.
2. **Trigger detection.** `trigger_detect` tags each sample with
   `over = sample > threshold`, an unsigned comparison: the pulses are
   positive on a mid-scale baseline. The tag travels with the sample, so
   detection runs in parallel with storage and adds no latency to it.
3. **Clock crossing.** An 8-deep asynchronous FIFO carries the 11-bit
   {over, sample} words into the memory clock domain.
4. **Writing.** `write_fsm` gives each sample the next address of a 13-bit
   counter that wraps at 8192. It pushes {address, over, sample} into the
   output FIFO of the bank that the main state machine has granted.

The word stored in the RAM is 18 bits: bits 9:0 hold the ADC code, bit 10
the over-threshold flag, and bits 17:11 are zero.

## Circular buffers, ping-pong and what a frozen bank contains

This is the part that takes the most care.

**Writing an event.** While no sample is over threshold, the write state
machine only fills its circular buffer. The first tagged sample starts an
event:

* its address is kept as the *trigger address*;
* from that sample on, exactly `POST` samples are stored, the trigger
  sample included (`POST` is the drift-time length, a register);
* the write state machine then reports `ready` with the bank and the
  trigger address.

Over-threshold samples inside this window do not extend it.

**What a frozen bank contains.** After `POST` samples the bank holds, in
circular order:

* the `POST` samples from the trigger address on;
* before them, up to `8192 - POST` pre-trigger samples, ending at
  `trigger address - 1`.

The pre-trigger region holds only samples written since the bank was last
granted. Older positions may still contain the event the bank held before.

**Bank states.** `main_fsm` keeps one state per bank:

| State | Meaning |
|---|---|
| FREE | may be written |
| DRAIN | complete, but its last words are still in its output FIFO |
| FULL | complete and entirely in the RAM: offered to the reader |

DRAIN exists because the FIFO-out controller moves words to the RAM some
clocks later. Without it, the CPU could start a DMA before the last
post-trigger words have arrived.

**Ping-pong.** When a bank completes, the writer moves to the other bank
at once if that one is FREE. Otherwise the writer gets no grant. Samples
that arrive then are dropped, and each one is reported on `lost` and
counted in the LOST register. Writing resumes in the bank the CPU frees
first. The address counter keeps running across bank switches. When both
banks are FULL, the older one is offered first.

**Timing.** A report reaches the main state machine one clock after the
last write. The write state machine spends that one clock in `S_DONE`,
holding the next sample in the input FIFO, so that no sample is lost at a
bank switch when the other bank is free.

## Readout: bank status, token ring and the CPU protocol

Each channel raises its bit of BANK_STATUS while it has a FULL bank. To
let a single CPU serve 32 channels in turn, the read state machines pass a
token around a ring:

* The channel that holds the token and has a FULL bank keeps the token. Its
  event appears in EVENT_INFO.
* A channel that holds the token without an event passes it on in one clock.
* READ_DONE is broadcast to all channels, but only the token holder acts on
  it: it frees its bank and passes the token on.

The CPU loop is therefore:

1. Poll EVENT_INFO until bit 31 is set.
2. Take the channel `c`, bank `b` and trigger address `t` from it.
3. Send RAM bank `2c+b` by DMA, starting the circular buffer wherever
   suits it; the trigger sample is at word `t`.
4. Write 1 to READ_DONE.

Acquisition registers (`daq_regs`, byte addresses, 32-bit, reads are
combinational):

| Address | Name | Access | Content |
|---|---|---|---|
| 0x00 | CTRL | RW | bit 0: acquisition enable (reset 0) |
| 0x04 | POST | RW | post-trigger samples, 1..8192 (reset 4096) |
| 0x08 | BANK_STATUS | R | bit c: channel c has an event |
| 0x0C | EVENT_INFO | R | bit 31 valid, bits 28:24 channel, bit 16 bank, bits 12:0 trigger address |
| 0x10 | READ_DONE | W | bit 0: acknowledge the token holder's event |
| 0x14 | LOST | R / W clears | samples dropped because no bank was free |
| 0x80 + 4c | THRESH[c] | RW | trigger level of channel c (reset 0x3FF: never triggers) |

## The FIFO-out controller and the 32x rule

All 64 output FIFOs (two per channel) share the RAM's write port through
`fifo_out_ctrl`. FIFO number `f = 2*channel + bank` is also the RAM bank
number, so the 19-bit RAM address is `{f, address in bank}`. The FIFO
number supplies the upper bits and the stored address the lower bits.

The controller is a three-stage pipeline:

1. A round-robin search over the empty flags picks the next non-empty
   FIFO and pops it.
2. The FIFO's registered output holds the word. The pop and the FIFO
   number, delayed one clock, select it.
3. The RAM's write enable, address and data are registered outputs.

The write enable is therefore the read enable delayed by two clocks. The
controller sustains one word per clock. With 32 channels each producing one
word per sample period, the memory clock must be at least 32 times the
sample rate: 80 MHz for 2.5 MS/s.

The end-to-end testbench runs at exactly that ratio. The controller then
writes on every clock, and the 8-deep output FIFOs absorb the burst that
comes when all 32 channels deliver a sample at the same moment. Assertions
in `channel_receiver` flag any FIFO overflow.

## PTP on a synchronous Gigabit link

`ptp_frame_detector` watches one GMII direction. It is used once for
receive and once for transmit.

* **Timestamp.** On the cycle the start-frame delimiter (0xD5 after 0x55
  preamble bytes) is on the bus, it captures the PTP clock.
* **Validation.** It then counts bytes after the SFD and checks:
  * EtherType 0x0800;
  * IPv4 header byte 0x45 (no IP options);
  * protocol 17 (UDP);
  * UDP destination port 319, the PTP event port.
* **Identifier.** It picks up the PTP messageType (byte 42) and the
  sequenceId (bytes 72-73).
* **Keep or cancel.** A frame that passes keeps its timestamp in a
  holding register until the CPU releases it. A later frame that arrives
  while the register is still held sets an overflow flag instead. Any
  other frame, or one that ends early, cancels the timestamp.

`ptp_clock` counts seconds and nanoseconds, adding 8 ns per 125 MHz clock,
so 8 ns is the resolution. It has no rate adjustment: on a slave, the
GMII clock is the one the PHY recovered from the master, so both clocks run
at the same rate. The software can load the time or add a signed offset
once. `pps` is high for the first 100 ms of each second.

PTP registers (`ptp_unit`, GMII clock domain):

| Address | Name | Read | Write |
|---|---|---|---|
| 0x00 | SEC | seconds; also latches ns | seconds to load |
| 0x04 | NS | ns latched by the SEC read | ns to load |
| 0x08 | CTRL | — | bit 0: load the time; bit 1: add OFFSET once |
| 0x0C | OFFSET | — | signed offset, in ns |
| 0x10 / 0x20 | RX_STAT / TX_STAT | bit 0 valid, bit 1 overflow | release the timestamp |
| 0x14 / 0x24 | RX_SEC / TX_SEC | timestamp seconds | — |
| 0x18 / 0x28 | RX_NS / TX_NS | timestamp ns | — |
| 0x1C / 0x2C | RX_ID / TX_ID | {messageType[19:16], sequenceId[15:0]} | — |

## What is not in this logic

The following parts are outside this RTL:

* The external parts: the ADCs and their analog front end, the dual-port
  RAM and its bank switching between ports, the PHY, the PLLs, the SDRAM
  and Flash, and the module management controller.
* The vendor and third-party IP: the soft CPU, the Gigabit MAC with its
  DMA, and the 1000BASE-X PCS and transceiver.
* All software: the command server, UDP header construction, the PTP
  servo, and event building.

The top brings their interfaces out as ports:

* the ADC lanes;
* the RAM write port;
* the GMII bus, which the PTP detectors only observe;
* the two register buses.

The clock-shift mechanism that would correct the PTP offset below 8 ns,
and the synchronous PTP switch, are described in the source as future
work and are not built.

## Choices made here, and departures

**Interfaces:**

* The token is a single one-clock pulse per hop. The source's channel
  diagram also shows acknowledge lines between neighbouring channels, but
  not what they carry, so they are not modelled as separate wires.
* Channel 0 holds the token after reset.
* The register maps, reset values and the 18-bit word layout are this
  design's.
* Both CPU buses are plain address/data buses, each in the clock domain
  of the logic it serves. Any bridging is left to the CPU system.

**Behaviour:**

* Samples are dropped while no bank is free. The source does not say what
  happens then.
* The DRAIN state, which holds an event back until its output FIFO is
  empty.
* Round-robin polling in the FIFO-out controller.
* The post-trigger window counts the trigger sample.

**Defaults and sizes:**

* `POST` defaults to 4096 samples. The drift time is not given.
* The input and output FIFOs are 8 deep.

**Board figures:**

* The board's block diagram marks 200 MHz near the RAM, while the text
  states a minimum of 80 MHz. The logic has no fixed frequency. It is
  verified at the 80 MHz minimum.

* The text names the RAM part 72V7339, while the block diagram prints
  IDT7339S. Both describe the same 64 x 8K x 18 organisation, which is
  all the logic depends on.

**PTP:**

* The detector assumes untagged Ethernet II / IPv4 / UDP frames.
* Only port 319 (event messages) is timestamped.
* The frame identifier is the sequenceId. It sits at byte offset 30 of
  the PTP header in both versions 1 and 2 of the protocol.

All parameters default to the board's sizes: 32 channels, 8 channels per
ADC, 8192-word banks and 10-bit samples. Nothing is scaled down.

## Simulation

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. Behavioural models of
the ADC's serial output (`adc_model`) and of the dual-port RAM
(`dpram_model`) live in `tb/`.

| Testbench | What it exercises |
|---|---|
| `tb_lvds_deser` | framing, bit order, nothing before the first frame edge |
| `tb_trigger_detect` | comparison at and around the threshold, one-clock latency |
| `tb_async_fifo` | two unrelated clocks, full/empty, order |
| `tb_sync_fifo` | queue model, registered read, refused pushes |
| `tb_write_fsm` | circular addresses with wrap, trigger address, `POST` window, bank switch, lost samples, disable |
| `tb_main_fsm` | FREE/DRAIN/FULL sequence, writer without a grant, oldest bank offered first |
| `tb_read_fsm` | a 4-channel ring: skipping, holding, acknowledge reaching only the holder |
| `tb_channel_receiver` | one channel with 64-word banks, RAM contents around each trigger, lost samples |
| `tb_fifo_out_ctrl` | one write per clock, routing to `{fifo, address}` |
| `tb_daq_regs` | every register |
| `tb_ptp_clock` | against a time model, across second boundaries, offsets of both signs |
| `tb_ptp_frame_detector` | Sync kept, wrong port / ARP / TCP / short frame cancelled, overflow |
| `tb_ptp_unit` | register-level time load, offset, Rx/Tx timestamps |
| `tb_amc_daq_top` | the whole design at full size, end to end |

`tb_amc_daq_top` runs the default configuration:

* 32 channels, 8K banks, an 80 MHz memory clock against 2.5 MS/s;
* 65 events, each checked word by word in the RAM model;
* a CPU stall that forces lost samples;
* PTP frames in both directions, a second rollover with PPS, and an
  offset correction.

It counts each mechanism and fails if one never occurs. It takes about 10
seconds.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl rtl/daq_pkg.sv tb/tb_amc_daq_top.sv \
  --top-module tb_amc_daq_top -Mdir obj && obj/Vtb_amc_daq_top
```

Replace the top module to run any other testbench. The design has no
X-dependence: every register that is read has a reset.
