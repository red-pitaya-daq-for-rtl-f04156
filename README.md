# Dual-channel trigger-and-capture firmware for a SiPM fast-neutron detector

A plastic scintillator (EJ-276D) is read out by two silicon photomultipliers
with different cell sizes. One gives a sensitive low-energy channel (A). The
other gives a high-dynamic-range channel (B) that keeps working where A
saturates. Both preamplifier outputs go to the two 14-bit, 125 MS/s ADC
inputs of a Red Pitaya (Zynq-7000) board. Neutrons and gammas are told apart
offline by pulse shape. That needs the full waveform of every pulse: 128
samples, 1024 ns, in both channels at once.

The RTL here is the programmable-logic part of that acquisition chain. It
watches both ADC streams and keeps only the pulses that cross a threshold
above the SiPM dark-count noise. On such a trigger it freezes both channels
together, so each event is a time-aligned pair of traces. It then copies the
pair into a circular buffer in DDR memory, which the ARM software reads out.
The stock board firmware captures the two channels one after the other even
in its "split trigger" mode. Capturing both on one trigger is the point of
this firmware.

```
 adc_a ─►[reg]─┬─►threshold_trigger A ─┐ rise/fall
               │                       ├─► trigger_select ─ trig ─► acq_controller
 adc_b ─►[reg]─┼─►threshold_trigger B ─┘                              │ wr_en, wr_ptr (shared)
               │                                                      ▼
               └─►[reg]──────────────────────► trace_buffer A / B (128 × 14 bit rings)
                                                                      │ trace_valid, trace_start
                                                                      ▼
        system bus ◄─► daq_regs ◄──── status ─────────────────── dma_writer ─► m_* (64-bit) ─► DDR
                                                                      └─► irq
```

## One event in memory

An event takes 512 bytes, written as 64 little-endian 64-bit words:

| words | content |
|---|---|
| 0 – 31  | channel A, samples 0 … 127, oldest first |
| 32 – 63 | channel B, samples 0 … 127, oldest first |

Each word holds four samples. Sample 4k+j sits in bits `16j+15 : 16j`, as
a two's-complement value sign-extended from 14 to 16 bits. There is no
header. Time comes from the order of the events, and the trigger position
within a trace is fixed by the POST_DELAY register. With the default
POST_DELAY of 112, sample 16 is the sample that crossed the threshold. The
16 samples before it are baseline.

## Triggering

Each channel has a `threshold_trigger`. The detector pulses are negative
in ADC counts, so the usual source is a falling crossing. A falling
crossing fires on the first sample at or below the threshold, and only
once the channel has been above `threshold + hysteresis` since the last
crossing. The rising crossing mirrors this. Hysteresis stops noise around
the level from producing a burst of triggers. Its reset value is 20 counts.
The flags are registered, so each one appears one clock after its sample.

`trigger_select` turns the source code into one trigger line:

| code | source |
|---|---|
| 0 | off |
| 1 | software trigger: bit 4 of a CONFIG write |
| 2 / 3 | channel A rising / falling |
| 4 / 5 | channel B rising / falling |
| 10 / 11 | either channel rising / falling |

Codes 1–5 use the Red Pitaya oscilloscope numbering. Codes 10/11 are an
addition: with them, a pulse large enough to saturate A, or too small to
cross on B, still triggers the pair. Whatever the source, the same trigger
stops both channels.

## Recording a trace: pre-trigger, post-trigger and dead time

This is the subtle part. `trace_buffer` is a 128-entry ring per channel.
Both rings are written every clock at the write address from
`acq_controller`, so at any moment they hold the last 128 samples of each
channel. `acq_controller` moves through the following states:

1. **IDLE.** Nothing is written. A CONFIG write with bit 0 set (arm)
   latches POST_DELAY, clamped to 1 … 128, and starts recording.
2. **FILL.** It records `pre = 128 − POST_DELAY` samples and ignores
   triggers. This guarantees that the pre-trigger part of the trace is
   real data and not left over from an older event.
3. **ARMED.** It keeps recording and waits for the trigger. The sample
   written in the trigger cycle becomes trace index `pre`. The oldest
   sample's ring address, `trace_start = wr_ptr − pre`, is kept.
4. **POST.** It records until POST_DELAY samples, the trigger sample
   included, have been written after the trigger. Writing then stops.
5. **HOLD.** The rings are frozen and offered to the DMA
   (`trace_valid`). When the DMA has copied them (`trace_done`), the
   controller re-arms through FILL in continuous mode (CONFIG bit 3), or
   returns to IDLE.

Triggers during POST and HOLD are ignored. This is the firmware's share of
the dead time. The ADC samples are registered once at the input. The ring
write data is delayed by one more register, to match the registered
crossing flag, so the crossing sample lands exactly at index `pre`.

Latency, counted in 125 MHz clock edges from the edge that registers the
crossing sample, with the memory always ready:

| step | edges |
|---|---|
| crossing flag registered | 1 |
| trigger accepted | 1 |
| last of 112 post-trigger samples written, trace offered | 111 |
| DMA copy (5 cycles to gather + 1 to write per word, 64 words, + 2) | 386 |
| **total, up to `irq`** | **499 (3.99 µs)** |

Re-arming then takes another 16 samples: 515 cycles (4.1 µs) from one
recorded crossing to the first sample that can trigger again. So the
firmware alone could take about 240 000 events/s. The complete system is
quoted for event rates up to 5000/s, with a total dead time of 196.61 µs
per event (24 576 clock cycles). The firmware accounts for only 4.1 µs of
that; the rest is readout and software.

Because events go through the circular buffer, the software's time per
event does not add to the firmware dead time, as long as the software keeps
up on average. With random (Poisson) arrivals at 5000/s and 196.61 µs of
software time per event, the software is busy 98 % of the time. The backlog
then grows in bursts: in simulated runs of 300 pulses it peaked at 14–15
events (about 7.5 KiB). Only pulses that fall within 4.1 µs of a recorded
one were lost, about 2 % of them, as the exponential gap distribution
predicts (1 − e^(−515/25000)).

## The circular buffer in DDR

`dma_writer` owns the write side of the buffer. It works with three
registers: BUF_BASE (byte address), BUF_SIZE (bytes, a non-zero multiple of
512, so an event never straddles the end) and RD_PTR. RD_PTR is a byte
offset written by software once it has consumed events. The firmware's
WR_PTR is the offset of the next event. An event is written only if more
than 512 bytes are free. So `WR_PTR == RD_PTR` always means empty, and a
buffer of N slots holds N − 1 events. When the buffer is too full, the
trace stays in HOLD until software advances RD_PTR. The recorder is dead
in the meantime, so pulses in that time are lost and not queued. The
waiting event counts once in STALLS. After each event WR_PTR advances by
512 and wraps to 0 at BUF_SIZE. EVENTS counts by one, and `irq` pulses for
one cycle.

A read loop for software:

```
wr = read(WR_PTR)
while rd != wr:  consume 512 bytes at BASE + rd;  rd = (rd + 512) mod SIZE;  write(RD_PTR, rd)
```

The memory port is a plain 64-bit valid/ready write port (`m_valid`,
`m_ready`, `m_addr`, `m_data`). It stands in for the Zynq high-performance
AXI port; on the board, an AXI write adapter goes between the two.
`m_addr`/`m_data` hold while `m_valid` waits for `m_ready`, and an assertion
checks this.

## Register map (system bus)

The strobes `sys_wen` / `sys_ren` last one cycle. `sys_ack` and
`sys_rdata` follow one cycle later, and `sys_err` marks an unmapped
address. Only address bits 11:0 are decoded. The values in the Reset
column are this design's choices.

| offset | name | access | meaning | reset |
|---|---|---|---|---|
| 0x00 | CONFIG | W | bit0 arm, bit1 cancel, bit4 software trigger (pulses); bit3 continuous (stored) | – |
|      |        | R | bit0 armed (FILL/ARMED), bit2 triggered (POST/HOLD), bit3 continuous | 0 |
| 0x04 | TRIG_SRC | RW | source code (table above) | 0 |
| 0x08 | THR_A | RW | channel A threshold, 14-bit two's complement, read sign-extended | 0 |
| 0x0C | THR_B | RW | channel B threshold | 0 |
| 0x10 | POST_DELAY | RW | samples from the trigger on, 1 … 128 | 112 |
| 0x20 | HYST_A | RW | channel A hysteresis, 14 bits | 20 |
| 0x24 | HYST_B | RW | channel B hysteresis | 20 |
| 0x100 | BUF_BASE | RW | buffer byte address | 0 |
| 0x104 | BUF_SIZE | RW | buffer size in bytes | 1 MiB |
| 0x108 | RD_PTR | RW | software read offset | 0 |
| 0x10C | WR_PTR | R | firmware write offset | 0 |
| 0x110 | EVENTS | R | events stored since reset | 0 |
| 0x114 | STALLS | R | events that waited for space | 0 |
| 0x118 | STATUS | R | bits 2:0 recorder state (0 idle, 1 fill, 2 armed, 3 post, 4 hold), bit4 DMA busy, bit5 DMA waiting for space | – |

The offsets 0x00–0x24 follow the layout of the Red Pitaya oscilloscope
register block, which the original acquisition program was written against.
The meaning of bit 3/4 in CONFIG and the whole 0x100 group belong to this
design.

## What is taken from the system, and what is chosen here

From the system description: two channels, 14-bit samples at 125 MS/s,
traces of 128 samples, threshold triggering above the noise floor, both
channels captured on the same trigger, DMA into a circular DDR buffer, and
software using the Red Pitaya register layout.

The system description leaves most of the logic open, so these are this
design's own choices:

- the crossing rule and hysteresis;
- pre-trigger handling (FILL) and the 16/112 split;
- continuous and single-shot modes, and cancel;
- the either-channel sources;
- the event format, with no header or timestamp;
- the buffer-full rule (hold the trace; lose pulses in the meantime);
- the 64-bit valid/ready port in place of AXI;
- the DMA and counter registers, and the `irq` pulse.

Outside this RTL:

- the analog front end (SiPMs, BGA614/BGA616 preamplifiers, LT8362 bias
  supply) and the ADC chip. Samples enter as two's complement, so any
  offset-binary conversion or inversion of the ADC data belongs in the pin
  interface in front of `daq_top`.
- the DDR controller.
- a four-channel variant. The board also exists with four ADC inputs,
  but this design is written for the two-channel detector.
- all software: the acquisition program and TCP server, and the online
  histogramming mode (baseline, maximum, integral). Pulse-shape
  discrimination is done there or offline:
  `PSD = 1 − Q_s/Q_l`, with `Q_s` integrated up to 12 samples (96 ns) after
  the maximum and `Q_l` over the whole trace. The stored trace (16
  samples before the crossing, 112 after) contains both windows.

## Files

`rtl/` — one module per file, with shared constants in `daq_pkg.sv`:

| file | role |
|---|---|
| `daq_pkg.sv` | sizes (ADC_W 14, TRACE_LEN 128, NCH 2), trigger source codes, recorder states |
| `threshold_trigger.sv` | per-channel crossing detector |
| `trigger_select.sv` | source multiplexer, single common trigger |
| `trace_buffer.sv` | 128 × 14 bit ring memory, one-cycle read |
| `acq_controller.sv` | FILL / ARMED / POST / HOLD recorder control |
| `dma_writer.sv` | event packing and circular-buffer writes |
| `daq_regs.sv` | register file on the system bus |
| `daq_top.sv` | top level: all of the above, two channels |

`tb/` — one self-checking testbench per module (`tb_<module>.sv`).
`ddr_model.sv` is a behavioural memory with random back-pressure.
`tb_daq_top.sv` runs the whole design at its default sizes. It feeds two
ADC streams with noise and detector-like pulses. A software model reads
events and moves RD_PTR. Each stored event is matched against the recorded
ADC history: both channels must be the same window, with a crossing of the
selected source at index 16. The test exercises every mechanism and fails
if one of them never happens:

- triggering on A, on B and on either channel;
- a pulse on the unselected channel ignored;
- a second pulse inside the dead time ignored;
- buffer wrap;
- buffer full with a stall and lost pulses;
- memory back-pressure;
- software trigger, single-shot mode and cancel.

It also checks the 499-edge latency.

`tb_rate_workload.sv` applies the specified load to the design at its
default sizes:

- 300 pulses at random times, averaging 5000/s;
- software that spends 196.61 µs on each event;
- a 64 KiB buffer.

It predicts which pulses must be recorded: each crossing that comes at
least 515 samples after the previous recorded one. It then checks that
exactly those events were stored, each with the right content.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops on its own.
A watchdog turns a hang into a failure. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/daq_pkg.sv tb/tb_daq_top.sv --top-module tb_daq_top
./obj_dir/Vtb_daq_top
```

Replace `tb_daq_top` with any other `tb_<module>` to test one block. The
end-to-end run simulates about 62 000 clock cycles and finishes in seconds.
The simulator is two-state, so every testbench resets or initialises what
it reads.

To change the trace length, set `TRACE_LEN` on `daq_top`. It must be a
power of two and a multiple of 4, because four samples are packed per
word; the event size follows as `2 × TRACE_LEN × 2` bytes. The
reset value of POST_DELAY follows as `TRACE_LEN − 16`.

## How far it is verified

- Every module passes its own testbench, and the whole design passes the
  end-to-end test at its default sizes.
- For each module, the testbench was shown to fail on a deliberately
  broken copy of it.
- The design is lint-clean apart from style warnings, and elaborates in
  two independent front ends.
- It has not been run on hardware. The AXI adapter and the board's ADC pin
  interface are not part of it, and its timing at 125 MHz has not been
  closed in a Zynq implementation.
