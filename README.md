# Data-acquisition firmware for a synchronised low-frequency pulsar backend

A radio telescope built from many separate stations can be phased into one large
beam only if every station's voltage samples are taken on a common time base and
arrive at the processing servers complete and labelled. This design is the
programmable-logic part of such a system. It runs on each RFSoC sample board and
does three things:

- **Common start.** It starts all eight ADC streams on the same sample, namely the
  first sample after a one-pulse-per-second (1PPS) edge. That edge is shared by
  every board.
- **Compact samples.** It turns each stream into signed 8-bit samples.
- **Packetising.** It cuts each stream into UDP payloads of 4096 samples, prefixed
  with a 64-bit packet counter. All eight streams leave through one 100 GbE port.

The servers then find the true sample index of any packet as
`start + 4096 × counter`. They can align boards, detect lost packets and do all
channelisation in software.

The board samples each input at 1.6 Gsps, and the converter decimates by two to
800 Msps. The converter hands over eight 16-bit samples per cycle of a 100 MHz
AXI-Stream clock. The firmware keeps that rate with no loss for all eight streams
at once: 51.2 Gb/s of sample data into a 100 Gb/s link.

## Block structure

```
        ADC clock domain (adc_clk, 100 MHz)                     Ethernet clock domain (eth_clk)
 s_adc[i] ─► scale 16→8 ─► pass gate ─► 64→512 ─► tlast/64 ─► tid=i ─► cache FIFO ─► dual-clock FIFO ─┐   (x8)
                  ▲            ▲                                                                      │
             shift_count   data_valid & tx_enable[i]                                                  ▼
                               ▲                                          8:1 packet switch ─► detach tid ─► insert counter ─► pause ─► 100 GbE
 pps_in ─► sync(pl_sysref) ─► sync(adc_clk) ─► start trigger (arm)                                 │  tid → dest IP/port, counter select
 pl_sysref ─► capture(pl_refclk) ─► capture(adc_clk) ─► user_sysref_adc                            ▼
                                                                                        registers (AXI4-Lite, arm, enables, ...)
```

| Module | Role |
|---|---|
| `pulsar_daq_top` | one board: the wiring of everything below |
| `adc_sync_ctrl` | SYSREF capture for the converter, 1PPS capture and start trigger |
| `mts_pl_sysref_sync` | one capture stage for SYSREF |
| `clock_domain_cross_2_reg` | two-flop synchroniser |
| `alarm_trigger_clocked_pps` | arm + first 1PPS rising edge → `data_valid` |
| `data_stream` | one stream, from the converter to the dual-clock FIFO |
| `packed_scale_signed_int_axis` | 8 × int16 → 8 × int8, arithmetic shift and saturation |
| `axis_pass` | frame-wise gate controlled by `data_valid` and the stream enable |
| `axis_dwidth_converter` | 8 × 64-bit beats → one 512-bit beat |
| `axis_gen_tlast` | tlast on every 64th wide beat (one payload = 4096 bytes) |
| `axis_attach_tid` | tags every beat with the stream number |
| `axis_fifo_sync` | single-clock cache FIFO |
| `axis_fifo_async` | dual-clock FIFO in packet mode |
| `axis_switch_pkt` | 8:1 round-robin switch that never splits a packet |
| `axis_detach_tid` | removes the tag and holds it for the packet in flight |
| `packet_counter` | one 64-bit counter per stream |
| `insert_header_axis` | puts the 8-byte counter in front of the payload |
| `axis_pause` | idle cycles after each packet |
| `mmio_regs` | AXI4-Lite control registers |
| `pb_pkg` | shared widths and the tagged wide beat type |

## Starting on the same sample everywhere

Boards are aligned by two shared signals, a 10 MHz reference and 1PPS. An
on-board clock synthesizer locks the sample clock, the 100 MHz AXI-Stream clock and
a 10 MHz SYSREF to the reference. The synthesizer is outside this RTL. All these
clocks are integer multiples of 10 MHz, so once SYSREF is phase-aligned with the
reference, every clock edge on every board has a fixed relation to it.

Two signals are re-timed inside the logic.

**SYSREF for the converter (`user_sysref_adc`).** The raw SYSREF is captured first on
the PL reference clock and then on the AXI-Stream clock. Each capture is done by
`mts_pl_sysref_sync`. The result goes to the converter's user SYSREF input for
multi-tile synchronisation, which gives all ADC tiles the same deterministic latency.

**1PPS (`data_valid`).** Capturing the 1PPS directly on the 100 MHz clock gives only
10 ns to meet setup and hold. With cables of different lengths that can land on
different cycles on different boards. So 1PPS is first captured on the 10 MHz SYSREF
(a 100 ns window) and then on the 100 MHz clock, each time by a two-flop
`clock_domain_cross_2_reg`. The 100 MHz edge then comes a fixed number of cycles
after a SYSREF edge on every board.

`alarm_trigger_clocked_pps` turns the synchronised pulse into `data_valid`:

- **Arming.** Writing `arm` moves it from idle to armed.
- **Start edge.** The first *rising* edge of 1PPS seen while armed sets
  `data_valid`. A pulse that is already high when `arm` arrives is ignored, so a start
  never happens in the middle of a second.
- **Stop.** Clearing `arm` drops `data_valid`.

`data_valid` is the start signal of every stream on every board.

## One stream

`data_stream` holds one ADC's chain. Every stage uses AXI-Stream valid/ready, but the
converter itself never waits. Whatever the chain cannot take is counted in
`overflow_cnt` and lost.

1. **Scaling.** Each 16-bit sample is shifted right arithmetically by `shift_count`
   (0–15, default 8) and saturated to −128…127. The sign is kept, and no sample wraps
   around.
2. **Gating in whole frames.** `axis_pass` forwards beats only while
   `pass = data_valid & tx_enable[i]`.
   - **Opening.** The gate opens on the first beat after `pass` rises, so the first
     sample after the 1PPS edge is always the first sample of packet 0.
   - **Closing.** Once open, the gate reconsiders `pass` only after a full frame of
     512 narrow beats (4096 samples) has gone through.
   - **Effect.** Stopping a capture can never leave a partial packet in a FIFO, and the
     next capture starts clean.
   - **Closed gate.** Beats are still accepted and thrown away.
3. **Widening and framing.** Eight 64-bit beats are collected into one 512-bit beat.
   The oldest beat goes into the lowest bits, so byte *k* of a wide beat is sample *k*
   in time order. `axis_gen_tlast` marks every 64th wide beat, which ends one
   4096-sample payload.
4. **Tagging.** `axis_attach_tid` adds the 3-bit stream number (`tid`) to every beat.
   The beat travels on as a 516-bit `wide_beat_t` of `{tid, tlast, tdata}`.
5. **Cache FIFO** (`axis_fifo_sync`, 1024 × 516 bits, i.e. 16 packets). While the
   switch serves the other seven streams, each stream must be able to keep
   producing. This FIFO absorbs that wait and any back-pressure from the Ethernet
   side. On the target device it is meant for UltraRAM. Like the dual-clock FIFO, it
   reads its array through a registered port into an output register, the form large
   RAM blocks support, and still moves one word per cycle.
6. **Dual-clock FIFO** (`axis_fifo_async`, 128 × 516 bits). It moves the stream to the
   Ethernet clock with Gray-coded pointers and works in packet mode. The read side is
   only shown the write pointer as it stood after the last tlast, so the switch sees a
   packet only once all 64 beats are inside. That is why this FIFO must hold at least
   one whole packet. Without packet mode the switch could stall mid-packet on a slow
   stream and hold up the other seven.

## From eight streams to one port

On the Ethernet clock, `axis_switch_pkt` picks a stream that has a complete packet
waiting.

- **Search order.** The search starts at the input after the one served last
  (round-robin).
- **Cost of a grant.** Choosing takes one idle cycle, which falls inside the pause
  after the previous packet (see below). The grant then holds until the
  tlast beat has been transferred, so packets are never interleaved. An assertion in
  the module checks this.
- **Fairness.** A stream that is waiting is served before seven other packets have
  gone out.

`axis_detach_tid` removes the tag. It holds `tid` stable from the first beat of a
packet until the counter header has been sent. It also blocks further input until
then, because the header inserter emits one extra beat after the input's tlast.
Throughout the packet, `tid` selects:

- the destination IPv4 address and UDP port for the 100 GbE block
  (`dest_ip`, `dest_port`);
- the stream's own 64-bit counter in `packet_counter`.

### UDP payload

`insert_header_axis` shifts the payload by eight bytes so the UDP payload is one
contiguous 4104-byte block:

| payload bytes | contents |
|---|---|
| 0–7 | packet counter, unsigned 64 bit, least significant byte first |
| 8–4103 | 4096 signed 8-bit samples of one ADC, oldest first |

On the 512-bit bus, byte *b* of a beat is `tdata[8b+7:8b]`. A packet is 65 beats:

- **Beat 0** carries the counter and the first 56 samples.
- **Beats 1–63** each carry the last 8 bytes of the previous input beat followed by the
  first 56 bytes of the current one.
- **Beat 64** carries the last 8 samples, with `tkeep = 0x00000000000000FF` and `tlast`.

The inserter accepts no input during that extra beat and pulses `header_increase`,
which advances the stream's counter.

Counters are cleared by a single pulse when `arm` is set. So after the next 1PPS
start, packet 0 of every stream holds the first 4096 samples after the edge, on every
board. Packets still draining from an earlier capture keep their old numbers.

### Pause

`axis_pause` holds the stream idle for `pause_count` cycles (default 4) after every
packet, so the 100 GbE block gets breathing room between frames. The switch chooses
its next input during the pause, so with `pause_count` ≥ 1 each packet costs exactly
`65 + pause_count` Ethernet-clock cycles when packets are waiting.

## Control registers

AXI4-Lite, 32-bit words, on the Ethernet clock. One write and one read can be in
flight at a time, and every response is OKAY.

| address | register | bits | reset |
|---|---|---|---|
| 0x00 | control | 0: `arm` (start capturing at the next 1PPS) | 0 |
| 0x04 | `tx_enable` | 7:0, one per stream | 0xFF |
| 0x08 | `shift_count` | 3:0 | 8 |
| 0x0C | `pause_count` | 7:0 | 4 |
| 0x10 | status (read only) | 0: `data_valid` | – |
| 0x40 + 4·i | destination IPv4 address of stream i | 31:0 | 0 |
| 0x60 + 4·i | destination UDP port of stream i | 15:0 | 0 |

`arm`, `tx_enable` and `shift_count` reach the ADC clock through two-flop
synchronisers. Treat them as static and change them only while stopped;
`tx_enable` may also be changed while running; it takes effect at the stream's next
frame boundary. A full capture
sequence:

1. Write the destination registers.
2. Write `arm = 1`; streams start at the next 1PPS rising edge.
3. Write `arm = 0` to stop. Every stream finishes its current packet and the FIFOs
   drain.

## Throughput and sizing

- **Input rate.** Each stream produces one 64-beat packet every 512 ADC cycles, so the
  eight streams together produce eight packets in that time.
- **Minimum Ethernet clock.** The output needs 8 × (65 + `pause_count`) Ethernet-clock
  cycles for them, 8 × 69 = 552 at the default pause. The Ethernet clock must therefore
  run above 100 MHz × 552/512 ≈ 108 MHz; the usual 512-bit 100 GbE user clock of about
  320 MHz leaves ample margin. In general the bound is
  100 MHz × (65 + `pause_count`)/64, so at 320 MHz the pause may be raised to about 140
  cycles.
- **Counter range.** One packet lasts 5.12 µs, so the counter will never wrap.
- **Buffering.** The two FIFOs give each stream about 18 packets (1024 + 128 words plus two output registers), which is about
  92 µs of buffering against link stalls.
- **Overflow.** When a stall lasts longer, the cache fills, the chain refuses beats and
  `overflow_cnt[i]` counts the samples lost.

A telescope with more inputs uses more boards, eight inputs per board, all started by
the same 1PPS.

## Relation to the published design

What follows the published design:

- The block chain and block names: scale, pass, width conversion, tlast generation,
  id tagging, cache and clock-crossing FIFOs, packet switch, tag removal, header
  insertion, pause.
- The two-step SYSREF and 1PPS capture.
- The start on the first 1PPS edge after the start command.
- The 64-bit counter followed by 4096 8-bit samples.
- One 100 GbE port shared by eight streams.
- The port names: `shift_count[3:0]`, `data_valid`, `tx_enable`, `id[2:0]`,
  `header_in[63:0]`, `header_increase`, `pause_count[7:0]`, destination IP and port.

This design's own choices, where the published design leaves things open:

- the 16→8-bit scaling: an arithmetic shift, which rounds towards minus infinity, then
  saturation;
- gating in whole frames and consuming dropped beats;
- byte order and packing of the header;
- the round-robin policy and its one-cycle arbitration;
- packet-mode release in the dual-clock FIFO;
- FIFO depths, and the registered reads of both FIFOs;
- one counter per stream, cleared when armed;
- the register map and its reset values;
- dropping `data_valid` when `arm` is withdrawn;
- counting lost samples.

**The double-buffer alternative.** An earlier alternative is not built. It collects
each stream in dual-port RAM double buffers of 2 × 4096 bytes, and a 100 GbE port reads
from them, which needs boards with several 100 GbE ports. The switch-based design here
is the one for boards with a single port.

**Not built and brought out as ports:**

- The RF data converter: its AXI-Stream outputs are the inputs `s_adc_*`, and its user
  SYSREF input is driven by `user_sysref_adc`.
- The clock buffers and clocking wizard, which deliver `pl_refclk`, `pl_sysref` and
  `adc_clk`.
- The 100 GbE block with its UDP/IP framing, which is fed through `m_eth_*`, `dest_ip`
  and `dest_port`.
- The processing system that drives the AXI4-Lite port.
- The off-board clock synthesizer.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one:

- ends with a line `TB_RESULT checks=… failures=…`;
- has a watchdog that ends a hung run as a failure;
- draws its stimulus from `$urandom`, and all state it reads is reset or initialised,
  so two-state simulation is enough.

With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal -Wno-lint -Wno-style \
  -Irtl -y rtl -y tb rtl/pb_pkg.sv tb/tb_pulsar_daq_top.sv --top-module tb_pulsar_daq_top \
  --Mdir obj_top -o sim
./obj_top/sim
```

### The end-to-end test

`tb_pulsar_daq_top` runs the top at its default sizes. Its stimulus:

- **Samples.** It drives eight streams of known samples: a pseudo-random sequence,
  different per stream, placed in the upper byte so that the default shift of 8 gives
  them back exactly.
- **Clocks.** The ADC clock runs at 100 MHz and the Ethernet clock at about 167 MHz,
  with a separate PL reference clock and SYSREF.
- **Control.** It writes the registers over AXI4-Lite.

It goes through three captures:

1. Stream 7 disabled, with a 1PPS pulse before arming that must be ignored, then a
   stop after about three packets per stream.
2. All streams enabled, after the restart.
3. A final run in which the Ethernet side stops accepting data until the caches
   overflow.

For every packet it checks:

- its length and `tkeep`;
- a stable `tid`, and the destination IP and port of that stream;
- that the counter runs from 0 per stream and capture;
- that packet 0 starts with the first sample after the 1PPS edge, within the
  synchronisers' few cycles;
- that every sample continues the sequence;
- that all streams start on the same sample.

It also counts each mechanism and fails if one never happened: start on 1PPS, early
pulse ignored, disabled stream silent, stream switches, headers, pauses,
back-pressure, whole-frame stop, restart and overflow. It takes a few seconds.

### The two-board test

`tb_multi_board_sync` builds two complete boards that share the ADC clock, SYSREF and
1PPS, but the 1PPS reaches each board through a different cable delay, up to 85 ns
apart. That is more than eight ADC clock periods, but inside one SYSREF period.

Every sample carries its own time stamp. Byte *k* of
`{stream, board, cycle number}` sits in the upper byte of sample *k* of a cycle, so
each 8-byte group of a payload names its ADC cycle. Over five starts with different
delays, the test checks that:

- all 16 streams of both boards begin on the same ADC cycle;
- that cycle lies the same number of cycles after the 1PPS edge every time (21 cycles
  with these clocks), which is the deterministic latency the two-step capture is there
  for;
- every payload holds 4096 consecutive samples whose time agrees with its counter;
- nothing is lost.

### The throughput test

`tb_link_throughput` runs all eight streams into a port that never stalls, with the
Ethernet clock at 116 MHz, just above the 108 MHz bound.

- **Packet spacing.** Whenever packets are waiting, it measures the spacing between
  packet starts and requires 65 + `pause_count` cycles.
- **No loss at the default pause.** With the default pause it requires no loss over 40
  packets per stream.
- **Overflow above the link rate.** With `pause_count` = 40 the demand of 164 MHz
  exceeds the link, and it requires the caches to overflow.

### Changing sizes

`pb_pkg` holds the sample and bus widths and the packet length. The depths of the
two FIFOs are parameters of `pulsar_daq_top`. The dual-clock FIFO depth must be a
power of two of at least one packet (64 beats).
