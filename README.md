# CTPX1 readout firmware: a two-stage merge of sixteen Timepix4 links

Timepix4 is a pixel readout chip that sends every hit as a 64-bit word
over up to sixteen serial links. Each link runs at 5.12 Gbps, and they
are split between the top and bottom halves of the chip. With all
sixteen links in use, the chip can deliver about 1.25 G hits per second.
The camera's FPGA must take all of that in and turn it into one ordered
stream. It must not lose events when the output link is slower than the
chip. It must also keep the time stamps meaningful over long exposures.

This RTL is the programmable-logic part of that readout. It is built
around three ideas:

1. **Merge in two stages.** The first stage merges the links in groups
   of four on narrow 80-bit words. The second stage merges the four
   groups on a 512-bit bus.
2. **Raise the clock to merge without loss.** Each link delivers one
   word per 80 MHz clock. The merger runs at 320 MHz, so it has one slot
   for every word of all four links in its group. No link ever has to
   wait.
3. **Send events as bursts, not a trickle.** Events are collected and
   sent as packets. A packet closes when 128 events are waiting, or when
   the oldest has waited 1 ms. The wide bus then moves whole packets at
   full speed, and a quiet link still reaches the output in bounded
   time.

After the merge, the 512-bit stream either goes straight to an output
link (Streaming Mode) or is written into an 8 GB DDR4 ring and read out
later (Buffered Mode). Buffered Mode exists because the 64 Gbps
Aurora/QSFP+ output is slower than sixteen links at full rate (81.92
Gbps). The DDR ring can hold about half a second of full-rate data, and
drains it afterwards.

```
 GWT 0-3  ─┐                                            ┌─► Aurora (QSFP+)
 GWT 4-7  ─┤ 4 x MCRRM      AXI-Stream     mode MUX ───┤ 2x2 AXI-Stream
 GWT 8-11 ─┤ (80b @ 320M)─► interconnect ─►   │   ▲     │ switch
 GWT 12-15─┘                (512b @ 320M)     ▼   │     └─► UDP (SFP+)
                                            w_ddr r_ddr
                                              │   ▲
                                          DDR4 ring (8 GB)
 AXI4-Lite ─► pl_registers          AXI-Stream bytes ─► tpx4_slow_control ─► chip
```

The top module is `ctpx1_top`. The serial transceivers, the DDR4
controller and its AXI interconnect, the Aurora and UDP cores and the
processor system are vendor or software parts. They sit outside the RTL,
and their connections are top-level ports.

## Clocks and word formats

There are two clocks, each with a synchronous active-high reset:

- `lclk` (80 MHz) is the link side. It receives one 66-bit block per
  link per clock from the transceiver gearbox.
- `aclk` (320 MHz) drives everything after the merge.

Signals cross between the two domains in only three places:

- the dual-clock FIFOs inside each merger;
- a two-flop synchronizer for each link-enable bit;
- a two-flop synchronizer for the time-counter clear.

| word | width | layout |
|---|---|---|
| GWT block | 66 | `blk[1:0]` sync header (`blk[0]` first on the line), `blk[65:2]` scrambled payload |
| raw event | 64 | as sent by the chip; coarse ToA assumed at bits `[TOA_LSB+15:TOA_LSB]`, default 28 |
| event | 80 | `{ToA[31:16], raw[63:0]}` |
| beat (`beat_t`) | 512 + 6 + 1 | six events in `data[80*s +: 80]`, `data[511:480]` spare, `keep[s]` per event slot, `last` |

The chip's own word layout is not reproduced here. Only the position of
the 16-bit coarse ToA matters to the logic, and that position is the
`TOA_LSB` parameter.

## Stage 1: the Multi-Channel Round-Robin Merger (`mcrrm`)

Each of the four MCRRMs takes four links. The top-half links 0-7 feed
MCRRMs 0 and 1, and the bottom-half links 8-15 feed MCRRMs 2 and 3.

**Descrambler** (`gwt_descrambler`). This is the self-synchronising
64b/66b descrambler of IEEE 802.3 Clause 49, with polynomial
1 + x^39 + x^58. It works bit-serially inside one clock:
`out[i] = in[i] ^ s[38] ^ s[57]`, and then the received bit is shifted
into `s`.

- Data blocks (header `01` in line order) come out as 64-bit words.
- Control blocks, which are idles, keep the descrambler state running
  but produce no output.
- An illegal header (`00` or `11`) raises `hdr_err` for one clock.
- The first 58 bits after reset are wrong until the state fills. Every
  self-synchronising descrambler behaves this way.

**ToA extension** (`toa_extend`, `toa_ref_counter`). The chip stamps
each hit with a 16-bit coarse time of arrival (ToA) in 25 ns bins. That
count wraps every 1.6 ms. A free-running 32-bit reference counter runs
at the same 40 MHz rate (`lclk`/2), and the extender takes the upper 16
bits from it:

```
hi = ref[31:16] - (toa > ref[15:0])      // event stamped before the last wrap
event = {hi, raw}
```

This is right as long as an event arrives less than one wrap (1.6 ms)
after it was stamped. It also needs the reference counter and the
chip's counter to be started together. The PL register bit `toa_clear`
holds the reference counter at zero for this. Aligning it with the chip
is left to software.

**Clock-boosted 4:1 merge** (`rr_merge4`). Each link writes into its own
16-deep dual-clock FIFO, which uses Gray-code pointers. On the 320 MHz
side, a round-robin pointer looks at the four FIFOs starting from the
link after the one served last, and takes one event per clock.

- Four links at 80 MHz supply at most four events per 80 MHz period.
  That equals the four 320 MHz clocks in the same period, so the merge
  keeps up with every link at full rate.
- A link whose `link_en` bit is clear is ignored at the write side.
- If a FIFO ever fills, `cdc_drop` reports it. This does not happen at
  the nominal clock ratio.

**Burst buffer with two triggers** (`burst_ctrl`). This block is the
central one and the least obvious. Merged events go into a 1024-event
FIFO, and a two-state FSM (IDLE, SEND) decides when to release them.
`pending` counts the buffered events that are not yet part of a burst.

- **Count trigger.** When `pending >= threshold` (default 128), a burst
  of exactly `threshold` events is sent, with TLAST on the last one.
- **Latency trigger.** A timer counts 320 MHz clocks while `pending` is
  non-zero. The timer is reset whenever a burst starts. When it passes
  `timeout` (default 320000 clocks, 1 ms), everything pending is sent
  as one burst, which flushes a slow link.
- A new burst may start on the same clock as the last beat of the
  previous one. Under full load, the output therefore sees back-to-back
  128-event packets with no idle clock. The input cannot be stopped. An
  event that finds the FIFO full is dropped and counted (`drop`).

## Stage 2: the AXI-Stream interconnect (`axis_interconnect`)

Each 80-bit stream is first widened by `axis_upsizer`. Six events fill
one 512-bit beat. A beat closes early on TLAST, and its `keep` bits mark
the slots that are used.

Each widened stream then passes through a store-and-forward packet
FIFO, `axis_packet_fifo`, which holds 64 beats. A packet becomes visible
only when its last beat is in, so a granted packet moves at one beat per
clock. A packet that could never fit is passed through cut-through
instead.

A round-robin arbiter, `axis_rr_arbiter`, holds its grant until TLAST.
It can hand over to the next input on the clock after a last beat, with
no idle clock between packets.

Capacity: 320 MHz × 6 events per beat = 1.92 G events/s. That is well
above the 1.28 G events/s the links can supply.

## Streaming and Buffered Modes

**Mode MUX** (`mode_mux`). The `mode` register bit selects the path:
0 for Streaming, 1 for Buffered. A change takes effect only at a packet
boundary. A packet is never split between the DDR path and the direct
path.

**DDR ring writer** (`w_ddr`). This block writes each beat to the next
64-byte word of a ring of 2^27 words (8 GB). The `keep` bits are stored
in the spare bits `[485:480]`, so the reader can rebuild partly filled
beats. The write pointer and read pointer are one bit wider than the
address. The ring is full when they differ only in that top bit. When
full, the writer stops accepting data. The stall then backs up through
the interconnect and the packet FIFOs into the MCRRM buffers, and those
start dropping events.

**DDR ring reader** (`r_ddr`). When `ddr_rd_en` is set, the reader
issues read requests from the read pointer up to the write pointer. It
keeps no more requests in flight than its 16-word output buffer can
hold. Read data is assumed to return in order. The reader forms packets
of at most 32 words. A packet is cut short when the ring runs empty. The
TLAST of each word is decided when its request is issued, and travels
beside the request in a small tag FIFO. The read pointer that the writer
sees advances only when a word leaves the reader. This way the writer
never overwrites data that is still in flight. `ddr_clear` empties the
ring.

**Output switch** (`axis_switch`). This is a 2×2 AXI-Stream switch. The
source is the direct path or the DDR reader, and it follows `mode`. The
destination is Aurora (0) or UDP (1), set by the `dest` bit. The switch
re-reads both selects only between packets.

## Control

**Register file** (`pl_registers`, AXI4-Lite, 32-bit, on `aclk`):

| addr | name | bits |
|---|---|---|
| 0x00 | CTRL | [0] mode, [1] dest, [2] ddr_rd_en, [3] ddr_clear, [4] toa_clear (reset 0) |
| 0x04 | LINK_EN | one bit per link, reset 0xFFFF |
| 0x08 | THRESHOLD | count trigger, reset 128 |
| 0x0C | TIMEOUT | latency trigger in 320 MHz clocks, reset 320000 |
| 0x10 | DDR_FILL | words in the ring (read only) |
| 0x14 | DROP_CNT | events dropped in the MCRRM buffers |
| 0x18 | EVT_CNT | events entering the MCRRM buffers |
| 0x1C | CNT_BURSTS | bursts closed by the count trigger |
| 0x20 | TMO_BURSTS | bursts closed by the latency trigger |

Writing any value to a counter clears it. An unknown address reads
0xDEADBEEF.

**Slow control** (`tpx4_slow_control`). Bytes arrive from the processor
on an 8-bit AXI-Stream. They are shifted out MSB first on a
clock/chip-select/data interface. `sc_clk` is `aclk`/DIV, and data
changes while the clock is low. The byte shifted in on `sc_din` at the
same time is returned on the reply stream. This is a generic
SPI-mode-0-like serializer. **It is not the Timepix4 slow-control
protocol**, which is not described here. Replace this block before
using it with a real chip.

## Departures from the original description and open points

- The count trigger fires when the count *reaches* 128 (`>=`), not when
  it exceeds 128.
- The link rate is taken as 5.12 Gbps, which is 64 bits at 80 MHz.
  Some drawings of the system label the links 10.24 Gbps.
- The following are choices made for this design:
  - the descrambler polynomial, header coding and bit order (the
    Ethernet 64b/66b code);
  - the position of the ToA in the raw word;
  - the ToA extension method and its 40 MHz reference;
  - all FIFO depths: 16, 1024, 64 and 16;
  - the 32-word read packets;
  - the six-event beat packing;
  - the register map;
  - the memory port interface;
  - the slow-control serializer.
- Both the direct stream and the DDR read-back pass through the 2×2
  switch, so either can reach either output. Streaming Mode is described
  as able to use Aurora or UDP.
- The memory ports are simple valid/ready write and read-request ports
  with in-order read data. A real system connects them to an AXI4
  master that feeds the DDR4 controller. TLAST is not stored in the
  DDR, so read-back packets are re-formed by length.
- The Aurora and UDP outputs carry `beat_t` (data, keep per 80-bit
  event slot, last). Adapting them to a core's byte-wise `tkeep` is left
  to the integration.

## Throughput at the default sizes

| case | needed | built |
|---|---|---|
| 16 links at full rate | 1.17–1.25 G events/s | links 1.28 G/s; each MCRRM 1 event per 320 MHz clock; interconnect 1.92 G/s |
| 0.5 s burst in Buffered Mode | 81.92 Gbps × 0.5 s / 64 b = 640 M events = 107 M words = 6.8 GB | 2^27 × 64 B = 8 GB ring |
| Streaming to Aurora | 64 Gbps link | bus 163.8 Gbps; rate set by the Aurora core; excess is buffered, then dropped |
| 32-bit ToA range | long time-of-flight frames | 2^32 × 25 ns ≈ 107 s |

## Files and simulation

`rtl/` contains the following:

- the package `ctpx1_pkg` (widths, `event_t`, `beat_t`);
- the blocks named above;
- the generic helpers `sync_fifo` (first-word fall-through) and
  `async_fifo` (Gray-code pointers, two-flop synchronizers).

Each file starts with a description of its interface and timing.

`tb/` has one self-checking testbench per block. Each testbench prints
`TB_RESULT checks=N failures=M` and contains a watchdog.

- `tb_gwt_pkg` holds a reference scrambler and an event generator.
- `ddr_mem_model` is a sparse behavioural memory with configurable
  latency and random stalls.
- `tb_ddr_path` tests `w_ddr` and `r_ddr` together. It runs on a
  16-word ring that it fills and wraps.
- `tb_ctpx1_top` runs the whole design end to end at reduced buffer and
  ring sizes. It counts each mechanism and fails if one never happens:
  - count-triggered bursts;
  - latency-triggered bursts;
  - buffer overflow with drops;
  - both output destinations;
  - a masked link;
  - Buffered Mode with a full ring and read-back;
  - header errors;
  - a slow-control exchange;
  - a lossless run with all sixteen links sending an event on every
    link clock while the outputs accept data. This run checks that
    the merge keeps up with the full link rate.
- `tb_ctpx1_full` runs the same sequence with every parameter at its
  default (8 GB ring, 1 ms timeout). The only exception is filling the
  ring, which is not practical at 8 GB. It finishes in well under a minute of
  wall-clock time with Verilator.

The two end-to-end testbenches check every delivered event against a
model of its own link, including the 32-bit ToA. It also checks that the events missing
from a link equal the drop counter.

Simulation with Verilator 5, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/ctpx1_pkg.sv tb/tb_ctpx1_top.sv \
  --top-module tb_ctpx1_top -o sim
obj_dir/sim
```

Replace `tb_ctpx1_top` with any other testbench name. The testbenches
use `lclk` with a period of 8 ns and `aclk` with a period of 2 ns (a
4:1 ratio, not the absolute frequencies). They reset every register
they read, so the two-state simulator's random initial values do not
matter.
