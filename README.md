# RDMA over UDP/IP for a 100 GbE detector data path

A 2D X-ray detector produces images faster than a general-purpose network
stack can take them. The idea behind this design is to leave the host CPU out
of the transfer entirely. The detector-side FPGA cuts each image into UDP/IP
packets. The packet header itself carries the two facts the receiver needs:
**which buffer in host memory** the payload belongs to, and **which packet in
the sequence** it is. Both travel in the UDP port fields, which plain
point-to-point transfers do not need for anything else. The backend FPGA
plugs into the host's PCIe slot. It reads those two numbers, looks the buffer
up in a small table of physical addresses filled in beforehand by the host
software, and writes the payload straight into host memory. It notices a
missing packet by keeping a window of the last 1024 sequence numbers. The
host only hears about events: a lost packet, or a packet for an unknown
buffer.

The result is a one-sided, "push" style RDMA. Unlike RoCE v2 it has no
InfiniBand transport header, no invariant CRC and no queue pairs, so each
side fits in a few thousand lines of logic. The frames stay ordinary routable
UDP/IP.

The RTL follows a published design of this kind, an RDMA data-acquisition
link for 100 GbE on Xilinx UltraScale+ devices. That design gives the block
diagram, the buffer table, the use of the UDP ports and the loss-detection
rule. The field layouts, state machines, realignment logic and buffer
management below are this implementation's own. Where it departs from the
published description, or fills a gap in it, this README says so.

```
 transmitter (detector side)                      receiver (backend, in the host)
 ---------------------------                      --------------------------------
 DDR4 --AXI4--> tx_dma --AXIS--> header_insert     lbus_to_axis --AXIS--> header_analyzer
                                   ^    |                ^                  |hdr      |payload
                     tx_lbuf_table-+    v                |                  v         v
                                  axis_to_lbus --LBUS--> (MAC/network/MAC)  address_  data_mover --wr--> PCIe
                                                                            resolver     ^
                                                        rx_phys_table ----^    |desc     |cmd/done
                                                                               v         |
                                                            loss_detector -> rx_driver --+--> events, irq
```

All datapaths are 512 bits wide, i.e. 64 bytes per clock. The intended clock
is 320 MHz (3.125 ns), so one beat per clock is 163.8 Gb/s. That is enough
headroom for 100 GbE line rate on both sides.

## Frame format

Every frame is a plain Ethernet II / IPv4 / UDP frame with a 42-byte header.
Shared constants and types are in `rdma_pkg`.

| bytes | field | value |
|------:|-------|-------|
| 0-5   | destination MAC | configuration |
| 6-11  | source MAC | configuration |
| 12-13 | EtherType | 0x0800 |
| 14    | version / IHL | 0x45 (no options) |
| 16-17 | IP total length | payload + 28 |
| 18-19 | IP identification | sequence number |
| 20-21 | flags / fragment | 0x4000 (DF) |
| 22    | TTL | 64 |
| 23    | protocol | 17 (UDP) |
| 24-25 | header checksum | computed in hardware |
| 26-29 | source IP | configuration |
| 30-33 | destination IP | from the buffer table (IPADD) |
| 34-35 | UDP source port | **local buffer ID (LBUF#)** |
| 36-37 | UDP destination port | **16-bit packet sequence number** |
| 38-39 | UDP length | payload + 8 |
| 40-41 | UDP checksum | 0 (allowed for IPv4) |

The published design says only that the transfer information travels in the
two UDP ports. Which port holds which number, and all the other field values,
are this design's choices.

Two stream conventions meet in this design:

- **AXI-stream** (`tdata[511:0]`, `tkeep[63:0]`, `tlast`, `tvalid/tready`)
  puts byte 0 of a beat in bits [7:0].
- **LBUS**, the Xilinx 100G MAC's local bus, has four 128-bit segments with
  per-segment `ena/sop/eop/err/mty`. The first byte of a segment sits in bits
  [127:120], and `mty` counts the empty bytes of the last segment.

## Transmitter

### DMA (`tx_dma`)

`tx_dma` reads a transfer of `length` bytes from DDR4 through an AXI4 read
master:

- It issues bursts of up to 64 beats (4 KB) and never lets a burst cross a
  4 KB boundary.
- It sends the address requests ahead of the data, as fast as the
  interconnect accepts them.
- It re-cuts the returning beats into packets of `pkt_bytes` and marks each
  with `tlast`. The last packet takes the remainder.
- It sends each packet's payload length in `tuser`, constant over the packet.
  This lets the header be complete on the packet's first beat, with no
  store-and-forward.
- `src_addr` and `pkt_bytes` must be multiples of 64 (checked by an
  assertion).

### Buffer table (`tx_lbuf_table`)

`tx_lbuf_table` is a block RAM, 256 entries by default, of
{LBUF#, IPADD, SIZE}. The controller writes it at initialisation, and selects
the destination of a transfer with `cfg_entry`. SIZE is read back but not used
by the transmitter.

### Header inserter (`header_insert`)

`header_insert` is the trickiest block on the transmit side, because a
42-byte header does not fill whole beats.

Each output beat is made of:

- the first 42 bytes: a carry register;
- the last 22 bytes: the first 22 bytes of the current input beat.

The other 42 input bytes become the next carry. On the first beat of a packet
the carry is the header itself. If the last input beat holds more than 22
bytes, an extra "drain" beat empties the carry. A packet of B payload beats
therefore leaves in B or B+1 beats.

The IPv4 checksum is a 16-bit ones'-complement sum over constant and
configured fields, computed combinationally from `tuser`. The sequence number
advances per packet and is cleared by `seq_clear`.

### AXI-stream to LBUS bridge (`axis_to_lbus`)

`axis_to_lbus` maps one 512-bit beat onto the four segments, reversing the
byte order within each segment. It sets `sop` on segment 0 of a packet's first
beat, and `eop`/`mty` on the segment holding the last byte. The MAC's
`tx_rdy` is the stream's `tready` directly.

## Receiver

### LBUS to AXI-stream bridge (`lbus_to_axis`)

`lbus_to_axis` is the mirror image of the transmit bridge. It turns `mty`
back into `tkeep`, and passes the MAC's error flag on as `tuser`. A frame must
start in segment 0, which is how the MAC delivers frames that start on a beat
boundary. This is asserted, not handled.

### Header analyzer (`header_analyzer`)

`header_analyzer` checks the first beat of each frame. It accepts the frame
only if all of these hold:

- the destination MAC and IP are this board's;
- EtherType is IPv4;
- IHL is 5;
- the protocol is UDP;
- the UDP length is plausible.

It drops everything else, including frames carrying the MAC error flag, and
counts them. It hands {LBUF#, sequence, payload length} to the resolver.

It then strips the 42-byte header by the reverse of the inserter's
realignment:

- it carries 22 bytes and takes 42 from each new beat;
- it adds a drain beat when the frame's last beat holds more than 42 bytes;
- it takes the payload length from the UDP header, so Ethernet minimum-size
  padding is discarded.

### Address resolution and ring buffers (`rx_phys_table`, `address_resolver`)

The host driver writes one entry per local buffer into `rx_phys_table`: the
physical address, the size and a valid bit.

For each header, `address_resolver` reads the entry and keeps a write pointer
per buffer, so that a buffer fills as a ring:

- a packet lands at base + pointer;
- the pointer then advances by the payload length rounded up to 64 bytes;
- if the packet would run past the end of the buffer, it goes to the start of
  the buffer instead. Packets are never split.

Rewriting a table entry resets that buffer's pointer.

Two cases make the resolver drop a packet and report an event instead:

- an invalid entry: event *unknown buffer* (code 2);
- a packet larger than its buffer: event *oversize* (code 3).

The output is a descriptor {address, length, sequence, drop}. The resolver
takes 2 clocks per header. A 64-entry descriptor FIFO sits between it and the
driver, so headers of short packets can be resolved while earlier payloads are
still being written.

The published design stores only the physical address per buffer. The size
field, the valid bit and the ring-buffer rule are this design's.

### Loss detection (`loss_detector`)

Every accepted sequence number sets its bit in a 1024-bit register, indexed
by sequence mod 1024. A packet is checked when the newest sequence number is
511 ahead of it: receiving packet 512 checks packet 1, as in the published
design.

- If the bit is clear, the packet is reported lost (event code 1).
- Either way the bit is cleared, so the slot is clean when the sequence
  number comes round again 1024 packets later.

The published design describes a shift register checked once per received
packet. With that rule, if packet N+511 is itself lost, packet N is never
checked. This implementation keeps a check pointer instead. The pointer
advances by one per clock while it is at least 511 behind the newest packet,
so after a gap the checks catch up and nothing is skipped. The addressable
bitmap holds the same information as the shift register without moving
1024 bits each clock.

### Payload buffer and mover (`data_mover`)

Payload beats wait in a 512-beat (32 KB) FIFO. The FIFO absorbs the
difference between the link, which cannot be stalled, and the PCIe side, which
can.

For each command from the driver, `data_mover` takes one packet's beats from
the FIFO:

- normally it writes them to the PCIe endpoint's write stream, at
  `address + 64*k` for beat k, with byte enables;
- if the command's drop flag is set, it discards them at one beat per clock.

### Driver state machine and events (`rx_driver`)

`rx_driver` runs a three-state machine:

- **IDLE:** take a descriptor;
- **CMD:** command the mover;
- **WAIT:** wait for the mover's `done`.

It counts written and dropped packets.

The driver also merges the events into a 16-entry FIFO that the host reads:

- losses come from the loss detector;
- unknown-buffer and oversize events come from the resolver.

If both sources fire in the same clock, the resolver's event waits one clock
in a holding register. `irq` is high while the FIFO is not empty. Events
arriving when the FIFO is full are counted in `evt_overflow`, not stored.

## Wrappers

- `rdma_frontend` is the transmit side: table, DMA, header inserter and
  bridge.
- `rdma_backend` is the receive side. It adds the descriptor FIFO and a sticky
  `rx_overflow` flag, set if a beat arrives while the payload FIFO is full.
- `rdma_system_top` puts both halves on one clock. Its ports are the transmit
  LBUS, the receive LBUS, the DDR4 read port, the PCIe write stream and the
  event port. In a real system the two halves are on separate FPGAs, and the
  parts between them are vendor IP: the 100G MACs, the network, the AXI
  interconnect, the DDR4 and the PCIe endpoint.

## Timing and throughput

| path | rate | latency |
|------|------|---------|
| tx_dma to header_insert | one beat per clock once data returns | the DDR4 latency |
| header_insert | one beat per clock, plus at most one drain beat per packet | 1 clock |
| axis_to_lbus, lbus_to_axis | one beat per clock | 1 clock each |
| header_analyzer | one beat per clock, plus at most one drain beat | 1-2 clocks |
| address_resolver | one header per 2 clocks | 2 clocks |
| rx_driver + data_mover | one beat per clock while writing, plus about 3 clocks per packet | - |

The system testbench measures one beat per clock through the transmitter for
large packets, and the same on the receiver's write stream.

For short frames (64-byte payloads), the per-packet overhead of the driver
exceeds the frame time, so the payload FIFO fills. At full line rate, a long
run of minimum-size frames will eventually overflow it. LBUS has no
back-pressure, so this is visible only as `rx_overflow`. Packets of 1 KB and
more, where the published link measurements show stable throughput, are not
affected.

## Departures and limits

- The DMA, the buffer tables' extra fields, the ring-buffer write pointer,
  the event codes, the FIFOs and all state machines are this design's. The
  published text gives their function, not their insides.
- The published figure of the iCRC stream shows a 32-bit `tkeep`, while its
  text gives 64-byte beats. The text is followed: `tkeep` is 64 bits.
- No RoCE v2 path (InfiniBand header, iCRC) is built. It was only a baseline
  for comparison.
- The transmitter does not pad frames shorter than the 60-byte Ethernet
  minimum (payloads under 18 bytes). The MAC is expected to pad.
- A receive frame must start in LBUS segment 0.
- The MAC's error flag makes the analyzer drop and count the frame; nothing
  else is done with it.
- The 16-bit sequence number wraps after 65 536 packets. Loss detection works
  across the wrap.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`, which prints
`TB_RESULT checks=N failures=M`. `tb/tb_util_pkg.sv` holds the reference
frame builder: header fields and checksum computed independently of the RTL.

Two behavioural models stand in for the outside world:

- `axi_rd_mem_model` is a DDR4 with a fixed byte pattern;
- `pcie_wr_mem_model` is host memory with optional random stalls.

With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps --top-module tb_rdma_system_top \
    -y rtl -y tb +libext+.sv rtl/rdma_pkg.sv tb/tb_util_pkg.sv tb/tb_rdma_system_top.sv -o sim
./obj_dir/sim
```

`tb_rdma_system_top` runs the whole chain at the default parameters in five
phases:

1. 598-byte packets;
2. one frame size from each point of the 241 B to 48 241 B bandwidth sweep;
3. a 64 KB image cut into 4 KB packets written twice into a 64 KB ring, with
   back-pressure on both sides;
4. 560 short packets, one of which the link model deletes;
5. an unknown buffer and a foreign IP.

It checks every byte that lands in host memory against a reference
ring-buffer model, checks the exact list of events, and fails if any
mechanism never occurred. The mechanisms are:

- a multi-packet transfer;
- a drain beat;
- transmit stall;
- host stall;
- ring wrap;
- header drop;
- unknown buffer;
- packet loss.
