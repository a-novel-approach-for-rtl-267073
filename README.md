# DROP over UDP: sending detector data from an FPGA straight to a server

Particle-physics readout systems traditionally move data from their FPGAs to
servers with a reliable protocol (TCP, or RDMA through a PCIe card). A
reliable protocol makes the sender keep every packet until the receiver
acknowledges it, which means large memories next to the FPGA. This design
does without that. The FPGA sends plain UDP packets over an Ethernet switch
to a commodity server, keeps nothing for retransmission, and adds one small
header to every packet: a **packet identifier** that counts up by one for
each packet of a data stream. That header is the Data ReadOut Protocol
(DROP). Using this identifier, the receiving software can prove that a
stream arrived complete and in order. It can also count exactly how many
packets were lost, repeated or reordered. On the server, the Linux XDP
mechanism hands the packets to the receiving program without passing them
through the kernel network stack. That part is software and is not in this
RTL.

This RTL is the FPGA side, for a 100 Gbit/s Ethernet link. It contains:
- data generators that stand in for detector data;
- DROP stream formation;
- the transmit half of a UDP/IP stack;
- the multiplexer that puts all streams on one link.

Its default size is the configuration used for the long-duration
measurement this design is built around: 8 generators of 10.24 Gbit/s each,
8 DROP streams and 2000 byte payloads, giving about 80 Gbit/s of payload on
one 100G link.

## Data flow

```
 data_generator[g] --64b--> beat_upsizer[g] --512b--+   (routed by gen_cfg[g].stream_sel)
                                                    v
 drop_stream[s]  packs its generators' packets, stamps the identifier
      |
 udp_ip_tx[s]    Ethernet + IPv4 + UDP + DROP header, UDP port = base + s
      |
 frame_fifo[s]   store and forward: offers only complete frames
      |
 pkt_arbiter     whole frames of all streams, round robin  --> tx_* (to 100G MAC)
```

Everything runs on one clock. At 160 MHz a 64 bit generator beat per clock
gives 10.24 Gbit/s, and the 512 bit link side gives 81.92 Gbit/s. All
interfaces follow the AXI4-Stream handshake: a beat moves when `valid` and
`ready` are both high. Byte 0 of a beat is in `data[7:0]` and is the first
byte on the wire. `keep[i]` marks byte *i* as valid. Only the last beat of a
packet can be partial. The shared types are in `rtl/drop_pkg.sv`.

## The packet identifier and what a receiver does with it

Each DROP stream has its own identifier, 48 bits wide and starting at 0. It
is stamped on every packet and incremented once the packet's last beat has
left `drop_stream`. It is not the IPv4 identification field, which would
count all packets of an interface. Because the identifier belongs to the
stream, the receiver only has to look at the difference *d* between the
identifiers of two consecutive packets of a stream:

- *d* = 1: normal.
- *d* > 1: *d*−1 packets are missing.
- *d* ≤ 0: packets were seen again.

Reordering shows up as a combination of these. One packet delivered late
produces three reports: a gap, then a negative step, then a gap. A run
without a single report is a lossless, in-order run. `id_load` sets the
identifier of the next packet. This reproduces a test in which a stream is
restarted with a different identifier, and the receiver must report exactly
one jump. The end-to-end testbench does that.

48 bits is generous. A week at 10 Gbit/s with 2000 byte packets is about
3.7·10¹¹ packets per stream, which needs 39 bits.

## Data generator

A generator is started with a configuration (`gen_cfg_t`) holding these
fields:

- `block_size`: the bytes per block.
- `packet_size`: the largest payload per packet. The last packet of a block
  carries what is left and may be shorter.
- `pattern`: the data pattern.
- `word_pause`: idle clocks after every beat except the last of a packet.
- `packet_pause`: idle clocks after the last beat of a packet.
- `repeat_blocks`: restart automatically at the end of each block, until
  `stop` is raised.
- `stream_sel`: the stream the generator feeds. A value of `NUM_STREAMS` or
  more parks the generator.

The pattern is computed from the byte offset *k* within the block, so packet
boundaries can fall on any byte:

- `PAT_COUNT16`: the 16 bit word ⌊k/2⌋ mod 2¹⁶, low byte first. The server
  histograms these words. A lossless run gives a histogram whose counts
  differ by at most one.
- `PAT_COUNT32`: the 32 bit word ⌊k/4⌋, low byte first.

The generator's rate is 8 bytes per clock, reduced by the pauses. For
example, 2000 byte packets with `packet_pause` = 91 take 341 clocks each,
which is 7.5 Gbit/s at 160 MHz.

## Getting 8 streams onto one link: width, headers and buffering

This is the least obvious part of the design.

**Width.** One generator fills a 64 bit bus, but 8 of them need more than
80 Gbit/s. `beat_upsizer` therefore packs 8 generator beats into one 512 bit
beat. It flushes early at the end of a packet, so no wide beat holds two
packets. From there on, a stream can carry up to 81.92 Gbit/s. This is also
what lets several generators share one stream.

**Headers.** `udp_ip_tx` builds a 48 byte header:

| bytes | field |
|---|---|
| 0–13 | Ethernet: destination MAC, source MAC, type 0x0800 |
| 14–33 | IPv4: no options, DF set, identification 0, TTL 64, protocol 17, header checksum |
| 34–41 | UDP: source port, destination port = `dst_port_base` + stream, length, checksum 0 |
| 42–47 | DROP: packet identifier, most significant byte first |
| 48– | payload |

The receiving NIC sorts streams into receive queues by UDP destination port,
which is why each stream has its own port. The header length is fixed, so
the payload always moves by exactly 48 bytes within the 64 byte beat:

- The first output beat holds the header and payload bytes 0–15.
- Each later output beat holds the 48 bytes left over from the previous
  input beat, followed by the first 16 bytes of the current one.
- If the last input beat has more than 16 bytes, one extra tail beat
  follows.

The IPv4 checksum is computed combinationally from the packet length, which
every beat carries (`len`). The header therefore leaves in the same clock as
the first payload beat, with no added latency. The frame check sequence,
preamble and padding of short frames are left to the Ethernet MAC.

**Buffering.** The link multiplexer grants whole frames so that frames
never mix. Without a buffer it would sit on one stream whose frame arrives
at generator speed, one wide beat every 8 clocks. A simulation of that
arrangement needed 7785 clocks for 1024 beats: the streams effectively took
turns. `frame_fifo` therefore collects each frame completely and then
offers it at one beat per clock. It uses 64 beats of 577 bits per stream,
36.9 kbit, which is two maximum-size frames.

**Multiplexer.** The `pkt_arbiter` decides the grant combinationally and
rotates it round robin at packet boundaries. Back-to-back frames from
different streams therefore follow each other without an idle clock. The
same module packs several generators into one DROP stream.

**Result.** With 8 generators at full rate and 2000 byte payloads, the link
is busy in every clock. The testbench measured 5120 beats in 5120 clocks.
Each frame is 2048 bytes, or 32 beats, and 8 generators produce 256 beats of
frames every 250 clocks. The link is therefore 2.4% short, and it holds the
generators back to 10.0 Gbit/s each: 80.0 Gbit/s of payload. A MAC clocked
faster than the generators would remove that limit. A typical 100G MAC runs
its 512 bit interface at about 322 MHz, but clock-domain crossing is not
part of this RTL.

## Top-level interface (`drop_tx_top`)

| port | meaning |
|---|---|
| `gen_cfg[NUM_GEN]`, `gen_start`, `gen_stop` | generator settings and control |
| `gen_busy`, `gen_block_done` | generator status |
| `net_cfg` | MAC/IP addresses, source port, destination port base |
| `id_load`, `id_value[NUM_STREAMS]` | set the next identifier of a stream |
| `packets_sent[NUM_STREAMS]` | packets sent per stream |
| `tx_data` (`frame_beat_t`), `tx_valid`, `tx_ready` | frames without FCS to a 512 bit 100G MAC transmit port |

Parameters: `NUM_GEN` = 8, `NUM_STREAMS` = 8, `FIFO_DEPTH` = 64 (beats per
stream). A frame must fit in the FIFO. The largest XDP-compatible payload,
2048 bytes plus one, gives 33 beats.

## What this RTL leaves out or decides for itself

Left out:

- The 100G Ethernet MAC, PCS and transceivers. The top ends at the MAC's
  transmit stream.
- The switch, the NIC and all server software (XDP, BPF, receiving and
  histogramming threads). The end-to-end testbench does the receiver's
  checks itself.
- A 40GbE version of the stack.
- A register interface for the configuration, which comes in on ports.
- The receive half of a UDP/IP stack (ARP and so on).
- A pseudo-random identifier sequence instead of a counter.

This design's own choices:

- The DROP field layout (only the identifier).
- All widths and the clock.
- The generator's byte order and its restart of the pattern at each block.
- The extra 32 bit pattern.
- `repeat_blocks`/`stop` and `id_load`.
- The round-robin arbitration.
- The frame FIFO.
- The UDP checksum set to 0 (the MAC's FCS still protects the frame).

One detail differs from the numbers this design was compared with. The
original generators reach about 16 Mpackets/s with 64 byte payloads, which
suggests about two idle clocks per packet. These generators have no gap, so
they reach 20 Mpackets/s at 160 MHz. Use `packet_pause` = 2 to match.

The counting pattern is said to repeat on a "128 kbit" block. A 16 bit
counter actually repeats every 65536 words, which is 128 KiB. The RTL uses
the 16 bit counter.

## Simulation

Each testbench in `tb/` checks itself and prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/drop_pkg.sv tb/tb_drop_tx_top.sv --top-module tb_drop_tx_top
./obj_dir/Vtb_drop_tx_top
```

| testbench | what it shows |
|---|---|
| `tb_data_generator` | pattern bytes, keep/last/len, exact cycle counts with and without pauses, back-pressure, 32 bit pattern, repeat and stop |
| `tb_beat_upsizer` | random packets through the packer under back-pressure; a 2000 byte packet at full rate without stalling |
| `tb_drop_stream` | identifier +1 per packet and constant within it, whole packets from three sources, `id_load` jump |
| `tb_udp_ip_tx` | byte-exact frames built independently for lengths around the 16/48 byte boundaries; checksum; beat counts |
| `tb_frame_fifo` | data integrity, no frame offered before it is complete, no gap inside a frame |
| `tb_pkt_arbiter` | no interleaving, per-source order, strict round robin, one beat per clock across packet boundaries |
| `tb_drop_tx_top` | default size, end to end, as the receiver would check it. First, 8 × 20 packets of 2000 bytes at full link rate, with histograms and patterns checked. Then stream packing, odd packet sizes, pauses, stop, identifier jump and MAC back-pressure, each counted |
| `tb_workloads` | packet rates of the measured traffic patterns: 64 byte packets on 1, 4 and 8 streams; 5 streams of 350 bytes at 3.4 Mp/s; 8 streams of 2048 bytes; 2 streams at 7.5 and 8.0 Gbit/s |

All testbenches run at the default parameters, except that the block-level
ones pick their own input counts. Each finishes in well under a second.
