# ExaNet network IP: APErouter, APElink and Target Controller in SystemVerilog

A network for a many-node, low-power computer that is built from FPGA boards
linked by direct serial cables. There is no central switch. Every node has a
small router with an address (x, y, z) in a 3-D lattice. Packets hop from
neighbour to neighbour in dimension order until they reach their destination.

Two ideas keep the hardware small. First, links do not retransmit. The
receiver can always accept what arrives, because the sender spends *credits*
for space in the receiver's buffers. If a bit flips in transit, the fault is
detected, corrected where that is cheap, and counted, but nothing is resent.
Second, the router forwards by *virtual cut-through*. A packet starts moving
as soon as its route is known and the next buffer has room for all of it, so
a packet never blocks a link half-way.

This RTL is one node's network IP: the router (**APErouter**), one link
controller per cable (**APElink TCL**, the Transmission Control Logic) and
a register block (**Target Controller**), plus a small built-in bandwidth
self-test. The transceivers that drive the
cables (Xilinx Aurora 64B/66B at 10 Gb/s) and the host processor are outside
the IP. Their signals are plain ports.

```
            host (intra-tile ports, 128 bit)        AXI4-Lite (32 bit)
                 |  TX        ^  RX                        |
        +--------v------------+----------------------------v-------+
        |  APErouter  2 intra-tile + 2 inter-tile ports   Target   |
        |  switch ports / gates / routers / arbiters /    Controller|
        |  crossbar                                                 |
        +-------|---------------------|-----------------------------+
                | port X+             | port Y+     (128 bit)
          +-----v-----+         +-----v-----+
          | APElink   |         | APElink   |
          | TCL  0    |         | TCL  1    |
          +-----|-----+         +-----|-----+
                | 64-bit streams to a transceiver per link
```

Everything runs in one 156.25 MHz clock domain: 128-bit words inside the
router and 64-bit words on the links.

## The EXApacket

Everything the network moves is an EXApacket: a 128-bit header, 0 to 4096
bytes of payload in 128-bit words, and a 128-bit footer. The types are in
`rtl/exanet_pkg.sv` (`hdr_t`, `ftr_t`).

| word | bits | field |
|---|---|---|
| header | 127:112 | EDAC: header protection code |
| header | 111:104 | reserved |
| header | 103:64 | destination virtual address |
| header | 63:62 | reserved |
| header | 61:48 | payload size in bytes |
| header | 47:43 | packet type |
| header | 42:21 | destination coordinates |
| header | 20:5 | protection domain |
| header | 4:0 | virtual channel |
| footer | 127:96 | CRC-32 of the payload |
| footer | 95:40 | user data |
| footer | 39:36 | valid flags |
| footer | 35:14 | source coordinates |
| footer | 13:0 | channel ID |

The published drawing gives the order of these fields and some bit positions
(63, 47, 39, 31, 0). The other boundaries were read off its grid, so treat
them as this design's choice. The 22-bit coordinate field is split here as
`{reserved 8, intra-tile port 2, z 4, y 4, x 4}`. That allows 16 nodes per
dimension; widen `COORD_W` in the package for more.

Payload words per packet = ceil(size / 16). The largest packet is 256 payload
words plus header and footer.

## APErouter

`rtl/aperouter.sv` instantiates the pieces below for `N_INTRA = 2` intra-tile
ports (host side) and `N_INTER = 2` inter-tile ports (links X+ and Y+).

### Switch ports and buffering

Each port direction is a `switch_port`. It holds two first-word-fall-through
FIFOs (`sync_fifo`). One is for headers and footers, 128 x 128 bit. The other
is for payload: 4096 x 128 bit (64 KB) on intra-tile ports and 1024 x 128 bit
(16 KB) on inter-tile ports. Splitting headers from payload lets a gate read
the header and decide the route without touching the payload.

On the receive side of an inter-tile port there is one `switch_port` per
virtual channel (VC0, VC1). A packet that waits on one channel therefore
cannot block the other, which is what keeps a ring or torus free of deadlock.

### Switch gates

A `switch_gate` sits on every input: two intra-tile TX ports plus two links x
two VCs, six in all. It waits for a header, sends it to its own `dor_router`,
and asks the arbiter for the chosen output. Once granted, it moves header,
payload and footer, one word per clock, and then releases the output.

Each gate has its own router, so several packets can be routed at once. When
a packet leaves on a link, the gate writes the VC it picked into the header's
VC field. The next router then files the packet into the right receive
channel.

### Dimension-order routing (`dor_router`)

The router compares the destination with its own coordinates, one dimension
at a time. A 6-bit *order* register gives that sequence: three 2-bit
dimension codes, first at the top, with reset value Z, then Y, then X. A
dimension is skipped when any of these hold:

- the *dim_en* register disables it;
- no link serves it;
- its lattice size is 1 or less.

The first dimension that still differs picks the link.

- Link k serves dimension k in the + direction only. A node behind the
  current one in that dimension is reached by going round the ring.
- The VC is 1 if the destination coordinate is greater than the current one,
  else 0. Because of that rule, a packet moves from VC1 to VC0 when it
  crosses the ring's wrap-around. That is the usual dateline scheme.

If every dimension matches, the packet is local. It goes to the intra-tile
port named in bits 13:12 of the destination field.

### Arbiters and virtual cut-through

There is one `port_arbiter` per output. An input counts as a request only if
the output FIFOs can hold the **whole** packet:

- at least 2 free header/footer entries;
- at least ceil(size/16) free payload entries.

So once a grant is given, the packet never stalls midway, and two packets
never interleave on one output. The arbiter keeps its grant until the gate
reports the footer.

The policy is set at run time:

- **Round robin:** the search starts just after the last winner.
- **Fixed priority:** the search starts at the input named in a
  configuration register.

### Crossbar

`crossbar` is a plain multiplexer, one per output, steered by the arbiter's
grant. There is no pipeline stage. A word crosses the switch in the same clock
it leaves the input FIFO, and enters the output FIFO on the next edge.

## APElink TCL

One `apelink_tcl` per cable joins an `apelink_tx` and an `apelink_rx`. Both
ends of a cable run the same logic. Each receiver hands the credits it gets
to the transmitter next to it.

### Link framing

A 128-bit word goes out as two 64-bit link words, low half first. A packet
with n payload words costs 6 + 2n link cycles:

| cycle | word |
|---|---|
| 1 | MAGIC |
| 2 | START |
| 3, 4 | header |
| 5 … 4+2n | payload |
| 5+2n, 6+2n | footer |

The receiver needs MAGIC followed by START before it accepts a header. This
resynchronises it after any framing error, at a cost of two cycles per
packet.

A 4096-byte packet takes 518 cycles, 98.8 % of the link's 1250 MB/s peak. A
16-byte packet takes 8 cycles, 25 %.

### Credits and TRED

The transmitter tracks free space in each receive FIFO at the far end: per
VC, header/footer and payload separately.

- It starts from the far FIFO depths (`REMOTE_HF_DEPTH`, `REMOTE_DATA_DEPTH`).
- Every word it sends uses one credit.
- Every credit word from the far end returns the space freed there.

The transmitter holds a word while its pool has credit ≤ TRED. TRED is a
threshold set through the Target Controller; 0 means "send until the far FIFO
is full". A larger TRED leaves headroom. For example, it can keep transceiver
latency in flight without ever overrunning. While a word is held, the
`suspended` status flag is set.

Only the payload pool uses TRED as given. The 128-entry header/footer pool
clamps it to `REMOTE_HF_DEPTH - 2`. Otherwise a TRED near the payload depth
would stop every header for good.

A credit word is a 64-bit link word flagged by the stream's `tctrl` side
signal. It is sent between packets or in place of a data word:

```
[63:48] 16'hC7ED tag   [47:40] health
[39:28] VC1 payload    [27:20] VC1 header/footer
[19:8]  VC0 payload    [7:0]   VC0 header/footer
```

Counts are running totals of entries freed, modulo the field width. The
sender takes differences, so a lost or repeated credit word does no lasting
harm.

A credit word goes out when the counts or the local health byte have changed,
and either `CREDIT_GAP` (16) link words have passed since the last one or the
data stream is idle. Credits may interrupt a packet. The receiver recognises
them by the flag and removes them from the data.

The health byte is a free-form status value that the host writes in the
Target Controller. It shows up in the neighbour's status registers.

### Error protection

- **Header: SECDED.** `header_ecc_enc` computes an extended Hamming
  (120,112) code over the 112 non-EDAC header bits into EDAC[7:0]. EDAC[15:8]
  is 0. `header_ecc_dec` in the receiver corrects any one flipped bit and
  detects any two. A wrong header would send a packet to the wrong node, so
  the header gets the stronger code.
- **Payload: CRC-32.** `crc32_64` is the reflected Ethernet CRC-32 (0xEDB88320),
  fed 64 bits per clock, least significant byte first. The transmitter writes
  it into footer bits 127:96 as the payload goes out. The receiver recomputes
  it and compares.
- **Framing.** A word out of order, such as a header without MAGIC/START, is
  counted and skipped.

These events are counted in 16-bit status counters, and the packet is still
delivered:

- corrected headers;
- uncorrectable headers;
- CRC mismatches;
- framing errors.

Recovery is left to software. The receive stream has no ready signal, because
credits guarantee that there is room.

## Target Controller

`target_controller` is an AXI4-Lite slave with 32-bit data and 8-bit
addresses. It answers OKAY to everything. Unmapped reads return 0.

| addr | register | reset |
|---|---|---|
| 0x00 | own coordinates (22 bits) | 0 |
| 0x04 | lattice size, same layout | x=2, y=2, z=1 |
| 0x08 | dimension order (6 bits) | Z, Y, X |
| 0x0C | dimension enable (3 bits) | all on |
| 0x10 | bit 0 fixed-priority mode, bits 11:8 first input | round robin |
| 0x14 | TRED (12 bits) | 0 |
| 0x18 | health byte sent to neighbours | 0 |
| 0x1C | self-test: bit 0 start (pulse), bit 1 consumer enable, bits 31:16 packet count | 0 |
| 0x20 | self-test packet: bits 13:0 size in bytes, bits 20:16 type | 0 |
| 0x24 | self-test destination coordinates and port | 0 |
| 0x40 + 4n | read-only status words, see below | |

The status words in `exanet_ip`:

| n | contents |
|---|---|
| 0 | FIFO empty flags |
| 1 + 3k | link k: packets sent and received |
| 2 + 3k | link k: ECC corrected and uncorrectable |
| 3 + 3k | link k: CRC and framing errors |
| 7 | neighbour health bytes (bits 15:0); link suspension flags (bits 17:16) |
| 8 | self-test cycle count |
| 9 | self-test packets consumed (31:16) and generated (15:0) |
| 10 | self-test payload words consumed |
| 11 | bit 0: self-test timer still running |

## Built-in bandwidth self-test

Three small blocks let the IP measure its own throughput without the host
in the data path:

- `traffic_generator` writes a burst of packets into intra-tile TX port 0.
  The Target Controller sets the packet count, size, type and destination.
  Packet p carries p in its header address field. Payload word w of packet p
  is `{4{p[15:0], w[15:0]}}`.
- `consumer` pops intra-tile RX port 0 as fast as words arrive, one word
  per FIFO per clock. It counts packets and payload words.
- `perf_counter` starts with the burst and stops on the first clock at
  which the consumer has the expected number of packets.

Bandwidth = bytes / (cycles / 156.25 MHz).

The generator's writes and the consumer's pops are OR-ed with the host's on
port 0. Leave that port alone while a test runs.

Consider a loop through the router, from port 0 back to port 0 of the same
node. In simulation, 8 packets of 4096 bytes take 2082 cycles; one word per
clock would be 2064. That is 99 % of the 2.5 GB/s the 128-bit datapath
can carry.

The counter stops only on its own node's consumer. To time a transfer to a
neighbour, read the neighbour's consumer count.

## Where this RTL departs from the published design

- **Router size.** The prototype's router is called "3x2" without saying what
  the numbers count. The block diagram shows two host ports and two links
  (X+, Y+), and that is what is built. `N_INTRA`/`N_INTER` are parameters of
  `aperouter`, but the top fixes them at 2.
- **Maximum payload.** The text gives the maximum packet as 256 or 512 bytes
  in places. The packet format and all bandwidth curves go to 4096 bytes. This
  design follows 4096 (`MAX_PAYLOAD_BYTES`), and the FIFOs at their published
  sizes hold such a packet.
- **One clock.** The prototype's AXI side runs at 100 MHz, with a clock
  crossing to the 156.25 MHz network. Here everything is on one clock.
- **Host side.** The AXI-to-FIFO adapter between the processor's bus and the
  intra-tile ports is not included. The intra-tile FIFO ports are top-level
  ports instead.
- **Throughput and hop time.** The prototype's router reaches 76 % of its
  2.5 GB/s peak with 512-byte packets. That loss came from its unoptimised
  pipeline. This RTL has no such loss: with no stalls, a 512-byte packet
  costs 34 clocks for 32 payload words, which is 94 %. The prototype's
  measured 0.46 µs per hop (about 72 clocks) is likewise not a target here.
  In this design a hop costs:
  - the whole-packet space check;
  - the 6 + 2n link cycles;
  - the transceiver's latency.
- **Own choices where nothing is published:**
  - the ECC code and the CRC variant;
  - the MAGIC/START values and the credit word layout;
  - the `tctrl` credit flag;
  - wrap-around-only routing with + links;
  - the register map;
  - the coordinate sub-fields;
  - error counting without dropping packets.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and stops, and a watchdog ends it if it hangs.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl +libext+.sv rtl/exanet_pkg.sv tb/tb_aperouter.sv --top tb_aperouter
./obj_dir/Vtb_aperouter
```

| testbench | what it checks |
|---|---|
| tb_header_ecc | all single and double bit flips against the encoder/decoder pair |
| tb_crc32_64 | against a bitwise reference and the standard check value |
| tb_sync_fifo, tb_switch_port | random push/pop against a queue model, full/empty/free counts |
| tb_dor_router | every source/destination pair in small lattices against a reference, all orders and enables |
| tb_port_arbiter | round-robin fairness, fixed priority from every start |
| tb_crossbar, tb_switch_gate | word order, VC rewrite, request length |
| tb_aperouter | random packets from all inputs, delivery and contents; contention and whole-packet waits counted |
| tb_apelink_tx / _rx / _tcl | framing, CRC, credits, TRED suspension, injected bit errors |
| tb_target_controller | register writes and reads through AXI4-Lite, self-test start pulse |
| tb_traffic_generator | packet stream word by word; exact burst time n x (2 + ceil(size/16)) clocks |
| tb_consumer, tb_perf_counter | FIFO flushing and counts; cycle count against the clocks counted by the test |
| tb_exanet_ip | end to end, at full published sizes (see below) |

`tb_exanet_ip` builds four nodes at the default parameters as a 2x2 lattice.
Their links are joined by a cable model inside the testbench, with latency 4,
random back-pressure and optional bit flips. Every node sends packets of
random size to every node, including itself. The test checks that each
packet arrives whole and in order, at the right host port.

It also counts each mechanism and fails if one never occurs:

- local, one-hop and two-hop routes;
- traffic on both VCs;
- output contention;
- fixed-priority arbitration;
- waits for whole-packet space;
- TRED suspension.

It then runs the self-test: 8 x 4096 B through the router, which must finish
within 40 clocks of one word per clock, and 4 packets over a link.

It also flips one header bit and one payload bit on a cable. It then checks
that the ECC-corrected and CRC-error counters in the status registers went up.

The FIFO depths are large, so a testbench that wants to reach full FIFOs
quickly overrides `HF_DEPTH`, `INTRA_DEPTH` and `INTER_DEPTH`. All the logic
is the same at any depth.
