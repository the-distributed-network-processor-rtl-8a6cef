# Distributed Network Processor (DNP) — SystemVerilog RTL

The DNP is a network interface and router in one block. It sits inside each
processing tile of a multi-tile chip. It moves data between tiles with RDMA
(remote direct memory access) commands. Software writes a short command, and the
DNP reads the data from tile memory, cuts it into packets and routes them. At the
far end a DNP writes the data into a buffer that software registered there, then
reports completion in a ring in memory. No processor is involved along the way.

The same RDMA model is used for a tile on the same chip (over the on-chip network)
and for a tile on another chip (over serial links of a 3D torus). This RTL builds
the DNP of the SHAPES tile, which has three kinds of ports:

| kind | count | what it connects |
|---|---|---|
| intra-tile master ports | L = 2 | tile memory, through AHB-Lite masters |
| off-chip ports | M = 6 | torus neighbours X+ X- Y+ Y- Z+ Z-, 4 bits per clock each way |
| on-chip ports | N = 1 | the chip's NoC (network-on-chip), through a request/grant interface (the DNI) |
| slave port | 1 | software access to registers, the buffer table and the command queue (AHB-Lite) |

L, M and N are parameters of `dnp_top`. All the internals scale with them.

## Block structure

```
              AHB slave ──► dnp_ahb_slave ──► dnp_regs ──────────── cfg (to every block)
                                  │  └────► dnp_cmd_fifo ──► dnp_engine ─┐ packet jobs
                                  └───────► dnp_rdma_ctrl (dnp_lut, CQ writer)
                                                   ▲ lookups / events    │
 AHB master[i] ◄─► dnp_ahb_master ◄─► dnp_intra_mst[i] ◄─────────────────┘
                                          ▲  ▼
                                      dnp_switch  (dnp_router + dnp_arbiter per output)
                                        ▲  ▼                 ▲  ▼
                        dnp_offchip_if[j] (x6)          dnp_dni[k] (x1)
                          tx/rx lanes                    NoC req/gnt
```

* **Engine** (`dnp_engine`). It takes one command at a time from the command
  FIFO and issues one packet at a time to the master port that the command names.
  Commands longer than 256 words are split into packets of 256 words. This is the
  fragmenter. GET requests that arrived from the network ("GET-serve") are taken
  before new commands.
* **Intra-tile master port** (`dnp_intra_mst`). Its transmit side reads the
  payload from memory, with up to four reads outstanding, and streams header,
  payload and footer into the switch. Its receive side takes packets addressed to
  this DNP and asks the buffer table where the payload goes. It then writes the
  payload, or drops it if no buffer matches. Finally it posts a completion event.
* **RDMA controller** (`dnp_rdma_ctrl`). It holds the buffer table (`dnp_lut`)
  and takes lookups from the master ports in turn. It also writes the 4-word
  completion events into the completion queue (CQ), a ring in tile memory.
* **Switch** (`dnp_switch`). A crossbar with an input buffer per virtual input and
  wormhole switching. An output is held by one packet from header to footer. Each
  off-chip input has two virtual channels (VCs) with their own buffers. The other
  inputs have one.
* **Interfaces.** `dnp_offchip_if` is the serial torus link. `dnp_dni` is the NoC
  port. `dnp_ahb_slave` and `dnp_ahb_master` adapt to AHB-Lite.

## Packets

All words are 32 bits. A packet has a 5-word header, 0 to 256 payload words and
a 1-word footer.

| word | contents |
|---|---|
| NET HDR 0 | `[31:14]` destination DNP, `[13]` VC, `[12:11]` destination master port, `[8:0]` payload length |
| NET HDR 1 | `[31:14]` source DNP |
| RDMA HDR 0 | `[31:30]` opcode, `[29]` GET-response flag, `[28]` post-event flag, `[23:0]` command length |
| RDMA HDR 1 | source memory address (word address) |
| RDMA HDR 2 | destination memory address (0 for SEND) |
| payload | 0 to 256 words |
| FOOTER | `[31:16]` CRC-16, `[15:8]` hop count, `[0]` error flag |

A DNP address is 18 bits: x = `[17:12]`, y = `[11:6]`, z = `[5:0]`. The packet
sections, the field names and the 256-word limit follow the original design. The
bit positions are this implementation's own.

## Commands and the RDMA operations

Software pushes 7 words per command into the command FIFO (AHB region 2):

| word | contents |
|---|---|
| 0 | `[1:0]` opcode (0 LOOPBACK, 1 PUT, 2 SEND, 3 GET), `[2]` post a completion event, `[5:4]` master port that reads, `[7:6]` master port that writes at the destination |
| 1 | destination DNP |
| 2 | source DNP (GET) |
| 3 | source address |
| 4 | destination address |
| 5 | length in words (24 bits) |
| 6 | tag, returned in the completion event |

* **LOOPBACK**: a memory-to-memory copy inside the tile. The packets are addressed
  to the DNP itself and go from one master port to the other.
* **PUT**: writes to a buffer at a given address on the destination DNP.
* **SEND**: like PUT, but with no destination address. The receiver uses the first
  registered SEND buffer that is large enough, then retires that buffer.
* **GET**: three DNPs take part: the initiator, the source and the destination. The
  initiator sends a one-word request packet to the source DNP. The payload of the
  request is the destination DNP. The source's receive side turns the request into
  a GET-serve command. The source engine then runs it like a PUT towards the
  destination, flagged as a GET response.

**Buffer table (LUT).** Received data is written only into buffers that software
registered. A record is {start address, length, flags}. Flag bit 0 means valid.
Flag bit 1 means SEND buffer. A PUT matches a valid record that holds the whole
address range of the packet. The table is scanned one record per clock.

A packet that matches nothing is read out of the switch and dropped, so it never
blocks the network. Its loss is reported as a `NO_BUFFER` event.

**Completion events.** An event is 4 words long:

| word | contents |
|---|---|
| 0 | `[31:28]` type, `[27]` error, `[17:0]` peer DNP |
| 1 | address |
| 2 | length |
| 3 | tag or footer |

The event types are:

| value | event |
|---|---|
| 1 | CMD_DONE |
| 2 | PUT_RX |
| 3 | SEND_RX |
| 4 | GET_DONE |
| 5 | LOOP_RX |
| 6 | NO_BUFFER |

The DNP publishes its CQ write pointer in `CQ_WP`, and software writes its read
pointer to `CQ_RP`. A new event starts only while the ring has room for two
events, so unread events are never overwritten. A received packet produces one
event, and so does each command that asks for one.

## Routing and deadlock avoidance

`dnp_router` is combinational and applies the following rules in order:

1. **Own address.** The packet goes to the master port named in NET HDR 0.
2. **Same chip.** If the destination agrees with this DNP on every address bit
   that `CHIPMASK` selects, the packet goes to the on-chip port.
3. **Otherwise, dimension-order routing.** The dimensions are handled in the
   order held by the `ORDER` register (Z, then Y, then X after reset). The first
   dimension in which the addresses differ decides the port. The packet takes the
   shorter way round that ring, and a tie goes the + way.

**VC choice (dateline).** On a torus ring, plain dimension-order routing can
deadlock. The cause is the cycle of buffers around the wrap-around link. A packet
therefore travels on VC1 for as long as its remaining path in the current
dimension still has to cross the wrap-around link. It drops to VC0 after crossing
it. Because the choice depends only on the current and destination coordinates,
every hop can recompute it without state. The switch writes the chosen VC into the
header.

**Arbitration.** Each output has an arbiter over all virtual inputs. It is round
robin by default. Fixed priority is available, with the highest-priority input
set in `CTRL[7:4]`.

## The off-chip link

This is the most involved block. The link has two DDR data lines per direction,
which gives 4 bits per clock (a serialization factor of 16 for a 32-bit word). The
lines can carry bit errors. The packet envelope (header and footer) must never
arrive corrupted, because a corrupted header would misroute a packet. A payload
error, in contrast, only has to be detected and flagged. The link carries 36-bit
symbols, most significant nibble first, 9 clocks per symbol:

```
 [35:34] type   01 DATA   10 CHECK   11 CTRL
 [33]    inverted (DATA)         [32] VC
 [31:0]  DATA: the word (inverted when [33]=1)
         CHECK: {~crc16, crc16}
         CTRL:  {~x, x}, x = {ack, nack, stop_vc1, stop_vc0}
```

An all-zero nibble is idle. Every symbol starts with a non-zero nibble, so the
receiver finds symbol boundaries without a separate framing line.

**Envelope protection.**
* The sender sends the five header words and then a CHECK symbol with their
  CRC-16. It waits for ACK or NACK on the reverse direction of the link.
* The receiver writes the header into its FIFO speculatively (`dnp_spec_fifo`).
  If the CHECK matches, it commits the words and sends ACK. If not, it rolls them
  back and sends NACK.
* On NACK the sender sends the header again from its copy. The footer goes through
  the same exchange.
* If an ACK takes longer than the `TIMEOUT` register, an exception bit is set.

**Payload protection.**
* The payload is not resent. The sender puts the payload CRC into the footer's
  CRC field.
* The receiver recomputes the CRC and sets the footer error bit on a mismatch.
  That bit reaches software in the completion event.
* The receiver also increments the hop count.

**DC balance.** For each data word, the sender compares the word's own disparity
(ones minus zeros) with the running disparity of the link. If both have the same
sign, the word is sent inverted and the inverted bit is set. CHECK and CTRL
symbols are balanced by construction, since each is a value next to its
complement.

**Flow control.** The receiver has a FIFO of `RX_DEPTH` words per VC. While a FIFO
has fewer than `STOP_THRESH` free places, the receiver sends a stop for that VC in
a CTRL symbol. The sender checks the stop bit of its VC before each data symbol.
The threshold covers the words already on the wire. Packets are never dropped.

A pending ACK, NACK or stop change takes the next symbol slot, ahead of data and
CHECK symbols.

## On-chip port (DNI)

On both sides of the NoC, a word moves when `req` and `gnt` are high together.
* **Transmit.** The DNI computes CRC-16 over the header and payload and puts it in
  the footer.
* **Receive.** It recomputes the CRC. On a mismatch it sets the footer error bit
  and lets the packet continue. It also increments the hop count.

The port adds no delay. The NoC itself is not part of this RTL.

## Software interface

AHB byte address bits `[13:12]` select the region:
* **0**: registers, at word index `[5:2]`.
* **1**: LUT, where record e, field f is at word `4e+f`. The fields are 0 start,
  1 length and 2 flags.
* **2**: command FIFO. A write pushes a word. A read returns the number of queued
  commands.

| reg | name | contents (reset) |
|---|---|---|
| 0 | CTRL | `[0]` engine enable (1), `[1]` receive enable (1), `[2]` fixed priority (0), `[7:4]` priority input, `[8]` soft reset (self-clearing) |
| 1 | MY_DNP | own address (`RESET_DNP`) |
| 2 | ORDER | `[1:0]` first, `[3:2]` second, `[5:4]` third dimension; 0=X 1=Y 2=Z (Z,Y,X) |
| 3 | TORUS | `[5:0]` X size, `[13:8]` Y size, `[21:16]` Z size (2,2,2) |
| 4 | CHIPMASK | address bits that name the chip (all ones: every other DNP is off-chip) |
| 5 | CQ_BASE | CQ ring base (word address) |
| 6 | CQ_SIZE | ring size in words (64) |
| 7 | CQ_WP | write pointer (read only) |
| 8 | CQ_RP | software read pointer |
| 9 | TIMEOUT | ACK time-out in clocks (64) |
| 10 | STATUS | `[0]` CMD FIFO empty, `[1]` engine busy, `[15:8]` sticky exceptions: bit 8 off-chip CRC error, 9 ACK time-out, 10 on-chip CRC error, 11 retransmission (write 1 to clear) |

The soft-reset bit resets the whole DNP except the registers and the slave port.

## Timing and throughput

* **Master ports.** Each moves up to one word per clock. That needs a zero-wait
  AHB slave, because the master issues pipelined single transfers with up to four
  reads in flight.
* **On-chip port.** One word per clock.
* **Off-chip link.** One data word per 9 clocks (36-bit symbols). Each header and
  footer adds a CHECK symbol and an ACK round trip. A 600-word PUT between two
  DNPs took about 9.8 clocks per word, retransmissions included.
* **LUT lookup.** At most `LUT_ENTRIES + 2` clocks per received packet.
* **Engine.** It waits for each packet to leave its master port before issuing the
  next. For long transfers, a small gap per 256-word packet is spent this way.
* **Measured latencies.** `tb_dnp_top` measures each latency from the command
  entering the FIFO to the first payload write on the destination bus. It checks
  these against the figures of the original design. LOOPBACK takes 11 clocks
  (original: about 100). A one-word on-chip PUT takes 17 clocks, with a NoC model
  that has no wire delay (original: about 130). A one-word single-hop off-chip PUT
  takes 86 clocks (original: about 250). A 256-word LOOPBACK between zero-wait
  memories writes its 256 words in 256 clocks. On a ring of four DNPs
  (`tb_dnp_hops`), a two-hop PUT takes 144 clocks, so the extra hop costs 58
  (original: about 100). The middle DNP forwards the packet through its switch as
  soon as the header is in, without touching its own buses.

## Where this implementation departs from the original design

* **Mesochronous link clocking is not built.** The original link aligns the clock
  phases of the two chips. Here both ends must share one clock. The DDR pad cells
  are also outside the RTL: `tx_lanes`/`rx_lanes` carry what two DDR lines carry
  in one clock.
* **The serial protocol is this implementation's own.** This covers the symbol
  format, CHECK/ACK/NACK, framing and the stop rule. The original design states
  only what the link does: CRC-16, resending header and footer, DC balance by
  inversion, and flow control. CTRL symbols are assumed to arrive intact. A
  damaged CTRL symbol is ignored, and an ACK time-out only raises an exception.
* **VCs share the serial link one packet at a time.** A packet holds the link
  until its footer is acknowledged. The dateline VC choice and the separate VC
  buffers are in place, but a blocked packet on one VC can still hold the wire.
  Deadlock freedom across a full torus under heavy load has not been shown in
  simulation.
* **The formats and maps are this implementation's own.** This covers the
  encodings and bit positions of headers, commands and events, the register map,
  the AHB address map, the buffer sizes, the number of LUT records (16) and the
  CQ protocol.
* **One event per received packet.** A SEND buffer is used by one packet and then
  retired.
* **Port counts.** The place-and-route trials of the original work list other port
  counts: M = 1 with N = 1 or 3. The RTL defaults follow the SHAPES tile
  (L=2, M=6, N=1), and other counts are parameters.
* **Latencies are lower than the original's.** The original design quotes about
  100 clocks for LOOPBACK, about 130 on-chip, about 250 off-chip, and about 100 per
  extra hop. The testbenches treat these as upper bounds, and this RTL stays well
  under them (see "Timing and throughput"). The original measured up to the first
  header word written at the destination. This RTL writes no header to memory, so
  the measurement stops at the first payload word. The on-chip figure also leaves
  out the NoC's own delay, because the NoC model has none.

## Simulation

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. Build and run one with verilator, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
    rtl/dnp_pkg.sv tb/tb_dnp_top.sv -y rtl -y tb --top-module tb_dnp_top
./obj_dir/Vtb_dnp_top
```

| testbench | what it shows |
|---|---|
| `tb_dnp_top` | two DNPs at full default size (L=2, M=6, N=1) joined by an X link pair (both directions) and a NoC model, each master port with an AHB memory with wait states. The run covers LOOPBACK, a 600-word PUT with corrupted CHECK symbols (resends), SEND, GET (the answer uses VC1 on the wrap-around link), a PUT with no matching buffer, and on-chip PUTs over the NoC, one with a damaged payload. It checks memory contents, CQ events and exception bits, latencies and the 1 word/clock master-port rate, and counts each mechanism |
| `tb_dnp_hops` | four DNPs at full default size in an X ring (torus 4 x 1 x 1). It measures one-word PUT latency over one and two hops, and checks the extra-hop cost (at most 100 clocks). It also checks that a 256-word two-hop PUT arrives intact and that the forwarding DNP never uses its own master buses |
| `tb_dnp_offchip_if` | two links back to back with random bit flips in data and CHECK symbols, both VCs, back-pressure. It checks exact header delivery, the error bit exactly on damaged payloads, resends, stops and bounded disparity |
| `tb_dnp_dni` | NoC loop with random grants and payload bit flips. It checks the CRC field, the error bit and the hop count |
| `tb_dnp_switch` | 9 ports, random traffic to hand-computed destinations. It checks whole packets, order, the output VC and contention |
| `tb_dnp_engine` | random commands against a reference expansion into packets and events, with GET-serve priority |
| `tb_dnp_router`, `tb_dnp_arbiter`, `tb_dnp_lut`, `tb_dnp_crc16`, `tb_dnp_cmd_fifo`, `tb_dnp_regs`, `tb_dnp_ahb_slave`, `tb_dnp_ahb_master` | unit tests against reference models |

`tb/tb_ahb_mem.sv` is a behavioural AHB-Lite memory with random wait states. It
stands in for tile memory. The master-port and RDMA-controller blocks are tested
through `tb_dnp_top`, because they need the whole datapath around them.
