# Beehive UDP stack in SystemVerilog

Beehive builds an FPGA network stack out of *tiles* on a network-on-chip. Each
tile is a mesh router plus one piece of logic: an Ethernet, IP or UDP layer, an
application, a log. A packet is not pushed through a fixed pipeline. It travels
as a NoC message from tile to tile, and every tile decides for itself where the
message goes next. Adding a function means adding a tile and changing a routing
entry. No top-level wiring is redrawn.

This RTL implements that architecture for the configuration used to measure a
UDP echo server, extended with the erasure-coding application. It is a 4x4 mesh
of 512-bit routers with:

- receive and transmit tiles for Ethernet, IPv4 and UDP;
- an echo application;
- two logs that can be read back over the network;
- four Reed-Solomon encoder tiles behind a round-robin scheduler tile.
 Everything is synthesizable SystemVerilog-2017 with
one clock and a synchronous active-high reset.

```
            x=0                    x=1       x=2       x=3
   y=0   ETH RX                 IP RX     UDP RX    App + App Log
   y=1   ETH TX + Latency Log   IP TX     UDP TX    RR scheduler
   y=2   (router only)          (router)  RS 0+log  RS 1+log
   y=3   (router only)          (router)  RS 2+log  RS 3+log

   receive:   MAC -> ETH RX -> IP RX -> UDP RX -> App | App Log | Latency Log
                                                 -> RR scheduler -> RS 0..3
   transmit:  App / logs / RS -> UDP TX -> IP TX -> ETH TX -> MAC
```

## Messages on the mesh

All traffic is made of messages. A message is one header flit followed by
`msg_len` body flits, and every flit is 512 bits wide. Routers look only at the
top 64 bits of the header flit (`noc_hdr_t` in `beehive_pkg`):

| bits    | field    | meaning                                            |
|---------|----------|----------------------------------------------------|
| 63:56   | dst_x    | destination tile column                            |
| 55:48   | dst_y    | destination tile row                               |
| 47:44   | fbits    | endpoint inside the destination tile (0 or 1 here) |
| 43:22   | msg_len  | number of body flits (22 bits: up to 256 MiB)      |
| 21:14   | src_x    | sender column                                      |
| 13:6    | src_y    | sender row                                         |
| 5:0     | type     | 1 = ETH, 2 = IP, 3 = UDP                           |

These sit in bits 511:448 of the flit, and the rest of the header flit is zero.

The protocol messages always have the same shape: the header flit, one
*metadata flit*, then `ceil(data_len/64)` data flits. The metadata flit carries
the header fields the previous layer parsed, left-aligned:

- `eth_meta_t`: MACs, EtherType, payload length, timestamp.
- `ip_meta_t`: addresses, protocol, payload length, timestamp.
- `udp_meta_t`: addresses, ports, payload length, timestamp.

The data flits hold the rest of the packet, realigned so that byte 0 is in bits
511:504. Network byte order then reads straight out of the top bits. The
timestamp is the cycle at which the frame entered ETH RX. It rides along with
the request and with its echo, so ETH TX can report the latency through the
whole stack.

## Routers, wormholes and why this layout cannot deadlock

`noc_router` has five ports:

| port | direction     |
|------|---------------|
| 0    | local tile    |
| 1    | north (y−1)   |
| 2    | east (x+1)    |
| 3    | south (y+1)   |
| 4    | west (x−1)    |

Routing is dimension ordered: a message first travels along X until the column
matches, then along Y. Switching is wormhole. An output port is granted to one
input when that input's header flit arrives, and stays locked to it until the
last body flit has passed. Messages therefore never interleave on a link.

Each input has a two-flit FIFO. An idle output arbitrates round-robin among the
headers that want it and locks one cycle later. After that, one flit moves per
cycle, so each hop costs two cycles for the header and the body follows at full
rate. Links use valid/ready; a flit moves when both are high.

Wormhole routing can deadlock at the message level. A tile that forwards a
message may need a link that the message it is forwarding still holds. The
placement above avoids this:

- The receive chain runs east along row 0, and the transmit chain runs west
  along row 1.
- Replies from the application and from App Log go west one column and then
  south to UDP TX. A request to the latency log goes west along row 0 and then
  south.
- Erasure-coding requests go east and south from UDP RX to the scheduler at
  (3,1), then west and south to an encoder. Parity replies go west along the
  encoder's row to column 2 and then north into UDP TX.
- None of these chains holds a link while waiting for that same link again.

The encoders sit in columns 2 and 3 for a reason. Picture an encoder in column
0 or 1. A request to it would cross link (2,1)→(1,1), which is also the first
hop of UDP TX's output. Now suppose the MAC stalls and UDP TX fills up. That
encoder cannot hand over its previous reply, so it stops taking the new
request. The request keeps holding the link, and UDP TX can never drain. In
the chosen placement, no scheduler-to-encoder path touches a transmit-chain
link. The end-to-end test drives exactly this case: it stalls the MAC while
echoes and erasure-coding requests are interleaved.

One chain does use the same link twice: a latency-log read. The request leaves
router (0,1) on its local port into the log, and the reply later reaches ETH TX
through that same port. This is safe because the log takes every request at
once. When its buffer is full it drops the request instead of stalling, so the
request never holds the port while the reply needs it.

If you move tiles, check this again by hand: follow each chain with X-then-Y
routing and look for a link used twice.

Six tiles host two endpoints each: App with App Log, ETH TX with Latency Log,
and each encoder with its log. `tile_port_mux` handles the sharing. It steers each arriving message by its
`fbits` (0 selects the first endpoint, anything else the second). Outgoing
messages are merged whole, round-robin. One consequence: a read-back request to
the latency log waits behind ETH TX traffic at that tile's port. If the MAC
stops accepting frames, log requests stall too. The requests resume when the MAC
does.

## The protocol tiles

**Receive side.** Each receive tile removes its header and passes the rest on.

- `eth_rx` parses the MACs and the EtherType and skips one 802.1Q VLAN tag. It
  stamps the arrival cycle and routes on EtherType.
- `ip_rx` checks the version, the header checksum and the lengths. It drops
  fragments (fragmentation is not supported) and handles any IHL from 5 to 15.
  It trims Ethernet padding using the IP total length and routes on the protocol
  number.
- `udp_rx` verifies the UDP checksum over the pseudo-header. A checksum of 0
  means none was sent and is accepted. It routes on the destination port, which
  is how requests reach the application or one of the logs.

**Removing a variable-length header** is the awkward part, because IP options
make the header length vary from packet to packet. `strip_stream` does it the
way the paper describes. It keeps the previous and the current flit as one
1024-bit line, shifts the line left by the header length in bytes, and outputs
the top 512 bits. That gives one flit per cycle, whatever the offset. It also
takes an output byte count, so surplus input (Ethernet padding) is consumed and
discarded without reaching the output.

**Transmit side.** Each transmit tile adds a header in front of the payload.

- `udp_tx` computes the UDP checksum.
- `ip_tx` builds a 20-byte IPv4 header: DF set, TTL 64, an identification that
  counts packets, and the header checksum.
- `eth_tx` adds destination MAC, source MAC and EtherType, and drives the MAC
  stream with per-byte `keep` and `last`.

`prepend_stream` does the insertion. It is the mirror of `strip_stream`: the new
header bytes are carried at the front of a shifting line.

**Streaming versus buffering.** The IP tiles and the application stream, so
their output starts before their input has finished. Three tiles cannot do that,
because their first output flit depends on the last input flit:

- ETH RX must state the message length in its header flit. The MAC reports the
  length only at the end of the frame.
- UDP RX may only forward a datagram whose checksum is good.
- UDP TX writes the checksum into the header, in front of the payload it covers.

These three tiles write the packet into a `pkt_buffer` (256 flits by default,
enough for a 9000-byte jumbo frame). They commit it, or roll it back on a drop,
at the end, and then stream it out. The paper calls its protocol tiles streaming,
but also reports block RAM in its UDP tiles. This design buffers only where the
data requires it.

## Next-hop tables

Every receive tile owns a `next_hop_table`. The table is a small exact-match CAM
from a key (EtherType, protocol number or UDP port) to a destination
`{x, y, fbits}`. A miss drops the packet and pulses the tile's `drop` output.
That is how traffic the stack does not support is filtered out.

The tables are loaded from parameters at reset. Each entry can be rewritten at
run time through a write port. At the top level, that port stands in for the
control plane:

| `tbl_sel` | table  |
|-----------|--------|
| 0         | ETH RX |
| 1         | IP RX  |
| 2         | UDP RX |

The default routes are:

| tile   | key                | destination         |
|--------|--------------------|---------------------|
| ETH RX | 0x0800             | IP RX               |
| IP RX  | 17 (UDP)           | UDP RX              |
| UDP RX | port 5000          | App                 |
| UDP RX | port 5001          | App Log             |
| UDP RX | port 5002          | Latency Log         |
| UDP RX | port 5003          | RR scheduler        |
| UDP RX | ports 5004-5007    | log of encoder 0-3  |

The UDP RX table has sixteen entries, so eight are free for run-time additions.
The others have four. The transmit tiles have only one possible successor, so
theirs is a fixed input.

## Logs and measuring latency

`log_tile` is a circular log (1024 entries of 128 bits) written from a sideband
port:

- The echo application writes `{arrival cycle, payload length, client IP}` for
  every request.
- ETH TX writes `{cycle the frame entered ETH RX, cycle its echo left ETH TX}`.
  The difference is the latency through the stack.

A client reads an entry by sending a UDP datagram to the log's port. The first
four payload bytes give the index. The reply is 24 bytes:
`{index, entries written so far, entry}`. Requests wait in a four-entry buffer.
When it is full, new requests are dropped (`log_req_drop`), and the client is
expected to retry the entries it did not get back.

For a 1-byte echo this RTL measures 52 cycles from ETH RX to ETH TX. The paper's
implementation reports 92 cycles (368 ns at 250 MHz). The tiles here are thinner
and the routers have shallower pipelines. The difference is not the same
function at a different speed.

## Replicated tiles

`rr_dispatch` is the logic of a front-end tile that spreads messages over N
copies of a stateless tile. It rewrites each header's destination with the next
target in turn. The paper uses such a tile in front of four Reed-Solomon
encoders, and as a load balancer in front of two UDP stacks. It adds no latency.
At a router port, a 3-flit message plus the one-cycle output lock takes the 4
cycles per 64-byte packet that the paper quotes for its load balancer (32 Gbps).
In the top it sits at (3,1) in front of the four encoders.

## Reed-Solomon encoding

`rs_encoder` is an application tile. It takes a 4 KiB UDP request, splits it
into eight 512-byte data shards, and replies to the sender with two 512-byte
parity shards (1 KiB). It uses the same code as the widely used BackBlaze
library:

- Arithmetic is in GF(2^8) with the polynomial x^8+x^4+x^3+x^2+1 (0x11D).
- Build the 10x8 Vandermonde matrix V[r][c] = r^c.
- Multiply it by the inverse of its top 8x8 block. The top becomes the
  identity (the data shards themselves), and the bottom two rows are the parity
  coefficients:

```
parity 0:  1a 84 ba 33 e7 10 c6 27
parity 1:  84 1a 33 ba 10 e7 27 c6
```

Parity byte k of shard p is the XOR over i of `C[p][i] * shard_i[k]`. The tile
takes one data flit per cycle, which is 64 bytes of one shard. It multiplies
the flit byte-wise by that shard's two constants and XORs the products into two
8-flit accumulators. The multipliers are fixed XOR networks. When the 64th data
flit has arrived, the tile sends a header, the UDP metadata with addresses and
ports swapped, and the 16 parity flits. It accepts no new request while it is
replying.

Each encoder tile also holds a log, shared through a `tile_port_mux` like the
application's. Every finished reply writes
`{cycle the reply completed, 4096, replies so far}`. Two entries read back over
UDP then give that encoder's bandwidth.

A request of any other length is discarded, and the tile pulses `drop`. The unit
test checks the code itself: it erases two data shards and rebuilds them from
the parity. The paper's encoder does 15 Gbps per instance. This one accepts 128
Gbit/s at 250 MHz, so the MAC port is the limit.

## Rates and sizes

| item                   | value                                                        |
|------------------------|--------------------------------------------------------------|
| Flit width             | 512 bits: 128 Gbit/s per link at 250 MHz                     |
| Tile throughput        | one flit per cycle, except one bubble per message at each router output |
| Longest NoC message    | 2^22 body flits                                              |
| Packet buffers         | 256 flits per buffering tile (`BUF_FLITS`)                   |
| Longest accepted frame | set by `BUF_FLITS`; a longer frame would never commit, which is the buffer's limit |

## Where this departs from the paper

- The routers are written from the paper's description: 2D mesh, wormhole,
  dimension-ordered, full-duplex, 512 bits, routing on the top 64 bits. This is
  not the OpenPiton router the paper reuses. The links use valid/ready instead of
  credits, and the field layout of the routing header is this design's own.
- The placement of the scheduler and the encoders is this design's, as are the
  shard layout, the log entry of the encoders and the choice of coefficients.
  The 8+2 code, the 4 KB requests, the four copies and the per-tile logs follow
  the paper.
- The metadata formats, the log entry and request formats, the port numbers,
  table sizes, buffer depths, and the choice of endpoint by `fbits` are not
  specified in the paper.
- ETH RX, UDP RX and UDP TX buffer whole packets (see above).
- The tables match exact keys. The optional 4-tuple hash for spreading flows
  over replicated tiles is not built, and neither is flow-affine dispatch.
- Address resolution is not modelled. The destination MAC is a configured input
  (`gw_mac`).
- The MAC is expected to strip and append the FCS and to pad short frames.
- Not included: the TCP engine, buffer tiles, the separate control NoC and the
  controller behind it, the IP-in-IP and NAT tiles, the
  consensus witness, and the Ethernet MAC and transceivers. The MAC streams
  appear as ports of the top.

## Files

`rtl/` holds one module or package per file:

- `beehive_pkg` holds the shared types and functions.
- The top module is `beehive_udp_stack`.
- The helper modules are `sync_fifo`, `pkt_buffer`, `strip_stream` and
  `prepend_stream`.

Every file starts with a comment on what the module does, its interface and its
timing.

`tb/` holds one self-checking testbench per block, named `<module>_tb`. They
share the packet builders in `tb_pkt_pkg`, which constructs Ethernet, IPv4 and
UDP packets byte by byte from the RFCs, independently of the RTL. Each testbench
stalls both sides at random, compares every byte, and ends by printing
`TB_RESULT checks=<n> failures=<m>`. Each also has a watchdog.

`beehive_udp_stack_tb` runs the whole stack with default parameters. It acts as
the MAC and checks every transmitted frame against an independently built echo.
It also counts each mechanism and fails if one never happened:

- echoes from 1 byte up to a jumbo frame;
- a VLAN tag, IP options and Ethernet padding;
- a drop at each receive tile;
- a run-time table rewrite;
- transmit back-pressure;
- log read-back, and request drops while the log's buffer is full;
- erasure coding: the parity is checked against a byte-level model, each of
  the four encoders must answer two requests, a wrong-size request must be
  dropped, and each encoder's log is read back.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/beehive_pkg.sv tb/tb_pkt_pkg.sv $(ls rtl/*.sv | grep -v beehive_pkg) \
  tb/beehive_udp_stack_tb.sv --top-module beehive_udp_stack_tb -Mdir obj -o sim
./obj/sim
```

Replace the testbench name to run a unit test. The end-to-end run takes well
under a second.
