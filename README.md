# Anonymous routing and traffic obfuscation for a mesh network-on-chip

A many-core chip whose routers come from untrusted vendors can hold a hardware
Trojan. The Trojan counts the delays between flits passing through a router.
Comparing such counts taken at two routers lets an attacker match a flow
entering the network with a flow leaving it (flow correlation). That tells
the attacker which cores talk to each other, even when payloads and headers
are encrypted.

This design makes that harder in two ways:

- **Hide who talks to whom.** A packet never carries its source and its true
  destination together in the clear. It first travels through an *outbound
  tunnel* to a randomly chosen *endpoint* router, and only there does it
  become an ordinary packet addressed to its destination.
- **Blur the timing.** The source adds *chaff*: dummy packets in idle gaps,
  and extra flits inside real packets. The endpoint removes the chaff and
  delays some packets by a few random cycles. The flit-delay patterns seen
  before and after the endpoint then no longer match.

The RTL is a complete mesh of routers and network interfaces (NIs). IP cores
attach through per-tile valid/ready ports.

## Tiles and flits

`anon_noc_top` builds a `MESH_X` x `MESH_Y` mesh; the default is 8x8. Each
tile has:

- an `anon_router`: five ports (N, E, S, W, local), one input FIFO per port,
  wormhole switching, round-robin output arbitration;
- an `anon_ni`.

Links use valid/ready, and a flit takes one cycle per hop. Tile `n = y*MESH_X + x`
sits at column x, row y; y grows to the south.

Every flit has the same format (`noc_pkg::flit_t`): flit type, packet type,
VCI, plain destination, a 32-bit encrypted-header field and 128 data bits.
There are three packet types:

| type | routed by | purpose |
|---|---|---|
| `PT_NORMAL` | XY on `dest` | plain packet, after it has left its tunnel |
| `PT_DT` (data transfer) | the VCI and each router's table | packet inside an outbound tunnel |
| `PT_TC` (tunnel confirmation) | XY on `dest` = endpoint | one flit that installs a tunnel hop by hop |

## Outbound tunnels

Each NI owns a single outbound tunnel at any time (`tunnel_mgr`). Building one
works as follows:

1. **PICK.** Draw random routers until one lies `H_MIN`..`H_MAX` hops away
   (3..4 by default). That router is the endpoint E. The tunnel follows the XY
   path from the source router S to E.
2. **GEN.** Draw one random virtual-circuit identifier (VCI) for each router
   on the path, v_0 ... v_h. Then draw the key K_SE shared by source and
   endpoint.
3. **SEND.** Send one TC flit. It holds h+1 *layers* of 25 bits each:
   `{endp, vin, vout}`. It also carries K_SE in the header field. The TC goes
   out only between packets, ahead of any other traffic.
4. **Install.** Each router on the path installs layer 0 into its table:
   vin maps to (vout, output port), or to (endpoint, K_SE). It then shifts the
   data right by one layer and forwards the flit. The endpoint consumes the flit.
5. **ACTIVE.** When the NI hands the TC flit on, v_0 and K_SE become the
   current tunnel. After `TIMEOUT` cycles the manager builds a new tunnel
   toward a new random endpoint. The old tunnel stays in use until the new TC
   has gone out. Tunnel renewal therefore never stalls traffic.

A router only knows its own incoming and outgoing VCIs. No router inside the
tunnel sees both the source and the destination.

### Tunnel table (`vci_table`)

- Fully associative with 16 entries, matched on the incoming VCI.
- One write port for the TC install. One combinational read port per router input.
- Every entry counts down from `LIFETIME` = 3072 cycles, which is longer than
  the tunnel timeout plus drain time. The entry disappears at zero, so a
  router needs no explicit teardown message.
- A new entry goes to, in this order:
  1. the entry with the same VCI, if there is one;
  2. a free entry;
  3. the entry closest to expiry.
- Load estimate for 8x8: 64 sources, up to two live tunnels each, up to five
  routers per tunnel. That averages about 10 entries per router; hot spots can
  go above that.

## Data transfer through the tunnel

The NI takes a whole packet (up to `MAX_PKT` = 5 flits) from its IP into a
buffer, then sends it as a DT packet:

- The head carries the tunnel VCI v_0, and a header encrypted under K_SE:
  `{tag = hash(source NI), chaff kind, chaff position, true destination}`.
- The plain `dest` field is left empty.

Each router on the tunnel handles the DT head as follows:

- **Tunnel router.** Looks up the VCI, replaces it with the outgoing VCI and
  sends the packet on the stored port.
- **Endpoint.** Decrypts the header with the key in its table, then:
  - *Dummy packet*: drops the whole packet.
  - *Otherwise*: turns the packet into `PT_NORMAL` with the true destination
    and XY-routes it onward. The chaff flit at the encrypted position is
    dropped on the way.
- **No table entry.** The packet is dropped and a `vci_miss` event is raised.

## Chaffing at the source NI

The NI follows the paper's AddChaff procedure every cycle. `randNo` is drawn
from the tile's LFSR in 0..99.

- **Idle gaps.** The outbound link may be idle for more than `T_C` = 16
  cycles, with that gap not checked yet (`cflag`). The NI then checks once: if
  randNo <= `P_C` (50 %), it sends a dummy packet of 4 or 5 flits through the
  tunnel.
- **Packets received from the IP.** If randNo <= `P_C` and the packet has at
  least two flits, one chaff flit of random data goes in at a random position.
  That position is strictly between head and tail.
- `cflag` is set by either check and cleared when a packet has been sent.

Because the chaff kind and position travel encrypted, only the endpoint can
tell chaff from data. `chaff_en` turns chaffing off, for comparison runs.

## Random delay at the endpoint

- When a DT head is about to leave its tunnel at an endpoint, the router
  draws once whether this packet is delayed. It is with probability `P_D`
  (50 %).
- Each flit of a delayed packet waits a random 1..5 cycles (`DELAY_MIN`..
  `DELAY_MAX`) before it may ask for its output.
- Packets that are not delayed pass through with no added cycle.
- `delay_en` turns the delay off.

## Timing summary

- Router: a flit written into an input FIFO can leave on the next cycle, so
  each hop adds one cycle plus arbitration waits.
- TC install happens in the cycle the TC flit leaves the router.
- The NI adds one cycle of buffering per flit. It also waits for the whole IP
  packet before sending: store-and-forward at the source.
- The IP is stalled until the tile's first tunnel exists, which takes a few
  tens of cycles after reset.

## What follows the paper and what does not

Taken from the paper:

- the 8x8 mesh;
- XY routing;
- tunnel endpoints at least 3 hops away;
- per-hop random VCIs with a table of incoming to outgoing VCI;
- a TC packet that each hop peels;
- the DT head format;
- the timeout and renewal of tunnels;
- the AddChaff procedure, with P_C = 50 % and dummies of 4 or 5 flits;
- winnowing at the endpoint;
- P_D = 50 % of packets delayed by 1..5 cycles.

This design's own choices and simplifications:

- **No tunnel handshake.** The paper builds a tunnel with three steps: a
  broadcast initialisation, acceptance replies in which each router picks its
  own VCI and key, and then confirmation. All of it is protected by
  public-key cryptography that the paper does not specify. Here the source
  draws all VCIs and the key itself, and sends only the confirmation step, in
  the clear.
- **Placeholder cipher and hash.** The cipher and the NI-identifier hash are
  placeholders (`sym_crypt`, `ni_hash` in `noc_pkg`). A keyed XOR gives no
  secrecy. Replace both with real primitives before any security use.
- **Own sizes.** These sizes are this design's own:
  - `H_MAX` = 4;
  - `TIMEOUT` = 2048;
  - `LIFETIME` = 3072;
  - 16 table entries;
  - 4-flit FIFOs;
  - `T_C` = 16;
  - 128-bit flits;
  - 12-bit VCIs, the largest that lets five layers fit in one flit.
- **Single virtual channel.** The routers have one virtual channel. A packet
  first follows XY to its endpoint, then XY to its destination. The combined
  route can make turns that plain XY forbids, so the network is not
  deadlock-free in general. Under sustained load, the reduced 4x4 test showed
  packets blocked and then lost once their table entries expired. A
  deadlock-free version needs separate virtual channels for the tunnel leg and
  the plain leg.
- **Random VCI collisions.** VCIs are random and not checked for uniqueness.
  Two tunnels that draw the same VCI at one router overwrite each other's
  entry. The chance is about 1 in 4096 per install and per live entry.
- **NoC only.** Processors, caches and the attack side (Trojan counters, the
  correlating neural network) are not part of this RTL.

## Files

| file | content |
|---|---|
| `rtl/noc_pkg.sv` | formats, XY route, placeholder cipher and hash |
| `rtl/lfsr_rng.sv` | 32-bit Galois LFSR, one per tile (shared by NI, tunnel manager) and one per router |
| `rtl/flit_fifo.sv` | router input FIFO |
| `rtl/vci_table.sv` | tunnel table |
| `rtl/anon_router.sv` | router with tunnel, endpoint, winnowing and delay logic |
| `rtl/tunnel_mgr.sv` | outbound tunnel manager |
| `rtl/anon_ni.sv` | network interface with chaffing |
| `rtl/anon_noc_top.sv` | the mesh |
| `tb/*_tb.sv` | one self-checking testbench per module; `anon_noc_top_tb` (4x4, short timeout) runs the whole mesh through the shared body `tb/anon_noc_tb_body.svh` |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and ends. Example
for the router:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/noc_pkg.sv rtl/lfsr_rng.sv rtl/flit_fifo.sv rtl/vci_table.sv \
  rtl/anon_router.sv tb/anon_router_tb.sv --top-module anon_router_tb
./obj_dir/Vanon_router_tb
```

For the mesh, add `rtl/tunnel_mgr.sv rtl/anon_ni.sv rtl/anon_noc_top.sv`. Then
use `tb/anon_noc_top_tb.sv`. Each router and
NI gets its own coordinates as parameters, so Verilator builds one model per
tile. The C++ build of the 4x4 mesh takes about four minutes, and `-j` helps. The largest size simulated so far is 4x4; the default 8x8 mesh did not finish its C++ build within ten minutes, so it has not been simulated.

The mesh testbenches:

- tag every data flit with source, sequence number and flit index;
- check that each packet arrives once, whole, in order and unchanged;
- count every mechanism: tunnel build and renewal, TC install, VCI swap,
  tunnel exit, chaff inserted and winnowed, dummy sent and dropped, endpoint
  delay, IP back-pressure. A mechanism that never occurs counts as a failure,
  and so does any `vci_miss`.

### Current results

- All module testbenches pass: LFSR, tunnel table, router, tunnel manager and NI.
- In the 4x4 mesh test, every mechanism occurs, but the test fails on lost
  packets: 531 of 576 packets arrived and 89 DT heads missed their table
  entry. The missing packets are the ones blocked by the single-channel
  routing problem described above. With a very long table lifetime they stay
  blocked instead of being dropped.
- The mesh is therefore not yet usable without virtual channels. Adding them
  is the first change to make.
