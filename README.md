# Fault-adaptive routing for a metasurface controller network

A programmable metasurface is a sheet of tiny resonators ("meta-atoms") whose
electromagnetic response is set by switches. Each group of switches is driven by a
small controller chip, and the controllers form a grid network laid out on the
back of the surface. Configuration commands enter the grid at one corner and must
be delivered node by node to the right controller, which sets its switches and
reports back.

The network is unusual. Each controller has only two input and two output links,
and the link directions alternate from row to row and from column to column. A
packet can therefore never move freely in four directions. It has only two
choices, and they depend on where it is. When some controllers are dead, the routing
has to get around them with just those two choices, without cycling forever, and
with only two bits of routing state in the packet.

This repository holds synthesizable SystemVerilog for such a network:
- the bit-serial handshake channels,
- the controller node, with store-and-forward buffering, routing, a configuration register and acknowledgements,
- the routing logic: orientation-aware XY/YX routing with a loop-free XY-YX fault adaptation,
- the W x H network (default 24 x 24).

Self-checking testbenches run it end to end with random faults.

## The grid and its orientations

Node (x, y) has x = column (0 at the west) and y = row (0 at the south).

- **Horizontal (H) links** run east on even rows and west on odd rows.
- **Vertical (V) links** run north in even columns and south in odd columns.
- **No wraparound across the surface.** At the edges, each node is joined to the
  node in the neighbouring row or column ("edge wraparound"):
  - top row: (x, H-1) with x even sends its V output to (x+1, H-1);
  - bottom row: (x, 0) with x odd sends its V output to (x-1, 0);
  - right edge: (W-1, y) with y even and y >= 2 sends its H output to (W-1, y+1);
  - left edge: (0, y) with y odd and y >= 3 sends its H output to (0, y-1).
- **Gateways.** Two external gateways sit at the bottom corners:
  - The *input gateway* (south-west) drives the H input of (0,0) and receives the
    H output of (0,1).
  - The *ACK gateway* (south-east) receives the H output of (W-1,0) and drives the
    H input of (W-1,1).

W and H must be even. Every node has exactly one V input, one H input, one V
output and one H output, so each node needs 2 x 2 x 3 = 12 channel wires. That
fits a controller chip on which 12 pins are set aside for communication.

The four combinations of column and row parity give four *orientation types*.
This design numbers them `type = {y[0], x[0]}`:

| type | row | column | V output | H output |
|------|-----|--------|----------|----------|
| 0 | even | even | north | east |
| 1 | even | odd | south | east |
| 2 | odd | even | north | west |
| 3 | odd | odd | south | west |

This is the numbering of the paper's orientation figure. Its prose swaps types 1
and 2. Nothing in the logic depends on the numbering.

## Channels (`hs_tx`, `hs_rx`)

A link is three wires: `req`, `data` and `ack`. It carries one bit per four-phase
handshake:
1. The sender puts the bit on `data` and raises `req`.
2. The receiver samples the bit and raises `ack`.
3. The sender drops `req`.
4. The receiver drops `ack`.

Words go most significant bit first.

The original controllers are clock-less. This implementation is clocked, with one
clock for every node, and keeps the same protocol on the wires:
- A sender spends 4 cycles per bit when the receiver answers at once, so a
  23-bit packet takes 92 cycles per hop.
- The receiver registers `ack`.
- `hs_rx` accepts the first bit of a word only when `enable` is high. A busy node
  therefore just leaves the sender waiting with `req` high. This is the only flow
  control; there are no credits.

## The node (`cn_node`)

A node does one thing at a time:

```
IDLE --(an input requests)--> RECV --(23 bits in)--> ROUTE --> SEND --(23 bits out)--> IDLE
```

- **Store-and-forward.** The node receives a whole packet into its single buffer
  before it decides where it goes. It never receives and sends at the same time,
  and never takes two inputs at once.
- **Input choice.** If both inputs request in the same cycle, the one not served
  last wins (round robin).
- **Ejection.** A data packet addressed to the node is ejected:
  - The payload goes into the 10-bit configuration register `cfg`. That register
    is where the meta-atom switch drivers would connect.
  - The node then builds an ACK packet in the same buffer and routes it like any
    other packet. The ACK is addressed to (W-1,0) and carries the node's own
    coordinates as payload.
- **Coordinates.** `node_x`/`node_y` are strap inputs. The network ties them to
  constants, so all nodes are the same circuit.
- **Events.** `ev` gives one-cycle event pulses (delivery, ACK made, XY/YX
  switch, abnormal mode, termination, dead end, refused U-turn, waiting at a busy
  node). They are for observation only.

Per hop the cost is about 92 cycles in, 2 cycles to route, and 92 cycles out.

### Packet format (23 bits, MSB first)

| field | bits | meaning |
|---|---|---|
| kind | 1 | 0 data, 1 ACK |
| alg | 1 | 0 XY, 1 YX |
| mode | 1 | 0 normal, 1 abnormal |
| dst_x, dst_y | 5 + 5 | destination (grids up to 32 x 32) |
| payload | 10 | switch configuration, or for an ACK the sender's {x, y} |

Only the alg and mode bits are prescribed by the routing scheme. The rest of the
format is this design's choice.

## Routing (`route_unit`)

This is the part that needs the most care. The routing unit is purely
combinational. It sees the node's position, the buffered packet, the input the
packet came in on, and two `out_blocked` bits that say which outputs lead to a
faulty neighbour. It returns eject, forward on V or H with an updated header, or
drop.

### Orientation-aware XY

In a normal mesh, XY routing first removes the x offset and then the y offset.
Here a node can only go the way its links point. So at each node the decision is
between "the output that makes progress" and "the other output", which steps into
the neighbouring row or column where the direction is reversed.

Call an H move *good* if the row runs towards `dst_x`. Call a V move *good* if the
column runs towards `dst_y`. With this, XY works as follows:

1. **On the destination column:** take V if it is good, else H (step sideways
   into a column that runs the other way; the next node comes back).
2. **On the destination row:** take H if it is good, else V.
3. **Otherwise:** head for the *climbing column*.
   - The climbing column is the destination column if that column runs towards
     `dst_y`.
   - If not, it is the column from which the destination row leads into
     `dst_x`. That is the column just before the destination column in the
     destination row's direction, or just after it at the grid edge.
   - While not on the climbing column, take H if it is good, else V. On it, take V.

Rule 3 is what makes XY deadlock-free here. Naive XY would overshoot an odd
destination column, come back along the destination row, and share channels with
the returning ACK, which closes a cycle. Climbing in the column before the
destination avoids that. From the input gateway to (3,4), the XY walk is:
east along row 0 to column 2, north to row 4, then east into (3,4).

YX is the same scheme with rows and columns exchanged: first reach the *travel
row*, then move horizontally. One case differs. If the travel row would lie
outside the grid (at the top or bottom edge), YX falls back to XY for that step.

Both orders reach every node from every node on a fault-free 24 x 24 grid.
`route_unit_tb` walks all pairs, checks a hop bound of 3 x Manhattan distance + 12,
and checks that no walk ever needs a refused turn.

### Loop-free fault adaptation (LFA)

A node knows which of its outputs lead to dead neighbours. Faults are fixed before
traffic starts. When the output preferred by the packet's current order is blocked:

- **The other output is usable and the packet is in normal mode.**
  - The packet goes out on the other output, and its alg bit flips (XY becomes
    YX or back). The next node routes with the other order.
  - If the dead node lies inside the rectangle spanned by the current node and
    the destination, the mode bit is also set to *abnormal*. Such a fault sits on
    every monotone route, so a second detour would risk a cycle. If the fault is
    outside that rectangle, the packet stays normal and may switch again later.
- **The other output is usable but the packet is already abnormal.** The packet is
  dropped ("terminated"). This bounds the route and prevents live-lock.
- **Both outputs are unusable.** The packet is dropped ("dead end").

Independently of faults, an output that would send the packet straight back over
an edge wraparound to the node it came from is never used (no 180-degree turns).
Such an output counts as unusable, so the rules above apply. The output of (0,1)
towards the input gateway never takes data. ACK packets leave (W-1,0) on its H
output to the ACK gateway.

Walk-through (in `route_unit_tb`, on an 8 x 6 grid):
- Destination (3,3), dead node (4,3).
- XY reaches (4,2) and finds its north output blocked. The packet detours east to
  (5,2), switches to YX and turns abnormal.
- From (5,2), YX goes east, north and then west, towards the dead node. At (5,3)
  it meets the fault a second time and is terminated.

### Where this departs from the published scheme

- **Abnormal-mode turn prohibitions are missing.** In the published scheme,
  abnormal mode also forbids a few turns near the fault. In the walk-through,
  they force the packet south at (5,2) and then west at the node below, and the
  packet reaches the destination. Those turn rules are shown only for that one
  example and never given in general. This design does not guess them. Abnormal
  mode here only means "a second fault terminates".
  - As a result, single-fault delivery is not 100% in this design. In the
    end-to-end tests, 10 of 16 single-fault cases next to the destination are
    acknowledged; the published figure for single faults on the path is 100%.
  - Delivery rates under random faults are also lower than the published LFA
    curves.
- **The abnormal-mode rule is this design's own.** The published scheme only says
  it compares the fault's and the target's position and orientation. The
  rectangle rule above is this design's.
- **The reliable delivery algorithm (RDA) is not implemented.** It is the second
  scheme in the same work, using two disjoint clockwise and counter-clockwise
  paths, and it too is given only by example.
- **Which node is "prior to the fault".** In the walk-through figure, the caption
  calls the grey node the node prior to the fault. The text makes that node the
  one that detours east, i.e. the node before the dead node. This design follows
  the text.

## The network (`cn_top`)

`cn_top` builds the W x H grid with a generate loop. It computes each node's
neighbours from the wiring rules above at elaboration time and brings the
four gateway channels out as ports.

Faults are given by the `node_fault` vector, indexed x*H + y:
- A faulty node's outgoing `req`/`data` and incoming `ack` are cut to 0, so it
  neither sends nor acknowledges.
- Each of its upstream neighbours gets the matching `out_blocked` bit.
- Change `node_fault` only while the network is in reset.

`cfg` and `ev` are per-node output arrays with the same indexing.

Elaboration of the default 24 x 24 top is fast. Generic coarse synthesis of all
576 nodes is slow, so size the design on a single `cn_node`.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M`, has a watchdog, and uses
`$urandom`.

| testbench | what it checks |
|---|---|
| `hs_tx_tb` | random words against a receiver with random delays; bit order; 4 cycles per bit |
| `hs_rx_tb` | random words with gaps; no ack while disabled; a held first bit is accepted once enabled |
| `route_unit_tb` | the XY path of the deadlock-free example; the fault walk-through; switch, abnormal, terminate, dead end, U-turn refusal, ACK exit; all-pairs XY and YX reachability and ACK exits on 24 x 24 |
| `cn_node_tb` | forwarding on the right output with the header unchanged; routing delay; 23-bit output phase length; ejection into `cfg` and the ACK; LFA header rewrite; termination; dead end; two inputs at once; never receiving while sending |
| `cn_top_tb` | 6 x 6 network end to end (below) |
| `cn_top_full_tb` | the same at the default 24 x 24, with fewer runs |

The two end-to-end benches send configuration packets through the input gateway
model and wait for the ACK at the ACK-gateway model. They check four things: the
payload lands only in the destination's register, the ACK names the destination,
nothing leaks towards the input gateway, and with a single fault every packet
ends (delivered or dropped, never stuck). They run these phases:
1. no faults (every node, in the 6 x 6 case);
2. single faults around four destinations, one per quarter and one of each type;
3. random faults with failure probability 0.02 to 0.08;
4. bursts from both gateways at once.

Each bench fails if any routing mechanism never occurs.

A 6 x 6 run gives:
- 10/16 single-fault cases acknowledged.
- Random faults: 21/24 acknowledged at Pf 0.02, 16/24 at 0.04 and 0.06, and 9/24 at 0.08.

These numbers come from few runs and show trends only.

### Running with Verilator

```
verilator --binary --timing --assert -y rtl -y tb rtl/cn_pkg.sv tb/cn_top_tb.sv \
          --top-module cn_top_tb -o sim && ./obj_dir/sim
```

Replace `cn_top_tb` with any other testbench name. The 24 x 24 bench needs
about four minutes to build and run.

## Files

- `rtl/cn_pkg.sv`: packet format, enums, event struct, wiring functions.
- `rtl/hs_tx.sv`, `rtl/hs_rx.sv`: channel endpoints.
- `rtl/route_unit.sv`: XY/YX routing and LFA.
- `rtl/cn_node.sv`: controller node.
- `rtl/cn_top.sv`: the network.
- `tb/*_tb.sv`: testbenches.
- `tb/tb_ch_send.sv`, `tb/tb_ch_recv.sv`: gateway channel models used by the network benches.
