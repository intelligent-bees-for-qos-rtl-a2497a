# Bee-routed guaranteed-bandwidth mesh NoC

This is a 2-D mesh network-on-chip that gives connections a guaranteed
bandwidth. Before a node sends a message, it looks for a path with enough free
bandwidth. The search borrows from how honeybees forage. The message's source
plays the nectar source and the destination plays the hive:

* **Forward bees** are small search packets. They flood out from the source.
  Each router kills the ones that are redundant, too long or on a link that is
  too full.
* The first three forward bees to reach the destination turn around as
  **backward bees**. Each one retraces its path and reserves bandwidth on
  every link it crosses.
* The source keeps the first backward bee to come home. The reservations of
  the other two are released.
* The message then travels on a **virtual circuit**. The circuit uses
  Spatial Division Multiplexing (SDM): it owns a subset of the wires of each
  link on its path, and nobody else may use them until it ends.
* A **teardown** packet ends the circuit and frees its wires hop by hop.

Forward bees only explore and reserve nothing, so a flood does not lock
bandwidth across the whole mesh. Three backward bees run in parallel, so a
link that filled up while the flood was out does not sink the whole request.

The RTL is in SystemVerilog (IEEE 1800-2017) and can be synthesized.
`bee_noc` is the top.

## Ports, port codes and the port list

Every router has four link ports and a local port for its IP block. Each link
port has a 2-bit code:

| port  | code | array index |
|-------|------|-------------|
| south | 00   | 0           |
| west  | 01   | 1           |
| east  | 10   | 2           |
| north | 11   | 3           |
| local | –    | 4           |

The RTL uses the code itself as the port index. Two opposite ports always
differ in both bits, so `code ^ 2'b11` gives the opposite port. Coordinates
grow east (x) and south (y), so node (0,0) is the top-left corner. Node
number n is y·NX + x.

As a forward bee travels, it appends the code of each output port it leaves
by to its **port list**, with the first hop in the most significant bits.
The path therefore costs 2 bits per hop, whatever the size of the mesh. Here
is one 14-hop path across the 8x8 mesh, drawn as (x,y) from (0,0):

```
(0,0) E E E E S S S E E S S S S E (7,7)
port list  10 10 10 10 00 00 00 10 10 00 00 00 00 10   (28 bits)
```

The destination reverses the list one whole code at a time and XORs every
bit with 1. The result is the route home:

```
return     01 11 11 11 11 01 01 11 11 11 01 01 01 01   = W N N N N W W N N N W W W W
```

The reversal has to work on whole codes, not on the bit string. A bit-wise
reversal would swap the two bits inside each code, and the XOR would then
turn east (10) back into east. The hop counter says how many codes are valid
(`port_list_reverser`).

## The bee packet

All control packets share one 68-bit word (`bee_pkg::bee_t`). A link moves
one whole word per transfer:

| field  | bits | forward bee              | backward bee                          | teardown                         |
|--------|------|--------------------------|---------------------------------------|----------------------------------|
| kind   | 2    | 0                        | 1                                     | 2                                |
| src    | 6    | source (x,y)             | source                                | source                           |
| dst    | 6    | destination              | destination                           | destination                      |
| hop    | 5    | hops made so far         | index of the next code to follow      | –                                |
| bw     | 3    | required lanes (1–4)     | required lanes                        | required lanes                   |
| plist  | 40   | port list, grows by 2/hop| return route                          | –                                |
| lanes  | 4    | –                        | lanes reserved on the link just crossed | lanes to free on the link just crossed |

`src`, `dst`, `hop`, `bw` and `plist` make up the forward bee format of the
algorithm. `kind` and `lanes` are additions of this design. The port list
holds 20 hops. That is the most a forward bee can travel in an 8x8 mesh
under the hop limit (next section): ⌈2·√2·7⌉ = 20.

## What a router does with each bee

Each of the five inputs has a 4-deep FIFO. A round-robin pointer moves by one
input every cycle and offers the first non-empty FIFO head to the bee
processor. The processor handles the bee completely in that cycle. It writes
one output register per link it sends on. If any register it needs is still
full, the bee stays in its FIFO; this is a **stall**. Output registers send
with valid/ready into the neighbour's FIFO.

**Forward bee** (`fwd_bee_decider`). The checks run in this order:

1. At the destination: the first three bees of the flow become backward
   bees. Later ones are killed.
2. A bee of the same flow came here before: kill.
3. The hop counter has reached twice the Euclidean source–destination
   distance: kill. The test is `hop² ≥ 4·(dx² + dy²)`, so no square root is
   needed. For (0,0)→(7,7) the limit is 19.8, so a bee may leave with hop 19
   but is killed at hop 20.
4. The link the bee came in on has fewer free lanes than `bw`: kill.
5. Otherwise, send a copy to every neighbour except the one it came from.
   Each copy has hop + 1 and its own output code appended.

A *flow* is the pair (source, destination), because the bee carries no other
identity. `bee_seen_table` counts the arrivals of each flow at each node. It
records every arrival, including bees that are then killed. An entry expires
256 cycles after it was created.

Because each intermediate node passes on only the first bee of a flow, the
flood forms a tree. At most one bee reaches the destination per input port,
so four at most, of which three are kept.

**Turning into a backward bee, at the destination.** The destination
reserves `bw` lanes on the link the bee came in on and `bw` lanes of its local
output. It maps the one onto the other and sends the backward bee back out of
the arrival port. The bee carries the reversed list, `hop = 1` and the
reserved link lanes. If there is no room, the bee is dropped.

**Backward bee, at an intermediate node.** The bee came in on the port its
data will leave by. Its `lanes` field names the output lanes that the next
router downstream already reserved. The node reads the next code of the
route, which is the port the data will come in on. It reserves `bw` free
lanes on that incoming link and maps them in order onto the downstream lanes.
It then passes the bee on with the new lanes. If the incoming link lacks
lanes, the bee turns into a teardown and goes back the way it came, freeing
what was reserved downstream. A failed bee therefore releases its bandwidth
wherever it stops.

**Backward bee, at the source** (`bee_source_ctrl`). The first backward bee of
the pending flow is accepted. The source reserves `bw` local input lanes,
maps them onto the bee's lanes and reports the connection up
(`conn_up_o`, `conn_lanes_o`). Every other backward bee is refused and turned
into a teardown along its path.

**Teardown.** The router frees the named lanes on the link the teardown came
in on and clears the flow-table entries those lanes fed. It looks up where
they led and sends the teardown on with the output lanes. The walk ends at
the destination's local port. A teardown that the IP starts enters through
the local port with the local lanes.

Bees therefore hold no path state beyond their own packet. The network's
state is the flow table of each router (`flow_table`). It is kept per output
port and output lane, and records which input port and lane feeds that
output. Lane occupancy is kept per input port, at the receiving end of each
link. That is where the forward bee's bandwidth test and the backward bee's
reservation both look.

## Data plane

`sdm_switch` drives each output lane from the input lane its flow-table
entry names, through one register. A circuit's data therefore takes one cycle
per router, and the latency of a path of h links is h + 1 cycles, source
router included. The switch has no arbitration and no buffers; the
reservation already guarantees that each lane has one user. A link has
`LANES` = 4 lanes of `LANE_W` = 8 wires, and each lane has a valid bit. The
IP at the source drives the lanes given in `conn_lanes_o`. At the
destination the same words come out in the same lane order, on the local
lanes that were reserved there.

## Using the source interface

Each node of `bee_noc` has these signals, as arrays indexed by node number:

* `req_valid_i`, `req_dst_i`, `req_bw_i`, `req_ready_o`: ask for a connection
  with `bw` lanes. The request is taken when `req_ready_o` is high.
* `conn_up_o`, `conn_lanes_o`: the connection is up and these local lanes
  carry it. On an empty 8x8 mesh, setup from corner to corner takes about
  60 cycles.
* `conn_fail_o`: one-cycle pulse when no backward bee came back within
  `TIMEOUT` (1024) cycles.
* `tear_i`: one-cycle pulse when the message is complete.
* `ldin_i`, `ldvalid_i`, `ldout_o`, `ldvalid_o`: the local data lanes.
* `ev_o`: one-cycle event pulses (`bee_ev_t`). They report broadcasts, each
  kind of kill, backward bees created, reserved, failed, accepted and
  released, teardown hops, stalls and timeouts.

A node has one connection of its own at a time. After a teardown or a
timeout it waits `SEEN_LIFE + 1` cycles before it takes a new request. This
makes sure the seen tables have forgotten the last flood before the same
pair of nodes floods again. Without the wait, the new bees would be killed
as "seen before". A node can also be the destination or a transit node of
any number of other circuits while it has its own connection.

## Parameters

| parameter     | default | where                     | origin |
|---------------|---------|---------------------------|--------|
| NX, NY        | 8, 8    | bee_noc                   | the 8x8 mesh of the algorithm's path example |
| N_BACKWARD    | 3       | bee_pkg                   | the algorithm: "earliest three" |
| PL_HOPS       | 20      | bee_pkg                   | hop limit of the 8x8 mesh |
| MESH_MAX      | 8       | bee_pkg                   | sets the coordinate widths; NX and NY may not exceed it |
| LANES, LANE_W | 4, 8    | bee_pkg                   | this design's choice |
| FIFO_DEPTH    | 4       | bee_noc, bee_router       | this design's choice |
| SEEN_ENTRIES  | 8       | bee_noc, bee_router       | this design's choice |
| SEEN_LIFE     | 256     | bee_noc, bee_router       | this design's choice; must outlast a flood |
| TIMEOUT       | 1024    | bee_noc, bee_router       | this design's choice |

To build a larger mesh, raise `MESH_MAX`, `PL_HOPS` (⌈2·√2·(MESH_MAX−1)⌉) and
`HOP_W` in `bee_pkg` together.

## What follows the algorithm and what is this design's own

These parts follow the algorithm: the order of the forward-bee tests, the hop
limit, the bandwidth test on the incoming link, the port codes and the port
list, the reversal and inversion, three backward bees, reservation by
backward bees only, the source accepting the earliest backward bee, release
of refused and failed backward bees, and the teardown packet that clears the
flow tables.

These are this design's own choices:

* the bee transport (one word per transfer, valid/ready, FIFOs, round robin,
  one bee per cycle per router);
* bandwidth counted in SDM lanes, and the lane count and width;
* the organisation of the flow table, and the in-order lane mapping;
* copies of a forward bee go to every other neighbour;
* the seen table with expiry, and the hold-off and timeout at the source;
* the destination reserving local output lanes;
* a failed backward bee sending a teardown back towards the destination.

Known departures and gaps:

* The algorithm also speaks of reserving "router buffer". This design
  switches circuits without buffers, so only link lanes are reserved.
* One example path in the algorithm's description is printed with 26 bits,
  although its 14 hops need 28. The 28-bit form is used here.
* Nothing limits the end-to-end delay explicitly. The only bound is the hop
  limit, which is at most 2·distance + 1 router cycles of data latency.
* If all backward bees fail, the source just times out. It does not retry
  on its own.

## Verification

Each module has a self-checking testbench in `tb/`:

| testbench               | what it checks |
|-------------------------|----------------|
| tb_port_list_reverser   | the 28-bit example paths; 400 random lists against an independent model |
| tb_fwd_bee_decider      | directed cases (corner and edge broadcasts, hop limit 19/20, exact bandwidth, the earliest three); 2000 random cases against a model that uses a real square root |
| tb_bee_seen_table       | counting, saturation, replacement, expiry |
| tb_flow_table           | reservation, in-order lane mapping, lookup, release, release and reserve in the same cycle |
| tb_sdm_switch           | random traffic through a fixed configuration, one-cycle latency |
| tb_bee_source_ctrl      | the connection sequence, refusal of later bees, timeout and hold-off cycle counts |
| tb_bee_router           | exact packets out of one router for each bee kind, and the data switching that results |
| tb_bee_noc              | a 4x4 mesh end to end (see below) |
| tb_bee_noc_full         | the default 8x8 mesh: a corner-to-corner connection, a crossing connection running at the same time, and reconnection at full width after the teardowns |

`tb_bee_noc` sets up, streams and tears down nine connections. The cases
include:

* a request refused because the destination's local lanes are full
  (timeout);
* forward bees killed for bandwidth on a busy circuit;
* bees killed at the hop limit;
* four corner-to-corner requests made in the same cycle.

It counts every event kind and fails if any kind never occurs. It checks
every data word, its lane and its order, and checks that the latency lies
between the Manhattan distance + 1 and the hop limit + 1.

To simulate with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/bee_pkg.sv tb/tb_bee_noc.sv \
          --top-module tb_bee_noc -Mdir obj_noc && obj_noc/Vtb_bee_noc
```

Any other testbench works the same way: change the file and top name. Each
testbench ends by printing `TB_RESULT checks=N failures=M`. Verilator builds
the 8x8 testbench slowly, taking several minutes. The simulation itself runs
in under a second.
