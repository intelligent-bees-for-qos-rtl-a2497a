// bee_pkg: types, constants and small helper functions shared by the bee
// routing network-on-chip.
//
// The network is a 2-D mesh. Every router has four link ports and a local
// port. The link ports are numbered by their 2-bit port code, which is the
// code written into a forward bee's Port List: south 00, west 01, east 10,
// north 11. The local port gets index 4. With this numbering the opposite
// direction of a port is its code XORed with 11, which is what lets the
// destination turn a forward route into a return route by XORing every bit.
//
// Coordinates: x grows towards the east, y grows towards the south, so the
// node at (0,0) is the top-left corner of the mesh.
//
// A bee (control packet) travels as one wide word per link transfer. The
// same word carries the three kinds of control packet: forward bee, backward
// bee and teardown. Its first five fields are the forward bee format (source,
// destination, hop counter, required bandwidth, port list); the kind and the
// lane mask are additions of this design.
//
// Bandwidth is counted in SDM lanes. A link is LANES lanes of LANE_W wires;
// a virtual circuit needing bandwidth B holds B lanes on every link of its
// path. LANES and LANE_W are this design's choice.
package bee_pkg;

  // Largest mesh side the packet fields can address (the example mesh is 8x8).
  parameter int unsigned MESH_MAX = 8;
  parameter int unsigned COORD_W  = $clog2(MESH_MAX);
  // A forward bee may make at most ceil(2*sqrt(2)*(MESH_MAX-1)) hops before
  // the twice-the-Euclidean-distance limit kills it: 20 hops in an 8x8 mesh.
  parameter int unsigned PL_HOPS  = 20;
  parameter int unsigned PL_BITS  = 2 * PL_HOPS;
  parameter int unsigned HOP_W    = 5;
  // SDM lanes per link and wires per lane.
  parameter int unsigned LANES    = 4;
  parameter int unsigned LANE_W   = 8;
  parameter int unsigned LANE_IW  = $clog2(LANES);
  parameter int unsigned BW_W     = $clog2(LANES + 1);
  // Number of forward bees the destination turns into backward bees.
  parameter int unsigned N_BACKWARD = 3;
  parameter int unsigned NPORTS   = 5;
  parameter int unsigned NLINKS   = 4;

  typedef enum logic [2:0] {
    P_S = 3'd0,   // code 00
    P_W = 3'd1,   // code 01
    P_E = 3'd2,   // code 10
    P_N = 3'd3,   // code 11
    P_L = 3'd4    // local port, never written into a port list
  } port_e;

  typedef logic [1:0]         pcode_t;
  typedef logic [LANES-1:0]   lanes_t;
  typedef logic [PL_BITS-1:0] plist_t;
  typedef logic [LANE_W-1:0]  lane_data_t;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
  } coord_t;

  typedef enum logic [1:0] {
    BEE_FWD  = 2'd0,
    BEE_BWD  = 2'd1,
    BEE_TEAR = 2'd2
  } bee_kind_e;

  // hop: forward bee - hops made so far; backward bee - index of the next
  // port code to use. lanes: backward bee - lanes reserved on the link it
  // just crossed; teardown - lanes to free on the link it just crossed.
  typedef struct packed {
    bee_kind_e          kind;
    coord_t             src;
    coord_t             dst;
    logic [HOP_W-1:0]   hop;
    logic [BW_W-1:0]    bw;
    plist_t             plist;
    lanes_t             lanes;
  } bee_t;

  // One flow-table entry, kept per output port and output lane: which input
  // port and input lane feed it.
  typedef struct packed {
    logic               valid;
    logic [2:0]         in_port;
    logic [LANE_IW-1:0] in_lane;
  } xcfg_t;

  typedef enum logic [2:0] {
    FA_BROADCAST   = 3'd0,
    FA_TO_BACKWARD = 3'd1,
    FA_KILL_LATE   = 3'd2,
    FA_KILL_SEEN   = 3'd3,
    FA_KILL_HOPS   = 3'd4,
    FA_KILL_BW     = 3'd5
  } fwd_action_e;

  // One-cycle event pulses of a router, for observation.
  typedef struct packed {
    logic fwd_broadcast;   // a forward bee was copied to its neighbours
    logic fwd_kill_seen;   // killed: a bee of this flow came before
    logic fwd_kill_hops;   // killed: hop limit reached
    logic fwd_kill_bw;     // killed: incoming link lacks bandwidth
    logic fwd_kill_late;   // killed at the destination: not among the first three
    logic bwd_created;     // destination turned a forward bee into a backward bee
    logic bwd_reserved;    // an intermediate node reserved lanes for a backward bee
    logic bwd_fail;        // a backward bee could not reserve and was turned into a teardown
    logic src_accept;      // the source accepted a backward bee: circuit up
    logic src_release;     // the source released a later backward bee
    logic tear_hop;        // a teardown freed lanes in this node
    logic stall;           // a bee waited for a busy output register
    logic conn_timeout;    // no backward bee came back in time
  } bee_ev_t;

  // Port code number idx (0 = first hop) of a port list, MSB first.
  function automatic pcode_t pl_get(plist_t pl, int unsigned idx);
    return pl[PL_BITS-1-2*idx -: 2];
  endfunction

  function automatic plist_t pl_set(plist_t pl, int unsigned idx, pcode_t c);
    plist_t r;
    r = pl;
    r[PL_BITS-1-2*idx -: 2] = c;
    return r;
  endfunction

  function automatic int unsigned popcount(lanes_t m);
    int unsigned n;
    n = 0;
    for (int unsigned i = 0; i < LANES; i++) n += int'(m[i]);
    return n;
  endfunction

  // The n lowest-numbered lanes that are set in free (fewer if there are not n).
  function automatic lanes_t pick_lanes(lanes_t free, int unsigned n);
    lanes_t r;
    int unsigned got;
    r   = '0;
    got = 0;
    for (int unsigned i = 0; i < LANES; i++)
      if (free[i] && got < n) begin
        r[i] = 1'b1;
        got++;
      end
    return r;
  endfunction

  // Hop limit: twice the Euclidean distance between source and destination.
  // hop >= 2*sqrt(dx^2+dy^2) is tested as hop^2 >= 4*(dx^2+dy^2).
  function automatic logic hop_limit_reached(coord_t s, coord_t d, logic [HOP_W-1:0] hop);
    int unsigned dx, dy;
    dx = (s.x > d.x) ? int'(s.x) - int'(d.x) : int'(d.x) - int'(s.x);
    dy = (s.y > d.y) ? int'(s.y) - int'(d.y) : int'(d.y) - int'(s.y);
    return (int'(hop) * int'(hop)) >= 4 * (dx * dx + dy * dy);
  endfunction

endpackage
