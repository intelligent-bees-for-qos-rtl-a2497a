// fwd_bee_decider: the per-node decision taken for every forward bee that
// arrives at a router, in the order of the algorithm's pseudo code:
//
//   at the destination:  the first N_BACKWARD (three) bees of a flow become
//                        backward bees, later ones are killed;
//   elsewhere:           killed if a bee of the same flow came before,
//                        killed if the hop counter reached the limit of twice
//                        the Euclidean source-destination distance,
//                        killed if the incoming link has fewer free lanes than
//                        the required bandwidth,
//                        otherwise copied to every neighbour except the one it
//                        came from.
//
// A flow is identified by its (source, destination) pair; seen_count_i is the
// number of earlier bees of that flow at this node (bee_seen_table). Incoming
// link bandwidth is the number of free SDM lanes on the input port it arrived
// on. Copies go to every existing neighbour except the arrival port; the
// choice of "all other ports" is this design's, the pseudo code only says
// "choose output ports and broadcast".
//
// Purely combinational. out_mask_o is indexed by port code (bit 0 south,
// 1 west, 2 east, 3 north) and is only non-zero for FA_BROADCAST.
module fwd_bee_decider
  import bee_pkg::*;
#(
  parameter int unsigned NX = 8,   // mesh columns
  parameter int unsigned NY = 8    // mesh rows
) (
  input  bee_t          bee_i,
  input  coord_t        here_i,
  input  port_e         in_port_i,
  input  logic [1:0]    seen_count_i,
  input  lanes_t        in_free_i,     // free lanes of the incoming link
  output fwd_action_e   action_o,
  output logic [3:0]    out_mask_o
);

  logic [3:0] exists;

  always_comb begin
    exists[0] = (int'(here_i.y) < int'(NY) - 1);   // south
    exists[1] = (here_i.x != '0);                  // west
    exists[2] = (int'(here_i.x) < int'(NX) - 1);   // east
    exists[3] = (here_i.y != '0);                  // north
  end

  always_comb begin
    out_mask_o = '0;
    if (bee_i.dst == here_i) begin
      action_o = (int'(seen_count_i) < int'(N_BACKWARD)) ? FA_TO_BACKWARD : FA_KILL_LATE;
    end else if (seen_count_i != '0) begin
      action_o = FA_KILL_SEEN;
    end else if (hop_limit_reached(bee_i.src, bee_i.dst, bee_i.hop)) begin
      action_o = FA_KILL_HOPS;
    end else if (popcount(in_free_i) >= int'(bee_i.bw)) begin
      action_o = FA_BROADCAST;
      for (int unsigned p = 0; p < NLINKS; p++)
        out_mask_o[p] = exists[p] && (in_port_i != port_e'(p));
    end else begin
      action_o = FA_KILL_BW;
    end
  end

endmodule
