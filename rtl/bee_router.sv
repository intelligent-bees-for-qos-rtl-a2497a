// bee_router: one node of the bee-routed mesh. It has four link ports, one
// per neighbour (numbered by their port codes: south 0, west 1, east 2,
// north 3), and a local port (4) for the attached IP block.
//
// Control plane. Every link carries control packets (bees) as single wide
// words with valid/ready flow control. Each input, the local one included,
// has a small FIFO; a round-robin pointer offers one FIFO head per cycle to
// the bee processor, which handles it completely in that cycle:
//   forward bee  - decided by fwd_bee_decider (the algorithm's pseudo code).
//                  Broadcast: one copy per chosen output, hop counter + 1 and
//                  the code of that output appended to the Port List.
//                  Destination (first three): reserve the bee's bandwidth on
//                  the link it came in on and on the local output, reverse the
//                  Port List (port_list_reverser) and send the backward bee
//                  back out of the arrival port.
//   backward bee - at an intermediate node: reserve the bandwidth on the
//                  link the data will come in on (the next port of its
//                  route), map it onto the lanes reserved one hop downstream
//                  and pass the bee on. At the source: the first bee of the
//                  pending flow is accepted (bee_source_ctrl) and the circuit
//                  is complete. A bee that cannot reserve, or that the source
//                  refuses, is turned into a teardown sent back along the
//                  part of its path already reserved.
//   teardown     - free the lanes it names on the link it came in on, look up
//                  where they led and send the teardown on with those lanes.
// The processor only acts when every output register it needs is empty;
// otherwise the bee waits in its FIFO (a stall) and the pointer moves on.
// Output registers hold a bee until the neighbour's FIFO accepts it.
//
// Data plane. sdm_switch moves the lanes of established circuits through the
// router with one cycle of latency, configured by flow_table.
//
// What the paper gives: the forward bee test sequence, the port codes, the
// port list reversal, the earliest-three rule, reservation by backward bees,
// release of refused and failed backward bees and the teardown packet. Packet
// transport, FIFO sizes, one-bee-per-cycle processing and the lane mapping are
// this design's own.
module bee_router
  import bee_pkg::*;
#(
  parameter int unsigned NX           = 8,
  parameter int unsigned NY           = 8,
  parameter int unsigned X            = 0,
  parameter int unsigned Y            = 0,
  parameter int unsigned FIFO_DEPTH   = 4,
  parameter int unsigned SEEN_ENTRIES = 8,
  parameter int unsigned SEEN_LIFE    = 256,
  parameter int unsigned TIMEOUT      = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  // bee links, indexed by port code
  input  logic            bin_valid_i  [NLINKS],
  input  bee_t            bin_bee_i    [NLINKS],
  output logic            bin_ready_o  [NLINKS],
  output logic            bout_valid_o [NLINKS],
  output bee_t            bout_bee_o   [NLINKS],
  input  logic            bout_ready_i [NLINKS],
  // SDM data links, indexed by port code
  input  lane_data_t      din_i        [NLINKS][LANES],
  input  lanes_t          dvalid_i     [NLINKS],
  output lane_data_t      dout_o       [NLINKS][LANES],
  output lanes_t          dvalid_o     [NLINKS],
  // local IP: connection requests
  input  logic            req_valid_i,
  input  coord_t          req_dst_i,
  input  logic [BW_W-1:0] req_bw_i,
  output logic            req_ready_o,
  input  logic            tear_i,
  output logic            conn_up_o,
  output logic            conn_fail_o,
  output lanes_t          conn_lanes_o,
  // local IP: data
  input  lane_data_t      ldin_i       [LANES],
  input  lanes_t          ldvalid_i,
  output lane_data_t      ldout_o      [LANES],
  output lanes_t          ldvalid_o,
  // observation
  output bee_ev_t         ev_o
);

  localparam coord_t HERE = '{x: COORD_W'(X), y: COORD_W'(Y)};

  // ---------------------------------------------------------------- inputs
  logic   f_push  [NPORTS];
  bee_t   f_data  [NPORTS];
  logic   f_ready [NPORTS];
  logic   f_pop   [NPORTS];
  logic   f_valid [NPORTS];
  bee_t   f_head  [NPORTS];

  logic   inj_valid, inj_ready;
  bee_t   inj_bee;

  always_comb begin
    for (int unsigned p = 0; p < NLINKS; p++) begin
      f_push[p]      = bin_valid_i[p];
      f_data[p]      = bin_bee_i[p];
      bin_ready_o[p] = f_ready[p];
    end
    f_push[P_L] = inj_valid;
    f_data[P_L] = inj_bee;
    inj_ready   = f_ready[P_L];
  end

  for (genvar p = 0; p < NPORTS; p++) begin : g_fifo
    bee_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push_i (f_push[p]),  .data_i (f_data[p]), .ready_o (f_ready[p]),
      .pop_i  (f_pop[p]),   .valid_o(f_valid[p]), .head_o (f_head[p])
    );
  end

  // ------------------------------------------------------------ selection
  logic [2:0] rr;
  logic       any_sel;
  logic [2:0] sel;
  bee_t       sel_bee;
  port_e      sel_port;

  always_comb begin
    any_sel = 1'b0;
    sel     = '0;
    for (int unsigned k = 0; k < NPORTS; k++) begin
      int unsigned p;
      p = (int'(rr) + k) % NPORTS;
      if (!any_sel && f_valid[p]) begin
        any_sel = 1'b1;
        sel     = 3'(p);
      end
    end
    sel_bee  = f_head[sel];
    sel_port = port_e'(sel);
  end

  // -------------------------------------------------------- sub-blocks
  logic        seen_upd;
  logic [1:0]  seen_count;
  fwd_action_e fwd_action;
  logic [3:0]  fwd_mask;
  plist_t      rev_plist;

  logic   res, rel;
  port_e  res_in_port, res_out_port, rel_in_port;
  lanes_t res_in_lanes, res_out_lanes, rel_in_lanes;
  logic   look_hit;
  port_e  look_out_port;
  lanes_t look_out_lanes;
  lanes_t busy [NPORTS];
  lanes_t used [NPORTS];
  xcfg_t  cfg  [NPORTS][LANES];

  logic            accept, accept_commit;
  logic [BW_W-1:0] accept_bw;
  lanes_t          accept_lanes;

  bee_seen_table #(.ENTRIES(SEEN_ENTRIES), .LIFE(SEEN_LIFE)) u_seen (
    .clk, .rst_n,
    .src_i (sel_bee.src), .dst_i (sel_bee.dst),
    .upd_i (seen_upd), .count_o (seen_count)
  );

  fwd_bee_decider #(.NX(NX), .NY(NY)) u_decide (
    .bee_i        (sel_bee),
    .here_i       (HERE),
    .in_port_i    (sel_port),
    .seen_count_i (seen_count),
    .in_free_i    (~busy[sel]),
    .action_o     (fwd_action),
    .out_mask_o   (fwd_mask)
  );

  port_list_reverser u_rev (
    .plist_i (sel_bee.plist), .hops_i (sel_bee.hop), .plist_o (rev_plist)
  );

  flow_table u_flow (
    .clk, .rst_n,
    .res_i (res), .res_in_port_i (res_in_port), .res_in_lanes_i (res_in_lanes),
    .res_out_port_i (res_out_port), .res_out_lanes_i (res_out_lanes),
    .rel_i (rel), .rel_in_port_i (rel_in_port), .rel_in_lanes_i (rel_in_lanes),
    .look_in_port_i (sel_port), .look_in_lanes_i (sel_bee.lanes),
    .look_hit_o (look_hit), .look_out_port_o (look_out_port),
    .look_out_lanes_o (look_out_lanes),
    .busy_o (busy), .used_o (used), .cfg_o (cfg)
  );

  bee_source_ctrl #(.TIMEOUT(TIMEOUT), .HOLDOFF(SEEN_LIFE + 1)) u_src (
    .clk, .rst_n,
    .here_i (HERE),
    .req_valid_i, .req_dst_i, .req_bw_i, .req_ready_o, .tear_i,
    .conn_up_o, .conn_fail_o, .conn_lanes_o,
    .inj_valid_o (inj_valid), .inj_bee_o (inj_bee), .inj_ready_i (inj_ready),
    .bwd_dst_i (sel_bee.dst),
    .accept_o (accept), .accept_bw_o (accept_bw),
    .accept_commit_i (accept_commit), .accept_lanes_i (accept_lanes)
  );

  // --------------------------------------------------------- bee processor
  logic [3:0] need;            // output registers the current bee writes
  bee_t       nb [NLINKS];     // what it writes into them
  logic       go;
  logic [3:0] out_busy;
  bee_ev_t    ev;              // events, before gating with go
  logic       do_res, do_rel, do_upd, do_accept;

  always_comb begin
    lanes_t a, b;
    port_e  i;
    bee_t   t;

    need          = '0;
    for (int unsigned p = 0; p < NLINKS; p++) nb[p] = sel_bee;
    ev            = '0;
    do_res        = 1'b0;
    do_rel        = 1'b0;
    do_upd        = 1'b0;
    do_accept     = 1'b0;
    res_in_port   = P_L;
    res_out_port  = P_L;
    res_in_lanes  = '0;
    res_out_lanes = '0;
    rel_in_port   = sel_port;
    rel_in_lanes  = sel_bee.lanes;
    accept_lanes  = '0;
    a             = '0;
    b             = '0;
    i             = P_L;
    t             = sel_bee;

    unique case (sel_bee.kind)
      BEE_FWD: begin
        do_upd = 1'b1;
        unique case (fwd_action)
          FA_BROADCAST: begin
            ev.fwd_broadcast = 1'b1;
            need = fwd_mask;
            for (int unsigned p = 0; p < NLINKS; p++) begin
              nb[p].hop   = sel_bee.hop + 1'b1;
              nb[p].plist = pl_set(sel_bee.plist, int'(sel_bee.hop), 2'(p));
            end
          end
          FA_TO_BACKWARD: begin
            a = pick_lanes(~busy[sel], int'(sel_bee.bw));
            b = pick_lanes(~used[P_L], int'(sel_bee.bw));
            if (sel_port != P_L && popcount(a) == int'(sel_bee.bw) &&
                popcount(b) == int'(sel_bee.bw)) begin
              ev.bwd_created = 1'b1;
              need[sel[1:0]] = 1'b1;
              t.kind  = BEE_BWD;
              t.hop   = HOP_W'(1);
              t.plist = rev_plist;
              t.lanes = a;
              nb[sel[1:0]]  = t;
              do_res        = 1'b1;
              res_in_port   = sel_port;
              res_in_lanes  = a;
              res_out_port  = P_L;
              res_out_lanes = b;
            end else begin
              ev.bwd_fail = 1'b1;
            end
          end
          FA_KILL_LATE: ev.fwd_kill_late = 1'b1;
          FA_KILL_SEEN: ev.fwd_kill_seen = 1'b1;
          FA_KILL_HOPS: ev.fwd_kill_hops = 1'b1;
          default:      ev.fwd_kill_bw   = 1'b1;
        endcase
      end

      BEE_BWD: begin
        if (sel_bee.src == HERE) begin
          a = pick_lanes(~busy[P_L], int'(sel_bee.bw));
          if (accept && popcount(a) == int'(sel_bee.bw)) begin
            ev.src_accept = 1'b1;
            do_accept     = 1'b1;
            accept_lanes  = a;
            do_res        = 1'b1;
            res_in_port   = P_L;
            res_in_lanes  = a;
            res_out_port  = sel_port;
            res_out_lanes = sel_bee.lanes;
          end else begin
            ev.src_release = 1'b1;
            need[sel[1:0]] = 1'b1;
            t.kind = BEE_TEAR;
            nb[sel[1:0]] = t;
          end
        end else begin
          i = port_e'({1'b0, pl_get(sel_bee.plist, int'(sel_bee.hop))});
          a = pick_lanes(~busy[i], int'(sel_bee.bw));
          if (popcount(a) == int'(sel_bee.bw)) begin
            ev.bwd_reserved = 1'b1;
            need[i[1:0]]  = 1'b1;
            t.hop   = sel_bee.hop + 1'b1;
            t.lanes = a;
            nb[i[1:0]]    = t;
            do_res        = 1'b1;
            res_in_port   = i;
            res_in_lanes  = a;
            res_out_port  = sel_port;
            res_out_lanes = sel_bee.lanes;
          end else begin
            ev.bwd_fail    = 1'b1;
            need[sel[1:0]] = 1'b1;
            t.kind = BEE_TEAR;
            nb[sel[1:0]] = t;
          end
        end
      end

      default: begin   // BEE_TEAR
        do_rel = 1'b1;
        if (look_hit) begin
          ev.tear_hop = 1'b1;
          if (look_out_port != P_L) begin
            need[look_out_port[1:0]] = 1'b1;
            t.lanes = look_out_lanes;
            nb[look_out_port[1:0]] = t;
          end
        end
      end
    endcase
  end

  always_comb begin
    for (int unsigned p = 0; p < NLINKS; p++) out_busy[p] = bout_valid_o[p];
    go            = any_sel && ((need & out_busy) == '0);
    res           = go && do_res;
    rel           = go && do_rel;
    seen_upd      = go && do_upd;
    accept_commit = go && do_accept;
    for (int unsigned p = 0; p < NPORTS; p++) f_pop[p] = go && (sel == 3'(p));
    ev_o              = go ? ev : '0;
    ev_o.stall        = any_sel && !go;
    ev_o.conn_timeout = conn_fail_o;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0;
      for (int unsigned p = 0; p < NLINKS; p++) begin
        bout_valid_o[p] <= 1'b0;
        bout_bee_o[p]   <= '0;
      end
    end else begin
      rr <= (rr == 3'(NPORTS - 1)) ? '0 : rr + 3'd1;
      for (int unsigned p = 0; p < NLINKS; p++)
        if (go && need[p]) begin
          bout_valid_o[p] <= 1'b1;
          bout_bee_o[p]   <= nb[p];
        end else if (bout_ready_i[p]) begin
          bout_valid_o[p] <= 1'b0;
        end
    end
  end

  // ------------------------------------------------------------ data plane
  lane_data_t sw_in   [NPORTS][LANES];
  lanes_t     sw_inv  [NPORTS];
  lane_data_t sw_out  [NPORTS][LANES];
  lanes_t     sw_outv [NPORTS];

  always_comb begin
    for (int unsigned p = 0; p < NLINKS; p++) begin
      sw_inv[p] = dvalid_i[p];
      for (int unsigned l = 0; l < LANES; l++) sw_in[p][l] = din_i[p][l];
    end
    sw_inv[P_L] = ldvalid_i;
    for (int unsigned l = 0; l < LANES; l++) sw_in[P_L][l] = ldin_i[l];
    for (int unsigned p = 0; p < NLINKS; p++) begin
      dvalid_o[p] = sw_outv[p];
      for (int unsigned l = 0; l < LANES; l++) dout_o[p][l] = sw_out[p][l];
    end
    ldvalid_o = sw_outv[P_L];
    for (int unsigned l = 0; l < LANES; l++) ldout_o[l] = sw_out[P_L][l];
  end

  sdm_switch u_sw (
    .clk, .rst_n,
    .cfg_i (cfg), .in_data_i (sw_in), .in_valid_i (sw_inv),
    .out_data_o (sw_out), .out_valid_o (sw_outv)
  );

  // A bee is only ever sent towards a neighbour that exists.
  for (genvar p = 0; p < NLINKS; p++) begin : g_chk
    localparam bit EXISTS = (p == 0) ? (Y + 1 < NY) : (p == 3) ? (Y > 0) :
                            (p == 2) ? (X + 1 < NX) : (X > 0);
    if (!EXISTS) begin : g_edge
      assert property (@(posedge clk) disable iff (!rst_n) !bout_valid_o[p]);
    end
  end

endmodule
