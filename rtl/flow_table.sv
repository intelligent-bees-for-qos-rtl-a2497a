// flow_table: the flow table and SDM lane bookkeeping of one router.
//
// Every link is split into LANES lanes (Spatial Division Multiplexing). A
// virtual circuit needing bandwidth B holds B lanes on each link it crosses.
// The table keeps, per output port and output lane, which input port and
// input lane feed it (xcfg_t); this is the node's flow table and it directly
// configures the data switch (sdm_switch). Lane occupancy of the links coming
// into the router (busy_o, per input port) is what a forward bee's bandwidth
// test reads, and what a backward bee reserves.
//
// Operations, all taking effect at the next clock edge:
//   reserve  (res_*): map the set lanes of res_in_lanes_i on res_in_port_i, in
//            ascending order, onto the set lanes of res_out_lanes_i on
//            res_out_port_i, and mark the input lanes busy. Both masks must
//            hold the same number of lanes and the input lanes must be free.
//   release  (rel_*): remove every entry fed by a lane of rel_in_lanes_i on
//            rel_in_port_i and free those input lanes (teardown).
//   lookup   (look_*, combinational): the output port and lanes fed by the
//            given input lanes, so that a teardown can travel on.
// A release and a reserve in the same cycle are applied release first.
// The table organisation is this design's; the paper names the flow table and
// says that backward bees reserve link bandwidth and the teardown removes the
// flow.
module flow_table
  import bee_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   res_i,
  input  port_e  res_in_port_i,
  input  lanes_t res_in_lanes_i,
  input  port_e  res_out_port_i,
  input  lanes_t res_out_lanes_i,
  input  logic   rel_i,
  input  port_e  rel_in_port_i,
  input  lanes_t rel_in_lanes_i,
  input  port_e  look_in_port_i,
  input  lanes_t look_in_lanes_i,
  output logic   look_hit_o,
  output port_e  look_out_port_o,
  output lanes_t look_out_lanes_o,
  output lanes_t busy_o     [NPORTS],   // input lanes in use
  output lanes_t used_o     [NPORTS],   // output lanes in use
  output xcfg_t  cfg_o      [NPORTS][LANES]
);

  xcfg_t  cfg  [NPORTS][LANES];
  lanes_t busy [NPORTS];
  logic [LANE_IW-1:0] in_idx [LANES];   // k-th set lane of res_in_lanes_i
  logic [LANE_IW-1:0] out_rank [LANES]; // rank of each set lane of res_out_lanes_i

  always_comb begin
    int unsigned k;
    k = 0;
    for (int unsigned i = 0; i < LANES; i++) in_idx[i] = '0;
    for (int unsigned i = 0; i < LANES; i++)
      if (res_in_lanes_i[i]) begin
        in_idx[k[LANE_IW-1:0]] = LANE_IW'(i);
        k++;
      end
    k = 0;
    for (int unsigned i = 0; i < LANES; i++) begin
      out_rank[i] = k[LANE_IW-1:0];
      if (res_out_lanes_i[i]) k++;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned p = 0; p < NPORTS; p++) begin
        busy[p] <= '0;
        for (int unsigned l = 0; l < LANES; l++) cfg[p][l] <= '0;
      end
    end else begin
      if (rel_i) begin
        busy[rel_in_port_i] <= busy[rel_in_port_i] & ~rel_in_lanes_i;
        for (int unsigned p = 0; p < NPORTS; p++)
          for (int unsigned l = 0; l < LANES; l++)
            if (cfg[p][l].valid && cfg[p][l].in_port == rel_in_port_i &&
                rel_in_lanes_i[cfg[p][l].in_lane])
              cfg[p][l].valid <= 1'b0;
      end
      if (res_i) begin
        busy[res_in_port_i] <= (rel_i && rel_in_port_i == res_in_port_i)
                               ? ((busy[res_in_port_i] & ~rel_in_lanes_i) | res_in_lanes_i)
                               : (busy[res_in_port_i] | res_in_lanes_i);
        for (int unsigned l = 0; l < LANES; l++)
          if (res_out_lanes_i[l])
            cfg[res_out_port_i][l] <= '{valid: 1'b1, in_port: res_in_port_i,
                                        in_lane: in_idx[out_rank[l]]};
      end
    end
  end

  always_comb begin
    look_hit_o       = 1'b0;
    look_out_port_o  = P_L;
    look_out_lanes_o = '0;
    for (int unsigned p = 0; p < NPORTS; p++)
      for (int unsigned l = 0; l < LANES; l++)
        if (cfg[p][l].valid && cfg[p][l].in_port == look_in_port_i &&
            look_in_lanes_i[cfg[p][l].in_lane]) begin
          look_hit_o          = 1'b1;
          look_out_port_o     = port_e'(p);
          look_out_lanes_o[l] = 1'b1;
        end
  end

  always_comb begin
    for (int unsigned p = 0; p < NPORTS; p++) begin
      busy_o[p] = busy[p];
      for (int unsigned l = 0; l < LANES; l++) begin
        used_o[p][l] = cfg[p][l].valid;
        cfg_o[p][l]  = cfg[p][l];
      end
    end
  end

  // A reservation must only take lanes that are free and map equal counts.
  assert property (@(posedge clk) disable iff (!rst_n)
    res_i |-> ((busy[res_in_port_i] & res_in_lanes_i) == '0 &&
               popcount(res_in_lanes_i) == popcount(res_out_lanes_i)));

endmodule
