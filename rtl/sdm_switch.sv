// sdm_switch: the data plane of a router, a lane-granular circuit switch.
//
// Every port carries LANES lanes of LANE_W wires (Spatial Division
// Multiplexing: a virtual circuit owns a subset of a link's wires). For each
// output port and lane the flow table entry cfg_i names the input port and
// lane that drives it; the switch registers the selected lane, so data takes
// one clock cycle per router. Lanes with no valid entry output zero with
// valid low. There is no arbitration and no buffering: the reservation made
// by the backward bee guarantees that every lane has at most one user.
// The one-cycle hop and the per-lane valid bit are this design's choices.
module sdm_switch
  import bee_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  xcfg_t      cfg_i      [NPORTS][LANES],
  input  lane_data_t in_data_i  [NPORTS][LANES],
  input  lanes_t     in_valid_i [NPORTS],
  output lane_data_t out_data_o [NPORTS][LANES],
  output lanes_t     out_valid_o[NPORTS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned p = 0; p < NPORTS; p++) begin
        out_valid_o[p] <= '0;
        for (int unsigned l = 0; l < LANES; l++) out_data_o[p][l] <= '0;
      end
    end else begin
      for (int unsigned p = 0; p < NPORTS; p++)
        for (int unsigned l = 0; l < LANES; l++)
          if (cfg_i[p][l].valid) begin
            out_data_o[p][l]  <= in_data_i[cfg_i[p][l].in_port][cfg_i[p][l].in_lane];
            out_valid_o[p][l] <= in_valid_i[cfg_i[p][l].in_port][cfg_i[p][l].in_lane];
          end else begin
            out_data_o[p][l]  <= '0;
            out_valid_o[p][l] <= 1'b0;
          end
    end
  end

endmodule
