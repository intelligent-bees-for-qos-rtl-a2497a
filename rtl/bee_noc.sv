// bee_noc: a NX x NY mesh network-on-chip whose guaranteed-bandwidth
// connections are found by bee-inspired QoS routing and carried on SDM
// virtual circuits.
//
// Node n = y*NX + x sits at column x (growing eastwards) and row y (growing
// southwards); node 0 is the top-left corner. Neighbouring routers are joined
// by two links, one per direction, each made of a bee (control) channel with
// valid/ready flow control and an SDM data channel of LANES lanes of LANE_W
// wires. The input port p of a router is fed by output port p^3 (the opposite
// code) of the neighbour in direction p. Ports at the mesh edge are tied off.
//
// Each node's IP block sees its router's local interface, brought out here as
// arrays indexed by node: a connection request (destination, bandwidth in
// lanes), the connection status and the local lanes it must drive, a
// teardown strobe, its data lanes in and out, and the router's event pulses.
// A connection is set up in a few tens of cycles (forward bees spread out,
// three backward bees come back), after which data crosses each router in
// one cycle. The 8x8 default follows the mesh of the paper's path example.
module bee_noc
  import bee_pkg::*;
#(
  parameter int unsigned NX           = 8,
  parameter int unsigned NY           = 8,
  parameter int unsigned FIFO_DEPTH   = 4,
  parameter int unsigned SEEN_ENTRIES = 8,
  parameter int unsigned SEEN_LIFE    = 256,
  parameter int unsigned TIMEOUT      = 1024,
  localparam int unsigned NODES       = NX * NY
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid_i  [NODES],
  input  coord_t          req_dst_i    [NODES],
  input  logic [BW_W-1:0] req_bw_i     [NODES],
  output logic            req_ready_o  [NODES],
  input  logic            tear_i       [NODES],
  output logic            conn_up_o    [NODES],
  output logic            conn_fail_o  [NODES],
  output lanes_t          conn_lanes_o [NODES],
  input  lane_data_t      ldin_i       [NODES][LANES],
  input  lanes_t          ldvalid_i    [NODES],
  output lane_data_t      ldout_o      [NODES][LANES],
  output lanes_t          ldvalid_o    [NODES],
  output bee_ev_t         ev_o         [NODES]
);

  // Outputs of every router, indexed by node and port code.
  logic       bout_valid [NODES][NLINKS];
  bee_t       bout_bee   [NODES][NLINKS];
  logic       bin_ready  [NODES][NLINKS];
  lane_data_t dout       [NODES][NLINKS][LANES];
  lanes_t     dvalid     [NODES][NLINKS];

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int N = y * NX + x;

      logic       bin_valid  [NLINKS];
      bee_t       bin_bee    [NLINKS];
      logic       bout_ready [NLINKS];
      lane_data_t din        [NLINKS][LANES];
      lanes_t     dvalid_in  [NLINKS];

      // Neighbour in direction p (south, west, east, north) and whether it exists.
      for (genvar p = 0; p < NLINKS; p++) begin : g_port
        localparam int NXX = (p == 1) ? x - 1 : (p == 2) ? x + 1 : x;
        localparam int NYY = (p == 0) ? y + 1 : (p == 3) ? y - 1 : y;
        localparam bit EX  = NXX >= 0 && NXX < int'(NX) && NYY >= 0 && NYY < int'(NY);
        localparam int M   = EX ? NYY * int'(NX) + NXX : 0;
        localparam int Q   = p ^ 3;
        if (EX) begin : g_link
          assign bin_valid[p]  = bout_valid[M][Q];
          assign bin_bee[p]    = bout_bee[M][Q];
          assign bout_ready[p] = bin_ready[M][Q];
          assign din[p]        = dout[M][Q];
          assign dvalid_in[p]  = dvalid[M][Q];
        end else begin : g_edge
          assign bin_valid[p]  = 1'b0;
          assign bin_bee[p]    = '0;
          assign bout_ready[p] = 1'b1;
          for (genvar l = 0; l < LANES; l++) begin : g_l
            assign din[p][l] = '0;
          end
          assign dvalid_in[p]  = '0;
        end
      end

      bee_router #(
        .NX (NX), .NY (NY), .X (x), .Y (y),
        .FIFO_DEPTH (FIFO_DEPTH), .SEEN_ENTRIES (SEEN_ENTRIES),
        .SEEN_LIFE (SEEN_LIFE), .TIMEOUT (TIMEOUT)
      ) u_router (
        .clk, .rst_n,
        .bin_valid_i  (bin_valid),
        .bin_bee_i    (bin_bee),
        .bin_ready_o  (bin_ready[N]),
        .bout_valid_o (bout_valid[N]),
        .bout_bee_o   (bout_bee[N]),
        .bout_ready_i (bout_ready),
        .din_i        (din),
        .dvalid_i     (dvalid_in),
        .dout_o       (dout[N]),
        .dvalid_o     (dvalid[N]),
        .req_valid_i  (req_valid_i[N]),
        .req_dst_i    (req_dst_i[N]),
        .req_bw_i     (req_bw_i[N]),
        .req_ready_o  (req_ready_o[N]),
        .tear_i       (tear_i[N]),
        .conn_up_o    (conn_up_o[N]),
        .conn_fail_o  (conn_fail_o[N]),
        .conn_lanes_o (conn_lanes_o[N]),
        .ldin_i       (ldin_i[N]),
        .ldvalid_i    (ldvalid_i[N]),
        .ldout_o      (ldout_o[N]),
        .ldvalid_o    (ldvalid_o[N]),
        .ev_o         (ev_o[N])
      );
    end
  end

endmodule
