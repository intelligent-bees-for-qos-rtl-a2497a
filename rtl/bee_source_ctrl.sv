// bee_source_ctrl: the source-node side of one connection.
//
// When the local IP asks for a connection (req_valid_i with destination and
// required bandwidth in lanes) the controller injects one forward bee (hop 0,
// empty port list) into its own router through the local port; the router
// then copies it to all neighbours. The controller waits for a backward bee
// of that flow. The router asks accept_o for each backward bee that reaches
// its source: only the first one of the pending flow is accepted
// (accept_commit_i, with the local lanes the router reserved for the IP);
// every other one is refused and the router releases its path. After the IP
// has sent its message it pulses tear_i, and the controller injects a
// teardown packet that frees the circuit hop by hop.
//
// States: IDLE -> LAUNCH (forward bee waiting for the local input buffer) ->
// WAIT -> UP -> TEAR (teardown waiting for the buffer) -> HOLD -> IDLE. If no
// backward bee comes back within TIMEOUT cycles, WAIT ends with conn_fail_o
// and goes to HOLD. HOLD waits HOLDOFF cycles before a new request is taken,
// so that the routers' memory of the last flood (bee_seen_table, which
// forgets a flow after its lifetime) cannot kill the bees of a new request
// between the same two nodes. One connection at a time per node, the timeout
// and the hold-off are this design's choices.
module bee_source_ctrl
  import bee_pkg::*;
#(
  parameter int unsigned TIMEOUT = 1024,
  parameter int unsigned HOLDOFF = 257
) (
  input  logic             clk,
  input  logic             rst_n,
  input  coord_t           here_i,
  // local IP
  input  logic             req_valid_i,
  input  coord_t           req_dst_i,
  input  logic [BW_W-1:0]  req_bw_i,
  output logic             req_ready_o,
  input  logic             tear_i,
  output logic             conn_up_o,
  output logic             conn_fail_o,    // one-cycle pulse
  output lanes_t           conn_lanes_o,   // local lanes the IP drives
  // injection into the router's local input buffer
  output logic             inj_valid_o,
  output bee_t             inj_bee_o,
  input  logic             inj_ready_i,
  // backward bee arrival at this (source) node
  input  coord_t           bwd_dst_i,
  output logic             accept_o,
  output logic [BW_W-1:0]  accept_bw_o,
  input  logic             accept_commit_i,
  input  lanes_t           accept_lanes_i
);

  typedef enum logic [2:0] {S_IDLE, S_LAUNCH, S_WAIT, S_UP, S_TEAR, S_HOLD} state_e;

  localparam int unsigned TW = $clog2(((TIMEOUT > HOLDOFF) ? TIMEOUT : HOLDOFF) + 1);

  state_e          state;
  coord_t          dst_q;
  logic [BW_W-1:0] bw_q;
  lanes_t          lanes_q;
  logic [TW-1:0]   timer;

  assign req_ready_o  = (state == S_IDLE);
  assign conn_up_o    = (state == S_UP);
  assign conn_lanes_o = lanes_q;
  assign accept_o     = (state == S_WAIT) && (bwd_dst_i == dst_q);
  assign accept_bw_o  = bw_q;
  assign inj_valid_o  = (state == S_LAUNCH) || (state == S_TEAR);

  always_comb begin
    inj_bee_o       = '0;
    inj_bee_o.src   = here_i;
    inj_bee_o.dst   = dst_q;
    inj_bee_o.bw    = bw_q;
    if (state == S_TEAR) begin
      inj_bee_o.kind  = BEE_TEAR;
      inj_bee_o.lanes = lanes_q;
    end else begin
      inj_bee_o.kind  = BEE_FWD;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      dst_q       <= '0;
      bw_q        <= '0;
      lanes_q     <= '0;
      timer       <= '0;
      conn_fail_o <= 1'b0;
    end else begin
      conn_fail_o <= 1'b0;
      unique case (state)
        S_IDLE:
          if (req_valid_i) begin
            dst_q <= req_dst_i;
            bw_q  <= req_bw_i;
            state <= S_LAUNCH;
          end
        S_LAUNCH:
          if (inj_ready_i) begin
            timer <= TW'(TIMEOUT);
            state <= S_WAIT;
          end
        S_WAIT:
          if (accept_commit_i) begin
            lanes_q <= accept_lanes_i;
            state   <= S_UP;
          end else if (timer == '0) begin
            conn_fail_o <= 1'b1;
            timer       <= TW'(HOLDOFF - 1);
            state       <= S_HOLD;
          end else begin
            timer <= timer - 1'b1;
          end
        S_UP:
          if (tear_i) state <= S_TEAR;
        S_TEAR:
          if (inj_ready_i) begin
            lanes_q <= '0;
            timer   <= TW'(HOLDOFF - 1);
            state   <= S_HOLD;
          end
        S_HOLD:
          if (timer == '0) state <= S_IDLE;
          else             timer <= timer - 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end

  // The router may only commit an accept it was offered.
  assert property (@(posedge clk) disable iff (!rst_n) accept_commit_i |-> accept_o);

endmodule
