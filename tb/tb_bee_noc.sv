// tb_bee_noc: end-to-end test of a 4x4 bee-routed mesh.
//
// Sequence:
//   1. (0,0) -> (2,2), 1 lane: forward bees flood the mesh, three backward
//      bees come back, the first is accepted and the other two released.
//      A data stream is then checked word by word at the destination, and
//      its latency against the bounds set by the hop limit.
//   2. Teardown, then (0,0) -> (2,2) again with all 4 lanes: this only
//      succeeds if every lane the first connection and its released bees
//      held was freed. Backward bees sharing links now fail on the way.
//   3. While that circuit holds all lanes into (2,2): (3,0) -> (2,2) finds
//      no room at the destination and times out; (1,3) -> (3,3) with 2 lanes
//      succeeds and carries data at the same time.
//      The nodes next to (0,0) then ask for connections: the bee one of them
//      sends over the busy circuit's second link is killed for bandwidth.
//   4. Teardowns, then (1,0) -> (0,0), whose bees quickly reach the hop limit.
//   5. Four connections between opposite corners requested in the same
//      cycle; their floods contend for the routers' output registers.
// Every mechanism of the routing algorithm is counted from the routers'
// event outputs; one that never happened counts as a failure.
module tb_bee_noc;
  import bee_pkg::*;

  localparam int NX = 4, NY = 4, NODES = NX * NY;
  localparam int TIMEOUT = 400, LIFE = 128;

  logic clk = 0, rst_n = 0;
  logic            req_valid  [NODES];
  coord_t          req_dst    [NODES];
  logic [BW_W-1:0] req_bw     [NODES];
  logic            req_ready  [NODES];
  logic            tear       [NODES];
  logic            conn_up    [NODES];
  logic            conn_fail  [NODES];
  lanes_t          conn_lanes [NODES];
  lane_data_t      ldin       [NODES][LANES];
  lanes_t          ldvalid    [NODES];
  lane_data_t      ldout      [NODES][LANES];
  lanes_t          ldovalid   [NODES];
  bee_ev_t         ev         [NODES];

  int checks = 0, failures = 0;
  longint cycle = 0;

  bee_noc #(.NX(NX), .NY(NY), .SEEN_LIFE(LIFE), .TIMEOUT(TIMEOUT)) dut (
    .clk, .rst_n,
    .req_valid_i(req_valid), .req_dst_i(req_dst), .req_bw_i(req_bw), .req_ready_o(req_ready),
    .tear_i(tear), .conn_up_o(conn_up), .conn_fail_o(conn_fail), .conn_lanes_o(conn_lanes),
    .ldin_i(ldin), .ldvalid_i(ldvalid), .ldout_o(ldout), .ldvalid_o(ldovalid), .ev_o(ev));

  always #5 clk = ~clk;

  // ------------------------------------------------------------ event counts
  localparam int NEV = 13;
  int evc [NEV];
  string evn [NEV] = '{"fwd_broadcast", "fwd_kill_seen", "fwd_kill_hops", "fwd_kill_bw",
                       "fwd_kill_late", "bwd_created", "bwd_reserved", "bwd_fail",
                       "src_accept", "src_release", "tear_hop", "stall", "conn_timeout"};

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n)
      for (int n = 0; n < NODES; n++) begin
        logic [NEV-1:0] v;
        v = ev[n];
        for (int e = 0; e < NEV; e++) if (v[NEV-1-e]) evc[e]++;
      end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  function automatic int node(int x, int y);
    return y * NX + x;
  endfunction

  function automatic coord_t c(int x, int y);
    coord_t r;
    r.x = COORD_W'(x);
    r.y = COORD_W'(y);
    return r;
  endfunction

  // Request a connection; returns 1 when it came up, 0 when it failed.
  task automatic connect(int sx, int sy, int dx, int dy, int bw, output bit up);
    int s, waited;
    s = node(sx, sy);
    @(negedge clk);
    waited = 0;
    while (!req_ready[s] && waited < 4 * LIFE) begin
      @(negedge clk);
      waited++;
    end
    req_valid[s] = 1; req_dst[s] = c(dx, dy); req_bw[s] = BW_W'(bw);
    @(negedge clk);
    req_valid[s] = 0;
    waited = 0;
    while (!conn_up[s] && !conn_fail[s] && waited < 2 * TIMEOUT) begin
      @(negedge clk);
      waited++;
    end
    up = conn_up[s];
    $display("connect (%0d,%0d)->(%0d,%0d) bw %0d: %s after %0d cycles, lanes %b",
             sx, sy, dx, dy, bw, up ? "up" : "failed", waited, conn_lanes[s]);
    // Let the refused backward bees' teardowns finish before going on.
    repeat (60) @(negedge clk);
  endtask

  task automatic teardown(int sx, int sy);
    int s;
    s = node(sx, sy);
    @(negedge clk);
    tear[s] = 1;
    @(negedge clk);
    tear[s] = 0;
    repeat (60) @(negedge clk);
  endtask

  // Send n words on the circuit of source s and check them at destination d.
  // The word on the k-th lane of the circuit is {k, sequence number}; it must
  // show up on the k-th lane the destination delivers, in order.
  task automatic stream(int sx, int sy, int dx, int dy, int n, int bw);
    int s, d, got, lat, min_lat, max_lat, ddx, ddy;
    longint t0;
    s = node(sx, sy);
    d = node(dx, dy);
    ddx = sx - dx; ddy = sy - dy;
    min_lat = (ddx < 0 ? -ddx : ddx) + (ddy < 0 ? -ddy : ddy) + 1;
    max_lat = $ceil(2.0 * $sqrt(real'(ddx * ddx + ddy * ddy))) + 1;
    got = 0;
    lat = -1;
    t0  = cycle;
    fork
      begin
        for (int w = 0; w < n; w++) begin
          int k;
          k = 0;
          ldvalid[s] = conn_lanes[s];
          for (int l = 0; l < LANES; l++)
            if (conn_lanes[s][l]) begin
              ldin[s][l] = {2'(k), 6'(w)};
              k++;
            end
          @(negedge clk);
        end
        ldvalid[s] = '0;
      end
      begin
        int waited;
        waited = 0;
        while (got < n && waited < n + 50) begin
          @(posedge clk);
          #1;
          waited++;
          if (ldovalid[d] != '0) begin
            int k;
            if (lat < 0) lat = int'(cycle - t0);
            k = 0;
            chk(popcount(ldovalid[d]) == bw, "lane count at destination");
            for (int l = 0; l < LANES; l++)
              if (ldovalid[d][l]) begin
                chk(ldout[d][l] == {2'(k), 6'(got)}, $sformatf("word %0d lane %0d", got, l));
                k++;
              end
            got++;
          end
        end
      end
    join
    chk(got == n, $sformatf("all %0d words delivered (got %0d)", n, got));
    chk(lat >= min_lat && lat <= max_lat,
        $sformatf("latency %0d within [%0d,%0d]", lat, min_lat, max_lat));
  endtask

  initial begin
    bit up;
    for (int n = 0; n < NODES; n++) begin
      req_valid[n] = 0; req_dst[n] = '0; req_bw[n] = '0; tear[n] = 0; ldvalid[n] = '0;
      for (int l = 0; l < LANES; l++) ldin[n][l] = '0;
    end
    for (int e = 0; e < NEV; e++) evc[e] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. one lane, three backward bees, two released
    connect(0, 0, 2, 2, 1, up);
    chk(up, "connection 1 up");
    chk(popcount(conn_lanes[node(0, 0)]) == 1, "connection 1 holds one local lane");
    repeat (100) @(negedge clk);
    chk(evc[5] == 3, $sformatf("three backward bees created (%0d)", evc[5]));
    chk(evc[9] == 2, $sformatf("two backward bees released (%0d)", evc[9]));
    stream(0, 0, 2, 2, 30, 1);
    teardown(0, 0);

    // 2. all four lanes, after the first connection was freed
    connect(0, 0, 2, 2, 4, up);
    chk(up, "connection 2 up with all lanes: everything was released");
    chk(conn_lanes[node(0, 0)] == 4'b1111, "connection 2 holds four local lanes");

    // 3. destination full, and a second circuit alongside
    connect(3, 0, 2, 2, 1, up);
    chk(!up, "connection to a full destination times out");
    connect(1, 3, 3, 3, 2, up);
    chk(up, "independent connection up");
    // The first hop node of the 4-lane circuit floods: its bee on the
    // circuit's second link finds no free lane there.
    connect(1, 0, 3, 3, 1, up);
    chk(up, "connection from (1,0) up");
    connect(0, 1, 3, 3, 1, up);
    chk(up, "connection from (0,1) up: (3,3) now delivers on all four lanes");
    fork
      stream(0, 0, 2, 2, 20, 4);
      stream(1, 3, 3, 3, 20, 2);
    join
    teardown(0, 0);
    teardown(1, 3);
    teardown(1, 0);
    teardown(0, 1);

    // 4. short connection, bees beyond the hop limit
    connect(1, 0, 0, 0, 2, up);
    chk(up, "short connection up");
    stream(1, 0, 0, 0, 10, 2);
    teardown(1, 0);

    // 5. four corners at once: floods cross and compete for output registers
    begin
      bit u0, u1, u2, u3;
      fork
        connect(0, 0, 3, 3, 1, u0);
        connect(3, 0, 0, 3, 1, u1);
        connect(0, 3, 3, 0, 1, u2);
        connect(3, 3, 0, 0, 1, u3);
      join
      chk(u0 && u1 && u2 && u3, "four simultaneous connections up");
      fork
        stream(0, 0, 3, 3, 8, 1);
        stream(3, 0, 0, 3, 8, 1);
        stream(0, 3, 3, 0, 8, 1);
        stream(3, 3, 0, 0, 8, 1);
      join
      teardown(0, 0);
      teardown(3, 0);
      teardown(0, 3);
      teardown(3, 3);
    end
    repeat (50) @(negedge clk);

    for (int e = 0; e < NEV; e++) begin
      $display("  %-14s %0d", evn[e], evc[e]);
      chk(evc[e] > 0, $sformatf("mechanism %s happened", evn[e]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
