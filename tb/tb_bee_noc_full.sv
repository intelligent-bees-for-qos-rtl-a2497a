// tb_bee_noc_full: the network at its default size, an 8x8 mesh with
// 4 lanes of 8 wires per link, run through complete operations: the
// corner-to-corner connection of the example mesh with two lanes (setup by
// forward and backward bees, a checked data stream, latency within the hop
// limit), a second crossing connection carried at the same time, teardowns,
// and a reconnection that needs every lane to have been released.
module tb_bee_noc_full;
  import bee_pkg::*;

  localparam int NX = 8, NY = 8, NODES = NX * NY;
  localparam int TIMEOUT = 1024, LIFE = 256;   // the top's defaults

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

  bee_noc dut (
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

    // The corner-to-corner connection of the 8x8 example, two lanes.
    connect(0, 0, 7, 7, 2, up);
    chk(up, "(0,0)->(7,7) up");
    chk(popcount(conn_lanes[node(0, 0)]) == 2, "two local lanes");
    chk(evc[5] >= 1 && evc[5] <= 3, $sformatf("1 to 3 backward bees created (%0d)", evc[5]));
    stream(0, 0, 7, 7, 40, 2);
    // A second, crossing connection at the same time.
    connect(7, 0, 0, 7, 3, up);
    chk(up, "(7,0)->(0,7) up");
    fork
      stream(0, 0, 7, 7, 20, 2);
      stream(7, 0, 0, 7, 20, 3);
    join
    teardown(0, 0);
    teardown(7, 0);
    // Everything released: the full link width is available again.
    connect(0, 0, 7, 7, 4, up);
    chk(up, "(0,0)->(7,7) up again with all four lanes");
    stream(0, 0, 7, 7, 10, 4);
    teardown(0, 0);
    repeat (50) @(negedge clk);

    for (int e = 0; e < NEV; e++) $display("  %-14s %0d", evn[e], evc[e]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
