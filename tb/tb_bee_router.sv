// tb_bee_router: one router at (1,1) of a 3x3 mesh, its four neighbours and
// its IP played by the testbench. Checks, with expected packets worked out
// by hand:
//   - a forward bee is copied to the three other neighbours with the hop
//     counter incremented and the output's code appended to its port list;
//   - a second bee of the same flow is killed;
//   - at the destination a forward bee becomes a backward bee with the
//     reversed, inverted port list, and the reserved lanes carry data to the
//     local output;
//   - a backward bee passing through reserves lanes and the data lanes are
//     switched accordingly; a teardown frees them and travels on;
//   - as a source the router floods its own forward bee, accepts the first
//     backward bee of the flow and releases the second.
module tb_bee_router;
  import bee_pkg::*;

  logic clk = 0, rst_n = 0;
  logic       bin_valid  [NLINKS];
  bee_t       bin_bee    [NLINKS];
  logic       bin_ready  [NLINKS];
  logic       bout_valid [NLINKS];
  bee_t       bout_bee   [NLINKS];
  logic       bout_ready [NLINKS];
  lane_data_t din        [NLINKS][LANES];
  lanes_t     dvalid     [NLINKS];
  lane_data_t dout       [NLINKS][LANES];
  lanes_t     dovalid    [NLINKS];
  logic req_valid, req_ready, tear, conn_up, conn_fail;
  coord_t req_dst;
  logic [BW_W-1:0] req_bw;
  lanes_t conn_lanes, ldvalid, ldovalid;
  lane_data_t ldin [LANES];
  lane_data_t ldout [LANES];
  bee_ev_t ev;

  // Bees seen on each output during the last collect() window.
  int   got_n   [NLINKS];
  bee_t got_bee [NLINKS];
  int checks = 0, failures = 0;

  bee_router #(.NX(3), .NY(3), .X(1), .Y(1)) dut (
    .clk, .rst_n,
    .bin_valid_i(bin_valid), .bin_bee_i(bin_bee), .bin_ready_o(bin_ready),
    .bout_valid_o(bout_valid), .bout_bee_o(bout_bee), .bout_ready_i(bout_ready),
    .din_i(din), .dvalid_i(dvalid), .dout_o(dout), .dvalid_o(dovalid),
    .req_valid_i(req_valid), .req_dst_i(req_dst), .req_bw_i(req_bw), .req_ready_o(req_ready),
    .tear_i(tear), .conn_up_o(conn_up), .conn_fail_o(conn_fail), .conn_lanes_o(conn_lanes),
    .ldin_i(ldin), .ldvalid_i(ldvalid), .ldout_o(ldout), .ldvalid_o(ldovalid), .ev_o(ev));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic coord_t c(int x, int y);
    coord_t r;
    r.x = COORD_W'(x);
    r.y = COORD_W'(y);
    return r;
  endfunction

  function automatic bee_t mk(bee_kind_e k, coord_t s, coord_t d, int hop, int bw,
                              plist_t pl, lanes_t lanes);
    bee_t b;
    b.kind = k; b.src = s; b.dst = d; b.hop = HOP_W'(hop); b.bw = BW_W'(bw);
    b.plist = pl; b.lanes = lanes;
    return b;
  endfunction

  function automatic plist_t pl(int n, pcode_t c0, pcode_t c1 = 0, pcode_t c2 = 0);
    plist_t r;
    r = '0;
    if (n > 0) r = pl_set(r, 0, c0);
    if (n > 1) r = pl_set(r, 1, c1);
    if (n > 2) r = pl_set(r, 2, c2);
    return r;
  endfunction

  // Offer a bee on input port p for one accepted transfer.
  task automatic send(int p, bee_t b);
    @(negedge clk);
    bin_valid[p] = 1; bin_bee[p] = b;
    @(negedge clk);
    bin_valid[p] = 0;
  endtask

  // Record what leaves on every output during n cycles.
  task automatic collect(int n);
    for (int p = 0; p < NLINKS; p++) got_n[p] = 0;
    repeat (n) begin
      @(posedge clk);
      #1;
      for (int p = 0; p < NLINKS; p++)
        if (bout_valid[p]) begin
          got_n[p]++;
          got_bee[p] = bout_bee[p];
        end
    end
  endtask

  // Data word on lane l of input port p (4 = local) in the next cycle.
  task automatic drive(int p, lanes_t lanes, lane_data_t base);
    @(negedge clk);
    for (int l = 0; l < LANES; l++) begin
      if (p == 4) ldin[l] = base + 8'(l); else din[p][l] = base + 8'(l);
    end
    if (p == 4) ldvalid = lanes; else dvalid[p] = lanes;
    @(negedge clk);
    if (p == 4) ldvalid = '0; else dvalid[p] = '0;
  endtask

  initial begin
    bee_t b;
    for (int p = 0; p < NLINKS; p++) begin
      bin_valid[p] = 0; bin_bee[p] = '0; bout_ready[p] = 1; dvalid[p] = '0;
      for (int l = 0; l < LANES; l++) din[p][l] = '0;
    end
    req_valid = 0; req_dst = '0; req_bw = '0; tear = 0; ldvalid = '0;
    for (int l = 0; l < LANES; l++) ldin[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. Forward bee (0,1)->(2,2) arriving from the west after one east hop.
    b = mk(BEE_FWD, c(0, 1), c(2, 2), 1, 2, pl(1, 2'b10), '0);
    fork send(P_W, b); collect(8); join
    chk(got_n[P_W] == 0, "no copy back to the west");
    chk(got_n[P_S] == 1 && got_bee[P_S] == mk(BEE_FWD, c(0, 1), c(2, 2), 2, 2, pl(2, 2'b10, 2'b00), '0),
        "copy to the south with code 00 appended");
    chk(got_n[P_E] == 1 && got_bee[P_E] == mk(BEE_FWD, c(0, 1), c(2, 2), 2, 2, pl(2, 2'b10, 2'b10), '0),
        "copy to the east with code 10 appended");
    chk(got_n[P_N] == 1 && got_bee[P_N] == mk(BEE_FWD, c(0, 1), c(2, 2), 2, 2, pl(2, 2'b10, 2'b11), '0),
        "copy to the north with code 11 appended");

    // 2. The same flow again, from the north: killed.
    b = mk(BEE_FWD, c(0, 1), c(2, 2), 3, 2, pl(3, 2'b11, 2'b10, 2'b00), '0);
    fork send(P_N, b); collect(8); join
    chk(got_n[P_S] + got_n[P_E] + got_n[P_W] + got_n[P_N] == 0, "repeated flow killed");

    // 3. Destination: (0,0) -> (1,1) via (1,0): codes east, south; arrives from the north.
    b = mk(BEE_FWD, c(0, 0), c(1, 1), 2, 2, pl(2, 2'b10, 2'b00), '0);
    fork send(P_N, b); collect(8); join
    chk(got_n[P_N] == 1 && got_bee[P_N] ==
        mk(BEE_BWD, c(0, 0), c(1, 1), 1, 2, pl(2, 2'b11, 2'b01), 4'b0011),
        "backward bee: route north, west; lanes 0,1 of the north link");
    chk(got_n[P_S] + got_n[P_E] + got_n[P_W] == 0, "nothing else sent");
    fork drive(P_N, 4'b1111, 8'h40); begin @(negedge clk); @(posedge clk); #1;
      chk(ldovalid == 4'b0011 && ldout[0] == 8'h40 && ldout[1] == 8'h41,
          "north lanes 0,1 delivered to local lanes 0,1 one cycle later"); end join

    // 4. Backward bee (0,1)<-(2,1) passing from east to west, 1 lane; the east
    //    neighbour reserved lane 2 of our east output.
    b = mk(BEE_BWD, c(0, 1), c(2, 1), 1, 1, pl(2, 2'b01, 2'b01), 4'b0100);
    fork send(P_E, b); collect(8); join
    chk(got_n[P_W] == 1 && got_bee[P_W] ==
        mk(BEE_BWD, c(0, 1), c(2, 1), 2, 1, pl(2, 2'b01, 2'b01), 4'b0001),
        "backward bee forwarded west with west lane 0 reserved");
    fork drive(P_W, 4'b0001, 8'h10); begin @(negedge clk); @(posedge clk); #1;
      chk(dovalid[P_E] == 4'b0100 && dout[P_E][2] == 8'h10,
          "west lane 0 switched to east lane 2"); end join

    // 5. Teardown of that circuit from the west.
    b = mk(BEE_TEAR, c(0, 1), c(2, 1), 0, 1, '0, 4'b0001);
    fork send(P_W, b); collect(8); join
    chk(got_n[P_E] == 1 && got_bee[P_E].kind == BEE_TEAR && got_bee[P_E].lanes == 4'b0100,
        "teardown forwarded east for lane 2");
    fork drive(P_W, 4'b0001, 8'h20); begin @(negedge clk); @(posedge clk); #1;
      chk(dovalid[P_E] == 4'b0000, "circuit removed"); end join

    // 6. Source: request to (2,2), one lane.
    @(negedge clk);
    req_valid = 1; req_dst = c(2, 2); req_bw = 1;
    fork begin @(negedge clk); req_valid = 0; end collect(10); join
    for (int p = 0; p < NLINKS; p++)
      chk(got_n[p] == 1 && got_bee[p] == mk(BEE_FWD, c(1, 1), c(2, 2), 1, 1,
          pl_set('0, 0, 2'(p)), '0), $sformatf("own forward bee sent on port %0d", p));
    b = mk(BEE_BWD, c(1, 1), c(2, 2), 2, 1, pl(2, 2'b11, 2'b01), 4'b1000);
    fork send(P_E, b); collect(8); join
    chk(conn_up && conn_lanes == 4'b0001, "first backward bee accepted, local lane 0");
    chk(got_n[P_S] + got_n[P_E] + got_n[P_W] + got_n[P_N] == 0, "nothing sent on accept");
    fork drive(4, 4'b0001, 8'h77); begin @(negedge clk); @(posedge clk); #1;
      chk(dovalid[P_E] == 4'b1000 && dout[P_E][3] == 8'h77,
          "local lane 0 switched to east lane 3"); end join
    b = mk(BEE_BWD, c(1, 1), c(2, 2), 2, 1, pl(2, 2'b00, 2'b10), 4'b0010);
    fork send(P_S, b); collect(8); join
    chk(got_n[P_S] == 1 && got_bee[P_S].kind == BEE_TEAR && got_bee[P_S].lanes == 4'b0010,
        "second backward bee released by a teardown to the south");
    // 7. Teardown by the IP: goes east on lane 3.
    @(negedge clk);
    tear = 1;
    fork begin @(negedge clk); tear = 0; end collect(8); join
    chk(got_n[P_E] == 1 && got_bee[P_E].kind == BEE_TEAR && got_bee[P_E].lanes == 4'b1000,
        "IP teardown sent east on lane 3");
    chk(!conn_up, "connection down");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
