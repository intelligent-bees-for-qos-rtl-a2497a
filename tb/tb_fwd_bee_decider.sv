// tb_fwd_bee_decider: directed and random checks of the forward bee decision
// against an independent model of the pseudo code: destination first (first
// three become backward bees), then seen-before, then hop limit of twice the
// Euclidean distance, then the incoming link bandwidth test, with copies to
// every existing neighbour but the arrival port.
module tb_fwd_bee_decider;
  import bee_pkg::*;

  localparam int NX = 8, NY = 8;

  bee_t        bee;
  coord_t      here;
  port_e       in_port;
  logic [1:0]  seen;
  lanes_t      free;
  fwd_action_e act;
  logic [3:0]  mask;
  int checks = 0, failures = 0;

  fwd_bee_decider #(.NX(NX), .NY(NY)) dut (
    .bee_i(bee), .here_i(here), .in_port_i(in_port), .seen_count_i(seen),
    .in_free_i(free), .action_o(act), .out_mask_o(mask));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(fwd_action_e ea, logic [3:0] em, string what);
    #1;
    checks++;
    if (act !== ea || mask !== em) begin
      failures++;
      $display("FAIL %s: action %s mask %b, expected %s mask %b", what, act.name(), mask,
               ea.name(), em);
    end
  endtask

  function automatic coord_t c(int x, int y);
    coord_t r;
    r.x = COORD_W'(x);
    r.y = COORD_W'(y);
    return r;
  endfunction

  initial begin
    bee = '0;
    bee.kind = BEE_FWD;
    bee.src  = c(0, 0);
    bee.dst  = c(7, 7);
    bee.bw   = 2;
    free     = 4'b1111;
    seen     = 0;
    // Source corner (0,0), bee from the local port: copies go south and east.
    here = c(0, 0); in_port = P_L; bee.hop = 0;
    check(FA_BROADCAST, 4'b0101, "source corner");
    // Interior node reached from the west: south, east, north.
    here = c(3, 3); in_port = P_W; bee.hop = 6;
    check(FA_BROADCAST, 4'b1101, "interior from west");
    // East edge reached from the north: south and west only.
    here = c(7, 2); in_port = P_N; bee.hop = 9;
    check(FA_BROADCAST, 4'b0011, "east edge from north");
    // Seen before.
    seen = 1;
    check(FA_KILL_SEEN, 4'b0000, "seen");
    seen = 0;
    // Hop limit: 2*sqrt(98) = 19.8 -> hop 19 passes, hop 20 is killed.
    here = c(4, 4); in_port = P_N; bee.hop = 19;
    check(FA_BROADCAST, 4'b0111, "hop 19");
    bee.hop = 20;
    check(FA_KILL_HOPS, 4'b0000, "hop 20");
    // Bandwidth: two lanes needed, one free.
    bee.hop = 5; free = 4'b0100;
    check(FA_KILL_BW, 4'b0000, "bandwidth short");
    free = 4'b1010;
    check(FA_BROADCAST, 4'b0111, "bandwidth exact");
    // Destination: the first three become backward bees, the fourth is killed,
    // even with no free bandwidth and a high hop count.
    here = c(7, 7); free = 4'b0000; bee.hop = 25;
    for (int s = 0; s < 3; s++) begin
      seen = 2'(s);
      check(FA_TO_BACKWARD, 4'b0000, "destination early");
    end
    seen = 3;
    check(FA_KILL_LATE, 4'b0000, "destination late");
    // Random cases against the model.
    for (int n = 0; n < 2000; n++) begin
      fwd_action_e ea;
      logic [3:0]  em;
      int dx, dy, nfree;
      bee.src = c($urandom_range(0, 7), $urandom_range(0, 7));
      bee.dst = c($urandom_range(0, 7), $urandom_range(0, 7));
      here    = ($urandom_range(0, 7) == 0) ? bee.dst : c($urandom_range(0, 7), $urandom_range(0, 7));
      bee.hop = HOP_W'($urandom_range(0, 24));
      bee.bw  = BW_W'($urandom_range(1, 4));
      free    = 4'($urandom);
      seen    = 2'($urandom);
      in_port = port_e'($urandom_range(0, 4));
      dx = int'(bee.src.x) - int'(bee.dst.x);
      dy = int'(bee.src.y) - int'(bee.dst.y);
      nfree = int'(free[0]) + int'(free[1]) + int'(free[2]) + int'(free[3]);
      em = '0;
      if (here == bee.dst) ea = (seen < 3) ? FA_TO_BACKWARD : FA_KILL_LATE;
      else if (seen != 0) ea = FA_KILL_SEEN;
      else if (real'(bee.hop) >= 2.0 * $sqrt(real'(dx * dx + dy * dy))) ea = FA_KILL_HOPS;
      else if (nfree >= int'(bee.bw)) begin
        ea = FA_BROADCAST;
        em[0] = (here.y != 7) && in_port != P_S;
        em[1] = (here.x != 0) && in_port != P_W;
        em[2] = (here.x != 7) && in_port != P_E;
        em[3] = (here.y != 0) && in_port != P_N;
      end else ea = FA_KILL_BW;
      check(ea, em, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
