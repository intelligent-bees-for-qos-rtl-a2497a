// tb_flow_table: reserves, looks up and releases SDM lanes and checks the
// flow-table entries, the input lane occupancy and the output lane usage
// after each operation against expected values.
module tb_flow_table;
  import bee_pkg::*;

  logic clk = 0, rst_n = 0;
  logic res, rel;
  port_e res_ip, res_op, rel_ip, look_ip;
  lanes_t res_il, res_ol, rel_il, look_il;
  logic look_hit;
  port_e look_op;
  lanes_t look_ol;
  lanes_t busy [NPORTS];
  lanes_t used [NPORTS];
  xcfg_t  cfg  [NPORTS][LANES];
  int checks = 0, failures = 0;

  flow_table dut (
    .clk, .rst_n,
    .res_i(res), .res_in_port_i(res_ip), .res_in_lanes_i(res_il),
    .res_out_port_i(res_op), .res_out_lanes_i(res_ol),
    .rel_i(rel), .rel_in_port_i(rel_ip), .rel_in_lanes_i(rel_il),
    .look_in_port_i(look_ip), .look_in_lanes_i(look_il),
    .look_hit_o(look_hit), .look_out_port_o(look_op), .look_out_lanes_o(look_ol),
    .busy_o(busy), .used_o(used), .cfg_o(cfg));

  always #5 clk = ~clk;

  initial begin
    #20000;
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

  task automatic reserve(port_e ip, lanes_t il, port_e op, lanes_t ol);
    @(negedge clk);
    res = 1; res_ip = ip; res_il = il; res_op = op; res_ol = ol;
    @(negedge clk);
    res = 0;
  endtask

  task automatic release_lanes(port_e ip, lanes_t il);
    @(negedge clk);
    rel = 1; rel_ip = ip; rel_il = il;
    @(negedge clk);
    rel = 0;
  endtask

  task automatic look(port_e ip, lanes_t il, logic eh, port_e eo, lanes_t el, string what);
    look_ip = ip; look_il = il;
    #1;
    chk(look_hit == eh && (!eh || (look_op == eo && look_ol == el)), what);
  endtask

  initial begin
    res = 0; rel = 0; res_ip = P_L; res_op = P_L; rel_ip = P_L; look_ip = P_L;
    res_il = '0; res_ol = '0; rel_il = '0; look_il = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1;
    chk(busy[P_W] == '0 && used[P_E] == '0, "empty after reset");
    // Circuit A: west lanes 0,1 -> east lanes 2,3 (in order).
    reserve(P_W, 4'b0011, P_E, 4'b1100);
    chk(busy[P_W] == 4'b0011, "A input lanes busy");
    chk(used[P_E] == 4'b1100, "A output lanes used");
    chk(cfg[P_E][2].valid && cfg[P_E][2].in_port == 3'(P_W) && cfg[P_E][2].in_lane == 0,
        "A lane 2 fed by west lane 0");
    chk(cfg[P_E][3].valid && cfg[P_E][3].in_port == 3'(P_W) && cfg[P_E][3].in_lane == 1,
        "A lane 3 fed by west lane 1");
    look(P_W, 4'b0011, 1, P_E, 4'b1100, "A lookup");
    // Circuit B: local lanes 1,3 -> north lanes 0,2.
    reserve(P_L, 4'b1010, P_N, 4'b0101);
    chk(cfg[P_N][0].in_port == 3'(P_L) && cfg[P_N][0].in_lane == 1 &&
        cfg[P_N][2].in_lane == 3, "B mapping in order");
    // Circuit C: west lane 3 -> local lane 0.
    reserve(P_W, 4'b1000, P_L, 4'b0001);
    chk(busy[P_W] == 4'b1011, "A and C share the west link");
    look(P_W, 4'b1000, 1, P_L, 4'b0001, "C lookup");
    look(P_S, 4'b1111, 0, P_L, '0, "no flow from south");
    // Tear A down.
    release_lanes(P_W, 4'b0011);
    chk(busy[P_W] == 4'b1000, "A freed, C kept");
    chk(used[P_E] == 4'b0000, "A entries gone");
    chk(used[P_L] == 4'b0001 && used[P_N] == 4'b0101, "B and C entries kept");
    look(P_W, 4'b0011, 0, P_L, '0, "A lookup misses");
    // Release and reserve in the same cycle on the same port.
    @(negedge clk);
    rel = 1; rel_ip = P_W; rel_il = 4'b1000;
    res = 1; res_ip = P_W; res_il = 4'b0110; res_op = P_S; res_ol = 4'b0011;
    @(negedge clk);
    rel = 0; res = 0;
    chk(busy[P_W] == 4'b0110, "release then reserve in one cycle");
    chk(used[P_L] == 4'b0000 && used[P_S] == 4'b0011, "C gone, D present");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
