// tb_bee_source_ctrl: walks the source controller through a connection
// (request, forward bee injection held until the buffer is ready, accept of
// the first backward bee only, teardown injection) and through a request
// that times out after exactly TIMEOUT cycles without a backward bee, and the
// HOLDOFF-cycle pause before the next request after each of them.
module tb_bee_source_ctrl;
  import bee_pkg::*;

  localparam int TIMEOUT = 40, HOLDOFF = 17;

  logic clk = 0, rst_n = 0;
  coord_t here, req_dst, bwd_dst;
  logic req_valid, req_ready, tear, conn_up, conn_fail;
  logic [BW_W-1:0] req_bw, acc_bw;
  lanes_t conn_lanes, acc_lanes;
  logic inj_valid, inj_ready, accept, commit;
  bee_t inj_bee;
  int checks = 0, failures = 0;

  bee_source_ctrl #(.TIMEOUT(TIMEOUT), .HOLDOFF(HOLDOFF)) dut (
    .clk, .rst_n, .here_i(here),
    .req_valid_i(req_valid), .req_dst_i(req_dst), .req_bw_i(req_bw), .req_ready_o(req_ready),
    .tear_i(tear), .conn_up_o(conn_up), .conn_fail_o(conn_fail), .conn_lanes_o(conn_lanes),
    .inj_valid_o(inj_valid), .inj_bee_o(inj_bee), .inj_ready_i(inj_ready),
    .bwd_dst_i(bwd_dst), .accept_o(accept), .accept_bw_o(acc_bw),
    .accept_commit_i(commit), .accept_lanes_i(acc_lanes));

  always #5 clk = ~clk;

  initial begin
    #50000;
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

  initial begin
    int waited;
    here = '{x: 3'd1, y: 3'd2};
    req_dst = '{x: 3'd6, y: 3'd5};
    bwd_dst = '0;
    req_valid = 0; req_bw = 3; tear = 0; inj_ready = 0; commit = 0; acc_lanes = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1;
    chk(req_ready && !inj_valid && !conn_up, "idle after reset");
    req_valid = 1;
    @(negedge clk);
    req_valid = 0;
    chk(inj_valid && inj_bee.kind == BEE_FWD && inj_bee.src == here &&
        inj_bee.dst == req_dst && inj_bee.bw == 3 && inj_bee.hop == 0 &&
        inj_bee.plist == '0, "forward bee offered with empty port list");
    chk(!req_ready, "busy while launching");
    repeat (3) @(negedge clk);
    chk(inj_valid, "forward bee held while buffer full");
    inj_ready = 1;
    @(negedge clk);
    inj_ready = 0;
    chk(!inj_valid, "forward bee injected once");
    bwd_dst = '{x: 3'd6, y: 3'd4};
    #1;
    chk(!accept, "backward bee of another flow refused");
    bwd_dst = req_dst;
    #1;
    chk(accept && acc_bw == 3, "backward bee of the pending flow accepted");
    commit = 1; acc_lanes = 4'b0111;
    @(negedge clk);
    commit = 0;
    chk(conn_up && conn_lanes == 4'b0111, "connection up with the reserved lanes");
    #1;
    chk(!accept, "later backward bees refused");
    repeat (5) @(negedge clk);
    tear = 1;
    @(negedge clk);
    tear = 0;
    chk(inj_valid && inj_bee.kind == BEE_TEAR && inj_bee.lanes == 4'b0111,
        "teardown offered with the circuit's lanes");
    inj_ready = 1;
    @(negedge clk);
    chk(!req_ready && !conn_up && !inj_valid, "holding off after teardown");
    waited = 1;
    while (!req_ready && waited < 10 * HOLDOFF) begin
      @(negedge clk);
      waited++;
    end
    chk(waited == HOLDOFF + 1, $sformatf("hold-off of %0d cycles", waited));
    // Timeout.
    req_valid = 1;
    @(negedge clk);
    req_valid = 0;
    @(negedge clk);
    waited = 0;
    while (!conn_fail && waited < 10 * TIMEOUT) begin
      @(negedge clk);
      waited++;
    end
    chk(conn_fail, "request without answer fails");
    chk(waited == TIMEOUT + 1, $sformatf("timeout after %0d cycles", waited));
    @(negedge clk);
    chk(!req_ready, "holding off after timeout");
    repeat (HOLDOFF + 1) @(negedge clk);
    chk(req_ready, "idle after hold-off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
