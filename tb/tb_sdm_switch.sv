// tb_sdm_switch: configures lane connections directly and checks that every
// configured output lane shows the selected input lane one cycle later and
// that unconfigured lanes stay idle, over random traffic.
module tb_sdm_switch;
  import bee_pkg::*;

  logic clk = 0, rst_n = 0;
  xcfg_t      cfg  [NPORTS][LANES];
  lane_data_t din  [NPORTS][LANES];
  lanes_t     dv   [NPORTS];
  lane_data_t dout [NPORTS][LANES];
  lanes_t     dov  [NPORTS];
  lane_data_t prev_d [NPORTS][LANES];
  lanes_t     prev_v [NPORTS];
  int checks = 0, failures = 0;

  sdm_switch dut (.clk, .rst_n, .cfg_i(cfg), .in_data_i(din), .in_valid_i(dv),
                  .out_data_o(dout), .out_valid_o(dov));

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPORTS; p++)
      for (int l = 0; l < LANES; l++) cfg[p][l] = '0;
    // west lanes 0,1 -> east lanes 2,3; local lane 3 -> north lane 0;
    // south lane 2 -> local lane 1.
    cfg[P_E][2] = '{1'b1, 3'(P_W), 2'd0};
    cfg[P_E][3] = '{1'b1, 3'(P_W), 2'd1};
    cfg[P_N][0] = '{1'b1, 3'(P_L), 2'd3};
    cfg[P_L][1] = '{1'b1, 3'(P_S), 2'd2};
    for (int p = 0; p < NPORTS; p++) begin
      dv[p] = '0;
      for (int l = 0; l < LANES; l++) din[p][l] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int p = 0; p < NPORTS; p++) begin
        dv[p] = 4'($urandom);
        for (int l = 0; l < LANES; l++) din[p][l] = 8'($urandom);
      end
      prev_d = din;
      prev_v = dv;
      @(negedge clk);
      for (int p = 0; p < NPORTS; p++)
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (cfg[p][l].valid) begin
            if (dout[p][l] !== prev_d[cfg[p][l].in_port][cfg[p][l].in_lane] ||
                dov[p][l] !== prev_v[cfg[p][l].in_port][cfg[p][l].in_lane]) begin
              failures++;
              $display("FAIL port %0d lane %0d", p, l);
            end
          end else if (dov[p][l] !== 1'b0 || dout[p][l] !== '0) begin
            failures++;
            $display("FAIL idle port %0d lane %0d", p, l);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
