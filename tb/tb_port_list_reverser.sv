// tb_port_list_reverser: checks the port list reversal against the yellow
// example path of the 8x8 mesh (E E E E S S S E E S S S S E, the 28-bit list
// 1010101000000010100000000010, returned as W N N N N W W N N N W W W W) and against an independent model on random
// lists of every length: reversed code order, each code replaced by the
// opposite port (S<->N, W<->E), unused positions zero.
module tb_port_list_reverser;
  import bee_pkg::*;

  plist_t           pl, rev;
  logic [HOP_W-1:0] hops;
  int checks = 0, failures = 0;

  port_list_reverser dut (.plist_i(pl), .hops_i(hops), .plist_o(rev));

  function automatic pcode_t opposite(pcode_t c);
    case (c)
      2'b00: return 2'b11;   // south -> north
      2'b11: return 2'b00;
      2'b10: return 2'b01;   // east -> west
      default: return 2'b10;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcode_t codes [PL_HOPS];
    plist_t exp;
    // Yellow path of the example: 28 bits, padded with zeros to PL_BITS.
    pl   = {28'b1010101000000010100000000010, (PL_BITS-28)'(0)};
    hops = 14;
    #1;
    exp  = {28'b0111111111010111111101010101, (PL_BITS-28)'(0)};
    checks++;
    if (rev !== exp) begin
      failures++;
      $display("FAIL yellow path: got %b expected %b", rev, exp);
    end
    // Blue path: seven east hops then seven south hops.
    pl   = {28'b1010101010101000000000000000, (PL_BITS-28)'(0)};
    #1;
    exp  = {28'b1111111111111101010101010101, (PL_BITS-28)'(0)};
    checks++;
    if (rev !== exp) begin
      failures++;
      $display("FAIL blue path: got %b expected %b", rev, exp);
    end
    // Random lists of every length.
    for (int n = 0; n < 400; n++) begin
      int unsigned h;
      h = $urandom_range(0, PL_HOPS);
      for (int k = 0; k < PL_HOPS; k++) codes[k] = 2'($urandom);
      pl = '0;
      for (int k = 0; k < PL_HOPS; k++) if (k < h) pl[PL_BITS-1-2*k -: 2] = codes[k];
      hops = HOP_W'(h);
      #1;
      exp = '0;
      for (int k = 0; k < PL_HOPS; k++)
        if (k < h) exp[PL_BITS-1-2*k -: 2] = opposite(codes[h-1-k]);
      checks++;
      if (rev !== exp) begin
        failures++;
        if (failures < 5) $display("FAIL random h=%0d: got %b expected %b", h, rev, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
