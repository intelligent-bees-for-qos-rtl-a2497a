// port_list_reverser: turns the Port List a forward bee collected into the
// route its backward bee follows home.
//
// A forward bee records, hop by hop, the 2-bit code of every output port it
// left through (south 00, west 01, east 10, north 11), the first hop in the
// two most significant bits. At the destination the list is reversed code by
// code and every bit is XORed with 1, as the algorithm prescribes; since the
// codes of opposite ports differ in both bits, each reversed code names the
// port that leads one hop back towards the source. Reversal is by whole
// codes, over the hops_i valid codes only; code 0 of the result is the port
// the forward bee arrived on at the destination. Unused positions are zero.
//
// Purely combinational.
module port_list_reverser
  import bee_pkg::*;
(
  input  plist_t           plist_i,  // forward route, hops_i valid codes
  input  logic [HOP_W-1:0] hops_i,   // number of valid codes (hop counter)
  output plist_t           plist_o   // return route
);

  always_comb begin
    plist_o = '0;
    for (int unsigned j = 0; j < PL_HOPS; j++) begin
      for (int unsigned k = 0; k < PL_HOPS; k++) begin
        if (j < int'(hops_i) && k == int'(hops_i) - 1 - j)
          plist_o[PL_BITS-1-2*j -: 2] = pl_get(plist_i, k) ^ 2'b11;
      end
    end
  end

endmodule
