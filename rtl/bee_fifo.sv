// bee_fifo: small synchronous FIFO holding whole control packets (bees) at a
// router input. Push when push_i and not full; pop when pop_i and not empty;
// both may happen in one cycle. ready_o (not full) is the backpressure sent
// to the upstream router; head_o is valid whenever valid_o is high. DEPTH must
// be a power of two. The depth is this design's choice.
module bee_fifo
  import bee_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push_i,
  input  bee_t data_i,
  output logic ready_o,
  input  logic pop_i,
  output logic valid_o,
  output bee_t head_o
);

  localparam int unsigned AW = $clog2(DEPTH);

  bee_t        mem [DEPTH];
  logic [AW:0] wptr, rptr;

  assign valid_o = (wptr != rptr);
  assign ready_o = (wptr - rptr) != (AW+1)'(DEPTH);
  assign head_o  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push_i && ready_o) wptr <= wptr + 1'b1;
      if (pop_i && valid_o)  rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push_i && ready_o) mem[wptr[AW-1:0]] <= data_i;
  end

endmodule
