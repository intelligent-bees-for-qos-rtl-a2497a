// bee_seen_table: per-router memory of the forward-bee flows that already
// passed, used for the "had come before" test at intermediate nodes and for
// picking the earliest three bees at the destination.
//
// A flow is keyed by its (source, destination) pair, the only identity a
// forward bee carries. Each of ENTRIES slots holds a key, a saturating count
// of arrivals (0..3) and a lifetime counter. lookup is combinational: count_o
// is the number of earlier arrivals of key_i (0 if absent). A pulse on
// upd_i records one more arrival of key_i: a hit increments the count, a miss
// allocates a slot (a free one, else the one closest to expiry) with count 1.
// Every slot expires LIFE cycles after it was allocated, so that a later
// connection between the same pair of nodes is searched afresh. The table
// size, the expiry and the replacement are this design's choices; the paper
// only states the test.
module bee_seen_table
  import bee_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned LIFE    = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  coord_t     src_i,
  input  coord_t     dst_i,
  input  logic       upd_i,
  output logic [1:0] count_o
);

  localparam int unsigned LW = $clog2(LIFE + 1);
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic          valid;
    coord_t        src;
    coord_t        dst;
    logic [1:0]    count;
    logic [LW-1:0] life;
  } entry_t;

  entry_t          tab [ENTRIES];
  logic            hit;
  logic [IW-1:0]   hit_idx;
  logic [IW-1:0]   victim;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    count_o = '0;
    for (int unsigned i = 0; i < ENTRIES; i++)
      if (tab[i].valid && tab[i].src == src_i && tab[i].dst == dst_i) begin
        hit     = 1'b1;
        hit_idx = IW'(i);
        count_o = tab[i].count;
      end
  end

  // Victim: first free slot, otherwise the valid slot with least life left.
  always_comb begin
    logic          found;
    logic [LW-1:0] best;
    found  = 1'b0;
    victim = '0;
    best   = '1;
    for (int unsigned i = 0; i < ENTRIES; i++)
      if (!found && !tab[i].valid) begin
        found  = 1'b1;
        victim = IW'(i);
      end
    if (!found)
      for (int unsigned i = 0; i < ENTRIES; i++)
        if (tab[i].life < best) begin
          best   = tab[i].life;
          victim = IW'(i);
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) tab[i] <= '0;
    end else begin
      for (int unsigned i = 0; i < ENTRIES; i++)
        if (tab[i].valid) begin
          if (tab[i].life == '0) tab[i].valid <= 1'b0;
          else                   tab[i].life  <= tab[i].life - 1'b1;
        end
      if (upd_i) begin
        if (hit) begin
          if (tab[hit_idx].count != 2'd3)
            tab[hit_idx].count <= tab[hit_idx].count + 2'd1;
        end else begin
          tab[victim] <= '{valid: 1'b1, src: src_i, dst: dst_i, count: 2'd1,
                           life: LW'(LIFE)};
        end
      end
    end
  end

endmodule
