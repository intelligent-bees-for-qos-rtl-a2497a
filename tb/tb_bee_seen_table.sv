// tb_bee_seen_table: checks arrival counting (saturating at 3), allocation,
// replacement of the slot closest to expiry when the table is full, and
// expiry LIFE cycles after allocation, against a cycle-by-cycle model.
module tb_bee_seen_table;
  import bee_pkg::*;

  localparam int ENTRIES = 2, LIFE = 20;

  logic clk = 0, rst_n = 0;
  coord_t src, dst;
  logic upd;
  logic [1:0] count;
  int checks = 0, failures = 0;

  bee_seen_table #(.ENTRIES(ENTRIES), .LIFE(LIFE)) dut (
    .clk, .rst_n, .src_i(src), .dst_i(dst), .upd_i(upd), .count_o(count));

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic coord_t c(int x, int y);
    coord_t r;
    r.x = COORD_W'(x);
    r.y = COORD_W'(y);
    return r;
  endfunction

  task automatic look(coord_t s, coord_t d, int exp, string what);
    src = s; dst = d; upd = 0;
    #1;
    checks++;
    if (count !== 2'(exp)) begin
      failures++;
      $display("FAIL %s: count %0d expected %0d", what, count, exp);
    end
  endtask

  task automatic arrive(coord_t s, coord_t d);
    @(negedge clk);
    src = s; dst = d; upd = 1;
    @(negedge clk);
    upd = 0;
  endtask

  initial begin
    upd = 0; src = '0; dst = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    look(c(1, 2), c(3, 4), 0, "empty");
    arrive(c(1, 2), c(3, 4));
    look(c(1, 2), c(3, 4), 1, "first arrival");
    look(c(3, 4), c(1, 2), 0, "other direction is another flow");
    arrive(c(1, 2), c(3, 4));
    arrive(c(1, 2), c(3, 4));
    look(c(1, 2), c(3, 4), 3, "third arrival");
    arrive(c(1, 2), c(3, 4));
    look(c(1, 2), c(3, 4), 3, "saturates at 3");
    // Second flow fills the table; a third one replaces the older first flow.
    arrive(c(5, 5), c(0, 0));
    look(c(5, 5), c(0, 0), 1, "second flow");
    arrive(c(7, 7), c(6, 6));
    look(c(7, 7), c(6, 6), 1, "third flow");
    look(c(1, 2), c(3, 4), 0, "oldest flow replaced");
    look(c(5, 5), c(0, 0), 1, "younger flow kept");
    // Expiry: wait until both remaining entries are older than LIFE.
    repeat (LIFE + 2) @(negedge clk);
    look(c(5, 5), c(0, 0), 0, "expired");
    look(c(7, 7), c(6, 6), 0, "expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
