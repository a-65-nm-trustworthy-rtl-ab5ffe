// tb_tree_depth12: samples a sub-tree of the deepest kind the engine is meant for, on a tile
// of the full 24 x 24 size (pnode_tile with its default parameters).
//
// The engine solves the top three levels of a tree exactly and samples the rest, so a tree of
// depth 12 leaves a sub-tree of nine branch levels below each sub-root. This testbench maps
// such a sub-tree: pulses enter at the west edge of row 12 through one bypass node, then pass
// a spine of nine branch nodes along the row (columns 1..9). Each branch sends a pulse on
// along the spine (child_0, east) or to a leaf of its own (child_1, alternately north and
// south). The last branch's east child is the final leaf. The leaves thus sit at tree depths
// 4 to 12. The budget of 2000 pulses is sampled twice with different probabilities. Checks:
// every leaf counter equals the reference model's replay (which covers the 8-bit saturation of
// the busiest leaf), the counters add up to the budget minus the saturated pulses, pulses reach
// depth 12, the longest path has ten forwarding nodes and `done` rises after max_i(i + H_i) + 3
// clocks.
// The depth of 12 and the 24 x 24 tile follow the design; the placement of the sub-tree and the
// budget are this testbench's own.
module tb_tree_depth12;
  import pdt_pkg::*;
  import pdt_ref_pkg::*;
  localparam int DIM    = TILE_DIM;
  localparam int ROW    = 12;
  localparam int LEVELS = 9;     // branch levels below depth 3
  logic clk = 0, rst_n = 0;
  logic [4:0] row_sel = 0, inject_row = 0;
  logic cfg_row_we = 0, prob_row_we = 0, start = 0;
  logic [DIM*8-1:0] cfg_row = 0, cnt_row;
  logic [DIM*4-1:0] prob_row = 0;
  logic [15:0] budget = 0;
  logic busy, done;
  int checks = 0, failures = 0;
  tile_model m;

  pnode_tile dut (.clk, .rst_n, .row_sel, .cfg_row_we, .cfg_row, .prob_row_we, .prob_row,
    .cnt_row, .start, .budget, .inject_row, .busy, .done);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Spine along row ROW; p_of(k) is the probability of the k-th branch (k = 0 at the sub-root).
  task automatic place_tree(int p_base);
    m.set_node(ROW, 0, 0, 1, DIR_E, 0, 0);                    // entry bypass
    for (int k = 0; k < LEVELS; k++) begin
      int side;
      side = (k % 2 == 0) ? DIR_N : DIR_S;
      m.set_node(ROW, k + 1, 0, 0, DIR_E, side, (p_base + k) % 7 + 2);
      m.set_node(ROW + dir_dr(side), k + 1, 1, 0, 0, 0, 0);   // side leaf, depth 4 + k
    end
    m.set_node(ROW, LEVELS + 1, 1, 0, 0, 0, 0);               // last leaf, depth 12
  endtask

  task automatic write_rows();
    for (int r = 0; r < DIM; r++) begin
      @(negedge clk);
      row_sel = 5'(r);
      for (int c = 0; c < DIM; c++) begin
        cfg_row[8*c +: 8]  = m.cfg[r][c];
        prob_row[4*c +: 4] = m.prob[r][c];
      end
      cfg_row_we  = 1;
      prob_row_we = 1;
      @(negedge clk);
      cfg_row_we = 0; prob_row_we = 0;
    end
  endtask

  task automatic run_and_check(int n);
    int cycles, total, finish, sat0;
    m.clear_counts();
    m.max_hops = 0;
    sat0 = m.n_sat;
    finish = 0;
    for (int i = 0; i < n; i++) begin
      m.sample(ROW);
      if (i + m.last_hops > finish) finish = i + m.last_hops;
    end
    @(negedge clk);
    inject_row = 5'(ROW); budget = 16'(n); start = 1;
    @(negedge clk);
    start = 0; cycles = 0;
    while (!done && cycles < 50000) begin
      @(negedge clk);
      cycles++;
    end
    check(cycles == finish + 3,
          $sformatf("done after %0d clocks, expected %0d", cycles, finish + 3));
    check(m.max_hops == LEVELS + 1,
          $sformatf("longest path %0d forwarding nodes, expected %0d", m.max_hops, LEVELS + 1));
    check(m.cnt[ROW][LEVELS + 1] > 0, "pulses reach the depth-12 leaf");
    total = 0;
    for (int r = 0; r < DIM; r++) begin
      row_sel = 5'(r);
      #1;
      for (int c = 0; c < DIM; c++) begin
        check(cnt_row[8*c +: 8] == 8'(m.cnt[r][c]),
              $sformatf("counter (%0d,%0d) = %0d, model %0d", r, c, cnt_row[8*c +: 8], m.cnt[r][c]));
        total += int'(cnt_row[8*c +: 8]);
      end
    end
    check(total == n - (m.n_sat - sat0),
          $sformatf("leaf counts add up to %0d, budget %0d, saturated %0d", total, n, m.n_sat - sat0));
    $display("depth-12 leaf: hardware %0d of %0d pulses", m.cnt[ROW][LEVELS + 1], n);
  endtask

  initial begin
    m = new(DIM, 0);
    place_tree(0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    write_rows();
    run_and_check(2000);
    place_tree(3);
    write_rows();
    run_and_check(2000);
    check(m.n_sat > 0, "a leaf counter saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
