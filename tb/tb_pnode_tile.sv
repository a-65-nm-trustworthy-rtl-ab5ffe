// tb_pnode_tile: checks a reduced 12 x 12 tile against the reference model.
// Two copies of the standard sub-tree (bypass chain, three branch nodes, four leaves) are
// written row by row; each is then sampled from its own injection row. Every leaf counter of
// every row must equal the model's replay of the same pulses through the same LFSRs, the
// counters of the other tree must be cleared by the start, the leaf counts must add up to the
// budget and `done` must rise max_i(i + H_i) + 3 clocks after start (pulse i passing H_i
// forwarding nodes), which is N + H + 2 when the last pulse takes the longest path. One tree has its probabilities rewritten between runs without touching its structure.
// The tile is reduced from the design's 24 x 24 to keep the test short; placement is own choice.
module tb_pnode_tile;
  import pdt_pkg::*;
  import pdt_ref_pkg::*;
  localparam int DIM = 12;
  logic clk = 0, rst_n = 0;
  logic [4:0] row_sel = 0, inject_row = 0;
  logic cfg_row_we = 0, prob_row_we = 0, start = 0;
  logic [DIM*8-1:0] cfg_row = 0, cnt_row;
  logic [DIM*4-1:0] prob_row = 0;
  logic [15:0] budget = 0;
  logic busy, done;
  int checks = 0, failures = 0;
  tile_model m;

  pnode_tile #(.DIM(DIM), .TILE(1)) dut (.clk, .rst_n, .row_sel, .cfg_row_we, .cfg_row,
    .prob_row_we, .prob_row, .cnt_row, .start, .budget, .inject_row, .busy, .done);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_rows(bit probs_only);
    for (int r = 0; r < DIM; r++) begin
      @(negedge clk);
      row_sel = 5'(r);
      for (int c = 0; c < DIM; c++) begin
        cfg_row[8*c +: 8]  = m.cfg[r][c];
        prob_row[4*c +: 4] = m.prob[r][c];
      end
      cfg_row_we  = !probs_only;
      prob_row_we = 1;
      @(negedge clk);
      cfg_row_we = 0; prob_row_we = 0;
    end
  endtask

  task automatic run_and_check(int row, int n);
    int cycles, total, finish;
    m.clear_counts();
    m.max_hops = 0;
    finish = 0;
    // pulse i leaves the last forwarding node i + hops clocks after the first injection
    for (int i = 0; i < n; i++) begin
      m.sample(row);
      if (i + m.last_hops > finish) finish = i + m.last_hops;
    end
    @(negedge clk);
    inject_row = 5'(row); budget = 16'(n); start = 1;
    @(negedge clk);
    start = 0; cycles = 0;
    while (!done && cycles < 100000) begin
      @(negedge clk);
      cycles++;
    end
    check(cycles == finish + 3,
          $sformatf("row %0d: done after %0d clocks, expected %0d", row, cycles, finish + 3));
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
    check(total == n, $sformatf("leaf counts add up to %0d, budget %0d", total, n));
  endtask

  initial begin
    m = new(DIM, 1);
    m.place_std_tree(2, 9, 4, 12);
    m.place_std_tree(8, 3, 10, 6);
    repeat (2) @(posedge clk);
    rst_n = 1;
    write_rows(0);
    run_and_check(2, 200);
    run_and_check(8, 150);
    // new probabilities for tree A only (structure stays)
    m.place_std_tree(2, 15, 1, 8);
    write_rows(1);
    run_and_check(2, 240);
    check(m.n_bypass > 0 && m.n_sel0 > 0 && m.n_sel1 > 0, "bypass and both branch choices used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
