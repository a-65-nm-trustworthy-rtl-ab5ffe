// tb_pdt_engine: drives the full-size engine (4 tiles of 24 x 24) through its register bus.
// Tiles 0 and 1 receive the same sub-tree in one pass (both enabled while the rows are
// written), so its sampling budget can be split between them and run in parallel; tile 2 gets
// a one-leaf chain whose budget of 300 saturates the 8-bit counter; tile 3 gets another
// sub-tree. Budgets come from the statistical solver. All tiles run at once; the test polls the
// done flags, then reads every used row of every tile through the output buffer and compares
// each counter with the reference model.
// The queue sizes, row widths, done flags and parallel sampling follow the design; the register
// map and the tree placement are this implementation's.
module tb_pdt_engine;
  import pdt_pkg::*;
  import pdt_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req = 0, we = 0;
  logic [7:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic irq;
  logic [3:0] tile_busy, tile_done;
  int checks = 0, failures = 0;
  tile_model m [4];
  int max_parallel = 0;

  pdt_engine dut (.clk, .rst_n, .req, .we, .addr, .wdata, .rdata, .irq, .tile_busy, .tile_done);

  always #5 clk = ~clk;
  always @(posedge clk) if ($countones(tile_busy) > max_parallel) max_parallel = $countones(tile_busy);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    req = 1; we = 1; addr = a; wdata = d;
    @(negedge clk);
    req = 0; we = 0;
  endtask

  task automatic read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    req = 1; we = 0; addr = a;
    #1 d = rdata;
    @(negedge clk);
    req = 0;
  endtask

  // write rows r0..r1 of model `t` into the tiles in mask `en`
  task automatic load_rows(int t, logic [3:0] en, int r0, int r1);
    for (int r = r0; r <= r1; r++) begin
      write(REG_CTRL, {13'd0, 3'b001, 3'd0, 5'(r), 4'd0, en});
      for (int w = 0; w < 6; w++) write(REG_DATA, m[t].cfg_word(r, w));
      write(REG_CTRL, {13'd0, 3'b010, 3'd0, 5'(r), 4'd0, en});
      for (int w = 0; w < 3; w++) write(REG_DATA, m[t].prob_word(r, w));
    end
  endtask

  task automatic set_budget(int t, int n, int row);
    write(REG_CTRL, {13'd0, 3'b100, 12'd0, 4'(1 << t)});
    write(REG_DATA, {11'd0, 5'(row), 16'(n)});
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int nk [4], n_tile [4], cycles;
    for (int t = 0; t < 4; t++) m[t] = new(24, t);
    m[0].place_std_tree(5, 9, 4, 12);
    m[1].place_std_tree(5, 9, 4, 12);
    m[2].set_node(10, 0, 0, 1, 2, 0, 0);     // bypass east
    m[2].set_node(10, 1, 1, 0, 0, 0, 0);     // leaf
    m[3].place_std_tree(20, 3, 13, 7);
    repeat (2) @(posedge clk);
    rst_n = 1;

    load_rows(0, 4'b0011, 3, 8);             // same sub-tree into tiles 0 and 1
    load_rows(2, 4'b0100, 10, 10);
    load_rows(3, 4'b1000, 18, 23);

    // solver: root p = 6, level-2 p = 11 and 1, N = 600, N_min = 20
    write(REG_SOLVER_P, 32'h0000_01B6);
    write(REG_SOLVER_N, {16'd20, 16'd600});
    for (int k = 0; k < 4; k++) begin
      read(REG_SOLVER_R + 8'(4*k), d);
      nk[k] = int'(d[15:0]);
    end
    check(nk[0] == (600 * 10 * 5) / 256 && nk[1] == (600 * 10 * 11) / 256, "solver budgets 0, 1");
    check(nk[2] == (600 * 6 * 15) / 256 && nk[3] == 20, "solver budgets 2, 3 (3 clamped to N_min)");
    // sub-tree 1 (largest budget) split over tiles 0 and 1; tile 2 saturates; tile 3 sub-tree 0
    n_tile[0] = nk[1] / 2;
    n_tile[1] = nk[1] - nk[1] / 2;
    n_tile[2] = 300;
    n_tile[3] = nk[0];
    set_budget(0, n_tile[0], 5);
    set_budget(1, n_tile[1], 5);
    set_budget(2, n_tile[2], 10);
    set_budget(3, n_tile[3], 20);
    for (int i = 0; i < n_tile[0]; i++) m[0].sample(5);
    for (int i = 0; i < n_tile[1]; i++) m[1].sample(5);
    for (int i = 0; i < n_tile[2]; i++) m[2].sample(10);
    for (int i = 0; i < n_tile[3]; i++) m[3].sample(20);

    write(REG_IRQ_EN, 32'hF);
    write(REG_COMPUTE, 32'hF);
    cycles = 0;
    do begin
      read(REG_DONE, d);
      cycles++;
    end while (d != 32'hF && cycles < 10000);
    check(d == 32'hF, "all four tiles done");
    check(irq, "interrupt raised");
    check(max_parallel == 4, $sformatf("tiles sampled in parallel (%0d at once)", max_parallel));

    // read back every used row of every tile
    for (int t = 0; t < 4; t++) begin
      int total;
      total = 0;
      for (int r = 0; r < 24; r++) begin
        bit used;
        used = 0;
        for (int c = 0; c < 24; c++) if (m[t].cfg[r][c] != 0) used = 1;
        if (!used) continue;
        write(REG_CTRL, {19'd0, 5'(r), 8'd0});
        write(REG_OUT_SEL, 32'(t));
        for (int k = 0; k < 6; k++) begin
          read(REG_OUTBUF + 8'(4*k), d);
          for (int i = 0; i < 4; i++) begin
            check(d[8*i +: 8] == 8'(m[t].cnt[r][4*k+i]),
                  $sformatf("tile %0d node (%0d,%0d) = %0d, model %0d", t, r, 4*k+i,
                            d[8*i +: 8], m[t].cnt[r][4*k+i]));
            total += int'(d[8*i +: 8]);
          end
        end
      end
      if (t != 2) check(total == n_tile[t], $sformatf("tile %0d counts add up to the budget", t));
    end
    check(m[2].cnt[10][1] == 255 && m[2].n_sat == 45, "tile 2 leaf saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
