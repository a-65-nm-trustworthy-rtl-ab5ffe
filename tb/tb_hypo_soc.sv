// tb_hypo_soc: end-to-end test of the whole chip at its default size (4 tiles of 24 x 24).
//
// An SPI host model loads a supervisor program into the instruction memory and a list of the
// rows to read into the data memory, then sets the core running. The program polls the engine's
// done flags, copies each listed row of leaf counters from the output buffer to data memory,
// adds up all counter bytes (the normalisation denominator), clears the done flags and raises a
// mailbox flag. Meanwhile the host writes the sub-trees row by row through the configuration
// and probability queues (one sub-tree broadcast into two tiles for parallel sampling), asks
// the statistical solver for the budgets, loads them and starts all tiles. After the mailbox
// flag the host reads the copied counters over SPI and compares every one with the reference
// model, and the sum with the model's total.
//
// It counts how often each mechanism happened and fails if one never did: bypass forwarding,
// both branch choices, leaf counting, counter saturation, broadcast row writes, configuration
// and probability queue commits, parallel sampling, solver clamping to N_min, the done
// interrupt, core polling, core stalls caused by SPI traffic, SPI reads and writes.
// The flow (configure, sample, poll done, read counters, normalise) follows the design's description;
// the program, the SPI frame and the tree placement are this implementation's.
module tb_hypo_soc;
  import pdt_pkg::*;
  import pdt_ref_pkg::*;
  import rv_asm_pkg::*;

  logic clk = 0, rst_n = 0;
  logic scx = 0, mosi = 0, ss = 1, miso, irq, cpu_run;
  logic [3:0] tile_busy, tile_done;
  int checks = 0, failures = 0;
  tile_model m [4];
  logic [31:0] prog [128];
  int np = 0;

  // mechanism counters
  int ev_conf_commit = 0, ev_prob_commit = 0, ev_broadcast = 0, ev_parallel = 0;
  int ev_irq = 0, ev_stall = 0, ev_spi_wr = 0, ev_spi_rd = 0, ev_clamp = 0;

  hypo_soc dut (.clk, .rst_n, .spi_scx(scx), .spi_mosi(mosi), .spi_ss(ss), .spi_miso(miso),
                .irq, .tile_busy, .tile_done, .cpu_run);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_engine.conf_row_valid) ev_conf_commit++;
    if (dut.u_engine.prob_row_valid) ev_prob_commit++;
    if ($countones(dut.u_engine.cfg_row_we) > 1) ev_broadcast++;
    if ($countones(tile_busy) > 1) ev_parallel++;
    if (irq) ev_irq++;
    if (dut.c_req && !dut.c_gnt) ev_stall++;
    if (dut.s_req && dut.s_we) ev_spi_wr++;
    if (dut.s_req && !dut.s_we) ev_spi_rd++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- SPI host: mode 0, SCX = clk/16 ----
  task automatic spi_frame(logic [7:0] cmd, logic [31:0] a, logic [31:0] d, output logic [31:0] q);
    logic [71:0] out;
    out = {cmd, a, d};
    q = '0;
    ss = 0;
    repeat (8) @(negedge clk);
    for (int i = 0; i < 72; i++) begin
      mosi = out[71 - i];
      repeat (8) @(negedge clk);
      scx = 1;
      if (i >= 40) q = {q[30:0], miso};
      repeat (8) @(negedge clk);
      scx = 0;
    end
    repeat (8) @(negedge clk);
    ss = 1;
    repeat (8) @(negedge clk);
  endtask

  task automatic spi_write(logic [31:0] a, logic [31:0] d);
    logic [31:0] q;
    spi_frame(8'h02, a, d, q);
  endtask

  task automatic spi_read(logic [31:0] a, output logic [31:0] d);
    spi_frame(8'h03, a, 32'h0, d);
  endtask

  localparam logic [31:0] ENG  = 32'h0000_2000;
  localparam logic [31:0] DMEM = 32'h0000_1000;

  task automatic load_rows(int t, logic [3:0] en, int r0, int r1);
    for (int r = r0; r <= r1; r++) begin
      spi_write(ENG + REG_CTRL, {13'd0, 3'b001, 3'd0, 5'(r), 4'd0, en});
      for (int w = 0; w < 6; w++) spi_write(ENG + REG_DATA, m[t].cfg_word(r, w));
      spi_write(ENG + REG_CTRL, {13'd0, 3'b010, 3'd0, 5'(r), 4'd0, en});
      for (int w = 0; w < 3; w++) spi_write(ENG + REG_DATA, m[t].prob_word(r, w));
    end
  endtask

  task automatic set_budget(int t, int n, int row);
    spi_write(ENG + REG_CTRL, {13'd0, 3'b100, 12'd0, 4'(1 << t)});
    spi_write(ENG + REG_DATA, {11'd0, 5'(row), 16'(n)});
  endtask

  function automatic void emit(logic [31:0] w);
    prog[np] = w;
    np++;
  endfunction

  // Supervisor program: poll, copy listed rows, sum bytes, clear flags, raise mailbox.
  function automatic void build_program();
    int poll, row_loop, beq_at, word_loop;
    emit(LUI(10, 2));                 // x10 = engine registers
    emit(LUI(11, 1));                 // x11 = data memory
    emit(ADDI(12, 0, 15));
    emit(ADDI(20, 0, 0));             // poll count
    poll = np;
    emit(LW(1, 10, 8));               // done flags
    emit(ADDI(20, 20, 1));
    emit(ANDI(1, 1, 15));
    emit(BNE(1, 12, 4 * (poll - np)));
    emit(LW(3, 11, 0));               // number of rows to copy
    emit(ADDI(4, 11, 4));             // row list
    emit(ADDI(5, 11, 256));           // results at 0x1100
    emit(ADDI(21, 0, 0));             // byte sum
    row_loop = np;
    beq_at = np;
    emit(0);                          // patched: beq x3, x0, end
    emit(LW(6, 4, 0));                // entry = tile | row << 8
    emit(SRLI(7, 6, 8));
    emit(SLLI(7, 7, 8));
    emit(SW(7, 10, 0));               // CTRL: row_sel
    emit(ANDI(8, 6, 3));
    emit(SW(8, 10, 20));              // OUT_SEL: capture the row
    emit(ADDI(9, 0, 0));
    word_loop = np;
    emit(ADD(13, 10, 9));
    emit(LW(14, 13, 32));             // output buffer word
    emit(ADD(15, 5, 9));
    emit(SW(14, 15, 0));
    emit(ANDI(16, 14, 255));  emit(ADD(21, 21, 16));
    emit(SRLI(16, 14, 8));    emit(ANDI(16, 16, 255)); emit(ADD(21, 21, 16));
    emit(SRLI(16, 14, 16));   emit(ANDI(16, 16, 255)); emit(ADD(21, 21, 16));
    emit(SRLI(16, 14, 24));   emit(ADD(21, 21, 16));
    emit(ADDI(9, 9, 4));
    emit(ADDI(17, 0, 24));
    emit(BNE(9, 17, 4 * (word_loop - np)));
    emit(ADDI(5, 5, 24));
    emit(ADDI(4, 4, 4));
    emit(ADDI(3, 3, -1));
    emit(JAL(0, 4 * (row_loop - np)));
    prog[beq_at] = BEQ(3, 0, 4 * (np - beq_at));
    emit(SW(21, 11, 128));            // 0x1080: byte sum
    emit(SW(20, 11, 132));            // 0x1084: poll count
    emit(SW(12, 10, 8));              // clear done flags
    emit(ADDI(1, 0, 1));
    emit(SW(1, 11, 136));             // 0x1088: mailbox
    emit(JAL(0, 0));
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int nk [4], n_tile [4], rows_t [32], rows_r [32], k, model_sum, hw_sum;
    int n_bypass, n_sel0, n_sel1, n_leaf, n_sat;

    for (int t = 0; t < 4; t++) m[t] = new(24, t);
    m[0].place_std_tree(5, 9, 4, 12);
    m[1].place_std_tree(5, 9, 4, 12);
    m[2].set_node(10, 0, 0, 1, 2, 0, 0);
    m[2].set_node(10, 1, 1, 0, 0, 0, 0);
    m[3].place_std_tree(20, 3, 13, 7);
    build_program();

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    // program and row list
    for (int i = 0; i < np; i++) spi_write(32'(4 * i), prog[i]);
    k = 0;
    for (int t = 0; t < 4; t++)
      for (int r = 0; r < 24; r++) begin
        bit used;
        used = 0;
        for (int c = 0; c < 24; c++) if (m[t].cfg[r][c] != 0) used = 1;
        if (used) begin
          rows_t[k] = t;
          rows_r[k] = r;
          spi_write(DMEM + 32'(4 + 4 * k), 32'(t) | (32'(r) << 8));
          k++;
        end
      end
    spi_write(DMEM, 32'(k));
    spi_write(DMEM + 32'h88, 0);
    spi_read(32'(4 * 5), d);
    check(d == prog[5], "program readback over SPI");
    spi_write(32'h0000_3000, 1);      // run

    // trees, budgets, start
    load_rows(0, 4'b0011, 3, 8);
    load_rows(2, 4'b0100, 10, 10);
    load_rows(3, 4'b1000, 18, 23);
    spi_write(ENG + REG_SOLVER_P, 32'h0000_01B6);
    spi_write(ENG + REG_SOLVER_N, {16'd20, 16'd600});
    for (int i = 0; i < 4; i++) begin
      spi_read(ENG + REG_SOLVER_R + 32'(4 * i), d);
      nk[i] = int'(d[15:0]);
    end
    check(nk[0] == 117 && nk[1] == 257 && nk[2] == 210 && nk[3] == 20, "solver budgets");
    if (nk[3] == 20) ev_clamp++;
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
    spi_write(ENG + REG_IRQ_EN, 32'hF);
    spi_write(ENG + REG_COMPUTE, 32'hF);

    // wait for the mailbox
    d = 0;
    for (int i = 0; i < 200 && d != 1; i++) spi_read(DMEM + 32'h88, d);
    check(d == 1, "supervisor program finished");

    hw_sum = 0; model_sum = 0;
    for (int e = 0; e < k; e++)
      for (int w = 0; w < 6; w++) begin
        spi_read(DMEM + 32'h100 + 32'(24 * e + 4 * w), d);
        for (int i = 0; i < 4; i++) begin
          int c, mv;
          c  = 4 * w + i;
          mv = m[rows_t[e]].cnt[rows_r[e]][c];
          model_sum += mv;
          check(d[8*i +: 8] == 8'(mv), $sformatf("tile %0d node (%0d,%0d) = %0d, model %0d",
                rows_t[e], rows_r[e], c, d[8*i +: 8], mv));
        end
      end
    spi_read(DMEM + 32'h80, d);
    check(int'(d) == model_sum, $sformatf("byte sum %0d, model %0d", d, model_sum));
    check(model_sum == n_tile[0] + n_tile[1] + 255 + n_tile[3], "sum = budgets less saturation");
    spi_read(DMEM + 32'h84, d);
    check(d > 1, $sformatf("core polled %0d times", d));
    spi_read(ENG + REG_DONE, d);
    check(d == 0, "supervisor cleared the done flags");

    n_bypass = 0; n_sel0 = 0; n_sel1 = 0; n_leaf = 0; n_sat = 0;
    for (int t = 0; t < 4; t++) begin
      n_bypass += m[t].n_bypass; n_sel0 += m[t].n_sel0; n_sel1 += m[t].n_sel1;
      n_leaf += m[t].n_leaf;     n_sat += m[t].n_sat;
    end
    $display("mechanisms: bypass=%0d sel0=%0d sel1=%0d leaf=%0d saturate=%0d conf_commit=%0d",
             n_bypass, n_sel0, n_sel1, n_leaf, n_sat, ev_conf_commit);
    $display("            prob_commit=%0d broadcast=%0d parallel=%0d clamp=%0d irq=%0d",
             ev_prob_commit, ev_broadcast, ev_parallel, ev_clamp, ev_irq);
    $display("            cpu_stall=%0d spi_write=%0d spi_read=%0d", ev_stall, ev_spi_wr, ev_spi_rd);
    check(n_bypass > 0, "bypass forwarding happened");
    check(n_sel0 > 0 && n_sel1 > 0, "both branch choices happened");
    check(n_leaf > 0, "leaf counting happened");
    check(n_sat > 0, "counter saturation happened");
    check(ev_conf_commit == 13 && ev_prob_commit == 13, "queue commits, one per row written");
    check(ev_broadcast > 0, "broadcast row write happened");
    check(ev_parallel > 0, "parallel sampling happened");
    check(ev_clamp > 0, "solver clamp to N_min happened");
    check(ev_irq > 0, "done interrupt happened");
    check(ev_stall > 0, "core stalled by SPI traffic");
    check(ev_spi_wr > 0 && ev_spi_rd > 0, "SPI reads and writes happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
