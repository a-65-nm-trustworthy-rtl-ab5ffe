// tb_engine_regs: checks the engine's control registers and queue control on their own.
// It writes and reads back the control register, checks where data words are steered in each
// load mode, that committed rows are written into exactly the enabled tiles, that budgets and
// injection rows reach only enabled tiles, that compute strobes start tiles, that done flags
// are set by a rising tile done, raise the interrupt when enabled and clear by writing 1 or by
// a restart, and that the output-buffer and solver registers are mapped where the map says.
// Field names follow the design's control register; the addresses and the steering rules checked
// here are this implementation's choices.
module tb_engine_regs;
  import pdt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req = 0, we = 0;
  logic [7:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic q_flush, conf_wr, prob_wr;
  logic [31:0] q_wdata;
  logic conf_row_valid = 0, prob_row_valid = 0;
  logic [4:0] row_sel;
  logic [3:0] cfg_row_we, prob_row_we, tile_start;
  logic [15:0] budget [4];
  logic [4:0] inject_row [4];
  logic [3:0] tile_busy = 0, tile_done = 0;
  logic ob_capture;
  logic [1:0] ob_tile;
  logic [2:0] ob_word_sel;
  logic [31:0] ob_word;
  logic [3:0] sv_p_root, sv_p_a, sv_p_b;
  logic [15:0] sv_n_total, sv_n_min;
  logic [8:0] sv_p_sub [4];
  logic [15:0] sv_n_sub [4];
  logic [17:0] sv_n_sum;
  logic irq;
  int checks = 0, failures = 0;

  engine_regs dut (.*);

  always #5 clk = ~clk;
  assign ob_word = 32'hA000_0000 + 32'(ob_word_sel);
  always_comb for (int k = 0; k < 4; k++) begin
    sv_p_sub[k] = 9'(16 * k + 1);
    sv_n_sub[k] = 16'(100 + k);
  end
  assign sv_n_sum = 18'd12345;

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
    #1;
  endtask

  task automatic idle();
    @(negedge clk);
    req = 0; we = 0;
    #1;
  endtask

  task automatic read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    req = 1; we = 0; addr = a;
    #1 d = rdata;
    @(negedge clk);
    req = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // control register: tile_en = 0101, row 17, load_conf
    write(REG_CTRL, 32'h0001_1105);
    check(q_flush, "control write flushes the queues");
    idle();
    read(REG_CTRL, d);
    check(d == 32'h0001_1105, $sformatf("CTRL readback %08h", d));
    check(row_sel == 5'd17, "row_sel");
    write(REG_DATA, 32'h1234_5678);
    check(conf_wr && !prob_wr && q_wdata == 32'h1234_5678, "load_conf steers to configuration queue");
    idle();
    // committed rows go to enabled tiles only
    @(negedge clk); conf_row_valid = 1; #1;
    check(cfg_row_we == 4'b0101 && prob_row_we == 0, "configuration row to enabled tiles");
    @(negedge clk); conf_row_valid = 0; prob_row_valid = 1; #1;
    check(prob_row_we == 4'b0101 && cfg_row_we == 0, "probability row to enabled tiles");
    @(negedge clk); prob_row_valid = 0;
    // load_prob
    write(REG_CTRL, 32'h0002_0003);
    write(REG_DATA, 32'hCAFE_F00D);
    check(prob_wr && !conf_wr, "load_prob steers to probability queue");
    idle();
    // load_sample: tiles 0 and 1 get the budget, 2 and 3 keep theirs
    write(REG_CTRL, 32'h0004_0003);
    write(REG_DATA, 32'h0009_0123);
    check(!prob_wr && !conf_wr, "load_sample does not touch the queues");
    idle();
    check(budget[0] == 16'h0123 && budget[1] == 16'h0123 && inject_row[1] == 5'd9,
          "budget and injection row of enabled tiles");
    check(budget[2] == 0 && budget[3] == 0, "disabled tiles keep their budget");
    // compute
    write(REG_COMPUTE, 32'h0000_0006);
    check(tile_start == 4'b0110, "compute starts the written tiles");
    idle();
    check(tile_start == 0, "start is a strobe");
    @(negedge clk); tile_busy = 4'b0110;
    read(REG_COMPUTE, d);
    check(d == 32'h6, "busy readback");
    // done flags and interrupt
    write(REG_IRQ_EN, 32'h4);
    idle();
    @(negedge clk); tile_done = 4'b0010; tile_busy = 4'b0100;
    @(negedge clk);
    read(REG_DONE, d);
    check(d == 32'h2, "done flag 1 set");
    check(!irq, "no interrupt for a masked tile");
    @(negedge clk); tile_done = 4'b0110; tile_busy = 0;
    @(negedge clk);
    read(REG_DONE, d);
    check(d == 32'h6 && irq, "done flag 2 set and interrupt raised");
    write(REG_DONE, 32'h4);
    idle();
    read(REG_DONE, d);
    check(d == 32'h2 && !irq, "write 1 clears done flag and interrupt");
    @(negedge clk); tile_done = 0;
    write(REG_COMPUTE, 32'h2);
    idle();
    read(REG_DONE, d);
    check(d == 32'h0, "restart clears done flag");
    // output buffer
    write(REG_OUT_SEL, 32'h3);
    check(ob_capture && ob_tile == 2'd3, "OUT_SEL write captures the written tile");
    idle();
    read(REG_OUT_SEL, d);
    check(d == 32'h3, "output tile");
    for (int k = 0; k < 6; k++) begin
      read(REG_OUTBUF + 8'(4*k), d);
      check(d == 32'hA000_0000 + 32'(k), $sformatf("output buffer word %0d", k));
    end
    // solver
    write(REG_SOLVER_P, 32'h0000_0A5C);
    write(REG_SOLVER_N, 32'h0004_0032);
    idle();
    check(sv_p_root == 4'hC && sv_p_a == 4'h5 && sv_p_b == 4'hA, "solver probabilities");
    check(sv_n_total == 16'd50 && sv_n_min == 16'd4, "solver budget inputs");
    read(REG_SOLVER_P, d); check(d == 32'h0A5C, "solver P readback");
    for (int k = 0; k < 4; k++) begin
      read(REG_SOLVER_R + 8'(4*k), d);
      check(d == {7'd0, 9'(16 * k + 1), 16'(100 + k)}, $sformatf("solver result %0d", k));
    end
    read(REG_SOLVER_S, d); check(d == 32'd12345, "solver sum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
