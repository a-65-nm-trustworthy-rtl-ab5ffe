// pdt_engine: the hybrid probabilistic-decision-tree inference engine.
//
// The top levels of a tree (down to depth 3) are evaluated exactly by the statistical solver,
// which also splits the total sampling budget over the four sub-roots. The deeper sub-trees are
// mapped onto four tiles of DIM x DIM pNodes and sampled: each tile's pulse generator injects
// N_i pulses at its sub-root, every pulse takes one random root-to-leaf path, and the leaf
// counters end up holding how many samples reached each leaf. Everything is reached through a
// single 32-bit register bus (see engine_regs and the register map in pdt_pkg): 32-bit words
// go through the configuration queue (6 words per row) or the probability queue (3 words per
// row) into the tiles; leaf counters come back a row at a time through the output buffer.
//
// From the design: four tiles of 24 x 24 pNodes, the two queues, the control registers, the
// output buffer, the solver and the flow configure - load budgets - sample - read counters. Own
// choices: tiles are independent (no links between tiles), and everything in engine_regs.
// Timing: register bus is single-cycle; a tile finishes N_i + H + 2 clocks after its start,
// H being the number of forwarding nodes on the longest path of its sub-tree.
module pdt_engine
  import pdt_pkg::*;
#(
  parameter int unsigned DIM = TILE_DIM,
  parameter int unsigned NT  = NUM_TILES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [7:0]  addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        irq,
  output logic [NT-1:0] tile_busy,
  output logic [NT-1:0] tile_done
);

  localparam int unsigned CONF_WORDS = (DIM * CFG_W + 31) / 32;
  localparam int unsigned PROB_WORDS = (DIM * PROB_W + 31) / 32;

  logic                  q_flush, conf_wr, prob_wr;
  logic [31:0]           q_wdata;
  logic                  conf_row_valid, prob_row_valid;
  logic [CONF_WORDS*32-1:0] conf_row;
  logic [PROB_WORDS*32-1:0] prob_row;
  logic [ROW_W-1:0]      row_sel;
  logic [NT-1:0]         cfg_row_we, prob_row_we, tile_start;
  logic [BUDGET_W-1:0]   budget     [NT];
  logic [ROW_W-1:0]      inject_row [NT];
  logic [DIM*CNT_W-1:0]  cnt_row    [NT];
  logic                  ob_capture;
  logic [1:0]            ob_tile;
  logic [2:0]            ob_word_sel;
  logic [31:0]           ob_word;
  logic [PROB_W-1:0]     sv_p_root, sv_p_a, sv_p_b;
  logic [BUDGET_W-1:0]   sv_n_total, sv_n_min;
  logic [2*PROB_W:0]     sv_p_sub [4];
  logic [BUDGET_W-1:0]   sv_n_sub [4];
  logic [BUDGET_W+1:0]   sv_n_sum;

  engine_regs #(.NT(NT)) u_regs (
    .clk, .rst_n, .req, .we, .addr, .wdata, .rdata,
    .q_flush, .conf_wr, .prob_wr, .q_wdata, .conf_row_valid, .prob_row_valid,
    .row_sel, .cfg_row_we, .prob_row_we, .tile_start, .budget, .inject_row,
    .tile_busy, .tile_done,
    .ob_capture, .ob_tile, .ob_word_sel, .ob_word,
    .sv_p_root, .sv_p_a, .sv_p_b, .sv_n_total, .sv_n_min, .sv_p_sub, .sv_n_sub, .sv_n_sum,
    .irq
  );

  row_queue #(.WORDS(CONF_WORDS)) u_conf_queue (
    .clk, .rst_n, .flush(q_flush), .wr(conf_wr), .wdata(q_wdata),
    .row_valid(conf_row_valid), .row_data(conf_row), .fill()
  );

  row_queue #(.WORDS(PROB_WORDS)) u_prob_queue (
    .clk, .rst_n, .flush(q_flush), .wr(prob_wr), .wdata(q_wdata),
    .row_valid(prob_row_valid), .row_data(prob_row), .fill()
  );

  for (genvar t = 0; t < NT; t++) begin : g_tile
    pnode_tile #(.DIM(DIM), .TILE(t)) u_tile (
      .clk, .rst_n,
      .row_sel    (row_sel),
      .cfg_row_we (cfg_row_we[t]),
      .cfg_row    (conf_row[DIM*CFG_W-1:0]),
      .prob_row_we(prob_row_we[t]),
      .prob_row   (prob_row[DIM*PROB_W-1:0]),
      .cnt_row    (cnt_row[t]),
      .start      (tile_start[t]),
      .budget     (budget[t]),
      .inject_row (inject_row[t]),
      .busy       (tile_busy[t]),
      .done       (tile_done[t])
    );
  end

  output_buffer #(.NODES(DIM), .CW(CNT_W), .WORDS(6)) u_outbuf (
    .clk, .rst_n,
    .capture (ob_capture),
    .row_in  (cnt_row[ob_tile]),
    .word_sel(ob_word_sel),
    .word    (ob_word)
  );

  stat_solver u_solver (
    .clk, .rst_n,
    .p_root (sv_p_root),
    .p_a    (sv_p_a),
    .p_b    (sv_p_b),
    .n_total(sv_n_total),
    .n_min  (sv_n_min),
    .p_sub  (sv_p_sub),
    .n_sub  (sv_n_sub),
    .n_sum  (sv_n_sum)
  );

  initial assert (NT <= 4 && DIM <= 24)
    else $error("pdt_engine: register map holds at most 4 tiles of 24 x 24");

endmodule
