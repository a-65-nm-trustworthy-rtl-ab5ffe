// pnode_tile: a DIM x DIM array of pNodes with its row selector and sub-root sampler.
//
// Every pNode is wired to its eight neighbours: input link d of node (r, c) is output link
// opposite(d) of the neighbour in direction d. Links that leave the array are dropped, with one
// exception: the west input of column 0 in row `inject_row` is fed by the tile's pulse
// generator, so pulses enter the tile at its west edge and travel (through bypass nodes if
// needed) to the sub-root.
//
// Configuration is written a whole row at a time: `cfg_row` (8 bits per node, node c in bits
// 8c+7..8c) when `cfg_row_we`, `prob_row` (4 bits per node, node c in bits 4c+3..4c) when
// `prob_row_we`, both into row `row_sel`. `cnt_row` returns the leaf counters of row `row_sel`
// (8 bits per node, combinational). `start` clears all leaf counters and begins sampling with
// `budget` pulses; `done` is sticky until the next start.
//
// From the design: 24 x 24 nodes per tile, 8-way neighbour links, row-wide configuration and
// probability writes selected by a row selector, one sub-root down-counter per tile. Own
// choices: the west-edge injection point, dropping links at the array edge, clearing the
// counters at start, and reading counters a row at a time through the same row selector.
module pnode_tile
  import pdt_pkg::*;
#(
  parameter int unsigned DIM  = TILE_DIM,
  parameter int unsigned TILE = 0          // tile number, only used to give distinct seeds
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // row access
  input  logic [ROW_W-1:0]          row_sel,
  input  logic                      cfg_row_we,
  input  logic [DIM*CFG_W-1:0]      cfg_row,
  input  logic                      prob_row_we,
  input  logic [DIM*PROB_W-1:0]     prob_row,
  output logic [DIM*CNT_W-1:0]      cnt_row,
  // sampling
  input  logic                      start,
  input  logic [BUDGET_W-1:0]       budget,
  input  logic [ROW_W-1:0]          inject_row,
  output logic                      busy,
  output logic                      done
);

  logic [7:0]       pout [DIM][DIM];
  logic [7:0]       pin  [DIM][DIM];
  logic [CNT_W-1:0] cnt  [DIM][DIM];
  logic [DIM*DIM-1:0] node_active;
  logic             inject;
  logic             array_active;

  for (genvar r = 0; r < DIM; r++) begin : g_row
    for (genvar c = 0; c < DIM; c++) begin : g_col
      // input links
      for (genvar d = 0; d < 8; d++) begin : g_link
        localparam int NR = r + dir_dr(d);
        localparam int NC = c + dir_dc(d);
        if (NR >= 0 && NR < DIM && NC >= 0 && NC < DIM) begin : g_in
          assign pin[r][c][d] = pout[NR][NC][dir_opp(d)];
        end else if (d == int'(DIR_W) && c == 0) begin : g_edge
          assign pin[r][c][d] = inject && (inject_row == ROW_W'(r));
        end else begin : g_none
          assign pin[r][c][d] = 1'b0;
        end
      end

      pnode #(.SEED(node_seed(TILE, r, c))) u_node (
        .clk      (clk),
        .rst_n    (rst_n),
        .cfg_we   (cfg_row_we && row_sel == ROW_W'(r)),
        .cfg_in   (cfg_row[c*CFG_W +: CFG_W]),
        .prob_we  (prob_row_we && row_sel == ROW_W'(r)),
        .prob_in  (prob_row[c*PROB_W +: PROB_W]),
        .clr_cnt  (start),
        .pulse_in (pin[r][c]),
        .pulse_out(pout[r][c]),
        .count    (cnt[r][c])
      );

      assign node_active[r*DIM + c] = |pout[r][c];
    end
  end

  assign array_active = |node_active;

  // Row read-out of the leaf counters
  always_comb begin
    cnt_row = '0;
    for (int r = 0; r < DIM; r++)
      if (row_sel == ROW_W'(r))
        for (int c = 0; c < DIM; c++)
          cnt_row[c*CNT_W +: CNT_W] = cnt[r][c];
  end

  subroot_sampler #(.BW(BUDGET_W)) u_sampler (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (start),
    .budget      (budget),
    .array_active(array_active),
    .inject      (inject),
    .busy        (busy),
    .done        (done),
    .remaining   ()
  );

  initial assert (DIM <= 32) else $error("pnode_tile: DIM must fit the 5-bit row index");

endmodule
