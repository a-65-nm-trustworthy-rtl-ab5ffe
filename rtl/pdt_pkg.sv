// pdt_pkg: sizes, types and helpers shared by the probabilistic-decision-tree (PDT) engine.
//
// The array geometry (four tiles of 24 x 24 pNodes), the 4-bit probability, the 8-bit LFSR,
// the 8-bit leaf counter and the 8-bit configuration / 4-bit probability fields per node follow
// the published design. The bit order inside a configuration byte, the numbering of the eight
// link directions and the width of the sampling budget are choices of this implementation.
package pdt_pkg;

  localparam int unsigned NUM_TILES = 4;    // four pNode tiles
  localparam int unsigned TILE_DIM  = 24;   // each tile is 24 x 24 pNodes
  localparam int unsigned PROB_W    = 4;    // probability / random-number precision
  localparam int unsigned LFSR_W    = 8;    // LFSR length
  localparam int unsigned CNT_W     = 8;    // leaf pulse counter
  localparam int unsigned CFG_W     = 8;    // configuration bits per node
  localparam int unsigned BUDGET_W  = 16;   // sub-root sampling budget (own choice)
  localparam int unsigned ROW_W     = 5;    // row index width (24 rows)

  // Register map of the engine (byte offsets on the 32-bit register bus). Own choice.
  localparam logic [7:0] REG_CTRL      = 8'h00;  // [3:0] tile_en [12:8] row_sel [16] load_conf
                                                 // [17] load_prob [18] load_sample
  localparam logic [7:0] REG_COMPUTE   = 8'h04;  // W: [3:0] start tiles   R: [3:0] busy
  localparam logic [7:0] REG_DONE      = 8'h08;  // R: [3:0] done_flag     W: 1 clears
  localparam logic [7:0] REG_DATA      = 8'h0C;  // W: data word to queue / sampling budget
  localparam logic [7:0] REG_IRQ_EN    = 8'h10;  // [3:0] interrupt enable per tile
  localparam logic [7:0] REG_OUT_SEL   = 8'h14;  // [1:0] tile; a write captures row row_sel
  localparam logic [7:0] REG_OUTBUF    = 8'h20;  // R: 6 words of the output buffer (0x20..0x34)
  localparam logic [7:0] REG_SOLVER_P  = 8'h40;  // [3:0] p_root [7:4] p_a [11:8] p_b
  localparam logic [7:0] REG_SOLVER_N  = 8'h44;  // [15:0] N  [31:16] N_min
  localparam logic [7:0] REG_SOLVER_R  = 8'h48;  // R: 4 words (0x48..0x54): [15:0] N_k [24:16] P_k
  localparam logic [7:0] REG_SOLVER_S  = 8'h58;  // R: sum of the N_k

  // Eight link directions of a pNode, clockwise from north. A child index in the configuration
  // names the neighbour the pulse is sent to. Numbering is this implementation's choice.
  typedef enum logic [2:0] {
    DIR_N  = 3'd0,
    DIR_NE = 3'd1,
    DIR_E  = 3'd2,
    DIR_SE = 3'd3,
    DIR_S  = 3'd4,
    DIR_SW = 3'd5,
    DIR_W  = 3'd6,
    DIR_NW = 3'd7
  } dir_e;

  // One configuration byte: the register-file fields of a pNode other than the probability.
  typedef struct packed {
    logic       is_bypass;  // bit 7: forward every pulse to child_0, no random draw
    logic [2:0] child_1;    // bits 6:4: neighbour taken when rn < p
    logic [2:0] child_0;    // bits 3:1: neighbour taken otherwise
    logic       is_leaf;    // bit 0: count arriving pulses, forward nothing
  } pnode_cfg_t;

  // Row offset / column offset of the neighbour in direction d (row 0 is the north edge).
  function automatic int dir_dr(input int d);
    case (d)
      0, 1, 7: return -1;
      3, 4, 5: return 1;
      default: return 0;
    endcase
  endfunction

  function automatic int dir_dc(input int d);
    case (d)
      1, 2, 3: return 1;
      5, 6, 7: return -1;
      default: return 0;
    endcase
  endfunction

  // Direction pointing back: the link a neighbour in direction d uses to reach this node.
  function automatic int dir_opp(input int d);
    return (d + 4) % 8;
  endfunction

  // Non-zero LFSR seed of the node at (tile, row, col), so that nodes draw different sequences.
  function automatic logic [LFSR_W-1:0] node_seed(input int tile, input int row, input int col);
    int v;
    v = ((tile * 576 + row * 24 + col) * 97 + 13) % 255;
    return LFSR_W'(v + 1);
  endfunction

endpackage
