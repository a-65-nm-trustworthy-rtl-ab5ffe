// pdt_ref_pkg: reference model of the pNode tiles for the testbenches.
//
// It keeps, for every tile, an image of the configuration bytes and probabilities, a model of
// each node's LFSR and the leaf counters, and replays a sample by walking the tree node by node
// from the west-edge injection point. Because every node sees the pulses in the order they were
// injected, replaying them one after another gives exactly the counts of the pipelined
// hardware. The model also reports the longest path (forwarding nodes) a sample took. It also
// holds a helper that places a small standard sub-tree (two bypass nodes, three branch nodes,
// two more bypass nodes and four leaves) around a given row.
// The behaviour it models (branch on rn < p, bypass, counting leaves) is the published design's; the
// direction numbering, byte layout and injection point it assumes are this implementation's.
package pdt_ref_pkg;

  localparam int MAXT = 4;
  localparam int MAXD = 24;

  class tile_model;
    int          dim;
    int          tile;
    logic [7:0]  cfg  [MAXD][MAXD];
    logic [3:0]  prob [MAXD][MAXD];
    logic [7:0]  lfsr [MAXD][MAXD];
    int          cnt  [MAXD][MAXD];
    int          max_hops;
    int          last_hops;   // forwarding nodes of the latest sample
    int          n_bypass, n_sel0, n_sel1, n_leaf, n_sat, n_drop;

    function new(int dim_i, int tile_i);
      dim  = dim_i;
      tile = tile_i;
      for (int r = 0; r < MAXD; r++)
        for (int c = 0; c < MAXD; c++) begin
          cfg[r][c]  = '0;
          prob[r][c] = '0;
          lfsr[r][c] = pdt_pkg::node_seed(tile, r, c);
          cnt[r][c]  = 0;
        end
      max_hops = 0;
      n_bypass = 0; n_sel0 = 0; n_sel1 = 0; n_leaf = 0; n_sat = 0; n_drop = 0;
    endfunction

    // x^8 + x^6 + x^5 + x^4 + 1, shift left
    static function logic [7:0] step(logic [7:0] s);
      return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
    endfunction

    function void set_node(int r, int c, bit leaf, bit bypass, int ch0, int ch1, int p);
      cfg[r][c]  = {bypass, 3'(ch1), 3'(ch0), leaf};
      prob[r][c] = 4'(p);
    endfunction

    function void clear_counts();
      for (int r = 0; r < MAXD; r++)
        for (int c = 0; c < MAXD; c++) cnt[r][c] = 0;
    endfunction

    // Replay one pulse entering (row, 0) from the west.
    function void sample(int row);
      int r, c, hops, d;
      r = row; c = 0; hops = 0;
      for (int guard = 0; guard < 4096; guard++) begin
        logic [7:0] k;
        k = cfg[r][c];
        if (k[0]) begin
          if (cnt[r][c] < 255) cnt[r][c]++;
          else n_sat++;
          n_leaf++;
          break;
        end
        hops++;
        if (k[7]) begin
          d = int'(k[3:1]);
          n_bypass++;
        end else begin
          if (lfsr[r][c][3:0] < prob[r][c]) begin
            d = int'(k[6:4]);
            n_sel1++;
          end else begin
            d = int'(k[3:1]);
            n_sel0++;
          end
          lfsr[r][c] = step(lfsr[r][c]);
        end
        r += pdt_pkg::dir_dr(d);
        c += pdt_pkg::dir_dc(d);
        if (r < 0 || r >= dim || c < 0 || c >= dim) begin
          n_drop++;
          break;
        end
      end
      if (hops > max_hops) max_hops = hops;
      last_hops = hops;
    endfunction

    // Configuration row image as the 6 (or fewer) 32-bit words the queue expects.
    function logic [31:0] cfg_word(int r, int w);
      logic [31:0] v;
      v = '0;
      for (int i = 0; i < 4; i++)
        if (4*w + i < dim) v[8*i +: 8] = cfg[r][4*w + i];
      return v;
    endfunction

    function logic [31:0] prob_word(int r, int w);
      logic [31:0] v;
      v = '0;
      for (int i = 0; i < 8; i++)
        if (8*w + i < dim) v[4*i +: 4] = prob[r][8*w + i];
      return v;
    endfunction

    // Standard sub-tree entering at row R (needs rows R-2..R+3 and columns 0..5):
    //  (R,0),(R,1) bypass east -> (R,2) sub-root: child_0 NE (R-1,3), child_1 SE (R+1,3)
    //  (R-1,3): child_0 N -> leaf (R-2,3), child_1 E -> leaf (R-1,4)
    //  (R+1,3): child_0 E -> bypass (R+1,4) -> leaf (R+1,5);
    //           child_1 S -> bypass (R+2,3) SW -> leaf (R+3,2)
    function void place_std_tree(int R, int p0, int p1, int p2);
      set_node(R,   0, 0, 1, 2, 0, 0);
      set_node(R,   1, 0, 1, 2, 0, 0);
      set_node(R,   2, 0, 0, 1, 3, p0);
      set_node(R-1, 3, 0, 0, 0, 2, p1);
      set_node(R-2, 3, 1, 0, 0, 0, 0);
      set_node(R-1, 4, 1, 0, 0, 0, 0);
      set_node(R+1, 3, 0, 0, 2, 4, p2);
      set_node(R+1, 4, 0, 1, 2, 0, 0);
      set_node(R+1, 5, 1, 0, 0, 0, 0);
      set_node(R+2, 3, 0, 1, 5, 0, 0);
      set_node(R+3, 2, 1, 0, 0, 0, 0);
    endfunction
  endclass

endpackage
