// engine_regs: control registers and queue control of the PDT engine.
//
// A 32-bit register slave (single-cycle: a write takes effect at the clock edge, read data is
// combinational) shared by the RISC-V core and the SPI host. It holds the control register
// (tile_en[3:0], row_sel[4:0], load_conf, load_prob, load_sample), starts tiles (compute[3:0]),
// collects their done flags (done_flag[3:0]) and raises `irq` for enabled done flags.
//
// Data words written to REG_DATA are steered by the load_* mode: to the configuration queue
// (load_conf), to the probability queue (load_prob), or, with load_sample, they set the
// sampling budget (bits 15:0) and the injection row (bits 20:16) of every enabled tile. When a
// queue commits a row, the queue control writes it into row row_sel of every enabled tile, so a
// sub-tree can be loaded into several tiles at once and sampled in parallel. A write of
// REG_OUT_SEL captures row row_sel of the selected tile into the output buffer. The statistical
// solver's inputs and results are also mapped here. The register map is in pdt_pkg.
//
// From the design: the register names and widths of the control register, separate
// configuration and probability paths, row addressing, per-tile done flags read by polling or
// interrupt. Own choices: the address map, the data-word steering, broadcast to all enabled
// tiles, clearing the queues on a write of the control register, done flags set on the rising
// edge of a tile's done and cleared by writing 1 or by restarting the tile.
module engine_regs
  import pdt_pkg::*;
#(
  parameter int unsigned NT = NUM_TILES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // register bus
  input  logic                 req,
  input  logic                 we,
  input  logic [7:0]           addr,
  input  logic [31:0]          wdata,
  output logic [31:0]          rdata,
  // queues
  output logic                 q_flush,
  output logic                 conf_wr,
  output logic                 prob_wr,
  output logic [31:0]          q_wdata,
  input  logic                 conf_row_valid,
  input  logic                 prob_row_valid,
  // tiles
  output logic [ROW_W-1:0]     row_sel,
  output logic [NT-1:0]        cfg_row_we,
  output logic [NT-1:0]        prob_row_we,
  output logic [NT-1:0]        tile_start,
  output logic [BUDGET_W-1:0]  budget     [NT],
  output logic [ROW_W-1:0]     inject_row [NT],
  input  logic [NT-1:0]        tile_busy,
  input  logic [NT-1:0]        tile_done,
  // output buffer
  output logic                 ob_capture,
  output logic [1:0]           ob_tile,     // tile whose row is captured (valid with ob_capture)
  output logic [2:0]           ob_word_sel,
  input  logic [31:0]          ob_word,
  // statistical solver
  output logic [PROB_W-1:0]    sv_p_root,
  output logic [PROB_W-1:0]    sv_p_a,
  output logic [PROB_W-1:0]    sv_p_b,
  output logic [BUDGET_W-1:0]  sv_n_total,
  output logic [BUDGET_W-1:0]  sv_n_min,
  input  logic [2*PROB_W:0]    sv_p_sub [4],
  input  logic [BUDGET_W-1:0]  sv_n_sub [4],
  input  logic [BUDGET_W+1:0]  sv_n_sum,
  // interrupt
  output logic                 irq
);

  logic [NT-1:0] tile_en;
  logic          load_conf, load_prob, load_sample;
  logic [NT-1:0] done_flag;
  logic [NT-1:0] done_q;
  logic [NT-1:0] irq_en;
  logic          wr, wr_data;
  logic [1:0]    ob_tile_q;

  assign wr      = req && we;
  assign wr_data = wr && addr == REG_DATA;

  // Data steering (queue control, input side)
  assign q_flush = wr && addr == REG_CTRL;
  assign conf_wr = wr_data && load_conf;
  assign prob_wr = wr_data && !load_conf && load_prob;
  assign q_wdata = wdata;

  // Queue control, tile side: committed rows go to all enabled tiles
  assign cfg_row_we  = conf_row_valid ? tile_en : '0;
  assign prob_row_we = prob_row_valid ? tile_en : '0;

  assign tile_start  = (wr && addr == REG_COMPUTE) ? wdata[NT-1:0] : '0;
  assign ob_capture  = wr && addr == REG_OUT_SEL;
  assign ob_tile     = ob_capture ? wdata[1:0] : ob_tile_q;
  assign ob_word_sel = 3'((addr - REG_OUTBUF) >> 2);
  assign irq         = |(done_flag & irq_en);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tile_en     <= '0;
      row_sel     <= '0;
      load_conf   <= 1'b0;
      load_prob   <= 1'b0;
      load_sample <= 1'b0;
      irq_en      <= '0;
      ob_tile_q   <= '0;
      done_flag   <= '0;
      done_q      <= '0;
      sv_p_root   <= '0;
      sv_p_a      <= '0;
      sv_p_b      <= '0;
      sv_n_total  <= '0;
      sv_n_min    <= '0;
      for (int t = 0; t < NT; t++) begin
        budget[t]     <= '0;
        inject_row[t] <= '0;
      end
    end else begin
      done_q <= tile_done;
      // done flags: set on a rising done, cleared by W1C or by a new start
      for (int t = 0; t < NT; t++) begin
        if (tile_start[t])
          done_flag[t] <= 1'b0;
        else if (tile_done[t] && !done_q[t])
          done_flag[t] <= 1'b1;
        else if (wr && addr == REG_DONE && wdata[t])
          done_flag[t] <= 1'b0;
      end
      if (wr) begin
        unique case (addr)
          REG_CTRL: begin
            tile_en     <= wdata[NT-1:0];
            row_sel     <= wdata[8 +: ROW_W];
            load_conf   <= wdata[16];
            load_prob   <= wdata[17];
            load_sample <= wdata[18];
          end
          REG_DATA: begin
            if (!load_conf && !load_prob && load_sample)
              for (int t = 0; t < NT; t++)
                if (tile_en[t]) begin
                  budget[t]     <= wdata[BUDGET_W-1:0];
                  inject_row[t] <= wdata[16 +: ROW_W];
                end
          end
          REG_IRQ_EN:   irq_en  <= wdata[NT-1:0];
          REG_OUT_SEL:  ob_tile_q <= wdata[1:0];
          REG_SOLVER_P: begin
            sv_p_root <= wdata[3:0];
            sv_p_a    <= wdata[7:4];
            sv_p_b    <= wdata[11:8];
          end
          REG_SOLVER_N: begin
            sv_n_total <= wdata[15:0];
            sv_n_min   <= wdata[31:16];
          end
          default: ;
        endcase
      end
    end
  end

  // Read multiplexer
  always_comb begin
    rdata = '0;
    case (addr)
      REG_CTRL:     rdata = {13'd0, load_sample, load_prob, load_conf, 3'd0, row_sel,
                             4'd0, 4'(tile_en)};
      REG_COMPUTE:  rdata = 32'(tile_busy);
      REG_DONE:     rdata = 32'(done_flag);
      REG_IRQ_EN:   rdata = 32'(irq_en);
      REG_OUT_SEL:  rdata = 32'(ob_tile_q);
      REG_SOLVER_P: rdata = {20'd0, sv_p_b, sv_p_a, sv_p_root};
      REG_SOLVER_N: rdata = {sv_n_min, sv_n_total};
      REG_SOLVER_S: rdata = 32'(sv_n_sum);
      default: begin
        if (addr >= REG_OUTBUF && addr < REG_OUTBUF + 8'd24)
          rdata = ob_word;
        else if (addr >= REG_SOLVER_R && addr < REG_SOLVER_R + 8'd16)
          rdata = {7'd0, sv_p_sub[2'((addr - REG_SOLVER_R) >> 2)],
                   sv_n_sub[2'((addr - REG_SOLVER_R) >> 2)]};
      end
    endcase
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(conf_wr && prob_wr));

endmodule
