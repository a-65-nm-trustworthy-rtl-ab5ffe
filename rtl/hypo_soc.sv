// hypo_soc: hypoglycemia-forecasting chip - RISC-V supervisor, SPI port and PDT engine.
//
// Two bus masters share one 32-bit single-cycle data bus: the RV32I core and the SPI slave
// (driven by an external host). The SPI has priority; a core load/store that collides with an
// SPI access waits one clock. Address map (byte addresses):
//   0x0000_0000 - 0x0000_0FFF  instruction memory (also writable over the bus, to load code)
//   0x0000_1000 - 0x0000_1FFF  data memory
//   0x0000_2000 - 0x0000_20FF  PDT engine registers (map in pdt_pkg)
//   0x0000_3000                system register: bit 0 = run (core held at address 0 while 0)
// Typical use: the host loads the program and tree over SPI and sets run; tree configuration,
// probabilities and budgets go through the engine registers, the tiles sample, and the core
// polls the done flags, reads the leaf counters through the output buffer and post-processes
// them in its data memory, where the host can read the result. The engine interrupt and the
// tile status are also brought out as pins.
//
// From the design: the blocks and their connections (host - SPI, RISC-V with instruction and
// data memory, control registers, queues, tiles, output buffer). Own choices: the single shared
// bus with SPI priority, the address map, the run bit and the memory sizes.
module hypo_soc
  import pdt_pkg::*;
#(
  parameter int unsigned DIM        = TILE_DIM,
  parameter int unsigned IMEM_WORDS = 1024,
  parameter int unsigned DMEM_WORDS = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 spi_scx,
  input  logic                 spi_mosi,
  input  logic                 spi_ss,
  output logic                 spi_miso,
  output logic                 irq,
  output logic [NUM_TILES-1:0] tile_busy,
  output logic [NUM_TILES-1:0] tile_done,
  output logic                 cpu_run
);

  localparam int unsigned IAW = $clog2(IMEM_WORDS);
  localparam int unsigned DAW = $clog2(DMEM_WORDS);

  // core ports
  logic [31:0] i_addr, i_rdata;
  logic        c_req, c_we, c_gnt;
  logic [3:0]  c_be;
  logic [31:0] c_addr, c_wdata;
  // SPI ports
  logic        s_req, s_we;
  logic [31:0] s_addr, s_wdata;
  // shared bus
  logic        b_req, b_we;
  logic [3:0]  b_be;
  logic [31:0] b_addr, b_wdata, b_rdata;
  logic        sel_imem, sel_dmem, sel_eng, sel_sys;
  logic [31:0] imem_rdata, dmem_rdata, eng_rdata;

  // ---- masters ----
  rv32i_core u_core (
    .clk, .rst_n,
    .run    (cpu_run),
    .i_addr (i_addr),
    .i_rdata(i_rdata),
    .d_req  (c_req),
    .d_we   (c_we),
    .d_be   (c_be),
    .d_addr (c_addr),
    .d_wdata(c_wdata),
    .d_rdata(b_rdata),
    .d_gnt  (c_gnt),
    .retire ()
  );

  spi_slave u_spi (
    .clk, .rst_n,
    .scx  (spi_scx),
    .mosi (spi_mosi),
    .ss   (spi_ss),
    .miso (spi_miso),
    .req  (s_req),
    .we   (s_we),
    .addr (s_addr),
    .d_out(s_wdata),
    .d_in (b_rdata),
    .gnt  (s_req)
  );

  // ---- arbitration: SPI first ----
  assign c_gnt   = !s_req;
  assign b_req   = s_req || c_req;
  assign b_we    = s_req ? s_we    : c_we;
  assign b_be    = s_req ? 4'hF    : c_be;
  assign b_addr  = s_req ? s_addr  : c_addr;
  assign b_wdata = s_req ? s_wdata : c_wdata;

  // ---- decode ----
  assign sel_imem = b_addr[31:12] == 20'h00000;
  assign sel_dmem = b_addr[31:12] == 20'h00001;
  assign sel_eng  = b_addr[31:8]  == 24'h000020;
  assign sel_sys  = b_addr[31:0]  == 32'h0000_3000;

  always_comb begin
    b_rdata = '0;
    if (sel_imem)      b_rdata = imem_rdata;
    else if (sel_dmem) b_rdata = dmem_rdata;
    else if (sel_eng)  b_rdata = eng_rdata;
    else if (sel_sys)  b_rdata = {31'd0, cpu_run};
  end

  // ---- slaves ----
  sram #(.DEPTH(IMEM_WORDS)) u_imem (
    .clk,
    .a_addr (i_addr[IAW+1:2]),
    .a_rdata(i_rdata),
    .b_we   (b_req && b_we && sel_imem),
    .b_be   (b_be),
    .b_addr (b_addr[IAW+1:2]),
    .b_wdata(b_wdata),
    .b_rdata(imem_rdata)
  );

  sram #(.DEPTH(DMEM_WORDS)) u_dmem (
    .clk,
    .a_addr ('0),
    .a_rdata(),
    .b_we   (b_req && b_we && sel_dmem),
    .b_be   (b_be),
    .b_addr (b_addr[DAW+1:2]),
    .b_wdata(b_wdata),
    .b_rdata(dmem_rdata)
  );

  pdt_engine #(.DIM(DIM), .NT(NUM_TILES)) u_engine (
    .clk, .rst_n,
    .req      (b_req && sel_eng),
    .we       (b_we),
    .addr     (b_addr[7:0]),
    .wdata    (b_wdata),
    .rdata    (eng_rdata),
    .irq      (irq),
    .tile_busy(tile_busy),
    .tile_done(tile_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         cpu_run <= 1'b0;
    else if (b_req && b_we && sel_sys)  cpu_run <= b_wdata[0];
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(c_req && s_req) || !c_gnt);

endmodule
