// spi_slave: SPI port through which an external host reads and writes the on-chip bus.
//
// SPI mode 0 (clock idles low, data sampled on the rising edge of SCX, changed on the falling
// edge), most significant bit first, chip select SS active low. A transfer is one frame of
// 72 bits while SS is low: an 8-bit command, a 32-bit byte address, then 32 data bits.
//   command 8'h02: write - the data bits come in on MOSI; the bus write is issued after the
//                  last bit.
//   command 8'h03: read  - the bus read is issued right after the address; the word is shifted
//                  out on MISO during the data bits.
// Other commands are ignored. Raising SS aborts a frame. The SPI pins are sampled with the
// system clock through two-flop synchronisers, so SCX must be at most clk/16. The bus side is a
// simple request/grant master: `req` stays high until `gnt`, read data is taken in the grant
// clock.
//
// From the design: an SPI slave with SCX, MOSI, MISO, SS and a 32-bit address, data-in and
// data-out towards the chip. Own choices: the frame format and commands, mode 0, oversampling
// in the system clock domain, and MISO driven low when not selected.
module spi_slave (
  input  logic        clk,
  input  logic        rst_n,
  // SPI pins
  input  logic        scx,
  input  logic        mosi,
  input  logic        ss,
  output logic        miso,
  // bus master
  output logic        req,
  output logic        we,
  output logic [31:0] addr,
  output logic [31:0] d_out,
  input  logic [31:0] d_in,
  input  logic        gnt
);

  localparam logic [7:0] CMD_WRITE = 8'h02;
  localparam logic [7:0] CMD_READ  = 8'h03;

  logic [2:0]  scx_s, mosi_s, ss_s;   // synchronisers + edge history
  logic        rise, fall, sel;
  logic [6:0]  bitcnt;
  logic [31:0] shreg;
  logic [7:0]  cmd;
  logic [31:0] tx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scx_s  <= '0;
      mosi_s <= '0;
      ss_s   <= '1;
    end else begin
      scx_s  <= {scx_s[1:0], scx};
      mosi_s <= {mosi_s[1:0], mosi};
      ss_s   <= {ss_s[1:0], ss};
    end
  end

  assign sel  = !ss_s[1];
  assign rise = sel && scx_s[1] && !scx_s[2];
  assign fall = sel && !scx_s[1] && scx_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitcnt <= '0;
      shreg  <= '0;
      cmd    <= '0;
      addr   <= '0;
      d_out  <= '0;
      tx     <= '0;
      req    <= 1'b0;
      we     <= 1'b0;
    end else begin
      if (req && gnt) begin
        req <= 1'b0;
        if (!we) tx <= d_in;
      end
      if (!sel) begin
        bitcnt <= '0;
      end else if (rise) begin
        shreg  <= {shreg[30:0], mosi_s[1]};
        bitcnt <= (bitcnt == 7'd72) ? bitcnt : bitcnt + 1'b1;
        if (bitcnt == 7'd7)
          cmd <= {shreg[6:0], mosi_s[1]};
        if (bitcnt == 7'd39) begin
          addr <= {shreg[30:0], mosi_s[1]};
          if (cmd == CMD_READ) begin
            req <= 1'b1;
            we  <= 1'b0;
          end
        end
        if (bitcnt == 7'd71 && cmd == CMD_WRITE) begin
          d_out <= {shreg[30:0], mosi_s[1]};
          req   <= 1'b1;
          we    <= 1'b1;
        end
      end else if (fall && bitcnt > 7'd40 && bitcnt < 7'd72) begin
        tx <= {tx[30:0], 1'b0};
      end
    end
  end

  assign miso = sel && tx[31];

  assert property (@(posedge clk) disable iff (!rst_n) req && !gnt |=> req);

endmodule
