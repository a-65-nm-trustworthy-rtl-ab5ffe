// row_queue: bridge from 32-bit words to one full tile row.
//
// The tiles are written a whole row at a time, far wider than the 32-bit bus. A row queue
// collects WORDS consecutive 32-bit words; word k fills bits 32k+31..32k of the row. When the
// last word of a row arrives the queue commits: `row_valid` is high for one clock with the
// complete row on `row_data`, and the queue starts over. `flush` discards a partly filled row.
// The configuration queue uses WORDS = 6 (24 nodes x 8 bits = 192 bits), the probability queue
// WORDS = 3 (24 nodes x 4 bits = 96 bits). With 32-bit words this means four configuration
// bytes (conf[7:0] x 4) or eight probability nibbles (prob[3:0] x 8) per word.
//
// From the design: the two row widths and the aggregation of six and three words before the
// row is committed. Own choices: word order (first word = least significant bits, i.e. nodes
// 0..3 or 0..7), registered output, and the flush input. Timing: `row_valid` follows the clock
// edge that accepts the last word; one word may be written every clock.
module row_queue #(
  parameter int unsigned WORDS  = 6,
  parameter int unsigned WORD_W = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      flush,
  input  logic                      wr,
  input  logic [WORD_W-1:0]         wdata,
  output logic                      row_valid,
  output logic [WORDS*WORD_W-1:0]   row_data,
  output logic [$clog2(WORDS+1)-1:0] fill
);

  localparam int unsigned FW = $clog2(WORDS + 1);

  logic [WORD_W-1:0] buffer [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill      <= '0;
      row_valid <= 1'b0;
      row_data  <= '0;
      for (int i = 0; i < WORDS; i++) buffer[i] <= '0;
    end else begin
      row_valid <= 1'b0;
      if (flush) begin
        fill <= '0;
      end else if (wr) begin
        if (fill == FW'(WORDS - 1)) begin
          for (int i = 0; i < WORDS - 1; i++) row_data[i*WORD_W +: WORD_W] <= buffer[i];
          row_data[(WORDS-1)*WORD_W +: WORD_W] <= wdata;
          row_valid <= 1'b1;
          fill      <= '0;
        end else begin
          buffer[fill] <= wdata;
          fill         <= fill + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) fill < FW'(WORDS));

endmodule
