// output_buffer: holding register for one row of leaf counters.
//
// On `capture` it stores the 24 8-bit counters of the selected tile row (192 bits). The
// processor or the SPI host then reads the row as six 32-bit words; word k holds the counters
// of nodes 4k..4k+3, node 4k in the low byte. Storing the row decouples the read-out from the
// tile, which can be reconfigured and restarted while the row is being read.
//
// From the design: an output buffer of 8 x 24 bits between the tiles and the bus. Own choices:
// the capture strobe and the word layout. Timing: `word` is combinational from the register;
// the register loads on the clock edge where `capture` is high.
module output_buffer #(
  parameter int unsigned NODES = 24,
  parameter int unsigned CW    = 8,
  parameter int unsigned WORDS = (NODES * CW + 31) / 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      capture,
  input  logic [NODES*CW-1:0]       row_in,
  input  logic [$clog2(WORDS)-1:0]  word_sel,
  output logic [31:0]               word
);

  logic [WORDS*32-1:0] buffer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       buffer <= '0;
    else if (capture) buffer <= (WORDS*32)'(row_in);
  end

  assign word = buffer[word_sel*32 +: 32];

endmodule
