// sram: word-organised on-chip memory used as the RISC-V instruction and data memory.
//
// DEPTH words of 32 bits. Port A is a read-only port with combinational read (instruction
// fetch); port B is a read/write port with per-byte write enables, combinational read data and
// writes at the clock edge. Both ports take word addresses. Written as an array; in silicon it
// is a memory macro.
//
// From the design: separate instruction and data memories next to the core. Own choices: the
// size (DEPTH = 1024 words, 4 KiB each), the two ports (so the host can load a program while
// the core is held), combinational read for a single-cycle core, and no reset of the contents.
module sram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  // port A: read only
  input  logic [AW-1:0] a_addr,
  output logic [31:0]   a_rdata,
  // port B: read / write
  input  logic          b_we,
  input  logic [3:0]    b_be,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);

  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (b_we)
      for (int i = 0; i < 4; i++)
        if (b_be[i]) mem[b_addr][8*i +: 8] <= b_wdata[8*i +: 8];
  end

  assign a_rdata = mem[a_addr];
  assign b_rdata = mem[b_addr];

endmodule
