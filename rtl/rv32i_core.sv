// rv32i_core: single-cycle RV32I processor that supervises the PDT engine.
//
// Each instruction is fetched, decoded and executed in one clock: the PC addresses the
// instruction memory (combinational read), the decoder builds the immediate and the ALU
// operands, the ALU result is either written back, used as a branch/jump target or as the
// address of a load/store, and the PC moves to PC+4 or to the target. Loads and stores go to a
// data bus with byte enables; when the bus does not grant the access (`d_gnt` low) the
// instruction is held and retried in the next clock. `run` low holds the core at the reset
// vector, so a host can load the program first.
//
// Implemented: all RV32I integer instructions (LUI, AUIPC, JAL, JALR, branches, byte/half/word
// loads and stores, register-immediate and register-register ALU operations). FENCE, ECALL,
// EBREAK and CSR instructions execute as no-ops; there are no exceptions or interrupts, and a
// misaligned access uses the aligned word. From the design: an RV32I core with PC, +4 adder,
// decoder, register file and ALU. Own choices: single-cycle organisation, the stall input and
// everything listed as not implemented. The reset vector is parameter RESET_PC.
module rv32i_core #(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  // instruction port
  output logic [31:0] i_addr,
  input  logic [31:0] i_rdata,
  // data port
  output logic        d_req,
  output logic        d_we,
  output logic [3:0]  d_be,
  output logic [31:0] d_addr,
  output logic [31:0] d_wdata,
  input  logic [31:0] d_rdata,
  input  logic        d_gnt,
  // status
  output logic        retire
);

  typedef enum logic [6:0] {
    OP_LUI    = 7'b0110111,
    OP_AUIPC  = 7'b0010111,
    OP_JAL    = 7'b1101111,
    OP_JALR   = 7'b1100111,
    OP_BRANCH = 7'b1100011,
    OP_LOAD   = 7'b0000011,
    OP_STORE  = 7'b0100011,
    OP_IMM    = 7'b0010011,
    OP_REG    = 7'b0110011
  } opcode_e;

  logic [31:0] pc, pc_next, pc_plus4;
  logic [31:0] regs [32];
  logic [31:0] instr;
  logic [6:0]  opcode;
  logic [4:0]  rd, rs1, rs2;
  logic [2:0]  funct3;
  logic [6:0]  funct7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  logic [31:0] rs1_v, rs2_v;
  logic [31:0] alu_a, alu_b, alu_y;
  logic [3:0]  alu_op;
  logic        rd_we;
  logic [31:0] rd_v;
  logic        take_branch;
  logic        stall;
  logic [31:0] load_v;
  logic [31:0] ea;

  // ---- fetch and decode ----
  assign i_addr   = pc;
  assign instr    = i_rdata;
  assign opcode   = instr[6:0];
  assign rd       = instr[11:7];
  assign funct3   = instr[14:12];
  assign rs1      = instr[19:15];
  assign rs2      = instr[24:20];
  assign funct7   = instr[31:25];
  assign imm_i    = {{20{instr[31]}}, instr[31:20]};
  assign imm_s    = {{20{instr[31]}}, instr[31:25], instr[11:7]};
  assign imm_b    = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
  assign imm_u    = {instr[31:12], 12'd0};
  assign imm_j    = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};
  assign rs1_v    = (rs1 == 5'd0) ? 32'd0 : regs[rs1];
  assign rs2_v    = (rs2 == 5'd0) ? 32'd0 : regs[rs2];
  assign pc_plus4 = pc + 32'd4;

  // ---- ALU: op = {funct7[5] for SUB/SRA, funct3} ----
  always_comb begin
    alu_a  = rs1_v;
    alu_b  = (opcode == OP_REG) ? rs2_v : imm_i;
    alu_op = {1'b0, funct3};
    if (opcode == OP_REG && funct7[5]) alu_op[3] = 1'b1;            // SUB, SRA
    if (opcode == OP_IMM && funct3 == 3'b101 && funct7[5]) alu_op[3] = 1'b1;  // SRAI
    case (alu_op)
      4'b0000: alu_y = alu_a + alu_b;
      4'b1000: alu_y = alu_a - alu_b;
      4'b0001: alu_y = alu_a << alu_b[4:0];
      4'b0010: alu_y = {31'd0, $signed(alu_a) < $signed(alu_b)};
      4'b0011: alu_y = {31'd0, alu_a < alu_b};
      4'b0100: alu_y = alu_a ^ alu_b;
      4'b0101: alu_y = alu_a >> alu_b[4:0];
      4'b1101: alu_y = 32'($signed(alu_a) >>> alu_b[4:0]);
      4'b0110: alu_y = alu_a | alu_b;
      4'b0111: alu_y = alu_a & alu_b;
      default: alu_y = alu_a + alu_b;
    endcase
  end

  // ---- branch comparison ----
  always_comb begin
    case (funct3)
      3'b000:  take_branch = rs1_v == rs2_v;
      3'b001:  take_branch = rs1_v != rs2_v;
      3'b100:  take_branch = $signed(rs1_v) <  $signed(rs2_v);
      3'b101:  take_branch = $signed(rs1_v) >= $signed(rs2_v);
      3'b110:  take_branch = rs1_v <  rs2_v;
      3'b111:  take_branch = rs1_v >= rs2_v;
      default: take_branch = 1'b0;
    endcase
  end

  // ---- data bus ----
  assign ea      = rs1_v + ((opcode == OP_STORE) ? imm_s : imm_i);
  assign d_req   = run && (opcode == OP_LOAD || opcode == OP_STORE);
  assign d_we    = opcode == OP_STORE;
  assign d_addr  = {ea[31:2], 2'b00};
  assign stall   = d_req && !d_gnt;

  always_comb begin
    d_be    = 4'b0000;
    d_wdata = rs2_v;
    case (funct3[1:0])
      2'b00: begin d_be = 4'b0001 << ea[1:0];          d_wdata = {4{rs2_v[7:0]}};  end
      2'b01: begin d_be = ea[1] ? 4'b1100 : 4'b0011;    d_wdata = {2{rs2_v[15:0]}}; end
      default: d_be = 4'b1111;
    endcase
  end

  always_comb begin
    logic [31:0] sh;
    sh = d_rdata >> (8 * ea[1:0]);
    case (funct3)
      3'b000:  load_v = {{24{sh[7]}}, sh[7:0]};
      3'b001:  load_v = {{16{sh[15]}}, sh[15:0]};
      3'b100:  load_v = {24'd0, sh[7:0]};
      3'b101:  load_v = {16'd0, sh[15:0]};
      default: load_v = d_rdata;
    endcase
  end

  // ---- write-back and next PC ----
  always_comb begin
    rd_we   = 1'b0;
    rd_v    = alu_y;
    pc_next = pc_plus4;
    case (opcode)
      OP_LUI:    begin rd_we = 1'b1; rd_v = imm_u;        end
      OP_AUIPC:  begin rd_we = 1'b1; rd_v = pc + imm_u;   end
      OP_JAL:    begin rd_we = 1'b1; rd_v = pc_plus4; pc_next = pc + imm_j; end
      OP_JALR:   begin rd_we = 1'b1; rd_v = pc_plus4; pc_next = (rs1_v + imm_i) & ~32'd1; end
      OP_BRANCH: if (take_branch) pc_next = pc + imm_b;
      OP_LOAD:   begin rd_we = 1'b1; rd_v = load_v; end
      OP_IMM, OP_REG: rd_we = 1'b1;
      default: ;
    endcase
  end

  assign retire = run && !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        pc <= RESET_PC;
    else if (!run)     pc <= RESET_PC;
    else if (!stall)   pc <= pc_next;
  end

  always_ff @(posedge clk) begin
    if (retire && rd_we && rd != 5'd0) regs[rd] <= rd_v;
  end

  assert property (@(posedge clk) disable iff (!rst_n) d_req |-> d_addr[1:0] == 2'b00);

endmodule
