// rv_asm_pkg: RV32I instruction encoders used by the testbenches to build small programs.
// The encodings are the standard RV32I ones; which helpers exist is this testbench library's choice.
package rv_asm_pkg;
  function automatic logic [31:0] r_type(int f7, int rs2, int rs1, int f3, int rd, int op);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] i_type(int imm, int rs1, int f3, int rd, int op);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] s_type(int imm, int rs2, int rs1, int f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(int off, int rs2, int rs1, int f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] LUI(int rd, int imm20);  return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] AUIPC(int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0010111}; endfunction
  function automatic logic [31:0] JAL(int rd, int off);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] ADDI(int rd, int rs1, int imm);  return i_type(imm, rs1, 0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLTI(int rd, int rs1, int imm);  return i_type(imm, rs1, 2, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLTIU(int rd, int rs1, int imm); return i_type(imm, rs1, 3, rd, 7'b0010011); endfunction
  function automatic logic [31:0] XORI(int rd, int rs1, int imm);  return i_type(imm, rs1, 4, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ORI(int rd, int rs1, int imm);   return i_type(imm, rs1, 6, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ANDI(int rd, int rs1, int imm);  return i_type(imm, rs1, 7, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(int rd, int rs1, int sh);   return i_type(sh, rs1, 1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRLI(int rd, int rs1, int sh);   return i_type(sh, rs1, 5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRAI(int rd, int rs1, int sh);   return i_type(1024 + sh, rs1, 5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ADD(int rd, int a, int b);  return r_type(0, b, a, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB(int rd, int a, int b);  return r_type(32, b, a, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLL(int rd, int a, int b);  return r_type(0, b, a, 1, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLT(int rd, int a, int b);  return r_type(0, b, a, 2, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLTU(int rd, int a, int b); return r_type(0, b, a, 3, rd, 7'b0110011); endfunction
  function automatic logic [31:0] XOR(int rd, int a, int b);  return r_type(0, b, a, 4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SRL(int rd, int a, int b);  return r_type(0, b, a, 5, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SRA(int rd, int a, int b);  return r_type(32, b, a, 5, rd, 7'b0110011); endfunction
  function automatic logic [31:0] OR(int rd, int a, int b);   return r_type(0, b, a, 6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] AND(int rd, int a, int b);  return r_type(0, b, a, 7, rd, 7'b0110011); endfunction
  function automatic logic [31:0] LB(int rd, int rs1, int imm);  return i_type(imm, rs1, 0, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LH(int rd, int rs1, int imm);  return i_type(imm, rs1, 1, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LW(int rd, int rs1, int imm);  return i_type(imm, rs1, 2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LBU(int rd, int rs1, int imm); return i_type(imm, rs1, 4, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LHU(int rd, int rs1, int imm); return i_type(imm, rs1, 5, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SB(int rs2, int rs1, int imm); return s_type(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] SH(int rs2, int rs1, int imm); return s_type(imm, rs2, rs1, 1); endfunction
  function automatic logic [31:0] SW(int rs2, int rs1, int imm); return s_type(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] BEQ(int a, int b, int off);  return b_type(off, b, a, 0); endfunction
  function automatic logic [31:0] BNE(int a, int b, int off);  return b_type(off, b, a, 1); endfunction
  function automatic logic [31:0] BLT(int a, int b, int off);  return b_type(off, b, a, 4); endfunction
  function automatic logic [31:0] BGE(int a, int b, int off);  return b_type(off, b, a, 5); endfunction
  function automatic logic [31:0] BLTU(int a, int b, int off); return b_type(off, b, a, 6); endfunction
  function automatic logic [31:0] BGEU(int a, int b, int off); return b_type(off, b, a, 7); endfunction
endpackage
