// tb_rv32i_core: runs a self-checking RV32I program on the core.
// The program (built with rv_asm_pkg) exercises the ALU operations, LUI/AUIPC, byte/half/word
// loads and stores, all six branch conditions taken and not taken, a counted loop and JAL/JALR,
// and stores its results in data memory. The data bus refuses about one access in three, so
// stalls are exercised. The stored words are compared with values worked out by hand.
// The instruction set is RV32I as in the design; the micro-architecture tested is own choice.
module tb_rv32i_core;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0, run = 0;
  logic [31:0] i_addr, i_rdata, d_addr, d_wdata, d_rdata;
  logic d_req, d_we, d_gnt, retire;
  logic [3:0] d_be;
  logic [31:0] imem [256];
  logic [31:0] dmem [64];
  int checks = 0, failures = 0, n = 0, stalls = 0;
  int pc_jal, pc_auipc;

  rv32i_core dut (.clk, .rst_n, .run, .i_addr, .i_rdata, .d_req, .d_we, .d_be, .d_addr,
                  .d_wdata, .d_rdata, .d_gnt, .retire);

  always #5 clk = ~clk;
  assign i_rdata = imem[i_addr[9:2]];
  assign d_rdata = dmem[d_addr[7:2]];
  always @(negedge clk) d_gnt = ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (d_req && d_gnt && d_we)
      for (int i = 0; i < 4; i++) if (d_be[i]) dmem[d_addr[7:2]][8*i +: 8] <= d_wdata[8*i +: 8];
    if (d_req && !d_gnt) stalls++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic void emit(logic [31:0] w);
    imem[n] = w;
    n++;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) imem[i] = 32'h0000_0013;   // nop
    for (int i = 0; i < 64; i++) dmem[i] = 0;
    emit(ADDI(1, 0, 5));
    emit(ADDI(2, 0, -3));
    emit(ADD(3, 1, 2));             // 2
    emit(SUB(4, 1, 2));             // 8
    emit(LUI(5, 20'h12345));
    emit(ADDI(5, 5, 12'h678));      // 0x12345678
    emit(SLL(6, 1, 1));             // 160
    emit(SRAI(7, 2, 1));            // -2
    emit(SRLI(8, 2, 28));           // 0xF
    emit(SLT(9, 2, 1));             // 1
    emit(SLTU(10, 2, 1));           // 0
    emit(LUI(14, 0));               // data base 0
    emit(SW(3, 14, 0));
    emit(SW(4, 14, 4));
    emit(SW(5, 14, 8));
    emit(SW(6, 14, 12));
    emit(SW(7, 14, 16));
    emit(SW(8, 14, 20));
    emit(SW(9, 14, 24));
    emit(SW(10, 14, 28));
    emit(SB(5, 14, 32));            // byte 32 = 0x78
    emit(SB(1, 14, 33));            // byte 33 = 0x05
    emit(SH(2, 14, 34));            // bytes 34..35 = 0xFFFD
    emit(LW(15, 14, 32));           // 0xFFFD0578
    emit(LB(16, 14, 34));           // 0xFFFFFFFD
    emit(LBU(17, 14, 34));          // 0xFD
    emit(LH(18, 14, 34));           // 0xFFFFFFFD
    emit(LHU(19, 14, 34));          // 0xFFFD
    emit(SW(15, 14, 36));
    emit(SW(16, 14, 40));
    emit(SW(17, 14, 44));
    emit(SW(18, 14, 48));
    emit(SW(19, 14, 52));
    emit(ADDI(20, 0, 0));           // sum 10..1
    emit(ADDI(21, 0, 10));
    emit(ADD(20, 20, 21));
    emit(ADDI(21, 21, -1));
    emit(BNE(21, 0, -8));
    emit(SW(20, 14, 56));           // 55
    emit(ADDI(22, 0, 0));
    emit(BLT(2, 1, 8));   emit(ADDI(22, 22, 1));     // taken
    emit(ADDI(22, 22, 2));
    emit(BGEU(2, 1, 8));  emit(ADDI(22, 22, 4));     // taken
    emit(BGE(1, 2, 8));   emit(ADDI(22, 22, 8));     // taken
    emit(BLTU(1, 2, 8));  emit(ADDI(22, 22, 16));    // taken
    emit(BEQ(1, 1, 8));   emit(ADDI(22, 22, 32));    // taken
    emit(BEQ(1, 2, 8));   emit(ADDI(22, 22, 64));    // not taken
    emit(BLT(1, 2, 8));   emit(ADDI(22, 22, 128));   // not taken
    emit(BGEU(1, 2, 8));  emit(ADDI(22, 22, 256));   // not taken
    emit(SW(22, 14, 60));           // 2 + 64 + 128 + 256 = 450
    emit(ADDI(24, 0, 0));
    pc_jal = 4 * n;
    emit(JAL(23, 8));     emit(ADDI(24, 0, 99));     // skipped
    emit(SW(23, 14, 64));           // pc_jal + 4
    pc_auipc = 4 * n;
    emit(AUIPC(25, 0));
    emit(JALR(26, 25, 16));         // to pc_auipc + 16
    emit(ADDI(24, 0, 77));
    emit(ADDI(24, 0, 88));
    emit(SW(24, 14, 68));           // 0
    emit(SW(26, 14, 72));           // pc_auipc + 8
    emit(XORI(27, 5, -1));          // ~0x12345678
    emit(ORI(28, 0, 12'h5A0));
    emit(ANDI(29, 5, 12'h0F0));     // 0x70
    emit(SLTIU(30, 1, 6));          // 1
    emit(SW(27, 14, 76));
    emit(SW(28, 14, 80));
    emit(SW(29, 14, 84));
    emit(SW(30, 14, 88));
    emit(SRA(31, 2, 1));            // -3 >>> 5 = -1
    emit(SRL(11, 5, 1));            // 0x12345678 >> 5
    emit(XOR(12, 5, 2));
    emit(OR(13, 1, 4));             // 13
    emit(AND(9, 5, 2));             // 0x12345678 & 0xFFFFFFFD
    emit(SLTI(10, 2, -2));          // 1
    emit(SW(31, 14, 92));
    emit(SW(11, 14, 96));
    emit(SW(12, 14, 100));
    emit(SW(13, 14, 104));
    emit(SW(9, 14, 108));
    emit(SW(10, 14, 112));
    emit(ADDI(1, 0, 1));
    emit(SW(1, 14, 252));           // finished flag
    emit(JAL(0, 0));
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(i_addr == 0, "held at reset vector while not running");
    run = 1;
    while (dmem[63] != 1) @(negedge clk);
    check(dmem[0] == 2, "add");
    check(dmem[1] == 8, "sub");
    check(dmem[2] == 32'h1234_5678, "lui + addi");
    check(dmem[3] == 160, "sll");
    check(dmem[4] == 32'hFFFF_FFFE, "srai");
    check(dmem[5] == 32'hF, "srli");
    check(dmem[6] == 1, "slt");
    check(dmem[7] == 0, "sltu");
    check(dmem[8] == 32'hFFFD_0578, "sb / sh / lw");
    check(dmem[9] == 32'hFFFD_0578, "lw");
    check(dmem[10] == 32'hFFFF_FFFD, $sformatf("lb %08h", dmem[10]));
    check(dmem[11] == 32'h0000_00FD, "lbu");
    check(dmem[12] == 32'hFFFF_FFFD, "lh");
    check(dmem[13] == 32'h0000_FFFD, "lhu");
    check(dmem[14] == 55, "loop with bne");
    check(dmem[15] == 450, $sformatf("branch conditions %0d", dmem[15]));
    check(dmem[16] == 32'(pc_jal + 4), "jal link");
    check(dmem[17] == 0, "jal / jalr skip");
    check(dmem[18] == 32'(pc_auipc + 8), "jalr link");
    check(dmem[19] == ~32'h1234_5678, "xori");
    check(dmem[20] == 32'h5A0, "ori");
    check(dmem[21] == 32'h70, "andi");
    check(dmem[22] == 1, "sltiu");
    check(dmem[23] == 32'hFFFF_FFFF, "sra");
    check(dmem[24] == (32'h1234_5678 >> 5), "srl");
    check(dmem[25] == (32'h1234_5678 ^ 32'hFFFF_FFFD), "xor");
    check(dmem[26] == 13, "or");
    check(dmem[27] == (32'h1234_5678 & 32'hFFFF_FFFD), "and");
    check(dmem[28] == 1, "slti");
    check(stalls > 0, "bus stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
