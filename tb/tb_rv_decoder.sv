// Self-checking test of rv_decoder. Each of the 27 retained instructions is
// encoded with random registers and immediates and its decoded controls are
// compared with the expected ones; a set of RV32I/M instructions that the
// reduced core dropped (sub, srl, sra, slt, or-immediate, jalr, lb, lh, sh,
// mul, div, fence, auipc, bge) must all decode as illegal.
`timescale 1ns/1ps
module tb_rv_decoder;
  import rv_pkg::*;
  import rv_asm_pkg::*;

  logic [31:0] instr;
  dec_t        dec;
  int          checks = 0, failures = 0;

  rv_decoder dut (.instr, .dec);

  task automatic expect_ok(string name, logic [31:0] w, alu_op_e alu, br_op_e br, mem_op_e mem,
                           csr_op_e csr, logic rd_we, logic [31:0] imm, logic b_imm,
                           logic [2:0] sys);  // {ecall, ebreak, mret}
    instr = w; #1;
    checks++;
    if (dec.illegal || dec.rd_we !== rd_we || dec.br_op !== br || dec.mem_op !== mem ||
        dec.csr_op !== csr || {dec.ecall, dec.ebreak, dec.mret} !== sys ||
        (rd_we && dec.rd !== w[11:7]) ||
        (csr == CSR_NONE && mem == MEM_NONE && br == BR_NONE && !dec.jal && rd_we && dec.alu_op !== alu) ||
        (imm !== 32'hDEAD_BEEF && dec.imm !== imm) || dec.b_imm !== b_imm) begin
      failures++;
      $display("FAIL %s %h: ill=%b we=%b alu=%s br=%s mem=%s csr=%s imm=%h b_imm=%b", name, w,
               dec.illegal, dec.rd_we, dec.alu_op.name(), dec.br_op.name(), dec.mem_op.name(),
               dec.csr_op.name(), dec.imm, dec.b_imm);
    end
  endtask

  task automatic expect_illegal(string name, logic [31:0] w);
    instr = w; #1;
    checks++;
    if (!dec.illegal || dec.rd_we || dec.mem_op != MEM_NONE) begin
      failures++;
      $display("FAIL %s %h should be illegal", name, w);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50) begin
      int rd, r1, r2, i12, sh, bo, jo, u20, csr, ui;
      rd  = $urandom_range(1, 31); r1 = $urandom_range(31); r2 = $urandom_range(31);
      i12 = $urandom_range(4095) - 2048;
      sh  = $urandom_range(31);
      bo  = ($urandom_range(2047) - 1024) * 2;
      jo  = ($urandom_range(65535) - 32768) * 2;
      u20 = $urandom_range(20'hFFFFF);
      csr = $urandom_range(4095);
      ui  = $urandom_range(31);
      expect_ok("addi", addi(rd, r1, i12), ALU_ADD, BR_NONE, MEM_NONE, CSR_NONE, 1, 32'(i12), 1, 0);
      expect_ok("andi", andi(rd, r1, i12), ALU_AND, BR_NONE, MEM_NONE, CSR_NONE, 1, 32'(i12), 1, 0);
      expect_ok("xori", xori(rd, r1, i12), ALU_XOR, BR_NONE, MEM_NONE, CSR_NONE, 1, 32'(i12), 1, 0);
      expect_ok("slli", slli(rd, r1, sh), ALU_SLL, BR_NONE, MEM_NONE, CSR_NONE, 1, 32'(sh), 1, 0);
      expect_ok("add",  add(rd, r1, r2),  ALU_ADD, BR_NONE, MEM_NONE, CSR_NONE, 1, 32'hDEAD_BEEF, 0, 0);
      expect_ok("sltu", sltu(rd, r1, r2), ALU_SLTU, BR_NONE, MEM_NONE, CSR_NONE, 1, 32'hDEAD_BEEF, 0, 0);
      expect_ok("or",   or_(rd, r1, r2),  ALU_OR,  BR_NONE, MEM_NONE, CSR_NONE, 1, 32'hDEAD_BEEF, 0, 0);
      expect_ok("and",  and_(rd, r1, r2), ALU_AND, BR_NONE, MEM_NONE, CSR_NONE, 1, 32'hDEAD_BEEF, 0, 0);
      expect_ok("lui",  lui(rd, u20), ALU_ADD, BR_NONE, MEM_NONE, CSR_NONE, 1, {20'(u20), 12'b0}, 1, 0);
      expect_ok("jal",  jal(rd, jo),  ALU_ADD, BR_NONE, MEM_NONE, CSR_NONE, 1, 32'(jo), 0, 0);
      expect_ok("beq",  beq(r1, r2, bo), ALU_ADD, BR_EQ, MEM_NONE, CSR_NONE, 0, 32'(bo), 0, 0);
      expect_ok("bne",  bne(r1, r2, bo), ALU_ADD, BR_NE, MEM_NONE, CSR_NONE, 0, 32'(bo), 0, 0);
      expect_ok("blt",  blt(r1, r2, bo), ALU_ADD, BR_LT, MEM_NONE, CSR_NONE, 0, 32'(bo), 0, 0);
      expect_ok("lw",   lw(rd, r1, i12),  ALU_ADD, BR_NONE, MEM_LW,  CSR_NONE, 1, 32'(i12), 1, 0);
      expect_ok("lbu",  lbu(rd, r1, i12), ALU_ADD, BR_NONE, MEM_LBU, CSR_NONE, 1, 32'(i12), 1, 0);
      expect_ok("lhu",  lhu(rd, r1, i12), ALU_ADD, BR_NONE, MEM_LHU, CSR_NONE, 1, 32'(i12), 1, 0);
      expect_ok("sb",   sb(r2, r1, i12),  ALU_ADD, BR_NONE, MEM_SB,  CSR_NONE, 0, 32'(i12), 1, 0);
      expect_ok("sw",   sw(r2, r1, i12),  ALU_ADD, BR_NONE, MEM_SW,  CSR_NONE, 0, 32'(i12), 1, 0);
      expect_ok("ecall",  ecall(),  ALU_ADD, BR_NONE, MEM_NONE, CSR_NONE, 0, 32'hDEAD_BEEF, 0, 3'b100);
      expect_ok("ebreak", ebreak(), ALU_ADD, BR_NONE, MEM_NONE, CSR_NONE, 0, 32'hDEAD_BEEF, 0, 3'b010);
      expect_ok("eret",   mret(),   ALU_ADD, BR_NONE, MEM_NONE, CSR_NONE, 0, 32'hDEAD_BEEF, 0, 3'b001);
      expect_ok("csrrw",  csrrw(rd, csr, r1),  ALU_ADD, BR_NONE, MEM_NONE, CSR_RW, 1, 32'hDEAD_BEEF, 0, 0);
      expect_ok("csrrs",  csrrs(rd, csr, r1),  ALU_ADD, BR_NONE, MEM_NONE, CSR_RS, 1, 32'hDEAD_BEEF, 0, 0);
      expect_ok("csrrc",  csrrc(rd, csr, r1),  ALU_ADD, BR_NONE, MEM_NONE, CSR_RC, 1, 32'hDEAD_BEEF, 0, 0);
      expect_ok("csrrwi", csrrwi(rd, csr, ui), ALU_ADD, BR_NONE, MEM_NONE, CSR_RW, 1, 32'(ui), 0, 0);
      expect_ok("csrrsi", csrrsi(rd, csr, ui), ALU_ADD, BR_NONE, MEM_NONE, CSR_RS, 1, 32'(ui), 0, 0);
      expect_ok("csrrci", csrrci(rd, csr, ui), ALU_ADD, BR_NONE, MEM_NONE, CSR_RC, 1, 32'(ui), 0, 0);
      checks++;
      instr = csrrwi(rd, csr, ui); #1;
      if (dec.csr_addr !== 12'(csr) || !dec.csr_imm) begin failures++; $display("FAIL csr addr"); end
    end
    expect_illegal("sub",   32'h4031_00b3);
    expect_illegal("srl",   32'h0031_50b3);
    expect_illegal("sra",   32'h4031_50b3);
    expect_illegal("slt",   32'h0031_20b3);
    expect_illegal("xor",   32'h0031_40b3);
    expect_illegal("ori",   32'h0ff1_6093);
    expect_illegal("srli",  32'h0031_5093);
    expect_illegal("jalr",  32'h0000_80e7);
    expect_illegal("lb",    32'h0001_0083);
    expect_illegal("lh",    32'h0001_1083);
    expect_illegal("sh",    32'h0011_1023);
    expect_illegal("mul",   32'h0231_00b3);
    expect_illegal("div",   32'h0231_40b3);
    expect_illegal("fence", 32'h0ff0_000f);
    expect_illegal("auipc", 32'h0000_1097);
    expect_illegal("bge",   32'h0020_d463);
    expect_illegal("bltu",  32'h0020_e463);
    expect_illegal("wfi",   32'h1050_0073);
    expect_illegal("zero",  32'h0000_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
