// Instruction encoders for the 27 instructions of the reduced core, used by
// the testbenches to build programs in memory without an external assembler.
// Each function returns one 32-bit RV32 instruction word; branch and jump
// offsets are byte offsets relative to the instruction itself.
package rv_asm_pkg;

  function automatic logic [31:0] enc_r(logic [6:0] f7, int rs2, int rs1, logic [2:0] f3,
                                        int rd, logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_i(int imm, int rs1, logic [2:0] f3, int rd, logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_s(int imm, int rs2, int rs1, logic [2:0] f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] enc_b(int off, int rs2, int rs1, logic [2:0] f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] addi (int rd, int rs1, int imm); return enc_i(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic logic [31:0] andi (int rd, int rs1, int imm); return enc_i(imm, rs1, 3'b111, rd, 7'b0010011); endfunction
  function automatic logic [31:0] xori (int rd, int rs1, int imm); return enc_i(imm, rs1, 3'b100, rd, 7'b0010011); endfunction
  function automatic logic [31:0] slli (int rd, int rs1, int sh);  return enc_i(sh & 31, rs1, 3'b001, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add  (int rd, int rs1, int rs2); return enc_r(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sltu (int rd, int rs1, int rs2); return enc_r(7'b0, rs2, rs1, 3'b011, rd, 7'b0110011); endfunction
  function automatic logic [31:0] or_  (int rd, int rs1, int rs2); return enc_r(7'b0, rs2, rs1, 3'b110, rd, 7'b0110011); endfunction
  function automatic logic [31:0] and_ (int rd, int rs1, int rs2); return enc_r(7'b0, rs2, rs1, 3'b111, rd, 7'b0110011); endfunction
  function automatic logic [31:0] lui  (int rd, int imm20);        return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] jal  (int rd, int off);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] beq (int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] bne (int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 3'b001); endfunction
  function automatic logic [31:0] blt (int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 3'b100); endfunction
  function automatic logic [31:0] lw  (int rd, int rs1, int imm);  return enc_i(imm, rs1, 3'b010, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lbu (int rd, int rs1, int imm);  return enc_i(imm, rs1, 3'b100, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lhu (int rd, int rs1, int imm);  return enc_i(imm, rs1, 3'b101, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sb  (int rs2, int rs1, int imm); return enc_s(imm, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] sw  (int rs2, int rs1, int imm); return enc_s(imm, rs2, rs1, 3'b010); endfunction
  function automatic logic [31:0] ecall ();  return 32'h0000_0073; endfunction
  function automatic logic [31:0] ebreak (); return 32'h0010_0073; endfunction
  function automatic logic [31:0] mret ();   return 32'h3020_0073; endfunction
  function automatic logic [31:0] csrrw (int rd, int csr, int rs1) ; return enc_i(csr, rs1, 3'b001, rd, 7'b1110011); endfunction
  function automatic logic [31:0] csrrs (int rd, int csr, int rs1) ; return enc_i(csr, rs1, 3'b010, rd, 7'b1110011); endfunction
  function automatic logic [31:0] csrrc (int rd, int csr, int rs1) ; return enc_i(csr, rs1, 3'b011, rd, 7'b1110011); endfunction
  function automatic logic [31:0] csrrwi(int rd, int csr, int uimm); return enc_i(csr, uimm, 3'b101, rd, 7'b1110011); endfunction
  function automatic logic [31:0] csrrsi(int rd, int csr, int uimm); return enc_i(csr, uimm, 3'b110, rd, 7'b1110011); endfunction
  function automatic logic [31:0] csrrci(int rd, int csr, int uimm); return enc_i(csr, uimm, 3'b111, rd, 7'b1110011); endfunction

endpackage
