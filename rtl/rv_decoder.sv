// Instruction decoder of the reduced core. Purely combinational: it turns a
// 32-bit instruction word into the dec_t control struct of rv_pkg. Exactly
// 27 instructions are recognised, the subset the source keeps after
// profiling Tsetlin-machine inference code:
//   andi addi xori slli add lui sltu or and jal beq bne blt
//   lw lbu lhu sb sw ecall ebreak eret
//   csrrw csrrs csrrc csrrwi csrrsi csrrci
// Every other word, including the removed RV32I/M instructions, sets
// dec.illegal and later raises an illegal-instruction trap. "eret" is decoded
// as mret and the listed "csrrwt" as csrrwi; both are readings of this
// design, as is the illegal-instruction trap itself.
module rv_decoder
  import rv_pkg::*;
(
  input  logic [31:0] instr,
  output dec_t        dec
);

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opcode = instr[6:0];
  assign funct3 = instr[14:12];
  assign funct7 = instr[31:25];

  assign imm_i = {{20{instr[31]}}, instr[31:20]};
  assign imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
  assign imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
  assign imm_u = {instr[31:12], 12'b0};
  assign imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

  always_comb begin
    dec          = '0;
    dec.illegal  = 1'b1;
    dec.rd       = instr[11:7];
    dec.rs1      = instr[19:15];
    dec.rs2      = instr[24:20];
    dec.alu_op   = ALU_ADD;
    dec.br_op    = BR_NONE;
    dec.mem_op   = MEM_NONE;
    dec.csr_op   = CSR_NONE;
    dec.csr_addr = instr[31:20];

    unique case (opcode)
      OP_LUI: begin
        dec.illegal = 1'b0;
        dec.rd_we   = 1'b1;
        dec.imm     = imm_u;
        dec.a_zero  = 1'b1;
        dec.b_imm   = 1'b1;
      end
      OP_JAL: begin
        dec.illegal = 1'b0;
        dec.rd_we   = 1'b1;
        dec.imm     = imm_j;
        dec.jal     = 1'b1;
      end
      OP_BRANCH: begin
        dec.imm     = imm_b;
        dec.use_rs1 = 1'b1;
        dec.use_rs2 = 1'b1;
        case (funct3)
          3'b000:  begin dec.illegal = 1'b0; dec.br_op = BR_EQ; end  // beq
          3'b001:  begin dec.illegal = 1'b0; dec.br_op = BR_NE; end  // bne
          3'b100:  begin dec.illegal = 1'b0; dec.br_op = BR_LT; end  // blt
          default: ;
        endcase
      end
      OP_LOAD: begin
        dec.imm     = imm_i;
        dec.use_rs1 = 1'b1;
        dec.b_imm   = 1'b1;
        dec.rd_we   = 1'b1;
        case (funct3)
          3'b010:  begin dec.illegal = 1'b0; dec.mem_op = MEM_LW;  end
          3'b100:  begin dec.illegal = 1'b0; dec.mem_op = MEM_LBU; end
          3'b101:  begin dec.illegal = 1'b0; dec.mem_op = MEM_LHU; end
          default: ;
        endcase
      end
      OP_STORE: begin
        dec.imm     = imm_s;
        dec.use_rs1 = 1'b1;
        dec.use_rs2 = 1'b1;
        dec.b_imm   = 1'b1;
        case (funct3)
          3'b000:  begin dec.illegal = 1'b0; dec.mem_op = MEM_SB; end
          3'b010:  begin dec.illegal = 1'b0; dec.mem_op = MEM_SW; end
          default: ;
        endcase
      end
      OP_IMM: begin
        dec.imm     = imm_i;
        dec.use_rs1 = 1'b1;
        dec.b_imm   = 1'b1;
        dec.rd_we   = 1'b1;
        case (funct3)
          3'b000: begin dec.illegal = 1'b0; dec.alu_op = ALU_ADD; end  // addi
          3'b111: begin dec.illegal = 1'b0; dec.alu_op = ALU_AND; end  // andi
          3'b100: begin dec.illegal = 1'b0; dec.alu_op = ALU_XOR; end  // xori
          3'b001: if (funct7 == 7'b0) begin                            // slli
            dec.illegal = 1'b0;
            dec.alu_op  = ALU_SLL;
          end
          default: ;
        endcase
      end
      OP_REG: begin
        dec.use_rs1 = 1'b1;
        dec.use_rs2 = 1'b1;
        dec.rd_we   = 1'b1;
        if (funct7 == 7'b0) begin
          case (funct3)
            3'b000: begin dec.illegal = 1'b0; dec.alu_op = ALU_ADD;  end  // add
            3'b011: begin dec.illegal = 1'b0; dec.alu_op = ALU_SLTU; end  // sltu
            3'b110: begin dec.illegal = 1'b0; dec.alu_op = ALU_OR;   end  // or
            3'b111: begin dec.illegal = 1'b0; dec.alu_op = ALU_AND;  end  // and
            default: ;
          endcase
        end
      end
      OP_SYSTEM: begin
        if (funct3 == 3'b000) begin
          if (instr == INSN_ECALL)  begin dec.illegal = 1'b0; dec.ecall  = 1'b1; end
          if (instr == INSN_EBREAK) begin dec.illegal = 1'b0; dec.ebreak = 1'b1; end
          if (instr == INSN_MRET)   begin dec.illegal = 1'b0; dec.mret   = 1'b1; end
        end else if (funct3 != 3'b100) begin
          dec.illegal = 1'b0;
          dec.rd_we   = 1'b1;
          dec.csr_imm = funct3[2];
          dec.use_rs1 = ~funct3[2];
          dec.imm     = {27'b0, instr[19:15]};
          unique case (funct3[1:0])
            2'b01:   dec.csr_op = CSR_RW;
            2'b10:   dec.csr_op = CSR_RS;
            default: dec.csr_op = CSR_RC;
          endcase
        end
      end
      default: ;
    endcase

    // An illegal word must not write anything
    if (dec.illegal) begin
      dec.rd_we  = 1'b0;
      dec.br_op  = BR_NONE;
      dec.mem_op = MEM_NONE;
      dec.csr_op = CSR_NONE;
    end
  end

endmodule
