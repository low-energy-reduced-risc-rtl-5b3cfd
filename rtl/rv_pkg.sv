// Types and constants of the reduced RV32 core. The core keeps only the 27
// instructions needed by Tsetlin-machine and BNN inference code: andi, addi,
// xori, slli, add, lui, sltu, or, and, jal, beq, bne, blt, lw, lbu, lhu, sb,
// sw, ecall, ebreak, eret (mret) and the six Zicsr instructions. The
// encodings are those of the RISC-V unprivileged and privileged specs; the
// decoded-instruction struct and the enums below are this design's own.
package rv_pkg;

  localparam int unsigned XLEN = 32;

  // Major opcodes of the retained instructions
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  // Whole-word SYSTEM instructions
  localparam logic [31:0] INSN_ECALL  = 32'h0000_0073;
  localparam logic [31:0] INSN_EBREAK = 32'h0010_0073;
  localparam logic [31:0] INSN_MRET   = 32'h3020_0073;  // "eret"

  // Machine-mode CSR addresses kept by the core
  localparam logic [11:0] CSR_MSTATUS  = 12'h300;
  localparam logic [11:0] CSR_MISA     = 12'h301;
  localparam logic [11:0] CSR_MTVEC    = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH = 12'h340;
  localparam logic [11:0] CSR_MEPC     = 12'h341;
  localparam logic [11:0] CSR_MCAUSE   = 12'h342;
  localparam logic [11:0] CSR_MTVAL    = 12'h343;
  localparam logic [11:0] CSR_MCYCLE   = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET = 12'hB02;

  // Exception causes (privileged spec)
  localparam logic [31:0] CAUSE_ILLEGAL    = 32'd2;
  localparam logic [31:0] CAUSE_BREAKPOINT = 32'd3;
  localparam logic [31:0] CAUSE_ECALL_M    = 32'd11;

  // misa: RV32 with the I base only (M and the other extensions removed)
  localparam logic [31:0] MISA_VALUE = 32'h4000_0100;

  typedef enum logic [2:0] {
    ALU_ADD,
    ALU_AND,
    ALU_OR,
    ALU_XOR,
    ALU_SLL,
    ALU_SLTU
  } alu_op_e;

  typedef enum logic [1:0] {
    BR_NONE,
    BR_EQ,
    BR_NE,
    BR_LT
  } br_op_e;

  typedef enum logic [2:0] {
    MEM_NONE,
    MEM_LW,
    MEM_LBU,
    MEM_LHU,
    MEM_SB,
    MEM_SW
  } mem_op_e;

  typedef enum logic [1:0] {
    CSR_NONE,
    CSR_RW,
    CSR_RS,
    CSR_RC
  } csr_op_e;

  // One decoded instruction, as Decode hands it to Execute
  typedef struct packed {
    logic              illegal;
    logic [4:0]        rd;
    logic [4:0]        rs1;
    logic [4:0]        rs2;
    logic              rd_we;
    logic              use_rs1;
    logic              use_rs2;
    logic [XLEN-1:0]   imm;
    alu_op_e           alu_op;
    logic              a_zero;    // operand A = 0 (lui)
    logic              b_imm;     // operand B = immediate
    logic              jal;
    br_op_e            br_op;
    mem_op_e           mem_op;
    csr_op_e           csr_op;
    logic              csr_imm;   // csrr*i: rs1 field is a 5-bit immediate
    logic [11:0]       csr_addr;
    logic              ecall;
    logic              ebreak;
    logic              mret;
  } dec_t;

  // Forwarding select for an Execute operand
  typedef enum logic [1:0] {
    FWD_NONE,
    FWD_MEM,   // from the instruction now in Memory
    FWD_WB     // from the instruction now in Writeback
  } fwd_e;

  function automatic logic is_load(mem_op_e op);
    return op inside {MEM_LW, MEM_LBU, MEM_LHU};
  endfunction

  function automatic logic is_store(mem_op_e op);
    return op inside {MEM_SB, MEM_SW};
  endfunction

endpackage
