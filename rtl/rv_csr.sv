// Control and status registers of the reduced core (Zicsr) together with
// trap entry and return. The core keeps the six Zicsr instructions and
// ecall, ebreak and eret; this unit supplies what they act on.
//
// Registers (machine mode only; user and supervisor modes of the full core
// are dropped in this design): mstatus (MIE, MPIE, MPP fixed to M), misa
// (read-only, RV32I), mtvec (direct mode), mscratch, mepc, mcause, mtval,
// mcycle and minstret (32 bits, also writable). Other addresses read as zero
// and ignore writes. The register set is this design's choice; the source
// names only the extension.
//
// Timing: the read is combinational from csr_addr; the write, trap entry and
// mret take effect at the clock edge on which the Execute-stage instruction
// is accepted (ex_fire). csrrs/csrrc (and their immediate forms) whose rs1
// field is zero do not write, as in the RISC-V spec.
module rv_csr
  import rv_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ex_fire,     // Execute instruction completes this cycle
  input  csr_op_e         csr_op,
  input  logic [11:0]     csr_addr,
  input  logic [XLEN-1:0] csr_operand, // rs1 value or zero-extended uimm
  input  logic            csr_src_zero,// rs1 field / uimm is zero
  output logic [XLEN-1:0] csr_rdata,
  input  logic            trap,        // ecall, ebreak or illegal in Execute
  input  logic [XLEN-1:0] trap_cause,
  input  logic [XLEN-1:0] trap_pc,
  input  logic [XLEN-1:0] trap_tval,
  input  logic            mret,
  input  logic            retire,      // an instruction leaves Writeback
  output logic [XLEN-1:0] trap_vector, // mtvec
  output logic [XLEN-1:0] epc          // mepc
);

  logic            mie_q, mpie_q;
  logic [XLEN-1:0] mtvec_q, mscratch_q, mepc_q, mcause_q, mtval_q, mcycle_q, minstret_q;
  logic [XLEN-1:0] mstatus;
  logic [XLEN-1:0] wval;
  logic            wen;

  assign mstatus = {19'b0, 2'b11, 3'b0, mpie_q, 3'b0, mie_q, 3'b0};

  always_comb begin
    unique case (csr_addr)
      CSR_MSTATUS:  csr_rdata = mstatus;
      CSR_MISA:     csr_rdata = MISA_VALUE;
      CSR_MTVEC:    csr_rdata = mtvec_q;
      CSR_MSCRATCH: csr_rdata = mscratch_q;
      CSR_MEPC:     csr_rdata = mepc_q;
      CSR_MCAUSE:   csr_rdata = mcause_q;
      CSR_MTVAL:    csr_rdata = mtval_q;
      CSR_MCYCLE:   csr_rdata = mcycle_q;
      CSR_MINSTRET: csr_rdata = minstret_q;
      default:      csr_rdata = '0;
    endcase
  end

  always_comb begin
    unique case (csr_op)
      CSR_RW:  wval = csr_operand;
      CSR_RS:  wval = csr_rdata | csr_operand;
      CSR_RC:  wval = csr_rdata & ~csr_operand;
      default: wval = csr_rdata;
    endcase
  end

  assign wen = ex_fire && (csr_op == CSR_RW || (csr_op != CSR_NONE && !csr_src_zero));

  assign trap_vector = {mtvec_q[XLEN-1:2], 2'b00};
  assign epc         = mepc_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mie_q      <= 1'b0;
      mpie_q     <= 1'b0;
      mtvec_q    <= '0;
      mscratch_q <= '0;
      mepc_q     <= '0;
      mcause_q   <= '0;
      mtval_q    <= '0;
      mcycle_q   <= '0;
      minstret_q <= '0;
    end else begin
      mcycle_q   <= mcycle_q + 1'b1;
      if (retire) minstret_q <= minstret_q + 1'b1;

      if (ex_fire && trap) begin
        mepc_q   <= trap_pc;
        mcause_q <= trap_cause;
        mtval_q  <= trap_tval;
        mpie_q   <= mie_q;
        mie_q    <= 1'b0;
      end else if (ex_fire && mret) begin
        mie_q    <= mpie_q;
        mpie_q   <= 1'b1;
      end else if (wen) begin
        unique case (csr_addr)
          CSR_MSTATUS: begin
            mie_q  <= wval[3];
            mpie_q <= wval[7];
          end
          CSR_MTVEC:    mtvec_q    <= wval;
          CSR_MSCRATCH: mscratch_q <= wval;
          CSR_MEPC:     mepc_q     <= {wval[XLEN-1:2], 2'b00};
          CSR_MCAUSE:   mcause_q   <= wval;
          CSR_MTVAL:    mtval_q    <= wval;
          CSR_MCYCLE:   mcycle_q   <= wval;
          CSR_MINSTRET: minstret_q <= wval;
          default: ;
        endcase
      end
    end
  end

endmodule
