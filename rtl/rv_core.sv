// Reduced RV32 core (the proposed "R2" core). A classic in-order 5-stage
// pipeline - Fetch, Decode, Execute, Memory, Writeback - with result
// forwarding, executing only the 27 instructions kept for Tsetlin-machine
// inference. The multiplier/divider and every decoder and datapath path of
// the removed instructions are absent. Instruction and data memories are
// reached over two AXI4-Lite masters (ibus: read only, dbus: read/write).
//
// Stage by stage:
//  * Fetch (rv_ifetch): pc, AXI read of IMEM; the R data is the Fetch/Decode
//    register.
//  * Decode: rv_decoder and the register-file read (with write bypass).
//    A load-use hazard (rv_hazard_unit) holds Decode for one cycle.
//  * Execute: forwarding muxes, rv_alu, rv_branch_unit, rv_csr access and
//    traps. Taken branches, jal, ecall/ebreak/illegal (to mtvec) and eret
//    (to mepc) redirect Fetch here; the two younger instructions are dropped.
//  * Memory: rv_lsu, which holds the whole pipeline until DMEM answers.
//  * Writeback: register write, minstret count.
// While the pipeline is held, Execute re-captures its forwarded operands each
// cycle so that a value forwarded from Writeback is not lost.
//
// What follows the source: the 5 stages, forwarding, the instruction list,
// Zicsr, AXI-connected TCMs. The source takes the core's internals from an
// external open-source core and does not describe them; branch resolution in
// Execute, the load-use stall, machine-mode-only CSRs, no interrupts and the
// blocking memory stage are this design's choices.
module rv_core
  import rv_pkg::*;
  import axil_pkg::*;
#(
  parameter logic [XLEN-1:0] RESET_PC = '0
) (
  input  logic clk,
  input  logic rst_n,
  // Instruction bus (AXI4-Lite, read channels only)
  output ax_t  ibus_ar,
  input  logic ibus_ar_ready,
  input  r_t   ibus_r,
  output logic ibus_r_ready,
  // Data bus (AXI4-Lite)
  output ax_t  dbus_ar,
  input  logic dbus_ar_ready,
  input  r_t   dbus_r,
  output logic dbus_r_ready,
  output ax_t  dbus_aw,
  input  logic dbus_aw_ready,
  output w_t   dbus_w,
  input  logic dbus_w_ready,
  input  b_t   dbus_b,
  output logic dbus_b_ready
);

  // ------------------------------------------------------------------
  // Stage registers
  // ------------------------------------------------------------------
  logic            idex_valid;
  logic [XLEN-1:0] idex_pc;
  logic [31:0]     idex_instr;
  dec_t            idex_dec;
  logic [XLEN-1:0] idex_a, idex_b;     // rs1 / rs2 values

  logic            exmem_valid;
  logic            exmem_rd_we;
  logic [4:0]      exmem_rd;
  logic [XLEN-1:0] exmem_result;       // ALU/CSR/link result or address
  mem_op_e         exmem_mem_op;
  logic [XLEN-1:0] exmem_store_data;

  logic            memwb_valid;
  logic            memwb_rd_we;
  logic [4:0]      memwb_rd;
  logic [XLEN-1:0] memwb_result;

  // ------------------------------------------------------------------
  // Control
  // ------------------------------------------------------------------
  logic            mem_stall, load_use_stall, redirect;
  logic [XLEN-1:0] redirect_pc;

  // ------------------------------------------------------------------
  // Fetch
  // ------------------------------------------------------------------
  logic            if_valid;
  logic [XLEN-1:0] if_pc;
  logic [31:0]     if_instr;
  logic            id_ready;

  assign id_ready = ~mem_stall & ~load_use_stall;

  rv_ifetch #(.RESET_PC(RESET_PC)) u_fetch (
    .clk, .rst_n,
    .ar(ibus_ar), .ar_ready(ibus_ar_ready), .r(ibus_r), .r_ready(ibus_r_ready),
    .redirect, .redirect_pc,
    .out_valid(if_valid), .out_pc(if_pc), .out_instr(if_instr), .out_ready(id_ready)
  );

  // ------------------------------------------------------------------
  // Decode
  // ------------------------------------------------------------------
  dec_t            id_dec;
  logic [XLEN-1:0] id_rs1_val, id_rs2_val;

  rv_decoder u_dec (.instr(if_instr), .dec(id_dec));

  rv_regfile u_rf (
    .clk, .rst_n,
    .raddr1(id_dec.rs1), .raddr2(id_dec.rs2),
    .rdata1(id_rs1_val), .rdata2(id_rs2_val),
    .we(memwb_valid & memwb_rd_we), .waddr(memwb_rd), .wdata(memwb_result)
  );

  // ------------------------------------------------------------------
  // Execute
  // ------------------------------------------------------------------
  fwd_e            fwd_a, fwd_b;
  logic [XLEN-1:0] ex_a, ex_b, alu_a, alu_b, alu_y, br_target, csr_rdata, ex_result;
  logic [XLEN-1:0] mtvec, mepc, trap_cause;
  logic            br_taken, ex_trap, ex_mret, ex_fire;

  rv_hazard_unit u_haz (
    .ex_rs1(idex_dec.rs1), .ex_rs2(idex_dec.rs2),
    .mem_valid(exmem_valid), .mem_rd_we(exmem_rd_we), .mem_rd(exmem_rd),
    .wb_valid(memwb_valid), .wb_rd_we(memwb_rd_we), .wb_rd(memwb_rd),
    .ex_valid(idex_valid), .ex_is_load(is_load(idex_dec.mem_op)), .ex_rd(idex_dec.rd),
    .id_valid(if_valid), .id_use_rs1(id_dec.use_rs1), .id_use_rs2(id_dec.use_rs2),
    .id_rs1(id_dec.rs1), .id_rs2(id_dec.rs2),
    .fwd_a, .fwd_b, .load_use_stall
  );

  always_comb begin
    unique case (fwd_a)
      FWD_MEM: ex_a = exmem_result;
      FWD_WB:  ex_a = memwb_result;
      default: ex_a = idex_a;
    endcase
    unique case (fwd_b)
      FWD_MEM: ex_b = exmem_result;
      FWD_WB:  ex_b = memwb_result;
      default: ex_b = idex_b;
    endcase
  end

  assign alu_a = idex_dec.a_zero ? '0 : ex_a;
  assign alu_b = idex_dec.b_imm ? idex_dec.imm : ex_b;

  rv_alu u_alu (.a(alu_a), .b(alu_b), .op(idex_dec.alu_op), .y(alu_y));

  rv_branch_unit u_br (
    .a(ex_a), .b(ex_b), .pc(idex_pc), .imm(idex_dec.imm),
    .br_op(idex_dec.br_op), .jal(idex_dec.jal),
    .taken(br_taken), .target(br_target)
  );

  assign ex_fire = idex_valid & ~mem_stall;
  assign ex_trap = idex_dec.illegal | idex_dec.ecall | idex_dec.ebreak;
  assign ex_mret = idex_dec.mret;

  always_comb begin
    if (idex_dec.illegal)     trap_cause = CAUSE_ILLEGAL;
    else if (idex_dec.ebreak) trap_cause = CAUSE_BREAKPOINT;
    else                      trap_cause = CAUSE_ECALL_M;
  end

  rv_csr u_csr (
    .clk, .rst_n,
    .ex_fire,
    .csr_op(idex_dec.csr_op), .csr_addr(idex_dec.csr_addr),
    .csr_operand(idex_dec.csr_imm ? idex_dec.imm : ex_a),
    .csr_src_zero(idex_dec.rs1 == 5'd0),
    .csr_rdata,
    .trap(ex_trap), .trap_cause, .trap_pc(idex_pc),
    .trap_tval(idex_dec.illegal ? idex_instr : '0),
    .mret(ex_mret),
    .retire(memwb_valid),
    .trap_vector(mtvec), .epc(mepc)
  );

  assign redirect = ex_fire & (br_taken | ex_trap | ex_mret);
  always_comb begin
    if (ex_trap)      redirect_pc = mtvec;
    else if (ex_mret) redirect_pc = mepc;
    else              redirect_pc = br_target;
  end

  always_comb begin
    if (idex_dec.jal)                     ex_result = idex_pc + 32'd4;
    else if (idex_dec.csr_op != CSR_NONE) ex_result = csr_rdata;
    else                                  ex_result = alu_y;
  end

  // ------------------------------------------------------------------
  // Memory
  // ------------------------------------------------------------------
  logic [XLEN-1:0] load_data;

  rv_lsu u_lsu (
    .clk, .rst_n,
    .valid(exmem_valid), .mem_op(exmem_mem_op), .addr(exmem_result),
    .store_data(exmem_store_data), .stall(mem_stall), .load_data,
    .ar(dbus_ar), .ar_ready(dbus_ar_ready), .r(dbus_r), .r_ready(dbus_r_ready),
    .aw(dbus_aw), .aw_ready(dbus_aw_ready), .w(dbus_w), .w_ready(dbus_w_ready),
    .b(dbus_b), .b_ready(dbus_b_ready)
  );

  // ------------------------------------------------------------------
  // Pipeline registers
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idex_valid  <= 1'b0;
      idex_pc     <= '0;
      idex_instr  <= '0;
      idex_dec    <= '0;
      idex_a      <= '0;
      idex_b      <= '0;
      exmem_valid <= 1'b0;
      exmem_rd_we <= 1'b0;
      exmem_rd    <= '0;
      exmem_result     <= '0;
      exmem_mem_op     <= MEM_NONE;
      exmem_store_data <= '0;
      memwb_valid  <= 1'b0;
      memwb_rd_we  <= 1'b0;
      memwb_rd     <= '0;
      memwb_result <= '0;
    end else begin
      // Decode -> Execute
      if (mem_stall) begin
        idex_a <= ex_a;   // keep forwarded operands while held
        idex_b <= ex_b;
      end else begin
        idex_valid <= if_valid & ~load_use_stall & ~redirect;
        idex_pc    <= if_pc;
        idex_instr <= if_instr;
        idex_dec   <= id_dec;
        idex_a     <= id_rs1_val;
        idex_b     <= id_rs2_val;
      end

      // Execute -> Memory
      if (!mem_stall) begin
        exmem_valid      <= idex_valid & ~ex_trap;
        exmem_rd_we      <= idex_dec.rd_we & ~ex_trap;
        exmem_rd         <= idex_dec.rd;
        exmem_result     <= ex_result;
        exmem_mem_op     <= ex_trap ? MEM_NONE : idex_dec.mem_op;
        exmem_store_data <= ex_b;
      end

      // Memory -> Writeback
      memwb_valid  <= exmem_valid & ~mem_stall;
      memwb_rd_we  <= exmem_rd_we;
      memwb_rd     <= exmem_rd;
      memwb_result <= is_load(exmem_mem_op) ? load_data : exmem_result;
    end
  end

endmodule
