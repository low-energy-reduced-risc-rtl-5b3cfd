// Forwarding and interlock logic of the 5-stage pipeline. The source states
// only that the core supports result forwarding; the concrete scheme here is
// the classic one:
//  * an Execute operand whose register is written by the instruction now in
//    Memory takes that instruction's ALU/CSR result (FWD_MEM), otherwise one
//    written by the instruction now in Writeback takes its final result
//    (FWD_WB); x0 is never forwarded;
//  * a load in Execute whose destination is read by the instruction in Decode
//    holds Decode for one cycle (load-use stall), because load data arrives
//    only at the end of Memory.
// Purely combinational.
module rv_hazard_unit
  import rv_pkg::*;
(
  // Execute-stage operand registers
  input  logic [4:0] ex_rs1,
  input  logic [4:0] ex_rs2,
  // Instruction in Memory
  input  logic       mem_valid,
  input  logic       mem_rd_we,
  input  logic [4:0] mem_rd,
  // Instruction in Writeback
  input  logic       wb_valid,
  input  logic       wb_rd_we,
  input  logic [4:0] wb_rd,
  // Load-use check between Execute and Decode
  input  logic       ex_valid,
  input  logic       ex_is_load,
  input  logic [4:0] ex_rd,
  input  logic       id_valid,
  input  logic       id_use_rs1,
  input  logic       id_use_rs2,
  input  logic [4:0] id_rs1,
  input  logic [4:0] id_rs2,
  output fwd_e       fwd_a,
  output fwd_e       fwd_b,
  output logic       load_use_stall
);

  function automatic fwd_e sel(logic [4:0] rs, logic mv, logic mwe, logic [4:0] mrd,
                               logic wv, logic wwe, logic [4:0] wrd);
    if (rs == 5'd0)                     return FWD_NONE;
    else if (mv && mwe && mrd == rs)    return FWD_MEM;
    else if (wv && wwe && wrd == rs)    return FWD_WB;
    else                                return FWD_NONE;
  endfunction

  assign fwd_a = sel(ex_rs1, mem_valid, mem_rd_we, mem_rd, wb_valid, wb_rd_we, wb_rd);
  assign fwd_b = sel(ex_rs2, mem_valid, mem_rd_we, mem_rd, wb_valid, wb_rd_we, wb_rd);

  assign load_use_stall = ex_valid && ex_is_load && ex_rd != 5'd0 && id_valid &&
                          ((id_use_rs1 && id_rs1 == ex_rd) || (id_use_rs2 && id_rs2 == ex_rd));

endmodule
