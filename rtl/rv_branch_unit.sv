// Branch unit of the reduced core: evaluates beq, bne and blt (signed) on the
// two forwarded register operands and forms the target pc + immediate, also
// used by jal. jalr is not among the retained instructions, so every target
// is pc-relative. Combinational; the core resolves branches in Execute
// (this design's choice) and redirects fetch in the same cycle.
module rv_branch_unit
  import rv_pkg::*;
(
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  input  logic [XLEN-1:0] pc,
  input  logic [XLEN-1:0] imm,
  input  br_op_e          br_op,
  input  logic            jal,
  output logic            taken,
  output logic [XLEN-1:0] target
);

  logic cond;

  always_comb begin
    unique case (br_op)
      BR_EQ:   cond = (a == b);
      BR_NE:   cond = (a != b);
      BR_LT:   cond = ($signed(a) < $signed(b));
      default: cond = 1'b0;
    endcase
  end

  assign taken  = jal | cond;
  assign target = pc + imm;

endmodule
