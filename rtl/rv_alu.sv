// Reduced ALU. Only the operations the retained instructions need remain:
// add (add, addi, lui, address generation), and, or, xor, shift left and
// unsigned set-less-than. Subtraction, right shifts, signed compare and the
// multiply/divide unit of the full RV32IM core are gone, following the
// source's removal of those instructions. Combinational, one result per
// cycle.
module rv_alu
  import rv_pkg::*;
(
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  input  alu_op_e         op,
  output logic [XLEN-1:0] y
);

  always_comb begin
    unique case (op)
      ALU_ADD:  y = a + b;
      ALU_AND:  y = a & b;
      ALU_OR:   y = a | b;
      ALU_XOR:  y = a ^ b;
      ALU_SLL:  y = a << b[4:0];
      ALU_SLTU: y = {31'b0, a < b};
      default:  y = '0;
    endcase
  end

endmodule
