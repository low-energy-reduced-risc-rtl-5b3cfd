// Self-checking test of rv_branch_unit: beq, bne, blt (signed) and jal with
// random and equal operands; the decision and the pc-relative target are
// compared with values computed here.
`timescale 1ns/1ps
module tb_rv_branch_unit;
  import rv_pkg::*;

  logic [31:0] a, b, pc, imm, target;
  br_op_e      br_op;
  logic        jal, taken;
  int          checks = 0, failures = 0;

  rv_branch_unit dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) begin
      logic exp_t;
      a     = $urandom;
      b     = ($urandom_range(3) == 0) ? a : (($urandom_range(1) == 1) ? $urandom : a ^ 32'h8000_0000);
      pc    = {$urandom, 2'b00};
      imm   = {{19{1'b1 & $urandom_range(1)}}, 12'($urandom), 1'b0};
      br_op = br_op_e'($urandom_range(3));
      jal   = ($urandom_range(7) == 0);
      #1;
      case (br_op)
        BR_EQ:   exp_t = (a == b);
        BR_NE:   exp_t = (a != b);
        BR_LT:   exp_t = ($signed(a) < $signed(b));
        default: exp_t = 1'b0;
      endcase
      exp_t |= jal;
      checks += 2;
      if (taken !== exp_t) begin
        failures++;
        $display("FAIL taken op=%s a=%h b=%h", br_op.name(), a, b);
      end
      if (target !== pc + imm) begin
        failures++;
        $display("FAIL target");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
