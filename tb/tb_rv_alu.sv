// Self-checking test of rv_alu: random and corner operands for each of the
// six operations, compared with results computed in the testbench.
`timescale 1ns/1ps
module tb_rv_alu;
  import rv_pkg::*;

  logic [31:0] a, b, y;
  alu_op_e     op;
  int          checks = 0, failures = 0;

  rv_alu dut (.a, .b, .op, .y);

  function automatic logic [31:0] model(logic [31:0] x, logic [31:0] z, alu_op_e o);
    case (o)
      ALU_ADD:  return x + z;
      ALU_AND:  return x & z;
      ALU_OR:   return x | z;
      ALU_XOR:  return x ^ z;
      ALU_SLL:  return x << z[4:0];
      ALU_SLTU: return (x < z) ? 32'd1 : 32'd0;
      default:  return 32'hx;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alu_op_e ops[6] = '{ALU_ADD, ALU_AND, ALU_OR, ALU_XOR, ALU_SLL, ALU_SLTU};
    logic [31:0] corners[5] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF};
    foreach (ops[o]) begin
      foreach (corners[i]) foreach (corners[j]) begin
        a = corners[i]; b = corners[j]; op = ops[o]; #1;
        checks++;
        if (y !== model(a, b, op)) begin
          failures++;
          $display("FAIL op=%s a=%h b=%h y=%h", op.name(), a, b, y);
        end
      end
      repeat (500) begin
        a = $urandom; b = $urandom; op = ops[o]; #1;
        checks++;
        if (y !== model(a, b, op)) begin
          failures++;
          $display("FAIL op=%s a=%h b=%h y=%h", op.name(), a, b, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
