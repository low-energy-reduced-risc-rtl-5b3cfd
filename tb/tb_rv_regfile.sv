// Self-checking test of rv_regfile: random writes and reads against a
// reference array, x0 staying zero, and the same-cycle write-to-read bypass.
`timescale 1ns/1ps
module tb_rv_regfile;
  logic        clk = 0, rst_n = 0, we = 0;
  logic [4:0]  raddr1 = 0, raddr2 = 0, waddr = 0;
  logic [31:0] rdata1, rdata2, wdata = 0;
  logic [31:0] ref_regs [32];
  int          checks = 0, failures = 0;

  rv_regfile dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ref_regs[i]) ref_regs[i] = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      we     = $urandom_range(1);
      waddr  = 5'($urandom);
      wdata  = $urandom;
      raddr1 = ($urandom_range(3) == 0) ? waddr : 5'($urandom);
      raddr2 = 5'($urandom);
      #1;
      checks += 2;
      if (rdata1 !== ((we && waddr != 0 && waddr == raddr1) ? wdata : ref_regs[raddr1])) begin
        failures++;
        $display("FAIL r1 x%0d=%h", raddr1, rdata1);
      end
      if (rdata2 !== ((we && waddr != 0 && waddr == raddr2) ? wdata : ref_regs[raddr2])) begin
        failures++;
        $display("FAIL r2 x%0d=%h", raddr2, rdata2);
      end
      @(posedge clk);
      if (we && waddr != 0) ref_regs[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
