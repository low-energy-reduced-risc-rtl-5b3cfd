// Self-checking test of tcm_ram (small size): random reads and byte-masked
// writes on both ports against a reference array, including the rule that
// read data holds between reads and that port B wins a same-word collision.
`timescale 1ns/1ps
module tb_tcm_ram;
  localparam int BYTES = 256;
  localparam int AW = 6;

  logic          clk = 0;
  logic          a_en = 0, b_en = 0;
  logic [3:0]    a_we = 0, b_we = 0;
  logic [AW-1:0] a_addr = 0, b_addr = 0;
  logic [31:0]   a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [31:0]   model [64];
  logic [31:0]   exp_a, exp_b;
  bit            va = 0, vb = 0;
  int            checks = 0, failures = 0;

  tcm_ram #(.BYTES(BYTES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill through port B
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      b_en = 1; b_we = 4'hF; b_addr = AW'(i); b_wdata = $urandom; model[i] = b_wdata;
    end
    @(negedge clk); b_en = 0;
    repeat (4000) begin
      @(negedge clk);
      a_en = $urandom_range(1); b_en = $urandom_range(1);
      a_we = ($urandom_range(1) == 1) ? 4'($urandom) : 4'h0;
      b_we = ($urandom_range(1) == 1) ? 4'($urandom) : 4'h0;
      a_addr = AW'($urandom_range(7)); b_addr = AW'($urandom_range(7));
      a_wdata = $urandom; b_wdata = $urandom;
      @(posedge clk);
      if (a_en && a_we == 0) begin exp_a = model[a_addr]; va = 1; end
      if (b_en && b_we == 0) begin exp_b = model[b_addr]; vb = 1; end
      for (int k = 0; k < 4; k++) begin
        if (a_en && a_we[k]) model[a_addr][8*k +: 8] = a_wdata[8*k +: 8];
      end
      for (int k = 0; k < 4; k++) begin
        if (b_en && b_we[k]) model[b_addr][8*k +: 8] = b_wdata[8*k +: 8];
      end
      #1;
      if (va) begin
        checks++;
        if (a_rdata !== exp_a) begin failures++; $display("FAIL a %h != %h", a_rdata, exp_a); end
      end
      if (vb) begin
        checks++;
        if (b_rdata !== exp_b) begin failures++; $display("FAIL b %h != %h", b_rdata, exp_b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
