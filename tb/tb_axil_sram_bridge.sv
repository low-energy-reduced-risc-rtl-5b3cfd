// Self-checking test of axil_sram_bridge: a random AXI4-Lite master (valid
// held until ready, AW and W raised independently, random R/B back-pressure)
// reads and writes a memory model that answers like the synchronous TCM.
// Every R word is compared with a reference memory updated in acceptance
// order, every write must be acknowledged once on B, and back-to-back reads
// must reach one per cycle when R is always taken.
`timescale 1ns/1ps
module tb_axil_sram_bridge;
  import axil_pkg::*;

  localparam int WORDS = 16;

  logic clk = 0, rst_n = 0;
  ax_t  ar = '0, aw = '0;
  w_t   w = '0;
  r_t   r;
  b_t   b;
  logic ar_ready, aw_ready, w_ready, r_ready = 0, b_ready = 0;
  logic              mem_en;
  logic [3:0]        mem_we;
  logic [3:0]        mem_addr;
  logic [31:0]       mem_wdata, mem_rdata;
  logic [31:0]       mem [WORDS];
  logic [31:0]       model [WORDS];
  logic [31:0]       exp_q[$];
  int                n_wr_acc = 0, n_b = 0;
  logic              ar_acc = 0, aw_acc = 0, w_acc = 0;  // handshakes at the last edge
  int                checks = 0, failures = 0;

  axil_sram_bridge #(.WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;

  // Synchronous memory behind the bridge
  always_ff @(posedge clk) if (mem_en) begin
    for (int k = 0; k < 4; k++) if (mem_we[k]) mem[mem_addr][8*k +: 8] <= mem_wdata[8*k +: 8];
    if (mem_we == 0) mem_rdata <= mem[mem_addr];
  end

  // Reference and response checking
  always @(posedge clk) begin
    ar_acc = ar.valid && ar_ready;
    aw_acc = aw.valid && aw_ready;
    w_acc  = w.valid && w_ready;
  end
  always @(posedge clk) if (rst_n) begin
    if (ar.valid && ar_ready) exp_q.push_back(model[ar.addr[5:2]]);
    if (aw.valid && aw_ready && w.valid && w_ready) begin
      for (int k = 0; k < 4; k++) if (w.strb[k]) model[aw.addr[5:2]][8*k +: 8] = w.data[8*k +: 8];
      n_wr_acc++;
    end
    if ((aw.valid && aw_ready) != (w.valid && w_ready)) begin
      failures++; $display("FAIL AW/W accepted apart");
    end
    if (r.valid && r_ready) begin
      checks++;
      if (exp_q.size() == 0 || r.data !== exp_q[0]) begin
        failures++; $display("FAIL read data %h exp %h at %0t", r.data, exp_q.size() ? exp_q[0] : 0, $time);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    if (b.valid && b_ready) n_b++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, nreads;
    for (int i = 0; i < WORDS; i++) begin mem[i] = $urandom; model[i] = mem[i]; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      if (!ar.valid || ar_acc) begin
        ar.valid = ($urandom_range(2) == 0);
        ar.addr  = {26'b0, 4'($urandom), 2'b00};
      end
      if (!aw.valid || aw_acc) begin
        aw.valid = ($urandom_range(3) == 0);
        aw.addr  = {26'b0, 4'($urandom), 2'b00};
      end
      if (!w.valid || w_acc) begin
        w.valid = ($urandom_range(3) == 0);
        w.data  = $urandom;
        w.strb  = 4'($urandom);
      end
      r_ready = $urandom_range(1);
      b_ready = $urandom_range(1);
    end
    // Drain, then measure read throughput with R always taken
    r_ready = 1; b_ready = 1;
    @(negedge clk);
    while (ar.valid || aw.valid || w.valid) begin
      if (ar_acc) ar.valid = 0;
      if (aw_acc) aw.valid = 0;
      if (w_acc)  w.valid = 0;
      if (aw.valid && !w.valid) begin w.valid = 1; w.strb = 4'hF; end  // complete a lone AW
      if (w.valid && !aw.valid) begin aw.valid = 1; end                  // complete a lone W
      @(negedge clk);
    end
    repeat (5) @(negedge clk);
    // Hold each request until accepted; 20 reads must take 20 cycles
    nreads = 0;
    t0 = 0;
    ar.valid = 1;
    ar.addr = {26'b0, 4'($urandom), 2'b00};
    while (nreads < 20 && t0 < 100) begin
      @(negedge clk);
      t0++;
      if (ar_acc) begin
        nreads++;
        ar.addr = {26'b0, 4'($urandom), 2'b00};
      end
    end
    ar.valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (nreads != 20 || t0 != 20) begin failures++; $display("FAIL read throughput %0d reads in %0d cycles", nreads, t0); end
    checks++;
    if (n_b != n_wr_acc || n_wr_acc == 0) begin failures++; $display("FAIL B count %0d vs %0d", n_b, n_wr_acc); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d reads unanswered", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
