// Self-checking test of rv_ifetch against an instruction-memory model whose
// AR acceptance and R latency vary at random, with random Decode
// back-pressure and random redirects. Each instruction handed to Decode must
// carry the expected pc (sequential, or the redirect target after a
// redirect) and the word stored at that pc; responses on a squashed path must
// never reach Decode. A final phase with a one-cycle memory checks the rate
// of one instruction per cycle.
`timescale 1ns/1ps
module tb_rv_ifetch;
  import axil_pkg::*;

  logic        clk = 0, rst_n = 0;
  ax_t         ar;
  logic        ar_ready;
  r_t          r;
  logic        r_ready;
  logic        redirect = 0;
  logic [31:0] redirect_pc = 0;
  logic        out_valid, out_ready = 0;
  logic [31:0] out_pc, out_instr;
  int          checks = 0, failures = 0;

  rv_ifetch #(.RESET_PC(32'h100)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] word_at(logic [31:0] a);
    return ~a ^ 32'h1234_5678;
  endfunction

  // Memory model: one read at a time, random or fixed latency
  bit          fast = 0;
  logic        pend = 0;
  int          wait_n = 0;
  logic [31:0] pend_addr = 0;
  logic        rv = 0;
  logic        acc_ok = 0;
  always @(negedge clk) acc_ok <= fast || ($urandom_range(2) != 0);
  assign ar_ready = acc_ok && (!pend || (rv && r_ready));
  assign r.valid  = rv;
  assign r.data   = word_at(pend_addr);
  assign r.resp   = RESP_OKAY;
  always @(posedge clk) begin
    if (rv && r_ready) begin rv <= 0; pend <= 0; end
    if (ar.valid && ar_ready) begin
      int lat;
      lat = fast ? 0 : $urandom_range(2);   // extra cycles beyond one
      pend <= 1; pend_addr <= ar.addr; wait_n <= lat; rv <= (lat == 0);
    end else if (pend && !rv) begin
      if (wait_n <= 1) rv <= 1;
      wait_n <= wait_n - 1;
    end
  end

  // Checker
  logic [31:0] exp_pc = 32'h100;
  int n_deliv = 0, n_redir = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready && !redirect) begin
      checks++;
      n_deliv++;
      if (out_pc !== exp_pc || out_instr !== word_at(out_pc)) begin
        failures++;
        $display("FAIL pc %h (expected %h) instr %h", out_pc, exp_pc, out_instr);
      end
      exp_pc = out_pc + 4;
    end
    if (redirect) begin exp_pc = redirect_pc; n_redir++; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_drop = 0, n_hold = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.drop_q && dut.r_fire) n_drop++;
    if (ar.valid && !ar_ready) n_hold++;
  end

  initial begin
    int got;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (4000) begin
      @(negedge clk);
      out_ready   = ($urandom_range(3) != 0);
      redirect    = ($urandom_range(9) == 0);
      redirect_pc = {20'b0, 10'($urandom), 2'b00};
    end
    // Rate check: one-cycle memory, no stalls, no redirects
    fast = 1; out_ready = 1; redirect = 0;
    repeat (10) @(negedge clk);
    got = n_deliv;
    repeat (50) @(negedge clk);
    checks++;
    if (n_deliv - got != 50) begin failures++; $display("FAIL rate %0d/50", n_deliv - got); end
    checks++;
    if (n_drop == 0 || n_hold == 0 || n_redir == 0) begin
      failures++; $display("FAIL coverage drop=%0d hold=%0d", n_drop, n_hold);
    end
    $display("delivered=%0d redirects=%0d squashed=%0d held=%0d", n_deliv, n_redir, n_drop, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
