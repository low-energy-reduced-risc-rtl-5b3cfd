// Self-checking test of rv_lsu. A data-memory model with random channel
// readiness and response latency sits on the AXI4-Lite side; the testbench
// plays the pipeline, presenting random lw/lbu/lhu/sb/sw operations and
// holding each until `stall` drops. Loaded values are compared with a
// byte-level reference memory, stores must change exactly the addressed
// bytes, and with a one-cycle memory every operation must take two cycles.
`timescale 1ns/1ps
module tb_rv_lsu;
  import rv_pkg::*;
  import axil_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        valid = 0;
  mem_op_e     mem_op = MEM_NONE;
  logic [31:0] addr = 0, store_data = 0, load_data;
  logic        stall;
  ax_t         ar, aw;
  w_t          w;
  r_t          r;
  b_t          b;
  logic        ar_ready, aw_ready, w_ready, r_ready, b_ready;
  int          checks = 0, failures = 0;

  rv_lsu dut (.*);

  always #5 clk = ~clk;

  // ---- memory model (16 words) ----
  logic [31:0] mem [16];
  bit          fast = 0;
  logic        ok_ar = 0, ok_aw = 0, ok_w = 0;
  logic        rpend = 0, rv = 0, awgot = 0, wgot = 0, bv = 0;
  logic [31:0] raddr = 0, waddr = 0, wdata = 0;
  logic [3:0]  wstrb = 0;
  int          rwait = 0;
  always @(negedge clk) begin
    ok_ar <= fast || $urandom_range(1);
    ok_aw <= fast || $urandom_range(1);
    ok_w  <= fast || $urandom_range(1);
  end
  assign ar_ready = ok_ar && !rpend;
  assign aw_ready = ok_aw && !awgot && !bv;
  assign w_ready  = ok_w && !wgot && !bv;
  assign r.valid  = rv;
  assign r.data   = mem[raddr[5:2]];
  assign r.resp   = RESP_OKAY;
  assign b.valid  = bv;
  assign b.resp   = RESP_OKAY;
  always @(posedge clk) begin
    if (rv && r_ready) begin rv <= 0; rpend <= 0; end
    if (ar.valid && ar_ready) begin
      int lat;
      lat = fast ? 0 : $urandom_range(2);
      rpend <= 1; raddr <= ar.addr; rwait <= lat; rv <= (lat == 0);
    end else if (rpend && !rv) begin
      if (rwait <= 1) rv <= 1;
      rwait <= rwait - 1;
    end
    if (bv && b_ready) bv <= 0;
    begin
      logic        aw_now, w_now;
      logic [31:0] a_eff, d_eff;
      logic [3:0]  s_eff;
      aw_now = awgot || (aw.valid && aw_ready);
      w_now  = wgot || (w.valid && w_ready);
      a_eff  = awgot ? waddr : aw.addr;
      d_eff  = wgot ? wdata : w.data;
      s_eff  = wgot ? wstrb : w.strb;
      if (aw_now && w_now) begin
        for (int k = 0; k < 4; k++) if (s_eff[k]) mem[a_eff[5:2]][8*k +: 8] <= d_eff[8*k +: 8];
        awgot <= 0; wgot <= 0; bv <= 1;
      end else begin
        if (aw.valid && aw_ready) begin awgot <= 1; waddr <= aw.addr; end
        if (w.valid && w_ready)   begin wgot <= 1; wdata <= w.data; wstrb <= w.strb; end
      end
    end
  end

  logic [7:0] ref_mem [64];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_op(mem_op_e op, logic [31:0] a, logic [31:0] d, output int cycles);
    logic [31:0] exp;
    @(negedge clk);
    valid = 1; mem_op = op; addr = a; store_data = d;
    cycles = 1;
    #1;
    while (stall) begin
      @(negedge clk); #1;
      cycles++;
    end
    // response cycle: stall is low, load data valid
    case (op)
      MEM_LW:  exp = {ref_mem[{a[5:2], 2'd3}], ref_mem[{a[5:2], 2'd2}], ref_mem[{a[5:2], 2'd1}], ref_mem[{a[5:2], 2'd0}]};
      MEM_LBU: exp = {24'b0, ref_mem[a[5:0]]};
      MEM_LHU: exp = {16'b0, ref_mem[{a[5:2], a[1], 1'b1}], ref_mem[{a[5:2], a[1], 1'b0}]};
      default: exp = '0;
    endcase
    if (is_load(op)) begin
      checks++;
      if (load_data !== exp) begin
        failures++;
        $display("FAIL %s @%h: %h expected %h", op.name(), a, load_data, exp);
      end
    end
    if (op == MEM_SB) ref_mem[a[5:0]] = d[7:0];
    if (op == MEM_SW) for (int k = 0; k < 4; k++) ref_mem[{a[5:2], 2'(k)}] = d[8*k +: 8];
    @(posedge clk);
    @(negedge clk);
    valid = 0;
  endtask

  initial begin
    int cyc;
    mem_op_e ops[5] = '{MEM_LW, MEM_LBU, MEM_LHU, MEM_SB, MEM_SW};
    for (int i = 0; i < 16; i++) begin
      mem[i] = $urandom;
      for (int k = 0; k < 4; k++) ref_mem[4 * i + k] = mem[i][8*k +: 8];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (1500) begin
      mem_op_e op;
      logic [31:0] a;
      op = ops[$urandom_range(4)];
      a  = {26'b0, 6'($urandom)};
      if (op == MEM_LW || op == MEM_SW) a[1:0] = 0;
      if (op == MEM_LHU) a[0] = 0;
      do_op(op, a, $urandom, cyc);
    end
    // Timing with a one-cycle memory
    fast = 1;
    repeat (3) @(negedge clk);
    foreach (ops[i]) begin
      do_op(ops[i], 32'h8, 32'hA5A5_5A5A, cyc);
      checks++;
      if (cyc != 2) begin failures++; $display("FAIL %s took %0d cycles", ops[i].name(), cyc); end
    end
    // Memory must hold exactly the reference contents
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (mem[i] !== {ref_mem[4*i+3], ref_mem[4*i+2], ref_mem[4*i+1], ref_mem[4*i]}) begin
        failures++; $display("FAIL word %0d %h", i, mem[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
