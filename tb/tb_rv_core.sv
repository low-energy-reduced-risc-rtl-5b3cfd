// Self-checking test of rv_core. A directed program uses every one of the
// 27 instructions, back-to-back dependences (forwarding from Memory and
// Writeback), a load-use pair, a counted loop, taken and not-taken
// branches, jal with link, all six CSR instructions, ecall, ebreak, a removed
// instruction (illegal-instruction trap) and eret. An instruction-set
// reference model in this testbench runs the same program; afterwards all
// registers (except two holding cycle counts) and the data memory must
// match it. The program runs twice: with instruction and data memories of
// random latency and readiness, then with one-cycle memories, where a block
// of ten dependent additions must take exactly eleven cycles between two
// mcycle reads (one instruction per cycle with full forwarding).
`timescale 1ns/1ps
module tb_rv_core;
  import rv_pkg::*;
  import axil_pkg::*;
  import rv_asm_pkg::*;
  import tm_asm::*;

  logic clk = 0, rst_n = 0;
  ax_t  ibus_ar, dbus_ar, dbus_aw;
  w_t   dbus_w;
  r_t   ibus_r, dbus_r;
  b_t   dbus_b;
  logic ibus_ar_ready, ibus_r_ready, dbus_ar_ready, dbus_r_ready;
  logic dbus_aw_ready, dbus_w_ready, dbus_b_ready;
  int   checks = 0, failures = 0;

  rv_core dut (.*);

  always #6 clk = ~clk;

  bit   fast = 0;

  // ---------------- instruction memory model ----------------
  logic [31:0] imem [256];
  logic        i_ok = 0, i_pend = 0, i_rv = 0;
  logic [31:0] i_addr = 0;
  int          i_wait = 0;
  always @(negedge clk) i_ok <= fast || ($urandom_range(2) != 0);
  assign ibus_ar_ready = rst_n && i_ok && (!i_pend || (i_rv && ibus_r_ready));
  assign ibus_r.valid  = i_rv;
  assign ibus_r.data   = imem[i_addr[9:2]];
  assign ibus_r.resp   = RESP_OKAY;
  always @(posedge clk) begin
    if (!rst_n) begin
      i_pend <= 0; i_rv <= 0;
    end else begin
      if (i_rv && ibus_r_ready) begin i_rv <= 0; i_pend <= 0; end
      if (ibus_ar.valid && ibus_ar_ready) begin
        int lat;
        lat = fast ? 0 : $urandom_range(2);
        i_pend <= 1; i_addr <= ibus_ar.addr; i_wait <= lat; i_rv <= (lat == 0);
      end else if (i_pend && !i_rv) begin
        if (i_wait <= 1) i_rv <= 1;
        i_wait <= i_wait - 1;
      end
    end
  end

  // ---------------- data memory model ----------------
  logic [31:0] dmem [128];
  logic        d_ok_ar = 0, d_ok_aw = 0, d_ok_w = 0;
  logic        rpend = 0, rv = 0, awgot = 0, wgot = 0, bv = 0;
  logic [31:0] raddr = 0, waddr = 0, wdata = 0;
  logic [3:0]  wstrb = 0;
  int          rwait = 0;
  always @(negedge clk) begin
    d_ok_ar <= fast || $urandom_range(1);
    d_ok_aw <= fast || $urandom_range(1);
    d_ok_w  <= fast || $urandom_range(1);
  end
  assign dbus_ar_ready = d_ok_ar && !rpend;
  assign dbus_aw_ready = d_ok_aw && !awgot && !bv;
  assign dbus_w_ready  = d_ok_w && !wgot && !bv;
  assign dbus_r.valid  = rv;
  assign dbus_r.data   = dmem[raddr[8:2]];
  assign dbus_r.resp   = RESP_OKAY;
  assign dbus_b.valid  = bv;
  assign dbus_b.resp   = RESP_OKAY;
  always @(posedge clk) begin
    if (rv && dbus_r_ready) begin rv <= 0; rpend <= 0; end
    if (dbus_ar.valid && dbus_ar_ready) begin
      int lat;
      lat = fast ? 0 : $urandom_range(2);
      rpend <= 1; raddr <= dbus_ar.addr; rwait <= lat; rv <= (lat == 0);
    end else if (rpend && !rv) begin
      if (rwait <= 1) rv <= 1;
      rwait <= rwait - 1;
    end
    if (bv && dbus_b_ready) bv <= 0;
    begin
      logic        aw_now, w_now;
      logic [31:0] a_eff, d_eff;
      logic [3:0]  s_eff;
      aw_now = awgot || (dbus_aw.valid && dbus_aw_ready);
      w_now  = wgot || (dbus_w.valid && dbus_w_ready);
      a_eff  = awgot ? waddr : dbus_aw.addr;
      d_eff  = wgot ? wdata : dbus_w.data;
      s_eff  = wgot ? wstrb : dbus_w.strb;
      if (aw_now && w_now) begin
        for (int k = 0; k < 4; k++) if (s_eff[k]) dmem[a_eff[8:2]][8*k +: 8] <= d_eff[8*k +: 8];
        awgot <= 0; wgot <= 0; bv <= 1;
      end else begin
        if (dbus_aw.valid && dbus_aw_ready) begin awgot <= 1; waddr <= dbus_aw.addr; end
        if (dbus_w.valid && dbus_w_ready)   begin wgot <= 1; wdata <= dbus_w.data; wstrb <= dbus_w.strb; end
      end
    end
  end

  // ---------------- reference instruction-set model ----------------
  logic [31:0] x [32];
  logic [31:0] rmem [128];
  logic [31:0] c_mtvec, c_mepc, c_mcause, c_mtval, c_mscratch;
  logic        c_mie, c_mpie;

  function automatic logic [31:0] csr_read(logic [11:0] a);
    case (a)
      CSR_MSTATUS:  return {19'b0, 2'b11, 3'b0, c_mpie, 3'b0, c_mie, 3'b0};
      CSR_MISA:     return MISA_VALUE;
      CSR_MTVEC:    return c_mtvec;
      CSR_MSCRATCH: return c_mscratch;
      CSR_MEPC:     return c_mepc;
      CSR_MCAUSE:   return c_mcause;
      CSR_MTVAL:    return c_mtval;
      default:      return 32'h0;  // counters are not modelled
    endcase
  endfunction

  task automatic csr_write(logic [11:0] a, logic [31:0] v);
    case (a)
      CSR_MSTATUS:  begin c_mie = v[3]; c_mpie = v[7]; end
      CSR_MTVEC:    c_mtvec = v;
      CSR_MSCRATCH: c_mscratch = v;
      CSR_MEPC:     c_mepc = {v[31:2], 2'b00};
      CSR_MCAUSE:   c_mcause = v;
      CSR_MTVAL:    c_mtval = v;
      default: ;
    endcase
  endtask

  task automatic iss_run(int halt_word);
    logic [31:0] pc = 0;
    int steps = 0;
    foreach (x[i]) x[i] = 0;
    foreach (rmem[i]) rmem[i] = 0;
    {c_mtvec, c_mepc, c_mcause, c_mtval, c_mscratch} = '0;
    {c_mie, c_mpie} = '0;
    while (pc[31:2] != 30'(halt_word) && steps < 10000) begin
      logic [31:0] in = imem[pc[9:2]];
      logic [31:0] npc = pc + 4, i_imm, s_imm, b_imm, j_imm, res, a1, a2, ea, old, opnd;
      logic [4:0]  rd = in[11:7];
      logic        wr = 0, trap = 0;
      logic [31:0] cause = 0, tval = 0;
      a1 = x[in[19:15]]; a2 = x[in[24:20]];
      i_imm = {{20{in[31]}}, in[31:20]};
      s_imm = {{20{in[31]}}, in[31:25], in[11:7]};
      b_imm = {{19{in[31]}}, in[31], in[7], in[30:25], in[11:8], 1'b0};
      j_imm = {{11{in[31]}}, in[31], in[19:12], in[20], in[30:21], 1'b0};
      ea = a1 + ((in[6:0] == 7'b0100011) ? s_imm : i_imm);
      casez ({in[31:25], in[14:12], in[6:0]})
        17'b???????_000_0010011: begin res = a1 + i_imm; wr = 1; end
        17'b???????_111_0010011: begin res = a1 & i_imm; wr = 1; end
        17'b???????_100_0010011: begin res = a1 ^ i_imm; wr = 1; end
        17'b0000000_001_0010011: begin res = a1 << in[24:20]; wr = 1; end
        17'b0000000_000_0110011: begin res = a1 + a2; wr = 1; end
        17'b0000000_011_0110011: begin res = {31'b0, a1 < a2}; wr = 1; end
        17'b0000000_110_0110011: begin res = a1 | a2; wr = 1; end
        17'b0000000_111_0110011: begin res = a1 & a2; wr = 1; end
        17'b???????_???_0110111: begin res = {in[31:12], 12'b0}; wr = 1; end
        17'b???????_???_1101111: begin res = pc + 4; wr = 1; npc = pc + j_imm; end
        17'b???????_000_1100011: if (a1 == a2) npc = pc + b_imm;
        17'b???????_001_1100011: if (a1 != a2) npc = pc + b_imm;
        17'b???????_100_1100011: if ($signed(a1) < $signed(a2)) npc = pc + b_imm;
        17'b???????_010_0000011: begin res = rmem[ea[8:2]]; wr = 1; end
        17'b???????_100_0000011: begin res = {24'b0, rmem[ea[8:2]][8*ea[1:0] +: 8]}; wr = 1; end
        17'b???????_101_0000011: begin res = {16'b0, rmem[ea[8:2]][16*ea[1] +: 16]}; wr = 1; end
        17'b???????_000_0100011: rmem[ea[8:2]][8*ea[1:0] +: 8] = a2[7:0];
        17'b???????_010_0100011: rmem[ea[8:2]] = a2;
        17'b???????_000_1110011: begin
          if (in == 32'h0000_0073)      begin trap = 1; cause = 11; end
          else if (in == 32'h0010_0073) begin trap = 1; cause = 3; end
          else if (in == 32'h3020_0073) begin npc = c_mepc; c_mie = c_mpie; c_mpie = 1; end
          else begin trap = 1; cause = 2; tval = in; end
        end
        17'b???????_0??_1110011, 17'b???????_1??_1110011: begin
          old  = csr_read(in[31:20]);
          opnd = in[14] ? {27'b0, in[19:15]} : a1;
          res = old; wr = 1;
          case (in[13:12])
            2'b01: csr_write(in[31:20], opnd);
            2'b10: if (in[19:15] != 0) csr_write(in[31:20], old | opnd);
            default: if (in[19:15] != 0) csr_write(in[31:20], old & ~opnd);
          endcase
        end
        default: begin trap = 1; cause = 2; tval = in; end
      endcase
      if (trap) begin
        c_mepc = pc; c_mcause = cause; c_mtval = tval; c_mpie = c_mie; c_mie = 0;
        npc = {c_mtvec[31:2], 2'b00};
        wr = 0;
      end
      if (wr && rd != 0) x[rd] = res;
      pc = npc;
      steps++;
    end
  endtask

  // ---------------- program ----------------
  Asm prog;
  int halt_word;

  task automatic build();
    Asm h;
    prog = new();
    prog.emit(addi(1, 0, 12'h200));
    prog.emit(csrrw(0, 12'h305, 1));
    prog.emit(lui(2, 20'h12345));
    prog.emit(addi(2, 2, 12'h678));
    prog.emit(addi(3, 0, -5));
    prog.emit(add(4, 2, 3));
    prog.emit(and_(5, 2, 3));
    prog.emit(or_(6, 2, 3));
    prog.emit(xori(7, 2, -1));
    prog.emit(andi(8, 2, 12'h0F0));
    prog.emit(slli(9, 2, 7));
    prog.emit(sltu(10, 3, 2));
    prog.emit(sltu(11, 2, 3));
    prog.emit(addi(12, 0, 12'h100));
    prog.emit(sw(2, 12, 0));
    prog.emit(sb(3, 12, 5));
    prog.emit(sb(2, 12, 6));
    prog.emit(lw(13, 12, 0));
    prog.emit(add(14, 13, 13));        // load-use
    prog.emit(lbu(15, 12, 5));
    prog.emit(lhu(16, 12, 6));
    prog.emit(lhu(17, 12, 2));
    prog.emit(addi(18, 0, 0));
    prog.emit(addi(19, 0, 10));
    prog.label("loop");
    prog.emit(add(18, 18, 19));
    prog.emit(addi(19, 19, -1));
    prog.br("bne", 19, 0, "loop");
    prog.br("blt", 3, 0, "neg");
    prog.emit(addi(20, 0, 111));
    prog.label("neg");
    prog.emit(addi(20, 0, 222));
    prog.br("beq", 20, 0, "bad");
    prog.br("blt", 0, 3, "bad");
    prog.br("jal", 21, 0, "fwd");
    prog.emit(addi(22, 0, 1));
    prog.label("fwd");
    prog.emit(csrrwi(23, 12'h340, 21));
    prog.emit(csrrsi(24, 12'h340, 2));
    prog.emit(csrrci(25, 12'h340, 1));
    prog.emit(csrrs(26, 12'h340, 0));
    prog.emit(addi(27, 0, 12'h00F));
    prog.emit(csrrc(0, 12'h340, 27));
    prog.emit(csrrw(28, 12'h340, 2));
    prog.emit(csrrs(29, 12'h340, 0));
    prog.emit(ecall());
    prog.emit(ebreak());
    prog.emit(32'h4000_0033);           // removed instruction
    prog.emit(csrrs(30, 12'h342, 0));
    prog.emit(csrrs(31, 12'h343, 0));
    prog.emit(csrrs(22, 12'h300, 0));   // mstatus after eret
    prog.emit(csrrs(5, 12'hB00, 0));    // mcycle
    for (int i = 0; i < 10; i++) prog.emit(addi(7, 7, 1));
    prog.emit(csrrs(6, 12'hB00, 0));
    prog.emit(xori(5, 5, -1));
    prog.emit(addi(5, 5, 1));
    prog.emit(add(6, 6, 5));            // cycle difference
    prog.emit(sw(6, 12, 12'h040));
    prog.emit(sw(18, 12, 4));
    prog.emit(sw(21, 12, 8));
    prog.emit(sw(7, 12, 12));
    prog.emit(addi(1, 0, 1));
    prog.emit(sw(1, 12, 12'h044));      // done
    prog.label("halt");
    halt_word = prog.words.size();
    prog.br("jal", 0, 0, "halt");
    prog.label("bad");
    prog.br("jal", 0, 0, "bad");
    prog.resolve();
    h = new();
    h.emit(lw(1, 12, 12'h048));
    h.emit(addi(1, 1, 1));
    h.emit(sw(1, 12, 12'h048));
    h.emit(csrrs(1, 12'h341, 0));
    h.emit(addi(1, 1, 4));
    h.emit(csrrw(0, 12'h341, 1));
    h.emit(mret());
    foreach (imem[i]) imem[i] = 32'h0;
    foreach (prog.words[i]) imem[i] = prog.words[i];
    foreach (h.words[i]) imem[128 + i] = h.words[i];
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit fast_mem);
    int n;
    fast = fast_mem;
    rst_n = 0;
    foreach (dmem[i]) dmem[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    n = 0;
    while (dmem[(12'h144) >> 2] == 0 && n < 20000) begin @(negedge clk); n++; end
    repeat (10) @(negedge clk);
    for (int r = 1; r < 32; r++) if (r != 5 && r != 6) begin
      checks++;
      if (dut.u_rf.regs[r] !== x[r]) begin
        failures++;
        $display("FAIL fast=%0b x%0d = %h expected %h", fast_mem, r, dut.u_rf.regs[r], x[r]);
      end
    end
    for (int i = 0; i < 128; i++) if (i != (12'h140 >> 2)) begin
      checks++;
      if (dmem[i] !== rmem[i]) begin
        failures++;
        $display("FAIL fast=%0b mem[%h] = %h expected %h", fast_mem, 4 * i, dmem[i], rmem[i]);
      end
    end
    $display("fast=%0b cycles=%0d ten-add block=%0d cycles", fast_mem, n, dmem[12'h140 >> 2]);
    if (fast_mem) begin
      checks++;
      if (dmem[12'h140 >> 2] != 11) begin failures++; $display("FAIL ten-add block took %0d", dmem[12'h140 >> 2]); end
    end
  endtask

  initial begin
    build();
    iss_run(halt_word);
    checks++;
    if (rmem[12'h148 >> 2] != 3) begin failures++; $display("FAIL reference trap count"); end
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
