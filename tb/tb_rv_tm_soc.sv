// End-to-end test of the reduced RV32 system at its default sizes: it loads
// a Tsetlin-machine inference program into IMEM and a random multiclass TM
// model plus a Booleanized input into DMEM through the host ports, releases
// reset, waits for the program's done flag and compares the predicted class,
// every class vote sum, the trap count and the last mcause with a reference
// model computed here. Both inference strategies run on the same model:
// T1 (every literal's include flag checked) and T2 (only the indices of
// included literals stored). The program also executes a removed
// instruction (illegal-instruction trap), ebreak and ecall, each returning
// through eret. Pipeline mechanisms (forwarding from Memory and from
// Writeback, load-use stall, memory wait, taken branch/jump flush, trap,
// eret, CSR write) are counted, and one that never happens
// is a failure. Clock period 12 ns.
`timescale 1ns/1ps
module tb_rv_tm_soc;
  import rv_pkg::*;
  import tm_asm::*;

  localparam int IAW = 14;
  localparam int DAW = 21;

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           imem_host_en = 1'b0;
  logic [3:0]     imem_host_we = '0;
  logic [IAW-1:0] imem_host_addr = '0;
  logic [31:0]    imem_host_wdata = '0;
  logic [31:0]    imem_host_rdata;
  logic           dmem_host_en = 1'b0;
  logic [3:0]     dmem_host_we = '0;
  logic [DAW-1:0] dmem_host_addr = '0;
  logic [31:0]    dmem_host_wdata = '0;
  logic [31:0]    dmem_host_rdata;

  rv_tm_soc dut (.*);

  always #6 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------------------------------------------------------
  // Mechanism counters
  // ---------------------------------------------------------------
  int n_fwd_mem = 0, n_fwd_wb = 0, n_load_use = 0, n_mem_wait = 0, n_flush = 0, n_trap = 0, n_mret = 0,
      n_csr_wr = 0, n_drop = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.idex_valid && (dut.u_core.fwd_a == FWD_MEM || dut.u_core.fwd_b == FWD_MEM)) n_fwd_mem++;
    if (dut.u_core.idex_valid && (dut.u_core.fwd_a == FWD_WB  || dut.u_core.fwd_b == FWD_WB))  n_fwd_wb++;
    if (dut.u_core.load_use_stall && !dut.u_core.mem_stall) n_load_use++;
    if (dut.u_core.mem_stall) n_mem_wait++;
    if (dut.u_core.redirect && dut.u_core.br_taken && !dut.u_core.ex_trap) n_flush++;
    if (dut.u_core.ex_fire && dut.u_core.ex_trap) n_trap++;
    if (dut.u_core.ex_fire && dut.u_core.ex_mret) n_mret++;
    if (dut.u_core.u_csr.wen) n_csr_wr++;
    if (dut.u_core.u_fetch.drop_q && dut.u_core.u_fetch.r_fire) n_drop++;
  end

  // Watchdog
  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------
  // Host-port access
  // ---------------------------------------------------------------
  task automatic imem_write(int widx, logic [31:0] data);
    @(negedge clk);
    imem_host_en = 1'b1; imem_host_we = 4'hF; imem_host_addr = IAW'(widx); imem_host_wdata = data;
    @(negedge clk);
    imem_host_en = 1'b0; imem_host_we = '0;
  endtask

  task automatic dmem_write(int widx, logic [31:0] data);
    @(negedge clk);
    dmem_host_en = 1'b1; dmem_host_we = 4'hF; dmem_host_addr = DAW'(widx); dmem_host_wdata = data;
    @(negedge clk);
    dmem_host_en = 1'b0; dmem_host_we = '0;
  endtask

  task automatic dmem_read(int widx, output logic [31:0] data);
    @(negedge clk);
    dmem_host_en = 1'b1; dmem_host_we = '0; dmem_host_addr = DAW'(widx);
    @(negedge clk);
    dmem_host_en = 1'b0;
    data = dmem_host_rdata;
  endtask

  // ---------------------------------------------------------------
  // One inference: random model, both strategies
  // ---------------------------------------------------------------
  task automatic run_case(int m, int n, int f, int pct_inc, int pct_empty);
    int          l = 2 * f;
    bit          lit[];
    bit          inc[];
    int          cnt[];
    int          votes_ref[];
    int          best_ref;
    logic [7:0]  img[];
    int          top;
    logic [31:0] rd;

    lit = new[l];
    inc = new[m * n * l];
    cnt = new[m * n];
    votes_ref = new[m];
    for (int k = 0; k < f; k++) begin
      lit[k]     = 1'($urandom_range(1));
      lit[f + k] = ~lit[k];
    end
    foreach (cnt[c]) begin
      bit keep = ($urandom_range(99) >= pct_empty);
      cnt[c] = 0;
      for (int k = 0; k < l; k++) begin
        // Includes favour literals that are true for this input, so that
        // some clauses fire; a share of clauses is left empty
        inc[c * l + k] = ($urandom_range(99) < (lit[k] ? 3 * pct_inc : pct_inc / 4)) &&
                         keep;
        cnt[c] += int'(inc[c * l + k]);
      end
    end
    // Reference (Algorithms 1 and 2 give the same result)
    best_ref = 0;
    for (int i = 0; i < m; i++) begin
      votes_ref[i] = n;
      for (int j = 0; j < n; j++) begin
        bit out = (cnt[i * n + j] > 0);
        for (int k = 0; k < l; k++)
          if (inc[(i * n + j) * l + k] && !lit[k]) out = 1'b0;
        if (out) votes_ref[i] += (j < n / 2) ? 1 : -1;
      end
      if (votes_ref[i] > votes_ref[best_ref]) best_ref = i;
    end

    for (int t2 = 0; t2 < 2; t2++) begin
      Asm prog = new();
      Asm hnd  = new();
      longint t0;
      build_tm(prog, t2 == 1);
      build_handler(hnd);

      // Data image
      img = new[4096 + m * n * (l + 1) * 2 + 8];
      foreach (img[b]) img[b] = 8'h00;
      {img[3], img[2], img[1], img[0]}     = 32'(m);
      {img[7], img[6], img[5], img[4]}     = 32'(n);
      {img[11], img[10], img[9], img[8]}   = 32'(n / 2);
      {img[15], img[14], img[13], img[12]} = 32'(l);
      for (int k = 0; k < l; k++) img[12'h200 + k] = 8'(lit[k]);
      top = 32'h1000;
      for (int c = 0; c < m * n; c++) begin
        if (t2 == 1) begin
          {img[top + 1], img[top]} = 16'(cnt[c]);
          top += 2;
          for (int k = 0; k < l; k++) if (inc[c * l + k]) begin
            {img[top + 1], img[top]} = 16'(k);
            top += 2;
          end
        end else begin
          img[top] = 8'(cnt[c] > 0);
          top += 1;
          for (int k = 0; k < l; k++) img[top + k] = 8'(inc[c * l + k]);
          top += l;
        end
      end

      rst_n = 1'b0;
      foreach (prog.words[w]) imem_write(w, prog.words[w]);
      foreach (hnd.words[w])  imem_write(HANDLER_WORD + w, hnd.words[w]);
      for (int w = 0; w < (top + 3) / 4; w++)
        dmem_write(w, {img[4 * w + 3], img[4 * w + 2], img[4 * w + 1], img[4 * w]});
      @(negedge clk);
      rst_n = 1'b1;
      t0 = cycle;
      do begin
        repeat (200) @(posedge clk);
        dmem_read(5, rd);
      end while (rd == 0 && cycle - t0 < 4_000_000);
      check(rd != 0, "program did not finish");

      dmem_read(4, rd);
      check(rd == 32'(best_ref), $sformatf("T%0d m=%0d n=%0d f=%0d class %0d expected %0d",
                                           t2 + 1, m, n, f, rd, best_ref));
      for (int i = 0; i < m; i++) begin
        dmem_read(16 + i, rd);
        check($signed(rd) == votes_ref[i], $sformatf("T%0d class %0d votes %0d expected %0d",
                                                     t2 + 1, i, $signed(rd), votes_ref[i]));
      end
      dmem_read(6, rd);
      check(rd == 3, $sformatf("trap count %0d expected 3", rd));
      dmem_read(7, rd);
      check(rd == CAUSE_ECALL_M, $sformatf("last mcause %0d expected 11", rd));
      dmem_read(8, rd);
      check(rd > 0 && longint'(rd) <= cycle - t0, "mcycle plausible");
      $display("T%0d classes=%0d clauses=%0d features=%0d model=%0d B predicted=%0d cycles~%0d",
               t2 + 1, m, n, f, top - 32'h1000, best_ref, rd);
    end
  endtask

  initial begin
    repeat (4) @(negedge clk);
    run_case(3, 8, 16, 20, 30);
    run_case(6, 50, 128, 4, 20);   // Gas dataset shape, 50 clauses per class
    check(n_fwd_mem  > 0, "forwarding from Memory never happened");
    check(n_fwd_wb   > 0, "forwarding from Writeback never happened");
    check(n_load_use > 0, "load-use stall never happened");
    check(n_mem_wait > 0, "memory wait never happened");
    check(n_flush    > 0, "branch/jump flush never happened");
    check(n_trap     > 0, "trap never happened");
    check(n_mret     > 0, "eret never happened");
    check(n_csr_wr   > 0, "CSR write never happened");
    $display("mechanisms: fwd_mem=%0d fwd_wb=%0d load_use=%0d mem_wait=%0d flush=%0d trap=%0d eret=%0d csr_wr=%0d drop=%0d (a squashed fetch needs a slower IMEM)",
             n_fwd_mem, n_fwd_wb, n_load_use, n_mem_wait, n_flush, n_trap, n_mret, n_csr_wr, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
