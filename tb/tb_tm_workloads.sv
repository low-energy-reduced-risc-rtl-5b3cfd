// Workload test: Tsetlin-machine inference at the sizes of the six
// evaluated datasets (classes and Booleanized features of CIFAR-2, Statlog,
// Gesture, Gas, EMG and FMNIST) with 300 clauses per class, the largest
// configuration evaluated, on the full-size system. Smaller clause counts
// differ only in size. Both inference programs run: T2 (sparse literal
// indices) for every dataset and T1 (one include byte per literal) for
// every dataset. Trained models are not available, so each model is random
// (about a dozen included literals per clause, biased towards literals that
// are true for the input so that clauses fire); the predicted class and every
// class vote sum are compared with a reference computed here.
`timescale 1ns/1ps
module tb_tm_workloads;
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

  // Watchdog
  initial begin
    repeat (400_000_000) @(posedge clk);
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
      end while (rd == 0 && cycle - t0 < 200_000_000);
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
    //       classes clauses features  include% (of true literals x3)
    run_case(2,  300, 324, 1, 10);   // CIFAR-2
    run_case(4,  300, 360, 1, 10);   // Statlog
    run_case(5,  300, 180, 2, 10);   // Gesture
    run_case(6,  300, 128, 3, 10);   // Gas
    run_case(8,  300, 160, 2, 10);   // EMG
    run_case(10, 300, 784, 1, 10);   // FMNIST
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
