// Workload test for the binarized-network comparison: a two-layer binary
// MLP (input bits -> 32 hidden neurons with a popcount threshold -> one
// xnor-popcount score per class, argmax) at the input width and class count
// of each of the six evaluated datasets, on the full-size system. The
// network shape beyond the dataset sizes is this testbench's choice (the
// trained networks are not available), and the weights and input are
// random. The predicted class, every class score and the hidden word are
// compared with a reference computed here; the program's final ecall must
// have been taken.
`timescale 1ns/1ps
module tb_bnn_workloads;
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
    repeat (50_000_000) @(posedge clk);
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
  // One inference on a random network
  // ---------------------------------------------------------------
  task automatic run_case(int m, int f, int h);
    int          nw = (f + 31) / 32;       // input words, padding bits zero
    logic [31:0] x[];
    logic [31:0] wh[];
    logic [31:0] wo[];
    logic [31:0] hid;
    int          score[];
    int          best_ref;
    int          thr;
    Asm          prog = new();
    Asm          hnd  = new();
    longint      t0;
    logic [31:0] rd;

    x = new[nw];
    wh = new[h * nw];
    wo = new[m];
    score = new[m];
    foreach (x[w]) x[w] = (w == nw - 1 && f % 32 != 0) ? ($urandom & ((32'h1 << (f % 32)) - 1)) : $urandom;
    foreach (wh[w]) wh[w] = ((w % nw) == nw - 1 && f % 32 != 0) ? ($urandom & ((32'h1 << (f % 32)) - 1)) : $urandom;
    foreach (wo[w]) wo[w] = $urandom;
    thr = nw * 16;
    hid = '0;
    for (int j = 0; j < h; j++) begin
      int cnt = 0;
      for (int w = 0; w < nw; w++) cnt += $countones(~(x[w] ^ wh[j * nw + w]));
      if (cnt >= thr) hid[j] = 1'b1;
    end
    best_ref = 0;
    for (int i = 0; i < m; i++) begin
      score[i] = $countones(~(hid ^ wo[i]));
      if (score[i] > score[best_ref]) best_ref = i;
    end

    build_bnn(prog);
    build_handler(hnd);
    rst_n = 1'b0;
    foreach (prog.words[w]) imem_write(w, prog.words[w]);
    foreach (hnd.words[w])  imem_write(HANDLER_WORD + w, hnd.words[w]);
    for (int w = 0; w < 32; w++) dmem_write(w, '0);
    dmem_write(0, 32'(nw));
    dmem_write(1, 32'(h));
    dmem_write(2, 32'(m));
    dmem_write(3, 32'(thr));
    foreach (x[w])  dmem_write(128 + w, x[w]);
    foreach (wh[w]) dmem_write(1024 + w, wh[w]);
    foreach (wo[w]) dmem_write(1024 + h * nw + w, wo[w]);
    @(negedge clk);
    rst_n = 1'b1;
    t0 = cycle;
    do begin
      repeat (200) @(posedge clk);
      dmem_read(5, rd);
    end while (rd == 0 && cycle - t0 < 20_000_000);
    check(rd != 0, "program did not finish");

    dmem_read(256, rd);
    check(rd == hid, $sformatf("m=%0d f=%0d hidden %h expected %h", m, f, rd, hid));
    dmem_read(4, rd);
    check(rd == 32'(best_ref), $sformatf("m=%0d f=%0d class %0d expected %0d", m, f, rd, best_ref));
    for (int i = 0; i < m; i++) begin
      dmem_read(16 + i, rd);
      check(rd == 32'(score[i]), $sformatf("class %0d score %0d expected %0d", i, rd, score[i]));
    end
    dmem_read(6, rd);
    check(rd == 1, $sformatf("trap count %0d expected 1", rd));
    dmem_read(7, rd);
    check(rd == CAUSE_ECALL_M, $sformatf("last mcause %0d expected 11", rd));
    dmem_read(8, rd);
    check(rd > 0 && longint'(rd) <= cycle - t0, "mcycle plausible");
    $display("BNN classes=%0d inputs=%0d hidden=%0d weights=%0d B predicted=%0d cycles~%0d",
             m, f, h, 4 * (h * nw + m), best_ref, rd);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    //       classes features hidden
    run_case(2,  324, 32);   // CIFAR-2
    run_case(4,  360, 32);   // Statlog
    run_case(5,  180, 32);   // Gesture
    run_case(6,  128, 32);   // Gas
    run_case(8,  160, 32);   // EMG
    run_case(10, 784, 32);   // FMNIST
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
