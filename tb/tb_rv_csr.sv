// Self-checking test of rv_csr: a random stream of CSR reads and
// read-modify-writes (all three operations, with and without a zero source),
// traps, eret, retirements and idle cycles, with every read value and the
// trap and return targets compared each cycle against a reference model of
// the machine-mode register set kept here.
`timescale 1ns/1ps
module tb_rv_csr;
  import rv_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        ex_fire = 0, csr_src_zero = 0, trap = 0, mret = 0, retire = 0;
  csr_op_e     csr_op = CSR_NONE;
  logic [11:0] csr_addr = 0;
  logic [31:0] csr_operand = 0, csr_rdata, trap_cause = 0, trap_pc = 0, trap_tval = 0;
  logic [31:0] trap_vector, epc;
  int          checks = 0, failures = 0;

  rv_csr dut (.*);

  always #5 clk = ~clk;

  // Reference state
  logic        mie, mpie;
  logic [31:0] mtvec, mscratch, mepc, mcause, mtval, mcycle, minstret;

  function automatic logic [31:0] rd_model(logic [11:0] a);
    case (a)
      CSR_MSTATUS:  return {19'b0, 2'b11, 3'b0, mpie, 3'b0, mie, 3'b0};
      CSR_MISA:     return MISA_VALUE;
      CSR_MTVEC:    return mtvec;
      CSR_MSCRATCH: return mscratch;
      CSR_MEPC:     return mepc;
      CSR_MCAUSE:   return mcause;
      CSR_MTVAL:    return mtval;
      CSR_MCYCLE:   return mcycle;
      CSR_MINSTRET: return minstret;
      default:      return 32'h0;
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [11:0] addrs[11] = '{CSR_MSTATUS, CSR_MISA, CSR_MTVEC, CSR_MSCRATCH, CSR_MEPC, CSR_MCAUSE,
                               CSR_MTVAL, CSR_MCYCLE, CSR_MINSTRET, 12'h7C0, 12'hF14};
    int n_trap = 0, n_mret = 0, n_wr = 0;
    {mie, mpie} = '0;
    {mtvec, mscratch, mepc, mcause, mtval, mcycle, minstret} = '0;
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    mcycle = 1;  // one clock edge passes before the first stimulus
    repeat (5000) begin
      int kind;
      logic [31:0] old, nv;
      logic        wen;
      @(negedge clk);
      kind         = $urandom_range(9);
      ex_fire      = ($urandom_range(4) != 0);
      csr_addr     = addrs[$urandom_range(10)];
      csr_operand  = $urandom;
      csr_src_zero = ($urandom_range(3) == 0);
      csr_op       = (kind < 6) ? csr_op_e'($urandom_range(1, 3)) : CSR_NONE;
      trap         = (kind == 6);
      mret         = (kind == 7);
      trap_cause   = $urandom_range(11);
      trap_pc      = {$urandom, 2'b00};
      trap_tval    = $urandom;
      retire       = $urandom_range(1);
      #1;
      old = rd_model(csr_addr);
      checks += 3;
      if (csr_rdata !== old) begin failures++; $display("FAIL read %h: %h != %h", csr_addr, csr_rdata, old); end
      if (trap_vector !== {mtvec[31:2], 2'b00}) begin failures++; $display("FAIL mtvec out"); end
      if (epc !== mepc) begin failures++; $display("FAIL mepc out"); end
      case (csr_op)
        CSR_RW:  nv = csr_operand;
        CSR_RS:  nv = old | csr_operand;
        CSR_RC:  nv = old & ~csr_operand;
        default: nv = old;
      endcase
      wen = ex_fire && (csr_op == CSR_RW || (csr_op != CSR_NONE && !csr_src_zero));
      @(posedge clk);
      mcycle = mcycle + 1;
      if (retire) minstret = minstret + 1;
      if (ex_fire && trap) begin
        mepc = trap_pc; mcause = trap_cause; mtval = trap_tval; mpie = mie; mie = 0; n_trap++;
      end else if (ex_fire && mret) begin
        mie = mpie; mpie = 1; n_mret++;
      end else if (wen) begin
        n_wr++;
        case (csr_addr)
          CSR_MSTATUS:  begin mie = nv[3]; mpie = nv[7]; end
          CSR_MTVEC:    mtvec = nv;
          CSR_MSCRATCH: mscratch = nv;
          CSR_MEPC:     mepc = {nv[31:2], 2'b00};
          CSR_MCAUSE:   mcause = nv;
          CSR_MTVAL:    mtval = nv;
          CSR_MCYCLE:   mcycle = nv;
          CSR_MINSTRET: minstret = nv;
          default: ;
        endcase
      end
    end
    checks++;
    if (n_trap == 0 || n_mret == 0 || n_wr == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
