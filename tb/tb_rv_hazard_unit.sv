// Self-checking test of rv_hazard_unit: random stage contents; forwarding
// selects (Memory before Writeback, never for x0) and the load-use stall are
// compared with a reference written here.
`timescale 1ns/1ps
module tb_rv_hazard_unit;
  import rv_pkg::*;

  logic [4:0] ex_rs1, ex_rs2, mem_rd, wb_rd, ex_rd, id_rs1, id_rs2;
  logic       mem_valid, mem_rd_we, wb_valid, wb_rd_we, ex_valid, ex_is_load;
  logic       id_valid, id_use_rs1, id_use_rs2, load_use_stall;
  fwd_e       fwd_a, fwd_b;
  int         checks = 0, failures = 0;

  rv_hazard_unit dut (.*);

  function automatic fwd_e ref_sel(logic [4:0] rs);
    if (rs == 0) return FWD_NONE;
    if (mem_valid && mem_rd_we && mem_rd == rs) return FWD_MEM;
    if (wb_valid && wb_rd_we && wb_rd == rs) return FWD_WB;
    return FWD_NONE;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_mem = 0, n_wb = 0, n_stall = 0;
    repeat (5000) begin
      logic exp_stall;
      // small register range so that matches are frequent
      ex_rs1 = 5'($urandom_range(3)); ex_rs2 = 5'($urandom_range(3));
      mem_rd = 5'($urandom_range(3)); wb_rd  = 5'($urandom_range(3));
      ex_rd  = 5'($urandom_range(3)); id_rs1 = 5'($urandom_range(3)); id_rs2 = 5'($urandom_range(3));
      {mem_valid, mem_rd_we, wb_valid, wb_rd_we, ex_valid, ex_is_load, id_valid, id_use_rs1, id_use_rs2} = 9'($urandom);
      #1;
      exp_stall = ex_valid && ex_is_load && ex_rd != 0 && id_valid &&
                  ((id_use_rs1 && id_rs1 == ex_rd) || (id_use_rs2 && id_rs2 == ex_rd));
      checks += 3;
      if (fwd_a !== ref_sel(ex_rs1)) begin failures++; $display("FAIL fwd_a"); end
      if (fwd_b !== ref_sel(ex_rs2)) begin failures++; $display("FAIL fwd_b"); end
      if (load_use_stall !== exp_stall) begin failures++; $display("FAIL stall"); end
      n_mem += int'(fwd_a == FWD_MEM); n_wb += int'(fwd_a == FWD_WB); n_stall += int'(exp_stall);
    end
    checks++;
    if (n_mem == 0 || n_wb == 0 || n_stall == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
