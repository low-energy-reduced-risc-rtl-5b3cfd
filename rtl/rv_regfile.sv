// Integer register file: 32 registers of 32 bits, x0 reads as zero. Two
// asynchronous read ports serve Decode, one synchronous write port serves
// Writeback. A write and a read of the same register in one cycle return the
// new value (write-to-read bypass), so Writeback needs no separate path into
// Decode. Registers are cleared at reset; the source does not say.
module rv_regfile
  import rv_pkg::*;
#(
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] raddr1,
  input  logic [$clog2(NREGS)-1:0] raddr2,
  output logic [XLEN-1:0]          rdata1,
  output logic [XLEN-1:0]          rdata2,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  logic [XLEN-1:0]          wdata
);

  logic [XLEN-1:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we && waddr != '0) begin
      regs[waddr] <= wdata;
    end
  end

  always_comb begin
    rdata1 = (raddr1 == '0) ? '0 : regs[raddr1];
    rdata2 = (raddr2 == '0) ? '0 : regs[raddr2];
    if (we && waddr != '0 && waddr == raddr1) rdata1 = wdata;
    if (we && waddr != '0 && waddr == raddr2) rdata2 = wdata;
  end

endmodule
