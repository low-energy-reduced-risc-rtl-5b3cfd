// Tightly coupled memory (TCM): a word-wide synchronous RAM with byte write
// enables and two ports. Port A is the core's, reached through the AXI
// bridge; port B is the host port used to load the program into IMEM, the
// trained model and test input into DMEM, and to read results back. Each
// port's read data is registered: it appears the cycle after a read
// (en=1, we=0) and then holds until the next read on that port, which the
// AXI bridge relies on while an R response waits. If both ports write the
// same byte in one cycle, port B wins. Instantiated twice, as IMEM and DMEM.
// The 64 KiB default size is this design's assumption; the source gives none.
module tcm_ram #(
  parameter int unsigned BYTES = 65536,
  localparam int unsigned WORDS = BYTES / 4,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic [3:0]    a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [31:0]   a_wdata,
  output logic [31:0]   a_rdata,
  input  logic          b_en,
  input  logic [3:0]    b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_en) begin
      for (int i = 0; i < 4; i++)
        if (a_we[i]) mem[a_addr][8*i +: 8] <= a_wdata[8*i +: 8];
      if (a_we == 4'b0) a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      for (int i = 0; i < 4; i++)
        if (b_we[i]) mem[b_addr][8*i +: 8] <= b_wdata[8*i +: 8];
      if (b_we == 4'b0) b_rdata <= mem[b_addr];
    end
  end

endmodule
