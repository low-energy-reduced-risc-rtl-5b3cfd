// AXI4-Lite slave in front of a synchronous single-port memory port (the
// "AXI" block between the core and its tightly coupled memories). Each
// accepted read drives one memory read; the memory's registered output is
// returned on R in the next cycle and held there until the master takes it.
// Each write is accepted when AW and W are both valid and the B slot is free
// (or being emptied), is written in that cycle with W's byte strobes and is
// acknowledged on B in the next cycle. A read and a write offered in the same
// cycle are served read first. A new read is accepted in the cycle the
// previous R is taken, so back-to-back reads run at one per cycle.
// Responses are always OKAY; addresses wrap modulo the memory size. All of
// this is the design's own choice: the source names only "AXI".
module axil_sram_bridge
  import axil_pkg::*;
#(
  parameter int unsigned WORDS = 16384
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ax_t                      ar,
  output logic                     ar_ready,
  output r_t                       r,
  input  logic                     r_ready,
  input  ax_t                      aw,
  output logic                     aw_ready,
  input  w_t                       w,
  output logic                     w_ready,
  output b_t                       b,
  input  logic                     b_ready,
  // Memory port (read data valid the cycle after a read)
  output logic                     mem_en,
  output logic [STRB_W-1:0]        mem_we,
  output logic [$clog2(WORDS)-1:0] mem_addr,
  output logic [DATA_W-1:0]        mem_wdata,
  input  logic [DATA_W-1:0]        mem_rdata
);

  localparam int unsigned AW = $clog2(WORDS);

  logic r_pend_q, b_pend_q, ar_fire, wr_ok;

  assign ar_ready = ~r_pend_q | r_ready;
  assign ar_fire  = ar.valid & ar_ready;
  assign wr_ok    = aw.valid & w.valid & (~b_pend_q | b_ready) & ~ar_fire;
  assign aw_ready = wr_ok;
  assign w_ready  = wr_ok;

  // A write with no strobe set touches nothing; it must not look like a read
  assign mem_en    = ar_fire | (wr_ok & |w.strb);
  assign mem_we    = wr_ok ? w.strb : '0;
  assign mem_addr  = ar_fire ? ar.addr[AW+1:2] : aw.addr[AW+1:2];
  assign mem_wdata = w.data;

  assign r.valid = r_pend_q;
  assign r.data  = mem_rdata;
  assign r.resp  = RESP_OKAY;
  assign b.valid = b_pend_q;
  assign b.resp  = RESP_OKAY;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_pend_q <= 1'b0;
      b_pend_q <= 1'b0;
    end else begin
      r_pend_q <= ar_fire | (r_pend_q & ~r_ready);
      b_pend_q <= wr_ok   | (b_pend_q & ~b_ready);
    end
  end

  // Handshake rules the masters must keep
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ar.valid && !ar_ready |=> ar.valid && $stable(ar.addr));
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    aw.valid && !aw_ready |=> aw.valid && $stable(aw.addr));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    w.valid && !w_ready |=> w.valid && $stable(w.data));

endmodule
