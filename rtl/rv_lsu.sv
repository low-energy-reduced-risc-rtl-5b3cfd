// Load/store unit: the Memory stage of the reduced core. It serves the five
// memory instructions that remain (lw, lbu, lhu, sb, sw) over an AXI4-Lite
// master to the data TCM. A load offers AR with the word-aligned address and
// waits for R; a store offers AW and W together (strobes select the byte for
// sb) and waits for B. While the transaction is outstanding the unit holds
// the whole pipeline with `stall`; in the cycle the response arrives stall
// drops and, for a load, load_data carries the selected byte or halfword,
// zero-extended (lbu, lhu) or the whole word (lw). With a TCM that answers
// one cycle after the request every memory instruction spends two cycles in
// this stage. Blocking access, aligned-lane handling without misalignment
// traps, and ignoring error responses are this design's choices; the source
// does not describe the stage.
module rv_lsu
  import rv_pkg::*;
  import axil_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // Memory-stage instruction
  input  logic            valid,
  input  mem_op_e         mem_op,
  input  logic [XLEN-1:0] addr,
  input  logic [XLEN-1:0] store_data,
  output logic            stall,
  output logic [XLEN-1:0] load_data,
  // AXI4-Lite master to DMEM
  output ax_t             ar,
  input  logic            ar_ready,
  input  r_t              r,
  output logic            r_ready,
  output ax_t             aw,
  input  logic            aw_ready,
  output w_t              w,
  input  logic            w_ready,
  input  b_t              b,
  output logic            b_ready
);

  logic ld, st, issued_q, aw_done_q, w_done_q, done;
  logic aw_ok, w_ok;
  logic [XLEN-1:0] word_addr;
  logic [7:0]      byte_sel;
  logic [15:0]     half_sel;

  assign ld        = valid & is_load(mem_op);
  assign st        = valid & is_store(mem_op);
  assign word_addr = {addr[XLEN-1:2], 2'b00};

  assign ar.valid = ld & ~issued_q;
  assign ar.addr  = word_addr;
  assign aw.valid = st & ~issued_q & ~aw_done_q;
  assign aw.addr  = word_addr;
  assign w.valid  = st & ~issued_q & ~w_done_q;
  assign w.data   = (mem_op == MEM_SB) ? {4{store_data[7:0]}} : store_data;
  assign w.strb   = (mem_op == MEM_SB) ? (4'b0001 << addr[1:0]) : 4'b1111;

  assign r_ready = ld & issued_q;
  assign b_ready = st & issued_q;

  assign done  = (r.valid & r_ready) | (b.valid & b_ready);
  assign stall = (ld | st) & ~done;

  assign aw_ok = aw_done_q | (aw.valid & aw_ready);
  assign w_ok  = w_done_q  | (w.valid & w_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issued_q  <= 1'b0;
      aw_done_q <= 1'b0;
      w_done_q  <= 1'b0;
    end else if (done) begin
      issued_q  <= 1'b0;
      aw_done_q <= 1'b0;
      w_done_q  <= 1'b0;
    end else if (ld && ar.valid && ar_ready) begin
      issued_q <= 1'b1;
    end else if (st && !issued_q) begin
      if (aw_ok && w_ok) begin
        issued_q  <= 1'b1;
        aw_done_q <= 1'b0;
        w_done_q  <= 1'b0;
      end else begin
        aw_done_q <= aw_ok;
        w_done_q  <= w_ok;
      end
    end
  end

  assign byte_sel = r.data[8*addr[1:0] +: 8];
  assign half_sel = addr[1] ? r.data[31:16] : r.data[15:0];

  always_comb begin
    unique case (mem_op)
      MEM_LBU: load_data = {24'b0, byte_sel};
      MEM_LHU: load_data = {16'b0, half_sel};
      default: load_data = r.data;
    endcase
  end

  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ar.valid && !ar_ready |=> ar.valid && $stable(ar.addr));
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    aw.valid && !aw_ready |=> aw.valid && $stable(aw.addr));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    w.valid && !w_ready |=> w.valid && $stable(w.data) && $stable(w.strb));

endmodule
