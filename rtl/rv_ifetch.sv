// Fetch stage of the reduced core. It owns the program counter and reads
// instructions over an AXI4-Lite read-only master (AR/R) from the
// instruction TCM. One read is in flight at a time, but the next address is
// issued in the same cycle the previous response is taken, so with a memory
// that answers one cycle after AR the stage delivers one instruction per
// cycle. The R channel's data register is the Fetch/Decode pipeline
// register: Decode uses out_instr directly and back-pressures with
// out_ready (R is simply not taken while Decode stalls).
//
// A redirect (taken branch, jal, trap or eret, from Execute) restarts fetch
// at redirect_pc. The response of a read issued on the old path is still
// taken from the bus but marked stale and discarded; an AR that was offered
// but not yet accepted keeps its address, as AXI requires, and its response
// is discarded as well. The first read is issued one cycle after reset is
// released. Sequential-fetch and redirect rules are this
// design's own; the source says only that the core has a Fetch stage.
module rv_ifetch
  import rv_pkg::*;
  import axil_pkg::*;
#(
  parameter logic [XLEN-1:0] RESET_PC = '0
) (
  input  logic            clk,
  input  logic            rst_n,
  // AXI4-Lite read channels to IMEM
  output ax_t             ar,
  input  logic            ar_ready,
  input  r_t              r,
  output logic            r_ready,
  // Redirect from Execute
  input  logic            redirect,
  input  logic [XLEN-1:0] redirect_pc,
  // To Decode
  output logic            out_valid,
  output logic [XLEN-1:0] out_pc,
  output logic [31:0]     out_instr,
  input  logic            out_ready
);

  logic [XLEN-1:0] pc_q, inflight_pc_q, ar_addr_q, fetch_addr;
  logic            busy_q, drop_q, ar_hold_q, hold_stale_q, run_q;
  logic            r_fire, ar_fire, slot_free;

  assign r_ready   = busy_q & (drop_q | out_ready | redirect);
  assign r_fire    = r.valid & r_ready;
  assign slot_free = ~busy_q | r_fire;

  assign fetch_addr = redirect ? redirect_pc : pc_q;
  // run_q keeps AR low while reset is applied, as AXI requires
  assign ar.valid   = ar_hold_q | (slot_free & run_q);
  assign ar.addr    = ar_hold_q ? ar_addr_q : fetch_addr;
  assign ar_fire    = ar.valid & ar_ready;

  assign out_valid = busy_q & r.valid & ~drop_q;
  assign out_pc    = inflight_pc_q;
  assign out_instr = r.data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc_q          <= RESET_PC;
      inflight_pc_q <= RESET_PC;
      ar_addr_q     <= RESET_PC;
      busy_q        <= 1'b0;
      drop_q        <= 1'b0;
      ar_hold_q     <= 1'b0;
      hold_stale_q  <= 1'b0;
      run_q         <= 1'b0;
    end else begin
      run_q <= 1'b1;
      // Response side
      if (r_fire) begin
        busy_q <= 1'b0;
        drop_q <= 1'b0;
      end
      if (redirect && busy_q && !r_fire) drop_q <= 1'b1;

      // Request side
      if (ar_fire) begin
        busy_q        <= 1'b1;
        inflight_pc_q <= ar.addr;
        drop_q        <= ar_hold_q & (hold_stale_q | redirect);
        ar_hold_q     <= 1'b0;
        hold_stale_q  <= 1'b0;
      end else if (ar.valid) begin
        if (!ar_hold_q) begin
          ar_hold_q    <= 1'b1;
          ar_addr_q    <= ar.addr;
          hold_stale_q <= 1'b0;
        end else if (redirect) begin
          hold_stale_q <= 1'b1;
        end
      end

      // Next sequential address
      if (!ar_hold_q && ar.valid) pc_q <= fetch_addr + 32'd4;
      else if (redirect)          pc_q <= redirect_pc;
    end
  end

  // The address of an offered read must stay put until it is accepted
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ar.valid && !ar_ready |=> ar.valid && $stable(ar.addr));

endmodule
